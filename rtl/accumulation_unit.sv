// accumulation_unit: partial-sum addition of the address-centric dataflow
// (line 9 of the Uni-conv loop nest: OA[l_out][c_out] += Psum[l_in][c_out]).
//
// Each cycle the systolic array delivers a vector of H partial sums for one
// input position together with the output address l_out produced by the
// address generator and the detector's in_range flag. The unit reads the
// previous H partial sums at l_out from the accumulation bank of the output
// buffer, adds the new vector with H fp16 adders and writes the sum back. A
// vector whose flag is clear (an edge position with no output) is dropped
// without touching the buffer. With init set the vector is written directly,
// which starts a new accumulation without a separate clearing pass.
//
// Timing: two-stage pipeline, one vector per cycle. Cycle 0 issues the read;
// cycle 1 adds and writes. A read that hits the address being written in the
// same cycle takes the write data (forwarding). Every written vector is also
// presented on res_valid/res_vec for the vector processing unit's NCA stage,
// and skip pulses for each dropped vector.
// The read-add-write behaviour and the edge flag follow the design
// description; init-by-overwrite and forwarding are this implementation's
// choices.
module accumulation_unit
  import sdacc_pkg::*;
#(
  parameter int unsigned H  = 32,
  parameter int unsigned AW = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  fp16_t         in_vec [H],
  input  logic [AW-1:0] in_addr,
  input  logic          in_range,
  input  logic          init,
  // accumulation bank of the output buffer
  output logic          ob_re,
  output logic [AW-1:0] ob_raddr,
  input  fp16_t         ob_rdata [H],
  output logic          ob_we,
  output logic [AW-1:0] ob_waddr,
  output fp16_t         ob_wdata [H],
  // result stream
  output logic          res_valid,
  output fp16_t         res_vec [H],
  output logic          skip
);
  logic          s1_valid, s1_init, s1_fwd;
  logic [AW-1:0] s1_addr;
  fp16_t         s1_vec [H];
  fp16_t         s1_fwd_data [H];
  fp16_t         sum [H];
  fp16_t         old_v [H];

  assign ob_re    = in_valid && in_range && !init;
  assign ob_raddr = in_addr;
  assign skip     = in_valid && !in_range;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_init  <= 1'b0;
      s1_fwd   <= 1'b0;
      s1_addr  <= '0;
      for (int i = 0; i < H; i++) begin
        s1_vec[i]      <= FP16_ZERO;
        s1_fwd_data[i] <= FP16_ZERO;
      end
    end else begin
      s1_valid    <= in_valid && in_range;
      s1_init     <= init;
      s1_addr     <= in_addr;
      s1_vec      <= in_vec;
      s1_fwd      <= ob_we && (ob_waddr == in_addr);
      s1_fwd_data <= ob_wdata;
    end
  end

  // one adder per lane; its old-value operand comes from the buffer or,
  // for a back-to-back update of the same address, from the forwarding path
  always_comb begin
    for (int i = 0; i < H; i++) begin
      old_v[i] = s1_fwd ? s1_fwd_data[i] : ob_rdata[i];
      sum[i]   = s1_init ? s1_vec[i] : fp16_add(old_v[i], s1_vec[i]);
    end
  end

  assign ob_we     = s1_valid;
  assign ob_waddr  = s1_addr;
  assign ob_wdata  = sum;
  assign res_valid = s1_valid;
  assign res_vec   = sum;
endmodule
