// weight_buffer: on-chip buffer of the 1x1 kernels of a Uni-conv operation.
//
// Weights are stored as (F, C_out, C_in) with F = R*S kernel positions. Word
// f*W + c holds the column Wt[f][0..H-1][c], i.e. one weight for every row of
// the systolic array, which is the unit shifted into the array per cycle. One
// write port, one read port with one cycle of read latency.
// The (F, C_out, C_in) order follows the design description; the
// column-per-word organisation and the depth (nine 32x32 kernels, enough for
// one 3x3 tile) are this implementation's choices.
module weight_buffer
  import sdacc_pkg::*;
#(
  parameter int unsigned H     = 32,
  parameter int unsigned DEPTH = 9 * 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fp16_t         wdata [H],
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output fp16_t         rdata [H]
);
  fp16_t mem [DEPTH][H];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
