// vpu_lane: one row of the reconfigurable arithmetic and special function
// array of the vector processing unit (VPU).
//
// The VPU is H-parallel; each lane handles one softmax or layernorm sequence
// (one row of the systolic array's output or operand stream) on its own. The
// work of a nonlinear operator is split into two stages that ride on data
// streams the array produces or consumes anyway:
//
//  NCA (numerical characteristic acquisition), on the result-write stream:
//   softmax: a comparator tracks the latest maximum of the stream. Elements
//     are held in a FIFO of TILE entries. When a tile has been stored
//     completely, the running maximum is frozen as new_max for that tile; as
//     the FIFO then streams the tile out (while the next tile fills it),
//     each element x gives exp(x - new_max), accumulated in a register that is
//     loaded, not added, on the first element of a tile. At the end of each
//     tile the lane hands (ES_n, new_max) to the shared ALU, which folds it
//     into the running exp_sum: ES <- ES*exp(prev_max - new_max) + ES_n.
//   layernorm: two adders accumulate sum(x) and sum(x*x) (the square from the
//     multiplier); at the end of the stream (sum, square sum, N) go to the ALU,
//     which derives mean and standard deviation.
//  Norm (element-wise normalisation), on the operand-read stream, using the
//  characteristics the ALU holds for this row:
//   softmax   y = exp(x - xmax) / exp_sum
//   layernorm y = (x - mean) / sigma
//   GELU      y = x * sigmoid(1.702 x) = x / (1 + exp(-1.702 x))
//   bypass    y = x
//
// Interface and timing:
//  nca_start (one cycle) clears the lane; nca_valid/nca_x push one element per
//  cycle, nca_last marks the final element of the sequence. After the last
//  element the FIFO drains on its own (one element per cycle, pausing while
//  a tile result waits for the ALU); nca_busy is
//  high while elements are pending. A sequence of any length is accepted; the
//  final tile may be partial. Without a new nca_start, a following sequence
//  continues the same characteristics (running maximum, exp_sum, sums).
//  alu_req/alu_a/alu_b/alu_n are held until alu_ack; a new request must not arrive before the previous was taken (the
//  ALU serves H lanes in turn, so H <= TILE is required).
//  The Norm path is a 4-stage pipeline: norm_y is valid 4 cycles after
//  norm_valid, for every mode including bypass.
// Follows the design's softmax/layernorm/GELU datapaths (comparator with two
// maximum registers, FIFO of tile depth, EXP, first-of-tile load mux, adder and
// multiplier arrays, divider). This implementation gives the NCA and the Norm
// stage their own exponential unit instead of reusing one, so that NCA on one
// operation can overlap Norm on another; the fixed Norm pipeline is its own
// choice as well.
// Lint note: the FIFO storage has no reset (every entry is written before it
// is read), so it sits in a process of its own; Verilator still notes that
// rst_n drives both asynchronous resets and the assertion's disable.
module vpu_lane
  import sdacc_pkg::*;
#(
  parameter int unsigned TILE = 32,
  parameter int unsigned CW   = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  nca_mode_e     nca_mode,
  input  norm_mode_e    norm_mode,
  // NCA stream
  input  logic          nca_start,
  input  logic          nca_valid,
  input  fp16_t         nca_x,
  input  logic          nca_last,
  output logic          nca_busy,
  // hand-over to the shared ALU
  output logic          alu_req,
  output fp16_t         alu_a,     // ES_n (softmax) or sum (layernorm)
  output fp16_t         alu_b,     // new_max (softmax) or square sum (layernorm)
  output logic [CW-1:0] alu_n,     // element count (layernorm)
  input  logic          alu_ack,
  // characteristics of this row, held by the ALU
  input  fp16_t         stat0,     // exp_sum (softmax) or mean (layernorm)
  input  fp16_t         stat1,     // xmax (softmax) or sigma (layernorm)
  // Norm stream
  input  logic          norm_valid,
  input  fp16_t         norm_x,
  output logic          norm_y_valid,
  output fp16_t         norm_y
);
  localparam int unsigned PW = $clog2(TILE);

  // ---------------------------------------------------------------- NCA
  fp16_t          fifo [TILE];
  logic [PW-1:0]  wr_ptr, rd_ptr;
  logic [PW:0]    count;
  logic [PW-1:0]  in_cnt, out_cnt;
  logic           seen, draining;
  fp16_t          latest_max, pend_max, new_max;
  fp16_t          acc;
  fp16_t          sum_q, sq_q;
  logic [CW-1:0]  n_q;

  fp16_t          run_max, cur_max, head, e_val, acc_new;
  logic           push, pop, tile_stored, tile_end;

  assign push    = nca_valid && (nca_mode == NCA_SOFTMAX);
  // while draining, a pending hand-over holds the FIFO (a short final tile
  // could otherwise end before the ALU has taken the previous tile)
  assign pop     = (push && count == (PW+1)'(TILE)) ||
                   (draining && count != '0 && !(alu_req && !alu_ack));
  assign run_max = seen ? fp16_max(latest_max, nca_x) : nca_x;
  assign tile_stored = push && (in_cnt == PW'(TILE - 1) || nca_last);
  assign head    = fifo[rd_ptr];
  assign cur_max = (out_cnt == '0) ? pend_max : new_max;
  assign e_val   = fp16_exp(fp16_sub(head, cur_max));
  assign acc_new = (out_cnt == '0) ? e_val : fp16_add(acc, e_val);
  // a tile ends on its TILE-th element or on the very last element
  assign tile_end = pop && (out_cnt == PW'(TILE - 1) || (draining && count == (PW+1)'(1)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      count      <= '0;
      in_cnt     <= '0;
      out_cnt    <= '0;
      seen       <= 1'b0;
      draining   <= 1'b0;
      latest_max <= FP16_ZERO;
      pend_max   <= FP16_ZERO;
      new_max    <= FP16_ZERO;
      acc        <= FP16_ZERO;
      sum_q      <= FP16_ZERO;
      sq_q       <= FP16_ZERO;
      n_q        <= '0;
      alu_req    <= 1'b0;
      alu_a      <= FP16_ZERO;
      alu_b      <= FP16_ZERO;
      alu_n      <= '0;
    end else if (nca_start) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
      in_cnt   <= '0;
      out_cnt  <= '0;
      seen     <= 1'b0;
      draining <= 1'b0;
      n_q      <= '0;
      alu_req  <= 1'b0;
    end else begin
      if (alu_ack) alu_req <= 1'b0;
      // ---- softmax
      if (push) begin
        wr_ptr       <= wr_ptr + 1'b1;
        latest_max   <= run_max;
        seen         <= 1'b1;
        in_cnt       <= (in_cnt == PW'(TILE - 1) || nca_last) ? '0 : in_cnt + 1'b1;
        if (tile_stored) pend_max <= run_max;
        if (nca_last) draining <= 1'b1;
      end
      if (pop) begin
        rd_ptr  <= rd_ptr + 1'b1;
        acc     <= acc_new;
        if (out_cnt == '0) new_max <= pend_max;
        out_cnt <= tile_end ? '0 : out_cnt + 1'b1;
      end
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
      if (draining && pop && count == (PW+1)'(1)) draining <= 1'b0;
      if (tile_end) begin
        alu_req <= 1'b1;
        alu_a   <= acc_new;
        alu_b   <= cur_max;
      end
      // ---- layernorm
      if (nca_valid && nca_mode == NCA_LAYERNORM) begin
        sum_q <= (n_q == '0) ? nca_x : fp16_add(sum_q, nca_x);
        sq_q  <= (n_q == '0) ? fp16_mul(nca_x, nca_x)
                             : fp16_add(sq_q, fp16_mul(nca_x, nca_x));
        n_q   <= n_q + 1'b1;
        if (nca_last) begin
          alu_req <= 1'b1;
          alu_a   <= (n_q == '0) ? nca_x : fp16_add(sum_q, nca_x);
          alu_b   <= (n_q == '0) ? fp16_mul(nca_x, nca_x)
                                 : fp16_add(sq_q, fp16_mul(nca_x, nca_x));
          alu_n   <= n_q + 1'b1;
        end
      end
    end
  end

  // FIFO storage (no reset needed: entries are written before they are read)
  always_ff @(posedge clk) begin
    if (push) fifo[wr_ptr] <= nca_x;
  end

  assign nca_busy = draining || alu_req;

  // the ALU must take a tile result before the next one is ready
  assert property (@(posedge clk) disable iff (!rst_n)
                   (alu_req && !alu_ack) |-> !tile_end)
    else $error("vpu_lane: ALU hand-over overrun");

  // ---------------------------------------------------------------- Norm
  logic       v1, v2, v3, v4;
  norm_mode_e m1, m2, m3;
  fp16_t      x1, x2, a1, a2, a3, d3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3, v4} <= '0;
      m1 <= NORM_BYPASS; m2 <= NORM_BYPASS; m3 <= NORM_BYPASS;
      x1 <= '0; x2 <= '0;
      a1 <= '0; a2 <= '0; a3 <= '0; d3 <= '0;
      norm_y <= '0;
    end else begin
      // stage 1: subtract the characteristic, or scale by -1.702 (GELU)
      v1 <= norm_valid;
      m1 <= norm_mode;
      x1 <= norm_x;
      unique case (norm_mode)
        NORM_SOFTMAX:   a1 <= fp16_sub(norm_x, stat1);
        NORM_LAYERNORM: a1 <= fp16_sub(norm_x, stat0);
        NORM_GELU:      a1 <= fp16_mul(norm_x, FP16_NEG_1P702);
        default:        a1 <= norm_x;
      endcase
      // stage 2: exponential
      v2 <= v1;
      m2 <= m1;
      x2 <= x1;
      a2 <= (m1 == NORM_SOFTMAX || m1 == NORM_GELU) ? fp16_exp(a1) : a1;
      // stage 3: add one (GELU) and pick the divisor
      v3 <= v2;
      m3 <= m2;
      unique case (m2)
        NORM_SOFTMAX:   begin a3 <= a2; d3 <= stat0; end
        NORM_LAYERNORM: begin a3 <= a2; d3 <= stat1; end
        NORM_GELU:      begin a3 <= x2; d3 <= fp16_add(a2, FP16_ONE); end
        default:        begin a3 <= a2; d3 <= FP16_ONE; end
      endcase
      // stage 4: divide
      v4 <= v3;
      norm_y <= (m3 == NORM_BYPASS) ? a3 : fp16_div(a3, d3);
    end
  end

  assign norm_y_valid = v4;
endmodule
