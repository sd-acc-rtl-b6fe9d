// vpu_func_array: the H-parallel arithmetic and special function array of the
// vector processing unit: H lanes (vpu_lane) and the shared ALU (vpu_alu).
//
// Two-stage streaming: the NCA port sits on the stream of final results the
// systolic array writes to the output buffer, one element per lane per cycle,
// so softmax maxima/exponential sums or layernorm sums are collected while the
// preceding matrix multiplication runs. The Norm port sits on the stream of
// operands read for the following matrix multiplication and applies the
// element-wise part (softmax, layernorm or GELU) on the way into the array.
// Lane r always pairs with ALU register-stack row r.
//
// Interface and timing: nca_start clears lanes and ALU state; nca_valid /
// nca_vec / nca_last stream a sequence (lane r receives nca_vec[r]); nca_busy
// stays high until every lane has drained its FIFO and the ALU has folded in
// every result, after which stat0/stat1 hold the characteristics. The Norm
// path has a fixed latency of 4 cycles (norm_valid to norm_y_valid).
// Structure follows the design's VPU description; see vpu_lane and vpu_alu for
// the choices made inside them.
module vpu_func_array
  import sdacc_pkg::*;
#(
  parameter int unsigned H    = 32,
  parameter int unsigned TILE = 32,
  parameter int unsigned CW   = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  nca_mode_e  nca_mode,
  input  norm_mode_e norm_mode,
  input  logic       nca_start,
  input  logic       nca_valid,
  input  fp16_t      nca_vec [H],
  input  logic       nca_last,
  output logic       nca_busy,
  input  logic       norm_valid,
  input  fp16_t      norm_vec [H],
  output logic       norm_y_valid,
  output fp16_t      norm_y [H],
  output fp16_t      stat0 [H],
  output fp16_t      stat1 [H]
);
  logic          req [H], ack [H], lane_busy [H], yv [H];
  fp16_t         a [H], b [H];
  logic [CW-1:0] n [H];
  logic          alu_busy;

  for (genvar r = 0; r < H; r++) begin : g_lane
    vpu_lane #(.TILE(TILE), .CW(CW)) u_lane (
      .clk         (clk),
      .rst_n       (rst_n),
      .nca_mode    (nca_mode),
      .norm_mode   (norm_mode),
      .nca_start   (nca_start),
      .nca_valid   (nca_valid),
      .nca_x       (nca_vec[r]),
      .nca_last    (nca_last),
      .nca_busy    (lane_busy[r]),
      .alu_req     (req[r]),
      .alu_a       (a[r]),
      .alu_b       (b[r]),
      .alu_n       (n[r]),
      .alu_ack     (ack[r]),
      .stat0       (stat0[r]),
      .stat1       (stat1[r]),
      .norm_valid  (norm_valid),
      .norm_x      (norm_vec[r]),
      .norm_y_valid(yv[r]),
      .norm_y      (norm_y[r])
    );
  end

  vpu_alu #(.H(H), .CW(CW)) u_alu (
    .clk  (clk),
    .rst_n(rst_n),
    .mode (nca_mode),
    .start(nca_start),
    .req  (req),
    .a    (a),
    .b    (b),
    .n    (n),
    .ack  (ack),
    .stat0(stat0),
    .stat1(stat1),
    .busy (alu_busy)
  );

  always_comb begin
    nca_busy = alu_busy;
    for (int r = 0; r < H; r++) nca_busy = nca_busy | lane_busy[r];
  end
  assign norm_y_valid = yv[0];
endmodule
