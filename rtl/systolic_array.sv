// systolic_array: H x W weight-stationary systolic array for matrix
// multiplication.
//
// Mapping: column c of the array takes input channel c_in = c, row r produces
// output channel c_out = r; the spatial/sequence index l is streamed in time.
// PE(r,c) holds Wt[c_out=r][c_in=c]. One input vector IA[l][0..W-1] enters per
// cycle; activations move down the columns, partial sums move right along the
// rows, and the row ends give Psum[l][r] = sum_c Wt[r][c] * IA[l][c].
//
// Skew and de-skew registers are inside the array: in_vec is presented
// aligned, column c is delayed c cycles, and row r is delayed H-1-r cycles at
// the right edge, so out_vec is aligned again: a vector of C_out results per
// cycle. Latency from in_valid to out_valid is LAT = W + H - 1 cycles, and the
// array accepts one vector per cycle.
//
// Weights: while wt_shift is high, wt_col[r] is shifted into the left PE of
// row r and every weight moves one column right; after W shifts the value
// shifted first sits in column W-1. Weights must not be shifted while vectors
// are in flight. The H = W = 32 default is the size of the implemented array;
// shift loading and the internal skew are this implementation's choices.
module systolic_array
  import sdacc_pkg::*;
#(
  parameter int unsigned H = 32,
  parameter int unsigned W = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wt_shift,
  input  fp16_t wt_col [H],
  input  logic  in_valid,
  input  fp16_t in_vec [W],
  output logic  out_valid,
  output fp16_t out_vec [H]
);
  localparam int unsigned LAT = W + H - 1;

  fp16_t ia_w   [H+1][W];   // activation into row r, column c
  fp16_t ps_w   [H][W+1];   // partial sum into column c of row r
  fp16_t wt_w   [H][W+1];

  // input skew: column c delayed by c cycles
  for (genvar c = 0; c < W; c++) begin : g_skew
    if (c == 0) begin : g_nodly
      assign ia_w[0][0] = in_vec[0];
    end else begin : g_dly
      fp16_t sr [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) sr[i] <= FP16_ZERO;
        end else begin
          sr[0] <= in_vec[c];
          for (int i = 1; i < c; i++) sr[i] <= sr[i-1];
        end
      end
      assign ia_w[0][c] = sr[c-1];
    end
  end

  for (genvar r = 0; r < H; r++) begin : g_row
    assign ps_w[r][0] = FP16_ZERO;
    assign wt_w[r][0] = wt_col[r];
    for (genvar c = 0; c < W; c++) begin : g_col
      pe u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .wt_shift(wt_shift),
        .wt_in   (wt_w[r][c]),
        .wt_out  (wt_w[r][c+1]),
        .ia_in   (ia_w[r][c]),
        .ia_out  (ia_w[r+1][c]),
        .psum_in (ps_w[r][c]),
        .psum_out(ps_w[r][c+1])
      );
    end
  end

  // output de-skew: row r delayed by H-1-r cycles
  for (genvar r = 0; r < H; r++) begin : g_deskew
    if (r == H - 1) begin : g_nodly
      assign out_vec[r] = ps_w[r][W];
    end else begin : g_dly
      localparam int unsigned D = H - 1 - r;
      fp16_t sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < D; i++) sr[i] <= FP16_ZERO;
        end else begin
          sr[0] <= ps_w[r][W];
          for (int i = 1; i < D; i++) sr[i] <= sr[i-1];
        end
      end
      assign out_vec[r] = sr[D-1];
    end
  end

  // valid pipeline
  logic [LAT-1:0] vld_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_sr <= '0;
    else        vld_sr <= {vld_sr[LAT-2:0], in_valid};
  end
  assign out_valid = vld_sr[LAT-1];
endmodule
