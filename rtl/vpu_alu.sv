// vpu_alu: the shared ALU of the vector processing unit, with its register
// stack of numerical characteristics.
//
// All H lanes finish their tiles (softmax) or sequences (layernorm) at about
// the same time, so one ALU is reused row by row instead of giving every lane
// the rarely used operations. A round-robin pointer visits one row per cycle;
// if that row's lane has a request pending the ALU serves it in that cycle and
// acknowledges it.
//   softmax, first tile of a sequence:   ES <- ES_n,  max <- new_max
//   softmax, later tiles:                ES <- ES*exp(max - new_max) + ES_n,
//                                        max <- new_max
//   layernorm (sum, square sum, N):      mean  <- sum / N
//                                        sigma <- sqrt(sqsum/N - mean^2)
// The register stack holds two values per row, stat0 (exp_sum or mean) and
// stat1 (xmax or sigma), read by the lanes' Norm stage. start clears the
// first-tile marks of all rows. busy is high while any request is pending.
// A request waits at most H cycles, so lanes with tiles of TILE >= H elements
// never overrun. The update formulas are the design's; the round-robin
// service, the clamp of a negative variance to zero and the absence of an
// epsilon in the layernorm denominator are this implementation's choices.
module vpu_alu
  import sdacc_pkg::*;
#(
  parameter int unsigned H  = 32,
  parameter int unsigned CW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  nca_mode_e     mode,
  input  logic          start,
  input  logic          req  [H],
  input  fp16_t         a    [H],
  input  fp16_t         b    [H],
  input  logic [CW-1:0] n    [H],
  output logic          ack  [H],
  output fp16_t         stat0 [H],
  output fp16_t         stat1 [H],
  output logic          busy
);
  localparam int unsigned RW = (H > 1) ? $clog2(H) : 1;

  logic [RW-1:0] ptr;
  logic          fresh [H];
  fp16_t         s0_new, s1_new, mean, var_v, nf;

  always_comb begin
    s0_new = stat0[ptr];
    s1_new = stat1[ptr];
    nf     = fp16_from_uint(16'(n[ptr]));
    mean   = fp16_div(a[ptr], nf);
    var_v  = fp16_sub(fp16_div(b[ptr], nf), fp16_mul(mean, mean));
    if (var_v[15]) var_v = FP16_ZERO;
    if (mode == NCA_LAYERNORM) begin
      s0_new = mean;
      s1_new = fp16_sqrt(var_v);
    end else if (fresh[ptr]) begin
      s0_new = a[ptr];
      s1_new = b[ptr];
    end else begin
      s0_new = fp16_add(fp16_mul(stat0[ptr], fp16_exp(fp16_sub(stat1[ptr], b[ptr]))), a[ptr]);
      s1_new = b[ptr];
    end
  end

  always_comb begin
    busy = 1'b0;
    for (int i = 0; i < H; i++) begin
      ack[i] = req[i] && (ptr == RW'(i));
      busy   = busy | req[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
      for (int i = 0; i < H; i++) begin
        fresh[i] <= 1'b1;
        stat0[i] <= FP16_ONE;
        stat1[i] <= FP16_ZERO;
      end
    end else if (start) begin
      ptr <= '0;
      for (int i = 0; i < H; i++) fresh[i] <= 1'b1;
    end else begin
      ptr <= (ptr == RW'(H - 1)) ? '0 : ptr + 1'b1;
      if (req[ptr]) begin
        stat0[ptr] <= s0_new;
        stat1[ptr] <= s1_new;
        fresh[ptr] <= 1'b0;
      end
    end
  end
endmodule
