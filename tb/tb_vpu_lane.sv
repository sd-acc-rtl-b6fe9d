// tb_vpu_lane: one lane with tiles of 8 elements. For softmax NCA it checks
// each tile hand-over: ES_n must be the sum over the tile of
// exp(x - m), with m the running maximum of everything up to the end of that
// tile, and the reported maximum must be m; a 27-element stream (three full
// tiles and a partial one) must produce four hand-overs, the last one after
// the FIFO drains. For layernorm NCA it checks sum, square sum and count. The
// Norm path is checked for softmax and layernorm with characteristics driven
// by the testbench, for GELU and bypass, and for its 4-cycle latency.
module tb_vpu_lane;
  import sdacc_pkg::*;
  import tb_fp16_pkg::*;
  localparam int TILE = 8, N = 27;
  logic clk = 0, rst_n = 0;
  nca_mode_e nca_mode = NCA_SOFTMAX;
  norm_mode_e norm_mode = NORM_BYPASS;
  logic nca_start = 0, nca_valid = 0, nca_last = 0, nca_busy, alu_req, alu_ack;
  fp16_t nca_x = 0, alu_a, alu_b, stat0 = 0, stat1 = 0, norm_x = 0, norm_y;
  logic [15:0] alu_n;
  logic norm_valid = 0, norm_y_valid;
  fp16_t xs [N];
  int checks = 0, failures = 0, ntile = 0;

  vpu_lane #(.TILE(TILE)) dut (.*);
  always #5 clk = ~clk;
  assign alu_ack = alu_req;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input fp16_t got, input real want, input real rel, input real abs, input string what);
    checks++;
    if (!close(got, want, rel, abs)) begin
      failures++;
      $display("%s: got %f want %f", what, fp16_to_real(got), want);
    end
  endtask

  // hand-over checker for softmax
  always @(posedge clk) if (rst_n && alu_req && nca_mode == NCA_SOFTMAX) begin
    real m, s;
    int lo, hi;
    lo = ntile * TILE;
    hi = (lo + TILE < N) ? lo + TILE : N;
    m = -100.0;
    for (int i = 0; i < hi; i++) if (fp16_to_real(xs[i]) > m) m = fp16_to_real(xs[i]);
    s = 0.0;
    for (int i = lo; i < hi; i++) s += $exp(fp16_to_real(xs[i]) - m);
    checks++;
    if (fp16_to_real(alu_b) != m) begin failures++; $display("tile %0d max %f want %f", ntile, fp16_to_real(alu_b), m); end
    chk(alu_a, s, 1.0e-2, 1.0e-3, "ES_n");
    ntile++;
  end

  task automatic norm_one(input fp16_t x, input real want);
    @(negedge clk);
    norm_valid = 1; norm_x = x;
    @(negedge clk);
    norm_valid = 0;
    repeat (3) begin
      checks++;
      if (norm_y_valid) begin failures++; $display("norm too early"); end
      @(negedge clk);
    end
    checks++;
    if (!norm_y_valid) begin failures++; $display("norm latency"); end
    chk(norm_y, want, 1.0e-2, 1.0e-3, "norm");
  endtask

  initial begin
    real s, q, x;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++)
      xs[i] = real_to_fp16(real'(int'($urandom_range(500, 0)) - 300) / 100.0 + 0.2 * i);
    @(negedge clk); nca_start = 1; @(negedge clk); nca_start = 0;
    for (int i = 0; i < N; i++) begin
      nca_valid = 1; nca_x = xs[i]; nca_last = (i == N - 1);
      @(negedge clk);
    end
    nca_valid = 0; nca_last = 0;
    repeat (TILE + 4) @(negedge clk);
    checks += 2;
    if (ntile != 4) begin failures++; $display("tiles %0d", ntile); end
    if (nca_busy) failures++;
    // layernorm NCA
    nca_mode = NCA_LAYERNORM;
    @(negedge clk); nca_start = 1; @(negedge clk); nca_start = 0;
    s = 0.0; q = 0.0;
    for (int i = 0; i < N; i++) begin
      nca_valid = 1; nca_x = xs[i]; nca_last = (i == N - 1);
      x = fp16_to_real(xs[i]); s += x; q += x * x;
      @(negedge clk);
    end
    nca_valid = 0; nca_last = 0;
    checks++;
    if (!alu_req || alu_n != 16'(N)) begin failures++; $display("ln request n=%0d", alu_n); end
    chk(alu_a, s, 1.0e-2, 2.0e-2, "sum");
    chk(alu_b, q, 1.0e-2, 2.0e-2, "sqsum");
    @(negedge clk);
    // Norm with given characteristics
    norm_mode = NORM_SOFTMAX; stat0 = real_to_fp16(12.5); stat1 = real_to_fp16(2.25);
    for (int i = 0; i < 8; i++) norm_one(xs[i], $exp(fp16_to_real(xs[i]) - 2.25) / 12.5);
    norm_mode = NORM_LAYERNORM; stat0 = real_to_fp16(0.75); stat1 = real_to_fp16(1.5);
    for (int i = 0; i < 8; i++) norm_one(xs[i], (fp16_to_real(xs[i]) - 0.75) / 1.5);
    norm_mode = NORM_GELU;
    for (int i = 0; i < 8; i++) begin
      x = fp16_to_real(xs[i]);
      norm_one(xs[i], x / (1.0 + $exp(-1.702 * x)));
    end
    norm_mode = NORM_BYPASS;
    for (int i = 0; i < 4; i++) norm_one(xs[i], fp16_to_real(xs[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
