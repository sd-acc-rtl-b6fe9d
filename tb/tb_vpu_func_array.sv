// tb_vpu_func_array: end-to-end check of the two-stage nonlinear operators on
// a 4-lane array with 8-entry tiles.
//  softmax: each lane streams a different sequence of 21 values (two full
//   tiles and a partial one, rising maxima so the cross-tile rescaling is
//   used); afterwards xmax must equal the true maximum and exp_sum must match
//   sum(exp(x - xmax)); the Norm pass must then give exp(x-xmax)/exp_sum.
//  layernorm: 40 values per lane; mean and sigma, then (x-mean)/sigma.
//  GELU: x*sigmoid(1.702x). Norm latency must be exactly 4 cycles.
// References use real arithmetic.
module tb_vpu_func_array;
  import sdacc_pkg::*;
  import tb_fp16_pkg::*;
  localparam int H = 4, TILE = 8, NS = 21, NL = 40;
  logic clk = 0, rst_n = 0;
  nca_mode_e nca_mode = NCA_NONE;
  norm_mode_e norm_mode = NORM_BYPASS;
  logic nca_start = 0, nca_valid = 0, nca_last = 0, nca_busy, norm_valid = 0, norm_y_valid;
  fp16_t nca_vec [H], norm_vec [H], norm_y [H], stat0 [H], stat1 [H];
  fp16_t xs [H][NL];
  real mx [H], es [H], mu [H], sg [H];
  int checks = 0, failures = 0, cyc = 0, t_in, nyv;

  vpu_func_array #(.H(H), .TILE(TILE)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
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

  task automatic stream_nca(input int n);
    @(negedge clk); nca_start = 1;
    @(negedge clk); nca_start = 0;
    for (int i = 0; i < n; i++) begin
      nca_valid = 1; nca_last = (i == n - 1);
      for (int r = 0; r < H; r++) nca_vec[r] = xs[r][i];
      @(negedge clk);
    end
    nca_valid = 0; nca_last = 0;
    while (nca_busy) @(negedge clk);
  endtask

  // Norm pass: element i of all lanes, check against f(lane, x)
  task automatic stream_norm(input int n, input int kind);
    real want, x;
    for (int i = 0; i < n; i++) begin
      norm_valid = 1;
      for (int r = 0; r < H; r++) norm_vec[r] = xs[r][i];
      t_in = cyc;
      @(negedge clk);
      norm_valid = 0;
      nyv = 0;
      while (!norm_y_valid) begin @(negedge clk); nyv++; if (nyv > 10) break; end
      checks++;
      if (cyc - t_in != 4) begin failures++; $display("norm latency %0d", cyc - t_in); end
      for (int r = 0; r < H; r++) begin
        x = fp16_to_real(xs[r][i]);
        if (kind == 0) want = $exp(x - mx[r]) / es[r];
        else if (kind == 1) want = (x - mu[r]) / sg[r];
        else want = x / (1.0 + $exp(-1.702 * x));
        chk(norm_y[r], want, 1.5e-2, 2.0e-3, "norm");
      end
    end
  endtask

  initial begin
    for (int r = 0; r < H; r++) begin nca_vec[r] = 0; norm_vec[r] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- softmax
    for (int r = 0; r < H; r++) begin
      mx[r] = -100.0; es[r] = 0.0;
      for (int i = 0; i < NS; i++) begin
        // values drift upwards so that later tiles raise the maximum
        xs[r][i] = real_to_fp16(real'(int'($urandom_range(600, 0)) - 400) / 100.0 + 0.15 * i);
        if (fp16_to_real(xs[r][i]) > mx[r]) mx[r] = fp16_to_real(xs[r][i]);
      end
      for (int i = 0; i < NS; i++) es[r] += $exp(fp16_to_real(xs[r][i]) - mx[r]);
    end
    nca_mode = NCA_SOFTMAX;
    stream_nca(NS);
    for (int r = 0; r < H; r++) begin
      checks++;
      if (fp16_to_real(stat1[r]) != mx[r]) begin failures++; $display("xmax lane %0d", r); end
      chk(stat0[r], es[r], 1.0e-2, 0.0, "exp_sum");
    end
    norm_mode = NORM_SOFTMAX;
    stream_norm(NS, 0);
    // ---------------- layernorm
    for (int r = 0; r < H; r++) begin
      real s, q;
      s = 0.0; q = 0.0;
      for (int i = 0; i < NL; i++) begin
        xs[r][i] = real_to_fp16(real'(int'($urandom_range(400, 0)) - 150) / 100.0 + r);
        s += fp16_to_real(xs[r][i]);
        q += fp16_to_real(xs[r][i]) ** 2;
      end
      mu[r] = s / NL;
      sg[r] = $sqrt(q / NL - mu[r] * mu[r]);
    end
    nca_mode = NCA_LAYERNORM;
    stream_nca(NL);
    for (int r = 0; r < H; r++) begin
      chk(stat0[r], mu[r], 1.0e-2, 1.0e-2, "mean");
      chk(stat1[r], sg[r], 3.0e-2, 1.0e-2, "sigma");
    end
    norm_mode = NORM_LAYERNORM;
    stream_norm(NL, 1);
    // ---------------- GELU
    for (int r = 0; r < H; r++)
      for (int i = 0; i < NL; i++) xs[r][i] = real_to_fp16(real'(int'($urandom_range(800, 0)) - 400) / 100.0);
    norm_mode = NORM_GELU;
    stream_norm(NL, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
