// tb_vpu_alu: drives the request ports of a 4-row ALU directly. Softmax: each
// row gets three tiles (ES_n, new_max); the register stack must end with
// xmax = last maximum and exp_sum = sum of ES_n*exp(max_k - xmax). Layernorm:
// (sum, square sum, N) per row must give mean and sigma. Each request must be
// acknowledged within H cycles, one row per cycle.
module tb_vpu_alu;
  import sdacc_pkg::*;
  import tb_fp16_pkg::*;
  localparam int H = 4;
  logic clk = 0, rst_n = 0, start = 0, busy;
  nca_mode_e mode = NCA_SOFTMAX;
  logic req [H], ack [H];
  fp16_t a [H], b [H], stat0 [H], stat1 [H];
  logic [15:0] n [H];
  real want_s [H], want_m [H];
  int checks = 0, failures = 0, wait_c;

  vpu_alu #(.H(H)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input fp16_t got, input real want, input real rel, input string what);
    checks++;
    if (!close(got, want, rel, 1.0e-3)) begin
      failures++;
      $display("%s: got %f want %f", what, fp16_to_real(got), want);
    end
  endtask

  // raise all requests, wait until all acknowledged
  task automatic serve();
    bit pend [H];
    for (int r = 0; r < H; r++) begin req[r] = 1; pend[r] = 1; end
    wait_c = 0;
    while (pend[0] | pend[1] | pend[2] | pend[3]) begin
      @(posedge clk);
      for (int r = 0; r < H; r++) if (ack[r]) pend[r] = 0;
      #1;
      for (int r = 0; r < H; r++) req[r] = pend[r];
      wait_c++;
    end
    checks++;
    if (wait_c > H) begin failures++; $display("service took %0d cycles", wait_c); end
  endtask

  initial begin
    real m, s, q, mx [3], esn [3];
    for (int r = 0; r < H; r++) begin req[r] = 0; a[r] = 0; b[r] = 0; n[r] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int r = 0; r < H; r++) begin
      mx[0] = 0.5 + r; mx[1] = 1.25 + r; mx[2] = 2.0 + r;
      want_s[r] = 0.0;
    end
    for (int k = 0; k < 3; k++) begin
      for (int r = 0; r < H; r++) begin
        m = 0.5 + 0.75 * k + r;
        esn[k] = 1.0 + 0.5 * k + 0.25 * r;
        a[r] = real_to_fp16(esn[k]); b[r] = real_to_fp16(m);
        want_s[r] = want_s[r] * $exp((k == 0 ? m : 0.5 + 0.75 * (k - 1) + r) - m) + esn[k];
        want_m[r] = m;
      end
      serve();
      @(negedge clk);
    end
    for (int r = 0; r < H; r++) begin
      checks++;
      if (fp16_to_real(stat1[r]) != want_m[r]) begin failures++; $display("xmax row %0d", r); end
      chk(stat0[r], want_s[r], 5.0e-3, "exp_sum");
    end
    // layernorm
    mode = NCA_LAYERNORM;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int r = 0; r < H; r++) begin
      n[r] = 16'(64 + 32 * r);
      s = 10.0 + 7.0 * r; q = 80.0 + 20.0 * r;
      a[r] = real_to_fp16(s); b[r] = real_to_fp16(q);
      want_m[r] = s / n[r];
      want_s[r] = $sqrt(q / n[r] - want_m[r] * want_m[r]);
    end
    serve();
    @(negedge clk);
    for (int r = 0; r < H; r++) begin
      chk(stat0[r], want_m[r], 5.0e-3, "mean");
      chk(stat1[r], want_s[r], 5.0e-3, "sigma");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
