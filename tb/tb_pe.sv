// tb_pe: checks the processing element: weight shift-in, activation
// pass-through, and OA = psum_in + wt * ia with one cycle of latency,
// against real-number arithmetic rounded to fp16.
module tb_pe;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0, wt_shift = 0;
  logic [15:0] wt_in = 0, wt_out, ia_in = 0, ia_out, psum_in = 0, psum_out;
  int checks = 0, failures = 0;

  pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] w, x, p;
    real want;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      w = rand_fp16(-4, 3);
      // weight shift
      @(negedge clk); wt_shift = 1; wt_in = w;
      @(negedge clk); wt_shift = 0;
      checks++;
      if (wt_out !== w) begin failures++; $display("wt_out %h want %h", wt_out, w); end
      x = rand_fp16(-4, 3);
      p = rand_fp16(-4, 3);
      ia_in = x; psum_in = p;
      @(negedge clk);
      want = fp16_to_real(p) + fp16_to_real(w) * fp16_to_real(x);
      checks++;
      if (!close(psum_out, want, 2.0e-3, 2.0e-3)) begin
        failures++;
        $display("psum %h (%f) want %f", psum_out, fp16_to_real(psum_out), want);
      end
      checks++;
      if (ia_out !== x) begin failures++; $display("ia_out %h want %h", ia_out, x); end
      // weight is held when not shifting
      checks++;
      if (wt_out !== w) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
