// tb_systolic_array: loads a random weight matrix by shifting, streams random
// activation vectors one per cycle, and checks every output vector against a
// real-number matrix product and its arrival exactly W + H - 1 cycles after
// the input. A non-square array is used to catch row/column mix-ups.
module tb_systolic_array;
  import tb_fp16_pkg::*;
  localparam int H = 8, W = 6, NV = 40, LAT = W + H - 1;
  logic clk = 0, rst_n = 0, wt_shift = 0, in_valid = 0, out_valid;
  logic [15:0] wt_col [H], in_vec [W], out_vec [H];
  logic [15:0] wt [H][W];
  logic [15:0] ia [NV][W];
  int checks = 0, failures = 0, cyc = 0, nout = 0;
  int t_in [NV];

  systolic_array #(.H(H), .W(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    real want;
    for (int r = 0; r < H; r++) begin
      want = 0.0;
      for (int c = 0; c < W; c++) want += fp16_to_real(wt[r][c]) * fp16_to_real(ia[nout][c]);
      checks++;
      if (!close(out_vec[r], want, 6.0e-3, 6.0e-3)) begin
        failures++;
        $display("vec %0d row %0d got %f want %f", nout, r, fp16_to_real(out_vec[r]), want);
      end
    end
    checks++;
    if (cyc - t_in[nout] != LAT) begin
      failures++;
      $display("latency %0d want %0d", cyc - t_in[nout], LAT);
    end
    nout++;
  end

  initial begin
    for (int r = 0; r < H; r++) wt_col[r] = 0;
    for (int c = 0; c < W; c++) in_vec[c] = 0;
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) wt[r][c] = rand_fp16(-3, 1);
    for (int n = 0; n < NV; n++) for (int c = 0; c < W; c++) ia[n][c] = rand_fp16(-3, 2);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // shift weights in, last column first
    for (int c = W - 1; c >= 0; c--) begin
      @(negedge clk);
      wt_shift = 1;
      for (int r = 0; r < H; r++) wt_col[r] = wt[r][c];
    end
    @(negedge clk);
    wt_shift = 0;
    // stream with a bubble in the middle
    for (int n = 0; n < NV; n++) begin
      if (n == NV / 2) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      for (int c = 0; c < W; c++) in_vec[c] = ia[n][c];
      t_in[n] = cyc;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("got %0d vectors", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
