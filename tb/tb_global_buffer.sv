// tb_global_buffer: at the full 2 MB size, writes words through the external
// port and reads them through the internal port, and the reverse, at
// addresses spread over the whole range (first, last and random words);
// checks data and one-cycle read latency on both ports.
module tb_global_buffer;
  import sdacc_pkg::*;
  localparam int LANES = 32, DEPTH = 32768, AW = 15, N = 300;
  logic clk = 0, ext_en = 0, ext_we = 0, int_en = 0, int_we = 0;
  logic [AW-1:0] ext_addr = 0, int_addr = 0;
  fp16_t ext_wdata [LANES], ext_rdata [LANES], int_wdata [LANES], int_rdata [LANES];
  logic [AW-1:0] adr [N];
  fp16_t dat [N][LANES];
  int checks = 0, failures = 0;

  global_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      adr[i] = (i == 0) ? '0 : (i == 1) ? '1 : AW'(i * 109 + 2);
      for (int k = 0; k < LANES; k++) dat[i][k] = 16'($urandom);
    end
    for (int k = 0; k < LANES; k++) begin ext_wdata[k] = 0; int_wdata[k] = 0; end
    // external write, internal read
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      ext_en = 1; ext_we = 1; ext_addr = adr[i]; ext_wdata = dat[i];
    end
    @(negedge clk); ext_en = 0; ext_we = 0;
    for (int i = 0; i < N; i++) begin
      int_en = 1; int_addr = adr[i];
      @(negedge clk);
      for (int k = 0; k < LANES; k++) begin
        checks++;
        if (int_rdata[k] !== dat[i][k]) failures++;
      end
    end
    int_en = 0;
    // internal write (inverted data), external read
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      int_en = 1; int_we = 1; int_addr = adr[i];
      for (int k = 0; k < LANES; k++) int_wdata[k] = ~dat[i][k];
    end
    @(negedge clk); int_en = 0; int_we = 0;
    for (int i = 0; i < N; i++) begin
      ext_en = 1; ext_addr = adr[i];
      @(negedge clk);
      for (int k = 0; k < LANES; k++) begin
        checks++;
        if (ext_rdata[k] !== ~dat[i][k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
