// tb_input_buffer: writes pseudo-random words to every address, reads them back in a
// shuffled order and checks each word and the one-cycle read latency; also
// checks that a read disabled cycle holds the previous read data.
module tb_input_buffer;
  import sdacc_pkg::*;
  localparam int N = 32, DEPTH = 1024, AW = $clog2(DEPTH);
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  fp16_t wdata [N], rdata [N];
  fp16_t ref_mem [DEPTH][N];
  int checks = 0, failures = 0;

  input_buffer #(.W(N), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i);
      for (int k = 0; k < N; k++) begin
        wdata[k] = 16'($urandom);
        ref_mem[i][k] = wdata[k];
      end
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      a = (i * 37 + 11) % DEPTH;
      re = 1; raddr = AW'(a);
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        checks++;
        if (rdata[k] !== ref_mem[a][k]) begin
          failures++;
          if (failures < 10) $display("addr %0d lane %0d got %h want %h", a, k, rdata[k], ref_mem[a][k]);
        end
      end
      re = 0; raddr = AW'(a + 1);
      @(negedge clk);
      checks++;
      if (rdata[0] !== ref_mem[a][0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
