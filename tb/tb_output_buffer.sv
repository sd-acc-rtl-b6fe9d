// tb_output_buffer: fills the accumulation bank, swaps, checks that the
// filled data now appears on the drain port while the new accumulation bank
// is written independently (and does not disturb the drain bank), then swaps
// back and checks both banks again. Read latency is one cycle.
module tb_output_buffer;
  import sdacc_pkg::*;
  localparam int H = 4, DEPTH = 64, AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0, swap = 0, bank_sel;
  logic acc_re = 0, acc_we = 0, drn_re = 0;
  logic [AW-1:0] acc_raddr = 0, acc_waddr = 0, drn_raddr = 0;
  fp16_t acc_rdata [H], acc_wdata [H], drn_rdata [H];
  fp16_t ref_b [2][DEPTH][H];
  int checks = 0, failures = 0;

  output_buffer #(.H(H), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(input int b);
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      acc_we = 1; acc_waddr = AW'(i);
      for (int k = 0; k < H; k++) begin
        acc_wdata[k] = 16'($urandom);
        ref_b[b][i][k] = acc_wdata[k];
      end
    end
    @(negedge clk); acc_we = 0;
  endtask

  task automatic check_both(input int accb);
    for (int i = 0; i < DEPTH; i++) begin
      acc_re = 1; acc_raddr = AW'(i);
      drn_re = 1; drn_raddr = AW'(DEPTH - 1 - i);
      @(negedge clk);
      for (int k = 0; k < H; k++) begin
        checks += 2;
        if (acc_rdata[k] !== ref_b[accb][i][k]) failures++;
        if (drn_rdata[k] !== ref_b[1-accb][DEPTH-1-i][k]) failures++;
      end
    end
    acc_re = 0; drn_re = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    checks++; if (bank_sel !== 1'b0) failures++;
    fill(0);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    checks++; if (bank_sel !== 1'b1) failures++;
    fill(1);
    check_both(1);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    check_both(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
