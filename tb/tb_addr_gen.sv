// tb_addr_gen: checks the address streams of the address-centric mapping.
// Stride 1: for each of the nine kernel positions of a 3x3 "same"
// convolution on a 5x7 map, the output address of every input index must be
// l - (r-1)*W - (s-1) and the flag must mark exactly the positions whose
// output falls outside the map. Stride 2: on a 8x6 input, the input address
// read for output (p,q) and kernel (r,s) must be (2p+r-1)*W + 2q+s-1, with
// padding positions flagged. One address per cycle is also checked.
module tb_addr_gen;
  import sdacc_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, advance = 0, busy, in_range, last;
  agen_cfg_t cfg;
  addr_t addr;
  int checks = 0, failures = 0;

  addr_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_walk(input int rows, input int cols, input int mode,
                          input int HH, input int WW, input int dr, input int ds);
    int exp_addr, pr, pc;
    bit exp_in;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    advance = 1;
    for (int r = 0; r < rows; r++) for (int c = 0; c < cols; c++) begin
      if (mode == 1) begin
        exp_addr = (r * WW + c) - dr * WW - ds;
        pr = r - dr; pc = c - ds;
        exp_in = pr >= 0 && pr < HH && pc >= 0 && pc < WW;
      end else begin
        pr = 2 * r + dr; pc = 2 * c + ds;
        exp_addr = pr * WW + pc;
        exp_in = pr >= 0 && pr < HH && pc >= 0 && pc < WW;
      end
      checks++;
      if (int'(addr) != exp_addr || in_range != exp_in || !busy ||
          last != (r == rows - 1 && c == cols - 1)) begin
        failures++;
        $display("mode %0d k(%0d,%0d) pos %0d,%0d: addr %0d/%0d flag %0d/%0d",
                 mode, dr, ds, r, c, addr, exp_addr, in_range, exp_in);
      end
      @(negedge clk);
    end
    advance = 0;
    checks++;
    if (busy) begin failures++; $display("still busy"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // stride 1, 5x7 map, output side
    for (int dr = -1; dr <= 1; dr++) for (int ds = -1; ds <= 1; ds++) begin
      cfg = '0;
      cfg.base = addr_t'(-(dr * 7 + ds));
      cfg.step = 1; cfg.row_step = 1;
      cfg.rows = 5; cfg.cols = 7;
      cfg.chk_en = 1; cfg.chk_mul = 1;
      cfg.chk_roff = 13'(-dr); cfg.chk_coff = 13'(-ds);
      cfg.chk_rows = 5; cfg.chk_cols = 7;
      run_walk(5, 7, 1, 5, 7, dr, ds);
    end
    // stride 2, 8x6 input -> 4x3 output, input side
    for (int dr = -1; dr <= 1; dr++) for (int ds = -1; ds <= 1; ds++) begin
      cfg = '0;
      cfg.base = addr_t'(dr * 6 + ds);
      cfg.step = 2; cfg.row_step = addr_t'(6 + 2);
      cfg.rows = 4; cfg.cols = 3;
      cfg.chk_en = 1; cfg.chk_mul = 2;
      cfg.chk_roff = 13'(dr); cfg.chk_coff = 13'(ds);
      cfg.chk_rows = 8; cfg.chk_cols = 6;
      run_walk(4, 3, 2, 8, 6, dr, ds);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
