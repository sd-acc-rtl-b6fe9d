// tb_accumulation_unit: drives several accumulation passes over a small
// output buffer model. The first pass uses init, later passes add; random
// positions carry a cleared edge flag and must leave the buffer untouched.
// Some passes revisit the same address on consecutive cycles to exercise the
// forwarding path. Values are small integers, so fp16 sums are exact and are
// compared with an integer reference. Also checks the skip count and that a
// write lands one cycle after its input.
module tb_accumulation_unit;
  import sdacc_pkg::*;
  import tb_fp16_pkg::*;
  localparam int H = 4, AW = 5, DEPTH = 32;
  logic clk = 0, rst_n = 0, in_valid = 0, in_range = 0, init = 0;
  fp16_t in_vec [H];
  logic [AW-1:0] in_addr = 0;
  logic ob_re, ob_we, res_valid, skip;
  logic [AW-1:0] ob_raddr, ob_waddr;
  fp16_t ob_rdata [H], ob_wdata [H], res_vec [H];
  fp16_t mem [DEPTH][H];
  int refv [DEPTH][H];
  int checks = 0, failures = 0, nskip = 0, exp_skip = 0, nwr = 0, exp_wr = 0;

  accumulation_unit #(.H(H), .AW(AW)) dut (.*);
  always #5 clk = ~clk;

  // output buffer model: one-cycle read, write at the clock edge
  always @(posedge clk) begin
    if (ob_re) ob_rdata <= mem[ob_raddr];
    if (ob_we) mem[ob_waddr] <= ob_wdata;
    if (skip) nskip++;
    if (ob_we) nwr++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, v;
    bit fl;
    for (int i = 0; i < DEPTH; i++) for (int k = 0; k < H; k++) mem[i][k] = 16'h0;
    for (int k = 0; k < H; k++) in_vec[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 6; pass++) begin
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        // passes 3 and 5 hit each address twice in a row
        a  = (pass == 3 || pass == 5) ? i / 2 : (i * 7 + pass) % DEPTH;
        fl = (pass == 0) ? 1'b1 : ($urandom_range(5, 0) != 0);
        in_valid = 1; in_addr = AW'(a); in_range = fl; init = (pass == 0);
        for (int k = 0; k < H; k++) begin
          v = int'($urandom_range(16, 0)) - 8;
          in_vec[k] = real_to_fp16(real'(v));
          if (fl) refv[a][k] = (pass == 0) ? v : refv[a][k] + v;
        end
        if (!fl) exp_skip++; else exp_wr++;
      end
      @(negedge clk); in_valid = 0;
      @(negedge clk);
    end
    repeat (3) @(negedge clk);
    for (int i = 0; i < DEPTH; i++) for (int k = 0; k < H; k++) begin
      checks++;
      if (fp16_to_real(mem[i][k]) != real'(refv[i][k])) begin
        failures++;
        if (failures < 10) $display("addr %0d lane %0d got %f want %0d", i, k, fp16_to_real(mem[i][k]), refv[i][k]);
      end
    end
    checks += 2;
    if (nskip != exp_skip) begin failures++; $display("skips %0d want %0d", nskip, exp_skip); end
    if (nwr != exp_wr) begin failures++; $display("writes %0d want %0d", nwr, exp_wr); end
    // latency: input at cycle t, write strobe at t+1
    @(negedge clk);
    in_valid = 1; in_range = 1; init = 1; in_addr = 3;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!(ob_we && ob_waddr == 3)) begin failures++; $display("write latency"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
