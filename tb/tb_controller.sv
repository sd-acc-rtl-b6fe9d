// tb_controller: self-checking test of the command sequencer on its own.
// The test bench plays the address generator (it counts streamed positions
// and raises agen_last on the last one) and the VPU's nca_busy. It checks:
//  - LOAD_IN / LOAD_WT: global-buffer read addresses in consecutive cycles and
//    the buffer writes one cycle later, at the right buffer addresses;
//  - STORE: drain-bank reads and global-buffer writes one cycle later;
//  - SWAP: a single ob_swap pulse;
//  - CONV 3x3 (random map sizes, stride 1 and 2): the kernel slice order
//    (centre first), the weight-buffer read sequence of each slice (last
//    column first) with wt_shift one cycle after each read, agen_start on the
//    last weight cycle, the address generator configuration of each slice
//    (output base shifted by dr*W+ds for stride 1; input base, strides 2 and
//    W+2 for stride 2), init only on the first slice, and the cycle count
//    per slice: W + positions + DRAIN_CYC;
//  - CONV with NCA: nca_start pulse and the wait for nca_busy to fall.
module tb_controller;
  import sdacc_pkg::*;
  localparam int W = 8, DRAIN = 12;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready;
  cmd_t cmd;
  logic gb_en, gb_we, ib_we, wb_we, wb_re, wt_shift, ob_drn_re, ob_swap;
  logic [14:0] gb_addr;
  logic [9:0] ib_waddr, ob_drn_raddr;
  logic [8:0] wb_waddr, wb_raddr;
  logic agen_start, agen_advance, agen_last = 0, strm_valid, strm_last, strm_init;
  agen_cfg_t in_cfg, out_cfg;
  nca_mode_e nca_mode;
  norm_mode_e norm_mode;
  logic nca_start, nca_busy = 0;
  int checks = 0, failures = 0;

  controller #(.W(W), .DRAIN_CYC(DRAIN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("%0t: %s", $time, what);
    end
  endtask

  // address generator model: positions remaining in the current slice
  int npos, pos_cnt;
  always_comb agen_last = (pos_cnt == npos - 1);
  always @(posedge clk) begin
    if (agen_start) pos_cnt <= 0;
    else if (agen_advance) pos_cnt <= pos_cnt + 1;
  end

  task automatic send(input cmd_t c);
    @(negedge clk);
    chk(cmd_ready, "not ready for a command");
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic test_copy(input opcode_e op);
    cmd_t c;
    int gb, bf, len, rd_seen, wr_seen;
    gb = $urandom_range(1000); bf = $urandom_range(200); len = $urandom_range(20, 1);
    c = '0; c.op = op; c.gb_addr = 15'(gb); c.buf_addr = 12'(bf); c.len = 12'(len);
    rd_seen = 0; wr_seen = 0;
    send(c);
    while (!cmd_ready) begin
      // sampled just before the rising edge
      if (op == OP_STORE) begin
        if (ob_drn_re) begin
          chk(ob_drn_raddr == 10'(bf + rd_seen), "store: drain address");
          rd_seen++;
        end
        if (gb_we) begin
          chk(gb_en && gb_addr == 15'(gb + wr_seen), "store: global buffer write address");
          chk(wr_seen < rd_seen, "store: write before read");
          wr_seen++;
        end
      end else begin
        if ((op == OP_LOAD_IN) ? ib_we : wb_we) begin
          chk(((op == OP_LOAD_IN) ? 10'(ib_waddr) : 10'(wb_waddr)) == 10'(bf + wr_seen), "load: buffer write address");
          chk(wr_seen == rd_seen - 1, "load: write not one cycle after read");
          wr_seen++;
        end
        chk(!((op == OP_LOAD_IN) ? wb_we : ib_we), "load: wrong buffer written");
        if (gb_en) begin
          chk(!gb_we && gb_addr == 15'(gb + rd_seen), "load: global buffer read address");
          rd_seen++;
        end
      end
      @(negedge clk);
    end
    chk(rd_seen == len && wr_seen == len, $sformatf("copy: %0d reads %0d writes, want %0d", rd_seen, wr_seen, len));
  endtask

  task automatic test_conv(input bit s2, input bit with_nca);
    cmd_t c;
    int h, w, wt_base, in_base, out_base, cyc, slot_cyc, slot, shifts, nstream, exp_k, rd_i;
    int order [9] = '{4, 0, 1, 2, 3, 5, 6, 7, 8};
    h = 2 * $urandom_range(4, 1); w = 2 * $urandom_range(4, 1);
    wt_base = $urandom_range(100); in_base = $urandom_range(100); out_base = $urandom_range(100, 40);
    c = '0; c.op = OP_CONV; c.in_h = 8'(h); c.in_w = 8'(w); c.k3 = 1; c.stride2 = s2; c.init = 1;
    c.wt_base = 12'(wt_base); c.in_base = 12'(in_base); c.out_base = 12'(out_base);
    c.nca_mode = with_nca ? NCA_SOFTMAX : NCA_NONE;
    npos = s2 ? (h / 2) * (w / 2) : h * w;
    send(c);
    chk(nca_start == with_nca, "nca_start pulse");
    if (with_nca) nca_busy = 1;
    for (slot = 0; slot < 9; slot++) begin
      int dr, ds;
      exp_k = order[slot];
      dr = exp_k / 3 - 1; ds = exp_k % 3 - 1;
      // weight loading: W reads, last column first
      for (rd_i = 0; rd_i < W; rd_i++) begin
        chk(wb_re && wb_raddr == 9'(wt_base + exp_k * W + W - 1 - rd_i),
            $sformatf("slot %0d weight read %0d: re %b addr %0d", slot, rd_i, wb_re, wb_raddr));
        chk(agen_start == (rd_i == W - 1), "agen_start timing");
        if (rd_i == W - 1) begin
          if (!s2) begin
            chk(out_cfg.base == addr_t'(out_base - (dr * w + ds)), "stride 1: output base of slice");
            chk(out_cfg.chk_en && out_cfg.chk_roff == 13'(-dr) && out_cfg.chk_coff == 13'(-ds), "stride 1: detector window");
            chk(in_cfg.base == addr_t'(in_base) && in_cfg.step == 1 && !in_cfg.chk_en, "stride 1: input scan");
          end else begin
            chk(in_cfg.base == addr_t'(in_base + dr * w + ds), "stride 2: input base of slice");
            chk(in_cfg.step == 2 && in_cfg.row_step == addr_t'(w + 2), "stride 2: input strides 2 and W+2");
            chk(in_cfg.rows == 12'(h / 2) && in_cfg.cols == 12'(w / 2) && in_cfg.chk_mul == 2, "stride 2: output grid");
            chk(out_cfg.base == addr_t'(out_base) && !out_cfg.chk_en, "stride 2: output scan");
          end
        end
        @(negedge clk);
        chk(wt_shift, "wt_shift one cycle after the weight read");
      end
      // streaming
      nstream = 0;
      while (strm_valid) begin
        chk(strm_init == (slot == 0), "init only on the first slice");
        chk(strm_last == (nstream == npos - 1), "strm_last position");
        nstream++;
        @(negedge clk);
      end
      chk(nstream == npos, $sformatf("slot %0d streamed %0d positions, want %0d", slot, nstream, npos));
      // drain
      cyc = 0;
      while (!wb_re && !cmd_ready && cyc < 1000) begin
        cyc++;
        @(negedge clk);
        if (with_nca && slot == 8 && cyc == DRAIN + 5) nca_busy = 0;
      end
      if (slot != 8) chk(cyc == DRAIN, $sformatf("drain took %0d cycles, want %0d", cyc, DRAIN));
      else if (with_nca) chk(cyc >= DRAIN + 5, "command ended before the NCA stage finished");
      else chk(cyc == DRAIN, "last drain length");
    end
    chk(cmd_ready, "CONV did not end after nine slices");
  endtask

  initial begin
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int i = 0; i < 4; i++) begin
      test_copy(OP_LOAD_IN);
      test_copy(OP_LOAD_WT);
      test_copy(OP_STORE);
    end
    begin
      cmd_t c;
      int np;
      c = '0; c.op = OP_SWAP;
      send(c);
      np = int'(ob_swap);
      repeat (3) begin @(negedge clk); np += int'(ob_swap); end
      chk(np == 1, "SWAP gives one ob_swap pulse");
    end
    for (int i = 0; i < 4; i++) test_conv(i[0], 0);
    test_conv(0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
