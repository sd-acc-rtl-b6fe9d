// tb_sdacc_top: end-to-end test of the accelerator core at reduced size
// (8x8 array, 8-element tiles, small buffers). Data is placed in the global
// buffer through the external port, the core is driven with commands, and
// results are read back through the external port and compared with
// real-number references:
//   1. 3x3 stride-1 convolution with zero padding (9 kernel slices, edge
//      flags), followed by a second input-channel tile accumulated with a 1x1
//      kernel (init = 0);
//   2. 3x3 stride-2 convolution (input strides 2 and W+2, padding flags);
//   2b. transposed 3x3 convolution with output stride 2, and nearest
//      2x upsampling (four 1x1 identity passes, one per output phase);
//   3. attention-style softmax: a 1x1 product whose results pass the NCA stage
//      (issued as two commands, the second continuing the statistics),
//      then the product is reloaded and normalised by the Norm stage on its
//      way into the array (identity weights);
//   4. the same for layernorm, and GELU on the operand path.
// Results always leave through the output double buffer (swap, then store).
// Each mechanism is counted and a mechanism that never occurred is a failure.
module tb_sdacc_top;
  import sdacc_pkg::*;
  import tb_fp16_pkg::*;
  localparam int H = 8, GB_DEPTH = 1024, GB_AW = 10;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, ext_en = 0, ext_we = 0, evt_skip, busy;
  cmd_t cmd;
  logic [GB_AW-1:0] ext_addr = 0;
  fp16_t ext_wdata [H], ext_rdata [H];
  int checks = 0, failures = 0;
  int n_skip = 0, n_conv3 = 0, n_stride2 = 0, n_accum = 0, n_softmax = 0,
      n_layernorm = 0, n_gelu = 0, n_swap = 0, n_cont = 0, n_deconv = 0, n_upsample = 0;

  sdacc_top #(.H(H), .TILE(8), .IB_DEPTH(256), .OB_DEPTH(256), .GB_DEPTH(GB_DEPTH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (evt_skip) n_skip++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // global buffer regions (word addresses)
  localparam int GX = 0, GX2 = 64, GW = 128, GW1 = 200, GI = 216, GY = 256, GS = 400, GP = 500;

  real xin [64][H];     // input map, l x channel
  real xin2 [64][H];    // second channel tile
  real wt [9][H][H];    // kernel k, c_out, c_in
  real w1 [H][H];       // 1x1 kernel of the second tile
  real yref [64][H];
  fp16_t rd [64][H];

  task automatic ext_write(input int a, input real v [H]);
    @(negedge clk);
    ext_en = 1; ext_we = 1; ext_addr = GB_AW'(a);
    for (int k = 0; k < H; k++) ext_wdata[k] = real_to_fp16(v[k]);
    @(negedge clk);
    ext_en = 0; ext_we = 0;
  endtask

  task automatic ext_read_block(input int a, input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      ext_en = 1; ext_we = 0; ext_addr = GB_AW'(a + i);
      @(negedge clk);
      ext_en = 0;
      rd[i] = ext_rdata;
    end
  endtask

  task automatic issue(input cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    if (c.op == OP_SWAP) n_swap++;
  endtask

  function automatic cmd_t copy_cmd(input opcode_e op, input int gb, input int bf, input int len);
    cmd_t c;
    c = '0;
    c.op = op; c.gb_addr = 15'(gb); c.buf_addr = 12'(bf); c.len = 12'(len);
    return c;
  endfunction

  function automatic cmd_t conv_cmd(input int h, input int w, input bit k3, input bit s2,
                                    input bit init, input int wt_base,
                                    input nca_mode_e nm, input norm_mode_e om);
    cmd_t c;
    c = '0;
    c.op = OP_CONV; c.in_h = 8'(h); c.in_w = 8'(w); c.k3 = k3; c.stride2 = s2;
    c.init = init; c.wt_base = 12'(wt_base); c.nca_mode = nm; c.norm_mode = om;
    return c;
  endfunction

  task automatic store_and_read(input int n, input int gaddr);
    issue(copy_cmd(OP_SWAP, 0, 0, 0));
    issue(copy_cmd(OP_STORE, gaddr, 0, n));
    ext_read_block(gaddr, n);
  endtask

  task automatic compare(input int n, input real rel, input real abs, input string what);
    for (int i = 0; i < n; i++) for (int r = 0; r < H; r++) begin
      checks++;
      if (!close(rd[i][r], yref[i][r], rel, abs)) begin
        failures++;
        if (failures < 12) $display("%s: pos %0d ch %0d got %f want %f", what, i, r,
                                    fp16_to_real(rd[i][r]), yref[i][r]);
      end
    end
  endtask

  // write identity weights (1x1) at word a
  task automatic write_identity(input int a);
    real v [H];
    for (int c = 0; c < H; c++) begin
      for (int r = 0; r < H; r++) v[r] = (r == c) ? 1.0 : 0.0;
      ext_write(a + c, v);
    end
  endtask

  initial begin
    real v [H];
    int HH, WW, pr, pc;
    for (int k = 0; k < H; k++) ext_wdata[k] = 0;
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------------------------------------------- data
    HH = 6; WW = 8;
    for (int l = 0; l < 64; l++) for (int c = 0; c < H; c++) begin
      xin[l][c]  = fp16_to_real(real_to_fp16(real'(int'($urandom_range(200, 0)) - 100) / 100.0));
      xin2[l][c] = fp16_to_real(real_to_fp16(real'(int'($urandom_range(200, 0)) - 100) / 100.0));
    end
    for (int k = 0; k < 9; k++) for (int r = 0; r < H; r++) for (int c = 0; c < H; c++)
      wt[k][r][c] = fp16_to_real(real_to_fp16(real'(int'($urandom_range(100, 0)) - 50) / 200.0));
    for (int r = 0; r < H; r++) for (int c = 0; c < H; c++)
      w1[r][c] = fp16_to_real(real_to_fp16(real'(int'($urandom_range(100, 0)) - 50) / 200.0));
    for (int l = 0; l < 64; l++) begin
      for (int c = 0; c < H; c++) v[c] = xin[l][c];
      ext_write(GX + l, v);
      for (int c = 0; c < H; c++) v[c] = xin2[l][c];
      ext_write(GX2 + l, v);
    end
    for (int k = 0; k < 9; k++) for (int c = 0; c < H; c++) begin
      for (int r = 0; r < H; r++) v[r] = wt[k][r][c];
      ext_write(GW + k * H + c, v);
    end
    for (int c = 0; c < H; c++) begin
      for (int r = 0; r < H; r++) v[r] = w1[r][c];
      ext_write(GW1 + c, v);
    end
    write_identity(GI);

    // ---------------------------------------------------- 1. 3x3 stride 1 + second tile
    issue(copy_cmd(OP_LOAD_IN, GX, 0, HH * WW));
    issue(copy_cmd(OP_LOAD_WT, GW, 0, 9 * H));
    issue(conv_cmd(HH, WW, 1, 0, 1, 0, NCA_NONE, NORM_BYPASS));
    n_conv3++;
    issue(copy_cmd(OP_LOAD_IN, GX2, 0, HH * WW));
    issue(copy_cmd(OP_LOAD_WT, GW1, 0, H));
    issue(conv_cmd(HH, WW, 0, 0, 0, 0, NCA_NONE, NORM_BYPASS));
    n_accum++;
    for (int p = 0; p < HH; p++) for (int q = 0; q < WW; q++) for (int r = 0; r < H; r++) begin
      real s;
      s = 0.0;
      for (int kr = 0; kr < 3; kr++) for (int ks = 0; ks < 3; ks++) begin
        pr = p + kr - 1; pc = q + ks - 1;
        if (pr >= 0 && pr < HH && pc >= 0 && pc < WW)
          for (int c = 0; c < H; c++) s += wt[kr * 3 + ks][r][c] * xin[pr * WW + pc][c];
      end
      for (int c = 0; c < H; c++) s += w1[r][c] * xin2[p * WW + q][c];
      yref[p * WW + q][r] = s;
    end
    store_and_read(HH * WW, GY);
    compare(HH * WW, 2.0e-2, 2.0e-2, "conv3x3");

    // ---------------------------------------------------- 2. 3x3 stride 2 on 8x8
    HH = 8; WW = 8;
    issue(copy_cmd(OP_LOAD_IN, GX, 0, HH * WW));
    issue(copy_cmd(OP_LOAD_WT, GW, 0, 9 * H));   // slice 0 was replaced by the 1x1 kernel
    issue(conv_cmd(HH, WW, 1, 1, 1, 0, NCA_NONE, NORM_BYPASS));
    n_stride2++;
    for (int p = 0; p < HH / 2; p++) for (int q = 0; q < WW / 2; q++) for (int r = 0; r < H; r++) begin
      real s;
      s = 0.0;
      for (int kr = 0; kr < 3; kr++) for (int ks = 0; ks < 3; ks++) begin
        pr = 2 * p + kr - 1; pc = 2 * q + ks - 1;
        if (pr >= 0 && pr < HH && pc >= 0 && pc < WW)
          for (int c = 0; c < H; c++) s += wt[kr * 3 + ks][r][c] * xin[pr * WW + pc][c];
      end
      yref[p * (WW / 2) + q][r] = s;
    end
    store_and_read(HH * WW / 4, GY);
    compare(HH * WW / 4, 2.0e-2, 2.0e-2, "conv3x3/2");

    // ---------------------------------------------------- 2b. output stride 2
    // transposed 3x3 convolution: input (p,q) adds W[r][s] x to output
    // (2p+r-1, 2q+s-1) of the doubled map
    HH = 4; WW = 4;
    begin
      cmd_t c;
      c = conv_cmd(HH, WW, 1, 0, 1, 0, NCA_NONE, NORM_BYPASS);
      c.ostride2 = 1'b1;
      issue(c);
    end
    n_deconv++;
    for (int i = 0; i < 4 * HH * WW; i++) for (int r = 0; r < H; r++) yref[i][r] = 0.0;
    for (int p = 0; p < HH; p++) for (int q = 0; q < WW; q++)
      for (int kr = 0; kr < 3; kr++) for (int ks = 0; ks < 3; ks++) begin
        pr = 2 * p + kr - 1; pc = 2 * q + ks - 1;
        if (pr >= 0 && pr < 2 * HH && pc >= 0 && pc < 2 * WW)
          for (int r = 0; r < H; r++) for (int c = 0; c < H; c++)
            yref[pr * 2 * WW + pc][r] += wt[kr * 3 + ks][r][c] * xin[p * WW + q][c];
      end
    store_and_read(4 * HH * WW, GY);
    compare(4 * HH * WW, 2.0e-2, 2.0e-2, "deconv");
    // nearest-neighbour upsampling: identity 1x1 weights, one command per
    // output phase (output base offset di*2W + dj)
    issue(copy_cmd(OP_LOAD_WT, GI, 0, H));
    for (int ph = 0; ph < 4; ph++) begin
      cmd_t c;
      c = conv_cmd(HH, WW, 0, 0, 1, 0, NCA_NONE, NORM_BYPASS);
      c.ostride2 = 1'b1;
      c.out_base = 12'((ph / 2) * 2 * WW + ph % 2);
      issue(c);
    end
    n_upsample++;
    for (int i = 0; i < 2 * HH; i++) for (int j = 0; j < 2 * WW; j++) for (int r = 0; r < H; r++)
      yref[i * 2 * WW + j][r] = xin[(i / 2) * WW + j / 2][r];
    store_and_read(4 * HH * WW, GY);
    compare(4 * HH * WW, 1.0e-3, 1.0e-3, "upsample");

    // ---------------------------------------------------- 3. softmax, 4. layernorm
    for (int mode = 0; mode < 2; mode++) begin
      int L;
      cmd_t c;
      real mx [H], sm [H], sq [H];
      L = 20;                               // two full tiles and a partial one
      issue(copy_cmd(OP_LOAD_IN, GX, 0, L));
      issue(copy_cmd(OP_LOAD_WT, GW1, 0, H));
      // the sequence is covered by two commands (two L tiles of 12 and L-12
      // positions); the second continues the characteristics of the first
      c = conv_cmd(12, 1, 0, 0, 1, 0, mode == 0 ? NCA_SOFTMAX : NCA_LAYERNORM, NORM_BYPASS);
      issue(c);
      c.in_h = 8'(L - 12); c.in_base = 12'd12; c.out_base = 12'd12; c.nca_cont = 1'b1;
      issue(c);
      n_cont++;
      store_and_read(L, GS);                 // the pre-matmul results S
      for (int r = 0; r < H; r++) begin
        mx[r] = -1.0e9; sm[r] = 0.0; sq[r] = 0.0;
        for (int l = 0; l < L; l++) begin
          if (fp16_to_real(rd[l][r]) > mx[r]) mx[r] = fp16_to_real(rd[l][r]);
          sq[r] += fp16_to_real(rd[l][r]) ** 2;
          sm[r] += fp16_to_real(rd[l][r]);
        end
      end
      for (int l = 0; l < L; l++) for (int r = 0; r < H; r++) begin
        if (mode == 0) begin
          real es;
          es = 0.0;
          for (int j = 0; j < L; j++) es += $exp(fp16_to_real(rd[j][r]) - mx[r]);
          yref[l][r] = $exp(fp16_to_real(rd[l][r]) - mx[r]) / es;
        end else begin
          real mu, sg;
          mu = sm[r] / L;
          sg = $sqrt(sq[r] / L - mu * mu);
          yref[l][r] = (fp16_to_real(rd[l][r]) - mu) / sg;
        end
      end
      // post-matmul: operands normalised on the way in, identity weights
      issue(copy_cmd(OP_LOAD_IN, GS, 0, L));
      issue(copy_cmd(OP_LOAD_WT, GI, 0, H));
      issue(conv_cmd(L, 1, 0, 0, 1, 0, NCA_NONE, mode == 0 ? NORM_SOFTMAX : NORM_LAYERNORM));
      if (mode == 0) n_softmax++; else n_layernorm++;
      store_and_read(L, GP);
      compare(L, 3.0e-2, 3.0e-3, mode == 0 ? "softmax" : "layernorm");
    end

    // ---------------------------------------------------- GELU on operands
    issue(copy_cmd(OP_LOAD_IN, GX, 0, 16));
    issue(copy_cmd(OP_LOAD_WT, GI, 0, H));
    issue(conv_cmd(16, 1, 0, 0, 1, 0, NCA_NONE, NORM_GELU));
    n_gelu++;
    for (int l = 0; l < 16; l++) for (int r = 0; r < H; r++)
      yref[l][r] = xin[l][r] / (1.0 + $exp(-1.702 * xin[l][r]));
    store_and_read(16, GP);
    compare(16, 2.0e-2, 2.0e-3, "gelu");

    // ---------------------------------------------------- mechanisms
    $display("mechanisms: edge-skip %0d conv3x3 %0d stride2 %0d cin-accumulate %0d softmax %0d layernorm %0d gelu %0d bank-swap %0d nca-continued %0d deconv %0d upsample %0d",
             n_skip, n_conv3, n_stride2, n_accum, n_softmax, n_layernorm, n_gelu, n_swap, n_cont, n_deconv, n_upsample);
    checks++;
    if (n_skip == 0 || n_conv3 == 0 || n_stride2 == 0 || n_accum == 0 || n_softmax == 0 ||
        n_layernorm == 0 || n_gelu == 0 || n_swap == 0 || n_cont == 0 ||
        n_deconv == 0 || n_upsample == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
