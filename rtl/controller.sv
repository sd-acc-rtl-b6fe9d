// controller: command sequencer of the accelerator (the "Ctrl" block).
//
// It executes one command at a time (see cmd_t in sdacc_pkg):
//  LOAD_IN / LOAD_WT: copies words from the global buffer into the input or
//    weight buffer, one word per cycle (read, then write one cycle later).
//  STORE: copies words from the drain bank of the output buffer to the global
//    buffer, one word per cycle.
//  SWAP: swaps the two banks of the output buffer.
//  CONV: one Uni-conv operation, the loop nest
//      for f in kernels:                    (each 1x1 slice of the kernel)
//        load the f-th (C_out x C_in) weights into the systolic array
//        for l in input positions: Psum = IA[l] x Wt[f]      (array)
//                                  OA[map_f(l)] += Psum      (VPU)
//    For each 1x1 kernel slice it shifts the weights in (W cycles), starts
//    the two address generators with the base addresses, strides and
//    detector windows of that slice, streams one position per cycle, then
//    waits for the pipeline to empty. A 3x3 kernel runs its centre slice
//    first, with init, so that every output word is written before the other
//    eight slices add to it (edge positions of the other slices are flagged
//    and dropped). With nca_mode set, the results are also streamed through
//    the VPU's NCA stage and the command ends when the VPU has folded in the
//    last tile; nca_cont leaves the VPU's characteristics of the previous
//    command in place (no nca_start), so they keep accumulating.
//
// Timing of a CONV: per kernel slice W + 1 cycles of weight loading,
// rows*cols streaming cycles and DRAIN_CYC cycles of draining.
// ostride2 runs a transposed (stride-2) convolution by giving the output side
// the stride instead, as the design description suggests for deconvolution.
// The decomposition into 1x1 kernels, the address mapping of each slice and
// the stride-2 input stride of 2 / W+2 follow the design description; the
// command set, the one-command-at-a-time sequencing and the centre-first
// order are this implementation's choices.
module controller
  import sdacc_pkg::*;
#(
  parameter int unsigned W         = 32,
  parameter int unsigned DRAIN_CYC = 1 + 4 + 2 * W - 1 + 3,
  parameter int unsigned GB_AW     = 15,
  parameter int unsigned IB_AW     = 10,
  parameter int unsigned WB_AW     = 9,
  parameter int unsigned OB_AW     = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  // command port
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  cmd_t             cmd,
  // global buffer, internal port
  output logic             gb_en,
  output logic             gb_we,
  output logic [GB_AW-1:0] gb_addr,
  // input buffer write (data from the global buffer)
  output logic             ib_we,
  output logic [IB_AW-1:0] ib_waddr,
  // weight buffer
  output logic             wb_we,
  output logic [WB_AW-1:0] wb_waddr,
  output logic             wb_re,
  output logic [WB_AW-1:0] wb_raddr,
  output logic             wt_shift,
  // output buffer drain bank
  output logic             ob_drn_re,
  output logic [OB_AW-1:0] ob_drn_raddr,
  output logic             ob_swap,
  // address generators
  output logic             agen_start,
  output agen_cfg_t        in_cfg,
  output agen_cfg_t        out_cfg,
  output logic             agen_advance,
  input  logic             agen_last,
  // stream control (the cycle in which the input buffer read is issued)
  output logic             strm_valid,
  output logic             strm_last,
  output logic             strm_init,
  // vector processing unit
  output nca_mode_e        nca_mode,
  output norm_mode_e       norm_mode,
  output logic             nca_start,
  input  logic             nca_busy
);
  typedef enum logic [2:0] {
    S_IDLE, S_COPY, S_COPY_END, S_WLOAD, S_STREAM, S_DRAIN, S_NCA
  } state_e;

  state_e      state;
  cmd_t        c_q;
  logic [11:0] cnt;
  logic        wr_v;
  logic [11:0] wr_idx;
  logic [3:0]  slot;
  logic [3:0]  kpos;
  logic signed [2:0] dr, ds;
  logic [3:0]  nslots;

  // kernel slice order: centre (4) first, then 0,1,2,3,5,6,7,8.
  // With output stride 2 the slices 4,5,7,8 each cover one of the four
  // output phases completely, so they run first, all with init; then
  // 0,1,2,3,6 add to them.
  always_comb begin
    if (c_q.ostride2) begin
      unique case (slot)
        4'd0: kpos = 4'd4;
        4'd1: kpos = 4'd5;
        4'd2: kpos = 4'd7;
        4'd3: kpos = 4'd8;
        4'd8: kpos = 4'd6;
        default: kpos = slot - 4'd4;
      endcase
    end else if (slot == 4'd0) begin
      kpos = 4'd4;
    end else if (slot <= 4'd4) begin
      kpos = slot - 4'd1;
    end else begin
      kpos = slot;
    end
    if (!c_q.k3)           kpos = 4'd4;
    dr = $signed(3'(kpos / 4'd3)) - 3'sd1;
    ds = $signed(3'(kpos % 4'd3)) - 3'sd1;
    nslots = c_q.k3 ? 4'd9 : 4'd1;
  end

  // address generator configuration of the current slice
  always_comb begin
    logic signed [12:0] iw, ih, off, off2;
    iw  = 13'(c_q.in_w);
    ih  = 13'(c_q.in_h);
    off = 13'(dr) * iw + 13'(ds);
    off2 = 13'(dr) * 13'sd2 * iw + 13'(ds);
    in_cfg  = '0;
    out_cfg = '0;
    if (c_q.ostride2) begin
      // transposed convolution: input (p,q) adds to output (2p+dr, 2q+ds)
      // of the 2H x 2W output; output stride 2 within a row, 2W+2 across
      in_cfg.base      = addr_t'(c_q.in_base);
      in_cfg.step      = addr_t'(1);
      in_cfg.row_step  = addr_t'(1);
      in_cfg.rows      = 12'(c_q.in_h);
      in_cfg.cols      = 12'(c_q.in_w);
      out_cfg.base     = addr_t'(c_q.out_base) + addr_t'(off2);
      out_cfg.step     = addr_t'(2);
      out_cfg.row_step = addr_t'(13'sd2 * iw) + addr_t'(2);
      out_cfg.rows     = 12'(c_q.in_h);
      out_cfg.cols     = 12'(c_q.in_w);
      out_cfg.chk_en   = 1'b1;
      out_cfg.chk_mul  = 2'd2;
      out_cfg.chk_roff = 13'(dr);
      out_cfg.chk_coff = 13'(ds);
      out_cfg.chk_rows = 12'(c_q.in_h) << 1;
      out_cfg.chk_cols = 12'(c_q.in_w) << 1;
    end else if (!c_q.stride2) begin
      // input side: plain scan of all positions
      in_cfg.base     = addr_t'(c_q.in_base);
      in_cfg.step     = addr_t'(1);
      in_cfg.row_step = addr_t'(1);
      in_cfg.rows     = 12'(c_q.in_h);
      in_cfg.cols     = 12'(c_q.in_w);
      // output side: l -> l - (dr*W + ds), flag outputs outside the map
      out_cfg.base     = addr_t'(c_q.out_base) - addr_t'(off);
      out_cfg.step     = addr_t'(1);
      out_cfg.row_step = addr_t'(1);
      out_cfg.rows     = 12'(c_q.in_h);
      out_cfg.cols     = 12'(c_q.in_w);
      out_cfg.chk_en   = 1'b1;
      out_cfg.chk_mul  = 2'd1;
      out_cfg.chk_roff = -13'(dr);
      out_cfg.chk_coff = -13'(ds);
      out_cfg.chk_rows = 12'(c_q.in_h);
      out_cfg.chk_cols = 12'(c_q.in_w);
    end else begin
      // input side: stride 2 within a row, W+2 when spanning rows;
      // flag padding positions
      in_cfg.base     = addr_t'(c_q.in_base) + addr_t'(off);
      in_cfg.step     = addr_t'(2);
      in_cfg.row_step = addr_t'(iw) + addr_t'(2);
      in_cfg.rows     = 12'(c_q.in_h >> 1);
      in_cfg.cols     = 12'(c_q.in_w >> 1);
      in_cfg.chk_en   = 1'b1;
      in_cfg.chk_mul  = 2'd2;
      in_cfg.chk_roff = 13'(dr);
      in_cfg.chk_coff = 13'(ds);
      in_cfg.chk_rows = 12'(c_q.in_h);
      in_cfg.chk_cols = 12'(c_q.in_w);
      // output side: plain scan
      out_cfg.base     = addr_t'(c_q.out_base);
      out_cfg.step     = addr_t'(1);
      out_cfg.row_step = addr_t'(1);
      out_cfg.rows     = 12'(c_q.in_h >> 1);
      out_cfg.cols     = 12'(c_q.in_w >> 1);
    end
    if (ih == 13'sd0) in_cfg.rows = 12'd1;  // degenerate command guard
  end

  assign cmd_ready = (state == S_IDLE);
  assign nca_mode  = c_q.nca_mode;
  assign norm_mode = c_q.norm_mode;

  // copy engine ports
  always_comb begin
    gb_en        = 1'b0;
    gb_we        = 1'b0;
    gb_addr      = c_q.gb_addr + GB_AW'(cnt);
    ob_drn_re    = 1'b0;
    ob_drn_raddr = OB_AW'(c_q.buf_addr + cnt);
    if (c_q.op == OP_STORE) begin
      ob_drn_re = (state == S_COPY);
      gb_en     = wr_v;
      gb_we     = wr_v;
      gb_addr   = c_q.gb_addr + GB_AW'(wr_idx);
    end else begin
      gb_en = (state == S_COPY);
    end
    ib_we    = wr_v && (c_q.op == OP_LOAD_IN);
    ib_waddr = IB_AW'(c_q.buf_addr + wr_idx);
    wb_we    = wr_v && (c_q.op == OP_LOAD_WT);
    wb_waddr = WB_AW'(c_q.buf_addr + wr_idx);
  end

  // weight streaming and data streaming
  assign wb_re        = (state == S_WLOAD);
  assign wb_raddr     = WB_AW'(c_q.wt_base + 12'(c_q.k3 ? kpos : 4'd0) * 12'(W) + 12'(W - 1) - cnt);
  // the address generators load their configuration as weight loading ends
  assign agen_start   = (state == S_WLOAD) && (cnt == 12'(W - 1));
  assign agen_advance = (state == S_STREAM);
  assign strm_valid   = (state == S_STREAM);
  assign strm_last    = (state == S_STREAM) && agen_last;
  assign strm_init    = c_q.init && (slot == 4'd0 || (c_q.ostride2 && slot < 4'd4));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      c_q        <= '0;
      cnt        <= '0;
      wr_v       <= 1'b0;
      wr_idx     <= '0;
      slot       <= '0;
      wt_shift   <= 1'b0;
      ob_swap    <= 1'b0;
      nca_start  <= 1'b0;
    end else begin
      wr_v       <= (state == S_COPY);
      wr_idx     <= cnt;
      wt_shift   <= (state == S_WLOAD);
      ob_swap    <= 1'b0;
      nca_start  <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c_q  <= cmd;
          cnt  <= '0;
          slot <= '0;
          unique case (cmd.op)
            OP_LOAD_IN, OP_LOAD_WT, OP_STORE:
              state <= (cmd.len == '0) ? S_IDLE : S_COPY;
            OP_SWAP: ob_swap <= 1'b1;
            OP_CONV: begin
              state     <= S_WLOAD;
              nca_start <= (cmd.nca_mode != NCA_NONE) && !cmd.nca_cont;
            end
            default: ;
          endcase
        end
        S_COPY: begin
          cnt <= cnt + 12'd1;
          if (cnt == c_q.len - 12'd1) state <= S_COPY_END;
        end
        S_COPY_END: state <= S_IDLE;
        S_WLOAD: begin
          if (cnt == 12'(W - 1)) begin
            cnt   <= '0;
            state <= S_STREAM;
          end else begin
            cnt <= cnt + 12'd1;
          end
        end
        S_STREAM: if (agen_last) begin
          cnt   <= '0;
          state <= S_DRAIN;
        end
        S_DRAIN: begin
          cnt <= cnt + 12'd1;
          if (cnt == 12'(DRAIN_CYC - 1)) begin
            cnt <= '0;
            if (slot != nslots - 4'd1) begin
              slot  <= slot + 4'd1;
              state <= S_WLOAD;
            end else if (c_q.nca_mode != NCA_NONE) begin
              state <= S_NCA;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        S_NCA: if (!nca_busy) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
