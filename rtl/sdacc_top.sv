// sdacc_top: the Stable Diffusion accelerator core.
//
// A weight-stationary H x W systolic array runs every linear operator of the
// U-Net (convolutions and attention/FFN matrix products) as matrix
// multiplications in the address-centric dataflow: a KxK convolution is split
// into K*K 1x1 convolutions, and the partial sums of each are added into the
// output buffer at addresses shifted by the kernel offset. A vector processing
// unit (VPU) does that partial-sum addition and the nonlinear operators, the
// latter in two streaming stages (NCA on results, Norm on operands).
//
// Blocks and data path (one vector of 32 fp16 values per cycle throughout):
//   global buffer (2 MB) --LOAD--> input buffer, weight buffer
//   input buffer --(address generator)--> VPU Norm stage --> systolic array
//   weight buffer --shift--> systolic array weight registers
//   systolic array --> accumulation unit <--> output (double) buffer
//                               (address generator & detector give l_out, flag)
//   accumulation unit results --> VPU NCA stage
//   output buffer drain bank --STORE--> global buffer
//   global buffer external port <--> off-chip memory (outside this core)
// The controller executes the command stream (cmd_t); see controller.sv.
//
// Timing along the streaming path: input buffer read 1 cycle, Norm pipeline 4,
// array W+H-1, accumulation 1. The position's output address, edge flag, init
// and last marks travel alongside in a delay line of the same length.
// Ports: command handshake (cmd_valid/cmd_ready), the global buffer's
// external port, evt_skip (one pulse per partial-sum vector dropped by the
// edge detector) and busy.
// Defaults are the implemented configuration: 32x32 array, 32-parallel VPU,
// 2 MB global buffer, fp16. The input/weight/output buffer depths are this
// implementation's choice (no sizes are given for them).
// Lint notes: the address generators' busy outputs are left open (the
// controller tracks the stream itself); only the low bits of the 20-bit
// generator addresses address the buffers; the VPU statistics (stat0/stat1)
// and the output buffer's bank_sel are observation signals with no user
// inside the core.
module sdacc_top
  import sdacc_pkg::*;
#(
  parameter int unsigned H         = 32,
  parameter int unsigned TILE      = 32,
  parameter int unsigned IB_DEPTH  = 1024,
  parameter int unsigned WB_DEPTH  = 9 * H,
  parameter int unsigned OB_DEPTH  = 1024,
  parameter int unsigned GB_DEPTH  = 32768,
  localparam int unsigned W        = H,
  localparam int unsigned GB_AW    = $clog2(GB_DEPTH),
  localparam int unsigned IB_AW    = $clog2(IB_DEPTH),
  localparam int unsigned WB_AW    = $clog2(WB_DEPTH),
  localparam int unsigned OB_AW    = $clog2(OB_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  cmd_t             cmd,
  input  logic             ext_en,
  input  logic             ext_we,
  input  logic [GB_AW-1:0] ext_addr,
  input  fp16_t            ext_wdata [H],
  output fp16_t            ext_rdata [H],
  output logic             evt_skip,
  output logic             busy
);
  localparam int unsigned SA_LAT = W + H - 1;
  localparam int unsigned NORM_LAT = 4;
  localparam int unsigned DL = 1 + NORM_LAT + SA_LAT;   // read issue -> array output

  // ------------------------------------------------------------ controller
  logic             gb_en, gb_we, ib_we, wb_we, wb_re, wt_shift;
  logic [GB_AW-1:0] gb_addr;
  logic [IB_AW-1:0] ib_waddr;
  logic [WB_AW-1:0] wb_waddr, wb_raddr;
  logic             ob_drn_re, ob_swap, agen_start, agen_advance;
  logic [OB_AW-1:0] ob_drn_raddr;
  agen_cfg_t        in_cfg, out_cfg;
  logic             strm_valid, strm_last, strm_init;
  nca_mode_e        nca_mode;
  norm_mode_e       norm_mode;
  logic             nca_start, nca_busy;
  logic             in_last, out_last_unused;

  controller #(
    .W        (W),
    .DRAIN_CYC(DL + 4),
    .GB_AW    (GB_AW),
    .IB_AW    (IB_AW),
    .WB_AW    (WB_AW),
    .OB_AW    (OB_AW)
  ) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .cmd_valid   (cmd_valid),
    .cmd_ready   (cmd_ready),
    .cmd         (cmd),
    .gb_en       (gb_en),
    .gb_we       (gb_we),
    .gb_addr     (gb_addr),
    .ib_we       (ib_we),
    .ib_waddr    (ib_waddr),
    .wb_we       (wb_we),
    .wb_waddr    (wb_waddr),
    .wb_re       (wb_re),
    .wb_raddr    (wb_raddr),
    .wt_shift    (wt_shift),
    .ob_drn_re   (ob_drn_re),
    .ob_drn_raddr(ob_drn_raddr),
    .ob_swap     (ob_swap),
    .agen_start  (agen_start),
    .in_cfg      (in_cfg),
    .out_cfg     (out_cfg),
    .agen_advance(agen_advance),
    .agen_last   (in_last),
    .strm_valid  (strm_valid),
    .strm_last   (strm_last),
    .strm_init   (strm_init),
    .nca_mode    (nca_mode),
    .norm_mode   (norm_mode),
    .nca_start   (nca_start),
    .nca_busy    (nca_busy)
  );
  assign busy = !cmd_ready;

  // ------------------------------------------------------------ buffers
  fp16_t gb_rdata [H], ob_drn_rdata [H], ib_rdata [W], wb_rdata [H];

  global_buffer #(.LANES(H), .DEPTH(GB_DEPTH)) u_gb (
    .clk      (clk),
    .ext_en   (ext_en),
    .ext_we   (ext_we),
    .ext_addr (ext_addr),
    .ext_wdata(ext_wdata),
    .ext_rdata(ext_rdata),
    .int_en   (gb_en),
    .int_we   (gb_we),
    .int_addr (gb_addr),
    .int_wdata(ob_drn_rdata),
    .int_rdata(gb_rdata)
  );

  // address generator on the input side
  addr_t in_addr;
  logic  in_ok;
  logic [IB_AW-1:0] ib_raddr;
  addr_gen u_agen_in (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (agen_start),
    .cfg     (in_cfg),
    .advance (agen_advance),
    .busy    (),
    .addr    (in_addr),
    .in_range(in_ok),
    .last    (in_last)
  );
  // positions outside the map read word 0; their results are dropped
  assign ib_raddr = in_ok ? IB_AW'(in_addr) : '0;

  input_buffer #(.W(W), .DEPTH(IB_DEPTH)) u_ib (
    .clk  (clk),
    .we   (ib_we),
    .waddr(ib_waddr),
    .wdata(gb_rdata),
    .re   (strm_valid),
    .raddr(ib_raddr),
    .rdata(ib_rdata)
  );

  weight_buffer #(.H(H), .DEPTH(WB_DEPTH)) u_wb (
    .clk  (clk),
    .we   (wb_we),
    .waddr(wb_waddr),
    .wdata(gb_rdata),
    .re   (wb_re),
    .raddr(wb_raddr),
    .rdata(wb_rdata)
  );

  // ------------------------------------------------------------ VPU address generator & detector
  addr_t out_addr;
  logic  out_ok;
  addr_gen u_agen_out (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (agen_start),
    .cfg     (out_cfg),
    .advance (agen_advance),
    .busy    (),
    .addr    (out_addr),
    .in_range(out_ok),
    .last    (out_last_unused)
  );

  // side-band delay line: read issue -> array output
  typedef struct packed {
    logic             valid;
    logic             last;
    logic             init;
    logic             flag;
    logic [OB_AW-1:0] oaddr;
  } side_t;
  side_t side_in, side [DL];
  assign side_in = '{valid: strm_valid, last: strm_last, init: strm_init,
                     flag: strm_valid && in_ok && out_ok, oaddr: OB_AW'(out_addr)};
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DL; i++) side[i] <= '0;
    end else begin
      side[0] <= side_in;
      for (int i = 1; i < DL; i++) side[i] <= side[i-1];
    end
  end
  side_t sa_side;
  assign sa_side = side[DL-1];

  // ------------------------------------------------------------ VPU function array
  logic  norm_y_valid, res_valid, last_q;
  fp16_t norm_y [W], res_vec [H], stat0 [H], stat1 [H];

  vpu_func_array #(.H(H), .TILE(TILE)) u_vpu (
    .clk         (clk),
    .rst_n       (rst_n),
    .nca_mode    (nca_mode),
    .norm_mode   (norm_mode),
    .nca_start   (nca_start),
    .nca_valid   (res_valid),
    .nca_vec     (res_vec),
    .nca_last    (res_valid && last_q),
    .nca_busy    (nca_busy),
    .norm_valid  (side[0].valid),
    .norm_vec    (ib_rdata),
    .norm_y_valid(norm_y_valid),
    .norm_y      (norm_y),
    .stat0       (stat0),
    .stat1       (stat1)
  );

  // ------------------------------------------------------------ systolic array
  logic  sa_valid;
  fp16_t sa_out [H];
  systolic_array #(.H(H), .W(W)) u_sa (
    .clk      (clk),
    .rst_n    (rst_n),
    .wt_shift (wt_shift),
    .wt_col   (wb_rdata),
    .in_valid (norm_y_valid),
    .in_vec   (norm_y),
    .out_valid(sa_valid),
    .out_vec  (sa_out)
  );

  // ------------------------------------------------------------ accumulation unit + output buffer
  logic             ob_re, ob_we, bank_sel;
  logic [OB_AW-1:0] ob_raddr, ob_waddr;
  fp16_t            ob_rdata [H], ob_wdata [H];

  accumulation_unit #(.H(H), .AW(OB_AW)) u_acc (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (sa_valid),
    .in_vec   (sa_out),
    .in_addr  (sa_side.oaddr),
    .in_range (sa_side.flag),
    .init     (sa_side.init),
    .ob_re    (ob_re),
    .ob_raddr (ob_raddr),
    .ob_rdata (ob_rdata),
    .ob_we    (ob_we),
    .ob_waddr (ob_waddr),
    .ob_wdata (ob_wdata),
    .res_valid(res_valid),
    .res_vec  (res_vec),
    .skip     (evt_skip)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_q <= 1'b0;
    else        last_q <= sa_valid && sa_side.last;
  end

  output_buffer #(.H(H), .DEPTH(OB_DEPTH)) u_ob (
    .clk      (clk),
    .rst_n    (rst_n),
    .swap     (ob_swap),
    .bank_sel (bank_sel),
    .acc_re   (ob_re),
    .acc_raddr(ob_raddr),
    .acc_rdata(ob_rdata),
    .acc_we   (ob_we),
    .acc_waddr(ob_waddr),
    .acc_wdata(ob_wdata),
    .drn_re   (ob_drn_re),
    .drn_raddr(ob_drn_raddr),
    .drn_rdata(ob_drn_rdata)
  );

  // the array's own valid pipeline and the side-band must agree
  assert property (@(posedge clk) disable iff (!rst_n) sa_valid == sa_side.valid)
    else $error("sdacc_top: array output out of step with its side-band");
endmodule
