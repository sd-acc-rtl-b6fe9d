// output_buffer: double-buffered output activation buffer.
//
// Two banks of DEPTH words, each word holding the C_out^0 = H partial sums of
// one output position. The accumulation bank (index bank_sel) serves the
// accumulation unit with one read port and one write port (read-modify-write
// of partial sums). The other bank, the drain bank, has its own read port, so
// finished results can be moved out while the next operation accumulates.
// swap toggles bank_sel. Reads have one cycle of latency.
// The double buffering follows the design's block diagram; port arrangement
// and depth (1024 positions, matching the input buffer) are this
// implementation's choices.
module output_buffer
  import sdacc_pkg::*;
#(
  parameter int unsigned H     = 32,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,
  output logic          bank_sel,
  // accumulation bank
  input  logic          acc_re,
  input  logic [AW-1:0] acc_raddr,
  output fp16_t         acc_rdata [H],
  input  logic          acc_we,
  input  logic [AW-1:0] acc_waddr,
  input  fp16_t         acc_wdata [H],
  // drain bank
  input  logic          drn_re,
  input  logic [AW-1:0] drn_raddr,
  output fp16_t         drn_rdata [H]
);
  fp16_t bank0 [DEPTH][H];
  fp16_t bank1 [DEPTH][H];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    bank_sel <= 1'b0;
    else if (swap) bank_sel <= ~bank_sel;
  end

  always_ff @(posedge clk) begin
    if (acc_we && !bank_sel) bank0[acc_waddr] <= acc_wdata;
    if (acc_we &&  bank_sel) bank1[acc_waddr] <= acc_wdata;
    if (acc_re) acc_rdata <= bank_sel ? bank1[acc_raddr] : bank0[acc_raddr];
    if (drn_re) drn_rdata <= bank_sel ? bank0[drn_raddr] : bank1[drn_raddr];
  end
endmodule
