// input_buffer: on-chip activation buffer in front of the systolic array.
//
// Activations are stored in the address-centric format (L, C_in): word l holds
// the C_in^0 = W channels of position l, so one read delivers one input vector
// for the top edge of the array. One write port (filled from the global
// buffer) and one read port with one cycle of read latency; a read and a
// write may happen in the same cycle.
// The (L, C_in) layout follows the design description; the depth of 1024
// positions (a 32x32 tile of a feature map) is this implementation's choice,
// the design description gives no buffer sizes.
module input_buffer
  import sdacc_pkg::*;
#(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fp16_t         wdata [W],
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output fp16_t         rdata [W]
);
  fp16_t mem [DEPTH][W];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
