// global_buffer: the 2 MB on-chip global buffer.
//
// Holds the activation and weight tiles chosen by the reuse/fusion schedule
// between off-chip memory and the input, weight and output buffers. It is
// organised as DEPTH words of LANES fp16 values (32768 x 512 bits = 2 MB by
// default) with two independent ports: the external port faces the off-chip
// memory interface, the internal port faces the on-chip buffers. Each port
// reads or writes one word per cycle with one cycle of read latency; when
// both ports write the same word in one cycle the internal port wins.
// The 2 MB capacity is the one chosen for the design; the word width and the
// two-port organisation are this implementation's choices.
module global_buffer
  import sdacc_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  // external (off-chip memory) port
  input  logic          ext_en,
  input  logic          ext_we,
  input  logic [AW-1:0] ext_addr,
  input  fp16_t         ext_wdata [LANES],
  output fp16_t         ext_rdata [LANES],
  // internal (on-chip buffer) port
  input  logic          int_en,
  input  logic          int_we,
  input  logic [AW-1:0] int_addr,
  input  fp16_t         int_wdata [LANES],
  output fp16_t         int_rdata [LANES]
);
  fp16_t mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (ext_en) begin
      if (ext_we) mem[ext_addr] <= ext_wdata;
      else        ext_rdata <= mem[ext_addr];
    end
    if (int_en) begin
      if (int_we) mem[int_addr] <= int_wdata;
      else        int_rdata <= mem[int_addr];
    end
  end
endmodule
