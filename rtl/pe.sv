// pe: one processing element of the weight-stationary systolic array.
//
// The element holds one weight in its weight register (Wt-Reg). Each cycle it
// multiplies the activation arriving from above by that weight, adds the
// partial sum arriving from the left, and registers the result in its output
// register (OA-Reg), which feeds the element to its right. The activation is
// registered (IA-Reg) and passed to the element below. Weights are loaded by
// shifting them in from the left: while wt_shift is high the element takes
// wt_in and presents its old weight on wt_out.
//
// Interface: all outputs are registers, so an activation entering at cycle t
// leaves downward at t+1 and its contribution leaves rightward at t+1.
// The three registers, the multiplier and the adder follow the PE drawing of
// the design; fp16 arithmetic as stated for the implementation. Shift-in
// weight loading is this implementation's choice.
module pe
  import sdacc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wt_shift,
  input  fp16_t wt_in,
  output fp16_t wt_out,
  input  fp16_t ia_in,
  output fp16_t ia_out,
  input  fp16_t psum_in,
  output fp16_t psum_out
);
  fp16_t wt_reg, ia_reg, oa_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wt_reg <= FP16_ZERO;
      ia_reg <= FP16_ZERO;
      oa_reg <= FP16_ZERO;
    end else begin
      if (wt_shift) wt_reg <= wt_in;
      ia_reg <= ia_in;
      oa_reg <= fp16_add(psum_in, fp16_mul(wt_reg, ia_in));
    end
  end

  assign wt_out   = wt_reg;
  assign ia_out   = ia_reg;
  assign psum_out = oa_reg;
endmodule
