// addr_gen: address generator and edge detector of the address-centric
// dataflow.
//
// A 3x3 convolution is run as nine 1x1 convolutions (matrix multiplications).
// The result of kernel position (r,s) computed from input index l belongs to
// output index l - (r-1)*W - (s-1) (kernel 5, the centre, maps l -> l; kernel
// 4 maps l -> l+1; kernel 1 maps l -> l+W+1, and so on). This block produces
// such address streams incrementally: it scans a rows x cols walk, starting
// from a configured base address and adding a configured stride per step and a
// row stride when it wraps to the next row. With base -(dr*W+ds) and strides 1
// it produces the output addresses of a stride-1 convolution; with base
// dr*W+ds, stride 2 and row stride W+2 it produces the input addresses of a
// stride-2 convolution. The detector walks the matching 2-D position
// (r*mul + roff, c*mul + coff) and flags positions outside the feature map, so
// that their partial sums are not added. Only adders and comparators are used.
//
// Interface: cfg is sampled on start. addr, in_range and last describe the
// current position combinationally; advance moves to the next one. busy is
// high from start until the step that consumes the last position.
// The base/stride scheme and the edge flag follow the design description; the
// 2-D position counters used for the flag are this implementation's choice.
module addr_gen
  import sdacc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  agen_cfg_t cfg,
  input  logic      advance,
  output logic      busy,
  output addr_t     addr,
  output logic      in_range,
  output logic      last
);
  agen_cfg_t          c_q;
  logic [11:0]        r_q, col_q;
  logic signed [13:0] pr_q, pc_q;

  assign last = (r_q == c_q.rows - 12'd1) && (col_q == c_q.cols - 12'd1);

  always_comb begin
    in_range = 1'b1;
    if (c_q.chk_en) begin
      in_range = (pr_q >= 0) && (pr_q < $signed({2'b00, c_q.chk_rows})) &&
                 (pc_q >= 0) && (pc_q < $signed({2'b00, c_q.chk_cols}));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q   <= '0;
      busy  <= 1'b0;
      addr  <= '0;
      r_q   <= '0;
      col_q <= '0;
      pr_q  <= '0;
      pc_q  <= '0;
    end else if (start) begin
      c_q   <= cfg;
      busy  <= 1'b1;
      addr  <= cfg.base;
      r_q   <= '0;
      col_q <= '0;
      pr_q  <= 14'(cfg.chk_roff);
      pc_q  <= 14'(cfg.chk_coff);
    end else if (advance && busy) begin
      if (last) begin
        busy <= 1'b0;
      end else if (col_q == c_q.cols - 12'd1) begin
        col_q <= '0;
        r_q   <= r_q + 12'd1;
        addr  <= addr + c_q.row_step;
        pr_q  <= pr_q + 14'(c_q.chk_mul);
        pc_q  <= 14'(c_q.chk_coff);
      end else begin
        col_q <= col_q + 12'd1;
        addr  <= addr + c_q.step;
        pc_q  <= pc_q + 14'(c_q.chk_mul);
      end
    end
  end
endmodule
