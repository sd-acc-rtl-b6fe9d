// sdacc_pkg: types, constants and half-precision arithmetic shared by the
// accelerator.
//
// The accelerator computes in IEEE 754 binary16 (fp16), as the implementation
// described for the design does. The functions below are combinational
// building blocks used by the processing elements, the accumulation unit and
// the vector processing unit:
//   fp16_add / fp16_sub / fp16_mul / fp16_div / fp16_sqrt : round to nearest
//     even, subnormal inputs and results are flushed to (signed) zero,
//     overflow saturates to infinity; NaN handling is not provided.
//   fp16_exp   : e^x via 2^(x*log2 e); the fractional power of two comes from a
//     cubic minimax polynomial in 16-bit fixed point (relative error < 1e-4,
//     below one fp16 ulp).
//   fp16_gt    : ordered comparison.
//   fp16_from_uint : exact integer to fp16 conversion (used for 1/N).
// The bit-level algorithms (guard/round/sticky rounding, restoring square
// root, polynomial exponent) are choices of this implementation; the paper
// only states that the arithmetic is fp16.
package sdacc_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO    = 16'h0000;
  localparam fp16_t FP16_ONE     = 16'h3C00;
  localparam fp16_t FP16_NEG_INF = 16'hFC00;
  localparam fp16_t FP16_POS_INF = 16'h7C00;
  // -1.702 (GELU sigmoid approximation x*sigmoid(1.702x)), 1 + 719/1024
  localparam fp16_t FP16_NEG_1P702 = 16'hBECF;

  // Modes of the reconfigurable vector processing unit.
  typedef enum logic [1:0] {
    NCA_NONE    = 2'd0,
    NCA_SOFTMAX = 2'd1,
    NCA_LAYERNORM = 2'd2
  } nca_mode_e;

  typedef enum logic [1:0] {
    NORM_BYPASS    = 2'd0,
    NORM_SOFTMAX   = 2'd1,
    NORM_LAYERNORM = 2'd2,
    NORM_GELU      = 2'd3
  } norm_mode_e;

  // Controller command opcodes.
  typedef enum logic [2:0] {
    OP_NOP     = 3'd0,
    OP_LOAD_IN = 3'd1,   // global buffer -> input buffer
    OP_LOAD_WT = 3'd2,   // global buffer -> weight buffer
    OP_CONV    = 3'd3,   // Uni-conv on the systolic array
    OP_STORE   = 3'd4,   // output buffer (drain bank) -> global buffer
    OP_SWAP    = 3'd5    // swap the output double buffer banks
  } opcode_e;

  // Buffer address width (signed, so that a base address may point before
  // the start of a feature map; such positions are flagged by the detector).
  localparam int unsigned ADDR_W = 20;
  typedef logic signed [ADDR_W-1:0] addr_t;

  // Configuration of one address generator walk: a rows x cols scan of
  // buffer addresses, starting at base, advancing by step within a row and by
  // row_step from the last column of a row to the first of the next. The
  // detector tracks the position (chk_r, chk_c) = (r*chk_mul + chk_roff,
  // c*chk_mul + chk_coff) and reports whether it lies inside
  // [0,chk_rows) x [0,chk_cols).
  typedef struct packed {
    addr_t              base;
    addr_t              step;
    addr_t              row_step;
    logic [11:0]        rows;
    logic [11:0]        cols;
    logic               chk_en;
    logic [1:0]         chk_mul;
    logic signed [12:0] chk_roff;
    logic signed [12:0] chk_coff;
    logic [11:0]        chk_rows;
    logic [11:0]        chk_cols;
  } agen_cfg_t;

  // One command to the controller. Field use by opcode:
  //  OP_LOAD_IN / OP_LOAD_WT: copy len words, global buffer gb_addr.. to
  //    input/weight buffer buf_addr..
  //  OP_STORE: copy len words, output buffer drain bank buf_addr.. to global
  //    buffer gb_addr..
  //  OP_CONV: Uni-conv of an in_h x in_w map held in the input buffer at
  //    in_base (C_in^0 = W channels per word) with 1x1 (k3 = 0) or 3x3
  //    (k3 = 1, zero padding 1) kernels from the weight buffer at wt_base,
  //    stride 1 or 2 (stride2), accumulated into the output buffer at
  //    out_base. init starts a new accumulation (first C_in tile); nca_mode
  //    collects softmax/layernorm characteristics of the results (1x1 only,
  //    on the last C_in tile); norm_mode is applied to the operands on their
  //    way from the input buffer into the array. nca_cont continues the
  //    characteristics of the previous CONV instead of starting new ones, so
  //    that a sequence longer than the input buffer is covered by several
  //    commands (one L tile each). ostride2 selects the output stride of 2
  //    (transposed convolution, 2x larger output; with 1x1 identity weights
  //    and four output offsets it gives nearest-neighbour upsampling).
  typedef struct packed {
    opcode_e     op;
    logic [14:0] gb_addr;
    logic [11:0] buf_addr;
    logic [11:0] len;
    logic [11:0] in_base;
    logic [11:0] out_base;
    logic [11:0] wt_base;
    logic [7:0]  in_h;
    logic [7:0]  in_w;
    logic        k3;
    logic        stride2;
    logic        init;
    nca_mode_e   nca_mode;
    norm_mode_e  norm_mode;
    logic        nca_cont;
    logic        ostride2;
  } cmd_t;

  // ---------------------------------------------------------------------
  // Rounding helper: m holds the 11-bit significand (hidden bit included)
  // with guard g and sticky s; exponent e is biased. Returns the packed
  // result with overflow to infinity and underflow to zero.
  function automatic fp16_t fp16_pack(input logic sign, input int e,
                                      input logic [10:0] m, input logic g,
                                      input logic s);
    logic [11:0] mr;
    int          er;
    mr = {1'b0, m};
    er = e;
    if (g && (s || m[0])) mr = mr + 12'd1;
    if (mr[11]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= 31)     return {sign, 5'h1F, 10'h000};
    else if (er <= 0) return {sign, 15'h0000};
    else              return {sign, er[4:0], mr[9:0]};
  endfunction

  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    logic        s;
    logic [21:0] p;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return {s, 15'h0000};
    if (a[14:10] == 5'h1F || b[14:10] == 5'h1F) return {s, 5'h1F, 10'h000};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) return fp16_pack(s, e + 1, p[21:11], p[10], |p[9:0]);
    else       return fp16_pack(s, e,     p[20:10], p[9],  |p[8:0]);
  endfunction

  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    fp16_t       big, sml;
    logic [13:0] mb, ms;     // significand << 3 (guard, round, sticky)
    logic [14:0] sum;
    int          d, e, lz;
    logic        st;
    // flush subnormals
    if (a[14:10] == 5'd0) a = {a[15], 15'h0000};
    if (b[14:10] == 5'd0) b = {b[15], 15'h0000};
    if (a[14:10] == 5'h1F) return a;
    if (b[14:10] == 5'h1F) return b;
    if (a[14:0] == 15'd0) return (b[14:0] == 15'd0) ? {a[15] & b[15], 15'h0} : b;
    if (b[14:0] == 15'd0) return a;
    if (a[14:0] >= b[14:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    mb = {1'b1, big[9:0], 3'b000};
    ms = {1'b1, sml[9:0], 3'b000};
    d  = int'(big[14:10]) - int'(sml[14:10]);
    if (d > 13) begin
      ms = 14'd1;                       // only sticky survives
    end else if (d > 0) begin
      st = |(ms & ((14'd1 << d) - 14'd1));
      ms = (ms >> d) | {13'd0, st};
    end
    e = int'(big[14:10]);
    if (big[15] == sml[15]) sum = {1'b0, mb} + {1'b0, ms};
    else                    sum = {1'b0, mb} - {1'b0, ms};
    if (sum == 15'd0) return 16'h0000;
    if (sum[14]) begin
      st  = sum[0];
      sum = (sum >> 1) | {14'd0, st};
      e   = e + 1;
    end else begin
      lz = 0;
      for (int i = 13; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e   = e - lz;
    end
    // sum[13] is the hidden bit, sum[12:3] fraction, sum[2] guard, [1:0] sticky
    return fp16_pack(big[15], e, sum[13:3], sum[2], |sum[1:0]);
  endfunction

  function automatic fp16_t fp16_sub(input fp16_t a, input fp16_t b);
    return fp16_add(a, {~b[15], b[14:0]});
  endfunction

  function automatic fp16_t fp16_div(input fp16_t a, input fp16_t b);
    logic        s;
    logic [23:0] num, q, r;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd0) return {s, 15'h0000};
    if (b[14:10] == 5'd0 || a[14:10] == 5'h1F) return {s, 5'h1F, 10'h000};
    if (b[14:10] == 5'h1F) return {s, 15'h0000};
    num = {1'b1, a[9:0], 13'd0};
    q   = num / {13'd0, 1'b1, b[9:0]};
    r   = num % {13'd0, 1'b1, b[9:0]};
    e   = int'(a[14:10]) - int'(b[14:10]) + 15;
    if (q[13]) return fp16_pack(s, e,     q[13:3], q[2], (|q[1:0]) || (r != 24'd0));
    else       return fp16_pack(s, e - 1, q[12:2], q[1], q[0] || (r != 24'd0));
  endfunction

  // Square root of a non-negative value (the sign bit is ignored).
  function automatic fp16_t fp16_sqrt(input fp16_t a);
    logic [25:0] rad, rem;
    logic [12:0] root;
    logic [27:0] trial, acc;
    int          e;
    if (a[14:10] == 5'd0) return 16'h0000;
    if (a[14:10] == 5'h1F) return FP16_POS_INF;
    e = int'(a[14:10]) - 15;
    if (e[0]) begin
      rad = {1'b1, a[9:0], 15'd0};   // (m << 1) << 14
      e   = e - 1;
    end else begin
      rad = {1'b0, 1'b1, a[9:0], 14'd0};
    end
    // restoring integer square root, 13 result bits
    root = '0;
    acc  = '0;
    for (int i = 12; i >= 0; i--) begin
      acc   = {acc[25:0], rad[2*i+1 -: 2]};
      trial = {13'd0, root, 2'b01};
      root  = root << 1;
      if (acc >= trial) begin
        acc     = acc - trial;
        root[0] = 1'b1;
      end
    end
    rem = acc[25:0];
    return fp16_pack(1'b0, e / 2 + 15, root[12:2], root[1], root[0] || (rem != 26'd0));
  endfunction

  // e^x
  function automatic fp16_t fp16_exp(input fp16_t x);
    logic signed [39:0] xf, y, p, f;
    int                 n, sh;
    logic [10:0]        m;
    if (x[14:10] == 5'd0) return FP16_ONE;
    if (x[14:10] == 5'h1F) return x[15] ? FP16_ZERO : FP16_POS_INF;
    if (x[14:0] >= 15'h49A0) return x[15] ? FP16_ZERO : FP16_POS_INF; // |x| >= 11.25
    // x in signed fixed point with 16 fraction bits
    sh = int'(x[14:10]) - 9;              // value = {1,frac} * 2^(e-25), Q16
    xf = 40'(int'({1'b1, x[9:0]}));
    if (sh >= 0) xf = xf <<< sh;
    else         xf = xf >>> (-sh);
    if (x[15]) xf = -xf;
    y = (xf * 40'sd94548) >>> 16;         // * log2(e) in Q16
    n = int'(y >>> 16);                   // floor
    f = y & 40'sh0FFFF;
    // 2^f, f in [0,1): 1 + c1 f + c2 f^2 + c3 f^3 (Q16)
    p = 40'sd5157;
    p = ((p * f) >>> 16) + 40'sd14823;
    p = ((p * f) >>> 16) + 40'sd45559;
    p = ((p * f) >>> 16) + 40'sd65536;
    if (p >= 40'sd131072) begin
      p = p >>> 1;
      n = n + 1;
    end
    m = p[16:6];
    return fp16_pack(1'b0, n + 15, m, p[5], |p[4:0]);
  endfunction

  // a > b for ordered (non-NaN) values; +0 and -0 compare equal.
  function automatic logic fp16_gt(input fp16_t a, input fp16_t b);
    logic [15:0] ka, kb;
    ka = a[15] ? ~a : (a | 16'h8000);
    kb = b[15] ? ~b : (b | 16'h8000);
    if (a[14:0] == 15'd0) ka = 16'h8000;
    if (b[14:0] == 15'd0) kb = 16'h8000;
    return ka > kb;
  endfunction

  function automatic fp16_t fp16_max(input fp16_t a, input fp16_t b);
    return fp16_gt(b, a) ? b : a;
  endfunction

  function automatic fp16_t fp16_from_uint(input logic [15:0] n);
    int          msb;
    logic [26:0] m;
    if (n == 16'd0) return FP16_ZERO;
    msb = 0;
    for (int i = 0; i < 16; i++) if (n[i]) msb = i;
    m = {11'd0, n} << (26 - msb);   // hidden bit at position 26
    return fp16_pack(1'b0, msb + 15, m[26:16], m[15], |m[14:0]);
  endfunction

endpackage
