// tb_fp16_pkg: reference conversions between binary16 bit patterns and real
// numbers, written with real arithmetic so that testbench expectations do not
// depend on the fp16 functions of the design.
package tb_fp16_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    int  e;
    real m, v;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;                      // design flushes subnormals
    m = 1.0 + real'(h[9:0]) / 1024.0;
    v = m * (2.0 ** (e - 15));
    if (e == 31) v = 1.0e9;
    return h[15] ? -v : v;
  endfunction

  // nearest binary16 value of r (ties away from zero), subnormals to zero
  function automatic logic [15:0] real_to_fp16(input real r);
    logic s;
    real  a;
    int   e, f;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a < 6.103515625e-5) return {s, 15'h0};
    if (a >= 65520.0) return {s, 15'h7C00};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    f = int'($floor((a - 1.0) * 1024.0 + 0.5));
    if (f == 1024) begin f = 0; e++; end
    return {s, 5'(e + 15), 10'(f)};
  endfunction

  // |got - want| <= rel * |want| + abs
  function automatic bit close(input logic [15:0] got, input real want,
                               input real rel, input real abs);
    real g, d, w;
    g = fp16_to_real(got);
    d = g - want;
    if (d < 0.0) d = -d;
    w = (want < 0.0) ? -want : want;
    return d <= rel * w + abs;
  endfunction

  // random value with magnitude in [2^lo, 2^hi)
  function automatic logic [15:0] rand_fp16(input int lo, input int hi);
    int e;
    e = lo + int'($urandom_range(hi - lo - 1, 0));
    return {1'($urandom_range(1, 0)), 5'(e + 15), 10'($urandom_range(1023, 0))};
  endfunction

endpackage
