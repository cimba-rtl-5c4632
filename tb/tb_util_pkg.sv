// tb_util_pkg: reference arithmetic for the testbenches, written independently of the RTL.
//
// It converts between IEEE half precision bit patterns and real numbers, and rounds a real
// to the nearest half (ties to even), so that testbenches can compute expected results in
// double precision and compare them with the hardware bit for bit or within a tolerance.
// Infinities and NaNs are not handled; the testbenches keep their numbers in range.
package tb_util_pkg;

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real h2r(input logic [15:0] h);
    real v;
    if (h[14:10] == 5'd0) v = real'(h[9:0]) * pow2(-24);
    else                  v = real'(1024 + h[9:0]) * pow2(int'(h[14:10]) - 25);
    return h[15] ? -v : v;
  endfunction

  // round to an integer, ties to even
  function automatic real rne(input real m);
    real f, d;
    f = $floor(m);
    d = m - f;
    if (d > 0.5) return f + 1.0;
    if (d < 0.5) return f;
    return ($floor(f / 2.0) * 2.0 == f) ? f : f + 1.0;
  endfunction

  function automatic logic [15:0] r2h(input real x);
    logic s;
    real a, m;
    int e;
    if (x == 0.0) return 16'h0000;
    s = (x < 0.0);
    a = s ? -x : x;
    e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    if (e < -14) begin
      m = rne(a / pow2(-24));
      return {s, 15'(int'(m))};            // m = 1024 is the smallest normal, as encoded
    end
    m = rne(a / pow2(e - 10));
    if (m >= 2048.0) begin
      m = 1024.0;
      e++;
    end
    if (e > 15) return {s, 15'h7C00};
    return {s, 5'(e + 15), 10'(int'(m) - 1024)};
  endfunction

  // a random half with exponent field in [emin, emax] and a random sign
  function automatic logic [15:0] rand_h(input int emin, input int emax);
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'(emin + int'($urandom % 32'(emax - emin + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

  function automatic real fabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // one rounding of a*b+c
  function automatic logic [15:0] h_fma(input logic [15:0] a, input logic [15:0] b,
                                        input logic [15:0] c);
    return r2h(h2r(a) * h2r(b) + h2r(c));
  endfunction

  // real to INT10: round half away from zero, saturate
  function automatic int r2i10(input real x);
    real r;
    r = (x < 0.0) ? -$floor(-x + 0.5) : $floor(x + 0.5);
    if (r > 511.0)  return 511;
    if (r < -512.0) return -512;
    return int'(r);
  endfunction

  // activation functions of the DPU lookup tables: 0 sigmoid, 1 tanh, 2 swish
  function automatic real act_real(input int tab, input real x);
    real sg;
    sg = 1.0 / (1.0 + $exp(-x));
    if (tab == 0) return sg;
    if (tab == 1) return 2.0 / (1.0 + $exp(-2.0 * x)) - 1.0;
    return x * sg;
  endfunction

  // piecewise-linear table entries: 32 segments of width 0.5 covering [-8, 8);
  // segment s spans [(s-16)/2, (s-15)/2) and is the chord of the function there
  function automatic logic [15:0] pwl_slope(input int tab, input int seg);
    real x0;
    x0 = real'(seg - 16) / 2.0;
    return r2h((act_real(tab, x0 + 0.5) - act_real(tab, x0)) / 0.5);
  endfunction

  function automatic logic [15:0] pwl_offset(input int tab, input int seg);
    real x0, sl;
    x0 = real'(seg - 16) / 2.0;
    sl = (act_real(tab, x0 + 0.5) - act_real(tab, x0)) / 0.5;
    return r2h(act_real(tab, x0) - sl * x0);
  endfunction

  // the segment a value falls in, as the DPU computes it
  function automatic int seg_of(input logic [15:0] x);
    int s;
    s = int'($floor(h2r(x) * 2.0)) + 16;
    if (s < 0)  s = 0;
    if (s > 31) s = 31;
    return s;
  endfunction

  // the table output of the DPU for table tab (slope, offset from pwl_*)
  function automatic logic [15:0] lut_ref(input int tab, input logic [15:0] x);
    int s;
    s = seg_of(x);
    return h_fma(x, pwl_slope(tab, s), pwl_offset(tab, s));
  endfunction

endpackage
