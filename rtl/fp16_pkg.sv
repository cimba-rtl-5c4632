// fp16_pkg: IEEE 754 binary16 arithmetic shared by the digital processing units.
//
// The DPU datapath computes in 16-bit floating point and moves data over the mesh as
// signed 10-bit integers (INT10). This package holds the conversions between the two and
// a fused multiply-add (a*b + c, rounded once) from which MUL, ADD, affine scaling and
// batch normalisation are all built.
//
// How it works: every finite binary16 value is an integer multiple of 2^-24, and every
// product of two such values is an integer multiple of 2^-48. The FMA therefore places
// the exact product and the exact addend on a 96-bit signed fixed-point grid with its
// least significant bit worth 2^-48, adds them without any loss, and rounds the sum back
// to binary16 once, to nearest with ties to even. Subnormals are handled exactly.
// Infinities and NaNs are not treated specially: an operand whose exponent field is all
// ones is read as a large finite number, and a result too large for binary16 becomes
// infinity. The datapath never produces such operands from INT10 data.
//
// The use of binary16 and of INT10 on the mesh follows the paper; the exact rounding
// behaviour and the saturation of INT10 conversions are choices of this design.
package fp16_pkg;

  typedef logic [15:0] fp16_t;
  typedef logic signed [9:0] int10_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_INF  = 16'h7C00;

  localparam int FIXW = 96;            // fixed-point grid width, LSB = 2^-48
  typedef logic signed [FIXW-1:0] fix_t;

  // Exact fixed-point image of a binary16 value (units of 2^-48).
  function automatic fix_t fp16_to_fix(input fp16_t h);
    logic [10:0] m;
    int unsigned e;
    fix_t v;
    m = {(h[14:10] != 5'd0), h[9:0]};
    e = (h[14:10] == 5'd0) ? 1 : int'(h[14:10]);
    v = fix_t'(m) <<< (e + 23);         // m * 2^(e-25) = m * 2^(e+23) * 2^-48
    return h[15] ? -v : v;
  endfunction

  // Round a fixed-point value (units of 2^-48) to binary16, nearest-even.
  function automatic fp16_t fix_to_fp16(input fix_t s);
    logic             sgn;
    logic [FIXW-1:0]  mag;
    int               p;
    int               e;
    logic [14:0]      body;
    logic             guard, sticky;
    logic [FIXW-1:0]  mask;
    sgn = s[FIXW-1];
    mag = sgn ? FIXW'(-s) : FIXW'(s);
    if (mag == '0) return FP16_ZERO;
    p = 0;
    for (int i = 0; i < FIXW; i++) if (mag[i]) p = i;
    e = p - 33;                        // biased exponent if normal
    if (e >= 31) return {sgn, FP16_INF[14:0]};
    if (e >= 1) begin
      body   = {e[4:0], 10'(mag >> (p - 10))};
      guard  = mag[p-11];
      mask   = (FIXW'(1) << (p - 11)) - FIXW'(1);
      sticky = |(mag & mask);
    end else begin
      // subnormal: units of 2^-24, i.e. mag >> 24
      body   = {5'd0, 10'(mag >> 24)};
      guard  = mag[23];
      sticky = |mag[22:0];
    end
    if (guard && (sticky || body[0])) body = body + 15'd1;
    return {sgn, body};
  endfunction

  // Fused multiply-add, a*b + c with a single rounding.
  function automatic fp16_t fp16_fma_f(input fp16_t a, input fp16_t b, input fp16_t c);
    logic [10:0] ma, mb;
    int unsigned ea, eb;
    logic [21:0] pm;
    fix_t        p;
    ma = {(a[14:10] != 5'd0), a[9:0]};
    mb = {(b[14:10] != 5'd0), b[9:0]};
    ea = (a[14:10] == 5'd0) ? 1 : int'(a[14:10]);
    eb = (b[14:10] == 5'd0) ? 1 : int'(b[14:10]);
    pm = ma * mb;
    p  = fix_t'(pm) <<< (ea + eb - 2);  // pm * 2^(ea+eb-50)
    if (a[15] ^ b[15]) p = -p;
    return fix_to_fp16(p + fp16_to_fix(c));
  endfunction

  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    return fp16_fma_f(a, FP16_ONE, b);
  endfunction

  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    return fp16_fma_f(a, b, FP16_ZERO);
  endfunction

  // INT10 to binary16 (exact: 10 bits fit the 11-bit significand).
  function automatic fp16_t int10_to_fp16(input int10_t x);
    return fix_to_fp16(fix_t'(x) <<< 48);
  endfunction

  // binary16 to INT10: round half away from zero, saturate to [-512, 511].
  function automatic int10_t fp16_to_int10(input fp16_t h);
    fix_t v, r;
    v = fp16_to_fix(h);
    if (v < 0) r = -((-v + (fix_t'(1) <<< 47)) >>> 48);
    else       r = (v + (fix_t'(1) <<< 47)) >>> 48;
    if (r > 511)  return int10_t'(511);
    if (r < -512) return int10_t'(-512);
    return int10_t'(r);
  endfunction

  // floor(h * 2^sh) for a small non-negative shift, saturated to a 16-bit signed range.
  function automatic int fp16_floor_scaled(input fp16_t h, input int sh);
    fix_t v, r;
    v = fp16_to_fix(h);
    r = v >>> (48 - sh);
    if (r > 32767)  return 32767;
    if (r < -32768) return -32768;
    return int'(r);
  endfunction

endpackage
