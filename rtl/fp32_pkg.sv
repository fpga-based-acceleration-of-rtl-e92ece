// fp32_pkg: IEEE-754 single-precision arithmetic and twiddle-factor generation.
//
// All data in the convolver are complex single-precision floating-point (SPF)
// values, as in the original design. The functions below are combinational
// and synthesize to adders, multipliers and shifters:
//   fp_add / fp_sub  round to nearest even
//   fp_mul           round to nearest even
// Simplifications (this design's choice): subnormal inputs and results are
// flushed to zero, overflow gives infinity, NaN is not propagated specially.
// The twiddle functions use real arithmetic ($cos/$sin, $realtobits) and are only meant for filling
// constant tables at elaboration time (initial blocks of ROMs, localparams).
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  // Complex SPF value, real part in the upper half.
  typedef struct packed {
    fp32_t re;
    fp32_t im;
  } cplx_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    logic        sa, sb, sx, sy, sr;
    logic [7:0]  ea, eb, ex, ey;
    logic [47:0] mx, my, mys;
    logic [48:0] sum;
    logic [8:0]  d;
    logic [47:0] norm;
    logic [24:0] rnd;
    int          er, lz, msb;
    logic        g, st;
    sa = a[31]; ea = a[30:23];
    sb = b[31]; eb = b[30:23];
    // flush subnormals to zero
    if (ea == 8'd0 && eb == 8'd0) return FP_ZERO;
    if (ea == 8'd0) return b;
    if (eb == 8'd0) return a;
    if (ea == 8'hFF) return a;
    if (eb == 8'hFF) return b;
    // x is the operand of larger magnitude
    if (a[30:0] >= b[30:0]) begin
      sx = sa; ex = ea; mx = {1'b1, a[22:0], 24'd0};
      sy = sb; ey = eb; my = {1'b1, b[22:0], 24'd0};
    end else begin
      sx = sb; ex = eb; mx = {1'b1, b[22:0], 24'd0};
      sy = sa; ey = ea; my = {1'b1, a[22:0], 24'd0};
    end
    d = {1'b0, ex} - {1'b0, ey};
    if (d >= 9'd48) mys = 48'd1;           // only a sticky bit remains
    else begin
      mys = my >> d;
      if ((my & ((48'd1 << d) - 48'd1)) != 48'd0) mys[0] = 1'b1;
    end
    sr = sx;
    if (sx == sy) sum = {1'b0, mx} + {1'b0, mys};
    else          sum = {1'b0, mx} - {1'b0, mys};
    if (sum == 49'd0) return FP_ZERO;
    // normalise so that the hidden bit sits in norm[47]
    msb = 0;
    for (int i = 0; i < 49; i++) if (sum[i]) msb = i;
    er = int'(ex);
    if (msb == 48) begin
      norm = sum[48:1];
      norm[0] = norm[0] | sum[0];
      er = er + 1;
    end else begin
      lz = 47 - msb;
      norm = sum[47:0] << lz;
      er = er - lz;
    end
    g   = norm[23];
    st  = (norm[22:0] != 23'd0);
    rnd = {1'b0, norm[47:24]};
    if (g && (st || norm[24])) rnd = rnd + 25'd1;
    if (rnd[24]) begin
      rnd = rnd >> 1;
      er = er + 1;
    end
    if (er <= 0)   return FP_ZERO;
    if (er >= 255) return {sr, 8'hFF, 23'd0};
    return {sr, er[7:0], rnd[22:0]};
  endfunction

  function automatic fp32_t fp_neg(input fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        sr;
    logic [47:0] p;
    logic [24:0] rnd;
    logic        g, st;
    int          er;
    sr = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {sr, 31'd0};
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {sr, 8'hFF, 23'd0};
    p  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    er = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) er = er + 1;
    else       p = p << 1;
    g   = p[23];
    st  = (p[22:0] != 23'd0);
    rnd = {1'b0, p[47:24]};
    if (g && (st || p[24])) rnd = rnd + 25'd1;
    if (rnd[24]) begin
      rnd = rnd >> 1;
      er = er + 1;
    end
    if (er <= 0)   return {sr, 31'd0};
    if (er >= 255) return {sr, 8'hFF, 23'd0};
    return {sr, er[7:0], rnd[22:0]};
  endfunction

  // Complex helpers built from the scalar operators above.
  function automatic cplx_t c_add(input cplx_t x, input cplx_t y);
    c_add.re = fp_add(x.re, y.re);
    c_add.im = fp_add(x.im, y.im);
  endfunction

  function automatic cplx_t c_sub(input cplx_t x, input cplx_t y);
    c_sub.re = fp_sub(x.re, y.re);
    c_sub.im = fp_sub(x.im, y.im);
  endfunction

  // (xr + j xi)(yr + j yi) = (xr yr - xi yi) + j (xr yi + xi yr):
  // four multiplications and two additions.
  function automatic cplx_t c_mul(input cplx_t x, input cplx_t y);
    c_mul.re = fp_sub(fp_mul(x.re, y.re), fp_mul(x.im, y.im));
    c_mul.im = fp_add(fp_mul(x.re, y.im), fp_mul(x.im, y.re));
  endfunction

  // |x|^2 = re^2 + im^2 (no square root is needed downstream).
  function automatic fp32_t c_pow(input cplx_t x);
    return fp_add(fp_mul(x.re, x.re), fp_mul(x.im, x.im));
  endfunction

  // ---------------------------------------------------------------------
  // Elaboration-time helpers (real arithmetic) for constant tables.
  // ---------------------------------------------------------------------
  localparam real PI = 3.14159265358979323846;

  // Round a real number to the nearest SPF bit pattern (normal range only),
  // by rounding the mantissa of its double-precision bit pattern.
  function automatic fp32_t real_to_fp32(input real v);
    logic [63:0] d;
    logic [24:0] m;
    int          e;
    d = $realtobits(v);
    if (d[62:52] == 11'd0) return FP_ZERO;
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    if (d[28] && (d[27:0] != 28'd0 || d[29])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  // Exact conversion of an SPF bit pattern to a real (subnormals read as 0).
  function automatic real fp32_to_real(input fp32_t f);
    logic [10:0] e;
    if (f[30:23] == 8'd0) return 0.0;
    e = 11'(f[30:23]) + 11'd896;
    return $bitstoreal({f[31], e, f[22:0], 29'd0});
  endfunction

  // Forward twiddle W_N^e = exp(-j 2 pi e / N) in SPF.
  function automatic cplx_t twiddle(input int e, input int n);
    real ang;
    ang = 2.0 * PI * real'(e) / real'(n);
    twiddle.re = real_to_fp32($cos(ang));
    twiddle.im = real_to_fp32(-$sin(ang));
  endfunction

endpackage
