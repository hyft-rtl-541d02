// hyft_tb_pkg: floating-point helpers shared by the Hyft testbenches.
//
// Conversions between `real` and IEEE-754 style bit patterns of any
// exponent/mantissa width (ew/mw), written with real arithmetic only, so
// that the expected values in the testbenches do not reuse the bit-level
// logic of the design. Conversion to bits truncates toward zero, flushes
// numbers below the smallest normal to zero and saturates large ones.
package hyft_tb_pkg;

  // 2^k for integer k, by repeated multiplication.
  function automatic real pow2(input int k);
    real r;
    r = 1.0;
    if (k >= 0) for (int i = 0; i < k; i++) r = r * 2.0;
    else        for (int i = 0; i < -k; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp2r(input longint unsigned bits, input int ew, input int mw);
    longint unsigned e, m;
    real v;
    int bias;
    bias = (1 << (ew - 1)) - 1;
    e = (bits >> mw) & ((64'd1 << ew) - 1);
    m = bits & ((64'd1 << mw) - 1);
    if (e == 0) return 0.0;
    v = (1.0 + real'(m) / pow2(mw)) * pow2(int'(e) - bias);
    if (((bits >> (ew + mw)) & 1) != 0) v = -v;
    return v;
  endfunction

  function automatic longint unsigned r2fp(input real x, input int ew, input int mw);
    real a;
    int e, bias, emax;
    longint unsigned s, m;
    bias = (1 << (ew - 1)) - 1;
    emax = (1 << ew) - 2;
    s = (x < 0.0) ? 1 : 0;
    a = (x < 0.0) ? -x : x;
    if (a < pow2(1 - bias)) return s << (ew + mw);
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    if (e + bias > emax) return (s << (ew + mw)) | (longint'(emax) << mw) | ((64'd1 << mw) - 1);
    m = longint'($floor((a - 1.0) * pow2(mw)));
    return (s << (ew + mw)) | (longint'(e + bias) << mw) | m;
  endfunction

  // Piecewise-linear antilog: 2^floor(x) * (1 + frac(x)).
  function automatic real antilog(input real x);
    real f;
    f = $floor(x);
    return pow2(int'(f)) * (1.0 + (x - f));
  endfunction

  function automatic real rabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

endpackage
