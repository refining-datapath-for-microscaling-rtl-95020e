// mxint_ref_pkg: reference arithmetic for the testbenches, written independently of the RTL:
// MXInt value decoding, the expected shared shift and rounding of a block, erf and GELU.
package mxint_ref_pkg;

  // value of mantissa m (signed integer) with biased exponent e
  function automatic real mx_val(longint m, int e);
    return real'(m) * $pow(2.0, real'(e - 127));
  endfunction

  // 2^k
  function automatic real p2(int k);
    return $pow(2.0, real'(k));
  endfunction

  // sign-extend an n-bit field
  function automatic longint sext(longint v, int n);
    longint mask;
    mask = (longint'(1) <<< n) - 1;
    v = v & mask;
    if (v >= (longint'(1) <<< (n - 1))) v = v - (longint'(1) <<< n);
    return v;
  endfunction

  // floor(v / 2^s)
  function automatic longint fdiv(longint v, int s);
    longint d, q;
    if (s <= 0) return v;
    d = longint'(1) <<< s;
    q = v / d;
    if ((v % d != 0) && (v < 0)) q = q - 1;
    return q;
  endfunction

  // smallest s >= 0 with floor(v / 2^s) within an m-bit signed range, for all lanes
  function automatic int ref_shift(longint v[], int m);
    longint lo, hi;
    int s;
    lo = -(longint'(1) <<< (m - 1));
    hi = (longint'(1) <<< (m - 1)) - 1;
    s = 0;
    forever begin
      bit ok;
      ok = 1;
      foreach (v[i]) if (fdiv(v[i], s) < lo || fdiv(v[i], s) > hi) ok = 0;
      if (ok) return s;
      s++;
    end
  endfunction

  // round-half-up of v / 2^s, saturated to m bits
  function automatic longint ref_round(longint v, int s, int m);
    longint r, lo, hi;
    lo = -(longint'(1) <<< (m - 1));
    hi = (longint'(1) <<< (m - 1)) - 1;
    r = (s == 0) ? v : fdiv(v + (longint'(1) <<< (s - 1)), s);
    if (r > hi) r = hi;
    if (r < lo) r = lo;
    return r;
  endfunction

  // erf, Abramowitz and Stegun 7.1.26 (error below 1.5e-7)
  function automatic real erf(real x);
    real t, y, ax;
    ax = (x < 0) ? -x : x;
    t = 1.0 / (1.0 + 0.3275911 * ax);
    y = 1.0 - (((((1.061405429 * t - 1.453152027) * t) + 1.421413741) * t - 0.284496736) * t
               + 0.254829592) * t * $exp(-ax * ax);
    return (x < 0) ? -y : y;
  endfunction

  function automatic real gelu(real x);
    return 0.5 * x * (1.0 + erf(x / $sqrt(2.0)));
  endfunction

  function automatic real fabs(real x);
    return (x < 0) ? -x : x;
  endfunction

  // round half up to an integer
  function automatic longint rnd(real x);
    return longint'($floor(x + 0.5));
  endfunction

endpackage
