// nneq_ref_pkg -- reference arithmetic for the equalizer testbenches.
//
// Bit-exact models of the fixed-point rules the RTL follows (Q16.16 data,
// products floored to the data scale and summed at full width, saturation
// to 32 bits, segment sigmoid and tanh), written with plain integer
// division rather than the shifts the RTL uses, plus the exact real-valued
// functions to bound the approximation error.
package nneq_ref_pkg;

  localparam longint ONE = 65536;

  function automatic longint fdiv(input longint a, input longint b);
    // floor(a / b) for b > 0
    longint q;
    q = a / b;
    if ((a % b) != 0 && a < 0) q = q - 1;
    return q;
  endfunction

  function automatic longint term(input longint a, input longint b);
    return fdiv(a * b, ONE);
  endfunction

  function automatic longint sat(input longint a);
    if (a > 64'sd2147483647)  return 64'sd2147483647;
    if (a < -64'sd2147483648) return -64'sd2147483648;
    return a;
  endfunction

  function automatic longint sigm(input longint x);
    longint ax, p;
    ax = (x < 0) ? -x : x;
    if (ax < ONE)                p = ONE / 2 + ax / 4;
    else if (ax * 1000 < 2375 * ONE) p = (ONE * 5) / 8 + ax / 8;
    else if (ax < 5 * ONE)       p = (ONE * 27) / 32 + ax / 32;
    else                         p = ONE;
    return (x < 0) ? ONE - p : p;
  endfunction

  function automatic longint tanhf(input longint x);
    longint xc;
    xc = x;
    if (xc > 8 * ONE)  xc = 8 * ONE;
    if (xc < -8 * ONE) xc = -8 * ONE;
    return 2 * sigm(2 * xc) - ONE;
  endfunction

  function automatic real to_real(input longint x);
    return real'(x) / real'(ONE);
  endfunction

  function automatic real sigm_real(input real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic real tanh_real(input real x);
    real e;
    if (x > 20.0)  return 1.0;
    if (x < -20.0) return -1.0;
    e = $exp(2.0 * x);
    return (e - 1.0) / (e + 1.0);
  endfunction

  // uniformly random Q16.16 value in [-range, range] (range in LSB)
  function automatic int rnd(input int range);
    return int'($urandom_range(0, 2 * range)) - range;
  endfunction

endpackage
