// tb_util_pkg: helpers shared by the testbenches.
//
// Lane access for 32-bit SIMD words (lane l of width n holds bits
// [l*n +: n]), conversion between lane integers and real values in the two
// fixed-point formats of the design (data: n-3 fraction bits, angle: n-2),
// and reference activation functions computed with real arithmetic, so
// that checks do not depend on the CORDIC implementation.
package tb_util_pkg;

  function automatic longint lane_get(logic [31:0] w, int n, int l);
    longint v;
    v = longint'((w >> (l * n)) & ((64'd1 << n) - 1));
    if (v >= (64'sd1 <<< (n - 1))) v -= (64'sd1 <<< n);
    return v;
  endfunction

  function automatic logic [31:0] lane_set(logic [31:0] w, int n, int l, longint v);
    logic [31:0] m;
    m = 32'((64'd1 << n) - 1) << (l * n);
    return (w & ~m) | ((32'(v) << (l * n)) & m);
  endfunction

  function automatic real to_real(longint v, int frac);
    return real'(v) / (2.0 ** frac);
  endfunction

  function automatic longint from_real(real r, int n, int frac);
    longint v, lo, hi;
    real s;
    s  = r * (2.0 ** frac);
    v  = (s >= 0.0) ? longint'(s + 0.5) : -longint'(-s + 0.5);
    lo = -(64'sd1 <<< (n - 1));
    hi = (64'sd1 <<< (n - 1)) - 1;
    if (v < lo) v = lo;
    if (v > hi) v = hi;
    return v;
  endfunction

  function automatic real absr(real a);
    return (a < 0.0) ? -a : a;
  endfunction

  function automatic real sigmoid(real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic real tanh_r(real x);
    return (($exp(x) - $exp(-x)) / ($exp(x) + $exp(-x)));
  endfunction

  // Lane width of a precision code 0..3.
  function automatic int nbits(int p);
    return 4 << p;
  endfunction

endpackage
