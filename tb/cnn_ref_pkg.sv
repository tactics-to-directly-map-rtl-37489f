// cnn_ref_pkg: behavioural reference arithmetic for the testbenches,
// written independently of the RTL datapath: plain integer convolution,
// the quantised tanh from the real-valued $tanh, and plain maxima.
package cnn_ref_pkg;

  // B-bit output code nearest to tanh(sum / 2^(2F)), F = B-1, saturated.
  function automatic int tanh_q(input longint sum, input int b);
    int  f, q, lo, hi;
    real v;
    f  = b - 1;
    v  = $tanh(real'(sum) / real'(longint'(1) << (2 * f))) * real'(1 << f);
    q  = int'($floor(v + 0.5));
    lo = -(1 << f);
    hi = (1 << f) - 1;
    if (q < lo) q = lo;
    if (q > hi) q = hi;
    return q;
  endfunction

  // Sign-extend a b-bit code held in the low bits of v.
  function automatic int sext(input int v, input int b);
    int m;
    m = v & ((1 << b) - 1);
    return (m >= (1 << (b - 1))) ? m - (1 << b) : m;
  endfunction

  // Random b-bit signed code.
  function automatic int rnd_code(input int b);
    return sext(int'($urandom), b);
  endfunction

endpackage
