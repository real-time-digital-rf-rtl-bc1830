// rfe_tb_pkg: reference arithmetic for the testbenches.
//
// Converts between binary16 and real with the design's conventions
// (subnormals flushed to zero, truncation toward zero, saturation to
// infinity), so that expected values can be computed in double precision
// independently of the RTL and then converted once.
package rfe_tb_pkg;
  import rfe_pkg::*;

  function automatic real fp2r(fp16_t h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  // Round toward zero to binary16.
  function automatic fp16_t r2fp(real r);
    logic [63:0] b;
    int          e;
    b = $realtobits(r);
    if (r == 0.0) return 16'h0000;
    e = int'(b[62:52]) - 1023 + 15;
    if (e <= 0)  return 16'h0000;
    if (e >= 31) return {b[63], 5'd31, 10'd0};
    return {b[63], 5'(e), b[51:42]};
  endfunction

  function automatic real c10r(coef10_t c);
    return fp2r(coef10_to_fp16(c));
  endfunction

  // Random normal binary16 value with exponent in [lo, hi].
  function automatic fp16_t rnd_fp(int lo, int hi);
    int e;
    e = lo + int'($urandom_range(hi - lo));
    return {1'($urandom), 5'(e), 10'($urandom)};
  endfunction

  // Compare two numbers allowing a relative error (for multi-step chains).
  function automatic bit close(real a, real b, real rel);
    real d, m;
    d = (a > b) ? a - b : b - a;
    m = (a < 0 ? -a : a);
    if ((b < 0 ? -b : b) > m) m = (b < 0 ? -b : b);
    return d <= rel * m + 1.0e-6;
  endfunction
endpackage
