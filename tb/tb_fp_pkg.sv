// tb_fp_pkg: testbench helpers for floating point checks.
//
// Converts single-precision bit patterns to real numbers by decoding the
// fields directly (independent of the design's operators), draws random
// operands in a bounded exponent range, and compares a design result with a
// double-precision reference using a tolerance scaled by the magnitude of
// the terms that were summed.
package tb_fp_pkg;

  function automatic real fp2real(input logic [31:0] a);
    int  e;
    real m;
    e = int'(a[30:23]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(a[22:0]) / 8388608.0;
    m = m * (2.0 ** (e - 127));
    return a[31] ? -m : m;
  endfunction

  // random value in about [-4, 4) with full random fraction
  function automatic logic [31:0] rand_fp();
    logic [31:0] r;
    r = $urandom;
    return {r[31], 8'(124 + ($urandom % 4)), r[22:0]};
  endfunction

  // exactly representable small integer (used for bit-exact checks)
  function automatic logic [31:0] int_fp(input int v);
    logic [31:0] r;
    int          a, p;
    if (v == 0) return 32'h0;
    a = (v < 0) ? -v : v;
    p = 0;
    for (int i = 0; i < 24; i++) if (a[i]) p = i;
    r[31]    = (v < 0);
    r[30:23] = 8'(127 + p);
    r[22:0]  = 23'((a << (23 - p)) & 32'h7fffff);
    return r;
  endfunction

  function automatic bit close(input real got, input real want, input real scale);
    real diff;
    diff = got - want;
    if (diff < 0) diff = -diff;
    return diff <= 1.0e-5 * (scale + 1.0e-30) + 1.0e-30;
  endfunction

endpackage
