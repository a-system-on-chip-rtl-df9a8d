// fp_ref_pkg: testbench reference for IEEE-754 single-precision arithmetic.
//
// The reference works in 64-bit real. A single-precision word is widened to a
// real exactly; a product or sum of two singles is formed in double precision
// and rounded back to single, to nearest with ties to even, by hand from the
// double's bit pattern. Since double carries more than twice the 24-bit
// single significand plus two bits, rounding twice this way gives the
// correctly rounded single result for + and *. Results below the normal
// single range are flushed to a signed zero, like the design's units, and
// the random-value helpers keep exponents well inside the normal range.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] x);
    logic [63:0] d;
    if (x[30:23] == 8'd0) return 0.0;   // signed zeros are handled by the callers
    // Same value as a double: rebias the exponent, extend the fraction.
    d = {x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic        s, g, st;
    int          e;
    logic [24:0] mant;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e    = int'(d[62:52]) - 1023 + 127;
    mant = {2'b01, d[51:29]};
    g    = d[28];
    st   = |d[27:0];
    if (g && (st || mant[0])) mant = mant + 25'd1;
    if (mant[24]) begin
      mant = mant >> 1;
      e    = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), mant[22:0]};
  endfunction

  function automatic logic [31:0] fmul_ref(input logic [31:0] a, input logic [31:0] b);
    if (a[30:23] == 0 || b[30:23] == 0) return {a[31] ^ b[31], 31'd0};
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd_ref(input logic [31:0] a, input logic [31:0] b);
    if (a[30:23] == 0 && b[30:23] == 0) return {a[31] & b[31], 31'd0};
    if (b[30:23] == 0) return a;
    if (a[30:23] == 0) return b;
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic bit is_nan(input logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] != 0);
  endfunction

  // Random normal single with exponent in [emin, emax] (biased).
  function automatic logic [31:0] rand_f(input int emin, input int emax);
    logic [31:0] r;
    r[31]    = 1'($urandom);
    r[30:23] = 8'(emin + int'($urandom_range(emax - emin)));
    r[22:0]  = 23'($urandom);
    return r;
  endfunction

endpackage
