// fp_ref_pkg: reference single-precision arithmetic for the testbenches.
//
// Works through the simulator's double-precision reals: an operation on two
// singles is done in double and rounded once more to single, to nearest, ties to
// even. Because double carries more than 2*24+2 significand bits, this double
// rounding gives the correctly rounded single result for + and *. Subnormals are
// flushed to zero, as in the RTL.
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] b);
    logic [63:0] d;
    if (b[30:23] == 8'd0) return 0.0;
    d = {b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic [23:0] m;
    logic        g, s;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    g = d[28];
    s = |d[27:0];
    if (g && (s || m[0])) m = m + 1;
    if (m[23]) begin m = '0; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    logic [31:0] r;
    r = r2f(f2r(a) + f2r(b));
    if (r[30:0] == '0) r = '0;
    return r;
  endfunction

  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // Random normal single with an exponent in [elo, ehi].
  function automatic logic [31:0] rnd_fp(int elo, int ehi);
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(elo + int'($urandom % 32'(ehi - elo + 1)));
    return v;
  endfunction

endpackage
