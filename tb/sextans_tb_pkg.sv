// sextans_tb_pkg: reference arithmetic for the Sextans testbenches.
//
// FP32 results are computed independently of the RTL: operands are widened to
// IEEE double (real), the operation is done in double, and the result is
// rounded back to single with round-to-nearest-even. A product of two singles
// is exact in double and a sum of two singles rounds correctly through double,
// so these reference values are the correctly rounded single results. The
// flush-to-zero rules of the RTL (subnormals read and written as zero) are
// reproduced here.
package sextans_tb_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic        s, g, st, rnd;
    int          e;
    logic [24:0] m;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    rnd = g & (st | m[0]);
    m = m + 25'(rnd);
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] r;
    r = r2f(f2r(a) + f2r(b));
    if (r[30:0] == 31'd0) r = (a[31] & b[31] & a[30:0] == 0 & b[30:0] == 0) ? 32'h8000_0000 : 32'd0;
    return r;
  endfunction

  // Random normal FP32 with an exponent in [emin, emax].
  function automatic logic [31:0] rand_fp(input int emin, input int emax);
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(emin + int'($urandom % 32'(emax - emin + 1)));
    return r;
  endfunction

  // Small integer-valued FP32 (exact sums keep the end-to-end checks exact
  // regardless of accumulation order).
  function automatic logic [31:0] int_fp(input int v);
    return r2f(real'(v));
  endfunction

endpackage
