// tb_fp_ref_pkg: reference FP32 arithmetic for the testbenches, computed in
// double precision. A float converts to a double exactly; the product of two
// floats, and the sum of two floats whose exponents differ by at most 25, is
// exact in a double, so rounding the double once to float (nearest, ties to
// even) gives the correctly rounded FP32 result. Subnormals are flushed to
// zero, as in the RTL.
package tb_fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0)        d = {f[31], 63'd0};
    else if (f[30:23] == 8'hFF)  d = {f[31], 11'h7FF, f[22:0], 29'd0};
    else                         d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [24:0] m;
    int e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? 32'h7FC0_0000 : {d[63], 8'hFF, 23'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    if (d[28] && ((|d[27:0]) || d[29])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // equal, counting +0 and -0 as the same value
  function automatic logic feq(input logic [31:0] a, input logic [31:0] b);
    return (a == b) || (a[30:0] == 31'd0 && b[30:0] == 31'd0);
  endfunction

  // random normal float with a biased exponent in [emin, emax]
  function automatic logic [31:0] frand(input int emin, input int emax);
    logic [31:0] v;
    v[31]    = 1'($urandom);
    v[30:23] = 8'(emin + int'($urandom % (emax - emin + 1)));
    v[22:0]  = 23'($urandom);
    return v;
  endfunction

endpackage
