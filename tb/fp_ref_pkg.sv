// fp_ref_pkg -- reference FP32 arithmetic for the testbenches.
//
// Operands are widened exactly to IEEE double, the operation is done in
// double precision by the simulator and the double result is rounded to FP32
// by hand (round to nearest, ties to even). For +, - and * of two FP32 values
// this double rounding is known to give the correctly rounded FP32 result.
// Subnormals are flushed to zero like the RTL. Random operands are drawn
// with exponents that keep every result in the normal range.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) d = {f[31], 63'd0};
    else d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [22:0] keep;
    logic [28:0] rem;
    int          e;
    logic [23:0] m;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e    = int'(d[62:52]) - 1023 + 127;
    keep = d[51:29];
    rem  = d[28:0];
    m    = {1'b0, keep};
    if (rem > 29'h1000_0000 || (rem == 29'h1000_0000 && keep[0])) m = m + 1;
    if (m[23]) e = e + 1;
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] fmax(input logic [31:0] a, input logic [31:0] b);
    return (f2r(a) > f2r(b) || (f2r(a) == f2r(b) && !a[31])) ? a : b;
  endfunction

  function automatic logic [31:0] fmin(input logic [31:0] a, input logic [31:0] b);
    return (fmax(a, b) == a) ? b : a;
  endfunction

  // random FP32 with biased exponent in [lo, hi]
  function automatic logic [31:0] frand(input int lo, input int hi);
    int e;
    e = lo + int'($urandom_range(hi - lo));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  // FP32 encoding of a small integer value (exact)
  function automatic logic [31:0] fint(input int v);
    return r2f(real'(v));
  endfunction

endpackage
