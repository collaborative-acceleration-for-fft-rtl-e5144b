// tb_fp_pkg: reference single-precision arithmetic for the testbenches.
//
// Values are converted to double precision, combined there and rounded back
// to single precision (nearest, ties to even). For one add, subtract or
// multiply of two singles that double rounding gives the correctly rounded
// single result, so this serves as an independent model of the RTL lanes.
// Subnormals are flushed to zero, as the RTL does.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic [52:0] m53;
    logic [24:0] m;
    int          e;
    d = $realtobits(x);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e   = int'(d[62:52]) - 1023 + 127;
    m53 = {1'b1, d[51:0]};
    m   = {1'b0, m53[52:29]};
    if (m53[28] && ((m53[27:0] != 0) || m53[29])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fneg(input logic [31:0] a);
    return {~a[31], a[30:0]};
  endfunction

  // random normal single with exponent in [127-span, 127+span]
  function automatic logic [31:0] rand_f(input int span);
    int e;
    e = 127 - span + int'($urandom_range(2 * span));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
