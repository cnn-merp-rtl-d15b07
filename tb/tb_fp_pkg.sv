// tb_fp_pkg: reference single-precision arithmetic for the testbenches,
// computed independently of the RTL through the simulator's double-precision
// real type. A float sum or product of two floats is formed exactly or
// correctly rounded in double and then rounded once more to single with
// round-to-nearest-even; because double has more than twice the precision
// of single, that second rounding gives the correctly rounded single result.
// The same flush-to-zero rules as the RTL are applied (subnormal in or out
// becomes zero, an exact zero sum is +0).
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic [23:0] m;
    logic        g, st;
    int          e;
    if (x == 0.0) return 32'h0;
    d  = $realtobits(x);
    e  = int'(d[62:52]) - 1023 + 127;
    g  = d[28];
    st = |d[27:0];
    m  = {1'b0, d[51:29]} + 24'(g && (st || d[29]));
    if (m[23]) begin e = e + 1; m = 24'd0; end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] y;
    if (a[30:23] == 0 || b[30:23] == 0) return {a[31] ^ b[31], 31'd0};
    y = r2f(f2r(a) * f2r(b));
    return y;
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // Random normal float with exponent in [127-span, 127+span].
  function automatic logic [31:0] frand(input int span);
    logic [31:0] f;
    f[31]    = 1'($urandom_range(0, 1));
    f[30:23] = 8'(127 - span + $urandom_range(0, 2 * span));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

endpackage
