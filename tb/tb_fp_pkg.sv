// tb_fp_pkg: reference floating-point helpers for the testbenches.
//
// The reference works in double precision (SystemVerilog real) and rounds to
// binary32 in one step. A binary32 product is exact in double precision, and
// for a binary32 sum the double-precision rounding followed by rounding to
// binary32 equals a single correct rounding (53 >= 2*24 + 2), so these helpers
// give the correctly rounded result of each operation independently of the
// design. Like the design, they read subnormals as zero and flush results
// below 2^-126 to a signed zero.
package tb_fp_pkg;

  // binary32 bit pattern -> real (subnormals read as zero).
  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return f[31] ? -0.0 : 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // real -> binary32 bit pattern, round to nearest even, flush to zero.
  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic        sgn, g, st, up;
    int          e;
    logic [24:0] m;
    d   = $realtobits(r);
    sgn = d[63];
    if (d[62:52] == 11'd0) return {sgn, 31'd0};
    e   = int'(d[62:52]) - 1023 + 127;
    m   = {1'b0, 1'b1, d[51:29]};
    g   = d[28];
    st  = |d[27:0];
    up  = g & (st | m[0]);
    m   = m + 25'(up);
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {sgn, 8'hFF, 23'd0};
    if (e <= 0)   return {sgn, 31'd0};
    return {sgn, 8'(e), m[22:0]};
  endfunction

  // Correctly rounded binary32 operations.
  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] fsub(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) - f2r(b));
  endfunction

  // Random binary32 normal number with exponent in [127-span, 127+span].
  function automatic logic [31:0] rand_fp(input int span);
    int e;
    e = 127 - span + int'($urandom_range(2 * span, 0));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
