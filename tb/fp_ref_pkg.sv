// fp_ref_pkg: reference single-precision arithmetic for the testbenches.
//
// Operands are widened to double precision (which holds every product of two
// singles exactly and every sum that matters for rounding), the operation is
// done on `real`, and the result is rounded back to single precision, to
// nearest with ties to even, by bit manipulation of the double. Conventions
// match the RTL: subnormals flush to zero, overflow gives infinity.
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real v);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic [28:0] rest;
    logic        up;
    d = $realtobits(v);
    if (d[62:0] == 63'd0) return 32'd0;
    e    = int'(d[62:52]) - 1023 + 127;
    m    = {1'b0, d[51:29]};
    rest = d[28:0];
    up   = rest[28] && ((rest[27:0] != 0) || m[0]);
    m    = m + 24'(up);
    if (m[23]) begin
      m = 24'd0;
      e = e + 1;
    end
    if (e <= 0) return 32'd0;
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // A product that is zero or flushed to zero keeps the sign a ^ b.
  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    logic [31:0] y;
    y = r2f(f2r(a) * f2r(b));
    if (y[30:0] == 31'd0) y[31] = a[31] ^ b[31];
    return y;
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // Random normal single with exponent in [127-span, 127+span].
  function automatic logic [31:0] rand_f(int span);
    logic [7:0] e;
    e = 8'(127 - span + int'($urandom_range(2 * span)));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

endpackage
