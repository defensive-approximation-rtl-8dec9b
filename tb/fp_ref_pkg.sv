// fp_ref_pkg: reference arithmetic for the testbenches.
//
// Works through the simulator's double-precision reals, independently of the
// RTL: fp32 words are widened exactly to doubles, sums and scaled products are
// formed in double precision, and the result is rounded back to single
// precision (nearest, ties to even, results below the normal range flushed to
// a signed zero, above it to Inf). The approximate mantissa product of the
// AMA5 array is given in closed form: with Sum = B (partial sum from above) and
// Cout = A (partial product), partial sums only slide diagonally through the
// array, so for an N x N array
//   p[N-1:0]  = a[0] ? b : 0
//   p[N]      = 0
//   p[N+m]    = a[m] & b[N-1]          for m = 1..N-1.
package fp_ref_pkg;

  function automatic real to_real(logic [31:0] x);
    logic [10:0] e11;
    if (x[30:23] == 8'd0) return x[31] ? -0.0 : 0.0;
    e11 = 11'(x[30:23]) - 11'd127 + 11'd1023;
    return $bitstoreal({x[31], e11, x[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] from_real(real r);
    logic [63:0] bits;
    logic [52:0] m;
    logic [24:0] mr;
    int          e;
    logic        g, st, up;
    bits = $realtobits(r);
    if (bits[62:0] == '0) return {bits[63], 31'd0};
    e  = int'(bits[62:52]) - 1023 + 127;
    m  = {1'b1, bits[51:0]};
    g  = m[28];
    st = |m[27:0];
    up = g & (st | m[29]);
    mr = {1'b0, m[52:29]} + 25'(up);
    if (mr[24]) begin mr = mr >> 1; e = e + 1; end
    if (e >= 255) return {bits[63], 8'hff, 23'd0};
    if (e <= 0)   return {bits[63], 31'd0};
    return {bits[63], 8'(e), mr[22:0]};
  endfunction

  // Closed form of the AMA5 array product, 24 x 24.
  function automatic logic [47:0] ama5_prod24(logic [23:0] a, logic [23:0] b);
    logic [47:0] p;
    p = '0;
    if (a[0]) p[23:0] = b;
    for (int m = 1; m < 24; m++) p[24+m] = a[m] & b[23];
    return p;
  endfunction

  function automatic logic is_nan(logic [31:0] x);
    return x[30:23] == 8'hff && x[22:0] != 0;
  endfunction
  function automatic logic is_inf(logic [31:0] x);
    return x[30:23] == 8'hff && x[22:0] == 0;
  endfunction
  function automatic logic is_zero(logic [31:0] x);
    return x[30:23] == 8'h00;
  endfunction

  // Reference Ax-FPM: exact sign and exponent, AMA5 mantissa product,
  // rounded once to single precision.
  function automatic logic [31:0] ref_axfpm(logic [31:0] a, logic [31:0] b);
    logic        s;
    logic [47:0] p;
    real         v;
    int          ea, eb;
    s = a[31] ^ b[31];
    if (is_nan(a) || is_nan(b) || (is_inf(a) && is_zero(b)) || (is_zero(a) && is_inf(b)))
      return 32'h7fc00000;
    if (is_inf(a) || is_inf(b)) return {s, 8'hff, 23'd0};
    if (is_zero(a) || is_zero(b)) return {s, 31'd0};
    p = ama5_prod24({1'b1, a[22:0]}, {1'b1, b[22:0]});
    ea = a[30:23];
    eb = b[30:23];
    v = real'(p) * (2.0 ** (ea + eb - 254 - 46));
    if (s) v = -v;
    return from_real(v);
  endfunction

  // Exact single-precision product, for comparisons with the approximation.
  function automatic logic [31:0] ref_mul_exact(logic [31:0] a, logic [31:0] b);
    return from_real(to_real(a) * to_real(b));
  endfunction

  // Reference single-precision addition (finite operands).
  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b);
    if (is_zero(a) && is_zero(b)) return {a[31] & b[31], 31'd0};
    if (is_zero(a)) return b;
    if (is_zero(b)) return a;
    return from_real(to_real(a) + to_real(b));
  endfunction

  // Random normal number of magnitude about 2^(e-127), random sign.
  function automatic logic [31:0] rand_fp(int unsigned e);
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
