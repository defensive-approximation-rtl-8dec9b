// ax_fpm: approximate single-precision floating-point multiplier (Ax-FPM).
//
// A basic IEEE-754 single-precision multiplier in which only the mantissa
// multiplier is approximate. Sign (XOR of the operand signs) and exponent
// (fp_exp_adder) are computed exactly, because errors in the exponent would
// disturb a CNN far more than errors in the mantissa. The two 24-bit mantissas
// (hidden bit plus fraction) go to ax_array_mult, the array multiplier built
// from AMA5 approximate full adders, and its 48-bit product is normalised and
// rounded by fp_round_norm.
//
// Operands that are not normal numbers take a separate, exact path: NaN in or
// Inf*0 gives a quiet NaN, Inf times a nonzero gives a signed Inf, and zero
// times a finite number gives a signed zero. Subnormal operands count as zero.
// This special-value handling is this design's own; the approximation only
// concerns the product of two normal numbers.
//
// Combinational: the result is valid in the same cycle as the operands.
module ax_fpm
  import fp32_pkg::*;
(
  input  fp32_t a,   // multiplicand
  input  fp32_t b,   // multiplier
  output fp32_t y    // approximate product
);

  logic                 sign;
  logic signed [9:0]    exp_sum;
  logic [PROD_W-1:0]    prod;
  fp32_t                normal_res;

  fp_exp_adder u_exp (
    .exp_a  (a.exp),
    .exp_b  (b.exp),
    .exp_sum(exp_sum)
  );

  ax_array_mult #(.N(MANT_W)) u_mant (
    .a({1'b1, a.frac}),
    .b({1'b1, b.frac}),
    .p(prod)
  );

  fp_round_norm u_round (
    .sign  (sign),
    .exp_in(exp_sum),
    .prod  (prod),
    .result(normal_res)
  );

  always_comb begin
    sign = a.sign ^ b.sign;
    if (is_nan(a) || is_nan(b) ||
        (is_inf(a) && is_zero(b)) || (is_zero(a) && is_inf(b))) begin
      y = QNAN;
    end else if (is_inf(a) || is_inf(b)) begin
      y = '{sign: sign, exp: EXP_MAX, frac: '0};
    end else if (is_zero(a) || is_zero(b)) begin
      y = '{sign: sign, exp: '0, frac: '0};
    end else begin
      y = normal_res;
    end
  end

  // Two normal mantissas have their hidden bits set, so the array product must
  // reach bit 46 or 47; the rounding unit relies on it.
  always_comb begin
    if (!(is_zero(a) || is_zero(b) || a.exp == EXP_MAX || b.exp == EXP_MAX))
      assert (prod[PROD_W-1:PROD_W-2] != 2'b00)
        else $error("ax_fpm: mantissa product below 2^46");
  end

endmodule
