// fp_round_norm: normalisation and rounding unit of the floating-point multiplier.
//
// Takes the 48-bit mantissa product (two 24-bit mantissas with hidden bits),
// the product exponent from fp_exp_adder and the product sign, and returns a
// packed single-precision result:
//   * normalise: if bit 47 is set the product is in [2,4), so the mantissa is
//     taken from bits 47..24 and the exponent is incremented; otherwise it is
//     taken from bits 46..23;
//   * round to nearest, ties to even, using the guard bit below the kept
//     mantissa and the OR of all lower bits (sticky); a carry out of the
//     rounding renormalises;
//   * exponent >= 255 gives infinity, exponent <= 0 gives a signed zero (no
//     subnormal results are produced).
// The multiplier's description names a rounding unit but not its mode; round
// to nearest even and flush-to-zero are this design's choices.
//
// Combinational. The caller guarantees prod[47:46] != 0, which holds for the
// exact product and for the approximate array product of two normal operands.
module fp_round_norm
  import fp32_pkg::*;
(
  input  logic               sign,      // product sign
  input  logic signed [9:0]  exp_in,    // biased exponent before normalisation
  input  logic [PROD_W-1:0]  prod,      // 48-bit mantissa product
  output fp32_t              result     // packed, rounded result
);

  logic [MANT_W-1:0] mant;     // 24-bit mantissa before rounding
  logic              guard, sticky, round_up;
  logic [MANT_W:0]   mant_r;   // rounded mantissa with carry-out bit
  logic signed [9:0] exp_n;    // exponent after normalisation and rounding

  always_comb begin
    if (prod[PROD_W-1]) begin
      mant   = prod[PROD_W-1 -: MANT_W];
      guard  = prod[MANT_W-1];
      sticky = |prod[MANT_W-2:0];
      exp_n  = exp_in + 10'sd1;
    end else begin
      mant   = prod[PROD_W-2 -: MANT_W];
      guard  = prod[MANT_W-2];
      sticky = |prod[MANT_W-3:0];
      exp_n  = exp_in;
    end

    round_up = guard & (sticky | mant[0]);
    mant_r   = {1'b0, mant} + (MANT_W+1)'(round_up);
    if (mant_r[MANT_W]) begin
      // 1.111..1 rounded up to 10.000..0: renormalise
      mant_r = mant_r >> 1;
      exp_n  = exp_n + 10'sd1;
    end

    result.sign = sign;
    if (exp_n >= 10'sd255) begin
      result.exp  = EXP_MAX;
      result.frac = '0;
    end else if (exp_n <= 10'sd0) begin
      result.exp  = '0;
      result.frac = '0;
    end else begin
      result.exp  = exp_n[EXP_W-1:0];
      result.frac = mant_r[FRAC_W-1:0];
    end
  end

endmodule
