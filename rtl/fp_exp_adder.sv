// fp_exp_adder: exponent adder of the floating-point multiplier.
//
// Adds the two biased 8-bit exponents and subtracts the bias once, giving the
// biased exponent of the product before normalisation. The result is a signed
// 10-bit number so that overflow (>= 255) and underflow (<= 0) stay visible to
// the rounding unit, which adds the normalisation increment and clamps.
//
// Combinational. The width and bias are those of single precision.
module fp_exp_adder
  import fp32_pkg::*;
(
  input  logic [EXP_W-1:0]  exp_a,    // biased exponent of operand a
  input  logic [EXP_W-1:0]  exp_b,    // biased exponent of operand b
  output logic signed [9:0] exp_sum   // exp_a + exp_b - 127
);

  always_comb begin
    exp_sum = $signed({2'b00, exp_a}) + $signed({2'b00, exp_b}) - 10'(BIAS);
  end

endmodule
