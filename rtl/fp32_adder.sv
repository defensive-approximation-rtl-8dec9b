// fp32_adder: exact single-precision floating-point adder.
//
// Accumulates the Ax-FPM products of a convolution window. Only the multiplier
// of the datapath is approximate; additions stay exact. The adder follows the
// textbook structure:
//   1. order the operands so that |x| >= |y|;
//   2. shift y's 24-bit mantissa right by the exponent difference into a
//      27-bit field (mantissa, guard, round, sticky), ORing lost bits into
//      the sticky bit;
//   3. add, or subtract when the signs differ;
//   4. normalise: one step right on a carry out, or left by the count of
//      leading zeros after a cancellation;
//   5. round to nearest, ties to even, and renormalise on a rounding carry.
// Special values: NaN in, or Inf + (-Inf), gives a quiet NaN; an Inf operand
// passes through; a zero (or subnormal, flushed to zero) operand returns the
// other operand; an exact cancellation gives +0; a result exponent <= 0 is
// flushed to a signed zero and one >= 255 becomes Inf. The adder and its
// rounding mode are this design's choice.
//
// Combinational.
module fp32_adder
  import fp32_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  localparam int unsigned EXT_W = MANT_W + 3;   // mantissa + guard/round/sticky

  fp32_t              x, z;          // x: larger magnitude, z: smaller
  logic [7:0]         d;             // exponent difference
  logic [EXT_W-1:0]   mx, mz;        // extended mantissas
  logic [EXT_W-1:0]   mz_sh;
  logic               lost;          // any 1 shifted out of mz
  logic [EXT_W:0]     sum;           // one extra bit for carry-out
  logic [EXT_W-1:0]   n;             // normalised extended mantissa
  logic signed [9:0]  e;
  int unsigned        lz;
  logic               round_up;
  logic [MANT_W:0]    mant_r;
  fp32_t              normal_res;

  always_comb begin
    // 1. order by magnitude
    if ({a.exp, a.frac} >= {b.exp, b.frac}) begin
      x = a; z = b;
    end else begin
      x = b; z = a;
    end
    d  = x.exp - z.exp;
    mx = {1'b1, x.frac, 3'b000};
    mz = {1'b1, z.frac, 3'b000};

    // 2. align
    if (d >= 8'(EXT_W)) begin
      mz_sh = '0;
      lost  = 1'b1;
    end else begin
      mz_sh = mz >> d;
      lost  = |(mz & ((EXT_W'(1) << d) - EXT_W'(1)));
    end
    mz_sh[0] = mz_sh[0] | lost;

    // 3. add or subtract
    if (x.sign ^ z.sign) sum = {1'b0, mx} - {1'b0, mz_sh};
    else                 sum = {1'b0, mx} + {1'b0, mz_sh};

    // 4. normalise
    e  = $signed({2'b00, x.exp});
    lz = 0;
    if (sum[EXT_W]) begin
      n = sum[EXT_W:1];
      n[0] = n[0] | sum[0];
      e = e + 10'sd1;
    end else begin
      // leading-zero count: the highest set bit is found last
      for (int k = 0; k < EXT_W; k++) begin
        if (sum[k]) lz = (EXT_W - 1) - k;
      end
      n = sum[EXT_W-1:0] << lz;
      e = e - 10'(lz);
    end

    // 5. round to nearest even
    round_up = n[2] & (n[1] | n[0] | n[3]);
    mant_r   = {1'b0, n[EXT_W-1:3]} + (MANT_W+1)'(round_up);
    if (mant_r[MANT_W]) begin
      mant_r = mant_r >> 1;
      e      = e + 10'sd1;
    end

    normal_res.sign = x.sign;
    if (sum == '0) begin
      normal_res = '0;                                   // exact cancellation
    end else if (e >= 10'sd255) begin
      normal_res.exp  = EXP_MAX;
      normal_res.frac = '0;
    end else if (e <= 10'sd0) begin
      normal_res.exp  = '0;
      normal_res.frac = '0;
    end else begin
      normal_res.exp  = e[EXP_W-1:0];
      normal_res.frac = mant_r[FRAC_W-1:0];
    end

    // special values
    if (is_nan(a) || is_nan(b) || (is_inf(a) && is_inf(b) && (a.sign != b.sign)))
      y = QNAN;
    else if (is_inf(a))
      y = a;
    else if (is_inf(b))
      y = b;
    else if (is_zero(a) && is_zero(b))
      y = '{sign: a.sign & b.sign, exp: '0, frac: '0};
    else if (is_zero(a))
      y = b;
    else if (is_zero(b))
      y = a;
    else
      y = normal_res;
  end

endmodule
