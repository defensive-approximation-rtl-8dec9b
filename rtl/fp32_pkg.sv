// fp32_pkg: shared types and constants of the approximate floating-point datapath.
//
// The datapath works on IEEE-754 single precision words: one sign bit (bit 31),
// an 8-bit biased exponent (bits 30..23) and a 23-bit fraction (bits 22..0),
// value = (-1)^sign * 2^(exp-127) * 1.fraction for normal numbers. The field
// widths and bit positions are those of the single-precision format the design
// is built for; the helper functions below are plain combinational logic.
package fp32_pkg;

  localparam int unsigned EXP_W  = 8;
  localparam int unsigned FRAC_W = 23;
  localparam int unsigned MANT_W = FRAC_W + 1;    // fraction plus hidden bit
  localparam int unsigned PROD_W = 2 * MANT_W;    // full mantissa product
  localparam int unsigned BIAS   = 127;
  localparam logic [EXP_W-1:0] EXP_MAX = '1;      // Inf / NaN exponent

  typedef struct packed {
    logic               sign;
    logic [EXP_W-1:0]   exp;
    logic [FRAC_W-1:0]  frac;
  } fp32_t;

  // Canonical quiet NaN produced for invalid operations.
  localparam fp32_t QNAN = '{sign: 1'b0, exp: EXP_MAX, frac: 23'h400000};

  // Classification of an operand. Subnormal inputs are treated as zero
  // (flush-to-zero), so a zero exponent always classifies as zero.
  function automatic logic is_zero(fp32_t x);
    return x.exp == '0;
  endfunction

  function automatic logic is_inf(fp32_t x);
    return (x.exp == EXP_MAX) && (x.frac == '0);
  endfunction

  function automatic logic is_nan(fp32_t x);
    return (x.exp == EXP_MAX) && (x.frac != '0);
  endfunction

endpackage
