// tb_ax_fpm_error_profile: error profile of the approximate multiplier.
//
// Repeats, at a smaller count, the characterisation the multiplier was judged
// by: 1,000,000 random products of operands drawn uniformly from [-1, 1]
// (uniform in value, not in exponent), each compared with the exactly rounded
// product. It reports the fraction of products whose magnitude comes out
// larger than the exact one (about 96% is the figure reported for this
// multiplier), the mean relative error distance MRED = mean(|approx - exact| /
// |exact|) and NMED = mean(|approx - exact|) / max|exact|. Every product is
// also checked against the bit-exact reference model, and the fraction
// larger must be at least 90%. With this model the run gives 100% larger,
// MRED about 0.39 and NMED about 0.084 (0.33 and 0.08 are the values
// reported for the multiplier; the 96% is approached when exponents are
// drawn uniformly instead, see tb_ax_fpm).
module tb_ax_fpm_error_profile;
  import fp_ref_pkg::*;
  import fp32_pkg::*;

  localparam int unsigned COUNT = 1000000;

  fp32_t a, b, y;
  int    checks = 0, failures = 0, n_larger = 0, n = 0;
  real   sum_red = 0.0, sum_ed = 0.0, max_p = 0.0;

  ax_fpm dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < COUNT; k++) begin
      real xa, xb, ve, va;
      logic [31:0] ex;
      xa = (real'($urandom) / 4294967296.0) * 2.0 - 1.0;
      xb = (real'($urandom) / 4294967296.0) * 2.0 - 1.0;
      a = from_real(xa);
      b = from_real(xb);
      #1;
      checks++;
      if (y !== ref_axfpm(a, b)) begin
        failures++;
        if (failures < 10) $display("FAIL %h * %h -> %h", a, b, y);
      end
      ex = ref_mul_exact(a, b);
      if (is_zero(ex)) continue;
      ve = to_real(ex);
      va = to_real(y);
      n++;
      if (y[30:0] > ex[30:0]) n_larger++;
      sum_red += ((va > ve) ? va - ve : ve - va) / ((ve > 0.0) ? ve : -ve);
      sum_ed  += (va > ve) ? va - ve : ve - va;
      if (((ve > 0.0) ? ve : -ve) > max_p) max_p = (ve > 0.0) ? ve : -ve;
    end
    $display("products=%0d larger=%0.2f%% MRED=%0.3f NMED=%0.3f",
             n, 100.0 * n_larger / n, sum_red / n, sum_ed / n / max_p);
    checks++;
    if (real'(n_larger) / n < 0.90) begin
      failures++;
      $display("FAIL: too few products above exact");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
