// tb_ax_fpm: test of the approximate single-precision multiplier.
//
// Compares the multiplier with a reference built from the closed-form AMA5
// mantissa product, exact sign and exponent, and one rounding to single
// precision (fp_ref_pkg::ref_axfpm). Operands: special values (zeros, Inf,
// NaN, subnormals), 20,000 random pairs in [-1, 1] (the range of CNN data) and
// 5,000 over the whole exponent range. It also checks, for normal operands,
// that the approximate result is never smaller in magnitude than the exactly
// rounded product, and reports how often it is strictly larger.
module tb_ax_fpm;
  import fp_ref_pkg::*;
  import fp32_pkg::*;

  fp32_t a, b, y;
  int checks = 0, failures = 0, n_larger = 0, n_normal = 0, n_special = 0;

  ax_fpm dut (.*);

  task automatic run(logic [31:0] x, logic [31:0] w);
    logic [31:0] expv, ex;
    a = x; b = w;
    #1;
    expv = ref_axfpm(x, w);
    checks++;
    if (y !== expv) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h -> %h expected %h", x, w, y, expv);
    end
    if (!is_zero(x) && !is_zero(w) && x[30:23] != 8'hff && w[30:23] != 8'hff) begin
      n_normal++;
      ex = ref_mul_exact(x, w);
      checks++;
      if (y[30:0] < ex[30:0] || y[31] != ex[31]) begin
        failures++;
        $display("FAIL magnitude: %h * %h -> %h below exact %h", x, w, y, ex);
      end
      if (y[30:0] > ex[30:0]) n_larger++;
    end else begin
      n_special++;
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // special values
    run(32'h0000_0000, 32'h3f80_0000);   // 0 * 1
    run(32'h8000_0000, 32'h3f80_0000);   // -0 * 1
    run(32'h7f80_0000, 32'h0000_0000);   // Inf * 0 -> NaN
    run(32'h7f80_0000, 32'hbf80_0000);   // Inf * -1 -> -Inf
    run(32'h7fc0_0001, 32'h3f80_0000);   // NaN
    run(32'h0000_0001, 32'h3f80_0000);   // subnormal -> 0
    run(32'h7f00_0000, 32'h7f00_0000);   // overflow
    run(32'h0080_0000, 32'h0080_0000);   // underflow
    // hand-worked: 1.5 * 1.5. Mantissas 0xC00000; a[0] = 0, so the product
    // is {a[23:1], 0, 24'b0} = 0xC00000 << 24 with bit 47 set: 1.5 * 2 = 3.0
    run(32'h3fc0_0000, 32'h3fc0_0000);
    checks++;
    if (y !== 32'h4040_0000) begin failures++; $display("FAIL 1.5*1.5 -> %h", y); end
    // 1.0 * 1.0 = 2.0 with this array (exact 1.0)
    run(32'h3f80_0000, 32'h3f80_0000);
    checks++;
    if (y !== 32'h4000_0000) begin failures++; $display("FAIL 1*1 -> %h", y); end
    // CNN range
    for (int k = 0; k < 20000; k++)
      run(rand_fp($urandom_range(100, 126)), rand_fp($urandom_range(100, 126)));
    // whole range
    for (int k = 0; k < 5000; k++)
      run(rand_fp($urandom_range(1, 254)), rand_fp($urandom_range(1, 254)));
    checks++;
    if (n_larger == 0 || n_special == 0) begin
      failures++;
      $display("FAIL: no larger result (%0d) or no special case (%0d)", n_larger, n_special);
    end
    $display("approximate magnitude above exact in %0d of %0d normal products",
             n_larger, n_normal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
