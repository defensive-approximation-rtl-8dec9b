// tb_fp32_adder: test of the exact single-precision adder.
//
// Compares with double-precision addition rounded once to single precision.
// Random operands have exponents at most 25 apart, so the double sum is exact
// and the single rounding is the only one; directed cases cover exact
// cancellation, carries, a large exponent gap, zeros and special values.
// Cancellations (left shifts) and carry-outs (right shifts) are counted and
// must both occur.
module tb_fp32_adder;
  import fp_ref_pkg::*;
  import fp32_pkg::*;

  fp32_t a, b, y;
  int checks = 0, failures = 0, n_cancel = 0, n_carry = 0;

  fp32_adder dut (.*);

  task automatic run(logic [31:0] x, logic [31:0] w, logic [31:0] expv);
    a = x; b = w;
    #1;
    checks++;
    if (y !== expv) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h -> %h expected %h", x, w, y, expv);
    end
    if (x[31] != w[31] && y[30:23] < x[30:23] && y[30:23] < w[30:23]) n_cancel++;
    if (x[31] == w[31] && y[30:23] > x[30:23] && y[30:23] > w[30:23]) n_carry++;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(32'h3f80_0000, 32'h3f80_0000, 32'h4000_0000);   // 1 + 1 = 2
    run(32'h3f80_0000, 32'hbf80_0000, 32'h0000_0000);   // 1 - 1 = +0
    run(32'h4040_0000, 32'hbf80_0000, 32'h4000_0000);   // 3 - 1 = 2
    run(32'h3f80_0000, 32'h3380_0000, 32'h3f80_0000);   // 1 + 2^-24: tie to even
    run(32'h3f80_0001, 32'h3380_0000, 32'h3f80_0002);   // tie rounds up to even
    run(32'h4b00_0000, 32'h0080_0000, 32'h4b00_0000);   // huge gap
    run(32'h0000_0000, 32'hc0a0_0000, 32'hc0a0_0000);   // 0 + -5
    run(32'h8000_0000, 32'h8000_0000, 32'h8000_0000);   // -0 + -0
    run(32'h7f80_0000, 32'h3f80_0000, 32'h7f80_0000);   // Inf + 1
    run(32'h7f80_0000, 32'hff80_0000, 32'h7fc0_0000);   // Inf - Inf
    run(32'h7f7f_ffff, 32'h7f7f_ffff, 32'h7f80_0000);   // overflow
    run(32'h0100_0000, 32'h80ff_ffff, 32'h0000_0000);   // result below normal range
    for (int k = 0; k < 30000; k++) begin
      int unsigned e1, e2;
      logic [31:0] x, w;
      e1 = $urandom_range(30, 220);
      e2 = e1 + $urandom_range(0, 25) - ((k % 2) ? 0 : 25);
      if (k % 5 == 0) e2 = e1;                          // equal exponents: cancellations
      x = rand_fp(e1); w = rand_fp(e2);
      run(x, w, ref_add(x, w));
    end
    checks++;
    if (n_cancel == 0 || n_carry == 0) begin
      failures++;
      $display("FAIL: cancellations=%0d carries=%0d", n_cancel, n_carry);
    end
    $display("cancellations=%0d carries=%0d", n_cancel, n_carry);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
