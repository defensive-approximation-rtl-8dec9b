// tb_fp_round_norm: test of the normalisation and rounding unit.
//
// Drives random 48-bit mantissa products (top two bits not both zero) with
// random exponents and signs, and compares the packed result with a reference
// that scales the product in double precision and rounds it to single
// precision (fp_ref_pkg::from_real). Directed cases hit a tie rounded to
// even, a tie rounded up, a rounding carry that renormalises, overflow to Inf
// and underflow to zero; each is counted and must occur.
module tb_fp_round_norm;
  import fp_ref_pkg::*;
  import fp32_pkg::*;

  logic              sign;
  logic signed [9:0] exp_in;
  logic [47:0]       prod;
  fp32_t             result;
  int checks = 0, failures = 0;
  int n_tie = 0, n_carry = 0, n_ovf = 0, n_unf = 0, n_shift = 0;

  fp_round_norm dut (.*);

  task automatic run(logic s, int e, logic [47:0] p);
    logic [31:0] expv;
    real v;
    sign = s; exp_in = 10'(e); prod = p;
    #1;
    v = real'(p) * (2.0 ** (e - 127 - 46));
    expv = from_real(s ? -v : v);
    checks++;
    if (result !== expv) begin
      failures++;
      if (failures < 10)
        $display("FAIL s=%b e=%0d p=%h -> %h expected %h", s, e, p, result, expv);
    end
    if (p[47]) n_shift++;
    if (!p[47] && p[22] && p[21:0] == 0) n_tie++;
    if (expv[30:23] == 8'hff) n_ovf++;
    if (expv[30:23] == 8'h00) n_unf++;
    if (!p[47] && p[46:23] == '1 && p[22]) n_carry++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(0, 127, 48'h4000_0000_0000);                 // exactly 1.0
    run(1, 127, 48'h4000_0040_0000);                 // tie, even: stays
    run(0, 127, 48'h4000_00c0_0000);                 // tie, odd: rounds up
    run(0, 100, 48'h7fff_ffc0_0000);                 // rounding carry
    run(0, 254, 48'h8000_0000_0000);                 // overflow to Inf
    run(1, 0,   48'h4000_0000_0000);                 // underflow to -0
    run(0, -5,  48'hc000_0000_0000);
    for (int k = 0; k < 20000; k++) begin
      logic [47:0] p;
      p = {$urandom, $urandom};
      if (p[47:46] == 2'b00) p[46] = 1'b1;
      if (k % 8 == 0) p[21:0] = '0;                  // make ties likely
      run(1'($urandom), int'($urandom_range(0, 300)) - 20, p);
    end
    checks++;
    if (n_tie == 0 || n_carry == 0 || n_ovf == 0 || n_unf == 0 || n_shift == 0) begin
      failures++;
      $display("FAIL: case not reached: tie=%0d carry=%0d ovf=%0d unf=%0d shift=%0d",
               n_tie, n_carry, n_ovf, n_unf, n_shift);
    end
    $display("ties=%0d carries=%0d overflows=%0d underflows=%0d shifts=%0d",
             n_tie, n_carry, n_ovf, n_unf, n_shift);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
