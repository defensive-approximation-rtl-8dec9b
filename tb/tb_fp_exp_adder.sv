// tb_fp_exp_adder: exhaustive test of the exponent adder.
//
// Sweeps all 65,536 pairs of 8-bit biased exponents and checks that the output
// equals exp_a + exp_b - 127 as a signed number, computed with integers.
module tb_fp_exp_adder;
  logic [7:0]        exp_a, exp_b;
  logic signed [9:0] exp_sum;
  int checks = 0, failures = 0;

  fp_exp_adder dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 256; x++) begin
      for (int y = 0; y < 256; y++) begin
        exp_a = 8'(x); exp_b = 8'(y);
        #1;
        checks++;
        if (int'(exp_sum) != x + y - 127) begin
          failures++;
          if (failures < 10) $display("FAIL %0d + %0d -> %0d", x, y, exp_sum);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
