// tb_ama5_array_cell: exhaustive test of one AMA5 array-multiplier cell.
//
// Applies all 16 combinations of (a_i, b_j, pp_in, cin) and checks the AMA5
// truth table with A = a_i & b_j and B = pp_in: Sum = B, Cout = A, whatever
// the carry input. It also counts the input combinations on which the cell
// differs from an exact full adder, which must be non-zero for an
// approximate cell.
module tb_ama5_array_cell;
  logic a_i, b_j, pp_in, cin, sum, cout;
  int checks = 0, failures = 0, differs = 0;

  ama5_array_cell dut (.*);

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      logic A, B, exact_s, exact_c;
      {a_i, b_j, pp_in, cin} = 4'(v);
      #1;
      A = a_i & b_j;
      B = pp_in;
      exact_s = A ^ B ^ cin;
      exact_c = (A & B) | (cin & (A ^ B));
      checks++;
      if (sum !== B) begin
        failures++;
        $display("FAIL sum: a=%b b=%b pp=%b cin=%b sum=%b", a_i, b_j, pp_in, cin, sum);
      end
      checks++;
      if (cout !== A) begin
        failures++;
        $display("FAIL cout: a=%b b=%b pp=%b cin=%b cout=%b", a_i, b_j, pp_in, cin, cout);
      end
      if (sum !== exact_s || cout !== exact_c) differs++;
    end
    // AMA5 is wrong on exactly half of the 8 full-adder input patterns
    // (A,B,Cin); over the 16 cell inputs that is 8 combinations.
    checks++;
    if (differs != 8) begin
      failures++;
      $display("FAIL: %0d combinations differ from an exact adder, expected 8", differs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
