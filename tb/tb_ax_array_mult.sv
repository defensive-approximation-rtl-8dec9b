// tb_ax_array_mult: test of the AMA5 array multiplier.
//
// Two instances: the 4x4 array of the classic drawing, checked exhaustively
// (256 operand pairs), and the default 24x24 mantissa multiplier, checked on
// directed and 20,000 random operand pairs. Each output is compared with the
// closed form of the AMA5 array (see fp_ref_pkg): low half a[0] ? b : 0,
// bit N zero, bit N+m equal to a[m] & b[N-1]. For operands whose top bits are
// set, as normalised mantissas always are, the product must also be at least
// the exact product; the testbench checks that and counts how often the
// approximation is strictly larger.
module tb_ax_array_mult;
  import fp_ref_pkg::*;

  logic [3:0]  a4, b4;
  logic [7:0]  p4;
  logic [23:0] a24, b24;
  logic [47:0] p24;
  int checks = 0, failures = 0, larger = 0;

  ax_array_mult #(.N(4)) dut4 (.a(a4), .b(b4), .p(p4));
  ax_array_mult dut24 (.a(a24), .b(b24), .p(p24));

  function automatic logic [7:0] closed4(logic [3:0] a, logic [3:0] b);
    logic [7:0] p;
    p = '0;
    if (a[0]) p[3:0] = b;
    for (int m = 1; m < 4; m++) p[4+m] = a[m] & b[3];
    return p;
  endfunction

  task automatic check24(logic [23:0] a, logic [23:0] b);
    logic [47:0] exp_p;
    a24 = a; b24 = b;
    #1;
    exp_p = ama5_prod24(a, b);
    checks++;
    if (p24 !== exp_p) begin
      failures++;
      if (failures < 10) $display("FAIL 24x24: a=%h b=%h p=%h expected %h", a, b, p24, exp_p);
    end
    if (a[23] && b[23]) begin
      checks++;
      if (p24 < 48'(a) * 48'(b)) begin
        failures++;
        $display("FAIL: approximate product %h below exact for a=%h b=%h", p24, a, b);
      end
      if (p24 > 48'(a) * 48'(b)) larger++;
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 4x4, exhaustive
    for (int v = 0; v < 256; v++) begin
      {a4, b4} = 8'(v);
      #1;
      checks++;
      if (p4 !== closed4(a4, b4)) begin
        failures++;
        $display("FAIL 4x4: a=%h b=%h p=%h expected %h", a4, b4, p4, closed4(a4, b4));
      end
    end
    // hand-worked 4x4 case: 1111 x 1111 -> {111, 0, 1111} = 0xEF
    a4 = 4'hf; b4 = 4'hf; #1;
    checks++;
    if (p4 !== 8'hef) begin failures++; $display("FAIL 4x4 15*15 = %h", p4); end

    // 24x24: directed
    check24(24'h800000, 24'h800000);   // 1.0 * 1.0
    check24(24'hffffff, 24'hffffff);
    check24(24'h800001, 24'hc00000);
    check24(24'h000000, 24'hffffff);
    check24(24'hffffff, 24'h000000);
    // 24x24: random, half of them with both top bits set
    for (int k = 0; k < 20000; k++) begin
      logic [23:0] a, b;
      a = 24'($urandom); b = 24'($urandom);
      if (k % 2 == 0) begin a[23] = 1'b1; b[23] = 1'b1; end
      check24(a, b);
    end
    checks++;
    if (larger == 0) begin
      failures++;
      $display("FAIL: approximation never differed from the exact product");
    end
    $display("approximate > exact in %0d of the normalised cases", larger);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
