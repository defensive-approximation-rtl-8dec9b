// tb_approx_conv_mac: end-to-end test of the approximate convolution unit.
//
// Runs the whole datapath (AMA5 array, exponent adder, rounding unit,
// accumulator adder) at its only configuration, single precision with a
// 24 x 24 mantissa array, in three parts:
//   1. 300 random windows of 1 to 30 pairs with values in [-1, 1], idle cycles
//      inside windows, back-to-back windows and zero operands;
//   2. the first convolution layer of a LeNet-5-sized network on one channel:
//      a 28 x 28 image and a 5 x 5 kernel, giving 24 x 24 outputs of 25 pairs
//      each, streamed without gaps;
//   3. a filter convolved with six images of rising similarity to it, printing
//      the exact and approximate results side by side.
// Each window result is compared with a reference that forms every product
// with the closed-form AMA5 mantissa product and accumulates in single
// precision (fp_ref_pkg). The output must pulse exactly one clock after the
// last pair of its window and at no other time. Mechanisms counted, each of
// which must occur: windows, back-to-back windows, idle cycles inside a
// window, zero operands, negative products and products where the
// approximation differs from the exact product.
module tb_approx_conv_mac;
  import fp_ref_pkg::*;
  import fp32_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  in_valid = 1'b0, in_last = 1'b0;
  fp32_t in_data = '0, in_weight = '0;
  logic  out_valid;
  fp32_t out_data, product;

  int checks = 0, failures = 0, cycles = 0;
  int n_windows = 0, n_b2b = 0, n_idle = 0, n_zero = 0, n_neg = 0, n_approx = 0;
  int n_higher = 0;

  logic [31:0] acc_ref, acc_exact, pending;
  logic        expect_out = 1'b0, prev_last = 1'b0;

  approx_conv_mac dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired after %0d cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Check the output seen after the last clock edge, then present a pair.
  task automatic step(logic v, logic last, logic [31:0] x, logic [31:0] w);
    @(negedge clk);
    checks++;
    if (out_valid !== expect_out) begin
      failures++;
      $display("FAIL: out_valid=%b expected %b at cycle %0d", out_valid, expect_out, cycles);
    end else if (expect_out) begin
      checks++;
      if (out_data !== pending) begin
        failures++;
        $display("FAIL: window result %h expected %h", out_data, pending);
      end
    end
    expect_out = 1'b0;
    in_valid = v; in_last = last; in_data = x; in_weight = w;
    if (v) begin
      logic [31:0] pa, pe;
      pa = ref_axfpm(x, w);
      pe = ref_mul_exact(x, w);
      acc_ref   = ref_add(acc_ref, pa);
      acc_exact = ref_add(acc_exact, pe);
      if (is_zero(x) || is_zero(w)) n_zero++;
      if (!is_zero(pa) && pa[31]) n_neg++;
      if (pa != pe) n_approx++;
      if (last) begin
        expect_out = 1'b1;
        pending    = acc_ref;
        n_windows++;
        if (acc_ref[30:0] > acc_exact[30:0]) n_higher++;
      end
      prev_last = last;
    end
  endtask

  task automatic new_window();
    acc_ref = 32'h0; acc_exact = 32'h0;
  endtask

  task automatic flush();
    step(1'b0, 1'b0, '0, '0);
    step(1'b0, 1'b0, '0, '0);
  endtask

  logic [31:0] img [28][28];
  logic [31:0] ker [5][5];
  logic [31:0] last_exact;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. random windows
    for (int wdw = 0; wdw < 300; wdw++) begin
      int len;
      len = $urandom_range(1, 30);
      new_window();
      if (wdw % 3 != 0) step(1'b0, 1'b0, '0, '0);      // gap between windows
      else if (wdw > 0) n_b2b++;
      for (int k = 0; k < len; k++) begin
        logic [31:0] x, w;
        x = rand_fp($urandom_range(110, 126));
        w = rand_fp($urandom_range(110, 126));
        if ($urandom_range(0, 19) == 0) x = 32'h0;
        if ($urandom_range(0, 9) == 0 && k > 0) begin
          step(1'b0, 1'b0, 32'hdead_beef, 32'h1234_5678);   // idle inside window
          n_idle++;
        end
        step(1'b1, k == len - 1, x, w);
      end
    end
    flush();

    // 2. LeNet-5 first layer on one 28 x 28 channel, 5 x 5 kernel
    for (int r = 0; r < 28; r++)
      for (int c = 0; c < 28; c++)
        img[r][c] = ($urandom_range(0, 3) == 0) ? 32'h0 : {1'b0, 8'($urandom_range(118, 126)), 23'($urandom)};
    for (int r = 0; r < 5; r++)
      for (int c = 0; c < 5; c++)
        ker[r][c] = rand_fp($urandom_range(118, 125));
    begin
      int start_cycle, windows_before;
      start_cycle = cycles;
      windows_before = n_windows;
      for (int orow = 0; orow < 24; orow++)
        for (int ocol = 0; ocol < 24; ocol++) begin
          new_window();
          if (orow + ocol > 0) n_b2b++;
          for (int kr = 0; kr < 5; kr++)
            for (int kc = 0; kc < 5; kc++)
              step(1'b1, kr == 4 && kc == 4, img[orow+kr][ocol+kc], ker[kr][kc]);
        end
      flush();
      // rate: one pair per clock, 576 windows of 25 pairs, plus the flush
      checks++;
      if (cycles - start_cycle != 576 * 25 + 2 || n_windows - windows_before != 576) begin
        failures++;
        $display("FAIL: LeNet layer took %0d cycles for %0d windows",
                 cycles - start_cycle, n_windows - windows_before);
      end
    end

    // 3. filter against images of rising similarity (6 = the filter itself)
    for (int r = 0; r < 5; r++)
      for (int c = 0; c < 5; c++)
        ker[r][c] = {1'b0, 8'($urandom_range(121, 126)), 23'($urandom)};
    for (int s = 1; s <= 6; s++) begin
      new_window();
      for (int k = 0; k < 25; k++) begin
        logic [31:0] x;
        // with probability s/6 the pixel copies the filter, else a random value
        x = ($urandom_range(1, 6) <= s) ? ker[k/5][k%5]
                                        : {1'b0, 8'($urandom_range(118, 126)), 23'($urandom)};
        step(1'b1, k == 24, x, ker[k/5][k%5]);
      end
      last_exact = acc_exact;
      step(1'b0, 1'b0, '0, '0);
      $display("similarity %0d: exact %f approximate %f", s,
               to_real(last_exact), to_real(out_data));
    end
    flush();

    $display("windows=%0d back_to_back=%0d idle=%0d zero_operands=%0d negative=%0d approximated=%0d above_exact=%0d",
             n_windows, n_b2b, n_idle, n_zero, n_neg, n_approx, n_higher);
    checks++;
    if (n_windows == 0 || n_b2b == 0 || n_idle == 0 || n_zero == 0 || n_neg == 0 || n_approx == 0) begin
      failures++;
      $display("FAIL: a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
