// approx_conv_mac: approximate convolution unit, the top of the design.
//
// Computes one output value of a convolution layer, the sum over a window of
// input activations times the kernel weights, with every multiplication done by
// the approximate multiplier ax_fpm and the sum kept exact by fp32_adder. The
// approximation therefore enters each product of the convolution while the
// sign and exponent logic and the accumulation are exact, so the
// data-dependent error of the multiplier is the only difference from an exact
// convolution.
//
// Interface: one (input, weight) pair per cycle on in_data/in_weight with
// in_valid; in_last marks the final pair of a window, so any kernel size
// (5x5, 3x3, 11x11, with any number of input channels) is handled by the
// caller's choice of window length. The accumulator starts from zero at the
// first pair of each window.
//
// Timing: one multiply-accumulate per cycle, no stalls; out_valid pulses for one
// cycle, one clock after the cycle that took the pair marked in_last, with
// out_data holding the window's sum. A new window may start in the cycle right
// after in_last. Synchronous active-low reset clears the control state.
// The streaming interface, one-pair-per-cycle rate and reset are this design's
// choices; how the convolution is scheduled in hardware is not described
// beyond the use of the approximate multiplier.
module approx_conv_mac
  import fp32_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,   // a pair is presented this cycle
  input  logic  in_last,    // last pair of the current window
  input  fp32_t in_data,    // input activation
  input  fp32_t in_weight,  // kernel weight
  output logic  out_valid,  // one-cycle pulse: out_data holds a window sum
  output fp32_t out_data,   // convolution result of the window
  output fp32_t product     // current approximate product (for observation)
);

  fp32_t acc_q;             // running sum of the current window
  logic  first_q;           // next pair starts a new window
  fp32_t acc_in;            // accumulator input to the adder
  fp32_t acc_d;             // running sum including this cycle's product

  ax_fpm u_mul (
    .a(in_data),
    .b(in_weight),
    .y(product)
  );

  always_comb acc_in = first_q ? fp32_t'('0) : acc_q;

  fp32_adder u_add (
    .a(acc_in),
    .b(product),
    .y(acc_d)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q     <= '0;
      first_q   <= 1'b1;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        acc_q   <= acc_d;
        first_q <= in_last;
        if (in_last) out_data <= acc_d;
      end
    end
  end

endmodule
