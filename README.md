# Approximate floating-point convolution datapath for "defensive approximation"

Neural-network classifiers can be fooled by small, deliberately crafted input
perturbations (adversarial examples). Defensive approximation counters this in
hardware: the exact multiplier of a CNN's convolution layers is replaced by an
aggressively approximate one, whose error depends on the data. The network is
used as trained, with no retraining. The noise is input-dependent and mostly
enlarges strong responses, which makes attacks crafted against the exact
network transfer poorly. The approximate multiplier is also smaller, faster and
uses less energy than an exact one.

This RTL implements that datapath in SystemVerilog:

* **Ax-FPM** (`ax_fpm`): an IEEE-754 single-precision multiplier. Its sign and
  exponent logic are exact. Its 24 x 24 mantissa multiplier is an array
  multiplier in which every full adder is the approximate adder AMA5.
* **Approximate convolution unit** (`approx_conv_mac`, the top): multiplies a
  window of activations by kernel weights with Ax-FPM and sums the products
  exactly in single precision, one product per clock.

The rest of a CNN accelerator (ReLU, pooling, fully connected layers, softmax,
buffers, control) is not included. These parts are ordinary and unchanged by
the approximation, and no particular organisation for them is prescribed.

## The AMA5 cell and what it does to a product

A full adder takes A, B and Cin and produces Sum and Cout. AMA5, the fifth
"approximate mirror adder", removes all of the adder's logic except two
buffers:

    Sum  = B
    Cout = A          (Cin is ignored)

Over the eight (A, B, Cin) patterns it is wrong on four.

`ama5_array_cell` is one cell of the array multiplier. An AND gate forms the
partial-product bit a_i & b_j. An AMA5 adds it to the partial sum from the row
above (`pp_in`) and to the carry from the right neighbour (`cin`).

Which adder input is A and which is B decides everything, and it is a choice
of this design. Here **A = a_i & b_j** and **B = pp_in**, so each cell passes the
partial sum straight down (`sum = pp_in`) and sends its own partial-product bit
to the left as a "carry" (`cout = a_i & b_j`). This mapping makes the
multiplier overestimate, which is the reported behaviour: most products come
out larger in magnitude than the exact product, and the error surface over
operands in [0, 1] is positive. The other mapping makes every product smaller.

## The array multiplier

`ax_array_mult` has N = 24 by default and follows the classic array-multiplier
layout:

* Row 0 is a line of AND gates, a0 & bj.
* Each row i >= 1 is a line of N cells. Cell j of row i takes:
  * `pp_in` from cell j+1 of the row above. The leftmost cell takes the row
    above's leftmost carry instead, and row 1 takes 0.
  * `cin` from its right neighbour. The rightmost cell takes 0.
* Product bit i is the rightmost sum of row i. The last row's sums and its
  final carry give the upper bits.

All carry wires are present, as in an exact array. Only the adder cell
differs, and AMA5 does not read its carry input.

Because Cin is ignored and Sum only forwards the partial sum, bits just slide
diagonally through the array. The product has a closed form, which the
testbenches use as their reference:

    p[N-1:0] = a[0] ? b : 0
    p[N]     = 0
    p[N+m]   = a[m] & b[N-1]           m = 1 .. N-1

Normalised mantissas always have their top bit set (b[23] = 1). So the
approximate mantissa product is about `(a & ~1) * 2^24`, plus b when a is odd.
That is never below the exact product `a * b`, and always has bit 47 set. In
floating-point terms, Ax-FPM returns roughly `|a| * 2^(e_b + 1)`: it keeps the
full mantissa of the first operand, and of the second operand it keeps only
the exponent. For example, `1.0 * 1.0 = 2.0` and `1.5 * 1.5 = 3.0`. The
relative error is at most about 100%, when b's mantissa is 1.0. It shrinks
towards 0 as b's mantissa nears 2, and it jumps at every power of two of b.
This is the data-dependent, discontinuous error pattern the defence relies on.
Note that the operands are not symmetric. In the convolution unit the
activation is operand `a` and the weight is operand `b`, which is also a choice
of this design.

Measured on the RTL:

* With operands drawn uniformly from [-1, 1], NMED = 0.084 (0.08 reported) and
  MRED = 0.39 (0.33 reported).
* With exponents drawn uniformly, 95% of products come out strictly larger in
  magnitude than the exactly rounded product. 96% is reported.

## The floating-point wrapper

`ax_fpm` splits each operand into sign, exponent and fraction, using the
single-precision layout: sign in bit 31, exponent in bits 30..23, fraction in
bits 22..0 (`fp32_pkg::fp32_t`). The operand fields take these paths:

* **Sign**: XOR of the two signs, exact.
* **Exponent**: `fp_exp_adder` computes exp_a + exp_b - 127 as a signed
  10-bit value, exact. Exponents are kept exact because errors there would
  ruin a network's accuracy.
* **Mantissa**: `{1, fraction}` of both operands goes into `ax_array_mult`.
* **Normalise and round**: `fp_round_norm` takes bits 47..24 when bit 47 is
  set and adds one to the exponent; otherwise it takes bits 46..23. It then
  rounds to nearest, ties to even. A rounding carry renormalises the result.
  An exponent of 255 or more becomes Inf, and 0 or less becomes signed zero.

Special operands bypass the approximation and get the IEEE-754 results:

* A NaN operand, or Inf x 0, gives NaN.
* Inf times anything else gives a signed Inf.
* Zero times a finite number gives a signed zero.

Subnormal inputs count as zero. The rounding mode, the flush-to-zero policy
and the special-value handling are this design's choices; only a "rounding
unit" is specified. An immediate assertion in `ax_fpm` checks that the array
product of two normal operands reaches bit 46 or 47, which the rounding unit
relies on.

## The convolution unit

`approx_conv_mac` computes one output of a convolution: the sum over a window
of activation x weight. Each product comes from `ax_fpm`. The sum uses
`fp32_adder`, an ordinary exact single-precision adder:

* it aligns the smaller operand into a mantissa with guard, round and sticky
  bits;
* it adds or subtracts;
* it normalises with a leading-zero count;
* it rounds to nearest even, with the same flush-to-zero policy as the
  multiplier.

Only the multiplication is approximate, so an exact and an approximate network
differ only in their multipliers.

Interface and timing:

| signal | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset |
| `in_valid` | in | an (activation, weight) pair is presented this cycle |
| `in_last` | in | this pair ends the window |
| `in_data`, `in_weight` | in | `fp32_t` activation and weight |
| `out_valid` | out | one-cycle pulse, one clock after the cycle that took the `in_last` pair |
| `out_data` | out | the window sum, held until the next window ends |
| `product` | out | the current Ax-FPM product (combinational, for observation) |

The unit takes one pair per clock and never stalls. Cycles with `in_valid` low
may occur inside a window and are ignored. The accumulator restarts from zero
with the first pair after `in_last`, so windows can follow back to back. The
caller sets the window length with `in_last`, so the unit handles a 5 x 5
kernel on one channel (25 pairs), 5 x 5 x 6 (150 pairs), or an 11 x 11 x 3
AlexNet-style window (363 pairs) alike. A LeNet-5-sized first layer (a 28 x 28
image with a 5 x 5 kernel, giving 576 outputs) takes 14,400 cycles per output
map.

The multiplier and the adder sit in one combinational path between the input
pins and the accumulator register. No pipeline is inserted because no cycle
timing is specified. Registering the product before the adder would be the
first change for a fast clock. It would add one cycle of latency and leave the
rate unchanged.

## Files

| file | contents |
|---|---|
| `rtl/fp32_pkg.sv` | `fp32_t` struct, field widths, bias, classification functions |
| `rtl/ama5_array_cell.sv` | AND gate + AMA5 adder |
| `rtl/ax_array_mult.sv` | N x N array of cells (N = 24) |
| `rtl/fp_exp_adder.sv` | exponent adder |
| `rtl/fp_round_norm.sv` | normalisation, rounding, overflow/underflow |
| `rtl/ax_fpm.sv` | approximate single-precision multiplier |
| `rtl/fp32_adder.sv` | exact single-precision adder |
| `rtl/approx_conv_mac.sv` | convolution unit (top) |
| `tb/fp_ref_pkg.sv` | reference arithmetic built on double-precision reals and the closed form above |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_ax_fpm_error_profile` |

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_ama5_array_cell`: all 16 input combinations. It also checks that 8 of
  them differ from an exact full adder.
* `tb_ax_array_mult`: the 4 x 4 array exhaustively, and the 24 x 24 array on
  20,000 random pairs against the closed form. For normalised operands it
  checks that the product is never below the exact product.
* `tb_fp_exp_adder`: all 65,536 exponent pairs.
* `tb_fp_round_norm`: random products, ties, rounding carries, overflow and
  underflow, against double-precision scaling followed by one rounding.
* `tb_ax_fpm`: special values, hand-worked cases (1 x 1 = 2, 1.5 x 1.5 = 3) and
  25,000 random products against the reference. It also checks that no
  magnitude falls below the exact product.
* `tb_fp32_adder`: 30,000 random sums with exponents close enough for the
  double-precision sum to be exact, plus directed corner cases.
* `tb_ax_fpm_error_profile`: one million products in [-1, 1]; reports MRED and
  NMED and the share of products above the exact value.
* `tb_approx_conv_mac`: the whole design at its only configuration.
  * Part 1: 300 random windows with gaps, idle cycles and zero operands.
  * Part 2: a full 24 x 24 output map of a 5 x 5 convolution over a 28 x 28
    image. It checks the rate of exactly one pair per cycle.
  * Part 3: a filter against six images of rising similarity. It prints the
    exact and approximate results; the approximate sums come out above the
    exact ones.

  Every window result must match a reference that rounds each product and
  each partial sum as the hardware does. The output pulse is checked cycle by
  cycle.

Every testbench also fails when its module is replaced by a copy carrying one
deliberate bug: a wrong carry, a missing shift, a wrong bias, a wrong rounding
rule, a wrong sign, a lost sticky bit, or an accumulator that is never cleared.

To simulate with Verilator, for example the top:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/fp32_pkg.sv tb/fp_ref_pkg.sv tb/tb_approx_conv_mac.sv \
        --top-module tb_approx_conv_mac -o sim
    ./obj_dir/sim

Replace the testbench name to run another. `-Irtl -Itb` lets Verilator find
each module in the file of the same name. Each run takes well under a second.

## Departures and open points

* **Operand mapping of AMA5** (A = partial product, B = partial sum). The
  specification leaves it open. It was chosen because it reproduces the
  reported overestimation and error magnitudes. The other mapping
  underestimates every product.
* **Operand order of Ax-FPM**: operand `a` drives the array rows and operand
  `b` the columns, and in the convolution unit `a` is the activation. This
  order matters, because the result keeps a's mantissa and discards b's.
* **Rounding and special values** (round to nearest even, flush-to-zero,
  IEEE-754 handling of NaN, Inf and zero) are ordinary choices that were not
  given. Because subnormals are flushed, the units follow IEEE-754 in format
  and rounding but are not fully compliant.
* **Exact accumulation**: additions are kept exact, following the principle
  that only the multipliers are replaced. The adder design is this design's
  own.
* **Not built**: activation, pooling, fully connected and softmax layers, and
  the memories and control of a complete accelerator. The energy and delay
  figures quoted for the multiplier (about 0.49 of the exact multiplier's
  energy and 0.29 of its delay, in a 45 nm transistor-level simulation) are
  not reproduced by this RTL.
