// ama5_array_cell: one cell of the approximate array multiplier.
//
// A cell forms the partial-product bit a_i & b_j with an AND gate and adds it
// to the partial sum arriving from the row above (pp_in) and the carry from the
// cell to its right (cin). The adder is the fifth approximate mirror adder,
// AMA5, which keeps only two buffers of a full adder: Sum = B and Cout = A, and
// the carry input is not used at all. That cin port is kept, and left unread,
// so that the cell has the pin-out of an exact full-adder cell and the array
// can be wired as an ordinary array multiplier.
//
// Operand mapping (this design's choice): A is the AND-gate output and B is the
// partial sum from above, so sum = pp_in and cout = a_i & b_j. With this
// mapping the array returns a product that is never below the exact one, which
// is the behaviour reported for the multiplier (positive products come out
// larger); the opposite mapping would make every product smaller.
//
// Purely combinational; no clock.
module ama5_array_cell (
  input  logic a_i,    // multiplier bit of this row
  input  logic b_j,    // multiplicand bit of this column
  input  logic pp_in,  // partial sum from the row above
  input  logic cin,    // carry from the right neighbour (ignored by AMA5)
  output logic sum,    // S_ij
  output logic cout    // Co_ij
);

  logic pp_and;        // partial-product bit a_i & b_j (FA input A)

  always_comb begin
    pp_and = a_i & b_j;
    // AMA5: Sum = B, Cout = A; cin does not take part.
    sum    = pp_in;
    cout   = pp_and;
  end

endmodule
