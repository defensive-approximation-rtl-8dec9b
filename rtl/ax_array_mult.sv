// ax_array_mult: N x N unsigned array multiplier built from AMA5 cells.
//
// Structure (the classic array multiplier): row 0 is a line of AND gates giving
// a_0 & b_j. Each further row i (1..N-1) is a line of N ama5_array_cell cells;
// cell j adds a_i & b_j to the partial sum of the row above shifted one column
// right (pp from cell j+1 of the previous row, or that row's final carry for
// the leftmost cell, 0 for row 1) and to the carry of its right neighbour (0
// for the rightmost cell). The rightmost sum of row i is product bit i; the
// sums and the final carry of the last row give the upper N bits.
//
// Because every adder is an AMA5 cell, which ignores its carry input, the
// result is an approximation of a*b; with the operand mapping chosen in
// ama5_array_cell it is never smaller than the exact product. The carry chain
// wires are still built so that the array is the same netlist an exact array
// would be, with the adder cell swapped; nothing reads them inside the cells.
//
// Combinational. Parameter N defaults to 24, the mantissa width of single
// precision (23-bit fraction plus hidden bit).
module ax_array_mult #(
  parameter int unsigned N = 24
) (
  input  logic [N-1:0]   a,   // multiplier: bit i drives row i
  input  logic [N-1:0]   b,   // multiplicand: bit j drives column j
  output logic [2*N-1:0] p    // approximate product
);

  // s[i][j]: sum output of row i, column j; c[i][j]: carry output.
  logic [N-1:0] s [N];
  logic [N-1:0] c [N];

  // Row 0: AND gates only.
  for (genvar j = 0; j < N; j++) begin : g_row0
    assign s[0][j] = a[0] & b[j];
  end
  assign c[0] = '0;

  for (genvar i = 1; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      logic pp, ci;
      if (j == N - 1) begin : g_left
        // leftmost cell: previous row's final carry (row 1 gets 0)
        assign pp = (i == 1) ? 1'b0 : c[i-1][N-1];
      end else begin : g_mid
        assign pp = s[i-1][j+1];
      end
      if (j == 0) begin : g_right
        assign ci = 1'b0;
      end else begin : g_chain
        assign ci = c[i][j-1];
      end
      ama5_array_cell u_cell (
        .a_i  (a[i]),
        .b_j  (b[j]),
        .pp_in(pp),
        .cin  (ci),
        .sum  (s[i][j]),
        .cout (c[i][j])
      );
    end
  end

  // Product bits: rightmost sum of every row, then the last row and its carry.
  always_comb begin
    for (int k = 0; k < N; k++) p[k] = s[k][0];
    for (int j = 1; j < N; j++) p[N-1+j] = s[N-1][j];
    p[2*N-1] = c[N-1][N-1];
  end

endmodule
