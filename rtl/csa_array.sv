// csa_array -- carry-save reduction array without a final adder row.
//
// Sums the N x N partial products pp[i][j] (weight 2^(i+j)) into the 2N-bit
// product using N rows of N full adders and nothing else.
//
// Cell (i, j) sits in row i and product column c = i + j. Its three inputs:
//   a   = pp[i][j]                       (the partial product)
//   b   = sum  of cell (i-1, j+1)        (same column, row above)
//   cin = cout of cell (i-1, j)          (column c-1, row above: the
//                                          diagonal carry of carry-save
//                                          addition)
// In row 0 both b and cin are 0, so the first row only passes its partial
// products on (its carries are always 0). These cells are kept as full
// adders, as drawn in the circuit this follows; synthesis reduces them to
// wires, so p[0] ends up wired straight to pp[0][0].
//
// A conventional carry-save multiplier leaves input b of the leftmost cell
// of every row (j = N-1) at 0 and merges the last row's sums and carries in
// an extra ripple-carry row of N full adders. Here that row is removed:
// the carry of last-row cell (N-1, k), column N-1+k, is fed into the spare
// input b of the leftmost cell of row k+1, which sits in column N+k, one
// column to the left, so its weight is right. For N = 4 the carry of
// column 3 goes to column 4 (row 1), column 4 to column 5 (row 2), column 5
// to column 6 (row 3), and the carry of column 6 is the product MSB p[7].
// Every other sum or carry stays inside the array, so the array conserves
// the weighted sum of its inputs and p equals the full product.
//
// Outputs: p[i] = sum of cell (i, 0) for i < N-1; p[N-1+j] = sum of last-row
// cell (N-1, j); p[2N-1] = cout of cell (N-1, N-1).
//
// Timing: purely combinational. The feedback carries make a path that
// leaves the last row and re-enters a higher row, but every cell depends
// only on cells in lower columns or on the row above in its own column, so
// there is no combinational loop. The worst path ripples along the last row
// and the fed-back carries, like the ripple adder it replaces.
//
// The array structure, the removal of the final adder and the routing of
// the last-row carries follow the paper's 4 x 4 drawing; the formula for
// general N is this design's own generalisation of that drawing.
module csa_array #(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0][N-1:0] pp,
  output logic [2*N-1:0]      p
);

  // Per-cell outputs, one bit per (row, cell) pair.
  logic [N-1:0][N-1:0] s;
  logic [N-1:0][N-1:0] co;

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_cell
      logic b_in;
      logic c_in;

      if (i == 0) begin : g_first
        assign b_in = 1'b0;
        assign c_in = 1'b0;
      end else begin : g_next
        if (j == N - 1) begin : g_left
          // Spare input of the leftmost cell: carry of last-row cell i-1.
          assign b_in = co[N-1][i-1];
        end else begin : g_inner
          assign b_in = s[i-1][j+1];
        end
        assign c_in = co[i-1][j];
      end

      full_adder u_fa (
        .a   (pp[i][j]),
        .b   (b_in),
        .cin (c_in),
        .sum (s[i][j]),
        .cout(co[i][j])
      );
    end
  end

  always_comb begin
    for (int i = 0; i < N - 1; i++) begin
      p[i] = s[i][0];
    end
    for (int j = 0; j < N; j++) begin
      p[N-1+j] = s[N-1][j];
    end
    p[2*N-1] = co[N-1][N-1];
  end

  // The routing above needs at least two rows.
  if (N < 2) begin : g_bad_n
    $error("csa_array: N must be at least 2");
  end

endmodule
