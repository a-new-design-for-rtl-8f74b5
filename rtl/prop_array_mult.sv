// prop_array_mult -- N x N unsigned array multiplier without a final adder.
//
// Computes p = x * y for unsigned N-bit x (multiplicand) and y (multiplier)
// in two stages:
//   1. pp_gen: N*N AND gates form the partial products x[i] & y[j].
//   2. csa_array: N rows of N full adders add them in carry-save form. The
//      row of full adders that a conventional carry-save multiplier needs
//      to merge the last sums and carries is absent; the last row's carries
//      are instead fed back into spare inputs of the leftmost cells of the
//      upper rows (see csa_array for the exact routing).
// For the default N = 4 this uses 16 AND gates and 16 full adders, where
// the conventional carry-save array with a ripple-carry final row uses 20
// full adders.
//
// Interface: x, y are N-bit unsigned inputs; p is the 2N-bit product.
// Timing: purely combinational; the product is valid one propagation
// delay after the operands settle. There is no clock, reset or handshake,
// as in the circuit this follows.
//
// The two-stage structure and N = 4 follow the paper; the parameter N for
// other sizes is this design's own addition.
module prop_array_mult #(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]   x,
  input  logic [N-1:0]   y,
  output logic [2*N-1:0] p
);

  logic [N-1:0][N-1:0] pp;

  pp_gen #(.N(N)) u_pp_gen (
    .x (x),
    .y (y),
    .pp(pp)
  );

  csa_array #(.N(N)) u_csa_array (
    .pp(pp),
    .p (p)
  );

endmodule
