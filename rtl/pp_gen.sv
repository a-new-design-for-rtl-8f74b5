// pp_gen -- partial-product generator of an N x N unsigned array multiplier.
//
// Produces the N*N partial-product bits pp[i][j] = x[i] & y[j], one AND gate
// each. Bit pp[i][j] carries weight 2^(i+j); row i of the matrix is the
// multiplier Y gated by multiplicand bit x[i], so row 0 is
// X0Y(N-1) ... X0Y0, the first row of the 4 x 4 dot diagram.
// Interface: x, y are N-bit unsigned operands; pp is an N x N packed array
// indexed pp[row i][column-in-row j].
// Timing: purely combinational.
//
// AND gates as the partial-product hardware follow the paper this design is
// based on; the parameterisation in N is this design's own (the paper shows
// N = 4, the default).
module pp_gen #(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]        x,
  input  logic [N-1:0]        y,
  output logic [N-1:0][N-1:0] pp
);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        pp[i][j] = x[i] & y[j];
      end
    end
  end

endmodule
