// ds_converter: digital-to-stochastic (D/S) converter. Each cycle it compares
// a binary value b against a random number r and outputs the bit (b > r).
// With r uniform over 0 .. 2**W - 1 the output stream has value b / 2**W.
//
// b is W+1 bits wide so that the full range 0 .. 2**W (0/N .. N/N, N = 2**W)
// can be encoded; b = 2**W gives an all-ones stream. Purely combinational.
// Which generator drives r decides how streams correlate: streams built from
// the same r are positively correlated, streams from independent generators
// are uncorrelated.
module ds_converter #(
  parameter int unsigned W = sc_pkg::RNG_W
) (
  input  logic [W:0]   b,
  input  logic [W-1:0] r,
  output logic         x
);

  assign x = (b > {1'b0, r});

endmodule
