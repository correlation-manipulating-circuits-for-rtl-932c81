// desync_sat_add: stochastic-computing saturating adder, z = min(1, p_X + p_Y).
//
// An OR gate adds two streams exactly when their 1s never overlap (maximal
// negative correlation), saturating at 1 once they must overlap. A
// desynchronizer in front of the OR gate pushes the inputs towards that
// condition by moving coinciding 1s to cycles where both inputs are 0.
//
// Structure (desynchronizer followed by OR) is the published design; D is the
// desynchronizer save depth (default 1).
// Timing: z is combinational from x, y and the desynchronizer state, which
// advances on the rising edge while en is high.
module desync_sat_add #(
  parameter int unsigned D = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en,
  input  logic x,
  input  logic y,
  output logic z
);

  logic xd, yd;
  logic [$clog2(D+1)-1:0] n_saved_unused;

  desynchronizer #(.D(D)) u_desync (
    .clk, .rst_n, .clr, .en, .flush(1'b0),
    .x, .y, .x_o(xd), .y_o(yd), .n_saved(n_saved_unused)
  );

  assign z = xd | yd;

endmodule
