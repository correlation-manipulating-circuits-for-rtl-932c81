// sync_max: stochastic-computing max operator, z = max(p_X, p_Y).
//
// A synchronizer first lines up the 1s of the two inputs (positive
// correlation); a single OR gate then combines them. With maximally
// positively correlated inputs the 1s of the smaller stream sit under the 1s
// of the larger one, so the OR gate outputs exactly the max. Without the
// synchronizer the same gate would give p_X + p_Y - p_X*p_Y (max = max) or
// p_X*p_Y (max = min) for independent inputs.
//
// Structure (synchronizer followed by OR) is the published design; D is the
// synchronizer save depth (default 1).
// Timing: z is combinational from x, y and the synchronizer state, which
// advances on the rising edge while en is high.
module sync_max #(
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

  logic xs, ys;
  logic [$clog2(D+1)-1:0] n_saved_unused;

  synchronizer #(.D(D)) u_sync (
    .clk, .rst_n, .clr, .en, .flush(1'b0),
    .x, .y, .x_o(xs), .y_o(ys), .n_saved(n_saved_unused)
  );

  assign z = xs | ys;

endmodule
