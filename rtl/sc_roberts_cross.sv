// sc_roberts_cross: one output pixel of a stochastic-computing Roberts cross
// edge detector,
//     z = 0.5 * ( |p_a - p_d| + |p_b - p_c| )
// for the 2x2 window  a b / c d  (a top-left, d bottom-right).
//
// Each absolute difference is an XOR gate, which computes |p_X - p_Y| only
// when its two inputs are maximally positively correlated. Upstream stages
// (here a Gaussian blur) do not deliver such streams, so each diagonal pair
// first goes through a synchronizer: this is the correlation-manipulation
// point of the accelerator. The two differences are then added by a 2-way
// mux whose select `sel` is a random bit with value 0.5, uncorrelated with
// the data.
//
// The synchronizer placement between the blur and the edge detector follows
// the published accelerator; the XOR subtractor and mux adder are the
// standard stochastic primitives. D is the synchronizer save depth.
// `held` reports, per synchronizer (bit 0: a-d, bit 1: b-c), that it holds
// a saved bit; it is for observation and does not affect z.
// Timing: z is combinational from the inputs and the synchronizer states,
// which advance on the rising edge while `en` is high; `clr` restarts them.
module sc_roberts_cross #(
  parameter int unsigned D = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clr,
  input  logic       en,
  input  logic       a,
  input  logic       b,
  input  logic       c,
  input  logic       d,
  input  logic       sel,
  output logic       z,
  output logic [1:0] held
);

  logic as, ds, bs, cs;
  logic [$clog2(D+1)-1:0] nsv_ad, nsv_bc;

  synchronizer #(.D(D)) u_sync_ad (
    .clk, .rst_n, .clr, .en, .flush(1'b0),
    .x(a), .y(d), .x_o(as), .y_o(ds), .n_saved(nsv_ad)
  );

  synchronizer #(.D(D)) u_sync_bc (
    .clk, .rst_n, .clr, .en, .flush(1'b0),
    .x(b), .y(c), .x_o(bs), .y_o(cs), .n_saved(nsv_bc)
  );

  assign z = sel ? (bs ^ cs) : (as ^ ds);

  // held[0]: the a-d synchronizer holds a saved bit; held[1]: the b-c one.
  assign held = {nsv_bc != '0, nsv_ad != '0};

endmodule
