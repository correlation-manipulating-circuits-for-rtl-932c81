// sc_gauss_blur: one output pixel of a stochastic-computing 3x3 Gaussian blur.
//
// The kernel is the binomial 3x3 Gaussian
//     1 2 1
//     2 4 2   / 16
//     1 2 1
// realised as a scaled adder: a 16-way multiplexer whose select `sel` is a
// uniformly distributed 4-bit random number. Each neighbour is wired to as
// many mux inputs as its kernel weight (corners 1, edges 2, centre 4), so the
// output stream's value is the weighted average of the nine pixel streams.
// Like any mux adder it needs `sel` to be uncorrelated with the pixel
// streams; the pixel streams themselves may share one generator.
//
// Pixel window: win[r][c], r = row 0..2, c = column 0..2, centre win[1][1].
// Purely combinational. The kernel weights and the mux-tree form are this
// design's choice; the accelerator it belongs to only specifies a Gaussian
// blur stage built from stochastic circuits.
module sc_gauss_blur (
  input  logic       win [3][3],
  input  logic [3:0] sel,
  output logic       z
);

  logic [15:0] taps;

  // Mux input wiring: sel value -> window position (weights 1,2,1,2,4,2,1,2,1).
  assign taps = {
    win[2][2],                         // 15
    win[2][1], win[2][1],              // 14, 13
    win[2][0],                         // 12
    win[1][2], win[1][2],              // 11, 10
    win[1][1], win[1][1],              //  9,  8
    win[1][1], win[1][1],              //  7,  6
    win[1][0], win[1][0],              //  5,  4
    win[0][2],                         //  3
    win[0][1], win[0][1],              //  2,  1
    win[0][0]                          //  0
  };

  assign z = taps[sel];

endmodule
