// decor_series: STAGES decorrelators in series.
//
// Each stage reorders both streams once more with its own pair of shuffle
// buffers, so bit positions that still line up after one stage are broken up
// further and the correlation falls closer to 0. The number of 1s is kept
// apart from bits still held in a buffer at the end of the stream (at most
// D-1 per buffer, balanced by the half-1 initial contents).
//
// Interface: rnd0[k] / rnd1[k] are the random indices of stage k's X and Y
// buffers. All 2*STAGES of them should come from different, uncorrelated
// generators. Timing: combinational from x, y to x_o, y_o through the muxes;
// the buffers update on the rising edge while `en` is high.
//
// Composing decorrelators in series follows the published design. The stage
// count of 2 is this design's choice.
module decor_series #(
  parameter int unsigned STAGES = 2,
  parameter int unsigned D      = 4,
  parameter int unsigned RW     = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic          x,
  input  logic          y,
  input  logic [RW-1:0] rnd0 [STAGES],
  input  logic [RW-1:0] rnd1 [STAGES],
  output logic          x_o,
  output logic          y_o
);

  logic [STAGES:0] xc, yc;

  assign xc[0] = x;
  assign yc[0] = y;

  for (genvar k = 0; k < int'(STAGES); k++) begin : g_stage
    decorrelator #(.D(D), .RW(RW)) u_decor (
      .clk, .rst_n, .clr, .en, .x(xc[k]), .y(yc[k]),
      .rnd0(rnd0[k]), .rnd1(rnd1[k]), .x_o(xc[k+1]), .y_o(yc[k+1])
    );
  end

  assign x_o = xc[STAGES];
  assign y_o = yc[STAGES];

endmodule
