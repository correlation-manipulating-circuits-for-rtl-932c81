// sync_series: STAGES synchronizers of save depth D in series.
//
// Each stage pairs up more of the 1s its predecessor left unpaired, so the
// output correlation rises towards +1 with every stage (with diminishing
// returns). Bits left saved inside a stage at the end of the stream are
// lost, and the losses add up along the chain. To offset them, with PRELOAD
// set every stage after the first starts with one saved bit of its own
// (stage 1 an X bit, stage 2 a Y bit, and so on, alternating), which it
// releases when it pairs it.
//
// Composing depth-1 synchronizers in series, and starting a stage with a saved
// bit, follow the published composition. The stage count of 2 and the
// alternating X/Y preload are this design's choices.
//
// Interface/timing: as synchronizer, without flush. The chain is
// combinational from x, y to x_o, y_o (no added latency). `n_saved` is the
// total number of bits held by all stages.
module sync_series #(
  parameter int unsigned STAGES  = 2,
  parameter int unsigned D       = 1,
  parameter bit          PRELOAD = 1'b1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 clr,
  input  logic                                 en,
  input  logic                                 x,
  input  logic                                 y,
  output logic                                 x_o,
  output logic                                 y_o,
  output logic [$clog2(STAGES*D+1)-1:0]        n_saved
);

  localparam int unsigned NW = $clog2(D + 1);

  logic [STAGES:0] xc, yc;
  logic [NW-1:0]   nsv [STAGES];

  assign xc[0] = x;
  assign yc[0] = y;

  for (genvar k = 0; k < int'(STAGES); k++) begin : g_stage
    localparam int INIT = (!PRELOAD || k == 0) ? 0 : ((k % 2 == 1) ? 1 : -1);
    synchronizer #(.D(D), .INIT(INIT)) u_sync (
      .clk, .rst_n, .clr, .en, .flush(1'b0),
      .x(xc[k]), .y(yc[k]), .x_o(xc[k+1]), .y_o(yc[k+1]), .n_saved(nsv[k])
    );
  end

  always_comb begin
    n_saved = '0;
    for (int k = 0; k < int'(STAGES); k++) n_saved += $bits(n_saved)'(nsv[k]);
  end

  assign x_o = xc[STAGES];
  assign y_o = yc[STAGES];

endmodule
