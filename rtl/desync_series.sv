// desync_series: STAGES desynchronizers of save depth D in series.
//
// Each stage unpairs more of the overlapping 1s its predecessor left, so the
// output correlation falls towards -1 with every stage (with diminishing
// returns). Bits left saved inside a stage at the end of the stream are
// lost, and the losses add up along the chain. To offset them, with PRELOAD
// set every stage after the first starts holding one bit of its own (stage 1
// an X bit, stage 2 a Y bit, and so on, alternating), which it spends at a
// 0,0 input pair.
//
// Composing depth-1 desynchronizers in series, and starting a stage with a
// saved bit, follow the published composition. The stage count of 2 and the
// alternating X/Y preload are this design's choices.
//
// Interface/timing: as desynchronizer, without flush. The chain is
// combinational from x, y to x_o, y_o (no added latency). `n_saved` is the
// total number of bits held by all stages.
module desync_series #(
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
    // A held X bit means the next save is a Y bit (state S1), and vice versa.
    localparam int unsigned ISX   = (PRELOAD && k > 0 && k % 2 == 1) ? 1 : 0;
    localparam int unsigned ISY   = (PRELOAD && k > 0 && k % 2 == 0) ? 1 : 0;
    localparam bit          ITURN = (ISX != 0);
    desynchronizer #(.D(D), .INIT_SX(ISX), .INIT_SY(ISY), .INIT_TURN(ITURN)) u_desync (
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
