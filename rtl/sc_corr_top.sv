// sc_corr_top: top level. It holds the two parts of the design side by side,
// each with its own start/busy/done run control and sharing only clock and
// reset:
//   - sc_gb_ed_accel: the image tile accelerator (Gaussian blur, then
//     synchronizers, then Roberts cross edge detection) on 10x10 tiles;
//   - sc_corr_eval: the evaluation unit that drives the stand-alone
//     correlation circuits (synchronizer, desynchronizer, decorrelator,
//     maximum, minimum, saturating adder, synchronizer and desynchronizer
//     chains, optional end-of-stream flush) with selectable input streams
//     and counts their outputs.
// Ports are those of the two units, prefixed acc_ and ev_. Putting both on
// one top is this design's own arrangement; see the two modules for timing.
module sc_corr_top #(
  parameter int unsigned TILE   = sc_pkg::TILE_DIM,
  parameter int unsigned W      = sc_pkg::RNG_W,
  parameter int unsigned SYNC_D = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // image tile accelerator
  input  logic             acc_start,
  input  logic [W-1:0]     acc_tile_i [TILE][TILE],
  output logic             acc_busy,
  output logic             acc_done,
  output logic [W:0]       acc_edge_o [TILE-3][TILE-3],
  output logic [1:0]       acc_sync_held_o [TILE-3][TILE-3],
  // correlation circuit evaluation unit
  input  logic             ev_start,
  input  sc_pkg::rng_sel_e ev_x_rng,
  input  sc_pkg::rng_sel_e ev_y_rng,
  input  logic [W:0]       ev_x_val,
  input  logic [W:0]       ev_y_val,
  input  logic             ev_flush_en,
  output logic             ev_busy,
  output logic             ev_done,
  output logic [W:0]       ev_cnt_o [sc_pkg::NUM_CNT]
);

  sc_gb_ed_accel #(.TILE(TILE), .W(W), .SYNC_D(SYNC_D)) u_accel (
    .clk, .rst_n, .start(acc_start), .tile_i(acc_tile_i), .busy(acc_busy),
    .done(acc_done), .edge_o(acc_edge_o), .sync_held_o(acc_sync_held_o)
  );

  sc_corr_eval #(.W(W), .SYNC_D(SYNC_D), .DESYNC_D(1), .SHUF_D(4)) u_eval (
    .clk, .rst_n, .start(ev_start), .x_rng(ev_x_rng), .y_rng(ev_y_rng),
    .x_val(ev_x_val), .y_val(ev_y_val), .flush_en(ev_flush_en), .busy(ev_busy), .done(ev_done),
    .cnt_o(ev_cnt_o)
  );

endmodule
