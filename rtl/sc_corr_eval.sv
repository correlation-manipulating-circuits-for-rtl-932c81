// sc_corr_eval: on-chip evaluation unit for the stand-alone correlation
// circuits: synchronizer, desynchronizer, decorrelator, synchronizer-based
// maximum and minimum, desynchronizer-based saturating adder, and two-stage
// series compositions of synchronizers, of desynchronizers and of
// decorrelators.
//
// It reproduces, in hardware, the way these circuits are characterised: two
// binary values x_val, y_val (0..2**W) are turned into stochastic numbers by
// D/S converters fed from a selectable generator per stream (Van der Corput,
// Halton base 3 or LFSR; one shared instance of each, so choosing the same
// generator for X and Y gives positively correlated inputs, different ones
// nearly uncorrelated inputs). Both streams drive every circuit under test in
// parallel for one run of 2**W cycles, and S/D counters record:
//   - for the inputs and for each two-output circuit (synchronizer,
//     desynchronizer, decorrelator and the three chains): 1s of X', 1s of
//     Y' and 1s of X' & Y';
//     with N = 2**W these give value, bias and SCC (a = XY, b = X - XY,
//     c = Y - XY, d = N - a - b - c);
//   - for max, min and saturating add: the 1s of z.
// cnt_o is indexed by sc_pkg::cnt_idx_e.
//
// flush_en switches on the optional end-of-stream flush of the single
// synchronizer and desynchronizer (a flush_ctrl each). The operators, the
// chains and the decorrelator are never flushed.
//
// What follows the published circuits: every circuit under test, the use of
// VDC / Halton-3 / LFSR input streams and N = 256. The unit itself (generator
// selection, counters, start/busy/done run control) and the extra LFSRs
// that address the shuffle buffers (seeds 0x2D and 0xC3 for the single
// decorrelator and the chain's first stage, 0x5A and 0x97 for the chain's
// second stage) are this design's own. Timing as sc_stream_ctrl: results valid while `done`;
// hold the inputs stable from `start` until `done`.
module sc_corr_eval #(
  parameter int unsigned W        = sc_pkg::RNG_W,
  parameter int unsigned SYNC_D   = 1,
  parameter int unsigned DESYNC_D = 1,
  parameter int unsigned SHUF_D   = 4,
  parameter int unsigned STAGES   = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  sc_pkg::rng_sel_e x_rng,
  input  sc_pkg::rng_sel_e y_rng,
  input  logic [W:0]       x_val,
  input  logic [W:0]       y_val,
  input  logic             flush_en,
  output logic             busy,
  output logic             done,
  output logic [W:0]       cnt_o [sc_pkg::NUM_CNT]
);

  import sc_pkg::*;

  localparam int unsigned SRW = (SHUF_D > 1) ? $clog2(SHUF_D) : 1;

  logic clr, en;

  sc_stream_ctrl #(.W(W)) u_ctrl (.clk, .rst_n, .start, .clr, .en, .busy, .done);

  // ------------------------------------------------------------ generators
  logic [W-1:0] r_vdc, r_hal, r_lfsr, r_sh0, r_sh1, r_sh2, r_sh3;

  vdc_rng    #(.W(W)) u_vdc  (.clk, .rst_n, .clr, .en, .r(r_vdc));
  halton_rng #(.W(W)) u_hal  (.clk, .rst_n, .clr, .en, .r(r_hal));
  lfsr_rng   #(.W(W)) u_lfsr (.clk, .rst_n, .clr, .en, .r(r_lfsr));
  lfsr_rng   #(.W(W), .SEED(W'(8'h2D)), .ROT(1)) u_sh0 (.clk, .rst_n, .clr, .en, .r(r_sh0));
  lfsr_rng   #(.W(W), .SEED(W'(8'hC3)), .ROT(5)) u_sh1 (.clk, .rst_n, .clr, .en, .r(r_sh1));
  lfsr_rng   #(.W(W), .SEED(W'(8'h5A)), .ROT(3)) u_sh2 (.clk, .rst_n, .clr, .en, .r(r_sh2));
  lfsr_rng   #(.W(W), .SEED(W'(8'h97)), .ROT(6)) u_sh3 (.clk, .rst_n, .clr, .en, .r(r_sh3));

  function automatic logic [W-1:0] pick(input rng_sel_e s, input logic [W-1:0] v,
                                        input logic [W-1:0] h, input logic [W-1:0] l);
    unique case (s)
      RNG_VDC:    return v;
      RNG_HALTON: return h;
      default:    return l;
    endcase
  endfunction

  logic [W-1:0] rx, ry;
  logic         xs, ys;

  assign rx = pick(x_rng, r_vdc, r_hal, r_lfsr);
  assign ry = pick(y_rng, r_vdc, r_hal, r_lfsr);

  ds_converter #(.W(W)) u_ds_x (.b(x_val), .r(rx), .x(xs));
  ds_converter #(.W(W)) u_ds_y (.b(y_val), .r(ry), .x(ys));

  // ----------------------------------------------------- circuits under test
  logic sx, sy, dx, dy, cx, cy, z_max, z_min, z_sat;
  logic [$clog2(SYNC_D+1)-1:0]   nsv_sync;
  logic [$clog2(DESYNC_D+1)-1:0] nsv_desync;

  logic fl_sync, fl_desync;

  flush_ctrl #(.W(W), .NW($clog2(SYNC_D+1))) u_fl_sync (
    .clk, .rst_n, .clr, .en, .enable(flush_en), .n_saved(nsv_sync), .flush(fl_sync)
  );

  flush_ctrl #(.W(W), .NW($clog2(DESYNC_D+1))) u_fl_desync (
    .clk, .rst_n, .clr, .en, .enable(flush_en), .n_saved(nsv_desync), .flush(fl_desync)
  );

  synchronizer #(.D(SYNC_D)) u_sync (
    .clk, .rst_n, .clr, .en, .flush(fl_sync),
    .x(xs), .y(ys), .x_o(sx), .y_o(sy), .n_saved(nsv_sync)
  );

  desynchronizer #(.D(DESYNC_D)) u_desync (
    .clk, .rst_n, .clr, .en, .flush(fl_desync),
    .x(xs), .y(ys), .x_o(dx), .y_o(dy), .n_saved(nsv_desync)
  );

  decorrelator #(.D(SHUF_D), .RW(SRW)) u_decor (
    .clk, .rst_n, .clr, .en, .x(xs), .y(ys),
    .rnd0(r_sh0[SRW-1:0]), .rnd1(r_sh1[SRW-1:0]), .x_o(cx), .y_o(cy)
  );

  sync_max       #(.D(SYNC_D))   u_max (.clk, .rst_n, .clr, .en, .x(xs), .y(ys), .z(z_max));
  sync_min       #(.D(SYNC_D))   u_min (.clk, .rst_n, .clr, .en, .x(xs), .y(ys), .z(z_min));
  desync_sat_add #(.D(DESYNC_D)) u_sat (.clk, .rst_n, .clr, .en, .x(xs), .y(ys), .z(z_sat));

  logic ssx, ssy, dsx, dsy;
  logic [$clog2(STAGES*SYNC_D+1)-1:0]   nsv_sser;
  logic [$clog2(STAGES*DESYNC_D+1)-1:0] nsv_dser;

  sync_series #(.STAGES(STAGES), .D(SYNC_D)) u_sser (
    .clk, .rst_n, .clr, .en, .x(xs), .y(ys), .x_o(ssx), .y_o(ssy), .n_saved(nsv_sser)
  );

  desync_series #(.STAGES(STAGES), .D(DESYNC_D)) u_dser (
    .clk, .rst_n, .clr, .en, .x(xs), .y(ys), .x_o(dsx), .y_o(dsy), .n_saved(nsv_dser)
  );

  // Decorrelator chain: even stages take their indices from the first pair
  // of index LFSRs, odd stages from the second.
  logic           csx, csy;
  logic [SRW-1:0] crnd0 [STAGES], crnd1 [STAGES];

  for (genvar k = 0; k < int'(STAGES); k++) begin : g_crnd
    assign crnd0[k] = (k % 2 == 0) ? r_sh0[SRW-1:0] : r_sh2[SRW-1:0];
    assign crnd1[k] = (k % 2 == 0) ? r_sh1[SRW-1:0] : r_sh3[SRW-1:0];
  end

  decor_series #(.STAGES(STAGES), .D(SHUF_D), .RW(SRW)) u_cser (
    .clk, .rst_n, .clr, .en, .x(xs), .y(ys), .rnd0(crnd0), .rnd1(crnd1), .x_o(csx), .y_o(csy)
  );

  // -------------------------------------------------------------- counters
  logic [NUM_CNT-1:0] bits;

  always_comb begin
    bits               = '0;
    bits[CNT_IN_X]      = xs;
    bits[CNT_IN_Y]      = ys;
    bits[CNT_IN_XY]     = xs & ys;
    bits[CNT_SYNC_X]    = sx;
    bits[CNT_SYNC_Y]    = sy;
    bits[CNT_SYNC_XY]   = sx & sy;
    bits[CNT_DESYNC_X]  = dx;
    bits[CNT_DESYNC_Y]  = dy;
    bits[CNT_DESYNC_XY] = dx & dy;
    bits[CNT_DECOR_X]   = cx;
    bits[CNT_DECOR_Y]   = cy;
    bits[CNT_DECOR_XY]  = cx & cy;
    bits[CNT_MAX]       = z_max;
    bits[CNT_MIN]       = z_min;
    bits[CNT_SAT_ADD]   = z_sat;
    bits[CNT_SSER_X]    = ssx;
    bits[CNT_SSER_Y]    = ssy;
    bits[CNT_SSER_XY]   = ssx & ssy;
    bits[CNT_DSER_X]    = dsx;
    bits[CNT_DSER_Y]    = dsy;
    bits[CNT_DSER_XY]   = dsx & dsy;
    bits[CNT_CSER_X]    = csx;
    bits[CNT_CSER_Y]    = csy;
    bits[CNT_CSER_XY]   = csx & csy;
  end

  for (genvar k = 0; k < int'(NUM_CNT); k++) begin : g_cnt
    sd_converter #(.W(W)) u_sd (.clk, .rst_n, .clr, .en, .x(bits[k]), .count(cnt_o[k]));
  end

endmodule
