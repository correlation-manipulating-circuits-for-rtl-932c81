// sc_gb_ed_accel: stochastic-computing image tile accelerator, a 3x3 Gaussian
// blur (GB) followed by a Roberts cross edge detector (ED), with synchronizers
// between the two stages to restore the positive correlation the edge
// detector's XOR subtractors need.
//
// Data flow for one TILE x TILE tile of W-bit pixels (defaults 10x10, 8 bit):
//   1. D/S conversion: every pixel is compared each cycle against one shared
//      Van der Corput number, giving TILE*TILE pixel streams of length
//      N = 2**W (256).
//   2. GB: (TILE-2)^2 blur outputs, each a 16-way mux adder; all share a
//      4-bit select taken from the top bits of a base-3 Halton generator.
//   3. ED: (TILE-3)^2 edge outputs, each with two synchronizers (save depth
//      SYNC_D) on its diagonal pairs, two XORs and a 2-way mux whose select
//      is the top bit of an LFSR.
//   4. S/D conversion: one counter per edge output.
// All outputs of the tile are computed in parallel; a tile takes N cycles.
//
// Interface and timing: hold `tile_i` stable from `start` until `done`.
// A `start` pulse while idle (or done) clears every generator, synchronizer
// and counter in that cycle; the next N cycles stream the bits (`busy` high);
// then `done` rises and stays high, and `edge_o[r][c]` holds the count of 1s
// (0..N) of edge output (r, c), i.e. value edge_o / N. The edge output (r, c)
// `sync_held_o[r][c]` shows which of the two synchronizers of edge output
// (r, c) currently holds a saved bit (status only). Edge output (r, c)
// is computed from blur outputs (r..r+1, c..c+1), and blur output (r, c) is
// centred on tile pixel (r+1, c+1). A new `start` may follow `done` at once.
//
// What follows the published accelerator: GB then ED, synchronizers between
// them, 10x10 tiles with all outputs of a tile in parallel, N = 256, shared
// RNGs with D/S and S/D converters. This design's own choices: the kernel
// weights and mux-tree form, which generator feeds which stage, the
// start/busy/done handshake, and that the tile is not buffered internally.
module sc_gb_ed_accel #(
  parameter int unsigned TILE   = sc_pkg::TILE_DIM,
  parameter int unsigned W      = sc_pkg::RNG_W,
  parameter int unsigned SYNC_D = 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   tile_i [TILE][TILE],
  output logic           busy,
  output logic           done,
  output logic [W:0]     edge_o [TILE-3][TILE-3],
  output logic [1:0]     sync_held_o [TILE-3][TILE-3]
);

  localparam int unsigned GB_DIM = TILE - 2;
  localparam int unsigned ED_DIM = TILE - 3;

  logic clr, en;

  // ------------------------------------------------------------------ control
  sc_stream_ctrl #(.W(W)) u_ctrl (.clk, .rst_n, .start, .clr, .en, .busy, .done);

  // --------------------------------------------------------- random sources
  logic [W-1:0] r_pix, r_gb, r_ed;

  vdc_rng    #(.W(W)) u_rng_pix (.clk, .rst_n, .clr, .en, .r(r_pix));
  halton_rng #(.W(W)) u_rng_gb  (.clk, .rst_n, .clr, .en, .r(r_gb));
  lfsr_rng   #(.W(W)) u_rng_ed  (.clk, .rst_n, .clr, .en, .r(r_ed));

  // ----------------------------------------------------------- D/S converters
  logic pix_sn [TILE][TILE];

  for (genvar i = 0; i < int'(TILE); i++) begin : g_ds_r
    for (genvar j = 0; j < int'(TILE); j++) begin : g_ds_c
      ds_converter #(.W(W)) u_ds (
        .b({1'b0, tile_i[i][j]}), .r(r_pix), .x(pix_sn[i][j])
      );
    end
  end

  // ------------------------------------------------------------ Gaussian blur
  logic gb_sn [GB_DIM][GB_DIM];

  for (genvar i = 0; i < int'(GB_DIM); i++) begin : g_gb_r
    for (genvar j = 0; j < int'(GB_DIM); j++) begin : g_gb_c
      logic win [3][3];
      for (genvar u = 0; u < 3; u++) begin : g_wr
        for (genvar v = 0; v < 3; v++) begin : g_wc
          assign win[u][v] = pix_sn[i+u][j+v];
        end
      end
      sc_gauss_blur u_gb (.win(win), .sel(r_gb[W-1 -: 4]), .z(gb_sn[i][j]));
    end
  end

  // ------------------------------------- synchronized Roberts cross and S/D
  for (genvar i = 0; i < int'(ED_DIM); i++) begin : g_ed_r
    for (genvar j = 0; j < int'(ED_DIM); j++) begin : g_ed_c
      logic ed_sn;
      sc_roberts_cross #(.D(SYNC_D)) u_ed (
        .clk, .rst_n, .clr, .en,
        .a(gb_sn[i][j]),   .b(gb_sn[i][j+1]),
        .c(gb_sn[i+1][j]), .d(gb_sn[i+1][j+1]),
        .sel(r_ed[W-1]), .z(ed_sn), .held(sync_held_o[i][j])
      );
      sd_converter #(.W(W)) u_sd (
        .clk, .rst_n, .clr, .en, .x(ed_sn), .count(edge_o[i][j])
      );
    end
  end

  initial assert (TILE >= 4 && W >= 4)
    else $error("sc_gb_ed_accel: TILE must be >= 4 and W >= 4");

endmodule
