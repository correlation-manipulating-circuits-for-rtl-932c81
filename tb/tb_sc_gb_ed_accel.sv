// tb_sc_gb_ed_accel: end-to-end testbench of the tile accelerator at its
// default size (10x10 tiles of 8-bit pixels, 256-bit streams).
//
// Several tiles (flat, vertical edge, horizontal edge, diagonal, gradient,
// random) are run one after another, the later ones started in the very
// cycle `done` is seen, as back-to-back tiles. For each tile it checks:
//  - timing: `busy` lasts exactly 256 cycles and `done` rises 257 cycles
//    after the `start` cycle; a `start` pulse while busy is ignored;
//  - results: every edge count against a floating-point model of the same
//    pipeline (binomial 3x3 blur, then 0.5 (|a-d| + |b-c|)), per pixel within
//    0.10 and on average within 0.03 (absolute, values in 0..1) for the
//    structured tiles, 0.20 and 0.05 for pixel-level random noise;
//  - mechanisms: synchronizers saving a bit (a `sync_held_o` flag rising),
//    pairing it later (a flag falling), and bits still held when a tile ends
//    must each have happened; back-to-back starts and ignored starts too.
module tb_sc_gb_ed_accel;
  import sc_tb_pkg::*;

  localparam int T  = sc_pkg::TILE_DIM;
  localparam int WB = sc_pkg::RNG_W;
  localparam int N  = 1 << WB;
  localparam int E  = T - 3;

  logic          clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [WB-1:0] tile [T][T];
  logic          busy, done;
  logic [WB:0]   edge_o [E][E];
  logic [1:0]    held [E][E];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sc_gb_ed_accel dut (.clk, .rst_n, .start, .tile_i(tile), .busy, .done,
                      .edge_o(edge_o), .sync_held_o(held));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Mechanism counters.
  int n_save = 0, n_pair = 0, n_stuck = 0, n_b2b = 0, n_ignored = 0, n_tiles = 0;
  logic [1:0] held_prev [E][E];

  always @(posedge clk) begin
    if (rst_n && busy) begin
      for (int i = 0; i < E; i++)
        for (int j = 0; j < E; j++)
          for (int k = 0; k < 2; k++) begin
            if (held[i][j][k] && !held_prev[i][j][k]) n_save++;
            if (!held[i][j][k] && held_prev[i][j][k]) n_pair++;
          end
    end
    held_prev <= held;
  end

  initial begin : watchdog
    repeat (20_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void make_tile(input int kind);
    for (int r = 0; r < T; r++)
      for (int c = 0; c < T; c++) begin
        case (kind)
          0: tile[r][c] = 8'd128;                                  // flat
          1: tile[r][c] = (c < T / 2) ? 8'd20 : 8'd230;            // vertical edge
          2: tile[r][c] = (r < T / 2) ? 8'd240 : 8'd10;            // horizontal edge
          3: tile[r][c] = (r + c < T) ? 8'd0 : 8'd255;             // diagonal
          4: tile[r][c] = 8'(c * 25);                              // gradient
          default: tile[r][c] = 8'($urandom);                      // random
        endcase
      end
  endfunction

  // Floating-point model of blur + Roberts cross; returns value in 0..1.
  function automatic real model(input int i, input int j);
    real g [2][2];
    int  w [3][3];
    w = '{'{1, 2, 1}, '{2, 4, 2}, '{1, 2, 1}};
    for (int u = 0; u < 2; u++)
      for (int v = 0; v < 2; v++) begin
        g[u][v] = 0.0;
        for (int p = 0; p < 3; p++)
          for (int q = 0; q < 3; q++)
            g[u][v] += real'(w[p][q]) * real'(tile[i + u + p][j + v + q]);
        g[u][v] = g[u][v] / 16.0 / real'(N);
      end
    return 0.5 * (absr(g[0][0] - g[1][1]) + absr(g[0][1] - g[1][0]));
  endfunction

  // Run one tile; start is raised at the current negedge.
  task automatic run_tile(input int kind, input bit back_to_back);
    int  busy_cycles, lat;
    real e, sum_e, max_e, tol_px, tol_mean;
    make_tile(kind);
    // Pixel-level white noise is the hardest input for 256-bit streams.
    tol_px   = (kind >= 5) ? 0.20 : 0.10;
    tol_mean = (kind >= 5) ? 0.05 : 0.03;
    if (back_to_back) begin
      check(done, "back-to-back start is issued while done");
      n_b2b++;
    end
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    busy_cycles = 0;
    lat = 1;
    while (!done) begin
      if (busy) busy_cycles++;
      if (busy_cycles == 100 && kind == 4) begin
        // A start pulse while busy must be ignored.
        start = 1'b1; n_ignored++;
      end else start = 1'b0;
      @(negedge clk);
      lat++;
    end
    start = 1'b0;
    check(busy_cycles == N, "busy lasts N cycles");
    check(lat == N + 1, "done N+1 cycles after start");
    sum_e = 0.0; max_e = 0.0;
    for (int i = 0; i < E; i++)
      for (int j = 0; j < E; j++) begin
        e = absr(real'(edge_o[i][j]) / real'(N) - model(i, j));
        sum_e += e;
        if (e > max_e) max_e = e;
        check(e < tol_px, "edge pixel within tolerance of the model");
        if (held[i][j] != 2'b00) n_stuck++;
      end
    $display("tile kind %0d: mean abs error %0.4f, max %0.4f", kind, sum_e / (E * E), max_e);
    check(sum_e / (E * E) < tol_mean, "mean abs error within tolerance");
    n_tiles++;
  endtask

  initial begin
    make_tile(0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!busy && !done, "idle after reset");
    run_tile(0, 1'b0);
    repeat (3) @(negedge clk);
    run_tile(1, 1'b0);
    run_tile(2, 1'b1);
    run_tile(3, 1'b1);
    run_tile(4, 1'b1);
    for (int k = 0; k < 3; k++) run_tile(5, 1'b1);

    $display("mechanisms: saves %0d, pairings %0d, bits held at tile end %0d, back-to-back %0d, ignored starts %0d, tiles %0d",
             n_save, n_pair, n_stuck, n_b2b, n_ignored, n_tiles);
    check(n_save > 0, "synchronizers saved unpaired bits");
    check(n_pair > 0, "synchronizers paired saved bits");
    check(n_stuck > 0, "bits left in synchronizers at a tile end");
    check(n_b2b > 0, "back-to-back tiles");
    check(n_ignored > 0, "start while busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
