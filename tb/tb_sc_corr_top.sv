// tb_sc_corr_top: end-to-end testbench of the whole design at its default
// size (10x10 tiles of 8-bit pixels, 256-bit streams, save depth 1), with
// the image accelerator and the evaluation unit working at the same time.
//
// Accelerator: structured tiles (flat, vertical / horizontal / diagonal
// edges, gradient) and random tiles, later ones started back-to-back in the
// cycle `done` is seen, and one start pulse sent while busy. Each edge count
// is compared with a floating-point model of blur + Roberts cross (per pixel
// within 0.10, mean within 0.03; 0.20 / 0.05 for pixel-level noise), and the
// run length is checked (busy 256 cycles, done 257 cycles after start).
// Evaluation unit: runs continuously through all nine X/Y generator
// choices with random values; checks run length, input and output values of
// synchronizer and desynchronizer, and the SCC direction they produce, with
// the end-of-stream flush switched on for every other run; checks the
// two-stage synchronizer and desynchronizer chains' values as well.
// Mechanisms counted (each must occur): synchronizer saves and pairings in
// the accelerator, bits still held at a tile end, back-to-back tiles,
// ignored starts, both units busy in the same cycle, each generator used
// for each stream, runs with flush on, runs where a chain beat one stage.
module tb_sc_corr_top;
  import sc_pkg::*;
  import sc_tb_pkg::*;

  localparam int T  = TILE_DIM;
  localparam int WB = RNG_W;
  localparam int N  = 1 << WB;
  localparam int E  = T - 3;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          acc_start = 1'b0, ev_start = 1'b0;
  logic [WB-1:0] tile [T][T];
  logic          acc_busy, acc_done, ev_busy, ev_done;
  logic [WB:0]   edge_o [E][E];
  logic [1:0]    held [E][E];
  rng_sel_e      x_rng, y_rng;
  logic [WB:0]   x_val, y_val;
  logic          flush_en;
  logic [WB:0]   cnt [NUM_CNT];

  // SCC of a stream pair from the counts of X, Y and X&Y over N bits.
  function automatic real scc_cnt(input logic [WB:0] cx, input logic [WB:0] cy, input logic [WB:0] cxy);
    return scc(int'(cxy), int'(cx) - int'(cxy), int'(cy) - int'(cxy),
               N - int'(cx) - int'(cy) + int'(cxy));
  endfunction
  int checks = 0, failures = 0;
  bit acc_finished = 1'b0, ev_finished = 1'b0;

  always #5 clk = ~clk;

  sc_corr_top dut (
    .clk, .rst_n,
    .acc_start, .acc_tile_i(tile), .acc_busy, .acc_done,
    .acc_edge_o(edge_o), .acc_sync_held_o(held),
    .ev_start, .ev_x_rng(x_rng), .ev_y_rng(y_rng), .ev_x_val(x_val), .ev_y_val(y_val),
    .ev_flush_en(flush_en), .ev_busy, .ev_done, .ev_cnt_o(cnt)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------------------------------------------------- mechanisms
  int n_save = 0, n_pair = 0, n_stuck = 0, n_b2b = 0, n_ignored = 0, n_both = 0;
  int n_sel [2][3];
  int n_flush = 0, n_chain = 0;
  logic [1:0] held_prev [E][E];

  always @(posedge clk) begin
    if (rst_n && acc_busy) begin
      for (int i = 0; i < E; i++)
        for (int j = 0; j < E; j++)
          for (int k = 0; k < 2; k++) begin
            if (held[i][j][k] && !held_prev[i][j][k]) n_save++;
            if (!held[i][j][k] && held_prev[i][j][k]) n_pair++;
          end
    end
    if (acc_busy && ev_busy) n_both++;
    held_prev <= held;
  end

  initial begin : watchdog
    repeat (30_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------- accelerator
  function automatic void make_tile(input int kind);
    for (int r = 0; r < T; r++)
      for (int c = 0; c < T; c++) begin
        case (kind)
          0: tile[r][c] = 8'd128;
          1: tile[r][c] = (c < T / 2) ? 8'd20 : 8'd230;
          2: tile[r][c] = (r < T / 2) ? 8'd240 : 8'd10;
          3: tile[r][c] = (r + c < T) ? 8'd0 : 8'd255;
          4: tile[r][c] = 8'(c * 25);
          default: tile[r][c] = 8'($urandom);
        endcase
      end
  endfunction

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

  task automatic run_tile(input int kind, input bit back_to_back);
    int  busy_cycles, lat;
    real e, sum_e, tol_px, tol_mean;
    make_tile(kind);
    tol_px   = (kind >= 5) ? 0.20 : 0.10;
    tol_mean = (kind >= 5) ? 0.05 : 0.03;
    if (back_to_back) begin
      check(acc_done, "back-to-back tile starts while done");
      n_b2b++;
    end
    acc_start = 1'b1;
    @(negedge clk);
    acc_start = 1'b0;
    busy_cycles = 0;
    lat = 1;
    while (!acc_done) begin
      if (acc_busy) busy_cycles++;
      if (busy_cycles == 77 && kind == 2) begin
        acc_start = 1'b1; n_ignored++;
      end else acc_start = 1'b0;
      @(negedge clk);
      lat++;
    end
    acc_start = 1'b0;
    check(busy_cycles == N, "accelerator busy N cycles");
    check(lat == N + 1, "accelerator done N+1 cycles after start");
    sum_e = 0.0;
    for (int i = 0; i < E; i++)
      for (int j = 0; j < E; j++) begin
        e = absr(real'(edge_o[i][j]) / real'(N) - model(i, j));
        sum_e += e;
        check(e < tol_px, "edge pixel");
        if (held[i][j] != 2'b00) n_stuck++;
      end
    $display("tile kind %0d: mean abs error %0.4f", kind, sum_e / (E * E));
    check(sum_e / (E * E) < tol_mean, "edge mean error");
  endtask

  initial begin : acc_thread
    make_tile(0);
    wait (rst_n);
    @(negedge clk);
    run_tile(0, 1'b0);
    run_tile(1, 1'b1);
    run_tile(2, 1'b1);
    run_tile(3, 1'b1);
    run_tile(4, 1'b1);
    run_tile(5, 1'b1);
    acc_finished = 1'b1;
  end

  // ------------------------------------------------------ evaluation unit
  initial begin : ev_thread
    int  lat, xv, yv;
    real s_in, s_sync, s_desync, s_sser, s_dser;
    x_rng = RNG_VDC; y_rng = RNG_VDC; x_val = '0; y_val = '0; flush_en = 1'b0;
    for (int a = 0; a < 2; a++) for (int b = 0; b < 3; b++) n_sel[a][b] = 0;
    wait (rst_n);
    @(negedge clk);
    for (int xs = 0; xs < 3; xs++)
      for (int ys = 0; ys < 3; ys++) begin
        xv = int'($urandom_range(224, 32));
        yv = int'($urandom_range(224, 32));
        x_rng = rng_sel_e'(xs); y_rng = rng_sel_e'(ys);
        x_val = 9'(xv); y_val = 9'(yv);
        n_sel[0][xs]++; n_sel[1][ys]++;
        flush_en = ((3 * xs + ys) % 2 == 1);
        if (flush_en) n_flush++;
        ev_start = 1'b1;
        @(negedge clk);
        ev_start = 1'b0;
        lat = 1;
        while (!ev_done) begin
          @(negedge clk);
          lat++;
        end
        check(lat == N + 1, "evaluation done N+1 cycles after start");
        check(absr(real'(int'(cnt[CNT_IN_X]) - xv)) <= 3.0 &&
              absr(real'(int'(cnt[CNT_IN_Y]) - yv)) <= 3.0, "evaluation input values");
        check(int'(cnt[CNT_IN_X]) - int'(cnt[CNT_SYNC_X]) inside {[0:1]} &&
              int'(cnt[CNT_IN_Y]) - int'(cnt[CNT_SYNC_Y]) inside {[0:1]}, "synchronizer values");
        check(int'(cnt[CNT_IN_X]) - int'(cnt[CNT_DESYNC_X]) inside {[0:1]} &&
              int'(cnt[CNT_IN_Y]) - int'(cnt[CNT_DESYNC_Y]) inside {[0:1]}, "desynchronizer values");
        s_in     = scc_cnt(cnt[CNT_IN_X], cnt[CNT_IN_Y], cnt[CNT_IN_XY]);
        s_sync   = scc_cnt(cnt[CNT_SYNC_X], cnt[CNT_SYNC_Y], cnt[CNT_SYNC_XY]);
        s_desync = scc_cnt(cnt[CNT_DESYNC_X], cnt[CNT_DESYNC_Y], cnt[CNT_DESYNC_XY]);
        s_sser   = scc_cnt(cnt[CNT_SSER_X], cnt[CNT_SSER_Y], cnt[CNT_SSER_XY]);
        s_dser   = scc_cnt(cnt[CNT_DSER_X], cnt[CNT_DSER_Y], cnt[CNT_DSER_XY]);
        check(int'(cnt[CNT_SSER_X]) - int'(cnt[CNT_IN_X]) inside {[-2:1]} &&
              int'(cnt[CNT_SSER_Y]) - int'(cnt[CNT_IN_Y]) inside {[-2:1]} &&
              int'(cnt[CNT_DSER_X]) - int'(cnt[CNT_IN_X]) inside {[-2:1]} &&
              int'(cnt[CNT_DSER_Y]) - int'(cnt[CNT_IN_Y]) inside {[-2:1]}, "chain values");
        if (s_sser > s_sync + 1e-6 || s_dser < s_desync - 1e-6) n_chain++;
        $display("eval X gen %0d Y gen %0d flush %0d: SCC in %6.3f sync %6.3f (x2 %6.3f) desync %6.3f (x2 %6.3f)",
                 xs, ys, flush_en, s_in, s_sync, s_sser, s_desync, s_dser);
        check(s_sync >= s_in - 0.01, "synchronizer does not lower SCC");
        check(s_desync <= s_in + 0.01, "desynchronizer does not raise SCC");
      end
    ev_finished = 1'b1;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (acc_finished && ev_finished);
    $display("mechanisms: saves %0d, pairings %0d, held at tile end %0d, back-to-back %0d, ignored starts %0d, both busy %0d cycles",
             n_save, n_pair, n_stuck, n_b2b, n_ignored, n_both);
    check(n_save > 0, "synchronizer saves occurred");
    check(n_pair > 0, "synchronizer pairings occurred");
    check(n_stuck > 0, "bits held at a tile end occurred");
    check(n_b2b > 0, "back-to-back tiles occurred");
    check(n_ignored > 0, "start while busy occurred");
    check(n_both > 0, "both units ran at once");
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 3; b++) check(n_sel[a][b] > 0, "every generator used on every stream");
    $display("mechanisms: runs with flush %0d, runs where a chain beat one stage %0d", n_flush, n_chain);
    check(n_flush > 0, "flush runs occurred");
    check(n_chain > 0, "a chain improved on one stage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
