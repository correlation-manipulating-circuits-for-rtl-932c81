// tb_sc_corr_eval: self-checking testbench of the evaluation unit, run as the
// correlation experiments of the design's characterisation: for each input
// generator pair (VDC/Halton, LFSR/VDC, Halton/Halton, LFSR/LFSR, VDC/VDC)
// and a grid of input values it runs one 256-cycle measurement and computes
// SCC and bias from the counters. Checks per run:
//   - timing: done 257 cycles after start;
//   - input counts: exactly x_val / y_val 1s for VDC, within 3 for Halton-3
//     and LFSR;
//   - synchronizer / desynchronizer: each output loses at most D = 1 bit,
//     and only one of the two streams can lose one;
//   - decorrelator: each output loses or gains at most 3 bits (buffer size);
//   - max / min / saturating add within 0.06 of the exact result, for the
//     VDC/Halton inputs the operators are characterised with (saturating add
//     also for Halton/Halton, within 0.10); the other pairs are only
//     reported. Average errors: max and min below 0.01, saturating add below
//     0.02.
//   - every overlap count lies between max(0, X + Y - N) and min(X, Y).
// Checks on averages: synchronizer output SCC > 0.85 for VDC/Halton and
// LFSR/VDC; desynchronizer output SCC < -0.7 for the same and for
// Halton/Halton; decorrelator output SCC < 0.5 for the correlated pairs.
// Two-stage chains: synchronizer/desynchronizer counts within -2..+1 of the
// inputs, average bias within 0.01, and SCC no worse than the single stage;
// decorrelator chain counts within 6 and SCC < 0.5 for correlated pairs. Flush: every pair is run a
// second time with flush_en set; the synchronizer and desynchronizer must
// never lose more bits than without it, and must lose fewer in total.
module tb_sc_corr_eval;
  import sc_pkg::*;
  import sc_tb_pkg::*;

  localparam int N = 256;

  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  rng_sel_e    x_rng, y_rng;
  logic [8:0]  x_val, y_val;
  logic        flush_en;
  logic        busy, done;
  logic [8:0]  cnt [NUM_CNT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sc_corr_eval dut (.clk, .rst_n, .start, .x_rng, .y_rng, .x_val, .y_val, .flush_en,
                    .busy, .done, .cnt_o(cnt));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (x=%0d y=%0d) at %0t", what, x_val, y_val, $time);
    end
  endtask

  function automatic real scc_of(input logic [8:0] cx, input logic [8:0] cy, input logic [8:0] cxy);
    return scc(int'(cxy), int'(cx) - int'(cxy), int'(cy) - int'(cxy),
               N - int'(cx) - int'(cy) + int'(cxy));
  endfunction

  initial begin : watchdog
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Input value tolerance in 1s: VDC is exact over 256 cycles; 256 Halton-3
  // points (of a 729 period) and the 255-period LFSR are off by a few.
  function automatic int in_tol(input rng_sel_e s);
    return (s == RNG_VDC) ? 0 : 3;
  endfunction

  task automatic run_one(output int lat);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin
      @(negedge clk);
      lat++;
    end
  endtask

  initial begin
    rng_sel_e xs [5], ys [5];
    string    nm [5];
    int       grp [7];
    int       lat, np, xv, yv, ex;
    real      s_in, s_sync, s_desync, s_decor, b_sync, b_desync, b_decor;
    real      e_max, e_min, e_sat, s_sser, s_dser, b_sser, b_dser, s_cser;
    int       lost_off, lost_on, lost_off_all, lost_on_all, n_sync_flush_gain;
    xs = '{RNG_VDC, RNG_LFSR, RNG_HALTON, RNG_LFSR, RNG_VDC};
    ys = '{RNG_HALTON, RNG_VDC, RNG_HALTON, RNG_LFSR, RNG_VDC};
    grp = '{CNT_IN_X, CNT_SYNC_X, CNT_DESYNC_X, CNT_DECOR_X, CNT_SSER_X, CNT_DSER_X, CNT_CSER_X};
    nm = '{"VDC/Halton", "LFSR/VDC", "Halton/Halton", "LFSR/LFSR", "VDC/VDC"};
    x_rng = RNG_VDC; y_rng = RNG_VDC; x_val = '0; y_val = '0; flush_en = 1'b0;
    lost_off_all = 0; lost_on_all = 0; n_sync_flush_gain = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int cfg = 0; cfg < 5; cfg++) begin
      x_rng = xs[cfg]; y_rng = ys[cfg];
      s_in = 0.0; s_sync = 0.0; s_desync = 0.0; s_decor = 0.0;
      b_sync = 0.0; b_desync = 0.0; b_decor = 0.0;
      e_max = 0.0; e_min = 0.0; e_sat = 0.0; np = 0;
      s_sser = 0.0; s_dser = 0.0; b_sser = 0.0; b_dser = 0.0; s_cser = 0.0;
      for (xv = 16; xv < N; xv += 32) begin
        for (yv = 16; yv < N; yv += 32) begin
          x_val = 9'(xv); y_val = 9'(yv);
          run_one(lat);
          check(lat == N + 1, "run latency N+1");
          check(absr(real'(int'(cnt[CNT_IN_X]) - xv)) <= real'(in_tol(x_rng)), "X input value");
          check(absr(real'(int'(cnt[CNT_IN_Y]) - yv)) <= real'(in_tol(y_rng)), "Y input value");
          // Synchronizer and desynchronizer: at most one bit held back.
          check(int'(cnt[CNT_IN_X]) - int'(cnt[CNT_SYNC_X]) inside {[0:1]} &&
                int'(cnt[CNT_IN_Y]) - int'(cnt[CNT_SYNC_Y]) inside {[0:1]} &&
                (cnt[CNT_IN_X] == cnt[CNT_SYNC_X] || cnt[CNT_IN_Y] == cnt[CNT_SYNC_Y]),
                "synchronizer keeps values");
          check(int'(cnt[CNT_IN_X]) - int'(cnt[CNT_DESYNC_X]) inside {[0:1]} &&
                int'(cnt[CNT_IN_Y]) - int'(cnt[CNT_DESYNC_Y]) inside {[0:1]} &&
                (cnt[CNT_IN_X] == cnt[CNT_DESYNC_X] || cnt[CNT_IN_Y] == cnt[CNT_DESYNC_Y]),
                "desynchronizer keeps values");
          check(int'(cnt[CNT_IN_X]) - int'(cnt[CNT_DECOR_X]) inside {[-3:3]} &&
                int'(cnt[CNT_IN_Y]) - int'(cnt[CNT_DECOR_Y]) inside {[-3:3]},
                "decorrelator keeps values");
          // Overlap counts must be feasible: max(0, X + Y - N) <= XY <= min(X, Y).
          foreach (grp[k]) begin
            int cx, cy, cxy;
            cx = int'(cnt[grp[k]]); cy = int'(cnt[grp[k] + 1]); cxy = int'(cnt[grp[k] + 2]);
            check(cxy <= ((cx < cy) ? cx : cy) && cxy >= ((cx + cy > N) ? cx + cy - N : 0),
                  "overlap count consistent");
          end
          ex = (xv > yv) ? xv : yv;
          e_max += absr(real'(int'(cnt[CNT_MAX]) - ex)) / N;
          if (cfg == 0) check(absr(real'(int'(cnt[CNT_MAX]) - ex)) / N < 0.06, "max");
          ex = (xv < yv) ? xv : yv;
          e_min += absr(real'(int'(cnt[CNT_MIN]) - ex)) / N;
          if (cfg == 0) check(absr(real'(int'(cnt[CNT_MIN]) - ex)) / N < 0.06, "min");
          ex = (xv + yv > N) ? N : xv + yv;
          e_sat += absr(real'(int'(cnt[CNT_SAT_ADD]) - ex)) / N;
          if (cfg == 0 || cfg == 2)
            check(absr(real'(int'(cnt[CNT_SAT_ADD]) - ex)) / N < ((cfg == 0) ? 0.06 : 0.10),
                  "saturating add");
          s_in     += scc_of(cnt[CNT_IN_X], cnt[CNT_IN_Y], cnt[CNT_IN_XY]);
          s_sync   += scc_of(cnt[CNT_SYNC_X], cnt[CNT_SYNC_Y], cnt[CNT_SYNC_XY]);
          s_desync += scc_of(cnt[CNT_DESYNC_X], cnt[CNT_DESYNC_Y], cnt[CNT_DESYNC_XY]);
          s_decor  += scc_of(cnt[CNT_DECOR_X], cnt[CNT_DECOR_Y], cnt[CNT_DECOR_XY]);
          b_sync   += real'(int'(cnt[CNT_SYNC_X]) - int'(cnt[CNT_IN_X])) / N;
          b_desync += real'(int'(cnt[CNT_DESYNC_X]) - int'(cnt[CNT_IN_X])) / N;
          b_decor  += real'(int'(cnt[CNT_DECOR_X]) - int'(cnt[CNT_IN_X])) / N;
          // Two-stage chains: each stage starts holding one bit, so a count
          // may end up to one above or two below its input.
          check(int'(cnt[CNT_SSER_X]) - int'(cnt[CNT_IN_X]) inside {[-2:1]} &&
                int'(cnt[CNT_SSER_Y]) - int'(cnt[CNT_IN_Y]) inside {[-2:1]},
                "synchronizer chain keeps values");
          check(int'(cnt[CNT_DSER_X]) - int'(cnt[CNT_IN_X]) inside {[-2:1]} &&
                int'(cnt[CNT_DSER_Y]) - int'(cnt[CNT_IN_Y]) inside {[-2:1]},
                "desynchronizer chain keeps values");
          s_sser += scc_of(cnt[CNT_SSER_X], cnt[CNT_SSER_Y], cnt[CNT_SSER_XY]);
          s_dser += scc_of(cnt[CNT_DSER_X], cnt[CNT_DSER_Y], cnt[CNT_DSER_XY]);
          s_cser += scc_of(cnt[CNT_CSER_X], cnt[CNT_CSER_Y], cnt[CNT_CSER_XY]);
          check(int'(cnt[CNT_IN_X]) - int'(cnt[CNT_CSER_X]) inside {[-6:6]} &&
                int'(cnt[CNT_IN_Y]) - int'(cnt[CNT_CSER_Y]) inside {[-6:6]},
                "decorrelator chain keeps values");
          b_sser += real'(int'(cnt[CNT_SSER_X]) + int'(cnt[CNT_SSER_Y])
                          - int'(cnt[CNT_IN_X]) - int'(cnt[CNT_IN_Y])) / (2 * N);
          b_dser += real'(int'(cnt[CNT_DSER_X]) + int'(cnt[CNT_DSER_Y])
                          - int'(cnt[CNT_IN_X]) - int'(cnt[CNT_IN_Y])) / (2 * N);
          // Same pair again with the end-of-stream flush switched on.
          lost_off = 2 * int'(cnt[CNT_IN_X]) + 2 * int'(cnt[CNT_IN_Y])
                   - int'(cnt[CNT_SYNC_X]) - int'(cnt[CNT_SYNC_Y])
                   - int'(cnt[CNT_DESYNC_X]) - int'(cnt[CNT_DESYNC_Y]);
          flush_en = 1'b1;
          run_one(lat);
          flush_en = 1'b0;
          check(lat == N + 1, "run latency N+1 with flush");
          lost_on = 2 * int'(cnt[CNT_IN_X]) + 2 * int'(cnt[CNT_IN_Y])
                  - int'(cnt[CNT_SYNC_X]) - int'(cnt[CNT_SYNC_Y])
                  - int'(cnt[CNT_DESYNC_X]) - int'(cnt[CNT_DESYNC_Y]);
          check(lost_on >= 0 && lost_on <= lost_off, "flush never loses more bits");
          if (lost_on < lost_off) n_sync_flush_gain++;
          lost_off_all += lost_off;
          lost_on_all  += lost_on;
          np++;
        end
      end
      s_in /= np; s_sync /= np; s_desync /= np; s_decor /= np; s_sser /= np; s_dser /= np; s_cser /= np;
      $display("%-13s chains: sync x2 SCC %6.3f (bias %6.3f) | desync x2 SCC %6.3f (bias %6.3f) | decor x2 SCC %6.3f",
               nm[cfg], s_sser, b_sser / np, s_dser, b_dser / np, s_cser);
      if (cfg >= 2) check(s_cser < 0.5, "decorrelator chain lowers SCC");
      check(b_sser / np > -0.01 && b_sser / np < 0.01 && b_dser / np > -0.01 && b_dser / np < 0.01,
            "chain bias small");
      if (cfg <= 1) begin
        check(s_sser >= s_sync - 0.005, "second synchronizer does not lower SCC");
        check(s_dser <= s_desync + 0.005, "second desynchronizer does not raise SCC");
      end
      $display("%-13s SCC in %6.3f | sync %6.3f (X' bias %6.3f) | desync %6.3f (%6.3f) | decor %6.3f (%6.3f) | abs err max %0.4f min %0.4f sat %0.4f",
               nm[cfg], s_in, s_sync, b_sync / np, s_desync, b_desync / np, s_decor, b_decor / np,
               e_max / np, e_min / np, e_sat / np);
      if (cfg == 0) begin
        check(e_max / np < 0.01 && e_min / np < 0.01, "max / min average error");
      end
      if (cfg == 0 || cfg == 2) check(e_sat / np < 0.02, "saturating add average error");
      if (cfg <= 1) begin
        check(s_sync > 0.85, "synchronizer raises SCC");
        check(s_desync < -0.7, "desynchronizer lowers SCC");
      end
      if (cfg == 2) check(s_desync < -0.7, "desynchronizer on correlated inputs");
      if (cfg >= 2) begin
        check(s_in > 0.9, "same generator gives correlated inputs");
        check(s_decor < 0.5, "decorrelator lowers SCC");
      end
    end
    $display("flush: bits lost by synchronizer + desynchronizer %0d without, %0d with; %0d runs improved",
             lost_off_all, lost_on_all, n_sync_flush_gain);
    check(lost_on_all < lost_off_all && n_sync_flush_gain > 0, "flush recovers saved bits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
