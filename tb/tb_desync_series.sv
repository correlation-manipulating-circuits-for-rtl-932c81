// tb_desync_series: self-checking testbench of a two-stage desynchronizer
// chain with the second stage preloaded with one held X bit.
//
// A reference model, written from the four-state table of the depth-1
// desynchronizer (S0: empty, X next; S1: X bit held; S2: empty, Y next;
// S3: Y bit held), runs two stages in series, the second starting in S1. The
// outputs are compared every cycle for random streams of several densities
// and for VDC/Halton streams. The testbench also checks that the chain lowers
// the correlation at least as much as a single stage and that each stream
// gains at most one bit and loses at most two.
module tb_desync_series;
  import sc_tb_pkg::*;

  localparam int N = 256;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr, en, x, y, x_o, y_o;
  logic [1:0] n_saved;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  desync_series #(.STAGES(2), .D(1), .PRELOAD(1'b1)) dut (
    .clk, .rst_n, .clr, .en, .x, .y, .x_o, .y_o, .n_saved
  );

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One depth-1 desynchronizer step, st = 0..3 for S0..S3.
  function automatic void sync_step(inout int st, input logic xi, input logic yi,
                                     output logic xo, output logic yo);
    xo = xi; yo = yi;
    if (xi && yi) begin
      if (st == 0) begin xo = 1'b0; st = 1; end
      else if (st == 2) begin yo = 1'b0; st = 3; end
    end else if (!xi && !yi) begin
      if (st == 1) begin xo = 1'b1; st = 2; end
      else if (st == 3) begin yo = 1'b1; st = 0; end
    end
  endfunction

  initial begin
    int   ns_exp, st0, st1, px, py, a1, b1, c1, a2, b2, c2, nx, ny, nxo, nyo;
    logic m1x, m1y, m2x, m2y;
    real  s1, s2;
    clr = 1'b0; en = 1'b0; x = 1'b0; y = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 40; run++) begin
      clr = 1'b1;
      @(negedge clk);
      clr = 1'b0; en = 1'b1;
      st0 = 0; st1 = 1;
      px = $urandom_range(0, 256); py = $urandom_range(0, 256);
      a1 = 0; b1 = 0; c1 = 0; a2 = 0; b2 = 0; c2 = 0; nx = 0; ny = 0; nxo = 0; nyo = 0;
      for (int i = 0; i < N; i++) begin
        if (run < 20) begin
          x = ($urandom_range(0, 255) < px); y = ($urandom_range(0, 255) < py);
        end else begin
          x = (px > int'(vdc(i, 8) * 256.0)); y = (py > int'(halton3(i, 8) * 256.0));
        end
        #1;
        ns_exp = ((st0 % 2) + (st1 % 2));
        sync_step(st0, x, y, m1x, m1y);
        sync_step(st1, m1x, m1y, m2x, m2y);
        checks++;
        if (x_o !== m2x || y_o !== m2y || int'(n_saved) != ns_exp) begin
          failures++;
          if (failures < 10) $display("FAIL run %0d bit %0d: got %b%b want %b%b", run, i, x_o, y_o, m2x, m2y);
        end
        if (m1x && m1y) a1++;
        if (m1x && !m1y) b1++;
        if (!m1x && m1y) c1++;
        if (x_o && y_o) a2++;
        if (x_o && !y_o) b2++;
        if (!x_o && y_o) c2++;
        if (x) nx++;
        if (y) ny++;
        if (x_o) nxo++;
        if (y_o) nyo++;
        @(negedge clk);
      end
      s1 = scc(a1, b1, c1, N - a1 - b1 - c1);
      s2 = scc(a2, b2, c2, N - a2 - b2 - c2);
      checks++;
      if (s2 > s1 + 1e-9 || nxo - nx < -2 || nxo - nx > 1 || nyo - ny < -2 || nyo - ny > 1) begin
        failures++;
        $display("FAIL run %0d: SCC one stage %f two stages %f (must not rise), X %0d->%0d Y %0d->%0d", run, s1, s2, nx, nxo, ny, nyo);
      end
      en = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
