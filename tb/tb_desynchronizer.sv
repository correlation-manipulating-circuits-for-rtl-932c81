// tb_desynchronizer: self-checking testbench of the desynchronizer.
//  1. D = 1: random input pairs checked cycle by cycle against the published
//     four-state machine (S0..S3), written here as an explicit table.
//  2. D = 1 and D = 2: value preservation (1s out + saved = 1s in) and induced
//     negative correlation for Van der Corput / Halton-3 inputs (nearly
//     uncorrelated) and for Halton-3 / Halton-3 inputs (positively correlated).
//  3. Flush drains the store; initial state parameters are honoured.
module tb_desynchronizer;
  import sc_tb_pkg::*;

  localparam int N = 256;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0, flush = 1'b0;
  logic x, y;
  logic x1, y1, x2, y2, xi, yi;
  logic [0:0] ns1;
  logic [1:0] ns2, nsi;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  desynchronizer #(.D(1)) dut1 (.clk, .rst_n, .clr, .en, .flush, .x, .y,
                                .x_o(x1), .y_o(y1), .n_saved(ns1));
  desynchronizer #(.D(2)) dut2 (.clk, .rst_n, .clr, .en, .flush, .x, .y,
                                .x_o(x2), .y_o(y2), .n_saved(ns2));
  desynchronizer #(.D(2), .INIT_SY(1), .INIT_TURN(1'b0)) duti (
                                .clk, .rst_n, .clr, .en, .flush, .x, .y,
                                .x_o(xi), .y_o(yi), .n_saved(nsi));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Published D = 1 machine. S0 initial; S1 holds X; S2 empty; S3 holds Y.
  function automatic void ref_step(input int s, input logic xi_, input logic yi_,
                                   output int ns, output logic xo, output logic yo);
    ns = s; xo = xi_; yo = yi_;
    if (xi_ != yi_) return;                       // X ^ Y == 1: pass, stay
    case (s)
      0: if (xi_) begin ns = 1; xo = 0; yo = 1; end           // save X
         else     begin xo = 0; yo = 0; end
      1: if (xi_) begin xo = 1; yo = 1; end
         else     begin ns = 2; xo = 1; yo = 0; end           // emit X
      2: if (xi_) begin ns = 3; xo = 1; yo = 0; end           // save Y
         else     begin xo = 0; yo = 0; end
      3: if (xi_) begin xo = 1; yo = 1; end
         else     begin ns = 0; xo = 0; yo = 1; end           // emit Y
      default: ;
    endcase
  endfunction

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Runs one pair of streams; returns SCC of the inputs and of both outputs.
  task automatic run_pair(input int px, input int py, input bit y_from_vdc_x_halton,
                          output real si, output real s1, output real s2);
    int ix, iy, o1x, o1y, o2x, o2y;
    int a0, b0, c0, d0, a1, b1, c1, d1, a2, b2, c2, d2;
    int rx, ry;
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    {ix, iy, o1x, o1y, o2x, o2y} = '0;
    {a0, b0, c0, d0, a1, b1, c1, d1, a2, b2, c2, d2} = '0;
    for (int t = 0; t < N; t++) begin
      rx = y_from_vdc_x_halton ? int'(vdc(t, 8)) : int'(halton3(t, 8));
      ry = int'(halton3(t, 8));
      x = (px > rx);
      y = (py > ry);
      #1;
      ix += int'(x); iy += int'(y);
      o1x += int'(x1); o1y += int'(y1); o2x += int'(x2); o2y += int'(y2);
      if (x && y) a0++; else if (x) b0++; else if (y) c0++; else d0++;
      if (x1 && y1) a1++; else if (x1) b1++; else if (y1) c1++; else d1++;
      if (x2 && y2) a2++; else if (x2) b2++; else if (y2) c2++; else d2++;
      @(negedge clk);
    end
    check(ix >= o1x && iy >= o1y && (ix - o1x) + (iy - o1y) == int'(ns1), "D=1 values kept");
    check(ix >= o2x && iy >= o2y && (ix - o2x) + (iy - o2y) == int'(ns2), "D=2 values kept");
    si = scc(a0, b0, c0, d0);
    s1 = scc(a1, b1, c1, d1);
    s2 = scc(a2, b2, c2, d2);
  endtask

  initial begin
    int   s, ns;
    logic ex, ey;
    real  si, s1, s2, ai, a1, a2, bi, b1, b2;
    int   np;

    x = 0; y = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(ns1 == 0 && ns2 == 0 && nsi == 1, "initial state");

    // ---- 1. cycle-accurate comparison with the published FSM
    en = 1'b1;
    s = 0;
    for (int i = 0; i < 5000; i++) begin
      x = 1'($urandom); y = 1'($urandom);
      #1;
      ref_step(s, x, y, ns, ex, ey);
      check(x1 == ex && y1 == ey, "D=1 outputs vs FSM");
      @(negedge clk);
      s = ns;
      check(int'(ns1) == ((s == 1 || s == 3) ? 1 : 0), "D=1 store vs FSM");
    end

    // ---- 2. induced negative correlation
    ai = 0.0; a1 = 0.0; a2 = 0.0; bi = 0.0; b1 = 0.0; b2 = 0.0;
    np = 0;
    for (int px = 8; px < 128; px += 16) begin
      for (int py = 8; py < 128; py += 16) begin
        run_pair(px, py, 1'b1, si, s1, s2); ai += si; a1 += s1; a2 += s2;
        run_pair(px, py, 1'b0, si, s1, s2); bi += si; b1 += s1; b2 += s2;
        np++;
      end
    end
    ai /= np; a1 /= np; a2 /= np; bi /= np; b1 /= np; b2 /= np;
    $display("VDC/Halton:    SCC in %0.3f out D=1 %0.3f D=2 %0.3f", ai, a1, a2);
    $display("Halton/Halton: SCC in %0.3f out D=1 %0.3f D=2 %0.3f", bi, b1, b2);
    check(ai > -0.2 && ai < 0.2, "VDC/Halton inputs nearly uncorrelated");
    check(a1 < -0.8, "D=1 makes VDC/Halton strongly negative");
    check(bi > 0.8, "Halton/Halton inputs positively correlated");
    check(b1 < -0.8, "D=1 makes Halton/Halton strongly negative");
    check(a2 <= a1 + 0.02, "D=2 at least as negative as D=1");

    // ---- 3. flush and initial state
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    x = 1; y = 1; #1; check(x2 == 0 && y2 == 1, "D=2 saves X first"); @(negedge clk);
    x = 1; y = 1; #1; check(x2 == 1 && y2 == 0, "D=2 saves Y second"); @(negedge clk);
    x = 1; y = 1; #1; check(x2 == 1 && y2 == 1, "D=2 full store passes 1,1"); @(negedge clk);
    check(ns2 == 2, "D=2 holds two bits");
    flush = 1'b1;
    x = 0; y = 0; #1; check(x2 == 1 && y2 == 1, "flush emits both saved bits"); @(negedge clk);
    check(ns2 == 0, "flush drained");
    flush = 1'b0;
    // INIT_SY = 1: a held Y bit is spent on the first 0,0 pair.
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    x = 0; y = 0; #1; check(xi == 0 && yi == 1, "initial Y bit emitted"); @(negedge clk);
    check(nsi == 0, "initial store spent");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
