// tb_synchronizer: self-checking testbench of the synchronizer.
//  1. D = 1: random input pairs checked cycle by cycle against the published
//     three-state machine (S0 saved X, S1 initial, S2 saved Y), written here
//     as an explicit transition table.
//  2. D = 1 and D = 3: value preservation (1s out + saved bits = 1s in) and
//     correlation: Van der Corput X against Halton base-3 Y, N = 256, over a
//     grid of values; the average output SCC must exceed 0.9 (input is near 0).
//  3. Flush drains every saved bit; INIT starts with a saved bit.
module tb_synchronizer;
  import sc_tb_pkg::*;

  localparam int N = 256;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0, flush = 1'b0;
  logic x, y;
  logic x1, y1, x3, y3, xi, yi;
  logic [0:0] ns1;
  logic [1:0] ns3;
  logic [1:0] nsi;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  synchronizer #(.D(1)) dut1 (.clk, .rst_n, .clr, .en, .flush, .x, .y,
                              .x_o(x1), .y_o(y1), .n_saved(ns1));
  synchronizer #(.D(3)) dut3 (.clk, .rst_n, .clr, .en, .flush, .x, .y,
                              .x_o(x3), .y_o(y3), .n_saved(ns3));
  synchronizer #(.D(2), .INIT(-2)) duti (.clk, .rst_n, .clr, .en, .flush, .x, .y,
                              .x_o(xi), .y_o(yi), .n_saved(nsi));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Reference FSM of the D = 1 design: state 0 = S0, 1 = S1, 2 = S2.
  int ref_s;
  function automatic void ref_step(input int s, input logic xi_, input logic yi_,
                                   output int ns, output logic xo, output logic yo);
    ns = s; xo = xi_; yo = yi_;
    case (s)
      0: if (!xi_ && yi_) begin ns = 1; xo = 1; yo = 1; end
         // X=1,Y=0 in S0: stay, pass 1,0
      1: if (xi_ && !yi_) begin ns = 0; xo = 0; yo = 0; end
         else if (!xi_ && yi_) begin ns = 2; xo = 0; yo = 0; end
      2: if (xi_ && !yi_) begin ns = 1; xo = 1; yo = 1; end
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

  initial begin
    int   ns;
    logic ex, ey;
    int   in1x, in1y, o1x, o1y, o3x, o3y;
    int   a, b, c, d, a3, b3, c3, d3, ai, bi, ci, di;
    real  scc_in, scc_o1, scc_o3;
    int   npairs;

    x = 0; y = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(ns1 == 0 && nsi == 2, "initial state");

    // ---- 1. cycle-accurate comparison with the published FSM
    en = 1'b1;
    ref_s = 1;
    for (int i = 0; i < 5000; i++) begin
      x = 1'($urandom); y = 1'($urandom);
      #1;
      ref_step(ref_s, x, y, ns, ex, ey);
      check(x1 == ex && y1 == ey, "D=1 outputs vs FSM");
      @(negedge clk);
      ref_s = ns;
      check(int'(ns1) == ((ref_s == 1) ? 0 : 1), "D=1 saved count vs FSM");
    end

    // ---- 2. value preservation and induced correlation
    scc_in = 0.0; scc_o1 = 0.0; scc_o3 = 0.0; npairs = 0;
    for (int px = 8; px < N; px += 24) begin
      for (int py = 8; py < N; py += 24) begin
        clr = 1'b1; @(negedge clk); clr = 1'b0;
        in1x = 0; in1y = 0; o1x = 0; o1y = 0; o3x = 0; o3y = 0;
        a = 0; b = 0; c = 0; d = 0; a3 = 0; b3 = 0; c3 = 0; d3 = 0;
        ai = 0; bi = 0; ci = 0; di = 0;
        for (int t = 0; t < N; t++) begin
          x = (px > int'(vdc(t, 8)));
          y = (py > int'(halton3(t, 8)));
          #1;
          in1x += int'(x); in1y += int'(y);
          o1x += int'(x1); o1y += int'(y1);
          o3x += int'(x3); o3y += int'(y3);
          if (x && y) ai++; else if (x) bi++; else if (y) ci++; else di++;
          if (x1 && y1) a++; else if (x1) b++; else if (y1) c++; else d++;
          if (x3 && y3) a3++; else if (x3) b3++; else if (y3) c3++; else d3++;
          @(negedge clk);
        end
        // 1s conserved: what did not come out is still saved, on one side.
        check(in1x >= o1x && in1y >= o1y && (in1x - o1x) + (in1y - o1y) == int'(ns1)
              && ((in1x == o1x) || (in1y == o1y)), "D=1 values kept");
        check(in1x >= o3x && in1y >= o3y && (in1x - o3x) + (in1y - o3y) == int'(ns3)
              && ((in1x == o3x) || (in1y == o3y)), "D=3 values kept");
        scc_in += scc(ai, bi, ci, di);
        scc_o1 += scc(a, b, c, d);
        scc_o3 += scc(a3, b3, c3, d3);
        npairs++;
      end
    end
    scc_in /= npairs; scc_o1 /= npairs; scc_o3 /= npairs;
    $display("avg SCC in %0.3f  out D=1 %0.3f  out D=3 %0.3f", scc_in, scc_o1, scc_o3);
    check(scc_in < 0.2 && scc_in > -0.2, "inputs nearly uncorrelated");
    check(scc_o1 > 0.9, "D=1 output strongly positively correlated");
    check(scc_o3 >= scc_o1 - 0.01, "D=3 at least as correlated as D=1");

    // ---- 3. flush and initial state
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    // Save three X bits in the D=3 instance.
    for (int i = 0; i < 3; i++) begin
      x = 1; y = 0; #1;
      check(x3 == 0 && y3 == 0, "D=3 saves unpaired X");
      @(negedge clk);
    end
    check(ns3 == 3, "D=3 holds 3 X bits");
    x = 1; y = 0; #1;
    check(x3 == 1 && y3 == 0, "D=3 full store passes X");
    @(negedge clk);
    flush = 1'b1;
    x = 1; y = 0; #1; check(x3 == 1 && y3 == 0, "flush: no new save"); @(negedge clk);
    for (int i = 0; i < 3; i++) begin
      x = 0; y = 0; #1;
      check(x3 == 1 && y3 == 0, "flush emits saved X on 0,0");
      @(negedge clk);
    end
    check(ns3 == 0, "flush drained D=3");
    flush = 1'b0;
    // INIT = -2: two saved Y bits pair with the next two unpaired X bits.
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    check(nsi == 2, "INIT restores two saved bits on clr");
    for (int i = 0; i < 2; i++) begin
      x = 1; y = 0; #1;
      check(xi == 1 && yi == 1, "initial saved Y bit pairs with X");
      @(negedge clk);
    end
    check(nsi == 0, "initial Y bits spent");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
