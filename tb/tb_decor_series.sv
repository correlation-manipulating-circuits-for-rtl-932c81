// tb_decor_series: self-checking testbench of a two-stage decorrelator chain
// with depth-4 shuffle buffers.
//
// A reference model of the shuffle buffer (three stored bits, initially
// 1, 0, 1; index 3 passes the input, any other index emits that stored bit
// and stores the input in its place) runs four buffers as two stages in
// series with the same random indices as the design. Outputs are compared
// every cycle for correlated input streams of many values, made two ways:
// from one shared VDC sequence, and from one shared uniform random number
// per cycle. The testbench also checks that each stream keeps its value
// within 4 (two buffers can each hold two more or two fewer 1s than at
// reset), and that for the random streams both one stage and the chain bring
// the average SCC from 1 to below 0.25. For the VDC streams both are only
// reported: their periodic bit patterns can line up again after short random
// delays, so a second stage need not help there.
module tb_decor_series;
  import sc_tb_pkg::*;

  localparam int N = 256;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       clr, en, x, y, x_o, y_o;
  logic [1:0] rnd0 [2], rnd1 [2];
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  decor_series #(.STAGES(2), .D(4), .RW(2)) dut (
    .clk, .rst_n, .clr, .en, .x, .y, .rnd0, .rnd1, .x_o, .y_o
  );

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Shuffle buffer model; b holds the three stored bits of one buffer.
  function automatic logic sb_step(inout logic [2:0] b, input logic in, input logic [1:0] r);
    logic o;
    if (r == 2'd3) return in;
    o = b[r];
    b[r] = in;
    return o;
  endfunction

  initial begin
    logic [2:0] bx0, by0, bx1, by1;
    logic       m1x, m1y, m2x, m2y;
    int         a1, b1, c1, a2, b2, c2, nx, ny, nxo, nyo, runs;
    real        s1, s2, sum1, sum2;
    int         u;
    clr = 1'b0; en = 1'b0; x = 1'b0; y = 1'b0;
    rnd0 = '{2'd0, 2'd0}; rnd1 = '{2'd0, 2'd0};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int mode = 0; mode < 2; mode++) begin
    sum1 = 0.0; sum2 = 0.0; runs = 0;
    for (int px = 24; px < N; px += 40)
      for (int py = 24; py < N; py += 40) begin
        clr = 1'b1;
        @(negedge clk);
        clr = 1'b0; en = 1'b1;
        bx0 = 3'b101; by0 = 3'b101; bx1 = 3'b101; by1 = 3'b101;
        a1 = 0; b1 = 0; c1 = 0; a2 = 0; b2 = 0; c2 = 0; nx = 0; ny = 0; nxo = 0; nyo = 0;
        for (int i = 0; i < N; i++) begin
          u = (mode == 0) ? int'(vdc(i, 8) * 256.0) : int'($urandom_range(0, 255));
          x = (px > u);
          y = (py > u);
          for (int k = 0; k < 2; k++) begin
            rnd0[k] = 2'($urandom_range(0, 3));
            rnd1[k] = 2'($urandom_range(0, 3));
          end
          #1;
          m1x = sb_step(bx0, x, rnd0[0]);
          m1y = sb_step(by0, y, rnd1[0]);
          m2x = sb_step(bx1, m1x, rnd0[1]);
          m2y = sb_step(by1, m1y, rnd1[1]);
          checks++;
          if (x_o !== m2x || y_o !== m2y) begin
            failures++;
            if (failures < 10) $display("FAIL x=%0d y=%0d bit %0d: got %b%b want %b%b", px, py, i, x_o, y_o, m2x, m2y);
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
        en = 1'b0;
        checks++;
        if (nxo - nx < -4 || nxo - nx > 4 || nyo - ny < -4 || nyo - ny > 4) begin
          failures++;
          $display("FAIL value x=%0d y=%0d: X %0d->%0d Y %0d->%0d", px, py, nx, nxo, ny, nyo);
        end
        s1 = scc(a1, b1, c1, N - a1 - b1 - c1);
        s2 = scc(a2, b2, c2, N - a2 - b2 - c2);
        sum1 += s1; sum2 += s2; runs++;
      end
    $display("%s inputs: average SCC one stage %6.3f, two stages %6.3f",
             (mode == 0) ? "VDC   " : "random", sum1 / runs, sum2 / runs);
    if (mode == 1) begin
      checks++;
      if (!(sum1 / runs < 0.25 && sum2 / runs < 0.25)) begin
        failures++;
        $display("FAIL chain does not decorrelate");
      end
    end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
