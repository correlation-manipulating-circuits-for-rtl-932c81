// tb_decorrelator: self-checking testbench of the decorrelator (two D = 4
// shuffle buffers). X and Y come from the same Van der Corput sequence, so
// they start maximally correlated (SCC ~ 1). rnd0 / rnd1 are independent
// random indices. Checked: each output against a per-buffer reference model
// every cycle, the value of each stream (1s conserved up to the 3 stored
// bits), and that the average output SCC over a grid of values drops below
// 0.5.
module tb_decorrelator;
  import sc_tb_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic       x, y, x_o, y_o;
  logic [1:0] rnd0, rnd1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  decorrelator #(.D(4)) dut (.clk, .rst_n, .clr, .en, .x, .y, .rnd0, .rnd1, .x_o, .y_o);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (500_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic mx [3], my [3];
    int   ix, iy, ox, oy, a, b, c, d, a0, b0, c0, d0, np;
    real  sin_, sout;
    x = 0; y = 0; rnd0 = 0; rnd1 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    sin_ = 0.0; sout = 0.0; np = 0;
    for (int px = 16; px < 256; px += 16) begin
      for (int py = 16; py < 256; py += 48) begin
        clr = 1'b1; @(negedge clk); clr = 1'b0;
        mx[0] = 1; mx[1] = 0; mx[2] = 1;
        my[0] = 1; my[1] = 0; my[2] = 1;
        ix = 2; iy = 2; ox = 0; oy = 0;
        a = 0; b = 0; c = 0; d = 0; a0 = 0; b0 = 0; c0 = 0; d0 = 0;
        for (int t = 0; t < 256; t++) begin
          x = (px > int'(vdc(t, 8)));
          y = (py > int'(vdc(t, 8)));
          rnd0 = 2'($urandom); rnd1 = 2'($urandom);
          #1;
          check(x_o == ((rnd0 == 3) ? x : mx[rnd0]), "X buffer vs model");
          check(y_o == ((rnd1 == 3) ? y : my[rnd1]), "Y buffer vs model");
          if (rnd0 != 3) mx[rnd0] = x;
          if (rnd1 != 3) my[rnd1] = y;
          ix += int'(x); iy += int'(y); ox += int'(x_o); oy += int'(y_o);
          if (x && y) a0++; else if (x) b0++; else if (y) c0++; else d0++;
          if (x_o && y_o) a++; else if (x_o) b++; else if (y_o) c++; else d++;
          @(negedge clk);
        end
        check(ox + int'(mx[0]) + int'(mx[1]) + int'(mx[2]) == ix, "X value kept");
        check(oy + int'(my[0]) + int'(my[1]) + int'(my[2]) == iy, "Y value kept");
        sin_ += scc(a0, b0, c0, d0);
        sout += scc(a, b, c, d);
        np++;
      end
    end
    sin_ /= np; sout /= np;
    $display("avg SCC in %0.3f out %0.3f", sin_, sout);
    check(sin_ > 0.95, "inputs correlated");
    check(sout < 0.5, "outputs decorrelated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
