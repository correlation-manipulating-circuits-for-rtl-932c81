// tb_sync_max: self-checking testbench of the synchronizer-based max.
// Inputs: X from a Van der Corput sequence, Y from a Halton base-3 sequence
// (nearly uncorrelated), N = 256, over a grid of input values.
// Checked: every output bit against a reference built from the published
// D = 1 synchronizer state table followed by the gate; the average absolute
// error against the exact max stays below 0.02 and is well below that of the
// bare gate on the same inputs.
module tb_sync_max;
  import sc_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic x, y, z;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sync_max #(.D(1)) dut (.clk, .rst_n, .clr, .en, .x, .y, .z);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int   s, nz, nplain, np;
    logic x_o, y_o;
    real  err, err_plain;
    x = 0; y = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    err = 0.0; err_plain = 0.0; np = 0;
    for (int px = 0; px <= 256; px += 16) begin
      for (int py = 0; py <= 256; py += 16) begin
        clr = 1'b1; @(negedge clk); clr = 1'b0;
        s = 1; nz = 0; nplain = 0;
        for (int t = 0; t < 256; t++) begin
          x = (px > int'(vdc(t, 8)));
          y = (py > int'(halton3(t, 8)));
          #1;
          // Reference synchronizer (S0 saved X, S1 empty, S2 saved Y).
          x_o = x; y_o = y;
          if (x && !y) begin
            if (s == 2)      begin x_o = 1; y_o = 1; s = 1; end
            else if (s == 1) begin x_o = 0; y_o = 0; s = 0; end
          end else if (!x && y) begin
            if (s == 0)      begin x_o = 1; y_o = 1; s = 1; end
            else if (s == 1) begin x_o = 0; y_o = 0; s = 2; end
          end
          check(z == (x_o | y_o), "output bit vs reference");
          nz += int'(z);
          nplain += (x | y) ? 1 : 0;
          @(negedge clk);
        end
        err       += absr(real'(nz - ((px > py) ? px : py))) / 256.0;
        err_plain += absr(real'(nplain - ((px > py) ? px : py))) / 256.0;
        np++;
      end
    end
    err /= np; err_plain /= np;
    $display("avg abs error: synchronized %0.4f, bare gate %0.4f", err, err_plain);
    check(err < 0.02, "accurate max");
    check(err < err_plain / 4.0, "much better than the bare gate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
