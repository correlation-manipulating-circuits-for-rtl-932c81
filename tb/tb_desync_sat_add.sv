// tb_desync_sat_add: self-checking testbench of the desynchronizer-based
// saturating adder. Inputs X and Y are both generated from the Halton base-3
// sequence, so they start positively correlated: the worst case for a bare
// OR gate. Checked: every output bit against a reference made of the
// published D = 1 desynchronizer state table and an OR gate, and an average
// absolute error against min(1, p_X + p_Y) below 0.02 and well below that of
// the bare OR gate.
module tb_desync_sat_add;
  import sc_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic x, y, z;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  desync_sat_add #(.D(1)) dut (.clk, .rst_n, .clr, .en, .x, .y, .z);

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
    int   s, nz, nplain, np, exact;
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
        s = 0; nz = 0; nplain = 0;
        for (int t = 0; t < 256; t++) begin
          x = (px > int'(halton3(t, 8)));
          y = (py > int'(halton3(t, 8)));
          #1;
          x_o = x; y_o = y;
          if (x == y) begin
            case (s)
              0: if (x) begin x_o = 0; s = 1; end
              1: if (!x) begin x_o = 1; s = 2; end
              2: if (x) begin y_o = 0; s = 3; end
              3: if (!x) begin y_o = 1; s = 0; end
              default: ;
            endcase
          end
          check(z == (x_o | y_o), "output bit vs reference");
          nz += int'(z);
          nplain += (x | y) ? 1 : 0;
          @(negedge clk);
        end
        exact = (px + py > 256) ? 256 : px + py;
        err       += absr(real'(nz - exact)) / 256.0;
        err_plain += absr(real'(nplain - exact)) / 256.0;
        np++;
      end
    end
    err /= np; err_plain /= np;
    $display("avg abs error: desynchronized %0.4f, bare OR %0.4f", err, err_plain);
    check(err < 0.02, "accurate saturating add");
    check(err < err_plain / 4.0, "much better than the bare OR gate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
