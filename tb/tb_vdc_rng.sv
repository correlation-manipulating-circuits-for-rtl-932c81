// tb_vdc_rng: self-checking testbench of the Van der Corput base 2 generator.
// Compares the output over 1000 steps (W = 8) and 100 steps (W = 5) with the
// sequence computed independently in floating point / by bit reversal, and
// checks that en = 0 holds the output and clr restarts the sequence.
module tb_vdc_rng;
  import sc_tb_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic [7:0] r8;
  logic [4:0] r5;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  vdc_rng #(.W(8)) dut8 (.clk, .rst_n, .clr, .en, .r(r8));
  vdc_rng #(.W(5)) dut5 (.clk, .rst_n, .clr, .en, .r(r5));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] hold;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      check(int'(r8) == int'(vdc(i, 8)), "W=8 sequence");
      if (i < 100) check(int'(r5) == int'(vdc(i, 5)), "W=5 sequence");
      @(negedge clk);
    end
    en = 1'b0;
    hold = r8;
    repeat (5) @(negedge clk);
    check(r8 == hold, "hold while en low");
    clr = 1'b1; @(negedge clk); clr = 1'b0; en = 1'b1;
    for (int i = 0; i < 20; i++) begin
      check(int'(r8) == int'(vdc(i, 8)), "restart after clr");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
