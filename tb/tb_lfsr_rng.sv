// tb_lfsr_rng: self-checking testbench of the LFSR generator (W = 8).
// Checks that the first output is the seed, that the sequence visits every
// non-zero value exactly once in 255 steps and then repeats (maximal length),
// that each step is the previous state shifted left with the new bit 0 equal
// to the XOR of bits 7, 5, 4 and 3, that a rotated instance outputs the
// rotated state, and that en = 0 holds and clr restarts.
module tb_lfsr_rng;
  logic       clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic [7:0] r, rr;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lfsr_rng #(.W(8), .SEED(8'h5A))           dut  (.clk, .rst_n, .clr, .en, .r(r));
  lfsr_rng #(.W(8), .SEED(8'h5A), .ROT(3))  dutr (.clk, .rst_n, .clr, .en, .r(rr));

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
    bit         seen [256];
    logic [7:0] prev, hold;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(r == 8'h5A, "seed after reset");
    en = 1'b1;
    for (int i = 0; i < 256; i++) seen[i] = 1'b0;
    for (int i = 0; i < 255; i++) begin
      check(r != 8'h00 && !seen[r], "each non-zero value once");
      check(rr == {r[4:0], r[7:5]}, "rotated output");
      seen[r] = 1'b1;
      prev = r;
      @(negedge clk);
      check(r == {prev[6:0], prev[7] ^ prev[5] ^ prev[4] ^ prev[3]}, "shift and feedback");
    end
    check(r == 8'h5A, "period 255");
    en = 1'b0;
    hold = r;
    repeat (3) @(negedge clk);
    check(r == hold, "hold");
    en = 1'b1;
    repeat (7) @(negedge clk);
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    check(r == 8'h5A, "clr restores seed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
