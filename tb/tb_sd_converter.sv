// tb_sd_converter: self-checking testbench of the S/D converter (W = 8).
// Random streams of 256 bits with known numbers of 1s; checks the final
// count, that en = 0 holds the count, that clr zeroes it, that an all-ones
// stream counts to 256 and that a longer one saturates at 511.
module tb_sd_converter;
  logic       clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0, x = 1'b0;
  logic [8:0] count;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sd_converter #(.W(8)) dut (.clk, .rst_n, .clr, .en, .x, .count);

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
    int ones;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(count == 0, "reset");
    for (int rep = 0; rep < 40; rep++) begin
      clr = 1'b1; @(negedge clk); clr = 1'b0;
      check(count == 0, "clr");
      ones = 0;
      en = 1'b1;
      for (int t = 0; t < 256; t++) begin
        x = 1'($urandom);
        ones += int'(x);
        @(negedge clk);
      end
      en = 1'b0;
      x = 1'b1;
      repeat (3) @(negedge clk);
      check(int'(count) == ones, "count of 1s");
    end
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    en = 1'b1; x = 1'b1;
    repeat (256) @(negedge clk);
    check(count == 9'd256, "all-ones stream");
    repeat (300) @(negedge clk);
    check(count == 9'd511, "saturates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
