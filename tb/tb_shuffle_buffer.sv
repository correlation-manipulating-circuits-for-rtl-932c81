// tb_shuffle_buffer: self-checking testbench of the shuffle buffer (D = 4).
// A reference model (three stored bits, initial pattern 1,0,1, swap on
// index 0..2, pass on index 3) is compared with the block every cycle for
// random input bits and random indices; the number of 1s is checked to be
// conserved (1s out + 1s stored = 1s in + initial 1s); the buffer is checked
// to actually reorder (output differs from input in some cycles) and to hold
// its contents while `en` is low.
module tb_shuffle_buffer;
  logic       clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic       in, out;
  logic [1:0] rnd;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  shuffle_buffer #(.D(4)) dut (.clk, .rst_n, .clr, .en, .in, .rnd, .out);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic mem [3];
    logic exp_out;
    int   ones_in, ones_out, diffs;
    in = 0; rnd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int rep = 0; rep < 20; rep++) begin
      clr = 1'b1; en = 1'b0; @(negedge clk); clr = 1'b0; en = 1'b1;
      mem[0] = 1; mem[1] = 0; mem[2] = 1;
      ones_in = 2; ones_out = 0; diffs = 0;
      for (int t = 0; t < 256; t++) begin
        in  = 1'($urandom);
        rnd = 2'($urandom);
        #1;
        exp_out = (rnd == 2'd3) ? in : mem[rnd];
        check(out == exp_out, "output vs model");
        if (out != in) diffs++;
        ones_in  += int'(in);
        ones_out += int'(out);
        if (rnd != 2'd3) mem[rnd] = in;
        @(negedge clk);
      end
      check(ones_out + int'(mem[0]) + int'(mem[1]) + int'(mem[2]) == ones_in, "1s conserved");
      check(diffs > 10, "bits reordered");
      // Hold while disabled.
      en = 1'b0;
      for (int t = 0; t < 4; t++) begin
        rnd = 2'(t); in = ~mem[t % 3]; #1;
        if (t < 3) check(out == mem[t], "hold while en low");
        @(negedge clk);
      end
      en = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
