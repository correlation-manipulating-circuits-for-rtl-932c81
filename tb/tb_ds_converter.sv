// tb_ds_converter: self-checking testbench of the D/S converter.
// Exhaustive over b = 0..16 and r = 0..15 for W = 4, and random for W = 8;
// the expected bit is (b > r). Also converts every 8-bit value against the
// full Van der Corput sequence and checks that the stream holds exactly b 1s.
module tb_ds_converter;
  import sc_tb_pkg::*;

  logic [4:0] b4;
  logic [3:0] r4;
  logic       x4;
  logic [8:0] b8;
  logic [7:0] r8;
  logic       x8;
  int checks = 0, failures = 0;

  ds_converter #(.W(4)) dut4 (.b(b4), .r(r4), .x(x4));
  ds_converter #(.W(8)) dut8 (.b(b8), .r(r8), .x(x8));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    for (int b = 0; b <= 16; b++)
      for (int r = 0; r < 16; r++) begin
        b4 = 5'(b); r4 = 4'(r); #1;
        check(x4 == (b > r), "W=4 exhaustive");
      end
    for (int i = 0; i < 2000; i++) begin
      b8 = 9'($urandom_range(256, 0)); r8 = 8'($urandom); #1;
      check(x8 == (int'(b8) > int'(r8)), "W=8 random");
    end
    for (int b = 0; b <= 256; b++) begin
      ones = 0;
      b8 = 9'(b);
      for (int t = 0; t < 256; t++) begin
        r8 = 8'(vdc(t, 8)); #1;
        ones += int'(x8);
      end
      check(ones == b, "stream value = b / 256");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
