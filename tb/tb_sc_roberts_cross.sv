// tb_sc_roberts_cross: self-checking testbench of the synchronized stochastic
// Roberts cross. (1) Random input bits: every output bit and the two
// "holds a saved bit" flags are compared with a reference built from the
// published D = 1 synchronizer table on the pairs (a, d) and (b, c), two XORs
// and the select mux. (2) Values: a and b from a Van der Corput sequence, c
// and d from a Halton base-3 sequence (so each diagonal pair starts
// uncorrelated), select a random bit; the output must be within 0.04 of
// 0.5 (|p_a - p_d| + |p_b - p_c|) on average over many windows.
module tb_sc_roberts_cross;
  import sc_tb_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic       a, b, c, d, sel, z;
  logic [1:0] held;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sc_roberts_cross #(.D(1)) dut (.clk, .rst_n, .clr, .en, .a, .b, .c, .d, .sel, .z, .held);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Reference D = 1 synchronizer: 0 = saved X, 1 = empty, 2 = saved Y.
  function automatic void sync_ref(inout int s, input logic x, input logic y,
                                   output logic xo, output logic yo);
    xo = x; yo = y;
    if (x && !y) begin
      if (s == 2)      begin xo = 1; yo = 1; s = 1; end
      else if (s == 1) begin xo = 0; yo = 0; s = 0; end
    end else if (!x && y) begin
      if (s == 0)      begin xo = 1; yo = 1; s = 1; end
      else if (s == 1) begin xo = 0; yo = 0; s = 2; end
    end
  endfunction

  initial begin : watchdog
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int   s_ad, s_bc, ones, pa, pb, pc, pd, nw;
    logic ao, dO, bo, co;
    real  err, exact;
    {a, b, c, d, sel} = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    // (1) exact comparison
    s_ad = 1; s_bc = 1;
    for (int i = 0; i < 5000; i++) begin
      {a, b, c, d, sel} = 5'($urandom);
      #1;
      check(held == {s_bc != 1, s_ad != 1}, "held flags");
      sync_ref(s_ad, a, d, ao, dO);
      sync_ref(s_bc, b, c, bo, co);
      check(z == (sel ? (bo ^ co) : (ao ^ dO)), "output bit");
      @(negedge clk);
    end
    // (2) value check
    err = 0.0; nw = 0;
    for (int rep = 0; rep < 60; rep++) begin
      pa = int'($urandom_range(255, 0)); pb = int'($urandom_range(255, 0));
      pc = int'($urandom_range(255, 0)); pd = int'($urandom_range(255, 0));
      clr = 1'b1; @(negedge clk); clr = 1'b0;
      ones = 0;
      for (int t = 0; t < 256; t++) begin
        a = (pa > int'(vdc(t, 8)));     b = (pb > int'(vdc(t, 8)));
        c = (pc > int'(halton3(t, 8))); d = (pd > int'(halton3(t, 8)));
        sel = 1'($urandom);
        #1;
        ones += int'(z);
        @(negedge clk);
      end
      exact = 0.5 * (absr(real'(pa - pd)) + absr(real'(pb - pc))) / 256.0;
      err += absr(real'(ones) / 256.0 - exact);
      nw++;
    end
    err /= nw;
    $display("avg abs error %0.4f", err);
    check(err < 0.04, "edge value");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
