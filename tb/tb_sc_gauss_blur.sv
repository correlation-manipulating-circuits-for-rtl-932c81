// tb_sc_gauss_blur: self-checking testbench of the stochastic 3x3 Gaussian
// blur. (1) For random 3x3 bit windows and every select value, the output
// must be the window bit that the kernel 1 2 1 / 2 4 2 / 1 2 1 assigns to that
// select value (row-major, each position taking as many select values as
// its weight). (2) For random 8-bit pixel windows converted with a shared
// Van der Corput sequence and a Halton-driven select, the 256-bit output
// stream must be within 0.03 of the exact weighted average.
module tb_sc_gauss_blur;
  import sc_tb_pkg::*;

  logic       win [3][3];
  logic [3:0] sel;
  logic       z;
  int checks = 0, failures = 0;

  sc_gauss_blur dut (.win(win), .sel(sel), .z(z));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #50_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  w [3][3];
    int  pix [3][3];
    int  cum, pos_r, pos_c, ones, exact16;
    real err;
    w = '{'{1, 2, 1}, '{2, 4, 2}, '{1, 2, 1}};
    // (1) structural check
    for (int rep = 0; rep < 200; rep++) begin
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) win[r][c] = 1'($urandom);
      for (int s = 0; s < 16; s++) begin
        cum = 0; pos_r = 0; pos_c = 0;
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++) begin
            if (s >= cum && s < cum + w[r][c]) begin pos_r = r; pos_c = c; end
            cum += w[r][c];
          end
        sel = 4'(s); #1;
        check(z == win[pos_r][pos_c], "select maps to kernel position");
      end
    end
    // (2) value check
    for (int rep = 0; rep < 50; rep++) begin
      exact16 = 0;
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
        pix[r][c] = int'($urandom_range(255, 0));
        exact16 += w[r][c] * pix[r][c];
      end
      ones = 0;
      for (int t = 0; t < 256; t++) begin
        for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++)
          win[r][c] = (pix[r][c] > int'(vdc(t, 8)));
        sel = 4'(halton3(t, 8) >> 4);
        #1;
        ones += int'(z);
      end
      err = absr(real'(ones) / 256.0 - real'(exact16) / 16.0 / 256.0);
      check(err < 0.03, "blur value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
