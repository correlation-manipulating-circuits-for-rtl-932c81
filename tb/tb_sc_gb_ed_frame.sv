// tb_sc_gb_ed_frame: whole-image run of the image tile accelerator at its
// default size (10x10 tiles, 8-bit pixels, 256-bit streams).
//
// A synthetic 38x38 grey-scale frame (a horizontal gradient with a bright
// disc and a dark square on it) is cut into 25 overlapping 10x10 tiles at a
// stride of 7 pixels, so the 7x7 edge outputs of neighbouring tiles join up
// into one 35x35 edge image with no gaps and no overlap. The tiles are run
// back to back, each started in the cycle `done` of the previous one is
// seen. The assembled edge image is compared with a floating-point Gaussian
// blur (1 2 1 / 2 4 2 / 1 2 1, /16) followed by a Roberts cross
// (|a-d| + |b-c|) / 2. Checks: 257 cycles per tile, every output pixel
// written exactly once, every pixel within 0.15 of the model, and a whole-
// image mean absolute error below 0.02.
module tb_sc_gb_ed_frame;
  import sc_pkg::*;
  import sc_tb_pkg::*;

  localparam int T  = TILE_DIM;
  localparam int WB = RNG_W;
  localparam int N  = 1 << WB;
  localparam int E  = T - 3;            // edge outputs per tile side (7)
  localparam int NT = 5;                // tiles per frame side
  localparam int F  = E * NT + 3;       // frame side (38)
  localparam int FE = F - 3;            // edge image side (35)

  logic          clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [WB-1:0] tile [T][T];
  logic          busy, done;
  logic [WB:0]   edge_o [E][E];
  logic [1:0]    held [E][E];
  int            checks = 0, failures = 0;

  int            frame [F][F];
  real           result [FE][FE];
  int            written [FE][FE];

  always #5 clk = ~clk;

  sc_gb_ed_accel dut (.clk, .rst_n, .start, .tile_i(tile), .busy, .done,
                      .edge_o, .sync_held_o(held));

  initial begin : watchdog
    repeat (NT * NT * (N + 4) + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic real blur(input int r, input int c);
    int  w [3][3];
    real g;
    w = '{'{1, 2, 1}, '{2, 4, 2}, '{1, 2, 1}};
    g = 0.0;
    for (int p = 0; p < 3; p++)
      for (int q = 0; q < 3; q++)
        g += real'(w[p][q]) * real'(frame[r + p][c + q]);
    return g / 16.0 / real'(N);
  endfunction

  function automatic real model(input int r, input int c);
    return 0.5 * (absr(blur(r, c) - blur(r + 1, c + 1)) + absr(blur(r, c + 1) - blur(r + 1, c)));
  endfunction

  initial begin
    int  lat, dr, dc;
    real e, sum_e, max_e;
    for (int r = 0; r < F; r++)
      for (int c = 0; c < F; c++) begin
        frame[r][c] = 5 * c + 20;
        dr = r - 14; dc = c - 22;
        if (dr * dr + dc * dc <= 64) frame[r][c] = 250;
        if (r >= 24 && r < 33 && c >= 5 && c < 14) frame[r][c] = 0;
      end
    for (int r = 0; r < FE; r++)
      for (int c = 0; c < FE; c++) written[r][c] = 0;
    for (int r = 0; r < T; r++)
      for (int c = 0; c < T; c++) tile[r][c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int ti = 0; ti < NT; ti++)
      for (int tj = 0; tj < NT; tj++) begin
        for (int r = 0; r < T; r++)
          for (int c = 0; c < T; c++) tile[r][c] = WB'(frame[E * ti + r][E * tj + c]);
        start = 1'b1;
        @(negedge clk);
        start = 1'b0;
        lat = 1;
        while (!done) begin
          @(negedge clk);
          lat++;
        end
        check(lat == N + 1, "tile done N+1 cycles after start");
        for (int i = 0; i < E; i++)
          for (int j = 0; j < E; j++) begin
            result[E * ti + i][E * tj + j] = real'(edge_o[i][j]) / real'(N);
            written[E * ti + i][E * tj + j]++;
          end
      end
    sum_e = 0.0; max_e = 0.0;
    for (int r = 0; r < FE; r++)
      for (int c = 0; c < FE; c++) begin
        check(written[r][c] == 1, "edge pixel written once");
        e = absr(result[r][c] - model(r, c));
        check(e < 0.15, "edge pixel close to model");
        sum_e += e;
        if (e > max_e) max_e = e;
      end
    $display("frame %0dx%0d, %0d tiles: mean abs error %0.4f, max %0.4f",
             F, F, NT * NT, sum_e / (FE * FE), max_e);
    check(sum_e / (FE * FE) < 0.02, "whole-image mean error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
