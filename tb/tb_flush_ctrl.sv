// tb_flush_ctrl: self-checking testbench of the end-of-stream flush request.
//
// Runs several streams of 2**W = 256 bits with random `en` pauses, a random
// `enable` and a random count of saved bits (0..3, NW = 2), and checks
// `flush` every cycle against a reference: after k bits of the stream,
// flush = enable && n_saved >= 256 - k, and never once the stream is over.
// It also checks that `clr` restarts the count in the middle of a stream and
// that flush was seen both high and low.
module tb_flush_ctrl;
  localparam int W = 8;
  localparam int N = 1 << W;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       clr, en, enable, flush;
  logic [1:0] n_saved;
  int         checks = 0, failures = 0, n_high = 0;

  always #5 clk = ~clk;

  flush_ctrl #(.W(W), .NW(2)) dut (.clk, .rst_n, .clr, .en, .enable, .n_saved, .flush);

  initial begin : watchdog
    repeat (20_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, len;
    clr = 1'b0; en = 1'b0; enable = 1'b0; n_saved = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 8; run++) begin
      clr = 1'b1; en = 1'b0;
      @(negedge clk);
      clr = 1'b0;
      k = 0;
      len = (run == 3) ? 100 : N + 20;     // run 3 is cut short by the next clr
      while (k < len) begin
        en      = ($urandom_range(0, 7) != 0);
        enable  = (run == 0) ? 1'b0 : ($urandom_range(0, 5) != 0);
        n_saved = 2'($urandom_range(0, 3));
        #1;
        checks++;
        if (flush !== (enable && k < N && int'(n_saved) >= N - k)) begin
          failures++;
          if (failures < 10)
            $display("FAIL run %0d bit %0d: enable %b n_saved %0d flush %b", run, k, enable, n_saved, flush);
        end
        if (flush) n_high++;
        @(negedge clk);
        if (en) k++;
      end
    end
    checks++;
    if (n_high == 0) begin
      failures++;
      $display("FAIL flush never raised");
    end
    $display("flush raised in %0d cycles", n_high);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
