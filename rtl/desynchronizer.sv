// desynchronizer: raises the negative correlation of two stochastic numbers
// (SNs) X and Y while keeping the value of each.
//
// Inputs that already differ (X ^ Y = 1) are passed. When both inputs are 1
// the circuit keeps one of the two 1s back (emits 0 on that stream) and passes
// the other; when both are 0 it spends a kept-back 1 on one stream. The 1s of
// the two outputs therefore overlap as little as possible (SCC towards -1).
//
// State: sx_q / sy_q count the kept-back X and Y bits (sx_q + sy_q <= D) and
// turn_q says which stream is saved from next; it flips after every save so
// that X and Y take turns. With D = 1 the reachable states are the four states
// of the published machine: S0 = {empty, save X next} (initial), S1 = {one X
// bit saved}, S2 = {empty, save Y next}, S3 = {one Y bit saved}, with the same
// outputs on every transition. For D > 1 (this design's generalisation) a
// 0,0 pair spends a bit of the stream holding more saved bits, X on a tie; a
// 1,1 pair with a full store is passed as 1,1.
//
// INIT_SX / INIT_SY / INIT_TURN set the initial state (default S0). `flush`
// (optional) stops new saves and emits each saved bit at the first cycle its
// own stream has a 0; `n_saved` is the number of bits held.
//
// Timing: outputs are combinational from the inputs and the state; the state
// advances on the rising clock edge while `en` is high. `clr` (synchronous)
// and `rst_n` (asynchronous, active low) restore the initial state.
module desynchronizer #(
  parameter int unsigned D         = 1,
  parameter int unsigned INIT_SX   = 0,
  parameter int unsigned INIT_SY   = 0,
  parameter bit          INIT_TURN = 1'b0   // 0: next save is an X bit
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     en,
  input  logic                     flush,
  input  logic                     x,
  input  logic                     y,
  output logic                     x_o,
  output logic                     y_o,
  output logic [$clog2(D+1)-1:0]   n_saved
);

  localparam int CW = $clog2(D + 1);
  typedef logic [CW-1:0] cnt_t;

  cnt_t sx_q, sy_q, sx_d, sy_d;
  logic turn_q, turn_d;

  initial begin
    assert (D >= 1) else $error("desynchronizer: D must be at least 1");
    assert (INIT_SX + INIT_SY <= D) else $error("desynchronizer: initial store exceeds D");
  end

  always_comb begin
    logic [CW:0] total;
    total  = {1'b0, sx_q} + {1'b0, sy_q};
    sx_d   = sx_q;
    sy_d   = sy_q;
    turn_d = turn_q;
    x_o    = x;
    y_o    = y;
    if (flush) begin
      // Drain: no saves, emit saved bits wherever their stream is 0.
      if (!x && sx_q != '0) begin
        x_o  = 1'b1;
        sx_d = sx_q - cnt_t'(1);
      end
      if (!y && sy_q != '0) begin
        y_o  = 1'b1;
        sy_d = sy_q - cnt_t'(1);
      end
    end else if (x && y) begin
      if (total < (CW+1)'(D)) begin
        if (!turn_q) begin
          x_o  = 1'b0;              // keep the X bit
          sx_d = sx_q + cnt_t'(1);
        end else begin
          y_o  = 1'b0;              // keep the Y bit
          sy_d = sy_q + cnt_t'(1);
        end
        turn_d = ~turn_q;
      end
    end else if (!x && !y) begin
      if (sx_q != '0 && sx_q >= sy_q) begin
        x_o  = 1'b1;                // emit a saved X bit
        sx_d = sx_q - cnt_t'(1);
      end else if (sy_q != '0) begin
        y_o  = 1'b1;                // emit a saved Y bit
        sy_d = sy_q - cnt_t'(1);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sx_q   <= cnt_t'(INIT_SX);
      sy_q   <= cnt_t'(INIT_SY);
      turn_q <= INIT_TURN;
    end else if (clr) begin
      sx_q   <= cnt_t'(INIT_SX);
      sy_q   <= cnt_t'(INIT_SY);
      turn_q <= INIT_TURN;
    end else if (en) begin
      sx_q   <= sx_d;
      sy_q   <= sy_d;
      turn_q <= turn_d;
    end
  end

  always_comb begin
    logic [CW:0] total;
    total   = {1'b0, sx_q} + {1'b0, sy_q};
    n_saved = total[CW-1:0];
  end

  a_store: assert property (@(posedge clk) disable iff (!rst_n)
                            ({1'b0, sx_q} + {1'b0, sy_q}) <= (CW+1)'(D));

endmodule
