// synchronizer: raises the positive correlation of two stochastic numbers
// (SNs) X and Y while keeping the value of each.
//
// Whenever the two input bits agree they are passed unchanged. When they
// differ, the lone 1 (or lone 0) cannot be paired in this cycle, so the
// circuit "saves" it: it emits 0,0 and remembers that X (or Y) owes a 1. A
// later cycle in which the other stream has the unpaired bit pays the debt by
// emitting 1,1. The result is that 1s of the two outputs line up as often as
// possible (SCC close to +1).
//
// State: a signed count of saved bits, saved_q, in [-D, +D]. A positive value
// is the number of saved X bits, a negative value the number of saved Y bits.
// With D = 1 the three values are exactly the states S0 (one saved X bit),
// S1 (nothing saved, the initial state) and S2 (one saved Y bit) of the
// published three-state machine; larger D adds states to the left and right
// as the generalised design describes. When the save depth is used up an
// unpaired bit is passed through as it is.
//
// Initial state: INIT (signed, |INIT| <= D) lets a chain of synchronizers
// start with a saved X (INIT > 0) or Y (INIT < 0) bit; 0 is the default.
//
// Flush (optional, this design's interpretation of the described flush): while
// `flush` is high no new bit is saved and every saved bit is emitted at the
// first cycle its own stream has a 0. The caller raises it when the number of
// saved bits, `n_saved`, reaches the number of stream bits left.
//
// Timing: outputs are combinational from the inputs and the state; the state
// advances on the rising clock edge while `en` is high. `clr` (synchronous)
// and `rst_n` (asynchronous, active low) return the state to INIT.
module synchronizer #(
  parameter int unsigned D    = 1,
  parameter int          INIT = 0
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

  localparam int CW = $clog2(D + 1) + 1;   // signed width holding -D..+D
  typedef logic signed [CW-1:0] cnt_t;

  localparam cnt_t DMAX  = cnt_t'(D);
  localparam cnt_t CINIT = cnt_t'(INIT);

  cnt_t saved_q, saved_d;

  initial begin
    assert (D >= 1) else $error("synchronizer: D must be at least 1");
    assert (INIT <= int'(D) && INIT >= -int'(D)) else $error("synchronizer: |INIT| > D");
  end

  always_comb begin
    saved_d = saved_q;
    x_o     = x;
    y_o     = y;
    if (x != y) begin
      if (x) begin
        // Unpaired X bit.
        if (saved_q < 0) begin
          // Pair it with a saved Y bit.
          x_o     = 1'b1;
          y_o     = 1'b1;
          saved_d = saved_q + cnt_t'(1);
        end else if (saved_q < DMAX && !flush) begin
          // Save it.
          x_o     = 1'b0;
          y_o     = 1'b0;
          saved_d = saved_q + cnt_t'(1);
        end
      end else begin
        // Unpaired Y bit.
        if (saved_q > 0) begin
          x_o     = 1'b1;
          y_o     = 1'b1;
          saved_d = saved_q - cnt_t'(1);
        end else if (saved_q > -DMAX && !flush) begin
          x_o     = 1'b0;
          y_o     = 1'b0;
          saved_d = saved_q - cnt_t'(1);
        end
      end
    end else if (flush && !x) begin
      // Both inputs 0: drain one saved bit onto its own stream.
      if (saved_q > 0) begin
        x_o     = 1'b1;
        saved_d = saved_q - cnt_t'(1);
      end else if (saved_q < 0) begin
        y_o     = 1'b1;
        saved_d = saved_q + cnt_t'(1);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      saved_q <= CINIT;
    else if (clr)    saved_q <= CINIT;
    else if (en)     saved_q <= saved_d;
  end

  always_comb begin
    cnt_t mag;
    mag     = (saved_q < 0) ? -saved_q : saved_q;
    n_saved = mag[$clog2(D+1)-1:0];
  end

  // The saved count never leaves [-D, +D].
  a_range: assert property (@(posedge clk) disable iff (!rst_n)
                            saved_q <= DMAX && saved_q >= -DMAX);

endmodule
