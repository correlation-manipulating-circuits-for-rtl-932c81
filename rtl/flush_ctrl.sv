// flush_ctrl: end-of-stream flush request for a synchronizer or
// desynchronizer.
//
// Bits that an FSM has saved but not yet paired (or unpaired) when the
// stochastic number ends are lost, which biases the outputs low. The optional
// flush keeps track of where the stream is: a counter t counts the bits
// already processed since `clr`, so 2**W - t bits are left. While `enable` is
// high, `flush` is raised as soon as the number of bits the FSM still holds
// (`n_saved`) is at least the number of bits left. The FSM then stops saving
// new bits and emits what it holds (see the `flush` input of synchronizer and
// desynchronizer).
//
// The comparison of saved bits with the remaining stream length follows the
// published flush idea. Counting up from `clr` and comparing with
// 2**W - t is this design's choice.
//
// Interface/timing: `clr`/`en` are the same run controls the FSM gets. `flush`
// is combinational from the count and `n_saved`, so it acts in the same cycle
// as the bit it refers to. `rst_n` is asynchronous, active low.
module flush_ctrl #(
  parameter int unsigned W  = sc_pkg::RNG_W,   // stream length 2**W
  parameter int unsigned NW = 1                // width of n_saved
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic          enable,
  input  logic [NW-1:0] n_saved,
  output logic          flush
);

  logic [W:0] t_q;        // bits processed so far, 0..2**W
  logic [W:0] left;       // bits left in the stream

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               t_q <= '0;
    else if (clr)             t_q <= '0;
    else if (en && !t_q[W])   t_q <= t_q + 1'b1;
  end

  assign left  = (W+1)'(1 << W) - t_q;
  assign flush = enable && (left != '0) && ((W+1)'(n_saved) >= left);

endmodule
