// sd_converter: stochastic-to-digital (S/D) converter, a counter of the 1s in
// a stochastic number. After a stream of 2**W bits the count (0 .. 2**W) is
// the binary value of the stream scaled by 2**W; the counter is W+1 bits wide
// so that an all-ones stream does not wrap.
//
// Timing: `count` is registered; it increments on the rising edge when `en`
// and `x` are high. `clr` (synchronous) and `rst_n` (asynchronous, active low)
// zero it. The counter saturates at its maximum rather than wrapping (this
// design's choice; it is only reached by an all-ones stream longer than 2**W).
module sd_converter #(
  parameter int unsigned W = sc_pkg::RNG_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  input  logic         x,
  output logic [W:0]   count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       count <= '0;
    else if (clr)                     count <= '0;
    else if (en && x && count != '1)  count <= count + 1'b1;
  end

endmodule
