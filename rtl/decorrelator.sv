// decorrelator: lowers the correlation between two stochastic numbers X and Y
// by passing each through its own shuffle buffer, addressed by its own random
// source (rnd0 for X, rnd1 for Y). Because the two streams are reordered
// independently, bit positions that used to line up no longer do, while the
// number of 1s in each stream is kept (apart from bits still held in a buffer
// when the stream ends).
//
// Interface: two SN inputs, two RW-bit random indices, two SN outputs.
// Timing: combinational in-to-out through each buffer's mux; the buffers
// update on the rising edge while `en` is high (see shuffle_buffer).
// The two-buffer structure and default depth D = 4 follow the published
// design; rnd0 and rnd1 must come from different, uncorrelated generators.
module decorrelator #(
  parameter int unsigned D  = 4,
  parameter int unsigned RW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic          x,
  input  logic          y,
  input  logic [RW-1:0] rnd0,
  input  logic [RW-1:0] rnd1,
  output logic          x_o,
  output logic          y_o
);

  shuffle_buffer #(.D(D), .RW(RW)) u_sb_x (
    .clk, .rst_n, .clr, .en, .in(x), .rnd(rnd0), .out(x_o)
  );

  shuffle_buffer #(.D(D), .RW(RW)) u_sb_y (
    .clk, .rst_n, .clr, .en, .in(y), .rnd(rnd1), .out(y_o)
  );

endmodule
