// shuffle_buffer: scrambles the bit order of one stochastic number (SN)
// without changing its value, using D-1 one-bit registers and a D-way mux.
//
// Each cycle a random index r (from an external RNG) picks a mux input. For
// r < D-1 the output is register r and register r captures the current input
// bit (a swap of the new bit for a stored one); for r = D-1 the input bit is
// passed straight through and nothing is stored. With the default D = 4 there
// are three registers and mux inputs 0..3, input 3 being the live bit.
// Indices above D-1 (possible when D is not a power of two) also pass.
//
// To reduce the bias from bits left inside the buffer at the end of a stream,
// the registers start half 1s and half 0s; with an odd count the extra
// register starts at 1 (registers with even index start at 1). This pattern is
// this design's choice.
//
// Timing: the output is combinational from `in`, `rnd` and the registers;
// registers load on the rising edge while `en` is high. `clr` (synchronous)
// and `rst_n` (asynchronous, active low) restore the initial pattern.
module shuffle_buffer #(
  parameter int unsigned D  = 4,
  parameter int unsigned RW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic          in,
  input  logic [RW-1:0] rnd,
  output logic          out
);

  localparam int unsigned NR = D - 1;     // number of storage registers

  // Initial contents: 1 at even indices.
  function automatic logic [NR-1:0] init_pattern();
    logic [NR-1:0] p;
    for (int unsigned i = 0; i < NR; i++) p[i] = (i % 2 == 0);
    return p;
  endfunction

  localparam logic [NR-1:0] INIT_BUF = init_pattern();

  logic [NR-1:0] buf_q;
  logic          hit;    // rnd addresses a register

  initial assert (D >= 2) else $error("shuffle_buffer: D must be at least 2");

  assign hit = (32'(rnd) < NR);
  assign out = hit ? buf_q[rnd] : in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          buf_q      <= INIT_BUF;
    else if (clr)        buf_q      <= INIT_BUF;
    else if (en && hit)  buf_q[rnd] <= in;
  end

endmodule
