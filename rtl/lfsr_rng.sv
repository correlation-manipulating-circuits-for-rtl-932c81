// lfsr_rng: W-bit maximal-length Fibonacci linear feedback shift register,
// the classic compact pseudo-random source for stochastic computing.
//
// Each enabled cycle the register shifts left by one and the new bit 0 is the
// XOR of the tap bits (taps from sc_pkg::lfsr_taps, a primitive polynomial,
// period 2**W - 1). The output is the register itself, or, with ROT > 0, the
// register rotated left by ROT bits: rotated outputs of one LFSR are a cheap
// way to get further, less correlated, random numbers. SEED must be non-zero.
//
// Timing: `r` is combinational from the register (SEED right after `clr` or
// reset); the register advances on the rising edge while `en` is high.
module lfsr_rng #(
  parameter int unsigned   W    = sc_pkg::RNG_W,
  parameter logic [W-1:0]  SEED = W'(1),
  parameter int unsigned   ROT  = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  output logic [W-1:0] r
);

  localparam logic [W-1:0] TAPS = W'(sc_pkg::lfsr_taps(W));

  logic [W-1:0] s_q;

  initial assert (SEED != '0) else $error("lfsr_rng: SEED must be non-zero");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    s_q <= SEED;
    else if (clr)  s_q <= SEED;
    else if (en)   s_q <= {s_q[W-2:0], ^(s_q & TAPS)};
  end

  always_comb begin
    for (int i = 0; i < int'(W); i++) r[(i + int'(ROT)) % int'(W)] = s_q[i];
  end

endmodule
