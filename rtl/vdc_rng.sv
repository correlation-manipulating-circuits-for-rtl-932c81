// vdc_rng: Van der Corput (base 2) low-discrepancy number generator.
//
// A W-bit counter steps once per enabled cycle; the output is the counter with
// its bit order reversed (the base-2 radical inverse, scaled to W bits). Over
// any aligned block of 2**k cycles the outputs are spread evenly over the
// range, which makes D/S-converted streams very accurate.
//
// Timing: `r` is combinational from the counter, so the first cycle after
// `clr` (or reset) outputs 0; the counter advances on the rising edge while
// `en` is high.
module vdc_rng #(
  parameter int unsigned W = sc_pkg::RNG_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  output logic [W-1:0] r
);

  logic [W-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    cnt_q <= '0;
    else if (clr)  cnt_q <= '0;
    else if (en)   cnt_q <= cnt_q + 1'b1;
  end

  always_comb begin
    for (int i = 0; i < int'(W); i++) r[i] = cnt_q[W-1-i];
  end

endmodule
