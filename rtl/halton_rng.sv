// halton_rng: Halton low-discrepancy number generator in base 3, scaled to a
// W-bit output.
//
// A counter of K base-3 digits (K = smallest k with 3**k >= 2**W, so 6 digits
// for W = 8) steps once per enabled cycle, with a ripple carry from digit to
// digit. The digits taken in reverse order form the base-3 radical inverse
// v = sum d_i * 3**(K-1-i), an integer in 0 .. 3**K - 1; the output is
// floor(v * 2**W / 3**K). Being base 3, the sequence is uncorrelated with the
// base-2 Van der Corput sequence, which is how the pair is used.
//
// Timing: `r` is combinational from the digit counter (0 right after `clr`
// or reset); the counter advances on the rising edge while `en` is high.
module halton_rng #(
  parameter int unsigned W = sc_pkg::RNG_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  output logic [W-1:0] r
);

  localparam int unsigned K   = sc_pkg::base3_digits(W);
  localparam longint unsigned P3 = sc_pkg::pow3(K);
  localparam int unsigned VW  = $clog2(P3);          // width of v
  localparam int unsigned PW  = VW + W;              // width of v * 2**W

  logic [1:0] dig_q [K];                             // digit i: weight 3**i

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(K); i++) dig_q[i] <= 2'd0;
    end else if (clr) begin
      for (int i = 0; i < int'(K); i++) dig_q[i] <= 2'd0;
    end else if (en) begin
      logic carry;
      carry = 1'b1;
      for (int i = 0; i < int'(K); i++) begin
        if (carry) begin
          if (dig_q[i] == 2'd2) dig_q[i] <= 2'd0;
          else begin
            dig_q[i] <= dig_q[i] + 2'd1;
            carry = 1'b0;
          end
        end
      end
    end
  end

  always_comb begin
    logic [VW-1:0] v;
    logic [PW-1:0] scaled;
    v = '0;
    for (int i = 0; i < int'(K); i++)
      v = v * VW'(3) + VW'(dig_q[i]);              // digit 0 most significant
    scaled = (PW'(v) << W) / PW'(P3);
    r = scaled[W-1:0];
  end

  initial assert (K <= 40) else $error("halton_rng: W too large");

endmodule
