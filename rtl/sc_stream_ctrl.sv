// sc_stream_ctrl: run controller shared by the accelerator and the
// evaluation unit. One stochastic-computing run streams 2**W bits, one per
// cycle.
//
// A `start` pulse while idle or done produces a one-cycle `clr` (restart all
// generators, correlation circuits and counters) and enters RUN; in RUN `en`
// is high for exactly 2**W cycles, then `done` rises and stays high until the
// next start. `start` during RUN is ignored. Latency: `done` is first seen
// 2**W + 1 cycles after the start cycle. The handshake is this design's own.
module sc_stream_ctrl #(
  parameter int unsigned W = sc_pkg::RNG_W
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic clr,
  output logic en,
  output logic busy,
  output logic done
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e       state_q;
  logic [W-1:0] cyc_q;

  assign clr  = start && (state_q != S_RUN);
  assign en   = (state_q == S_RUN);
  assign busy = (state_q == S_RUN);
  assign done = (state_q == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cyc_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE, S_DONE: if (start) begin
          state_q <= S_RUN;
          cyc_q   <= '0;
        end
        S_RUN: begin
          cyc_q <= cyc_q + 1'b1;
          if (cyc_q == '1) state_q <= S_DONE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A run lasts exactly 2**W cycles.
  a_run_len: assert property (@(posedge clk) disable iff (!rst_n)
                              (state_q == S_RUN && cyc_q == '1) |=> state_q == S_DONE);

endmodule
