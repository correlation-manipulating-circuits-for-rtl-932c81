# Correlation manipulating circuits for stochastic computing

Stochastic computing (SC) encodes a number p in [0, 1] as a serial bitstream
whose fraction of 1s is p. A stream like this is called a stochastic number
(SN). The arithmetic is very cheap: one AND gate multiplies, one multiplexer
adds. The catch is that an SC gate computes the intended function only if its
input streams have the right *correlation*. Take an AND gate:

| inputs | AND computes |
|---|---|
| uncorrelated | p_X · p_Y |
| maximally positively correlated (1s overlap as much as possible) | min(p_X, p_Y) |
| maximally negatively correlated (1s overlap as little as possible) | max(0, p_X + p_Y − 1) |

Correlation is normally set once, when the streams are generated. Streams
that share a random number generator (RNG) are positively correlated. Streams
from independent generators are uncorrelated. Inside a pipeline, however, the
correlation drifts from stage to stage. The usual repair, *regeneration*,
counts a stream back to binary and re-encodes it, and that costs far more than
the arithmetic.

This RTL implements small sequential circuits that change the correlation of
a pair of streams mid-computation and leave each stream's value alone. The
first two need no random source at all:

* the **synchronizer** pushes two streams towards correlation +1;
* the **desynchronizer** pushes them towards −1;
* the **decorrelator** pushes them towards 0.

It also implements the operators built from these circuits (maximum, minimum
and saturating add), the stream sources and converters around them, and two
complete units:

* an image tile accelerator (Gaussian blur, then synchronizers, then a Roberts
  cross edge detector);
* an evaluation unit that measures all the circuits with selectable input
  streams.

The circuits follow V. T. Lee, A. Alaghi and L. Ceze, "Correlation Manipulating
Circuits for Stochastic Computing". The last section lists what
this RTL adds and where it departs from that work.

## Measuring correlation

For two N-bit streams, count the positions where both are 1 (a), only X is 1
(b), only Y is 1 (c) and both are 0 (d). The stochastic computing correlation
is

    SCC = (ad − bc) / (N·min(a+b, a+c) − (a+b)(a+c))     if ad > bc
    SCC = (ad − bc) / ((a+b)(a+c) − N·max(a−d, 0))       otherwise

Its range is [−1, +1]. Every testbench computes it with `sc_tb_pkg::scc`. The
evaluation unit (below) counts X', Y' and X'&Y' in hardware, which is enough to
compute it: a = XY, b = X − XY, c = Y − XY, d = N − a − b − c.

All streams here are N = 2^W = 256 bits long (W = 8). The design is
synchronous: one stream bit per clock.

## The synchronizer (`synchronizer.sv`)

Idea: if X and Y disagree in a cycle, hold the lone bit back. Later, when they
disagree the other way round, release it together with the other stream's
lone bit. Agreeing bits always pass untouched. Each stream's count of 1s is
preserved, but the 1s are moved so they line up.

The published circuit has save depth D = 1 and three states. Here, S0 means
one X bit is saved, S1 means nothing is saved (the reset state), and S2 means
one Y bit is saved:

| state | X Y = 00 / 11 | X Y = 10 | X Y = 01 |
|---|---|---|---|
| S1 | pass, stay | out 00 → S0 (save X) | out 00 → S2 (save Y) |
| S0 | pass, stay | out 10, stay (store full) | out 11 → S1 (pair) |
| S2 | pass, stay | out 11 → S1 (pair) | out 01, stay (store full) |

The RTL does not encode these states directly. It holds a signed count
`saved_q` in [−D, +D]: positive values count saved X bits, negative values
count saved Y bits. With D = 1 the count's three values are exactly S0, S1 and
S2. A larger D adds states on both sides, as the generalised design describes.
A deeper store helps when the streams contain long runs of 1s or 0s.

The outputs are combinational from the current inputs and the state, so the
circuit adds no latency. Two optional features the original work mentions are
built in:

* **Initial state (`INIT`).** The synchronizer can start with saved bits
  (positive = X, negative = Y). This helps when synchronizers are chained in
  series.
* **Flush (`flush` input, `n_saved` output, `flush_ctrl.sv`).** Any saved
  bit that has not been paired when the stream ends is lost, so the output
  values come out slightly low. This is the small negative bias seen in every
  measurement. While `flush` is high, nothing new is saved, and each saved bit
  is emitted at the first 0 of its own stream. `flush_ctrl` drives `flush`:
  it counts the bits already processed, t, and raises `flush` once `n_saved`
  is at least the number of bits left, 2^W − t. The evaluation unit can switch
  this on. The accelerator does not use it.

## The desynchronizer (`desynchronizer.sv`)

This is the mirror image. When both inputs are 1, keep one of the two 1s back
and pass the other. When both inputs are 0, spend a kept-back 1 on its own
stream. Inputs that already differ pass unchanged. The result is that 1s
overlap as little as possible.

The published D = 1 machine has four states on a cycle, and alternates which
stream gives up its bit:

| state | X ≠ Y | 11 | 00 |
|---|---|---|---|
| S0 (reset, empty, X next) | pass | out 01 → S1 | out 00 |
| S1 (X bit held) | pass | out 11 | out 10 → S2 |
| S2 (empty, Y next) | pass | out 10 → S3 | out 00 |
| S3 (Y bit held) | pass | out 11 | out 01 → S0 |

The RTL uses counts `sx_q` and `sy_q` of held X and Y bits (`sx_q + sy_q ≤ D`)
and a `turn_q` bit that picks the stream to save from next. With D = 1 these
reproduce the table exactly. The testbench checks the RTL cycle by cycle
against the table. The rule for D > 1 is this design's own:

* saves alternate between X and Y;
* a 0,0 pair spends a bit from the stream holding more, X on a tie.

`flush` and the initial-state parameters work as in the synchronizer.

## Chains (`sync_series.sv`, `desync_series.sv`, `decor_series.sv`)

A depth-1 circuit runs out of store in long runs of unpaired bits, and a
deeper FSM costs more states. The other way to get a stronger effect is to
put several depth-1 circuits in series. Each stage fixes part of what the
previous stage missed, with diminishing returns.

Every stage can strand a bit at the end of the stream, so the losses add up
along a chain. To offset this, every stage after the first starts with one
saved bit of its own (`PRELOAD`):

* stage 1 starts with an X bit;
* stage 2 starts with a Y bit;
* later stages keep alternating.

In the desynchronizer chain, a stage that starts holding an X bit starts in
S1, and a stage holding a Y bit starts in S3.

Decorrelators chain the same way (`decor_series`). Each stage has its own
pair of shuffle buffers and needs its own pair of random indices.

The default is two stages (`STAGES = 2`). All chains are combinational from
input to output, like a single stage.

## The decorrelator (`shuffle_buffer.sv`, `decorrelator.sv`)

The decorrelator reorders each stream independently with its own **shuffle
buffer**. With the default depth D = 4, a shuffle buffer has three 1-bit
registers and a 4-way mux, both addressed by a random index `rnd` from 0 to 3:

* `rnd` = 0, 1 or 2: the output is register `rnd`, and that register loads the
  current input bit. The new bit is swapped for an old one.
* `rnd` = 3: the input passes straight through.

A bit can therefore stay inside the buffer for many cycles, which scrambles
the order of bits over segments longer than D. The two buffers of a
decorrelator get different random sources (`rnd0`, `rnd1`). If they shared
one, they would reorder both streams identically and the correlation would
survive.

Bits still inside a buffer when the stream ends are lost. To balance this,
registers start half at 1 and half at 0. With three registers, registers 0 and
2 start at 1.

## Operators (`sync_max.sv`, `sync_min.sv`, `desync_sat_add.sv`)

* **Maximum:** synchronizer, then OR. With fully aligned 1s, the smaller
  stream's 1s hide under the larger stream's 1s.
* **Minimum:** synchronizer, then AND.
* **Saturating add, min(1, p_X + p_Y):** desynchronizer, then OR. OR adds
  exactly when the 1s never overlap.

Each operator is a single instance plus one gate. The value of the circuit is
entirely in the correlation it creates.

## Stream sources and converters

| module | function |
|---|---|
| `ds_converter` | D/S conversion: the output bit is `b > r`. `b` is W+1 bits wide, so values 0 to 2^W (0/N to N/N) are all possible. |
| `sd_converter` | S/D conversion: a W+1-bit counter of 1s that saturates rather than wraps. |
| `vdc_rng` | Van der Corput base 2: a bit-reversed counter. Over any aligned block of 2^k cycles its values are spread perfectly evenly. |
| `halton_rng` | Halton base 3: a counter of K base-3 digits (K = 6 for W = 8, since 3^6 = 729 ≥ 256) with a ripple carry. The output is the digit-reversed value v scaled as floor(v · 2^W / 3^K). |
| `lfsr_rng` | Maximal-length Fibonacci LFSR (x^8+x^6+x^5+x^4+1 for W = 8), with an optional output rotation `ROT`. Taps for widths 4 to 16 are in `sc_pkg::lfsr_taps`. |

VDC and Halton-3 are low-discrepancy sequences, which makes the streams very
accurate. Because they use different bases, they are nearly uncorrelated with
each other. Two streams from the same generator are positively correlated.

## The image tile accelerator (`sc_gb_ed_accel.sv`)

This is the pipeline the correlation circuits were designed for. The Gaussian
blur needs a random select that is uncorrelated with its data. The Roberts
cross edge detector uses XOR gates as subtractors, and XOR computes
|p_X − p_Y| only when its two inputs are maximally positively correlated. The
blur outputs are not correlated that way, so synchronizers sit between the two
stages.

For one TILE × TILE tile (default 10 × 10, 8-bit pixels), all outputs are
computed in parallel over N = 256 cycles:

1. **D/S conversion.** There are 100 comparators. All compare against one
   shared VDC number.
2. **Blur.** 8 × 8 outputs. Each is a 16-input mux whose inputs are wired to
   the 3 × 3 window as often as the binomial kernel weights
   (1 2 1 / 2 4 2 / 1 2 1, /16). All 64 muxes share a 4-bit select: the top 4
   bits of a Halton-3 number.
3. **Edge detection.** 7 × 7 outputs, each computing
   z = ½(|a − d| + |b − c|) for the blur window `a b / c d`. Each diagonal
   pair goes through its own synchronizer (98 in total) and then an XOR. A
   2-way mux selected by the LFSR's top bit adds the two differences.
4. **S/D conversion.** 49 counters.

Edge output (r, c) uses blur outputs (r..r+1, c..c+1). Blur output (r, c) is
centred on pixel (r+1, c+1).

**Control (`sc_stream_ctrl.sv`).**

* A `start` pulse while idle or done clears every generator, synchronizer and
  counter in that same cycle.
* `busy` is then high for exactly 256 cycles.
* `done` then rises (257 cycles after the start cycle), and `edge_o` holds the
  counts (value = count/256).
* A new `start` may be issued in the cycle `done` is seen.
* To cover a whole image, step the tile origin by TILE − 3 = 7 pixels. The
  7 × 7 outputs of neighbouring tiles then join without gaps or overlap. A `start` during
  `busy` is ignored.
* `tile_i` must stay stable while `busy` is high; the tile is not buffered.
* `sync_held_o` shows which synchronizers currently hold a saved bit. It is
  for observation only.

## The evaluation unit (`sc_corr_eval.sv`) and the top (`sc_corr_top.sv`)

The stand-alone circuits are placed on the top through an evaluation unit.
For one run:

* Two binary values (0 to 256) are converted to streams. Each stream uses a
  generator chosen with `sc_pkg::rng_sel_e` (VDC, Halton or LFSR). There is
  one shared instance of each generator, so picking the same generator for
  both streams gives correlated inputs.
* The streams feed these circuits in parallel: a synchronizer, a
  desynchronizer, a decorrelator, the max, min and saturating-add operators,
  and two-stage chains of synchronizers, desynchronizers and decorrelators.
* `flush_en` switches on the end-of-stream flush of the single synchronizer
  and desynchronizer.
* 24 counters (`sc_pkg::cnt_idx_e`) record the 1s of X, Y and X&Y at the
  inputs and at each two-output circuit, and the 1s of each operator's
  output.
* The decorrelator's random indices come from two extra LFSRs (seeds 0x2D and
  0xC3). The decorrelator chain's second stage uses two more (0x5A and 0x97).
* It uses the same start/busy/done control as the accelerator.

`sc_corr_top` instantiates the accelerator and the evaluation unit side by
side. They share only the clock and reset, and their ports carry `acc_` and
`ev_` prefixes.

## Measured behaviour

These figures come from the testbenches at N = 256 (`tb_sc_corr_eval`), each
averaged over a grid of input values. The original publication's numbers are
in brackets.

| inputs X/Y | input SCC | synchronizer | desynchronizer | decorrelator |
|---|---|---|---|---|
| VDC / Halton | −0.02 | 0.999 [0.996] | −0.980 [−0.981] | — |
| LFSR / VDC | 0.01 | 0.914 [0.903] | −0.777 [−0.788] | — |
| Halton / Halton | 1.00 | 1.000 [0.992] | −0.928 [−0.930] | 0.051 [0.067] |
| LFSR / LFSR | 1.00 | — | — | 0.329 [0.249] |
| VDC / VDC | 1.00 | — | — | 0.147 [0.168] |

* The bias of every output stream is within ±0.004.
* With VDC/Halton inputs, the operator testbenches (289 value pairs each)
  measure an average absolute error of 0.002 for the maximum [0.003] against
  0.077 for a bare OR [0.087], and 0.003 for the minimum [0.005] against 0.071
  for a bare AND [0.082]. The saturating add reaches 0.013 against 0.143 for a
  bare OR. The evaluation unit's 64-pair grid gives 0.002, 0.003 and 0.006.
* With LFSR/VDC inputs, the evaluation unit gives 0.012 (maximum), 0.012
  (minimum) and 0.027 (saturating add). A pseudo-random stream is less even,
  so the FSMs run out of state more often.
* The accelerator's edge outputs are within a mean 0.002 to 0.008 of a
  floating-point model of the same blur and edge pipeline on structured tiles
  (edges, gradients). On pixel-level white noise they are within 0.04. A
  whole synthetic 38 × 38 image, run as 25 overlapping tiles, comes out with
  a mean error of 0.006 and a worst pixel of 0.032 (`tb_sc_gb_ed_frame`). The
  original work reports an average absolute error of 0.020 on a whole image
  for its synchronizer-based accelerator [0.076 without any correlation
  manipulation]. That image is not available here, so the figures cannot be
  compared directly.

Two-stage chains (average SCC, single stage in brackets):

| inputs X/Y | synchronizer chain | desynchronizer chain | decorrelator chain |
|---|---|---|---|
| VDC / Halton | 1.000 (0.999) | −0.999 (−0.980) | — |
| LFSR / VDC | 0.961 (0.914) | −0.885 (−0.777) | — |
| Halton / Halton | 1.000 (1.000) | −0.986 (−0.928) | −0.047 (0.051) |
| LFSR / LFSR | 1.000 (1.000) | −0.274 (0.056) | 0.257 (0.329) |
| VDC / VDC | — | — | −0.041 (0.147) |

A second decorrelator stage is not always better. With VDC-generated inputs
and independent uniform indices, one stage leaves an SCC of 0.31 and two
stages leave 0.42 (`tb_decor_series`). VDC bit patterns are periodic, and
short random delays can line them up again. With shared uniform random
inputs, both one and two stages bring the SCC down to about 0.10.

The average bias of the chains stays within ±0.002. Across all 320 runs with
the flush switched on, the synchronizer and desynchronizer together lose 333
bits instead of 422.

The decorrelator numbers depend on the random source that addresses the
shuffle buffers. The testbenches use independent random indices, and the
evaluation unit uses its two LFSRs.

## What is this design's own

The three circuits, the shuffle buffer, the three operators and the D/S and
S/D converters follow the published design: the state machines cell for cell,
the shuffle buffer with depth 4 and three registers, and the gates named for
each operator. The following are choices made here:

* **Larger save depths.** The counter form of the synchronizer for D > 1
  follows the published description. The desynchronizer's rule for D > 1 is
  new.
* **Flush.** The reading of "emit the saved bits regardless of state": stop
  saving, and emit each saved bit at the next 0 of its own stream.
* **Chains.** Two stages, the alternating X/Y preload of later stages, and
  the index sources of the decorrelator chain.
* **Shuffle buffer start pattern.** 1, 0, 1.
* **Generators.** The generator circuits, the LFSR polynomial and seeds, and
  which generator feeds which stage.
* **Accelerator.** The blur kernel and mux form, the XOR/mux form of the edge
  detector, the 8 × 8 blur and 7 × 7 edge outputs per 10 × 10 tile, and the
  start/busy/done handshake. The original work names the two kernels but not
  their circuits, so this accelerator may differ in detail from the one that
  was evaluated.
* **Evaluation unit and top.** These are this design's arrangement. They
  mirror the way the circuits were characterised.
* **Reset.** Asynchronous active-low `rst_n` everywhere, plus a synchronous
  `clr` that restarts a stream.

Not included:

* the regeneration and "no manipulation" versions of the accelerator, which
  are only comparison points;
* isolators and tracking forecast memories, also comparison points;
* whatever splits a frame into tiles;
* the 65 nm physical implementation.

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<m>`. To build and run one with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps \
        -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/sc_pkg.sv tb/sc_tb_pkg.sv tb/tb_sc_corr_top.sv \
        --top-module tb_sc_corr_top -o sim
    obj_dir/sim

Replace `tb_sc_corr_top` with any other `tb/tb_*.sv`. The packages
`sc_pkg` and `sc_tb_pkg` must be listed first. The rest is found through `-y`.

| testbench | what it covers | run time |
|---|---|---|
| `tb_sc_corr_top` | The whole design at default size: six tiles and nine generator pairs running concurrently, every other pair with flush. It counts synchronizer saves and pairings, bits left held, back-to-back and ignored starts, flushed runs, and runs where a chain beat one stage. | under 1 s |
| `tb_sc_gb_ed_accel` | The accelerator alone, 8 tiles. | under 1 s |
| `tb_sc_gb_ed_frame` | A whole 38 × 38 image through the accelerator: 25 tiles at stride 7, assembled into a 35 × 35 edge image. | under 1 s |
| `tb_sc_corr_eval` | The correlation experiments above: 5 generator pairs × 64 value pairs, each run without and with flush. | about 1 s |
| `tb_decor_series` | Cycle-exact against four shuffle-buffer models; values; SCC. | |
| `tb_sync_series`, `tb_desync_series` | Cycle-exact against two chained table models; the SCC never worse than one stage. | |
| `tb_flush_ctrl` | The flush request every cycle, against the remaining-bits rule. | |
| `tb_synchronizer`, `tb_desynchronizer` | Cycle-exact against the state tables; value preservation; SCC; flush; initial state. | |
| `tb_sync_max`, `tb_sync_min`, `tb_desync_sat_add` | Bit-exact reference and average error over 289 input pairs. | |
| other `tb_*` | One per module. | |

Parameters worth changing:

* `W`: stream length 2^W;
* `TILE`: tile side;
* `D` / `SYNC_D` / `DESYNC_D`: save depth;
* `SHUF_D`: shuffle buffer depth;
* `STAGES`: chain length.

The assertion in `sc_stream_ctrl` checks the run length. The assertions in the
synchronizer and desynchronizer check that their stores stay within D.
