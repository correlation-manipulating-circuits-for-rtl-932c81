// sc_pkg: constants and helper functions shared by the stochastic-computing
// (SC) correlation circuits and the image-processing tile accelerator.
//
// A stochastic number (SN) is a serial bitstream; its value is the fraction of
// 1s over a stream of SN_LEN = 2**RNG_W bits. RNG_W = 8 gives the 256-bit
// streams used throughout the evaluation this design follows. TILE_DIM = 10 is
// the 10x10 input tile of the accelerator. The LFSR tap table and the base-3
// digit count are this design's own helpers.
package sc_pkg;

  // Random-number width; SN length is 2**RNG_W.
  parameter int unsigned RNG_W    = 8;
  parameter int unsigned SN_LEN   = 1 << RNG_W;
  // Side of the square input tile processed by the accelerator.
  parameter int unsigned TILE_DIM = 10;

  // Stream generator choice of the evaluation unit, per input stream.
  typedef enum logic [1:0] {
    RNG_VDC    = 2'd0,   // Van der Corput, base 2
    RNG_HALTON = 2'd1,   // Halton, base 3
    RNG_LFSR   = 2'd2    // maximal-length LFSR
  } rng_sel_e;

  // Counter index of the evaluation unit. For each circuit under test the
  // unit counts the 1s of both outputs and of their AND (the overlap), from
  // which value, bias and SCC follow; the three operators have one output.
  // SSER / DSER / CSER are the two-stage synchronizer, desynchronizer and
  // decorrelator chains.
  typedef enum int unsigned {
    CNT_IN_X = 0, CNT_IN_Y, CNT_IN_XY,
    CNT_SYNC_X, CNT_SYNC_Y, CNT_SYNC_XY,
    CNT_DESYNC_X, CNT_DESYNC_Y, CNT_DESYNC_XY,
    CNT_DECOR_X, CNT_DECOR_Y, CNT_DECOR_XY,
    CNT_MAX, CNT_MIN, CNT_SAT_ADD,
    CNT_SSER_X, CNT_SSER_Y, CNT_SSER_XY,
    CNT_DSER_X, CNT_DSER_Y, CNT_DSER_XY,
    CNT_CSER_X, CNT_CSER_Y, CNT_CSER_XY,
    NUM_CNT
  } cnt_idx_e;

  // Feedback taps (bit mask, bit i = stage i+1) of a maximal-length Fibonacci
  // LFSR of the given width, from the standard tables of primitive polynomials.
  function automatic logic [31:0] lfsr_taps(input int unsigned w);
    case (w)
      4:       return 32'h0000_000C; // x^4 + x^3 + 1
      5:       return 32'h0000_0014; // x^5 + x^3 + 1
      6:       return 32'h0000_0030; // x^6 + x^5 + 1
      7:       return 32'h0000_0060; // x^7 + x^6 + 1
      8:       return 32'h0000_00B8; // x^8 + x^6 + x^5 + x^4 + 1
      9:       return 32'h0000_0110; // x^9 + x^5 + 1
      10:      return 32'h0000_0240; // x^10 + x^7 + 1
      11:      return 32'h0000_0500; // x^11 + x^9 + 1
      12:      return 32'h0000_0E08; // x^12 + x^11 + x^10 + x^4 + 1
      13:      return 32'h0000_1C80; // x^13 + x^12 + x^11 + x^8 + 1
      14:      return 32'h0000_3802; // x^14 + x^13 + x^12 + x^2 + 1
      15:      return 32'h0000_6000; // x^15 + x^14 + 1
      default: return 32'h0000_D008; // x^16 + x^15 + x^13 + x^4 + 1
    endcase
  endfunction

  // Smallest k with 3**k >= 2**w: number of base-3 digits of a Halton counter
  // whose period covers a 2**w-bit stream.
  function automatic int unsigned base3_digits(input int unsigned w);
    longint unsigned p;
    int unsigned k;
    p = 1;
    k = 0;
    while (p < (64'd1 << w)) begin
      p = p * 3;
      k = k + 1;
    end
    return k;
  endfunction

  // 3**k
  function automatic longint unsigned pow3(input int unsigned k);
    longint unsigned p;
    p = 1;
    for (int unsigned i = 0; i < k; i++) p = p * 3;
    return p;
  endfunction

endpackage
