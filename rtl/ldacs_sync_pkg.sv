// ldacs_sync_pkg -- constants, types and constant functions shared by the
// L-DACS1 preamble synchronizer.
//
// Numbers that come from the synchronization scheme itself: oversampling
// factor Nov = 4, repetition length L = 16*Nov = 64 samples, detection run
// length m = 8*Nov = 32 samples, STO search window 56*Nov = 224 samples,
// received samples in Q1.15, fa = 5 fractional bits for the autocorrelation
// and energy metrics (Q8.fa) and fx = 4 fractional bits for |c2| (Q2.fx) and
// XCR (Q8.fx).
//
// Numbers that are this design's own: the angle format (a signed 16-bit word
// in which 2^15 stands for pi), the CORDIC iteration count, and the default
// energy-correlation coefficient vector a_m.  The real a_m is the quantised
// energy profile of the L-DACS1 preamble; that waveform is not reproduced
// here, so the default vector is a stand-in with the same layout: nonzero
// taps only where c2 is free of inter-symbol interference (the last 160
// valid samples of each preamble symbol), zeros in between, values in
// {0, 0.5, 1}, 64-periodic over the first symbol and 128-periodic over the
// second, 140 nonzero taps in total.  Override A0/A1 of energy_cor with the
// quantised |p_m|^2 of the actual preamble for a real receiver.
package ldacs_sync_pkg;

  // ---- scheme parameters ----
  localparam int unsigned NOV        = 4;
  localparam int unsigned L_REP      = 16 * NOV;     // L = 64
  localparam int unsigned M_CONSEC   = 8 * NOV;      // m = 32
  localparam int unsigned DELTA_WIN  = 56 * NOV;     // Delta = 224
  localparam int unsigned SAMP_W     = 16;           // Q1.15
  localparam int unsigned FA_BITS    = 5;            // metric fraction bits
  localparam int unsigned FX_BITS    = 4;            // XCR fraction bits

  // ---- preamble geometry at Nov = 4 (L-DACS1 numerology) ----
  localparam int unsigned SYM_LEN    = 300;          // 120 us at 2.5 MS/s
  localparam int unsigned WIN_LEN    = 12;           // Tw = 4.8 us
  localparam int unsigned NOISI_LEN  = 160;          // c2 ISI-free run per symbol
  localparam int unsigned GAP_LEN    = 140;          // ISI run between them
  localparam int unsigned D_TAPS     = NOISI_LEN + GAP_LEN + NOISI_LEN; // 460

  // ---- angle format ----
  localparam int unsigned ANG_W      = 16;           // 2^15 == pi

  typedef struct packed {
    logic signed [SAMP_W-1:0] re;
    logic signed [SAMP_W-1:0] im;
  } iq_t;

  // atan(2^-i) / pi * 2^15, rounded
  function automatic logic signed [ANG_W-1:0] atan_tab(input int unsigned i);
    case (i)
      0: return 16'sd8192;   1: return 16'sd4836;   2: return 16'sd2555;
      3: return 16'sd1297;   4: return 16'sd651;    5: return 16'sd326;
      6: return 16'sd163;    7: return 16'sd81;     8: return 16'sd41;
      9: return 16'sd20;    10: return 16'sd10;    11: return 16'sd5;
     12: return 16'sd3;     13: return 16'sd1;     14: return 16'sd1;
      default: return 16'sd0;
    endcase
  endfunction

  // Stand-in quantised preamble energy: 2 = 1.0, 1 = 0.5, 0 = 0.
  // k is the sample index within one period, sym selects the symbol.
  function automatic int unsigned pre_level(input int unsigned k,
                                            input int unsigned sym);
    int unsigned v;
    v = ((k * 13 + sym * 7 + 5) * 29) % 16;
    if (v < 4) return 2;
    else if (v < 7) return 1;
    else return 0;
  endfunction

  // Coefficient a_m of tap m (m = 0 is the newest |c2| sample) for a window
  // whose newest sample is the last sample of the second preamble symbol.
  function automatic int unsigned am_level(input int unsigned m);
    int unsigned t;
    t = 2 * SYM_LEN - 1 - m;                       // sample position in preamble
    if (m < NOISI_LEN)               return pre_level((t - SYM_LEN) % (2 * L_REP), 1);
    else if (m < NOISI_LEN + GAP_LEN) return 0;
    else                             return pre_level(t % L_REP, 0);
  endfunction

  // Bit vectors a0 (weight 1) and a1 (weight 1/2) of eq. (12).
  function automatic logic [D_TAPS-1:0] am_a0();
    logic [D_TAPS-1:0] v;
    for (int unsigned m = 0; m < D_TAPS; m++) v[m] = (am_level(m) == 2);
    return v;
  endfunction

  function automatic logic [D_TAPS-1:0] am_a1();
    logic [D_TAPS-1:0] v;
    for (int unsigned m = 0; m < D_TAPS; m++) v[m] = (am_level(m) == 1);
    return v;
  endfunction

endpackage
