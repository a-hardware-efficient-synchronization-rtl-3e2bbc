// ldacs_sync_top -- L-DACS1 preamble synchronizer (STO and fractional CFO).
//
// Received baseband samples r(n) (complex Q1.15, one per enable, i.e. one per
// 2.5 MHz sample at Nov = 4) feed:
//   * rx_buffer: two L-sample delays giving r(n-L) and r(n-2L);
//   * three conj_mult units forming ee = |r|^2, c1 = r* r(n-L), c2 = r* r(n-2L),
//     each cut to Q1.fa;
//   * five metric_acc lanes (Delay 2L + register + 3-input adder) forming the
//     2L-sample moving sums ENE, AC1 (re/im) and AC2 (re/im) in Q8.fa;
//   * three cordic_vec "phase translation" units: on AC1 and AC2 (angle and
//     magnitude) and on c2 (magnitude, cut to Q2.fx);
//   * preamble_detect: |AC1| + |AC2| > ENE for m = 32 consecutive samples;
//   * energy_cor: direct-form multiplierless correlation of |c2| with the
//     preamble energy vector a_m, giving XCR in Q8.fx;
//   * timing_sync: peak search of XCR in a 224-sample window -> d_hat;
//   * fre_offset: CFO from the AC1/AC2 angles, eq. (10) -> eps_hat.
// This is the block structure of the synchronizer architecture; pipeline
// registers, the alignment delays and the index counter are this design's.
//
// Alignment: the XCR, |AC|, ENE and angle paths are delayed so that all of
// them reach the comparator, peak search and CFO estimator for the same
// input sample, LAT = ITER + 5 enables after it entered.  n_idx counts input
// samples from reset; d_hat is reported in that count (the index of the
// input sample at which XCR peaked, i.e. the last sample of the second
// preamble symbol for a correctly synchronised frame).  eps_hat is signed
// Q3.15 in subcarrier spacings.
//
// The imaginary part of ee (always zero) and the angle of c2 are produced but
// not used: the same multiplier and CORDIC blocks serve all three products,
// and synthesis removes the unused logic.  The comparator's cond/run
// outputs are likewise left for observation only.
//
// Interface: en is the sample strobe; every output is held between enables.
module ldacs_sync_top
  import ldacs_sync_pkg::*;
#(
  parameter int unsigned L            = L_REP,
  parameter int unsigned M            = M_CONSEC,
  parameter int unsigned FA           = FA_BITS,
  parameter int unsigned FX           = FX_BITS,
  parameter int unsigned D            = D_TAPS,
  parameter logic [D-1:0] A0          = am_a0(),
  parameter logic [D-1:0] A1          = am_a1(),
  parameter int unsigned ITER         = 14,
  parameter int unsigned SEARCH_WIN   = DELTA_WIN,
  parameter int unsigned SEARCH_DELAY = 282,
  parameter int unsigned IDX_W        = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  iq_t                     r,
  output logic                    detect,      // preamble detected
  output logic                    searching,   // STO search window open
  output logic [FX+7:0]           xcr,         // XCR metric, Q8.fx
  output logic                    sto_valid,
  output logic [IDX_W-1:0]        d_hat,
  output logic                    eps_valid,
  output logic signed [ANG_W+1:0] eps_hat
);
  localparam int unsigned PW  = FA + 1;          // Q1.fa
  localparam int unsigned MW  = FA + 8;          // Q8.fa
  localparam int unsigned LAT = ITER + 5;        // input -> aligned metrics

  // ---------------- sample index ----------------
  logic [IDX_W-1:0] n_idx;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  n_idx <= '0;
    else if (en) n_idx <= n_idx + 1'b1;
  end

  // ---------------- received buffer ----------------
  iq_t r_l, r_2l;
  rx_buffer #(.L(L)) u_rxbuf (.clk, .rst_n, .en, .r, .r_l, .r_2l);

  // ---------------- instant products ----------------
  logic signed [PW-1:0] ee_re, ee_im, c1_re, c1_im, c2_re, c2_im;

  conj_mult #(.IN_W(SAMP_W), .F(FA)) u_mul_ee (
    .clk, .rst_n, .en, .a_re(r.re), .a_im(r.im), .b_re(r.re), .b_im(r.im),
    .p_re(ee_re), .p_im(ee_im));
  conj_mult #(.IN_W(SAMP_W), .F(FA)) u_mul_c1 (
    .clk, .rst_n, .en, .a_re(r.re), .a_im(r.im), .b_re(r_l.re), .b_im(r_l.im),
    .p_re(c1_re), .p_im(c1_im));
  conj_mult #(.IN_W(SAMP_W), .F(FA)) u_mul_c2 (
    .clk, .rst_n, .en, .a_re(r.re), .a_im(r.im), .b_re(r_2l.re), .b_im(r_2l.im),
    .p_re(c2_re), .p_im(c2_im));

  // ---------------- recursive metrics ----------------
  logic signed [MW-1:0] ene, ac1_re, ac1_im, ac2_re, ac2_im;

  metric_acc #(.IN_W(PW), .OUT_W(MW), .DEPTH(2*L)) u_ene    (.clk, .rst_n, .en, .x(ee_re), .sum(ene));
  metric_acc #(.IN_W(PW), .OUT_W(MW), .DEPTH(2*L)) u_ac1_re (.clk, .rst_n, .en, .x(c1_re), .sum(ac1_re));
  metric_acc #(.IN_W(PW), .OUT_W(MW), .DEPTH(2*L)) u_ac1_im (.clk, .rst_n, .en, .x(c1_im), .sum(ac1_im));
  metric_acc #(.IN_W(PW), .OUT_W(MW), .DEPTH(2*L)) u_ac2_re (.clk, .rst_n, .en, .x(c2_re), .sum(ac2_re));
  metric_acc #(.IN_W(PW), .OUT_W(MW), .DEPTH(2*L)) u_ac2_im (.clk, .rst_n, .en, .x(c2_im), .sum(ac2_im));

  // ---------------- phase translation ----------------
  logic        [MW-1:0]    ac1_mag, ac2_mag;
  logic signed [ANG_W-1:0] ac1_ang, ac2_ang, c2_ang;
  logic        [PW-1:0]    c2_mag_full;           // unsigned, FA fraction bits
  logic        [FX+1:0]    c2_mag;                // Q2.fx

  cordic_vec #(.IN_W(MW), .ITER(ITER)) u_pt_ac1 (
    .clk, .rst_n, .en, .x(ac1_re), .y(ac1_im), .mag(ac1_mag), .ang(ac1_ang));
  cordic_vec #(.IN_W(MW), .ITER(ITER)) u_pt_ac2 (
    .clk, .rst_n, .en, .x(ac2_re), .y(ac2_im), .mag(ac2_mag), .ang(ac2_ang));
  cordic_vec #(.IN_W(PW), .ITER(ITER)) u_pt_c2 (
    .clk, .rst_n, .en, .x(c2_re), .y(c2_im), .mag(c2_mag_full), .ang(c2_ang));

  // |c2| has FA fraction bits; keep FX of them (truncation)
  assign c2_mag = (FX+2)'(c2_mag_full >> (FA - FX));

  // ---------------- alignment ----------------
  // ENE must wait for the CORDIC latency of |AC1|, |AC2|
  logic signed [MW-1:0] ene_pipe [ITER+2];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < ITER + 2; k++) ene_pipe[k] <= '0;
    end else if (en) begin
      ene_pipe[0] <= ene;
      for (int k = 1; k < ITER + 2; k++) ene_pipe[k] <= ene_pipe[k-1];
    end
  end

  // angles wait one more sample so they line up with XCR and detect
  logic signed [ANG_W-1:0] ac1_ang_d, ac2_ang_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ac1_ang_d <= '0;
      ac2_ang_d <= '0;
    end else if (en) begin
      ac1_ang_d <= ac1_ang;
      ac2_ang_d <= ac2_ang;
    end
  end

  // ---------------- comparator ----------------
  logic                   cond;
  logic [$clog2(M+1)-1:0] run;
  preamble_detect #(.MAG_W(MW), .ENE_W(MW), .M(M)) u_cmp (
    .clk, .rst_n, .en, .mag1(ac1_mag), .mag2(ac2_mag), .ene(ene_pipe[ITER+1]),
    .cond, .run, .detect);

  // ---------------- energy correlator ----------------
  energy_cor #(.FX(FX), .D(D), .A0(A0), .A1(A1)) u_xcr (
    .clk, .rst_n, .en, .c2_mag, .xcr);

  // ---------------- timing synchronisation ----------------
  logic start, new_max;
  logic [IDX_W-1:0] xcr_idx;
  assign xcr_idx = n_idx - IDX_W'(LAT);

  timing_sync #(.XW(FX+8), .IDX_W(IDX_W), .SEARCH_DELAY(SEARCH_DELAY),
                .SEARCH_WIN(SEARCH_WIN)) u_tim (
    .clk, .rst_n, .en, .detect, .xcr, .idx(xcr_idx),
    .start, .searching, .new_max, .sto_valid, .d_hat);

  // ---------------- frequency offset ----------------
  fre_offset #(.ANG_W(ANG_W)) u_fre (
    .clk, .rst_n, .en, .ang1(ac1_ang_d), .ang2(ac2_ang_d),
    .latch1(start), .latch2(new_max), .done(sto_valid),
    .eps_valid, .eps_hat);
endmodule
