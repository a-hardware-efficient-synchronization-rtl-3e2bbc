// tb_ldacs_sync_top -- end-to-end test of the synchronizer at its default
// parameters.
//
// Builds a received stream of random data frames with an L-DACS1-shaped
// preamble inside each: symbol 1 repeats a 64-sample pattern, symbol 2 a
// 128-sample pattern, 300 samples per symbol, the first 12 samples of each
// symbol are corrupted (the window overlap).  The per-sample amplitude
// follows the same quantised energy profile the correlator coefficients
// stand for; phases are random.  Each frame gets its own carrier frequency
// offset, rotation exp(j*2*pi*eps*n/256), plus small uniform noise.
//
// Checks per frame: the preamble is detected once, the STO estimate is the
// last sample of the second preamble symbol to within 4 samples (1/11 of the
// 44-sample cyclic prefix), the CFO estimate is within 0.05 subcarrier
// spacings, and the result comes out before the next frame starts (within
// the preamble-plus-one-symbol budget), and XCR at the true peak is above
// XCR at +-L = +-64 samples, where the secondary peaks of a repetitive
// preamble would sit.  The frame offsets are chosen so that
// all three branches of the CFO combination rule are taken; every mechanism
// (detection, window search, running-max update, both result strobes, each
// CFO branch) is counted and must occur.  The sample strobe has random gaps.
module tb_ldacs_sync_top;
  import ldacs_sync_pkg::*;

  localparam int unsigned NFR   = 4;
  localparam int unsigned GAP   = 500;      // data samples before each preamble
  localparam int unsigned PRE   = 2 * SYM_LEN;
  localparam int unsigned FRLEN = GAP + PRE;
  localparam int unsigned TOTAL = NFR * FRLEN + GAP;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  iq_t  r;
  logic detect, searching, sto_valid, eps_valid;
  logic [FX_BITS+7:0] xcr;
  logic [15:0] d_hat;
  logic signed [ANG_W+1:0] eps_hat;

  ldacs_sync_top dut (.clk, .rst_n, .en, .r, .detect, .searching, .xcr,
                      .sto_valid, .d_hat, .eps_valid, .eps_hat);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  real eps_tab [NFR] = '{0.3, 1.5, -1.5, -0.7};
  int  n_detect = 0, n_search = 0, n_newmax = 0, n_sto = 0, n_eps = 0;
  int  n_br0 = 0, n_brp = 0, n_brm = 0;
  int  det_idx [$];
  int  xcr_at [int];       // XCR by the input-sample index it belongs to
  int  n_sec = 0;

  // stimulus storage
  real sre [TOTAL];
  real sim_ [TOTAL];

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * ($urandom() % 65536) / 65536.0;
  endfunction

  function automatic real amp_of(int unsigned lev);
    return (lev == 2) ? 0.6 : (lev == 1) ? 0.42 : 0.1;
  endfunction

  task automatic build_stream();
    real ph1 [64], ph2 [128];
    int unsigned base;
    real a, p, rr, ii, th;
    for (int i = 0; i < TOTAL; i++) begin          // random data everywhere
      sre[i] = urand(-0.4, 0.4);
      sim_[i] = urand(-0.4, 0.4);
    end
    for (int f = 0; f < NFR; f++) begin
      for (int k = 0; k < 64; k++)  ph1[k] = urand(0.0, 2.0 * PI);
      for (int k = 0; k < 128; k++) ph2[k] = urand(0.0, 2.0 * PI);
      base = f * FRLEN + GAP;
      for (int t = 0; t < PRE; t++) begin
        if (t < SYM_LEN && t >= WIN_LEN) begin
          a = amp_of(pre_level(t % 64, 0));  p = ph1[t % 64];
          sre[base+t] = a * $cos(p); sim_[base+t] = a * $sin(p);
        end else if (t >= SYM_LEN + WIN_LEN) begin
          a = amp_of(pre_level((t - SYM_LEN) % 128, 1)); p = ph2[(t - SYM_LEN) % 128];
          sre[base+t] = a * $cos(p); sim_[base+t] = a * $sin(p);
        end
      end
      // CFO over the whole frame (data before it and its preamble)
      for (int t = 0; t < FRLEN; t++) begin
        th = 2.0 * PI * eps_tab[f] * real'(f * FRLEN + t) / 256.0;
        rr = sre[f*FRLEN+t] * $cos(th) - sim_[f*FRLEN+t] * $sin(th);
        ii = sre[f*FRLEN+t] * $sin(th) + sim_[f*FRLEN+t] * $cos(th);
        sre[f*FRLEN+t] = rr + urand(-0.02, 0.02);
        sim_[f*FRLEN+t] = ii + urand(-0.02, 0.02);
      end
    end
  endtask

  function automatic logic signed [15:0] q15(real v);
    int x;
    x = $rtoi(v * 32768.0);
    if (x > 32767) x = 32767;
    if (x < -32768) x = -32768;
    return 16'(x);
  endfunction

  // ------------------------------------------------------------ monitors
  int fr_out = 0, fr_eps = 0;
  always @(posedge clk) if (rst_n && en) begin
    if (detect && !searching && dut.u_tim.state == dut.u_tim.S_IDLE) begin
      n_detect++;
      det_idx.push_back(int'(dut.xcr_idx));
    end
    xcr_at[int'(dut.xcr_idx)] = int'(xcr);
    if (searching) n_search++;
    if (dut.new_max && en) n_newmax++;
    if (sto_valid) begin
      int exp_idx, err;
      n_sto++;
      exp_idx = fr_out * FRLEN + GAP + PRE - 1;
      err = int'(d_hat) - exp_idx;
      checks++;
      if (err > 4 || err < -4) begin
        failures++;
        $display("FAIL frame %0d: d_hat=%0d expected %0d", fr_out, d_hat, exp_idx);
      end else $display("frame %0d: d_hat=%0d expected %0d (err %0d)", fr_out, d_hat, exp_idx, err);
      // latency budget: result before the next preamble starts
      checks++;
      if (int'(dut.n_idx) > (fr_out + 1) * FRLEN + GAP) begin
        failures++;
        $display("FAIL frame %0d: STO reported late at sample %0d", fr_out, dut.n_idx);
      end
      // secondary peaks at +-L must stay below the main one
      if (xcr_at.exists(exp_idx - 64) && xcr_at.exists(exp_idx + 64)) begin
        checks++;
        n_sec++;
        if (xcr_at[exp_idx] <= xcr_at[exp_idx - 64] || xcr_at[exp_idx] <= xcr_at[exp_idx + 64]) begin
          failures++;
          $display("FAIL frame %0d: XCR peak %0d not above XCR at -64 (%0d) and +64 (%0d)", fr_out,
                   xcr_at[exp_idx], xcr_at[exp_idx - 64], xcr_at[exp_idx + 64]);
        end else $display("frame %0d: XCR peak %0d, at -64: %0d, at +64: %0d", fr_out,
                          xcr_at[exp_idx], xcr_at[exp_idx - 64], xcr_at[exp_idx + 64]);
      end
      fr_out++;
    end
    if (eps_valid) begin
      real e;
      n_eps++;
      e = real'(eps_hat) / 32768.0;
      checks++;
      if (e - eps_tab[fr_eps] > 0.05 || e - eps_tab[fr_eps] < -0.05) begin
        failures++;
        $display("FAIL frame %0d: eps_hat=%f expected %f", fr_eps, e, eps_tab[fr_eps]);
      end else $display("frame %0d: eps_hat=%f expected %f", fr_eps, e, eps_tab[fr_eps]);
      if (dut.u_fre.phi1 > 16'sd16384)       n_brp++;
      else if (dut.u_fre.phi1 < -16'sd16384) n_brm++;
      else                                   n_br0++;
      fr_eps++;
    end
  end

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (3 * TOTAL + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ main
  initial begin
    build_stream();
    r = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < TOTAL; i++) begin
      @(negedge clk);
      en = 1'b0;
      while (($urandom() % 8) == 0) @(negedge clk);   // strobe gaps
      r.re = q15(sre[i]);
      r.im = q15(sim_[i]);
      en = 1'b1;
    end
    @(negedge clk);
    en = 1'b0;
    repeat (5) @(posedge clk);
    foreach (det_idx[k]) $display("detect at xcr index %0d (frame start %0d)", det_idx[k], k * FRLEN + GAP);
    $display("mechanisms: detect=%0d search=%0d new_max=%0d sto=%0d eps=%0d br0=%0d br+2=%0d br-2=%0d",
             n_detect, n_search, n_newmax, n_sto, n_eps, n_br0, n_brp, n_brm);
    checks++; if (n_detect != NFR) begin failures++; $display("FAIL detect count %0d", n_detect); end
    checks++; if (n_sto != NFR)    begin failures++; $display("FAIL sto count %0d", n_sto); end
    checks++; if (n_eps != NFR)    begin failures++; $display("FAIL eps count %0d", n_eps); end
    checks++; if (n_sec != NFR)    begin failures++; $display("FAIL secondary-peak check ran %0d times", n_sec); end
    checks++; if (n_search == 0)   begin failures++; $display("FAIL no search"); end
    checks++; if (n_newmax == 0)   begin failures++; $display("FAIL no running-max update"); end
    checks++; if (n_br0 == 0)      begin failures++; $display("FAIL CFO branch 0 never taken"); end
    checks++; if (n_brp == 0)      begin failures++; $display("FAIL CFO branch +2 never taken"); end
    checks++; if (n_brm == 0)      begin failures++; $display("FAIL CFO branch -2 never taken"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
