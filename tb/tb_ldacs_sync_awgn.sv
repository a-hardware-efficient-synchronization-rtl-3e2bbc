// tb_ldacs_sync_awgn -- synchronizer in white Gaussian noise at 10 dB SNR,
// without CFO and with a CFO of 1.5 subcarrier spacings.
//
// Same frame structure as tb_ldacs_sync_top (500 random data samples, then
// the 600-sample two-symbol preamble with the stand-in energy profile), 24
// frames per CFO value.  Complex Gaussian noise (Box-Muller on $urandom) is
// scaled to the mean preamble power over the SNR.  For each frame the STO
// estimate counts as a success when it is within 4 samples (1/11 of the
// cyclic prefix) of the last preamble sample; a frame that is not detected
// counts as a failure.  The testbench prints the fail rate and the CFO mean
// square error per CFO value and requires a fail rate of at most 1/8 and an
// MSE below 1e-3 (subcarrier spacings squared).  These limits are this
// testbench's own, not figures read off a published curve, because the
// preamble here is a stand-in for the L-DACS1 one.
module tb_ldacs_sync_awgn;
  import ldacs_sync_pkg::*;

  localparam int unsigned NFR   = 48;       // 24 per CFO value
  localparam int unsigned GAP   = 500;
  localparam int unsigned PRE   = 2 * SYM_LEN;
  localparam int unsigned FRLEN = GAP + PRE;
  localparam int unsigned TOTAL = NFR * FRLEN + GAP;
  localparam real PI     = 3.14159265358979;
  localparam real SNR_DB = 10.0;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  iq_t  r;
  logic detect, searching, sto_valid, eps_valid;
  logic [FX_BITS+7:0] xcr;
  logic [15:0] d_hat;
  logic signed [ANG_W+1:0] eps_hat;

  ldacs_sync_top dut (.clk, .rst_n, .en, .r, .detect, .searching, .xcr,
                      .sto_valid, .d_hat, .eps_valid, .eps_hat);

  always #5 clk = ~clk;

  int  checks = 0, failures = 0;
  real sre [TOTAL];
  real sim_ [TOTAL];
  real eps_of [NFR];
  int  sto_ok [2], sto_n [2], eps_n [2];
  real mse [2];

  function automatic real urand01();
    return (real'($urandom() % 1000000) + 0.5) / 1000000.0;
  endfunction

  function automatic real gauss();
    return $sqrt(-2.0 * $ln(urand01())) * $cos(2.0 * PI * urand01());
  endfunction

  function automatic real amp_of(int unsigned lev);
    return (lev == 2) ? 0.6 : (lev == 1) ? 0.42 : 0.1;
  endfunction

  task automatic build_stream();
    real ph1 [64], ph2 [128];
    real a, p, rr, ii, th, pw, sigma;
    int unsigned base, cnt;
    pw = 0.0; cnt = 0;
    for (int i = 0; i < TOTAL; i++) begin
      sre[i] = 0.8 * (urand01() - 0.5);
      sim_[i] = 0.8 * (urand01() - 0.5);
    end
    for (int f = 0; f < NFR; f++) begin
      eps_of[f] = (f % 2 == 0) ? 0.0 : 1.5;
      for (int k = 0; k < 64; k++)  ph1[k] = 2.0 * PI * urand01();
      for (int k = 0; k < 128; k++) ph2[k] = 2.0 * PI * urand01();
      base = f * FRLEN + GAP;
      for (int t = WIN_LEN; t < PRE; t++) begin
        if (t < SYM_LEN) begin
          a = amp_of(pre_level(t % 64, 0)); p = ph1[t % 64];
        end else if (t >= SYM_LEN + WIN_LEN) begin
          a = amp_of(pre_level((t - SYM_LEN) % 128, 1)); p = ph2[(t - SYM_LEN) % 128];
        end else continue;
        sre[base+t] = a * $cos(p); sim_[base+t] = a * $sin(p);
        pw += a * a; cnt++;
      end
    end
    pw = pw / cnt;
    sigma = $sqrt(pw / $pow(10.0, SNR_DB / 10.0) / 2.0);
    for (int f = 0; f < NFR; f++) begin
      for (int t = 0; t < FRLEN; t++) begin
        th = 2.0 * PI * eps_of[f] * real'(f * FRLEN + t) / 256.0;
        rr = sre[f*FRLEN+t] * $cos(th) - sim_[f*FRLEN+t] * $sin(th);
        ii = sre[f*FRLEN+t] * $sin(th) + sim_[f*FRLEN+t] * $cos(th);
        sre[f*FRLEN+t] = rr + sigma * gauss();
        sim_[f*FRLEN+t] = ii + sigma * gauss();
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

  // results are matched to the frame whose preamble ends closest before them
  always @(posedge clk) if (rst_n && en) begin
    if (sto_valid) begin
      int f, g, err;
      f = (int'(dut.n_idx) - int'(GAP) - int'(PRE)) / int'(FRLEN);
      if (f >= 0 && f < NFR) begin
        g = f % 2;
        err = int'(d_hat) - (f * int'(FRLEN) + int'(GAP) + int'(PRE) - 1);
        sto_n[g]++;
        if (err <= 4 && err >= -4) sto_ok[g]++;
      end
    end
    if (eps_valid) begin
      int f, g;
      real e;
      f = (int'(dut.n_idx) - int'(GAP) - int'(PRE)) / int'(FRLEN);
      if (f >= 0 && f < NFR) begin
        g = f % 2;
        e = real'(eps_hat) / 32768.0 - eps_of[f];
        mse[g] += e * e;
        eps_n[g]++;
      end
    end
  end

  initial begin
    repeat (2 * TOTAL + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real fr;
    sto_ok = '{0, 0}; sto_n = '{0, 0}; eps_n = '{0, 0}; mse = '{0.0, 0.0};
    build_stream();
    r = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < TOTAL; i++) begin
      @(negedge clk);
      r.re = q15(sre[i]);
      r.im = q15(sim_[i]);
      en = 1'b1;
    end
    @(negedge clk);
    en = 1'b0;
    for (int g = 0; g < 2; g++) begin
      fr = 1.0 - real'(sto_ok[g]) / real'(NFR / 2);
      if (eps_n[g] > 0) mse[g] = mse[g] / eps_n[g];
      $display("CFO %0.1f: STO fail rate %0.3f (%0d of %0d ok, %0d reported), CFO MSE %0.2e over %0d",
               (g == 0) ? 0.0 : 1.5, fr, sto_ok[g], NFR / 2, sto_n[g], mse[g], eps_n[g]);
      checks++;
      if (fr > 0.125) begin failures++; $display("FAIL STO fail rate too high"); end
      checks++;
      if (eps_n[g] == 0 || mse[g] > 1.0e-3) begin failures++; $display("FAIL CFO MSE too high"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
