// tb_ldacs_sync_channels -- synchronizer in simplified aeronautical
// channels at 10 dB SNR: en-route (ENR) and terminal manoeuvring area (TMA),
// each without CFO and with a CFO of 1.5 subcarrier spacings.
//
// ENR: a line-of-sight path plus reflected paths at 0.3 us and 15 us (0.75
// and 37.5 samples at 2.5 MS/s), maximal Doppler shift 1250 Hz.  TMA: a
// Rician channel with a 10 dB line-of-sight to scatter power ratio, scatter
// delays up to 10 us (25 samples), maximal Doppler shift 624 Hz.  Those
// numbers are the scenarios' own; the rest is this testbench's choice: ENR
// path powers 0, -6 and -15 dB, TMA scatter as three equal paths at
// uniformly drawn delays, every path with one Doppler frequency drawn
// uniformly within the maximum and a random phase per frame (no full
// Doppler spectrum), no phase noise and no DME interference.  Path gains are
// normalised to unit total power; fractional delays are made by linear
// interpolation between samples.
//
// Frame structure and noise are as in tb_ldacs_sync_awgn; frames cycle
// through the four cases.  A frame's STO counts as a success when it is
// within 4 samples of the last preamble sample on the line-of-sight path;
// its CFO reference is the applied CFO plus the line-of-sight Doppler
// (1 subcarrier spacing = 9.765625 kHz).  The testbench prints the fail rate
// and the CFO mean square error per case and requires a fail rate of at most
// 1/8 and an MSE below 2e-3; these limits are this testbench's own.
module tb_ldacs_sync_channels;
  import ldacs_sync_pkg::*;

  localparam int unsigned NFR   = 56;       // 14 per case, stream below 2^16 samples
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
  real ref_of [NFR];
  real xre [TOTAL];
  real xim [TOTAL];
  localparam real SC     = 1.0 / 256.0;         // subcarrier spacing, cycles per sample
  localparam real FD_ENR = 1250.0 / 2.5e6;      // cycles per sample
  localparam real FD_TMA = 624.0 / 2.5e6;
  localparam string CASE_NAME [4] = '{"ENR, CFO 0.0", "ENR, CFO 1.5", "TMA, CFO 0.0", "TMA, CFO 1.5"};
  int  sto_ok [4], sto_n [4], eps_n [4];
  real mse [4];

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
    for (int i = 0; i < TOTAL; i++) begin xre[i] = sre[i]; xim[i] = sim_[i]; end
    for (int f = 0; f < NFR; f++) begin
      real g [4], fd [4], ph0 [4], tau [4], norm, fdm, xr, xi, d, fr, yr, yi;
      int i0;
      bit tma;
      tma = (f % 4) >= 2;
      fdm = tma ? FD_TMA : FD_ENR;
      norm = 0.0;
      for (int q = 0; q < 4; q++) begin
        if (!tma) begin
          tau[q] = (q == 0) ? 0.0 : (q == 1) ? 0.75 : 37.5;
          g[q]   = (q == 0) ? 1.0 : (q == 1) ? $pow(10.0, -6.0 / 20.0)
                 : (q == 2) ? $pow(10.0, -15.0 / 20.0) : 0.0;
        end else begin
          tau[q] = (q == 0) ? 0.0 : 25.0 * urand01();
          g[q]   = (q == 0) ? 1.0 : $sqrt(0.1 / 3.0);
        end
        norm  += g[q] * g[q];
        fd[q]  = fdm * (2.0 * urand01() - 1.0);
        ph0[q] = (q == 0) ? 0.0 : 2.0 * PI * urand01();
      end
      for (int q = 0; q < 4; q++) g[q] = g[q] / $sqrt(norm);
      ref_of[f] = eps_of[f] + fd[0] / SC;
      for (int t = 0; t < FRLEN; t++) begin
        int n;
        n = f * FRLEN + t;
        yr = 0.0; yi = 0.0;
        for (int q = 0; q < 4; q++) begin
          d  = real'(n) - tau[q];
          i0 = $rtoi($floor(d));
          fr = d - real'(i0);
          if (i0 < 0) continue;
          xr = (1.0 - fr) * xre[i0] + ((i0 + 1 < TOTAL) ? fr * xre[i0+1] : 0.0);
          xi = (1.0 - fr) * xim[i0] + ((i0 + 1 < TOTAL) ? fr * xim[i0+1] : 0.0);
          th = ph0[q] + 2.0 * PI * (fd[q] + eps_of[f] * SC) * real'(n);
          yr += g[q] * (xr * $cos(th) - xi * $sin(th));
          yi += g[q] * (xr * $sin(th) + xi * $cos(th));
        end
        sre[n]  = yr + sigma * gauss();
        sim_[n] = yi + sigma * gauss();
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
        g = f % 4;
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
        g = f % 4;
        e = real'(eps_hat) / 32768.0 - ref_of[f];
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
    sto_ok = '{0, 0, 0, 0}; sto_n = '{0, 0, 0, 0}; eps_n = '{0, 0, 0, 0}; mse = '{0.0, 0.0, 0.0, 0.0};
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
    for (int g = 0; g < 4; g++) begin
      fr = 1.0 - real'(sto_ok[g]) / real'(NFR / 4);
      if (eps_n[g] > 0) mse[g] = mse[g] / eps_n[g];
      $display("%s: STO fail rate %0.3f (%0d of %0d ok, %0d reported), CFO MSE %0.2e over %0d",
               CASE_NAME[g], fr, sto_ok[g], NFR / 4, sto_n[g], mse[g], eps_n[g]);
      checks++;
      if (fr > 0.125) begin failures++; $display("FAIL STO fail rate too high"); end
      checks++;
      if (eps_n[g] == 0 || mse[g] > 2.0e-3) begin failures++; $display("FAIL CFO MSE too high"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
