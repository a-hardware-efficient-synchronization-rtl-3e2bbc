// tb_ldacs_sync_precision -- effect of the metric word lengths, run on one
// stream by three synchronizers side by side: fa/fx = 7/7 (the unoptimised
// precision), 5/4 (the proposed one, the default) and 4/3 (below the chosen
// trade-off point).
//
// The stream is built as in tb_ldacs_sync_awgn, at 5 dB SNR: 32 frames, half
// without CFO and half with 1.5 subcarrier spacings.  For each precision the
// testbench prints the STO fail rate (error above 4 samples or frame missed)
// and the CFO mean square error.  It requires every configuration to report
// a result for every frame, and the 7/7 and 5/4 configurations to keep the
// fail rate at or below 1/4 and the CFO MSE below 1e-2; the 4/3 figures are
// printed for comparison only.  The limits are this testbench's own.
module tb_ldacs_sync_precision;
  import ldacs_sync_pkg::*;

  localparam int unsigned NFR   = 32;       // 16 per CFO value
  localparam int unsigned NCFG  = 3;
  localparam int CFG_FA [NCFG] = '{7, 5, 4};
  localparam int CFG_FX [NCFG] = '{7, 4, 3};
  localparam int unsigned GAP   = 500;
  localparam int unsigned PRE   = 2 * SYM_LEN;
  localparam int unsigned FRLEN = GAP + PRE;
  localparam int unsigned TOTAL = NFR * FRLEN + GAP;
  localparam real PI     = 3.14159265358979;
  localparam real SNR_DB = 5.0;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  iq_t  r;
  logic [15:0] n_idx;
  always_ff @(posedge clk) if (!rst_n) n_idx <= '0; else if (en) n_idx <= n_idx + 1'b1;

  always #5 clk = ~clk;

  int  checks = 0, failures = 0;
  real sre [TOTAL];
  real sim_ [TOTAL];
  real eps_of [NFR];
  int  sto_ok [NCFG][2], sto_n [NCFG][2], eps_n [NCFG][2];
  real mse [NCFG][2];

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

  // one synchronizer per precision; results are matched to the frame whose
  // preamble ends closest before them
  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    logic detect, searching, sto_valid, eps_valid;
    logic [CFG_FX[c]+7:0] xcr;
    logic [15:0] d_hat;
    logic signed [ANG_W+1:0] eps_hat;

    ldacs_sync_top #(.FA(CFG_FA[c]), .FX(CFG_FX[c])) dut (
      .clk, .rst_n, .en, .r, .detect, .searching, .xcr,
      .sto_valid, .d_hat, .eps_valid, .eps_hat);

    always @(posedge clk) if (rst_n && en) begin
      if (sto_valid) begin
        int f, g, err;
        f = (int'(n_idx) - int'(GAP) - int'(PRE)) / int'(FRLEN);
        if (f >= 0 && f < NFR) begin
          g = f % 2;
          err = int'(d_hat) - (f * int'(FRLEN) + int'(GAP) + int'(PRE) - 1);
          sto_n[c][g]++;
          if (err <= 4 && err >= -4) sto_ok[c][g]++;
        end
      end
      if (eps_valid) begin
        int f, g;
        real e;
        f = (int'(n_idx) - int'(GAP) - int'(PRE)) / int'(FRLEN);
        if (f >= 0 && f < NFR) begin
          g = f % 2;
          e = real'(eps_hat) / 32768.0 - eps_of[f];
          mse[c][g] += e * e;
          eps_n[c][g]++;
        end
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
    for (int c = 0; c < NCFG; c++)
      for (int g = 0; g < 2; g++) begin
        sto_ok[c][g] = 0; sto_n[c][g] = 0; eps_n[c][g] = 0; mse[c][g] = 0.0;
      end
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
    for (int c = 0; c < NCFG; c++)
      for (int g = 0; g < 2; g++) begin
        fr = 1.0 - real'(sto_ok[c][g]) / real'(NFR / 2);
        if (eps_n[c][g] > 0) mse[c][g] = mse[c][g] / eps_n[c][g];
        $display("fa=%0d fx=%0d CFO %0.1f: STO fail rate %0.3f (%0d of %0d ok), CFO MSE %0.2e over %0d",
                 CFG_FA[c], CFG_FX[c], (g == 0) ? 0.0 : 1.5, fr, sto_ok[c][g], NFR / 2,
                 mse[c][g], eps_n[c][g]);
        checks++;
        if (sto_n[c][g] != NFR / 2 || eps_n[c][g] != NFR / 2) begin
          failures++; $display("FAIL missing results");
        end
        if (c < 2) begin
          checks += 2;
          if (fr > 0.25) begin failures++; $display("FAIL STO fail rate too high"); end
          if (mse[c][g] > 1.0e-2) begin failures++; $display("FAIL CFO MSE too high"); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
