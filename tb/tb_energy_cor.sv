// tb_energy_cor -- checks the direct-form energy correlator at its default
// size (460 taps, fx = 4) and default coefficient vector.
// Random |c2| values (Q2.4) are streamed with strobe gaps.  The reference
// keeps its own history of accepted inputs and, for each window, adds the
// taps whose coefficient is 1 plus half (rounded down) of the sum of the
// taps whose coefficient is 1/2, with the coefficient read from the
// package's level function, not from the block's bit vectors; results above
// the Q8.4 range saturate.  The output must match two strobes after the
// newest sample of its window entered.  A run of full-scale inputs drives
// the sum into saturation.
module tb_energy_cor;
  import ldacs_sync_pkg::*;
  localparam int FXL = 4, D = D_TAPS;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [FXL+1:0] c2_mag;
  logic [FXL+7:0] xcr;
  int hist [$];
  int checks = 0, failures = 0, n_sat = 0;

  energy_cor dut (.clk, .rst_n, .en, .c2_mag, .xcr);
  always #5 clk = ~clk;

  function automatic int ref_xcr(int upto);   // window ending at hist[upto]
    int s0, s1, v, lev;
    s0 = 0; s1 = 0;
    for (int m = 0; m < D; m++) begin
      v = (upto - m >= 0) ? hist[upto - m] : 0;
      lev = int'(am_level(m));
      if (lev == 2) s0 += v;
      else if (lev == 1) s1 += v;
    end
    v = s0 + s1 / 2;
    return (v > 4095) ? 4095 : v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    c2_mag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2500; n++) begin
      @(negedge clk);
      if (n >= 1200 && n < 1800) c2_mag = (n < 1700) ? 6'd63 : 6'($urandom());
      else                       c2_mag = 6'($urandom() % ((n % 3 == 0) ? 64 : 24));
      hist.push_back(int'(c2_mag));
      en = 1'b1;
      @(posedge clk);
      #1;
      en = 1'b0;
      if (n >= 1) begin
        e = ref_xcr(n - 1);
        if (e == 4095) n_sat++;
        checks++;
        if (int'(xcr) != e) begin failures++; $display("FAIL n=%0d xcr=%0d exp %0d", n, xcr, e); end
      end
      if (($urandom() % 5) == 0) begin @(negedge clk); @(negedge clk); end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
