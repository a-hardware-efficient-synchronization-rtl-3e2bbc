// tb_fre_offset -- checks the CFO combination rule, eq. (10).
// Angle words are driven at random; latch1, latch2 and done are pulsed at
// random.  The reference keeps the captured, negated angles and computes the
// estimate in real arithmetic: phi2/pi, plus 2 if phi1 > pi/2, minus 2 if
// phi1 <= -pi/2 or phi1 == pi/2 ("otherwise").  eps_valid and eps_hat are
// checked on the sample after each done (angles captured on the done sample
// itself count only for later estimates); all three branches and the
// boundary angles +-pi/2 and -pi must be exercised.
module tb_fre_offset;
  localparam int AW = 16;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic signed [AW-1:0] ang1, ang2;
  logic latch1, latch2, done, eps_valid;
  logic signed [AW+1:0] eps_hat;
  int checks = 0, failures = 0, n0 = 0, np = 0, nm = 0;

  fre_offset dut (.clk, .rst_n, .en, .ang1, .ang2, .latch1, .latch2, .done,
                               .eps_valid, .eps_hat);
  always #5 clk = ~clk;

  function automatic int neg16(int a);      // negate in 16-bit wrap-around
    int v;
    v = -a;
    if (v > 32767) v -= 65536;
    return v;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p1, p2, sel;
    real e_ref, e_got;
    bit v_ref;
    p1 = 0; p2 = 0;
    ang1 = 0; ang2 = 0; latch1 = 0; latch2 = 0; done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      sel = $urandom() % 8;
      ang1 = (sel == 0) ? 16'sd16384 : (sel == 1) ? -16'sd16384 : (sel == 2) ? -16'sd32768 : AW'($urandom());
      ang2 = (sel == 3) ? -16'sd32768 : AW'($urandom());
      latch1 = ($urandom() % 3) == 0;
      latch2 = ($urandom() % 3) == 0;
      done   = ($urandom() % 4) == 0;
      en = 1'b1;
      v_ref = done;
      if (p1 > -16384 && p1 < 16384) begin e_ref = real'(p2) / 32768.0;       if (done) n0++; end
      else if (p1 > 16384)           begin e_ref = real'(p2) / 32768.0 + 2.0; if (done) np++; end
      else                           begin e_ref = real'(p2) / 32768.0 - 2.0; if (done) nm++; end
      // angles captured on this sample count from the next one on
      if (latch1) p1 = neg16(int'(ang1));
      if (latch2) p2 = neg16(int'(ang2));
      @(posedge clk);
      #1;
      en = 1'b0;
      checks++;
      if (eps_valid !== v_ref) begin failures++; $display("FAIL eps_valid n=%0d", n); end
      if (v_ref) begin
        e_got = real'(eps_hat) / 32768.0;
        checks++;
        if (e_got != e_ref) begin failures++; $display("FAIL eps %f exp %f", e_got, e_ref); end
      end
    end
    checks++;
    if (n0 == 0 || np == 0 || nm == 0) begin failures++; $display("FAIL branch not exercised"); end
    $display("branches: 0:%0d +2:%0d -2:%0d", n0, np, nm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
