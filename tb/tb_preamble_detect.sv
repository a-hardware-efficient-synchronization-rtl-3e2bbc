// tb_preamble_detect -- checks the |AC1|+|AC2| > ENE comparison and the
// m-consecutive-samples rule (M = 32).
// Random magnitudes and energies are applied in bursts whose comparison is
// true for runs of random length (some shorter, some longer than M, some
// exactly M) separated by false samples, plus ties (AC == ENE, which must
// count as false).  A reference counter written from the rule predicts
// the comparison, the run length and the one-sample detect pulse on the M-th
// consecutive true sample; all three are checked every strobe.
module tb_preamble_detect;
  localparam int MAG_W = 13, ENE_W = 13, M = 32;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [MAG_W-1:0] mag1, mag2;
  logic signed [ENE_W-1:0] ene;
  logic cond, detect;
  logic [$clog2(M+1)-1:0] run;
  int checks = 0, failures = 0, n_det = 0;

  preamble_detect dut (
    .clk, .rst_n, .en, .mag1, .mag2, .ene, .cond, .run, .detect);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // set inputs so that the comparison is want_true
  task automatic drive(bit want_true, bit tie);
    int a, b, e;
    a = $urandom_range(0, 2000);
    b = $urandom_range(0, 2000);
    if (tie)            e = a + b;
    else if (want_true) e = (a + b == 0) ? 0 : $urandom_range(0, a + b - 1);
    else                e = $urandom_range(a + b, 4095);
    if (want_true && a + b == 0) begin a = 1; e = 0; end
    mag1 = MAG_W'(a); mag2 = MAG_W'(b); ene = ENE_W'(e);
  endtask

  initial begin
    int ref_run, len;
    bit c, ref_det;
    mag1 = 0; mag2 = 0; ene = 0;
    ref_run = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int burst = 0; burst < 120; burst++) begin
      len = (burst % 4 == 0) ? M : $urandom_range(1, 2 * M + 10);
      for (int k = 0; k < len + 3; k++) begin
        @(negedge clk);
        c = (k < len);
        drive(c, (k == len + 1) && (burst % 2 == 0));
        en = 1'b1;
        #1;
        checks++;
        if (cond !== c) begin failures++; $display("FAIL cond %0b exp %0b", cond, c); end
        ref_det = c && (ref_run == M - 1);
        if (!c) ref_run = 0; else if (ref_run != M) ref_run++;
        @(posedge clk);
        #1;
        en = 1'b0;
        checks += 2;
        if (detect !== ref_det) begin failures++; $display("FAIL detect %0b exp %0b", detect, ref_det); end
        if (int'(run) != ref_run) begin failures++; $display("FAIL run %0d exp %0d", run, ref_run); end
        if (detect) n_det++;
        if (($urandom() % 3) == 0) begin
          @(negedge clk);
          checks++;
          if (detect !== ref_det) begin failures++; $display("FAIL detect not held between strobes"); end
        end
      end
    end
    checks++;
    if (n_det == 0) begin failures++; $display("FAIL no detection"); end
    $display("detections: %0d", n_det);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
