// tb_metric_acc -- checks the recursive moving sum against a direct sum.
// Random Q1.5 inputs (with runs of extreme values to push the sum to its
// range limits) are applied with random strobe gaps; after every strobe the
// sum must equal the plain sum of the last 2L = 128 accepted inputs
// (latency 1), over several thousand samples so the window wraps many times.
module tb_metric_acc;
  localparam int IN_W = 6, OUT_W = 13, DEPTH = 128;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic signed [IN_W-1:0]  x;
  logic signed [OUT_W-1:0] sum;
  int hist [$];
  int checks = 0, failures = 0;

  metric_acc dut (.clk, .rst_n, .en, .x, .sum);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if ((n / 300) % 3 == 1)      x = 6'sd31;
      else if ((n / 300) % 3 == 2 && n % 2 == 0) x = -6'sd32;
      else                         x = IN_W'($urandom());
      hist.push_back(int'(x));
      en = 1'b1;
      @(negedge clk);
      en = 1'b0;
      s = 0;
      for (int k = 0; k < DEPTH && k < hist.size(); k++) s += hist[hist.size() - 1 - k];
      checks++;
      if (int'(sum) != s) begin failures++; $display("FAIL n=%0d sum=%0d exp %0d", n, sum, s); end
      while (($urandom() % 4) == 0) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
