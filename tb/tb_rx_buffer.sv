// tb_rx_buffer -- checks the two L-sample delays of the received buffer.
// Random complex samples are applied with random gaps in the sample strobe;
// a queue of every accepted sample is the reference.  Before each accepted
// sample the outputs must equal the samples L and 2L strobes back (zero while
// the history is shorter than that).  Also checks that outputs do not move
// on cycles without a strobe.
module tb_rx_buffer;
  import ldacs_sync_pkg::*;
  localparam int unsigned L = 64;
  localparam int unsigned N = 1000;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  iq_t  r, r_l, r_2l;
  iq_t  hist [$];
  int   checks = 0, failures = 0;

  rx_buffer dut (.clk, .rst_n, .en, .r, .r_l, .r_2l);
  always #5 clk = ~clk;

  initial begin
    repeat (20 * N) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iq_t e1, e2, hold1;
    r = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      en = 1'b0;
      if (($urandom() % 5) == 0) begin
        hold1 = r_l;
        @(negedge clk);
        checks++;
        if (r_l !== hold1) begin failures++; $display("FAIL output moved without strobe"); end
      end
      r = iq_t'($urandom());
      e1 = (n >= L)     ? hist[n - L]     : '0;
      e2 = (n >= 2 * L) ? hist[n - 2 * L] : '0;
      checks += 2;
      if (r_l !== e1)  begin failures++; $display("FAIL n=%0d r_l=%h exp %h", n, r_l, e1); end
      if (r_2l !== e2) begin failures++; $display("FAIL n=%0d r_2l=%h exp %h", n, r_2l, e2); end
      hist.push_back(r);
      en = 1'b1;
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
