// tb_timing_sync -- checks the XCR peak search.
// Uses a short window (SEARCH_DELAY = 7, SEARCH_WIN = 20) so many searches
// fit.  Random XCR values with an index counter are streamed; detect pulses
// arrive at random times, some of them while a search is running (they must
// be ignored).  The reference tracks the state (idle / waiting / searching)
// from the rule, predicts start, searching and new_max every sample, and on
// the sample after each window checks sto_valid and that d_hat is the index
// of the first largest XCR inside the window.  Ties are forced by repeating
// the window maximum.
module tb_timing_sync;
  localparam int XW = 12, IW = 16, DLY = 7, WIN = 20;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic detect, start, searching, new_max, sto_valid;
  logic [XW-1:0] xcr;
  logic [IW-1:0] idx, d_hat;
  int checks = 0, failures = 0, n_res = 0, n_ign = 0;

  timing_sync #(.XW(XW), .IDX_W(IW), .SEARCH_DELAY(DLY), .SEARCH_WIN(WIN)) dut (
    .clk, .rst_n, .en, .detect, .xcr, .idx, .start, .searching, .new_max, .sto_valid, .d_hat);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int st, cnt, best, best_idx, exp_dhat, last_max;
    bit exp_start, exp_srch, exp_new, exp_valid;
    st = 0; cnt = 0; best = 0; best_idx = 0; exp_valid = 0; last_max = 0;
    detect = 0; xcr = 0; idx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      idx = IW'(n);
      detect = (($urandom() % 25) == 0);
      xcr = ((st == 2) && (($urandom() % 4) == 0)) ? XW'(last_max) : XW'($urandom());
      en = 1'b1;
      #1;
      exp_start = (st == 0) && detect;
      exp_srch  = (st == 2);
      exp_new   = exp_srch && (cnt == 0 || int'(xcr) > best);
      if (detect && st != 0) n_ign++;
      checks += 3;
      if (start !== exp_start)   begin failures++; $display("FAIL start n=%0d", n); end
      if (searching !== exp_srch) begin failures++; $display("FAIL searching n=%0d", n); end
      if (new_max !== exp_new)   begin failures++; $display("FAIL new_max n=%0d", n); end
      // reference state update
      exp_valid = 0;
      case (st)
        0: if (detect) begin st = 1; cnt = 0; end
        1: if (cnt == DLY - 1) begin st = 2; cnt = 0; end else cnt++;
        default: begin
          if (exp_new) begin best = int'(xcr); best_idx = n; end
          last_max = best;
          if (cnt == WIN - 1) begin st = 0; cnt = 0; exp_valid = 1; exp_dhat = best_idx; end
          else cnt++;
        end
      endcase
      @(posedge clk);
      #1;
      en = 1'b0;
      checks++;
      if (sto_valid !== exp_valid) begin failures++; $display("FAIL sto_valid n=%0d", n); end
      if (exp_valid) begin
        n_res++;
        checks++;
        if (int'(d_hat) != exp_dhat) begin failures++; $display("FAIL d_hat %0d exp %0d", d_hat, exp_dhat); end
      end
      if (($urandom() % 5) == 0) @(negedge clk);
    end
    checks++;
    if (n_res < 10 || n_ign == 0) begin failures++; $display("FAIL too few searches (%0d) or no ignored detect", n_res); end
    $display("searches=%0d ignored detects=%0d", n_res, n_ign);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
