// tb_conj_mult -- checks p = conj(a)*b rounded to Q1.F and saturated.
// The reference works in 64-bit integers: exact real and imaginary parts,
// scaled by 2^-(30-F) with round half up, clipped to [-2^F, 2^F-1].  Random
// operands, small operands and full-scale corners (which saturate) are
// applied; the output is checked one strobe later (latency 1).
module tb_conj_mult;
  localparam int F = 5;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic signed [15:0] a_re, a_im, b_re, b_im;
  logic signed [F:0]  p_re, p_im;
  int checks = 0, failures = 0, n_sat = 0;

  conj_mult dut (.clk, .rst_n, .en, .a_re, .a_im, .b_re, .b_im, .p_re, .p_im);
  always #5 clk = ~clk;

  function automatic longint ref_q(longint v);
    longint q;
    q = (v + (64'sd1 <<< (29 - F))) >>> (30 - F);
    if (q > (1 <<< F) - 1) q = (1 <<< F) - 1;
    if (q < -(1 <<< F))    q = -(1 <<< F);
    return q;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint er, ei, fr, fi;
    a_re = 0; a_im = 0; b_re = 0; b_im = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      case (n % 4)
        0: begin a_re = 16'($urandom()); a_im = 16'($urandom()); b_re = 16'($urandom()); b_im = 16'($urandom()); end
        1: begin a_re = 16'($signed(10'($urandom()))); a_im = 16'($signed(12'($urandom())));
                 b_re = 16'($urandom()); b_im = 16'($signed(14'($urandom()))); end
        2: begin a_re = (n % 8 == 2) ? -16'sd32768 : 16'sd32767; a_im = 16'($urandom());
                 b_re = a_re; b_im = 16'($urandom()); end
        default: begin a_re = 16'($urandom()); a_im = a_re; b_re = a_re; b_im = a_re; end
      endcase
      fr = longint'(a_re) * b_re + longint'(a_im) * b_im;
      fi = longint'(a_re) * b_im - longint'(a_im) * b_re;
      er = ref_q(fr);
      ei = ref_q(fi);
      if (er == (1 <<< F) - 1 || er == -(1 <<< F)) n_sat++;
      en = 1'b1;
      @(negedge clk);
      en = 1'b0;
      checks += 2;
      if (longint'(p_re) != er) begin failures++; $display("FAIL re %0d exp %0d", p_re, er); end
      if (longint'(p_im) != ei) begin failures++; $display("FAIL im %0d exp %0d", p_im, ei); end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
