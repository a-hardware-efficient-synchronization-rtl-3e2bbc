// tb_cordic_vec -- checks magnitude and angle of the vectoring CORDIC.
// Random 13-bit operands in all four quadrants, on the axes and at full
// scale are streamed one per strobe; the reference is sqrt(x^2+y^2) and
// atan2(y,x)/pi * 2^15 in real arithmetic.  Each result must appear on the
// outputs right after the ITER+2-th strobe counted from (and including) the
// one that takes its operands, magnitude within 1.5 LSB + 0.1 %, angle
// within 12 LSB of the 16-bit angle word (about 0.07 degree) plus a term
// that grows as the vector gets short, 8192/(pi*|v|) LSB, because a short
// vector carries little angle information in its integer components.
module tb_cordic_vec;
  localparam int IN_W = 13, ITER = 14, LAT = ITER + 2;
  localparam real PI = 3.14159265358979;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic signed [IN_W-1:0] x, y;
  logic        [IN_W-1:0] mag;
  logic signed [15:0]     ang;
  real qm [$], qa [$], qr [$];
  int checks = 0, failures = 0;

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  cordic_vec dut (.clk, .rst_n, .en, .x, .y, .mag, .ang);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real m, a, da, tol;
    x = '0; y = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000 + LAT - 1; n++) begin
      @(negedge clk);
      case (n % 5)
        0: begin x = IN_W'($urandom()); y = IN_W'($urandom()); end
        1: begin x = IN_W'($signed(8'($urandom()))); y = IN_W'($signed(8'($urandom()))); end
        2: begin x = (n % 10 == 2) ? -13'sd4096 : 13'sd4095; y = IN_W'($urandom()); end
        3: begin x = 0; y = (n % 2) ? 13'sd1000 : -13'sd1000; end
        default: begin x = -IN_W'($signed(12'($urandom() | 1))); y = 0; end
      endcase
      m = $sqrt(real'(x) * x + real'(y) * y);
      a = (x == 0 && y == 0) ? 0.0 : $atan2(real'(y), real'(x)) / PI * 32768.0;
      qm.push_back(m); qa.push_back(a); qr.push_back(m);
      en = 1'b1;
      @(posedge clk);
      #1;
      if (n >= LAT - 1) begin
        m = qm.pop_front(); a = qa.pop_front(); void'(qr.pop_front());
        checks++;
        if (rabs(real'(mag) - m) > 1.5 + 0.001 * m) begin
          failures++; $display("FAIL mag %0d exp %f", mag, m);
        end
        da = real'(ang) - a;
        if (da > 32768.0) da -= 65536.0;
        if (da < -32768.0) da += 65536.0;
        tol = 12.0 + 8192.0 / (PI * (m + 1.0));
        checks++;
        if (rabs(da) > tol) begin failures++; $display("FAIL ang %0d exp %f (mag %f)", ang, a, m); end
      end
      if (($urandom() % 6) == 0) begin
        @(negedge clk); en = 1'b0; @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
