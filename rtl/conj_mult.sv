// conj_mult -- conjugate complex multiplier p = conj(a) * b with
// requantisation to Q1.F.
//
// This is the multiplier of the synchronizer's datapath that forms the
// instant products c1(n) = r*(n) r(n-L), c2(n) = r*(n) r(n-2L) and the
// instant energy ee(n) = r*(n) r(n) (eqs. (2), (3)).  Inputs are Q1.(IN_W-1).
// The full-precision result is Q3.(2*IN_W-2); it is rounded to F fractional
// bits (round half up: add half an LSB, then drop the lower bits) and
// saturated to the Q1.F range [-1, 1-2^-F].  Rounding and saturation are this
// design's choices; the scheme only fixes the output format Q1.F (F = fa = 5
// in the proposed configuration).  Plain truncation would bias both parts of
// every product by -1/2 LSB, which at 5 fraction bits shifts the angle of
// the summed metrics enough to cost several hundredths of a subcarrier in
// the CFO estimate.
//
// Timing: one register stage, advanced when en = 1.
module conj_mult #(
  parameter int unsigned IN_W = 16,
  parameter int unsigned F    = 5
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic signed [IN_W-1:0] a_re,
  input  logic signed [IN_W-1:0] a_im,
  input  logic signed [IN_W-1:0] b_re,
  input  logic signed [IN_W-1:0] b_im,
  output logic signed [F:0]      p_re,
  output logic signed [F:0]      p_im
);
  localparam int unsigned PW    = 2 * IN_W + 1;     // Q3.(2*IN_W-2)
  localparam int unsigned SHIFT = 2 * IN_W - 2 - F; // drop to F fraction bits

  localparam logic signed [PW-1:0] HALF = PW'(1) <<< (SHIFT - 1);

  logic signed [PW-1:0] full_re, full_im;
  logic signed [PW-1:0] sh_re, sh_im;
  logic signed [F:0]    q_re, q_im;

  function automatic logic signed [F:0] sat(input logic signed [PW-1:0] v);
    localparam logic signed [PW-1:0] MAXV = PW'((1 <<< F) - 1);
    localparam logic signed [PW-1:0] MINV = -PW'(1 <<< F);
    if (v > MAXV)      return {1'b0, {F{1'b1}}};
    else if (v < MINV) return {1'b1, {F{1'b0}}};
    else               return v[F:0];
  endfunction

  always_comb begin
    full_re = PW'(a_re * b_re) + PW'(a_im * b_im);
    full_im = PW'(a_re * b_im) - PW'(a_im * b_re);
    sh_re   = (full_re + HALF) >>> SHIFT;
    sh_im   = (full_im + HALF) >>> SHIFT;
    q_re    = sat(sh_re);
    q_im    = sat(sh_im);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_re <= '0;
      p_im <= '0;
    end else if (en) begin
      p_re <= q_re;
      p_im <= q_im;
    end
  end
endmodule
