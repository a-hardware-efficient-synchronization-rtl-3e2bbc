// metric_acc -- recursive moving sum over the last DEPTH = 2L samples.
//
// One lane of the AC1, AC2 or ENE metric in its recursive form, eq. (11):
//   S(n) = S(n-1) + x(n) - x(n-2L).
// The "Delay 2L" buffer (a delay_line) keeps the last 2L inputs, a register
// holds S, and one three-input adder updates it.  A complex metric uses two
// lanes.  The input is the instant value in Q1.F (IN_W = F+1 bits); the sum
// is Q8.F (OUT_W = F+8 bits), enough for 128 terms of magnitude below 1.
// The sum wraps modulo 2^OUT_W, so even an intermediate overflow cancels out
// once the offending sample leaves the window: S is always the exact window
// sum whenever that sum fits.
//
// Timing: en is the sample strobe; sum is registered and includes x from the
// same enable (latency 1).  The history reads as zero after reset.
module metric_acc #(
  parameter int unsigned IN_W  = 6,
  parameter int unsigned OUT_W = 13,
  parameter int unsigned DEPTH = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] sum
);
  logic signed [IN_W-1:0] x_old;

  delay_line #(.W(IN_W), .DEPTH(DEPTH)) u_delay_2l (
    .clk, .rst_n, .en, .din(x), .dout(x_old)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  sum <= '0;
    else if (en) sum <= sum + OUT_W'(x) - OUT_W'(x_old);
  end
endmodule
