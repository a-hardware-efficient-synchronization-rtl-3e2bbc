// fre_offset -- fractional carrier-frequency-offset estimator, eq. (10).
//
// Combines the angles of the two autocorrelation metrics: phi2 (lag 2L) is
// accurate but only unambiguous within +-1 subcarrier spacing, phi1 (lag L)
// is coarser but unambiguous within +-2.  The estimate in subcarrier
// spacings is
//     eps = phi2/pi        if -pi/2 < phi1 < pi/2
//     eps = phi2/pi + 2    if  phi1 > pi/2
//     eps = phi2/pi - 2    otherwise.
// phi is the rotation the offset causes, phi = 2*pi*eps*lag/N.  With the
// products c = r*(n) r(n-lag) the metric angle is -phi, so the block negates
// the incoming angles.
//
// phi1 is captured on the sample that starts the timing search (preamble
// detected, AC1 settled over the first symbol); phi2 is captured on every
// sample that becomes the running XCR maximum, so it ends up as the AC2
// angle at the estimated symbol timing (AC2 then spans the second symbol).
// These capture points are this design's choice.
//
// Interface: angles are signed ANG_W bits, 2^(ANG_W-1) = pi.  eps_hat is
// signed Q3.(ANG_W-1): eps_hat / 2^(ANG_W-1) subcarrier spacings.
// Timing: inputs taken on enables; eps_valid is a one-sample pulse on the
// sample after done.
module fre_offset #(
  parameter int unsigned ANG_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic signed [ANG_W-1:0] ang1,      // angle of AC1
  input  logic signed [ANG_W-1:0] ang2,      // angle of AC2
  input  logic                    latch1,
  input  logic                    latch2,
  input  logic                    done,
  output logic                    eps_valid,
  output logic signed [ANG_W+1:0] eps_hat
);
  localparam logic signed [ANG_W-1:0]  HALF_PI = ANG_W'(1 << (ANG_W - 2));
  localparam logic signed [ANG_W+1:0]  TWO     = (ANG_W+2)'(1 << ANG_W);

  logic signed [ANG_W-1:0] phi1, phi2;
  logic signed [ANG_W+1:0] eps_c;

  always_comb begin
    if (phi1 > -HALF_PI && phi1 < HALF_PI) eps_c = (ANG_W+2)'(phi2);
    else if (phi1 > HALF_PI)               eps_c = (ANG_W+2)'(phi2) + TWO;
    else                                   eps_c = (ANG_W+2)'(phi2) - TWO;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phi1      <= '0;
      phi2      <= '0;
      eps_valid <= 1'b0;
      eps_hat   <= '0;
    end else if (en) begin
      if (latch1) phi1 <= -ang1;
      if (latch2) phi2 <= -ang2;
      eps_valid <= done;
      if (done) eps_hat <= eps_c;
    end
  end
endmodule
