// cordic_vec -- rectangular-to-polar "phase translation" unit.
//
// Converts a complex value (x, y) to magnitude |x + jy| and angle
// atan2(y, x).  The synchronizer uses three of these: on AC1 and AC2 (angle
// for the CFO estimate, magnitude for preamble detection) and on the instant
// product c2 (magnitude for the energy correlator).  Only the function is
// fixed by the scheme; this is a plain pipelined CORDIC in vectoring mode.
//
// How it works: a first stage rotates the left half-plane by pi so that
// x >= 0; each of ITER micro-rotation stages then rotates by +-atan(2^-i)
// toward the x axis and accumulates the angle.  The final x equals
// K * |x + jy| with the CORDIC gain K = 1.6468; an output stage multiplies by
// 1/K (constant 19898 / 2^15).  G guard bits are carried internally.
//
// Interface: x, y are signed IN_W-bit two's complement with any binary
// point; mag is unsigned IN_W bits with the same binary point (saturated;
// |x + jy| <= sqrt(2) * 2^(IN_W-1) always fits).  ang is signed ANG_W bits
// with 2^(ANG_W-1) standing for pi, i.e. ang / 2^(ANG_W-1) = angle / pi.
//
// Timing: fully pipelined, one input per enable, latency ITER + 2 enables.
module cordic_vec
  import ldacs_sync_pkg::*;
#(
  parameter int unsigned IN_W = 13,
  parameter int unsigned ITER = 14,
  parameter int unsigned G    = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic signed [IN_W-1:0]  x,
  input  logic signed [IN_W-1:0]  y,
  output logic        [IN_W-1:0]  mag,
  output logic signed [ANG_W-1:0] ang
);
  localparam int unsigned W  = IN_W + 2 + G;       // internal data width
  localparam int unsigned ZW = ANG_W + 1;          // angle with room for +-pi
  localparam int unsigned KW = 16;
  localparam logic [KW-1:0] KINV = 16'd19898;      // 2^15 / 1.64676

  logic signed [W-1:0]  xs [ITER+1];
  logic signed [W-1:0]  ys [ITER+1];
  logic signed [ZW-1:0] zs [ITER+1];

  logic signed [W-1:0]  x_in, y_in;
  logic signed [W+KW:0] prod;
  logic        [IN_W-1:0] mag_c;

  assign x_in = W'(x) <<< G;
  assign y_in = W'(y) <<< G;

  // stage 0: pre-rotation into the right half-plane
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0;
      ys[0] <= '0;
      zs[0] <= '0;
    end else if (en) begin
      if (x_in < 0) begin
        xs[0] <= -x_in;
        ys[0] <= -y_in;
        zs[0] <= (y_in >= 0) ? ZW'(1 << (ANG_W - 1)) : -ZW'(1 << (ANG_W - 1));
      end else begin
        xs[0] <= x_in;
        ys[0] <= y_in;
        zs[0] <= '0;
      end
    end
  end

  // micro-rotation stages
  for (genvar i = 0; i < ITER; i++) begin : g_stage
    localparam logic signed [ZW-1:0] ATAN = ZW'(atan_tab(i));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[i+1] <= '0;
        ys[i+1] <= '0;
        zs[i+1] <= '0;
      end else if (en) begin
        if (ys[i] >= 0) begin
          xs[i+1] <= xs[i] + (ys[i] >>> i);
          ys[i+1] <= ys[i] - (xs[i] >>> i);
          zs[i+1] <= zs[i] + ATAN;
        end else begin
          xs[i+1] <= xs[i] - (ys[i] >>> i);
          ys[i+1] <= ys[i] + (xs[i] >>> i);
          zs[i+1] <= zs[i] - ATAN;
        end
      end
    end
  end

  // gain compensation and output register
  always_comb begin
    prod = (W+KW+1)'(xs[ITER]) * $signed({1'b0, KINV});
    prod = prod >>> (KW - 1 + G);
    if (prod < 0)                                mag_c = '0;
    else if (prod > (W+KW+1)'((1 << IN_W) - 1))  mag_c = '1;
    else                                         mag_c = prod[IN_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mag <= '0;
      ang <= '0;
    end else if (en) begin
      mag <= mag_c;
      ang <= zs[ITER][ANG_W-1:0];   // +pi wraps to -pi
    end
  end
endmodule
