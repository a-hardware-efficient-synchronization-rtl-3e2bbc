// energy_cor -- direct-form multiplierless energy correlator (XCR metric).
//
// Computes XCR(n) = sum_{m=0}^{D-1} |c2(m,n)| * a_m, eq. (6), with the
// coefficients quantised to {0, 0.5, 1} and split as a_m = a0_m + a1_m/2,
// eq. (12).  The |c2| stream (unsigned Q2.fx, 2+FX bits) runs down a D-tap
// delay chain whose registers stay 2+FX bits wide.  Each tap is routed to
// the a0 network, the a1 network, or neither, according to the constant
// coefficient bits.  Each network is a balanced adder tree whose level-ii
// adders are 2+ii+FX bits wide; the a1 sum is shifted right by one and added
// to the a0 sum.  XCR is unsigned Q8.fx (8+FX bits), saturated (the
// saturation is this design's choice; with the paper's coefficients the sum
// stays below 256).
//
// The coefficient vectors A0/A1 (bit m belongs to tap m, m = 0 newest)
// default to the stand-in preamble profile of ldacs_sync_pkg; set them from
// the quantised energy |p_m|^2 of the real preamble.
//
// Timing: one |c2| sample per enable.  The tap chain is registered and XCR
// has an output register, so xcr shows the window whose newest sample entered
// two enables earlier (latency 2).
module energy_cor
  import ldacs_sync_pkg::*;
#(
  parameter int unsigned FX = FX_BITS,
  parameter int unsigned D  = D_TAPS,
  parameter logic [D-1:0] A0 = am_a0(),
  parameter logic [D-1:0] A1 = am_a1()
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic [FX+1:0]   c2_mag,     // Q2.fx
  output logic [FX+7:0]   xcr         // Q8.fx
);
  localparam int unsigned TW = FX + 2;
  localparam int unsigned LV = (D > 1) ? $clog2(D) : 0;
  localparam int unsigned XW = FX + 8;

  logic [TW-1:0]    taps [D];
  logic [TW-1:0]    sel0 [D];
  logic [TW-1:0]    sel1 [D];
  logic [TW+LV-1:0] sum0, sum1;
  logic [TW+LV:0]   total;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < D; k++) taps[k] <= '0;
    end else if (en) begin
      taps[0] <= c2_mag;
      for (int k = 1; k < D; k++) taps[k] <= taps[k-1];
    end
  end

  // coefficient multiplexers: constant routing of each tap
  for (genvar k = 0; k < D; k++) begin : g_sel
    assign sel0[k] = A0[k] ? taps[k] : '0;
    assign sel1[k] = A1[k] ? taps[k] : '0;
  end

  adder_tree #(.N(D), .W(TW)) u_tree_a0 (.din(sel0), .sum(sum0));
  adder_tree #(.N(D), .W(TW)) u_tree_a1 (.din(sel1), .sum(sum1));

  assign total = (TW+LV+1)'(sum0) + (TW+LV+1)'(sum1 >> 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  xcr <= '0;
    else if (en) xcr <= (total > (TW+LV+1)'((1 << XW) - 1)) ? '1 : total[XW-1:0];
  end
endmodule
