// rx_buffer -- shared received-sample buffer of the synchronizer.
//
// Two cascaded delays of L samples each (L = 16*Nov = 64) give the lagged
// samples r(n-L) and r(n-2L) that the conjugate products c1 and c2 need.
// One buffer serves both products, as in the synchronizer architecture; the
// two delays are circular buffers (delay_line).  Samples are complex Q1.15.
//
// Timing: en is the sample strobe.  r_l and r_2l are combinational reads and
// show the samples that arrived L and 2L strobes before the current r.  Both
// outputs are zero until that many samples have been received since reset
// (this design's choice; it makes the metrics start from zero).
module rx_buffer
  import ldacs_sync_pkg::*;
#(
  parameter int unsigned L = L_REP
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  iq_t  r,
  output iq_t  r_l,
  output iq_t  r_2l
);
  delay_line #(.W($bits(iq_t)), .DEPTH(L)) u_delay_l1 (
    .clk, .rst_n, .en, .din(r),   .dout(r_l)
  );
  delay_line #(.W($bits(iq_t)), .DEPTH(L)) u_delay_l2 (
    .clk, .rst_n, .en, .din(r_l), .dout(r_2l)
  );
endmodule
