// preamble_detect -- preamble detection comparator, eq. (7).
//
// Forms AC(n) = |AC1(n)| + |AC2(n)| (the small adder ahead of the comparator
// in the synchronizer) and compares it with the energy metric ENE(n).  The
// first preamble symbol is declared present once AC > ENE has held for M
// consecutive samples (M = m = 8*Nov = 32).  Magnitudes and ENE must share
// one binary point (Q8.fa here).
//
// Interface: mag1, mag2 unsigned MAG_W bits; ene signed ENE_W bits (never
// negative in practice).  cond is the raw comparison, run the current length
// of the run of true comparisons (saturating at M), detect a pulse one sample
// period long (held until the next enable) on the sample that completes the M-th consecutive true comparison.  A new
// pulse needs the comparison to fail and a fresh run of M (this design's
// choice; the scheme does not say how detection re-arms).
//
// Timing: cond is combinational; run and detect are registered (latency 1).
module preamble_detect #(
  parameter int unsigned MAG_W = 13,
  parameter int unsigned ENE_W = 13,
  parameter int unsigned M     = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic        [MAG_W-1:0] mag1,
  input  logic        [MAG_W-1:0] mag2,
  input  logic signed [ENE_W-1:0] ene,
  output logic                    cond,
  output logic [$clog2(M+1)-1:0]  run,
  output logic                    detect
);
  localparam int unsigned CW = $clog2(M + 1);
  localparam int unsigned SW = ((MAG_W + 1) > ENE_W ? (MAG_W + 1) : ENE_W) + 1;

  logic signed [SW-1:0] ac, ene_x;

  always_comb begin
    ac    = SW'(mag1) + SW'(mag2);
    ene_x = SW'(ene);
    cond  = ac > ene_x;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= '0;
      detect <= 1'b0;
    end else if (en) begin
      detect <= cond && (run == CW'(M - 1));
      if (!cond)                run <= '0;
      else if (run != CW'(M))   run <= run + 1'b1;
    end
  end

  // The assertions are disabled during reset; that disable iff is the only
  // place where rst_n is read outside an asynchronous reset.
  // a detection always coincides with a completed run of M
  a_detect_full_run: assert property (@(posedge clk) disable iff (!rst_n)
    detect |-> run == CW'(M));
endmodule
