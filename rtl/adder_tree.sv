// adder_tree -- balanced binary adder network for unsigned operands.
//
// Level ii of the network adds pairs from level ii-1 and is ii bits wider
// than the inputs, so no adder is wider than it has to be (with W = 2 + fx
// the level-ii adders are 2 + ii + fx bits wide).  An odd operand at the end
// of a level is passed on unchanged.  The widening-per-level rule is the one
// of the direct-form correlator; the balanced pairing and pass-through of an
// odd operand are this design's choices.
//
// Interface: N unsigned W-bit operands in, their W+clog2(N)-bit sum out.
// Timing: purely combinational.
module adder_tree #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 6,
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0
) (
  input  logic [W-1:0]        din [N],
  output logic [W+LEVELS-1:0] sum
);
  // number of operands at level l is ceil(N / 2^l)
  function automatic int unsigned cnt(input int unsigned l);
    return (N + (1 << l) - 1) >> l;
  endfunction

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    logic [W+l-1:0] node [cnt(l)];
    if (l == 0) begin : g_leaf
      for (genvar k = 0; k < N; k++) begin : g_in
        assign node[k] = din[k];
      end
    end else begin : g_add
      for (genvar k = 0; k < cnt(l); k++) begin : g_node
        if (2 * k + 1 < cnt(l - 1)) begin : g_pair
          assign node[k] = (W+l)'(g_lvl[l-1].node[2*k]) + (W+l)'(g_lvl[l-1].node[2*k+1]);
        end else begin : g_pass
          assign node[k] = (W+l)'(g_lvl[l-1].node[2*k]);
        end
      end
    end
  end

  assign sum = g_lvl[LEVELS].node[0];
endmodule
