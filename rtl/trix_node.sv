// trix_node -- TRIX grid nodes: forward the clock on the second of three edges.
//
// A node listens to its three in-neighbours on the layer below and repeats the
// clock edge as soon as two of the three have delivered it. With the clock carried
// as a level (a square wave), "two of three have risen" is the 2-of-3 majority of
// the three input levels, and the same holds for the falling edge. The output
// therefore switches at the median of the three input arrival times, which is the
// forwarding rule of TRIX: one faulty in-neighbour, silent or early, can neither
// hold the node back past the later correct input nor fire it before the earlier
// one. The node holds no state, so a grid of them stays acyclic and any wrong
// value is flushed out by the next edge.
//
// The module holds N independent nodes side by side (bit i of every port belongs
// to node i), so that a whole grid layer is one instance; N = 1 is a single node.
//
// Interface: in_clk[c][i] is the clock arriving at node i over its link c (link 0
// from column x-1, link 1 from x, link 2 from x+1); clk_out[i] goes to the three
// nodes above. Timing: combinational, zero delay here; the node's real switching
// time is counted in the link delay.
//
// From the design's source: the second-of-three forwarding rule and the three
// in-neighbours. This design's choice: the clock is a level and the rule is
// realised as a majority gate, the simplest circuit that fires on the second
// arrival for both edges, provided an edge has reached all three inputs before the
// next, opposite edge reaches any of them.
module trix_node #(
  parameter int unsigned N = 1   // nodes side by side
) (
  input  logic [2:0][N-1:0] in_clk,   // clocks over links 0, 1, 2
  output logic [N-1:0]      clk_out   // forwarded clocks
);
  timeunit 1ns;
  timeprecision 100ps;

  always_comb begin
    clk_out = (in_clk[0] & in_clk[1]) | (in_clk[0] & in_clk[2]) | (in_clk[1] & in_clk[2]);
  end

endmodule
