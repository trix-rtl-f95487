// trix_layer -- one layer of the TRIX grid: W nodes and their 3W incoming links.
//
// Node x of the layer receives the clocks of columns x-1, x and x+1 of the layer
// below over three links and forwards the clock when the second of the three edges
// arrives. Columns wrap around (column W-1 and column 0 are neighbours), the grid
// being a cylinder. The layer is written on whole W-bit vectors: link group c
// carries the layer below rotated by c-1 columns, so link c of every node sits at
// the same bit position as the node.
//
// Interface: below_clk[x] is the clock of node x of the layer below; slow[c][x]
// sets the delay of link c into node x (1: D, 0: D-U; link c comes from column
// x-1+c modulo W); clk[x] is the clock of node x of this layer. Timing: an edge
// reaches clk[x] D-U to D time units after the second of its three sources sent it.
//
// From the design's source: three in-neighbours per node on the layer below and
// the cylinder. This design's choice: grouping the grid by layers.
module trix_layer #(
  parameter int unsigned W = 2 * trix_pkg::TRIX_H_DEFAULT + 2,  // nodes per layer
  parameter int unsigned D = trix_pkg::TRIX_D_DEFAULT,          // maximum link delay
  parameter int unsigned U = trix_pkg::TRIX_U_DEFAULT           // link delay uncertainty
) (
  input  logic [W-1:0]      below_clk,
  input  logic [2:0][W-1:0] slow,
  output logic [W-1:0]      clk
);
  timeunit 1ns;
  timeprecision 100ps;

  logic [2:0][W-1:0] src_clk;   // clock of the sender of link c of node x, at bit x
  logic [2:0][W-1:0] arr_clk;   // the same clock after the link delay

  // Link 0 comes from column x-1, link 1 from x, link 2 from x+1 (modulo W).
  assign src_clk[0] = {below_clk[W-2:0], below_clk[W-1]};
  assign src_clk[1] = below_clk;
  assign src_clk[2] = {below_clk[0], below_clk[W-1:1]};

  // All 3W links of the layer in one bundle (link c of node x is bit c*W+x).
  trix_link #(.N(3 * W), .D(D), .U(U)) u_link (
    .in_clk  (src_clk),
    .slow    (slow),
    .out_clk (arr_clk)
  );

  trix_node #(.N(W)) u_node (
    .in_clk  (arr_clk),
    .clk_out (clk)
  );

endmodule
