// trix_grid -- the TRIX clock distribution grid: H layers of W nodes on a cylinder.
//
// Layer 0 is the row of clock generators, which are outside this module and enter
// as src_clk. Every node (x,y), 1 <= y <= H, receives the clock of nodes
// (x-1,y-1), (x,y-1) and (x+1,y-1) over three links and forwards it when the
// second of the three edges has arrived. Columns wrap around (column W-1 and
// column 0 are neighbours), so the grid is a cylinder. All links point one layer
// up, so the grid has no feedback: it holds no state of its own and recovers from
// any transient upset with the next clock edge. With at most one faulty
// in-neighbour per node, every correct node still has two correct inputs and
// fires between their arrival times.
//
// Interface:
//   src_clk[x]          clock of generator x (layer 0), all ideally in phase.
//   link_slow[y][c][x]  delay choice of link c into node (x,y+1): 1 gives D,
//                       0 gives D-U. Link c comes from column x-1+c.
//   node_clk[y][x]      clock of node (x,y); layer 0 repeats src_clk.
// Timing: an edge leaving all generators at time t reaches layer y between
//   t + y*(D-U) and t + y*D. Consecutive opposite edges must be further apart
//   than H*U plus margin, so that each edge has reached all three inputs of a node
//   before the next one starts to arrive there.
//
// From the design's source: the topology, the cylinder for finite width, the
// median forwarding rule and H = 2000. This design's choices: the clock is a
// level and nodes are majority gates (see trix_node); width W = 2H+2, the smallest
// cylinder in which node (0,H) and its right-hand neighbour see exactly what they
// would see in an unbounded grid (their light cones, 2H+2 columns wide at layer 0,
// do not wrap onto themselves); links modelled by trix_link.
module trix_grid #(
  parameter int unsigned H = trix_pkg::TRIX_H_DEFAULT,  // layers of TRIX nodes
  parameter int unsigned W = 2 * H + 2,                 // columns (cylinder circumference)
  parameter int unsigned D = trix_pkg::TRIX_D_DEFAULT,  // maximum link delay
  parameter int unsigned U = trix_pkg::TRIX_U_DEFAULT   // link delay uncertainty
) (
  input  logic [W-1:0]       src_clk,
  input  logic [2:0][W-1:0]  link_slow [H],
  output logic [W-1:0]       node_clk  [H+1]
);
  timeunit 1ns;
  timeprecision 100ps;

  if (W < 3) begin : g_bad_width
    $error("trix_grid: W must be at least 3");
  end

  assign node_clk[0] = src_clk;

  for (genvar y = 1; y <= H; y++) begin : g_layer
    logic [W-1:0] below;   // clock of layer y-1
    logic [W-1:0] clk;     // clock of layer y

    if (y == 1) begin : g_first
      assign below = src_clk;
    end else begin : g_upper
      assign below = g_layer[y-1].clk;
    end

    trix_layer #(.W(W), .D(D), .U(U)) u_layer (
      .below_clk (below),
      .slow      (link_slow[y-1]),
      .clk       (clk)
    );

    assign node_clk[y] = clk;
  end

endmodule
