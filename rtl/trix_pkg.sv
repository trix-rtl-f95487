// trix_pkg -- constants and reference arithmetic shared by the TRIX clock grid.
//
// The TRIX grid spreads one clock edge from a row of clock generators (layer 0)
// through H layers of nodes. Every node has three in-neighbours on the layer below
// and fires when the second of their edges reaches it, i.e. at the median of the
// three arrival times. Every link delay lies between D-U and D, where U is the
// delay uncertainty.
//
// Time is counted in the simulator's time unit (1 ns in every module of this
// design). The delay numbers below are this design's own choice; only U << D is
// asked for. D covers the wire and the node's own switching time together.
package trix_pkg;
  timeunit 1ns;
  timeprecision 100ps;

  // Layers of TRIX nodes above the clock generators (H = 2000 is the height the
  // evaluation uses for most of its results).
  localparam int unsigned TRIX_H_DEFAULT = 2000;

  // Maximum end-to-end link delay d and its uncertainty u, in time units.
  localparam int unsigned TRIX_D_DEFAULT = 10;
  localparam int unsigned TRIX_U_DEFAULT = 1;


endpackage
