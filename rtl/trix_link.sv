// trix_link -- behavioural model of TRIX links (not synthesizable: a link is a
// wire with a delay, which only layout and process determine).
//
// A link carries a node's clock to one of its three out-neighbours. Its end-to-end
// delay, wire plus the receiving node's switching time, lies between D-U and D.
// Following the statistical model of TRIX, a link takes one of the two extreme
// values: slow[i] = 1 gives D, slow[i] = 0 gives D-U (the coin flip w in {0,1}
// scaled by U and offset by D-U). The delay is transport delay: every edge of
// in_clk[i] reappears on out_clk[i] exactly one delay later, however close edges
// are.
//
// How it works: the whole bundle is copied through two delay lines, one of D-U and
// one of D, and each link picks its copy with slow[i]. A delay line keeps a queue
// of the changes of in_clk, each stamped with the time it is due, and a process
// that applies them in order when they fall due. The two copies agree while
// no edge is in flight, so slow may be changed then without creating an edge.
// The module holds N links side by side so that the links of a whole grid layer
// cost two simulation processes, not two per wire.
//
// Interface: in_clk[i] from the sending node, out_clk[i] at the receiving node,
// slow[i] chooses the delay of link i. Timing: D-U or D time units (1 ns each);
// change slow only while no edge is in flight. The waits in the delivery processes
// are computed from the time stamps, so a linter cannot prove them non-zero; they
// are zero only when the input changes twice within one time step, and then the
// two changes are simply delivered in order.
//
// From the design's source: delays between d-u and d and the 0/1 coin-flip model.
// This design's choice: D = 10, U = 1 time units and the slow control input that
// lets a testbench draw the coin flip of every link.
module trix_link #(
  parameter int unsigned N = 1,                         // links side by side
  parameter int unsigned D = trix_pkg::TRIX_D_DEFAULT,  // maximum delay d
  parameter int unsigned U = trix_pkg::TRIX_U_DEFAULT   // delay uncertainty u
) (
  input  logic [N-1:0] in_clk,    // clocks from the sending nodes
  input  logic [N-1:0] slow,      // per link: 1 delay D, 0 delay D-U
  output logic [N-1:0] out_clk    // clocks at the receiving nodes
);
  timeunit 1ns;
  timeprecision 100ps;

  // A change of in_clk, stamped with the time it is due at the far end.
  typedef struct {
    realtime      due;
    logic [N-1:0] value;
  } change_t;

  change_t      early_q [$];   // changes in flight on the D-U copy
  change_t      late_q  [$];   // changes in flight on the D copy
  event         sent;          // a change entered the queues
  logic [N-1:0] early;         // in_clk delayed by D-U
  logic [N-1:0] late;          // in_clk delayed by D

  initial begin
    early = '0;
    late  = '0;
  end

  // Every change of in_clk is queued on both copies, so any number of edges may
  // be in flight at once (transport delay).
  always @(in_clk) begin
    early_q.push_back('{due: $realtime + realtime'(D - U), value: in_clk});
    late_q.push_back('{due: $realtime + realtime'(D), value: in_clk});
    -> sent;
  end

  initial forever begin : deliver_early
    if (early_q.size() == 0) @(sent);
    #(early_q[0].due - $realtime);
    early = early_q[0].value;
    void'(early_q.pop_front());
  end

  initial forever begin : deliver_late
    if (late_q.size() == 0) @(sent);
    #(late_q[0].due - $realtime);
    late = late_q[0].value;
    void'(late_q.pop_front());
  end

  // Both copies agree whenever no edge is in flight, so slow may be changed then
  // without creating an edge.
  always_comb out_clk = (slow & late) | (~slow & early);

endmodule
