# TRIX: a fault-tolerant, low-skew clock distribution grid in SystemVerilog

A clock tree fails as soon as one buffer fails: everything downstream loses its
clock. TRIX replaces the tree with a grid in which every node has three
in-neighbours and forwards the clock **on the second of the three edges it
receives**. One faulty in-neighbour, silent or firing too early, cannot move a
node's edge outside the window spanned by its two correct in-neighbours. A
single crash therefore costs at most one link-delay uncertainty. It never costs a
detour.

Because every link goes one layer up, the grid has no feedback and no state. A
wrong value anywhere is gone after the next clock edge, so the grid
self-stabilises with no extra logic.

This repository holds an RTL model of the grid. It has a synthesizable node and
layer, a behavioural model of the link delays, and testbenches. The testbenches
check the grid edge by edge against the arithmetic model of TRIX, with and
without faults. They also reproduce the grid's known delay and skew statistics.

## The grid

Node `(x, y)` sits in column `x` of layer `y`. Layer 0 is a row of clock
generators that ideally all fire at the same time. The generators are not part
of this RTL: their clocks enter as the port `src_clk`. Nodes `(x, y)` for
`1 <= y <= H` listen to nodes `(x-1, y-1)`, `(x, y-1)` and `(x+1, y-1)`.

```
  layer y+1      (x-1,y+1)  (x,y+1)  (x+1,y+1)
                        \      |      /
  layer y                   (x, y)            each node: 3 in, 3 out,
                        /      |      \       all links one layer up
  layer y-1      (x-1,y-1)  (x,y-1)  (x+1,y-1)
```

Columns wrap around: the grid is a cylinder of circumference `W`. The
arrangement follows the TRIX proposal. The width is this design's choice. The
proposal studies an unbounded grid. `W = 2H + 2` is the narrowest cylinder in
which the top nodes `(0,H)` and `(1,H)` behave exactly as in an unbounded grid,
because the set of generators each of them depends on does not wrap onto itself.
A narrower grid only constrains skew further.

### Timing model

Every link has an end-to-end delay between `D-U` and `D`. The delay counts the
wire plus the receiving node's switching time. `U` is the delay uncertainty and
is much smaller than `D`. As in the statistical model of TRIX, each link takes
one of the two extremes, `D-U` or `D`, by an independent fair coin flip.

Let an edge leave all generators at time 0. Node `(x,y)` then switches at

```
    y*(D-U) + t(x,y)*U,   where   t(x,0) = 0,
    t(x,y) = median( t(x-1,y-1) + w0,  t(x,y-1) + w1,  t(x+1,y-1) + w2 )
```

Here `w0`, `w1` and `w2` are the 0/1 coin flips of the node's three links. The
constant `y*(D-U)` is the same for every node of a layer, so only the integer
`t` matters. The known behaviour of `t` is summarised below.

- The mean of `t(x,H)` is `H/2`. The result is symmetric: flipping every coin
  turns `t` into `y - t`.
- The standard deviation of `t(x,H)` grows only like `H^(1/4)`: 0.90 at H = 20,
  1.95 at H = 500 and 2.74 at H = 2000. A single chain of links would give
  `sqrt(H)/2`, which is 22 at H = 2000.
- The skew between neighbours, `t(x+1,H) - t(x,H)`, stays near 0.75 U from
  H = 20 up to H = 5000. Its distribution has an exponential tail.
- The worst case is large but very unlikely. Put slow links into one half of
  the grid and fast links into the other, and the neighbour skew at layer `H`
  is `H*U`.

### How "second of three" becomes a gate

The clock is carried as a level, a square wave. "Two of my three inputs have
risen" is then just the 2-of-3 majority of the three input levels. The same
majority also forwards the falling edge at the second falling input. A TRIX node
is therefore one majority gate (`trix_node`). It needs no latch and no reset.

This works only if an edge has reached all three inputs of a node before the
opposite edge reaches any of them. In practice the high and low phases of the
clock must each be longer than the largest skew between in-neighbours, plus
margin. The worst case is `H*U`. Realistic skews are a few `U`.

With a stuck-at-0 (crashed) in-neighbour, the node rises on the later of its two
correct inputs and falls on the earlier of them. A stuck-at-1 in-neighbour does
the reverse. Either way the edge stays between the two correct arrivals.

## RTL structure

| file | what it is |
|---|---|
| `rtl/trix_pkg.sv` | default height `H = 2000`, delays `D = 10`, `U = 1` (time unit 1 ns) |
| `rtl/trix_node.sv` | `N` nodes side by side: bitwise 2-of-3 majority. Synthesizable. |
| `rtl/trix_link.sv` | `N` links side by side: transport delay of `D` or `D-U` per link. **Behavioural model, not synthesizable.** |
| `rtl/trix_layer.sv` | one layer: the three rotations of the layer below (links from `x-1`, `x`, `x+1`), the 3W links, and W nodes |
| `rtl/trix_grid.sv` | top: `H` layers stacked on the generator row |

Top-level ports of `trix_grid #(H, W = 2H+2, D, U)`:

- `src_clk[W]`: the generator clocks (layer 0).
- `link_slow[H]`: one `[2:0][W-1:0]` vector per layer. `link_slow[y][c][x]` is
  the coin flip of link `c` into node `(x, y+1)`, which comes from column
  `x-1+c` modulo `W`. A 1 gives delay `D`, a 0 gives `D-U`. In silicon these
  delays are set by layout. Here they are an input so that a testbench can draw
  them.
- `node_clk[H+1]`: every node's clock, one `W`-bit vector per layer. Layer 0
  repeats `src_clk`.

A layer works on whole `W`-bit vectors rather than on one instance per node. At
the default size the grid has 8 million nodes and 24 million links. Written as
vectors, the design lints in about 17 s and 3.8 GB. Written as one instance per
wire, the simulator's cost grew much faster than the number of wires.

The link model keeps, for each of its two delay copies, a queue of time-stamped
input changes. Each link then picks the copy its coin flip asks for. Any number
of edges may be in flight on a link, and none is lost. Change `link_slow` only
while no edge is in flight. The two copies agree then, so the change creates no
edge.

Synthesis sees `trix_node` and `trix_layer` minus the links. The delay model in
`trix_link` uses queues and timing controls, which are simulation-only. A real
implementation replaces it with wires.

## Verification

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb/tb_trix_node.sv` | all input patterns on 4 parallel nodes; 400 edges arriving at random distinct times, output at the median |
| `tb/tb_trix_link.sv` | random overlapping edges on 6 links; every output equals its input exactly `D` or `D-U` earlier; delay choices swapped mid-run |
| `tb/tb_trix_grid.sv` | end to end at `H = 8`, `W = 18`. Every node's rising and falling time is compared with the median recurrence above (60 random delay samples). Also: worst-case skew `H*U`; coin-flip symmetry `t -> H - t`; an isolated crash with equal delays (every other node still fires at `y*D`); random delays with one stuck-at-0 and one stuck-at-1 node (neighbours stay between their correct inputs); and recovery from a transient glitch. Each scenario is counted and must occur. |
| `tb/tb_trix_stats.sv` (with `tb/trix_stats_probe.sv`) | 1500 random samples each at `H = 20` and `H = 50`. The mean delay must be near `H/2`. The standard deviations of delay and neighbour skew must be within 12 % of the reference values 0.901/0.741 (H = 20) and 1.115/0.751 (H = 50). Typical results: 0.894/0.737 and 1.130/0.721. |

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_trix_grid \
    rtl/trix_pkg.sv rtl/trix_node.sv rtl/trix_link.sv rtl/trix_layer.sv \
    rtl/trix_grid.sv tb/tb_trix_grid.sv
./obj_dir/Vtb_trix_grid
```

For `tb_trix_stats`, add `tb/trix_stats_probe.sv`.

### Size limits

The default grid (`H = 2000`, `W = 4002`) lints and elaborates. It has not been
simulated: building a Verilator simulation already takes more than 10 minutes at
`H = 500`, and at `H = 2000` it needs more than 16 GB of memory. The largest
grids simulated are `H = 50`, `W = 102` (statistics) and `H = 8`, `W = 18`
(exhaustive per-node comparison). Nothing in the RTL depends on the size, so the
same code serves any `H` and any `W >= 3`.

## Where this model departs from, or goes beyond, the TRIX proposal

- **Node circuit.** The proposal defines the forwarding rule (the second of
  three arrivals, i.e. the median) but no circuit. The majority gate on clock
  levels is this design's realisation. So is the resulting requirement that
  each clock phase outlast the in-neighbour skew.
- **Width.** The proposal studies an unbounded grid and says a finite grid would
  be a cylinder. `W = 2H + 2` is chosen here as explained above.
- **Delays.** `D = 10` and `U = 1` time units are arbitrary; only `U << D`
  matters. The model uses only the two extreme delays, as the statistical model
  does. Real delays would vary continuously and with correlation. The proposal
  names that as future work.
- **Clock generators.** Fault-tolerant generation of the layer-0 clocks is
  assumed solved elsewhere. Here the generators are ports.
- **Faults.** The proposal argues about isolated crashed nodes. The testbench
  additionally uses stuck-at-1 nodes and transient glitches. Both are handled
  by the same median argument.
