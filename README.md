# GraphR node in SystemVerilog

GraphR runs graph algorithms inside ReRAM. Many vertex programs repeat one
step on every iteration: each destination vertex combines values coming in
from its source vertices. PageRank, SpMV, BFS and SSSP all do this. That step
is a sparse matrix-vector product, or, for shortest paths, a min-plus product.

A ReRAM crossbar computes a dense matrix-vector product in one analog step.
Its cells store the matrix. The wordline voltages carry the vector. Each
bitline current is the dot product of the vector with one column.

GraphR stores the graph compactly, as an edge list, and keeps it that way.
For each step it takes a small window of the adjacency matrix, called a
*subgraph*, and writes that window into crossbars as a dense tile. The
crossbars compute the tile's product with the source values. Small digital
ALUs then fold the results into the destination values. Empty windows are
never written or computed.

This repository holds RTL for one GraphR node:
- a host interface;
- the memory that holds one block of the graph;
- the controller that walks that block subgraph by subgraph;
- 64 graph engines of 32 crossbars each.

The analog parts are behavioural models: the crossbar, the sample-and-hold
and the ADC. They are exact integer arithmetic with the real parts' ports and
timing. Everything else is synthesizable logic.

## How a graph reaches the node

A graph of V vertices is cut into blocks of B × B of its adjacency matrix
(B = 8192 here). The node processes one block at a time. The host keeps the
graph on disk and streams blocks to the node in column-major order: all
blocks that feed one destination chunk come one after another. The running
destination values are carried from one block to the next.

For each block the host writes four things over the bus:
- the block's edges, as (source, destination, weight) triples, in processing order;
- the B source values and their active bits;
- the B running destination values;
- the B destination values of the previous iteration, used for the convergence test.

The host then writes the configuration, starts the node and waits for
`done`. It reads the destination values back, each with its "changed" bit,
and reads the counters.

Processing order is the preprocessing step of the design. It runs on the host.
- A block is cut into **strips** of `STRIP_W = C·N·G/4 = 4096` destination
  columns.
- A strip is cut into **subgraphs** of C = 8 source rows.
- Edges are sorted by strip, then by subgraph row, then column-major inside
  the subgraph.

The controller checks this order with an assertion. It also requires at most
one edge per (source, destination) pair, because one crossbar cell holds one
matrix entry. Duplicate edges must be merged beforehand.

## Graph engine: crossbars, slices and the GE cycle

Engine organisation:
- Each graph engine (`ge`) holds N = 32 crossbars of 8 columns.
- A value is 16 bits and a cell is 4 bits. Four crossbars therefore form one
  **column group**: crossbar 4g+k holds bits 4k+3..4k of every weight in
  group g.
- An engine has 8 groups × 8 columns = 64 destination columns. All 64
  engines together cover the 4096 columns of a strip.

Each crossbar is (C+1) × C. The extra row is an addition row:
- In multiply-accumulate mode its cells hold the PageRank bias e0, and its
  wordline carries 1.0 on the strip's first subgraph. The bias is therefore
  added once per destination.
- In add-op mode it holds the constant 1, and its wordline carries dist(u).
  The bitline then gives w(u,v) + dist(u).

Every crossbar has a driver (`drv`). The driver performs the ReRAM writes,
each taking `WRITE_LAT` = 51 cycles (50.88 ns at 1 GHz), and latches the
wordline vector. Each crossbar also has a sample-and-hold (`sample_hold`)
that freezes its bitlines.

One ADC (`adc`) serves 64 bitlines: eight crossbars, i.e. two column groups.
It converts one bitline per clock. At 1 GHz this is the 1 GSps converter that
empties 64 bitlines in a 64 ns GE cycle. An engine therefore has
`LANES = C·N/64 = 4` ADC lanes. Each lane converts the four slices of one
column back to back.

A shift-and-add unit (`shift_add`) combines the four slices as
`D3<<12 + D2<<8 + D1<<4 + D0`. It then shifts the result right by 16 in MAC
mode, to undo the Q0.16 scaling, and saturates it to 16 bits.

An sALU (`salu`) reads the destination's RegO entry and writes back one of
these results:
- in MAC mode, the saturating sum;
- in add-op mode, the minimum, ORing "lowered" into the entry's active bit.

RegI (`reg_i`) holds the C source values and active bits. RegO (`reg_o`) holds
the engine's 64 destination values and active bits. Lanes never write the
same RegO entry in the same cycle; an assertion checks this.

A GE cycle is sequenced as follows:
1. `start` latches the wordlines.
2. One cycle later the bitlines are sampled and the ADCs start.
3. 64 conversions follow, plus the ADC, shift-and-add and sALU pipeline.
4. `done` pulses after `ADC_CH + 6` = 70 clocks.

All engines run in lockstep.

### The two modes

| | MAC (PageRank, SpMV) | add-op (SSSP, BFS) |
|---|---|---|
| empty cell | 0 | M = 0xFFFF (16 ones) |
| extra-row cell | e0 (bias) or 0 | 1 |
| wordline r | source value x_r, Q0.16, 1.0 = 2^16 | 1 on row t, 0 elsewhere |
| extra wordline | 1.0 on the bias subgraph | dist(u_t) |
| GE cycles per subgraph | 1 | one per active source row |
| shift after S/A | 16 | 0 |
| sALU | add | min, set active |

In MAC mode the edge weights are Q0.16, for example `r/outdeg` for PageRank.
The vertex values may use any 16-bit scale, because the shift restores the
values' own scale. For very large graphs PageRank should therefore use a
scaled format such as rank·V in Q8.8.

In add-op mode an empty cell holds M. Its sum therefore always saturates to
M, which can never win the min. This is how the design models "no edge = ∞".

## Controller: streaming-apply, column-major

For each strip the controller (`controller`) works in three phases.

**LOAD_O** copies the strip's destination values into the engines' RegOs and
clears their active bits.

Then, for each subgraph row that holds edges, it runs five steps:
- **FILL** resets every crossbar: body to 0 or M, extra row to e0 or 1.
- **PROG** streams the subgraph's edges from memory, one per clock. Each
  edge goes to the driver group that owns its column. The controller stalls
  while that group is still writing, and counts the stall cycles. Writes to
  different groups and engines overlap.
- **LOADI** loads the C source values into RegI.
- **COMP** issues the GE cycles. In add-op mode it skips source rows whose
  active bit is clear, and counts the skips.
- Empty subgraphs are never visited. With the bias on, row 0 of each strip is
  processed even when it is empty, so that e0 reaches every destination.

**STORE_O** writes the values and active bits back. It counts the vertices
that have not converged: `|new − old| > thresh` in MAC mode, or active in
add-op mode.

The counters are readable from the host: not-converged count, subgraphs
processed and skipped, stall cycles, inactive rows skipped, GE cycles and
total cycles. The edge-to-crossbar mapping (`edge_mapper`) is pure
arithmetic:
- subgraph row = i'/C;
- row inside the subgraph = i' mod C;
- strip = j'/4096;
- engine = (j' mod 4096)/64;
- group = (j' mod 64)/8;
- column = j' mod 8.

## Memory and host bus

`mem_reram` holds one block:
- up to 65 536 edges of 80 bits;
- 8192 source values with active bits;
- 8192 destination values with active bits;
- 8192 previous-iteration values.

Reads are single-cycle. The bus (`io_if`) selects a region with `haddr[31:28]`:

| region | contents |
|---|---|
| 0 | edge list, `{src[31:0], dst[31:0], weight[15:0]}` |
| 1 | source values: value in bits 15:0, active in bit 16 |
| 2 | destination values; a read returns `{active, value}` |
| 3 | previous-iteration values |
| 4 | configuration: 0 mode, 1 op, 2 edge count, 3 row base, 4 column base, 5 bias enable, 6 bias weight, 7 threshold, 8 start |
| 5 | status: 0 `{done, busy}`, 1–7 the counters above |

## Parameters

| name | default | meaning |
|---|---|---|
| C | 8 | crossbar size (rows and columns, plus the extra row) |
| N | 32 | crossbars per engine |
| G | 64 | engines per node |
| B | 8192 | block size in vertices (this design's choice) |
| EDGE_DEPTH | 65536 | edges per block (this design's choice) |
| ADC_CH | 64 | bitlines per ADC |
| WRITE_LAT | 51 | ReRAM write latency in clocks (1 GHz assumed) |

N must be a multiple of 4, and C·N must be a multiple of ADC_CH. B must be a
multiple of C·N·G/4.

## Where this design departs from or fills in the source description

- **Strip width.** The original description gives the subgraph width as
  C·N·G columns. It also stores a 16-bit value over four 4-bit crossbars. The
  two cannot both hold. This design follows the bit slicing, so a subgraph is
  8 × 4096.
- **Parameter names.** The evaluation names crossbar size and crossbars per
  engine "S" and "C". The mapping equations use C and N for the same
  quantities. The RTL uses C, N and G with the evaluation's numbers.
- **Two mapping equations contain typos.** The block index should read
  B_i + (V/B)·B_j. The column offset inside a subgraph must subtract the
  full subgraph width. The RTL uses the corrected forms.
- **Assumed figures.** The clock (1 GHz), ADC resolution (25 bits inside an
  engine, so exact), bus protocol and address map, B, edge capacity, fill
  operation, reset behaviour and stall policy are not specified there. They
  are this design's choices.
- **Controller.** The original controller runs instructions that were not
  available. Here it is a register-configured state machine with the same
  order and skipping rules.
- **Not built.** Collaborative filtering is not built: it needs vector-valued
  vertices and a training update whose mapping onto the engines is not
  described. The host-side preprocessing and the out-of-core framework are
  software. The testbenches contain equivalents.
- **Analog effects.** Noise, nonlinearity and ADC quantisation are not
  modelled. The crossbar model is exact.

## Evaluated graphs

All evaluated graphs run out-of-core, one 8192-vertex block at a time:

| graph | vertices | edges | blocks (⌈V/B⌉²) |
|---|---|---|---|
| WikiVote | 7.1K | 104K | 1 |
| Slashdot | 82K | 948K | 121 |
| Amazon | 262K | 1.2M | 1024 |
| WebGoogle | 876K | 5.1M | 11 449 |
| LiveJournal | 4.8M | 69M | 350 464 |
| Orkut | 3.1M | 106M | 141 376 |

WikiVote's single block holds more edges than the 65 536-entry edge memory.
The host then loads that block in two parts, split between subgraph rows. The
running destination values carry over between the parts, and the bias is
enabled only on the first part. Distances in SSSP are limited to 65 534.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

Leaf blocks are checked against independent arithmetic, including the
worked examples of the original description:
- `tb_salu` uses the SSSP min-reduction example.
- `tb_crossbar` uses the 5 × 4 addition-row example.
- `tb_edge_mapper` numbers the 64-vertex example graph.

`tb_ge` runs a 4-vertex PageRank step and a full SSSP on one small engine. It
checks every GE cycle's length.

`tb_graphr_top` runs a reduced node (C=4, N=8, G=2, B=32) end to end. It plays
the host for a 64-vertex graph with 2 × 2 blocks and runs:
- SSSP and BFS to convergence, compared with Bellman-Ford;
- three PageRank iterations and one SpMV pass, compared with a reference in
  the node's Q0.16 arithmetic.

It also counts each mechanism, and a mechanism that never occurs is a
failure:
- driver stalls;
- skipped empty subgraphs and inactive rows;
- multiple strips;
- the forced bias subgraph;
- mode switches;
- saturation to M;
- convergence.

`tb_graphr_full` does the same at the full default size: 64 engines, 2048
crossbars, B = 8192. It runs SSSP to convergence and one PageRank iteration
on a 300-edge graph spread over both strips. It takes about 25 s to simulate
after a 2-minute build.

To build any testbench, list the package first, then the RTL, then the
testbench:

```
verilator --binary --timing --assert rtl/graphr_pkg.sv $(ls rtl/*.sv | grep -v pkg) tb/tb_graphr_top.sv \
  --top-module tb_graphr_top -Mdir obj -o sim && obj/sim +verilator+rand+reset+2
```

Synthesis note: the blocks synthesize individually. Coarse synthesis of the
whole default-size node means 2048 crossbars, each with 72 multiply-accumulate
cells. It needs more memory than a 16 GB machine has.
