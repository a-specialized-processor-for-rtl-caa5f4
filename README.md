# An artificial-retina track processor

Charged-particle tracking is normally a two-step affair: find which hits belong
together, then fit them. This design does both in one parallel pass, in the
manner of the "artificial retina" algorithm. The space of track parameters is
divided into a grid of cells. Each cell knows where its ideal track would cross
every detector layer. Every hit excites every nearby cell by a Gaussian of the
distance between the hit and the cell's crossing point. Once all hits of an
event are in, tracks show up as local maxima of the excitation. Because the
response is graded, not a yes/no vote, the centre of mass of the excitation
around a maximum gives the track parameters to a small fraction of a cell.

The RTL here is one chip of such a processor: a grid of 32 x 32 cellular
engines fed by a hit-distribution network, with local-maximum search and
centroid units behind it. It follows the architecture described by Abba et al.
in "A Specialized Processor for Track Reconstruction at the LHC Crossing Rate"
(six pixel layers, seven cells per engine, a 41-bit hit word, an 8 x 256 weight
table, one hit per engine every seven cycles, one centroid unit per twelve
engines). Where that description stops, this implementation makes its own
choices, listed in the section "What follows the published design, and what does
not".

## Data flow

```
 link 0 .. link N-1      (N = ROWS*COLS = 1024 valid/ready streams of hits + EndEvent)
     |
 hit_formatter x N       tag each hit with the 3 x 3 box of engines that need it
     |
 switch_net              log2(N) = 10 stages of N/2 two-way sorters (sorter2)
     |                   one output per engine; hits copied where paths split
 engine x N              (row, col) grid; 7 accumulators each; neighbour links
     |  LookAtMe
 cluster_readout x 86    one per 12 engines; round-robin over raised flags
     |
 centroid_unit x 86      3x3 and 7-cell centres of mass, 11 cycles
     |
 track_merger            one output stream of track records
```

`retina_top` wires all of it. `retina_pkg` holds the shared types, sizes and
the geometry and weight functions.

### Words

| word | fields |
|---|---|
| `hit_t` (41 bits) | x[12], y[12], layer[3], timestamp[14] |
| `link_word_t` | EndEvent flag + `hit_t`. For an EndEvent the timestamp field carries the event number |
| `sw_word_t` | `link_word_t` + destination box {row_lo, row_hi, col_lo, col_hi} (8 bits each) |
| `cluster_t` | engine row, col, event timestamp, 7 accumulators, 8 neighbour central values |
| `track_t` | timestamp, u, v (signed 18 bits, cell units, 8 fraction bits), d, z, k (signed 10 bits, units of the lateral step, 8 fraction bits), peak excitation |

All streams use valid/ready handshakes. A word moves on a clock edge where both
are high, and a producer keeps a word stable until it is taken.

## Cells and geometry

Engine (row, col) owns the main cell (u = col, v = row). It also owns six
lateral cells, one step either side along three further track parameters (d,
z, k). Each cell has, for each of the six layers, an intersection point (x0,
y0):

- main cell: x0 = col*P(k) + P(k)/2 and y0 = row*P(k) + P(k)/2, with layer
  pitch P = 64, 72, 80, 96, 112, 120 coordinate units for layers 0 to 5;
- +/-dd moves x0 by +/-16 units; +/-dz moves y0 by +/-(4+4k); +/-dk moves x0
  by +/-k(k+1).

These numbers are illustrative. For a real detector they come from simulation
of the tracker and from a non-linear (u,v) map that makes the track density
uniform. They live in `retina_pkg` (`pitch`, `isect_x`, `isect_y`,
`uv_offset`) and nowhere else. The engines' ROMs, the formatter's reciprocal
table and the centroid's offset table are all computed from them at
elaboration.

The weight of a hit in a cell is `w = LUT[min(255, (dx^2 + dy^2) >> 6)]` with
`LUT[a] = round(255 * exp(-a/32))`. This is a Gaussian of width sigma = 32
coordinate units. The weight is below 1 beyond about 106 units.
`retina_pkg::weight_table` builds the table in integer arithmetic by repeated
multiplication with round(65536 * exp(-1/32)) = 63520.

## The switching network

This is the part that makes the cellular engines usable. Every hit must reach
all engines whose cells it can excite, and only those, at full rate.

**Destination box.** `hit_formatter` finds the cell under the hit on its
layer, c = floor(x / P(k)) and r = floor(y / P(k)). It computes these as
(x * ceil(2^20/P)) >> 20, which is exact for 12-bit coordinates. The box is
rows r-1..r+1 by columns c-1..c+1, clipped to the grid. A hit off the grid
gets an empty box (lo > hi) and is dropped in the first sorter. An EndEvent
gets the whole grid.

**Topology.** Engine address = row*COLS + col. The network has log2(N)
stages:

- The first stage decides the most significant address bit and the last one
  decides bit 0.
- The sorter of the stage for bit b joins the two streams whose indices differ
  only in bit b. Its output 0 feeds the stream with bit b = 0, and its output 1
  the stream with bit b = 1.
- Before that stage, all address bits above b of a stream's index already
  equal those of every engine still reachable from it. So each output of the
  sorter leads to one aligned block of 2^b engine addresses.
- `switch_net` computes that block for every node as a row/column box and
  passes it in as parameters.
- A sorter sends a hit to each output whose block overlaps the hit's box, and
  to both when it overlaps both.

Each engine in the box is reached exactly once, over the unique path to it.
Routing needs no tables and no per-hit address lists. A node holds only the
two boxes below it.

**Merging and stalls.** A `sorter2` has two inputs and a one-word register on
each output:

- A word leaves only when every output it needs can take it. Otherwise its
  input is held, and the hold propagates back up the tree to the links.
- When both inputs hold hits that need different outputs, both leave in the
  same cycle. When they need the same output, a round-robin bit chooses.
- `in_ready` is combinational on `out_ready`. The ready path therefore runs
  through all ten stages in one cycle. A timing-driven implementation would
  add skid buffers every few stages.

**EndEvent ordering.** A sorter forwards an EndEvent only when both of its
inputs show one, and then sends it to both outputs. A hit is never blocked by
an EndEvent waiting on the other input. So, at every engine, the EndEvent of
an event arrives after all of that event's hits and before any hit of the next
event. For this to hold, every link must send exactly one EndEvent per event,
after the event's hits.

Without contention a hit spends one cycle in the formatter and one per stage,
so it reaches its engines 11 cycles after the link accepts it at N = 1024.

## The engine

**Accumulation.** A hit is held for seven cycles and sent once per cycle, for
cells 0 to 6, through four pipeline stages:

1. subtract the cell's intersection on the hit's layer (from the ROM);
2. square, sum, shift right by 6 and saturate to 8 bits;
3. read the weight table;
4. add the weight to the cell's 16-bit accumulator, saturating.

The engine takes a new hit in the same cycle as the seventh pass of the
previous one, so it takes one hit every seven cycles. The last weight of a hit
is in its accumulator ten cycles after the hit was taken.

**End of event.** An EndEvent is taken like a hit, but only while the
snapshot bank is free, and it occupies the input for a single cycle. It then
follows the last hit of its event down the four pipeline stages as a token.
When the token comes out, that hit's last weight has just been added. The
engine then copies its seven accumulators into a snapshot bank and clears
them. Hits of the next event enter right behind the token, so an event with n
hits costs 7n + 1 cycles. At one hit per engine per event that is 8 cycles,
within the 8.75 cycles that a 350 MHz clock gives per 25 ns crossing. The
local-maximum search and the readout both work on the snapshot.

**Neighbour exchange.** The eight neighbours of an engine reach its EndEvent
at different times, and each of them may already be busy with the next event.
The engines therefore run a small handshake:

- Each engine shows `snap_valid`, the snapshot's event parity `snap_par`, and
  its central value.
- An engine compares once every existing neighbour shows a snapshot with the
  same parity. It latches the eight central values into its record, raises
  LookAtMe if it is a maximum, and sets `done_par` to the event's parity.
- It frees its snapshot bank only after two things have happened. LookAtMe
  must have been served, or never raised. And every neighbour's `done_par`
  must show that the neighbour has latched this engine's value.

A neighbour cannot compare the next event before this engine has taken its
next snapshot. So one parity bit is enough, and the handshake cannot deadlock.
An EndEvent that arrives while the bank is still busy is held at the engine's
input. The hits behind it then wait inside the network. That is the only case
in which an engine stalls the network for something other than its seven-cycle
hit rate.

**Local maximum.** LookAtMe is raised when all of these hold:

- the central value is at least `THRESH` (256 by default, about one and a
  half ideal hits);
- it is strictly greater than the neighbours at (-1,-1), (-1,0), (-1,+1) and
  (0,-1);
- it is not smaller than the neighbours at (0,+1), (+1,-1), (+1,0) and
  (+1,+1).

This asymmetric rule keeps one maximum on a plateau of equal values. Cells on
the grid edge ignore neighbours that do not exist.

## Readout and parameters

A `cluster_readout` serves twelve engines. When its output register is free
and some LookAtMe flag is up, it grants one engine, round robin, and copies
that engine's `cluster_t`. The engine drops LookAtMe on the grant.

`centroid_unit` then computes, with l the excitations:

- u = u0(col) + sum(dc * l) / sum(l) over the 3 x 3 square (the engine's
  central value and its eight neighbours), with dc in {-1, 0, +1}. v works the
  same way with dr.
- d = (l(+dd) - l(-dd)) / (sum of the engine's seven cells). z and k work the
  same way.

Only the centre and the six face cells of the 3 x 3 x 3 lateral cube are
filled, so seven values suffice. u0 comes from a lookup table of engine
positions (linear here). The five quotients are computed in parallel by
restoring dividers, 9 quotient bits each. Each magnitude is at most 1, and 8
bits of it are fraction.

Timing: sums in cycle 1, division in cycles 2 to 10, signs and offsets in
cycle 11. The track is valid 11 cycles after the record was taken. The unit
takes one record at a time. `track_merger` merges the 86 units' tracks
round-robin onto the single output.

## Timing summary

| step | cycles |
|---|---|
| link to engine input (formatter + 10 stages), no contention | 11 |
| engine: per hit | 7 (throughput), 10 (until the last weight is accumulated) |
| EndEvent to snapshot | 4 (token through the pipeline) |
| engine: per event | 7n + 1 for n hits |
| neighbour comparison | 1 after the last neighbour's snapshot |
| grant to record at centroid unit | 1 |
| centroid | 11 |
| merger | 1 per track |

In the 8 x 8 end-to-end simulation (four tracks per event, six events sent
back to back), the last track came out 99 cycles after the last EndEvent was
taken by the links. Most of that time is spent in queues: maxima wait at their
readout group and at the single output, and engines wait on the neighbour
handshake of the event before. The original work quotes about 150 cycles, from
hits in to tracks out, for its full system. No simulation was run at the
default size of 32 x 32 engines. Verilator needs hours to compile that model
(1024 engines and 5120 sorters), so 8 x 8 is the largest size simulated.

## Sizes against the published system

- Throughput: at about one hit per engine per event, 7n + 1 = 8 cycles per
  event and a 350 MHz clock (8.75 cycles per 25 ns crossing), an engine keeps
  up with 40 MHz of events. Nothing here was timed on an FPGA; the 350 MHz is the
  original work's figure.
- Grid: the original work's system uses 50,000 (u,v) cells over about 100
  FPGAs, with about 10^3 engines per FPGA. This top is one such chip with
  1024 engines. A full system needs about 49 of them, plus the link
  distribution in front, which is not modelled.
- Network: the original system splits its network into a pre-switch section
  in front-end FPGAs and a main section, joined by optical links. Here the
  network is one block with one link per engine input.
- Output: the merged output carries one track per cycle, 8.75 per crossing.
  At the largest track multiplicity expected (about one track per hundred
  cells, so about 10 per chip) that port is slightly too narrow; at average
  multiplicity it is not.

## What follows the published design, and what does not

Taken from the published description:

- the overall chain: network of two-way sorters, cellular engines, local
  maxima, centroid, output;
- log2(N)*N/2 sorters, with stages ordered from the top address bit down;
- sorters merge two inputs, copy hits to one or both outputs, and hold inputs
  on a stall;
- the intersection ROM, subtract / square / sum / round, the 8 x 256 weight
  table, seven accumulators and one hit per seven cycles;
- EndEvent triggering the exchange of central values with the neighbours and
  the LookAtMe flag;
- local copies of the accumulators, so hits keep flowing during the search;
- readout of 7 accumulators plus the neighbours' central values;
- the two centre-of-mass formulas, an 11-cycle centroid, and one centroid
  unit per 12 engines;
- the 41-bit hit word and six layers.

Choices of this implementation:

- **Squared distance.** The published text says the squared distance is
  "rounded by keeping the eight least significant bits". Taken literally, that
  wraps far hits around to large weights. Here the distance is shifted right
  by 6 and saturated at 255 instead.
- **Routing.** The group a hit belongs to is expressed as a 3 x 3 destination
  box, and each sorter holds the address blocks below its outputs. The
  published text only says that addressing information sits in the nodes that
  need it.
- **EndEvent.** Sorters synchronise EndEvent words. Engines run a parity
  handshake with their neighbours and use the asymmetric tie rule. The
  threshold is 256.
- **Word formats** and all fixed-point formats.
- **Geometry.** The geometry and the Gaussian width are illustrative, as
  described above.
- **Arbitration.** The readout and merger arbitrate round-robin.
- **Latency.** The "10 cycles for fanout" before the centroid unit and the
  10-cycle data output of the published latency table are not modelled as
  extra pipeline stages.
- **Boundary.** Engines on the grid edge see fewer neighbours. No cells are
  shared between chips.

## Simulation

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<m>`. A watchdog counts a failure if the test
hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/retina_pkg.sv tb/tb_engine.sv --top-module tb_engine -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_retina_pkg` | 41-bit word, reciprocal exact for every x, weight table against `exp`, neighbour tables, geometry offsets |
| `tb_weight_lut` | all 256 weights, monotonic, registered read |
| `tb_hit_formatter` | boxes against integer division, clipping, EndEvent box, latency, stall hold |
| `tb_sorter2` | routing, copying, per-input order, EndEvent synchronisation, stall hold, dual issue |
| `tb_switch_net` | 16-port network, a 4 x 4 engine grid (the size of the published example): every hit at exactly the engines of its box, order, EndEvent, lone-hit latency |
| `tb_engine` | accumulators against a floating-point model, 7-cycle hit cadence, 10-cycle accumulation latency, maximum and tie cases, readout, bank release, EndEvent held while the bank is busy |
| `tb_cluster_readout` | one-hot grants, every request served once, no starvation |
| `tb_centroid_unit` | all five parameters against exact integer arithmetic, 11-cycle latency |
| `tb_track_merger` | completeness, per-input order, no starvation |
| `tb_retina_top` | 8 x 8 grid, 6 back-to-back events with 4 tracks each: every track found within half a cell; counts input stalls, hit copying, EndEvent holds, LookAtMe waits and output back-pressure, and fails if any never happens |

The unit benches and the 8 x 8 end-to-end bench each build and run in a
few minutes.

## Changing the design

- **Grid size:** the `ROWS` and `COLS` parameters of `retina_top`. Both must
  be powers of two, at most 256.
- **Detector geometry and weight function:** `retina_pkg`.
- **Threshold:** `THRESH`.
- **Engines per centroid unit:** `GROUP`.
- **More layers:** change `NLAYERS`, `LW` and the geometry functions. The
  pitch table must then stay below 4096/COLS per layer, so that all
  intersections fit in 12 bits.
