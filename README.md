# A distributed "artificial retina" track finder for the LHCb VELO

Finding charged-particle tracks in every LHC bunch crossing (30 million
events per second) is too slow for general-purpose processors if it starts
from raw detector data. The *artificial retina* turns tracking into a
massively parallel pattern match, loosely modelled on the receptive fields
of the visual cortex:

* The space of track parameters is cut into a grid of **cells**. Each cell
  stands for one reference track. That track crosses every detector layer
  at a known point, the cell's **receptor** on that layer.
* Every hit of an event is shown to the cells whose receptors lie near it.
  A cell adds up a weight for each hit, and the weight falls off as a
  Gaussian of the hit's distance from the receptor. A cell whose reference
  track matches a real track collects about one full weight per layer. A
  cell far from any track collects little.
* Tracks are the **local maxima** of this response map. Their parameters
  are refined by the response-weighted **centroid** of the 3x3 cells around
  each maximum.

There are many cells, more than one chip holds, so they are spread over an
array of FPGAs that all work on the same event at once. Every FPGA
therefore needs the hits of every detector module that are near its cells.
A network of switches made of small routing elements carries them over
optical links. At each switch, lookup tables keyed by the hit position
decide where a hit goes. So each cell receives only the hits that can
matter to it.

In front of the tracking sits a **cluster finder**. The VELO pixel detector
reports fired pixels grouped in 4x2 "SuperPixels". Neighbouring fired
pixels must be merged into one cluster, and the cluster's centre is the hit
that the retina uses. This cluster finder is built in the same spirit, as a
small grid of pattern-checking cells.

This repository holds synthesizable SystemVerilog for one **tracking
node**: the cluster finder of one VELO module, the node's slice of the
three-stage distribution network, a 4x4 block of retina cells and the track
finder. It also holds a PRBS generator and checker for bringing up the
links, and self-checking testbenches for every block and for a small
multi-node system.

## System layout

The reference system has 38 VELO modules downstream of the interaction
point, each read out by one DAQ board. It has 40 tracking FPGAs arranged as
4 **groups** (quadrants of track-parameter space) of 10 FPGAs each:

* Inside a group every FPGA is linked to every other (a full mesh).
* FPGA *i* of a group is linked to FPGA *i* of each other group.

That gives every FPGA 3 + 9 = 12 bidirectional links, within the 16
transceivers of current FPGA boards. Any FPGA reaches any other in at most
two hops: first across groups, to the FPGA with the same index in the
target group, then within that group.

Each node (`retina_node`) is one FPGA position. It is named by its
parameters `MY_GROUP` and `MY_INDEX` and carries three switch stages:

```
 SuperPixels ─► velo_clustering ─► hits
   ─► switch 1 to N_GROUPS      own group: stays on chip; others: ig_tx[k]
   ─► switch N_GROUPS to GROUP_SIZE
        inputs: own stage 1 + ig_rx[*]
        own FPGA: stays on chip; others: fg_tx[k]
   ─► switch GROUP_SIZE to GU*GV
        inputs: own stage 2 + fg_rx[*]
   ─► GU x GV retina_cell ─► track_finder ─► tracks
```

Link numbering skips the node itself. Link `k` of `ig_*` goes to group `k`
if `k < MY_GROUP` and to group `k+1` otherwise; `fg_*` works the same way
within the group. The links are plain valid/ready word streams. The serial
transceivers and their link protocol, whose flow control is meant to drive
`tx_ready`, are not part of this RTL.

The cluster finder and the tracking share one top module here. In the
original system they live on two boards: the cluster finder in the DAQ
board's FPGA, the rest on the tracking board paired with it. The boundary
between them is the hit stream.

## Words, events and flow control

Every stream in the node is a valid/ready stream. A word moves when both
`valid` and `ready` are high at a rising clock edge.

| type | fields | meaning |
|---|---|---|
| `sp_word_t` (22 b) | `eoe`, `sp.row[5:0]`, `sp.col[6:0]`, `sp.pix[7:0]` | one SuperPixel, or end of event; pixel (r, c) of the 4x2 block is bit `c*4 + r` |
| `word_t` (27 b) | `eoe`, `hit.layer[5:0]`, `hit.x[9:0]`, `hit.y[9:0]` | one hit, or end of event; x = column, y = row, in quarter pixels |
| `track_t` (48 b) | `cell_u`, `cell_v`, `du`, `dv` (signed, 1/64 cell), `peak` | one track: local-maximum cell, centroid offset and peak response |

Events are delimited by **end-of-event (EOE)** words, not by time slots.
Each source ends each event with an EOE. Every element that joins streams
waits until all of its inputs have delivered the EOE of the current event.
It then emits a single EOE. A retina cell therefore sees its EOE only after
every hit of the event from all 40 sources has reached it. That is the
moment its response is final.

There are no FIFOs anywhere. Backpressure propagates through the registered
dispatchers, across the links and back into the cluster finder and the
SuperPixel input. Each stage sends data only forward: the 1-to-4 outputs
feed only 4-to-10 inputs, which feed only 10-to-n inputs. So the graph of
waits has no cycle, and stalls cannot deadlock. Throughput is lost only
where a stream really is busy.

## Cluster finding (`velo_clustering`, `sp_matrix`)

Fired pixels are rare, well under one in ten thousand. So there is no cell
per pixel. Instead, a chain of `N_MATRICES` small **matrices** adapts to the
event, each holding 3x3 SuperPixels (12 x 6 pixels):

1. A matrix starts uninitialised. The first SuperPixel that reaches it is
   placed at its centre, which fixes the matrix's position on the sensor.
2. A later SuperPixel that falls on one of the nine positions is ORed into
   place.
3. Any other SuperPixel moves on to the next matrix one cycle later.
4. A SuperPixel that leaves the last matrix found no room. It is dropped
   and counted in `cluster_overflow`.

Every pixel of a matrix checks its neighbourhood for two **seed patterns**.
In the patterns below, rows grow upward and C is the checking pixel:

```
   pattern A            pattern B          0 = must be empty
   . G G G              . G G G            1 = must be fired
   0 G G G              0 1 G G            . = not looked at
   0 C G G  C = 1       0 C 1 G            G = cluster candidate (3x3 from C)
   0 0 0 .              0 0 0 .
```

Requiring the left column and the row below to be empty makes exactly one
pixel seed each compact cluster: its lowest, leftmost pixel (pattern A), or
the corner of a diagonal pair (pattern B). A firing cell offers its nine
candidate bits. The cluster centre is the mean position of the fired
candidates, in quarter pixels. It is read from a 512-entry table that is
computed when the design is elaborated.

When the event's EOE arrives, the finder goes through these steps:

1. It stops taking SuperPixels and lets the chain drain.
2. It reads the fired cells one per cycle, lowest matrix and lowest cell
   first, and emits a hit for each, tagged with the node's `layer`.
3. It sends the EOE and clears the matrices.

Clusters larger than the 3x3 candidate window, or split between two
matrices, are seeded and centred only from what one matrix sees. That is
the usual price of this approach.

## The distribution network (`dispatcher`, `split_tree`, `merge_tree`, `dist_switch`)

### Dispatcher

The **dispatcher** is the only routing element. It has two inputs and two
outputs, and each output has one register. Each word arrives with a
**destination mask** that holds one bit per output of the enclosing switch.
The dispatcher knows, through two parameter masks, which switch outputs lie
behind each of its own outputs. It forwards the word to each side whose
mask overlaps the word's mask:

* one side, both sides (broadcast), or
* neither side: the hit is dropped, which is how the lookup tables filter.

When both inputs want the same output, a round-robin pointer for that
output decides. A word bound for both sides may leave on them in different
cycles. A small "already sent" mask per input remembers which copies are
out, and the input is released when all are out. An EOE is held until
every used input shows one. Then one EOE leaves on both outputs in the same
cycle.

### Switch

A **switch** (`dist_switch`, N_IN to N_OUT) works in three parts:

* **Lookup table.** Each input has a table of `2^10` entries. It is
  addressed by the top five bits of the hit's x and y, which gives 32 x 32
  quarter-pixel bins. The entry read is the hit's destination mask. The
  read is combinational and adds no cycle.
* **Split tree.** Each input fans out through a binary tree of N_OUT−1
  dispatchers to N_OUT crossing points.
* **Merge tree.** Each output gathers its N_IN crossing points through a
  tree of N_IN−1 dispatchers.

Both trees use a heap layout, so any size works, not only powers of two.
Through an idle switch a word needs at most ⌈log2 N_OUT⌉ + ⌈log2 N_IN⌉
cycles, for example 5 cycles from input 0 to output 0 of the 4-to-10
switch. Each input and each output moves one word per cycle.

The three stages of a node are a 1-to-4, a 4-to-10 and a 10-to-16 switch.
Their lookup tables hold the system's geometry. An entry names the groups,
FPGAs or cells whose receptors come near any point of the entry's bin. The
tables are loaded through the configuration port and are not reset.

## Retina cells (`retina_cell`)

A cell holds one receptor (x, y) per layer, up to `N_LAYERS` = 38. For each
accepted hit it works in three steps:

1. It looks up the receptor of the hit's layer.
2. It forms dx and dy.
3. If both are under 16 quarter pixels, it adds the weight
   `round(255 * exp(-(dx² + dy²) / (2 * SIGMA2)))`. Otherwise it adds 0.

The weight comes from a table indexed by dx² + dy², computed when the
design is elaborated. The 16-bit sum `acc` is the cell's response R.

A cell accepts one hit per cycle. After its EOE it raises `done` and stops
taking input. It holds `acc` until `clear`. The node clears all cells and
starts the track finder in the cycle when every cell is done and the finder
is free. The finder snapshots the responses at that moment, so the cells
start the next event right away.

## Track finder (`track_finder`, `seq_divider`)

The finder scans the 4x4 responses, one cell per cycle. A cell is a **local
maximum** when all three of these hold:

* R > `THRESH`;
* R is strictly greater than each neighbour earlier in raster order;
* R is not smaller than each neighbour later in raster order.

The mixed rule turns a plateau of equal responses into exactly one track.
For each maximum, two serial divisions (26 cycles each) give the centroid
offsets:

```
du = Σ i·R(i,j) / Σ R(i,j),   dv = Σ j·R(i,j) / Σ R(i,j),   i, j ∈ {−1, 0, +1}
```

The offsets are in 1/64 of a cell, saturated at ±127. Each track is emitted
on the `trk_*` stream. A word with `trk_eoe` = 1 closes the event, even when
no track was found.

Cells at the border of the block see no neighbours from the next FPGA. The
neighbours outside the block count as absent.

## Configuration

One write port, `cfg_we` plus `cfg` (`cfg_t`), loads the whole node, one
entry per cycle:

| `cfg.sel` | `port_idx` | `addr` | `data` |
|---|---|---|---|
| `CFG_SW_GROUP` | stage-1 input (0) | LUT key `{x[9:5], y[9:5]}` | group mask |
| `CFG_SW_FPGA` | stage-2 input g = hits from group g (own group: `MY_GROUP`) | LUT key | FPGA mask |
| `CFG_SW_CELL` | stage-3 input j = hits from FPGA j of the group (own: `MY_INDEX`) | LUT key | cell mask (bit v·GU+u) |
| `CFG_RECEPTOR` | cell index v·GU+u | layer | rx in bits 25:16, ry in bits 9:0 |

At the default sizes a full load takes 15 x 1024 table writes plus
16 x 38 receptor writes.

## Link bring-up (`prbs_link_test`)

The links are first validated by streaming a pseudo-random sequence from
one board and checking it on another. `prbs_link_test` generates PRBS-31
(x³¹ + x²⁸ + 1) in 32-bit words. Its checker locks onto the stream by
itself: a 32-bit word contains the whole 31-bit state, so each word predicts
the next. It counts checked words and words in error; one flipped bit costs
one or two error words.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| `retina_node` | `N_GROUPS`, `GROUP_SIZE` | 4, 10 | system layout above |
| `retina_node` | `MY_GROUP`, `MY_INDEX` | 0, 0 | position of this node |
| `retina_node`, `retina_cell` | `N_LAYERS` | 38 | downstream VELO modules |
| `retina_node`, `track_finder` | `GU`, `GV` | 4, 4 | cells per FPGA: this design's choice |
| `retina_node`, `velo_clustering` | `N_MATRICES` | 16 | this design's choice |
| `retina_node`, `retina_cell` | `SIGMA2` | 16 (quarter pixels²) | this design's choice |
| `retina_node`, `track_finder` | `THRESH` | 512 (about two full hits) | this design's choice |
| `dist_switch` | `N_IN`, `N_OUT` | 4, 10 | the middle switch stage |
| `prbs_link_test` | `W` | 32 | this design's choice, at least 31 |

The package `retina_pkg` fixes the shared widths:

* 256 x 256 pixel address space;
* coordinates of 10 bits in quarter pixels;
* 8-bit weights and 16-bit responses;
* lookup-table key of 10 bits.

## Where this design departs from the original system, and its limits

* **Weight function.** The original text calls the weights "proportional
  to the distance", while its illustration gives a Gaussian of the
  distance. The Gaussian is used here, because only a weight that falls
  with distance makes R approach the number of layers for a matching
  track. The distance is 2-D, cut at 16 quarter pixels in x or y.
* **Cluster-finder throughput.** The original cluster finder reaches a
  38.9 MHz event rate at 350 MHz, about 9 cycles per event, by overlapping
  the readout of one event with the filling of the next. This version
  takes one SuperPixel per cycle and does not overlap. An event costs about
  (SuperPixels + chain depth + clusters + 3) cycles, which is several
  times slower.
* **Tracking throughput.** One track finder per FPGA scans the cells
  serially and uses serial dividers. At least 16 cycles per event, plus
  about 55 per track, is below the 30 MHz event rate that the full system
  targets. Cells that search maxima among themselves, or parallel dividers,
  would be needed.
* **Unspecified choices.** The number of cells per FPGA, the matrix count,
  the threshold, σ, the lookup-table key and size, the word formats, EOE
  framing, round-robin arbitration, dropping on overflow and the
  configuration port are all choices of this design. The original gives
  none of them.
* **Edge cells.** Local maxima are not exchanged between FPGAs, so a track
  whose maximum falls on the border of a 4x4 block is judged without the
  neighbouring block's cells.
* **Not included.** Not part of this RTL:
  * the serial transceivers and their protocol;
  * the DAQ board readout that delivers SuperPixels;
  * the host software;
  * the hit memories and collector used in the network prototype.
* **Address space.** The pixel address space is one 256 x 256 sensor. A
  full VELO module spans several sensors, which would need a wider
  SuperPixel address.

## Simulating

All files are plain SystemVerilog 2017. Every testbench is self-checking
and ends with a line `TB_RESULT checks=N failures=M`. Run one with Verilator
5, listing the package first:

```
verilator --binary --timing --assert rtl/retina_pkg.sv tb/retina_tb_pkg.sv \
    $(ls rtl/*.sv | grep -v retina_pkg) tb/tb_retina_node.sv \
    --top-module tb_retina_node -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2
```

Block testbenches need only the package and the block's own files (for
example `rtl/retina_pkg.sv rtl/dispatcher.sv tb/tb_dispatcher.sv`); the
node-level ones also need `tb/retina_tb_pkg.sv`. The node testbenches take
one to two minutes to compile and about a second to run.

| testbench | what it checks |
|---|---|
| `tb_dispatcher` | random traffic with random masks and backpressure against per-output queues; EOE merging; one-cycle latency |
| `tb_dist_switch` | 4-to-10 switch with random tables and backpressure against a reference model; idle latency |
| `tb_retina_cell` | 38 random receptors; weights against real `exp()`; `done` timing; `clear` |
| `tb_track_finder` | random and plateau response maps against a reference maxima/centroid search; cycle bound |
| `tb_sp_matrix` | patterns A and B; random SuperPixels near and far against a global pixel-map model |
| `tb_velo_clustering` | isolated 1–3 pixel clusters against expected centres; overflow count; readout cycle bound |
| `tb_prbs_link_test` | sequence against a serial PRBS-31 reference; error counting with injected bit flips; relock after clear |
| `tb_retina_node` | six nodes (2 groups x 3 FPGAs) wired as a mesh of meshes, with links that stall at random; see below |
| `tb_intra_group_prototype` | five boards in a full mesh, each with two 4-to-4 switches (hit sources → links, links → collectors), random tables and stalls; every collector's hits per event checked as a multiset |
| `tb_retina_node_full` | one node at full default size, links looped back onto itself so every table and dispatcher is used |

`tb_retina_node` is the end-to-end test. Each node reads one layer. The
node's cells sit on a tiling of the plane, and the lookup tables are filled
from that geometry. Events carry tracks through all layers, noise pixels
and diagonal pairs, some of which straddle SuperPixel borders. One event
overfills a cluster finder. An independent model routes the hits through
the same tables, weighs them with real `exp()` and finds the tracks, and
each node's output is compared track by track. The test also counts how
often each mechanism happened and fails if any never did:

* link stalls, input stalls and output stalls;
* broadcasts to several groups and table drops;
* matrix overflow;
* pattern-B seeds and SuperPixels joining a matrix;
* tracks with a non-zero centroid offset.

It also measures the latency from an event's last end-of-event word
entering a node to the end of that event's tracks leaving each node. Under
random stalls and back-to-back events it is 37 to 282 cycles, and the test
requires less than 350 cycles, which is 1 µs at 350 MHz. The serial link
latency is not modelled.

To change the system size, set `N_GROUPS`, `GROUP_SIZE`, `GU`, `GV` and
`N_LAYERS` on `retina_node`, and load tables that match the new geometry.
