# Artificial-retina track processor in SystemVerilog

This is RTL for a track-finding processor that reconstructs charged-particle tracks in
a silicon tracker for every bunch crossing at 40 MHz. It uses the "artificial retina"
method: the space of track parameters is cut into a grid of cells. Each cell has its
own small processor, the engine. An engine knows where its ideal track crosses each
detector layer; those points are its *receptors*. Every hit gives each engine that
receives it a weight that falls off as a Gaussian of the hit-to-receptor distance.
After the event, every cell holds a smooth "excitation". Tracks are the local maxima
of the excitation above a threshold. Their parameters are then refined below the cell
size by taking the centre of mass of the excitation around each maximum.

The design follows the architecture published for an FPGA implementation of this
method for the upgraded LHCb vertex detector. That publication describes the
datapath, gives some of its sizes and shows block diagrams. The published numbers are
kept as defaults here. Where it is silent, this design makes its own choices, and
each source file says which parts are which. The last sections list the departures.

## Data flow

```
 16 hit streams (41-bit words, valid/ready)
        |
  switching network  16 x 16, 32 two-way sorter nodes, routes by zip-code, may duplicate
        |  one stream per row
  engine grid        16 rows x 12 columns = 192 engines; a row's engines share its stream
        |  local copies of the 7 accumulators per engine at end of event
  max_finder         3x3 local maximum + threshold, whole grid in parallel
  event_ctrl         waits for all copies, starts clustering, frees the copies
  cluster_unit x16   one per row of 12 engines: centre of excitation -> track
  track_merger       round robin -> one track stream out
```

`retina_top` connects these parts. Every module has one file in `rtl/`; the shared
types are in `rtl/retina_pkg.sv`.

## The hit word

A hit is one 41-bit `hit_t` word, listed here from the most significant bit down:

| field | bits | meaning |
|-------|------|---------|
| `eoe`   | 1  | 1 = end-of-event word (then only `ts` matters) |
| `zip`   | 4  | zip-code: the routing key read by the switch nodes |
| `ts`    | 4  | time stamp = event slot; up to 16 events can be in flight |
| `layer` | 4  | detector layer, 0..9 are used |
| `u`,`v` | 14 + 14 | signed hit coordinates |

The 41-bit width is the published one, and so are the contents (coordinates,
zip-code, time stamp). The split into these field widths is this design's choice.
Every event must end with one end-of-event word on every input stream.

## Switching network

The network does not send every hit to every engine. It sends each hit only to the
engines whose receptors lie near it. The zip-code of a hit names a region, and each
node holds a small *map* that turns the zip-code into a 2-bit output mask:

- `01` or `10` sends the hit to one output;
- `11` duplicates it to both outputs in the same cycle;
- `00` drops it.

**Node (`two_way_sorter`).** A node has two inputs and two outputs, with a 4-deep
FIFO on each output. A hit is taken only if every FIFO its mask names has room. If
both inputs need the same output in the same cycle, one input is held, and the
winner alternates from one conflict to the next. A full FIFO holds the input, so a
stall from the engines spreads back up the network to the inputs. End-of-event words
are *merged*, not routed. A node holds the end-of-event word on one input until the
other input presents one too. It then writes a single copy to both outputs. So each
output of the network carries exactly one end-of-event word per event, and it comes
after all of that event's hits on that output.

**Topology (`switch_network`).** There are log2(N) stages of N/2 nodes. At reset,
stage s routes on zip-code bit log2(N)-1-s (bit 3 first, bit 0 last). The wiring is a
recursive butterfly. Stage s splits its nodes into groups of G = N/2^(s+1). Node l of
a group sends output 0 to node l/2 of the first half of the group and output 1 to
node l/2 of the second half. With the reset maps, a hit leaves on the output whose
index equals its zip-code.

**Writing the maps.** A hit should reach a set D of outputs, for example rows
z-1, z, z+1 for a 3x3 neighbourhood. Take node i of stage s, with G as above. In the
map of that node, set bit o of the entry for zip-code z if some d in D satisfies both
of these:

- `d >> (log2 N - s) == i / G`;
- bit `log2 N - 1 - s` of d equals o.

The top-level testbench writes its maps this way.

Without contention, a hit takes one cycle per stage: 4 cycles for 16 x 16.

## Engine (`retina_engine`)

Each cell has seven receptor sets:

- set 0 is the cell itself in the primary (u, v) plane;
- sets 1..6 are the lower and upper neighbours of the cell along the three secondary
  parameters d, p and z.

The engine is a 7-stage pipeline. It runs every hit through the pipeline seven
times, once per receptor set. Each pass adds to its own accumulator, so a cell has
seven accumulators for each of the 16 event slots.

| stage | work |
|-------|------|
| 0 | hit register; pass counter 0..6 |
| 1 | read receptor (u0, v0) at address {pass, layer}; delay u, v |
| 2 | du = u - u0, dv = v - v0 |
| 3 | du², dv² |
| 4 | ds² = du² + dv² |
| 5 | weight = LUT[min(255, ds² >> R_SHIFT)] |
| 6 | excitation[ts][pass] += weight, saturating at 12 bits |

The time stamp reaches stage 6 through five delay registers, so the event slot
addresses the accumulators.

**Weight table (`sigma_lut`).** The table has 256 entries of 8 bits. Entry a is
`round(255 * exp(-a / (2 * SIGMA2)))`, where `SIGMA2` is σ² in table-address units.
The table is computed at elaboration; there is no data file.

**Timing.** The engine accepts a new hit every 7 cycles, which is 20 ns at 350 MHz.
Pass 0 of a hit reaches its accumulator 6 cycles after the hit is accepted, and
pass 6 reaches its accumulator 12 cycles after. Hits on a layer number of
`N_LAYERS` or above add nothing.

**Local copy.** An end-of-event word takes one pipeline slot. When it reaches
stage 6, the engine copies that slot's seven accumulators into a *local copy*
(`snap_*`) and clears them. The slot is then free for a later event, while the
maximum search and the clustering read the copy. If a second end-of-event word
arrives before the copy is released, the engine refuses it (`in_ready` low). The
words behind it wait in the switch FIFOs. This is the only stall the engines cause.
Hits of other events keep flowing the whole time.

## End of event: maxima and centres of excitation

The end-of-event word reaches the engines at different times, because it takes
different paths through the switch. `event_ctrl` waits until every engine holds its
local copy. It then pulses `start`.

**Maximum search (`max_finder`).** This is combinational logic over the grid. A cell
is a local maximum when both of these hold:

- its central excitation is above `threshold`;
- it is at least as large as each of its eight neighbours.

Cells outside the grid count as 0. On a tie, the cell earlier in row-major order
wins, so a flat plateau gives one flag.

**Clustering (`cluster_unit`).** There is one unit per row of 12 engines. At `start`
the unit latches its row's flags. It then serves the flagged engines one at a time,
lowest index first. For an engine with centre value c and 3x3 neighbourhood n[r][c]
(r = 0 is the row above):

```
W1 = sum of the 9 values of n
u  = base_u + (sum_r n[r][2] - sum_r n[r][0]) / W1
v  = base_v + (sum_c n[2][c] - sum_c n[0][c]) / W1
W2 = sum of the engine's 7 accumulators
d  = base_d + (acc[d+] - acc[d-]) / W2      (likewise p, z)
```

Results are fixed point in cell units with 9 fraction bits. The quotients are
truncated towards zero. `base_*` is a per-engine table loaded through the
configuration port; it holds the absolute position of the cell.

The unit takes 1 cycle to form the sums. Five restoring dividers then run in
parallel for 10 cycles, so the track is ready 11 cycles after the unit starts on an
engine. Picking the next flagged engine takes one more cycle. When every unit has
finished, `event_ctrl` pulses `release_copy`, and the engines can accept the next
end-of-event word.

**Output (`track_merger`).** A round-robin merger sends the tracks of all units to
one output stream (`track_t`). Each track carries the time stamp, row, column, peak
excitation and u, v, d, p, z.

## Timing against the published budget

| step | published (cycles) | this RTL |
|------|--------------------|----------|
| switching | 30 in readout board + 6 fan-out | 1 per stage (4 for 16 x 16) plus queueing |
| engine | 70 | 7 per hit delivered to a row, plus 6 pipeline |
| clustering | 11 | 11 per track (+1 to pick the engine) |
| output | 10 | 1 register plus arbitration |
| total | < 150 | 94 measured, for one isolated track |

Throughput is a concern. At 350 MHz and 40 MHz there are 8.75 cycles per crossing.
The published occupancy of 1.3 hits per engine per event needs 9.1 cycles of engine
time per event. The 16 event slots and the switch FIFOs absorb fluctuations, but on
average the engine as built runs slightly below 40 MHz at that occupancy.

## Configuration ports of `retina_top`

- `map_we, map_stage, map_node, map_zip, map_mask`: write one switch-map entry.
- `rec_we, rec_row, rec_col, rec_pass, rec_layer, rec_u0, rec_v0`: write one receptor
  of one engine.
- `base_we, base_row, base_idx, base_sel (0..4 = u v d p z), base_data`: write one
  entry of a clustering unit's base table.
- `threshold`: the local-maximum threshold, in accumulator units.

The receptor and base tables are not reset. Load them before sending hits. In the
real system, their contents and the zip-codes come from detector simulation, done
offline.

## Where this design departs from the published one

- **Size.** The default is one 16 x 16 network feeding 16 rows of 12 engines, 192
  engines in all. The published chip holds up to 900 engines. A full small-angle
  telescope needs about 22 500 engines over 32 chips, and the two-telescope system
  about 50 000 engines over 64 chips. Nothing here covers partitioning over several
  chips or the links between them.
- **Engine passes.** The publication says both that each hit is cycled seven times
  and that all seven contributions are computed in parallel, one hit every ~20 ns.
  This RTL cycles the hit, one pass per clock. That gives exactly 20 ns at 350 MHz.
- **Receptor memory.** It is described as read-only. Here it is writable, so one
  engine module serves every cell.
- **Row feeding.** Each switch output feeds one row of 12 engines, and all of them see
  the same hits. The publication does not say how network outputs map onto engines.
- **Switch latency.** The published switch takes 30 + 6 cycles. This one takes one
  cycle per stage. The larger published network and its readout-board part are not
  modelled.
- **Own choices.** The end-of-event merge in the switch, the wait-for-all /
  release handshake and the tie rule of the maximum search are this design's own.
  So are all field widths, the FIFO depths, σ, the rounding shift, the accumulator
  width and the fixed-point format.
- **Output.** The published 10-cycle output fan-out is reduced to a single merge
  register.
- **Not built.** Detector front-ends and links, the FPGA device itself and the
  offline map generation are outside this RTL.

## Simulating

Every testbench in `tb/` checks its own results. Each prints
`TB_RESULT checks=N failures=M` and stops. With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_retina_top \
    rtl/retina_pkg.sv rtl/hit_fifo.sv rtl/two_way_sorter.sv rtl/switch_network.sv \
    rtl/sigma_lut.sv rtl/retina_engine.sv rtl/max_finder.sv rtl/event_ctrl.sv \
    rtl/cluster_unit.sv rtl/track_merger.sv rtl/retina_top.sv tb/tb_retina_top.sv
./obj_dir/Vtb_retina_top
```

The package must come first. For one block, give the package, the block's file and
the files it instantiates.

What the tests establish:

- `tb_two_way_sorter` and `tb_switch_network`: order per input and output, duplication,
  dropping, conflicts and back-pressure, one end-of-event word per output per event
  after that event's hits, and the 4-cycle latency of the network. The reference is
  a destination list that does not depend on the wiring.
- `tb_sigma_lut`: all 256 entries against real arithmetic.
- `tb_retina_engine`: every local copy against a software model of the Gaussian sums,
  the 7-cycle hit interval, the 12-cycle accumulation of the last pass, and stalled
  end-of-event words.
- `tb_max_finder`, `tb_cluster_unit` (every track field and the 11+1-cycle timing),
  `tb_event_ctrl`, `tb_track_merger`.
- `tb_retina_top`: the whole processor at its default size, with a toy straight-track
  geometry (cells 32 units apart, layers at 0.5..1.4 of the reference plane). It runs
  24 events of 1..3 tracks with noise, back to back. Every true track must come out
  within half a cell of the truth, with few extra tracks. Duplication, node
  conflicts, row stalls and one clustering round per event must all occur. An
  isolated one-track event must come out within 150 cycles; it takes 94. The run
  takes about 2 minutes.

The geometry in these tests is a toy. The physics performance of the method
(efficiency, ghost rate, resolution) depends on real detector maps and is not tested
here.
