# Crystal Barrel timing branch and ultra-fast cluster encoder

This is the digital part of the timing branch of the APD-based Crystal Barrel
calorimeter readout, written in SystemVerilog. For every crystal it takes two
threshold comparators and produces:
- a walk-corrected hit;
- time stamps of every comparator edge.

It also finds clusters in the hit pattern of the whole calorimeter and delivers
their count to the first-level trigger 45 ns after the hits, every 5 ns.

The top is `cb_cluster_finder`. It covers all 1380 crystal positions, of which
1320 are installed. Everything runs on one 200 MHz clock.

## Structure

```
cb_cluster_finder
 ├─ 16 x disc_module            one calorimeter section each (92 or 46 crystals)
 │   ├─ NCH x walk_corr_disc    dual-threshold hit logic with walk correction
 │   ├─ multihit_tdc            time stamps of all 2*NCH comparators
 │   └─ cluster_cell per crystal  delayed top-left-corner pattern check
 ├─ hit_backplane               boundary hits exchanged between modules
 ├─ cluster_adder_tree          1320 flags -> 5-bit saturated count, N>=1/2/3
 └─ cluster_count_sampler       time-stamped record of every count change
cb_pkg                          geometry, timing constants, word formats
```

### Geometry

The calorimeter is treated as a matrix of 26 rings by 60 phi cells:
- Rings 0-2 and 23-25 hold 30 crystals, so each crystal in those rings covers
  two cells.
- Rings 24 and 25 are not installed.

Each half (rings 0-12 and 13-25) is cut into eight sections: one of 4 columns
and seven of 8 columns. One section is one discriminator module. A full
section holds 3 × 4 + 10 × 8 = 92 crystals and the narrow one holds 46. Module
`m = half*8 + section` owns a contiguous range of global crystal numbers,
numbered ring by ring inside the section.

### Hit logic (`walk_corr_disc`)

Both comparators pass through a two-flop synchroniser.
- **High-threshold check:** the low-threshold edge starts a 150 ns timer
  (30 cycles). When it expires, the channel checks whether the high
  comparator has fired. If not, the pulse is discarded, which removes the
  small pulses that carry most of the walk.
- **Walk correction:** the number of cycles `dt` between the two threshold
  crossings selects an extra delay `lut[dt]` from a 32-entry table. The
  default table is `30 - dt`: a pulse with a linear leading edge then gives a
  hit that starts at the same time relative to the pulse start, whatever its
  amplitude. The table is shared and writable through `lut_we/addr/data`.
- **Hit pulse:** the hit lasts 24 cycles (120 ns). It starts
  `30 + 2 + lut[dt]` cycles after the synchronised low edge.

### Cluster cells (`cluster_cell`)

Each crystal runs a small state machine: wait, delay, check, pulse.
- On the leading edge of its hit it waits D cycles (default 12, i.e. 60 ns).
- It then checks the top-left-corner pattern: `hit & ~(up | up_left | left | down_left)`.
- If the pattern holds, it outputs a cluster flag for P cycles (default 26,
  i.e. 130 ns).

The delay lets neighbours that fire a little later still veto the cell. D and
P are run-time inputs. A crystal that covers two cells is evaluated at its
left cell.

### Module boundaries (`hit_backplane`)

Each module exports:
- its rightmost column (13 bits);
- its top ring and bottom ring (8 bits each).

The backplane delivers the left column, the ring above and the ring below,
plus the two diagonal cells, to each module one cycle later. The two diagonal
cells come from the other half. The phi direction wraps: the last section is
left of the first. Modules delay their own hits by the same cycle so that all
neighbours of a cell are aligned. Seen from a top-row module, this is 8 bits
to the module below, 13 bits to the right and 1 bit diagonally.

### Counting (`cluster_adder_tree`)

The 1320 flags are summed in stages:
1. Groups of 4 or 5 flags are summed into 320 partial sums.
2. Those 320 are reduced to 256: 64 pairs are added and the other 192 values
   pass through.
3. Eight pairwise levels add the remaining values down to one.

Registers sit after stages 1 and 2 and after every second pairwise level,
which is six positions. After that come:
- one register that saturates the count at 16 (a 5-bit value whose MSB means
  "16 or more");
- two registers for the transfer between modules.

The latency is therefore 9 cycles (45 ns). The trigger outputs are N≥1, N≥2
and N≥3.

### TDCs and count sampler

`multihit_tdc` compares every synchronised comparator with its value in the
previous cycle.
- **Time stamp:** each leading and trailing edge is stamped with a 16-bit
  counter in 5 ns steps.
- **Pending slots:** the stamp waits in a slot for its comparator and edge
  polarity.
- **Drain:** one slot per cycle moves into a 256-word first-word-fall-through
  FIFO, lowest comparator number first.
- **Lost edges:** an edge that arrives while its slot is still occupied is
  counted in `lost_cnt`.
- **Word format:** polarity, comparator number (2k = low threshold of
  channel k, 2k+1 = high threshold) and stamp.

`cluster_count_sampler` writes the new count and the same kind of time stamp
into a 64-word FIFO whenever the count changes. Offline software can then
compare the hardware cluster count with the count recomputed from the TDC
data.

### Timing summary (defaults)

Take a low-threshold crossing at cycle T (at the comparator input) and a high
crossing `dt` cycles later. Then:

| Event | Cycle |
|---|---|
| hit starts | T + 64 − dt |
| pattern check | one backplane cycle plus 12 cycles after the hit starts |
| cluster flag | 14 cycles after the hit starts, for 26 cycles |
| cluster count | 9 cycles after the flag |

## What comes from the source description and what is this design's choice

Taken from the description of the readout:
- two comparators per channel;
- the 150 ns high-threshold check, and walk correction from the time between
  the two thresholds through a look-up table;
- 120 ns hits, and the check 60 ns after the hit followed by a 130 ns pulse;
- the top-left-corner pattern;
- 92 channels per module and 16 modules;
- a TDC for all 184 comparators of a module;
- the 8/13/1-bit exchange between modules;
- the adder tree sizes (1320 → 320 → 256 → … → 1), six register positions,
  9 cycles at 200 MHz, and the 5-bit count with overflow;
- the N≥1/2/3 trigger levels;
- a TDC-like sampler of the cluster count.

Read off the figures:
- the pattern cells;
- the state machine sequence;
- the section layout (4-column section, 30-crystal rings, missing rings).

This design's own choices:
- the two-flop synchronisers;
- the default walk table and its shared write port;
- the clock-sampling TDC architecture, its stamp width, word format and FIFO
  depth;
- the split of the three extra summation cycles into one saturation and two
  transfer registers;
- the grouping of flags in the first two tree levels;
- the backplane port format and its one-cycle latency;
- the count sampler recording only changes;
- plain FIFO read ports in place of the VME interface.

## Not included

These parts cannot be expressed as digital logic:
- the APDs, preamplifiers and bias supply;
- signal transmission;
- the shaping filters and comparators;
- the sampling ADC hardware;
- the light pulser.

The sampling-ADC feature extraction of the energy branch is not built here.

## Verification

Every block has a self-checking testbench in `tb/`. Each one builds its
expected results from the timing rules and an independent model, not from
the RTL. `tb_cb_cluster_finder` runs the full-size top with default
parameters. It keeps its own description of the calorimeter geometry and
checks, every cycle:
- all 1320 cluster flags;
- the cluster count and trigger levels against a reference model.

It also checks every hit start, every TDC word and every sampler record.
Directed cases cover:
- clusters split over phi, half and diagonal module boundaries;
- the phi wrap;
- a neighbour that fires late;
- overflow at 16 clusters;
- pulses below the high threshold.

After those, random showers run over the whole calorimeter. The testbench
prints how often each mechanism occurred: truncated pulses, walk-corrected
hits, clusters, checks suppressed by a neighbour in another module, overflow
cycles, TDC words and sampler records.
