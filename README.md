# A 3D track-segment seeding engine built on the Tiny Triplet Finder

A level-1 tracking trigger must find track segments in a few hundred clock
cycles per event, with a large share of the hits being noise. This engine
handles one sector of a three-layer barrel tracker. For every hit on the
middle layer, it tells whether hits on the inner and outer layers complete a
track with it. The check covers both views:

* the r-z view, for a straight line from a vertex inside the luminous region;
* the r-phi view, for a helix of enough transverse momentum.

Each hit is handled in one clock cycle. One event with up to 112 hits per
layer takes 112 + 112 + 1 cycles.

The engine combines two ideas:

* **A Hough transform for r-z.** Each inner-layer or outer-layer hit is mapped
  to every straight line that could join it to a vertex bin (z0). Each line is
  described by where it crosses the middle layer (z375, its z at r = 375 mm).
  The hit is stored under those (z375, z0) cells.
* **The Tiny Triplet Finder (TTF) for r-phi.** A middle-layer hit reads the
  stored phi bitmaps at its own z, which is its own z375. Barrel shifters then
  line those bitmaps up with the middle hit's phi. One fixed set of
  coincidence "roads" decides whether an inner bit and an outer bit form a
  track of allowed curvature and displacement with it.

Because the shifters align the data with the roads, the roads are built only
once. They are not repeated for every phi position.

## Geometry and binning (defaults)

| quantity | value |
|---|---|
| layer radii | 250, 375, 525 mm |
| field, minimum pT | 4 T, 2 GeV/c, so curvature up to 0.6 /m |
| z bins (z1, z3, z375) | 240 bins of 1 cm over 240 cm |
| z0 bins | 10 bins of 2 cm over ±10 cm |
| phi bins | 128 bins of 0.125° over a 16° window |
| hits per layer per event | up to 112 |

The middle layer is read at full resolution. Its phi is expressed on the same
grid, and a sector of 10° sits inside the 16° window, so inner and outer hits
of tracks near the sector edge are still in the window.

All of these values are parameters in `tts_pkg`, and most are also
parameters of `seeding_engine`.

## Data flow of one event

```
host ──► hit_input_buffer ──► seeding_sequencer (fill / search / refresh)
              │ layer1 hit           │ layer3 hit         │ layer2 hit
              ▼                      ▼                    │
         z_hough_rom (r=250)    z_hough_rom (r=525)       │  z bin = z375
              ▼                      ▼                    ▼
      hit_storage_block 1    hit_storage_block 3  ◄── read column z375
              └──────────┬───────────┘
                         ▼  10 rows × 128-bit phi maps, each layer
                tiny_triplet_finder (ttf_shifter ×2 per row, ttf_road_logic)
                         ▼
                   result_buffer ──► host
```

1. **Fill.** This phase takes max(n1, n3) cycles. Each cycle, one layer 1 hit
   and one layer 3 hit go through their Hough ROMs. Each sets its phi bit in
   the ROM's z375 band in every z0 row.
2. **Search.** This phase takes n2 cycles. Each cycle, one layer 2 hit reads
   the column at its z bin from both storage blocks, which gives 10 rows of
   phi maps per layer. The TTF then counts road coincidences in each row.
3. **Refresh.** This phase takes one cycle. Both storage blocks are emptied.

If the next event is already complete in the input buffer, it starts in the
cycle right after the refresh. A burst of events therefore runs with no idle
cycles.

## The r-z Hough band ROM (`z_hough_rom`)

A straight r-z line through a vertex at z0 and a hit at (r, z) crosses
r = 375 mm at

    z375 = z0 + (z - z0) * 375 / r

A hit's z bin and a z0 bin are both intervals, not points. The ROM therefore
returns every z375 bin reached by lines through the four corners of the
(z bin, z0 bin) cell, as a band [first bin, first bin + span).

With 1 cm z bins and 2 cm z0 bins, the band is at most 3 bins wide for both
layers. A generate-time check stops elaboration if a parameter change ever
makes a band wider than the storage block's banks.

Using a single line through the bin centres instead would lose about 40% of
real tracks to rounding. The band costs a wider write, not more cycles.

The table has N_Z × N_Z0 entries. It is computed at elaboration by a constant
function in integer arithmetic. The lookup is registered, so it behaves like a
block-RAM ROM.

## Register-like storage block (`hit_storage_block`)

Each z0 row holds one word of N_PHI bits for each z375 bin. The bits are the
current event's hits in that column.

Clearing 10 × 240 × 128 bits between events would normally take 240 cycles,
one word per cycle. Instead, every word has a flip-flop flag that means "this
word belongs to the current event":

* **Refresh** clears all flags in one clock.
* **A write to an unflagged word** stores just the new bit, which discards the
  stale contents, and raises the flag.
* **A write to a flagged word** adds a bit through a bit-masked write.
* **A read of an unflagged word** returns zero.

So the memory arrays are never cleared, but they behave as if they were.

A Hough band can cover up to 3 consecutive words per row, and all of them are
written in the same clock. To allow this, each row is split into 4 banks by
word address modulo 4, so a band touches every bank at most once. Reads are
registered, taking one cycle.

## Tiny Triplet Finder (`ttf_shifter`, `ttf_road_logic`, `tiny_triplet_finder`)

For a track of curvature κ and transverse impact parameter d, the phi of the
track at radius r, relative to its phi at 375 mm, is approximately

    Δφ(r) = κ (r - 375 mm) / 2 + d (1/r - 1/375 mm)

The road map is generated at elaboration:

* It scans κ over ±0.6 /m in steps of 0.02 /m and d over ±2 mm in steps of
  0.5 mm.
* For each (κ, d) it takes the floor bin of Δφ at r = 250 mm and at
  r = 525 mm.
* It declares the pairs (o1, o3), with o1 ∈ {f1, f1+1} and o3 ∈ {f3, f3+1},
  as roads.

This accounts for the layer 2 hit sitting anywhere within its own bin. At
0.125° there are 197 roads. Layer 1 offsets lie within ±19 bins and layer 3
offsets within ±22 bins.

Per z0 row, the TTF works in three steps:

* **Shift.** `ttf_shifter` cuts a window of 2W+1 bins out of each outer
  layer's phi map, centred on the layer 2 phi bin. Bins outside the 16°
  window read as empty.
* **Roads.** `ttf_road_logic` ANDs the bit pair of every road and counts the
  roads that fire.
* **Sum.** The row counts are added up. The count saturates at 4095.

The result also carries a mask of the z0 rows that had at least one
coincidence. The road logic is one set, shared by all phi positions, and is
instantiated once per z0 row.

The pipeline has three registered stages: shift, road counts, then sum. The
TTF accepts a new hit every clock.

## Pipeline timing

A slot issued by the sequencer in cycle t moves through the engine as
follows.

| cycle | what happens |
|---|---|
| t | sequencer strobes; input buffer read |
| t+1 | hit data available; Hough ROM lookup |
| t+2 | storage write (fill), column read (search) or refresh |
| t+3 | column data into the TTF |
| t+6 | result record written to the result buffer |

Writes, reads and the refresh all reach the storage blocks two cycles after
they are issued. Consecutive phases and consecutive events therefore never
meet there, and no bubbles are needed.

## Flow control and host interface

The host interface has two sides: the **input buffer** and the **result
buffer**.

**Input buffer (`hit_input_buffer`):**

* The host writes hits with a valid/ready handshake. Each hit has a layer, a
  z bin and a phi bin, and an end-of-event word closes the event.
* Each layer has its own circular RAM of 1024 hits. A small FIFO of 8 entries
  holds the per-layer hit counts of complete events.
* `wr_ready` drops when a layer RAM or the event FIFO is full.
* Hits beyond 112 in one layer of one event are dropped and counted in
  `hits_dropped`.

**Result buffer (`result_buffer`):**

* Every layer 2 hit produces one 60-bit record, including hits with no
  coincidence, so the host can build count histograms. The record holds the
  event number, the hit index, the hit, the z0 mask and the count.
* The buffer is a 512-entry show-ahead FIFO.
* The sequencer starts an event only when the buffer is sure to have room for
  all of the event's results, which is a credit scheme. Cycles lost waiting
  are counted in `stall_res`.

`phase`, `refresh` and `res_wr_addr` are brought out as ports so the phase
sequence can be watched on a logic analyser.

## What follows the original design and what is this design's own

**Taken from the original design:**

* the three-layer geometry, the binning and the 112-hit events;
* the r-z Hough step using z0 and z375;
* storage blocks of phi bitmaps indexed by z375 and z0, read by the middle
  layer's z;
* a one-cycle refresh of the storage;
* shifters in front of a single set of roads;
* one hit per clock, with 112 + 112 + 1 cycles per event;
* back-to-back event processing.

**Chosen here**, where the original description gives only the function:

* the Hough band rule (cell corners) and its banked storage;
* the flag-per-word way of getting a one-cycle refresh;
* the road map, computed from the helix formula above with the scan steps
  given there;
* all pipeline latencies;
* the host handshake, the buffer organisation and depths, and dropping hits
  above 112;
* the credit flow control;
* the result record format and the saturating 12-bit count.

**Not included:**

* the USB link and the host software;
* the "2D" comparison runs of the original study, which use the r-phi view
  alone or the r-z view alone. There is no mode switch for them. The 2° run
  comes close to the r-z-only case;
* lookup tables and a road map for the alternative geometry: three strip
  planes with hit timing, where y and t take the places of z and phi.

The alternative geometry's sizes (the slope range, the time window and the bin
counts) are not known well enough to generate its tables. The datapath would
serve it unchanged. Only the constant functions that fill the Hough table
and the road map would need to be replaced.

The coarser phi binnings (0.5° and 2°) are supported by the `PHI_BIN`
parameter of `seeding_engine`, in millidegrees. The road map and window
widths are recomputed automatically. Both are exercised by their own
testbench.

The original implementation ran at 250 MHz on an FPGA. No timing target is
claimed for this RTL.

## Behaviour seen in simulation

The end-to-end testbench runs at the default size. Its workload is 10
generated tracks plus 102 random hits per layer, 16 events in total. Results:

* All 142 generated tracks were found. The tracks stay inside the barrel on
  all three layers. The testbench fails if fewer than 99% are found, the
  acceptance the original design reports.
* About 84% of the layer 2 hits in the results had no coincidence at all.
  The original design reports about 80% of the random hits in that bin.
* Back-to-back full events took exactly 225 cycles from refresh to refresh.
* With 0.5° bins (32 bins) and 2° bins (8 bins), over 6 events each, every
  result matched the reference. All 60 tracks were found in both cases.
  The share of layer 2 hits with no coincidence fell from about 70% to about
  45% as the bins grew, because coarse bins let more random hits line up.

## Files

| file | contents |
|---|---|
| `rtl/tts_pkg.sv` | constants, record types, and the constant functions for the Hough table and road map |
| `rtl/hit_input_buffer.sv` | host input buffer |
| `rtl/seeding_sequencer.sv` | fill / search / refresh control and credits |
| `rtl/z_hough_rom.sv` | r-z Hough band ROM |
| `rtl/hit_storage_block.sv` | register-like storage block |
| `rtl/ttf_shifter.sv` | window barrel shifter |
| `rtl/ttf_road_logic.sv` | road AND gates and fired-road count |
| `rtl/tiny_triplet_finder.sv` | per-row shifters and road logic, sum over rows |
| `rtl/result_buffer.sv` | result FIFO |
| `rtl/seeding_engine.sv` | top level |
| `tb/tts_ref_pkg.sv` | real-arithmetic reference for the Hough bands and roads |
| `tb/tb_*.sv` | one self-checking testbench per module, and one for the package functions |
| `tb/tb_phi_binning.sv`, `tb/tb_phi_binning_run.sv` | barrel workload at 0.5° and 2° phi bins |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops on its own.
Each has a watchdog. For example, for the top level:

```
verilator --binary --top-module tb_seeding_engine -y rtl -y tb \
    rtl/tts_pkg.sv tb/tts_ref_pkg.sv tb/tb_seeding_engine.sv
./obj_dir/Vtb_seeding_engine
```

The end-to-end run builds in under a minute and runs in well under a second.
The block testbenches use the same command with their own top module. Some
of them reduce the buffer depths so that the full and stall cases come up
quickly.

To change the binning, override the `seeding_engine` parameters (`PHI_BIN`,
`N_Z`, `N_Z0`) or edit the geometry constants in `tts_pkg`. The Hough table
and the road map follow automatically. The generate-time check reports a
Hough band that has outgrown the 4 storage banks.
