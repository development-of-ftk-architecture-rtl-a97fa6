# FTK: hardware track finding for a Level-2 trigger

At a hadron collider the second trigger level has milliseconds per event, which is too
little time for software to find every charged track in the silicon tracker. The Fast
TracKer (FTK) finds them in hardware and returns a list of fitted tracks to the Level-2
processors. This happens for every event the first level accepts.

FTK solves the problem in two steps:

1. **Pattern recognition.** The tracker hits are coarsened into *superstrips*, which are
   bins a few millimetres wide. An associative memory holds a precomputed bank of
   patterns, where each pattern is one superstrip per layer along a plausible track. Every
   stored pattern compares itself with the event's superstrips at the same time. The
   patterns that match are called *roads*.
2. **Track fitting.** For every road, all combinations of the full-resolution hits inside
   its superstrips are fitted. Patterns are grouped into *sectors*. Within one sector the
   track parameters are very nearly linear in the hit coordinates. So each fit is a
   handful of scalar products with constants stored for that sector. This suits FPGA DSP
   blocks and runs at one fit per clock.

This repository holds synthesizable SystemVerilog for the whole per-event chain. It
covers region splitting, clustering, the hit buffer, the associative memory, the
linearised fitter, duplicate removal and the track read-out buffer. Each block has a
self-checking testbench.

## Geometry and numbers

- A track crosses **11 layers**: 3 pixel layers (layers 0–2) and 8 strip (SCT) layers
  (layers 3–10).
- Each pixel hit gives two coordinates (phi and eta). Each SCT hit gives one coordinate.
  That makes **14 coordinates**.
- The fit gives **5 helix parameters**.
- The detector is divided into **8 phi regions**. Each region has its own crate.
- An associative-memory chip holds **10,000 patterns**.
- A road may miss **one layer**.

All of these numbers are parameters, with the values above as defaults. They live in
`rtl/ftk_pkg.sv` or in the module parameters.

The following are this design's own choices:

- **Hit format.** Raw hits are (phi, eta) channel numbers of 15 bits. A strip hit has
  eta = 0.
- **Cluster coordinates.** Clusters are given in half-channel units, 16 bits wide.
- **Superstrip width.** A superstrip is 64 channels in phi, formed as `phi >> 7` in
  half-channel units. With typical pitches (50 µm pixel, 80 µm strip) that gives about
  3 mm and 5 mm. Pixel superstrips also carry 3 eta bits. The superstrip identifier is
  12 bits.

## Data flow

```
hits (11 layers) -> region_splitter -> 8 x ftk_crate
ftk_crate: data_formatter -> data_organizer <-> am_bank
                               data_organizer -> track_fitter -> hit_warrior -> track_rob -> Level-2
```

Every link is a valid/ready stream. An event on a stream ends with an end-of-event word
(`eoe`). The hit streams carry one such word per layer, and the road and track streams
carry one per event. Events stay in order everywhere. A block always closes an event
with its `eoe` word, even when the event produced no output.

| Module | Role |
|---|---|
| `ftk_top` | Splitter plus `NREGIONS` crates. The configuration buses are shared and select a crate with `cfg_region`. |
| `region_splitter` | Combinational. Sends each hit to its phi wedge, widened by `OVERLAP` channels on each side, so a hit near a boundary goes to both regions. |
| `data_formatter` / `cluster_finder` | Per-layer clustering of adjacent phi channels. |
| `data_organizer` | Hit buffer by superstrip. Sends superstrips to the AM and joins the returned roads with their hits. |
| `am_bank` / `am_chip` | Associative memory: `NCHIPS` chips in a chain. |
| `track_fitter` | Combination generator and linear fit, with a chi-square cut. |
| `hit_warrior` | Removes duplicate tracks within an event. |
| `track_rob` | FIFO read-out buffer for Level-2 (`ev_cnt` counts complete events held). |

## Clustering

Raw hits of a layer must arrive sorted by (eta, phi). A cluster is a run of consecutive
phi channels with the same eta channel. The cluster finder reports it as
`phi = first + last` and `eta = 2*eta`, in half-channel units, which is the cluster's
centre without a divider. The finder takes one hit per clock. An end-of-event word that
closes an open cluster is accepted at once: the cluster leaves first and the `eoe`
follows one clock later. The published design only says that clustering is done in
FPGAs per layer. This one-dimensional rule is the simplest one that works, not the
published algorithm.

## Data Organizer: hit lists per superstrip

The organizer has two jobs:

- it sends the associative memory each superstrip of the event once;
- it finds all the hits of a superstrip quickly when a road comes back.

It keeps, per layer:

- `hitmem`, which stores the hits at full resolution;
- `head[ss]` with a valid bit `headv[ss]`, which points to the newest hit of superstrip
  `ss`;
- `nxt[i]`, which links each hit to the previous hit of the same superstrip. A `last`
  flag ends the list.

When a hit's superstrip has no list yet, the organizer also sends the superstrip number
to the AM. When all 11 layers have delivered their `eoe`, it sends the AM an end of event.

When a road arrives, the organizer walks the 11 lists of the road's superstrips in
parallel, one hit per clock per layer. It collects up to `MAX_HPS` = 4 hits per layer,
newest first. It then sends one packet to the fitter: the road, the hit count of each
layer, and the hits.

The `headv` bits of the used bank are cleared while the AM's `eoe` word is handled.

The buffer has two banks, used in turn. Event *n+1* is written into one bank while the
roads of event *n* are served from the other.

Two counters record losses:

- Hits beyond `HIT_DEPTH` (256) per layer and event are dropped and counted in
  `drop_cnt`.
- Superstrips holding more than `MAX_HPS` hits are truncated and counted in `trunc_cnt`.

The road from the AM carries the pattern's own superstrips and sector. So the organizer
needs no copy of the pattern bank.

## Associative memory

Each `am_chip` stores `NPATT` patterns. A pattern is 11 superstrips plus a sector number.

- **Matching.** In every clock, each layer bus may carry one superstrip. Every pattern
  compares each bus with its own superstrip for that layer. On a hit it sets a sticky
  per-layer match flag, so a pattern can collect its layers in any order and over any
  number of clocks.
- **End of event.** At the event's `eoe`, a pattern whose flags cover at least
  `NLAYERS - MISSED_MAX` layers becomes a road. The road vector and the layer map are
  copied into readout registers. The match flags restart with that clock's superstrips,
  so the next event can be loaded while this one is read out.
- **Readout.** Roads are read out one per clock, lowest address first, through a priority
  encoder. A road carries:
  - a global road id, `CHIP_ID*NPATT + address`;
  - the sector;
  - the map of layers that matched;
  - the pattern's superstrips.
- **Chip chain.** `am_bank` chains the chips. Chip *k* forwards the roads of chip *k−1*
  before its own. It sends its `eoe` only after its own roads are out and the upstream
  `eoe` has arrived. The last chip's output is the bank's road stream.
- **Unwritten patterns.** Patterns never written (`pat_ok` clear) never match.

At 10,000 patterns per chip this is about 10^5 match flip-flops and comparators per chip.
The real device is a custom chip; this RTL gives its logic function, not its circuit.

## Track fitter

A road packet expands into every combination of one hit per layer. An odometer over the
per-layer hit counts makes the combinations, one per clock. A layer with no hit (a road
with one missing layer) uses the centre of the road's superstrip as its coordinate. The
14 coordinates are ordered with the pixel phi and eta first (x0..x5), then the 8 SCT
phi values (x6..x13).

For the road's sector `s`, the fitter computes 14 scalar products:

```
r_i = sum_{j=0..13} c[s][i][j] * x_j + q[s][i]        i = 0..13
p_i = r_i                                              i = 0..4   (helix parameters)
chi2 = sum_{i=5..13} sat16(r_i)^2                      (9 constraints)
```

The published design gives the linear form for the parameters and says that chi-square
also comes from scalar products. The constraint form is how a linearised chi-square is
normally computed with 14 − 5 = 9 degrees of freedom. The constants for a sector come
from a principal-component fit of simulated tracks, which lies outside the hardware.

**Fixed point.**

- The constants `c` are signed, 18 bits wide (one DSP operand), with 12 fraction bits.
- `q` is an integer in output units.
- Products accumulate in 42 bits. The result is then shifted right by 12 bits,
  truncating toward −∞.
- Each constraint is saturated to 16 signed bits before it is squared.
- Chi-square is 36 bits wide.

A combination is kept when `chi2 <= cut`; the cut is loaded through `cfg_cut_we`.

**Pipeline.** The pipeline has five stages:

1. coordinates;
2. products;
3. sums;
4. parameters and squares;
5. chi-square and cut.

It holds one fit per clock. The whole pipeline stalls only while its output register is
full and not taken. The testbench measures 940 fits in 946 clocks.

**Constant loading.** The constant memory is `cmem[sector][row][col]`, with 256 sectors ×
14 rows × 15 columns; column 14 is `q`. It is written through
`cfg_we/cfg_sector/cfg_row/cfg_col/cfg_val`.

**Counters.** `fit_cnt` counts fits and `rej_cnt` counts chi-square rejects.

## Duplicate removal

The same track can come out of overlapping roads, or out of a road matched both fully and
with a missing layer. `hit_warrior` buffers up to `HW_DEPTH` = 32 tracks of an event. It
compares each new track with every stored one in a single clock. Two tracks are
duplicates when they share at least `MIN_SHARED` = 6 real hits (same layer, same
coordinates). If a stored duplicate has an equal or smaller chi-square, the new track is
dropped. Otherwise the worse stored duplicates are invalidated and the new track takes a
free entry. At `eoe` the survivors are sent on in order, then the `eoe` word.

Two counters record what is removed:

- `dup_cnt` counts removed duplicates.
- `ovf_cnt` counts tracks dropped because the buffer was full.

The published design only says that duplicates are removed. The shared-hit rule is this
design's choice.

## Where this departs from the published design

- **Pattern bank size.** The studies behind the design use 0.5 to 36 million patterns per
  region. The default crate here has `NCHIPS = 2` chips of 10,000 patterns, which is
  20,000 patterns. Raising `NCHIPS` grows the bank, but banks of millions cannot be
  simulated as RTL.
- **Fit rate.** The target is about one fit per nanosecond. This design does one fit per
  clock per region, 8 per clock in total. Meeting the target depends on the clock
  frequency, which is not fixed here.
- **Own choices.** The following are this design's own and are named as such in each
  file header:
  - the clustering rule;
  - the region geometry (equal wedges of raw channel number, 256 channels of overlap);
  - the superstrip mapping;
  - all bit widths;
  - the handshakes;
  - the hit-list structure;
  - the missing-layer coordinate;
  - the chi-square constraint form;
  - the duplicate rule;
  - buffer depths.
- **Outside the design.** The following are not part of the RTL:
  - the optical splitters and the detector readout links, which the top's `hit_*` ports
    stand for;
  - the Level-2 processors, which read `rob_*`;
  - the custom-cell circuit of the AM chip.

## Simulation

Every testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/ftk_pkg.sv tb/tb_ftk_top.sv --top-module tb_ftk_top -o sim
./obj_dir/sim
```

Any other testbench runs the same way, for example `tb_am_chip`, `tb_data_organizer` or
`tb_track_fitter`. Unit testbenches compare against models written independently in
the testbench.

`tb_ftk_top` runs the complete design at its default parameters: 8 regions, 2 × 10,000
patterns per region, 256 sectors. It builds and runs in well under a minute. It
loads a small pattern bank and fit constants into one region. It then sends events that
make every mechanism happen at least once, and counts each one:

- a hit in a region overlap;
- clustering;
- full and missing-layer roads;
- multi-hit combinations;
- chi-square rejects;
- duplicates;
- superstrip truncation;
- hit-buffer drops;
- Level-2 back-pressure;
- the organizer's two banks in use at once.

`tb_ftk_crate` does the same for one crate at reduced sizes.

To change the design, edit the constants in `ftk_pkg.sv` (geometry, widths) or the
parameters of `ftk_top`. `ss_of()` in the package defines the superstrip mapping, and
`coords_of()` defines the order of the fit coordinates.
