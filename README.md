# Online reconstruction logic for a PANDA Compute Node

PANDA at FAIR has no hardware trigger. Every event is read out, and the data
volume must be cut down online, by reconstructing the events in FPGAs and
keeping only the interesting ones. The FPGAs sit on a Compute Node, an ATCA
board with five Virtex-4 FX FPGAs. Four of them run reconstruction
algorithms on data from optical links. The fifth is a router: it has 16
backplane links to every other board of the shelf (a full mesh, so there is
no shared bus to arbitrate) and links to the four processor FPGAs.

This repository holds synthesizable SystemVerilog for the algorithm engines
that were published for this board, and a router that joins them the way the
board joins its FPGAs:

| Engine | What it does | Module |
|---|---|---|
| Helix track finder | Conformal map + Hough transform + peak finder, finds charged tracks in a 2 T solenoid field | `helix_track_finder` |
| RICH ring finder | Looks for rings of radius 4 pads in a 13x13-pad region around each extrapolated track (HADES RICH) | `rich_ring_finder` |
| Cherenkov angle and PID | Angle = table(ring radius, z on the quartz bar); species = table(momentum, angle) | `cherenkov_angle_lut`, `pid_decision` |
| Event selector | Streams HADES events from DDR2 in 32 kB DMA blocks, accepts or rejects each, writes accepted ones back | `event_selector` |
| Router | 20-port packet switch: 16 backplane + 4 processor ports | `cn_router` |

`compute_node` is the top. It puts each engine on one processor FPGA's slot and
turns every result into a one-flit packet for the router. Everything runs on
one clock with an active-low asynchronous reset. Shared constants and types
(`flit_t`, `species_e`, the result tags) are in `online_pkg`.

## The helix track finder

A charged particle in a solenoid field moves on a helix. Seen along the beam
axis it draws a circle through the interaction point. The finder works in
two steps.

**Conformal map** (`conformal_map`). Each hit (x, y) becomes

    x' = (x - x0) / r^2,  y' = (y - y0) / r^2,  r^2 = (x - x0)^2 + (y - y0)^2

Circles through (x0, y0) turn into straight lines. A circle of radius R
centred at R(cos φ, sin φ) becomes the line whose normal has direction φ
and whose distance from the origin is 1/(2R).

The arithmetic is fixed point, 24 bits wide, widened to 48 bits for the
multiplication and division:

- Hits are signed Q15.8 in cm.
- Conformal coordinates are signed Q7.16 in 1/cm.
- Each coordinate is a 48-bit quotient (|dx| << 24) / r^2, with the sign
  put back afterwards.
- Two restoring dividers (`fx_divider`, one bit per clock) run side by
  side.

A hit takes 51 clocks, with the result out 50 clocks after the hit is
accepted. Results that do not fit 24 bits saturate. This only happens for
hits within about 0.01 cm of (x0, y0).

**Hough transform** (`hough_accumulator`). A line is found by letting each
point vote for every line through it. For each of 512 angles θ the engine
computes

    r = x' cos θ + y' sin θ

and increments cell (θ, r) of a 512 x 512 histogram. The points of one line
all vote for the same cell, which becomes a peak.

- **Angles.** θ bin t stands for θ = (t − 256)·π/256, covering the whole
  circle, so r is always ≥ 0. Negative r values are simply not voted.
- **Sine table** (`sine_lut`). Sine and cosine come from a 128-entry,
  16-bit table holding a quarter wave: entry k = round(65536·sin(kπ/256)),
  stored in `sine_lut.hex`. The other quadrants come from symmetry. The
  value 1.0 does not fit 16 unsigned bits, so it is produced by logic.
- **r bins.** The bin is r in Q7.16 shifted right by `R_SHIFT` = 4, which
  gives 2^-12 /cm per bin and a range of 0 to 0.125 /cm. That range covers
  tracks with a circle radius above 4 cm, i.e. p_T above about 25 MeV/c in
  2 T. A finer bin spreads the votes of one track over several r bins,
  because the angle bins are coarse compared with the conformal points far
  from the origin. The track test then stops finding tracks.
- **Counters.** Cells are 8-bit counters that saturate at 255. Votes that
  hit a full cell are counted separately (`votes_saturated`).
- **Timing.** Voting is one θ per clock, 513 clocks per hit. The
  read-modify-write pipeline is 4 clocks deep. Successive votes of one hit
  land in different θ rows, so they never collide.

At the end of an event (`in_last`) the histogram is read out in scan order,
one cell per clock, and each cell is cleared as it is read. That takes
512·512 = 262,144 clocks.

**Peak finder** (`hough_peak_finder`). It sees the histogram as a stream and
keeps two rows in line buffers. A cell is a peak when all of these hold:

- it is at or above the threshold;
- it is above zero;
- it is strictly greater than the four neighbours scanned before it;
- it is at least equal to the four scanned after it.

The mixed comparison reports exactly one cell of a flat-topped plateau.
Peaks go through a 16-entry FIFO. If the consumer stalls and the FIFO is
full, peaks are dropped and counted in `peaks_dropped`.

One event of n hits costs about 513·n + 262,144 + 600 clocks. For 10 tracks
of 37 hits that is about 452,000 clocks.

## The RICH ring finder

In the HADES RICH, an electron or positron makes a ring of 4 pads radius on
a pad plane. Rings are searched only where a track points. A coordinate
table (`rich_coord_lut`, 4096 entries) maps the extrapolated track to a pad,
which takes care of the mirror geometry. The 13x13 pads around that pad are
then read out of a hit bitmap (`rich_pad_memory`, 96x96 pads, one row of 13
bits per clock).

`rich_ring_match` then tries the 25 ring centres within ±2 pads of the
region's centre. Those are all the centres that keep a radius-4 ring inside
13x13. For each centre it counts the hit pads on a ring mask, which is the
32 pads whose distance d from the centre satisfies 3.5 ≤ d < 4.5. The best
centre wins. A ring is reported found when its count reaches the threshold.

The result carries the ring centre, the count and the seed's id. The finder
handles one seed at a time, 18 clocks from seed to result.

## Cherenkov angle and particle identification

In the DIRC, photons bounce along a quartz bar before they leave it. The
radius of the ring they make therefore gives the Cherenkov angle only
together with the z position where the track entered the bar.

- `cherenkov_angle_lut` is a 16384-entry table indexed by 7 bits of ring
  radius and 7 bits of z, returning a 16-bit angle.
- `pid_decision` is a 64x64-cell map of the (momentum, angle) plane,
  indexed by the top 6 bits of each, holding a species code.

Both tables are loaded through their configuration ports: their contents
come from the detector's optics and from the particle bands
cos θ_C = 1/(nβ). Each lookup takes one clock. In `compute_node` they form a
two-stage pipeline, followed by a 16-entry result FIFO. `pid_ready` falls
while the FIFO holds 13 or more entries, which leaves room for the two
lookups still in flight.

## The event selector

`event_selector` reads a region of DDR2 memory holding HADES binary events
and copies the accepted ones to a second region. It works in DMA blocks of
32 kB (8192 words), using an input buffer and an output buffer of one block
each.

**Header.** For each event it reads two header words:

- word 0, the size in bytes (the event is ⌈size/4⌉ words long, header of 8
  words included);
- word 2, the event id.

The event is accepted when `(id & mask) == value`.

**Block handling.**

- An event that runs past the end of the loaded block is not split. The
  next block is loaded starting at that event (`reloads` counts this).
- A full output buffer is written back as one burst (`flushes`), and so is
  the last partial one.

**Errors.** The run stops with `error` set on any of these:

- an event shorter than its header;
- an event longer than a block;
- an event cut off by the end of the region.

**Memory port.** `mem_req/mem_we/mem_addr/mem_wdata` are taken when
`mem_gnt` is high. Read data come back in order on `mem_rvalid/mem_rdata`,
with any delay. When the memory grants every clock, moving a word costs one
clock each for load, copy and write-back.

## The router and the packets

`cn_router` is a crossbar without input buffers. Ports 0 to 15 are the
backplane links and ports 16 to 19 the processor FPGAs.

- **Flits.** A flit (`flit_t`) is `{dest[4:0], last, data[31:0]}`. It
  passes in the clock it is offered when its output is free and ready;
  there is no latency.
- **Wormhole.** An output that has sent the first flit of a packet stays
  with that input until the flit marked `last`.
- **Arbitration.** A free output picks among competing inputs round robin,
  starting after its last winner. With all 20 inputs sending to one
  output, no input waits for more than 19 packets.
- **Contention.** `contentions` counts the clocks in which some input had
  to wait.

Each engine in `compute_node` sends its results as single-flit packets to the
port given in `result_dest[engine]`. The first four bits of `data` are a tag:

| Tag | Source | data[27:0] |
|---|---|---|
| 1 | track | `2'b0, θ bin[8:0], r bin[8:0], count[7:0]` |
| 2 | ring | `found, count[5:0], row[6:0], col[6:0], id[6:0]` |
| 3 | PID | `17'b0, id[7:0], species[2:0]` |
| 4 | event selector | `accepted[23:0], error, 3'b0`: one summary per run |

## What follows the published design and what does not

These numbers follow the published description:

- 24-bit fixed point with 48-bit division and multiplication;
- the 512x512 Hough space;
- the 128-entry, 16-bit sine table;
- the conformal map and Hough formulas;
- the 13x13-pad region of interest and the ring radius of 4 pads;
- the mirror-coordinate lookup table;
- the 32 kB DMA block;
- the Cherenkov angle as a table of (ring radius, z);
- the PID decision from the angle-versus-momentum plane;
- 16 backplane links and a router among five FPGAs.

The published text gives the engines' function, and for the track finder
its arithmetic, but not their insides. These are this design's own choices:

- all binary point positions, the r bin width and the θ range;
- the voting schedule and the read-and-clear scan;
- the peak criterion;
- the pad-plane size (96x96, taken from 55,296 pads = 6 sectors of 96x96);
- the ring mask and the candidate search;
- all table sizes;
- the HADES header layout and the accept rule, which come from general
  knowledge of the HADES format rather than from the text;
- the block reload and flush policy;
- the router's switching scheme and flit format;
- the assignment of engines to FPGAs.

**The r axis.** The published Hough-space plot shows a signed r axis over
half a circle of angles. The text defines r as a distance from the origin.
This design follows the text: r ≥ 0 over the full circle.

**Sensitivity.** A track peak in the published plot holds about one vote per
hit, so the result depends on the r binning. With `R_SHIFT` = 4, 9 or 10 of
10 simulated tracks are found. Smaller shifts give sharper r bins but split
the peaks.

**Not built:**

- the serial transceivers;
- the DDR2 memory and its controller (the selector has a memory port);
- the PowerPC cores (configuration arrives through the table-load ports);
- Gigabit Ethernet;
- the board's GPIO bus;
- the IPMI controller;
- the ATCA shelf;
- the HADES straight-line track finder, the DIRC ring finder and the track
  fitter, which the text only names. Their outputs (ring radius, z,
  momentum) are input ports of the PID path.

One ring finder covers one 96x96 sector. The full 55,296-pad RICH would need
six.

## Verification

Every engine has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_conformal_map` | 300 random hits against real arithmetic (±1 LSB), saturation, latency 50 clocks |
| `tb_sine_lut` | all 512 angle bins of sine and cosine |
| `tb_hough_accumulator` | whole histogram cell by cell against a model, hit period 513 clocks, counter saturation |
| `tb_hough_peak_finder` | sparse and dense frames against a model of the peak rule |
| `tb_helix_track_finder` | 10 simulated tracks in 2 T (≥ 8 found, no peak more than 2 bins from a track), event time, FIFO overflow |
| `tb_rich_pad_memory`, `tb_rich_coord_lut`, `tb_rich_ring_match`, `tb_rich_ring_finder` | windows at the plane edges, table contents, rings at every offset with noise, rings cut by the plane edge, 18-clock latency |
| `tb_event_selector` | random 4-20 kB events through a memory with random grants and read delays: destination contents, counters, reloads, flushes, malformed and truncated events |
| `tb_cherenkov_angle_lut`, `tb_pid_decision` | full tables, random lookups, one-clock latency; the PID table is filled from the particle bands for n = 1.47 |
| `tb_cn_router` | 11,000 random flits with a scoreboard, no packet interleaving, hot-spot fairness |
| `tb_compute_node` | all engines and the router at once, at the default sizes |

`tb_compute_node` runs every engine and the backplane traffic together at
the default sizes, and checks every result packet. It also counts each
mechanism and fails if any never happened: track found, vote saturation,
peak drop, ring found and absent, PID stall, event accept, reject, block
reload, buffer flush, selector error, router contention, multi-flit packet,
backplane-to-processor delivery. It takes about 10 s.

To run one testbench with Verilator, from the directory that holds `rtl/`
and `tb/` (the sine table is read by a path relative to it):

    verilator --binary --timing --assert -Wno-fatal \
        rtl/online_pkg.sv rtl/*.sv tb/tb_compute_node.sv \
        --top-module tb_compute_node -Mdir obj
    ./obj/Vtb_compute_node

`online_pkg.sv` must come first. Listing it twice does no harm. For a
single block, name only its files and the package.
