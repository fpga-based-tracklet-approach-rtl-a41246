# Tracklet track finder: a fixed-latency sector processor in SystemVerilog

This RTL finds charged-particle tracks in one azimuthal (phi) sector of a six-layer silicon
barrel tracker. It uses the *tracklet* method: pairs of hits ("stubs") in neighbouring layers
form seeds, and the seeds are projected to the other layers to collect matching stubs. A
linearized fit then refines each track, and tracks found more than once are removed. The
design is one sector board of a system that splits the detector into 28 phi sectors. A new
event arrives every 150 ns, at 240 MHz (36 clock cycles). Every event leaves after the same
fixed number of cycles, whatever it contains.

The structure follows a published level-1 trigger demonstrator for the CMS experiment at
the High-Luminosity LHC:

- the eleven processing steps and their order;
- each step's latency in clock cycles;
- the rule that a step works on one event for exactly 150 ns and drops whatever it has not
  reached;
- the exchange of projections and matches with the two neighbouring sectors over links with
  a 76-cycle delay.

What happens inside each step is this design's own choice, because the source describes the
steps only by their function. Each file's opening comment says which parts are which.

## The idea: every step is a 36-cycle window with a fixed latency

The whole pipeline is *event-synchronous*. No handshakes or back-pressure exist anywhere.
Instead, each processing step has a small controller (`step_ctrl`):

- A pulse on `start` opens a window of exactly `STEP_CYCLES = 36` cycles on the next event.
- In window cycle `c` the step issues one read: a stub, a stub pair, a projection, a
  candidate, a tracklet.
- The result of that read is written exactly `LATENCY` cycles later. `LATENCY` is the step's
  own number (table below).
- When the window closes, the step stops reading even if data are left. Those data are lost.
  This is **truncation**. It is what makes the latency fixed, and it is the system's only
  response to overload.

The top level (`sector_processor`) therefore schedules everything from one input pulse. The
step after step *k* starts `36 + LATENCY(k)` cycles after step *k*. By then, step *k* has
written the last result of its window. Each of the two transceiver steps adds another
76 cycles for the board-to-board link. These start pulses come from a chain of
`delay_line`s and are the only control signals in the design.

A step is still writing event *e* when its reader starts event *e*, and some memories are
read several steps downstream. So every memory between two steps (`event_mem`) holds several
events at once, in **pages** selected by the event number modulo `NPAGE`:

| Memory | Pages |
|---|---|
| Between neighbouring steps | 4 |
| Memories written from a link | 8 |
| Stubs kept for the match engines | 16 |
| Tracklets kept for the fit | 16 |

Inside a page the data are split into **bins**: a layer, a virtual module or a tracklet
number. Each bin is an append-only list with its own entry count. The writer clears the
counts of its page in the first cycle of its window. A write to a full bin is dropped and
counted; this is the second form of truncation. Readers see all bin counts of a page at
once, which lets the pair-forming steps skip empty bins without spending cycles.

Every step keeps its own event counter. Words on the neighbour links carry the event number
with them, so the receiving board writes them into the right page.

### Step latencies (cycles at 240 MHz)

| Step | Module | Latency | What it does here |
|---|---|---|---|
| input | (top) | 1 | registers the stub into the input memory |
| Layer Router | `layer_router` | 1 | sorts stubs by layer |
| VM Router | `vm_router` | 4 | sorts a layer's stubs into 8 virtual modules (VMs) and numbers them |
| Tracklet Engine | `tracklet_engine` | 5 | tries stub pairs from compatible VM pairs and applies the pT and z0 cuts |
| Tracklet Calculator | `tracklet_calculator` | 43 | computes tracklet parameters and projects them to the 4 other layers |
| Projection Transceiver | `projection_transceiver` | 13 (+76 link) | keeps local projections and sends off-sector ones to the neighbour |
| Projection Router | `projection_router` | 5 | sorts projections by VM |
| Match Engine | `match_engine` | 6 | pairs projections with stubs of the same VM and applies a coarse window |
| Match Calculator | `match_calculator` | 16 | computes residuals, applies the fine window and keeps the first match per projection |
| Match Transceiver | `match_transceiver` | 12 (+76 link) | returns neighbours' matches and files matches per tracklet |
| Track Fit | `track_fit` | 26 | linearized least-squares correction of the tracklet |
| Duplicate Removal | `duplicate_removal` | 6 | drops tracks that share 3 or more stubs with an earlier one |
| output | (top) | 1 | output register |

With these numbers, the first track of an event leaves 651 cycles after the event's first
input cycle. The end-to-end testbench checks this to the cycle. The input link and the
output link each add 76 cycles, for 803 cycles or 3345.8 ns in total. That equals the
published latency model of the demonstrator. The last track of an event leaves at most
36 cycles after the first.

## Number formats and geometry

Everything is integer arithmetic. The units are chosen so that the arithmetic stays small.

- **Stub position** (`stub_t`): layer (3 bits), phi, and z.
  - phi is 12 bits unsigned, relative to the sector: 4096 LSB span one sector, 2π/28.
  - z is 12 bits signed, in mm.
- **Layer radii**: whole centimetres, `{23, 36, 51, 68, 88, 108}`.
- **Track model**: a small-angle helix, φ(r) = φ0 − k·r and z(r) = z0 + t·r.
  - k is half the curvature, in phi-LSB per cm, held in Q8.
  - t is tan λ, in mm per cm, held in Q8.
  - A 2 GeV track in 3.8 T has |k| < 52 LSB/cm.
- **Seeds**: layer pairs 1+2, 3+4 and 5+6 (`SEED_IN`, `SEED_OUT`). Each seed projects to the
  four other layers (`proj_layer`).
- **Virtual modules**: 4 slices in phi (the top two phi bits) × 2 halves in z (the sign of z).
  The VM router writes each stub twice: once for the tracklet engines and once for the match
  engines. Both copies carry the stub's index within its layer, which identifies the stub
  later.
- **Cuts** (all in `tracklet_pkg`):
  - pT > 2 GeV;
  - |z0| < 150 mm;
  - match window ±40 phi-LSB;
  - z window ±10 mm in layers 1–3 and ±60 mm in layers 4–6.

## Tracklets, projections and matches

The **tracklet engine** tries only VM pairs whose phi slices differ by at most one. A pair is
kept when |Δφ| ≤ 52·ΔR (the pT cut) and the straight line through the two stubs crosses the
beam line within |z0| < 150 mm. Pairs are scanned with `pair_scanner`, which walks every
(slot, i, j) combination of the non-empty slots, one per clock.

The **tracklet calculator** uses a precomputed reciprocal of the layer gap, 65536/ΔR:

- k = (φin − φout)·INV >> 8
- φ0 = φin + k·Rin
- t = (zout − zin)·INV >> 8
- z0 = zin − t·Rin

It keeps at most 32 tracklets per seed and event. For each tracklet it writes one projection
(φ, z) per other layer, evaluated at that layer's radius.

The **projection transceiver** handles projections that leave the sector:

- φ < 0: sent to the lower ("minus") neighbour, with 4096 added.
- φ ≥ 4096: sent to the upper ("plus") neighbour, with 4096 subtracted.

A track above 2 GeV crosses at most one sector boundary, so one neighbour on each side is
enough. The transceiver writes projections received from the neighbours next to the local
ones, tagged with the side they came from.

The **match calculator** computes dφ and dz and keeps the first stub inside the window for
each projection. It remembers which projections already have a match in a bitmap indexed by
(source side, seed, tracklet).

The **match transceiver** sends matches that belong to a neighbour's tracklet back over the
link they came from. It files local and returned matches by (seed, layer, tracklet) for the
fit. A returned match carries the neighbour's side in its stub identity. As a result, a
stub in the next sector is never mistaken for a local stub with the same index.

## The fit and duplicate removal

The **track fit** reads one tracklet per clock, together with its (at most four) matches. It
fits a straight line in r through the residuals, separately in r-φ and r-z; the two seed
stubs have residual zero. The intercept and slope of that line correct φ0/z0 and k/t. The
weights of this fit depend only on which layers were hit, so `track_fit` computes them at
elaboration for all 16 hit patterns:

- A in Q12, B in Q16;
- D = N·Srr − Sr²;
- A_j = (Srr − r_j·Sr)/D;
- B_j = (N·r_j − Sr)/D.

There is no χ² output. The fit does not estimate d0; it is taken as zero, as in the seed.

**Duplicate removal** works on the stream of fitted tracks: up to one per seed per clock.
It compares each new track with every track already kept in this event (up to 32) and with
the other new tracks of the same cycle. A track that shares 3 or more stubs with a kept track
is dropped; two tracks share a stub when they have the same stub in the same layer. Its
window opens when the fits' first tracks arrive. `n_dup` counts the dropped tracks.

## Where this design departs from the published system

- **Barrel only.** The published algorithm also seeds in the forward disks (disks 1+2 and
  3+4) and projects to them. This design has only the six barrel layers and their three
  seeds.
- **Both z halves in one board.** The demonstrator firmware covered half of the barrel
  (+z). This design takes both signs of z and splits virtual modules by the sign.
- **Narrow input.** The input is one stub per clock, so at most 36 stubs per event. At
  pileup 140 a sector sees about 60 stubs per layer, which this input would heavily truncate.
  The real board receives stubs on many links (their number is not published). The
  layer-router step, which the source notes could be dropped if stubs arrived sorted by
  layer, is kept here to preserve the published latency.
- **Simplified internals.** The published firmware's internals are not public, so the
  following are this design's own choices:
  - the VM layout, the cut and window values and all widths;
  - first-match-wins in the match calculator;
  - the equal-weight straight-line fit;
  - the 3-shared-stub duplicate rule.
- **No links or boards.** The serial links, the board infrastructure and the stub
  source/track sink board are outside the RTL. The neighbour links appear as plain ports;
  the testbench models each link as a 76-cycle delay.
- **Not built: system-level features.**
  - Sector overlap: the full system copies a few stubs near sector edges into both sectors
    in every other layer. This board receives only its own sector's stubs.
  - Time multiplexing: the full system repeats the 28-sector system six times, so each copy
    sees a new event every 150 ns. That lies outside one board.
  - Output parameters: tracks leave as (k, phi0, t, z0), not as pT, eta, z0 and phi0. The
    conversion is a fixed scaling by the magnetic field and a function of t.
- **Throughput.** Every step handles one item per clock, and each engine's pair scan covers
  one slot combination per clock. The real steps may work in parallel lanes; the source gives
  only their time windows.

## Files

All RTL is in `rtl/`, one unit per file.

- Shared package: `tracklet_pkg.sv` (types, constants, small functions).
- Infrastructure: `event_mem.sv`, `step_ctrl.sv`, `delay_line.sv`, `pair_scanner.sv`.
- Processing steps: one file per step, as named in the latency table above.
- Top level: `sector_processor.sv`. Its ports are:
  - `in_start` / `in_valid` / `in_stub`: the stub input;
  - `pt_tx_*` / `pt_rx_*`: the projection links to and from the `minus` and `plus` neighbours;
  - `mt_tx_*` / `mt_rx_*`: the match links to and from the neighbours;
  - `out_en` / `out_trk`: up to three tracks per clock;
  - `n_dup` and `n_overflow`: counters.

Parameters default to the published numbers where the source gives them: 36-cycle windows,
per-step latencies and the 76-cycle link.

Synthesised with yosys, the top comes to about 14k cells plus about 1.4 Mbit of memory,
almost all of it in the event memories.

## Simulation and tests

Every step has a self-checking testbench in `tb/` named `tb_<module>.sv`. Each one:

- drives the step directly with generated data;
- compares every written item with a value computed independently in the testbench;
- checks that each write happens exactly `LATENCY` cycles after its read;
- prints `TB_RESULT checks=N failures=M` and stops.

A watchdog ends any testbench that hangs. To run one with Verilator 5:

    verilator --binary --timing --assert rtl/tracklet_pkg.sv rtl/*.sv tb/tb_track_fit.sv \
              --top-module tb_track_fit -Mdir obj_tb
    obj_tb/Vtb_track_fit

`tb_sector_processor` is the end-to-end test. It runs three `sector_processor` instances at
their default parameters: a central sector and both of its neighbours. They are connected by
76-cycle link models. Five events are sent back to back:

- tracks wholly inside the central sector;
- a track leaving it after layer 3;
- a track entering it from the lower neighbour;
- an event with 36 noise stubs ahead of a real track, so the track is truncated;
- a last ordinary event.

The testbench checks:

- the number of tracks of every event;
- every track's parameters against the generated track;
- the 651-cycle first-track latency.

It also counts each mechanism and fails if any one never occurs:

- projections and matches sent to and received from the neighbours;
- removed duplicates;
- memory overflow;
- truncation;
- back-to-back events;
- fitted hits on neighbour stubs.

It takes about one minute to build and a few seconds to run.

`tb_workload_muons` runs one sector at default parameters on two batches of 40 back-to-back
single-muon events. Each muon has random phi0, z0 and tan λ, with a pT of about 10 GeV or
more.

- **No other stubs**: every muon was found, with no extra tracks.
- **Background**: 5 random stubs per layer, for 36 stubs per event (what one input window
  reads). Every muon was found, with 3 extra tracks over the 40 events.

The z0 residual of the found muons is 0.74 mm rms. The testbench requires at least 90 % and
75 % efficiency for the two batches, and an rms z0 residual below 3 mm.

Loads like pileup 140, with about 360 stubs per sector and event, cannot be run meaningfully
through the single input port. They would be mostly truncated at the input.
