# Tracklet track finding for a Level-1 trigger: sector processor RTL

At 40 MHz bunch crossings with about 200 simultaneous proton collisions, a Level-1
trigger needs charged-particle tracks from the silicon tracker within a few
microseconds. The tracklet method does this as a *road search*:

1. Pairs of hits ("stubs") in two neighbouring layers form a seed, the *tracklet*.
   A seed is kept only if it is consistent with a track of transverse momentum above
   2 GeV coming from within 15 cm of the centre of the detector.
2. The tracklet's helix is projected to the other layers.
3. The stub nearest to each projection is attached.
4. A linearized chi-square fit corrects the seed parameters.
5. Tracks found more than once are removed.

The detector is split into phi sectors. Each sector is split again into *virtual
modules* (VMs): narrow phi slices with coarse z bins. Only VM pairs that can hold a
valid seed are ever compared.

This repository is synthesizable SystemVerilog for one **sector processor** of that
chain, in the "tracklet 2.0" configuration:
- a time-multiplexing factor of 18, so each processor receives a new event every 450 ns
  (108 cycles at 240 MHz);
- no communication with neighbouring sectors;
- eight processing steps with fixed latencies.

It covers one seeding pair (barrel layers 1+2) projected into barrel layers 3 to 6,
with 8 phi VMs per layer. The top module is `tracklet_sector`.

## The chain of steps

| Step | Module | Instances | Latency (cycles) | Reads | Writes |
|---|---|---|---|---|---|
| VMRouter | `vm_router` | 6 (one per layer) | 4 | 3 input stub memories | AllStubs, 8 VM stub memories |
| TrackletEngine | `tracklet_engine` | 22 | 5 | 1 inner, 1 outer VM stub memory | stub-pair memory |
| TrackletCalculator | `tracklet_calculator` | 1 | 43 | 22 stub-pair memories, AllStubs L1/L2 | tracklet parameters, 4 projection memories |
| ProjectionRouter | `projection_router` | 4 | 5 | projection memory | 8 VM projection memories |
| MatchEngine | `match_engine` | 32 (4 layers × 8 VMs) | 6 | VM projections, VM stubs | candidate-match memory |
| MatchCalculator | `match_calculator` | 4 | 16 | candidate matches, projections, AllStubs | best-match table |
| TrackFit | `track_fit` | 1 | 26 | tracklet parameters, 4 best-match tables | track stream |
| PurgeDuplicate | `purge_duplicate` | 1 | 6 | track stream | output track stream |

The latencies are the published per-step figures. Every step reads only memories
written by the step before, or by an earlier step, and writes only its own output
memories.

The 22 TrackletEngines cover every (inner VM *i*, outer VM *j*) pair with
|i − j| ≤ 1. A track above 2 GeV bends by at most about 750 phi units between layers
1 and 2, which is well under one VM (2048 units). Each engine has private copies of
the two VM stub memories it reads, so that all 22 can read in parallel.

## Scheduling: windows, START/DONE and event pages

This is the part of the design that makes everything else work, and the part that is
easiest to get wrong when modifying it.

**Fixed windows.** Every step is driven by a `step_ctrl`.
- A one-cycle START opens an *issue window* of TMUX = 108 cycles: cycles START+1 to
  START+108.
- In each of those cycles the step may start one unit of work: read one stub, one
  pair or one candidate.
- Work not started by the end of the window is dropped. This is the design's
  *truncation*.
- The step's pipeline is padded with `delay_pipe` so that the first result is
  written exactly LAT cycles after START.
- DONE pulses at START + TMUX + LAT.

A step's DONE is wired directly to the next step's START. A whole event therefore
moves down the chain one step per window, at a fixed latency that does not depend on
the data. The top generates the VMRouter START every 108 cycles while `run` is high.

**Event identifier.** Each `step_ctrl` counts the events it has started (3 bits,
`bx`). All memories between steps are `event_mem` instances.
- The low bits of the writer's `bx` select a *page*, which forms the top address bits.
- Inside a page, writes append. The page's entry count is the write address.
- The reader gets the count of the page it reads (`rcount`) and latches it in its
  first window cycle.
- At START a writer empties the page of the event it will write next (`clr`/`clr_bx`).

**Two or eight pages.**
- A memory read by the very next step needs two pages, one being written and one being
  read. Because writes begin exactly LAT cycles after the writer's START, and the
  reader's window ends at that same cycle, a page is never refilled while it is still
  being read.
- Data read several steps later are kept for eight events:
  - AllStubs, read by the TrackletCalculator and the MatchCalculators;
  - the VM stubs of layers 3 to 6, read by the MatchEngines;
  - the copy of the projections read by the MatchCalculators;
  - the tracklet parameters, read by the TrackFit.

  The identifier is 3 bits wide, so eight events can be in flight.

**Latency.** From the VMRouter START of an event to its last track leaving
PurgeDuplicate:

> 7 × 108 + (4 + 5 + 43 + 5 + 6 + 16 + 26 + 6) = 867 cycles = 3612.5 ns

The first track can leave 108 cycles earlier. Adding the published input and output
link delays (two cycles plus 300 ns) gives 3920.8 ns, inside the 4 µs budget.

**Limits per event.**

| Limit | Value |
|---|---|
| Entries per memory page (6-bit index) | 64 |
| Operations issued per step and instance | 108 |
| Stubs per layer (AllStubs) | 64 |
| Tracklets | 64 |
| Remembered tracks for duplicate removal | 16 |

Every memory signals a dropped write on `overflow`. The top ORs these flags into
`mem_overflow`.

## Data formats (`tracklet_pkg`)

- **Stub**, 36 bits: `{phi 14, z 12 (signed, mm), r 7 (signed offset from the layer's
  nominal radius, mm), bend 3}`. The phi unit is 0.75 rad / 2^14, about 46 µrad,
  across the sector.
- **VM stub**, 18 bits: `{AllStubs index 6, z bin 5 = z[11:7], fine phi 4 = phi[10:7],
  bend 3}`. The VM number is phi[13:11]. The z binning inside a VM is a field here,
  not separate memories.
- **Stub pair**, 12 bits: inner and outer AllStubs index.
- **Tracklet parameters**: `k` (dphi/dr in phi units per mm × 2^10, i.e. −1/(2ρ)),
  `phi0`, `t` (dz/dr × 2^10), `z0` (mm) and the seed indices. The tracklet index is
  the address in the tracklet memory.
- **Projection**: tracklet index, phi and z at the layer's nominal radius, and the
  derivatives k and t.
- **Match**: AllStubs index, phi residual and z residual (12 bits each).
- **Track**: corrected k, phi0, t, z0, a 16-bit chi2, the 4-bit hit pattern of layers
  3 to 6, the tracklet index and six stub indices.

Geometry is set by the constants in the package:
- layer radii 230, 350, 500, 680, 880 and 1100 mm;
- curvature cut K_MAX = 6391, which is pT = 2 GeV in 3.8 T;
- |z0| < 150 mm;
- residual windows of 64 phi units, and 16 mm in z for layer 3 or 50 mm in z for
  layers 4 to 6.

## The arithmetic

**Seeding: TrackletEngine.**
- The engine runs a double loop over its inner and outer VM stubs, with the outer
  index fastest, one pair per cycle.
- Two look-up tables decide whether a pair passes:
  - the phi table is indexed by the two 4-bit fine phi values;
  - the z table is indexed by the two 5-bit z bins.
- Both tables are computed at elaboration from the geometry. Each allows one bin of
  margin beyond the 2 GeV and 15 cm limits, so they never reject a good pair.
- A passing pair's two indices go to the stub-pair memory.

**Tracklet parameters: TrackletCalculator.** This is a 5-stage datapath padded to 43
cycles. Pairs are merged from the 22 pair memories with a fixed priority, lowest
non-empty memory first. For each pair:

    dr   = (R2 + r2) − (R1 + r1)
    k    = (phi2 − phi1) · (2^16 / dr) >> 6        (reciprocal table, built at elaboration)
    t    = (z2 − z1)     · (2^16 / dr) >> 6
    phi0 = phi1 − k (R1 + r1) >> 10
    z0   = z1   − t (R1 + r1) >> 10

This is the first-order (straight-line) form of the helix. Then:
- Seeds with |k| > K_MAX or |z0| > 150 mm are rejected.
- Surviving tracklets are projected to the nominal radius of each of layers 3 to 6:
  phi = phi0 + kR/2^10, z = z0 + tR/2^10.
- A projection that falls inside the sector and the z range is written together with
  k and t.

**Matching: MatchEngine and MatchCalculator.**
- A MatchEngine pairs every projection in its VM with every stub in that VM. A pair
  is a candidate if the z bins differ by at most one and the fine phi values differ by
  at most one.
- The MatchCalculator fetches the full projection and stub for each candidate. It
  moves the projection to the stub's true radius with the carried derivatives,
  phi + k·r_off and z + t·r_off. The residuals must pass the layer windows.
- Accepted matches go into a `match_table` addressed by tracklet index, keyed by
  |phi residual|. The table keeps an entry unless a new one has a strictly smaller
  key. After the window it holds, per tracklet, the match with the smallest phi
  residual.

**Fit: TrackFit.** The fit works on residuals only.
- The two seed stubs have residual zero by construction.
- Each matched layer contributes its stored phi and z residuals at its nominal radius.
- A least-squares straight line through these (r, residual) points gives a correction
  to the slope and the intercept: (k, phi0) in r-phi and (t, z0) in r-z.

For N points with mean radius ⟨r⟩ and S = Σ(r_i − ⟨r⟩)², the weights are:

    slope weight     WS_i = (r_i − ⟨r⟩) / S
    intercept weight WI_i = 1/N − ⟨r⟩ (r_i − ⟨r⟩) / S

They depend only on which layers matched. So they are computed at elaboration for all
16 hit patterns and stored scaled by 2^16. The fit is then four multiply-accumulates
per parameter.

The chi2 is the sum of the squared post-fit residuals at all points, with the phi part
divided by 16. A tracklet with fewer than two matched layers gives no track.

**Duplicates: PurgeDuplicate.** This step works on the track stream, with no window of
its own.
- It remembers the stub lists of up to 16 tracks already sent for the event.
- A track that shares three or more stubs with one of them is dropped. Stubs are
  compared by layer and index, and the two seed stubs count.
- The list is emptied when the event identifier changes.
- The first copy found is the one kept.

## Top-level interface (`tracklet_sector`)

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst` | in | 240 MHz clock, synchronous active-high reset |
| `run` | in | start the VMRouters every 108 cycles while high |
| `link_we[6][3]`, `link_stub[6][3]` | in | stub writes into the three input memories of each layer |
| `link_bx` | out | event whose stubs the link side must write now |
| `start` | out | VMRouter START. After it, `link_bx` advances and the event just written is processed |
| `trk_valid`, `trk_bx`, `trk` | out | output tracks and their event identifier |
| `mem_overflow` | out | some memory dropped a write this cycle |
| `dup_removed` | out | a duplicate track was dropped this cycle |

To feed an event:
1. Write its stubs while `link_bx` shows its number. At most 64 per input memory, and
   one per memory per cycle.
2. Finish before the next `start`.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against a model
written independently in the testbench, checks the cycle of the first write and of
DONE against the latencies, and ends with a `TB_RESULT checks=… failures=…` line.

`tb_tracklet_sector` runs the top at its default parameters. It sends ten events of
straight-line tracks with stubs scattered in radius, plus tracks built to trigger
each mechanism:
- a dense jet in one VM pair, causing TrackletEngine truncation and stub-pair memory
  overflow;
- 70 stubs in one input memory, causing input overflow;
- a seed with z0 = 175 mm, rejected by the TrackletCalculator;
- a stub outside the phi window, rejected by the MatchCalculator;
- a worse stub met first, causing a best-match replacement;
- a doubled layer-1 stub, causing duplicate removal;
- tracks with 2, 3 and 4 matched layers, and one with a single match;
- more events than identifier values, so the identifier wraps.

It checks that:
- every ordinary track is found exactly once, with the right hit pattern and
  parameters near the truth;
- every output leaves inside its event's window, ending 867 cycles after the START;
- the TrackFit DONE comes on the exact cycle;
- every mechanism happened at least once.

It takes about a minute.

`tb_sector_occupancy` is a load test at the default size. It sends sixteen events,
each with 15 random tracks and 10 random stubs per layer. All tracks are found.

At twice that load (30 tracks and 20 random stubs per layer, about 50 stubs per
layer) only about 56% of the tracks are found. The bottleneck is the single
TrackletCalculator:
- it reads at most 108 stub pairs per event, shared by all 22 TrackletEngines;
- most of those pairs are random combinations that the engines' coarse tables let
  through;
- it stores at most 64 tracklets.

A full-size processor splits this work over several TrackletCalculators. To raise the
load this slice can take, add calculators or tighten the engines' tables.

Run any testbench with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
        rtl/tracklet_pkg.sv tb/tb_tracklet_sector.sv --top-module tb_tracklet_sector
    ./obj_dir/Vtb_tracklet_sector

## Where this departs from the full design

- **One seeding pair.** The full tracklet 2.0 sector seeds in several layer and disk
  pairs (L1+L2, L3+L4, L5+L6, disk pairs, barrel–disk) and projects into disks as well.
  Only L1+L2 into L3 to L6 is built. The other seeding pairs would repeat the same
  modules with other radii.
- **VM count.** The published long-VM scheme has 24 or 32 phi VMs per layer, with
  eight z bins inside each. This design uses 8 phi VMs per layer, as drawn for the
  VMRouter. The z bin is carried in the VM stub and used by the MatchEngine, not stored
  in separate memories.
- **Duplicate removal** keeps the first copy and does not use the chi2. Using the
  chi2 was under study for tracklet 2.0, but no rule for it is given.
- **Fit** uses uniform weights and omits the impact parameter d0 (which is optional).
  The chi2 scaling is this design's choice.
- **Arithmetic widths, the LUT margins, residual windows, the layer radii and the
  matching tolerances** are this design's choices.
- **Not built:** the serial links and transceivers, the stub sources (DTCs) and the
  clocking. The LayerRouter and the two neighbour transceiver steps of the earlier
  demonstrator are not part of tracklet 2.0.
