# A hybrid tracklet / Kalman-filter track finder for one hourglass sector

At the High-Luminosity LHC the CMS outer tracker sends "stubs" to the Level 1
trigger for every bunch crossing. A stub is a pair of hits in the two closely
spaced sensors of one module, kept only if the two hits line up the way a
high-momentum track would. The trigger then has a few microseconds to turn
these stubs into tracks. This design does that in two parts:

* **Pattern recognition with tracklets.** Pairs of stubs in adjacent barrel
  layers seed the search. Each seed gives a coarse track, which is projected
  into the other layers, and stubs near the projections are collected.
* **Fit with a Kalman filter.** The filter refines the track parameters stub by
  stub, starting from the seed's coarse values.

Duplicates are removed between the two parts.

The system splits the detector into nine phi sectors and processes them
independently. Successive events go round-robin to 18 copies of the system
(time multiplexing), so each copy sees one event in 18. The RTL here is one
sector processor: `l1tf_sector_top`. It takes the stubs of one event, in
global coordinates, and returns fitted tracks. It covers six barrel layers and
tracks with transverse momentum pT above 2 GeV.

Some numbers come from the system description:

| Quantity | Value |
|---|---|
| Sectors | 9 |
| Time-multiplexing factor | 18 |
| Virtual modules (VMs) per layer per sector | 16 (32 also possible) |
| z bins | 8 |
| pT threshold | 2 GeV |
| Shared stubs that make two tracks duplicates | 4 |
| Parameters fitted, with a beamline constraint | 4 |
| Projection layers per seed | 4 |

Everything else is this design's choice and is marked as such below:

* layer radii, field and units;
* bin depths and buffer sizes;
* cut windows;
* the seeding layer pairs;
* running the steps one after another.

## The processing chain

```
 stubs (global phi, z, layer)
   │
 hourglass_filter ── keep the sector's stubs, make phi sector-local
   │
 vm_router ───────── compute (VM, z bin), write into the bin memory
   │
 vm_stub_memory ──── 6 layers × N_VM phi VMs × 8 z bins × 8 slots, fill counts
   │        ▲ read port A            ▲ read port B
 stub_pair_finder (seed L1L2, then L3L4, then L5L6)
   │
 tracklet_calc ───── parameters from the pair, pT and z0 cuts, 4 projections
   │
 list_buffer ─────── tracklet list (64)
   │
 projection_matcher  best stub per projection layer, ≥ 2 layers → candidate
   │
 duplicate_removal ─ merge candidates sharing ≥ 4 stubs (store of 32)
   │
 kalman_fitter ───── kf_update × 2 (r-phi and r-z planes), one layer per clock
   │
 fitted tracks
```

The top runs one event at a time, in phases:

1. **ROUTE:** accept stubs until `in_last`.
2. **PAIR:** run the pair finder and tracklet calculator once per seed.
3. **MATCH:** match every tracklet in the list.
4. **FLUSH / FIT:** stream the surviving candidates through the fitter.
5. **END:** clear the memories and pulse `evt_done`.

There is only one instance of each step. The stub memory has two read ports.
The pair finder uses both; port B is handed to the matcher in the match phase.

## Coordinates and the track model

All blocks share one set of units, defined in `l1tf_pkg`:

* **phi:** 16 bits over 2π, so the LSB is 95.9 µrad.
* **Sector-local phi:** the same LSB, offset to be non-negative over the
  sector plus its overlap margins. The span is 7282 + 2 × 1280 = 9842 LSB.
* **z:** signed millimetres, 12 bits.
* **Layer radius:** one nominal radius per layer: 250, 350, 500, 680, 880 and
  1080 mm. The three inner layers are pixel-strip modules with fine z; the
  three outer ones are strip-strip modules, which give z only to a strip
  length.

The helix is linearised. In each plane the measurement is a straight line in
radius:

```
m(r) = a + b·h,    h = (r − 600 mm) / 256 mm
```

This is exact for z (a + b·h = z0 + r·cot θ). For phi it is the small-angle
form of phi(r) = phi0 − r·ρ/2, where ρ is the curvature. The four track
parameters are therefore (a_phi, b_phi, a_z, b_z):

* curvature = −2·b_phi·LSB / 256 mm;
* cot θ = b_z / 256;
* phi0 and z0 are the lines' values at r = 0.

All four are signed Q16 fixed point in 40 bits. The reference radius of 600 mm
sits in the middle of the layers, so a and b are nearly uncorrelated.

## The sector boundary (hourglass filter)

A sector is 2π/9 wide at a critical radius R*. A track at the pT threshold
bends by at most |R − R*| · dφ/dr(2 GeV) between R* and any other radius R.
So the sector's edges are curves that cross at R*, which gives the sector its
hourglass shape. A stub within that distance of the sector belongs to it, and
stubs in the overlap are sent to both neighbouring sectors. With those edges,
no track above 2 GeV ever needs stubs from two sectors.

This RTL uses straight-line edges. A stub is kept if its phi lies within
`DELTA[layer] = |R_layer − R*| · 194817 / 2^16` LSB of the sector range at R*.
The constant 194817 is dφ/dr for 2 GeV at 3.8 T, in Q16 LSB per mm. R* = 665 mm
is a design choice: it minimises the largest overlap for these radii. The
filter subtracts the sector's low edge and adds the margin, which gives
sector-local phi. It takes one clock and reports rejected stubs.

## Binning: virtual modules and z bins

To keep the pairing step small, each layer of the sector is cut into coarse
bins:

* **phi:** `N_VM` virtual modules (VMs) of equal width. The bin is
  `VM = floor(phi_local · N_VM / 9842)`, computed with an exact reciprocal
  multiply rather than a divider.
* **z:** 8 bins of 256 mm. The bin is `(z + 1024) >> 8`, and the two end bins
  take everything beyond ±1024 mm.

`vm_stub_memory` holds up to 8 stubs per (layer, VM, z bin), with a fill
count for each bin. A stub that arrives at a full bin is dropped, and
`vm_router` counts it. The memory is a register array with combinational
reads, so a step can read a stub and use it in the same clock.

### Which bins may pair

This is the least obvious part of the design. A seed pairs a stub in an inner
layer with a stub in the next layer out. Two stubs can belong to a track above
2 GeV only if their phi values differ by no more than the 2 GeV bending across
the gap: `dφ/dr · (R_out − R_in)`. Likewise their z values must lie on a line
from the luminous region, |z0| ≤ 150 mm.

Both rules are reduced to bin level. `l1tf_pkg` has two constant functions for
this:

* **`vm_pair_table(s, N_VM)`:** bit `i·32 + j` is set when some phi in inner VM
  `i` and some phi in outer VM `j` are within the bending limit, plus 8 LSB of
  slack.
* **`zbin_pair_table(s)`:** bit `a·8 + b` is set when a line through inner
  z bin `a` from some z0 in ±150 mm (plus 16 mm of slack) reaches outer bin `b`.

They are evaluated at elaboration, one per seed, and become constants in
`stub_pair_finder`. The result has the same effect as firmware in which only
the allowed VM pairs are wired. With 16 VMs, an inner VM pairs with at most three
outer VMs: the one at the same phi and its two neighbours. This is the main cut on the
number of pairs: most stub combinations are never read.

## Seeding and tracklets

The three seeds are L1L2, L3L4 and L5L6. Using three of them means a track is
normally found more than once, which keeps the efficiency high. For one seed,
`stub_pair_finder` walks the occupied inner bins. For each inner stub it walks
the allowed outer (VM, z bin) pairs and their stubs, and emits one candidate
pair per clock. Priority encoders over the fill counts skip empty bins, so the
cost is one clock per pair plus one per inner stub.

`tracklet_calc` solves the straight line through the two stubs in each plane:

```
b = (m_out − m_in) · 256 / (R_out − R_in)
a = m_in − h_in · b
```

The reciprocal of the gap is a per-seed constant. The calculator then applies
two cuts:

* |b_phi| is cut at the 2 GeV value;
* z0 = a_z + h(0) · b_z is cut at ±150 mm.

Finally it computes the four projections a + h_layer · b, rounded to the stub
grid. A projection that leaves the sector's phi range, or the ±2047 mm z
range, is marked invalid. The calculator is fully pipelined with one register
stage. Tracklets go into a 64-entry `list_buffer`. The buffer counts any
tracklets beyond 64 as lost.

## Matching projections to stubs

For each valid projection, `projection_matcher` works out which bins a window
of ±48 phi LSB and ±128 mm in z touches. With the default bins that is at most
two VMs by two z bins. It reads every stub in those bins, one per clock, and
keeps the stub with the smallest |Δphi| that is also inside the z window.

A tracklet with matched stubs in at least two of its four projection layers
becomes a track candidate. The candidate has:

* the two seed stubs and the matched stubs, as (layer, VM, z bin, slot)
  references;
* the tracklet's coarse parameters.

The matcher reports each projection as a hit or a miss, and counts tracklets
dropped for too few matches.

## Duplicate removal

The same particle usually produces one candidate per seed that it crosses.
Sometimes it produces two from one seed, when a layer holds two nearby stubs.
`duplicate_removal` keeps up to 32 candidates per event. Each new candidate is
compared in parallel with all kept ones. "Shared" means the same stub
reference in the same layer.

* If it shares at least 4 stubs with a kept candidate, it is merged into the
  first such one. The kept candidate keeps its seed and parameters, and takes
  the newcomer's stubs in layers where it has none.
* Otherwise it is appended to the store.
* A candidate that finds the store full is lost and counted.

After the match phase the store is streamed out with valid/ready.

## The Kalman fit

Under the beamline constraint and the linearised model, the four parameters
split into two independent two-parameter problems: (a_phi, b_phi) and
(a_z, b_z). `kalman_fitter` runs one `kf_update` for each plane:

* The state starts from the tracklet's coarse parameters.
* The covariance starts diagonal: 256 LSB² in phi and 4096 mm² in z, per
  parameter.
* It then steps through layers 1 to 6, one per clock. Layers without a stub
  are skipped.

`kf_update` is the textbook update written for fixed point:

```
g  = (p00 + h·p01, p01 + h·p11)      S = g0 + h·g1 + v
r  = m − (a + h·b)
a' = a + g0·r/S    b' = b + g1·r/S
P' = P − g·gᵀ/S    χ² += r²/S
```

It divides the products by S directly, rather than forming the gain first. A
Q16 gain near 1/S would lose the precision that the z plane needs after its
variance has shrunk by three orders of magnitude. Everything is 64-bit signed,
and the value ranges used keep every product below 2^63.

The measurement variances are:

| Measurement | Variance |
|---|---|
| phi, every layer | 1 LSB² |
| z, pixel-strip layers | 1 mm² |
| z, strip-strip layers | 36 mm² |

Each track occupies the fitter for 8 clocks. The output carries:

* the four parameters;
* χ² for each plane;
* the layer mask;
* the stub references.

## The top-level interface

`l1tf_sector_top #(SECTOR, N_VM=16, MAX_TL=64, MAX_TRK=32)`

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `in_valid`, `in_stub`, `in_last` | in | one global stub per clock (`gstub_t`: layer, 16-bit phi, z); `in_last` marks the event's final stub |
| `in_ready` | out | high while the processor is collecting an event |
| `out_valid`, `out_fit` | out | one fitted track (`fit_track_t`) per pulse, no back-pressure |
| `evt_done` | out | one-clock pulse at the end of the event |
| `stats` | out | `evt_stats_t`, valid at `evt_done`: see below |

`stats` counts every mechanism of the chain:

* **stubs:** stubs in, hourglass rejects, VM routed and dropped;
* **pairs and tracklets:** pairs, pT rejects, z0 rejects, tracklets formed and
  lost to the full list;
* **matching:** invalid projections, hits, misses, too-few rejects;
* **tracks:** candidates, merged, lost to the full store, fitted;
* **time:** clock cycles used.

Because the processing is sequential, an event's time grows with its content.
In the tests the longest event, with 40 tracks and about 250 stubs, takes
3,256 clocks.

## How far it has been checked

Every block has a self-checking testbench in `tb/`, which compares the block
against values computed independently:

* **Models:** a floating-point track generator and truth model
  (`l1tf_tb_pkg`), or direct enumeration (for example, every stub pair is
  worked out from the stub lists and checked against the pair finder's
  output).
* **Latencies:** checked where a block has a fixed one.
* **End to end:** `tb_l1tf_sector_top` runs the top at its default parameters,
  and `tb_l1tf_sector_top_vm32` runs the same test on a top built with 32 VMs
  per layer.
  It covers:
  * ten random events of 2 to 11 tracks, with noise stubs;
  * an event that overflows a bin;
  * a low-pT track, which must not be found;
  * a track steep in z;
  * a 40-track overload event, which overflows the tracklet list and the
    track store.

The end-to-end test checks several things:

* every generated track above threshold is found;
* it is found exactly once, with all six stubs;
* its fitted parameters agree with the truth: within 8 LSB for the phi pair
  and 10–20 mm for the z pair. The bound is loose enough to allow one noise
  stub to take a true stub's place;
* the counters obey their bookkeeping identities;
* each mechanism listed under `stats` occurred at least once.

In the current runs all generated tracks are found (65 of 65 in the random
events) with either VM count.

**Limits of this checking:** events are generated from the design's own
linearised model with nominal radii, not from detector simulation. Numbers
such as efficiency or resolution should not be read from it.

## Departures from the full system

* **Throughput.** The full system pipelines many instances of each step so
  that a sector finishes an event every 18 crossings (450 ns). Here each step
  has one instance and the phases run in sequence. The logic per step is the
  same, but the event time is thousands of clocks. Meeting the rate would mean
  splitting the memories per VM and replicating the pair finders, tracklet
  calculators and matchers.
* **Barrel only, nominal radii, linearised helix.** There are no endcap disks
  and no per-module radius. Track curvature enters only to first order.
* **Fixed seeds and cuts.** The seeds are L1L2, L3L4 and L5L6. The cuts
  (|z0| ≤ 150 mm, ±48 LSB, ±128 mm, two matched layers) and the sizes (8 stubs
  per bin, 64 tracklets, 32 tracks) are chosen, not given.
* **Duplicate rule.** Merging keeps the first candidate's parameters and fills
  its empty layers. Other merge strategies are possible.
* **Kalman fit.** There is one stub per layer, chosen by the matcher. The fit
  keeps the beamline constraint and does not fit the impact parameter. Its
  χ² is reported but not cut on.

## Simulating and changing it

With Verilator 5, compile the package first, then the testbench package, then
the RTL and the testbench, for example:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/l1tf_pkg.sv tb/l1tf_tb_pkg.sv \
  rtl/hourglass_filter.sv rtl/vm_router.sv rtl/vm_stub_memory.sv \
  rtl/stub_pair_finder.sv rtl/tracklet_calc.sv rtl/list_buffer.sv \
  rtl/projection_matcher.sv rtl/duplicate_removal.sv rtl/kf_update.sv \
  rtl/kalman_fitter.sv rtl/l1tf_sector_top.sv tb/tb_l1tf_sector_top.sv \
  --top-module tb_l1tf_sector_top -o sim && ./obj_dir/sim
```

Run the command from the repository root. Every testbench ends with a line
`TB_RESULT checks=N failures=M`. The top-level test takes about 15 seconds.
The single-block testbenches need only the two packages and their own module.

Where to change things:

* **Geometry, cuts and bin sizes:** `l1tf_pkg`. The pair tables, VM
  reciprocal and phi margins are recomputed from these constants, so changing
  the radii, `R_STAR_MM`, `Z0_MAX_MM` or the slack needs no other edits.
* **VMs per layer:** `N_VM` on the top; widths allow up to 32.
* **Buffer sizes:** `MAX_TL` and `MAX_TRK` on the top.
* **Bin depth:** `BIN_DEPTH` in `l1tf_pkg`, together with `SLOT_W`/`CNT_W`.
