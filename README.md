# A three dimensional track trigger for a drift chamber, in SystemVerilog

A level 1 trigger at an electron-positron collider has to throw away beam
background, most of which comes from tracks that do not start near the
interaction point (IP). The drift chamber's axial wires give a track's
circle in the transverse plane, but not where it starts along the beam (z).
The stereo wires run at a small angle to the beam. A hit on one of them is
therefore displaced in phi by an amount that depends on the z where the track
crossed it. This design recovers z at the four stereo super-layers and fits a
straight line through those points. The results, z0 and cot(theta), are fast
enough for a trigger decision.

This RTL follows the 3D tracker (3DT) design of the Belle II level 1 drift
chamber trigger. It is written from the published description of that
design. Numbers the description gives are kept. Everything else is this
design's own choice, and each such point is listed below.

## The data the 3DT works on

Everything runs on one 125 MHz clock (8 ns). Inputs change every 32 ns, which
is every fourth clock:

* **Track segments (TS)** from four stereo track segment finders (TSF), one
  each for super-layers SL1, SL3, SL5 and SL7. Each board covers half of the
  chamber. Per frame it reports up to 10 TS. Each TS carries a TS ID, a raw
  TDC (relative to the beam revolution), a left/right flag (LR) and a
  priority-layer flag (PR). One half-layer holds 80, 112, 144 or 176 TS IDs.
* **Event time** from the event time finder.
* **2D tracks** from the 2D fitters: charge, curvature rho and incident
  angle phi_i. The 2D fitters are outside this RTL (see "What is not here").

Number formats (in `tracker3d_pkg`):

| quantity | format |
|---|---|
| angles (phi_i, phi_ax, TS phi) | unsigned, 16 bits = one full turn, so wrap-around is free |
| curvature rho | unsigned 11 bits, LSB 2^-16 cm^-1 |
| raw TDC, event time | 9 bits, LSB 1 ns |
| z, z0, arc length s | 1/64 cm (z0 signed 16 bits) |
| cot(theta) | signed 16 bits, LSB 2^-12 |

## Block structure

```
 TSF frames ─► data_delayer ─► ts_map_maker x4 ─► TS maps ─┐
 event time ─► data_delayer ───────────────────────────────┤
 2D tracks (from the 2D fitters) ──────────────────────────┤
                                                           ▼
                          track_unit x4 (one per 2D track)
                          ├─ stereo_ts_finder x4 (one per stereo SL)
                          │    ├─ possible_ts_calculator
                          │    └─ middle_ts_selector
                          ├─ data_delayer (2D track, event time)
                          └─ z0_fitter
 event time ─► long data_delayer ─► et_out (aligned with trk_out)
```

`tracker3d_top` holds all of it. Its default parameters are the full design:
four maps of 80/112/144/176 entries, four track units, and the 33-clock TS
map latency.

## TS map maker: turning a stream into a picture

A drift time can exceed 500 ns, so the hits of one event arrive spread over
many 32 ns frames. The map maker stores each TS at the index given by its TS
ID. Each entry holds a hit flag, the raw TDC, LR and PR, 14 bits in all. A
stereo finder can then look up any TS directly.

Each entry has an age counter. A new TS for an entry overwrites it and
restarts the counter. After `HOLD` = 64 clocks (512 ns) without a new TS, the
entry is erased. A frame sampled at a clock edge shows up in the map exactly
33 clocks later. The input data delayer makes up most of that latency, since
it is much narrower than the map.

The top delays the TSF frames by `FIT2D_LATENCY - 33` clocks. This way the map
holds the event's hits when that event's 2D track arrives from the 2D fitters.
`FIT2D_LATENCY` is 40 by default and should be set to the real latency of the
2D fitter.

## Stereo TS finder: where to look, and what to take

If a stereo layer at radius r were axial, the track would cross it at

    phi_ax = ±acos(r·rho/2) + phi_i ∓ pi      (upper sign: positive charge)

`possible_ts_calculator` reads acos(r·rho/2) from a table indexed by rho.
There is one table per super-layer, computed at elaboration. It then turns
phi_ax into the nearest TS ID by multiplying with N/2pi, where N is the number
of TS in the full ring.

On a stereo wire the hit is shifted from phi_ax by dphi, where
2r·sin(dphi/2) = (z_endplate − z)·tan(theta_st). Over the chamber's z range
this shift always has the sign of the stereo angle. The 10 possible TS
therefore form a one-sided window: it starts at the computed ID and runs
towards higher IDs for a positive stereo angle, and towards lower IDs for a
negative one.

`middle_ts_selector` takes the hit TS nearest the middle of that window. The
middle is where tracks from near the IP land. On a tie, the lower position
wins.

The finder reports the chosen TS with its **global** TS ID (0 … N−1 over the
full ring). It also passes phi_ax on for the fitter. The map covers only half
the ring, starting at global ID `HALF_OFFSET`. A window position that falls in
the other half counts as "not hit". The finder has a latency of 2 clocks: the
calculator result is registered, then the window is read from the map and the
middle hit chosen.

## z0 fitter: from TS to helix

Per super-layer with a found TS (fixed point, one pipeline stage each):

1. TDC = raw TDC − event time (modulo 512 ns).
2. Drift length = x-t table[TDC].
3. Fine phi = TS phi ± drift length / r. The drift correction is added when
   LR = right (`01`), subtracted when LR = left (`10`), and left out otherwise.
4. z = z_endplate − 2r·sin((phi_fine − phi_ax)/2) / tan(theta_st). The sine
   comes from a table indexed by the full stereo displacement, so no bit is
   lost in the halving.
5. s = (2/rho)·asin(r·rho/2), the transverse arc length, from a table indexed
   by rho.

Then comes a weighted least-squares line z = cot(theta)·s + z0, in closed
form, using weights w = 1/sigma²:

    D    = Σw·Σws² − (Σws)²
    cot  = (Σw·Σwsz − Σws·Σwz) / D
    z0   = (Σws²·Σwz − Σws·Σwsz) / D

The sums, the numerators and the division each take one stage, in 64-bit
arithmetic. The outputs saturate to 16 bits. `fit_valid` needs at least two
points and D > 0. Total latency is 5 clocks, at one track per clock.

Two points differ on purpose from the published formulas:

* The z formula is printed there as (z_endplate − 2r·sin(…)) / tan(theta_st).
  That form is not dimensionally consistent. This design uses the geometric
  relation (z_endplate − z)·tan(theta_st) = 2r·sin(dphi/2), which the same
  description states for its geometry figure.
* The arc length is printed as asin(r·rho/2). This design uses the true arc
  length (2/rho)·asin(r·rho/2), so that the fitted slope really is
  cot(theta).

## Timing summary

| path | clocks (8 ns) |
|---|---|
| TSF frame → TS map | 33 (from the published design) |
| TSF frame at the top → TS map | FIT2D_LATENCY = 40 |
| 2D track → related stereo TS (`stereo_out`) | 2 |
| 2D track → `trk_out` (z0, cot, found mask) | 7 |
| event time → `et_out` | FIT2D_LATENCY + 7 |

All blocks are fully pipelined. A new set of four tracks can enter every
clock, which is more than the 32 ns input rate needs.

## Values that are this design's own

The published description does not give these. All of them live in
`tracker3d_pkg`, and the tables are recomputed from them at elaboration:

* chamber geometry: wire radii {29.9, 51.4, 72.9, 94.5} cm, tan(stereo angle)
  {+0.068, −0.0625, +0.0718, −0.075}, end-plate z {90, 115, 135, 155} cm.
  These are approximate values for a chamber of this kind, not survey data.
* x-t curve: linear, 40 µm/ns, saturating at 1 cm;
* hit weights 1/sigma²: all 1;
* hold time 512 ns; field widths; the LR encoding; 4 tracks in parallel;
  the 2D fitter latency of 40 clocks; pipeline depths; and the tie rule of
  the middle selector.

## What is not here

* **2D fitters.** They produce charge, curvature and phi_i from the 2D finder
  output. Their algorithm is not part of the description this RTL follows.
  Their results enter the top as `trk_in`.
* **Output packer.** The output word format is not specified, so the results
  leave the top unpacked: `trk_out` holds the 2D parameters, found mask, z0
  and cot(theta). `et_out` and `stereo_out` are also brought out.
* The polar angle leaves as cot(theta), not as theta.

## How far to trust it

Each module has a self-checking testbench in `tb/`. Each testbench compares
the block with a floating-point model written separately (`tb_geom_pkg`).
That model generates helix tracks, works out the stereo TS they would leave
(TS ID, TDC, LR) by inverting the geometry, and recomputes phi_ax, z, s and
the fit.

* `tb_ts_map_maker` compares the whole map with a reference every clock.
  This checks the exact 33-clock latency, overwrites while an entry is held,
  and the erase after 64 clocks.
* `tb_z0_fitter` requires z0 within 0.2 cm and cot within 0.004 of a float fit
  of the same TS data (the tolerance is doubled for two-point fits). It also
  checks the 5-clock latency with back-to-back tracks.
* `tb_tracker3d_top` runs the full-size design end to end on about 450
  tracks: z0 within 1 cm of the generated track, with decoy hits in the
  windows, missing super-layers, single-TS tracks, overwritten entries and
  expired hits.

The fixed-point error of z0 is a few millimetres, below the roughly 1.4 cm
resolution reported for the original design. That resolution itself cannot be
reproduced here: it needs simulated detector events, and the geometry
constants above are only approximate.

## Simulating

All sources are plain SystemVerilog 2017. Packages go first. Example with
Verilator:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/tracker3d_pkg.sv tb/tb_geom_pkg.sv -y rtl -y tb \
  tb/tb_tracker3d_top.sv --top-module tb_tracker3d_top
./obj_dir/Vtb_tracker3d_top
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`. To change the
geometry, edit `tracker3d_pkg`: every table follows from it. The testbenches
use the same constants, so they keep working after such a change.
