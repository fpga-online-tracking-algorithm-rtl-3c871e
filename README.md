# Online track finding and fitting for a straw tube tracker

A straw tube tracker measures charged particles as drift circles: each hit
tube reports which wire fired and how long the ionisation took to drift to
it, which gives the distance of closest approach of the track to the wire.
In a free-running, triggerless experiment the hits arrive as a continuous
stream, grouped in bursts (2000 ns of beam followed by a 400 ns gap). An
external fast detector supplies the start time T0 of each collision. This
RTL is a complete online tracker that turns a burst of hits plus a list of
T0 values into track momenta, without any software in the loop:

1. cut the hits belonging to one collision out of the burst (a 200 ns window
   after T0, the maximum drift time) and turn arrival times into drift times;
2. mark every hit tube in a map indexed by the tube's ID;
3. starting from each hit in the innermost layer, walk outward layer by layer
   through neighbouring tubes that are marked, building a *tracklet*;
4. fit a circle through the axial (beam-parallel) hits of the tracklet, which
   gives the transverse momentum pt;
5. use the skewed (stereo) hits, whose position along the beam depends on
   where the track crosses them, to fit the slope of the helix, which gives
   the longitudinal momentum pz.

Every fit is done twice. The first pass uses the wire positions. The second
pass uses the points on the drift circles that the first result picks out.
The front half of the chain (steps 1 and 2) moves one hit per clock. The back
half (steps 3 to 5) works one tracklet at a time. The fitters work on one
tracklet while the finder searches for the next.

## Block overview

```
 burst memory ─► input_interface ─► ring_buffer ──B──► map2d ──► track_finder
 T0 list ──────►        (A)          │   1024 x 96      16384 x 16     │ tracklets (C)
                                     │                                 ▼
                                     ├────────D1──────────────► pt_calc ──► pt result
                                     └────────D2──────────────► pz_calc ──► pt, pz result (E)
                                                                  ▲  (takes the pt result)
```

| Module | Role |
|---|---|
| `stt_tracker` | top level, wiring and event release |
| `input_interface` | T0 windowing, drift time, event packing |
| `ring_buffer` | circular store of hit records, 3 read ports |
| `map2d` | tube-ID map with Occupied flag and hit index; seeds; clearing |
| `track_finder` | neighbour search through 27 layers |
| `pt_calc` | iterated circle fit, pt |
| `pz_calc` | stereo intersections, iterated straight-line fit, pz |
| `seq_div`, `seq_sqrt` | bit-serial divider and square root used by the fitters |
| `stt_pkg` | types, constants and fixed-point helpers |

## Detector model and number formats

The layer plan built into `stt_pkg` is 27 layers per sector: layers 0–7 are
inner axial, 8–15 are stereo with a skew of ±2.9° (the sign flips every two
layers), and 16–26 are outer axial. There are six sectors. A tube ID is
14 bits: sector (3), layer (5) and tube within the sector-layer (6). So at most
64 tubes per sector-layer can be addressed. The full tracker of 4636 straws
fits in the 16384-entry map with room to spare.

A hit record is 96 bits:

| bits | field | format |
|---|---|---|
| 95:72 | x | signed Q7.16, cm |
| 71:48 | y | signed Q7.16, cm |
| 47:24 | z | signed Q7.16, cm (wire centre) |
| 23:10 | tube ID | sector, layer, tube |
| 9:0 | time | drift time, ns |

Inside the fitters everything is 64-bit signed fixed point with 16 fraction
bits (`fix_t`). Products are rounded back through a 128-bit intermediate.
The constants are:

| constant | value | meaning |
|---|---|---|
| drift velocity | 0.0025 cm/ns | linear time-to-distance relation |
| tan / cot of skew | tan 2.9°, cot 2.9° | stereo geometry |
| pt scale | 0.006 GeV/c per cm | 0.3 · B · R with B = 2 T |

The drift relation of a real straw is not linear. Replace `drift_radius` in
`stt_pkg` with a table or polynomial when one is available.

## Burst events (`input_interface`)

The burst memory holds the hits of one burst, sorted by arrival time, each
with a 12-bit arrival time. For every T0 the interface scans forward from a
base pointer. Hits before T0 move the base forward. Hits in
[T0, T0 + 200 ns] are passed on with drift time = arrival − T0. The first hit
past the window ends the event. Collisions at a 20 MHz rate are 50 ns apart,
so windows overlap. Because of that, the next T0 restarts its scan at the
base, not where the previous scan ended. Every hit can therefore belong to
several burst events, each time with a different drift time.

One hit is held back until its successor has been classified. This lets the
last hit of an event carry `out_last`. A window without hits raises
`empty_event` and produces nothing downstream. Output is one hit per clock,
with a valid/ready handshake.

## Ring buffer

A 1024 × 96-bit circular buffer with one write port and three read ports:
B for the 2D map, D1 for Pt Calc and D2 for Pz Calc. Each read port has a
one-clock latency and holds its data while it is not enabled. Each entry also
stores a last-of-event flag. The write pointer (`head`, with a wrap bit) is
visible to the map. The tail moves only on an explicit release. The top level
releases an event once the finder and both fitters have finished with it.
Until then, all of that event's hit indices stay valid for the fitters.

**Limit:** an event with more hits than the buffer depth can never be mapped
completely, and it stalls the chain. 1024 entries is far above the few hundred
hits of an overlapped 20 MHz window.

## The 2D map (`map2d`)

A 16384 × 16 dual-port RAM with one bin per tube ID. Bit 15 of a bin is the
Occupied flag and bits 9:0 hold the ring-buffer index of the hit. A finder
lookup therefore returns both "is this tube hit?" and "where is its record?".
The controller moves through these states:

* **init**: after reset, every bin is cleared (16384 clocks; `ready` rises
  at the end);
* **map**: the hits of the next event are read from port B, one per clock,
  and their bins are written. Layer-0 hits are also handed to the finder
  as seeds;
* **find**: `ev_start` is pulsed and the controller waits for the finder;
* **clear**: the same hits are read again and their bins are zeroed. This
  costs one clock per hit instead of a sweep of the whole map;
* **wait**: when Pt Calc and Pz Calc are idle, the event's buffer space is
  released.

If two hits of one event land in the same tube, the later one wins.

## Track finding (`track_finder`)

Seeds (innermost-layer hits) are stored in an array of `MAX_SEEDS` = 64 slots.
Seeds beyond that are dropped and counted. From each seed the finder tries,
for every following layer, a short list of tubes and takes the first one
that is Occupied:

* **normal step** (inside the inner axial, stereo and outer axial groups):
  first the two adjacent tubes of the next layer, then the two
  next-to-adjacent ones. Alternate layers are offset by half a tube. So from
  tube t on an even layer the candidates are t−1, t, then t−2, t+1. From an
  odd layer they are t, t+1, then t−1, t+2;
* **wide step** at the axial→stereo (layer 8) and stereo→axial (layer 16)
  transitions: t, t−1, t+1, … out to ±6 tubes, because the tube pitch and
  positions change between the groups;
* **missing layer**: if no candidate is Occupied, the layer is skipped and
  the search goes on from the same tube position. A second consecutive miss
  ends the tracklet.

One map lookup is issued per clock, and its answer arrives the next clock.
A layer thus costs 2 to 14 clocks. A finished candidate is kept only if it
has at least 3 axial and 2 stereo hits. Accepted tracklets are sent as a
burst of beats {ring-buffer index, layer}, with `t_last` on the final beat.
The same beat stream goes to Pt Calc and Pz Calc together, so the finder
stalls until both have taken it. Hits are not reserved: two seeds may share
hits further out, and each tracklet is fitted.

## Transverse fit (`pt_calc`)

The track's projection on the bending plane is a circle through the
interaction point:

    x² + y² + a·x + b·y = 0,   centre (−a/2, −b/2),  R = √(a² + b²) / 2.

Minimising Σ(x² + y² + a x + b y)² over the fit points is a linear problem
with the closed solution

    a = (Syy·(−Sxxx − Sxyy) − Sxy·(−Sxxy − Syyy)) / (Sxx·Syy − Sxy²)
    b = (−Sxy·(−Sxxx − Sxyy) + Sxx·(−Sxxy − Syyy)) / (Sxx·Syy − Sxy²)

where S denotes plain sums over the points (Sxxy = Σ x²y and so on). While the
beats arrive, the axial hit indices are stored. Each pass then reads the hit
records back from port D1, one per clock, and accumulates the seven sums. The
two numerators are divided in parallel by two bit-serial dividers, and R is
taken with a bit-serial square root. A third division gives 1/R for the next
step.

On the second pass each wire is replaced by a point on its drift circle.
A wire with x² + y² + a x + b y < 0 lies inside the first circle, so the
track passes outside it: the point moves outward by the drift radius d
along the radial direction (x − xc, y − yc)/R. Otherwise the point moves
inward. pt = 0.006 · R GeV/c. `N_ITER` sets the number of passes. The default
is two; more passes did not improve the resolution in the published studies.
In the simple test geometry used here, two passes leave a pt bias of several
percent, and four reduce it to the level of the hit resolution. Fewer than 3 axial hits, or a
singular system, give `ok = 0`.

Latency per pass: (hits + 1) clocks of accumulation, one clock of solve, and
about 3 × 21 clocks of division and square root (the bit-serial units
retire two bits per clock).

## Longitudinal fit (`pz_calc`)

A stereo wire with centre (x0, y0, zw) is tilted by ±α along the azimuthal
direction. If the track crosses it at height z, the wire's projection is
displaced sideways by z·tan α. Asking that this displaced point lie on the
transverse circle gives, to first order,

    z = −F · r0 / (2 σ tan α · G),
    F = x0² + y0² + a x0 + b y0,   G = y0·xc − x0·yc,   r0 = √(x0² + y0²)

where σ = ±1 is the skew sign of the layer. So Z = zw + z is where the track
meets the wire. The drift circle on the tilted wire becomes an ellipse on the
helix cylinder, stretched along z by cot α. Its centre is Z, and the ends of
its long axis are Z ± d·cot α. The arc length from the origin to the crossing
is s = r0 · (1 + (r0/R)²/24), a series form of 2R·asin(r0/2R).

On the cylinder the helix is a straight line, Z = m·s + z0, with m = pz/pt.
The first pass fits this line by least squares through the ellipse centres.
The second pass replaces each centre by whichever end of its ellipse lies
closer to the first line. This resolves the left/right ambiguity of each
drift circle (counters `n_amb_plus`, `n_amb_minus`). Then pz = pt · m.

Per stereo hit, the intersection takes one ring-buffer read (port D2), one
square root and one division, which run side by side (the division
computes −F/(2σ tan α·G) and is multiplied by r0 afterwards): about 26 clocks. Each pass of the line fit
then needs one clock per hit and two divisions. Up to 8 stereo hits (one per
stereo layer) are used. Fewer than 2 hits, a failed transverse fit, or a
singular system give `ok = 0`.

**Choice of fit direction.** The method can also be written as φ = K·Z + φ0,
which makes the azimuth the dependent coordinate. Fitting in that direction
puts the large z errors of the stereo measurement on the independent
variable. That biases the slope toward zero (by tens of percent in
simulation). The RTL regresses Z on s instead, which is the same line
without the bias.

## Flow control and overlap of events

* The input interface stalls when the ring buffer is full (`n_full_cycles`).
* The ring buffer keeps accepting the next events while the current one is
  being searched. Only the 2D map is limited to one event at a time.
* The finder stalls on a tracklet until both fitters accept it. Pt Calc
  fits tracklet n while the finder searches for tracklet n+1. Pz Calc
  waits for the Pt result of its own tracklet.
* After the finder reports the event done and both fitters are idle, the
  map clears the event's bins and releases its buffer space.

## Departures from the published design

* **Latency.** The published implementation needs about 700 clocks for an
  event with 6 tracks (about 100 hits). It uses eleven pipelined 32-bit
  multipliers with 6-clock latency. Here the products are single-cycle `*`
  operators, but division and square root are bit-serial (two bits per clock,
  about 21 clocks each), and the fitters handle one tracklet at a time. An event of 6 tracks
  plus noise (about 150 hits) takes about 3,300 clocks at default
  parameters, most of it in Pz Calc.
  Pipelined dividers, or a second fitter pair, would close most of that gap.
* **Fit weights.** The published cost function weights each hit by 1/d²,
  but its solution uses plain sums. Plain sums are used here; a 1/d² weight
  is undefined for a track through the wire.
* **pz line.** It is fitted as Z(s), not φ(Z); see above.
* **Geometry.** The tube and layer plan, the skew angle, the 2 T field and
  the linear drift relation are assumptions standing in for the real
  detector description. They all live in `stt_pkg`.
* **Stored time.** The ring buffer stores the drift time (arrival − T0)
  rather than the raw arrival time, so no later block needs T0.
* **Not built.** The host that sends the bursts, the external T0 detector,
  and vendor multiplier cores are outside the RTL. T0 extraction from the
  straw data alone (a proposed extension) is not implemented.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog:

| testbench | what it checks |
|---|---|
| `tb_input_interface` | overlapping, empty and end-of-burst windows: exact hit set, order, drift times, `last`, one hit per clock, random back-pressure |
| `tb_ring_buffer` | write/read on all ports, wrap, full, release (depth 16) |
| `tb_map2d` | init sweep, marking, seeds, clear-after-event, release (full size) |
| `tb_track_finder` | hand-made map: complete track, one missing layer, two missing layers (rejected), lone seed, wide windows, random stall |
| `tb_pt_calc` | against a double-precision model of the same two-pass fit (0.5 %), the generated pt (20 %), and the latency bound |
| `tb_pz_calc` | against a double-precision model (2 %), the generated pz, both ambiguity outcomes, bad inputs, latency bound |
| `tb_stt_tracker` | end to end at reduced buffer size (256) with 4 pt passes: 8 events including overlapping ones, noise, missing layers, an empty window; every mechanism must occur |
| `tb_stt_tracker_full` | the same scenario with every parameter at its default |

The end-to-end benches generate helix tracks in a simple geometry
(`tb_geom_pkg`: layer radius 16 + L cm, 40 tubes per sector-layer at a 1.5°
pitch). Hits are computed exactly, stereo ones included. Every generated
track must appear among the results within the stated pt and pz tolerances.
With default parameters the worst pt error is below 20 %, and below 5 % with
four passes. The pz error is dominated by the coarse stereo geometry of the
test model (up to about 0.5 GeV/c on high-momentum tracks).

To simulate a bench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/stt_pkg.sv tb/tb_geom_pkg.sv tb/tb_stt_tracker.sv \
    --top-module tb_stt_tracker -Mdir obj
./obj/Vtb_stt_tracker +verilator+rand+reset+2
```

Replace the testbench name for the others. The full-size bench runs in well
under a second.
