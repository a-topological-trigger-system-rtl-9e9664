# Topological array trigger for imaging Cherenkov telescopes — RTL

An array of imaging atmospheric-Cherenkov telescopes must decide in a few
microseconds whether a flash of Cherenkov light seen by several cameras is
worth reading out.  Lowering the per-pixel discriminator threshold lowers
the gamma-ray energy threshold, but the rate of accidental triggers from
night-sky light and of cosmic-ray showers then rises steeply.  The trigger
described here rejects both with geometry:

* **Camera level (L1.5).** The discriminated pixel signals are aligned in
  time with per-pixel programmable delays, sampled at 400 MHz, and a camera
  trigger fires only if three mutually adjacent pixels are hit within a short
  window (5 ns by default).  Random night-sky hits rarely form such a
  compact triple.
* **Telescope level (L2).** The triggered image is reduced to its first
  moments (hit count and coordinate sums, i.e. the centroid), stamped with
  GPS time and sent over a link at 10 M words/s.
* **Array level (L3).** Events from different telescopes with stamps within
  100 ns are grouped.  For a gamma ray, each image's axis — the line from the
  camera centre through the centroid — points, when projected onto the
  ground from its telescope, at the same shower core; the pair-wise crossing
  points of these lines cluster tightly.  Hadronic showers break up into
  sub-showers and give scattered crossings.  The RMS spread of the crossing
  points, the *parallaxwidth*, is compared against a programmable
  look-up table to form the array trigger.

Everything below is synthesizable SystemVerilog (IEEE 1800-2017) except the
parts that are analog or off-chip (discriminators, FPGA input-delay
elements, optical links, GPS receiver), which are ports of the top module.

## Block structure

```
            per telescope t = 0..NTEL-1                          array (L3)
 disc[t] ─► l15_trigger ──trig/hit_map──► image_moments ─┐
 (after     │ hit_stretcher (sync, gate)                 │
  FPGA      │ nn_coincidence (triangles)   gps_timestamp ┤ stamp
  delays)   │ delay-tap registers ─► tap_value[t]        ▼
                                                   l2_framer ─► link_tx[t]
                                                                   │ (fibre,
 link_rx[t] ─► l3_deframer ─► ts_coincidence ─► parallax_unit ─► arr_accept
               (one per link)   (≥3 in 100 ns)   (crossings, width, LUT)
```

`topo_trigger_top` instantiates NTEL (default 4) telescope chains and one L3
chain.  The link words leave the top on `link_tx_*` and come back on
`link_rx_*`; a board-level design connects these to the optical
transceivers, a testbench simply loops them back.

| Module | Role |
|---|---|
| `topo_pkg` | widths, `timestamp_t`, `l2_event_t`, hexagonal-camera index functions, frame word layout |
| `hit_stretcher` | 2-flop synchroniser per pixel, rising edge loads a gate counter with `win_cycles` |
| `nn_coincidence` | AND of every pixel triangle, OR of all triangles, registered |
| `l15_trigger` | the two above plus the 6-bit delay-tap register file, single-pulse trigger, rate scaler |
| `gps_timestamp` | GPS second + 2.5 ns tick counter, reloaded on each PPS edge |
| `image_moments` | serial first-moment scan of the hit map |
| `l2_framer` / `l3_deframer` | 9-word link frame with header and XOR check word |
| `ts_coincidence` | collection period, time-window test, multiplicity test |
| `parallax_unit` | pair-wise ground crossings, angle cut, parallaxwidth², look-up table |
| `seq_divider` | unsigned restoring divider used by `parallax_unit` |

## Camera geometry and the nearest-neighbour triple

The camera is a hexagonal close-packed grid with `RADIUS` rings around a
centre pixel: 3R²+3R+1 pixels, 547 for the default R = 13 (large enough to
hold a 499-pixel camera; unused positions are tied low).  Pixels are
addressed by axial coordinates (q, r) with |q|, |r|, |q+r| ≤ R and numbered
row by row (r from −R to R, q increasing).  `topo_pkg::hex_index(R, q, r)`
gives the number in closed form, so no neighbour table is stored.  In
Cartesian units of half a pixel spacing a pixel sits at (2q + r, √3·r).

Three pixels are mutual nearest neighbours exactly when they form one of the
unit triangles of the grid:

* "up" triangle: (q, r), (q+1, r), (q, r+1)
* "down" triangle: (q+1, r), (q, r+1), (q+1, r+1)

`nn_coincidence` generates one 3-input AND per triangle that lies wholly
inside the camera (about 2·(2R)² of them) and ORs them.  A line of three
pixels, or any pair, does not fire.  To use a real camera whose pixels are
not on a perfect hexagon, map its pixels onto grid positions; the trigger
logic itself does not change.

## Timing at the camera: delays and coincidence window

Arrival times of pixel signals differ by cable length and PMT voltage.
Each pixel has a 6-bit delay setting (64 × 78.125 ps = 5 ns range) held in
`l15_trigger` and driven out on `tap_value`; it programs the FPGA's input
delay element, which sits before the `disc` inputs.  Settings are written
with `tap_we/tap_addr/tap_wdata` and reset to 0.

After synchronisation, a rising edge in pixel *p* opens a gate of
`win_cycles` clocks (2.5 ns each).  Two hits overlap when their sampled
edges are fewer than `win_cycles` clocks apart; `win_cycles = 2` gives the
5 ns window.  The window resolution is one clock, so 6 ns or 3 ns (figures
quoted for the prototype) can only be approximated by 5 ns / 7.5 ns or
2.5 ns.  `trig` is a single-clock pulse; it rises on the fifth clock edge
after the discriminator edges that complete a triple.  `hit_map` carries
all pixels gated on that clock.

## L2: image moments, time stamp and link frame

On a camera trigger, if L2 is idle, `gps_timestamp` latches the current time
and `image_moments` captures the hit map.  The scan visits one pixel per
clock, carrying (q, r) in two counters, and accumulates

* `npix` = number of hit pixels,
* `sx2` = Σ(2q + r), `sr` = Σ r  (signed 16 bit).

The centroid is (sx2, √3·sr)/(2·npix) in pixel spacings; no division is
done here because L3 only needs its direction.  The scan takes NPIX + 1
clocks (1.37 µs).  A camera trigger that arrives while the scan or the frame
transmission is still running is lost and counted in `l2_dead_count` — this
is the design's dead time, about 2.3 µs per camera trigger.

Time stamps are a 32-bit GPS second and a 29-bit count of 2.5 ns ticks; a
PPS edge loads `pps_sec` and clears the ticks, otherwise the counter rolls
over by itself after `TICKS_PER_SEC`.

Link frame (16-bit words, one every `WORD_DIV` = 40 clocks = 10 MHz):

| word | content |
|---|---|
| 0 | `tx_k`=1, `0xBC`, 4 bits 0, telescope number |
| 1, 2 | GPS second, high and low half |
| 3, 4 | tick count bits 28:16 and 15:0 |
| 5 | hit count |
| 6 | sx2 |
| 7 | sr |
| 8 | XOR of words 0–7 |

`l3_deframer` rebuilds the event and drops frames whose check fails or
that are interrupted by a new header (`err_count`).

## L3: coincidence

`ts_coincidence` opens a collection period of `COLLECT_CYCLES` (1000 clocks,
2.5 µs) at the first event, whose stamp becomes the reference; it keeps the
first event of every telescope during the period.  At the end, telescopes
whose stamps lie within `WINDOW_TICKS` (40 ticks = 100 ns) of the reference,
across a second boundary if needed, form the mask; with at least `MIN_TEL`
(3) of them the coincidence goes to the parallax unit, otherwise it is
counted in `n_lowmult`.

## L3: parallaxwidth arithmetic

This is the least obvious part of the design.  With telescope *i* at ground
position **T**ᵢ (`tel_x/tel_y`, signed 16-bit decimetres) and camera axes
parallel to the ground axes (telescopes at zenith), the image axis projects
onto the ground line **T**ᵢ + s·**d**ᵢ with **d**ᵢ = (sx2ᵢ, √3·srᵢ); √3 is
taken as 887/512.  The scale of **d** cancels, which is why the raw sums can
be used.  A telescope takes part if it is in the mask, has more than
`NPIX_MIN` (5) pixels and a non-zero centroid.  For each pair i < j:

* den = **d**ᵢ × **d**ⱼ (2-D cross product).  If 256·den² < `SIN2_Q8`·|**d**ᵢ|²|**d**ⱼ|²
  the axes meet at less than 30° (sin² 30° = 64/256) and the pair is
  skipped (`n_angle_cut`).  This test needs no square root and also bounds
  every crossing to within twice the telescope separation, which keeps the
  quotients inside 24 bits.
* c = (**T**ⱼ − **T**ᵢ) × **d**ⱼ, and the crossing is
  **r** = **T**ᵢ + **d**ᵢ·c / den, computed as two signed divisions
  (magnitudes through `seq_divider`, 64-bit dividend, 40-bit divisor,
  quotient truncated toward zero).

With k crossings the unit accumulates Σx, Σy and Σ(x²+y²) and forms

  width² = (k·Σ|**r**|² − |Σ**r**|²) / k²,

the mean squared distance of the crossings from their mean — the square of
the parallaxwidth, in dm².  The event is accepted when k > 0 and width² is
below `lut[n_tel]`, the look-up-table entry for the number of telescopes
that took part (written through `lut_we/lut_addr/lut_wdata`; all entries
reset to 0, which rejects everything until the table is loaded).  A 10 m
cut is `lut = 10000`.

Each pair costs about 132 clocks and the final division 66, so four
telescopes (six pairs) need at most about 0.9 k clocks.  A coincidence that
completes while the unit is busy is counted in `n_l3_drop`; with the default
1000-clock collection period this cannot happen.

## Latency and rates

Measured in the full-size testbench, from the clock the pixels fire to
`arr_done`: 1.9 k–2.6 k clocks (4.7–6.6 µs at 400 MHz), made up of the
camera pipeline (6), the moment scan (548), the frame (360), the collection
period (1001) and the parallax unit (up to ~900).  This is inside the
roughly 10 µs available for transmission and processing, and the array
decision rate it supports (one per ~2.5 µs collection period plus
processing) is well above 10 kHz.

## Where this RTL departs from, or adds to, the published design

Given by the publication: the three levels and their roles; 400 MHz
sampling; programmable per-pixel delays up to 5 ns in 0.078 ns steps; a
programmable nearest-neighbour-triple coincidence window (5 ns); first-moment
image parameters sent with a GPS stamp at 10 MHz; L3 time-stamp coincidence;
the parallaxwidth formula; at least 3 telescopes; the >5 pixel and >30° cuts;
a look-up-table comparison; four links on the L3 board.

Choices made here, where the publication gives no detail:

* the hexagonal camera of radius 13 and the pixel numbering;
* one block for the whole camera, where the hardware uses three L1.5 cards
  (their boundary handling is not described);
* the gate-counter window, its 2.5 ns resolution and single-pulse trigger;
* the hit map passed to L2 is every gated pixel at the trigger clock;
* serial moment scan, unweighted moments, no division at L2;
* time-stamp format, PPS handling, link frame layout and check word;
* the 100 ns coincidence window (the value used by the existing array
  trigger) and the first-event collection scheme;
* the parallaxwidth averaged over all pair-wise crossings; the fixed-point
  formats; √3 ≈ 887/512; look-up table indexed by telescope count and
  holding a cut on width²;
* one clock domain for all levels, asynchronous active-low reset.

Not included: the delay elements themselves, the discriminators, optical
transceivers, GPS receiver, I/O cards, backplane and the L3 host interface.
Other observing modes that the FPGA-based system is meant to allow (for
example a ring-shaped acceptance region for pulsar studies, or concurrent
triggers for short gamma-ray bursts) are named in the publication but not
specified, and are not built.
An array of 50 telescopes, used in the published simulation of the
parallaxwidth, needs 50 links and 1225 pairs (about 160 k clocks of the
serial parallax unit, 0.4 ms); the default build has four links.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
values the testbench works out independently (its own pixel enumeration,
frame encoder/decoder, window arithmetic, and a 64-bit reference model of
the parallaxwidth in `tb/tb_geom.sv`), and checks latencies where they are
specified.  `tb_topo_trigger_top` runs the complete design at its default
parameters: gamma-like and hadron-like showers in four 547-pixel cameras,
with the link looped back.  It checks the decision, width², crossings, time
stamp and latency of every event against the reference model, and makes each
mechanism happen at least once: camera triggers, an L2 dead-time loss, a
coincidence, a low-multiplicity rejection, angle-cut pairs, look-up-table
accepts and rejects, and link frame errors.

`tb_nsb_accidentals` runs one full-size camera under random night-sky
hits (0.6 % per pixel and clock) for 80 k clocks with a 5 ns and a 7.5 ns
gate.  Three gates of W clocks overlap when the three sampled edges lie
within W−1 clocks, so per triangle the accidental rate is
(W³ − (W−1)³)·P³ per clock; with the 1001 triangles of the default camera
this predicts about 121 and 329 accidentals, and the simulation gives
numbers within statistical errors of these (about 108 and 314 for one seed).
Shortening the window from 7.5 ns to 5 ns thus cuts accidentals by a factor
of about 2.7, the mechanism by which a faster coincidence lowers the
night-sky rate.

What the tests do not cover: the analog delay elements, real camera
pixel maps, the exact 6 ns / 3 ns windows, clock-domain crossings between
boards, and physics performance (rejection factors) of the cut values.

## Simulating

With Verilator 5 (packages first):

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/topo_pkg.sv tb/tb_geom.sv \
  rtl/hit_stretcher.sv rtl/nn_coincidence.sv rtl/l15_trigger.sv \
  rtl/gps_timestamp.sv rtl/image_moments.sv rtl/l2_framer.sv \
  rtl/l3_deframer.sv rtl/ts_coincidence.sv rtl/seq_divider.sv \
  rtl/parallax_unit.sv rtl/topo_trigger_top.sv \
  tb/tb_topo_trigger_top.sv --top-module tb_topo_trigger_top
./obj_dir/Vtb_topo_trigger_top
```

Each testbench prints `TB_RESULT checks=N failures=M`.  For a block test,
list `rtl/topo_pkg.sv`, `tb/tb_geom.sv`, the block's files and its
`tb/tb_<module>.sv`.  The full-size build compiles in about half a minute
and runs in seconds.  To change the camera size, array size, window or
cuts, override the parameters of `topo_trigger_top` (`RADIUS`, `NTEL`,
`WINDOW_TICKS`, `MIN_TEL`, `NPIX_MIN`, `SIN2_Q8`, ...); the field widths in
`topo_pkg` (16-bit moments, 10-bit pixel count, 4-bit telescope number)
bound how far `RADIUS` and `NTEL` can grow.
