# DATCON region-of-interest finder in SystemVerilog

The Belle II pixel detector (PXD) produces far more data than can be stored. It sits inside a
four-layer silicon strip detector (SVD). The SVD data are enough to find the tracks of charged
particles, follow each track inwards to the two pixel layers, and keep only the pixels near
where the track crosses them. This RTL does that online: it takes the fired SVD strips of one
event and returns, for every track it finds, a fixed window of 80 x 120 pixels (u x v) on each
PXD layer, a *region of interest* (ROI). A downstream selector (not part of this design)
then discards every pixel hit outside all ROIs.

Track finding uses two Hough transforms, one per projection:

* **r-phi:** in the transverse plane a track from the interaction point is a circle through the
  origin. The conformal map x' = x/r^2, y' = y/r^2 turns such circles into straight lines.
* **r-z:** along the beam the track is approximated by a straight line z(r).

In both Hough spaces the hits of one track meet in one cell. A cell counts only if hits from at
least three different SVD layers pass through it. The two sets of 2D tracks are combined into 3D
tracks and intersected with the PXD layers, and the window is placed around each intersection,
the *most probable hit* (MPH).

## Data path

```
 strips ─► svd_clusterer ─► svd_hit_coord ─┬─ (x,y) ─► conformal_transform ─► hough_engine (phi0, kappa) ─┐
                                           └─ (r,z) ───────────────────────► hough_engine (alpha, s)    ─┤
                                                                                                         ▼
                             ROIs ◄─ roi_calc ◄─ mph_extrapolator ◄─ track_combiner ◄────────────────────┘
```

Every arrow is a valid/ready stream. Each stream carries the items of one event followed by an
end-of-event token (`eoe = 1`). The token is what closes an event in every stage:

* it flushes an open cluster;
* it starts the Hough read-out;
* it tells the combiner that a candidate list is complete.

The top module is `datcon_top`. Its ports:

| port | dir | type | meaning |
|---|---|---|---|
| `strip_valid/ready`, `strip` | in | `svd_strip_t` | fired strip: layer, ladder, sensor, side, strip ID; or token |
| `roi_valid/ready`, `roi` | out | `roi_t` | layer, ladder, module half (`fwd`), `u_min..u_max`, `v_min..v_max`; or token |
| `trk_overflow` | out | 1 | pulses for every 2D candidate dropped because its list was full |
| `hough_busy` | out | 1 | a Hough engine is clearing, voting or reading out |

Strips must arrive sorted by layer, ladder, sensor, side (p before n) and strip ID, as a readout
that scans its sensors in order delivers them. The SVD readout and the ROI consumer are outside
the design; the two streams stand in for them.

## Number formats and geometry (`datcon_pkg`)

* Lengths are 18-bit signed with a 10 µm LSB (±1.31 m).
* Trigonometric constants are Q2.14.
* Conformal values are x/r² scaled by 2³², as 24-bit signed numbers.
* Azimuths of MPHs are 16-bit phases (65536 = one turn).

All tables are computed by constant functions at elaboration; there are no table files.

Detector numbers taken from the description of the detector:

* SVD layer radii of 39 and 135 mm for the innermost and outermost layers;
* 768 x 768 strips of 50/160 µm pitch on layer 3, and 768 x 512 strips of 75/240 µm on layers 4-6;
* 172 sensors in total;
* PXD radii of 14 and 22 mm;
* PXD modules of 250 x 768 pixels. The v pitch is 55 µm (layer 1) or 65 µm (layer 2) for the 256
  central rows, and 70 µm for the 512 outer rows.

The rest are the usual Belle II values:

* middle SVD radii of 80 and 104 mm;
* 7/10/12/16 SVD ladders with 2/3/4/5 sensors each, which gives the 172 sensors;
* 8/12 PXD ladders, two modules per ladder, which gives 40 modules.

Ladders are modelled as flat planes at the layer radius, with the plane normal at azimuth
2π·ladder/N. Sensors tile a ladder in z without overlap. Real ladders are shingled and tilted, so
a real installation needs its alignment tables in place of these formulas.

## The stages

**svd_clusterer.** Merges each run of consecutive strip IDs on one sensor side into a cluster.
Its position is `first + last` (the centre in half-strip units) and its size saturates at 31.
Throughput is one strip per cycle. There is no charge weighting.

**svd_hit_coord.** p-side clusters measure u across the ladder and become global (x, y):
x = R cos β − u sin β, y = R sin β + u cos β.
n-side clusters measure z along the ladder and become (r, z). The radius of an n-side hit is
taken from the most recent p-side cluster of the same sensor, r ≈ R + d − d²/2R with d = u²/2R,
or R if there is none. Since the readout sends p before n, a sensor crossed by one particle gets
its exact radius. Tokens go to both outputs.

**conformal_transform.** Two sequential restoring dividers (one quotient bit per cycle) compute
|x|·2³²/r² and |y|·2³²/r². The block emits A = 2y' and B = −2x', so that the Hough engine's
p = A cos t + B sin t is directly the signed curvature κ of the circle that leaves the
origin at azimuth t = φ0. Latency is 55 cycles per hit. This is well below the r-phi Hough
engine's 512 cycles per hit, so it never limits throughput.

**hough_engine** is the heart of the design, instantiated twice:

| instance | A, B | angle range | angle bins | parameter bins |
|---|---|---|---|---|
| r-phi | 2y', −2x' | 360° (φ0) | 512 (0.70°) | 64 of 0.38 /m, κ within ±12.2 /m |
| r-z | r, z | 180° (α) | 256 (0.70°) | 64 of 1.28 mm, s within ±41 mm |

For the r-z instance, p = r cos α + z sin α is the Hesse distance s of a line in the r-z plane.
The track's polar angle is θ = 180° − α.

* *Accumulator.* One bit per (SVD layer, angle bin, parameter bin), held as rows of 64 bits.
  A hit is voted one angle row per cycle. For each row, p is evaluated at both edges of the bin
  and every parameter bin between the two values is set, widened by `PAR_MARGIN` on each side.
  So a steep curve leaves no holes. The margin (half a κ bin; one s bin) absorbs hit resolution.
  Without it, the three nearly parallel curves of the outer layers often miss a common cell for
  a bin or two, and one track splits into several candidates.
* *Forward check* (r-phi only). Each hit's curve appears twice over a full turn: once for
  tracks going towards the hit, once for tracks going away from it. Only the half where the hit
  lies ahead of the track (x' cos φ0 + y' sin φ0 > 0) is voted, so each track appears once.
* *Threshold.* A cell passes if at least `MIN_LAYERS = 3` layer bits are set. Counting layers,
  not hits, stops one layer's noise from building a track.
* *Clustering.* A real track lights a tilted band of passing cells, not one cell. After the
  token, rows are read in angle order (and cleared as they are read). The engine keeps, for
  every parameter column that passed in the previous row, the bounding box of the cluster it
  belongs to. Each new row works like this:
  - adjacent open columns form a segment, and the segment's boxes are united;
  - every passing cell that touches the segment (same or diagonal column) inherits the united
    box;
  - a segment that no cell touches is finished, and the centre of its box is emitted as a
    candidate.

  So any 8-connected band gives one candidate. A band that forks can give two; two tracks whose
  bands touch give one.
* *Timing.* Clearing after reset takes N_ANG cycles. Each hit takes N_ANG cycles (the input is
  not ready meanwhile). The read-out takes N_ANG + 1 cycles plus one cycle per candidate, then
  the token.

**track_combiner.** Buffers up to `MAX_TRK = 32` candidates from each engine. Once both lists
are complete, it emits every pairing (r-phi × r-z) as a 3D track, then the token. Further
candidates are dropped and reported on `trk_overflow`. The rule is the simplest possible one and
produces ghost tracks; they cost ROIs, not efficiency.

**mph_extrapolator.** For each 3D track and each PXD layer:

* ψ = φ0 + Rκ/2 (small-angle form of asin, error below 0.03° at these radii);
* z = (s − R cos α)/sin α, using 256-entry csc/cot tables at the α bin centres.

Track parameters are taken at their bin centres. There are two outputs per track, layer 1 first.

**roi_calc.** ψ selects the ladder (ladder l covers [l/N, (l+1)/N) of a turn) and the column
u (250 per ladder). The sign of z selects the module half. |z| gives the row v, counted from
z = 0 outwards with the central and outer pitches. The window is u−40..u+39, v−60..v+59,
clipped at the module edges. When the window reaches past z = 0, a second ROI with the
remaining rows (0..59−v) is sent for the other module of the ladder; without it, tracks near
90° lose their pixels.

## Where this departs from the method, and how far to trust it

* The clustering, the conformal arithmetic, the Hough binning and ranges, the combination rule,
  the extrapolation formulas and the pixel numbering are not specified by the method. Each is
  the simplest version that works, and each is described above.
* The angle binning (0.70°) is inferred from the ±0.35°/±0.7° structure of the method's
  published angular residuals.
* The method's equation for the r-phi Hough transform carries an extra 1/r² on top of
  x' = x/r². This design uses κ = 2(x' cos φ + y' sin φ), the form that holds for a circle
  through the origin.
* The r-z projection is a straight line in r. A helix is straight in arc length instead, so
  low-momentum tracks at shallow angles are extrapolated with a z error of a few mm. Sometimes
  the r-z Hough also splits them into two or three candidates. In simulation (100 MeV < pT,
  25° < θ < 145°) 96 % of the true PXD crossings fall inside an ROI. The method quotes 94 % for
  its own software model.
* Throughput is the main limit. One hit costs 512 cycles in the r-phi engine, so an event with
  300 SVD hits (the expected beam background) takes about 154 000 cycles. At a 30 kHz trigger
  rate that needs several engines in parallel, for example one per azimuthal sector. This
  design has one engine per projection.
* Ghosts. The all-pairs combination grows as (r-phi candidates) × (r-z candidates). In
  simulated 10-track events the r-z engine finds up to about 40 candidates, so the 32-entry
  lists can overflow. Both effects are visible on the ports.
* Not modelled: the SVD readout, the selector that applies the ROIs, the high-level trigger's
  own ROIs, and any FPGA-specific I/O.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `datcon_top` | `MAX_TRK` | 32 | candidate list size per projection |
| | `PHI_MARGIN` | 8192 | r-phi vote margin (raw κ units, half a bin) |
| | `THETA_MARGIN` | 128 | r-z vote margin (10 µm units, one bin) |
| `hough_engine` | `N_ANG`, `FULL_TURN` | 512, 1 | angle bins and range |
| | `N_PAR`, `PAR_OFFSET`, `PAR_SHIFT` | 64, 2¹⁹, 14 | parameter bin = (p + offset) >>> shift |
| | `PAR_MARGIN`, `FWD_CHECK`, `MIN_LAYERS` | 0, 1, 3 | see above |

Geometry and ROI size are package constants in `datcon_pkg`.

## Simulation

Each block has a self-checking testbench `tb/tb_<block>.sv`. Each testbench:

* drives random and directed stimulus with random output stalls;
* compares against a floating-point reference;
* ends with `TB_RESULT checks=<n> failures=<n>`;
* has a watchdog.

With plain Verilator:

```
verilator --binary --timing --assert rtl/datcon_pkg.sv rtl/svd_clusterer.sv rtl/svd_hit_coord.sv \
  rtl/seq_divider.sv rtl/conformal_transform.sv rtl/hough_engine.sv rtl/track_combiner.sv \
  rtl/mph_extrapolator.sv rtl/roi_calc.sv rtl/datcon_top.sv tb/tb_datcon_top.sv --top-module tb_datcon_top
./obj_dir/Vtb_datcon_top
```

`tb_datcon_top` runs the full-size design at its default parameters, about a second of
wall-clock time. It generates helix tracks and intersects them with the ladder planes, fires
clusters of 1-3 strips per hit, adds noise strips, and sends 14 events:

* one clean track;
* a track seen in only two layers, which must give no ROI;
* an empty event;
* ten events of 1-10 tracks;
* a 20-track event that must overflow the candidate lists.

The testbench checks the following:

* tokens arrive in order;
* the ROI count matches the number of candidates counted inside the two Hough engines;
* the clean track's crossing pixels are covered;
* at least 90 % of all crossing pixels are covered.

It also counts each mechanism of the design and fails if one never occurred: multi-strip
clusters, input and output stalls, Hough busy time, threshold rejection, Hough clustering,
candidate overflow, clipped windows, second ROIs across z = 0, and tokens.
