# Artificial-retina T-track processor for the LHCb SciFi tracker

This design finds straight-ish charged-particle tracks in the downstream
scintillating-fibre tracker (SciFi) of LHCb in real time. It uses only the
SciFi's own hits, so it also finds the decay products of long-lived particles
(K0S, Lambda, exotic states) that are born too far from the collision point to
leave hits in the vertex detector.

The core idea is the *artificial retina*. The space of possible track
parameters is cut into cells. Each cell is a small processing engine that
knows where its own ideal track crosses every detector layer. Every hit of an
event is broadcast to all engines at once. An engine adds a weight that falls
off as a Gaussian with the distance between the hit and its own crossing point.
After the last hit, a track shows up as a cluster of excited cells, and the
peak of the cluster gives the track parameters. The engines work in parallel
on every hit, so reconstructing an event takes about as many clock cycles as
it has hits, no matter how many tracks it holds.

The RTL covers one quadrant's processor: the hit switch, the axial retina of
25,800 engines, the axial parabola fit with its chi2 cut, and three stereo
units. Each stereo unit is a 500-engine retina with a straight-line fit.

## Geometry and number formats

The SciFi has 12 layers in three stations. Within each station the order is
x, u, v, x:

| global layer | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|
| type | x | u | v | x | x | u | v | x | x | u | v | x |
| z (mm) | 7826 | 7896 | 7966 | 8036 | 8508 | 8578 | 8648 | 8718 | 9193 | 9263 | 9333 | 9403 |

The z values are nominal SciFi positions. They are not read from any table;
they are compiled into `retina_pkg`.

The x layers measure x directly. The u and v layers are tilted by -5° and +5°,
so they measure `u = x·cos5° + s·y·sin5°`, with `s = -1` for u and `s = +1` for
v.

The tracks are described at two virtual planes, `ZA = 7800 mm` and
`ZB = 9430 mm`. Position along the detector is the normalised coordinate
`t = (z - ZA)/(ZB - ZA)`, held as a Q16 fraction (`t_q16()`).

Coordinates are signed 16-bit integers (`coord_t`) in the units of the switch
output. Fit parameters carry 4 more fraction bits (Q4), and chi2 is in Q4
units², saturated at 16 bits.

## Data flow

```
raw hits ──► hit_switch ──x hits──► axial retina_array (258 x 100 engines)
 (layer,        │                        │ local maxima, one per cycle
  channel)      │                        ▼
                │          x hit_buffer ─► closest_hits ─► comb_fit (parabola)
                │                                               │ chi2 <= CHI2_A_MAX
                └─u/v hits─► copied into every stereo_unit      ▼
                                                   stereo_unit x NSTEREO
                                  (stereo_transform ► retina 50 x 10 ►
                                   closest_hits ► comb_fit (line) ► best chi2)
                                                                │
                                                          trk_valid / trk
```

An event is a stream of `in_hit` beats with `in_valid`, closed by one beat with
`in_eoe`. The top (`retina_tracker`) then:

1. waits for the switch pipeline to drain;
2. pulses `find` in the axial retina, which latches every local maximum;
3. for each maximum in turn, runs the hit selection and the parabola fit;
4. sends each candidate that passes the chi2 cut to a free stereo unit,
   stalling while all units are busy;
5. waits for the stereo units and then raises `evt_done`.

`in_ready` stays low from the end-of-event beat until `evt_done`. Tracks come
out on `trk_valid`/`trk` and there is no back-pressure on the output. When
several stereo units finish together, the lowest-numbered one is served first
and the others hold their result.

`track_t` carries:
- the axial cell (`ax_col`, `ax_row`);
- the parabola `x(t) = a0 + a1·t + a2·t²` in Q4 units, with `chi2_ax`;
- `st_found`, and the y-z line `y0`, `y11` in Q4 units with `chi2_st`.

A candidate whose stereo retina has no maximum is still output, with
`st_found = 0`.

## The hit switch (`hit_switch`)

A raw hit is a 4-bit layer number and a 14-bit fibre channel. The switch
turns the channel into a coordinate:

`coord = ((channel · 21140 + 2^15) >> 16) + OFFSET[layer]`

This gives about 0.32 units per channel. `OFFSET` is -256 on the u layers and
0 elsewhere, so the u acceptance covers negative u. The switch then sends x
hits to the axial path and u/v hits to the stereo path.

The axial retina's columns are divided into `NSEC` sectors. The switch works
out which sectors an x hit can excite: those whose receptors on that layer,
widened by the distance cut, contain the coordinate. The result is a sector
mask, and `ax_dup` is high when more than one bit is set. That case is the
duplication of hits that a board-level switch would create.

The switch is one pipeline stage and takes one hit per clock.

## The axial retina (`retina_array`, `retina_column`)

**Cell layout.** The cell at column `i` and row `j` is the straight pattern
track through the cell centres, `x0 = (i + ½)·PITCH` at `ZA` and
`x11 = (j + ½)·PITCH` at `ZB`. Real tracks lie
near the diagonal `x0 ≈ x11`, so only a band is built: row `j = i - BOFF + k`
for `k = 0 … NBAND-1`. The default is 258 columns × 100 rows = 25,800 cells,
with a 16-unit pitch.

**Receptors.** The crossing point of a cell on layer `l` is computed at
elaboration time:

`r_l = x0 + (((x11 - x0) · t_l + 2^15) >>> 16)`, with `t_l` in Q16

**Weights.** A hit at distance `d = |coord - r_l|` adds
`w(d) = round(WMAX · exp(-d² / 2σ²))` when `d < CUT`, and nothing otherwise.
The defaults are WMAX = 15, σ = 8 and CUT = 24. The weights come from a
constant table built from this formula. The 10-bit excitation saturates.

**Engine grouping.** The engines of one column share a module
(`retina_column`), and the array instantiates one column per x0 value. The
grouping only decides how the engines are written down; every engine still
works on its own, in parallel.

**Local maxima.** On `find` each cell compares itself with its 8 neighbours
in the (x0, x11) plane. Because of the band layout these are:
- in the left column, band indices k, k+1 and k+2;
- in its own column, k-1 and k+1;
- in the right column, k-2, k-1 and k.

A plateau of equal values must give exactly one maximum. So a cell must be
strictly above the neighbours that come before it in scan order (the left
column and k-1), and not below those after it. It must also be strictly above
`THRESH` (45).

**Readout.** The flags are then read out in (column, band index) order, one
maximum per clock, through a two-level priority encoder: first the lowest
column with a flag, then the lowest index in it. `pop` clears the flag being
presented.

**Sector gating.** An x hit reaches only the columns of the sectors set in its
mask.

## Hit selection and the linearized fit (`closest_hits`, `comb_fit`)

The engines do not keep hits. The event's hits are stored once, in
`hit_buffer`, a dual-port memory of 1024 entries. For a maximum,
`closest_hits` scans the buffer once. On each layer it keeps the nearest and
the second-nearest hit that lies within the engine's cut of the cell's
receptor. It takes `nhits + 3` clocks.

`comb_fit` then tries every combination of one hit per layer (at most
2^6 = 64), one combination per clock. It keeps the combination with the
lowest chi2.

**Why the fit can be linear.** Each measurement is taken relative to the
cell's own straight track, `m_l = 16·(hit_l - ref(t_l))`. The pattern track is
a valid starting point and the model is linear in its parameters. So the best
parameters and the residual vector are constant matrices times `m`:

- `b = P·m`, with `P = (AᵀA)⁻¹Aᵀ`;
- `ρ = R·m`, with `R = I - A·P`;
- `chi2 = Σ ρ²`;
- `A` has rows `(1, t_l, t_l²)` for the parabola, or `(1, t_l)` for the line.

The design computes `P` and `R` at elaboration with a real-valued
Gauss-Jordan inversion in a constant function. It rounds them to Q14.

**Missing layers.** A layer with no selected hit is handled by a second
matrix set, built with that layer's row of `A` zeroed. There is one such set
per possible missing layer. With two or more empty layers the maximum is not
fitted (`ok = 0`).

**Hardware cost.** The multiply-accumulates are `NL·NL` for the residuals and
`NPAR·NL` for the parameters. They are constant coefficients times small
integers, so they map to DSP blocks.

**Cut.** An axial candidate is kept when `chi2_ax ≤ CHI2_A_MAX` (256, i.e.
16 units²). With the cell line written as `ref(t) = ref0 + ref1·t`, its parameters
come out as `a0 = 16·ref0 + b0`, `a1 = 16·ref1 + b1` and `a2 = b2`.

## Stereo units (`stereo_unit`, `stereo_transform`)

Each stereo unit keeps its own copy of the event's u/v hits. For a candidate
it streams them through `stereo_transform`, which:

1. evaluates the candidate's parabola at the hit's layer;
2. solves for y, using `y = s·(u - x·cos5°)/sin5°` (cos in Q14, 1/sin in Q8);
3. flags whether y lies inside the stereo retina's acceptance,
   `[-CUT, NCOL·PITCH + CUT)`.

The transform is one pipeline stage.

Accepted hits excite a stereo retina and are stored as y. The stereo retina
has 50 × 50 cells in the (y0, y11) plane, of which 500 (a 10-wide band) are
built. It uses the same engine and maximum-finding logic as the axial retina,
with a 64-unit pitch, σ = 32, CUT = 96 and THRESH = 30.

For every maximum, the unit fits a straight line to the nearest hits. There
is no cut on chi2. The maximum with the smallest chi2 becomes the track's y-z
projection.

`busy` is high from `start` until the result is acknowledged. The assertion
`a_start_idle` checks that `start` comes only while the unit is idle. The
default of three units is about what one large FPGA can hold. A candidate
that finds all units busy waits. That wait is the design's only stall.

## Parameters (top, `retina_tracker`)

| parameter | default | meaning |
|---|---|---|
| NCOL, NBAND, BOFF | 258, 100, 25 | axial band: columns, rows per column, row offset |
| PITCH, CUT, SIGMA, WMAX, THRESH | 16, 24, 8, 15, 45 | axial cell pitch and response |
| NSEC | 6 | axial sectors seen by the switch |
| CHI2_A_MAX | 256 | axial chi2 cut (Q4 units²) |
| NSTEREO | 3 | stereo units |
| AW | 10 | log2 of hits stored per class per event |
| S_NCOL, S_NBAND, S_BOFF | 50, 10, 5 | stereo band |
| S_PITCH, S_CUT, S_SIGMA, S_THRESH | 64, 96, 32, 30 | stereo response |

## What follows the source and what is this design's own

**Taken from the source:**
- the three-stage sequence: axial retina, then parabola fit with a chi2 cut,
  then stereo retina with a line fit and best-chi2 choice;
- Gaussian cell weights and local maxima above a threshold;
- 25,800 axial cells in the diagonal band;
- stereo retinas of 50 × 50 cells with 500 in the band, about three per chip;
- the two closest hits per layer;
- the combinatorial linearized fits, built for DSP blocks;
- no chi2 requirement in the stereo stage.

**This design's own choices:**
- every number format;
- the weight table's height and width;
- the thresholds and the axial chi2 cut;
- the band shape;
- the layer z positions;
- the channel-to-coordinate map;
- the sector scheme in the switch;
- keeping hits in a shared buffer instead of inside the engines;
- the one-missing-layer rule;
- event-at-a-time control with no output back-pressure;
- the size of the hit buffers (1024 per class).

**Not built:**
- the board's PCIe link to the event-builder PC;
- the mesh of links that spreads hits between boards;
- the multi-board system as a whole.

This RTL is one quadrant's processor, fed directly with all of its hits.

**Throughput.** Hits enter at one per clock, and events are handled one at a
time. An event costs about `nhits + 10` clocks for the retina, plus the
per-maximum hit selection and fit. Reaching a 30 MHz event rate needs many
such processors in parallel.

## Simulation

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. List the package first:

```
verilator --binary --timing --assert -Itb rtl/retina_pkg.sv \
  $(ls rtl/*.sv | grep -v retina_pkg) tb/tb_retina_tracker.sv \
  --top-module tb_retina_tracker -Mdir obj && obj/Vtb_retina_tracker
```

**Testbenches:**
- `tb_retina_tracker` runs the whole processor at a reduced size: 48 × 24
  axial cells, 3 sectors and one stereo unit. It feeds 8 generated events that
  contain:
  - parabolic tracks, some with a missing layer;
  - a fake track that fails the chi2 cut;
  - noise;
  - u/v hits from the true y of each track.

  It checks every reported track against the generated one and confirms that
  all tracks and no extra ones come out. It also counts each mechanism:
  duplicated hits, chi2 rejections, fits with a missing layer, stalls waiting
  for a stereo unit, input back-pressure, and candidates with no stereo
  match.
- `tb_retina_tracker_full` runs the same checks on 8 events with every
  parameter at its default: 25,800 axial engines and three stereo units. Building it with
  Verilator takes a few minutes; running it takes under a second.
- Shared event generation is in `tb/tb_tracker_events.svh`.
