# Drift-tube trigger primitives by the analytical method

A drift-tube chamber of CMS measures, for every hit cell, only the wire that
fired and the time the signal arrived. The time is the sum of the unknown
collision time `t0` and the electron drift time, which can be anything from 0
to about 390 ns. Building a Level-1 trigger primitive means undoing that
ambiguity in hardware: find which bunch crossing the muon came from and where
and at what angle it crossed the chamber, with a time resolution of a few ns.

The *analytical method* does this without histogramming or lookup tables.
Within one superlayer (four staggered layers of 42 x 13 mm cells) a straight
track through three hit cells fixes `t0` in closed form once one guesses on
which side of each wire the track passed (the *laterality*), because the
slope cancels out. With `t0` known, hit positions are exact and an ordinary
least-squares line gives position, slope and chi2. All laterality guesses are
tried; the physically allowed ones survive. Segments found in the two phi
superlayers (SL1 and SL3, some 20+ cm apart) are finally merged when their
times agree within 25 ns, which gives a much better slope from the long lever
arm.

This repository holds synthesizable SystemVerilog for that processing chain,
for the two phi superlayers of one chamber (60 cells per layer by default),
plus self-checking testbenches.

## Chain at a glance

```
            dtam_sl_scanner (one per superlayer)
 SL1 hits --[ 10-cell group --> dtam_grouping --> dtam_sl_fitter ]--+
  4 x 60     (slides along                        (16 lateralities,  +--> dtam_correlator --> primitives
 SL3 hits --[  the layers)       (8 patterns)      4 x dtam_meantimer,
  4 x 60                                           dtam_lsq_fit) ]---+
```

`dtam_tpg` is the top level. It accepts one event (a snapshot of the hits of
SL1 and SL3), scans both superlayers in parallel and streams out trigger
primitives.

## Units and geometry

All arithmetic is integer; the package `dtam_pkg` holds the constants.

| quantity | unit | notes |
|---|---|---|
| time | TDC count = 25/32 ns | 32 counts per bunch crossing, counted from the orbit start, 17 bits |
| position | "drift count" = 54 um/ns x 25/32 ns = 42.19 um | the distance drifted in one count; 2 fraction bits |
| half a cell (21 mm) | `HALF_CELL_T` = 498 drift counts | wires sit at integer multiples of it |
| height | layer height h = 13 mm | layer index 0..3 inside a superlayer |
| slope | drift counts per layer height | 6 fraction bits; tan(phi) = slope x 42.19 um / 13 mm |
| chi2 | 1/16 count^2 | unweighted sum of squared residuals |

Expressing positions in drift counts makes a hit position simply
`x = X * HALF_CELL_T +/- (t - t0)` with `X` the wire position in half cells:
no multiplier by the drift velocity is needed anywhere.

A **group** is a pyramid of 10 cells, 4 + 3 + 2 + 1 from the bottom layer to
the top one. Layer 3 holds the apex wire (position 0); each lower layer holds
the cells half a cell to the left and right of the cells above:

```
layer 3:            [9]                  wire  0
layer 2:         [7]   [8]               wires -1 +1
layer 1:      [4]   [5]   [6]            wires -2  0 +2
layer 0:   [0]   [1]   [2]   [3]         wires -3 -1 +1 +3      (half cells)
```

Walking down from the apex with one half-cell step left or right per layer
gives 8 four-cell **patterns**. A track through the apex cell that moves less
than half a cell per layer (up to about 58 degrees from the normal) crosses
the four cells of one of them. The group is placed in
the chamber by the signed half-cell position of its apex wire (`apex`), which
is added to every reported position.

In the chamber frame, cell `c` of layers 1 and 3 has its wire at half cell
`2c` and cell `c` of layers 0 and 2 at `2c + 1`. Both superlayers use the
same origin.

## Scanning a superlayer (`dtam_sl_scanner`)

The scanner latches the four layers of a superlayer and places a group under
every top-layer cell `k = 0 .. NCELL` (apex at half cell `2k`). That group
holds cells `k-2 .. k+1` of layer 0, `k-1 .. k+1` of layer 1, `k-1 .. k` of
layer 2 and `k` of layer 3; cells beyond the layer ends count as empty. A
group with fewer than three hits is skipped in one clock; any other group
goes through the pattern scan and the fitter. Because neighbouring groups
overlap, one muon is seen by several groups and yields several copies of its
candidates (about eight per superlayer for a clean track). They are not
merged: the correlator simply produces a primitive for each matching pair.

## Collision time from three hits (`dtam_meantimer`)

Take three hits in layers `la < lb < lc` with wire positions `X`, times `t`
and laterality signs `s` (+1 if the track passed right of the wire). For a
trial `t0` the hits sit at `x_i = X_i*HALF_CELL_T + s_i*(t_i - t0)`. A straight
line through them requires

    c_a*x_a + c_b*x_b + c_c*x_c = 0,   c = (lc - lb, la - lc, lb - la).

The coefficients sum to zero, so neither the track offset nor its slope
appears, and the condition is linear in `t0`:

    t0 = (HALF_CELL_T * sum c_i X_i + sum c_i s_i t_i) / D,   D = sum c_i s_i.

`D` is always even and its magnitude is 2, 4 or 6, so the divider only ever
divides by 1, 2 or 3 after halving. When `D = 0` the three points stay
collinear for every `t0` — this happens, for instance, when all three hits lie
on the same side of their wires — and the hypothesis is reported as
undetermined. Such a track can still be found from another triplet or with
four hits, but a 3-hit pattern whose hits are all on one side yields no
candidate; this is a property of the method, not of the implementation.

For four hits the four triplets (layers 012, 013, 023, 123) each give a `t0`;
the fitter averages those that are determined.

## Fit and candidate selection (`dtam_lsq_fit`, `dtam_sl_fitter`)

With `t0` fixed, `dtam_lsq_fit` forms the usual sums over the present hits
(`n`, `Sx`, `Sy`, `Sxx`, `Sxy`, `Syy`, with `y` the layer index) and evaluates
the exact least-squares solution in integers:

    K = n*Sxy - Sx*Sy,  Delta = n*Syy - Sy^2
    slope = K / Delta
    position at the superlayer centre (y = 1.5) = Sx/n + slope*(1.5 - Sy/n)
    n*Delta*chi2 = Delta*(n*Sxx - Sx^2) - K^2

Everything is rounded once, at the very end. A hypothesis is *physical* when
every drift time `t_i - t0` lies in `[-16, 499 + 16]` counts, i.e. within the
maximum drift time plus a margin for resolution.

`dtam_sl_fitter` takes one pattern and sweeps the 16 laterality codes, one per
clock, through four mean-timers and the fit:

* **4 hits:** it keeps the physical hypothesis with the smallest chi2 and
  emits that single candidate at the end of the sweep. Occasionally a mirror
  hypothesis fits slightly better than the true one (about 1 % of random
  tracks in the unit test); that is the method's own ambiguity.
* **3 hits:** every physical hypothesis is emitted as soon as it is evaluated
  (codes that set the laterality of the empty layer are skipped). Several
  candidates per pattern are normal; the correlation step sorts them out.

Each candidate carries `t0`, the nearest bunch crossing (`(t0 + 16) >> 5`),
position, slope, chi2, the number of hits and the laterality code.

## Pattern scan (`dtam_grouping`)

The grouping unit latches the 10 cells of an event, then looks at the 8
patterns in order. A pattern with at least 3 hit cells goes to the fitter and
the scan waits for the fitter's `done`; others cost one cycle. Overlapping
patterns are not merged, so the same 3-hit subpattern can be fitted twice when
the cells that tell two patterns apart are both empty.

## Superlayer correlation (`dtam_correlator`)

Candidates of SL1 and SL3 are written into two 16-entry buffers (a write to a
full buffer is dropped and counted in `dropped`). When both superlayers are
finished, every SL1/SL3 pair is tested, one per clock. If
`|t0_1 - t0_3| <= 32` counts (25 ns) the pair produces a correlated primitive:

    t0    = (t0_1 + t0_3) / 2
    pos   = (pos_1 + pos_3) / 2
    slope = (pos_3 - pos_1) * LAYER_H_UM / SL_DIST_UM    (in counts per layer height)

SL3 is taken to lie `SL_DIST_UM` = 235 mm above SL1, with the same x origin.
Every matching pair gives its own primitive. After the pair scan, each
candidate of either buffer that matched nothing is passed on as an
uncorrelated SL1 or SL3 primitive, so no information is lost when the
superlayers disagree.

## Interface of `dtam_tpg`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `start` | in | take one event; ignored while `busy` |
| `sl1_hits[4][NCELL]`, `sl3_hits[4][NCELL]` | in | `hit_t` per layer and cell: `valid` and 17-bit time (one hit per cell) |
| `busy` | out | event in progress |
| `tp_valid`, `tp` | out | one `tp_t` per clock: kind (SL1, SL3, correlated), `t0`, `bx`, position, slope, hits in SL1 and SL3 |
| `done` | out | one-cycle pulse after the last primitive of the event |
| `dropped` | out | candidates lost to full buffers since reset (saturating) |

Parameters: `NCELL` (60 cells per layer), `CAND_DEPTH` (64 candidates per
superlayer), `WINDOW` (32 counts = 25 ns), `SL_DIST_UM` (235000),
`LAYER_H_UM` (13000).

### Timing

| stage | cycles |
|---|---|
| fitter, one pattern | 16 after its start (one laterality per clock) |
| grouping, one group | 8 + 17 per pattern with 3 or 4 hits |
| scanner, one superlayer | NCELL + 1, plus about 10 per group with hits and 17 per fitted pattern |
| correlator | n1*n3 + n1 + n3 + 3 for n1, n3 candidates (n1 + n3 + 3 if one is empty) |

A clean single-muon event took at most about 320 cycles in the end-to-end
test; an event with 24 cells of three layers full of noise took about 4600,
most of it in the correlator's pair scan. Both superlayers run in parallel; there is no
back-pressure on the output and no overlap between events. Each clock cycle
contains a mean-timer, a small divider and the fit in series, so the clock
frequency this reaches in an FPGA would need pipelining that is not done here.

## What this RTL adds or leaves out

The processing steps — three-hit `t0` with the slope factored out, the mean
over triplets for four hits, exact least squares, minimum chi2 for 4 hits,
all physical solutions for 3 hits, the 25 ns SL1/SL3 window, the combination
formulas and keeping unmatched candidates — are those of the analytical
method. The following are choices of this implementation:

* TDC count of 25/32 ns, all bit widths and fixed-point formats.
* Pyramid shape of the 10-cell group, the order of its 8 patterns and the
  placement of one group per top-layer cell.
* The drift-time margin of 16 counts that defines a physical solution.
* SL1-SL3 distance of 235 mm (the method only needs "more than 20 cm").
* Serial sweep of lateralities, groups and correlation pairs; 64-entry
  buffers.
* 60 cells per layer, read off the chamber used in the published test.
* One event = a snapshot of all hits of both superlayers, presented in
  parallel with a `start` strobe.

Not included:

* the time-to-digital converters and the optical links that bring hits from
  the chamber — the design starts from hit times already aligned to groups;
* building events from the continuous hit stream (time windows per bunch
  crossing);
* the theta superlayer (SL2), which the same fitter could process but which
  plays no part in the correlation;
* wrap-around of times at the end of the LHC orbit;
* merging of duplicate candidates from overlapping patterns and groups.

## Verification

Every module has a self-checking testbench in `tb/`; each prints
`TB_RESULT checks=N failures=M`. The shared package `tb/dtam_tb_pkg.sv`
generates straight tracks, the cells they cross and their drift times, and
recomputes `t0` (from the triangle area, which is linear in `t0`) and the fit
in floating point, independently of the integer formulas.

| testbench | what it checks |
|---|---|
| `tb_dtam_meantimer` | `t0` against the floating-point solution (+/-0.5) and the generating `t0` (+/-3), and the undetermined flag, for random triplets and lateralities |
| `tb_dtam_lsq_fit` | position, slope and chi2 against a floating-point fit; unphysical flag for a shifted `t0` |
| `tb_dtam_sl_fitter` | 4 hits: one candidate, minimum chi2 over all physical hypotheses, near the track; 3 hits: all candidates physical and the true one present; 16-cycle latency |
| `tb_dtam_grouping` | the patterns sent, their masks, wires and times, waiting for the fitter, 8-cycle scan |
| `tb_dtam_sl_scanner` | single tracks anywhere across 60 cells, edges included: a matching 4-hit candidate is found, all candidates physical, an empty superlayer gives nothing in NCELL+1 cycles |
| `tb_dtam_correlator` | the exact output sequence and values for random candidate sets, cycle count, overflow counting |
| `tb_dtam_tpg` | whole chain at default parameters (60 cells per layer): correlated 4+4 primitive within 3 counts in time and position and 0.25 counts per layer in slope; 3-hit candidates used in correlations; no 4+4 match across 200 counts; unphysical hypotheses rejected; buffer overflow on noise |

Two further testbenches run the whole generator on the measurements the
method was evaluated with. Both smear every drift time with a Gaussian of
250 um, a typical single-hit resolution of drift cells that is this
design's assumption, not a measured value:

| testbench | workload | result |
|---|---|---|
| `tb_wl_resolution` | 300 muons crossing both superlayers; the primitive closest in position to the true track is kept | SL1 4-hit time resolution 2.83 ns (about 3 ns reported for the method), SL1 4-hit slope resolution 9.6 mrad (about 7 mrad reported for a fit of clean hits), correlated 4+4 time resolution 2.07 ns (below 3 ns reported), correlated slope resolution 0.88 mrad (below 1 mrad reported) |
| `tb_wl_cosmic` | the first cosmic-ray test: only cells 1-4 of SL1 and cells 17-20 of SL1 and SL3 are connected, muons arrive at random times and up to 35 degrees | every muon with 4 connected SL1 hits triggers in both regions; every muon with 4+4 hits in cells 17-20 gives a correlated primitive; cells 1-4 give SL1 primitives only |

The resolution figures are checked against limits (SL1 below 4 ns and
12 mrad, correlated below 3 ns and 1 mrad) and depend on the assumed hit resolution.

To run one, for example the end-to-end test:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/dtam_pkg.sv tb/dtam_tb_pkg.sv tb/tb_dtam_tpg.sv --top-module tb_dtam_tpg
./obj_dir/Vtb_dtam_tpg
```

The testbenches use only `$urandom`, so they run in two-state simulators. All
of them finish within seconds.

After a generic synthesis most of the flip-flops of the top level are the
latched hits of both superlayers (2 x 240 cells x 18 bits) and the two
candidate buffers (2 x 64 x 104 bits).
