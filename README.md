# Analytical Method trigger primitives for a drift-tube chamber

A CMS drift-tube (DT) chamber measures a muon crossing with up to eight
drift cells in its two r-phi superlayers (SL1 and SL3, four half-staggered
layers of 42 x 13 mm cells each). Each hit is only a wire number and a time.
The position of the track inside the cell is `v * (T - t0)` to the left or
right of the wire. The crossing time `t0` is not known in advance. The
*Analytical Method* treats `t0` as a third unknown, next to the position and
the slope. Three hits in different layers then fix the track exactly. Four
hits give a least-squares problem. Which hits can belong together, and on
which side of each wire, is found by trying every possibility.

This RTL builds that chain for the r-phi view of one chamber:

```
SL1 hits -> input buffer -> grouping -> fitter --\
                                                  correlator -> formatter -> 64-bit primitives
SL3 hits -> input buffer -> grouping -> fitter --/
```

## Units and conventions

* Times are in ns since the start of the LHC orbit, 17 bits wide.
* Positions are in µm, 23-bit signed.
* `tan(psi)` is Q4.12.
* The drift velocity is 54 µm/ns and the maximum drift time is 390 ns.
* Layers are indexed 0..3 (L1..L4), counting away from the interaction point.
* Wire `c` of layer `l` sits at `c*42 mm + (l odd ? 21 mm : 0)`. In half-cell units this is `p = 2c + (l & 1)`.
* SL1 and SL3 are 235 mm apart. Their wire-0 origins are assumed to line up; `SL3_X_OFF_UM` shifts SL3 if they do not.

## The fit (`am_fit_core`, `am_pkg::fit_coef`)

Each hit, under a laterality hypothesis `s_i = ±1` (+1 means right of the
wire), is turned into one number:

    y_i = w_i + s_i * v * T_i = a + m * l_i + s_i * tau

Here `a` is the track position at layer 0 and `m` is the displacement per
layer, so `tan psi = m / 13 mm`. The third unknown is `tau = v * t0`. The
regressors `(1, l_i, s_i)` depend only on which layers are used and on the
lateralities. That gives 16 x 16 = 256 possible normal matrices. For each one,
`fit_coef()` works out at elaboration time:

* the adjugate of the matrix, which gives integer weights per hit;
* rounded reciprocals `2^24/D`, `2^24*4096/(13000 D)` and `2^24/(54 D)` of its determinant `D`.

At run time the fit is three multiply-accumulates, three reciprocal products
and a chi2 sum. A hypothesis with every hit on the same side has `D = 0` and
is rejected. A solution counts as *physical* when every drift time `T_i - t0`
lies between -2 and 392 ns. To keep the words narrow, times are taken relative
to the earliest hit and positions relative to the first used wire.

`am_fitter` tries the 16 hypotheses, one per clock:

* For a 4-hit candidate, it keeps the physical hypothesis with the smallest chi2. The result has quality 3.
* For a 3-hit candidate, it emits every physical hypothesis. Each has quality 1.

## Grouping (`am_grouping`)

The hits of one event are written into a hit memory that holds one entry per
cell. If a cell is hit twice, the earliest hit is kept. The end-of-event
marker starts a scan.

The scan moves a 10-cell region across the superlayer. The region is an
inverted pyramid: one cell in L4, two in L3, three in L2 and four in L1. It
contains every path through neighbouring half-staggered cells that ends in its
L4 cell. All 120 ways of choosing at most one cell per layer are checked in
parallel. A combination is a candidate when all of these hold:

* it uses three or four layers;
* any two used layers `i < j` are at most `j - i` half cells apart;
* its hit times span at most 390 ns.

Two extra rules remove duplicates:

* A 3-hit combination is dropped if a 4-hit candidate in the same region extends it.
* A combination without an L4 hit is taken only from the region in which it uses the right-hand L3 cell. Such a combination fits two overlapping regions, so this keeps it from being emitted twice.

Candidates leave one per clock. A region with no candidates costs one clock.

## Correlation (`am_correlator`)

The correlator buffers up to 16 segments per superlayer. It starts once both
superlayers have finished the event.

SL1 segments are matched in two passes: the 4-hit segments first, then the
3-hit ones. Each SL1 segment is paired with the compatible SL3 segment that
gives the best correlated quality, where compatible means the times agree
within ±25 ns. A tie goes to the smallest time difference. A pair gives one
primitive:

* `t0` is the mean of the two times;
* `x0` is the mean of the two positions;
* `tan psi` is `(x3 - x1) / 235 mm`;
* the quality is 6 (3+3 hits), 7 (4+3) or 8 (4+4).

Both segments of a pair are retired. Segments left unmatched go out as
uncorrelated primitives (quality 1 or 3). Each one's position is first carried
along its own slope to the chamber centre plane.

## Output word (`am_tp_formatter`)

* `phi = atan((x0 - X_CENTER_UM) / R_UM)` and `psi = atan(tan psi)`, both computed with a 20-step CORDIC.
* `phi_B = psi - phi`.
* `phi` uses 65536 counts per 0.5 rad and `phi_B` uses 4096 counts per 2 rad.
* `BX = round(t0 / 25 ns)`.

Layout of the 64-bit word:

| bits  | field   |
|-------|---------|
| 63:60 | quality |
| 59:58 | SL (01 = SL1, 10 = SL3, 11 = both) |
| 57:46 | BX      |
| 45:29 | t0 (ns) |
| 28:12 | phi     |
| 11:0  | phi_B   |

## Interfaces and timing

`am_chamber_tp` takes a 26-bit word per superlayer, with no back-pressure.
The word is either a hit `{layer, wire, time}` or an end-of-event marker. The
outputs are:

* a valid/ready stream of `tp_word_t`;
* `evt_done`, which pulses once per event;
* saturating counters for input-buffer overflow, for segments dropped at the correlator and for correlated primitives.

Costs per event:

* collecting: one clock per hit;
* scanning: NCELL+1 region steps, plus one clock per candidate;
* fitting: 17 clocks per 4-hit candidate and 16 per 3-hit candidate;
* correlating: one clock per SL1×SL3 pair compared;
* formatting: one clock of latency.

## What departs from the published algorithm

* Processing is framed by events. The original runs continuously on a hit stream, letting hits expire after the drift time.
* Not built:
  * the *confirmation* step (qualities 2 and 4);
  * the r-z superlayer;
  * RPC-assisted primitives;
  * the unspecified cleaning filters.

  The published firmware also lacks the first three.
* These choices are this design's own:
  * the region shape and geometric rule;
  * the one-hit-per-cell memory;
  * the drift-time tolerance;
  * the buffer sizes;
  * the number of cells per layer (96);
  * the chamber radius and centre used for `phi` (`R_UM`, `X_CENTER_UM`);
  * the bit layout.
* Arctangents are computed, not approximated by small angles. Fixed-point rounding (reciprocal method, 1 ns times) keeps fitted positions within the 120 µm and times within the 2 ns that the fit testbench allows on noise-free tracks.

## Verification

Each testbench in `tb/` checks itself and ends with `TB_RESULT checks=N failures=M`.

* `tb_am_fit_core` fits random tracks, built with real arithmetic. It checks t0 to ±2 ns, x0 to ±120 µm and `tan psi` to ±0.01. It also checks that the chi2 minimum falls at the true laterality.
* `tb_am_grouping` compares the candidates against a brute-force model, with random output stalls.
* `tb_am_hit_fifo` checks ordering, overflow and the marker-replacement policy.
* `tb_am_chamber_tp` runs the whole chain at its default parameters, using correlated, partly correlated and SL1-only tracks plus a noise burst that overflows the input buffers. It checks quality, t0, BX, phi (±8 LSB) and phi_B, and requires every mechanism to occur.

To run one with plain Verilator:

    verilator --binary --timing --assert -Irtl rtl/am_pkg.sv -y rtl tb/tb_am_chamber_tp.sv --top-module tb_am_chamber_tp
    ./obj_dir/Vtb_am_chamber_tp
