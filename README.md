# EventShiftFlow core: velocity from diagonal lines in a shifting bit grid

An event camera reports brightness changes as a sparse stream of
`(t, x, y, p)` events. This core estimates the motion of edges in that stream
without frames, floating point or division. The idea is to collapse the
events onto each sensor axis and slice time into bins. Each bin becomes a
one-bit row per axis: which columns (or rows) saw enough events. These rows
are stacked into a short history, the *occupancy grid*. An edge moving at a
constant `j` pixels per bin draws a straight diagonal line through that grid.
Estimating its velocity then means finding which of a few fixed slopes best
matches the set bits behind each newly active pixel. Only counters, shift
registers and comparators are needed.

The x axis (240 columns) and the y axis (180 rows) are handled by two
identical pipelines. A small association stage pairs each horizontal
detection with the vertical motion seen in the same column. The RTL is
SystemVerilog (IEEE 1800-2017) and synthesizable. The defaults are
240 × 180 pixels, a 16-bin history (`L`) and 31 hypotheses `j = -15 … +15`
(`J = 15`).

```
 events ──► FIFO ──┬─► x accumulator ─► x occupancy grid ─► x scorer ─┐
 (valid/ready)     │        ▲ bin_done                               ├─► association ─► LUTs ─► 2D output
                   ├─► y accumulator ─► y occupancy grid ─► y scorer ─┘        ▲
                   └─► per-pixel event map (two banks) ───────────────────────┘
 bin timer ◄── density controller (x occupancy popcount)
```

## 1. Binning: from events to occupancy bits

`esf_bin_timer` counts clock cycles. When the count reaches `dt_cycles`,
it raises `bin_done` for one cycle and restarts. This uses one compare and
one reset, with no modulo. The event timestamps are not used for binning:
the bin is defined by the arrival clock.

`esf_event_accum` holds one 8-bit counter per pixel of its axis. The x
instance counts events by column, ignoring y and polarity. The y instance
counts them by row. At `bin_done` every counter is compared with `theta_e`.
A counter at or above `theta_e` gives a `1` in the occupancy vector. All
counters are then cleared. The vector appears one cycle later, marked by
`occ_valid`. Counters saturate at 255 rather than wrapping.

`esf_event_fifo` sits in front of the accumulators. Its input is a
valid/ready port that takes 64-bit event words, laid out as
`{t[31:0], x[15:0], y[14:0], p}`. The top does not read the FIFO in the
`bin_done` cycle. The event that would have arrived on the bin edge waits one
cycle and counts toward the next bin. No event is lost and none is split.

## 2. The occupancy grid

`esf_occ_grid` stores `N` shift registers of `L` bits each. On every new
vector, all of them shift by one place at once. The new bit enters column
`L-1` and the oldest column `0` drops out. `grid[x][L-1]` is therefore the bin
that just closed and `grid[x][0]` the one `L-1` bins earlier. Every bit is a
register, so any number of lanes can read it in the same cycle. For
240 × 16 this costs 3,840 flip-flops per x axis.

## 3. Scoring a pixel: hypothesis lanes

This is the core of the design, and the part that needs the most care.

Every pixel `x0` that is occupied in the newest column becomes an *anchor*.
Suppose an edge reached `x0` moving `j` pixels per bin. Then one bin earlier
it was at `x0 - j`, two bins earlier at `x0 - 2j`, and so on. Hypothesis `j`
is scored by walking that diagonal backwards through the grid:

| step `h` | grid cell read | meaning |
|---|---|---|
| 0 | `G[x0, L-1]` | the anchor itself (always 1, not counted) |
| 1 | `G[x0 - j, L-2]` | one bin earlier |
| … | … | … |
| L-1 | `G[x0 - j(L-1), 0]` | oldest bin held |

Two counts are kept per hypothesis:
- `R_j` is how many of the cells read were occupied.
- `H_j` is how many steps stayed inside the sensor, i.e. `0 <= index < N`.

Fast hypotheses leave the sensor early, so their `H_j` is small.

`esf_hyp_lane` is one hypothesis. It has a signed index register, loaded
with `x0 - j` and decremented by `j` each step. It also has a bounds
comparator, a 5-bit `R` counter and a 4-bit `H` counter. `esf_scorer`
instantiates `2J+1 = 31` lanes. Every cycle it feeds them all the same grid
column and lets each pick its own bit. All hypotheses of an anchor are
therefore scored in parallel in `L` cycles: 1 load cycle plus 15 steps.

The trace is indexed one column later than a literal reading of the
original algorithm description. That description reads `G[x0 - jh, L-h]`
for `h = 1 … L`. On a grid that has already shifted, that form would spend
its first step on the anchor's own bin. It would also need a fifth bit in
`H`. The form used here, `G[x0 - jh, L-1-h]` for `h = 1 … L-1`, looks at
exactly the `L-1` older bins in the grid. It matches the incremental form of
the same algorithm, in which `G[x0, L-1]` is the newest bit of a trace, and
it keeps `H <= 15`.

### Choosing the winner

`esf_cmp_tree` is a binary tree of pairwise comparisons with a register
after every level. 31 leaves give 5 stages. Two rules come before the score:
- An entry with `H_j < beta` is invalid and never beats a valid one. This
  stops a two-step trace from winning with a perfect 2/2.
- Between equal scores, the smaller `|j|` wins, favouring slow motion when
  the evidence is ambiguous. Between `+j` and `-j`, the negative one wins.
  This last tie-break is this design's own choice.

The score itself is selected at run time with `cfg.mode`:

- `SCORE_RAW` compares `R_j` directly. The winner is reported as a hit if
  `R > theta_s`.
- `SCORE_NORM` compares the occupied fraction `R_j/H_j`. It does this
  without dividing: `a` beats `b` if `R_a·H_b > R_b·H_a`, a 5×4-bit product on
  each side. The winner is a hit if `R·16 > theta_s·H`, the division-free
  form of `R/H > theta_s/L`. This mode does not favour slow hypotheses just
  because they stay in bounds longer, and it is the default.

### Timing and throughput

One anchor occupies the scorer for exactly `L + ceil(log2(2J+1))`
= 16 + 5 = 21 cycles:
- cycle 0 picks the lowest pending anchor and loads the lanes;
- cycles 1–15 trace;
- cycle 16 presents the leaves to the tree;
- five cycles later the result leaves the tree, in the same cycle in which
  the next anchor is loaded.

A bin with `n_a` occupied pixels is scored in `21·n_a + 1` cycles. That is
at most 5,041 cycles (about 50 µs at 100 MHz), against bins of
milliseconds. Every anchor produces one `det_valid` word:
`(x0, j*, R, H, det_hit)`.

If a bin closes while the previous one is still being scored, the scorer
drops the unfinished bin, pulses `overrun` and starts again. The grid
itself shifts regardless. At realistic bin lengths this cannot happen. The
reduced-size end-to-end test provokes it on purpose.

## 4. Adaptive bin length

`esf_density_ctrl` counts the ones of each new x occupancy vector. The band
is 10 % to 40 % of `N`, which is 24 to 96 pixels for the x axis:
- Below 10 %, too few pixels qualify and the controller doubles `dt`.
- Above 40 %, the grid fills up and every slope looks alike, so it halves
  `dt`.

The result is clamped to `[DT_MIN, DT_MAX]`, 5 ms to 50 ms at 100 MHz. After
every change, the controller leaves `dt` alone for `HOLD_BINS` (8) bins.
Without this hold, the grid would mix bins of different lengths for a long
time and the controller could oscillate. Until the first change, `dt`
follows the host value `cfg.dt_init`. With `cfg.adapt_en = 0`, it always
does. Because `j` is measured in pixels per bin, a host that converts `j` to
physical velocity must use the current `dt_cycles`. The core exports it for
this reason.

## 5. Joining the axes: the association stage

The two axis pipelines know nothing of each other:
- the x scorer says "column 57 moves +3 per bin";
- the y scorer says "rows 40 to 69 move +2 per bin".

`esf_y_assoc` combines them per x detection. For a detected column `x0`, it
takes the rows that had events in that column during the same bin. Of
those rows, it keeps the ones with a y detection and reports the median of
their `j_y`.

Doing this needs the set of rows per column. The block keeps a full event
map: one bit per pixel, set by any event in the bin. There are two banks,
240 × 180 bits each. Events of the running bin write one bank while the
previous bin's bank is read. `bin_done` swaps and clears them. This map is by
far the largest storage in the core: 86,400 bits, against about 10,000 for
everything else. A more frugal implementation would need to give up some
exactness.

During scoring, the block records every passing x detection in a
per-column table and every passing y detection in a per-row table. After
both scorers have finished, it walks the marked columns, lowest first. Each
column takes two passes:

1. **Row pass** (`NY` cycles, one row each):
   - count the rows of the column that had events (`out_ny`);
   - remember their median position (`out_y`);
   - add the `j_y` of each such row that has a y detection to a 31-bin
     histogram.
2. **Histogram pass** (`2J+1` cycles): walk the histogram in `j` order
   until half the entries are passed. This gives the lower median `j_y`
   without sorting.

One column costs `NY + 2J + 3` = 213 cycles. Even 240 detected columns
finish in about 51,000 cycles. If no row of the column has a y detection,
`out_jy_ok` is low. A bin that closes while association is still running is
abandoned, and `overrun_assoc` pulses.

## 6. Velocity tables

`esf_vel_lut` maps a hypothesis `j` to a 16-bit velocity word. There is one
table per axis, written by the host through `lut_wr_*`. After reset, entry
`j` holds `j`, so the outputs are in pixels per bin. A host that wants
px/s writes `j / dt` for its chosen `dt`. There is no divider in the core.

## 7. Top level and interface summary

`esf_top` wires the blocks as in the diagram above. Its ports are:

| group | signals | notes |
|---|---|---|
| events | `ev_valid`, `ev_ready`, `ev_data` (64 bit) | valid/ready |
| configuration | `cfg` (`esf_pkg::esf_cfg_t`) | `dt_init`, `theta_e` (8 b), `theta_s` (5 b), `beta` (4 b), `mode`, `adapt_en`; read continuously |
| tables | `lut_wr_en`, `lut_wr_axis` (0 = x), `lut_wr_j`, `lut_wr_data` | host writes |
| 2D result | `out_valid`, `out_x`, `out_y`, `out_jx`, `out_jy_ok`, `out_jy`, `out_vx`, `out_vy`, `out_ny` | one word per passing x detection |
| x result | `xdet_valid`, `xdet_hit`, `xdet_x`, `xdet_j`, `xdet_r`, `xdet_h` | every scored column, for single-axis use |
| status | `dt_cycles`, `density`, `adj_up`, `adj_down`, `bin_done`, `bin_index`, `overrun_x`, `overrun_y`, `overrun_assoc`, `assoc_done` | observation |

The y pipeline's raw detections are used only by the association and are
not brought out. Reset is asynchronous and active low. Everything runs on
one clock.

Suggested starting configuration for a 240 × 180 sensor at 100 MHz:
`dt_init = 4_000_000` (40 ms), `theta_e = 80`, `theta_s = 8`, `beta = 4`,
`mode = SCORE_NORM`. These are the `esf_pkg::DEF_*` constants. Longer bins
need a proportionally higher `theta_e`.

### Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `esf_top` | `NX`, `NY` | 240, 180 | sensor size |
| | `L` | 16 | grid depth (bins of history) |
| | `J` | 15 | largest hypothesis; `2J+1` lanes per axis |
| | `CNT_W` | 8 | event counter width |
| | `FIFO_DEPTH` | 16 | input FIFO words |
| | `DT_MIN`, `DT_MAX` | 500,000, 5,000,000 | adaptation limits in cycles |
| | `HOLD_BINS` | 8 | bins without change after an adaptation |
| | `VW` | 16 | velocity word width |

The counter widths `RW = ceil(log2(L+1))` and `HW = ceil(log2(L))` follow
from `L`. Keep `J <= N/L`: a larger `|j|` leaves the sensor within fewer than
`L` steps from any anchor. The y axis uses the
same `J = 15` although `180/16` is only 11; its fastest lanes simply stay
invalid more often (`H < beta`).

## 8. Departures and open points

- **Trace indexing** is shifted by one column relative to the literal
  formula (section 3). Scores therefore cover `L-1 = 15` older bins.
- **Association storage** is a full double-buffered pixel map (section 5).
  How the set of rows per column is recorded is this design's own choice.
- **Thresholds** are integers. A score threshold of `0.3·L` (4.8) must be
  rounded; the default is 8 (`0.5·L`), the value used for recorded sensor
  data.
- **The adaptation step** (×2 / ÷2), the 8-bin hold, and the choice of the x
  axis to drive it are this design's own choices. Only the 10–40 % band is
  given.
- **Overrun handling** (drop the unfinished bin and pulse a flag) replaces
  the assumption that a bin never closes during scoring.
- **Not included:**
  - the serial front end that turns a UART byte stream into events;
  - the host that converts `j` to velocity and picks the configuration;
  - the single-cycle-per-pixel *incremental* scorer, which keeps an
    `N × (2J+1)` array of running scores instead of re-tracing;
  - the sequential five-hypothesis scorer of the small FPGA prototype.

## 9. Verification

Each block has a self-checking testbench in `tb/` that compares it with an
independent model written in the testbench. Each prints
`TB_RESULT checks=… failures=…`. Each testbench was also run against a
deliberately broken copy of its block, and in every case it reported
failures.

| testbench | what it checks |
|---|---|
| `tb_esf_event_fifo` | random valid/ready traffic against a queue model; full/empty, level, data order |
| `tb_esf_bin_timer` | pulse period for several `dt`, including changes mid-bin |
| `tb_esf_event_accum` | counts, the `>= theta_e` boundary, saturation, clearing, out-of-range events |
| `tb_esf_occ_grid` | shift order and hold against a model grid |
| `tb_esf_density_ctrl` | up/down steps, clamping, hold period, band edges |
| `tb_esf_hyp_lane` | R and H for every `j` and many anchors against a direct trace |
| `tb_esf_cmp_tree` | random leaf sets in both modes at a 7-leaf size; beta rule, tie rules, one cycle per stage |
| `tb_esf_scorer` | full default size: every anchor's winner and hit flag against a reference scorer; 21-cycle spacing; `21·n_a + 1` total |
| `tb_esf_axis_pipeline` | moving features through accumulator, grid and scorer |
| `tb_esf_y_assoc` | medians, median row and row count against a counting model; both map banks; overrun |
| `tb_esf_vel_lut` | reset contents, writes, out-of-range reads |
| `tb_esf_top` | reduced size (32 × 24, `L = 8`, `J = 3`): moving shapes end to end. It counts FIFO stalls, hits and rejects, 2D outputs, table writes, adaptation up and down, and overruns, and fails if any never occurs |
| `tb_esf_top_full` | the top at its default parameters (240 × 180, `L = 16`, `J = 15`) with a 30 × 30 square outline moving (+3, +2) px per bin. Every 2D result must give `j_x = 3`, `j_y = 2`, 30 rows and the expected median row, 21 cycles apart |
| `tb_esf_top_bars` | the top at its default parameters in the raw-score configuration (`beta = 8`, `theta_s = 5`): three 2-pixel-wide bars moving +5, -3 and 0 px per bin, with about 5 % noise events. Every scored column must be a bar column with the bar's `j` and a full trace (`R = H = 15`); every 2D result must give `j_y = 0`, 40 rows and median row 79 |

The two full-size tests use a short run-time bin (20,000 cycles) so that 18 bins
simulate in seconds. Nothing in the hardware depends on the bin length
beyond the counter width.

To run a testbench with Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal \
    rtl/esf_pkg.sv $(ls rtl/*.sv | grep -v esf_pkg) tb/tb_esf_top_full.sv \
    --top-module tb_esf_top_full -Mdir obj_full
./obj_full/Vtb_esf_top_full
```

The package must be compiled first. Every testbench has a watchdog and
ends with `$finish`.

What has not been checked:
- agreement with a software model on recorded sensor data;
- timing closure on any device;
- the cost of the two-bank event map in FPGA block RAM.
