# Trackless luminous-region monitor from VELO cluster counters

The LHCb vertex detector (VELO) reconstructs pixel clusters in its readout
FPGAs at the full collision rate, about 10^11 clusters per second. If the
clusters falling into a few small, fixed detector regions are simply counted,
the counts already carry the transverse position of the luminous region (the
volume where the two beams collide): when the beams move by a few micrometres
towards one side, the regions on that side see slightly more clusters and the
regions on the other side slightly fewer. A fixed linear combination of the
counts, normalised to their total, therefore follows the beam position, with no
track or vertex reconstruction at all.

This RTL implements that monitor as one synthesizable block:

1. **Counting.** 208 counters, four on each of the 52 VELO half-modules, count
   cluster centroids falling into programmable rectangles on the sensors.
2. **Windowing.** After a programmed number of collision events the counts
   are frozen and the counters restart.
3. **Estimation.** From each window, six position estimates are computed:
   horizontal (x) and vertical (y) from the whole VELO, and x and y from each
   half of the VELO separately. Each estimate is a median-based outlier
   cleanup, then a weighted sum of the normalised counts, then a straight-line
   calibration.

The weights, calibration constants and region shapes are all loaded at run
time. The offline work that produces them is not hardware and is not part of
this RTL: a principal-component analysis of simulated counts, and a fit
against a track-based reference during a beam scan.

## Counter layout

Each VELO station is two half-modules (one on each side of the beam) of four
sensors each. Counting regions sit on four sensors per station, called Up,
Down, Left and Right after where they lie around the beam. Each of these
sensors carries two regions: an *inner* one close to the beam and an *outer*
one further away. That gives 2 rings x 4 positions x 26 stations = 208
counters. In the reference layout each region is 110 x 20 pixels.

Counters are numbered

    k = 4*module + 2*slot + ring

where `module` is the half-module 0..51, `slot` (0 or 1) says which of the
module's two counting sensors it is, and `ring` is 0 for inner and 1 for outer.
With the usual naming, Up regions are on odd modules, slot 0; Down on even
modules, slot 0; Left on even modules, slot 1; Right on odd modules, slot 1.
The ring is bit 0 of `k`. The estimator relies on this, because it takes the
median separately over the even-numbered (inner) and odd-numbered (outer)
counters.

A region is a rectangle `{enable, sensor, col_lo..col_hi, row_lo..row_hi}` in
sensor pixel coordinates, bounds included. A centroid is `{valid, sensor[1:0],
col[9:0], row[7:0]}`, which assumes a sensor of three 256 x 256 pixel chips
(768 x 256 pixels) and integer centroids. Which physical sensor carries which
counter is set through the `sensor` field. The layout above is how the
testbenches program it; the hardware does not fix it.

## The estimator arithmetic

This is the part that needs the most care. For estimator `e`, with counts
`c_k` of one window:

1. **Ring medians.** `m_in` is the median of the 104 inner counters and
   `m_out` that of the 104 outer counters. With an even count, the *lower*
   median is taken: rank 51 from 0.
2. **Outlier replacement.** A counter outside its ring median ±50 % is
   replaced by that median: `c'_k = m` if `|c_k - m| > m/2`, else `c_k`. This
   covers dead channels (count 0) and hot ones. For integer counts the test is
   exactly `c < m - floor(m/2)` or `c > m + floor(m/2)`.
3. **Projection.** `num = Σ incl_ek · w_ek · c'_k` and
   `den = Σ incl_ek · c'_k`. The weights `w_ek` form the first principal
   component of the normalised count vector, learnt offline from simulation.
   The include bit `incl_ek` selects the counters an estimator uses: all of
   them for the whole-VELO estimators, and only one half's for the half-VELO
   ones.
4. **Normalisation.** `t_e = num / den`. This is the projection of the count
   vector normalised to unit sum. Dividing each count by the sum and then
   projecting gives the same result as projecting and dividing once, which is
   what the hardware does. Normalising also removes the dependence on the
   luminosity and on the window length, so counts need not be divided by the
   number of events. The mean that principal-component analysis subtracts
   from the data only adds a constant to `t_e`, and that constant goes into
   the calibration offset.
5. **Calibration.** `pos_e = alpha_e · t_e + beta_e`. The constants come from a
   fit against a reference position during a beam displacement scan.

### Number formats

| quantity | format |
|---|---|
| counter `c_k` | 32-bit unsigned, saturating |
| weight `w_ek` | 16-bit signed Q1.15 (the weight vector has unit norm, so every component is in [-1, 1); typical magnitude 0.07, about 2300 LSB) |
| `num` | 56-bit signed (32 + 16 + 8 bits) |
| `den` | 40-bit unsigned |
| score `t_e` | 32-bit signed Q1.31: `trunc(num · 2^16 / den)`, saturated |
| `alpha`, `beta`, `pos` | 32-bit signed; `pos = floor(alpha · t / 2^31) + beta`, saturated |

The position unit is whatever the calibration constants are fitted in. At 1 nm
per LSB the range is ±2.1 m. The score resolution is 2^-31. A shift of the
luminous region changes the normalised counts by only a small fraction, so the
score needs many fractional bits. `alpha` then has to be large: a few times
10^8 in the testbench.

### Sequencing and latency

One multiplier is shared by all estimators, one counter per clock:

    start -> median scan (N/2 clocks, both rings at once)
          -> per estimator: 208 multiply-adds -> 72-clock divider -> calibration

From the clock edge that samples `start` to the one that raises `valid` there
are `N/2 + 1 + N_EST·(N + 76)` cycles: 1809 at the defaults. That is far below
any useful window. One millisecond is tens of thousands of collision events,
and even at a 10 MHz clock it is 10,000 cycles. If a new window closes while a
pass is still running, the pass is abandoned, the new counts are used and
`overruns` increments.

Assertions in `position_estimator` check three rules: the divider is never
started while busy, the median scan has finished before the projection
starts, and `valid` is raised only at the end of a pass.

The median scan uses rank counting, not sorting. In step `p`, counter `2p`
(inner) and counter `2p+1` (outer) are compared against all counters of their
ring in parallel. A candidate is the median when
`less <= 51 < less + equal`.

## Modules

| module | role |
|---|---|
| `lrm_pkg` | types (`cluster_t`, `region_t`), widths, register map |
| `region_counter_unit` | four counters of one half-module; `LANES` centroids per clock; one pipeline stage; snapshot on `snap` |
| `cluster_counter_bank` | 52 units, region configuration registers, read port |
| `acc_window` | counts events and closes the window after `win_events` events |
| `median_select` | ring medians by rank counting |
| `outlier_filter` | the ±50 % rule (combinational) |
| `weight_memory` | `N_EST x 208` words `{incl, weight}`, synchronous read |
| `pca_score_mac` | streaming `num`/`den` accumulator |
| `seq_divider` | restoring signed divider, 1 bit per clock |
| `calib_linear` | `alpha · t + beta`, one clock |
| `position_estimator` | median, filter, projection, division and calibration for all estimators |
| `lumi_region_monitor` | top: counters, window, configuration, estimator |

### Top-level interface (`lumi_region_monitor`)

- `clusters[52][8]`: centroids from the clustering stage, up to 8 per
  half-module per clock. At 10^11 clusters/s over 52 half-modules this needs
  a clock of about 240 MHz. A different rate or clock only changes `LANES`.
- `evt`: one pulse per collision event.
- `cfg_we`, `cfg_addr[15:0]`, `cfg_wdata[31:0]`: configuration writes.

  | address | content |
  |---|---|
  | `0x0000 + 2k` | `{col_hi[25:16], col_lo[9:0]}` of counter k |
  | `0x0000 + 2k + 1` | `{enable[31], sensor[17:16], row_hi[15:8], row_lo[7:0]}` |
  | `0x1000 + 256e + k` | `{incl[16], weight[15:0]}` of estimator e, counter k |
  | `0x2000 + 2e`, `+1` | `alpha_e`, `beta_e` |
  | `0x3000` | window length in events; 0 stops windowing and clears the partial count |

- `cnt_valid`, `cnt_rd_addr`/`cnt_rd_data`: the counts of the last window,
  valid two clocks after the closing event. Counts can also serve other uses,
  such as luminosity.
- `est_valid`, `est_pos[6]`, `est_score[6]`, `est_div0[6]`, `est_med_inner`,
  `est_med_outer`, `est_n_outliers`, `est_overruns`, `est_busy`: estimator
  results.
- `events_in_window`, `windows`: window status.

Estimator order, as the testbenches load the weights: 0 = x, 1 = y (whole VELO),
2 = x, 3 = y (odd half-modules, the +x side), 4 = x, 5 = y (even half-modules).

Counters keep counting while windowing is stopped. What they collect then
goes into the first window after windowing restarts.

## Where this departs from, or goes beyond, the description it follows

- **One block for the whole detector.** In the real system, clustering and
  counting run on many separate readout boards. Here all 52 half-modules feed
  one block with one common window strobe. How the boards are synchronised, and
  where the linear combination is evaluated, is not specified; here it runs
  next to the counters.
- **Window by events, not by time.** The reference accumulates over fixed
  times: 90 ms on a calibration fill, about 1 ms in nominal running. Here the
  window is a number of events, which equals a fixed time when the crossing
  rate is fixed.
- **Own choices** with no counterpart in the description: rectangular
  regions with an enable bit, the lane count, the centroid coordinate format
  (integer pixels, no sub-pixel bits), all word widths and fixed-point formats,
  saturation and rounding, the lower median, the median taken over the whole
  detector even for half-detector estimators, the register map, include bits
  for the half-detector estimators, sequential arithmetic with one shared
  multiplier, abandoning a pass on overrun, and synchronous active-low reset.
- **Not built:** the cluster finder that feeds the counters, the offline
  principal-component training, the calibration fit and the track-based
  reference. A longitudinal (z) estimator, which would need a cubic rather
  than a linear calibration, is not described in enough detail and is not
  built.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/lrm_ref_pkg.sv` holds
the independent reference arithmetic: sorting for the median, `2c < m` or
`2c > 3m` for outliers, and 128-bit and 64-bit integer models of division and
calibration.

- `tb_region_counter_unit`: random clusters against overlapping regions; a
  4-bit instance checks saturation; snapshot latency.
- `tb_cluster_counter_bank`: all 208 regions programmed through the
  configuration port; counts and read port checked for every counter.
- `tb_acc_window`, `tb_median_select` (random values, many ties, sorted
  input; latency), `tb_outlier_filter` (all band edges for small medians),
  `tb_weight_memory`, `tb_pca_score_mac`, `tb_seq_divider` (saturation,
  division by zero, latency), `tb_calib_linear`.
- `tb_position_estimator`: six estimators on synthetic counts with dead and
  hot counters; exact scores and positions, medians, outlier count, latency,
  overrun, and an estimator with no counters included.
- `tb_lumi_region_monitor`: end to end at the default size. It streams random
  clusters on all 416 lanes and checks every count and every estimate of each
  window. It makes each mechanism happen at least once: stopped windows, a
  dead half-module, a hot half-module, half-detector estimates, and an
  overrun. It runs in well under a second of simulation time after a
  half-minute build.

- `tb_lsc_scan`: a beam displacement scan through the whole monitor at its
  default size. In its rate model, the hit density in a region falls as
  `1/d^2` with the distance `d` between region and beam. Region centres sit at
  about 10 mm (inner) and 18 mm (outer) from the beam, one per quadrant. The
  test loads, as weights, the derivative of the normalised rates with respect
  to x or y, scaled to unit norm. That is the direction a principal-component
  analysis finds when only the beam position varies. It then fits the
  calibration to the noiseless model. With the beam stepped over ±1 mm and
  8000 events per step, the whole-detector estimates come back within about
  30 µm of the true offset. The half-detector y estimates are as good. The
  half-detector x estimates scatter by about 150 µm, because inside one half
  every region moves the same way in x and only the inner/outer rate ratio
  carries the signal. The test accepts 100 µm and 400 µm. These numbers
  belong to the toy model and its small statistics, not to the detector.

To run one testbench with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/lrm_pkg.sv tb/lrm_ref_pkg.sv tb/tb_lumi_region_monitor.sv \
        --top-module tb_lumi_region_monitor -Mdir obj
    ./obj/Vtb_lumi_region_monitor

Substitute the testbench name for the others; `-y` lets Verilator find the
modules each one uses.

The testbenches show that the hardware computes the arithmetic above exactly.
They do not show that the estimate tracks a real beam. The weights in the
tests only copy the sign pattern and magnitude of a horizontal estimator. The
physics performance depends on weights and calibration constants obtained
offline from simulation and from a beam scan.
