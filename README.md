# Online baseline correction for a GEM time projection chamber readout unit

In a time projection chamber read out with GEM foils, each pad's signal has two
artefacts that move its baseline. The first is the **common-mode effect**.
Charge arriving on some pads couples capacitively through the last GEM
electrode, so every other pad of the same stack sees, in the same time bin, an
undershoot of opposite sign. Its size on a given pad scales with that pad's
capacitance, which is measured as its *normalised pulser charge* `k_pulser`.
The second is the **ion tail**. Ions drifting slowly away after the
amplification leave a small positive tail after each pulse, lasting several
microseconds. Both must be removed before zero suppression. Otherwise the
threshold cut loses real charge (undershoot) or keeps noise-free tail samples,
which inflates the data volume.

This repository holds synthesizable SystemVerilog for the correction chain of
one readout unit (about 1600 pads, sampled every 200 ns):

```
 ADC samples ──► pedestal_sub ──► cm_correction ──► it_filter ──► zero_suppression ──► kept samples
 (pad, tbin,      q = adc-ped      remove common-    exponential     q > thr
  10-bit adc)                      mode baseline     ion-tail filter
                                   (whole time bin)  (per pad)
```

The two corrections follow published reference algorithms, given as
pseudo-code for the ALICE TPC readout. Everything about how they are mapped to
hardware is this design's own, and is marked as such below: number formats,
schedule, handshakes, random-number generator, median search and map loading.

## Files

| file | content |
|---|---|
| `rtl/tpc_bc_pkg.sv` | number formats, `sample_t`, settings struct `cm_cfg_t`, map selector, rounding/saturation helpers |
| `rtl/pedestal_sub.sv` | pedestal subtraction with a per-pad pedestal map |
| `rtl/cm_correction.sv` | common-mode correction (frame buffer, empty-pad selection, mean/median estimator, correction) |
| `rtl/it_filter.sv` | per-pad exponential ion-tail filter |
| `rtl/zero_suppression.sv` | threshold cut with seen/kept counters |
| `rtl/baseline_chain_top.sv` | the chain above, with one shared map write port |
| `tb/tb_ref_pkg.sv` | reference models used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, the end-to-end test of the chain, and a toy-detector workload |

## The common-mode correction

### What it computes

The undershoot on pad `p` in time bin `t` is `k_pulser[p] · B(t)`, where
`B(t)` is the same for every pad of the readout unit. The block estimates
`B(t)` from pads that carry no signal in that time bin, and subtracts
`k_pulser[p] · B(t)` from every pad. For each time bin:

1. For every pad compute the pulser-normalised charge `s[p] = q[p] / k_pulser[p]`.
2. **Empty-pad selection.** Pad `p` counts as empty if both tests pass:
   * the threshold test `q[p] <= Q_thr1`;
   * the neighbour test. `nPadsRandom` other pads `r` are picked at random. At
     least `nPadsMin` of them must satisfy `|s[p] − s[r]| < Q_thr2`.

   The threshold test alone would accept a pad sitting on the decaying tail of
   an earlier pulse. The neighbour test rejects it, because its `s` differs
   from that of most pads.
3. **Baseline.** `B` is the mean of `s[p]` over the empty pads, or
   (selectable) their median.
4. **Optional second iteration.** The selection is repeated with the threshold
   test replaced by `q[p] − B·k_pulser[p] <= Q_thr1`. This rejects pads with
   small signals that the first pass let through. `B` is then recomputed from
   the new selection.
5. **Correction.** `q_out[p] = q[p] − B · k_pulser[p]` for every pad.

If no pad is found empty, `B = 0`. With `cfg.enable = 0` the block passes the
samples through unchanged. The settings `nPadsCRU`, `nPadsRandom`, `nPadsMin`,
`Q_thr1`, `Q_thr2`, the estimator and the iteration count are run-time fields
of `cm_cfg_t`. Typical values: `nPadsRandom` about 10 (up to `N_RND_MAX = 16`
here), `nPadsMin` about half of that, `Q_thr1` about twice the noise, `Q_thr2`
about the noise. One published setting is 6 / 4 / 2 ADC / 2 ADC with the
two-pass median.

### How the hardware does it

Every step needs the whole time bin, so the block first buffers a frame (all
pads of one time bin). It then makes several passes over the buffer, one pad
per clock in each:

| phase | clocks | work |
|---|---|---|
| LOAD | `n_pads` | accept samples (`in_ready` high only here, any pad order); store `q` and `s = q · (1/k_pulser)` |
| SEL | `n_pads` | for pad `p`: threshold test, all `nPadsRandom` neighbour comparisons in parallel, count; accumulate sum/count, mark candidate |
| MEAN | `Q_W+PAD_W+1` = 28 | restoring division sum/count, one quotient bit per clock |
| MED | `Q_W · n_pads` = 16 · `n_pads` | bitwise radix search for the median (below) |
| NEXT | 1 | start the second SEL pass or go to OUT |
| OUT | `n_pads` | emit `q − round(B·k_pulser)` for pads 0 … `n_pads−1`, then pulse `frame_done` |

One of MEAN or MED runs per pass. It is skipped if the pass found no empty
pad. A 1600-pad time bin therefore keeps the block busy (`in_ready` low) for
1600 + 1629 + 1600 = 4829 clocks with the one-pass mean. With the two-pass
median it is busy for about 58 000 clocks. The end-to-end testbench checks
these counts.

**Division by k_pulser.** The reference algorithm divides by `k_pulser`. Here a
second pad map holds `1/k_pulser`, loaded together with `k_pulser`, and the
hardware multiplies. `s` is computed once per pad, when the sample arrives.

**Random pads.** Each comparison lane `i` has its own 16-bit Galois LFSR
(feedback mask `0xB400`, seeds `0xACE1 + i·0x3B5D`, with the low bit forced to
1). Every lane steps once per pad in every SEL pass. The partner of pad `p` is
`r = (p + 1 + ((lfsr_i · (n_pads − 1)) >> 16)) mod n_pads`. That is a random
distance of 1 … `n_pads−1`, so a pad is never compared with itself. The
partners' `s` values are read from the frame buffer in parallel, so the buffer
has `N_RND_MAX + 1` read ports.

**Median.** The median used is the lower median, element `(n−1)/2` of the
sorted selection. It is found without sorting. Each `s` is mapped to an
order-preserving unsigned key (sign bit flipped). The median is then built
from the top bit down. For bit `b`, one pass counts the candidates whose key
agrees with the bits already decided and has bit `b` = 0. If the wanted rank
is below that count, bit `b` of the median is 0. Otherwise it is 1 and the
count is subtracted from the rank. Sixteen passes give the exact median, using
one counter and no storage beyond the candidate flags.

**Mean.** `sum / count` is truncated toward zero.

### Throughput caveat

The block uses one engine that handles one pad per clock. It does not keep up
with a real readout unit, which must finish 1600 pads every 200 ns, i.e. 8
samples per ns. This design does not say how the real firmware parallelises
the work. Treat `cm_correction` as an exact, bit-true implementation of the
algorithm, not as a real-time one. Widening it would mean handling several
pads per clock in each pass and overlapping the LOAD of one frame with the
passes of the previous one. The structure of the passes would stay the same.

## The ion-tail filter

Storing every past pulse of every pad and evaluating exponentials would be too
expensive. The filter instead keeps **one number per pad**: `Q_corr`, the
pad's past input charge, decayed by `k2` per time bin. For every sample:

```
Q_out  = Q_in − k0 · k1 · (1 − k2) · Q_corr
Q_corr = (Q_corr + Q_in) · k2
```

* `k1`: the ion-tail fraction, i.e. the tail integral divided by the signal
  integral (per-pad map, typically 0.05 … 0.2).
* `k2 = exp(−slope)`: the tail's decay per time bin (per-pad map).
  Loading the same median `k1` and `k2` into every pad gives the simpler
  "fixed-to-median" correction, which leaves a somewhat larger bias.
* `k0 ≤ 1`: one global scale. A full correction (`k0 = 1`) slightly
  over-corrects sampled pulses; values of 0.8 … 0.95 are used.

A pulse of charge `S` leaves `S·k2^n` in `Q_corr` after `n` bins. The
subtracted amount `k1(1−k2)·S·k2^n`, summed over all `n`, is `k1·S`, which is
the tail integral. Without signal, `Q_corr` decays to zero and the filter
does nothing.

In hardware the three maps and the `Q_corr` memory are read in the same clock
as the sample arrives. The output and the new `Q_corr` are written on the next
edge, so the filter handles one sample per clock with one clock of latency.
Pads may come in any order. A per-pad "seen" bit, cleared by reset, makes each
pad's first `Q_corr` read as zero, so the 1600 × 40-bit state memory needs no
reset sweep. With `it_en = 0` the samples pass unchanged while `Q_corr` keeps
tracking, so the filter can be switched on without a transient.

The filter sits after the common-mode correction. The tail itself also causes
small common-mode undershoots on other pads, so the chain removes the
common-mode first.

## Pedestal subtraction and zero suppression

`pedestal_sub` subtracts a per-pad pedestal. The pedestal has 4 fractional
bits, so the sub-ADC part of the pedestal is removed as well. The stage is a
one-deep pipeline with valid/ready, and it stalls while the common-mode stage
is busy.

`zero_suppression` keeps a sample when `q > thr`. A threshold of 1.2 ADC is
`thr = 19` in 12.4 format. It counts samples seen (`n_in`) and kept
(`n_kept`), so the data reduction `1 − n_kept/n_in` can be read directly. It
is the plain threshold cut used to judge the corrections. Keeping the
neighbours of kept samples, and formatting the output, are not part of it.

## Number formats

| quantity | format | range |
|---|---|---|
| ADC sample | unsigned 10 | 0 … 1023 |
| charge `q`, thresholds, baseline `B`, `s` | signed 16, 4 fractional bits | ±2048 ADC, step 1/16 |
| pedestal | unsigned 14, 4 fractional bits | 0 … 1023.94 |
| `k_pulser`, `1/k_pulser` | unsigned 12, 10 fractional bits | 0 … 3.999 |
| `k0`, `k1`, `k2` | unsigned 18, 16 fractional bits | 0 … 3.99998 |
| `Q_corr` | signed 40, 16 fractional bits | ±8.4 · 10^6 ADC |

All right shifts round half up (`(v + 2^(sh−1)) >>> sh`). Every result that
is written back saturates. All of these formats are this design's choice.

## Interfaces

`baseline_chain_top`, parameters `N_PADS = 1600`, `N_RND_MAX = 16`:

* **Input:** `in_valid`, `in_ready`, `in_pad`, `in_tbin`, `in_adc`. Send all
  `cm_cfg.n_pads` pads of a time bin, each exactly once and in any order, then
  the next time bin. `in_ready` goes low while the common-mode stage processes
  a frame. The time bin is only a label that travels with the sample.
* **Pad maps:** `map_we`, `map_sel`, `map_addr`, `map_data` (18 bits, right
  aligned), one word per clock. `map_sel` chooses the map:

  | `map_sel` | map |
  |---|---|
  | `MAP_PED` | pedestal |
  | `MAP_KP` | `k_pulser` |
  | `MAP_INVK` | `1/k_pulser` |
  | `MAP_IT_FRAC` | `k1` |
  | `MAP_IT_SLOPE` | `k2` |

  The maps are written as registers/RAM and have no reset. Load every pad that
  is used before sending data.
* **Settings:** `cm_cfg` (`cm_cfg_t`), `it_en`, `k0`, `zs_thr`. They are
  static. Change them only when the chain holds no data.
* **Outputs:** `corr_valid`/`corr` carry every corrected sample before the
  threshold cut. `out_valid`/`out` carry the kept samples. Neither has back
  pressure. `frame_done`, `cm_baseline` and `cm_n_empty` report the
  common-mode estimate of each frame. `zs_n_in` and `zs_n_kept` are the
  zero-suppression counters.

`sample_t` is `{tbin[15:0], pad[10:0], q[15:0]}`.

## Where this departs from, or adds to, the reference algorithms

* The division by `k_pulser` is a multiplication by a stored reciprocal.
* The random pads come from per-lane LFSRs, and a pad is never compared with
  itself.
* The median is the lower median for an even count. The mean is truncated
  toward zero. An empty selection gives `B = 0`.
* The second iteration replaces the first selection. It is not merged with it.
* The common-mode block works on one pad per clock and is not real-time (see
  above).
* The filter's on/off switch keeps updating the state while off.
* The zero suppression is a bare threshold cut.
* The front-end link decoder, which turns the multiplexed front-end stream
  into pad samples, is not included, because its format is not available. The
  chain starts at decoded samples.

## Verification

Each testbench compares the module's outputs with models in `tb/tb_ref_pkg.sv`.
Those models are written from the algorithm description above with plain
integer or `real` arithmetic. Each testbench ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_pedestal_sub` | 2000 random samples under random output stalls; exact values, one-cycle latency, stall hold |
| `tb_cm_correction` | 27 frames of 64 pads, with mean, median, one and two passes, correction off, no empty pad, fewer pads than the buffer, and random settings. Checks every output bit-exactly, plus the baseline, the empty-pad count and the busy clocks per frame against the table above |
| `tb_it_filter` | 16 pads × 300 time bins of pulses carrying exactly the exponential tail the filter assumes; each output is checked against a double-precision model (±0.25 ADC). Also checks zero in gives zero out, pass-through, and that the tail is removed (residual below 5 %; observed about 0.02 %) |
| `tb_zero_suppression` | values at, just above and around 1.2 ADC; exact kept stream and counters |
| `tb_baseline_chain_top` | the full chain at default size (1600 pads). Ten time bins with pedestals, noise, pulses, ion tails and a common-mode undershoot of −0.5·`k_pulser`·(mean positive signal). Exact baseline and empty-pad count per frame; corrected samples within ±0.25 ADC; kept stream exact. Checks that back pressure, mean, median, second iteration, correction off, filter off, a frame without empty pads, kept and dropped samples, and visible tail corrections each occur |

`tb_toy_mc_workload` runs the chain at its default size on a toy detector
workload. It uses 1000 pads, clusters of 3 pads × 3 time bins, ~1 ADC noise,
and a common mode of −0.5·`k_pulser`·(mean positive signal). Every pad
carries its own ion tail. Besides the model checks, it measures the average
baseline shift on samples without true signal. One run gave (all values in ADC):

| effect, occupancy | uncorrected | mean | median | mean, 2nd it. | median, 2nd it. |
|---|---|---|---|---|---|
| common mode, 10 % | −0.98 | −0.06 | −0.01 | −0.05 | −0.01 |
| common mode, 20 % | −2.00 | −0.08 | −0.05 | −0.05 | −0.01 |
| common mode, 30 % | −2.88 | −0.11 | −0.03 | −0.08 | −0.05 |

The share of pads used for the baseline falls with occupancy. With the mean
it goes from 74 % to 60 % to 48 %. With the mean and a second iteration it
goes from 73 % to 60 % to 46 %. The second iteration always drops some
low-signal pads. These settings (6 random pads, at least 4 within 2 ADC,
`Q_thr1` = 2 ADC) and this simple cluster generator give lower shares than
published toy simulations of the same algorithm, which report about 88 % and
86 % at 10 % occupancy.

With only the ion tail at 30 % occupancy, the shift is +0.27 ADC with the
filter off. With the filter on (`k0` = 0.85), it is −0.014 ADC when each pad
has its own `k1`, `k2` ("pad-by-pad"). It is −0.070 ADC when every pad is
loaded with the median `k1` and `k2` ("fixed-to-median"). The filter supports
both ways of loading its maps. Without noise, a 1.2 ADC cut discards 74.8 % of
the samples of the bare signal. With the ion tail added, it discards 65.6 %.
With both effects and both corrections, it discards 74.4 %. For that last run,
the corrections use the two-pass median with 6 random pads, at least 4 of them
within 2 ADC, `Q_thr1` = 2 ADC, and `k0` = 0.8. The testbench checks these
trends, not the exact values.

Run one with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/tpc_bc_pkg.sv tb/tb_ref_pkg.sv tb/tb_baseline_chain_top.sv \
    --top-module tb_baseline_chain_top -o sim
./obj_dir/sim
```

For another testbench, replace the last source file and `--top-module`. The
full-size end-to-end run takes under a second, the workload about five seconds.

## Changing the design

* **Pad count:** `N_PADS` sizes all pad maps and the frame buffer. `PAD_W` in
  the package must cover it. At run time `cm_cfg.n_pads` may be smaller.
* **Comparison lanes:** `N_RND_MAX` sets the number of LFSRs, comparators and
  frame-buffer read ports. `cm_cfg.n_rnd` selects how many are used.
* **Precision:** the widths in `tpc_bc_pkg` are used everywhere. The
  reference models in `tb_ref_pkg` take `Q_FRAC = 4`, `KP_FRAC = 10` and
  16-bit coefficients as given, so change them together.
