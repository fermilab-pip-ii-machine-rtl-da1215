# Removing 60 Hz ripple and noise from a digitized beam loss signal

Beam loss monitors in a machine protection system produce slow signals that
are digitized at 125 MS/s. Two kinds of noise ride on them. High-frequency
noise is easy to filter. Ripple from 60 Hz mains equipment and its harmonics
is harder, because it falls in the same frequency band as real beam losses.
A linear filter cannot separate the two.

This design separates them by shape and by time. The ripple repeats every
1/60 s, so the design learns its shape: it averages, point by point, many
past line periods into a RAM and subtracts the learned shape from the live
signal. A beam loss is sudden and does not repeat. Nonlinear filters detect
it and keep it out of the learned shape, then pass it to the output with
little delay.

The RTL follows the scheme published by J. Wu and A. Warner (Fermilab) in
"Fermilab PIP II machine protection system digitized data noise elimination
scheme and its FPGA implementation". The block structure, the two
recursions, the state names, the RAM size and the point count come from that
paper. The paper gives no bit widths, constants, switching rules or timing.
Those are this design's own choices, and they are marked as such below and
in each file's header.

## Data path

```
                  +------------------------------------------------+
 adc_data ---reg--+-------------------------------> (-) --> fast_recovery_integrator --> raw_sub_filtered
                  |                                  ^                         \--> loss
                  |                                  | baseline
                  +--> dual_tc_integrator --> deripple_baseline <--> baseline_ram (4096 words)
                         (nl_filter, nl_tracked)
```

All blocks run on one 125 MHz clock and accept one sample per clock
(`adc_valid`). The blocks are:

| module | role |
|---|---|
| `noise_elim_top` | wires the blocks together; the user registers are inputs |
| `dual_tc_integrator` | first-stage filter; gives a clean copy of the signal and a TRACKED flag |
| `deripple_baseline` | learns the ripple shape over line periods; read-modify-writes the RAM |
| `baseline_ram` | 4096-word simple dual-port RAM that holds one line period of baseline |
| `baseline_subtractor` | raw sample minus the baseline of the current point |
| `fast_recovery_integrator` | last-stage filter on the corrected signal |
| `nl_iir_core` | two-state discharging integrator that both filters use |
| `noise_elim_pkg` | the register struct `nl_cfg_t`, the state enum and the default constants |

The ADC is outside the design. Its samples enter on `adc_data` (14 bits,
unsigned).

## The two-state discharging integrator

Both filters are the first-order recursion

    y[k+1] = y[k] + A * (x[k] - y[k]),      A = 2^-shift

This is an exponential smoother with a time constant of about `2^shift`
samples. The accumulator is signed and has 24 fraction bits, so a shift of
up to 24 still moves it. The output `y` is the integer part of the
accumulator, taken with floor rounding.

The filter is nonlinear because `shift` depends on a state:

* **UNTRACKED**: the output is far from the input. The filter starts in this
  state after reset. It uses `cfg.shift_untracked`.
* **TRACKED**: the output is close to the input. It uses `cfg.shift_tracked`.

The paper says only that the filter goes TRACKED when the output is "close
enough" and UNTRACKED when a fast loss is seen. This design makes that a
threshold with a run length, so that one noisy sample cannot flip the state.
Let `e = x - y`, measured with the output before the update:

* In UNTRACKED, `cnt_track` consecutive samples with `|e| <= thr_track`
  switch the state to TRACKED.
* In TRACKED, `cnt_loss` consecutive samples with `|e| > thr_loss` switch it
  back to UNTRACKED.
* Any sample that breaks the run resets the counter.

The new shift takes effect from the sample after the switch. Setting
`thr_loss` above `thr_track` gives hysteresis. Both thresholds must be larger
than the peak noise, or the filter will never lock.

The two filters use the same core with opposite settings:

* **First stage (`dual_tc_integrator`)**: the long constant is used while
  UNTRACKED and the short one while TRACKED.
  * At start-up, the output creeps up to the signal slowly.
  * Once locked, the output follows the 60 Hz ripple while the high-frequency
    noise averages out.
  * When a beam loss pushes the input away, the filter goes UNTRACKED. The
    long constant then holds the output near the baseline.
* **Last stage (`fast_recovery_integrator`)**: the long constant is used while
  TRACKED, to smooth a stable input. The short one is used while UNTRACKED,
  so the output jumps to a loss within a few samples and drops back just as
  fast when the loss ends. `loss` is high while this filter is UNTRACKED.
  While no baseline exists, the filter is cleared and its output held at 0.

### Registers

Each filter has its own `nl_cfg_t`: `dtc_cfg` for the first stage and
`fr_cfg` for the last. The de-ripple weight has a 4-bit `b_shift`. The
package defaults below are this design's choices. The paper gives no values,
except B = 0.5 as an example.

| field | first stage | last stage | meaning |
|---|---|---|---|
| `shift_tracked` | 12 | 6 | A = 2^-shift while TRACKED |
| `shift_untracked` | 18 | 2 | A = 2^-shift while UNTRACKED |
| `thr_track` | 100 | 60 | counts; a sample at or below this counts toward TRACKED |
| `thr_loss` | 150 | 100 | counts; a sample above this counts toward UNTRACKED |
| `cnt_track` | 256 | 16 | run length needed to lock |
| `cnt_loss` | 64 | 4 | run length needed to unlock |
| `b_shift` | 1 (B = 1/2) | | de-ripple weight B = 2^-b_shift |

With these first-stage values:

* Acquisition from zero to a signal of about 1650 counts takes about
  2^18 · ln(1650/100) ≈ 0.75 M samples (6 ms).
* The short constant of 4096 samples (33 µs) lags a 60 Hz ripple of about
  100 counts by only a few counts.
* During a 60 000-sample loss of +250 counts, the long constant lets the
  output drift by only about 60 counts.

## Learning the ripple: the de-ripple block

One line period is 125e6/60 ≈ 2 083 333 clocks. It is divided into
`POINTS` = 4094 points, so one point lasts 508 or 509 clocks. Each point has
one RAM word. For the point `m` that is current, the stored value is updated
once per line period:

    q[m] <= q[m] + B * (y - q[m]),     B = 2^-b_shift

This is an exponentially weighted average over past periods. With B = 1/2,
a period's weight halves with each newer period.

**Point timing.** A phase accumulator adds `POINTS * F_LINE_HZ` (245 640)
every clock. It steps to the next point, subtracting `F_CLK_HZ`, when it
would reach `F_CLK_HZ`. Exactly 4094 points therefore span exactly 1/60 s,
and there is no slow drift against the mains. The counter free-runs from
reset. There is no line-sync input, so the phase of the stored shape is
arbitrary but fixed. This is a design choice, because the paper does not say
how the points are timed.

**When an update is allowed.** The update uses the filter output `y` at the
last clock of the point. It is written only if the first-stage filter was
TRACKED on every clock of that point. A point touched by a beam loss, or by
the first acquisition, is therefore skipped, and its old value stays. The
paper requires TRACKED "and a few other conditions" that it does not list.
The whole-point rule is this design's stand-in for them.

**Multi-cycle read-modify-write.** The RAM read port always addresses the
current point. When a point ends, that point's word has been on the read
port for hundreds of clocks. The update then takes three clocks:

1. capture `y`, the TRACKED verdict and the stored word;
2. compute the new value;
3. write it.

The pointer has already moved to the next point, so the write never collides
with the read. The block checks at elaboration that a point lasts at least
4 clocks.

**RAM word.** Each word is 19 bits: a valid bit, then 14 integer and 4
fraction bits of `q`. The fraction bits keep B = 1/2 updates from
truncating away.

* After reset, the block writes zero to all 4096 words, which takes 4096
  clocks while `init_busy` is high.
* The first update of an empty word loads `y` directly instead of averaging
  from zero.
* While the current point's word is still empty (during the first period
  after the filter locks), the baseline output is taken from the TRACKED
  filter output. A baseline therefore exists from the moment of lock, not
  one period later.

Words 4094 and 4095 are never used. The paper specifies both the 4096-word
RAM and the 4094 points.

`upd_write` and `upd_skip` pulse once per point, for a written update and a
dropped update respectively.

## Subtraction and output

`baseline_subtractor` registers `raw - baseline` as a signed 15-bit value.
While no baseline exists, it outputs 0 with `raw_sub_valid` low. The raw
path is not delayed to match the baseline path. The baseline moves by far
less than a count in the few clocks of difference.

Latency from `adc_data`:

| output | latency |
|---|---|
| `nl_filter`, `nl_tracked` | 2 clocks |
| `raw_sub` | 3 clocks |
| `raw_sub_filtered` | 4 clocks |

## Where this departs from, or adds to, the paper

* Every width, constant and default is chosen here. This includes:
  * ADC width: 14 bits;
  * fixed point: 24 accumulator fraction bits and 4 RAM fraction bits;
  * A and B restricted to powers of two.
* The TRACKED/UNTRACKED switching rule (thresholds with run lengths) is
  chosen here.
* The "other conditions" for a baseline update are not given. They are
  replaced by "TRACKED throughout the point".
* Point timing uses a free-running phase accumulator with no line-sync input.
* The valid bit per RAM word, the clearing after reset, the direct first
  load and the fallback to the filter output in the first period are this
  design's.
* The first-stage filter has user registers like the last stage. The paper
  mentions registers only for the last stage. There is no register bus; the
  registers are top-level inputs.
* The paper's Eq. (3), an expansion for B = 0.5, does not follow from its
  update rule, Eq. (2). The RTL implements Eq. (2).

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it shows |
|---|---|
| `tb_dual_tc_integrator` | Matches the reference model on every sample. Acquisition follows the long constant. The filter leaves TRACKED during a step and locks again afterwards. |
| `tb_fast_recovery_integrator` | Matches the reference model. Output is 0 while invalid. Noise power drops by more than 8×. A loss is flagged within 8 samples and reaches 85 % within 40; the output recovers within 60. |
| `tb_deripple_baseline` | Small size: 14 points, 16 words. Clearing is checked. Point steps are exact to the clock. Each update has the right address and value, with the floor rounding of the formula. Skipped updates happen exactly when TRACKED dropped. Baseline output and first-period fallback are checked. |
| `tb_baseline_ram` | Full 4096-word fill and read-back. Read-first collisions. |
| `tb_baseline_subtractor` | Signed difference and valid gating. |
| `tb_noise_elim_top` | Full size with default parameters and registers. |

`tb/nl_ref_pkg.sv` is an independent model of the two-state integrator that
the filter testbenches use.

**Full-size run.** `tb_noise_elim_top` feeds three line periods (6.25 M
samples) of a synthetic signal:

* a level of 1650 counts, with a 60 Hz ripple of 90 counts plus a third
  harmonic of 25 counts;
* uniform noise of ±50 counts;
* one beam loss of +250 counts for 60 000 samples at sample 5.1 M.

In this run:

* The first stage locked after 0.88 M samples. It then followed the ripple
  within 4 counts once settled.
* The learned baseline stayed within 4 counts of the true ripple, during the
  loss as well. 118 updates were dropped during the loss.
* Away from the loss, the final output stayed within 14 counts of zero.
  On the raw input, the ripple alone swings by about ±80 counts and the
  noise by ±50.
* During the loss, the output stayed above 238 counts.
* After the loss, the first stage stayed UNTRACKED for about 0.4 M more
  samples. The loss had pushed its output up by about 60 counts, and it
  re-locked only once that offset had drifted back below `thr_track`. The
  baseline took no updates in that time, which is what keeps it clean, and
  the final output was not affected. A larger `thr_track` re-locks sooner,
  but then stores the leftover offset into the baseline.
* `loss` rose 4 samples after the loss began. The output was back below 30
  counts 12 samples after it ended.

The testbench skips the comparisons for 50 000 samples after each lock. The
filter locks while still up to `thr_track` away and needs that long to
settle. The skip also covers the baseline points stored during that window,
in the two periods that follow. The run takes about 10 s with Verilator.

The synthesized top has about 280 flip-flops, plus the 4096 × 19 RAM.

## Simulating

With Verilator 5 and the files of `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/noise_elim_pkg.sv tb/nl_ref_pkg.sv tb/tb_noise_elim_top.sv \
    --top-module tb_noise_elim_top
./obj_dir/Vtb_noise_elim_top
```

For the other testbenches, replace `tb_noise_elim_top` by the testbench
name. `nl_ref_pkg.sv` is needed only by the two filter testbenches. Every
variable that is read is reset or initialised, so two-state simulation with
random initial values is fine.

## Changing the design

* **Different sample rate or mains frequency:** set `F_CLK_HZ` and
  `F_LINE_HZ`. The point timing stays exact.
* **Finer or coarser baseline:** set `POINTS`, with `DEPTH` at least as
  large. A point must last at least 4 clocks.
* **Wider ADC:** set `ADC_W`. The thresholds in `nl_cfg_t` are 16 bits.
* **Tuning:** time constants, thresholds and B are run-time inputs. No
  rebuild is needed.
