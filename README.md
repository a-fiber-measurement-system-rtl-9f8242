# Approximate deconvolution of LBI fault clusters

Fiber fault detection can be phrased as a sparse problem. An OTDR measures a fiber profile of
N samples. A solver based on Linearized Bregman Iterations (LBI) then estimates a sparse vector
beta_hat, whose non-zero entries mark the positions and sizes of the steps (faults) in the profile.
If the solver is stopped after few iterations, which is needed to keep processing time short, the
estimate is not sparse around a fault. The fault's value is spread over a *cluster* of
neighbouring positions. A large fault's cluster can hide a smaller fault a few samples away.

The cluster has roughly the same shape wherever the fault lies, and its height scales with the
fault. So it can be removed locally, without a full deconvolution filter:

1. find the peaks of the raw estimate;
2. for each peak, subtract a stored cluster shape, scaled by the peak's value, from the
   neighbouring samples. The centre of the shape is zero, so the peak itself keeps its value;
3. search the corrected estimate for peaks again. Faults that the clusters had hidden now show up.

This repository holds synthesizable SystemVerilog for a hardware unit that does this. It is meant
to sit at the output of an LBI core, which flushes its estimate one sample at a time in profile
order. The default parameters are those of the method's nominal setting: a compensation vector
of **S = 65** coefficients, and up to **20** peaks whose clusters overlap at the same time.

## Data flow

```
 beta_raw ──► [ S-stage shift register ] ──────────────── tail ──► (−) ──► accumulator ──► corrected
 (in_*)         stages 0..31 │ 32 │ 33..64                           ▲                      sample
                           ┌─┴────┴─┐                                 │ select: product / 0
                           │ peak   │── push ─► multiplier list ──► (×) ◄── coefficient ROM
                           │ check  │           cluster index list ──► (+) ──► ROM address
                           └────────┘                                ▲
                                                      position counter
 corrected ──► final peak check (3-sample window) ──► out_data, out_peak (out_*)
```

| Module | Role |
|---|---|
| `deconv_pkg` | default sizes and the function that builds the default coefficient table |
| `beta_shift_register` | S-stage delay line. Exposes the middle stage, its two neighbours and the last stage. Carries a valid flag and an end-of-profile flag per stage |
| `peak_detector` | combinational nearest-neighbour check |
| `cluster_list` | the multiplier list (peak values) and the cluster index list, as one FIFO |
| `coef_rom` | S normalised coefficients, centre entry zero |
| `comp_arith` | multiplier, product/zero select, subtractor, accumulator, output saturation |
| `final_peak_detect` | peak check on the corrected stream |
| `approx_deconv` | top: position counter, controller, and the instances above |

## How one sample is corrected

Each accepted input sample shifts the register by one. The peak check looks at the middle stage
C = (S−1)/2 = 32. When a peak sits there, the sample 32 positions *before* it is just leaving the
register at the far end. So the first sample of the peak's cluster reaches the correction point
at exactly that shift. From then on, the peak's entry stays in the lists for S shifts, one for
each sample of its cluster, from 32 before the peak to 32 after it. Then it is retired.

The sample leaving the register goes into the accumulator. The controller then stops the shift
register and scans the lists, one entry per clock cycle. Each scan step reads a peak value and a
coefficient, multiplies them, and subtracts the product from the accumulator. The result of the
last step is the corrected sample. If no entry is listed, the sample passes unchanged in the
shift cycle itself.

### Addressing: position counter plus cluster index

Every listed peak needs its own ROM address, because each one sits at a different distance from
the sample being corrected. The address is the sum of two values:

* `pos`, a counter that advances with every shift. It is the position of the sample in the
  accumulator.
* the entry's cluster index. When a peak is detected, the index is stored as −(pos+1), taken
  modulo 2^8.

At the shift that detects the peak, the counter becomes pos+1. So the address
`pos + index` is 0 for the first sample of the cluster, and it rises by one with each shift up
to S−1 for the last sample. In the cycle where the head entry's address is S−1, the entry is
popped. All clusters have the same length, so entries retire in the order they arrived, and the
two lists together form one circular FIFO. The counter and the indices are 8 bits wide. They
only need to tell apart distances below S, so profiles of any length work.

### Cost in cycles

Each sample takes one shift cycle, plus one cycle for each listed cluster that covers it. Every
peak covers exactly S samples, so a profile of N samples with p peaks takes

    N + S·p  cycles,  plus S shifts to flush the register after the last sample, plus 2 cycles of output pipeline.

This holds whether the clusters overlap or not, as long as they lie inside the profile. For
N = 15000 and p = 20 this gives 15000 + 65 + 1300 + 2 = **16367 cycles**. The end-to-end test
checks that exact count. The published estimate for this case is 16200 cycles. That figure does
not match the formula N + S·p it comes from, which gives 16300. The design follows the formula.
An LBI run takes tens to hundreds of millions of cycles, so the correction adds well under 1 %
to the total.

### What counts as a peak

A sample is a peak when its magnitude is strictly greater than the magnitudes of both of its
neighbours. The check computes |neighbour| − |centre| on each side and ANDs the two sign bits.
Faults can appear with either sign in the estimate, which is why magnitudes are compared. A zero
sample is never a peak. Neither is either sample of a plateau of two equal values. Outside a
profile, neighbours count as zero. The first detection looks at the *raw* samples in the shift
register. So a peak's multiplier is its raw value, and a small peak inside a big cluster is
usually not found in the first pass. The final detection on the corrected stream finds it.

## Number formats (design choices)

The method does not specify any of these:

* samples: 16-bit two's complement (`DATA_W`);
* coefficients: unsigned, 1.0 = 2^15 (`COEF_W` = 16, `COEF_FRAC` = 15);
* product: peak × coefficient, shifted right arithmetically by 15. This rounds towards −∞;
* accumulator: `DATA_W` + 7 = 23 bits. Each corrected sample is saturated to 16 bits.

**The coefficient table is a placeholder.** The real table is the averaged, normalised cluster
shape measured for the LBI at its chosen iteration count, with the centre set to zero. No values
for it are available here. The default is a two-sided geometric decay computed at elaboration:
coefficient k is 0 at k = 32, otherwise 2^15 multiplied |k−32| times by 0.58 (19005/2^15), with
truncation after each step. That gives 19005 next to the centre, 11022 two away, and so on. The
measured shape is asymmetric and falls to nearly zero about five samples from the peak. To use
real coefficients, set `USE_TABLE = 1` and pass the S coefficients in `TABLE` (a packed
vector, coefficient k in bits `[16k +: 16]`). `tb_lbi_profile` shows how.

## Interface of `approx_deconv`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset clears all state |
| `in_valid`, `in_ready`, `in_data`, `in_last` | in/out/in/in | 1/1/16/1 | raw estimate stream. `in_last` marks a profile's final sample |
| `out_valid`, `out_ready`, `out_data`, `out_peak`, `out_last` | out/in/out/out/out | 1/1/16/1/1 | corrected estimate. `out_peak` = final detection flag |
| `raw_peak` | out | 1 | pulse: a peak was found in the raw estimate |
| `list_drop` | out | 1 | pulse: that peak was lost because the lists were full |
| `stall` | out | 1 | the shift register is held while the lists are scanned |

Both streams use the usual valid/ready rule. A beat transfers on a rising edge where both are
high, and the output holds its value until it is taken. After `in_last` the unit does not accept
input for S cycles while it flushes the register with invalid zero samples. Profiles are then
fully independent: the neighbours at the start and end of each profile are zeros, and every
cluster entry of the previous profile has retired before the next profile's first peak can be
found. Output lags input by S + 2 samples plus the stall cycles.

If more than `LIST_DEPTH` peaks fall inside one 65-sample window, the extra peaks are not
compensated and `list_drop` pulses. The peaks themselves still pass through. A peak needs a
strictly larger magnitude than both neighbours, so at most 33 peaks fit in one window. Setting
`LIST_DEPTH` = 33 rules out drops completely.

## Departures from the published structure

* In the published diagram, the peak check subtracts the signed neighbouring samples and
  combines the two sign bits. Here magnitudes are subtracted, so a peak is a sample of larger
  magnitude than both neighbours, whatever its sign. This is the definition of a peak given with
  the method. A check on the signed samples would also flag the dip between two peaks of the
  same sign.
* The published block diagram drives the product/zero selector from the peak-detection flag.
  Here it is driven by "the scanned entry covers this sample" (address below S), which is the
  condition under which the product must be used.
* The diagram has an absolute-value box in front of the multiplier list. The lists here hold the
  **signed** peak value. Scaling the cluster shape by a bare magnitude would deepen, not remove,
  the cluster of a negative step.
* Framing, flush and back-pressure are additions, needed to stream whole profiles one after
  another. So are list overflow handling, saturation and all widths.
* The LBI estimate has N+1 entries. The first is the slope of the profile, not a step. It
  should not be streamed into the unit: leave it out, or send it separately.
* Not included: the LBI core that produces the raw estimate, the OTDR acquisition unit, and the
  display. The unit's input port is where the LBI core's sequential flush connects.

## Verification

Each module has a self-checking testbench in `tb/`. Each testbench compares the module against a
model written independently in the testbench and prints `TB_RESULT checks=… failures=…`.

* `tb_approx_deconv` runs the whole unit at its default parameters. It covers a profile with a
  hidden fault next to a large one, overlapping clusters, a dense profile that overflows the
  lists, near-full-scale values that saturate, random profiles with input gaps and output
  back-pressure, and a 15000-sample profile with 20 faults. For that last profile it also checks
  the 16367-cycle count. It checks that each of these mechanisms actually happened.
* `tb_workload` runs the evaluation workload of the method: 100 profiles of 15000 samples in a
  row, with 5 cluster-shaped faults each. Fault values are 100 to 5000 LSB with random sign,
  standing in for steps of 0.1 to 5 dB. In every profile, two of the faults form a close pair:
  a large one and a small one 2 to 6 samples away. The test checks every output sample and the
  cycle count of every profile. It also checks that the final detection flags the exact position
  of every fault. In a typical run, about 80 of the 500 faults are not peaks in the raw estimate,
  and all 500 are flagged after correction. Rounding residue causes about one extra flag per
  profile.
* `tb_lbi_profile` feeds the unit with the output of an actual LBI run. The testbench contains
  a behavioural sparse-Kaczmarz LBI: 200 sweeps, λ = 0.5, slope column scaled by 1/N. It runs on
  a noise-free 1000-sample profile with five faults, two of them 5 samples apart. The
  coefficient table is the cluster that the same LBI model produces for a single 2 dB fault,
  re-measured and compared when the test starts. The outputs are checked exactly against the
  model of the unit. Detection quality is reported only. In this LBI model the cluster gets
  narrower as the fault gets larger, because of the shrink step. So one static shape
  over-corrects around the 4 dB fault, and the 0.8 dB fault next to it is lost (4 of 5 faults
  found, against 5 of 5 before correction). The method relies on the cluster shape being nearly
  independent of the fault size. That has to hold for the LBI configuration the unit is used
  with, and the coefficients must be measured for that configuration.
* The unit tests cover the peak check (corners including −32768), the ROM against the formula,
  the shift register taps under random stalls, the list FIFO including overflow and
  pop-with-push, the arithmetic including saturation, and the final detector under back-pressure.

Run one with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/deconv_pkg.sv tb/tb_approx_deconv.sv \
          --top-module tb_approx_deconv -o sim && ./obj_dir/sim
```

The two-state simulator starts every unreset variable at a random value. The RTL resets
everything it reads.

## Changing the design

* `S` (odd, ≥ 3) sets the compensation vector length. It sets the shift register length and the
  ROM size together.
* `USE_TABLE`, `TABLE` build in a measured compensation vector in place of the placeholder.
* `LIST_DEPTH` sets how many overlapping clusters can be compensated at once.
* `DATA_W`, `COEF_W`, `COEF_FRAC` set the number formats. `DECAY_Q15` sets the placeholder
  cluster shape.
* Throughput is one sample per cycle outside clusters. Inside clusters the cost is as described
  under "Cost in cycles". The design has one multiplier. Running several scan steps per cycle
  would need more multipliers and ROM ports.
