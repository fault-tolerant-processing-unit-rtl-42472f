# Gamma-distribution sliding window for landing guidance

During landing, a drone's altitude above the landing surface is estimated
again and again by a fuzzy-logic unit that fuses radar and lidar readings.
If one estimate is wrong and the landing decision follows it directly, a
single glitch can produce a manoeuvre the actuators cannot undo. The
**Gamma Distribution Sliding Window Unit (GDSWU)** guards against this. It
keeps the last 16 estimates and outputs a weighted average of them instead
of the latest value. The weights follow a gamma probability density over the
age of each sample:

    f(x; a, b) = x^(a-1) · e^(-x/b) / (b^a · (a-1)!)

with shape a = 1 and scale b = 10. For a = 1 this is an exponential decay.
The newest estimate counts most. Each older one counts about 10 % less than
the one after it, and the oldest of the 16 still keeps about a fifth of the
newest one's weight. One wrong estimate can therefore move the output only by
its own small share.

The guidance system has four processing cores, one per corner of the drone,
and each core has its own GDSWU. This RTL provides the GDSWU and the
four-corner stage that holds the four units. The sensor front ends, FIR
filters, fuzzy-logic node, malfunction monitor and links to the central
processor belong to earlier designs and are not included here. Their
connections appear as ports.

## What the unit computes

Let `s1` be the newest sample and `s16` the oldest. The unit stores the
weights as 5-bit unsigned fractions:

    W(x) = floor(32 · b · f(x; a, b)) = floor(32 · e^(-x/10))        x = 1 .. 16

| age x | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 | 15 | 16 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| W(x) | 28 | 26 | 23 | 21 | 19 | 17 | 15 | 14 | 13 | 11 | 10 | 9 | 8 | 7 | 7 | 6 |

The weights sum to 234. It then computes

    sum_sample  = Σ s_x · W(x)                 (16 bits, exact)
    average_out = floor(sum_sample / (16 · 32)) (7 bits)

The multiplication by b keeps every weight below one for any a and b. For
any a, b ≥ 1, `(x/b)^(a-1) e^(-x/b) / (a-1)!` is at most 1. As a result,
`average_out` can never exceed the largest input, and an assertion in
`gdswu` checks this. Because the weights sum to less than 16·32, a window
that holds one value constantly gives a result below that value. The result
is a weighted *accumulation* divided by the window length, not a normalised
mean. This is how the original unit behaves: for a window full of 7'h7F it
reports 7'h3A, and this RTL gives the same value, 127·234/512 = 58 = 7'h3A.

The gamma density, a = 1, b = 10, the 16 taps and the 7-bit data come from
the original design. The 5-bit weight format, the ages 1..16 and the
truncation are not specified there. They were chosen here because they are
the simplest choice that reproduces the reported 7'h3A. Ages 0..15 would
give 7'h40, and 6 fraction bits would give 7'h3B. The weights are computed
at elaboration from `GAMMA_A`, `GAMMA_B` and `WEIGHT_FRAC` by
`gdswu_pkg::gamma_weight`, which uses a short Taylor series for the
exponential. No table is stored.

## Structure and timing of `gdswu`

```
 b ──►[window: 16 × 7-bit shift register]──► 16 constant shift-add products
        ▲ shifts when en_in = 1                  │  (no multipliers)
                                                 ▼
                                        [product registers, 16 × 12 bit]
                                                 ▼
                          [adder tree: 8×13 → 4×14 → 2×15 → 1×16 bit, registered]
                                                 ▼
                               [result register] ──► sum_sample, average_out
```

* **Sample strobe.** On a clock edge where `en_in` is 1, `b` enters the window
  and the oldest sample drops out. When `en_in` is 0 the window holds its
  contents. A new sample can be taken on every clock.
* **Products.** Each tap multiplies by a constant. `gdswu_const_mult` does this
  by adding shifted copies of the sample, one for each set bit of the weight,
  so no DSP multiplier is needed. This matches the original unit, which uses
  no DSP blocks.
* **Adder tree.** `gdswu_adder_tree` has one register stage per level. Each
  level is only one bit wider than the level before it.
* **Latency.** Suppose the sample is taken at clock edge k. Then `out_valid`
  is high for one cycle after edge k + 6, and `sum_sample` and `average_out`
  show the window that includes that sample. They hold until the next
  result. In general the latency is `2 + log2(TAPS)` edges.
* **Reset.** `rst_n` is asynchronous and active low. It clears the window, so
  a freshly reset unit behaves as if it had seen 16 zero samples. The
  original waveform shows `average_out` at 7'h00 before the first result.

The pipeline never stalls, so throughput is one sample per clock. One unit
uses about 505 flip-flops. Each clock it performs 16 constant products and
15 additions. The original unit reports 922 registers and "22 operations
per clock cycle" without explaining how they are counted. This RTL does not
try to match those numbers. The original's FPGA figures (369.96 MHz, 20.36 mW,
464 ALMs on a Cyclone V) are for its own VHDL and have not been reproduced.

## Four-corner stage, `algas4_gdswu_top`

This module contains four independent `gdswu` instances that share the clock
and reset. Corner `c` takes `fls_valid[c]` / `fls_out[c]` from its
fuzzy-logic node. It returns `avg_valid[c]`, `sum_sample[c]` and
`average_out[c]`, which would go to the core's link unit. The corners sample
independently, whether or not they sample in the same cycle.

## Where this departs from the original, or guesses

* The original simulation waveform shows one `en_in` pulse followed by 16
  `sum_sample` pulses of falling height, then the final average. It does not
  explain how the unit sequences those 16 steps internally. Here, `en_in` is
  a per-sample strobe and `sum_sample` is the full weighted sum of the
  window. The final value after 16 samples of 7'h7F is the same.
* The original text speaks of the current estimate *and* the previous 16,
  but also of a 16-tap window. The window here holds 16 samples, the newest
  included, which is also what reproduces 7'h3A.
* The original reset is called `rst` and its polarity is not stated. Here it
  is `rst_n`, asynchronous and active low.
* The pipeline depth, the handshake, the weight format and the reset are
  choices made for this design. Only the function, the sizes and the
  "systolic, no DSP" style come from the original.
* The original draws a connection between the GDSWU and the malfunction
  monitor without saying what it carries. That connection is not modelled.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `TAPS` | 16 | window length, power of two |
| `DATA_W` | 7 | width of samples and of `average_out` |
| `GAMMA_A`, `GAMMA_B` | 1, 10 | shape and scale of the gamma density |
| `WEIGHT_FRAC` | 5 | fraction bits of the weights |
| `CORES` (top only) | 4 | number of corners |

`sum_sample` is `DATA_W + WEIGHT_FRAC + log2(TAPS)` bits wide. If you change
a or b, the weights follow automatically. Keep `WEIGHT_FRAC` large enough
that the weights stay distinct.

## Files

* `rtl/gdswu_pkg.sv`: default sizes and the elaboration-time weight
  functions.
* `rtl/gdswu_const_mult.sv`, `rtl/gdswu_adder_tree.sv`: the constant
  shift-add multiplier and the pipelined adder tree.
* `rtl/gdswu.sv`: the sliding-window unit.
* `rtl/algas4_gdswu_top.sv`: the four-corner stage (top level).
* `tb/tb_gdswu.sv`: unit test. It checks every result against an
  independent model that uses `$exp`, checks the 6-edge latency, checks that
  outputs hold between samples, and checks the 7'h7F → 7'h3A step response.
  It also feeds a single outlier in a constant stream, random samples with
  random gaps, and a reset in the middle of a run.
* `tb/tb_algas4_gdswu_top.sv`: end-to-end test at the default parameters. It
  simulates a descent on four corners with random strobes and injected wrong
  estimates. A second model, fed the clean stream, bounds the effect of each
  fault to under 7 LSB. The test counts the mechanisms it exercised: window
  fill, eviction, idle hold, simultaneous sampling, faults, step response and
  reset.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl \
    rtl/gdswu_pkg.sv rtl/gdswu_const_mult.sv rtl/gdswu_adder_tree.sv \
    rtl/gdswu.sv rtl/algas4_gdswu_top.sv tb/tb_algas4_gdswu_top.sv \
    --top-module tb_algas4_gdswu_top -o sim
./obj_dir/sim
```

Use `tb/tb_gdswu.sv` with `--top-module tb_gdswu` for the unit test. Each test
ends with a line `TB_RESULT checks=N failures=M`. Both run in well under a
second.
