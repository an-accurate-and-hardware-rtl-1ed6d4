# Dual TEO spike detector for 256 neural channels

Implanted brain–machine interfaces have to find action potentials (spikes) in
hundreds of electrode signals, on a chip with almost no area or power to
spare. This design detects spikes with two cheap detectors running side by
side on every channel:

* the **X path** applies the Teager energy operator (TEO)
  `T{X}[k] = X[k]^2 - X[k+1]·X[k-1]` to the raw samples. TEO turns the sharp
  rise and fall of a spike into a tall positive pulse, but it also amplifies
  high-frequency noise;
* the **S path** first smooths the signal over two samples, then applies TEO.
  It loses a little sharpness but still works when the noise is high.

A sample is a spike if **either** path exceeds its own threshold. Both
thresholds follow one online estimate σ_S of the spread of the smoothed
signal, so the detector adjusts itself as the recording drifts:

```
Thr_X = C1·σ_S
Thr_S = C2·σ_S + C3·σ_S²        (C1, C2, C3 are powers of two)
```

The RTL implements the 256-channel version: eight identical 32-channel
modules. Within a module a single arithmetic core is time-shared by its 32
channels, and only the per-channel state is replicated. The state is held in
flip-flop register banks.

## Signal path and number formats

All arithmetic is integer. Widths are kept as small as possible. The paper
fixes the four signal widths. The exact truncation points are this design's
own, chosen so that no value can overflow its field.

| signal | width | how it is formed |
|---|---|---|
| X | 7 bits, two's complement | input sample |
| S | 6 bits, two's complement | `S[k] = (X[k] + X[k-1]) >>> 2`: the two-sample mean, one more LSB dropped |
| X_TEO | 8 bits, signed | `(X[k]² − X[k+1]·X[k−1]) >>> 6`; full range [−4032, 8128] becomes [−63, 127] |
| S_TEO | 9 bits, signed | `(S[k]² − S[k+1]·S[k−1]) >>> 3`; full range [−1024, 2016] becomes [−128, 252] |
| σ_S | 15 bits, unsigned Q5.10 | 5 integer bits (S never exceeds 31) and 10 fractional bits |
| Thr_X / Thr_S | 7 / 8 bits, unsigned | saturate at 127 / 255, the largest positive TEO value |

`>>>` is an arithmetic shift (floor division). The TEO units saturate
anyway, as a guard for other parameter choices.

**Alignment.** TEO needs the *next* sample. So when sample `X[n]` of a channel
arrives, the core computes both TEO values for sample `n−1`. The X path needs
`X[n], X[n−1], X[n−2]`. The S path needs `S[n], S[n−1], S[n−2]`, which are
rebuilt from `X[n] … X[n−3]`. Each channel therefore keeps the three previous
raw samples (21 bits) rather than a history of S. Both detections of
sample `n−1` are available in the same cycle. The spike bit that leaves the
chip with the arrival of `X[n]` belongs to sample `n−1`, one sample period
late.

## Adaptive threshold: the σ_S loop

Computing a true standard deviation would need many stored samples. Instead,
the loop adjusts σ_S until a fixed number of samples exceeds it in each
window. For a stationary noise distribution, that number depends only on
where σ_S sits relative to the real spread. Per channel:

1. each smoothed sample `S[n]` is compared with σ_S (signed `S > σ_S`). A
   counter adds up the results over a window of 256 samples of that channel;
2. at the end of the window, σ_S moves by `scale · (count − 20)`. Here 20 is
   the *convergence factor* and `scale = 2⁻¹⁰` (the paper's 0.001). Because σ_S
   carries 10 fractional bits, the scaling is free: the signed difference is
   simply added at the LSB;
3. σ_S is clamped to [0, 32) and the counter restarts.

If more than 20 of 256 samples exceed σ_S, it rises; if fewer do, it falls.
At equilibrium about 7.8 % of samples lie above σ_S. For Gaussian noise that
places σ_S near 1.4 times the real standard deviation of S. The coefficients
C1…C3 absorb that factor. The loop is deliberately slow: one window is 256
sample periods (16 ms at 16 kS/s), and a window moves σ_S by at most
0.23. Settling from a poor initial value takes seconds of signal. This is why
the initial σ_S can be loaded per channel. The unit test closes the loop on
synthetic Gaussian noise and sees the count settle at 20.00 per window.

The thresholds use the integer part of σ_S, the same value the comparator
sees. Power-of-two coefficients make the products into shifts. Only σ_S²
needs a small 5-bit squarer. The defaults are C1 = 4, C2 = 2, C3 = ½. The
paper does not give coefficient values. These were picked by sweeping the
power-of-two choices on synthetic recordings like those of the noise test
below; they should be re-tuned against real recordings. They are parameters
(`C1_EXP`, `C2_EXP`, `C3_EXP`, signed exponents).

## Architecture: eight time-shared modules

```
 in_valid, in_addr[7:0], in_x[6:0] ──┬──────────┬─── … ───┐
 par_we, par_addr, par_sigma ────────┤          │         │
                               module #1   module #2 … module #8   (32 channels each)
                                     │          │         │
                                     └──── output multiplexer ───► spike_valid, spike,
                                      (select = module of previous sample)   spike_addr, …
```

Each `detection_module` contains:

* `control_unit`: decodes the address. The upper 3 bits pick the module and
  the lower 5 bits the channel. It raises `active` only in the addressed
  module and counts frames to mark the last sample of each σ window;
* `memory_bank`: five per-channel register banks. The *data memory* holds
  X[n−1], X[n−2], X[n−3]. The *parameter memory* holds σ_S and the window
  counter. That is 44 bits × 32 channels. Reads are combinational; writes
  happen on the clock edge;
* `smooth_teo` (built on two `teo_op` instances), `threshold_generator`,
  `hard_threshold` (two strict comparators and an OR) and `sigma_estimator`.
  All are combinational and shared by the 32 channels.

For one sample, a module reads its channel's entry, computes everything, and
writes back the shifted history and updated σ state, all in **one cycle**.
The result is registered. Only one module is active in any cycle, and the
others should not switch at all. Each module therefore drives its register
banks, frame counter and result fields from a **gated clock**. The
`clock_gate` cell is a latch, transparent while the clock is low, followed by
an AND. It passes a clock edge only when the module is addressed by a
sample or a parameter load, and during reset. Only the result's valid flag
runs on the free clock, so that it can drop in idle cycles. No flop on
one clock reads a flop on the other, which keeps simulation free of
clock-ordering races. The output multiplexer forwards the single valid
result, steered by the module index of the previous sample, which the top
registers.

## Interface and timing (`dual_spike_detector`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `in_valid`, `in_addr`, `in_x` | in | 1, 8, 7 | one sample per cycle at most, tagged with its channel |
| `par_we`, `par_addr`, `par_sigma` | in | 1, 8, 15 | load σ_S (Q5.10) of one channel; clears its counter |
| `spike_valid` | out | 1 | a result is present (one cycle after its sample) |
| `spike` | out | 1 | detection bit for the previous sample of `spike_addr` |
| `spike_addr` | out | 8 | channel of the result |
| `spike_x`, `spike_s` | out | 1 | which path fired (observability) |
| `sigma_upd` | out | 1 | this sample closed a window and σ_S moved |

Rules of use:

* channels must arrive in round-robin order, 0…255, with any number of idle
  cycles in between. The window counter of a module advances after its
  channel 31;
* reset clears all histories and counters and sets every σ_S to `SIGMA_INIT`
  (default 2.0). The first two samples after reset see a zero history;
* a parameter load and a sample of the same channel in the same cycle are
  allowed: the load wins for σ_S and the counter;
* latency is 1 cycle. Throughput is one sample per cycle: 256 channels at
  f_clk/256 each.

Assertions check that the address is in range, that at most one module
reports per cycle, and that the multiplexer always passes on a valid result.

## Where this departs from, or fills in, the published design

The following follow the source publication: the dual-path algorithm; the
two-sample smoothing window; Eq. 2 with power-of-two coefficients; the σ loop
structure (comparator, counter, convergence factor 20, scaling 0.001, adder,
register); the widths 7/6/8/9; and the 8 × 32-channel organisation with
shared TEO and threshold logic, five register banks and an output
multiplexer. The following are choices made here:

* **Throughput vs. the stated clock.** The publication quotes 256 channels at
  16 kS/s and a 4 MHz clock. That is 4.096 MS/s, more than one sample per
  cycle, and it does not say how the difference is covered. This design takes
  one sample per cycle. At exactly 4 MHz it reaches 15.625 kS/s per channel
  (97.7 %). A clock of 4.096 MHz or more meets 16 kS/s.
* **Window length.** The source says the exceed count is "accumulated every
  256 clock cycles". With 256 channels on one stream, 256 cycles hold one
  sample per channel. Here the window is therefore 256 samples of each
  channel.
* **Register-bank contents.** The source says five banks hold "channel data
  and threshold levels". Here they hold three past samples, σ_S and the
  counter. The thresholds are recomputed every sample rather than stored.
* **Not specified, chosen here:** the smoothing rule and truncation bit
  positions; the σ_S fixed-point format, clamping, comparison on signed S and
  initial value; the coefficient values; the stream format, address
  decoding, single-cycle schedule and result registering; reset behaviour;
  and the parameter-load port.
* **Clock gating** is named but not described in the source. The cell used
  here is the common latch-and-AND gate; a standard-cell flow would
  substitute its library gating cell. Which flops are gated, and that the
  gate opens during reset, are choices made here.
* **Not built:** the recording front end and ADC that supply the samples are
  outside this design.
* The published accuracy figures (97.4 % in hardware on the Wave_Clus
  recordings) have not been reproduced. Those recordings are not part of
  this package, and the default coefficients were tuned only on synthetic
  signals. The synthetic results are in the next section.

## Accuracy on synthetic recordings

`tb_noise_sweep` runs the full-size detector with a different noise level in
each of its eight modules. The level is the noise standard deviation divided
by the spike peak (40 LSB). The noise is close to Gaussian, and spikes are
biphasic, about one per 80 samples. Each channel's σ_S is first loaded with a
calibrated starting value, then adapts on its own. After 8 warm-up windows,
16 windows are scored. A rising edge of the spike bit within [−1, +9]
samples of a true onset counts as a hit. Accuracy = hits / (hits + false
alarms + misses). The X and S columns score each path's flag alone.

| noise level | both paths (OR) | X path alone | S path alone |
|---|---|---|---|
| 0.05 | 0.986 | 0.980 | 0.985 |
| 0.10 | 0.990 | 0.913 | 0.990 |
| 0.15 | 0.971 | 0.817 | 0.975 |
| 0.20 | 0.925 | 0.748 | 0.930 |
| 0.25 | 0.783 | 0.640 | 0.795 |
| 0.30 | 0.644 | 0.558 | 0.641 |
| 0.35 | 0.497 | 0.460 | 0.460 |
| 0.40 | 0.386 | 0.375 | 0.347 |

On these signals the smoothed path does most of the work. The raw path helps
only a little, at the highest noise. The test fails if accuracy drops below
0.90, 0.90, 0.85 or 0.75 at the first four levels. These numbers describe
synthetic data only, not the published benchmark.

## Files

`rtl/` holds one unit per file:

- `spike_pkg.sv`: shared widths, types, the per-channel state struct and the result struct;
- `teo_op.sv`, `smooth_teo.sv`, `sigma_estimator.sv`, `threshold_generator.sv`,
  `hard_threshold.sv`, `memory_bank.sv`, `control_unit.sv`, `clock_gate.sv`:
  the blocks of one module;
- `detection_module.sv`: the 32-channel module;
- `output_mux.sv`: the output multiplexer;
- `dual_spike_detector.sv`: the top.

`tb/` holds a self-checking testbench per block, `tb_<block>.sv`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/spike_ref_pkg.sv` is
an integer reference model of one channel plus a synthetic neural-signal
source (noise that is approximately Gaussian, with biphasic spikes of random
timing). The module and system tests compare every output against it.

`tb_dual_spike_detector` runs the top at its default size: 256 channels and a
256-sample window. It streams 24 full σ windows (about 1.6 million samples,
with random idle cycles) and checks every result bit, its address and its
one-cycle latency. It also requires each mechanism to occur at least once:
X-only, S-only and two-path detections; σ_S rising and falling; parameter
loads; idle cycles; and activity in all eight modules. It takes a few seconds
in Verilator.

`tb_clock_gate` checks the gating cell on its own: no clock pulse while the
enable is low, a full pulse while it is high, and no glitch when the enable
changes during the high phase. `tb_noise_sweep` is the accuracy test
described above.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/spike_pkg.sv tb/spike_ref_pkg.sv tb/tb_dual_spike_detector.sv \
    --top-module tb_dual_spike_detector -o sim
./obj_dir/sim
```

Replace the last file and the top module to run another block's test. Most
sizes are parameters of the top: `N_MOD`, `N_CH` (a power of two), `WIN`,
`SIGMA_INIT` and `C1_EXP`…`C3_EXP`. Signal widths and the convergence factor
are in `spike_pkg`. `det_out_t.addr` is sized for 256 channels, so arrays
beyond 256 channels need that field widened.
