# L-DACS1 preamble synchronizer in SystemVerilog

An L-DACS1 receiver has to find where each OFDM frame starts (the symbol
timing offset, STO) and how far its carrier is off (the carrier frequency
offset, CFO) before it can demodulate anything. Every L-DACS1 frame starts
with two preamble symbols with a known repeating structure. The first
consists of four identical parts of L samples; the second of two identical
parts of 2L samples. At the usual oversampling factor Nov = 4, L = 64 and
each symbol lasts 300 samples (120 us at 2.5 MS/s).

This synchronizer uses that structure in three ways:

* **Detection.** Two autocorrelations over a 2L-sample window compare the
  signal with itself delayed by L (AC1) and by 2L (AC2). Inside the first
  preamble symbol both become as large as the signal energy over the same
  window (ENE). A frame is detected when |AC1| + |AC2| > ENE holds for
  m = 32 samples in a row.
* **Timing.** Near the end of the preamble, a correlation of the
  *magnitudes* |c2(n)| = |r(n)| |r(n-2L)| against the expected energy
  profile of the preamble (XCR) peaks sharply. Magnitudes ignore the phase
  rotation that a frequency offset causes, so the peak survives large CFO.
  Delaying by 2L also flattens the secondary peaks that a plain correlation
  shows at +-L. The STO is the position of the largest XCR inside a
  224-sample window.
* **Frequency.** The angle of AC2 gives the CFO accurately, but it is
  ambiguous outside +-1 subcarrier spacing. The angle of AC1 is coarser but
  unambiguous to +-2. Combining them gives a fine estimate over +-2 spacings.

The circuit follows the architecture of T. H. Pham, V. A. Prasad and
A. S. Madhukumar, "A Hardware-Efficient Synchronization in L-DACS1 for
Aeronautical Communications", in the configuration that paper proposes:

* 5 fraction bits for the autocorrelation and energy metrics;
* 4 fraction bits for the timing metric;
* a direct-form multiplierless correlator, whose delay line is only 6 bits
  wide.

This RTL was written from the published description. It is not the
authors' code, and it makes its own choices where the description stops
(see "Departures and choices").

## Datapath

```
 r(n) Q1.15 ─┬──────────────────────────────────────────────┐
             │                                              │
             ├─► Delay L ─► r(n-L) ─► conj mult ─► c1 Q1.5 ─► Σ over 2L ─► AC1 Q8.5 ─► CORDIC ─► |AC1|, ∠AC1
             │      │                                                                        
             │      └─► Delay L ─► r(n-2L) ─► conj mult ─► c2 Q1.5 ┬► Σ over 2L ─► AC2 Q8.5 ─► CORDIC ─► |AC2|, ∠AC2
             │                                                      └► CORDIC ─► |c2| Q2.4 ─► energy correlator ─► XCR Q8.4
             └─► conj mult (r* r) ─► ee Q1.5 ─► Σ over 2L ─► ENE Q8.5

   |AC1| + |AC2| > ENE for 32 samples ─► detect ─► timing sync (peak of XCR in 224-sample window) ─► d_hat
   ∠AC1 at detection, ∠AC2 at the XCR peak ─► CFO rule ─► eps_hat
```

| module            | role                                                                        |
|-------------------|-----------------------------------------------------------------------------|
| `ldacs_sync_top`  | wires everything together, aligns the pipelines, counts samples           |
| `rx_buffer`       | two L-sample delays shared by c1 and c2                                    |
| `conj_mult`       | conj(a)·b, rounded and saturated to Q1.5                                   |
| `metric_acc`      | S(n) = S(n-1) + x(n) - x(n-2L): one real lane of AC1, AC2 or ENE            |
| `cordic_vec`      | rectangular to polar (magnitude and angle), pipelined CORDIC               |
| `preamble_detect` | \|AC1\| + \|AC2\| > ENE, 32 consecutive samples                            |
| `energy_cor`      | XCR, direct-form multiplierless correlator                                 |
| `adder_tree`      | widening binary adder network used by `energy_cor`                         |
| `timing_sync`     | window control and peak search                                             |
| `fre_offset`      | CFO combination rule                                                       |
| `delay_line`      | circular-buffer delay used by `rx_buffer` and `metric_acc`                 |
| `ldacs_sync_pkg`  | constants, the sample type `iq_t`, the CORDIC angle table and the XCR coefficients |

### Number formats

Received samples are Q1.15: a sign bit and 15 fraction bits. The published
design fixes these formats:

* instant products c1, c2 and ee: Q1.fa, fa = 5 (6 bits);
* moving sums AC1, AC2 and ENE: Q8.fa (13 bits). A 128-term sum of values
  below 1 stays below 128.
* |c2|: Q2.fx, fx = 4 (6 bits, unsigned);
* XCR: Q8.fx (12 bits, unsigned).

Angles are a 16-bit word in which 2^15 stands for pi, so the word divided by
2^15 is the angle divided by pi. This makes the CFO rule an addition. The
CFO estimate is Q3.15 in subcarrier spacings.

## The recursive metrics

Each metric is a moving sum over the last 2L = 128 instant values:
`S(n) = S(n-1) + x(n) - x(n-2L)`. This takes one adder, one register and a
2L-deep delay per real lane. `metric_acc` keeps that delay in a circular
buffer (`delay_line`). The buffer reads as zero until it has been filled
once after reset, so the sum starts correctly without clearing memory. The
sum wraps modulo 2^13. A transient overflow therefore cancels out as the
sample leaves the window, and S(n) always equals the true window sum
whenever that sum fits.

The products are rounded to nearest, not truncated. Truncation at 5 fraction
bits lowers both the real and imaginary part of every product by half an
LSB on average. Summed over 128 products, this turns AC2 by enough to bias
the CFO estimate by about 0.05 subcarrier spacings. With rounding, the
residual error in the low-noise test is below 0.002.

## The energy correlator (XCR)

This is the largest block: about 2,770 of the roughly 4,800 flip-flops. It is
also where the published design saves most.

XCR(n) = Σ_{m=0}^{D-1} |c2(n-m)| a_m. The coefficients are restricted to
{0, 1/2, 1}, so each is split into two bits, a_m = a0_m + a1_m/2. The
correlator is built in direct form:

1. A D-tap delay line of |c2|, only 2 + fx = 6 bits wide.
2. Each tap is routed, by constant coefficient bits, into an "a0" adder tree,
   an "a1" adder tree, or neither.
3. Each tree is balanced, and its level-i adders are 2 + i + fx bits wide.
4. The a1 sum is shifted right by one and added to the a0 sum.
5. The result saturates at the Q8.4 maximum and is registered.

A transposed-form correlator would instead need every delay element and
adder at the full 8 + fx bits. That is the comparison baseline of the
published work and is not included.

**The coefficient vector is a stand-in.** The real a_m is the normalised
energy |p_m|² of the L-DACS1 preamble waveform, quantised to 0, 1/2 or 1.
The published description says it has 132 nonzero entries but does not list
them. The default vector in `ldacs_sync_pkg` has the right layout:

* D = 460 taps. The newest 160 taps cover the ISI-free part of c2 in the
  second symbol, the next 140 are zero (there c2 mixes the two symbols),
  and the oldest 160 cover the ISI-free part of the first symbol. These
  counts follow from the L-DACS1 symbol timing: 300 samples per symbol, of
  which the first 12 overlap the previous symbol.
* Within those stretches, the values follow a fixed pseudo-random pattern:
  64-periodic for the first symbol, 128-periodic for the second. 80 entries
  are 1 and 60 are 1/2, so 140 are nonzero.

For a real receiver, compute the quantised |p_m|² of the standard's
preamble. Pass it as the `A0`/`A1` parameters of `ldacs_sync_top` (bit m
belongs to tap m; tap 0 is the newest sample). D may change with it.

## Detection, search window and CFO capture

* **Alignment.** All paths are delayed so that XCR, |AC1|, |AC2|, ENE and
  both angles reach the comparator, the peak search and the CFO estimator
  for the same input sample, LAT = ITER + 5 = 19 samples after it entered.
  `xcr_idx = n_idx - LAT` is the index of that sample, counted from reset
  (16 bits, wraps).
* **Detection.** `preamble_detect` issues a one-sample `detect` pulse on the
  32nd consecutive sample with |AC1| + |AC2| > ENE. A tie counts as false. A
  new pulse needs the condition to break and then hold for another 32
  samples.
* **Search window.** The published design fixes the window length,
  Δ = 56·Nov = 224 samples, but not its position. Here the window opens
  `SEARCH_DELAY` = 282 samples after detection. In simulation, detection
  happens about 200–210 samples into the preamble, and the XCR peak is at
  the last preamble sample (sample 599). A delay of 282 puts the peak near
  the middle of the window, which leaves margin for jitter in the detection
  point on both sides. Change `SEARCH_DELAY` together with the coefficients.
* **STO output.** The first largest value in the window wins. `d_hat` is
  the input-sample index of the XCR peak, which is the last sample of the
  second preamble symbol. The first data symbol starts at `d_hat + 1`.
* **CFO rule.** eps = φ2/π, plus 2 if φ1 > π/2, minus 2 if φ1 is at or
  below −π/2 (or exactly π/2). φ is the rotation that the offset causes.
  With c = r*(n)·r(n−lag), that rotation is the negative of the metric's
  angle, so `fre_offset` negates both angles.
* **CFO capture.** φ1 is captured on the sample where the search starts,
  when AC1 spans the first symbol. φ2 is captured on every new running
  maximum of XCR, so it ends up as the AC2 angle at the estimated timing,
  when AC2 spans the second symbol.
* **Latency.** `sto_valid` comes one sample after the window closes, and
  `eps_valid` one sample after that. That is about 130 samples (53 us) after
  the end of the preamble. The published design says its results are ready
  within the preamble. This design does not meet that, because its window
  is centred on a peak that sits at the very end of the preamble.

## Interface of `ldacs_sync_top`

| port        | dir | width | meaning                                                   |
|-------------|-----|-------|-----------------------------------------------------------|
| `clk`       | in  | 1     | clock                                                     |
| `rst_n`     | in  | 1     | asynchronous reset, active low                            |
| `en`        | in  | 1     | sample strobe; tie high to clock at the 2.5 MHz sample rate |
| `r`         | in  | 32    | `iq_t` {re, im}, each Q1.15                               |
| `detect`    | out | 1     | preamble detected (one sample)                            |
| `searching` | out | 1     | STO search window open                                    |
| `xcr`       | out | 12    | XCR metric, Q8.4                                          |
| `sto_valid` | out | 1     | STO result strobe (one sample)                            |
| `d_hat`     | out | 16    | STO estimate: index of the last preamble sample           |
| `eps_valid` | out | 1     | CFO result strobe (one sample)                            |
| `eps_hat`   | out | 18    | CFO, signed Q3.15 subcarrier spacings                     |

Every register advances only when `en` = 1, so the clock may be faster than
the sample rate. Outputs hold their value between strobes. Every block is
fully pipelined and takes one sample per strobe.

Parameters are `L` (64), `M` (32), `FA` (5), `FX` (4), `D` (460), `A0`/`A1`,
`ITER` (14 CORDIC iterations), `SEARCH_WIN` (224), `SEARCH_DELAY` (282) and
`IDX_W` (16). `FA` and `FX` set all the word widths, so the precision
trade-off can be explored at other settings (the published study covers
fa = 4…7 and fx = 3…7).

## Departures and choices

Taken from the published design:

* the block structure;
* the metric definitions;
* L, m, Δ, fa and fx;
* all the number formats;
* the direct-form correlator structure and its adder widths;
* the detection rule and the CFO rule.

This design's own:

* **Phase translation.** The published design uses a vendor CORDIC core.
  `cordic_vec` is a plain pipelined vectoring CORDIC: 14 iterations, 4
  guard bits, gain compensated by a constant multiply.
* **Coefficients.** The XCR coefficient vector and D = 460 (see above).
* **Window position.** `SEARCH_DELAY`.
* **CFO capture points.** When φ1 and φ2 are captured.
* **Angle sign.** The published text gives the sign two ways: "φ1 = ∠AC1"
  next to AC1 = e^{−jφ1}·…. The sign that makes eq. (10) return +eps was
  chosen.
* **Window length.** The text also gives it two ways: 56·Nov samples,
  while arguing that it should be below 64. 224 was kept.
* **Arithmetic details.** Rounding and saturation of the products,
  saturation of XCR, wrap-around of the sums, zero history after reset,
  pipeline registers and alignment delays, the sample strobe, and how
  detection re-arms.
* **Figure labels.** In the published block diagram, the angle and
  magnitude labels of the AC1 and AC2 phase translators look swapped. Here
  each metric feeds its own translator.
* **Not built.** The transposed-form correlator, which is only a baseline
  in the published comparison. The FPGA-specific results (LUT, flip-flop
  and DSP counts, power) are not reproduced.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=F`.

| testbench              | what it checks                                                             |
|------------------------|----------------------------------------------------------------------------|
| `tb_rx_buffer`         | both outputs against a history queue, strobe gaps, hold between strobes     |
| `tb_conj_mult`         | 64-bit integer reference with rounding and saturation, full-scale corners   |
| `tb_metric_acc`        | recursive sum equals a direct 128-term sum over 4,000 samples, range limits |
| `tb_cordic_vec`        | magnitude and angle against `sqrt`/`atan2`, all quadrants, latency ITER+2   |
| `tb_preamble_detect`   | comparison, run length, the pulse on exactly the 32nd sample, ties          |
| `tb_energy_cor`        | XCR against a reference sum at full size (460 taps), saturation, latency    |
| `tb_timing_sync`       | state, start/new_max, first-maximum rule, ignored detections, d_hat         |
| `tb_fre_offset`        | all three branches of the CFO rule, including ±π/2 and −π                   |
| `tb_ldacs_sync_top`    | end to end at default parameters (see below)                                |
| `tb_ldacs_sync_awgn`   | 48 frames at 10 dB SNR, CFO 0 and 1.5: STO fail rate, CFO MSE               |
| `tb_ldacs_sync_precision` | three synchronizers with fa/fx = 7/7, 5/4, 4/3 on one 5 dB stream      |
| `tb_ldacs_sync_channels` | simplified en-route and terminal-area multipath with Doppler, 10 dB SNR  |

**End-to-end test.** `tb_ldacs_sync_top` sends four frames, with CFO 0.3,
+1.5, −1.5 and −0.7 subcarrier spacings, low noise and random gaps in the
strobe. It requires:

* STO within 4 samples (1/11 of the cyclic prefix, the L-DACS1 accuracy
  requirement);
* CFO within 0.05;
* each result before the next frame;
* XCR at the true peak above XCR 64 samples (one short repetition) before
  and after it, where a repetitive preamble would put its side peaks;
* every mechanism to occur at least once: detection, search, running-max
  update, both result strobes, and each branch of the CFO rule.

Observed: the STO was exact in all four frames and the CFO error was below
0.002.

**AWGN test.** In `tb_ldacs_sync_awgn` (10 dB SNR), all 48 frames were
timed correctly, and the CFO mean square error was about 8e-5 without CFO
and 9e-5 with CFO 1.5.

**Precision test.** In `tb_ldacs_sync_precision`, 5 dB SNR, 32 frames, all
three word-length settings timed every frame. CFO MSE was about 1e-4 without
CFO and about 5e-4 with CFO 1.5, nearly the same for all three settings.
The gap between the two CFO cases comes from the noise in the frames, not
from the CFO. With the CFO assigned to the other half of the frames, the
CFO 1.5 frames gave the lower MSE: about 2e-4, against 3e-4 without CFO.

**Multipath test.** `tb_ldacs_sync_channels` runs 56 frames at 10 dB SNR
through two simplified aeronautical channels:

* En-route: a direct path plus echoes at 0.75 and 37.5 samples (0.3 µs and
  15 µs), Doppler up to 1250 Hz.
* Terminal area: Rician with a 10 dB direct-to-scatter ratio, three scatter
  paths within 25 samples (10 µs), Doppler up to 624 Hz.

Each path has one random Doppler frequency and phase per frame. The path
powers and the Doppler model are this testbench's own choices. The CFO
reference includes the direct path's Doppler. All frames were timed within
4 samples. CFO MSE was 1e-4 to 4.4e-4.

There is no phase noise and no DME interference. The DME sources are
specified by absolute power at the receiver input (−67.9, −74 and
−90.3 dBm), but the wanted signal's level is not, so their ratio to the
signal is unknown. The test runs at
most 56 frames because `d_hat` counts samples modulo 2^16.

These tests use the stand-in preamble, so they do not reproduce the
published performance curves.

To run a testbench with Verilator (5.x), from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/ldacs_sync_pkg.sv tb/tb_ldacs_sync_top.sv --top-module tb_ldacs_sync_top
./obj_dir/Vtb_ldacs_sync_top
```

Replace the testbench name to run another. `timing_sync` and
`preamble_detect` carry concurrent assertions on their output rules; they
are checked when simulating with `--assert`. All of them finish in well under
a second of simulation time.

## Size

After generic synthesis with default parameters, the design has about:

* 4,800 flip-flop bits, of which 2,760 are the correlator delay line and
  most of the rest the three 16-stage CORDIC pipelines;
* 7,900 memory bits in the delay buffers (2 × 64 complex samples, 5 × 128
  six-bit values);
* 1,400 word-level cells.

The correlator's adder trees are pruned to the 140 taps that have a nonzero
coefficient.
