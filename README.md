# A clocked quantum random bit generator from random flip-flops

A T flip-flop whose clock input is driven by a single-photon detector toggles
at random moments: each photon detection is an independent quantum event, so
the detections form a Poisson process. If a second, ordinary D flip-flop
samples that T flip-flop on a regular clock, each sample is a random bit. The
pair behaves like a T flip-flop that obeys its clock only with probability
one half. That is a *T-type random flip-flop* (TRFF), a logic element that
returns a fresh random bit on every clock edge.

This RTL implements that generator in the form meant for cryptographic use:

* a **single-stage TRFF**: one detector, one T flip-flop and one sampling D
  flip-flop;
* an **improved multi-stage TRFF**: two (or more) single stages, each with its
  own detector, sampled by the same clock and combined by an XOR;
* a **word generator**: several multi-stage cells on one clock, giving an
  N-bit random word on every edge.

There is no buffer, extractor or other post-processing anywhere. A bit leaves
the generator one clock-to-output delay after the edge that sampled it. The
path from the physical process to the output bit holds no stored random
state apart from the flip-flops themselves.

## Why a sampled toggle is random, and where it is not

Take one stage, sampled at rate `f_BIT`, with detections at mean rate
`f_DET`. Between two samples the T flip-flop toggles once per detection. So
the new bit equals the previous bit when an even number of detections fell
into the period, and is its complement when the number was odd. That rule is
the whole logic function of a stage, and the testbenches check it bit for bit.

**Autocorrelation is built into the method.** Let `λ = f_DET / f_BIT` be the
mean number of detections per bit. For a detector without dead time, the
probability that the count in one period is even is `(1 + e^(-2λ)) / 2`. So
the lag-1 serial autocorrelation of the bits is

    a1 = exp(-2 λ).

Even perfect hardware produces correlated bits when it samples too often
compared with the toggle rate. A real detector has a dead time, about 6 ns
for the pixels this design was characterised with. Dead time makes exactly
one toggle per period more likely and pulls `a1` negative when the sampling
period approaches it. The two effects together can make the coefficients
change sign at high bit rates.

**Bias comes only from the hardware.** In logic terms the T flip-flop spends,
on average, equal time in each state, so the bits have no bias. In silicon,
the output of the T flip-flop has finite rise and fall times `t_R` and `t_F`,
and the D input switches at a threshold `η` (a fraction of the swing). The
sampler then sees the high state for slightly longer or shorter than the low
state:

    b = p1 - 1/2 = f_DET · (t_F - η (t_R + t_F)) / 2.

So the bias grows in proportion to the detection rate and does not depend on
the bit rate. On the FPGA used to characterise the circuit, the coefficient
was about 6.8 ps. This is an analog effect. The RTL has no rise times or thresholds, so in
plain simulation the bias is purely statistical. `tb/tb_bias_model.sv` adds
the analog edges back as a behavioural delay model, to show the law at work.

**Why two stages.** XORing two independent streams, each with bias `b` and
lag-1 autocorrelation `a1`, gives

    b'  = -2 b^2
    a1' = a1^2 + 8 a1 b^2.

A single stage at a 20 MHz bit clock and 35 to 55 Mcps per detector has
`|b|` and `|a1|` of about 5·10⁻⁴ or less. Two stages bring both below about
5·10⁻⁷. The XOR comes after the sampling flip-flops, so the second stage adds
no cycle of latency. Optical or electrical crosstalk that fires both
detectors at once toggles both T flip-flops together. The XOR of the two
stages does not change, so crosstalk adds neither bias nor correlation. The
testbenches force that case and check it.

**Operating point.** The generator was characterised at `f_BIT` = 10, 15, 20
and 25 MHz and at detection rates up to 80 Mcps per pixel. The main operating
point is a 20 MHz bit clock (20 Mbit/s per cell) with 45 Mcps per detector.
As a rule of thumb for one stage, `|a1|` stays within 10⁻³ when
`f_DET ≥ 2.5 f_BIT` and the dead time is about `1/(8 f_BIT)`.

## Structure

```
qrng_top  (WORD_BITS cells, one bit clock)
 └─ trff_double  ×WORD_BITS   (STAGES single stages, XOR of their sampled bits)
     └─ trff_single ×STAGES   (one detector line)
         ├─ trff_tff          T flip-flop, clocked by the detection pulse
         └─ trff_dff          D flip-flop, clocked by the bit clock
```

| file | contents |
|---|---|
| `rtl/trff_pkg.sv` | default stage count (2) and word width (1) |
| `rtl/trff_tff.sv` | detection-clocked T flip-flop |
| `rtl/trff_dff.sv` | sampling D flip-flop with Q and Q-bar |
| `rtl/trff_single.sv` | single-stage TRFF |
| `rtl/trff_double.sv` | multi-stage TRFF, parameter `STAGES` (default 2) |
| `rtl/qrng_top.sv` | word generator, parameters `WORD_BITS` (default 1) and `STAGES` (default 2) |

### Top-level interface (`qrng_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | bit clock `f_BIT` |
| `rst_n` | in | 1 | asynchronous active-low reset of every flip-flop |
| `t` | in | 1 | toggle enable of all T flip-flops; tie to 1 in normal use |
| `det` | in | `WORD_BITS × STAGES` | detection pulses; `det[w][s]` drives stage `s` of cell `w` |
| `rnd_word` | out | `WORD_BITS` | random word, bit `w` from cell `w` |
| `strobe` | out | 1 | high from the first sampling edge after reset |

Timing: every rising edge of `clk` samples all T flip-flops. `rnd_word` shows
the new word one clock-to-output delay later (plus one XOR level) and holds it
for the rest of the period. The bit rate is `WORD_BITS · f_BIT`. To scale it,
widen the word or raise the clock rate.

The detectors are not part of this logic. They are the single-photon
avalanche diodes on a separate chip, each with passive quenching and a pulse
shaper, lit by an LED. Each `det` line must carry one clean digital pulse per
detection. Its rising edge is the event that counts.

## Choices made in this RTL

The circuit of each stage (T into a D flip-flop, a shared T input and a shared
sampling clock, and an XOR of the sampled bits) is the original design. The
following points are choices of this implementation:

* **Reset.** Every flip-flop has an asynchronous active-low reset. The
  original circuit needs none, because the starting state of a T flip-flop does
  not affect the distribution of the bits. The reset is there for
  repeatable simulation.
* **Edges.** The T flip-flop toggles on the rising edge of the detection
  pulse, and the D flip-flop samples on the rising edge of the clock.
* **Strobe.** In the original circuit the clock itself is passed out as the
  strobe. Here `strobe` is a registered level that goes high on the first edge
  after reset, so the clock never drives a data output. Each rising clock edge
  while `strobe` is high marks a new word.
* **Stage count.** `STAGES` is a parameter. The original design uses two
  stages and notes that more can be XORed. `STAGES = 1` gives the single-stage
  generator.
* **Word width.** The generator that was built and measured is one two-stage
  cell, so `WORD_BITS` defaults to 1. Wider words follow the idea of sharing
  one clock among N random flip-flops.
* **Not built:** several phase-shifted clocks driving groups of cells. This
  is mentioned as another way to scale, but it is an alternative to the
  shared-clock word, not part of the main design.

## Things to know before using it in silicon

* **Metastability.** The D flip-flop samples a signal that is asynchronous to
  its clock, with no synchroniser. This is deliberate: it keeps the path from
  the physical event to the bit direct, and it keeps the latency at one edge.
  A toggle that lands within the sampling window can make the flip-flop
  metastable. Whether that needs a synchroniser stage in your process, and
  what the extra stage would do to the bit statistics, has not been
  evaluated here.
* **Clocking.** Every T flip-flop is clocked by its own detection line.
  Static timing tools must treat each `det` input as a separate clock that is
  asynchronous to `clk`.
* **Bias in silicon.** The bias formula above depends on the library's rise
  and fall times and its input threshold, which the RTL does not contain.
  Measure it on hardware, and keep at least two stages.
* **Detector rate.** Choose `f_DET` to be at least about 2.5 times `f_BIT`.
  The measured sweet spot is 35 to 55 Mcps per detector at `f_BIT` ≤ 20 MHz.

## Verification

Each testbench checks its results itself. It prints one line
`TB_RESULT checks=N failures=M` and stops at a fixed watchdog time.

| testbench | what it shows |
|---|---|
| `tb/tb_trff_tff.sv` | toggling with T high, holding with T low, complement output, reset |
| `tb/tb_trff_dff.sv` | samples D at the edge and ignores glitches between edges |
| `tb/tb_trff_single.sv` | even/odd detection rule, bit for bit; `a1 = exp(-2λ)` at λ = 0.5 |
| `tb/tb_trff_double.sv` | XOR of the stage parities for 2 and 3 stages; crosstalk leaves the bit unchanged; `a1 = exp(-4λ)` |
| `tb/tb_qrng_top.sv` | 4-bit word, 45 Mcps detectors with 6 ns dead time, 20 MHz clock, 200 000 words compared against a reference model; strobe, repeat, flip, crosstalk, T-low hold and mid-run reset each forced and counted |
| `tb/tb_qrng_top_full.sv` | same test on the default top (one two-stage cell), 10⁶ words |
| `tb/tb_bias_model.sv` | the bias law: a behavioural edge model (`tb/tff_edge_model.sv`) between T and D flip-flops delays rising and falling transitions differently (α = 1 ns, exaggerated so that 10⁶ bits resolve it); bias equals `α f_DET` at 15/30/45 Mcps, is the same at 10 and 20 MHz, and the XOR of two stages gives `-2b²` |
| `tb/tb_autocorr_sweep.sv` | λ sweep 0.1 to 1.5 without dead time: single stage against `exp(-2λ)`, two stages against `exp(-4λ)`, 2·10⁵ bits per point; then 10/15/20/25 MHz at 45 Mcps with 6 ns dead time, printing bias and `a1` to `a4` |

The detectors are modelled by `tb/spad_pixel_model.sv`. It is a behavioural
source, not synthesizable. Its waiting times are a dead time plus an
exponential time. It puts every detection edge on an odd picosecond, and the
clock edges fall on even picoseconds, so no detection ever coincides with a
sampling edge. The reference model can therefore predict every bit exactly.
`tb/trff_tb_pkg.sv` holds the operating point (20 MHz, 45 Mcps, 6 ns). It also
holds the serial-autocorrelation estimator

    a_k = Σ_{i<N-k} (x_i - x̄)(x_{i+k} - x̄) / Σ_{i<N-k} (x_i - x̄)^2.

The autocorrelation checks allow four standard errors (`1/√N`), the bias
checks four or five (`1/(2√N)`). For `a1` with 2·10⁵ bits the margin is
about 0.009. This resolves the `exp(-2λ)` law well, but it is far too
coarse for the 10⁻⁴ to 10⁻⁷ levels that matter in use. Those levels need
hardware runs of 10⁹ bits or more, checked with a statistical test suite.

### Running a testbench with Verilator

```
verilator --binary --timing --timescale 1ns/1ps -Wno-ZERODLY \
    --top-module tb_qrng_top_full -y rtl -y tb \
    rtl/trff_pkg.sv tb/tb_qrng_top_full.sv
./obj_dir/Vtb_qrng_top_full
```

Replace `tb_qrng_top_full` with any testbench name. Every run takes
under a minute. To try another configuration, override the top's parameters,
for example `qrng_top #(.WORD_BITS(8), .STAGES(3))`. To try another operating
point, change `trff_tb_pkg` or the `MEAN_WAIT_PS` and `DEAD_TIME_PS`
parameters of the detector model.
