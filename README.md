# A two-channel digital phase-locked loop for laser stabilization

This is synthesizable SystemVerilog for a digital phase-locked loop (DPLL) of the kind
used to lock lasers and frequency combs: the loop compares a beat note with a digital
reference and drives an actuator so that the beat's phase stays fixed. The design was
built for a low-cost FPGA board with two 14-bit ADCs and two 14-bit DACs, all clocked
at 125 MHz. It contains:

* a phase detector per channel,
* a PII²D loop filter per channel,
* an internal VCO that can drive an acousto-optic modulator directly,
* measurement tools around the loop: a dither with lock-in detection, a zero
  dead-time frequency counter, a network analyzer and a two-trace capture memory.

## The main idea: track the phase itself, not its sine

An analog mixer phase detector outputs sin(φ). It is only linear for small φ, and it
cannot tell φ from φ + 2π. This design measures the full-circle phase instead:

1. It mixes the input with the cosine and sine of a reference, which gives I and Q.
2. It low-pass filters I and Q.
3. It takes θ = atan2(Q, I).

A free-running or badly locked laser can wander through many turns of phase. θ itself
is therefore unbounded: it wraps at ±π on every turn. The detector does not pass θ to
the controller. It passes the phase increment

    dθ[n] = (θ[n] − θ[n−1]) wrapped into [−π, π)

This is a bounded number, correct as long as the phase moves by less than half a turn
per sample (125 MS/s). Its average is the frequency offset from the reference.

The controller therefore receives a frequency error, and its branches shift by one
order:

| Loop filter branch | Acts on the phase as |
|---|---|
| integrator | proportional |
| double integrator | integral (zero static phase error) |
| proportional | derivative |
| derivative | second derivative |

## Signal chain

```
 ADC1 ─► dpe ─► dθ1 ─┬──────────────► channel_backend 1 ─► out1 ─┬─► DAC1 mux ─► DAC1
                     │                                            ├─► VCO mux ─► vco ─┐
 ADC2 ─► dpe ─► dθ2 ─┤  ch2 mux: {dθ2, dθ1, out1+offset}          │                   │
                     └──────────► channel_backend 2 ─► out2 ──────┴─► DAC2 mux ─► DAC2│
                                                 ▲                      ▲ (VCO tone) ◄┘
                                  vna stimulus ──┘ (either channel)
```

`dpe` is the differential phase extractor. It contains:

* `ref_nco` — a 48-bit reference oscillator,
* `iq_mixer`,
* two `boxcar_lpf` filters,
* `cordic_atan2`,
* `phase_diff`,
* `phase_wrap`.

`channel_backend` contains:

* `loop_filter`,
* `freq_counter`,
* `dither`,
* `lockin`,
* `output_sum`, which adds the offset, the dither and the analyzer stimulus.

The multiplexers are in `signal_router`. `vna`, `vco` and `scope` sit beside the two
channels. `dpll_top` wires everything together.

### Number formats

| Quantity | Format |
|---|---|
| ADC, DAC samples | 14-bit two's complement |
| reference frequency word k | 48 bits: f_ref = k / 2^48 · 125 MHz |
| sine/cosine | 16-bit, peak ≈ 32000 |
| I, Q | 16-bit |
| θ, dθ | 16-bit "turns": 2^16 = 2π, +π = 32768 |
| loop output | 16-bit two's complement (−1 V … +1 V when sent to the DAC) |
| counters, lock-in, analyzer | 64-bit sums |

## Phase detector (`dpe`)

**Reference.** A 48-bit accumulator advances by k every clock. Its top 32 bits drive
a 16-stage pipelined CORDIC rotator (`cordic_sincos`), which gives cos and sin.

**Mixer.** I = x·cos / 2^13 and Q = −x·sin / 2^13. With this sign convention,
atan2(Q, I) is the input's phase relative to the reference.

**Filters.** There are three selectable bandwidths: 31, 15.5 and 3.75 MHz. Each is
built as a moving average of 2, 4 or 16 samples. The −3 dB points of these averages
at 125 MS/s are 31.3, 14.2 and 3.5 MHz, the closest boxcars to the three settings.

A boxcar has little stopband. The sum-frequency product of the mixer (at 2·f_ref,
aliased) is rejected well only when it falls near one of the filter's nulls at
multiples of f_s/L. Otherwise it leaves a ripple on θ, which the differentiator
amplifies in dθ. The ripple lies far outside any achievable loop bandwidth, so the
loop averages it out. The frequency counter and the lock-in sum it away. A
sharper filter can replace `boxcar_lpf` without changing its interface.

**Arctangent.** A vectoring CORDIC with a pre-rotation by π for the left half-plane,
16 stages and 6 guard bits. The error is within ±3 LSB of 2^16 per turn for vectors
longer than about 1000 LSB.

**Differencing and wrap.** The difference is kept 17 bits wide. The wrap then adds or
subtracts one turn; in two's complement this is the same as dropping the top bit.

**Latency.** From the ADC port to dθ it is 1 + 2 + 18 + 1 + 1 = **23 clocks (184 ns)**.

## Loop filter (`loop_filter`)

With x = dθ, the filter computes

```
P  = Kp·x                                   kp  : Q16.16
I  = Σ Ki·x                / 2^32           ki  : units of 2^-32
II = Σ( Σ Kii·x / 2^16 )   / 2^32           kii : units of 2^-48
D  = Kd·(f[n] − f[n−1])    / 2^32           kd  : Q16.16
     f[n] = f[n−1] + kdf·(x·2^16 − f[n−1]) / 2^16      kdf : Q0.16
y  = sat16(P + I + II + D)
```

Each branch has an enable bit; the double integrator is normally off.

**Converting gains.** The host software computes linear gains from loop settings:

* Kp = 10^(kp/20) / k_c
* Ki = Kp · f_i · 2π / f_s (or 1/k_c · f_i · 2π / f_s)
* Kii = Ki · f_ii · 2π / f_s
* Kd = Kp · (1/f_d) · f_s / 2π
* derivative roll-off = f_df · 2π / f_s

Here k_c is the plant's open-loop DC gain; f_i, f_ii and f_d are the crossover
frequencies; f_df is the derivative roll-off frequency; f_s = 125 MHz.

The registers then take:

* kp = round(Kp·2^16)
* ki = round(Ki·2^32)
* kii = round(Kii·2^48)
* kd = round(Kd·2^16)
* kdf = round(2π·f_df / f_s · 2^16)

Both sides use the same units: dθ LSB (2^-16 turn) in and output LSB out. The plant's
sign must be included in the gains. The lock-in measurement below provides it.

**Windup and lock_en.** Each integrator saturates at the level where it alone would
fill the output range. The output therefore leaves the rail within a few samples of
the error changing sign. While `lock_en` is low all filter state is cleared and the
output is 0. The user offset still reaches the output, so the actuator sits at its
quiescent point.

**Timing.** Two clocks: the branch terms are formed in the first, and summed and
saturated in the second.

## Output node, dither and lock-in

`output_sum` adds four terms, saturates, and registers the result:

* the loop filter output,
* the user offset (for example the VCO's quiescent frequency),
* the dither square wave,
* the analyzer stimulus.

`dither` generates ±amp with a programmable half period.

`lockin` accumulates dθ with the sign of the square wave over whole dither periods.
The result measures the controlled system's gain in frequency per output unit,
including its sign. It is computed as

    result / (amp · samples)

in dθ LSB per output LSB. Every loop delay after a square-wave edge counts against the
result. Use a half period much longer than the loop delay (about 50 clocks with the
VCO).

## Internal VCO (`vco`)

The loop output is read as offset binary:

* −32768 is code 0, which is 0 Hz,
* +32767 is code 65535, which is f_s/2 = 62.5 MHz.

So the −1 … +1 V span of the loop output maps to 0 … 62.5 MHz, i.e. 31.25 MHz/V. One
code step is 953.7 Hz. The synthesizer:

1. adds code · round(2^47/65535) to a 48-bit accumulator each clock,
2. runs a CORDIC sine on the top 32 bits,
3. scales by `vco_amp` (Q0.16; full scale gives a peak of 8000),
4. adds `vco_dc` and saturates to 14 bits.

Example: the quiescent 27 MHz of an acousto-optic modulator is code 28311, i.e. an
output offset of −4457.

The VCO adds 20 clocks to the loop.

## Two channels: the three control scenarios

`glob.ch2_src` selects the input of channel 2's loop:

| `ch2_src` | channel 2 loop input | use |
|---|---|---|
| `CH2_OWN_PHASE` | its own ADC through its own `dpe` | two independent locks, e.g. f_CEO and one comb tooth |
| `CH2_CH1_PHASE` | channel 1's dθ | one error, two actuators with different loop filters (fast short-stroke + slow long-stroke) |
| `CH2_CH1_OUT` | channel 1's loop filter output + `ch2_seed_offset` (saturated) | channel 2 keeps channel 1's actuator near a set point by driving a slow actuator |

The seed for `CH2_CH1_OUT` is taken at the sum of channel 1's loop filter. That is
before channel 1's output offset, dither and analyzer stimulus are added. Channel 2
therefore regulates the actuator command itself, and `ch2_seed_offset` sets the point
it is held at.

Only one VCO exists. `glob.vco_src` chooses which channel drives it. Each DAC plays
either its channel's output (14 MSBs) or the VCO tone, set by `cfgN.dac_use_vco`.

## Measurement tools

**Frequency counter** (`freq_counter`). It sums dθ over a gate of `FC_GATE_CYCLES`
clocks (default 125 000 000 = 1 s). The next gate starts on the very next sample, so
there is no dead time. The mean frequency offset from f_ref is

    count / 2^16 / T_gate

**Network analyzer** (`vna`). One frequency point per `vna_start`:

1. Its own 48-bit oscillator produces the stimulus amp·sin. It is added to the outputs
   selected by `vna_inject`, also while the loop is locked.
2. After `vna_settle` clocks it correlates the selected signal for `vna_samples`
   clocks: acc_i = Σx·sin and acc_q = Σx·cos. The signal is ADC1, ADC2, dθ1 or dθ2.
3. `vna_done` pulses settle + samples + 1 clocks after the start.

The response phasor is (acc_i, acc_q)·2/(32000·N) and the stimulus is amp·32000/32768.
Their ratio is the transfer function at that frequency. Sweeps are run by software.

**Capture memory** (`scope`). It records 16384 samples of two of six test points:

| index | test point |
|---|---|
| 0 | ADC1 |
| 1 | dθ1 |
| 2 | out1 |
| 3 | ADC2 |
| 4 | channel 2 loop input |
| 5 | out2 |

Recording starts after an `arm` pulse. The samples are read back through a
synchronous port, and software computes time traces, spectra, I/Q plots and phase
noise from them. The filtered I/Q of both channels are also top-level outputs.

## Latency

Without the VCO, from ADC port to DAC port there are 23 (detector) + 2 (loop filter)
+ 1 (summer) = **26 clocks (208 ns)**. Through the VCO the total is **46 clocks
(368 ns)**.

The converters add their own pipeline delays on top. In the published measurements,
the instrument as a whole (ADC, FPGA and DAC) takes 407 ns (565 ns with the VCO), of
which 207 ns is the demodulation.

With about 1/(8τ) as the usable loop bandwidth, this design's FPGA part alone would
allow roughly 600 kHz without the VCO and 340 kHz with it.

## What is outside the RTL

These parts have ports on `dpll_top` but are not built here:

* **Converters.** The ADC and DAC chips and their anti-aliasing filters. `adc1/adc2` in
  and `dac1/dac2` out carry one 14-bit word per clock.
* **Clocking.** A single 125 MHz clock `clk` and a synchronous active-high `rst`.
* **Host link.** On the board a processor runs a TCP server for the PC software. Here
  all settings arrive as two packed structs per channel/global (`chan_cfg_t`,
  `glob_cfg_t` in `dpll_pkg`), and all results leave as ports. There is no register
  map or bus; a bus bridge must register the structs.

## How far it can be trusted

The **block structure** follows the published block diagram:

* the order of the detector stages,
* the four loop-filter branches,
* where the offset, dither and stimulus enter,
* the sources of each multiplexer, including the point where channel 2's seed is
  taken (the diagram is followed there, where the text says only "the output").

So do the **published numbers**:

* the 48-bit reference,
* the three filter bandwidths,
* the 16-bit loop output with 14 MSBs to the DAC,
* the VCO mapping 0 → 0 Hz, 2^16−1 → 62.5 MHz,
* the 1 s counter gate.

**This design's own choices** cover everything the published description leaves open:

* all internal widths and gain formats,
* the boxcar filters,
* CORDIC for the trigonometry,
* the lock-in and analyzer algorithms,
* saturation, anti-windup and `lock_en` behaviour,
* the capture memory depth,
* the select encodings.

Each module's header says which parts are which.

Every module has a self-checking testbench. They compare against models written
independently of the RTL: real-valued trigonometry, explicit sums, or a 128-bit model
of the loop equations. Each testbench was also shown to fail on a deliberately broken
copy of its module.

Three testbenches cover the whole design; all close a real PLL:

* `tb_dpll_top` (counter gate shortened to 2000 clocks) loops DAC 1, which plays the
  VCO, back into ADC 1. The loop must pull a VCO started 95 kHz off onto a 27 MHz
  reference with no cycle slip. The testbench then exercises every mechanism and
  counts each:
  * the three channel-2 scenarios,
  * lock-in gain and sign,
  * an analyzer point taken in lock,
  * a capture,
  * both DAC sources,
  * all filter settings.
* `tb_dpll_full` runs the same lock at the default parameters, including a full 16384-
  sample capture. Its 1 s counter gate is not reached in simulation.
* `tb_fiber_link` runs the fiber noise canceler at the default parameters. The beat
  note is demodulated at 54 MHz. The VCO sits at 27 MHz and drives a modelled AOM
  that the light crosses twice, so the beat carries twice the VCO phase. The model
  delays it by 3.5 µs (AOM plus fiber round trip) and adds a 5 kHz drift and a 2 kHz,
  0.25-turn fiber-noise tone. The model reads the VCO's phase accumulator directly
  instead of demodulating DAC 1. With ki = −2^22 (Ki = −2^−10, 19 kHz crossover)
  the tone must drop to 0.05–0.20 of its size. A loop model predicts 0.10, and 0.103
  is measured. The mean VCO code must cancel the drift, with no cycle slip. Then the
  network analyzer, injecting 3 kHz at channel 1's output (the VCO) and detecting dθ,
  measures the noise rejection while locked. It takes one point locked and one open,
  and their ratio must be within 12 % of the model's 0.154. It measures 0.1543.

## Simulating

Any testbench runs with plain Verilator (5.x), from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -Irtl -y rtl -y tb \
    rtl/dpll_pkg.sv tb/tb_dpll_top.sv --top-module tb_dpll_top -o sim
obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M`. Replace `tb_dpll_top` with any
other `tb_*` name to run that one. The block testbenches each take under a second;
the two end-to-end ones take a few seconds each.

| Testbench | Block |
|---|---|
| `tb_ref_nco` | reference oscillator |
| `tb_iq_mixer` | mixer |
| `tb_boxcar_lpf` | I/Q filter |
| `tb_cordic_atan2` | arctangent |
| `tb_phase_diff` | difference |
| `tb_phase_wrap` | wrap |
| `tb_dpe` | phase detector |
| `tb_loop_filter` | loop filter |
| `tb_freq_counter` | frequency counter |
| `tb_dither` | dither |
| `tb_lockin` | lock-in |
| `tb_output_sum` | output node |
| `tb_channel_backend` | channel closed around a model plant |
| `tb_signal_router` | multiplexers |
| `tb_vna` | network analyzer |
| `tb_vco` | VCO |
| `tb_scope` | capture memory |
| `tb_dpll_top` | whole design, shortened gate |
| `tb_dpll_full` | whole design, default parameters |
| `tb_fiber_link` | fiber noise canceler with delayed double-pass AOM model; analyzer rejection point |

## Changing it

**Widths** live in `dpll_pkg`, as do the control structs. Modules read them from the
package; only a few input widths (`IN_W`, `W`) are also module parameters.

**Filter.** To change the I/Q filter, replace `boxcar_lpf`; keep the `sel` input and a
fixed latency (update `dpe`'s latency comment and `tb_dpe`'s expected 23 clocks).

**Counter gate.** The gate length is the `FC_GATE_CYCLES` parameter of `dpll_top`.

**Capture depth.** The depth is `DEPTH` on `scope`; the top's `scope_rd_addr` is
14 bits wide for the default 16384.
