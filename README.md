# Polyphase digital beamforming back-end for a 4-element 28 GHz array receiver

This is the digital back-end of a fully digital beamforming receiver. The
receiver is a uniform linear array of four antenna elements, spaced 0.75
wavelengths apart, working in the 27.5–28.35 GHz band. Each element has its
own analog I/Q front end. Both rails (I and Q) of each element are digitised
at 1966.08 MS/s, which covers a channel of about 800 MHz. Since every element
is digitised separately, the beam is formed entirely in logic, by weighting
each element's complex signal and adding them up.

No fabric logic runs at 1966 MHz. The data-converter FIFOs therefore hand
over **8 consecutive samples of every rail per 245.76 MHz clock**. The
back-end processes those 8 sampling phases in 8 identical lanes side by
side. Each lane first corrects every channel's gain and phase error with a
complex multiplier. It then forms one beam sample with a weight-and-sum
beamformer. An energy meter on the 8 beam outputs reports the received
power. Reading that power while the array turns gives a measured beam
pattern.

```
 FIFO words (per clock)          phase_lane p  (p = 0..7, all identical)
 adc[p][0] ─► cal_cmul (c0) ─┐
 adc[p][1] ─► cal_cmul (c1) ─┤
 adc[p][2] ─► cal_cmul (c2) ─┼─► bf_core  Σ w_i·y_i ─► beam[p] ─┐
 adc[p][3] ─► cal_cmul (c3) ─┘                                  │
                                                                 ▼
                                      energy_acc  Σ_window Σ_p |beam[p]|²
```

## Why eight independent lanes work

In a polyphase design the tricky point is usually that the samples of one
lane depend on samples held in other lanes, as in a filter. That is not so
here. The calibration multiply and the weight-and-sum both act on **one time
instant at a time**: output sample *n* depends only on the four channels'
input samples *n*. So splitting the stream by sampling phase changes nothing
in the arithmetic. Lane *p* handles samples 8k+p and needs no data from its
neighbours. All lanes use the same calibration constants and the same
weights, because those depend on the channel and not on when the sample was
taken.

This holds only because the beamformer is a narrowband phase-shift
beamformer. It applies one complex weight per element, which is exact at
the frequency the weights were computed for. It is an approximation over a
wide band: true time delays would need fractional-delay filters across the
lanes, and those are not part of this design.

## Signal path and what lies outside the RTL

Antenna sub-array → LNA → I/Q downconverter (central LO, shared by all four
channels through a 4-way splitter) → low-pass filter → IF amplifier →
variable-gain amplifier → balun → RF-SoC ADC (one for I, one for Q) →
data-converter FIFO → **this RTL**.

Everything up to and including the FIFOs is analog hardware or vendor IP,
so none of it is in the RTL. The FIFOs also deliver all eight rails aligned
to one 245.76 MHz clock derived from the sampling clock. The RTL therefore
has a single clock domain and no clock-domain crossing. The ADCs' own
start-up calibration is also part of the vendor IP. The "calibration" in
this RTL is the correction of the analog front ends described below.

## Number formats

| Type (`dbf_pkg`) | Fields | Width | Scale |
|---|---|---|---|
| `sample_t` | `re` = I, `im` = Q | 2 × 16 bit signed | ADC code |
| `coef_t` | `re`, `im` | 2 × 16 bit signed | Q2.14: 16384 = 1.0, range [−2, 2) |
| `beam_t` | `re`, `im` | 2 × 18 bit signed | ADC code, 2 guard bits |
| energy | — | 64 bit unsigned | sum of `re²+im²` |

Every narrowing step drops 14 fraction bits with round-half-up
(`(v + 2^13) >>> 14`). The result is then saturated to the target width.
When a clip happens it is reported on `cal_sat` or `bf_sat`. None of these
widths come from a published specification. They are the choices of this
implementation: 16-bit words match the RF-SoC ADC output format, and Q2.14
allows gain corrections of up to ×2.

## Calibration multipliers (`cal_cmul`)

Each channel's front end has its own gain and phase. Measured against a
reference receiver with a test signal, channel *i* has error g_i·e^{jψ_i}.
Software loads `cal[i] = (1/g_i)·e^{−jψ_i}` (scaled by 2^14), and every
lane multiplies:

    y = (I + jQ)(α + jβ) = (Iα − Qβ) + j(Iβ + Qα)

Register stage 1 holds the four 32-bit products. Stage 2 holds the rounded,
saturated sums. There are 4 × 8 = 32 of these multipliers in the design.

## Weight-and-sum beamformer (`bf_core`)

    b = Σ_i w_i · y_i          (weights not conjugated)

A plane wave arriving from angle θ reaches element *i* with the phase
2π·d·i·sin θ (d = 0.75 wavelengths). To steer the beam to θ₀, load

    w_i = e^{−j·2π·d·i·sin θ₀}   (×16384 for unit magnitude)

With this choice, the relative power received from direction θ is the array
factor

    |Σ_i e^{j·2π·d·i·(sin θ − sin θ₀)}|² / 16

For θ₀ = 20° this has nulls at sin θ = sin 20° ± k/3, that is near 0.5°,
−18.9°, −41.1° and 42.5°. The spacing is larger than half a wavelength, so
a grating lobe rises towards −82°. You can already see it at −60°, where
the pattern is back up to −2 dB. With four unit weights, the beam amplitude
is four times the channel amplitude. The 2 guard bits of `beam_t` cover
exactly that.

Stage 1 registers the 16 real products. Stage 2 adds them up, then rounds,
saturates and registers the result.

## Energy meter (`energy_acc`)

Each clock, the meter adds `re² + im²` over the 8 beam samples (registered).
It then accumulates those sums over `ACC_CYCLES` valid clocks (default 1024,
i.e. 8192 samples or 4.17 µs). At the end of a window it outputs the total
with a one-clock `energy_valid` pulse and starts again from zero. Invalid
clocks are skipped and do not count toward the window. `energy_clear`
restarts the window and also discards the clock still in the squaring
stage. Use it whenever the look direction or the array position changes.

## Timing

| Path | Latency |
|---|---|
| `adc` → calibrated sample (inside lane) | 2 clocks |
| `adc` → `beam`, `beam_valid`, `cal_sat`, `bf_sat` | 4 clocks |
| last valid beam word of a window → `energy_valid` | 2 clocks |

Throughput is one 8-sample word per channel per clock, i.e. 1966.08 MS/s per
channel at 245.76 MHz. There is no backpressure: a data-converter stream
cannot be stopped, so `adc_valid` is a plain qualifier. A gap in it passes
through as a gap in `beam_valid`.

The weights are read two clocks after the calibration constants, because
that is when the calibrated sample reaches the beamformer. A sample in
flight at the moment either input changes may therefore mix old and new
values. Change `cal` and `w` between measurements, or ignore the beam words of the
4 clocks that follow a change.

## Top-level interface (`dbf_rx_top`)

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst` | in | 245.76 MHz clock; synchronous active-high reset (clears the valid pipeline and the energy window) |
| `adc_valid`, `adc[8][4]` | in | `adc[p][i]` = sample p (0 = earliest) of channel i this clock |
| `cal[4]`, `w[4]` | in | calibration constants and weights, Q2.14, shared by all lanes |
| `energy_clear` | in | restart the energy window |
| `beam_valid`, `beam[8]` | out | beam samples in time order |
| `cal_sat`, `bf_sat` | out | some calibrated / beam sample of this output word was clipped |
| `energy_valid`, `energy` | out | window energy |

Parameters: `N_CH` (4), `N_PHASE` (8), `ACC_CYCLES` (1024) and `ENERGY_W`
(64). The word widths are set in `dbf_pkg`. If you change them, keep
`BEAM_W ≥ DATA_W + log2(N_CH)`, and keep `ENERGY_W` large enough for
`2·BEAM_W + log2(N_PHASE·ACC_CYCLES)` bits. Assertions check that all
multipliers and all lanes run in lock step. Another assertion checks that
window results never come back to back.

## Verification

Every module has a self-checking testbench in `tb/`. Each one computes its
expected values with an independent 64-bit integer model and checks the
latency. Each ends with a `TB_RESULT checks=… failures=…` line.

* `tb_cal_cmul`, `tb_bf_core`: random data and constants, including
  full-scale values that force clipping, with random gaps in the valid
  stream.
* `tb_phase_lane`: calibration followed by beamforming, with both clip
  flags checked.
* `tb_energy_acc`: small windows, random gaps and clears in the middle of a
  window.
* `tb_dbf_rx_top`: the whole back-end at its default size. A 300 MHz IF
  tone arrives as a plane wave on the four channels, and each channel gets
  a gain and phase error (gains 1.0/0.8/1.2/0.9, phases 0/30/−45/60°). The
  calibration constants undo the errors and the weights steer to 20°. The
  test sweeps the arrival angle from −60° to 60°, including the predicted
  nulls. Every beam sample and every window energy is checked bit-exactly.
  The normalised energies must match the theoretical array factor within
  0.5 dB; in practice they agree to 0.01 dB, and the nulls are about 85 dB
  down. Two further runs exercise the other mechanisms. One bypasses the
  calibration (identity constants), which costs 4 dB at 20°. The other
  overdrives the inputs, which makes both clip flags fire.

Run any of them with plain Verilator, for example:

    verilator --binary --timing --assert -Irtl rtl/dbf_pkg.sv \
        rtl/cal_cmul.sv rtl/bf_core.sv rtl/phase_lane.sv rtl/energy_acc.sv \
        rtl/dbf_rx_top.sv tb/tb_dbf_rx_top.sv --top-module tb_dbf_rx_top
    ./obj_dir/Vtb_dbf_rx_top

The end-to-end test takes about half a minute to build and a fraction of a
second to run.

## What follows the published design and what does not

Taken from the published description:

* four channels, each delivering complex I/Q samples;
* sampling at 1966.08 MS/s, with 8 samples per 245.76 MHz clock on one
  common clock;
* eight parallel beamforming cores, one per sampling phase;
* a complex calibration multiplier at every phase of every channel, with
  one constant α_i + jβ_i per channel;
* simple weight-and-sum beamforming on every phase, steered to 20° in the
  measurement;
* the received energy computed from the beam outputs of all phases.

Choices of this implementation:

* all word widths, the rounding, the saturation and the clip flags;
* the pipeline depths;
* valid-only streaming;
* the sample order within a clock;
* weights applied without conjugation;
* the energy window (its length and the clear input) and the fact that the
  energy is computed in logic at all;
* constants and weights taken as plain input ports. How software loads
  them (for example through a register bank) is left open.

Not included: the analog front end, the ADCs, the data-converter FIFOs and
their start-up calibration, the clocking hardware, and any OFDM
demodulation. The 64-QAM OFDM link parameters quoted for this receiver
(512-point FFT, 336 data subcarriers, 1.65 MHz spacing) were used to size
the analog chain. They describe no digital block of this back-end.
