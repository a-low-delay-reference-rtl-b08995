# Low-delay reference tracking for an eight-channel LLRF receiver

In the low-level RF (LLRF) system of a linear accelerator, every measured RF
signal passes through the same LO and clock distribution, and that
distribution drifts slowly. The drift shows up as a common phase error in
every channel. It is removed by also measuring the reference from the
master oscillator, which drifts in the same way, and subtracting its phase.

The usual method converts the reference I/Q to amplitude and phase with a
CORDIC (about 16 clocks), subtracts the phase, and converts back. This
design takes a shorter route. By Euler's formula, multiplying a channel
vector `A_m·e^{jφ_m}` by the conjugate reference `A_r·e^{-jφ_r} = I_r − jQ_r`
gives `A_m·A_r·e^{j(φ_m−φ_r)}`. Dividing by a long-term average of `A_r`
brings the gain back to about one. The division uses a slowly updated
reciprocal, so the sample-rate path is one complex multiplication, four
clocks long. It handles every sample as it arrives.

The price is that the reference's sample-to-sample amplitude noise is
multiplied into every channel. Tracking lowers the phase noise caused by
drift but raises the amplitude noise. The design suits feedback loops where
latency matters most.

All RTL is SystemVerilog (IEEE 1800-2017), synthesizable except for the
testbenches.

## Data flow

```
            ADC clock d (one per dual-channel ADC)                 |  reference clock (ADC3)
                                                                    |
AC0..AC7 ─► data_recovery ─► non_iq_demod ─► fir_filter ─► data_buffer ─► iq_multiplier ─► IQ out AC0..5, AC7
                                  │                        (write)  │ (read)   ▲
                                  │ AC6 (REF) only                  │ AC6      │ u = conj(ref)/A_avg
                                  ▼                                 └──► ref_iq ─┘   ◄── track_en (switch)
                           fir_filter (narrow) ─► cic_decimator ─► cordic_amp_phase ─► REF power state
                                                                         └── A_avg ──► ref_iq
```

* **Eight channels, four ADCs.** Channel `c` is sampled by ADC `c/2`.
  Each ADC has its own recovered 105 MHz clock (`adc_clk[c/2]`). AC6
  carries the reference and AC7 the vector-modulator output. The other
  channels carry klystron forward and other probes.
* **Per-channel front end, in the channel's ADC clock.** The
  `data_recovery` module captures the ADC word and converts it from offset
  binary. Non-IQ demodulation (`non_iq_demod`) turns IF samples into I/Q,
  and a short FIR low-pass (`fir_filter`) smooths them.
* **Clock crossing.** Each channel writes into its own dual-clock
  `data_buffer`. All eight buffers are read together in the reference ADC's
  clock, once none of them is empty. So sample *k* of every channel leaves in
  the same clock, which is what makes the subtraction point by point.
* **Reference averaging branch.** AC6's demodulated I/Q also goes through a
  narrower FIR, then a decimating CIC (÷64). A 16-iteration CORDIC
  (`cordic_amp_phase`) then produces the averaged reference amplitude and
  phase. These come out of the top as the "REF power state", and the
  amplitude feeds `ref_iq`.
* **Tracking.** `ref_iq` builds `u = (I_r − jQ_r)·2^33/A_avg / 2^17`. This is
  `conj(ref)/A_avg` with 16 fraction bits (1.0 = 65536). Every channel's
  `iq_multiplier` multiplies by it. AC6's own I/Q is delayed by four clocks
  and output beside the tracked channels.
* **Switch.** With `track_en` low, `ref_iq` outputs exactly `1 + j0`. The
  multipliers then pass every channel through unchanged, with the same
  latency, so switching never moves the output timing.

## Timing

| path | clocks |
|---|---|
| ADC word → signed sample (`data_recovery`) | 2 |
| sample → I/Q (`non_iq_demod`, window of N = 7 samples) | 1 |
| I/Q → filtered I/Q (`fir_filter`) | 1 |
| buffer write → readable in the reference clock | about 3–4 (two-flop pointer synchroniser) |
| buffer read → data (`data_buffer` output register) | 1 |
| channel sample → tracked output (`iq_multiplier`) | **4** |
| new CIC average → CORDIC result | 18 |
| CORDIC result → new reciprocal in `ref_iq` | 35 |

The four-clock multiplication is the low-delay path:

1. register the channel sample;
2. form the four products `ac, bd, ad, bc`;
3. form `ac − bd` and `ad + bc`;
4. round, saturate and register.

The reference vector `u` enters at stage 2, one clock after the channel
sample. This is because `ref_iq` itself registers `u` from the reference
sample that left the buffers in the same clock as the channel sample. The
reference branch (FIR, CIC, CORDIC, divider) only sets the gain. Its latency
of a few hundred clocks delays gain updates, not the phase subtraction.

## Number formats

* ADC words: 16 bits, offset binary (`OFFSET_BINARY = 1`). Samples:
  16-bit two's complement.
* I/Q: 18-bit signed (`rt_pkg::iq_t`, a packed struct `{i, q}`), in ADC
  units. A tone of amplitude A gives `|I + jQ| = A`. The demodulator,
  FIRs and CIC all have unity gain.
* Reference vector `u`: 18-bit signed with 16 fraction bits.
* Reciprocal: `recip = floor(2^33 / A_avg)`, saturated to 26 bits. It
  saturates for averages below about 128 ADC units and for zero.
* Amplitude: 18-bit unsigned. Phase: 18-bit signed, with ±2^17 = ±π
  (0.00137° per LSB).
* All right shifts that drop fraction bits round by adding one half and then
  shifting arithmetically. Results are saturated to the 18-bit range.

## Non-IQ demodulation

The IF is chosen so that M IF periods fit in exactly N samples. Here M = 2
and N = 7, a 30 MHz IF at 105 MHz. Over the last N samples:

```
I =  (2/N) Σ x[n]·cos(2πMn/N)
Q = −(2/N) Σ x[n]·sin(2πMn/N)
```

An input `A·cos(2πMn/N + φ)` then gives `I + jQ = A·e^{jφ}`. The
coefficients repeat every N samples, so the window sum is updated as
`acc += c[n mod N]·(x[n] − x[n−N])`. The coefficients are
`round((2/N)·cos|sin(2πMk/N)·2^16)`, computed at elaboration. With integer
coefficients the recursion is exact and does not drift. The phase index
`n mod N` counts from reset, so channels reset together share one phase
reference. A fixed sample offset between ADC domains shows up only as a
constant phase offset per channel.

## Averaging filters

* Channel FIR: `[1 4 6 4 1]/16`.
* Narrow reference FIR: `[1 8 28 56 70 56 28 8 1]/256`.
* Both are direct form with one clock of latency and exact unity DC gain.
  The same real coefficients filter I and Q, so phase is not disturbed.
* CIC: 3 stages, decimation R = 64, differential delay 1. The gain 64³ =
  2^18 is removed by a rounding shift. The integrators are 36 bits wide, so
  wrap-around cancels in the combs. The output after input sample
  `m·64 + 63` covers the samples up to and including that one, and appears
  one clock later.

## Files

| file | contents |
|---|---|
| `rtl/rt_pkg.sv` | channel counts, widths, `iq_t`, saturation helper |
| `rtl/ref_tracking_top.sv` | top: wiring of all blocks, buffer read rule, AC6 delay line |
| `rtl/data_recovery.sv` | ADC capture and offset-binary conversion |
| `rtl/non_iq_demod.sv` | non-IQ demodulator |
| `rtl/fir_filter.sv` | I/Q FIR, used for the channel filter and the narrow reference filter |
| `rtl/data_buffer.sv` | dual-clock Gray-pointer FIFO with sticky overflow |
| `rtl/cic_decimator.sv` | decimating CIC |
| `rtl/cordic_amp_phase.sv` | sequential vectoring CORDIC, amplitude and phase |
| `rtl/recip_divider.sv` | serial reciprocal `2^33/A` |
| `rtl/ref_iq.sv` | reference vector `conj(ref)/A_avg` and switch |
| `rtl/iq_multiplier.sv` | four-clock complex multiplier |
| `rtl/reset_sync.sv` | reset synchroniser, one per clock domain |
| `tb/tb_<module>.sv` | self-checking testbench per block |
| `tb/tb_fir_filter2.sv` | the FIR with the narrow reference kernel |
| `tb/tb_ref_tracking_top.sv` | end-to-end test of the top at default parameters |
| `tb/tb_workload_ch1_stability.sv` | phase and amplitude spread of one channel, tracking off against on |

Top-level ports:

* `adc_clk[3:0]` and `adc_data[8]`: ADC clocks and sample words.
* `rst`: asynchronous, active high; released separately in each domain.
* `track_en`: the switch, synchronous to `adc_clk[3]`.
* `iq_out[8]` and `iq_valid`: the eight I/Q outputs.
* `ref_amp`, `ref_phase`, `ref_state_valid`: the REF power state.
* `track_ready`: high once the first average has arrived.
* `buf_overflow[8]`: sticky; each bit is in its channel's write clock.

All outputs except `buf_overflow` are in `adc_clk[3]`.

## Simulating

Each testbench prints one line `TB_RESULT checks=N failures=M` and ends with
`$finish`. Every testbench has a watchdog. With plain Verilator, for example:

```
verilator --binary --timing --assert --top-module tb_ref_tracking_top \
    -y rtl -y tb +libext+.sv -Irtl rtl/rt_pkg.sv tb/tb_ref_tracking_top.sv
./obj_dir/Vtb_ref_tracking_top
```

Replace the top-module name and file for any other testbench.
`rtl/rt_pkg.sv` must come first, since the modules import it.

What the testbenches check:

* **Exact-arithmetic reference models.** The FIRs, CIC, multiplier,
  `ref_iq` and `data_recovery` are compared bit for bit with models
  written independently in the testbench:
  * the CIC against its impulse response (the boxcar convolved with itself
    three times);
  * the multiplier against a 64-bit complex product;
  * the reciprocal against a 64-bit division.

  Each of these testbenches also checks its block's latency in clocks.
* **Real-arithmetic models.**
  * The demodulator against a direct window sum, and against the amplitude
    and phase of clean tones (±3 LSB).
  * The CORDIC against `sqrt` and `atan2`: amplitude within 3 LSB, phase
    within 8 LSB (0.011°). It also checks the 18-clock latency.
* **Clock crossing.** `tb_data_buffer` runs the FIFO with unrelated clocks
  in both speed orders, then fills it to overflow.
* **End to end.** `tb_ref_tracking_top` uses the default parameters, four
  phase-shifted 105 MHz clocks, and eight IF tones with noise and a
  common drift. With tracking on, the drift ramps by 25°:
  * tracked phases must stay within 0.2° of their starting values;
  * tracked amplitudes must stay within 0.5% of the channel amplitudes.

  The test then switches tracking off. The outputs must follow a further
  10° of drift and carry the raw amplitudes. After switching back on, the
  reference amplitude steps from 5105 to 4000 ADC units. The tracked
  amplitudes first drop by 4000/5105. Once the average catches up, they
  must return to the channel amplitudes. The test also checks:
  * the reported reference amplitude;
  * that no buffer overflowed;
  * that every output comes exactly five clocks after its buffer read
    (one clock for the buffer output register, four for the multiplication);
  * that every mechanism (tracking, pass-through, switch changes, average
    updates, renormalisation) occurred at least once.

  It runs in seconds.

## The stability experiment in miniature

`tb/tb_workload_ch1_stability.sv` reproduces the kind of measurement that
motivates the method:

* One RF signal, split in two, feeds the reference channel AC6 and channel
  CH1 (AC1), each at about 5105 ADC units.
* Each copy gets its own Gaussian noise (σ = 4 codes).
* Both share a slow phase drift.
* CH1's phase and amplitude are recorded over 20,000 samples with tracking
  off, and then over 20,000 with tracking on.

With the default parameters it prints:

| CH1 | phase RMS | amplitude RMS |
|---|---|---|
| tracking off | 0.090° | 0.039 % |
| tracking on  | 0.032° | 0.059 % |

Tracking removes the common drift, so the phase spread falls. The
reference's amplitude noise now multiplies the channel, so the amplitude
spread rises. The testbench checks both directions of change: the phase RMS
must fall below half and the amplitude RMS must rise by at least 20 %. The
absolute numbers depend on the assumed noise and drift. They are not a
prediction for real hardware.

## What is this design's own

The published description of this receiver gives the block structure and
the algorithm:

* eight channels on four ADCs, each ADC with its own recovered clock;
* per-channel data recovery, non-IQ demodulation, FIR filter, data buffer
  and multiplication;
* the reference branch (a second, narrower FIR, a CIC, an amplitude/phase
  solution reporting the reference power state);
* the conjugate-and-multiply tracking, normalised by the averaged amplitude;
* the on/off switch;
* the four-clock multiplication latency.

Everything numeric below that level is a choice made here:

* the widths;
* the IF ratio M/N = 2/7;
* all filter kernels, and the CIC order and ratio;
* the FIFO depth and its read rule;
* the CORDIC guard bits;
* the reciprocal form of the division;
* the reset scheme.

The points most likely to differ from the original firmware are:

* **How the switch acts.** Here it forces the reference vector to 1 + j0.
  The original might instead bypass the multipliers.
* **What the AC6 output carries.** Here it is the reference I/Q itself,
  aligned with the other outputs.
* **Which clock the buffers are read in.** Here it is the reference ADC's
  clock. The buffers are written in each channel's own ADC clock.
* **Data recovery** is reduced to a capture register and a code conversion.
  A real ADC interface may also need deserialisation and bit alignment.
  These depend on the ADC and are not modelled.
* **Before the first average arrives**, about 140 clocks after reset, the
  tracked channels output zero. `track_ready` marks the first average.
  That first average still includes the zeros that filled the CIC at
  reset. The gain settles after three more averages (about 200 clocks).

Parts that are not logic are left outside the RTL:

* the ADCs;
* the clock-recovery and global clock-buffer primitives;
* the analog RF front end.

The top takes the buffered ADC clocks and ADC words as ports.

The noise trade-off itself is not modelled: tracking multiplies the
reference's amplitude noise into every channel. The testbench adds only
small uniform noise, enough to check that the arithmetic holds within
tolerances. It does not reproduce measured noise figures.
