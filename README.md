# Digital LLRF firmware for an S-band transverse deflecting cavity

A transverse deflecting cavity (TDC) measures the time structure of an
electron bunch. It does this by sweeping the bunch sideways with an RF field
near the zero crossing. The measurement is only as good as the field is
stable: about 0.05 % in amplitude and 0.05° in phase (RMS) at 2997 MHz. The
low-level RF (LLRF) electronics measure the RF signals of the
klystron/cavity chain pulse by pulse, drive the vector modulator that feeds
the amplifier chain, and protect the klystron against reflected power.

This repository holds synthesizable SystemVerilog for the FPGA firmware of
that LLRF system. It follows the design published as *"Prototype design of a
digital Low-Level RF system for S3FEL S-band Transverse Deflecting
Cavities"* (Zhu et al.). The block structure, the sampling scheme, the
demodulation equations and the reference-tracking algorithm come from that
description. It gives no word widths, filter coefficients, memory sizes or
handshakes. Those are filled in here, and each such choice is listed in
[Choices made here](#choices-made-here).

Two ideas carry the design:

1. **Sampling at 3/13 of the clock.** The RF signals are mixed down to a
   27.08 MHz intermediate frequency (IF) and sampled at 117.36 MHz. The ratio
   is exactly 3 : 13, so 13 consecutive samples hold exactly three IF periods.
   A sum over any 13-sample window gives an exact I/Q vector on every clock.
   This is *non-IQ demodulation*: the samples are not at 90° steps.
2. **Reference tracking.** Slow drift in the LO and clock distribution turns
   the phase of *every* channel by the same angle. One input carries the
   reference signal (REF), which sees that drift too. Each measured vector is
   multiplied by the complex conjugate of the REF vector and divided by the
   REF amplitude. The drift cancels. What remains is the amplitude of the
   channel and its phase relative to REF.

## Signal flow

```
             clk_adc domain (117.36 MHz)                              clk_sys domain (125 MHz)
 AC0..AC5,AC7  ddr_rx -> iq_demod -> fir_filter(I,Q) -> ref_track --+
 AC6 (REF)     ddr_rx -> iq_demod -> fir_filter(I,Q) --- REF I/Q ---+--> lanes 0..7 --+
                                 \-> fir_filter(I,Q) -> cic_filter(I,Q)                |
                                                      -> amp_solution -> 1/A_ref, REF status
 DC0 (HV mon.) ddr_rx ----------------------------- delay 8 --------+--> lane 8 -------+
 DC1 (refl.)   ddr_rx --+-------------------------- delay 8 --------+                  |
                        +-> threshold_judge -> rf_switch_on                            v
 timing_trig -> trigger_unit -> addr_counter --addr--> acq_buffer (9 x dpram) <-- addr FIFO <- DMA
                                          |                         --> data FIFO -> DMA
                                          +--addr--> dac_path (dpram) <-- I/Q record write <- DMA
                                                     -> dac_i, dac_q -> DAC -> vector modulator
```

Eight AC-coupled inputs carry down-converted RF:
- AC0..AC5: the amplifier output, the klystron forward and reflected waves,
  and the cavities' forward, reflected and load signals.
- AC6: the reference (REF).
- AC7: the vector-modulator output.

Two DC-coupled inputs are sampled directly:
- DC0: the klystron modulator's high-voltage monitor.
- DC1: the klystron's reflected power after an envelope detector.

The lanes of the acquisition memory are:

| lane | content |
|------|---------|
| 0..5, 7 | {I, Q} of AC0..AC5, AC7. With `track_en` set they are after reference tracking, otherwise raw. |
| 6 | {I, Q} of REF (AC6), filtered, not tracked. |
| 8 | {DC0, DC1}, each raw 16-bit sample sign-extended to 18 bits. |

All lanes of one address belong to the same sample instant. The DC lane is
delayed by the 8-cycle latency of the I/Q path.

## Non-IQ demodulation (`iq_demod`)

With the phase step Δφ = 2π·f_IF/f_CLK = 6π/13, the demodulator computes on
every clock

```
I_k = 2/13 · Σ_{l=k-12..k} x_l · sin(l·Δφ)
Q_k = 2/13 · Σ_{l=k-12..k} x_l · cos(l·Δφ)
```

Take an input x_l = A·cos(l·Δφ + θ). The double-frequency terms sum to zero
over the 13 samples, because 2·Δφ·13 = 12π. That leaves I = −A·sin θ and
Q = A·cos θ, so the magnitude is A and the phase is θ + 90°. The constant
90° is the same for all channels and drops out of every phase difference.
The sine and cosine depend only on l mod 13, so the coefficients are a
13-entry table (`sin_coef`, `cos_coef` in `llrf_pkg`):

```
sin_coef(l) = round(2/13 · sin(l·6π/13) · 2^17),  cos_coef(l) = round(2/13 · cos(l·6π/13) · 2^17)
```

The factor 2/n is folded into the table, so the accumulator only needs a
shift by 17 at the end. The hardware has three register stages:

1. A phase counter l mod 13 selects the coefficients. The 16-bit sample is
   multiplied by both (34-bit products).
2. Each product enters a 13-deep delay line. A running sum adds the newest
   product and subtracts the one leaving the window. Reset clears the delay
   line and the sum, so the running sum stays exact and never drifts.
3. The sum is rounded, shifted right by 17 and saturated to 18 bits.

`out_valid` rises with the first window that holds 13 samples taken after
reset. The coefficient table is only valid for n = 13, M = 3; an elaboration
assertion guards this. For a different IF/clock ratio, regenerate the table
from the formula above.

## Filtering and the reference amplitude

**FIR (`fir_filter`).** Each demodulated I and Q passes a 13-tap FIR. The
default coefficients are a moving average, 5041/65536 per tap (DC gain
0.99995). The demodulator's residue sits at 6/13 of the clock, and a
13-sample boxcar puts a zero on every multiple of f_CLK/13, including that
one. The filter is generic: `TAPS`, `CW`, `SHIFT` and the `COEF` array are
parameters.

**CIC (`cic_filter`).** On the reference channel, a second FIR pair feeds two
CIC filters, one for I and one for Q. Each has 3 stages, decimation R = 64
and differential delay 1. The gain R³ = 2¹⁸ is removed by a shift, so the
output is the average of the input. Register width is 18 + 18 bits, which
keeps the wrap-around integrator arithmetic exact.

**Amplitude solution (`amp_solution`).** Every 64 samples, a small sequencer
turns the averaged REF vector into three results:
- `amp` = ⌊√(I²+Q²)⌋, by a bit-serial square root (18 cycles).
- `recip` = ⌊2³⁰/amp⌋, by a restoring divider (31 cycles).
- `ref_ok` = amp ≥ `ref_min`, the REF power status.

A result appears 50 cycles after its input. That is shorter than the
64-cycle CIC output period, so an input is never lost in normal operation.
If one is, it is dropped and counted in `overruns`.

## Reference tracking (`ref_track`)

Phases subtract when vectors are multiplied by a conjugate:

```
A_m e^{jφ_m} · A_r e^{-jφ_r} · (1/A_r) = A_m e^{j(φ_m − φ_r)}
out.I = (I_m·I_r + Q_m·Q_r) · recip / 2^30
out.Q = (Q_m·I_r − I_m·Q_r) · recip / 2^30
```

The conjugate uses the instantaneous, FIR-filtered REF vector of the same
sample. The normalisation uses the CIC-averaged amplitude. So the result
keeps the measured amplitude to within the ratio of instantaneous to
average REF amplitude, which is close to 1. There are three register
stages:
1. The two cross-product sums, 37 bits.
2. The product with `recip`.
3. Rounding, the shift by 30 and saturation.

`meas`, `ref_iq`, `recip` and `en` are all sampled together. With `en = 0`
(`track_en` at the top) the block outputs the measured vector unchanged,
with the same latency. The two modes can then be compared, as in a drift
test with tracking switched off and on.

Until the first REF amplitude is available after reset, `recip` is 0 and the
tracked lanes read 0.

## Pulse timing, acquisition and excitation

The system runs in pulse mode, at up to 50 Hz.

- **`trigger_unit`** passes the external timing trigger through a two-flop
  synchroniser. It turns each rising edge into a one-cycle `trig_pulse`
  while `trig_en` is set. It also outputs the gated trigger level
  (`trig_out`) and counts accepted triggers (`trig_count`).
- **`addr_counter`** starts on `trig_pulse` and counts 0..2047 at the ADC
  clock (17.45 µs), then stops. At the end it pulses `done` and increments
  `rec_count`. A trigger during a running record is ignored.
- **`acq_buffer`** stores one 36-bit word per lane per sample. Each of the
  9 lanes is a `dpram` of 2048 words, written at the ADC clock and read at
  the system clock. The PCIe DMA engine reads the memory in four steps:
  1. It pushes word addresses `{sample, lane}` into a 16-entry address FIFO.
  2. The read control pops an address when the 16-entry data FIFO has room,
     counting the word still in flight.
  3. It reads all lanes at that sample and pushes the selected lane.
  4. The DMA engine pops words in the order of their addresses.

  `acq_addr_full` is the back-pressure to the DMA side. A word is available
  3 system clocks after its address enters idle FIFOs.
- **`dac_path`**: software converts the amplitude and phase set points into
  a record of {I, Q} words (16 bits each), and the DMA engine writes it into
  a second `dpram`. During a record the same address counter reads it out.
  After one register stage ("data buffer") the words go to the two DAC
  channels. The word at address a appears 2 ADC clocks after the counter
  shows a. Between records the DAC words are zero.

Software should read a record only after `rec_count` has advanced. The RAMs
have no protection against a read of a sample that is being written in the
same instant from the other clock.

## Reflected-power interlock (`threshold_judge`)

Every DC1 sample is compared with `refl_threshold`. The first sample above
it latches `intlk_tripped`, and on the next clock `rf_switch_on` goes low,
which opens the RF switch in front of the vector-modulator output. The trip
stays latched until `intlk_clear` is pulsed while the power is back at or
below the limit. `rf_switch_on` also requires the operator's `rf_enable`.
`trip_count` counts trips.

## Clocks and resets

| clock | frequency | source | used by |
|-------|-----------|--------|---------|
| `clk_adc` | 117.36 MHz | ADC data clock after its input and global buffer | all processing, RAM write ports of the acquisition memory, RAM read port of the I/Q record |
| `clk_sys` | 125 MHz | system/PCIe clock | FIFOs, acquisition read port, I/Q record write port |

The only crossings between the two clocks go through the dual-port RAMs.
The external reset `arst_n` is synchronised separately into each domain
(`reset_sync`, asserted asynchronously, released after two edges).

The control inputs (`trig_en`, `track_en`, `rf_enable`, `intlk_clear`,
`refl_threshold`, `ref_min`) and all status outputs are in the `clk_adc`
domain. A register block in front of them (not part of this RTL) is
expected to hold them quasi-static. `intlk_clear` is a one-cycle pulse.

## Latencies

| path | cycles |
|------|--------|
| DDR lanes → sample (`ddr_rx`) | on `q` after the first rising edge that follows the sample's falling-edge half |
| sample → I/Q (`iq_demod`) | 3 |
| FIR (`fir_filter`) | 2 |
| reference tracking (`ref_track`) | 3 |
| averaged REF vector → amplitude, 1/A (`amp_solution`) | 50 |
| trigger edge → `trig_pulse` | 2 edges after the edge that first samples it high |
| record address → DAC word (`dac_path`) | 2 |
| DMA address push → word in data FIFO (`acq_buffer`) | 3 system clocks |

## Files

| file | content |
|------|---------|
| `rtl/llrf_pkg.sv` | widths, channel numbering, the demodulation coefficient table, `iq_t` |
| `rtl/llrf_top.sv` | the whole firmware |
| `rtl/reset_sync.sv`, `trigger_unit.sv`, `addr_counter.sv` | reset, trigger and timing |
| `rtl/ddr_rx.sv`, `iq_demod.sv`, `fir_filter.sv` | per-channel front end |
| `rtl/cic_filter.sv`, `amp_solution.sv`, `ref_track.sv` | reference path and tracking |
| `rtl/threshold_judge.sv` | reflected-power interlock |
| `rtl/dpram.sv`, `sync_fifo.sv`, `acq_buffer.sv`, `dac_path.sv` | memories and the DMA side |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_pulse_workload.sv` | pulse-to-pulse stability measurement through the whole firmware |

## Simulating

Each testbench ends by printing `TB_RESULT checks=N failures=M`. Each one
also has a watchdog that ends the run as a failure. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/llrf_pkg.sv tb/tb_llrf_top.sv --top-module tb_llrf_top
./obj_dir/Vtb_llrf_top
```

Replace `llrf_top` with any module name to run that module's testbench.
Every testbench computes its expected values independently of the RTL, for
example:
- the demodulator against the sum in floating point;
- the CIC against a direct convolution with three boxcars;
- the amplitude by checking amp² ≤ I²+Q² < (amp+1)²;
- reference tracking both exactly (64-bit integers) and physically
  (amplitude kept, phases subtracted).

`tb_llrf_top` runs the whole firmware at its default sizes, which takes a
few seconds. A model ADC drives all ten channels over their DDR lanes. Each
AC channel carries an IF tone with its own amplitude and phase, plus a
common phase drift. The testbench:
1. Writes an excitation record.
2. Checks the REF amplitude and status.
3. Takes four records: tracking on at drift 0 and 0.35 rad, then tracking
   off at both drifts. It reads every lane back through the DMA FIFOs:
   - With tracking on, each channel shows its own amplitude and its phase
     relative to REF, whatever the drift.
   - With tracking off, the phase moves with the drift.
4. Checks every DAC word of every record.
5. Trips and clears the interlock, lowers REF below its limit, and fills
   the DMA FIFOs until back-pressure.

It counts each of these mechanisms and fails if one never happened.

`tb_pulse_workload` repeats the measurement an operator makes to qualify
the RF stability. It fires 40 triggers. Each one is followed by a 3 µs
pulse on AC0 that starts 2 µs after the trigger. The pulse amplitude and
phase jitter from pulse to pulse by about 0.04 % and 0.04° RMS, and every
sample carries ±2 LSB of noise. For each record the testbench reads lane 0
for samples 469..514, which is the window from 4.00 to 4.38 µs after the
trigger. It averages I and Q there, as the control software would. Each
pulse's average must match the injected amplitude to within 3 counts and
the injected phase minus the REF phase to within 0.15 mrad. The RMS of the
measurement error must also stay below a quarter of the injected jitter.
It prints the measured and injected stabilities, for example
0.0376 % / 0.0395° measured, with an error of 0.0036 % / 0.0010°.

## Choices made here

The published description gives the blocks, their connections, the
frequencies, the 3:13 ratio, n = 13, the 13th-order FIR, the CIC on the
reference channel and the tracking equations. The following are not given
there and are this design's own:

- Widths: 16-bit ADC samples (two's complement), 18-bit I/Q, 17 fractional
  coefficient bits, 16-bit DAC words, 1/A_ref as 2³⁰/A.
- DDR lane format: bit 2k on the rising edge, bit 2k+1 on the falling edge
  of lane k.
- FIR coefficients: a 13-tap moving average. "13-order" is read as 13 taps.
- CIC: 3 stages, R = 64. The average is taken on I and Q before the
  magnitude.
- Square root and reciprocal by bit-serial arithmetic. The REF status is
  the rule amp ≥ `ref_min`.
- Record length 2048 samples, enough for a 10 µs acquisition window. The
  lane layout, the retrigger rule, and zero DAC output between records.
- The interlock trips on a single sample, is latched, and is cleared by the
  operator.
- FIFO depths (16) and a credit-based read control. Both FIFOs run on the
  system clock.
- One ADC clock domain for all five ADCs. They share one sampling clock.
- The `track_en` bypass of reference tracking.
- The control and status interface as plain ports, with no register map.

## Outside this RTL

These parts are not in the RTL:
- The clock and data input buffers and global clock buffers. They are FPGA
  primitives; the top takes single-ended clocks and lanes after them.
- The ADCs, DACs and vector modulator mixer.
- The RF switch. The top drives its control bit.
- The local oscillator that makes REF, LO and the sampling clock.
- The down-converter boards.
- The PCIe DMA engine. The top exposes the FIFO and RAM ports it connects to.
- The CPU, the crate's PCIe switch and host memory.
- The control-system software. It converts set points to I/Q records and
  computes intra-pulse averages and RMS stability.
- A feedback loop. The published description lists amplitude and phase
  stability control among the firmware's functions. It gives no controller,
  only the reference tracking and the playback of I/Q records, so the drive
  here is open loop: software updates the record between pulses.
