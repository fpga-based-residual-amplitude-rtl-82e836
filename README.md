# Phase-modulation laser lock with digital RAM cancellation

A laser locked to an atomic line by phase modulation sees a spurious signal:
the electro-optic phase modulator (EOPM) also modulates the optical power a
little, at the same frequency. This residual amplitude modulation (RAM) is
demodulated together with the atomic signal. It shifts the lock point, and it
drifts with temperature and alignment, which limits the long-term stability of
the clock.

This design removes the RAM actively, inside the same FPGA fabric that locks
the laser:

1. A photodetector before the atoms measures the optical power.
2. A digital lock-in turns that signal into the complex RAM amplitude (I, Q)
   at the modulation frequency.
3. The fabric writes a cancellation wave with that amplitude and the opposite
   sign to an electro-optic amplitude modulator (EOAM) placed in series with
   the EOPM.

Every oscillator comes from one phase accumulator, and every phase offset is a
digital number, so the phase relations never drift. Analog phase shifters and
mixers would drift and add flicker noise.

The fabric has two halves:

* **Transition lock.** It generates the modulation, demodulates the
  fluorescence of the atoms (PMT) into an error signal, and servos the laser
  piezo through two cascaded PI controllers.
* **RAM suppression.** It measures the RAM on the in-loop photodetector and
  drives the EOAM.

```
                 +--------------- phase accumulator (32 bit, f = ftw/2^32 * 250 MHz)
                 |
  DDS1 --------------------------------------------> RF-DAC ch0 -> EOPM
  PS(ps_demod)   -> DDS2 sin ---------------+
  PS(ps_ram_det) -> DDS3 sin/cos ----+      |
  PS(ps_ram_am)  -> DDS4 sin/cos --+ |      |
                                   | |      v
  PMT ADC -> DDR rx -> HPF ------------> mixer -> LPF -> PI fast -> PI slow
                                   | |               (err)  |          |
                                   | |              precision DAC codes (piezo)
  RAM ADC -> DDR rx -> decimate -> HPF -> LPF(band) -> mixers I/Q -> LPF I, LPF Q
                                   |                                    |  (monitor)
                                   +-- AM sin*I, cos*Q -> gain -> gain -> + -> RF-DAC ch1 -> EOAM
```

Everything runs on the 250 MHz converter clock. The widths follow the board:
14-bit RF-ADCs, 16-bit RF-DACs, 16-bit precision DACs, and 24-bit demodulated
signals.

## One accumulator, four oscillators

`phase_acc` adds the 32-bit tuning word `ftw` every clock. 200 kHz at 250 MHz
is `ftw = 3436135`, with a resolution of 0.058 Hz.

Three `phase_shifter`s add fixed offsets to the phase, one clock later:

* `ps_demod`: the demodulation reference of the lock;
* `ps_ram_det`: the RAM detection;
* `ps_ram_am`: the cancellation carrier.

The modulation DDS itself has no shifter: it is the reference for the others.

`dds_sincos` turns a phase into a sine and a cosine:

* The top 12 bits of the phase address a 4096-entry, full-period sine table,
  with amplitude 32767, held in block RAM. The cosine is read a quarter period
  further on, through the second read port.
* The next 10 bits give the residual angle `d`. A first-order Taylor step
  (`sin + d*cos`, `cos - d*sin`) removes most of the phase-truncation spurs.
* The 2π constant of `d` is kept in Q3.13.
* The table is computed when the design is elaborated. It needs no data file.
* Error against the exact sine: at most 1.5 LSB.
* Latency: 3 clocks, one result per clock.

Because the phases differ only by constants, a phase offset set once holds
forever. This is the property the whole scheme relies on. Cable, converter,
filter and processing delays all become a fixed phase at the carrier, and a
phase shifter absorbs it.

## Transition lock (`transition_lock`)

The PMT sample goes through three stages:

1. A high-pass (`fir_hpf`, see below) strips DC and flicker.
2. A mixer multiplies it with the shifted reference sine.
3. A configurable FIR low-pass (`fir_lpf`) removes the 2f product and leaves
   the 24-bit error signal.

Scale: a PMT component of amplitude `d` ADC LSB, in phase with the reference,
gives `err ≈ 256·d`. The factor comes from 4 (two extra high-pass bits) ×
32767/2 (demodulation) / 2^8 (mixer shift).

Two `pi_servo`s are cascaded:

* The fast one acts on the error signal.
* The slow one integrates the fast one's output.

As a result, the slow DAC takes over the static correction and the fast DAC
returns near zero. A PI servo computes

```
I   <- clamp(I + ki*e)                               (anti-windup at output range)
out <- sat16(offset + (kp*e >>> 16) + (I >>> 24))
```

With `enable` low, the integrator is cleared and the output rests at `offset`.
This lets the laser be tuned by hand before the lock is engaged.

**Loop delay.** The high-pass delays the PMT signal by 1024 clocks (4.1 µs). At
the carrier this delay is only a phase, and `ps_demod` absorbs it. For the servo
it is real dead time, so the integrator gains must stay modest. With the
testbench's plant (1 DAC LSB moves the line by 1/8 ADC LSB), `ki = 250` on the
fast servo and `ki = 64` on the slow servo lock cleanly, in about 1 M clocks.

## RAM detection

The RAM detector sample goes through these stages:

1. **Decimation.** It is summed over blocks of 8 (`decimator`, 31.25 MSps,
   3 extra bits).
2. **Band-pass.** A band-pass around the carrier: the high-pass, then a
   configurable FIR low-pass (`FILT_RS_BPF`).
3. **Mixing.** Two mixers with the detection sine and cosine.
4. **Low-pass.** Two 24-bit FIR low-passes (`FILT_RS_LPFI`, `FILT_RS_LPFQ`).
   Their outputs are the in-phase and quadrature RAM amplitudes `mon_i` and
   `mon_q`, which also go out for monitoring.

The detection mixers run at the decimated rate. They use the DDS values at the
decimated sample instants.

Scale: a RAM tone of amplitude `A` ADC LSB gives `|I + jQ| ≈ 256·A`. This
assumes carriers well above the high-pass cut-off and unity-gain band and
low-pass filters.

The carrier must stay below the decimated Nyquist frequency, 15.6 MHz.

## RAM cancellation

The held I and Q values modulate DDS4 at the full clock rate:

* I modulates the sine.
* Q modulates the cosine.

Each wave then goes through these stages:

1. An adjustable-gain amplifier (`gain_amp`), with gain `mant·2^exp / 2^30`:
   a signed 16-bit mantissa and a 4-bit exponent, more than 100 dB of range.
2. A saturating adder (`sat_sum`) sums the two waves into the EOAM code.

The optics close the loop. Let `κ` be the analog gain from an EOAM DAC LSB to a
RAM ADC LSB at the carrier. Then the loop gain is

```
L = κ · mant · 2^exp / 2^22
```

and a settled loop leaves a residual RAM of `1/(1+L)` of the open-loop value.
Examples for `κ = 0.25`:

* `mant = -16384, exp = 9` gives `L = 0.5`.
* `mant = -29491, exp = 9` gives `L = 0.9`.

The mantissa sign sets the feedback polarity.

**Phase calibration.** Sweep `ps_ram_am` with a moderate gain and keep the
setting that minimises `|I + jQ|`.

* `ps_ram_det` only rotates the I/Q frame.
* `ps_ram_am` must match the total delay from the EOAM code back to the
  detector.

The demodulation phase `ps_demod` is found in the same way, by maximising the
error signal for a known detuning.

**Limit of this path.** The correction is proportional: the reference design describes
the demodulated amplitudes driving the modulators directly. The loop includes
FIR low-passes and about 1100 clocks (4.4 µs) of delay, most of it the
high-pass centre delay. Such a loop is stable only for `L` below about 1.

| loop gain | simulated result |
|---|---|
| `L = 0.5` | settles to the predicted residual |
| `L = 0.9` | settles to the predicted residual |
| `L = 10` | diverges |

Suppression of 20 dB and more needs a loop filter with a bandwidth far below
the carrier (a slow correction). The reference design does not specify one, so
it is not included. A user who needs deep suppression must add one between the
I/Q low-passes and the modulators.

## The filters

**High-pass (`fir_hpf`).** A FIR low-pass followed by a subtractor:

* The low-pass is a moving average over `N = 2^LOG2N` samples. It is kept as a
  running sum: add the new sample, subtract the one N back. A circular buffer
  in block RAM holds the window.
* The output is the sample `N/2` back (the average's centre) minus the average,
  with `EXT` extra fractional bits.

All the arithmetic is exact on integers, and the division is a shift. So the
filter adds no rounding noise, and its zero at DC is exact. This matters in the
RAM path: any DC that leaked through would become an f ripple on I/Q, and the
modulators would turn that ripple back into DC, a self-sustaining path.

| path | window | first null | centre delay |
|---|---|---|---|
| transition lock | 2^11 samples at 250 MSps | 122 kHz | 1024 clocks |
| RAM path | 2^8 samples at 31.25 MSps | 122 kHz | 128 decimated samples |

Both windows span 8.2 µs. A 200 kHz carrier passes with gain 1.18, because the
window spans 1.64 periods. Faster carriers pass with gain close to 1. Until the
window has filled after reset, unwritten samples count as zero. Latency:
3 clocks.

**Configurable low-pass (`fir_lpf`).** A 32-tap direct-form FIR:

* 18-bit Q1.17 coefficients, all products in parallel.
* Output shifted by 17 and saturated to 24 bits.
* Latency: 3 clocks.
* After reset the coefficients form a unity-gain boxcar (4096 each). Its nulls
  fall at multiples of fs/32.

A minimum-phase set keeps the delay low in the servo loops. Coefficients are
written one at a time through the shared port `coef_wr` = `{we, sel, addr,
data}`:

| `sel` (`filt_id_e`) | filter |
|---|---|
| `FILT_TL_LPF` (1) | error-signal low-pass |
| `FILT_RS_BPF` (3) | low-pass half of the RAM band-pass |
| `FILT_RS_LPFI` (4) | I low-pass |
| `FILT_RS_LPFQ` (5) | Q low-pass |

At 200 kHz the default 32 taps do not null the 400 kHz 2f product. The ripple
left on the error signal and on I/Q averages out in the integrators. Longer
coefficient sets would need more taps (`LPF_TAPS`).

## Converter ports (`adc_ddr_if`, top level)

**ADC input.** Each RF-ADC arrives as 7 DDR lanes:

* Lane k carries bit 2k, sampled at the rising edge.
* It carries bit 2k+1 at the falling edge.

Rising- and falling-edge registers capture the halves, and the word is joined
at the next rising edge. With `adc_derand` set, the converter's output
randomizer (bits 13..1 XORed with bit 0) is undone. Output: two's complement,
1 clock.

**RF-DAC output.** Both RF-DAC codes leave on one registered 32-bit bus:

* `rf_dac_bus[15:0]`: EOPM (DDS1 sine);
* `rf_dac_bus[31:16]`: EOAM (cancellation).

**Plain outputs.** The two precision-DAC codes (`slow_dac_fast`,
`slow_dac_slow`), the error signal and the I/Q monitor values are plain
outputs. The serial links to the converters and the processor bridge are
outside this design.

## Configuration (`ram_pkg::fabric_cfg_t`)

| field | meaning |
|---|---|
| `ftw` | modulation frequency, `f = ftw · 250 MHz / 2^32` |
| `ps_demod`, `ps_ram_det`, `ps_ram_am` | phase offsets, full circle = 2^32 |
| `pi_fast`, `pi_slow` | `{enable, kp, ki, offset}` of the two servos |
| `gain_i`, `gain_q` | `{mant, exp}` of the two cancellation amplifiers |
| `adc_derand` | undo the ADC output randomizer |

The record is sampled continuously. Change it from a register bank in the same
clock domain.

## Timing summary

| path | clocks |
|---|---|
| phase → DDS output | 3 (+1 through a phase shifter) |
| ADC pins → sample | 1 |
| high-pass | 3, plus N/2 samples of signal delay |
| mixer, gain, sum, PI | 1 each |
| FIR low-pass | 3 |
| PMT sample → error signal | 7 (+1024 signal delay) |
| error → fast DAC code / slow DAC code | 1 / 2 |
| decimated RAM sample → I/Q monitor | 11 (+128 decimated samples of signal delay) |
| I/Q change → EOAM code | 3, plus the output register |

## Departures from the reference design and open points

* **High-pass.** The window lengths and the moving-average coefficient set are
  this design's choices. The reference gives only "FIR low-pass and a
  subtractor".
* **Filter sizes.** The filter lengths, the decimation factor (8), the
  coefficient format and all intermediate widths are this design's choices.
* **Cascade.** The second PI takes the first PI's output.
* **I/Q mapping.** I pairs with the sine and Q with the cosine, both in
  detection and in cancellation.
* **Cancellation depth.** As explained above, the proportional cancellation
  reaches only about 6 dB of stable suppression with FIR filtering. The deep
  suppression reported for the real instrument is not reproduced.
* **Converter details.** The ADC lane mapping, the randomizer rule and the
  DAC bus packing are assumptions. The real converter data sheets should be
  checked.
* **Not modelled.** The processor, its network interface, the slow precision
  ADCs and the precision-DAC serial protocol.

## Simulation and verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. To build and run one with Verilator:

```
verilator --binary --timing -Wno-fatal --top-module tb_ram_lock_top \
    -y rtl -y tb rtl/ram_pkg.sv tb/tb_ram_lock_top.sv
./obj_dir/Vtb_ram_lock_top
```

The module testbenches compare every output with an independent model:

* DDS against `$sin` within 2 LSB;
* FIR filters against an exact convolution, including latency;
* ADC interface through a behavioural DDR ADC model (`tb/adc_ddr_model.sv`).

**Subsystem tests.**

* `tb_transition_lock` closes the lock through a model of the atomic line. It
  checks:
  * the error-signal scale and sign;
  * a lock to below 1 LSB;
  * the hand-over to the slow servo.
* `tb_ram_suppression` closes the RAM loop through a model of the optics. It
  checks:
  * the 256·A scale;
  * a π/2 rotation;
  * the residuals `1/(1+L)` at `L = 0.5` and `0.9` (measured within 1%, checked to 8%).

**Full-fabric tests.** Both run at default parameters, through the DDR ports
and the RF-DAC bus. The plant model leaks RAM into the PMT signal, so RAM pulls
the lock point.

* `tb_ram_lock_top` runs 1.9 M clocks at 7.8 MHz:
  * demodulation-phase calibration;
  * open-loop RAM measurement;
  * lock, which matches the predicted RAM-induced offset to 0.1%;
  * cancellation-phase sweep;
  * suppression at `L = 0.5` and `0.9`;
  * the lock offset shrinking by the same factor;
  * servo release.

  It also counts each mechanism: coefficient writes, phase sweeps, monitor
  updates, derandomized samples, lock, slow-servo takeover, cancellation,
  offset reduction and release.
* `tb_workload_200khz` runs the same sequence at 200 kHz, the operating point
  of the Rb two-photon clock. Results:
  * error slope 1.18·256·d;
  * `|I+jQ|` = 1.10·256·A;
  * with cancellation at set `L = 0.5`, residual 0.52 and the lock offset
    halved.

The simulator used is two-state, and the testbenches reset or initialise
everything they read.
