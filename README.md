# Linien FPGA signal path in SystemVerilog

A laser used for spectroscopy or atom physics has to sit on an atomic or
molecular line. Its frequency drifts by much more than the line's width. The
standard cure is modulation-transfer or frequency-modulation spectroscopy. You
put a small sinusoidal modulation on the laser (or on the probe light), detect
the transmitted light and demodulate the photodiode signal at the modulation
frequency. The result is a *dispersive* signal that crosses zero at the line
centre. A PID controller then feeds that signal back to the laser current or a
piezo.

This RTL does all of that in one FPGA at 125 MS/s on a board with two 14-bit
ADCs and two 14-bit DACs (a Red Pitaya-class board):

* a numerically controlled oscillator makes the modulation;
* two CORDIC demodulators, one per input, turn the photodiode signals into
  error signals;
* IIR filters, a PID and a second, slow integrator produce the control signals;
* a triangular ramp sweeps the laser over the spectrum while you look at it;
* two autolock engines bring the laser from sweeping to locked on the line you
  chose;
* a capture memory lets a processor read spectra and error-signal traces.

The processor itself sits on the same chip (a Zynq-type SoC). Its software
analyses spectra, computes autolock settings, optimises the modulation and
computes noise spectra. That software is not part of this RTL. The RTL only
gives it registers and a capture memory.

Everything runs at one sample per clock with no back-pressure. Every block is
a fixed-latency pipeline, so the design's timing is a list of latencies (see
[Latency](#latency)).

## Signal flow

```
 adc_a ─┬─► demodulator A ──I──► IIR ─► IIR ─ err_a ─┐
        │     (CORDIC)     └─Q──► IIR ─► IIR ─ quad_a ──────────────► recorder ch B (unlocked)
        │                                            │
 adc_b ─┼─► demodulator B ──I──► IIR ─► IIR ─ err_b ─┤
        │                                            ▼
        └───────────── fast mode ───────────► error combiner ─ err ─► PID ─ ctrl ─┐
                                                     │                            │
                                                     ├─► simple autolock           │
                                                     └─► boxcar ─► jitter-tolerant │
                                                                   autolock        │
 NCO ─► CORDIC sine ─► ×N ─ mod ───────────┐                                        │
  └─ phase ─► both demodulators            ▼                                        ▼
 ramp generator ─ ramp ──────────────► output router ──► dac_a, dac_b
                                              ▲
 ctrl ─► slow integrator ─ slow_int ──────────┘──► slow level ─► delta-sigma ─► slow_dac
```

By default OUT1 (`dac_a`) carries the modulation. OUT2 (`dac_b`) carries the
control signal plus the ramp. The slow pin carries the slow integrator. Any of
the three signals can be routed to any output, or to none. The slow output can
also take a fast signal: a piezo driver, for example, may receive the ramp.

## Modulation and demodulation

**Oscillator.** A 32-bit phase accumulator advances by `R_MOD_FREQ` each clock.
So f_mod = R_MOD_FREQ × 125 MHz / 2^32, with 0.03 Hz resolution, up to the
62.5 MHz Nyquist limit. The phase drives a CORDIC that produces a cosine close
to full scale. `mod_amplifier` multiplies it by the amplitude N, in DAC LSB
peak, and saturates it to 14 bits.

**CORDIC.** The rotator in `cordic.sv` is the one piece of arithmetic shared by
the oscillator and both demodulators:

* A first stage folds the angle into ±90° by negating the vector.
* 18 shift-and-add stages follow, with two guard bits.
* The gain K ≈ 1.64676 is left in the output, not divided out. Later gains
  absorb it: the demodulated amplitude is K·s.
* Latency is 19 clocks.

**Demodulation.** A demodulator does not multiply by a stored sine. It rotates
the input sample, taken as the vector (s, 0), by the angle

    a = −(h · phase + delay_phase)

Here h is the harmonic (1 to 5) and `delay_phase` is the demodulation phase, in
units of 2^-32 turn. With b = h·phase + delay_phase, the rotated vector is
(K·s·cos b, −K·s·sin b). Its x part is the product of the input with the
reference cos b: the in-phase mixer output. Its y part is the quadrature. For an
input s = A·cos(h·phase − d), the filtered results are I = (K·A/2)·cos(δ + d)
and Q = −(K·A/2)·sin(δ + d). A single recording of I and Q therefore gives the
best phase directly: add atan2(Q, I) to δ and the whole signal moves into I. The sum-frequency terms left in both are removed by the
IIR filters that follow. There is no separate low-pass inside the demodulator.

Both the oscillator phase and the demodulator are pipelined. The
demodulator's output at clock n therefore corresponds to the oscillator phase
of clock n−20, not of clock n. This constant offset is absorbed by the
demodulation phase, along with the optical and analog delays of the setup.

**Error filters.** Each channel's in-phase signal passes two biquads
(`iir_filter.sv`). They use direct form I with 25-bit coefficients in Q2.22,
saturate their output and have a latency of 2 clocks each. After reset the
coefficients are b0 = 1, all others 0, so the filters pass the signal straight
through. A first-order low-pass with pole p is b0 = 1−p, a1 = −p. The
quadrature of channel A runs through a second pair of filters with the same
coefficients. This lets the processor record I and Q side by side and pick the
phase that puts all the signal into I.

## Error signal selection and the PID

`error_combiner` picks the PID's input:

| mode | error signal |
|---|---|
| normal | filtered in-phase signal of channel A |
| dual channel | (mix_a · err_a + mix_b · err_b) / 2^14, weights Q1.14 signed |
| fast mode | ADC A sample, sign-extended, no demodulation, no filters |

Dual channel lets one board combine, for example, an FMS signal on input A with
an MTS signal on input B. Fast mode is meant for error signals produced outside
the board, such as from a Pound-Drever-Hall setup or a beat-note detector. It
saves the 24 clocks of demodulator and filters.

The PID (`pid_controller.sv`) computes

    ctrl = (kp·e) >> 12 + I >> 20 + (kd·(e[n] − e[n−1])) >> 8,    I += ki·e

* Gains are signed 16 bit. kp = 4096 is a proportional gain of 1.
* ki = 1 gives an integrator unity-gain frequency of about 19 Hz.
* The integrator saturates at the 25-bit range, which prevents windup.
* The PID runs only while the design is *locked*. Otherwise its integrator and
  output are held at zero, so every lock starts from a clean state.
* The enable travels down the pipeline with the sample, so no sample is lost
  or doubled when the lock engages or releases.

## Ramp, lock state and outputs

`ramp_generator` produces a triangle between center − amplitude and
center + amplitude:

* The step size has 16 fractional bits, so a full sweep can last from a few
  clocks to minutes.
* It reports its position relative to the centre and its direction.
* It pulses `sweep_start` at the lower turning point.

The whole design has a single lock state bit, `locked`, in the top module:

* While it is set, the ramp is frozen at its current value, the PID runs and
  the slow integrator runs.
* It is set by either autolock, or by a direct "lock now" command.
* It is cleared by the unlock command.

Freezing the ramp, not resetting it, matters. The laser stays exactly where
the autolock found the line, and the PID starts from zero error, not from a
jump.

`output_router` adds the signals routed to each fast DAC and saturates the sum
to 14 bits. This is plain saturation, not a shift: one LSB of the 25-bit path is
one DAC LSB.

**Slow output.** The slow integrator adds ki·ctrl into an accumulator with 20
fractional bits, clamped to 0..65535. While unlocked it rests at `R_SLOW_INIT`.
It slowly takes over the DC part of the correction, for example for a piezo
with a large range. Its 16-bit level, plus anything else routed to the slow
output, drives a first-order delta-sigma modulator. The modulator's pin gives a
pulse density equal to level / 2^16. An external RC filter turns this into a
0–1.8 V voltage.

## Autolock

The design can lock in two ways, both chosen by the processor. This is the
part of the design whose behaviour is least obvious from the signal flow.

### Simple autolock

The processor records a spectrum and the user marks the line to lock on. The
processor then works out at which ramp position the error signal crosses zero
there. That position goes into `R_AL_TARGET`. After the autolock command, the
`simple_autolock` block waits for the *rising* ramp to reach the target
position, then engages the lock.

It makes only one comparison per clock, so it is exact to the ramp step. But
it trusts that the spectrum sits at the same ramp position on every sweep. If
the laser jitters by more than the line's width between sweeps, it locks next
to the line. The end-to-end testbench shows this: with the drift turned on it
still locks, because the PID's capture range is the line's width.

### Jitter-tolerant autolock

The second mode does not trust ramp positions. It recognises the line by the
*sequence of features* the error signal passes on its way there.

**Filtering.** The error signal is decimated: one sample every
`R_AL_DECIM`+1 clocks. It then passes through `boxcar_filter`, a moving sum over
the last W samples (W ≤ 8192). The filter keeps a circular buffer, adds the new
sample and subtracts the one W samples back. The sum is not divided by W, so
thresholds are written in sum units: W times the height in signal LSB.

**Instructions.** The processor writes a short program into
`jitter_tolerant_autolock`, one instruction per peak:

* `thr` is a threshold whose sign gives the peak's polarity. A positive value
  means "wait until the sum rises above thr". A negative value means "until it
  falls below thr".
* `wait` is the least number of filter samples that must pass after the
  previous peak before this one may count. This stops one wide peak from
  matching two instructions, and stops noise right after a peak from matching
  the next one.

After the last instruction comes `final_wait`: the number of samples from the
last recognised peak to the lock point.

**State machine.**

```
IDLE --arm--> WAIT_SWEEP --sweep_start--> SEARCH --last peak--> FINAL --final_wait--> engage, IDLE
                  ^                          |                    |
                  +------ ramp turns --------+--------------------+
```

The states do this:

* `arm` clears the filter and waits for the sweep start.
* SEARCH matches instructions in order. A threshold is compared every clock;
  the wait times count filter samples.
* If the ramp turns downward before the lock point, the attempt is abandoned.
  The engine waits for the next sweep and starts again from the first
  instruction. A sweep spoilt by noise therefore costs one sweep, not a failed
  lock.
* `cancel`, the unlock command, stops it at any point.

Because the search is relative to the peaks actually seen in this sweep, a
shift of the whole spectrum is harmless. In the end-to-end test the spectrum
jumps by up to ±150 LSB at every sweep, which is 2.5 line widths. The lock
still engages within ±1 LSB of the same place relative to the target line each
time.

Choosing the instructions is the processor's job. It needs typical peak
heights and spacings from several recorded spectra. Thresholds should be a
fraction of the filtered peak height, and waits about half the distance between
peaks. `tb_linien_top.sv` contains a small version of that calculation
(`derive_instructions`) working on a noise-free model of the spectrum.

## Capture memory

`sample_recorder` stores 16384 pairs of 14-bit samples:

* Channel A is the error signal.
* Channel B is the control signal while locked. While unlocked it is the
  filtered quadrature of channel A.

Samples can be decimated by 2^d, d = 0..16. Each stored value is the mean of
2^d inputs. That average is also the anti-alias low-pass the processor needs
when it builds a noise spectrum of the error signal. To do so it records chunks
with increasing decimation and joins their spectra.

A recording starts with the record command. It begins either immediately or,
if "record on sweep" is set in `R_MODE`, at the next sweep start, so the
stored trace is one sweep aligned to the ramp. When all 16384 pairs are stored,
`R_STATUS` bit 0 rises.

## Registers

`csr_regs` is a simple word bus with a 16-bit word address and 32-bit data:

* A write takes effect in the cycle `bus_we` is high.
* A read is requested with `bus_re`. One clock later `bus_ack` pulses with
  `bus_rdata`.
* Addresses 0x8000 + i read capture sample i as
  `{4'b0, ch_a[13:0], ch_b[13:0]}`.

A real board needs a bridge from the processor's bus (for example AXI) to this
bus. That bridge is not included.

| addr | name | meaning |
|---|---|---|
| 0x00 | MOD_FREQ | phase increment per clock (f = v · 125 MHz / 2^32) |
| 0x01 | MOD_AMP | modulation amplitude, DAC LSB peak |
| 0x02 / 0x03 | CHA_HARM / CHA_DELAY | channel A harmonic 1..5, demodulation phase (2^32 = one turn) |
| 0x04–0x0D | CHA_IIR | channel A: IIR1 b0 b1 b2 a1 a2, then IIR2; Q2.22 |
| 0x0E / 0x0F | CHB_HARM / CHB_DELAY | the same for channel B |
| 0x10–0x19 | CHB_IIR | channel B filters |
| 0x1A | MODE | [0] fast mode, [1] dual channel, [2] ramp runs, [3] slow integrator on, [4] autolock type (0 simple, 1 jitter tolerant), [5] record on sweep start |
| 0x1B | MIX | [15:0] weight A, [31:16] weight B, Q1.14 |
| 0x1C–0x1E | KP, KI, KD | PID gains, signed 16 bit |
| 0x1F–0x21 | RAMP_STEP, RAMP_AMP, RAMP_CENTER | step with 16 fractional bits, half span, centre |
| 0x22 / 0x23 | SLOW_KI / SLOW_INIT | slow integrator gain, resting level |
| 0x24 | DEST | [1:0] control, [3:2] ramp, [5:4] modulation; 0 none, 1 OUT1, 2 OUT2, 3 slow |
| 0x25–0x27 | AL_TARGET, AL_WIDTH, AL_NINSTR | simple-autolock position, boxcar width W, number of instructions |
| 0x28 / 0x29 | AL_FINAL / AL_DECIM | final wait, decimation − 1 |
| 0x2A | REC_DEC | recorder decimation log2 |
| 0x2B–0x2D | INSTR_THR, INSTR_WAIT, INSTR_COMMIT | stage an instruction; writing its index to COMMIT stores it |
| 0x2E | CMD | pulses: [0] start autolock, [1] unlock, [2] start recording, [3] lock now |
| 0x2F | STATUS | [0] recording done, [1] recording busy, [6:2] index of the autolock instruction being searched, [7] autolock busy, [8] locked |

The reset values give a working default: first harmonic, pass-through filters,
OUT1 = modulation, OUT2 = control + ramp, slow level at mid-scale, W = 1.

## Latency

From the ADC register to the DAC pins the path takes:

| path | clocks | ns |
|---|---|---|
| fast mode: input register, combiner, PID (2), output router | 5 | 40 |
| normal: input register, demodulator (20), IIR ×2 (4), combiner, PID (2), router | 29 | 232 |

Fast mode shortens the path by 24 clocks, or 192 ns. The delay measured on the
real instrument is 320 ns normally and 125 ns in fast mode. Those figures
include the converters, and their difference is 195 ns. The CORDIC depth was
chosen to reproduce that difference; the converter delays are outside this
RTL. `tb_linien_top` measures both latencies cycle by cycle.

## Where this departs from, or goes beyond, the published description

The published description gives the structure and the behaviour. It gives no
word widths, number formats, register map or bus. All of those are choices of
this implementation:

* 18 CORDIC stages. The oscillator uses the same CORDIC.
* Biquads as the IIR filters, with Q2.22 coefficients.
* PID scaling and anti-windup.
* The 16-bit slow level.
* Averaging as the recorder's low-pass, and 14-bit storage.
* The instruction format of the jitter-tolerant autolock, its restart-on-turn
  rule and its 32-instruction limit.
* The boxcar's depth of 8192.
* The ramp hold while locked.
* The "lock now" command.
* The quadrature filter pair for phase finding.

Other points to know:

* The demodulation phase is a phase offset added in the CORDIC, not a delay
  line on the reference.
* The moving sum drops the 1/W factor of a true average.
* Dual-channel operation combines the channels as a weighted sum. The
  published description says only that both channels can be demodulated and
  used together.
* The ports are 14 bit wide. On a board variant with 10-bit converters, the
  converters use the 10 most significant bits and nothing else changes.
* Harmonics whose frequency exceeds Nyquist alias, as they would in any
  sampled system.
* All processor-side algorithms are outside the RTL: spectrum analysis,
  building autolock instructions, CMA-ES optimisation of the modulation
  parameters, noise spectra. So are the AXI bridge, the converters and the
  analog filter after the slow pin.

## Files and simulation

`rtl/` holds one module per file:

* `linien_pkg.sv`: widths, types, the configuration struct and the register
  map.
* `linien_top.sv`: the top.
* One file per block named above.

`tb/` holds one self-checking testbench per block and `tb_linien_top.sv` for
the whole design. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. The
block testbenches compare against models written independently in the
testbench:

* floating-point rotations for the CORDIC;
* reference recursions for the filters and the PID;
* a software moving sum;
* a software peak matcher run over 100 jittering sweeps for the jitter-tolerant
  autolock.

`tb_linien_top` runs the top with all its defaults. It closes the loop through
a model of a laser and a spectroscopy cell:

* The laser frequency is OUT2 plus a drift.
* The cell has three dispersive lines, one of them the target.
* The photodiode signal is the cell's slope times the modulation, plus noise.

The test then does the following, counting each event and failing if one never
occurs:

1. Measures both latencies.
2. Checks dual-channel routing.
3. Records a spectrum over the bus. The in-phase peak must sit at the target
   line and the quadrature must stay small.
4. Locks with the simple autolock against a drift. The laser must stay within
   3 LSB of the line.
5. Checks the delta-sigma density and that the slow integrator moved.
6. Unlocks.
7. Runs the jitter-tolerant autolock four times under ±150 LSB jitter.

It takes a few seconds of simulation.

`tb_iq_phase` runs the top at the modulation settings of an optimised setup:
8.6 MHz and 1.9 V peak to peak. The detection path has an unknown delay of 13,
22 or 31 clocks. The test records I and Q in one sweep, computes the
demodulation phase as described under *Demodulation*, writes it and records
again. The quadrature must then be below 5 % of the in-phase signal.

With Verilator 5:

```
verilator --binary --timing -Irtl -y rtl -y tb +libext+.sv \
    rtl/linien_pkg.sv tb/tb_linien_top.sv --top-module tb_linien_top
./obj_dir/Vtb_linien_top
```

The same command works for any `tb/tb_<block>.sv`. The RTL has no vendor
primitives. The memories (boxcar buffer, capture memory, instruction table) are
plain arrays with synchronous access that map to block RAM.
