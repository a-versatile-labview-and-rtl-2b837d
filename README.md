# FPGA program for a self-exciting, frequency-detecting scanned probe microscope

A frequency-modulated force microscope measures forces through the shift of a
cantilever's resonance frequency. To measure that shift quickly, the cantilever must
keep oscillating at its own, moving resonance. This is done with positive feedback: the
measured tip position is fed back to a small piezo that shakes the cantilever, a
quarter period out of phase. This RTL is the logic inside the microscope's FPGA card.
It does the parts that must be deterministic and fast:

* it samples the interferometer signal that measures the cantilever position;
* it bandpass-filters that signal and streams it to a host computer;
* it closes the self-excitation loop: a programmable delay in whole 25 ns clock ticks,
  then a gain, then a drive that can be switched off periodically ("interrupt time");
* it drives the scan-tube and electromagnet voltages that the host computes, ramping
  each one to its setpoint and interrupting the host when it has arrived.

The frequency itself is found by the host, not here. The host fits the signal's second
derivative against the signal (for a sinusoid the slope is −ω²). The host also computes
the scan positions and runs the feedback loops (frequency PID, amplitude control through
the interrupt time). The RTL provides the hardware those loops run against. Two
testbenches show it end to end. One closes the loop through a cantilever model. The
other recovers a 1 mHz frequency modulation on a 75 kHz carrier.

## Division of work and channel map

The card has eight 16-bit ±10 V inputs and eight 16-bit ±10 V outputs (305 µV per code,
two's complement). It runs from a 40 MHz clock. Inputs are sampled at 750 kHz and
outputs updated at 1 MHz.

| Channel | Use |
|---|---|
| AI0 | cantilever position, AC-coupled interferometer signal → bandpass → host and drive loop |
| AI1 | interferometer DC level (sample approach, snap-down detection) → host, unfiltered |
| AI2–AI7 | not used by this logic |
| AO0 | self-excitation drive to the piezo disc under the cantilever |
| AO1, AO2 | scan tube +X, −X electrodes |
| AO3, AO4 | scan tube +Y, −Y electrodes |
| AO5 | scan tube Z |
| AO6 | electromagnet supply control voltage |
| AO7 | unused, held at 0 |

```
 AI0 ─A/D 750k─► bandpass_filter ─┬──────────────► up dma_fifo ──► host (samples)
 AI1 ─A/D 750k─────────────────────┼──(upper half)─┘
                                   └► discrete_delay (z^-n) ► drive_stage ► AO0
 host (commands) ► cmd dma_fifo ► control_regs ─┬► filter coefficients, n, gain, interrupt
                                                └► piezo_scan_output ► AO1..AO6, irq
 rate_strobe ×2: A/D strobe (750 kHz), D/A strobe (1 MHz)
```

The top module is `spm_fpga_top`. The converters themselves are outside it. It emits
`adc_convert` and captures `ai[]` at the clock edge that ends that pulse. It emits
`dac_update` and changes AO1–AO6 only right after it. The drive path runs every clock,
so AO0 changes every clock.

## The self-excitation loop

This is the part of the design that needs the most care.

**Phase.** A cantilever driven at resonance responds 90° behind the drive. To sustain
the oscillation, the drive must therefore be in phase with the velocity, 90° ahead of
the position. A pure delay can only lag, so the loop lags by three quarters of a period
instead of leading by one quarter. At 75 kHz a period is 533.3 clock ticks, so the total
lag must be about 400 ticks. The total lag is the sum of these parts:

| Stage | Lag |
|---|---|
| A/D sample-and-hold | on average half a sample period, about 27 ticks at 750 kHz |
| capture register and bandpass filter | 8 ticks |
| bandpass phase | 0 at the centre frequency |
| `discrete_delay` | n ticks |
| `drive_stage` register | 1 tick |

So n ≈ 365–375 for a 75 kHz cantilever. The end-to-end testbench uses n = 372. In
practice n is tuned by maximising the amplitude, as with the real instrument. The loop
tolerates a phase error: any lag between ½ and 1 period still pumps energy in.
An error pulls the oscillation slightly off the natural resonance, by f0/(2Q)·tan(error).
A lag of ¼ period removes energy and damps the cantilever. The testbench shows both
cases.

**Delay line.** `discrete_delay` is a circular buffer of `MAX_DELAY` = 1024 words. It is
written every clock with the held filter output and read `n−1` words back through a
register, so the latency is exactly `n` clocks. It reads 0 until `n` words have been
written after reset. 1024 ticks (25.6 µs) covers a full period of any cantilever above
39 kHz.

**Gain and amplitude.** `drive_stage` multiplies by a signed Q4.12 gain (±8, step
1/4096) and saturates to 16 bits. A linear loop whose gain beats the cantilever's
damping grows without bound, so something must saturate. Set the gain high enough that
the drive stage clips before the A/D input does. The drive then becomes a near-square
wave of fixed size, and the amplitude settles where the cantilever's damping uses up
that fixed power.

**Interrupt time.** A free-running counter repeats every `intr_period` clocks. The drive
is forced to 0 while the count is below `intr_off`. This lowers the average power fed
in and hence the amplitude. In the testbench, 60 % off time brings the amplitude from
14 500 to 5 400 codes. The host can close an amplitude loop by adjusting `intr_off`.
`intr_period = 0` turns the interrupt off. `drive_blanked` shows the off cycles.

## Bandpass filter

`bandpass_filter` is a direct-form-I biquad, y = b0·x + b1·x₁ + b2·x₂ − a1·y₁ − a2·y₂,
with host-loaded signed Q2.30 coefficients. It runs once per A/D sample. The five
products share one multiplier over five cycles, and the result appears 7 clocks after
the sample. The stored outputs y₁ and y₂ keep 16 fractional bits beyond the 16-bit
output. Without them, narrow bands lose their accuracy: at a 20 Hz width the poles sit
only 10⁻⁴ inside the unit circle. The 16-bit output is truncated (toward −∞) and
saturated.

For centre f0, width BW (−3 dB) and sample rate fs, a unity-peak-gain bandpass is:

```
r  = 1 − π·BW/fs
a1 = −2·r·cos(2π·f0/fs)      a2 = r²
b0 = (1 − r²)/2              b1 = 0        b2 = −b0
coefficient register = round_toward_zero(value · 2^30)
```

The filter also removes the DC offset of AI0. The host applies a second, narrow
bandpass in double precision (20 Hz in the frequency-detection test) before its fit.
The FPGA filter works as a wider pre-filter (a few kHz). It can be set to 20 Hz too,
but then its 16-bit output rounding noise dominates the frequency noise. In the workload
testbench that noise is a few mHz per record, against 0.12 mHz with the host filter.

## Scan outputs and the setpoint interrupt

`piezo_scan_output` holds AO1–AO6. The host writes the six setpoints, then GO. At each
1 MHz D/A update, every channel moves toward its setpoint by at most `slew_step` codes;
0 means it jumps in one update. Once all six channels have arrived, `irq` rises and
stays high until `irq_ack`. The host's raster scan is three nested loops: slow axis, then
trace/retrace, then fast axis. At each pixel it sends the setpoints, waits for `irq`,
waits the scan delay, then measures. The ±X and ±Y electrodes are separate channels the
host computes; the logic does not invert them. A move takes ceil(max distance / step)
updates.

## Host interface

**Command stream** (`cmd_valid/ready/data`, host to FPGA, a 16-word FIFO). Each word is
`{addr[7:0], data[31:0]}` (`spm_pkg::cmd_t`). A register changes one clock after its
command leaves the FIFO. Unknown addresses are ignored.

| addr | register | format / reset |
|---|---|---|
| 0x00 | drive enable | bit 0, reset 0 |
| 0x01 | delay n | 16 bit, clock ticks, clamped to 1..MAX_DELAY, reset 1 |
| 0x02 | drive gain | signed Q4.12, reset 0 |
| 0x03 | interrupt period | clock ticks, 0 = off |
| 0x04 | interrupt (drive-off) time | clock ticks |
| 0x05 | stream enable | bit 0, reset 0 |
| 0x10–0x14 | b0, b1, b2, a1, a2 | signed Q2.30, reset 0 |
| 0x20–0x25 | setpoints AO1..AO6 | 16-bit codes, reset 0 |
| 0x28 | slew step | codes per 1 µs update, 0 = jump |
| 0x29 | GO | any data; starts a move |

**Sample stream** (`up_valid/ready/data`, FPGA to host, a 1024-word FIFO). When
streaming is on, there is one word per A/D sample: `{AI1 raw[15:0], AI0 filtered[15:0]}`.
At 750 kHz that is 3 MB/s. The FIFO holds 1.4 ms if the host stalls. When it is full,
samples are dropped and counted in `up_overflow`.

## Verification

Every module has a self-checking testbench in `tb/`, named `<module>_tb.sv`. Each prints
`TB_RESULT checks=N failures=M`.

* `rate_strobe_tb`: 750 and 1000 strobes in 1 ms; every spacing is 53/54 or 40 clocks.
* `bandpass_filter_tb`: checks the output bit for bit against an independent 128-bit
  model (random input, a 20 Hz-wide setting, saturation). It also checks the 7-clock
  latency, unity gain at the centre and attenuation at 60 kHz.
* `discrete_delay_tb`: exact n-cycle latency for n = 1, 2, …, MAX_DELAY, the clamps,
  on-the-fly changes and the zeros after reset.
* `drive_stage_tb`: gain and saturation against a floor-division model; interrupt duty
  of 30 % and 70 %; always off when off time ≥ period.
* `piezo_scan_output_tb`: per-update trajectory of all six channels against a model;
  interrupt timing and acknowledge; move duration.
* `dma_fifo_tb`: random traffic against a queue model, full/empty flags, streaming
  throughput.
* `control_regs_tb`: every register, reset values, the GO pulse, unknown addresses.
* `spm_fpga_top_tb` runs the whole design at the default parameters. The cantilever
  model is 75 kHz with Q = 200, and the host is modelled too. The test shows ring-up from
  rest to a stable amplitude at 75.000 kHz. It shows tracking of a +1 % resonance shift
  (75.68 kHz measured for 75.75 kHz), amplitude reduction by the interrupt time, and
  decay at the wrong phase. It checks that the AI0 offset is removed and that the AI1
  level is streamed. It runs a 2×2×4-pixel raster and a 3-step field sweep, each move
  gated by the interrupt, and an up-stream overflow. It counts each mechanism and fails
  on any that never happens. It runs in about 2 s.
* `freq_detect_workload_tb` reproduces the instrument's frequency-detection test. The
  input is a 75 213.833 Hz sine with 1 mHz FM at 10 Hz, sampled at 690 kHz. It passes
  through the FPGA pre-filter and then a host 20 Hz bandpass and fit on 2048-point
  (3 ms) records. The mean comes out within 1 µHz. The modulation comes out at
  0.71 mHz: the 20 Hz band attenuates the ±10 Hz sidebands by 1/√2. The residual per
  record is 0.12 mHz rms. It runs in about 10 s.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  --top-module spm_fpga_top_tb -y rtl -y tb +libext+.sv -Irtl \
  rtl/spm_pkg.sv tb/spm_fpga_top_tb.sv -o sim
obj_dir/sim +verilator+rand+reset+2
```

The simulator is two-state, so every register that is read is reset. The two memories
(the delay line and the FIFOs) have no reset, so they can map to block RAM. The delay
line masks its unwritten words instead.

## How far this follows the described instrument

Taken from the instrument's description:

* the channel map;
* 16-bit converters, 750 kHz input and 1 MHz output rates, the 40 MHz clock;
* the data path from A/D through bandpass to the host and to the drive;
* the z^-n delay counted in clock ticks, the gain, and the drive interrupt time;
* the host computing every scan voltage, with the FPGA outputting them and interrupting
  on arrival;
* DMA in both directions;
* the test signal used to check frequency detection.

Choices made here, where the description gives no detail:

* the fractional-divider construction of 750 kHz;
* the biquad structure and all number formats;
* MAX_DELAY = 1024;
* the periodic form of the interrupt (only "duration during which the drive is turned
  off" is given);
* the slew-limited moves and the level interrupt;
* the register map and command format;
* the FIFO depths and the packing of the up-stream word;
* dropping samples on overflow.

The filter that is 20 Hz wide in the frequency test is taken to be the host's. The
instrument shows a bandpass in both places without saying which one was 20 Hz.

Not part of this RTL:

* the converters, the chassis bus bridge and everything on the host (GUI, frequency
  fit, scan generation, PID and plane fitting);
* the high-voltage amplifiers, coarse positioners and instruments.

The cantilever and function-generator models in `tb/` exist only to test the design.

## Changing it

Parameters of `spm_fpga_top`:

* `ADC_INC/ADC_MOD` sets the A/D rate to 40 MHz·INC/MOD (69/4000 gives 690 kHz).
* `DAC_INC/DAC_MOD` sets the D/A update rate.
* `MAX_DELAY` must be a power of two. Raise it for cantilevers below 39 kHz.
* `UP_DEPTH` and `CMD_DEPTH` set the FIFO depths.

Shared types and the register map are in `rtl/spm_pkg.sv`. The AO0 drive path is
independent of the converter rates. Only the bandpass runs at the sample rate, and it
needs at least 7 clocks between samples; an assertion in the top checks this.
