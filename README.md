# LLRF station DSP: non-IQ feedback, waveform capture and fast interlock

This is synthesizable SystemVerilog for the digital part of a low-level RF
(LLRF) controller for one storage-ring RF station. A cavity is held at a
programmed amplitude and phase. The cavity probe is sampled at an
intermediate frequency (IF), and two scalar PI loops drive the cavity through
a DAC that also runs at the IF. Beside the loops, the design has:

- a multichannel waveform recorder,
- a fast amplitude/phase interlock that removes RF drive within a microsecond,
- a phase-ramp sequencer that turns the phase setpoint on a timing event
  (used to align RF buckets between two rings),
- a network-analyzer excitation source,
- a register bank shared by two bus masters.

The numbers used throughout come from the reference station:

| Item | Value |
| --- | --- |
| master oscillator f_MO | 500.39 MHz |
| LO | 11/12 · f_MO |
| IF | 1/12 · f_MO = 41.69 MHz |
| ADC/DAC clock f_S | 114.67 MHz |
| f_IF / f_S | 4/11, so one IF period advances θ = 130.9° per sample |
| ADCs | eight 16-bit channels |
| DAC | one 16-bit channel |

## 1. Non-IQ down-conversion

With θ = 2π·4/11, the sample sequence is not a multiple of 90°, so the plain
"I, Q, −I, −Q" reading of an IQ-sampled signal does not apply. Two consecutive
samples instead satisfy

    y_n     = cos(nθ)·I     + sin(nθ)·Q
    y_{n+1} = cos((n+1)θ)·I + sin((n+1)θ)·Q

Inverting the 2×2 matrix, whose determinant is sin θ, gives

    I = ( sin((n+1)θ)·y_n − sin(nθ)·y_{n+1}) / sin θ
    Q = (−cos((n+1)θ)·y_n + cos(nθ)·y_{n+1}) / sin θ

`fdownconvert` evaluates this on every pair of neighbouring samples. It uses
the LO cosine and sine of the two sample times, delayed to match. It produces
an I row and a Q row on alternate cycles. The factor 1/sin θ is the constant
`INV_SIN = round(2^15 / sin θ)`, which is 43358 for 4/11. `fiq_interp` holds
the alternating rows and presents I and Q together.

The LO is `digital_lo`. Its phase accumulator steps by exactly 4/11 of a turn
per sample: an integer step plus a modulo-11 remainder carry, so the LO
repeats exactly every 11 samples. The accumulator feeds a rotate-mode CORDIC.
The same LO drives:

- the down-converter,
- the up-converter `flevel_set`, which computes dac = I·cos + Q·sin,
- the eight waveform mixers.

## 2. The feedback core and its latency

    ADC0 → fwashout(2) → fdownconvert(8) → fiq_interp(3)
         → CORDIC I,Q→A,φ (20) → pi_scalar ×2 (4) → CORDIC A,φ→I,Q (20)
         → flevel_set(3) → permit register(1) → DAC

The numbers in brackets are clock cycles. Each block is built to the delay
shown for it in the reference block diagram. The core from ADC to the
up-converter output is therefore 60 cycles, and 61 cycles to the DAC pins
(532 ns). The reference description also quotes a total of 50 cycles
(436 ns), which does not match the sum of its own per-block delays. This
design keeps the per-block values. The end-to-end test measures 61 cycles
from zeroing the probe input to the first change of the DAC word.

`fwashout` removes the ADC DC offset. It uses a first-order estimate
(dc += (x − dc)/8) that settles in about 70 cycles. Its gain at the IF is
about 1.07, with a small phase lead. The loop absorbs this.

`cordicg_b22` is one module for both directions. An `op` input selects
rotation or vectoring. Its latency is 20 cycles: a ±90° pre-rotation, 18
micro-rotations and a rounding output stage. It has four extra fraction bits
inside. The CORDIC gain of about 1.6468 is not removed. Amplitudes after a
vectoring CORDIC are therefore 1.6468·|IQ|, and callers scale their inputs
where it matters. Phase is two's complement, with a full turn equal to 2^18.

### PI controllers

`pi_scalar` is used twice, once for amplitude and once for phase. It is
built in four stages:

1. **Error.** e = setpoint − measured. The phase loop wraps the error
   modulo 2^18, so that −180° equals +180°. The amplitude loop saturates it
   instead.
2. **Slew limiter.** The limited error moves towards e by at most
   `slew_max` per cycle.
3. **Kp and Ki paths.** P = e·kp/2^10. The integrator accumulates e·ki with
   16 fraction bits.
4. **Close-loop select.** drive = P + integrator when the loop is closed,
   otherwise the setpoint.

This realises C(z) = Kp + Ki/(1 − z⁻¹).

- In open loop the setpoint goes straight to the drive, so an open loop is
  a fixed-drive generator.
- The integrator is cleared while the loop is open.
- The phase loop's integrator and drive wrap instead of saturating. A phase
  ramp of any number of turns can therefore be followed.

Loop-gain guide, at the default scalings with a direct DAC→ADC loop-back:

- The measured amplitude is about 2.42 × the amplitude drive.
- The measured phase follows the drive phase one-for-one, plus a fixed
  offset.
- The end-to-end test uses kp = 128 and ki = 128 for amplitude, and
  kp = 256 and ki = 256 for phase. Both loops settle in about 2000 cycles
  with a 10-cycle cable.

### Setpoints

- The amplitude setpoint comes from a register.
- The phase setpoint comes from `phase_ramp` (section 5).
- The network-analyzer source `netan_exc` adds a sine to one of the two,
  selected by a register bit, to measure the loop response. It is a DDS
  phase accumulator driving a rotate-mode CORDIC.

## 3. Waveform path

    ADC0..7 → iq_mixer (I = adc·cos, Q = adc·sin)
            → mux_serializer → 16-word serial frame every samp_per cycles
            → cic_multi "dynamic" → circ_buf → Ethernet-clock reader
            → cic_multi "static"  → fast_interlock

The 16 baseband streams (I and Q of eight channels) are latched on a
`sample` strobe. They are then sent one word per cycle with a stream number,
so a single time-multiplexed CIC filter serves all channels.

`cic_multi` is a second-order CIC decimator with per-channel integrator and
comb state held in arrays. Its decimation and output shift are inputs:

- The "dynamic" instance takes them from registers. It feeds the waveform
  recorder.
- The "static" instance has fixed values (decimation 2, shift 2, gain 1).
  It feeds the interlock.

The gain is decim², so choose the shift to be 2·log2(decim) for unity gain.

`circ_buf` is a double-buffered circular recorder:

- The write side runs on the RF clock and writes {stream, sample} words
  round a bank.
- A trigger is held pending until the bank has been filled once and the
  reader has released the other bank. The banks then swap. The frozen bank
  is read on the Ethernet clock, with offset 0 being the oldest word.
- A `read_done` pulse releases it.
- The two clock domains exchange only toggle flags through two-flop
  synchronizers. The frozen bank number and start pointer are stable while
  they are used.

## 4. Fast interlock

`fast_interlock` works on the static-CIC stream:

1. It pairs each channel's I and Q words.
2. It runs them through a vectoring CORDIC.
3. It compares amplitude and phase with that channel's thresholds. Each has
   its own mode: off, high (trip above), low (trip below) or window.

Fault sources are numbered as follows:

| Bits | Source |
| --- | --- |
| 0..7 | channel amplitudes |
| 8..15 | channel phases |
| 16..17 | the two ARC-detector inputs (two-flop synchronized) |

Masked sources set a latch. The latch removes the RF permit, and the top
level then forces the DAC word to zero. The cycle that sets the latch
records:

- which sources tripped (first fault),
- the amplitude and phase of the channel that tripped.

A register write clears the latch. Every amplitude/phase result is also
written into a small dual-port RAM, read on the Ethernet clock as the live
"amp/phs list".

Thresholds are in vectoring-CORDIC units. Through the mixer and the static
CIC, an ADC tone of amplitude A reads as about 1.51·A in
interlock units. The result carries a ripple of about ±17% from the 2·f_IF
mixer image that the order-2, decimation-2 CIC only partly removes; allow
for this when placing a threshold. The interlock latency:

- A result is latched 21 cycles after its channel's Q word.
- From the first ADC sample above threshold to the loss of permit, the
  end-to-end test measures 28 cycles (244 ns).
- The worst case is one serial frame longer. Both are well inside the 1 µs
  requirement.
- An ARC input trips in 3 cycles.

## 5. Phase ramping

`phase_ramp` rotates the phase setpoint between RF stations for bucket
alignment. It runs through four states:

| State | What happens |
| --- | --- |
| IDLE | Loads the base setpoint when it is written. When a timing event with the programmed code arrives and the ramp is enabled, moves to DELAY. |
| DELAY | Waits `delay` cycles. |
| STEP | Adds `step` to the setpoint, `steps` times. |
| WAIT | Waits `period` cycles between steps. |

The sequencer aborts with a fault flag if the phase loop is not locked
(loop open or RF permit lost), or if the whole ramp exceeds `timeout`
cycles. A ramp ends with `done`.

The setpoint wraps modulo one turn. The end-to-end test ramps 50 × 40000 LSB
(7.6 RF periods) with both loops closed. It checks that the measured phase
ends within 200 LSB of the final setpoint.

## 6. Register bank and bus masters

`llrf_regs` serves two local-bus masters: a network (UDP) master and an
on-board CPU. The UDP master has priority:

- A CPU access in a cycle where the UDP master is active is stalled
  (`cpu_ready` low). The CPU must hold a stalled request unchanged until it
  is taken; a concurrent assertion in `llrf_regs` checks this in simulation.
- Writes take effect on the next clock.
- Read data follows the request by two cycles.

| Address | Register |
| --- | --- |
| 0x00 | control: b0 amplitude loop closed, b1 phase loop closed, b2 interlock reset (pulse), b3 excitation on, b4 excitation on phase (else amplitude), b5 ramp enable, b6 waveform trigger (pulse) |
| 0x01 | amplitude setpoint |
| 0x02 | phase setpoint (loads the ramp base) |
| 0x03 / 0x04 | amplitude kp / ki |
| 0x05 / 0x06 | phase kp / ki |
| 0x07 / 0x08 | amplitude / phase slew limit |
| 0x09 / 0x0a | waveform CIC decimation / shift |
| 0x0b | interlock source mask (reset: all enabled) |
| 0x0c / 0x0d | excitation frequency word (2^32 = f_S) / amplitude |
| 0x0e–0x13 | ramp event code, delay, step, steps, period, timeout |
| 0x14 | waveform sample-strobe period (minimum 16) |
| 0x20+4k … 0x23+4k | channel k: amplitude low, amplitude high, phase low, phase high |
| 0x40+k | channel k modes: b1:0 amplitude, b3:2 phase (0 off, 1 high, 2 low, 3 window) |
| 0x80 | flags: wave pending, interlock latch, ramp fault, done, busy |
| 0x81–0x84 | first fault, live status, fault amplitude, fault phase |
| 0x85–0x87 | measured amplitude, measured phase, current phase setpoint |

## 7. Top level: `llrf_station`

The top connects everything above. Other parts of a complete station attach
through ports:

- the two bus masters (UDP engine and soft CPU),
- the event-receiver code stream,
- the deserialized ADC words and the DAC word,
- the ARC inputs,
- the Ethernet-side read ports of the waveform buffer and the amp/phs list.

For 255 cycles after reset, the DAC is held at zero and the interlock is held
in reset. This lets the unreset pipelines and filters fill, so no start-up
garbage reaches the DAC or trips the interlock.

Shared types and constants are in `llrf_pkg` (widths, LO ratio,
configuration and status structs). `dpram` is a generic dual-clock RAM with
a registered read.

## 8. Where this departs from the reference design, and limits

- **Feedback latency.** It is 60 + 1 cycles, not the quoted 50 (see
  section 2).
- **Inside details.** These are this design's own choices:
  - fixed-point widths (18-bit data and phase),
  - gain formats,
  - the washout constant,
  - CIC order,
  - buffer depth (2 × 2048 words),
  - register map and encodings,
  - the serial frame order,
  - the warm-up hold.

  The reference gives the block structure, the per-block delays, the LO
  ratio and the inversion formula, but not these internals.
- **Other LO ratios.** To run a station with a different ratio (a 4/23
  station, for example), change `LO_NUM`/`LO_DEN` in `llrf_pkg` and
  `INV_SIN` in `fdownconvert` (36906 for 4/23). The defaults are the 4/11
  station.
- **Not included.** The following are outside this RTL:
  - the soft CPU and its peripherals (Modbus, UART, SPI, I²C, LCD),
  - the Ethernet/UDP engine,
  - the event receiver,
  - converter-chip configuration and LVDS deserialization,
  - the analog front end,
  - the cavity emulator.

## 9. Simulation

Every block has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
prints `TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5,
for example:

    verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -Irtl \
        rtl/llrf_pkg.sv $(ls rtl/*.sv | grep -v llrf_pkg) tb/tb_llrf_station.sv \
        --top-module tb_llrf_station && ./obj_dir/Vtb_llrf_station

(The package is compiled first. A unit testbench needs only its module, its
sub-modules and the package.)

`tb_llrf_station` runs the complete station at its default sizes, with the
DAC looped back to the probe ADC through a 10-cycle delay. In order, it
covers:

1. open-loop drive,
2. the 61-cycle loop latency,
3. amplitude and phase lock,
4. network-analyzer excitation,
5. a 7.6-turn phase ramp started by a timing event,
6. waveform trigger and Ethernet-clock readout,
7. an amplitude interlock trip with DAC shut-off, latency measurement and
   reset,
8. an ARC trip,
9. a bus collision between the two masters.

It counts each mechanism and fails if one never occurred. It runs in a few
seconds.

`tb_ddc_ratios` builds the receive chain (LO, down-converter, IQ demux)
twice, at 4/11 and at 4/23 with the matching `INV_SIN`. It checks that both
recover the same baseband vector from a tone synthesized on each chain's own
LO, and that each LO repeats exactly every 11 or 23 samples.
