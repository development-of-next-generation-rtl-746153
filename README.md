# Multiharmonic digital LLRF control for a rapid cycling synchrotron

This is synthesizable SystemVerilog for a low-level RF (LLRF) controller in the style of a
MicroTCA.4 system. Twelve accelerating cavities are driven by six cavity driver modules, two
cavities each. Each cavity's gap voltage is controlled at eight harmonics of the revolution
frequency (h = 1..8) at the same time. Each harmonic has its own complex (I/Q) feedback loop.

During acceleration the revolution frequency sweeps, so everything is referenced to a single
32-bit revolution frequency word. That word is read from a pattern memory and distributed to
every driver, and each driver builds its harmonic phases from it locally. A separate star
network gathers the I/Q amplitudes of all cavities. It then forms a normalized vector sum per
harmonic, which is the input a beam phase feedback would use.

## System view

```
 triggers, mode ──► common_function ──bp bus (strobes, triggers, serial f1)──► 6 x cavity_driver ──► 12 DACs
                    │  ▲                                                       ▲   │     ▲
       WCM I/Q,     │  │ vector-sum frame                          downlink    │   │     └── 12 ADCs (cavity pick-ups)
       phase FB ───►│  │                                          frame       │   │ uplink frame (rotated I/Q of 2 cavities)
                    ▼  │                                                       │   ▼
                    comm_module (star hub: frame rx/tx, vector_sum) ───────────┘
```

* `llrf_system`: the top. It holds one `common_function`, one `comm_module` and `NDRV` (6)
  `cavity_driver` instances. All of them run on one 144 MHz clock.
* `common_function`:
  * divides the clock into the control strobe (CTRL, 1 MHz) and the pattern strobe (PATN,
    1 MHz);
  * synchronizes the 25 Hz, beam and measurement triggers;
  * steps the revolution frequency pattern and sends it serially on the backplane bus;
  * sends WCM (wall current monitor) I/Q and the phase feedback word down to the hub;
  * receives the vector sum back.
* `comm_module`: receives one uplink frame per CTRL period from each driver. Once every driver
  enabled in `link_mask` has reported, it sums the cavity vectors (already rotated in the
  drivers), normalizes the sum and returns it to the common function module. It also forwards the downlink frame
  (WCM I/Q, phase feedback word) to all drivers.
* `cavity_driver`:
  * recovers f1 from the serial line and integrates it into the h = 1 phase;
  * runs one `mhvc` (eight harmonic loops) per cavity;
  * adds the feedforward input and saturates to the DAC;
  * sends the measured I/Q of both cavities up to the hub.

Inputs that belong to parts not built here come out as top-level ports:
* ADC and DAC samples;
* feedforward drive samples `ff_in`;
* WCM I/Q and the phase feedback word;
* the configuration write bus.

## Number formats

| quantity | format |
|---|---|
| phase word | 32 bit unsigned, 2^32 = 2π |
| frequency word | phase advance per 144 MHz clock; f1 = 1 MHz is 29 826 162 |
| ADC/DAC, I/Q | 16 bit signed; a full-scale sine from the CORDIC has amplitude 32767 |
| gains (LUT, pattern, rotation) | unsigned Q2.14, 16384 = 1.0 |
| PI gains | Q4.12, 4096 = 1.0 |
| rotation angle, phase FB word | 16 bit, 2^16 = 2π |

Demodulating a cavity signal A·cos(φ − θ), with φ the harmonic phase, gives I = A·cosθ and
Q = A·sinθ. The modulator outputs u_I·cos φ + u_Q·sin φ. So a setpoint of (I, Q) = (0, a) is a
sine of amplitude a, and (a, 0) is a cosine.

## One harmonic loop (`harmonic_fb`)

This is the part that needs the most care. One instance handles harmonic `HN` of one cavity.

1. **Harmonic phase and frequency.** The block multiplies the h = 1 phase and frequency words by
   `HN`. The phase offset for the current harmonic frequency is added to the phase. It comes from
   a LUT addressed by frequency bits [27:18]: 1024 entries, 34 kHz apart, up to 8.96 MHz. Beyond
   that range the LUT address saturates.
2. **Demodulation.** A 16-stage CORDIC gives cos/sin. The ADC sample is delayed 19 clocks so it
   meets the CORDIC output of the same phase. The two products go into two `cic_decimator`s
   (3rd order, decimation 144). These produce one I/Q value per CTRL strobe, normalized back to
   unity DC gain.
3. **Control.** The I/Q setpoint comes from the I/Q pattern memory at the current pattern
   address. Its error drives two `pi_controller`s (I and Q). Each has a clamped integrator and a
   saturating output, and updates once per CTRL strobe.
4. **Modulation.** The PI outputs are held between strobes and multiplied with cos/sin of the
   harmonic phase. The result is scaled by the gain LUT (vs. frequency) and then by the gain
   pattern (vs. time).

The loop phase offset is what makes the loop close with the right sign: it must cancel the
phase the harmonic turns through between the DAC output and the ADC sample taken later. A
total delay of D clocks at frequency word F_h is an offset of F_h·D·2π/2^32. In the 16-bit LUT
format that is `(F_h·D + 32768) >> 16`. D counts these clocks:
* the pipeline from `phase_h1` to `fb_out`, which is 24 clocks;
* one more clock for `mhvc`'s summing register;
* one more for the cavity driver's output register;
* plus the external DAC → cavity → ADC delay.

The testbenches close the loop with a 3-clock external delay, so D = 29 at the top.

`iq_meas` is the filtered measurement. `iq_rot` is that measurement rotated and scaled by the
per-harmonic registers ROT_ANG / ROT_GAIN (`iq_rotator`); it is the vector sent to the hub.

`mhvc` holds eight such blocks (HN = 1..8) and a saturating sum (`sat_sum`) of their outputs.

## Phase and frequency distribution

* `clk_strobe_gen` divides the clock by two registers (default 144, giving 1 MHz) into
  one-clock strobes. The CTRL strobe sets the feedback rate; the PATN strobe steps the patterns.
* `pattern_sequencer` holds address 0 until the first 25 Hz trigger. Each trigger restarts it
  at 0. After that it steps on every PATN strobe and stops at the last entry. The pattern
  memories are 40 000 entries deep, which is one 40 ms machine cycle at 1 MHz. They are
  on-chip arrays.
* `f1_serializer` sends a start bit and then the 32-bit word MSB first, one bit per clock.
  `f1_deserializer` rebuilds the word. The common module loads the serializer 2 clocks after
  each PATN strobe. The new f1 reaches the drivers' `phase_accumulator` 35 clocks after the
  load.
* The phase feedback word arrives in the downlink frame. It is added to the upper 16 bits of
  the driver's h = 1 phase.

## Frames between modules

Each link carries `link_word_t {valid, sof, eof, data[15:0]}`, one word per clock:
* a sequence-number word with `sof` set;
* then 40 16-bit data blocks, the last with `eof` set.

That is 41 words in the 144 clocks of a CTRL period. `iq_frame_tx` counts send requests that
arrive while a frame is still going out. `iq_frame_rx` counts frames with the wrong length and
breaks in the sequence number. The top's `link_err` output counts all of these.

| frame | blocks 0..31 | 32..39 |
|---|---|---|
| uplink (driver → hub) | cavity A h1 I, h1 Q, … h8 Q; cavity B h1 I … h8 Q | reserved (0) |
| downlink (common → hub → drivers) | 0..15: WCM h1 I … h8 Q; 16: phase FB word | reserved |
| vector sum (hub → common) | 0..15: Σ h1 I … h8 Q | reserved |

`vector_sum` multiplies each harmonic's sum by round(2^24/ncav) and rounds the result back.
Normalizing by 1, 2 and 12 is therefore exact to within 1 LSB.

## Configuration

`cfg_wr_t {we, addr[31:0], data[31:0]}` is a write-only bus that everything snoops.

* `addr[31:28]` selects the unit:
  * 0 = common function module: register CTRL_DIV / PATN_DIV, item 1 = frequency pattern;
  * 1 = communication module: register NCAV, LINK_MASK;
  * 2 + d = cavity driver d.
* Inside a driver the address fields are:
  * `addr[27]`: cavity;
  * `addr[26:24]`: harmonic − 1;
  * `addr[23:20]`: item (0 register, 1 I/Q pattern, 2 gain pattern, 3 phase LUT, 4 gain LUT);
  * `addr[15:0]`: index.
* Harmonic registers: 0 HN (read-only in use), 1 KP, 2 KI, 3 ROT_ANG, 4 ROT_GAIN.

`llrf_pkg::drv_addr()` builds driver addresses.

## Latencies (clocks of 144 MHz)

| path | latency |
|---|---|
| CORDIC phase in → sin/cos out | 17 |
| CTRL strobe → CIC output valid | 2 |
| `phase_h1` → `harmonic_fb.fb_out` | 24 |
| PATN strobe → new f1 in the drivers' accumulators | about 37 |
| frame send → `frame_ok` at the receiver | 42 |
| I/Q rotator | 2 |

## What follows the source design and what is this design's own

The following come from the system this RTL models:
* the structure of six drivers with two cavities each, eight harmonics, a 144 MHz clock, and
  1 MHz control and pattern clocks;
* the 32-bit revolution frequency word distributed serially, with a phase accumulator in each
  driver;
* the chain of CORDIC, CIC low-pass, PI and I/Q modulator per harmonic, with phase offset and
  gain LUTs and I/Q and gain patterns;
* 40-block frames once per control period, with 32 blocks used for two cavities;
* the vector sum normalized by the number of cavities, with per-cavity rotation and gain.

These are this design's own choices:
* all word widths and number formats;
* the CORDIC length, CIC order and decimation, the PI scaling and the LUT indexing;
* the trigger synchronizer, the serial line format and the frame checks;
* the configuration bus.

Departures from the source design:
* **Frame rate.** A real Aurora link runs at its own user clock, at 2.5 Gb/s. Here the frame
  words are sent one per system clock. The frame fits easily in the 1 µs period either way.
* **Frame layout.** The source's frame drawing and its text disagree on where the sequence word
  sits. This design uses a sequence word plus 40 data blocks.
* **Pattern storage.** Patterns are held in on-chip memories, not in external SDRAM.
* **Blocks not built:**
  * the feedforward driver, beam analysis, phase feedback algorithm and kicker/chopper timing;
    the source has not implemented them either. Their signals are ports.
  * the PLL clock generator, converters, serial transceivers, the processor/IOC and the crate
    infrastructure.
* **Phase feedback.** The phase feedback word is applied as a plain phase shift of the h = 1
  phase in every driver. This is an interface choice; the source leaves the feedback algorithm
  open.

## Testbenches

Every module in `rtl/` has a self-checking testbench in `tb/`. Each compares the module with an
independent model and ends by printing `TB_RESULT checks=N failures=M`. The main ones:

* `tb_mhvc` closes one cavity loop and reproduces an eight-harmonic sawtooth: harmonic h at
  amplitude 3000/h with alternating sign.
* `tb_vector_sum` and `tb_comm_module` repeat the normalization-by-1 and -by-2 cases and the
  +90° and −45° rotation cases.
* `tb_llrf_system` runs the whole system at its default parameters: 6 drivers, 12 cavities,
  8 harmonics, 40 000-step patterns. All 96 harmonic loops are closed through a 3-clock
  DAC → ADC delay. The test covers:
  * locking;
  * the sawtooth on one cavity;
  * the vector sum cases above, then all twelve cavities normalized by 12;
  * WCM I/Q and phase feedback distribution;
  * a 25 Hz trigger followed by a setpoint step from the pattern;
  * the feedforward input.

  It counts each of these mechanisms and fails if any of them never happened. It takes about
  3.5 minutes with Verilator, most of which is compile time.

To run one testbench:

```
verilator --binary --timing -Wno-fatal --timescale 1ns/1ps --top-module tb_llrf_system \
    -Irtl rtl/llrf_pkg.sv tb/tb_llrf_system.sv -o sim && ./obj_dir/sim
```

Replace the top module and file name to run any other testbench in `tb/`.
