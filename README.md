# WAND digital system in SystemVerilog

WAND is a wireless neuromodulation device: it records 128 channels of neural
field potentials while stimulating through the same electrode array. It
removes the stimulation artifacts from the recording in real time, and it
decides when to stimulate from a spectral biomarker of one recording channel
(closed loop). Two custom mixed-signal chips (NMICs) each hold 64 recording
front-ends and 4 current stimulators. A board-level FPGA collects their data,
cleans it, computes the biomarker, triggers stimulation and streams the result
to a radio.

This RTL covers the digital side of that system:

- the NMIC's on-chip digital core: ADC accumulation, artifact flagging,
  stimulator sequencing and the serial interface;
- the FPGA back-end: link, artifact cancellation, FFT biomarker, closed-loop
  decision, command path, packetiser, radio SPI and the configuration
  decoder.

The analog front-ends, the stimulator output stage, the power circuits, the
radio and the host software are not modelled in RTL. The system testbench has
a small behavioural model of the front-end and of the radio.

## Timing skeleton

Everything runs from one 20.48 MHz clock, and every rate is a divider of it:

| quantity | clocks | rate |
|---|---|---|
| one SAR conversion | 20 | 1.024 MHz |
| one sample (1024 conversions) = one frame | 20 480 | 1 kS/s |
| stimulator timing tick | 320 | 64 kHz, 15.625 µs |
| NMIC link bit | 10 | 2.048 Mbps |
| radio SPI half period | 3 | 3.41 MHz SCLK |

Per frame:
- Each NMIC sends 64 words of 19 bits: 12 160 clocks.
- An open-loop radio packet of 195 bytes takes about 9 400 clocks.

Both fit in the 20 480-clock frame, so nothing needs to queue across frames.

## Recording: a 15-bit sample from 1024 five-bit conversions

Each front-end is an incremental ADC. A 5-bit SAR quantises the residue
1024 times per sample, and `incremental_accumulator` adds the codes. The sum
(at most 1024 × 31, which fits in 15 bits) is the sample, and the accumulator
is cleared for the next one.

Bit 15 of the 16-bit sample word is the **artifact flag**. It is set when any
of the chip's four stimulators was active at any moment of the sampling
window. "Active" covers the setup, first phase, interphase gap and second
phase. The shorting phase is not counted: the electrodes are then tied to the
reference and do not corrupt the sample.

## Stimulation: shadow registers and phase sequencer

`stim_sequencer` runs one stimulator.

**Configuration.** The configuration (`wand_pkg::stim_cfg_t`, 80 bits) is
written through five 16-bit *shadow* registers. It holds:
- electrodes, amplitude and step;
- mono- or biphasic;
- setup time, pulse width, interphase gap and shorting time, in 15.625 µs
  ticks;
- rate in Hz and number of pulses.

An XFER command copies the shadow into the active set, but only in the gap
between pulses. New settings can therefore be loaded while a train runs, and
they take effect at the next pulse. START and STOP begin and end a train.

**Pulse rate.** A phase accumulator adds the rate to a register on every
tick and fires a pulse each time the sum passes 64 000. Pulses are therefore
exactly 64 000 / f ticks apart on average, for any f from 15 to 255 Hz.

**Command order.** The NMIC command word (`nmic_cmd_t`) carries:
- WRITE (stimulator, register, data);
- XFER, START and STOP with a 4-bit stimulator mask;
- RANGE, which selects the 100 or 400 mVpp input range.

The normal order is WRITE × 5, then XFER, then START.

## The NMIC link

`nmic_digital_core` is the chip's digital core. It serialises each frame as 64
words of 17 bits: a start-of-frame bit, then the 16-bit sample. Each word is
framed by a start bit (0) and a stop bit (1), MSB first. Commands come the
other way as 32-bit words in the same framing.

On the FPGA side, `nmic_link` receives each chip into its own 128-word FIFO.
It then drains the FIFOs as one stream: chip 0 channels 0..63, then chip 1
channels 0..63. The stream carries the global channel number with each sample.

Resynchronisation uses the start-of-frame bit. A word that arrives while the
link is waiting for a frame start is dropped and counted. A frame start
arriving early cuts the previous frame short, and that is counted too.

## Artifact cancellation: interpolation inside an 8-frame window

This is the least obvious part of the design. `artifact_canceller` holds, for
each channel, the last 8 samples (8 ms). Every sample that arrives is handled
in one clock:

1. Read the channel's line.
2. Shift in the new sample.
3. Rewrite the line if needed and store it back.
4. Emit the sample that fell off the end.

The output is therefore always exactly 8 frames late, whether or not anything
was cancelled.

For one channel, the cancellation window works like this:

- **Opening.** The first flagged sample opens an artifact window. The sample
  before it, the last clean one, is kept as `pre`.
- **Length.** The window first covers `n_cancel` samples, where n_cancel =
  ceil(pulse length in ms) + 1. `wand_pkg::cancel_len` computes it from a
  stimulator configuration; the host programs it.
  - The extra sample covers a pulse that straddles a sample boundary.
  - While samples stay flagged the window grows, up to 7 samples.
- **Closing.** The first sample after the window is `post`. When it arrives,
  every window sample is still inside the 8-deep line, and all of them are
  rewritten in that same clock as
  `pre + (post − pre) · k / (L + 1)` for k = 1..L.
  Replaced samples keep their flag bit, so a receiver can tell them apart.

Because the window length comes from the pulse length, two kinds of sample are
replaced even though the NMIC did not flag them:
- samples in the shorting phase;
- samples still recovering from the pulse.

## Biomarker: windowed FFT and band power

`biomarker_fft` picks the control channel out of the cleaned stream and
keeps it in a 2048-sample ring.

**When a calculation starts.** The window length N is any power of two from
16 to 2048. A calculation starts when N samples are available and N/2 new
ones have arrived since the last start, so successive windows overlap by
half.

**The calculation.** Each pass handles one memory word per clock:

| pass | clocks | what it does |
|---|---|---|
| SUM | N | sum of the window; the mean is a shift |
| LOAD | N | `(x − mean) · 64` into bit-reversed addresses |
| FFT | log2(N) · N/2 | radix-2 decimation-in-time butterflies, in place; each stage halves its outputs, so the 32-bit data path cannot overflow |
| MAG | N/2 | re² + im² per bin, streamed out and summed over two programmable bin ranges |

**Cost and timing.** For N = 2048 this is about 16 400 clocks, shorter than
one sample period, so a window is always finished before the ring slot it
reads is overwritten.

**Twiddle factors.** They are Q15 values of cos and sin(2πk/2048). They are
computed at elaboration time by a constant function; shorter windows step
through the same table.

**Units.** Bin k is k·1000/N Hz. The default band is bins 7..15 of a
512-point window, 13.7–29.3 Hz (beta).

## Closed-loop decision

`closed_loop_controller` evaluates the policy once per FFT result.

**Control signals.** Each of the two control signals is the band power, or
its change since the previous calculation. Each is compared with its own
signed threshold, scaled by 2^16. The crossings of the enabled signals are
combined by AND or by OR.

**Dead time.** A positive decision fires a trigger and starts a dead time
counted in calculations. With N = 512 at 1 kS/s, 3 calculations are 768 ms.
Positive decisions inside the dead time are counted as blocked.

**Random mode.** This mode ignores the biomarker and triggers at
pseudo-random intervals between a minimum and a maximum number of
milliseconds, from a 16-bit LFSR. It is the randomised control condition.

**From trigger to NMIC.** `stim_command` turns a trigger into a START command
to a programmable NMIC and stimulator mask. A pending trigger has priority
over commands from the host.

## Uplink packets and configuration

`data_aggregation` builds one packet per 1 ms frame, from a ping-pong frame
buffer. Every packet starts with `A5`, a frame counter and a mode byte. Samples
are sent MSB first with their flag in bit 15.

- **Open-loop mode:** 96 samples, with the channels taken from a 96-entry
  selection table. That is 195 bytes per ms, 1.56 Mbps.
- **Closed-loop mode:** the control channel, one stimulation channel and
  both control values, bits 47:16. That is 15 bytes.

If the previous packet is still being sent when a frame completes, the new
frame is dropped and counted.

`spi_master` moves the packet bytes to the radio and receives one downlink byte
for each byte it sends. `system_controller` decodes the downlink into 5-byte
records: an address, then a 32-bit value. The register map is in that file's
header. Records can:
- update the configuration;
- load the selection table;
- pass a command word to either NMIC.

## Module map

| module | role |
|---|---|
| `wand_pkg` | constants, sample / command / configuration types, `cancel_len` |
| `incremental_accumulator` | ADC accumulation and flagging (per NMIC) |
| `stim_sequencer` | one stimulator's registers and phase timing |
| `serial_tx`, `serial_rx`, `sync_fifo` | link primitives |
| `nmic_digital_core` | one NMIC: clocks, command decode, 4 stimulators, accumulator, uplink |
| `nmic_link` | FPGA side of both NMIC links |
| `artifact_canceller` | 8-frame interpolating canceller |
| `biomarker_fft` | windowed FFT and band power |
| `closed_loop_controller` | threshold / AND-OR / dead-time / random decision |
| `stim_command` | trigger → START command, merged with host commands |
| `data_aggregation` | radio packets |
| `spi_master` | SPI to the radio |
| `system_controller` | downlink records → configuration and NMIC commands |
| `wand_top` | both NMIC cores and the FPGA back-end, wired together |

The SAR codes enter `wand_top` as 5-bit inputs, one per channel. The
conversion strobe, the integrator reset, the input range and each
stimulator's drive state (phase, electrodes, amplitude) leave it as outputs.

## Where this design departs from the source description

- **Logic instead of software.** Artifact cancellation, the FFT and the
  closed-loop decision are written as FPGA logic. The original system ran
  them as software on the FPGA's microcontroller.
- **Derivative sign.** The derivative is new minus previous power, so rising
  power is positive. The source's wording gives the opposite order, but its
  plots show rising power as positive.
- **Stimulator rate.** Train rates stop at 255 Hz, because the rate field is
  8 bits. The source also describes trains at 256 and 333 Hz; this design
  cannot produce those.
- **Stimulator configuration.** It is 80 bits, not the original chip's 225
  bits. Arbitrary waveform shapes are not included.
- **No window function.** The FFT applies no window beyond removing the mean
  and scaling by 64.
- **Closed-loop packet.** It carries the two control values rather than the
  whole spectrum. The spectrum is available on `biomarker_fft`'s `psd_*`
  port.
- **SPI rate.** The SPI runs at 3.41 MHz, the nearest clock divider to the
  original 3.08 MHz.
- **Own choices.** The following are this design's own: the serial framing,
  the command and register formats, the packet layout, the thresholds'
  fixed-point scaling and the LFSR.

## Simulation

Each testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. For example, with Verilator 5:

```
verilator --binary --timing --top-module tb_wand_top -y rtl -y tb +libext+.sv \
          -Irtl -Itb rtl/wand_pkg.sv tb/tb_wand_top.sv && obj_dir/Vtb_wand_top
```

There is one testbench per module, `tb/tb_<module>.sv`. Two of them exercise
the whole system:

- **`tb_wand_top`** runs `wand_top` with a shortened frame: 64 conversions of
  52 clocks, 2-clock link bits and a 16-point FFT. It takes about a second.
- **`tb_wand_top_full`** runs every parameter at its real value. It simulates
  72 ms in a few seconds.

Both share `tb/tb_wand_body.svh`, which contains the front-end model (a sine
on the control channel, full-scale codes while a stimulator is active) and a
radio model (an SPI slave that sends configuration records and parses the
packets). The scenario:

1. Configure the device.
2. Program and start one pulse from the host in open-loop mode.
3. Switch to closed-loop threshold control.

The testbench then checks that each mechanism actually happened:
- stimulation;
- flagged samples;
- cancelled artifacts;
- biomarker values;
- threshold crossings;
- triggers, and the pulses they start;
- triggers blocked by the dead time;
- open- and closed-loop packets.

It also checks that the packets are framed correctly and that the links
report no errors.

The system runs use a 16-point window so that several calculations fit in a
short run. The 2048-point FFT datapath is instantiated at full size, but no
testbench here runs a 2048-point window. `tb_biomarker_fft` checks the FFT
against a floating-point DFT at a smaller size.
