# A logic core for reading out a Teledyne H2RG infrared array

A Teledyne H2RG is a 2048 × 2048 HgCdTe infrared detector bonded to a silicon readout chip (ROIC). To use one, a controller has to do four things:

1. set up the chip's supply and bias voltages;
2. write the chip's internal configuration registers;
3. clock the pixel scanners through a frame;
4. digitise the analog video output, one pixel at a time, and send the pixels to a computer.

The TIFR infrared group built a prototype controller for the IRSIS small-satellite spectrometer (Naik et al., "Evaluation of Controllers and Development of a new in-house Controller for the Teledyne HxRG Focal Plane Array for the IRSIS satellite payload"). In that prototype an ARM microcontroller does all four jobs in software. It drives serial DACs for the voltages. It generates the detector clocks on its I/O pins. It samples the buffered video with its internal 10-bit ADC and sends the data over USB. The authors plan to move these functions into an FPGA for the flight controller.

This repository holds that logic in SystemVerilog. It is a synthesizable core that performs the prototype's start-up and readout sequence in hardware. The converters, amplifiers, detector and USB device stay outside, connected through the core's ports. The published description gives the functions, the signal names and the main sizes. It does not give the bit-level protocols. Wherever a choice had to be made here, this document and the file headers say so.

## The operating sequence

`ctrl_sequencer` runs the controller through a fixed order, taken from the prototype's operating procedure:

| state | what happens |
|---|---|
| reset | all detector clocks rest at their inactive levels |
| DAC set-up | each of the `N_DAC` bias/supply DACs is written once, in index order 0…N_DAC−1 |
| register set-up | the two ROIC register words are written in order. The prototype writes one word that enables the buffered output and one that selects single-output mode. |
| ready | waits for `frame_req` from the host |
| frame | one full frame is clocked out, then back to *ready* |

Set-up starts by itself after reset. A pulse on `reinit` in the ready state repeats it, for example after the host has changed a bias code. A frame request that arrives during set-up or during a frame is remembered and served on the next return to *ready*.

The published work gives no values for the DAC codes or the register contents, so the core does not hard-code them. They are inputs (`dac_code[N_DAC]`, `roic_word[2]`) that the host or a supervising processor provides. The supply order is likewise left to the host: DAC `k` is written `k`-th, so the wiring decides which supply comes up first.

## The detector pins, and why two of them do double duty

| port | detector signal | role |
|---|---|---|
| `roic_fsyncb` | FSyncB / DATAIN | frame sync (active low); also serial data during register writes |
| `roic_vclk` | VClk / DATACLK | row clock; also serial clock during register writes |
| `roic_lsyncb` | LSyncB | line sync (active low) |
| `roic_hclk` | HClk | pixel (column) clock |
| `roic_csb` | CSB | enables the ROIC's serial register interface (active low) |

The H2RG's register interface has its own clock and data inputs. These can be tied to the VClk and FSyncB lines, and the prototype does this so that it needs only one extra line, CSB. The core does the same. While `ctrl_sequencer` is in the register states (`roic_prog` high), the top level routes the register writer's DATACLK onto the VClk pin and its DATAIN onto the FSyncB pin. At all other times the frame clock generator owns those two pins.

The hand-over produces no false edges, because both owners are idle at the switch and idle at the same level:

- VClk/DATACLK rests low.
- FSyncB/DATAIN rests high.

An assertion in the top level checks that no frame clocking overlaps register writing.

## Register writes

`roic_serial_writer` sends one `ROIC_WORD`-bit word (16 by default) per write:

```
CSB      ‾‾‾\_______________________________________/‾‾‾
DATACLK  _______/‾\_/‾\_/‾\_ ... _/‾\_____________________
DATAIN   ‾‾‾‾‾X b15 X b14 X ...  X b0  X‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾
```

- The word goes out MSB first.
- DATAIN changes while DATACLK is low, so it is stable at DATACLK's rising edge.
- CSB falls one half clock period before the first rising edge and rises one half period after the last falling edge.

Each half period is `ROIC_HALF_DIV` system clocks. At the defaults that is 5 cycles, which gives a 1 MHz serial clock at 10 MHz. A write takes (2·16+2)·5 = 170 cycles. The word length, bit order and these timings are this design's choice. The published description names the signals but gives no protocol details.

## Bias DAC writes

The prototype's DACs take a 12-bit input through CLK and SDI and latch it on a LOAD pulse. `dac_serial_writer` drives one CLK/SDI pair shared by all DACs, plus one active-low LOAD line per DAC (`dac_load_n[k]`). No address bits are sent; the LOAD line chooses the DAC.

- The 12 bits go out MSB first, changing while CLK is low.
- After the twelfth falling edge of CLK, the selected LOAD line is held low for half a CLK period.
- A write takes (2·12+1)·`DAC_HALF_DIV` cycles, which is 125 cycles (12.5 µs) at the defaults.

The DACs cover 0–3.3 V, so a code `c` sets the output to `c · 3.3 V / 4096`. The testbench DAC model uses that relation.

## The frame clock pattern

`frame_clock_gen` divides time into slots of `PIX_DIV` system clocks. That is 100 at the defaults: 10 µs at an assumed 10 MHz clock, which is the H2RG's standard 100 kHz pixel rate. A frame consists of:

```
frame : [FSyncB low] line 0, line 1, ... line ROWS-1
line  : [LSyncB low, VClk high] pixel 0, pixel 1, ... pixel COLS-1
pixel : HClk high for the first PIX_DIV/2 cycles, low for the rest
```

so a frame lasts `PIX_DIV·(1 + ROWS·(1 + COLS))` cycles. At the defaults that is 419,430,500 cycles, or 41.9 s. Each line gets exactly 2048 HClk pulses; the prototype notes that a single-output line needs "2048+" pulses. The prototype's published clock trace is only a shortened demonstration. The slot structure and pulse order above are therefore this design's own, and should be checked against the H2RG datasheet for a given part and mode. All four clocks come straight from flip-flops.

### Where a pixel is sampled

This is the one place where the timing is tight. The video output shows a pixel from the HClk edge that selects it until the next HClk edge. The sample must be taken late in the slot, to let the output settle, but the converter must capture the input before the next HClk rising edge. The path from decision to capture is three clock edges:

1. `sample` is registered in the clock generator;
2. `adc_soc` is registered in the sampler;
3. the converter takes its input on the next edge.

So `sample` fires `SAMPLE_LEAD` = 4 cycles before the end of the slot. That falls in the HClk-low half and leaves one cycle of margin. An elaboration-time check rejects a `SAMPLE_LEAD` below 3, or one that would put the sample in the HClk-high half. If an external converter adds latency, raise `SAMPLE_LEAD` to match.

## The pixel path

`adc_sampler` turns each `sample` strobe into one conversion:

- It pulses `adc_soc` and waits for `adc_eoc`.
- It emits a 16-bit word: bit 15 marks the first pixel of the frame, bit 14 the first pixel of each line, bits 13–10 are zero, and bits 9–0 hold the ADC result.

The two flags let the host find frame and line boundaries in a plain byte stream. If a strobe arrives while a conversion is still running, that pixel is skipped and `overrun` pulses. This cannot happen while the conversion time is shorter than a pixel slot.

`sample_fifo` (512 words by default, about 5 ms of pixels) sits between the fixed-rate pixel source and the host link. The host link is a valid/ready stream (`pix_valid`, `pix_ready`, `pix_data`), where a USB device controller would connect. The detector cannot be paused in the middle of a line, so the buffer never back-pressures the sampler. A word that finds it full is dropped, and `overflow` pulses. The host must therefore drain 16 bits every 10 µs on average (1.6 Mbit/s), which is within full-speed USB.

## Parameters

| parameter (top) | default | origin |
|---|---|---|
| `COLS`, `ROWS` | 2048, 2048 | H2RG array size |
| `PIX_DIV` | 100 | 10 MHz system clock (assumed) / 100 kHz pixel rate |
| `N_DAC` | 8 | assumed; the source gives no count |
| `DAC_HALF_DIV`, `ROIC_HALF_DIV` | 5, 5 | assumed 1 MHz serial clocks |
| `FIFO_DEPTH` | 512 | assumed |

Fixed in `h2rg_pkg`: 12-bit DAC words and a 10-bit ADC (both from the prototype), two ROIC register words (from the prototype), 16-bit register and pixel words (assumed).

For the 1024 × 1024 H1RG planned for flight, build with `COLS = ROWS = 1024`. A frame then takes 10.5 s.

## Departures and limits

The following parts of the source design are not built:

- **Single output only.** The H2RG can also be read through 4 or 32 outputs in parallel, and in a 5 MHz fast mode. The prototype used one output at 100 kHz, and so does this core.
- **No window mode.** The register interface can write window-mode coordinates, but the clock generator always scans the full array.
- **No on-board frame memory or preprocessing.** The planned FPGA controller adds memory banks and a first-order preprocessor. They are only named in the source, so pixels stream to the host as in the prototype.
- **Register interface.** The plan for the FPGA controller mentions a separate serial interface for the detector. This core follows the prototype and shares the VClk/FSyncB pins.
- **Analog and bought-in parts.** The DACs and their op-amp buffers, the unity-gain video preamplifier, the ADC, the source-follower load resistor, the optional clock drivers, the USB device and the detector itself are outside the core. Behavioural models of the DAC bank, the ADC and the readout chip are in `tb/` for simulation only.

Choices made where the source is silent (all listed above): the serial bit order and timing, the DAC selection by LOAD lines, the clock slot structure and sample point, the pixel word format, the output buffer, automatic set-up after reset, and the `reinit` input.

## Verification

Each module has a self-checking testbench in `tb/`. Each one computes its expected values independently of the module under test, and ends with a `TB_RESULT checks=N failures=M` line.

| testbench | what it checks |
|---|---|
| `tb_dac_serial_writer` | a bus decoder receives 23 random writes: word, bit count, LOAD line, 75-cycle write time, busy-start ignored |
| `tb_roic_serial_writer` | a decoder receives 22 words: value, 16 clocks, 68-cycle write time, DATACLK only while CSB is low, idle levels |
| `tb_frame_clock_gen` | pulse counts per frame and line, row-major sample order, one HClk per pixel before each sample, ≥ 3 cycles from sample to next HClk, exact frame length |
| `tb_adc_sampler` | pixel words against codes computed from the input voltage, frame/line flags, latencies, overrun |
| `tb_sample_fifo` | random traffic against a reference queue, level, overflow on full, simultaneous read and write when full |
| `tb_ctrl_sequencer` | order of DAC writes, register writes and frames; pending request; `reinit`; `roic_prog` ownership |
| `tb_h2rg_controller` | end to end at 16 × 8 pixels; see below |
| `tb_h2rg_controller_full` | one full 2048 × 2048 frame with every default; all 4,194,304 pixel words checked |

`tb_h2rg_controller` runs the core against behavioural models of the DACs, the readout chip and the ADC. The readout-chip model decodes register words from the shared pins. It produces no video until it has received both words. It then outputs, for pixel (r, c), the mid-point voltage of code `(37r + 11c + 5) mod 1024`.

The test runs five phases:

1. start-up, with an early frame request;
2. a clean frame, with every word and the frame length checked;
3. a frame with a stalled host, which forces overflow;
4. `reinit` with new DAC codes;
5. a frame with an ADC slower than a pixel, which forces overrun.

Each mechanism is counted, and a mechanism that never occurs is a failure.

Building and running the full-size frame takes about 4 minutes.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/h2rg_pkg.sv tb/tb_h2rg_controller.sv --top-module tb_h2rg_controller -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. The code uses only two-state values. Anything that is read is reset or initialised.

## Files

- `rtl/h2rg_pkg.sv`: sizes, widths and the sequencer state type
- `rtl/h2rg_controller.sv`: top level and the VClk/FSyncB pin sharing
- `rtl/ctrl_sequencer.sv`: start-up and frame sequencing
- `rtl/dac_serial_writer.sv`: bias DAC serial writes
- `rtl/roic_serial_writer.sv`: ROIC register writes
- `rtl/frame_clock_gen.sv`: FSyncB / LSyncB / VClk / HClk and the sample strobe
- `rtl/adc_sampler.sv`: per-pixel conversion control and pixel words
- `rtl/sample_fifo.sv`: pixel buffer to the host link
- `tb/*_model.sv`: behavioural models of the DAC bank, the 10-bit ADC and the readout chip
- `tb/tb_*.sv`: testbenches
