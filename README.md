# FFT-based piano note detector

This design measures the pitch of a single sustained note, such as one piano
key. It records a short stretch of the audio, transforms it into a spectrum,
finds the strongest frequency and shows it on a 16x2 character LCD. All of this
is in hardware, with no processor. The signal chain is:

```
 analog in -> programmable-gain amp -> 14-bit ADC --SPI--> capture buffer (512 samples)
           -> 512-point FFT core -> peak-bin search -> bin-to-Hz scaling -> 16x2 LCD
```

The RTL implements the system described by S. M. Anik and D. G. Perera in
"Real-Time Piano Note Frequency Detection Using FPGA and FFT Core". They built it
on a Spartan-3E starter board, with an LTC6912 amplifier, an LTC1407A ADC, a
Xilinx LogiCORE FFT (Radix-4, Burst I/O) and an HD44780-type LCD. Their
description names the blocks, their sizes and their rates, but not how the
blocks work inside. Where it is silent, this RTL makes its own choices, and each
source file says which parts are which. The FFT core is vendor IP. It is *not*
part of this RTL: the top module brings its ports out, and a behavioural model
stands in for it in simulation.

## The numbers that set the measurement

| quantity | value | where it comes from |
|---|---|---|
| system clock | 5 MHz | original design |
| ADC conversion spacing | 73 clocks (68.5 kHz) | original design |
| decimation | 1 conversion kept in 16 | original design |
| sample rate fs | 5e6 / (73 * 16) = 4280.8 Hz | follows from the above |
| transform length N | 512 points, 14-bit samples | original design |
| bin width fs/N | 8.361 Hz | follows |
| highest measurable frequency | fs/2 = 2140 Hz (about C7) | follows |
| capture time | 512 * 1168 clocks = 119.6 ms | follows |

The sampling rate is low on purpose. A low fs makes each bin narrow without a
longer transform. Reading the output correctly depends on three consequences:

* **Resolution.** Neighbouring keys are a semitone apart, a ratio of 1.0595. Two
  neighbouring keys therefore land in different bins only when
  0.0595 * f > 8.36 Hz, that is above about 140 Hz (C#3). Below that, adjacent
  keys can give the same reading. The display is always a bin centre, so a
  130.68 Hz tone reads "134 Hz" (bin 16).
* **Aliasing.** No anti-alias filter sits between the ADC and the decimator. A
  fundamental or strong harmonic above 2140 Hz folds back into the range.
* **Fundamental versus harmonics.** The largest bin wins. For a piano note this
  is usually, but not always, the fundamental.

## Block map

| file | block | role |
|---|---|---|
| `rtl/pnd_pkg.sv` | package | shared sizes, the controller state type, the Hz-per-bin constant function |
| `rtl/debounce_oneshot.sv` | button trigger | synchroniser, 10 ms debounce, one-clock pulse per press |
| `rtl/spi_master.sv` | SPI bus owner | shares sck/mosi between the two engines below |
| `rtl/preamp_spi.sv` | preamp gain writer | 8-bit LTC6912 gain word |
| `rtl/adc_master.sv` | ADC engine | one LTC1407A frame every 73 clocks, channel A used |
| `rtl/sample_memory.sv` | capture buffer | 512 x 14-bit register array, 1-in-16 decimation |
| `rtl/fft_controller.sv` | main FSM | capture, FFT load, compute, unload, result |
| `rtl/peak_detector.sv` | peak search | largest xk_re^2 + xk_im^2 and its bin |
| `rtl/bin_to_hz.sv` | output calibration | bin * fs/N in fixed point |
| `rtl/lcd_controller.sv` | LCD driver | its own FSM, 4-bit HD44780 protocol with delay states |
| `rtl/piano_note_detector.sv` | top | wires it all together and exposes the FFT-core ports |

One press of `btn_sample` makes one measurement. One press of `btn_gain` loads
the `{gain_b, gain_a}` switch value into the amplifier.

## The measurement sequence (main state machine)

The hardest part is the handshake between the controller and the burst-mode FFT
core. A burst core has a single memory for its work, so it does three things in
turn: it loads a frame, computes, and then unloads. It cannot load a new frame
while it unloads the old one. The controller steps through the same phases. Its
state codes are the numbers a logic analyser showed on the original design's
state register: **3 → 5 → 7 → 0** for load, compute, unload and idle.

| code | state | what happens | leaves when |
|---|---|---|---|
| 1 | CONFIG | after reset: `fwd_inv = 1` and the scaling schedule are written once | next clock |
| 0 | IDLE | waits for the sampling button | debounced press |
| 2 | CAPTURE | `mem_capture` pulses; the buffer keeps every 16th conversion | buffer full (512 words) |
| 3 | LOAD | `start` is held; on each clock with `rfd` high, sample `fft_index` is on `xn_re` and `fft_index` advances | `rfd` falls after the frame |
| 5 | COMPUTE | core `busy`; when `edone` arrives, `unload` pulses | `dv` rises |
| 7 | UNLOAD | bins 0..511 stream into the peak detector, in natural order | peak detector done → `result_valid` |

Two rules keep the load phase correct. They are checked by assertions in
`fft_controller`:

* Samples are presented only while `rfd` is high.
* `fft_index` drives the buffer's read address directly, and the buffer has an
  asynchronous read port. The controller therefore assumes the core takes sample
  k in the clock where it shows `xn_index = k`. If a real core needs its data
  some clocks after `xn_index`, delay `xn_re` by that many clocks, or address the
  buffer from `xn_index` plus that offset.

`result_valid` goes to `bin_to_hz`, one clock later to the LCD's `lcd_start`,
and the LCD rewrites both lines in about 1.4 ms. A press of the sampling button
outside IDLE is ignored.

## The FFT core this design expects

Configuration: 512 points, one channel, Radix-4 Burst I/O, 14-bit input,
16-bit phase factors, scaled fixed point, 14-bit output, natural-order output.
The top drives or reads these core ports: `start`, `unload`, `xn_re`, `xn_im`
(held at 0, because the input is real), `fwd_inv`/`fwd_inv_we`,
`scale_sch`/`scale_sch_we`, `rfd`, `busy`, `edone`, `done`, `dv`, `xn_index`,
`xk_index`, `xk_re` and `xk_im`. The transform length is fixed, so there is no
`nfft` port. `ce`, `sclr`, the cyclic-prefix ports and `blk_exp`/`ovflo` are not
used.

The scaling schedule is the `SCALE_SCH` parameter. Its default is
`10'b01_10_10_10_10`: a right shift of 2 after each radix-4 stage and 1 after
the final radix-2 stage. That divides by 512 in total, so a full-scale sine
gives a bin of about a quarter of full scale. The original description does not
give a schedule. If a core configured for block floating point is used instead,
this parameter has no effect.

`tb/xfft_model.sv` is the behavioural stand-in. It loads, waits a set compute
time, pulses `edone` and then `done`, and unloads `UNLOAD_LAT` clocks after
`unload`. It computes a direct DFT in double precision, scaled as the schedule
says.

## The shared SPI bus

On the target board the amplifier and the ADC share `spi_sck` and `spi_mosi`.
`spi_master` keeps them apart:

* **ADC frame** (`adc_master`). The frame is `SAMPLE_SPACING` = 73 clocks long.
  `ad_conv` is high at t = 0. Then come 34 sck periods of two clocks, read at
  each rising sck edge: 2 idle bits, 14 bits of channel A, 2 idle, 14 bits of
  channel B, 2 idle, MSB first, in two's complement. The word is ready at
  t = 70, and t = 71..72 are idle. Channel A is the one used. The ADC runs all
  the time, and the capture buffer decides which conversions to keep.
* **Gain write** (`preamp_spi`). The 8-bit word `{gain_b, gain_a}` is sent MSB
  first with sck = clk/4 and `amp_cs` low, and is applied when `amp_cs` rises.
  The word the amplifier held before is read back on `amp_dout` and is
  available as `gain_readback`.
* **Arbitration.** A gain request is held pending. While a capture is running
  (`gain_hold` high) the ADC keeps converting and the request waits. This
  keeps the 512 stored samples evenly spaced and taken at one gain. After
  that, the ADC is told to stop after its current frame. The write then runs
  (34 clocks) and conversions resume. A press during a capture therefore
  takes effect from the next capture on. The paper does not say how the two
  SPI users share the bus. This is a design choice.

## Peak search and frequency scaling

`peak_detector` squares and adds in one register stage, and compares and keeps
the result in a second. It never takes a square root. Only bins 1..255 compete:

* Bin 0 holds the DC residue. The 1.65 V bias that the input needs is removed
  by the ADC's reference, but not perfectly.
* Bins 256..511 mirror bins 1..255 for a real input.

If two bins tie, the lower one wins. `bin_to_hz` multiplies the bin by
round(2^16 * fs/N) = 547 945 and rounds to whole hertz. Over all 512 bins this
matches exact rounding of k * fs/N.

## LCD output

`lcd_controller` waits 15 ms after reset. It then sends the 4-bit wake-up
nibbles 3, 3, 3, 2 (with 4.1 ms, 100 µs and 40 µs gaps), then 0x28, 0x06, 0x0C
and 0x01 (clear, with 1.64 ms after it). For each update it writes

```
Freq:   293 Hz
Bin:     35
```

Each byte is sent as two nibbles, with E high for at least 230 ns, 1 µs between
the nibbles and 40 µs after the byte. The busy flag is never read, and `lcd_rw`
stays low. An update request that arrives during a write is served after that
write.

## What is taken from the original design, and what is not

Taken from it:

* the chain of blocks;
* the 5 MHz clock, the 73-clock ADC spacing, the 1-in-16 downsample counter,
  the 512-sample register array and the 512-point Radix-4 Burst I/O core;
* the 14-bit data;
* the squared-magnitude peak tracker;
* bin-to-Hz scaling by fs/N;
* a separate LCD FSM that uses 4-bit mode, is started by `lcd_start` and has
  delay states;
* debounced one-shot triggers;
* the controller state codes 3, 5, 7 and 0.

The original text gives two bin widths: 8.36 Hz (fs/512) and, in its
conclusion, 4.28 Hz. This design uses fs/512 = 8.36 Hz.

This design's own choices:

* the debounce method and time;
* the SPI arbitration;
* the ADC frame placement inside the 73 clocks;
* the clear-on-capture buffer behaviour;
* the states CONFIG and CAPTURE, and unload on `edone`;
* zero-latency sample alignment;
* the scaling schedule;
* the peak search range and tie rule;
* fixed-point scaling to integer Hz;
* the LCD text layout and the remembered start;
* the status outputs of the top.

The device protocols (LTC6912 word, LTC1407A frame, HD44780 timing) follow the
parts' data sheets, not the original text.

Not included:

* the FFT core itself;
* anything analog (the amplifier, the ADC, the DC bias network);
* the LCD panel;
* the board's other SPI devices. On the real board these must be held
  deselected.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` at the end. The models in `tb/` are
`afe_model` (amplifier and ADC, sine input on a 1.65 V bias), `xfft_model`
(burst FFT core) and `lcd_model` (a panel that decodes the bus into text and
counts timing violations). With plain Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb rtl/pnd_pkg.sv tb/tb_piano_note_detector.sv \
    --top-module tb_piano_note_detector
./obj_dir/Vtb_piano_note_detector
```

To run another testbench, put its name in place of `tb_piano_note_detector`.
The end-to-end test runs the top at its default sizes. It includes the real
10 ms debounce and the LCD power-up delays, and simulates 0.42 s of time in
under a second. It measures the three tones the original work shows:

| tone | bin | display |
|---|---|---|
| 293.68 Hz (D4 key) | 35 | 293 Hz |
| 130.68 Hz (C3 key) | 16 | 134 Hz |
| 350.26 Hz (test tone) | 42 | 351 Hz |

It checks each result against the nearest bin and against the spectrum's own
maximum. It also checks the capture time, the number of samples stored and the
LCD text. It makes each mechanism happen at least once: a gain write, a gain
write deferred behind an ADC frame, a gain write held until a capture ends,
decimation, a full buffer, an unload, peak
updates, an LCD update, and an ignored press.

## Changing it

* **Sample rate.** Change `SAMPLE_SPACING` (at least 72) and `DOWNSAMPLE` on
  the top. `bin_to_hz` follows automatically.
* **Clock.** `SYS_CLK_HZ` in `pnd_pkg` feeds the Hz scaling and the LCD delays.
  `adc_master` counts clocks, so a faster clock also raises the ADC's sck rate.
  Check that against the converter's limit.
* **Transform length.** `NFFT` in `pnd_pkg` sizes the buffer, the indices and
  the peak search. It must match the external core, and `SCALE_W`/`SCALE_SCH`
  must match that core's stage count.
* **Peak search range.** Use the `MIN_BIN` and `MAX_BIN` parameters of
  `peak_detector`.
