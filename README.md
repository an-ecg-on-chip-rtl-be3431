# Four-channel ECG back-end with a lossless 16-bit framing compressor

A wearable ECG sensor spends most of its energy on the radio. Sending fewer
bits saves that energy, but medical ECG data must arrive bit-exact. The
compressor here does two things with very little logic:

- It predicts every sample from the two before it on the same channel. The
  prediction error is usually only a few bits wide.
- It packs these small errors straight into **fixed 16-bit frames**. There
  are no code tables and no variable-length bit stream, so no repacking step
  is needed. A frame carries six, four, three or two errors, or one raw
  sample. The frame type is chosen by the widths of the oldest errors waiting
  in a six-entry register.

At regular intervals the compressor sends raw samples instead of errors, so a
receiver that lost a frame can lock on again. Around the compressor sits the
digital back-end of a four-channel ECG chip:

- a sequencer for the analog multiplexer and the ADC,
- a frame buffer,
- a real-time clock,
- the analog-front-end control registers,
- an SPI slave through which a host reads frames and sets up the chip.

Everything runs from a 32.768 kHz crystal clock. The only exception is the
SPI shift register, which runs on the SPI clock.

This is a register-transfer description of the digital part of the
architecture published in *"An ECG-on-Chip with 535-nW/Channel Integrated
Lossless Data Compressor for Wireless Sensors"*. It is not by the
authors of that article. Where the article leaves something open, the choice
made here is stated below and in the header comment of each file.

## 1. The predictor

Samples arrive time-multiplexed as ch1, ch2, ch3, ch4, ch1, ... Each sample
is 12 bits and carries a 2-bit channel tag from the ADC. `slope_predictor`
keeps the last two samples of each channel, x(n-1) and x(n-2). It computes:

    e(n) = x(n) - (2·x(n-1) - x(n-2))

This is a straight-line extrapolation. Only the register pair of the tagged
channel is enabled, and one subtractor is shared by all channels.

Two details matter for the decoder:

- All predictor registers reset to zero. The receiver starts from the same
  zeros, so the first samples need no special treatment.
- e(n) is kept to 13 bits. The exact error of a 12-bit signal can need
  14 bits. The 13-bit value is still exact modulo 2^13, and the receiver
  rebuilds the sample modulo 2^12:

      x(n) = (e(n) + 2·x(n-1) - x(n-2)) mod 4096

  So nothing is lost.

## 2. Width classes and frame formats

`bitwidth_compute` finds the smallest width class that holds e(n): 2, 3, 5
or 7 bits, or "8 and above". The test for n bits is simple: error bits
[12 : n-1] must be all zeros or all ones, meaning the upper bits only repeat
the sign. Four such tests run in parallel, and a priority encoder picks the
smallest width that fits.

The error, its width class and the original sample are shifted into a
six-entry register (`frame_buffer`). Entry 5 is the oldest. A frame always
takes the oldest entries, and writes the oldest sample first (most
significant bits first):

| Type | Header | Payload                   | Samples | Condition (widths of the oldest entries) | Bits/sample |
|------|--------|---------------------------|---------|------------------------------------------|-------------|
| D    | `0000` | 6 errors × 2 bits         | 6       | all six ≤ 2                              | 2.67        |
| C    | `0001` | 4 errors × 3 bits         | 4       | four oldest ≤ 3                          | 4           |
| A    | `1`    | 3 errors × 5 bits         | 3       | three oldest ≤ 5                         | 5.33        |
| B    | `01`   | 2 errors × 7 bits         | 2       | two oldest ≤ 7                           | 8           |
| E    | `0011` | raw 12-bit sample         | 1       | otherwise, or resynchronization          | 16          |

- The four `frame_enable` comparators test these conditions.
- Priority is D, C, A, B, E.
- Because the headers are prefix-free, the receiver can find the frame type
  from the leading bits alone:
  - `1` means A.
  - `01` means B.
  - `0000`, `0001` and `0011` mean D, C and E.
  - `0010` is not used.
- An uncompressed 12-bit stream costs 12 bits per sample. The compression
  ratio is therefore 12 × samples / (16 × frames).

## 3. The framing controller

The key to the compressor is `framing_controller`. It is a small state
machine with a 3-bit counter of the valid entries in the six-entry register.

The counter's next value comes from a multiplexer selected by `SEL`:

| SEL | Counter change | Event                         | Output multiplexer |
|-----|----------------|-------------------------------|--------------------|
| 5   | +1             | a sample is loaded            | holds the frame register |
| 0   | −6             | a D frame takes its entries   | builds a D frame   |
| 1   | −4             | a C frame takes its entries   | builds a C frame   |
| 2   | −3             | an A frame takes its entries  | builds an A frame  |
| 3   | −2             | a B frame takes its entries   | builds a B frame   |
| 4   | −1             | an E frame takes its entry    | builds an E frame  |

The same `SEL` drives the frame output multiplexer.

States:

- **INIT**: load samples until the counter reaches 6, then go to BUF_FULL.
- **BUF_FULL**: look at CTRL = {D_EN, C_EN, A_EN, B_EN, RESYNC_EN}.
  - If RESYNC_EN is set, or no enable is set, emit E.
  - Otherwise emit the first enabled type in the order D, C, A, B.
  - Go to the matching Frame_X state.
- **Frame_D … Frame_E**: load samples (SEL = 5) until the counter is back at
  6, then return to BUF_FULL.

So one frame is produced each time the register fills up again. The number
of new samples needed before the next frame equals the number of samples the
last frame took. The output rate therefore follows the signal: a flat trace
gives one D frame per six samples, and a QRS complex gives B or E frames.

Timing, in system clocks after an ADC end-of-conversion:

- The predictor registers the error one clock later.
- The entry is loaded into the six-entry register on the next edge.
- When that load fills the register, the frame appears on `frame` with a
  one-clock `frame_valid`, three clocks after the load.

The counter multiplexer has no input for "frame and load in the same cycle".
So a sample must never arrive while the controller is in BUF_FULL. This means
samples must be at least 3 clocks apart. The chip provides 16 (at 512 Hz) or
32 (at 256 Hz), and an assertion checks the rule.

## 4. Resynchronization

With prediction, one lost frame corrupts every later sample of the affected
channels. `resync_gen` prevents this. It counts ADC samples with a 13-bit
counter and raises RESYNC_EN while bits [12:3] are zero. That is 8 samples
out of every 8192.

At 4 channels × 512 Hz = 2048 samples/s, this gives:

- a window every 8192 / 2048 = **4 s**;
- a window 8 samples long, which is two consecutive raw samples per channel.

During the window the controller sends only E frames, one per new sample. The
receiver loads the raw values straight into its x(n-1) and x(n-2) registers,
so decoding is correct again from there on. At 256 Hz the period becomes 8 s.
The period is set by the parameters `RESYNC_CW` and `RESYNC_LOW` of
`lossless_compressor`.

## 5. Decoding at the receiver

A receiver needs only the frame stream:

1. Start with x1 = x2 = 0 for each channel and a running sample position
   p = 0.
2. For each frame, read the header and take the fields oldest-first.
3. For each field, the channel is c = p mod 4:
   - For an E frame, x is the field itself.
   - Otherwise x = (sign-extended field + 2·x1[c] − x2[c]) mod 4096.
4. Set x2[c] = x1[c] and x1[c] = x, then increment p.

Since all channels share one register and one frame stream, a frame can hold
samples of different channels. The channel of a sample is known from its
position. `tb/tb_ecg_ref.sv` contains this decoder as a class.

## 6. The chip around the compressor

`ecg_soc` is the top level. The analog parts are outside it, and their
digital controls are its ports.

**Acquisition.** `acq_sequencer` gives each channel a slot of 16 clocks
(512 Hz per channel) or 32 clocks (256 Hz).

- The multiplexer phase `mux_phi[c]` switches at the start of the slot.
- The ADC sampling strobe `adc_sample` comes in the middle of the slot, after
  the multiplexer has settled.
- The slot's channel number goes to the ADC on `adc_ch_sel`.
- The ADC returns `adc_eoc` for one clock, with `adc_data` and the channel
  tag `adc_ch`, before the next strobe.
- `adc_eoc` is the compressor's load strobe. It also updates the RAW register
  for monitoring.
- Stopping and rate changes take effect at a slot boundary. The channel
  rotation is never broken, so the ch1..ch4 order that the decoder relies on
  holds across them.

**Frame buffer.** `frame_fifo` holds 16 frames, which gives the host about 8 ms
to read them out even at the highest frame rate. A frame arriving when the buffer is full is dropped.
This sets a sticky overflow flag and increments a saturating drop counter.
Dropped frames are what resynchronization recovers from.

**RTC.** `rtc` divides the clock by 32768 into a 32-bit seconds counter. The
host can read the sub-second count and set the time.

**AFE control.** `afe_ctrl` holds, per channel, the 2-bit PGA gain
(47/54/61/66 dB) and the 2-bit PGA bandwidth select. It also holds the IA
reset bits, the run bit and the sampling-rate bit.

**SPI.** The SPI port uses mode 0, MSB first, with 24 clocks per
transaction:

- 8-bit command `{write, addr[6:0]}`;
- 16 data bits, on MOSI for a write or on MISO for a read.

| Addr | Access | Register                                                        |
|------|--------|-----------------------------------------------------------------|
| 0x00 | R      | FRAME: oldest frame (reading it removes it)                     |
| 0x01 | R/W    | STATUS: [15] overflow, [12:8] frames waiting, [7:0] drops; a write clears them |
| 0x02 | R      | RAW: [15:14] channel, [11:0] latest ADC sample                  |
| 0x03 / 0x04 | R | seconds [15:0] / [31:16]                                     |
| 0x05 | R      | sub-second count (1/32768 s)                                    |
| 0x08 | R/W    | CTRL: [0] run, [1] 512 Hz (reset value 1), [7:4] IA reset per channel |
| 0x09 | R/W    | AFE: per channel c, [4c+1:4c] gain, [4c+3:4c+2] bandwidth       |
| 0x0A / 0x0B | W | new seconds value, low / high half; writing 0x0B loads the RTC |

**Clock-domain crossing.** The SPI shift logic runs on SCLK (2 MHz in the
measured chip). The rest runs on the 32.768 kHz clock.

- A finished transaction flips a toggle. Two flip-flops synchronize it, and
  an edge detector turns it into a one-clock write or pop pulse.
- The write address and data stay in holding registers until the next
  transaction.
- Read data are sampled at the end of the command byte. They come from
  registers that change at most once per system clock.
- The rules for the host:
  - Leave at least 4 system clocks (about 125 µs) between transactions.
  - Raise CS_N once after power-up. CS_N high resets the bit counter.

## 7. Where this RTL departs from the paper or fills a gap

- **13-bit error.** The paper uses a 13-bit error path. Here it is exact only
  modulo 2^13, and the receiver rebuilds modulo 4096 (section 1).
- **7-bit width test.** The schematic labels this test with error bits
  [12:7], which would test for 8 bits. The text, the flowchart's −64…63
  range and the 7-bit B fields all say 7 bits, so bits [12:6] are used.
- **Headers.** The frame-format table and the flowchart disagree in places.
  The headers and field counts follow the flowchart: each type fills exactly
  16 bits, and the headers are prefix-free. Bit order inside a frame (MSB
  first, oldest sample first) is this design's reading.
- **"8 and above".** The width class is encoded as 8.
- **Resynchronization counter clock.** The figure labels the counter clock
  "512 Hz", but the text states a 4 s period. A 13-bit counter at 512 Hz
  would give 16 s. Here the counter advances once per multiplexed sample,
  which gives the 4 s at 512 Hz.
- **Choices the paper does not make:** all of the following are this
  design's own.
  - The exact clock positions of the multiplexer phases and the sampling
    strobe.
  - The ADC handshake.
  - The frame-buffer depth and its overflow policy.
  - The SPI protocol.
  - The register map.
  - The register reset values.
- **Clock gating.** The measured chip clock-gates the compressor with
  end-of-conversion. Here end-of-conversion is a synchronous enable, and
  only the addressed predictor registers are enabled.
- **Not included:** the analog and mixed-signal parts have no RTL here:
  - the amplifier channels (IA and PGA);
  - the bootstrapped multiplexer;
  - the SAR ADC;
  - the driven-right-leg circuit;
  - the bandgap reference;
  - the crystal oscillator.

  `tb/sar_adc_model.sv` is a behavioural stand-in for the multiplexer and
  ADC, used only by the top-level testbench.

## 8. Verification

There is one self-checking testbench per module, `tb/tb_<module>.sv`.

- Each one drives random stimulus with `$urandom`, compares against a model,
  and has a watchdog.
- Each ends with the line `TB_RESULT checks=<n> failures=<n>`.
- `tb/tb_ecg_ref.sv` holds the shared reference code: frame unpacking, the
  decoder, and a synthetic ECG generator.

The synthetic ECG has baseline wander, P, QRS and T waves, noise, and rare
large artifact steps.

`tb_ecg_soc` runs the whole back-end at its default sizes:

- four channels through the behavioural ADC at 512 Hz;
- IA reset and gain/bandwidth setup;
- a RAW read;
- a switch to 256 Hz;
- stop and restart;
- setting and reading the RTC;
- a deliberate buffer overflow and its clearing.

It reads every frame over SPI, decodes it and compares it with the ADC output
sample by sample. It counts frames of each type, the resynchronization
windows seen, slot spacings at both rates, and RTC seconds. On the synthetic
signal it reaches a compression ratio of about 2.7. The paper reports 2.25 on
MIT/BIH records at 360 Hz and 2.55 measured at 512 Hz; a smoother test
signal compresses better.

`tb_workload_mitbih` feeds the compressor two channels the way the
MIT/BIH databases would: 11-bit samples at 360 Hz, then 12-bit samples at
250 Hz. It uses the default 32.768 kHz timing and the full 13-bit
resynchronization counter, and runs long enough to see two resynchronization
windows in each configuration. The records themselves are not included; the
synthetic ECG stands in for them. The compressor does not depend on the
sample rate, so these rates work even though the on-chip sequencer only
makes 256 and 512 Hz.

To run a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
      -y rtl -y tb +libext+.sv -Irtl -Itb \
      rtl/ecg_pkg.sv tb/tb_ecg_ref.sv tb/tb_ecg_soc.sv \
      --top-module tb_ecg_soc -o sim
    ./obj_dir/sim

Replace `tb_ecg_soc` with any other testbench name.

- `tb_lossless_compressor` shortens the resynchronization counter
  (`RESYNC_CW=9`) so that several windows occur in a short run.
- `tb_rtc` uses a small prescaler.
- All other testbenches use the default parameters.

## Files

| File | Content |
|------|---------|
| `rtl/ecg_pkg.sv` | widths, frame headers, state and SEL encodings |
| `rtl/slope_predictor.sv` | per-channel second-order predictor |
| `rtl/bitwidth_compute.sv` | width class of an error sample |
| `rtl/frame_buffer.sv` | six-entry register |
| `rtl/frame_enable.sv` | D/C/A/B enable comparators |
| `rtl/resync_gen.sv` | resynchronization request |
| `rtl/framing_controller.sv` | state machine, counter, frame multiplexer |
| `rtl/lossless_compressor.sv` | the compressor |
| `rtl/frame_fifo.sv` | frame buffer for readout |
| `rtl/rtc.sv` | real-time clock |
| `rtl/acq_sequencer.sv` | multiplexer and ADC timing |
| `rtl/afe_ctrl.sv` | front-end control registers |
| `rtl/spi_slave.sv`, `rtl/spi_interface.sv` | SPI port and register map |
| `rtl/ecg_soc.sv` | top level |
| `tb/` | testbenches, reference decoder, ADC model |
