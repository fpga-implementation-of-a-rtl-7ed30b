# A digital correlated double sampler for CCD video

A CCD delivers its pixels one at a time as an analog waveform. Each pixel period
has a *reference* level (the output node just after reset) and, after the
photo-charge has been dumped onto the node, a *signal* level. The pixel value is
the step between the two. A digital correlated double sampler (DCDS) digitises
the whole waveform with a fast ADC and forms that difference numerically: it
averages many samples of each level, with weights, and subtracts. Averaging
more samples lowers the read noise, and the weights let the user shape the
filter.

This repository holds synthesizable SystemVerilog for a single-channel DCDS
processor built that way. The design follows a published FPGA implementation
for an Artix-7 board with a 16-bit 20 Msps ADC. Where that description leaves
something open, this RTL makes its own choice, and each such choice is listed
below. The processor:

* takes up to 256 samples from each of the two pedestals;
* weights every sample with its own 8-bit weight (0..255);
* adds the weighted reference samples and subtracts the weighted signal samples
  in a 32-bit accumulator that starts each pixel at a *digital bias*;
* divides by the sum of the weights, so the gain is exactly one whatever the
  weights are;
* delivers an 18-bit pixel (16 integer bits and 2 fraction bits) 20 ADC clocks
  after the last signal sample.

## Block map

```
 host (ramclk) ──SetupDATAfromHost, Config_wen──► config_regs (16 x 16 bit) ──┐
              ──SetupDATAfromHost, Coeff_wen ──► coeff_ram (512 x 8 bit) ◄──┐ │
              ──dataloaded───────────────────► setup_ctrl ◄─────────────────┼─┘
                                                 │  ├─► coeff_sum ──► recip_div (66 cycles)
                                                 │  └─ cfg, scale, bias      │
                                                 ▼                           │
 linetrig ─► sequencer ──flags──► align (ADCPL) ──flags──┐                   │ raddr
             │ start_of_pixel, dump_event ──► CCD clocks  ▼                   │
 ADC_DATA ─► [clkDCO reg] ─► [adcCLK reg] ─► weight_mult ─► accumulator ─► normaliser ─► output_stage ─► PIXELOUT, PixelWR
                                      (x weight from coeff_ram)  (±, bias)    (x scale, bits 47..30)  (or raw samples)
 config_check ──► error
```

| Module | Role |
|---|---|
| `dcds_processor` | top level, ports named as in the original block symbol |
| `dcds_pkg` | widths, register map, configuration and flag structs |
| `dcds_config_regs` | 16 x 16-bit configuration bank, loaded on `ramclk` |
| `dcds_coeff_ram` | 512 x 8-bit weights, written on `ramclk` and read on `adcCLK` |
| `dcds_setup_ctrl` | after `dataloaded`: snapshot, weight sum, reciprocal, `configured` |
| `dcds_coeff_sum` | sums the reference-pedestal weights |
| `dcds_recip_div` | pipelined divider, `floor((2^32-1)/sum)`, 66 cycles |
| `dcds_config_check` | combinational consistency check, drives `error` |
| `dcds_sequencer` | line and pixel counter, pedestal flags, CCD triggers |
| `dcds_align` | delays the flags by the ADC pipeline length `ADCPL` |
| `dcds_weight_mult` | 16 x 8 multiplier, 3 stages |
| `dcds_accumulator` | 32-bit up/down accumulator with bias reload |
| `dcds_normaliser` | 32 x 32 multiplier, 6 stages, selects bits 47..30 |
| `dcds_output_stage` | latency alignment and the oscilloscope-mode output |

## Pixel timing and the configuration registers

All timing is counted in ADC clocks from the start of a pixel (count 0). The
bounds are inclusive, so a pedestal from `Start_ref` to `End_ref` holds
`End_ref - Start_ref + 1` samples.

```
count:   0            Start_ref      End_ref    DMP   Start_sig       End_sig          L_pixel-1
         |  serial    |<- reference ->|          |     |<--- signal ---->|   >= 5 clocks  |
         |  clocking  |   pedestal    |          dump  |    pedestal     |                |
   start_of_pixel                            dump_event
```

| Word | Name | Meaning |
|---|---|---|
| 0 | ADCPL | ADC pipeline length, in clocks (see below) |
| 1 | NSERIAL | pixels per line |
| 2 | DMP | count at which `dump_event` pulses (charge dump) |
| 3 | Start_ref | first reference sample |
| 4 | End_ref | last reference sample |
| 5 | Start_sig | first signal sample |
| 6 | End_sig | last signal sample |
| 7 | L_pixel | pixel period |
| 8 | Spare1 | bit 0: oscilloscope mode |
| 9..15 | Spare2..8 | unused |

The original register map prints "End_ref" twice. The seventh word can only be
the end of the signal pedestal, so it is read as `End_sig` here.

Weights 0..255 of the weight memory apply to reference samples 0..255 of the
pedestal, and weights 256..511 to the signal samples. The weight used for the
sample at count `k` is `w[k - Start_ref]` or `w[256 + k - Start_sig]`.

`error` is raised when the loaded configuration cannot work. The first three
rules come from the original design; the others are added here because this
hardware depends on them.

* The two pedestals differ in length.
* The pedestals overlap.
* The last signal sample lies within five clocks of the end of the pixel, i.e.
  `End_sig + 5 >= L_pixel`. The original design gives five clocks as the time its
  pixel state machine needs to become triggerable again.
* A pedestal ends before it starts, or it holds more than 256 samples.
* `ADCPL > 64`, `NSERIAL = 0`, or `DMP >= L_pixel`.
* The reference weights sum to zero.

After reset the bank is all zeros, so `error` is high until a consistent
configuration has been loaded.

## The arithmetic

Let `S` be the sum of the weights of the reference pedestal, `r_i` and `s_i` the
reference and signal samples, and `a_i`, `b_i` their weights. For each pixel the
accumulator computes

```
acc = (S << 10) + sum a_i * r_i - sum b_i * s_i          (mod 2^32)
```

and the normaliser outputs

```
PIXELOUT = bits 47..30 of  acc * floor((2^32 - 1) / S)
```

Because `floor((2^32-1)/S) ≈ 2^32 / S`, bits 47..32 of the product hold
`acc / S`. When the weights of the two pedestals are equal, that is

```
1024 + (weighted mean of the reference) - (weighted mean of the signal)   ADU
```

Bits 31..30 are two fraction bits. So the gain is one for any set of weights.
A bias frame (no signal) reads about 1024 ADU. This *digital bias* is the
reason the accumulator is not reset to zero: noise cannot push a bias pixel
below zero. The bias costs nothing extra, because the reset value `S << 10` is
the weight sum shifted left.

A worked example: 60 samples per pedestal, all weights 255, so
`S = 15300` and the scaler is `floor(4294967295 / 15300) = 280716`. A reference
of 60000 ADU and a signal of 55000 ADU give
`acc = 15300*1024 + 15300*60000 - 15300*55000 = 92 167 200`. The product is
`acc * 280716 = 2.5873e13`, and bits 47..32 hold 6023 (the exact value is
6024, less a rounding loss in the scaler of at most one part in 2^16).

Widths:

* samples, 16 bits; weights, 8 bits; products, 24 bits;
* weight sum, 16 bits (256 x 255 = 65280 fits);
* accumulator and scaler, 32 bits each.

At full scale the partial sum after the reference pedestal can exceed 2^32. It
wraps, and wraps back when the signal is subtracted, so the final sum is exact
as long as the pixel itself fits (`S*(1024 + ref - sig) < 2^32`). Pixels above
65535 ADU wrap in the 16-bit integer field; nothing saturates.

The weight sum is taken over the reference weights actually used
(`End_ref - Start_ref + 1` of them). The normalisation is therefore exact only
when the signal weights have the same sum. In practice that means the same
profile in both halves of the memory.

## Pipeline and latency

`dcds_align` delays the sequencer's per-sample flags so that each flag meets
the ADC sample it describes. Count the cycle in which `start_of_pixel` is high
as cycle 0 of the pixel. The processor then expects the sample for count `k` on
the `ADC_DATA` pins in cycle `k + ADCPL`, so `ADCPL` is simply the ADC's
pipeline latency as seen at the pins. The flags are delayed by `ADCPL + 2`; the
extra two cycles cover the two input registers, one on `clkDCO` and one on
`adcCLK`. If `ADCPL` is wrong, every pedestal is shifted by the error. In
oscilloscope mode the flag bit shows whether the pedestals sit where they
should.

From the cycle in which the last signal sample sits in the `adcCLK` input
register (cycle T):

| Cycle | Stage |
|---|---|
| T+1 | weight read from block RAM, sample re-registered |
| T+2..T+4 | weight multiplier (input, multiply, product registers) |
| T+5 | accumulator holds the pixel sum (`done`) |
| T+6..T+11 | normaliser, 6 cycles |
| T+12..T+19 | delay line of 8 stages |
| T+20 | `PIXELOUT` valid, `PixelWR` high for one cycle |

The original design reports the 20-cycle figure and the 6-cycle normaliser
but gives no further breakdown. Here the arithmetic takes 12 cycles and an
8-stage delay (`PIX_LATENCY - 12`) brings the total to 20. Set `PIX_LATENCY` to
12 or more to change it.

Pixels follow each other without a gap, and each pixel's arithmetic overlaps
the next pixel's samples. The accumulator reloads on the first sample of every
pixel, so nothing leaks from one pixel into the next.

## Loading, setup and a line

1. Hold `rst` for at least two cycles of each clock.
2. On `ramclk`, write the 16 configuration words, one per `Config_wen` cycle,
   starting at word 0.
3. Write the 512 weights, one per `Coeff_wen` cycle, in the low byte of
   `SetupDATAfromHost`. Both write pointers increment automatically. The
   original interface has no address bus, and this is this design's way of
   loading it.
4. Raise `dataloaded` for at least three `adcCLK` cycles. This returns both
   write pointers to 0. Inside the `adcCLK` domain it then:
   * copies the register bank;
   * sums the reference weights (pedestal length + 2 cycles);
   * runs the divider (66 cycles);
   * stores the scaler and the bias, and raises `ready` unless `error` is set.
5. A rising edge on `linetrig` (synchronised to `adcCLK`) starts a line of
   `NSERIAL` pixels. `lineactive` stays high until the line's last pixel has
   been written. `pixactive` is high while pixels are being clocked.
   `start_of_pixel` and `dump_event` are one-cycle pulses for the external CCD
   clock generator. A trigger is ignored while a line is active or while the
   processor is not ready.

The divider is fully pipelined: 1 input register, 32 two-stage restoring
iterations and 1 output register, 66 cycles in all. That matches the latency
reported for the original divider IP. It could accept a new division every
cycle, but it is used once per load.

## Oscilloscope mode

With Spare1 bit 0 set, the line's raw samples go to the output instead of
pixels. Each sample is written with a `PixelWR` strobe, one clock after it
reaches the input register. The lowest bit of the sample is replaced by a flag
that is 1 for samples inside either pedestal.
`PIXELOUT[17:2] = {sample[15:1], flag}` and `PIXELOUT[1:0] = 0`. This is how the
original design checked its framing and did noise analysis on the host. The
choice of register bit and the position of the word in the 18-bit output are
this design's own.

## Clocks and reset

* `adcCLK` runs the whole processing path.
* `ramclk` is used only to write the register bank and the weight memory.
* `ADC_DATA` is captured on `clkDCO`, the ADC's echoed data clock, and
  re-registered on `adcCLK`.

`clkDCO` and `adcCLK` have the same frequency. The design assumes their phase
is fixed and meets timing; there is no FIFO on that crossing. Configuration
crosses from `ramclk` by a two-flop synchroniser on `dataloaded` and a snapshot
of the then-static register bank. Do not write registers while a line runs.
Resets are synchronous in each domain. The weight memory is not reset.

## What is not here

The published system also contains the following parts, which are not part of
this RTL:

* the analog preamplifier with its baseline-restoration (black clamp) switch,
  whose control signal does not appear on the processor's ports;
* the ADC chip itself;
* the 8-bit DAC and the logic that generated synthetic CCD waveforms for testing;
* the vendor USB interface IP;
* the host-side output FIFO.

`PIXELOUT`/`PixelWR` are meant to feed such a FIFO. The four-channel system
shown as future work is also not built.
Instantiating `dcds_processor` four times would give it.

## Departures and open points, in one place

* Register word 6 is treated as `End_sig` (a misprint in the original
  register map).
* Loading uses auto-incrementing write pointers rather than an address bus.
* The normalising sum covers the reference weights only.
* The divider's insides are this design's own; only its latency is the
  original's.
* Eight cycles of the 20-cycle latency are padding.
* The oscilloscope-mode select bit and the output word layout are this
  design's own.
* Error rules are added beyond the three the original names.
* `lineactive` covers the processing tail of the line.
* `ADCPL` is capped at 64.
* The `clkDCO` to `adcCLK` hand-over assumes a fixed phase.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| Testbench | Covers |
|---|---|
| `tb_dcds_processor` | End to end at default parameters; details below. |
| `tb_dcds_noise_sweep` | Noise test. Bias frames at pedestal widths 1..250 with all weights 255, pixel period `2*width + 40`. Checks every pixel bit-exact and reports the spread per width, which falls from about 17 ADU at one sample to about 1 ADU at 250. Also runs a flat field. |
| `tb_dcds_<block>` | One per block. Each compares with values computed independently, including the 66-cycle divider latency, the 6-cycle normaliser and the 3-cycle multiplier. |

`tb_dcds_processor` plays the host, a synthetic CCD source and a 12-clock ADC
pipeline, and compares every pixel bit for bit with a model. It checks that
each pixel appears exactly 20 clocks after its last signal sample. It covers:

* bias frames (about 1024 ADU);
* a ramp read with all weights 1 and again with all weights 255, which must
  give equal images;
* a bias frame with every 16th column bright, with no leak into the next pixel;
* sloped weights 0..255 on full 256-sample pedestals;
* oscilloscope mode, with every flag position checked;
* an inconsistent load (`error` set, trigger ignored);
* a trigger during an active line.

To run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/dcds_pkg.sv \
    tb/tb_dcds_processor.sv --top-module tb_dcds_processor -o sim
./obj_dir/sim
```

`-y rtl` lets Verilator find each module in the file of its name. The package
must be named explicitly, ahead of the testbench. The end-to-end test takes a few seconds.
