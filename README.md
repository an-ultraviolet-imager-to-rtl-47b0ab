# Detector interface for a compact near-UV imaging telescope

A small ultraviolet telescope (80 mm aperture, 200–300 nm band) images bright
sources onto a UV-enhanced CCD of 1360 × 1024 pixels. The CCD is not driven by
the FPGA directly: a commercial CCD timing generator sits on the sensor board,
generates the CCD's reset and transfer clocks, digitises each pixel with its
own ADC and hands the FPGA a pixel value together with three synchronisation
signals — a pixel clock, *frame valid* and *line valid*. The FPGA has two jobs
at this boundary:

1. at switch-on, write the timing generator's registers over SPI (in the
   instrument a soft processor inside the FPGA issues those writes);
2. during readout, capture every pixel value and work out from the
   synchronisation signals which column and row it belongs to, so that the
   processing chain behind it (calibration, source extraction, photometry,
   compression, storage) receives positioned pixels.

This RTL implements those two jobs and the top level that joins them. The
processing chain, the processor, the on-board memory, the timing generator and
the CCD are not part of it: their functions are only named in the instrument
description, or they are bought parts.

```
                 system clock domain                 pixel clock domain
  processor ──cfg_*──► spi_master ──SPI──► timing  ──pixclk, FV, LV, data──► pixel_capture ──► pix_o, line/frame reports
                       (luci_readout_top)  generator                        (luci_readout_top)     (to processing chain)
                                           + ADC ◄── CCD
```

## Files

| file | contents |
|---|---|
| `rtl/luci_pkg.sv` | sensor format, pixel width, and the `sensor_sync_t`, `pixel_t`, `frame_status_t` structs |
| `rtl/pixel_capture.sv` | FV/LV decoder, column/row counters, line and frame reports |
| `rtl/spi_master.sv` | mode-0 SPI master with valid/ready command port and read-back |
| `rtl/reset_sync.sv` | reset synchroniser into the pixel-clock domain |
| `rtl/luci_readout_top.sv` | top level |
| `tb/tb_pixel_capture.sv`, `tb/tb_spi_master.sv` | block testbenches |
| `tb/tb_luci_readout_top.sv` | end-to-end test at full sensor size |
| `tb/vsp01m01_model.sv`, `tb/spi_slave_model.sv` | behavioural timing generator and SPI slave (simulation only) |

## Pixel capture: from sync signals to positions

This is the part worth understanding before changing anything.

**Sampling.** FV, LV and the pixel value are sampled together on every rising
edge of the pixel clock, i.e. the block runs in the timing generator's clock
domain (source-synchronous capture). Both sync signals are taken as active
high. The behavioural timing generator changes its outputs on the falling
edge, so the rising edge sits in the middle of the data eye.

**Decoding.** After one input register, the block compares each sample with
the previous one:

- FV rising → a new frame: column and row counters are restarted *in the same
  cycle*, so a line that begins together with the frame is decoded correctly.
- LV high inside FV → a pixel: it is emitted with the current column and row,
  and the column counter advances. LV while FV is low is ignored.
- LV falling → end of line: `line_done_o` pulses with `line_len_o`, the number
  of pixels counted in that line; the row counter advances, the column counter
  clears.
- FV falling → end of frame: `frame_o.done` pulses with `frame_o.lines` and
  `frame_o.size_ok`. If LV and FV fall in the same cycle, the last line is
  still counted.

**Format check.** `size_ok` is set only if every line held exactly
`H_PIXELS` pixels and the frame held exactly `V_LINES` lines. Pixels beyond
`H_PIXELS` in a line, and lines beyond `V_LINES`, are counted but not
emitted, so `pix_o.x` and `pix_o.y` always lie inside the format (an assertion
checks this). Counters saturate rather than wrap. This check is this design's
addition; the instrument description only asks that pixel positions be
decoded.

**Output.** `pix_o` carries `valid`, the value, `x` (0…1359), `y` (0…1023),
`sof` on the first emitted pixel of a frame and `sol` on the first pixel of a
line. There is no back-pressure: one pixel per pixel clock, always.

**Timing.** A pixel sampled at edge *n* is on `pix_o` after edge *n+1*. Line
and frame reports appear after the edge following the one that first sees LV
or FV low. A frame of *V* lines with *B* blank clocks after each line
therefore takes exactly *V·(H+B)* pixel clocks from its first pixel on
`pix_o` to its `frame_o.done`; the end-to-end test checks this number.

## SPI master: programming the timing generator

The link is identified only as SPI; the word format and register map of the
timing generator are outside this design. The master therefore sends opaque
words:

- mode 0: SCLK idles low, MOSI changes on the falling edge, both sides sample
  on the rising edge; MSB first; one word per chip-select period;
- `WORD_W` = 16 (enough for an address byte and a data byte), SCLK = clk /
  (2·`CLK_DIV`), `CLK_DIV` = 4;
- the word shifted in on MISO during the same period is returned on
  `rsp_data` with a one-cycle `rsp_valid`, so registers can be read back.

Command handshake: a word is taken on a clock edge where `cmd_valid` and
`cmd_ready` are both high; `cmd_data` must be held until then (an assertion
checks it). CS_N falls on the accepting edge, the first SCLK rise follows
`CLK_DIV` cycles later, and CS_N rises with `rsp_valid` at
(2·`WORD_W`+1)·`CLK_DIV` cycles. CS_N then stays high for `CLK_DIV` cycles,
and back-to-back words run at one per (2·`WORD_W`+2)·`CLK_DIV` cycles — 136
cycles at the defaults.

## Top level

`luci_readout_top` instantiates both blocks and a two-flop reset synchroniser
that releases the reset in the pixel-clock domain. The two clock domains
exchange no signals inside the top, so no data synchroniser is needed; a
consumer of the pixel stream in another clock domain must provide its own
crossing. Parameters: `H_PIXELS` = 1360, `V_LINES` = 1024, `SPI_WORD_W` = 16,
`SPI_CLK_DIV` = 4. The processor's command port, the SPI pins, the sync
inputs and the pixel/line/frame outputs are all top-level ports.

## Throughput against the sensor

The camera runs at up to 12 frames/s. 1360 × 1024 × 12 ≈ 16.7 Mpixel/s, and
the capture accepts one pixel per pixel clock with no stall, so any pixel
clock above about 17 MHz (plus line blanking) keeps up. The end-to-end test
uses a 25 MHz pixel clock and 4 blank clocks per line: a full frame takes
1,396,736 pixel clocks, or 17.9 frames/s. The actual pixel clock of the
timing generator is not known here.

## What follows the instrument description and what does not

Taken from the description: the sensor format 1360 × 1024; the partition
(timing generator with the ADC on the sensor board, FPGA receives frame
valid, line valid and pixel clock, FPGA programs the generator over SPI at
switch-on); the requirement to capture every pixel and decode its position;
the 12 frames/s rate.

Own choices, each a parameter or a few lines to change: 12-bit pixel value
(`luci_pkg::PIX_W`); active-high FV/LV sampled on the rising pixel-clock edge;
SPI mode 0, 16-bit words, clock divider 4; valid/ready command port;
asynchronous active-low reset; the format check and the clipping of
oversized lines and frames.

Not implemented: the image processing (stray-light removal, flat fielding,
astrometry, source extraction, cosmic-ray rejection, aperture and PSF
photometry), the compression, the on-board storage, the processor and its
register-write sequence, and the clock generation of the board. None of them
is described in enough detail to write as logic; their place is at the
`pix_o`/`frame_o` outputs and the `cfg_*` port.

## Simulating

Each testbench is self-checking and prints one line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb rtl/luci_pkg.sv \
    tb/tb_luci_readout_top.sv --top-module tb_luci_readout_top -Mdir obj_top
./obj_top/Vtb_luci_readout_top
```

Replace the testbench name with `tb_pixel_capture` or `tb_spi_master` for the
block tests; `-Irtl -Itb` lets Verilator find the other files by module name.

- `tb_pixel_capture` runs a 16 × 6 format through well-formed frames, a short
  line, a long line, an extra line, LV outside FV and coincident LV/FV edges,
  and checks every pixel, flag, report and latency.
- `tb_spi_master` runs the default instance and an 8-bit, divide-by-1
  instance against a mode-0 slave that returns random words, checking the
  words both ways, the SCLK half period and idle level, and the cycle counts
  above.
- `tb_luci_readout_top` uses the top at its default parameters and the
  behavioural timing generator. Acting as the processor, it programs the
  geometry over SPI (checking each read-back word), then reads a 4-line
  frame (reported as not matching), a full 1360 × 1024 frame (every pixel
  position and value checked, readout time checked, reported as matching)
  and a 3-line frame of 1362-pixel lines (extra pixels dropped). It takes
  about ten seconds.

The behavioural timing generator's register map (address byte, data byte;
registers for run, line length, line count and blanking; each transfer echoes
the previous word) is invented for the tests and is not that of the real chip.
