# CIF/LCD frame link between an FPGA and a vision processing unit

This design is the FPGA side of a co-processor link. It moves image frames
between an FPGA and a vision processing unit (VPU) such as the Movidius Myriad2.
It uses two parallel video ports that such VPUs already have:

- **CIF**, the camera input port. The FPGA acts as a camera and sends input frames to the VPU.
- **LCD**, the display output port. The VPU acts as a display controller and sends result frames back.

Neither port has flow control. Once a line starts, pixels must leave (on CIF) or
be taken (on LCD) at one per pixel clock. The FPGA's system side, in contrast,
works in bursts of 32-bit words, on its own clock and at its own pace. Most of
this design deals with that mismatch:

- it converts between words and 8/16/24-bit pixels;
- it buffers frames across three unrelated clocks;
- it shapes the hsync/vsync timing;
- it guards each frame with a CRC.

The two directions share nothing but the reset and the register ports, so they
run at the same time. The VPU can thus receive input frame n+1 while it returns
the result of frame n−1.

At 50 MHz a 1024×1024 frame takes 21.05 ms on either port, and a 2048×2048 frame takes 84.05 ms.
These are simulated figures at default sizes, blanking included.

```
 system clock                   | CIF pixel clock (cif_pclk_in)
                                |
 in_wr_*  --> CIF cross-clock --+--> CIF FSM --> CIF pixel --> CIF Tx --> cif_hsync, cif_vsync,
 (32 bit)     buffer 1024x32    |   32b->pix     FIFO 2048x24   +CRC      cif_pixel[23:0]
                                |                                         ODDR --> cif_pclk_out
 reg_wr_* --> control regs -----+--> (CIF config, via handshake CDC)
                                |
 sts_rd_* <-- status regs <-----+--- (CIF status, LCD status + CRC, via handshake CDC)
                                |
 out_rd_* <-- LCD cross-clock <-+--- LCD FSM <-- LCD pixel <-- LCD Rx <-- lcd_valid, lcd_hsync,
 (32 bit)     buffer 1024x32    |   pix->32b     FIFO 2048x24   +CRC      lcd_vsync, lcd_pixel[23:0]
                                | LCD pixel clock (lcd_pclk_in)
```

The FPGA is the framing processor: it receives instrument data, reformats it and
feeds the VPU. The VPU runs the heavy DSP and AI kernels. This RTL covers only
the link. The VPU, its software and the host are outside it.

## Clock domains and reset

There are three clocks, with no required relation between them:

| Clock | Domain |
|---|---|
| `sys_clk` | system bus: the native FIFO ports and the register ports |
| `cif_pclk_in` | CIF transmit path. The FPGA generates it and forwards it to the VPU as `cif_pclk_out` |
| `lcd_pclk_in` | LCD receive path. The VPU sends it along with its pixels |

Three kinds of crossing are used:

- **Frame data** crosses in `async_fifo`. It is a dual-clock FIFO with Gray-coded
  pointers, each synchronised through two flops. Full and empty are
  pessimistic: full may stay high a few clocks after the reader freed space.
  This costs throughput only while the buffer is nearly full.
- **Configuration and status** cross in `cdc_handshake`. It holds a whole record
  in a register and sends a toggle request, followed by a toggle acknowledge.
  The receiving side therefore copies a complete, stable record, and never sees
  a width from one write with a height from another. The record is resent
  continuously, so the receiving side follows the source within a few clocks of
  the slower domain.
- **Reset** is one asynchronous input, `reset`. `rst_sync` turns it into an
  asynchronously asserted, synchronously released reset in each domain.

A register write in the first few system clocks after reset is released may be
lost. Wait five system clocks before writing.

The CIF pixel clock leaves the chip through an `oddr` (output double-data-rate
register) with D1 = 1 and D2 = 0. This is the usual FPGA way to forward a clock
with the same delay as the data pins. `oddr.sv` is a behavioural model of the
vendor primitive, with the same ports (`C CE D1 D2 R S Q`). On an FPGA it is
replaced by the real primitive.

## Pixel formats and packing

The pixel width is set per direction by a 2-bit code:

| Code | Pixel width |
|---|---|
| 1 | 8 bits |
| 2 | 16 bits |
| 3 | 24 bits |

The code is the number of bytes per pixel. Code 0 is treated as 8 bits.

Pixels are packed into 32-bit bus words with the least significant byte first,
as on a little-endian bus:

- **8 bits:** word = {p3, p2, p1, p0}. Four pixels per word.
- **16 bits:** word = {p1, p0}. Two pixels per word.
- **24 bits:** four pixels use three words. Pixels cross word boundaries, e.g.
  word 0 = {p1[7:0], p0[23:0]}, word 1 = {p2[15:0], p1[23:8]}.

A frame is width × height pixels. It always starts on a new word. If its last
word is only partly used, the rest is padding:

- on transmit, the padding bytes are dropped;
- on receive, they are zero.

A pixel on the 24-bit pins is right-aligned: an 8-bit pixel uses `pixel[7:0]`.

`cif_fsm` unpacks words into pixels, and `lcd_fsm` packs pixels into words.
Both use a small byte queue of 12 bytes. Each fetches the next word (or pixel)
as soon as the queue will hold at most 8 bytes after this clock. This keeps the
queue ahead of the one-pixel-per-clock output, even for 24-bit pixels, where one
word yields only one and a third pixels.

Both FSMs take the format, `width` and `height` when they start a frame, which
is as soon as they are idle and enabled. They then wait for the frame's data.
They count down the frame's pixels, which is how they know where a frame ends
and where the padding goes. So set the sizes first and `enable` last. Clearing `enable` abandons the current frame. Both FSMs, and
`cif_tx`, then start again cleanly at a word boundary.

## CIF transmitter timing

`cif_tx` is the hardest block to follow. It must never interrupt a line once
hsync is high, yet its source, the pixel FIFO, is filled from a bus that can
stall at any time. It solves this with a **whole-line start rule**:

> A line starts only when the pixel FIFO already holds every pixel of that line.

The line can then be sent without a break, whatever the writer does. The rule
limits a CIF line to the pixel FIFO's depth: 2048 pixels at the default
parameters. For a longer line, enlarge `PIX_FIFO_DEPTH`.

One frame, all signals registered on the CIF pixel clock:

```
 vsync  ___/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\_____ (>= vblank low)
 hsync  _______________/‾‾‾‾‾‾‾‾‾‾\______/‾‾‾‾‾‾‾‾‾‾\ ... /‾‾‾‾‾‾‾‾‾‾‾‾‾\_____
 pixel  _______________< line 0   >______< line 1   > ... < last + CRC >_____
           <- vblank ->            hblank+
```

- `vsync` is high for the whole frame. It rises, then stays high for `vblank`
  clocks before the first line. It falls together with `hsync` after the last
  pixel. It then stays low for at least `vblank` clocks.
- `hsync` is high exactly while `pixel` carries a valid pixel. Each line has at
  least `hblank` low clocks before it. A line waiting for its pixels extends
  that gap.
- `pixel` is zero while `hsync` is low.

The transmitter reads format, size and blanking at the start of each frame.
Changes written during a frame take effect at the next one.

Clearing `enable` while the transmitter waits for a line ends the frame at once
(`vsync` falls). That frame is not counted.

With the FIFO never empty, vsync stays high for
`vblank + height × (width + hblank + 2) + crc_pixels + 2` clocks. Here
`crc_pixels` is 2 in 8-bit mode, 1 in the other modes, and 0 without CRC. With
`hblank` = `vblank` = 2, an 8-bit 1024×1024 frame takes 1,052,678 clocks. That
is 21.05 ms at 50 MHz.

## Frame CRC

Both directions compute CRC-16/XMODEM:

- polynomial 0x1021, initial value 0;
- no bit reflection, no final XOR;
- reference: the string "123456789" gives 0x31C3.

Each pixel is fed in as its 1, 2 or 3 bytes, most significant byte first.
`crc16_xmodem` handles a whole pixel in one clock: three byte steps are unrolled.

**Transmit.** With `crc_en` set, the CRC of all image pixels of a frame is
appended to the frame's **last line**, which becomes longer:

- **8-bit mode:** two extra pixels, `CRC[15:8]` then `CRC[7:0]`;
- **16-bit and 24-bit mode:** one extra pixel holding the CRC, right-aligned.

The receiver must be set for the longer last line. For example, an 8-bit
W×H frame with CRC arrives at the VPU as H−1 lines of W pixels and one line of
W+2. The last CRC sent is also kept in the CIF status.

**Receive.** `lcd_rx` computes the same CRC over every pixel it accepts in a
frame. It starts the CRC on `lcd_vsync` rising and latches it on `lcd_vsync`
falling. The VPU software can thus echo a known frame, and the system compares
the two CRCs. The end-to-end testbench does exactly this.

## LCD receiver

The LCD input has four signals:

- `lcd_valid`, `lcd_hsync`, `lcd_vsync`, `lcd_pixel[23:0]`;
- all are clocked by `lcd_pclk_in`;
- all are registered once on entry.

A pixel is accepted on any clock where `enable`, `vsync`, `hsync` and `valid`
are all high. It goes straight into the LCD pixel FIFO. Gaps inside a line,
with `valid` low, are allowed.

The VPU cannot be stalled. A pixel that meets a full FIFO is therefore dropped,
and sets the sticky `overflow` status bit. Only reset clears that bit.

When `vsync` falls, the frame counter increments, and the pixel count and CRC of
the frame are latched.

`lcd_fsm` packs the pixels using the LCD `width` × `height`. If the VPU sends a
different number of pixels, words of one frame mix with the next. The pixel
count in the status shows what actually arrived.

The receive path keeps up with one pixel per clock for as long as the system
side empties the LCD buffer at least as fast. In 8-bit mode that is one word
per four pixels. Only when the system side is slower do the buffer, then the
pixel FIFO, fill up, and pixels are lost.

## Registers

The control registers are written on `sys_clk`, through `reg_wr_en`, a 3-bit
word address `reg_wr_addr` and 32-bit data `reg_wr_data`. They reset to zero,
so both directions start disabled.

| addr | name | bits |
|---|---|---|
| 0 | CIF_CTRL | [0] enable, [1] crc_en, [3:2] pixel format |
| 1 | CIF_SIZE | [15:0] width (pixels per line), [31:16] height (lines) |
| 2 | CIF_BLANK | [15:0] hblank (clocks), [31:16] vblank (clocks) |
| 3 | LCD_CTRL | [0] enable, [2:1] pixel format |
| 4 | LCD_SIZE | [15:0] width, [31:16] height |

Write the sizes before setting `enable`. The configuration crosses as one
record, so an `enable` written last arrives together with the sizes written
before it.

The status is read on `sys_clk` through `sts_rd_addr`. The read is
combinational. The full records also appear as `cif_status`, `lcd_status` and
`lcd_crc`.

| addr | contents |
|---|---|
| 0 | CIF frames sent |
| 1 | [15:0] CRC of the last CIF frame, [31:16] lines sent in the current/last frame |
| 2 | CIF image pixels sent in the current/last frame |
| 3 | LCD frames received |
| 4 | LCD pixels in the last complete frame |
| 5 | [15:0] CRC of the last LCD frame, [16] LCD overflow |

## Sizes and resources

| Parameter | Default | Meaning |
|---|---|---|
| `IMG_BUF_DEPTH` | 1024 | 32-bit words in each cross-clock buffer |
| `PIX_FIFO_DEPTH` | 2048 | pixels in each pixel FIFO (≥ longest CIF line) |

Both must be powers of two. These defaults were chosen to fit the reported
budget:

- **Memory:** the four memories hold 2 × 1024 × 32 + 2 × 2048 × 24 = 163,840
  bits. That is six 36-kbit block RAMs, which matches the six reported for the
  original FPGA build.
- **Flip-flops:** generic synthesis counts 1,662 flip-flop bits. The original
  build reports about 1,600.
- **LUTs and DSPs:** the original reports 3.5K LUTs and 7 DSP blocks. This
  version uses no multipliers, so no DSPs are to be expected.

The width and height fields are 16 bits. The frame pixel counter is 32 bits. So
the design handles the frames it was sized for, 4 Mpixel 24-bit (2048 × 2048),
in both directions. The full-size testbench runs the following at default
parameters, 50 MHz pixel clocks and a 100 MHz system clock:

- 2048×2048 8-bit and 24-bit frames;
- 1024×1024 frames in 8-bit and 16-bit mode;
- short frames (6×1, 64×1);
- a 64×64 16-bit loopback with the CIF clock raised to 100 MHz and the LCD
  clock to 90 MHz.

## Where this design departs from its source

The block structure follows the published block diagram of the FPGA interface:

- native FIFO image buffers;
- cross-clock buffers;
- CIF FSM, pixel FIFO and Tx;
- LCD Rx, pixel FIFO and FSM;
- control and status registers with clock-domain crossing;
- a CRC-16/XMODEM appended to the last CIF line;
- an ODDR on the CIF clock.

So are the word width (32), the pixel width (24), the formats (8/16/24), the
96-bit CIF status, the 65-bit LCD status and the 16-bit LCD CRC.

The following are this design's own choices:

- **Configuration width.** The diagram shows configuration buses of 138 bits
  (CIF) and 137 bits (LCD), without their fields. Here the configuration holds
  only what the logic needs: 68 bits (CIF) and 35 bits (LCD).
- **Where the configuration goes.** The diagram draws the configuration
  buses into the CIF transmitter and the LCD receiver only. Here the CIF and LCD
  FSMs also read the format and frame size, since they need them to pack and
  unpack words.
- **Sync polarity and timing.** Both syncs are active high. The blanking
  parameters, the vsync/hsync relationship and the whole-line start rule are
  this design's own.
- **Waiting for data.** The source says the CIF side waits for data bursts in
  the image buffer before passing them on, without giving a burst size. Here
  the CIF FSM takes words as soon as they arrive. The waiting is done one step
  later, by the whole-line start rule of the transmitter.
- **Byte order and padding** of pixels in bus words.
- **CRC.** The byte order fed into the CRC, and the layout of the CRC pixels in
  the last line.
- **`lcd_valid`.** It is used as a per-pixel qualifier.
- **Register and status maps**, and the status fields other than the frame
  counts and CRCs.
- **Buffer depths.** Chosen to match the reported block-RAM count, not taken
  from a printed number.
- **Frame time.** The source quotes 20.9 ms for a 1024×1024 frame at 50 MHz,
  and about 21 ms elsewhere. Pure pixel time is 20.97 ms. With the default
  blanking of 2 clocks, this design takes 21.05 ms.
- **Clock rates.** The source also ran CIF at 100 MHz and LCD at 90 MHz with
  small frames. The full-size testbench repeats that case and the data arrives
  intact. Whether an FPGA build closes timing at those clocks is a property of
  the build, not of this RTL, and is not claimed here.

The VPU itself, its software, the host PC and the other FPGA kernels the
source reports (hyperspectral compression, FIR filter, corner detector) are not
part of this RTL.

## Files

`rtl/`, one module per file:

| File | Contents |
|---|---|
| `cif_lcd_pkg.sv` | widths, format codes, configuration and status structs, CRC step function |
| `cif_lcd_top.sv` | the whole interface |
| `async_fifo.sv` | dual-clock FIFO (the cross-clock buffers) |
| `sync_fifo.sv` | single-clock FIFO (the pixel FIFOs) |
| `cif_fsm.sv` | words to pixels |
| `cif_tx.sv` | CIF timing |
| `crc16_xmodem.sv` | CRC |
| `lcd_rx.sv` | LCD capture |
| `lcd_fsm.sv` | pixels to words |
| `cdc_handshake.sv` | record crossing |
| `rst_sync.sv` | reset synchroniser |
| `ctrl_regs.sv` | control registers |
| `status_regs.sv` | status registers |
| `oddr.sv` | behavioural ODDR |

`tb/` has one self-checking testbench per block, `tb_<module>.sv`. In addition:

- **`tb_cif_lcd_top.sv`** runs the whole interface at reduced buffer sizes. It
  connects the interface to `vpu_model.sv`, a behavioural VPU. The model:
  - receives CIF frames and checks their CRC;
  - sends LCD frames, optionally with `valid` gaps.

  The testbench covers:
  - loopback in all three formats, with the LCD CRC compared to the CIF CRC;
  - a 2×2 binning frame pair;
  - pipelined I/O: an input frame goes out on CIF while a result frame comes
    back on LCD at the same time;
  - a slow system-side writer, which forces line waits and a full input buffer;
  - a full CIF pixel FIFO;
  - an LCD overflow.

  It counts each of these events and fails if one never happens.
- **`tb_workloads.sv`** runs the interface at its default parameters with
  frames of the sizes listed above. It checks every pixel and every word, and
  frame times in clocks. It takes about half a minute with Verilator.

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself
through a watchdog if it hangs.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/cif_lcd_pkg.sv rtl/*.sv tb/vpu_model.sv tb/tb_workloads.sv \
  --top-module tb_workloads
./obj_dir/Vtb_workloads
```

For a block testbench, list the package, the block and its helpers, then the
testbench. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/cif_lcd_pkg.sv \
  rtl/crc16_xmodem.sv rtl/cif_tx.sv tb/tb_cif_tx.sv --top-module tb_cif_tx
```

The testbenches count time in clocks, not in simulation time units, so any
timescale works.
