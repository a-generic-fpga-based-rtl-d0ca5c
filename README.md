# Image-acquisition logic for a generic FPGA detector-readout board

Small astronomy payloads on balloons or satellites cannot send every raw frame to the
ground, so the camera electronics must capture the image, keep it in RAM and let an
on-board processor reduce it. The board this logic is written for carries a Spartan-6
FPGA with a soft processor, 64 MB of DDR SDRAM, SPI flash, an SD card and RS485/USB links.
It reads one of two sensors:

* a **Star1000** radiation-hard CMOS sensor (1024 x 1024 pixels, 10-bit on-chip ADC, used
  in a star tracker). It has no timing generator. The FPGA must drive every address,
  latch, sample and clock pin itself, row by row and pixel by pixel.
* a **UV CCD** camera (1360 x 1024 pixels) whose own board carries a timing generator and
  ADC. That board sends pixels with frame-valid, line-valid and a pixel clock. The FPGA
  only has to follow those signals and work out where each pixel sits in the image.

This RTL is the FPGA logic between the sensors and the SDRAM. It has two sensor front
ends that deliver one common pixel stream, a selector, and a writer that stores each frame
in a fixed layout in memory. The processor, the SDRAM controller and the other
peripherals are vendor IP or off-board parts. They stay outside, so the top level shows
their side as plain ports.

```
             Star1000 pins                               UV CCD camera
   A0..A9 Ld_Y Ld_X S R Reset Cal Clk_X Clk_ADC  D0..D9     pclk fv lv data
        ^                                          |          |
  +-----+------------------------------------------v--+  +----v-----------+
  | star1000_ctrl  (100 MHz)                           |  | uvccd_capture  |
  |  rolling-shutter row sequencer + pixel readout     |  |  (pixel clock) |
  +--------------------------+-------------------------+  +----+-----------+
                             | pixel stream                     | pixel stream
                             |                            +-----v----------+
                             |                            | pix_async_fifo |
                             |                            +-----+----------+
                             +-----------> sensor_sel mux <-----+
                                                 |
                                         +-------v-------+
                                         | frame_writer  |---> word writes to the
                                         |  FIFO + addr  |     SDRAM controller
                                         +---------------+
```

## Files

| file | contents |
|---|---|
| `rtl/img_pkg.sv` | pixel stream type `pix_t`, Star1000 settings `star_cfg_t`, `sensor_e` |
| `rtl/star1000_ctrl.sv` | Star1000 pin sequencer and ADC capture |
| `rtl/uvccd_capture.sv` | frame-valid / line-valid decoding for the UV CCD |
| `rtl/pix_async_fifo.sv` | Gray-code dual-clock FIFO (CCD pixel clock to system clock) |
| `rtl/frame_writer.sv` | pixel FIFO and SDRAM word-write generator |
| `rtl/image_proc_top.sv` | top level: both front ends, selector, sensor supply enables, writer |
| `tb/star1000_model.sv`, `tb/vsp01m01_model.sv` | behavioural sensor models (simulation only) |
| `tb/tb_*.sv` | self-checking testbenches, one per block plus the end-to-end one |

## The pixel stream

Both front ends produce one beat per pixel (`pix_valid` plus a `pix_t`). Each beat holds:

* the 10-bit sample;
* the column `x` and row `y` in the image, counted from 0 at the window origin, 11 bits
  each;
* three flags: `sof` on pixel (0,0), `eol` on the last pixel of a line, and `eof` on the
  last pixel of the frame.

The stream has no ready signal, because neither sensor can wait. Any buffering needed
because of memory stalls is done in `frame_writer`.

## Star1000 sequencer (`star1000_ctrl`)

The hardest part of the design to understand is this one. The sensor is read with a
**rolling shutter**. Time is divided into row periods. A row is reset, integrates light
for `int_rows` row periods, and is then read. Meanwhile the same thing happens to the
rows after it, each one row period later. So in steady state every row period contains
two things: the readout of one row, and the reset of the row that starts integrating
now.

### Inside one row period

All delays are in cycles of the 100 MHz system clock (10 ns). The offsets below are from
the start of the row period. Each pin is registered, so every edge appears one cycle
later than listed, and all pins shift by the same amount.

| offset (cycles) | pin activity | phase |
|---|---|---|
| 0 .. 3 | A0..A9 = Y address of the row being read | row readout |
| 1 .. 2 | Ld_Y low (20 ns) latches it | |
| 321 .. 360 | S high (0.4 us, 3.2 us after Ld_Y falls): sample the signal level | |
| 351 .. 360 | Cal high (100 ns), first row of a frame only | |
| 371 .. 390 | Reset high (200 ns, 100 ns after S): clear the row | |
| 511 .. 550 | R high (0.4 us, 1.2 us after Reset): sample the reset level | |
| 551 .. 554 | A0..A9 = Y address of the row to reset | row reset |
| 552 .. 553 | Ld_Y low | |
| 562 .. 581 | Reset high (200 ns, 100 ns after Ld_Y falls) | |
| 582 onward | (num_cols + 3) pixel slots of PIX_CYC = 9 cycles | pixel readout |
| to `row_period` | idle | |

In pixel slot *k* (k < num_cols) the column address goes on A0..A9 and Ld_X goes low
during phases 1 and 2. Clk_X and Clk_ADC are high during phases 0 to 3. The ADC is a
pipeline: the sample of column *k* appears on D0..D9 three pixel periods later. So the
sequencer keeps Clk_ADC running for three more slots, and takes D at the last phase of
slot *k* + 3. A full 1024-pixel row therefore needs 582 + 1027 x 9 = 9825 cycles.

A row period lasts `cfg.row_period` cycles, but never less than the readout needs
(582 + (num_cols + 3) x 9 + 1). The source gives 0.1024 ms per row (10240 cycles), which
makes a 1024-row frame last 104.8576 ms. A small window with a small `row_period` runs
as fast as its width allows.

### Frames, integration and windows

`start` loads `cfg` and starts. The row reset runs through the window's rows in the
first row periods. The readout follows `int_rows` row periods behind it. The frame-to-
frame period is `num_rows` row periods. The integration time of every row, measured
from the rising edge of its Reset to the rising edge of its S, is

    int_rows x row_period - 241 cycles

Because each period reads first and resets afterwards, `int_rows` may be as large as
`num_rows`. A larger value works for a single frame only: with more frames, the reset of
the next frame would clear rows that have not been read yet.

* `nframes` = 0 runs until `stop`. The frame whose reset has begun is still finished.
* `row_start`/`col_start` set the window origin and `num_rows`/`num_cols` its size.
* `row_step`/`col_step` read only every n-th row or column (sub-sampling). Addresses wrap
  modulo 1024.
* `busy` stays high until the last row of the last frame has been read.
* `frame_done` pulses with the last pixel.

Limits:

* Full frames at the default pixel period reach at most 9.9 frames/s. Setting
  `PIX_CYC = 8` allows 11.1 frames/s, which is the sensor's rated figure.
* The sensor's static pins (gain G0/G1, output multiplexer Sel0/Sel1, Reset_DS and the
  analog references) are not driven by this logic.

## UV CCD capture (`uvccd_capture`, `pix_async_fifo`)

The capture runs on the camera's pixel clock. On each rising edge it takes a pixel when
both fv and lv are high. The column counts up while lv is high, and the row counts up on
each falling edge of lv. To know whether a pixel ends a line or a frame, each pixel is
held back by one beat:

* it is sent when the next pixel arrives, with `eol` set if lv fell in between;
* or it is sent when fv falls, with both `eol` and `eof` set.

So the stream runs one pixel behind the camera. The last pixel of a frame leaves one
clock after the falling edge of fv is sampled. lv must rise at least one pixel clock after
fv. A frame counts only if `enable` was high when fv rose, so changing the sensor
selection in the middle of a frame does not produce a partial frame.

The pixels then cross to the system clock in a 16-entry Gray-code FIFO. The system clock
reads one beat per cycle, so the FIFO cannot fill as long as the pixel clock is slower
than the system clock. `cdc_overflow` reports it if it ever does.

## Frame writer and memory layout (`frame_writer`)

Each pixel becomes one 16-bit word at word address

    frame_base + y * 2048 + x

The word holds the sample in bits 9:0 and zeros above. With a 2048-word line stride,
both the 1360-pixel CCD line and the 1024-pixel Star1000 line fit. A frame area spans
4 MB of the 64 MB SDRAM. With `ADDR_W` = 25 the port covers all 2^25 words.

Writes leave on a valid/ready port: a request is held until `mem_ready` takes it. A
64-entry FIFO in front of the port covers memory stalls. If the FIFO is full, the
arriving pixel is dropped, `overflow` is set and `drop_count` counts the loss. To the
processor this means the frame in memory is incomplete. `frame_done` pulses when the
`eof` pixel has been written, and `frame_count` counts such frames. `clear_status`
clears the flag and both counters.

## Top level (`image_proc_top`)

`sensor_sel` (`SENSOR_STAR1000` or `SENSOR_UVCCD`) picks which stream is written:

* `star_start` is accepted only while the Star1000 is selected;
* the CCD capture takes frames only while the CCD is selected.

`sensor_en[1:0]` switches the 5 V supply of the selected sensor when `sensor_pwr` is
high: bit 0 is the Star1000, bit 1 the CCD, and only one is on at a time.

The reset is asynchronous and active low. It is released into the pixel-clock domain
through a two-stage synchroniser.

Parameters with their defaults:

| parameter | default | meaning |
|---|---|---|
| `ADDR_W` | 25 | SDRAM word-address width |
| `LINE_LOG2` | 11 | log2 of the line stride in words |
| `WR_FIFO` | 64 | frame-writer FIFO depth |
| `CDC_FIFO` | 16 | clock-crossing FIFO depth |
| `PIX_CYC` | 9 | Star1000 pixel period in cycles |
| `ADC_LAT` | 3 | Star1000 ADC latency in pixel periods |

Synthesised as a generic netlist, the top level has about 470 word-level cells, 480
flip-flops and 2800 memory bits (the two FIFOs).

## What follows the source and what does not

Taken from the published description of the board:

* the sensor sizes and the 10-bit pixel depth;
* the Star1000 sequence steps and their order (row reset; row readout with S, Reset and
  R; Cal on the first row of a frame; column-wise pixel readout);
* every pulse width and delay in the table above;
* the 0.1024 ms row period and 104.8576 ms frame;
* the three-pixel ADC latency, read off the readout timing diagram;
* the 100 MHz clock;
* the 64 MB memory;
* the frame-valid / line-valid / pixel-clock interface of the CCD camera;
* windowing and sub-sampling, which the sensor supports.

Choices made in this design, where the source is silent:

* the 9-cycle pixel period;
* the position of Cal inside S, and the Ld_X width and polarity;
* the Clk_X / Clk_ADC duty cycle;
* the order of readout, reset and pixel readout inside a row period;
* the run-time settings and the stop command;
* the pixel-stream format and the one-pixel hold in the CCD capture;
* fv/lv polarity;
* the clock-domain crossing;
* the memory layout (one word per pixel, 2048-word stride) and the write port;
* the drop-on-overflow policy;
* how the sensor supply is switched;
* supporting both sensors behind one selector.

Not built:

* the soft processor and the image-processing software that runs on it (centroiding,
  star-pattern matching, attitude estimation);
* the SPI programming of the CCD timing generator, whose register contents are not
  known;
* the SDRAM, flash, SD card and UART controllers;
* the power sequencing;
* several windows in one Star1000 frame.

## Simulation

Every testbench checks itself and ends by printing
`TB_RESULT checks=<n> failures=<m>`. Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/img_pkg.sv tb/tb_image_proc_top.sv --top-module tb_image_proc_top -o sim
./obj_dir/sim
```

| testbench | what it exercises |
|---|---|
| `tb_star1000_ctrl` | 5 runs: small window, full 1024-column row at 0.1024 ms, stretched row period, sub-sampling, continuous run ended by stop. It checks every pixel value and flag, the row and frame period in cycles, the integration time, Cal and pulse counts. |
| `tb_uvccd_capture` | 6 frames of several sizes, including the full 1360-pixel line and a single pixel, plus a frame with capture disabled. It checks every pixel, its coordinates and flags. |
| `tb_frame_writer` | random input gaps and memory ready. It checks address, data and order against its own FIFO model, and covers overflow with drop count, clear, and request hold during stalls. |
| `tb_pix_async_fifo` | unrelated write and read clocks: fill to full with the reader stalled, overflow on one more write, drain in order to empty, then 3000 random words with random gaps on both sides. |
| `tb_image_proc_top` | the whole top level with default parameters: a full 1024 x 1024 Star1000 frame where each row integrates for 1024 row periods (busy time checked as 2 x 1024 row periods of 0.1024 ms), a full 1360 x 1024 CCD frame, switching sensors, an overflow under a memory stall, a stopped continuous run, and an ignored frame from the unselected sensor. About 35 million cycles, roughly 20 s. |

The sensor models in `tb/` compute pixel values with fixed formulas of column, row and
frame number, and the testbenches predict the data from the same formulas. The Star1000
model also checks the pin sequence: S before R for the same row, and Cal inside S. It
measures integration time from the pulses it sees.
