# Streaming Sobel edge detector for an ARM + FPGA SoC

This is a small image-processing core that finds edges in colour images
on the programmable logic of a Zynq-7000-class SoC. The ARM processor
sets the image size. A DMA engine streams the image from memory through
the core and writes the result back. The core does three things in
sequence:

1. It turns each colour pixel into grey, using the mean of R, G and B.
2. It applies the 3×3 Sobel operator to the grey image.
3. It packs four 8-bit edge pixels into each 32-bit word for the DMA.

The core handles one pixel per clock and keeps no image in memory. Only
the two previous rows are stored, in two small block RAMs. The 3×3
neighbourhood is kept in nine registers. Each pixel passes through a
four-step pipeline: input, window update, convolution and output.

The architecture follows a published comparison of hand-written HDL
against high-level synthesis, using a Sobel filter on a ZYBO (Zynq
XC7Z010) board. This RTL is a new SystemVerilog rendering of the
hand-written variant. The source fixes the structure: the blocks, the
two RAM line buffers, the nine-register window, the wiring between them
and the four one-cycle tasks. Many details are left open there: stream
formats, border handling, rounding and clamping, the register map and
back-pressure. Those choices are this implementation's own, and they are
listed in the section "What is specified and what is chosen".

```
            AXI4-Lite (from the processor)
                    |
              +-----------+   width, height, restart
              | axil_regs |--------------------------+
              +-----------+                          |
                    ^ frame_done                     v
 s_axis  +----------+   8-bit grey   +--------------+  8-bit edge  +---------+  m_axis
 ------->| rgb2gray |--------------->| sobel_filter |------------->| u8tou32 |------->
 32-bit  +----------+                +--------------+              +---------+ 32-bit
 1 px/word                                                                     4 px/word
```

`sobel_core` is the top module. On the board, its `s_axis` port is
connected to the DMA read (MM2S) channel, `m_axis` to the DMA write
(S2MM) channel, and `s_axil` to the processor's general-purpose AXI
port. The processor, the DMA engine and the DDR controller are not part
of this RTL.

## The filter: two line buffers and a window

The Sobel operator at a pixel needs that pixel's 3×3 neighbourhood. The
image arrives in raster order, one pixel at a time. So when pixel
(r, c) arrives, the filter must also have pixels from rows r-1 and r-2.
Two line buffers keep them:

* **LB2** holds row r-1, at one word per column.
* **LB1** holds row r-2.

Both are addressed by the column c of the incoming pixel. The grid below
shows what happens at column c. All reads and writes use the same
column address.

```
   read (task 1)            write (task 2)
   LB1[c] = p(r-2, c) ----> window top row
   LB2[c] = p(r-1, c) ----> window middle row, and LB1[c] <= p(r-1, c)
   new pixel p(r, c)  ----> window bottom row, and LB2[c] <= p(r, c)
```

The buffers move down one row at a time, one column at a time. LB2's old
word moves into LB1, and the new pixel moves into LB2. This way, three
rows are available with only two RAMs: the third row is the pixel
stream itself. The window (`sliding_window`) is three 3-stage shift
registers, one per row. Each register takes in one new column per
accepted pixel. After the shift, the window holds rows r-2..r and
columns c-2..c. `sobel_conv` turns that window into one edge value.

### The four tasks and their timing

Each task takes one clock. There are registers between the tasks, so
four pixels are in flight at once:

| clock                             | 0  | 1  | 2  | 3  | 4  |
|-----------------------------------|----|----|----|----|----|
| 1. take pixel, read LB1/LB2       | p1 | p2 | p3 | p4 | p5 |
| 2. shift window, write LB1/LB2    |    | p1 | p2 | p3 | p4 |
| 3. convolution (result registered)|    |    | p1 | p2 | p3 |
| 4. result offered on the output   |    |    |    | p1 | p2 |

* **Task 1.** Task 1 ends on the edge that accepts the pixel. On that
  edge, the pixel is registered and the block RAMs latch their words.
  The RAM read is synchronous.
* **Task 2.** Task 2 shifts the window and writes both RAMs at the
  pixel's column.
* **Task 3.** Task 3 evaluates the masks on the window and registers the
  result.
* **Task 4.** During task 4 that register drives `m_data`.

In short, a pixel accepted on edge N can be taken on edge N+3. Read and
write cannot collide. The next pixel reads column c+1 in the same cycle
that the current pixel writes column c. Column c is read again only one
row later.

The filter has one global stall. The signal `en = !m_valid || m_ready`
clocks all three stages, and also the RAM read and write enables. When
the output is offered and not taken, everything freezes, including the
RAM outputs, and `s_ready` goes low. Because of that freeze, the line
buffer has a read enable: the word read in task 1 must survive a stall
until task 2 uses it. Empty input cycles (`s_valid` low) move an invalid
slot down the pipeline. An invalid slot does not shift the window or
write the RAMs.

### What comes out, and where

The filter produces **one output pixel for every input pixel**, so the
output frame has the same size as the input frame. Output (r, c) is the
gradient of the window whose newest pixel is input (r, c). That window
is centred on (r-1, c-1). So the edge image comes out shifted down and
to the right by one pixel. The first two rows and the first two columns
are 0: for those outputs, the window would reach outside the image, or
wrap around into the end of the previous row. This is the simplest
streaming arrangement, and it needs no extra buffering or flushing at
the end of a frame. If software wants edges aligned with the input, it
can read the result one row and one column later.

The frame position (row, column) is counted inside the filter from the
`WIDTH` and `HEIGHT` registers. A frame ends on one of these:

* its last pixel;
* an input word marked `tlast`, if that comes first;
* a restart pulse from the control register.

The filter marks the frame's last output with `tlast`. `u8tou32`
forwards that mark on the word that holds the last pixel.

## Arithmetic

* **Grey.** `gray = floor((R + G + B) / 3)`. This uses a 10-bit sum and
  a division by the constant 3.
* **Masks.**

  ```
  Mh = | -1 -2 -1 |      Mv = | -1  0  1 |
       |  0  0  0 |           | -2  0  2 |
       |  1  2  1 |           | -1  0  1 |
  ```

  The rows run from top to bottom and the columns from left to right.
  The weights are 1 and 2, so the masks need only shifts and adds. No
  multipliers or DSP blocks are used.
* **Magnitude.** `|Gh| + |Gv|` replaces the square root of the sum of
  squares. Each term can reach 1020, so the sum can reach 2040. It is
  **clamped to 255** to fit the 8-bit output.

## Stream formats

| port     | word                                                                                         |
|----------|----------------------------------------------------------------------------------------------|
| `s_axis` | one colour pixel: R in [23:16], G in [15:8], B in [7:0]; [31:24] ignored                     |
| `m_axis` | four edge pixels, the earliest in [7:0] and the latest in [31:24]; `tlast` on the frame's last word |

A frame whose pixel count is not a multiple of 4 ends with a partial
word. The unused upper bytes of that word are zero. All four image sizes
below are multiples of 4.

`tready` goes backwards through all three blocks combinationally:
`s_axis_tready` depends on `m_axis_tready`. This keeps the design small.
At high clock rates, a register slice at the output of `sobel_core`
breaks that path.

## Control registers (AXI4-Lite, 4-bit byte address, 32-bit data)

| addr | name   | access | meaning |
|------|--------|--------|---------|
| 0x0  | CTRL   | W      | writing 1 to bit 0 restarts the frame position at row 0, column 0 (one-cycle pulse) |
| 0x4  | WIDTH  | RW     | image width in pixels, 2..`MAX_WIDTH`, reset 512 |
| 0x8  | HEIGHT | RW     | image height in pixels, reset 512 |
| 0xC  | STATUS | R      | number of frames completed since reset (counted on the last output word) |

Every response is OKAY, and writes to other addresses are ignored. The
slave takes a write when the address and the data are both valid, then
holds BVALID until BREADY. Change WIDTH and HEIGHT only between frames.
CTRL's restart clears only the filter's frame position. Use it to begin
a new frame after an aborted one, once the pipeline is empty.

## Sizes and performance

| parameter   | default | where                   | meaning |
|-------------|---------|-------------------------|---------|
| `MAX_WIDTH` | 2048    | `sobel_core`, `sobel_filter` | line-buffer depth, i.e. the widest row |
| `DEPTH`     | 2048    | `line_buffer`           | words per line buffer (8 bits each) |
| `PIX_W`, `DIM_W`, `AXIS_W` | 8, 16, 32 | `sobel_pkg` | pixel width, size-register width, stream width |

Each line buffer is 2048 × 8 bits. That is one 18-Kbit block RAM in its
2K × 9 shape, and the two together fit in one 36-Kbit block. The rest of
the core is about 300 flip-flops.

At one pixel per clock, a W × H frame takes W·H + 6 cycles from its
first input word to its last output word. The core was checked at the
four image sizes used to evaluate this architecture:

| image        | size        | fits (row ≤ 2048) | cycles at one pixel/clock |
|--------------|-------------|-------------------|---------------------------|
| Mandrill     | 512 × 512   | yes | 262 150   |
| Kodim23      | 768 × 512   | yes | 393 222   |
| Owl          | 1920 × 566  | yes | 1 086 726 |
| Lightbulbs   | 1920 × 1080 | yes | 2 073 606 |

On hardware, the time per frame is set by the DMA and memory system,
not by the core. The reference measurements come to about 22–28 ns per
pixel, but the clock frequency behind them is not known.

## What is specified and what is chosen

**Taken from the architecture description:**

* the chain RGB2GRAY → SOBEL FILTER → U8toU32, between AXI-Stream ports
  and with AXI-Lite control;
* grey as the arithmetic mean of the three components;
* two block-RAM line buffers, with ports D, W_Addr, W_en, R_Addr, R_en
  and Q;
* LB1 fed from LB2's output, and LB2 fed from the new pixel;
* the window as three shift registers of three registers, fed from LB1,
  LB2 and the new pixel;
* the four one-cycle tasks, pipelined;
* the two masks and the |Gh| + |Gv| magnitude;
* packing four 8-bit values into a 32-bit word.

**Chosen here:**

* the colour word layout;
* rounding the mean down;
* clamping the magnitude to 255;
* the one-output-per-input alignment, with the zero border;
* the global-stall back-pressure scheme;
* frame position taken from the size registers and from `tlast`;
* the byte order of the packed word, and the flush of a partial word;
* the whole AXI-Lite register map, with its reset values;
* the line-buffer depth of 2048;
* the read-first behaviour of the RAM on a same-address collision (the
  filter never causes one).

**Not included:**

* the high-level-synthesis variant of the filter. It uses three line
  buffers that move up one row for every pixel, and it produced the same
  images.
* the ARM processor, the AXI DMA engine, the DDR controller and the
  microSD storage, which are vendor parts or software.

## Files

| file | contents |
|------|----------|
| `rtl/sobel_pkg.sv`      | shared types (pixel, colour word) and register addresses |
| `rtl/rgb2gray.sv`       | colour → grey, one register stage |
| `rtl/line_buffer.sv`    | one row in a simple dual-port RAM, synchronous read with enable |
| `rtl/sliding_window.sv` | 3×3 window of shift registers |
| `rtl/sobel_conv.sv`     | masks, magnitude, clamp (combinational) |
| `rtl/sobel_filter.sv`   | line buffers + window + convolution, four-task pipeline, frame position |
| `rtl/u8tou32.sv`        | packs four pixels per 32-bit word |
| `rtl/axil_regs.sv`      | AXI4-Lite register slave |
| `rtl/sobel_core.sv`     | top level |
| `tb/tb_<block>.sv`      | self-checking testbench of each block |
| `tb/tb_sobel_core.sv`   | end-to-end test on small frames: back-pressure, gaps, size changes, early `tlast`, clamping, border |
| `tb/tb_sobel_core_full.sv` | end-to-end test at default parameters on 512×512, 768×512, 1920×566 and 1920×1080 frames |

The handshake rules are checked by assertions inside the RTL. An offered
stream word must stay stable until it is taken, and an AXI-Lite response
must stay until it is accepted.

## Simulating

Each testbench compares the outputs with a reference model written
independently inside the testbench. At the end it prints
`TB_RESULT checks=N failures=M`. A watchdog ends the run if it hangs.
To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/sobel_pkg.sv tb/tb_sobel_core.sv --top-module tb_sobel_core
./obj_dir/Vtb_sobel_core
```

Replace `tb_sobel_core` with any other testbench name. The full-size
test simulates about 5.4 million clocks, which takes a few seconds. The
testbenches use only two-state values and `$urandom`, and they read no
files.

The testbenches check these properties:

* the filter's latency of three edges and its rate of one pixel per
  clock, in `tb_sobel_filter`;
* the five-edge end-to-end latency of a full word, in `tb_sobel_core`;
* W·H + 6 cycles per full-rate frame, in `tb_sobel_core_full`.

## How far to trust it

Every block has been linted and elaborated by two SystemVerilog front
ends. Every block has been simulated against its own reference model,
and each testbench has been shown to fail on a deliberately broken copy
of its block. The design has not been run on an FPGA. The "Chosen here"
items are this implementation's own choices, and other choices would be
equally valid. In particular, border handling and the output alignment
are the first things to check before comparing results with another
Sobel implementation.
