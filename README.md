# Skin detection on live video with a 7 × 7 binary erosion

This design takes a live 640 × 480 video stream from an OV7670 camera,
marks every pixel as skin or not skin by its colour, cleans the resulting
binary image with a 7 × 7 majority filter, and shows the result on a VGA
monitor in real time. It is written as a chain of small blocks that each
handle one pixel per clock. Nothing is stored except one bit per pixel and
six lines of binary image, so the design needs very little memory. The
filter is a moving-window operator: a pixel stays skin only if more than 37
of the 49 pixels in the 7 × 7 window around it are skin. This is a kind of
erosion. It removes isolated skin-coloured noise and shrinks skin regions,
and it is the first step of a face detector.

The structure, the sizes and the thresholds come from the paper "Real Time
Implementation of Spatial Filtering On FPGA" (C. Supe). That paper built the
design on a Zynq board with vendor FIFO and block-RAM cores. The RTL here is
a plain SystemVerilog rendering of it. Where the paper gives no detail, this
design makes its own choice, and each such choice is named below.

## Data path

```
 camera side (PCLK)                                display side (25 MHz clk)
 ------------------                                -------------------------
 OV7670 bytes ─► ov7670_capture ─► thresholding ─► frame_buffer ─► spatial_filter ─► vga_controller ─► VGA
                 RGB444 pixel      skin bit        307200 x 1      window_generator    syncs, 12-bit
                 + address         (U = R - G)     dual clock      + window_operator   colour
```

`skin_detect_top` wires these together. The frame buffer is the only link
between the two clock domains. The camera writes it in camera order and the
display reads it in display order, each on its own clock.

| block | what it does | latency |
|---|---|---|
| `ov7670_capture` | joins the two camera bytes of a pixel (`xxxxRRRR`, `GGGGBBBB`) into a 12-bit RGB444 word; counts the pixel address, which is cleared by VSYNC | 1 PCLK after the second byte |
| `rct_yuv` | RGB → YUV by the reversible component transform: Y = ⌊(R+2G+B)/4⌋, U = R − G, V = B − G | combinational |
| `thresholding` | skin = 1 when 10 < U < 74 on the 8-bit scale | 1 clock |
| `frame_buffer` | one bit per pixel, write port and read port on separate clocks | read: 1 clock |
| `row_fifo` | 1-bit FIFO, 1024 deep, 10-bit `data_count` | read: 1 clock |
| `window_generator` | 43 registers and 6 row FIFOs giving all 49 window bits at once | 1 clock |
| `window_operator` | adds the 49 bits and outputs `sum > 37`; holds the output at 0 for the first 48 windows | 1 clock |
| `spatial_filter` | window generator followed by window operator | 2 clocks |
| `vga_controller` | 640 × 480 @ 60 Hz timing, read address, white/black colour | outputs 4 clocks after the address |

`sf_pkg` holds the shared constants (frame size, window size, thresholds,
VGA timing) and the `rgb444_t` / `yuv_t` pixel types.

## The colour test

The camera is set up to send RGB444, with 4 bits per colour, because the
board's VGA port has 4 bits per colour. Skin has more red than green whatever
its brightness. The test therefore uses only U = R − G, which is one
component of the reversible component transform. Y (brightness) and V are
computed but not used. The skin range 10 < U < 74 is given on the usual
8-bit scale. `thresholding` scales the 4-bit difference back up by shifting
it left four bits, and then compares it with 10 and 74. This keeps those two
numbers as the parameters `U_LO_8` and `U_HI_8`. In effect a pixel is skin
when R − G is 1, 2, 3 or 4. The paper says the range was converted to 4 bits
but does not print the converted bounds, nor the RCT equations. The equations
used here are the standard RCT.

Because `thresholding` registers its output, the top delays the capture
block's address and write enable by one PCLK. Each skin bit then lands at
its own pixel's address. The paper's schematic wires the address straight
through.

## The window generator

This is the part of the design that needs the most care. The pixels arrive
as a single raster-order stream. A 7 × 7 window needs pixels from seven
consecutive rows at once. So six rows of history have to be kept, and the
taps have to be spaced exactly one row apart.

```
pixel ─► r1 ─► r2 ─► ... ─► r7 ─┐            row 1:  w11 .. w17  (7 registers)
          w11   w12          w17 │
 ┌───────────────────────────────┘
 └► FIFO1 ─► r8 ─► ... ─► r13 ─┐             row 2:  w21 = FIFO1 output, w22 .. w27
     w21      w22         w27  │
 ┌─────────────────────────────┘
 ...
 └► FIFO6 ─► r38 ─► ... ─► r43               row 7:  w71 .. w77
```

Each row of the window is a tap line of 7 pixels. Row 1 is seven registers.
Every later row starts with a FIFO, whose registered output is the first tap,
followed by six registers. The FIFO in front of a row has to make up the rest
of a 640-pixel line. The FIFO's input is the last tap of the row above,
which lies 7 pixels behind that row's first tap. So the delay through the
FIFO must be 640 − 7 = 633 pixels, plus its one output register. Each FIFO
therefore holds **633 words**, as the paper says. This needs a memory deeper
than 633, hence 1024.

The FIFO control follows the paper's rule:

* FIFO 1 is written on every pixel.
* Each FIFO is read on every pixel once its `data_count` has reached the
  fill level.
* The next FIFO is written whenever this one is read.

After start-up each FIFO holds a constant 633 words, so the row spacing is
exact. The paper uses a fill level of 631 rather than 633. It explains that
the difference compensates for a two-cycle latency, which comes from its
vendor FIFO's data count. The `row_fifo` here updates `data_count` on the
same clock edge as the write, so its fill level is 633 (`FIFO_FILL =
ROW_LEN - N`). That value gives the 633 stored words and the 640-pixel
spacing that the paper describes. `tb_window_generator` checks every tap
against a delay-line model at the full row length. A fill level of 634 fails
that test.

After pixel x[j] has been accepted, tap `win[r][c]` (the paper's
w(r+1)(c+1)) holds x[j − c − 640·r]. So the window ends at the newest
pixel, and its centre w44 is 3 rows and 3 columns back.

Two choices here go beyond the paper:

* **Only valid pixels move the pipeline.** The display reads the frame
  buffer only during the 640 × 480 active area. `pix_valid` is high for
  those clocks, and the registers and FIFOs advance only then. Blanking
  therefore never enters the row delay, and a "row" is always 640 pixels.
  The paper states the 640-pixel row length but does not mention blanking.
* **No border handling.** At the left and right edges the window wraps onto
  the neighbouring row. At the top of the stream it sees zeros from reset.
  After the first frame the window runs on from the end of one frame into the
  start of the next. The paper does not treat borders either. Along the
  image edges up to 6 columns and rows of output mix pixels from far apart.

## The window operator

The operator adds all 49 window bits in one adder tree and registers
`sum > 37` as the output pixel. The paper states the rule two ways. It says
"more than 75 %, i.e. 37" of the neighbours, which would mean sum ≥ 37. It
also says "sum is greater than 37", which means sum ≥ 38. This design
follows the second, which describes the module as built. The threshold is
the parameter `THRESH`.

A data-valid counter forces the output to 0 for the first 48 windows after
reset, and then stays high. The paper counts "48 clock cycles". Here the
count is of valid windows, since the pipeline pauses in blanking. With
zeros in the history the sum cannot pass 37 that early anyway, so the
hold-off changes nothing that can be seen. It is kept because the paper has
it.

## Display and alignment

`vga_controller` produces standard 640 × 480 @ 60 Hz timing from the 25 MHz
clock: 800 clocks per line with a 96-clock hsync, and 525 lines per frame
with a 2-line vsync. Both syncs are active low. These timing numbers are
standard VGA, not from the paper. During the active area the controller
steps `rdaddress` through 0 … 307199. The path back to the colour output
has these stages:

| clock | stage |
|---|---|
| t | `rdaddress` presented |
| t+1 | `frame_buffer.q` valid, `pix_valid` high |
| t+2 | window registers hold the new window |
| t+3 | `window_operator` output |
| t+4 | registered VGA outputs |

The controller delays hsync, vsync and its active flag by the same 3 clocks
(`LATENCY`), so the colour and the syncs leave together. A filtered 1 is
white (`0xFFF`) and 0 is black. An assertion in the top checks that the
filter's valid flag arrives exactly 3 clocks after the read request.

The window ends at the pixel being displayed, so the filtered image sits
3 pixels right of and 3 lines below the camera image. The paper does not
discuss this offset, and nothing here corrects it.

## Clocks and resets

The camera side (`ov7670_capture`, `thresholding`, the frame buffer's write
port) runs on the camera's PCLK. The display side runs on `clk`, the 25 MHz
pixel clock. The frame buffer is the only crossing. It promises nothing
about a word that is written and read in the same moment. The display shows
whatever the camera last wrote, and a moving scene can tear. Each domain has
its own synchronous, active-high reset (`ov_rst`, `rst`). The paper does
not mention reset.

The following are outside this RTL:

* generating the 25 MHz clock and the camera's XCLK;
* the SCCB (I²C-like) register writes that put the OV7670 into RGB444 mode.

The paper takes the camera set-up from elsewhere and gives no register
values.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `W`, `H` (top), `ROW_LEN`, `FRAME_PIXELS`, `WORDS` | 640, 480, 640, 307200, 307200 | frame size |
| `N` | 7 | window size; N − 1 row FIFOs |
| `FIFO_FILL` | `ROW_LEN - N` = 633 | words each row FIFO holds |
| `DEPTH`, `CW` | 1024, 10 | row FIFO depth and count width |
| `THRESH` | 37 | output 1 when sum > THRESH |
| `DV_CYCLES` | 48 | windows held at 0 after reset |
| `U_LO_8`, `U_HI_8` | 10, 74 | skin range of U, 8-bit scale, exclusive |
| VGA porches/pulses | 16/96/48, 10/2/33 | standard 640 × 480 @ 60 Hz |

All of these defaults are the paper's numbers, except the VGA timing.
Smaller frames work too: `tb_skin_detect_top` runs the whole design at
24 × 16 with short blanking.

On memory: the paper reports 3 block RAMs for its window generator. Here the
six FIFOs are 6 × 1024 bits, and the frame buffer is 307200 bits. How these
map onto block RAMs depends on the synthesis tool.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the
block with a model written independently in the testbench and ends by
printing `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_rct_yuv` | all 4096 inputs against the RCT equations |
| `tb_thresholding` | all 4096 inputs, skin rule and one-clock latency |
| `tb_ov7670_capture` | every write's address and pixel, W·H writes per frame, address restart on VSYNC, no writes past the frame |
| `tb_frame_buffer` | full 307200-bit memory, two unrelated clocks, read latency |
| `tb_row_fifo` | random traffic against a queue model, through full and empty |
| `tb_window_generator` | all 49 taps after every pixel, 640-pixel rows, random idle clocks |
| `tb_window_operator` | random windows near the threshold, sums 37 and 38, the 48-window hold-off |
| `tb_spatial_filter` | output stream against the 7 × 7 rule at full row length |
| `tb_vga_controller` | two full frames: address, sync positions and widths, 3-clock pixel latency |
| `tb_skin_detect_top` | end to end at 24 × 16 over three displayed frames, every VGA output on every clock |
| `tb_skin_detect_top_full` | end to end at the default 640 × 480: one captured frame, then one full displayed frame |

The end-to-end tests (`top_tb_body.svh`) drive the design from a
behavioural camera model, `ov7670_model`. The picture is two skin
rectangles with salt-and-pepper noise. The tests first compare the frame
buffer with the skin mask of that picture. They then check every VGA
output against the window rule applied to the stream of pixels the display
has read. They also count how often each mechanism occurs and fail if one
never does. The mechanisms are skin and non-skin pixels, pixels kept and
eroded, the data-valid release, a row FIFO reaching its fill level, the
filter pausing in blanking, the camera address restart, and the frames
displayed.

To run a testbench with Verilator from the folder that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/sf_pkg.sv tb/tb_img_pkg.sv tb/tb_skin_detect_top_full.sv \
    --top-module tb_skin_detect_top_full -o sim
./obj_dir/sim
```

The full-size run takes about a second. Any other testbench runs the same
way: replace the last file and `--top-module`.
