# Streaming histogram equaliser for an FPGA video-inference pipeline

A CNN trained on well-lit pictures loses much of its accuracy on dim video.
One cheap fix is histogram equalisation: spread the few grey levels a dark
picture actually uses over the whole 0..255 range before the network sees it.
This RTL is the *video enhancement pipeline* (VEP) of a Zynq UltraScale+
MPSoC video system. In that system HDMI video lands in DDR frame buffers, a
video DMA engine streams each frame through the VEP and writes the enhanced
frame back to DDR, and from there it goes to the HDMI output and to a CNN
accelerator. The VEP is a daisy chain of enhancement IPs on AXI4-Stream. The
system this follows uses a single IP in it, the histogram equaliser
`histeq`.

```
  DDR ──AXI4──> VDMA read ──AXI4-Stream──> [ histeq ] ──> ... ──AXI4-Stream──> VDMA write ──AXI4──> DDR
                                               ^  rows / cols / reset
  PS ──AXI-Lite──> AXI-GPIO ───── gpio_o[31:0] ┘  (one word for every IP of the chain)
```

Only the part in brackets, and the chain around it, is logic given here. The
HDMI PHY, receiver and transmitter, the two video DMA engines, the AXI-GPIO,
the CNN accelerator (the DPU), the ARM processors and the DDR are vendor
parts. `vep_top` brings out their connections as ports: the two streams and
the GPIO word.

## How the equaliser works

### One frame late, by design

Equalisation needs the histogram of the whole picture before the first pixel
can be remapped. A streaming IP without its own frame buffer cannot wait for
that. `histeq` therefore remaps frame *n* with the table built from frame
*n − 1*. For video, where consecutive frames are nearly alike, the result is
almost the same. The first frame after a reset passes through unchanged,
because the table then holds the identity map.

Each pixel is 24 bits and is handled as three independent 8-bit channels.
Every channel has its own 256-bin histogram, its own 256-entry remap table
(LUT) and its own table builder (`histeq_channel`). The order of the colour
channels inside the 24 bits therefore does not matter.

### A frame's life

| phase | clocks | `s_axis_tready` | what happens |
|---|---|---|---|
| stream | rows × cols pixels (more if the source or sink pauses) | high when the output register can move | each pixel is looked up in the LUT (result one clock later) and counted into the histogram |
| flush | 1 | low | the last histogram write-back lands |
| build | 3 clocks per bin, 11 for bins that need a division; at most 256 × 11 = 2816 | low | the three channels rebuild their LUTs in parallel; the IP waits for the slowest |
| resume | 1 | low | back to streaming |

So the stall between frames is `2 + max over channels of Σ cost(bin)`: 2818
clocks at most. The IP finds the frame end by counting accepted pixels
against the programmed rows and columns. It does not use the stream's
`tuser` (start of frame) or `tlast` (end of line) to frame the picture. It
carries both through unchanged, aligned with their pixels.

### Building the table

The builder walks the bins from 0 to 255 and keeps the running sum `cdf`.
The first non-zero `cdf` is `cdf_min`, the number of pixels at the darkest
level present. With `N = rows × cols` each entry is

```
lut[v] = 0                                                     if cdf[v] == 0
lut[v] = v                                                     if N == cdf_min  (flat picture)
lut[v] = round( (cdf[v] − cdf_min) × 255 / (N − cdf_min) )     otherwise, halves up
```

The rounding is done in integers as
`((cdf − cdf_min)·510 + (N − cdf_min)) / (2·(N − cdf_min))`. Its quotient
can never exceed 255, so a restoring divider needs only eight steps, one per
quotient bit, MSB first. Each bin costs read, sum, eight divide steps and a
write: 11 clocks. Bins still below the darkest level, and every bin of a
flat picture, skip the divider: 3 clocks. Each bin is cleared as it is read,
so the histogram is empty when the next frame starts.

A frame darkened by a factor of 8 has every channel in 0..31. Its `cdf`
climbs from `cdf_min` to `N` over those 32 levels, and the table spreads
them back over 0..255. The testbenches check that such frames come out at
more than twice their input brightness.

### Counting one pixel per clock

The histogram and the LUT are 256-entry arrays with one write port and a
registered read. That is the shape of a block RAM, and synthesis keeps them
as memories. A count therefore takes two clocks: the bin is read on the
clock the pixel is accepted and written back one higher on the next. When a
bin repeats on consecutive pixels, the second read still returns the old
count. The write-back then takes the count just written (`fwd_cnt`) instead
of the stale read. Dark and flat pictures have long runs of equal values, so
this path is exercised all the time.

### Flow control

The output is a single register. The whole IP advances when that register
is empty or being taken (`adv = !m_axis_tvalid || m_axis_tready`). The input
is ready when the IP is streaming and can advance. Data take one clock from
the input handshake to the output, and the rate is one pixel per clock while
the sink keeps up. A beat presented on the output stays until it is taken;
an assertion in `histeq` checks this.

## Control word

One 32-bit AXI-GPIO output word configures every IP in the chain. It has a
12-bit row count, a 12-bit column count and a reset bit; bits 31:25 are
unused.

| bits | field | meaning |
|---|---|---|
| 11:0 | `rows` | lines per frame, 1..1080 |
| 23:12 | `cols` | pixels per line, 1..1920 |
| 24 | `reset` | 1 holds every IP in reset |

To change the resolution, set `reset`, write the new size, then clear
`reset`. The IP samples the size while the reset bit is held and on the
clock it is released. It then spends 256 clocks clearing its histogram and
loading the identity LUT, and only then raises `s_axis_tready`. The reset
bit passes a two-flop synchroniser, so the GPIO may sit on another clock.
The size fields are not synchronised; they must be steady by the time the
reset bit falls. A reset drops whatever beat sits in the output register.

## Throughput at 1080p

A 1920 × 1080 frame is 2,073,600 pixels. With the worst stall of 2818 clocks
a frame takes 2,076,418 clocks, which is 72.2 frames/s at the IP's 150 MHz
clock. 1080p60 needs 60. The 12-bit size fields go up to 4095, but the pixel
counters are sized for 1920 × 1080: they are 21 bits wide, which is
2,097,151 pixels. A larger `rows × cols` wraps the counts unless
`MAX_ROWS`/`MAX_COLS` are raised.

## Modules

| file | what it is |
|---|---|
| `rtl/histeq_pkg.sv` | widths, the 1080p limit, the GPIO word as a packed struct |
| `rtl/histeq_channel.sv` | one colour channel: histogram with forwarding, LUT, serial table builder, init |
| `rtl/histeq.sv` | the equaliser IP: pixel counting, frame sequencing, AXI4-Stream in/out, reset synchroniser |
| `rtl/vep_top.sv` | the enhancement pipeline: GPIO decode and a chain of `N_ENH` equalisers (default 1) |
| `tb/tb_histeq_channel.sv` | unit test of one channel at its default 21-bit counts |
| `tb/tb_histeq.sv` | equaliser test at a 16 × 16 maximum frame |
| `tb/vep_env.sv` | shared stimulus and reference model for the pipeline tests |
| `tb/tb_vep_top.sv` | pipeline test, one IP and a chain of two, 32 × 32 maximum frame |
| `tb/tb_vep_images.sv` | pipeline at its defaults on dimmed still pictures of 640 × 480 and 500 × 375 |
| `tb/tb_vep_full.sv` | pipeline at its defaults: three 1920 × 1080 frames |

Parameters: `histeq` takes `ROW_W`/`COL_W` (12), `MAX_ROWS`/`MAX_COLS`
(1080/1920), `PIX_W` (8) and `CHANNELS` (3); `vep_top` takes `N_ENH` (1) and
`MAX_ROWS`/`MAX_COLS`. The memories total 3 × 256 × (21 + 8) = 22,272 bits
at the defaults.

## What follows the published system and what does not

The following come from the published system: histogram equalisation as the
enhancement; an AXI4-Stream IP with 24-bit pixels; 12-bit row and column
inputs and a reset bit, 25 of the 32 GPIO bits; the rule that the IP is
reset while its size changes; the 1080p limit; the 150 MHz clock; one GPIO
word for a daisy chain of enhancement IPs, of which one is fitted.

The published description says nothing about the IP's insides. Everything
below is this design's own choice:

- the table from the previous frame, the identity table after reset and the
  stall between frames;
- equalising each colour channel separately, rather than luminance;
- the rounding of the mapping, the identity map for a flat picture and
  0 for levels below the darkest one present;
- the memory organisation, the forwarding and the eight-step divider;
- framing by pixel count, with `tuser`/`tlast` only carried through;
- the GPIO bit positions, the active-high reset and its synchroniser;
- a single clock for the pipeline. The video DMA engine's stream side is
  assumed to run on the 150 MHz IP clock, the DMA engine crossing to its
  300 MHz memory side itself. No clock-domain crossing FIFO is included.

Everything else in the system is not given here: the CNN accelerator, the
HDMI path, the DMA engines and their four-frame buffers, and all the
software on the ARM cores. The software includes the asynchronous,
synchronous and pipelined ways of feeding frames to the accelerator, the
pre- and post-processing and the overlay.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog. The reference model in the testbenches is written separately
from the RTL. It builds the tables with a quotient-and-remainder rounding
test rather than the RTL's doubled-numerator form, and it follows every
pixel through the chain of stages. Every output beat is compared, data,
`tuser` and `tlast`.

- `tb_histeq_channel`: one channel on its own. It checks the init time
  (256 clocks) and the identity table. It then builds a 5000-pixel histogram
  with back-to-back repeats and repeats one clock apart, and a full
  2,073,600-pixel histogram. After each build it checks the busy time (the
  sum of the per-bin costs) and all 256 table entries. Last, it starts an
  init in the middle of a build.
- `tb_histeq`: 6 × 10 frames with random input gaps and output
  back-pressure, then a resize through the reset bit to 16 × 16 at full
  rate, then a reset that lands in the middle of a table build and a
  5 × 7 segment after it. Frames are noise, noise darkened by 8, dark runs
  of repeated pixels and flat frames. It checks the exact stall length after every frame, the
  one-clock latency and the rate of n pixels in n clocks. It also fails if
  any of these never happened: back-pressure, gaps, repeats, a flat frame,
  the resize or the reset during a build.
- `tb_vep_top`: the same kind of run through `vep_top` and the GPIO word,
  side by side for `N_ENH = 1` and `N_ENH = 2`. With two, the second
  equaliser is equalising the first one's output. It also checks that dark
  frames come out brighter.
- `tb_vep_images`: the dim-picture experiment the pipeline exists for.
  `vep_top` runs at its defaults. It gets a 640 × 480 picture, then, after a
  resize, a 500 × 375 picture; these are typical detection and
  classification dataset sizes. Each picture is a textured gradient divided
  by 8 and is sent twice, so the second pass is equalised with the picture's
  own histogram. The mean level goes from 15.3 to 132.5 (out of 255).
- `tb_vep_full`: `vep_top` at its defaults, programmed for 1080 × 1920. It
  streams three frames (a dim gradient, dim noise, the gradient again) and
  checks all 6.2 million output pixels, the rate and the stalls. It runs in
  a few seconds.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_vep_full \
    -Irtl -Itb rtl/histeq_pkg.sv rtl/histeq_channel.sv rtl/histeq.sv \
    rtl/vep_top.sv tb/vep_env.sv tb/tb_vep_full.sv
./obj_dir/Vtb_vep_full
```

For `tb_histeq`, list only the package, `histeq_channel`, `histeq` and the
testbench.

Not verified: timing closure at 150 MHz, behaviour on real hardware, and
operation together with the vendor DMA engine.
