# A streaming ENet for real-time semantic segmentation, in SystemVerilog

This design labels every pixel of a 240 x 152 camera image as background, road,
car or person. It is a compressed ENet. Every layer of the network is its own
hardware unit, and the pixels stream through all units at once, in raster
order. No frame is ever stored. Each convolution keeps only the few image rows
its kernel needs, in shift-register line buffers. That is why the whole network
fits on one FPGA with no external memory.

The RTL follows the EnetHQ configuration of Ghielmetti et al., *Real-time
semantic segmentation on FPGAs for autonomous vehicles with hls4ml*. The
original was generated by the hls4ml high-level-synthesis flow. This is a
hand-written register-transfer version of the same architecture. Where the
publication leaves something open (number formats, weights, handshakes, FIFO
placement), this code makes its own choice. The section "Departures and own
choices" lists them all.

## The network

The network is a chain of stages. In the table, H = 152 and W = 240. The
channel counts f0..f5 = 8, 2, 4, 8, 4, 3 are those of EnetHQ, and every
convolution has the batch-norm folded into its weights and bias.

| stage | unit | what it does | output (channels x rows x cols) |
|---|---|---|---|
| 0 | `initial_block` | Maxpool 2, then Pad 2 and a 3x3 conv to f0-3 channels; these are concatenated with the 3 pooled colour channels, then ReLU | 8 x 76 x 120 |
| 1-3 | `bottleneck` x3 | block 1; the first one down-samples | 2 x 38 x 60 |
| 4-6 | `bottleneck` x3 | block 2; the first one down-samples | 4 x 19 x 30 |
| 7-9 | `bottleneck` x3 | block 3; all regular | 8 x 19 x 30 |
| 10-12 | `bottleneck` x3 | block 4; the first one up-samples | 4 x 38 x 60 |
| 13-15 | `bottleneck` x3 | block 5; the first one up-samples | 3 x 76 x 120 |
| final | `final_block` | Upsample 2, Pad 1, 2x2 conv to 4 class scores | 4 x 152 x 240 |

A bottleneck has a main branch and a skip branch. It adds the two and applies
a ReLU. In each variant, every convolution has F output channels:

```
down:    Maxpool(2) -> fork
regular:              fork
up:                   fork
  main:  Pad(1) Conv2x2+ReLU [Upsample(2) if up] Pad(2) Conv3x3+ReLU Conv1x1
  skip:  Conv1x1 [Upsample(2) if up] -> FIFO
  join:  Add, ReLU
```

"Pad(p)" adds p zero columns on the right and p zero rows at the bottom. A
K x K convolution without padding then keeps the image size when it follows
Pad(K-1). No layer has a stride, a dilation or an asymmetric kernel. The only
layers that change the resolution are the max pools and the upsamplers.

## Streams and numbers

Every unit has valid/ready streams on both sides. A transfer carries one pixel
with all of its channels: channel c sits in bits `[c*9 +: 9]`. A transfer
happens on a rising clock edge where both valid and ready are high. Reset
(`rst_n`) is asynchronous and active low. It clears the counters and state
machines. The data registers are not reset.

Activations are 9-bit signed fixed-point numbers with 8 fractional bits, so
they cover [-1, 1) in steps of 1/256. At the input, a colour value v (0..255)
becomes v/256. After a ReLU the sign bit is zero, and the value is the 8-bit
unsigned format of the input. Only three kinds of value can be negative: the
output of a bottleneck's last 1x1 convolutions before the Add, the outputs of
the initial convolution before its ReLU, and the class scores. That is what
the sign bit is for.

Weights are signed 8-bit numbers with 7 fractional bits. Each merged
batch-norm offset is a bias at the accumulator scale (15 fractional bits). A
convolution accumulates in 32 bits and drops the 7 extra fractional bits by
truncation (a floor). It saturates the result to 9 bits and then applies the
optional ReLU. A skip addition saturates too. All of this lives in `enet_pkg`.

The trained weights were never published. `enet_pkg::conv_weight` and
`conv_bias` therefore produce a fixed pseudo-random set for each layer. A
32-bit integer hash of the layer's seed and the weight index gives the value,
scaled to a bound that falls with the fan-in. Every convolution gets its seed
from its stage:

- a bottleneck at stage s uses 16·(s+1) + 1..4, for its 2x2, 3x3, main 1x1
  and skip 1x1 convolutions;
- the initial convolution uses 17;
- the final convolution uses 16·99 + 1.

To run real weights, replace those two functions. They are only evaluated at
elaboration time, to fill the constant ROMs of each layer.

## The line-buffer convolution

`conv2d_stream` is the core of the design, and it is the part hardest to read
from the code alone.

**Line buffer.** `line_buffer` chains K-1 shift registers, each exactly one
image row (W pixels) long. A new pixel enters the first register. The pixel
that falls out of the far end is the one pushed W pixels earlier: the pixel
directly above the new one. It enters the second register, whose own output
is the pixel two rows above, and so on. The new pixel and the K-1 popped
pixels form one column of the image. That column is shifted into the right
edge of a K x K window register, and the leftmost column drops out. All of
this happens in the cycle of the push. After the push of the pixel at (row,
col), the window holds the K x K square whose bottom-right corner is that
pixel.

A layer with K-1 rows of storage needs (K-1)·W·C activations of buffer. A
window-replicating implementation needs K² buffers of depth K·(W-K+1).

**Counters.** Row and column counters follow the input. The window is a
complete convolution position when row ≥ K-1 and col ≥ K-1. Only then does the
layer compute an output, so the valid convolution of an H x W input has
(H-K+1) x (W-K+1) outputs. The counters wrap at the end of the image. The
first K-1 rows of the next image refill the registers before anything is
computed from them, so images can follow each other with no gap and with no
clearing of the buffer.

**Reuse factor.** The multipliers are time-shared by the reuse factor RF (6
by default). Each output channel has ceil(K·K·CIN / RF) multipliers. Its
K·K·CIN products are accumulated over STEPS = min(RF, K·K·CIN) cycles. In
step s, multiplier m handles product m·STEPS + s.

The state machine has three states:

- `S_IN`: accept a pixel and push it.
- `S_CALC`: run the STEPS accumulation cycles. The accumulator starts at the
  bias.
- `S_OUT`: hold the result until the consumer takes it.

In steady state an output therefore costs STEPS + 2 cycles (8 with the
defaults). A pixel that completes no window costs one cycle. `in_ready` is
driven by the state register alone, so there is no combinational path from
`out_ready` back to `in_ready`.

The same line buffer with K = 2 serves `maxpool2d_stream`. That module emits
the channel-wise maximum of the window after every pixel in an odd row and an
odd column.

## Skip branches and their FIFOs

Both branches of a bottleneck see the same pixels, but they answer at very
different times. The skip branch (a 1x1 convolution) produces its first
result almost at once. The main branch must first fill the line buffers of
its 2x2 and 3x3 convolutions, which takes about three rows. The Add can only
consume pairs. So without storage, the skip branch would stall, the fork in
front of both branches would stall with it, and the main branch would never
fill up: a deadlock.

A FIFO at the end of the skip branch prevents this. `enet_pkg::skip_fifo_depth`
sets its depth:

- 4·W_out + 16 entries in general;
- 6·W_out + 16 entries when the bottleneck up-samples, because the skip branch
  then emits every row twice before the main branch's 3x3 window is full.

The initial block has such a FIFO for its pooled colour channels.

`stream_fork` hands each pixel to both branches independently. A flag records
which branch has already taken the pixel, so neither output's valid waits on
the other branch's ready.

Every `stream_fifo` records its high-water mark (`max_occ`). `enet_top` brings
the 16 skip-FIFO marks out as `skip_max_occ`. The original flow sized its
FIFOs the same way: simulate, record each FIFO's maximum occupancy, shrink the
FIFO to it. For a full 240 x 152 image the marks run from 97 (stages 4-9) to
609 (stage 13, depth 736). Stage 0 reaches 244 of 496. These depths could
therefore be cut to the measured values plus a margin.

## Upsampling and padding

`upsample2d_stream` repeats each pixel into a 2 x 2 square (nearest
neighbour). On the first pass over a row, it sends each input pixel twice and
also writes it into a one-row buffer. On the second pass, it replays the row
from that buffer, again twice per pixel, and takes no input.

`zero_pad_stream` counts through the padded image. Inside the original area
the stream passes straight through, combinationally. Outside it, the module
emits zeros without taking input.

`merge_relu_stream` performs the join. It takes one pixel from each branch in
the same cycle, then either adds them (saturating) or concatenates their
channels, and finally applies the ReLU.

## Performance

All figures are from simulating the default configuration with one pixel
offered per cycle:

- Latency from the first input pixel to the last class score: 404,739 cycles.
  That is 2.83 ms at the 7 ns clock the original targeted. The original
  measured 4.9 ms on the board, including data transfer.
- Throughput is set by the final 2x2 convolution, which works at full
  resolution. It takes 36,480 outputs at 8 cycles each, so consecutive images
  follow about 298,000 cycles apart.
- Two images back to back take 702,933 cycles. A batch of ten would need
  about 3.1 M cycles (21.6 ms at 7 ns), against 30.6 ms measured in the
  original.

To run faster, lower RF. That adds multipliers to every convolution and
shortens the 8-cycle output time.

## Departures and own choices

- **FIFOs only where needed.** The FIFOs sit on the skip branches only. The
  original joined every pair of layers with a FIFO. Here the other layers
  connect directly through their valid/ready handshakes.
- **Where the resolution changes.** Each block has three bottlenecks, but its
  resolution changes only once. The first bottleneck of a block is the one
  that pools or up-samples; the other two are regular.
- **Pad(1) in the decoder.** The decoder diagram of the original shows no
  padding before the up-sampling bottleneck's 2x2 convolution. Without it the
  main branch would come out two pixels smaller than the skip branch, so a
  Pad(1) is used, as in the encoder.
- **1x1 convolution on every skip branch.** The skip branch always has its
  1x1 convolution, as drawn, even where the input and output channel counts
  are equal.
- **Initial convolution width.** It has f0 - 3 = 5 filters. The drawing's
  Conv(3,29) is the same rule for the baseline with f0 = 32.
- **Concatenation order.** The concatenation puts the convolution channels
  first and the pooled colour channels after them.
- **Number format.** One 8-bit width is used everywhere. The per-layer bit
  widths of EnetHQ (heterogeneous, 4 or 8 bits) are not published. The
  rounding and saturation behaviour (floor, saturate) is also this design's
  choice.
- **Weights.** The weights are generated, not trained (see above).
- **Image orientation.** The image is 240 pixels wide and 152 high.
- **Upsampling method.** Upsampling is nearest neighbour.
- **Class decision.** The outputs are the raw class scores; no arg-max is
  built.
- **Not part of this RTL.** The host processor and the data movers that feed
  the accelerator on the board are not part of this RTL. The pixel and score
  streams are the top-level ports.

## Files

| file | contents |
|---|---|
| `rtl/enet_pkg.sv` | formats, EnetHQ constants, enums, weight functions, FIFO depth rule |
| `rtl/line_buffer.sv` | K-1 row shift registers and K x K window |
| `rtl/conv2d_stream.sv` | convolution + merged batch norm + ReLU, reuse factor |
| `rtl/maxpool2d_stream.sv`, `upsample2d_stream.sv`, `zero_pad_stream.sv` | resampling and padding layers |
| `rtl/merge_relu_stream.sv`, `stream_fork.sv`, `stream_fifo.sv` | branch join, branch split, FIFO with high-water mark |
| `rtl/initial_block.sv`, `bottleneck.sv`, `final_block.sv` | the network's blocks |
| `rtl/enet_top.sv` | the whole network |
| `tb/enet_ref_pkg.sv` | whole-tensor reference model of every layer and the network |
| `tb/tb_*.sv` | one self-checking testbench per unit, plus two for the whole network |

`enet_top` has parameters for the image size (H, W, each a multiple of 8), the
filter counts F0..F5 and the reuse factor RF. Other configurations of the same
network family can be built by overriding these parameters.

## Simulating

With Verilator 5, the full network at its default size runs like this:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/enet_pkg.sv tb/enet_ref_pkg.sv tb/tb_enet_top_full.sv \
    --top-module tb_enet_top_full -j 8
./obj_dir/Vtb_enet_top_full
```

It streams two full images and checks all 72,960 score pixels against the
reference model. The build takes well under a minute, and the run takes about
ten seconds. `tb_enet_top` does the same on three 16 x 24 images, with random
gaps on the input and random back-pressure on the output. Every unit's
testbench is built the same way: name it as the top module, and add the two
packages.

Each testbench ends with a line `TB_RESULT checks=N failures=M`. A watchdog
ends it with a failure if the outputs stop arriving.

## How far it is verified

- **Per-unit checks.** Each streaming unit is compared pixel by pixel with
  `enet_ref_pkg`. That package computes whole tensors with plain loops and
  shares only the weight values with the RTL. The inputs are random images,
  and the handshakes see random gaps and random back-pressure.
- **Timing.** The convolution testbench also checks the RF+2-cycle output
  interval.
- **Whole network.** The network testbenches check that:
  - images overlap in the pipeline;
  - input stalls and output back-pressure both occur;
  - every skip FIFO gets used;
  - the single-image latency stays below 700,000 cycles (4.9 ms at 7 ns);
  - a batch finishes faster than the same images one at a time.
- **Fault tests.** For each unit, a deliberately broken copy was checked
  against its testbench, and every one of those copies failed.
- **Not verified.** Nothing here has been synthesised for an FPGA, and the
  generated weights say nothing about segmentation accuracy.
