# A streaming ResNet8 accelerator with packed 8-bit MACs

This is synthesizable SystemVerilog for a CIFAR-10 ResNet8 inference engine
in which **every layer is its own piece of hardware**. Layers run
concurrently and pass activations to each other through small valid/ready
FIFOs ("streams"). No central controller, instruction stream or shared
activation memory exists. A frame enters as a stream of pixels and leaves as
ten class scores. Meanwhile the next frame is already flowing through the
earlier layers.

Three ideas make such a design fit on a small FPGA:

* **Two multiplications per DSP.** A 27x18 DSP multiplier computes
  `((a << 18) + d) * b`. That one product holds both `a*b` and `d*b`. So one
  weight is applied to two neighbouring output pixels at once.
* **Window buffers made of FIFO slices.** Each convolution keeps only the
  rows of its input that a 3x3 window can still reach. The storage is a
  chain of small circular buffers, not a full frame buffer.
* **Cheap residual connections.** The shortcut branch re-uses the data that
  the first convolution of the block is already buffering. The residual
  addition is folded into the initial value of the second convolution's
  accumulators. In the blocks that downsample, the 1x1 stride-2 shortcut
  convolution shares the strided windows of the main branch.

All arithmetic is 8-bit: int8 activations, int8 weights, int16 biases and
32-bit accumulators. Scaling between layers uses power-of-two shifts.

## The network as built

`resnet8_top` instantiates the following chain. `OP` is the number of output
channels computed in parallel (`och_par`). `cycles` is the number of issue
cycles per frame when nothing stalls.

| instance | operation | in -> out | OP | shift | cycles/frame |
|---|---|---|---|---|---|
| `u_l0`   | 3x3 conv, ReLU | 32x32x3 -> 32x32x16 | 4 | 9 | 6144 |
| `u_b1c0` | 3x3 conv, ReLU, forwards its input | 32x32x16 -> 32x32x16 | 16 | 10 | 8192 |
| `u_b1c1` | 3x3 conv + shortcut, ReLU | 32x32x16 -> 32x32x16 | 16 | 9 (shortcut <<3) | 8192 |
| `u_b2c0` | 3x3 conv stride 2, ReLU, + 1x1 stride-2 shortcut conv | 32x32x16 -> 16x16x32 | 8 | 10 (shortcut 9) | 8192 |
| `u_b2c1` | 3x3 conv + shortcut, ReLU | 16x16x32 -> 16x16x32 | 16 | 10 (<<3) | 8192 |
| `u_b3c0` | as `u_b2c0` | 16x16x32 -> 8x8x64 | 8 | 10 (9) | 8192 |
| `u_b3c1` | as `u_b2c1` | 8x8x64 -> 8x8x64 | 16 | 10 (<<3) | 8192 |
| `u_pool` | global average | 8x8x64 -> 64 | - | 6 | 2048 |
| `u_fc`   | 1x1 conv (fully connected), no ReLU | 64 -> 10 | 10 | 6 | 64 |

Each layer's cycle count is `OH*OW/2 * ICH * OCH/OP`. The `OP` values are
chosen so that every heavy layer needs the same 8192 cycles. A frame can
then be accepted every 8192 cycles, and no layer sits idle waiting for a
slower one. The design uses about 780 packed multiplier stages, close to the
773 DSPs reported for a ResNet8 of this kind on a Zynq UltraScale+ ZU5EV.

The weights in this repository are **not trained**. Each parameter memory
is filled from a deterministic hash, `resnet_pkg::param_weight` and
`param_bias`, with a per-layer seed. The hardware can therefore be
simulated and checked bit-exactly, but it does not classify images. The
output shifts were picked so that the activations of random images neither
vanish nor saturate. To deploy the design, replace the generator in
`param_task::make_word` with real weights, or use the loading mode
described below.

## Streams and tokens

Every connection between tasks is a `stream_fifo`. A transfer happens on a
rising clock edge when `valid` and `ready` are both high. A FIFO's
`in_ready` depends only on its fill level, so no combinational path runs
from a consumer back to a producer.

Activations travel **depth-first**: for each row, for each pair of
columns, all channels. One token is the two horizontally adjacent pixels
of one channel (`act_t [1:0]`). Pixel 0 is the left one. This pairing
(`OW_PAR = 2`) is what the packed multiplier consumes. The pooled vector
and the scores use one value per token.

## Two MACs in one multiplier (`packed_mac`, `mac_column`)

One stage computes

    P_out = P_in + ((sext(a) << 18) + sext(d)) * sext(b)

with a 27-bit pre-adder, an 18-bit `b` and a 48-bit `P`. Here `d` is
pixel 0, `a` is pixel 1 and `b` is the weight. After a chain of stages:

* the low lane `P[17:0]`, read as a signed number, is `sum(d*b)`;
* the high lane `P[47:18]` is `sum(a*b)` minus the low lane's sign. The
  low lane's sign leaks into the high lane as a borrow.

The **restore step** adds `P[17]` back into the high lane. An 8x8 product
fits in 16 bits, so the 18-bit low lane leaves 2 guard bits. Partial sums
of up to 7 products stay inside the lane, so at most 7 stages may be
chained.

A 3x3 filter has 9 taps. `mac_column` therefore deals the taps round-robin
into two chains of 5 and 4 stages, restores each chain and adds the
results. The column has two register stages (chain, then restore/add),
both advanced by one enable, so the whole compute pipeline stalls as a
unit. With `OW_PAR = 1` (the FC layer) the column uses plain products.

One drawing of this scheme labels the upper lane with the `d*b` product.
The shift `a << 18` puts `a*b` in the upper lane, and that arithmetic is
what is built.

## Window buffer (`pad_task`, `window_buffer`, `delay_slice`)

A 3x3 window at a given position needs the current token and tokens that
arrived exactly 1, 2, ... slice-lengths earlier. The buffer is a chain of
`delay_slice` circular buffers. Each shifts by one entry when a token
enters, and each slice's output is one tap of the window.

* Within a window row, consecutive taps are one token position apart,
  that is `S1 = ICH` tokens.
* From the last tap of one row to the first tap of the next row, the
  slice is `S2 = (TWP - NT + 1) * ICH` tokens. `TWP` is the padded row
  length in tokens and `NT` the number of token columns a window covers
  (2 for a 3x3 window on two-pixel tokens).

Zero padding is inserted into the stream **before** the chain by
`pad_task`. It adds one zero row above and below each frame and one zero
token at each end of a row. With two-pixel tokens this gives one spare
zero column, which no window uses. A window is emitted when the arriving
token is the last one the window needs. For stride 2 only even
rows/columns are emitted. The chain never needs to be flushed. The first
rows of the next frame enter while the last windows of the current frame
are still being emitted.

Each window holds `OW_PAR x 9` values, for output pixels `n = 0, 1` and
taps `t = qh*3 + qw`, where row `qh = 0` is the top. One window is emitted
per input channel, so the computation task sees `ICH` windows per output
position.

With `FWD = 1`, the buffer also sends out the centre pixels of each window
on the `fwd` stream, one token per window. For a stride-1, padding-1
convolution these are exactly the input tokens in input order. This is the
residual block's shortcut, taken from data the buffer already holds.

## Computation task (`conv_compute`)

For each output position the task loops over input channels `l`, and
inside that over output-channel groups `m`. Each cycle issues one window
(held for all `m`) and one parameter word. `OP` MAC columns then compute
the `OP` channels of group `m` for both pixels. The partial sums of all
groups stay in an accumulator array `acc[m]`, so the dataflow is output
stationary.

* When `l = 0`, the accumulator starts at `bias + (skip << SKIP_SHIFT)`.
  The shortcut value of the residual block enters here, and no separate
  adder stage or extra stream is needed. `skip_gather` collects the `OP`
  shortcut tokens of a group into one word.
* After `l = ICH-1`, each group's sums are requantised (round half up,
  arithmetic shift right, clip to `[0,127]` with ReLU or `[-128,127]`
  without). The group is written as one word into a `burst_serializer`.
  That is a FIFO `OCH/OP` words deep, which sends the channels out one
  token at a time. Holding a whole burst lets the pipeline go on with the
  next position while the burst drains.
* With `HAS_DS = 1`, extra single-tap columns multiply the **centre tap**
  of each stride-2 window by the 1x1 shortcut weights. A 1x1 stride-2
  convolution reads exactly the pixels at the centres of the stride-2 3x3
  windows. The shortcut convolution therefore costs no buffer of its own,
  and its result leaves on the `ds` stream.

If any output it must write is not ready, the whole pipeline (`adv = 0`)
holds. Nothing in flight is lost.

## Residual blocks

In block 1 (no downsampling), `u_b1c0` forwards its input through a
`stream_fifo` to `u_b1c1`'s skip port. In blocks 2 and 3, the `ds` output
of the strided first convolution feeds the second convolution's skip port
through such a FIFO. Each of these FIFOs holds `(2*(IW/2 + 2) + 6) * CH`
tokens. The first convolution's output has to pass the second
convolution's window buffer before that convolution consumes any
shortcut. That takes about two padded rows, and the FIFO must absorb the
shortcut tokens produced meanwhile, or the block would deadlock.

## Parameters (`param_task`, `param_splitter`)

Each convolution has a parameter task holding `ICH * OCH/OP` words. Each
word carries everything one issue cycle needs. From bit 0 up:

    w[p][t] (8 bits, p = 0..OP-1, t = 0..K-1) | bias[p] (16) | dsw[p] (8) | dsb[p] (16)

The words are stored in the order they are read, address `l*OCH/OP + m`.
The task replays that order once per output position. Its output is a
2-deep stream.

There are two storage modes (`USE_URAM`):

* **0 (block RAM, the default):** the memory is initialised at
  configuration time, here from the generator functions.
* **1 (UltraRAM style):** the memory starts empty. `param_splitter` takes
  one byte stream (`load_*` on the top) and routes it to the convolutions
  in network order. Each convolution's bytes are its words in address
  order, least significant byte first. During its first pass, a parameter
  task assembles each word, stores it and passes it on, so the first
  frame is computed while the parameters arrive. Later passes only read.
  `params_loaded` rises when the last byte has been taken.

## Timing

A frame takes 14129 cycles from its first input token to its last score.
That was measured by `resnet8_full_tb`, with random gaps in the input and
random back-pressure on the output.

Consecutive frames leave **11083 cycles** apart. Two numbers bound this
from below. Each heavy layer needs 8192 issue cycles. Block 1's window
buffers must take 34 x 18 x 16 = 9792 padded tokens per frame, one per
cycle. The remaining 13% is lost to short stalls between neighbouring
tasks whose streams are only a few words deep.

Strided convolutions need special care. All windows of such a layer
appear while every other input row arrives, and each window occupies the
computation task for `OCH/OP` cycles. With a 2-deep window stream, the
computation task idles while the odd rows stream in. Meanwhile the
producer stalls during the even rows. For this reason the window stream
of a strided layer holds one output row of windows,
`(OW/OW_PAR) * ICH` entries (128 windows of 144 bits in both strided
layers). That change alone brought the frame interval from about 18100
to 11083 cycles. Every other layer uses a 2-deep window stream.

## Where this differs from the design it follows

* Padding is done in the stream before the window buffer, not by
  masking window positions. The windows are the same; the buffer is
  longer by the padded columns, and its row slice is
  `S2 = (TWP - NT + 1) * ICH` instead of a formula for an unpadded row.
* Activations are signed int8 everywhere (the packed-MAC lane layout
  assumes signed operands). ReLU outputs therefore use only 0..127.
* Scales are powers of two and fixed per layer. The shortcut is added at
  `<< 3` relative to the bias; both are placeholders for trained
  quantisation scales.
* The shortcut values are forwarded when the window centred on them is
  emitted, not after their last use, and the shortcut FIFO is sized for
  two padded rows. The required buffering is still about one window buffer
  of the second convolution, as intended.
* Per-layer parallelism is set by hand (the table above), not by a
  search over the device's resources.
* DMA engines and the external DRAM are not part of the RTL. Their
  streams are the top's ports.
* Only ResNet8 is assembled. A ResNet20 would use the same blocks, with
  three residual blocks per stage.

## Files

* `rtl/resnet_pkg.sv`: types (`act_t`, `wgt_t`, `bias_t`, `acc_t`),
  `requant`, the parameter generator.
* Arithmetic: `packed_mac`, `mac_column`.
* Streams: `stream_fifo`, `burst_serializer`, `skip_gather`.
* Windows: `pad_task`, `delay_slice`, `window_buffer`.
* Parameters: `param_task`, `param_splitter`.
* Layers: `conv_compute`, `conv_layer`, `avgpool`, and the top
  `resnet8_top`.

`tb/ref_pkg.sv` is an independent integer model of every layer and of the
whole network, used as the golden reference. Each block has a
self-checking testbench `tb/<block>_tb.sv`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

* `resnet8_full_tb` runs the default top (block-RAM mode) on two random
  images.
* `resnet8_top_tb` runs the UltraRAM mode with the parameters streamed in
  while the first image arrives. It also counts the design's mechanisms:
  parameter bytes, replayed words, padding, forwarding, downsampling,
  shortcut folding, stalls and back-pressure. It fails if any of them
  never occurred.

To simulate, for example, the full network:

    verilator --binary --timing --assert -Wno-fatal --top-module resnet8_full_tb \
        -y rtl -y tb +libext+.sv rtl/resnet_pkg.sv tb/ref_pkg.sv tb/resnet8_full_tb.sv
    ./obj_dir/Vresnet8_full_tb +verilator+rand+reset+2

The two full-network tests take one to two minutes each. The block tests
take seconds.

## Known limits

* No trained weights, so no accuracy figure. The hardware checks are
  bit-exact against the reference model.
* In block-RAM mode the memories are initialised by calling the generator
  function at elaboration. Yosys' synthesis front end stops on this
  (constant-evaluation step limit), while Verilator and slang elaborate
  it. A synthesis flow would load the contents from the trained
  parameters instead.
* The frame interval is about 1.35x the 8192-cycle ideal (see Timing).
