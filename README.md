# Synetgy: a 4-bit accelerator for networks built only from 1x1 convolutions

Most image-classification networks spend their hardware on 3x3 (or larger)
spatial convolutions. Each kernel shape needs its own datapath, and the
depth-wise variants used by small networks have very little data reuse. This
design targets a network in which every spatial operation has been swapped for
something almost free:

* 3x3 depth-wise convolutions become **shifts**. Each channel copies one
  neighbouring pixel (up, down, left or right) or keeps its own (identity).
* Strided convolutions become **2x2 max pooling**.
* Channel mixing between branches is a **channel shuffle**. Here that is only
  a change of write address.

What is left is 1x1 convolution, which is a plain matrix multiply. Weights
and activations are 4 bits wide. So the accelerator is one 32x32 array of
4-bit multipliers, followed by cheap streaming units for quantization,
pooling, shift and shuffle. One invocation by the host CPU computes one
*subgraph*:

```
out = shuffle( shift( maxpool2x2( quantize( W · in ) ) ) )
```

This runs over a whole batch of images held in DRAM. Pooling and shift can
each be switched off per invocation. The host chains invocations to run the
whole network.

All RTL is SystemVerilog in `rtl/`. Testbenches and a behavioural DRAM model
are in `tb/`. The top module is `synetgy_top`.

## 1. Data formats and memory layout

| quantity | format |
|---|---|
| activation | 4-bit unsigned, 0..15 |
| weight | 4-bit two's complement, -8..7 |
| partial sum | 17-bit signed; 32 x 32 products of at most 8 bits each, with headroom for 1024 inputs |
| DRAM word | 128 bits = one *channel group* of 32 four-bit values; lane *i* is bits `[4i+3:4i]` |

Everything streams as 32-channel groups. A tensor of `C` channels has
`grp = C/32` groups per pixel (`ic_grp`, `oc_grp`). Channel counts that are
not multiples of 32 are padded by the host with zero weights.

**Feature maps.** Feature maps are stored pixel-major, with the channel groups
of one pixel adjacent. Images of a batch are stored back to back:

```
input  word  = IN_BASE + ((b*H + y)*W + x)*ic_grp + ic_t
output word  = OUT_BASE + pixel*out_grp_total + ((g + shuffle_off) mod out_grp_total)
```

For the output, `pixel` counts output pixels across the whole batch.
`out_grp_total` is the group count of the full output tensor, which can be
larger than `oc_grp` (see section 7).

**Weights.** Each DRAM word holds the 32 input-channel weights of one output
channel. For each block (`oc_t`, `ic_t`) there are 32 consecutive words, one
per output lane:

```
weight word  = W_BASE + ((oc_t*ic_grp + ic_t)*32 + lane)
```

## 2. The dataflow pipeline

```
          DRAM (feature read port)                    DRAM (weight read port)
                |                                              |
           fmap_loader                                   weight_loader
                |                                              |
             [FIFO]                                        weight_buf
                |                                              |
           conv_unit  <----------- 32x32x4-bit block per cycle +
                |
             [FIFO]    32 x 17-bit partial sums
                |
         conversion_unit
                |
             [FIFO]    32 x 4-bit
                |
            pool_unit   (bypassable)
                |
             [FIFO]
                |
            shift_unit  (bypassable)
                |
             [FIFO]
                |
           shuffle_unit ---> DRAM (write port)
```

Each stage is an independent process unit. Stages are joined by
`stream_fifo` channels with a valid/ready handshake. A reader stalls on an
empty FIFO. A writer stalls on a full FIFO. So DRAM back-pressure or a slow
stage simply stalls the stages upstream, and no stage needs to know the
timing of any other. Every stream carries pixels in the same order:
pixel-major, channel groups inner. So pooling and shift see exactly the
order in which the convolution produces its outputs.

The `controller` runs two phases per invocation:

1. **Weight phase.** The weight loader copies `ic_grp*oc_grp*32` words into
   `weight_buf`. This phase is skipped when `MODE.keep_weights` is set, so the
   buffer can be reused by the next invocation (for example the same layer on
   another batch).
2. **Run phase.** All stages are started together. The invocation ends when
   the writeback unit has written every output word:
   `batch * out_w * out_h * oc_grp` words, where `out_w`/`out_h` are halved
   when pooling is on.

## 3. Convolution unit and weight buffer (`conv_unit`, `weight_buf`)

The convolution is *output stationary*:

* For each pixel, and for each output group `oc_t`, the unit sums over the
  input groups `ic_t`.
* Each step multiplies one 32-channel input vector by one 32x32 weight block
  and adds the 32 dot products into 32 accumulators.
* After the last `ic_t` the 32 sums leave as one partial-sum vector, and the
  accumulators restart.

The loop order is pixel, then `oc_t`, then `ic_t` (innermost).

`weight_buf` has 32 banks, one per output lane, with `ic_grp*oc_grp` entries
per layer. Entry `oc_t*ic_grp + ic_t` holds a whole 32x32 block, so one read
feeds the whole array. The read takes one cycle. The unit therefore has one
pipeline stage: the input vector is held while its weight block is read.

**Input reuse.** The input vector of a pixel is needed `oc_grp` times. The
`fmap_loader` fetches each pixel's `ic_grp` words once from DRAM and keeps
them in a small pixel buffer of `MAX_ICG` words. It replays them for each
further `oc_t`. Input traffic is therefore one read per input word, however
many output channels there are.

**Rate.** One weight block is used per cycle when nothing stalls. A layer
takes `batch*W*H*ic_grp*oc_grp` cycles, plus the weight phase and a few
cycles of pipeline fill.

## 4. Quantization by thresholds (`conversion_unit`)

The network's activation function clips, scales and rounds each
convolution output to 4 bits. All of that folds into a monotone step
function of the integer partial sum. The output is the number of thresholds
`t[0] <= ... <= t[14]` that the sum reaches (`x >= t[k]`). So 15 thresholds
make 16 output levels.

Each lane evaluates this as a binary search, four comparators deep:

* `t[7]` decides bit 3.
* Then `t[3]` or `t[11]` decides bit 2.
* And so on down the tree.

Threshold sets differ per layer. The unit keeps `NSETS` sets in on-chip
memory. The host writes them through the `THR` register, one value per write.
`MODE.thr_set` picks the set for an invocation. Reversing the threshold
order is not supported; thresholds must be ascending.

## 5. 2x2 max pooling (`pool_unit`)

Pooling has stride 2. It works on the stream with a one-row line buffer of
`width*grp` vectors:

* **Even rows** are written into the line buffer.
* **Odd rows, even x:** the unit keeps the current vector ("left") and the
  buffered vector above it ("upper left").
* **Odd rows, odd x:** it takes the max of those two, the current vector and
  the buffered one above it, and emits one output vector per channel group.

An odd last column or row is dropped. The unit accepts one vector per cycle
and emits one per four inputs.

## 6. Shift (`shift_unit`)

Shift is the part of the design most worth understanding in detail.

**Direction per channel.** Channel `c` takes its value from one neighbour,
fixed by `c mod 5`:

| c mod 5 | output(x, y) takes input at |
|---|---|
| 0 | (x, y) (identity) |
| 1 | (x, y-1), "up" |
| 2 | (x, y+1), "down" |
| 3 | (x-1, y), "left" |
| 4 | (x+1, y), "right" |

Neighbours outside the image read as zero.

**Walking the padded frame.** The unit walks the frame as if it were padded
by one zero pixel on every side, so `(W+2) x (H+2)` positions of `grp`
vectors each:

* At a padding position it pushes zero vectors and consumes nothing.
* At an interior position it pushes the next input vector.

Pushed vectors go into a circular buffer of `NBUF` vectors. The buffer must
hold at least `(2*(W+2)+2)*grp` vectors.

**Emitting outputs.** When position `(px, py)` has just been pushed, the
whole 3x3 window around `(px-1, py-1)` is in the buffer. The window elements
sit at fixed distances behind the write pointer:

* `grp` for the right neighbour,
* one padded row `(W+2)*grp` for the centre's row,
* two rows for the row above.

If that centre is an interior pixel, each of the 32 lanes picks its window
element by its channel's direction. The resulting vector is emitted.

**Rate.** The unit pushes one vector per cycle, so a frame costs
`(W+2)*(H+2)*grp` cycles. The extra `2(W+H)+4` positions per group are the
only overhead of the shift.

## 7. Shuffle on writeback (`shuffle_unit`)

Channel shuffle rotates the channel dimension. Here that costs nothing,
because the writeback unit rotates the group index of the address:
output group `g` goes to slot `(g + shuffle_off) mod out_grp_total` of its
pixel's row.

The network's blocks concatenate a computed branch with an untouched branch.
The accelerator writes only the `oc_grp` slots of the computed branch. It
leaves the other slots of each row alone. Copying the untouched branch into
the remaining slots is host software, and can overlap with the accelerator's
run.

## 8. Host interface (`controller`)

The register bus is a simple one: `reg_we`/`reg_re`, a 4-bit word index,
32-bit data. Read data is valid one cycle after `reg_re`.

| index | name | access | fields |
|---|---|---|---|
| 0 | CTRL | W | bit 0: start |
| 1 | STATUS | R | bit 0 busy, bit 1 done |
| 2 | DIM | RW | width [8:0], height [24:16] (input size, before pooling) |
| 3 | GRP | RW | ic_grp [5:0], oc_grp [13:8], out_grp_total [21:16], shuffle_off [29:24] |
| 4 | MODE | RW | pool_en [0], shift_en [1], keep_weights [2], thr_set [13:8], batch [31:24] |
| 5-7 | IN_BASE, W_BASE, OUT_BASE | RW | DRAM word addresses |
| 8 | THR | W | threshold value [16:0], index [23:20], set [29:24] |
| 9 | CYCLES | R | clock cycles of the last invocation |

**Memory ports.** There are two read ports (feature maps, weights) and one
write port. Each read port has a request channel and an in-order response
channel, both valid/ready. The write port is a valid/ready channel carrying
an address and a word. A bus adapter (AXI or similar) belongs outside
`synetgy_top`.

**Typical host sequence for one layer:**

1. Write the thresholds once.
2. Write DIM, GRP, MODE and the three bases.
3. Write CTRL.start.
4. Poll STATUS.done.
5. Copy the skip branch into the free slots if the layer is a shuffle block.

## 9. Running a whole network

These sizes are at the default parameters. Checking the network's layer
shapes against them:

| layer (input size, channels) | weight entries (`WBUF_DEPTH`=512) | pool line buffer (`POOL_LB`=256) | shift buffer (`SHIFT_BUF`=512) |
|---|---|---|---|
| conv1 224x224, 3->32 (3 padded to 32) | 1 | 224 | 230 |
| conv2 112x112, 32->64 | 2 | 224 | 236 |
| stage 2 blocks, 28x28, 64->128 | 8 | 224 | 248 |
| stage 3 blocks, 14x14, 128->256 | 32 | 224 | 272 |
| stage 4 blocks, 7x7, 256->512 | 128 | 224 | 320 |
| conv5 7x7, 512->1024 | 512 (exactly full) | - | - |
| FC 1024->1000, one weight bit-plane | 1024: split into two invocations | - | - |

Everything except the classifier fits in one invocation per layer.

**Fully connected layer.** The classifier runs on the same hardware:

* It is a 1x1 "image" with 1024 channels.
* Its weights are fed one bit-plane at a time.
* The host folds each bit-plane's power of two into the thresholds.
* With 1000 outputs, one bit-plane needs 1024 weight entries, so the host
  splits it into two invocations of 512 outputs.

**Host work.** Global average pooling and the branch copies stay on the host.

## 10. Timing

For example, a 7x7 block with 512 input and 512 output channels:

* The convolution takes 12,544 cycles.
* The weight phase adds 8,192 cycles.

At 250 MHz, 28x28x128->128 at batch 10 is about 0.5 ms of convolution. Clock
frequency is not fixed by the RTL.

## 11. Where this RTL departs from the original accelerator

* **One block per cycle.** The original, built with high-level synthesis,
  needed several cycles (7 to 38) per 32x32 block. Here the loop runs at one
  block per cycle. The array is the same size.
* **Input fetched once.** The original's loop schedule re-reads the input
  vector from DRAM for every output group. Its own bandwidth analysis,
  though, counts each input as fetched once. Here each input word is read
  once and replayed from the pixel buffer.
* **Partial-sum width: 17 bits.** The original's figures also show 13-bit
  partial-sum registers. 13 bits cover only a single 32-input block, so 17
  bits are used, which is what its text states.
* **Weight-stream width: 4 bits.** A figure of the original shows a 1-bit
  weight stream. The text and the datapath are 4-bit, and 4 bits are used.
* **Comparator count.** The original speaks of 16 comparators for the step
  function. 16 levels need only 15 boundaries, and 15 are built.
* **Shift direction rule.** The original only says the direction comes from
  the channel index. `c mod 5` is this design's rule, and a trained network
  must use the same assignment.
* **Pooling order.** The original describes pooling as iterating over channel
  groups separately. Here pooling consumes the convolution's pixel-major
  stream with all groups in one pass. The result is identical and no
  reordering buffer is needed.
* **Memory interface.** Plain request/response ports and a simple register
  bus replace AXI. The register map, the `keep_weights` bit, the batch field
  and the cycle counter are this design's.
* **Buffer and FIFO sizes are not from the original.** These are:
  `WBUF_DEPTH`, `NSETS`, `FIFO_DEPTH`, `MAX_ICG`, `POOL_LB`, `SHIFT_BUF`. They
  were chosen to fit the layer table above.
* **Outside this RTL.** The DRAM, the CPU, average pooling, the branch copy
  for the shuffle, and the FPGA build are not part of this RTL.

## 12. Parameters of `synetgy_top`

| parameter | default | meaning |
|---|---|---|
| `WBUF_DEPTH` | 512 | weight-buffer entries (32x32 blocks) |
| `NSETS` | 64 | threshold sets |
| `FIFO_DEPTH` | 16 | depth of each inter-stage FIFO (power of two) |
| `MAX_ICG` | 32 | input groups the pixel buffer holds (1024 channels) |
| `POOL_LB` | 256 | pooling line buffer, in vectors (`width*grp` must fit) |
| `SHIFT_BUF` | 512 | shift buffer, in vectors (power of two, `(2(W+2)+2)*grp` must fit) |

The array size (32x32), the data widths and the register layout are in
`rtl/synetgy_pkg.sv`.

## 13. Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
compares the module against a model written independently in plain
SystemVerilog, and ends with a `TB_RESULT checks=N failures=M` line.

**End-to-end test: `tb_synetgy_top`.** This runs the top at its default
parameters against `tb/dram_model.sv`, a DRAM with latency and random
stalls. It covers five invocations and checks:

* every output word, and that the other branch's words are left untouched;
* the cycle count against the one-block-per-cycle bound;
* that each of these happened at least once: pooling, pooling bypass, shift,
  shift bypass, a wrapping shuffle offset, weight reuse, a batch larger than
  one, DRAM stalls and a full FIFO.

**Real-size layers: `tb_workload_blocks`.** This runs four layer shapes of the
network at their real sizes:

* 7x7x512->512;
* 28x28x128->128;
* 28x28x128->256 with pooling;
* 7x7x512->1024 with batch 2.

**Block tests.** These check the rates:

* the convolution at one block per cycle;
* the shift at `(W+2)(H+2)grp` cycles per frame.

Run any test with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_synetgy_top \
  -y rtl -y tb +libext+.sv rtl/synetgy_pkg.sv tb/tb_synetgy_top.sv -o sim
./obj_dir/sim
```

**Trust.** The checks use the reference models in the testbenches. They
encode this document's definitions (signedness, the `c mod 5` rule,
threshold semantics). No numbers from a trained network were available, so
agreement with the original accelerator's outputs is not tested.
