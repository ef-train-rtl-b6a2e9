# EF-Train: a CNN training accelerator in SystemVerilog

This design trains a convolutional network on the chip itself, in 32-bit
floating point. Every layer is run in all three training processes:

- **FP**, the forward pass, computes the activations.
- **BP**, backward propagation, computes the loss with respect to each layer's input.
- **WU**, weight update, computes the weight gradients over a mini-batch and applies SGD.

All three processes use one convolution datapath. The main idea is that a
single T x T array of multiply-accumulate units does all of them.

- In FP and BP, each of the T output channels sums T input channels through an adder tree.
- In WU, the same T x T products are kept apart. Each one is one weight's gradient term.

The second idea is a DRAM layout that keeps the DMA streams long. It is
called *data reshaping* below.

- Feature maps are stored in groups of T channels.
- Within a group the order is row, then column, then channel (channel innermost).
- So a tile of Tr whole rows of one channel group is a single contiguous burst.
- Weights are stored tile by tile (T x T per kernel position), so a weight tile is also one burst.

Because bursts are long, the roughly 400-cycle start-up cost of a DMA
transfer is paid rarely. Weights are also reused: a layer's weights are
fetched once, for the first row of the first image, and kept on chip for the
whole mini-batch.

Default configuration:

- T = Tm = Tn = 16, i.e. 256 fp32 multipliers.
- 128-bit DMA streams, carrying P = 4 words per beat.
- A 100 MHz target clock.

## Block structure

`ef_train_top` holds three kernels. They share four DMA channels:

- IFM, OFM and WEI are read channels.
- OUT is the write channel.

The host starts one layer at a time. It gives a `layer_cfg_t` (defined in
`ef_pkg`) and pulses `start`. The field `cfg.op` selects the kernel. That
kernel owns the channels until `done`. The DRAM, the DMA engines and the host
processor are outside the design. The testbench models the first two in
`tb_dram_dma`.

| module | role |
|---|---|
| `conv_engine` | Conv FP, BP and WU: loop control, DMA commands, ReLU and SGD on the output path |
| `conv_kernel` | T x T fp32 multipliers. FP/BP: T adder trees. WU: the separate products |
| `ifm_buffer` | T banks, one per input channel of the tile |
| `ofm_buffer` | T banks of partial sums, with read-modify-write accumulation |
| `weight_buffer` | weight tiles kept for reuse (FP/BP), and gradient accumulation (WU) |
| `reshape_addr_gen` | DRAM address and length of every tile burst under the reshaped layout |
| `pool_kernel`, `pool_index_buffer` | 2x2 maximum or average pooling, FP and BP, with 2-bit indexes |
| `bn_kernel` | batch normalization FP and BP, with the per-channel parameter store |
| `fp32_pkg`, `fp32_alu` | binary32 add, multiply, compare, divide, square root |

### Stream and command conventions

Every channel has two ports.

- A command port carries a `dma_cmd_t`: a word address and a word count.
- A data stream carries P fp32 words per beat.

Both ports use valid/ready handshakes. A command is one burst. Data beats
follow commands in order.

The reshaped layout puts the T channels of a pixel next to each other. So
the P words of a beat always go to P different channel banks of a buffer,
and one pixel takes T/P beats.

## The convolution schedule

This is the part that is hardest to follow.

**FP and BP loop order:**

```
for each group of M_on output channels
  for each image b
    for each output-channel tile to in the group
      for each row tile (Tr output rows)
        for each input-channel tile ti
          load the IFM tile (T channels x input rows x all columns)
          if b == 0 and this is the first row tile: load the weight tile
          compute Tr x C x K x K cycles
        store the OFM tile (ReLU applied in FP)
```

Points to note about this loop:

- The number of weight tiles kept on chip is (M_on / T) x (N / T) x K x K.
  Weights are therefore fetched once per layer when M_on = M.
- If the weight buffer cannot hold all M channels, the layer runs in several
  M_on groups. The IFM is then read again for each group.
- Within a tile the order is kernel position (i, j) outside and pixel inside.
- Each cycle the array multiplies a T-channel input pixel by a T x T weight
  tile, and adds the T results into the OFM partial sums.

**WU loop order:**

```
for each output tile to, input tile ti
  for each image b, row tile
    load the loss tile (OFM channel) and the input tile (IFM channel)
    compute: for every pixel, for every (i, j),
             grad[i][j] += loss[pixel] x input[pixel shifted by (i, j)]
  read the old weights, write weight - lr * grad
```

**How BP reuses FP:**

- BP runs exactly like FP, with the loss map as input.
- The weights come from the transposed tile. Input and output channels are
  swapped, so the tile at (ti, to) is read and transposed as it is loaded.
- Each kernel is flipped by 180 degrees. This is done by reading the kernel
  positions in reverse order.
- The ReLU derivative is applied on the output path. An output is kept only
  where the forward activation, streamed in on the OFM channel, is positive.

**Timing:**

- One pipelined MAC array step per cycle. A tile therefore costs Tr x C x K x K
  compute cycles.
- The testbenches check this count exactly.
- Loads, computation and stores follow one another. The double buffering
  that would overlap them is not built (see "Departures").

## Pooling

The pooling window is 2x2 with stride 2.

**FP.** For each output row, the two input rows are loaded into a row
buffer. Each output pixel then reads its four inputs. For maximum pooling it
records the position of the maximum as a 2-bit index, 0 to 3, row-major
within the window. The pooled row streams out on OUT. Then the row's indexes
follow, as one 32-bit word each, in the output layout.

**BP.** The loss row comes in on IFM and its indexes on WEI. The two input
rows stream out:

- For maximum pooling, each position gets the loss if the index points at it,
  and 0 otherwise.
- For average pooling, each position gets a quarter of the loss.

## Batch normalization

BN needs statistics over the whole mini-batch, so it works in passes over
the tensor. n = B x R x C is the number of values per channel.

**FP:**

1. γ and β are loaded on WEI.
2. Per channel, the sum and the sum of squares are accumulated.
3. A single scalar unit then computes, per channel, the mean E, the variance
   V = E(X²) - E², and λ = 1/sqrt(V + 1e-5). This takes seven operations per
   channel.
4. Â = (A - E) λ streams out.
5. A_out = Â γ + β streams out.
6. γ, β and λ are written back.

**BP:**

1. γ, β and λ are loaded on WEI.
2. One pass accumulates dγ = Σ L Â and dβ = Σ L.
3. A second pass outputs L_in = γ λ (L - dβ/n - Â dγ/n).
4. The updated γ - lr dγ and β - lr dβ are written back.

## Arithmetic

All arithmetic is IEEE-754 binary32:

- Rounding is to nearest, ties to even.
- Subnormals are flushed to zero.
- Infinities saturate. NaN gets no special handling.
- Multiply is exact.
- Add, divide and square root are within one unit in the last place of the
  exactly rounded result. The testbench checks them against the simulator's
  double-precision arithmetic.

## Departures from the published design and open points

- **No double buffering.** Each buffer is single. DMA and computation
  alternate instead of overlapping. The per-tile cost is the sum of the
  transfer time and t_COMP, not their maximum. The Conv engine is therefore
  only a partial implementation of the published one.
- **Host data preparation.** Input maps and the loss maps used by Conv BP are
  stored already zero-padded. Channel counts are multiples of T; the first
  layer's three channels are padded to T. Conv BP is built for stride 1 only.
- **Addresses.** The per-tile burst addresses are computed on chip from the
  per-layer base addresses in `cfg`.
- **Average-pooling backward** passes a quarter of the loss to each input,
  which is the derivative of the average. The published text describes the
  values of a patch as "accumulated".
- **BN** uses an ε of 1e-5 and the same learning rate as the weights. It
  streams the activation three times in FP.
- **Buffer sizes** are not published; they are set here:
  - IFM: 4096 words per bank.
  - OFM: 2048 words per bank.
  - Weights: 512 tiles of T x T.
  - Pooling row: 1024 pixels.
  - BN: 512 channels.
- **What fits at these sizes:**
  - The CIFAR-10 network used for evaluation fits entirely.
  - The convolution layers of AlexNet and VGG-16 fit.
  - The large fully connected layers of AlexNet and VGG-16 do not fit. They
    need more than 512 weight tiles per 16 outputs.
  - AlexNet's 3x3 overlapping pooling is not supported.
- **Synthesis.** Synthesis at the default size (256 multipliers plus register
  arrays for every buffer) is slow. The buffers are plain arrays; some of
  them have a combinational read port, so a synthesis tool may build them
  from registers rather than block RAM.

## Simulating

Each testbench is self-checking. It prints `TB_RESULT checks=N failures=M`
and has a watchdog. To build one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -j 4 --top-module tb_ef_train_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/fp32_pkg.sv rtl/ef_pkg.sv \
  tb/tb_fp_util.sv tb/tb_ef_train_top.sv
obj_dir/Vtb_ef_train_top
```

| testbench | what it covers |
|---|---|
| `tb_fp32_alu` | 15,000 random and special operands for each operation |
| `tb_conv_engine` | FP at stride 1 and 2 with ReLU, several M_on groups, partial row tiles; BP with transpose, flip and ReLU mask; WU with batch accumulation and SGD. Bit-exact, plus compute-cycle and weight-fetch counts |
| `tb_pool_kernel` | max and average pooling, FP and BP, with the indexes |
| `tb_bn_kernel` | BN FP and BP against the equations in double precision |
| `tb_ef_train_top` | one training step end to end (see below) |

The end-to-end step in `tb_ef_train_top` is: Conv FP, max pooling, BN FP,
BN BP, pooling BP, Conv BP, Conv WU. Along the way it counts each mechanism
and fails if any of them never happens:

- weight reuse
- M_on groups
- ReLU zeroing, and the ReLU mask in BP
- index routing in pooling BP
- mode switches
- output back-pressure
- DMA restarts

The testbenches run at T = 8 with small buffers and small layers. That is
also the largest configuration simulated end to end. No full-size
testbench, at T = 16 with default buffer depths, is provided.

The DRAM model, `tb_dram_dma`, behaves as follows:

- Valid and ready are random.
- Each non-contiguous burst pays a start-up delay.
- It counts burst restarts and words moved, per channel.
