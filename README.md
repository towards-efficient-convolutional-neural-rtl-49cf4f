# One multiplier array for every convolution type, and layers fused through on-chip buffers

Compact CNNs for domain-specific tasks mix several layer types: standard 3x3
convolutions, depthwise 3x3 convolutions, pointwise (1x1) convolutions and
fully connected (FC) layers. They also group those layers into blocks such as
depthwise-separable and residual blocks. A dedicated engine for each type
wastes area, because in any one layer most of the engines sit idle.

This design builds **one** layer engine in which a single array of multipliers
serves all four layer types:

- Standard 3x3 convolution runs through the Winograd minimal-filtering
  algorithm F(4x4, 3x3). It computes a 4x4 output tile from a 6x6 input
  window with 36 multiplications per channel pair instead of 144.
- Depthwise convolution runs on the same Winograd path with only the diagonal
  of the channel-by-filter array switched on.
- Pointwise convolution and FC layers bypass the transforms. They use the
  multipliers directly.

Two such engines can be chained into a **fused block**. The first layer's
output tile goes into an intermediate on-chip buffer and the second layer reads
it from there. The intermediate feature map never leaves the chip, and the two
layers work on different tiles at the same time.

Everything is synthesizable SystemVerilog-2017 in `rtl/`. Each module has a
self-checking testbench in `tb/`.

## Number format and the integer Winograd trick

Data and weights are 16-bit signed fixed point. Winograd computes

    Y = A^T [ (G g G^T) .* (B^T d B) ] A

where:

- `d` is a 6x6 input window;
- `g` is the 3x3 kernel;
- `.*` is the element-wise product of the two 6x6 matrices.

`B^T` (6x6) and `A^T` (4x6) hold only small integers. `G` (6x3) holds
fractions (1/4, 1/6, 1/12, 1/24). In fixed point those fractions would round
every weight, so the result would no longer equal a direct convolution.

The design avoids this by using `GS = 24 G`, which is an integer matrix. The
weight transform then produces `576 * G g G^T` exactly:

- The element-wise products and their sums over input channels are all exact
  integers.
- After `A^T X A`, every output is an exact multiple of 576 = 64 * 9.
- `wino_output_transform` removes the factor 64 with an arithmetic right shift
  by 6. That shift is exact because the value is divisible by 64.
- It removes the factor 9 by multiplying with 9^-1 modulo 2^48 (`INV9 =
  0xE38E38E38E39`). For a value that is an exact multiple of 9, this
  multiplication, taken modulo 2^48, is the exact quotient, and it needs no
  divider.

Each result therefore equals the direct-convolution sum bit for bit, and every
testbench compares against direct convolution. The widths follow from the
matrix norms:

| Width | Bits | Why |
|---|---|---|
| Transformed input `V` | 23 | \|B^T d B\| <= 100 * 2^15 |
| Transformed weight `U` | 26 | \|GS g GS^T\| <= 576 * 2^15 |
| Products | 49 | 23 + 26 |
| Accumulators | 48 | Holds the results after the scale is removed |

`turf_pkg` holds the matrices, the widths, the layer configuration struct and
the saturation function.

## The layer engine (`turf_accel_top`)

The engine's modules form columns, left to right. The data goes through them in
this order:

1. **Weight register** (`weight_register`) holds all kernels of the layer in
   the form the arithmetic needs:
   - Winograd layers: the transformed kernels (36 values per channel pair).
   - Pointwise layers: the raw 1x1 weights.
   - FC layers: the raw 6x6 weights.

   `wino_weight_transform` computes `GS g GS^T` while the weights are loaded,
   so loading costs no compute time.
2. **Input buffer** (`input_buffer`) holds the input tile, all channels, Pc
   channels per word. It is read once per pass.
3. **Line buffer** (`line_buffer`) is a shift register of (K'-1) rows plus K'
   pixels, with K' = 6. From a row-major pixel stream it presents a 6x6 window
   for each of Pc channels, together with the row and column of the newest
   pixel. The engine picks the windows it needs from that position:
   - Winograd: windows on a stride of 4, starting at row 5 and column 5.
   - FC: the single window ending at (5, 5).
   - Pointwise: every pixel, as the newest tap of the window.
4. **Winograd input transform** (`wino_input_transform`) computes `B^T d B` for
   each lane.
5. **Arithmetic module** (`arith_module`) is a Pc x Pf array of 36-element
   multipliers, with one registered product stage. A per-pair lane enable
   gives the depthwise mode, where only lane i times filter i is active.
6. **CONV adder tree** (`adder_tree_conv`) sums the Pc products of each output
   lane and position. **FC adder tree** (`adder_tree_fc`) sums over all Pc x 36
   products, because an FC output uses the whole window.
7. **Winograd output transform** (`wino_output_transform`) computes `A^T X A`
   and removes the 576 scale. It produces a 4x4 tile per output channel.
8. **Output buffer** (`output_buffer`) holds Pf x H x W accumulators. It clears
   at the first input-channel group and adds a 4x4 tile (or one pixel) per
   cycle for the later groups.
9. **Post-processing** happens while the output buffer drains, one word per
   cycle:
   - `batch_norm`: `(acc * gamma >> shift) + beta`, saturated to 16 bits. With
     normalisation off it is only the shift.
   - `relu`.
   - `eltwise_add`: adds the residual stream, saturating.
   - `pooling`: 2x2 stride-2 max or average, with a one-row partial buffer.
10. **Data manager** (`data_manager`) is the gather/scatter unit:
    - It splits the single input stream into weights, gamma, beta and input
      pixels.
    - It holds the outgoing word in a register with a valid/ready handshake.
11. **Global controller** (`global_controller`) steps through the states idle,
    load, clear, stream, gap, drain and done. It counts passes and compute
    cycles.

### Computation sequences and timing

A layer with C input and F output channels runs as passes. Each pass handles
one group of Pc input channels against one group of Pf filters.

- **Filter-major** (FM) order loops over filter groups on the outside.
- **Channel-major** (CM) order loops over channel groups on the outside.

Depthwise layers need one pass per channel group. Each pass streams the H x W
tile once and then waits 6 gap cycles for the pipeline to empty. The compute
phase therefore takes exactly

    passes * (H*W + 6) cycles,    passes = ceil(C/Pc) * ceil(F/Pf)  (ceil(C/Pc) for depthwise)

The end-to-end testbench checks this number for every layer. Loading takes one
cycle per accepted input word. Draining takes one cycle per result unless the
consumer stalls.

### Streams and configuration

A layer is launched with `start` and a `layer_cfg_t`:

| Field | Meaning |
|---|---|
| `mode` | WINO, DW, PW or FC |
| `seq` | FM or CM |
| `h`, `w`, `c`, `f` | Tile size and channel counts |
| `norm_en`, `shift` | Normalisation on/off and the requantisation shift |
| `relu_en` | ReLU on/off |
| `add_en` | Residual addition on/off |
| `pool_en`, `pool_avg` | Pooling on/off, and average instead of max |

The input stream then carries, in this order:

1. Weights, ordered filter, channel, tap. Depthwise layers send one kernel per
   channel.
2. gamma for each output channel.
3. beta for each output channel.
4. The input tile, ordered channel, row, column.

Results leave channel by channel in row-major order. The residual stream uses
the same order, taken before pooling. All streams use valid/ready. A missing
residual word or a low `out_ready` stalls the drain.

## The fused block (`fused_block`, `inter_layer_buffer`)

`fused_block` chains two layer engines through an `inter_layer_buffer`. For
each of `n_tiles` tiles:

1. Engine 1 gathers its weights and the input tile from `in1_*`, computes, and
   drains its output tile into the buffer.
2. Engine 2 gathers its weights, gamma and beta from the `w2_*` stream, then
   its input tile from the buffer.
3. Engine 2 computes and streams the block output, with an optional residual
   on `res_*`.

A small sequencer starts each engine whenever it is idle and has tiles left.
Both engines have Pc = Pf = 4, so the width of layer 1's output matches the
width of layer 2's input.

The buffer has two options:

- **Double** (`DOUBLE = 1`, the default): two banks of one tile each, used
  ping-pong. Engine 1 fills one bank with tile t+1 while engine 2 reads tile t
  from the other bank.
- **Single** (`DOUBLE = 0`): one bank. Engine 1 cannot drain tile t+1 until
  engine 2 has read all of tile t, so its drain stalls. This saves one tile of
  storage and costs pipeline stalls.

A bank becomes readable when its last word is written. It becomes writable
again when its last word is read. `overlap_cycles` and `stall_cycles` report
how often both engines were busy and how often engine 1 was held back.

The following are outside this design:

- **Hand-over point.** The hand-over is a whole tile at a time. A layer 1 in
  filter-major order could hand each finished output-channel group to layer 2
  earlier, which would shrink the buffer to Pc x tile. That variant is not
  built.
- **Buffer sharing.** Each engine keeps its own input and output buffers. In a
  denser design those would share storage with the intermediate buffer.
- **Block length.** Only two-layer blocks are supported, such as a
  depthwise-separable block. Three-layer bottleneck blocks would need a third
  engine and a second buffer.
- **Choice of sequences and buffers.** Choosing FM or CM order and single or
  double buffering per layer pair is a design-time decision. It is made with a
  latency model outside the hardware.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `PC`, `PF` | 4, 4 | Input and output channels processed in parallel |
| `H_MAX`, `W_MAX` | 10, 10 | Largest input tile. Winograd tiles need H, W = 4t + 2 |
| `C_MAX`, `F_MAX` | 8, 8 | Largest channel counts per layer |
| `DOUBLE` | 1 | Double intermediate buffer in `fused_block` |
| Data width | 16 | In `turf_pkg` |
| Accumulator width | 48 | In `turf_pkg` |

The defaults are small so that full-size simulation takes seconds. The RTL is
written for any values. Larger tiles and more channels only grow the buffers
and the weight register.

## What the RTL does not do

These limits matter when mapping a real network onto the engine:

- **Stride and padding.** There is no strided convolution and no padding. The
  host supplies already padded tiles. Stride-2 layers (ResNet-50, MobileNet)
  therefore cannot be run directly.
- **Pixel rate.** One pixel enters per cycle (Ph = Pw = 1). Windows of several
  pixels per cycle are not built.
- **FC layers.** FC layers are limited to a 6x6xC input window, which is the
  line buffer's window. Larger FC layers must be split by the host into pieces
  whose partial sums the host adds.
- **Channels.** Layers with more channels than `C_MAX`/`F_MAX` must be split by
  the host, which also adds the channel partial sums.
- **Fixed choices.** The post-processing order NORM -> ReLU -> add -> pool, the
  stream word order and the handshakes are fixed choices of this design.
- **Reset.** Reset is asynchronous and active low. It covers only control
  state. Data memories are not reset.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`.
It also has a watchdog. To build and run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/turf_pkg.sv tb/tb_fused_block.sv \
              --top-module tb_fused_block
    ./obj_dir/Vtb_fused_block

The main benches are:

- **`tb_fused_block`** runs the fused block at its defaults. It runs a
  depthwise -> pointwise block with NORM, ReLU and a residual, and a
  Winograd + max-pool -> pointwise block, over 3 tiles each. Input data are
  random, the w2 and residual streams have random gaps, and the consumer stalls
  randomly.
  - The reference is computed layer by layer with direct convolution.
  - The bench requires the two engines to overlap.
- **`tb_fused_block_single`** is the same bench with a single buffer. It
  requires producer stalls.
- **`tb_turf_accel_top`** runs seven layers through one engine at its defaults.
  - The layers cover every mode, both sequences, several channel groups, and
    every post-processing switch.
  - It checks every output word and the compute-cycle count of each layer.
  - It counts 15 mechanisms and fails if any of them never happened.

The other benches test one module each, against independent reference models
such as matrix products written out in the bench and direct sums.
