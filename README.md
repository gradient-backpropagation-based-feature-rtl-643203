# Gradient feature attribution on an FPGA-sized accelerator

A feature-attribution heatmap answers the question "which input pixels made the network pick this
class?". The gradient-based methods that produce one are Saliency Map, DeconvNet and Guided
Backpropagation. Each runs the network forward, then propagates a gradient from the winning class
back to the image.

Backward propagation of *activation* gradients needs far less than training does:

- No weight gradients are needed.
- No activations have to be kept.
- A max-pool only has to remember which of the four window positions won (2 bits per pooled
  output).
- A ReLU only has to remember whether its input was positive (1 bit per output).

Everything else in the backward pass is a linear layer that the forward hardware can compute as
well, provided its operands are fetched in a different order:

- A convolution's gradient is a convolution with each kernel rotated by 180° and the input and
  output channels swapped.
- A fully connected layer's gradient is the same product with the weight matrix transposed.

This RTL builds that idea:

- One convolution block and one vector-matrix (VMM) block. Both are output stationary.
- A store path that applies ReLU and max-pooling while results go out to DRAM, and backward ReLU
  and unpooling while gradients go out.
- About 24.7 Kbit of on-chip mask memory for the CIFAR-10 network below.
- A scheduler that runs the layers forward, then backward, reusing every block.

The result is the predicted class plus one relevance value per input pixel, written to DRAM.

## The three methods

They differ only in what a ReLU does to the gradient `R` on the way back. Here `f` is the ReLU's
forward input.

| method | backward ReLU | ReLU mask kept on chip |
|---|---|---|
| Saliency Map | `R' = (f>0) · R` | yes |
| DeconvNet | `R' = (R>0) · R` | no |
| Guided Backpropagation | `R' = (f>0) · (R>0) · R` | yes |

- The method is chosen when the design is built (parameter `METHOD`; the default is
  `GUIDED`).
- With `DECONVNET`, the ReLU mask memory is not instantiated.
- Max-pool index memory is needed by all three.
- `rtl/relu_unit.sv` holds all three rules. The forward ReLU is the same for each.

## Numbers and arithmetic

- Data, weights and gradients are 16-bit two's complement fixed point with 8 fractional bits
  (`FRAC`).
- Products are accumulated in 32 bits.
- A result is shifted right arithmetically by `FRAC` and saturated to 16 bits when it leaves a
  compute block.
- The backward pass is seeded with 1.0 (`1 << FRAC`) at the predicted class and 0 elsewhere.
- The predicted class is the first maximum of the last layer.

## The network and its DRAM image

`xai_pkg::DEFAULT_NET` is the CIFAR-10 network the design is sized for:

| layer | operation | input | output | mask kept |
|---|---|---|---|---|
| 0 | 3x3 conv, pad 1 | 3×32×32 | 32×32×32 | – |
| 1 | 3x3 conv + 2x2 max-pool | 32×32×32 | 32×16×16 | 8192 2-bit indices |
| 2 | 3x3 conv | 32×16×16 | 64×16×16 | – |
| 3 | 3x3 conv + 2x2 max-pool | 64×16×16 | 64×8×8 | 4096 2-bit indices |
| 4 | FC + ReLU | 4096 | 128 | 128 ReLU bits |
| 5 | FC | 128 | 10 | – |

That is 24,576 + 128 = 24,704 bits of masks. The mask memories are sized to exactly this
(`POOL_DEPTH=12288`, `RELU_DEPTH=128`).

A network is a constant array of `layer_t` descriptors. Each descriptor holds:

- kind (conv or FC);
- the ReLU and pool flags;
- the channel counts;
- the height and width;
- five DRAM word addresses (input, output, gradient, weights, bias);
- the bases of its masks in the two mask memories.

`xai_pkg::place()` fills in the addresses. All addresses are in 16-bit words, and the AXI byte
address is twice the word address. The layout is:

1. The input image (channel-major: `c*H*W + y*W + x`).
2. Per layer, in order:
   - the weights: conv `[cout][cin][3][3]`, FC `[out][in]`;
   - the bias `[cout]`;
   - the output activations (layer L's output is layer L+1's input);
   - a gradient buffer of the same size as the input, which receives the gradient with respect
     to that layer's input during the backward pass.
3. The relevance map (3×32×32), written by the backward pass of layer 0.

The host writes the image and weights, pulses `start`, waits for `done`, then reads `pred_class`
and the relevance map. With `bp_en` low, only inference runs.

To use another network, pass a different `NET` (and `REL_ADDR`) to `xai_accel`. The
restrictions are:

- conv layers are 3x3 with padding 1;
- map sizes are multiples of 2·`NOH` / 2·`NOW` when pooled;
- the last layer is FC;
- the mask memories must be large enough.

## Dataflow of one layer

`rtl/layer_scheduler.sv` runs layer 0 to N-1 forward. If `bp_en` is high, it then runs N-1 back
to 0. The phase is set for the whole design.

**Convolution.**
- Loop order: output channel → `NOH×NOW` output tile → input channel.
- Each step has four parts:
  - load the `(NOH+2)×(NOW+2)` input window, clipped at the map border; the missing halo stays
    zero and serves as the padding;
  - load the nine kernel taps;
  - run nine MAC cycles, one tap broadcast to all `NOH·NOW` multipliers per cycle;
  - after the last input channel, store the tile.
- The accumulators start from the bias in the forward pass and from zero in the backward pass.

**FC.**
- Loop order: `VT`-output tile → `VT`-input tile.
- Each step loads the `VT` inputs and the `VT×VT` weight block.
- It then runs `VT` MAC cycles, one input broadcast to `VT` multipliers per cycle.

**Backward pass.** The same loops run with the roles changed:

| | forward | backward |
|---|---|---|
| input | activations of layer L | gradient arriving at layer L's output (from layer L+1, or the one-hot seed) |
| conv kernels | `W[co][ci]` as stored | `W[ci][co]` rotated 180° (the loader reverses tap order) |
| FC weights | `W[o][i]` | `W[i][o]` (the loader writes the block transposed) |
| output goes to | layer L output buffer | layer L gradient buffer (layer 0: relevance map) |

The loader (`rtl/tile_loader.sv`) does the reordering while the words arrive. Each DRAM row is
fetched as one burst, and its words are written to the selected buffer at positions that are
mirrored (flip) or swapped (transpose). The compute blocks never know which phase they are in.

## The store path: where the non-linear layers live

There are no separate ReLU or pooling passes. `rtl/store_unit.sv` applies them to a finished tile
as it goes out to DRAM, one value at a time.

**Forward.**
- For each 2×2 window when the layer pools:
  - the maximum and its position `2*row+col` are found;
  - the position goes to the pool index memory;
  - only the maximum is written.
- Then, if the layer has a ReLU, negatives become 0 and the sign bit goes to the ReLU mask
  memory.
- A ReLU that comes right before a pool is applied to the pooled value. Its mask is therefore kept
  per pooled output, not per pre-pool value. In the backward pass only the window maximum receives
  gradient, so this carries the same information in a quarter of the bits.

**Backward.** The gradient computed for layer L is the gradient at layer L-1's output. Before it is
written, layer L-1's own non-linearities are undone in reverse order:
- the backward ReLU rule of the selected method, using the stored mask bit;
- then unpooling: the value goes to the stored window position of a 2×2 block, and zeros go to the
  other three.

The masks are read one cycle ahead, since both memories have synchronous reads.

In the last forward layer the store unit also tracks the running maximum. Its index is the
predicted class and the seed position for the backward pass.

## Interfaces

- **Control.** `start` (pulse), `bp_en`, `busy`, `done` (pulse), `pred_class`.
- **AXI4 master.** 16-bit data; the interface expects a 16-bit port or width converter.
  - Reads are INCR bursts of up to 256 beats, split where they would cross a 4 KB boundary.
  - Writes are single beats, with AW and W offered together.
  - One transaction is outstanding per channel.
  - Assertions in the two masters check that AR/AW/W stay stable until accepted and that no burst
    crosses 4 KB.

## Parameters of `xai_accel`

| parameter | default | meaning |
|---|---|---|
| `NOH`, `NOW` | 4, 4 | convolution output tile; `NOH·NOW` multipliers |
| `VT` | 16 | VMM tile; `VT` multipliers |
| `FRAC` | 8 | fractional bits |
| `METHOD` | `GUIDED` | `SALIENCY`, `DECONVNET` or `GUIDED` |
| `RELU_DEPTH`, `POOL_DEPTH` | 128, 12288 | mask memory sizes |
| `NET`, `REL_ADDR` | CIFAR-10 network above | layer table and relevance-map address |

The defaults use 4·4 + 16 = 32 multipliers, the Pynq-Z2 configuration. Two larger
configurations exist:

- Ultra96-V2 style: `NOW=8`, 48 multipliers.
- ZCU104 style: `NOH=NOW=8`, `VT=32`, 96 multipliers.

## Timing

All blocks run on one clock, with an active-low reset.

| block | reset | timing |
|---|---|---|
| convolution block | synchronous | `K·K` = 9 cycles per input channel |
| VMM block | synchronous | `VT` cycles per input tile |
| store path | synchronous | about 3 cycles per value written, plus DRAM write latency |
| other blocks | asynchronous | – |

The schedule is strictly sequential: no DRAM transfer overlaps with compute. At the defaults, the
full network takes:

- 13,962,356 cycles forward;
- 14,086,868 cycles backward;

measured in simulation with a DRAM model that answers without stalls. At 100 MHz that is 139.6 ms
and 140.9 ms.

The larger configurations (the full network, `tb/tb_xai_boards.sv`) take:

| tile | `VT` | multipliers | forward | backward |
|---|---|---|---|---|
| 4×4 (default) | 16 | 32 | 139.6 ms | 140.9 ms |
| 4×8 | 16 | 48 | 91.8 ms | 93.2 ms |
| 8×8 | 32 | 96 | 68.4 ms | 69.9 ms |

The reference HLS implementation reports 43.5 ms forward and 66.8 ms forward + backward at the same
multiplier count. This design is roughly 3× slower, for two reasons:

- It reloads the input window once per output channel.
- It never overlaps loading with computing.

The time is dominated by single-word writes and by short input-row bursts. Caching the input
window across output channels and adding write bursts are the obvious next steps. Neither changes
the arithmetic.

## Departures from the original design

These are choices this RTL makes where the original description is silent or different.

- **Network ReLUs.** The CIFAR-10 network has a ReLU only after the first FC layer. This matches
  its layer table and its 24.7 Kbit mask total. A ReLU can be enabled on any layer through `NET`.
- **Mask size for ReLU-then-pool.** As explained above, the mask is kept at pooled resolution, not
  at the ReLU's input resolution.
- **Fixed-point format.** Q7.8 (8 fractional bits) is this design's choice. The original gives
  only the 16-bit width.
- **Schedule and AXI.**
  - The schedule is sequential with no double buffering.
  - Writes are single beats.
  - The latency is therefore higher than the reference numbers (see Timing).
- **VMM size.** `VT` = 16 on the small configuration is inferred from its multiplier count.
- **Restrictions.** Layer shapes are fixed at elaboration (`NET` parameter), and the last layer
  must be FC.
- **Not included.** The host processor and DRAM are outside this RTL; the top has the control
  ports and an AXI4 master port for them.

## Files

`rtl/`:

| file | contents |
|---|---|
| `xai_pkg.sv` | types, layer descriptors, the default network and its DRAM placement |
| `xai_accel.sv` | top |
| `layer_scheduler.sv` | layer and tile sequencing, phase, BP seed |
| `tile_loader.sv` | DRAM → buffers, with flip, transpose and one-hot |
| `axi_rd_master.sv`, `axi_wr_master.sv` | AXI4 masters |
| `conv_engine.sv` | NOH×NOW output-stationary MAC array |
| `vmm_engine.sv` | VT-wide output-stationary VMM |
| `store_unit.sv` | requantise, ReLU/pool (FP) and ReLU-BP/unpool (BP), masks, argmax |
| `relu_unit.sv`, `maxpool_unit.sv`, `unpool_unit.sv` | the non-linear operators |
| `relu_mask_mem.sv`, `pool_index_mem.sv` | on-chip mask memories |

`tb/`:

| file | contents |
|---|---|
| `tb_<block>.sv` | one self-checking testbench per block |
| `tb_xai_accel.sv` | end to end on a small six-layer network, four copies of the design (three methods with backward pass, plus inference only) against a bit-exact software model, stalling DRAM; it counts every mechanism (border clipping, flip, transpose, one-hot seed, pool, unpool, forward/backward ReLU, 4 KB burst split, AXI stalls, inference-only run) |
| `tb_xai_full.sv` | the full CIFAR-10 network at the default parameters, checked word for word against the same model (about 20 s of simulation) |
| `tb_xai_boards.sv` | the full network on the 4×8/`VT`=16 and 8×8/`VT`=32 configurations side by side, both checked word for word against the model |
| `xai_ref_pkg.sv` | the software model |
| `axi_mem_model.sv` | the DRAM model |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_xai_accel rtl/xai_pkg.sv tb/xai_ref_pkg.sv tb/tb_xai_accel.sv -o sim
./obj_dir/sim
```

For the block testbenches, drop `tb/xai_ref_pkg.sv` and change the top module name. Inputs are
random, so `+verilator+rand+reset+2` can be used to randomise the initial state.
