# EDEA: a dual-engine accelerator for depthwise separable convolution

A depthwise separable convolution (DSC) layer is a 3x3 depthwise convolution
(DWC, one kernel per channel) followed by batch normalization, ReLU,
requantization and a 1x1 pointwise convolution (PWC) over all channels. The
two halves have very different arithmetic intensity, so a single shared
engine is badly utilized on one of them, and the intermediate activations
between them normally make a round trip through memory.

This design gives each half its own engine and runs them concurrently on the
same tile. The DWC result never leaves the chip: a small *Non-Conv* unit
turns it directly into the 8-bit PWC input with one fixed-point multiply-add
(`y = k*x + b`, with batch norm, dequantization and requantization folded
into `k` and `b` offline), and an intermediate buffer hands it to the PWC
engine. With 8 channels and 16 kernels per step the PWC engine is busy every
cycle for every MobileNetV1 layer; the DWC engine works one cycle out of
`ceil(K/16)`.

The RTL is SystemVerilog (IEEE 1800-2017), synthesizable, with parameters
whose defaults are the configuration described for the 22 nm chip
(288 DWC multipliers, 512 PWC multipliers, 8-bit data, 24-bit sums).

## Tiling and loop order

For a layer with input `R x C x D`, output `N x M x K` and 3x3 kernels:

* **Channel group** - `TD = 8` channels are processed together. The DWC
  engine takes a `4x4x8` ifmap window (`5x5x8` at stride 2) and a `3x3x8`
  kernel and produces a `2x2x8` output block in one step.
* **Output block** - `2x2` output pixels (`Tn = Tm = 2`). The same `2x2x8`
  block is the PWC input.
* **Kernel group** - `TK = 16` pointwise kernels. One PWC step multiplies the
  `2x2x8` block by `16` kernels of `1x1x8`, giving `2x2x16` partial sums.
* **Tile** - what one load of the on-chip buffers covers: one channel group
  of an 8x8 output region (16 blocks). Its ifmap is at most 17x17 pixels
  (stride 2) including padding.

Inside a tile the controller steps over the 16 (or fewer) blocks in row-major
order and, for each block, over all `ceil(K/16)` kernel groups, one PWC step
per clock. The DWC work for a block is done once, with its first kernel group;
the other kernel groups re-read the quantized block from the intermediate
buffer. Partial sums over channel groups are accumulated in the PWC engine:
for every channel group after the first, the accelerator reads the previous
partial sum from external memory and writes back the new one.

## The pipeline

Every step goes through the same eight register stages, so the controller
never stalls and the latency of a tile is exact. Counting from the cycle T0
in which `start` is sampled, with step *n* (0-based) issued in cycle T(n+1):

| cycle      | stage                                                     | block                      |
|------------|-----------------------------------------------------------|----------------------------|
| T(n+1)     | read ifmap window and 3x3 kernels (first kernel group only) | `dwc_ifmap_buffer`, `dwc_weight_buffer` |
| T(n+2)     | 288 multiplies, 32 nine-input adder trees                  | `dwc_engine`               |
| T(n+3)     | read `k`, `b` of the 8 channels                            | `offline_buffer`           |
| T(n+4)     | `Round(Clip(k*x+b, 0, 255))` on 32 values                  | 8 x `nonconv_unit`         |
| T(n+5)     | block written; read block and 16x8 PWC weights             | `intermediate_buffer`, `pwc_weight_buffer` |
| T(n+6)     | 512 multiplies, 64 eight-input adder trees; psum read issued | `pwc_engine`             |
| T(n+7)     | add partial sum from external memory                       | `pwc_engine`               |
| T(n+8)     | `out_valid`, 2x2x16 24-bit sums                             | -                          |

The first result therefore appears 9 cycles after the start cycle, and a
tile with `P` blocks and `G = ceil(K/16)` kernel groups takes

    Lat_tile  = 9 + P * G                       cycles
    Lat_layer = Lat_tile * tiles * ceil(D / 8)

which is the latency model of the original description
(`Lat_tile = (9 + ceil(N/Tn) ceil(M/Tm) ceil(K/Tk)) T`). The order of the
stages follows its pipeline diagram; which stage holds which register is
this implementation's choice. The intermediate buffer is written at the end
of T(n+4) and read in T(n+5), so a block is available to the PWC side in
the cycle after the Non-Conv units produce it; a block entry is only ever
overwritten by the same block of the next tile.

The DWC window of output pixel `(r, c)` of a block (pixels numbered 0..3
row-major) covers window rows `s*r .. s*r+2` and columns `s*c .. s*c+2`,
`s` the stride. Block `(br, bc)` of a tile starts at ifmap pixel
`(2*br, 2*bc)` at stride 1 and `(4*br, 4*bc)` at stride 2.

## The Non-Conv unit

With LSQ-style quantization (activation scale `s_a`, weight scale `s_w`, next
activation scale `s'_a`) and batch norm parameters `gamma, beta, mu, sigma,
eps`, the chain dequantize -> BN -> ReLU -> quantize of an integer DWC sum `x`
collapses to

    y = Round(Clip(k*x + b, 0, 2^8 - 1))
    k = gamma * s_a * s_w / (s'_a * sqrt(sigma^2 + eps))
    b = beta / s'_a - gamma * mu / (s'_a * sqrt(sigma^2 + eps))

`k` and `b` are computed offline per channel and stored as signed 24-bit
fixed point with 8 integer and 16 fraction bits (`Q8.16`: store
`round(k * 2^16)`). The lower clip bound is the ReLU. The unit computes the
48-bit product, adds `b` and `2^15`, shifts right by 16 (round half up) and
saturates to `[0, 255]`. Rounding half up is this design's choice; a model
trained with round-half-to-even will differ by one LSB on exact ties.

There are eight units, one per channel; each handles the four pixels of its
channel's block in parallel.

## The engines

* `dwc_pe` - one channel: 36 multipliers in four columns of nine, one column
  per output pixel, each reduced by a nine-input `adder_tree`.
  `dwc_engine` holds eight of them and the stride-dependent window selection.
* `pwc_pe` - four multipliers, one per pixel, for one (channel, kernel) pair.
  `pwc_engine` holds 8 x 16 = 128 of them; for each kernel and pixel an
  eight-input adder tree sums over the channels, then the partial sum is
  added.
* `adder_tree` - a combinational balanced binary tree with inputs
  sign-extended to 24 bits.

Activations are unsigned 8-bit (they follow ReLU and the clip), weights are
signed 8-bit, products fit 16 bits, sums are 24-bit two's complement and wrap
on overflow.

## Interface and how to run a layer

`edea_top` has no bus; its ports are the raw buffer write ports and a
partial-sum/result stream, so any memory system can be put in front of it.
For each tile (output region x channel group):

1. Write the padded ifmap tile: `ifm_wr_en, ifm_wr_row, ifm_wr_col,
   ifm_wr_data[8]` (one pixel, all 8 channels, per cycle; pixel `(r, c)` of
   the tile is ifmap pixel `(s*y0 - 1 + r, s*x0 - 1 + c)` for an output tile
   at `(y0, x0)`, zero outside the image).
2. Write the nine kernel taps: `dwcw_wr_en, dwcw_wr_addr (0..8),
   dwcw_wr_data[8]`.
3. Write `k` and `b` of the eight channels: `off_wr_en, off_wr_ch, off_wr_k,
   off_wr_b`.
4. Write the PWC weights of this channel group: `pwcw_wr_en, pwcw_wr_kg,
   pwcw_wr_kern, pwcw_wr_data[8]` (kernel `16*kg + kern`).
5. Pulse `start` with `cfg_stride2`, `cfg_acc` (0 for the first channel
   group, 1 after), `cfg_n_rows`, `cfg_n_cols` (2x2 blocks, 1..4) and
   `cfg_n_kg` (1..64). `busy` is high until `done`, which comes with the
   last result.
6. When `psum_rd_en` is high, return in the next cycle on `psum_in` the
   stored partial sums of block `psum_rd_blk`, kernel group `psum_rd_kg`.
7. Store `out_data[pixel][kernel]` whenever `out_valid` is high; it belongs
   to block `out_blk` (row-major, `cfg_n_cols` blocks per row) and kernel
   group `out_kg`.

The order in which the memory side visits tiles is free. Visiting all
spatial tiles of one channel group before the next lets the PWC weights of
that group be loaded once per layer (weight traffic `D x K`); the included
testbenches visit the channel groups inside each spatial tile instead, which
reloads them per tile. Buffers are not double-buffered: loading and
computing alternate. Output
sizes must be even (all MobileNetV1 layers are); an odd edge would produce a
block row that the memory side has to discard.

## Performance on MobileNetV1 (32x32 inputs)

The testbench `tb_mobilenet_dsc` runs all thirteen DSC layers with random
data and checks every output. Compute cycles, start to last result summed
over tiles, equal the latency model exactly:

| layer | input -> output | stride | tiles x groups | cycles | MACs | GOPS at 1 GHz |
|------:|-----------------|:------:|---------------:|-------:|-----:|--------------:|
| 0  | 32x32x32 -> 32x32x64     | 1 | 16 x 4   | 4672 | 2392064 | 1024.00 |
| 1  | 32x32x64 -> 16x16x128    | 2 | 4 x 8    | 4384 | 2244608 | 1024.00 |
| 2  | 16x16x128 -> 16x16x128   | 1 | 4 x 16   | 8768 | 4489216 | 1024.00 |
| 3  | 16x16x128 -> 8x8x256     | 2 | 1 x 16   | 4240 | 2170880 | 1024.00 |
| 4  | 8x8x256 -> 8x8x256       | 1 | 1 x 32   | 8480 | 4341760 | 1024.00 |
| 5  | 8x8x256 -> 4x4x512       | 2 | 1 x 32   | 4384 | 2134016 | 973.55 |
| 6-10 | 4x4x512 -> 4x4x512     | 1 | 1 x 64   | 8768 | 4268032 | 973.55 |
| 11 | 4x4x512 -> 2x2x1024      | 2 | 1 x 64   | 4672 | 2115584 | 905.64 |
| 12 | 2x2x1024 -> 2x2x1024     | 1 | 1 x 128  | 9344 | 4231168 | 905.64 |

MACs count DWC and PWC multiply-accumulates; GOPS = 2 x MACs / cycles at
1 GHz. These are the throughputs published for the chip: 1024 GOPS for
layers 0 to 4, 973.55 GOPS as its headline figure, 905.6 GOPS for layers 11
and 12, where the 9-cycle start of each tile weighs most. The cycle counts
also agree with the published per-layer latencies read off their chart
(about 4.65 us for layer 0, 9.35 us for layer 12). The 8x8 output tile was
chosen because it reproduces them; the description itself gives no buffer
size. Cycles spent loading
the buffers are not included in either.

## Where this RTL departs from or goes beyond the description

Followed: two separate engines working in parallel; 288 DWC and 512 PWC
multipliers arranged as 8 PEs of 36 and 128 PEs of 4; a `4x4x8`/`5x5x8`
ifmap window, `2x2x8` DWC/PWC block and `2x2x16` PWC output; the Non-Conv
formula with 24-bit Q8.16 `k`, `b`; the buffer set (DWC ifmap, DWC weight,
offline, intermediate, PWC weight); 8-bit operands, 16-bit products, 24-bit
sums; the 9-cycle initiation and the tile latency formula.

Chosen here, because the description does not say:

* buffer capacities (one 17x17x8 ifmap tile, one channel group of weights
  and Non-Conv parameters, 64 kernel groups of PWC weights, 16 blocks of
  intermediate data), their register-array implementation and their port
  shapes;
* kernel groups as the innermost loop inside a tile;
* the partial-sum protocol with external memory and the fixed one-cycle
  read latency it expects;
* round half up in the Non-Conv unit; signed `k`, `b`; wrap-around on
  24-bit overflow;
* one Non-Conv unit per channel, each with four lanes;
* the number of adder trees: each PWC kernel uses four eight-input trees
  (one per output pixel) and each DWC PE four nine-input trees, the minimum
  the block sizes require; the block diagram's "adder tree x8" labels are
  read as the per-channel and per-kernel groups of these trees.

Not built: quantization or activation of the PWC output (it leaves as a
24-bit sum), the external memory and its controller, double buffering of
the input buffers, anything power- or layout-specific. Besides the default
sizes (8 channels, 16 kernels per step), `TD = 16`, `TK = 32` is simulated
end to end (`tb_edea_scaling`); the description notes that the DWC array
scales in channels and the PWC array in channels and kernels.

## Files and simulation

`rtl/` holds one module or package per file: `edea_pkg` (types and widths),
`adder_tree`, `dwc_pe`, `dwc_engine`, `nonconv_unit`, `pwc_pe`,
`pwc_engine`, the five buffers, `edea_controller` and `edea_top`. `tb/` holds
a self-checking testbench per module (`tb_<module>.sv`), the end-to-end test
`tb_edea_top` (three small layers covering stride 1 and 2, edge tiles,
several kernel and channel groups, ReLU clipping and saturation, and the
per-tile latency), its scaled twin `tb_edea_scaling`, and
`tb_mobilenet_dsc`. Each prints
`TB_RESULT checks=N failures=F`.

With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_edea_top \
        -y rtl -y tb rtl/edea_pkg.sv tb/tb_edea_top.sv
    ./obj_dir/Vtb_edea_top

Replace `tb_edea_top` by any other testbench name. `tb_mobilenet_dsc`
accepts `+layers=<bit mask>` to run a subset of layers. Lint with
`verilator --lint-only -Wall -y rtl rtl/edea_pkg.sv rtl/edea_top.sv`.
