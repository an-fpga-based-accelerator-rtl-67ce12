# A CNN accelerator for arbitrary kernel sizes: Z-flow, kernel segmentation and layer fusion

Large-kernel CNNs (RepLKNet uses kernels up to 31x31) are a poor fit for accelerators that
keep sliding-window overlap in line buffers: the buffers grow with the kernel, or the kernel
is cut into fixed 3x3/5x5/7x7 tiles and padded with zeros, which wastes compute. This
design avoids both. It does not unroll the kernel at all. A cube of 8 x 8 x 16
multiply-accumulate units computes an 8 x 8 block of output pixels for 16 output channels.
The kernel is walked in time, one kernel position per clock, in a snake ("Z-flow") order
that lets almost every pixel pass from one PE's register to its neighbour's instead of
coming from memory again. Kernels wider than 16 are cut into sub-kernels ("Kseg"), so the
register array and the buffer read pattern stay fixed whatever the kernel size. On top of
that, a layer controller runs chains of layers without sending intermediate maps off chip
(vertical fusion, VF). It also runs parallel branches of a multi-branch block as one pass
over the MAC cube (horizontal fusion, HF).

All RTL is synthesizable SystemVerilog-2017. The default parameters are the 8 x 8 x 16
configuration with 8-bit data.

## Block diagram

```
              host register port                    external memory port (8-byte words)
                     |                                          |
              +-------------+   cur/next   +------------+   +--------------------------+
              | config_regs |------------->| fused_ctrl |-->|        dma_engine         |
              | 16 layers   |  descriptors | (layer and |   | scatter (load)/gather (store)
              +-------------+              | fusion     |   +--------------------------+
                                           | sequencing)|      |            |        ^
                                           +------------+      v            v        |
                                   start/done |   |       +-----------+ +------------+
                                              v   v       | weight    | | feature    |
                                   +-------------+ +----+ | buffer    | | buffers    |
                                   | conv_engine | |dw- | | bank 0/1  | | IN_A IN_B  |
                                   |  zflow_addr | |pool| +-----------+ | OUT_A OUT_B|
                                   |  zflow_arr. | |eng.|      |        +------------+
                                   |  mac_cube   | +----+      |          ^  |
                                   |  out_drain  |   ^         |  writes  |  | pixels
                                   +-------------+   |         |          |  |
                                          ^__________|_________|__________|__v
```

| Module | Role |
|---|---|
| `acc_pkg` | array sizes, data widths, Z-flow operations, layer descriptor `layer_cfg_t` |
| `accel_top` | top level: wires the storage, control and computing parts |
| `config_regs` | 16 layer descriptors written by the host, read out as current and next layer |
| `fused_ctrl` | runs the layers: DMA loads, engine start, stores, prefetch into idle banks |
| `dma_engine` | moves bytes between external memory and the buffers |
| `feature_buffer` | two banks of 256 KiB; instantiated twice (input pair, output pair) |
| `weight_buffer` | two banks of 256 KiB, one read port per kernel lane |
| `conv_engine` | standard, group and horizontally fused convolution |
| `dwpool_engine` | depthwise convolution and max pooling |
| `zflow_addr_gen` | kernel-step sequencer (snake order, Kseg, stride phases) |
| `zflow_arrangement` | 8 x 8 pixel register array with neighbour reuse |
| `mac_cube` | 8 x 8 x 16 signed 8-bit MACs with 32-bit accumulators |
| `out_drain` | requantiser and output staging, writes one row per clock |

## Z-flow: walking the kernel in time

For one output block (8 x 8 pixels, up to 16 channels), the engine visits every input
channel and, within it, every kernel position (kx, ky). At each step PE (y, x) needs input
pixel (oy*s + ky, ox*s + kx). It holds that pixel in its own register of the 8 x 8 array
in `zflow_arrangement`. The step's operation says where each register's next pixel comes from:

| Operation | When | Every register takes | Read from the buffer |
|---|---|---|---|
| `ZF_LOAD` | first step of a (sub-)kernel | a buffer pixel | all 64 |
| `ZF_SHL` | moving right along a kernel row | its right neighbour's pixel | column 7 (8 pixels) |
| `ZF_SHR` | moving left along the next row (mirrored) | its left neighbour's pixel | column 0 (8 pixels) |
| `ZF_SHU` | stepping to the next kernel row (the "inflection point") | the pixel of the register below | row 7 (8 pixels) |

Kernel row 0 is walked left to right and row 1 right to left, and so on. Stepping down a row
at the turning point reuses the whole array shifted by one row. After a sub-kernel's first
load, only 8 of the 64 pixels come from the buffer on each clock. `rd_need` tells the
engine which pixels those are, and only those buffer reads are enabled. The end-to-end test
measures about 2 buffer reads per step on average, against 64 without reuse.

The sequencer `zflow_addr_gen` produces one step per clock. A step carries the operation,
`kx`, `ky`, the input channel, and `first`/`last` flags. `first` clears the accumulators and
`last` hands them to the drain. A block therefore takes `nifg * nkx * nky` clocks. The next
block's start is accepted on the current block's last step, so there is no gap between
blocks.

### Kernel segmentation (Kseg)

The pixels an 8-wide window needs along one kernel row come from 8 different columns. For a
kernel up to 16 wide they can be served without conflicts. For a wider kernel the row is cut
into sub-kernels: segments of 8 positions are taken off while more than 16 remain, and the
rest (9 to 16 positions) forms the last segment. For example, a 31-wide kernel becomes
8 + 8 + 15. The same rule cuts the kernel height with 8-row segments. Each sub-kernel
starts with a full `ZF_LOAD` and is then walked in snake order. All sub-kernels accumulate
into the same MACs, so segmentation costs one extra full load per sub-kernel and no extra
multiplications. The first segment having exactly the array width is what keeps the later
segments' pixels at the same relative buffer positions.

### Stride 2

With stride 2, neighbouring PEs are two input pixels apart. Walking kx in steps of 1 would
break the neighbour reuse. The sequencer therefore splits the kernel into its four stride
phases (even/odd rows x even/odd columns). Within a phase kx and ky advance by 2, so the
pixel a PE needs next is exactly the one its neighbour held, and Z-flow works unchanged on
each phase. The phases are concatenated: a 3x3 stride-2 kernel runs as 2x2, 1x2, 2x1 and
1x1 sub-kernels, 9 steps in all, with no wasted multiplications.

## The CONV module

`conv_engine` visits the output in blocks, in this order:
- group;
- chunk of 16 output channels;
- row block of 8 rows;
- column block of 8 columns.

Its pipeline is:

1. **Step clock.** The sequencer's step forms 64 pixel addresses (CHW layout, zero for
   padding positions) and 16 weight addresses (layout `[group][lane][ci][ky][kx]`). The
   arrangement array loads or shifts, and the lane weights are registered.
2. **Next clock.** `mac_cube` multiplies the window by each lane's weight and
   accumulates. `clr` is set on the block's first step.
3. **After the last step.** `out_drain` captures all 16 x 64 accumulators. It requantises
   them (arithmetic right shift by `shift`, optional ReLU, saturation to int8) into a
   staging register. It then writes them one 8-pixel row per clock while the cube already
   works on the next block.

If a block finishes while the previous block is still draining, its last step is held (the
engine's `stall` output). Stalls occur only when a block is shorter than its drain:
`nlanes * nrows` clocks, at most 128. Layers with few input channels and small kernels hit
this.

Compute time per layer is

    groups * ceil(noft/16) * ceil(noy/8) * ceil(nox/8) * nifg * nkx * nky   clocks (+ stalls)

### Group convolution and horizontal fusion

A group convolution uses `groups` and `nifg` (input channels per group). For HF, one
descriptor lists up to four branches (`nbr`). Each branch has its output channels per group
(`nofg`) and the first output channel of its result map (`och_base`). The branches must use
the same kernel size; the host zero-pads smaller kernels to the largest one. They must also
use the same group count. The 16 lanes for group g then carry the concatenated channels
of all branches for that group (`noft` = sum of `nofg`). This is how a branch with only
1 to 4 output channels per group still fills the lanes. When the block is drained, lane j
of branch i goes to output channel

    och_base_i + g * nofg_i + (j - offset_i)

so each branch's results land in its own channel range of the output map. The shared
input map is loaded once for all branches.

## The DWCV/POOL module

`dwpool_engine` reuses the same sequencer and arrangement array for one channel at a time.
Its 8 x 8 units either multiply-accumulate with the channel's kernel (depthwise
convolution) or keep a running maximum (max pooling). Padding reads as 0 for depthwise
convolution and as -128 for pooling. A block takes `nkx * nky` clocks. The drain is the
same `out_drain` with one lane.

## Buffers and DMA

There are four feature banks of 256 KiB each, numbered:
- 0 = IN_A, 1 = IN_B: the input pair, in one `feature_buffer`;
- 2 = OUT_A, 3 = OUT_B: the output pair, in a second `feature_buffer`.

There are two weight banks of 256 KiB. A feature map is stored channel-major from address
0 of its bank. The window port of a feature bank has 64 independent combinational byte
read ports, one per PE. This is a simplification of a banked buffer, so no read
conflicts or combination registers are needed. The weight buffer has 16 read ports, one
per lane.

The `dma_engine` executes one command at a time. A command gives a direction, the target
(feature bank or weight bank), a memory address, a buffer address and a length in bytes:
- **load:** memory words (8 bytes) are requested in order and scattered into the buffer
  with byte enables;
- **store:** 8 bytes at a time are gathered from a feature bank and written out, with a
  partial byte mask on the last word.

The memory port is a request/grant handshake with in-order read data (`m_rvalid`). It
moves one word per clock when the memory grants every clock.

## Layer control and fusion

The host writes descriptors (`layer_cfg_t`, 16 words of 32 bits each) through the
`cfg_we`/`cfg_addr`/`cfg_wdata` port. Word w of layer l is at address `l*16 + w`, and word 0
holds bits 31:0. The host then pulses `start` with `nlayers`. For each layer, `fused_ctrl`
does the following:

1. Loads the weights into bank `wbank` (if `load_w`), unless they were prefetched.
2. Loads the input map into feature bank `src` (if `load_in`), unless it was prefetched.
3. Starts the engine selected by `engine` (CONV, DWCV or POOL). While it runs, the
   controller prefetches the next layer's weights into the other weight bank. It also
   prefetches the next layer's input into a feature bank the current layer neither reads
   nor writes.
4. Stores the map in bank `dst` to memory (if `store_out`).

The fusion schedules come only from the descriptor fields:

- **Layer by layer:** every layer loads its input and stores its output.
- **Vertical fusion:** only the first layer of a chain loads an input and only the last
  stores. Each layer writes into a bank that the next layer reads. For example, a
  three-layer inverted-residual chain goes IN_A -> IN_B -> OUT_A -> OUT_B. Intermediate
  maps never leave the chip and use no storage beyond the existing banks. Weights for
  every layer are still loaded, overlapped with the previous layer.
- **Horizontal fusion:** one CONV descriptor with `nbr > 1`, as described above.

`done` pulses once after the last layer.

### Descriptor fields (from the most significant bit)

| Field | Bits | Meaning |
|---|---|---|
| `engine` | 2 | 0 CONV, 1 DWCV, 2 POOL |
| `relu`, `shift` | 1, 5 | requantisation |
| `load_in`, `load_w`, `store_out` | 1 each | DMA actions of this layer |
| `src`, `dst` | 2 each | feature banks read and written |
| `wbank` | 1 | weight bank |
| `stride`, `pad` | 2, 4 | stride 1 or 2, symmetric zero padding |
| `nkx`, `nky` | 6 each | kernel size, up to 63 |
| `nix`, `niy`, `nif` | 12 each | input map size |
| `groups`, `nifg`, `noft`, `nof` | 12 each | groups, inputs per group, lanes per group, output channels |
| `nbr`, `br[4]` | 3, 4 x 24 | HF branches: `nofg`, `och_base` |
| `in_addr`, `w_addr`, `out_addr` | 32 each | external-memory byte addresses |
| `w_len` | 32 | weight bytes |

See `acc_pkg.sv` for the exact layout.

## Departures from the published design, and what is missing

- **No tiling.** A layer runs as one tile: its whole input map must fit one 256 KiB
  feature bank and its weights one 256 KiB weight bank. The row tiling (Tiy), the
  output-channel tiling, and the tile-by-tile fused schedule (first/middle/last tile, stores
  of the previous tile overlapping computation) are not built. A host can split output
  channels across several descriptors. The stem layers of MobileNetV2, ResNet-50 and
  RepLKNet at 224x224 do not fit one bank.
- **Output stores are not overlapped** with the next layer's computation; prefetch covers
  weights and inputs only.
- **Combination registers** are not needed, because the feature bank has a read port per
  PE. A banked buffer would need them.
- **Residual additions** of bypass-branch blocks are not built; neither are activation
  functions other than ReLU. The quantiser (shift, ReLU, saturation) is this design's
  own choice; the published work only states 8-bit quantisation.
- **Own choices:**
  - buffer sizes;
  - descriptor format;
  - memory protocol;
  - 32-bit accumulators;
  - the order of blocks and of stride phases;
  - the segment sizes after the first Kseg segment.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog. `tb_ref_pkg` holds a
reference model of a layer (convolution, group/HF, depthwise, pooling, quantiser) that the
engine and top-level tests compare against. `dram_model` is a behavioural external memory
with latency and random grant stalls.

| Testbench | What it checks |
|---|---|
| `tb_zflow_addr_gen` | step order against a software walk, Kseg segment counts, stride phases, no bubbles |
| `tb_zflow_arrangement` | each operation against a model of the register array |
| `tb_mac_cube` | accumulation and clear against integer arithmetic |
| `tb_out_drain` | quantiser, addresses, byte enables, drain timing |
| `tb_conv_engine` | layers with various kernels, strides, groups and an HF layer against the reference, cycle count |
| `tb_dwpool_engine` | depthwise and pooling layers against the reference |
| `tb_feature_buffer`, `tb_weight_buffer` | simultaneous writes, all read ports, bank independence |
| `tb_dma_engine` | loads and stores of odd lengths under random stalls, throughput |
| `tb_config_regs` | descriptor write and read-back |
| `tb_fused_ctrl` | event order of a standalone layer followed by a three-layer fused chain |
| `tb_accel_top` | full accelerator at default parameters (see below) |

`tb_accel_top` runs the accelerator at its default parameters on a seven-layer program
through the memory model:
- a 3x3 convolution;
- a 3x3 stride-2 convolution;
- a 3x3 stride-2 max pool;
- a three-layer vertically fused chain (1x1, 19x19 depthwise, 1x1);
- a two-branch HF group convolution with 5x5 kernels.

It compares every output byte in memory with the reference model. It also counts each
mechanism and fails if any never occurs:
- mirrored rows and inflection shifts;
- Kseg sub-kernels;
- stride-2 layers;
- drain stalls;
- weight and input prefetches;
- fused writes between banks;
- HF, pooling and depthwise layers.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style -Irtl -Itb \
        rtl/acc_pkg.sv tb/tb_ref_pkg.sv $(ls rtl/*.sv | grep -v acc_pkg) \
        tb/dram_model.sv tb/tb_accel_top.sv --top-module tb_accel_top
    ./obj_dir/Vtb_accel_top

Pass `rtl/acc_pkg.sv` first so the package is compiled before its users. Width-extension
warnings are expected: the address arithmetic mixes 12-bit map dimensions with wider
buffer addresses on purpose. The full test takes under a second of simulation time
(about 28,000 clocks). Unit testbenches need only their module, its submodules and the
package.
