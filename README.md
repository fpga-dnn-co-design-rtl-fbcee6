# A tile-pipelined Bundle accelerator for small FPGAs

Edge FPGAs such as the Zynq-7020 on a PYNQ-Z1 board (220 DSPs, 4.9 Mbit of
block RAM) are too small to hold one hardware unit per DNN layer. This design
uses the opposite approach, as described in the FPGA/DNN co-design work of
Hao et al. ("FPGA/DNN Co-Design: An Efficient Design Methodology for IoT
Intelligence on the Edge"). The network is built from repeated copies of a
single building block, a *Bundle*. The hardware has exactly one IP instance
for each layer type in that Bundle and reuses it for every layer and every
copy of the Bundle.

The Bundle built here is the one the co-design search selected for all three
final networks ("Bundle 13"):

    depth-wise 3x3 conv -> activation -> 1x1 conv -> activation -> [2x2 max-pool]

The feature map is cut into 8x8-pixel tiles. Each tile passes through five
stages: load from DRAM, depth-wise convolution, 1x1 convolution,
pooling/copy, and write-back to DRAM. Several tiles are in flight at once,
each in a different stage. Within a Bundle, tiles move between stages through
on-chip ping-pong buffers. Between Bundles, feature maps go through DRAM.

The RTL is SystemVerilog-2017 and synthesizable. At its default parameters
(PF = 16 channel lanes, 8-bit feature maps, up to 512 channels) it uses about
4.5 Mbit of on-chip memory.

## Block diagram

```
                 +-------------------------- tile_arch_top --------------------------+
                 |                                                                   |
  DRAM read  <==>|  offchip_dma --(weights)--> weight_buffer ---+---------+           |
  channels       |      |                                      | dw taps | pw weights|
                 |      v                                      v         v           |
                 |   buf_in ---> dwconv3x3_ip ---> buf_mid ---> conv1x1_ip ---> buf_pw|
                 |  (halo tile)  + act_quant                   + act_quant       |    |
                 |                                                               v    |
  DRAM write <== |  offchip_dma <--- buf_out <--- maxpool2x2_ip <----------------+    |
  channel        |                                                                    |
                 |  tile_pipeline_ctrl: start/done of every stage, buffer flags        |
                 +--------------------------------------------------------------------+
```

All four `buf_*` are `pingpong_buffer`s with two banks. The producing stage
writes one bank while the consuming stage reads the other. Each bank has a
full flag, so that both stages always know whether there is room for the next
tile or a finished tile to read.

| module | role |
|---|---|
| `tile_arch_pkg` | default sizes, `act_mode_e`, `stage_e`, the `bundle_cfg_t` pass descriptor |
| `tile_arch_top` | wires the blocks above together; one Bundle pass per `start` |
| `tile_pipeline_ctrl` | starts each of the five stages on its next tile as soon as it can run |
| `offchip_dma` | loads weights and halo tiles, writes output tiles back |
| `dwconv3x3_ip` | depth-wise 3x3 convolution, PF channels in parallel |
| `conv1x1_ip` | 1x1 convolution, PF output channels in parallel; the channel count can change here |
| `maxpool2x2_ip` | 2x2/stride-2 max pool, or a plain copy when the Bundle does not down-sample |
| `act_quant` | requantizing shift plus ReLU / ReLU4 / ReLU8, one per lane |
| `pingpong_buffer` | two-bank on-chip data buffer with commit/release flags, synchronous read |
| `weight_buffer` | depth-wise and point-wise weights of one Bundle |

## The tile pipeline

This mechanism is what makes the small datapath efficient, and it is the
least obvious part of the RTL.

**Stages and buffers.** A pass over a map of `n_tiles` tiles first loads the
Bundle's weights. Then every tile goes through five stages: 0 = load,
1 = depth-wise, 2 = point-wise, 3 = pool, 4 = write-back. Stage `k` writes
ping-pong buffer `k` and stage `k+1` reads it. Tiles go in row-major order.

**Handshake.** Each buffer has two banks with a full flag each:
- The producer writes its current bank. When the tile is done it pulses
  `wr_commit`. That bank becomes full and the producer moves to the other bank.
- The consumer reads the oldest full bank. When it has finished the tile it
  pulses `rd_release`. That bank becomes free.
- `wr_ready` means the producer's bank is free. `rd_valid` means the
  consumer's bank holds a finished tile.

**Scheduling.** The controller starts stage `k` on its next tile when all of
these hold:
- the stage is idle and has tiles left;
- its input buffer has a finished tile (`rd_valid`);
- its output buffer has a free bank (`wr_ready`).

When the stage's `done` pulse comes, the same cycle commits its output buffer
and releases its input buffer. The next start is decided one cycle later, from
the updated flags. Each IP raises `done` one cycle after its last buffer
write, so a committed tile is always complete. A fast stage runs ahead until
its output buffer is full. A slow stage (in practice the 1x1 convolution)
sets the pace, and the stages after it finish each tile quickly and wait.
For 4 tiles with a slow 1x1 stage:

```
load        t0 t1 t2 t3
dw-conv        t0 t1          t2          t3
1x1 conv          t0--------- t1--------- t2--------- t3---------
pool/copy                     t0          t1          t2          t3
write-back                      t0          t1          t2          t3
```

Stages are never held back by a stage that is not their direct neighbour.
Compared with advancing all stages in lock-step, this saves the slack of every
step. The gain is small when the 1x1 stage dominates: 2.7 % on the 16x16
pass of the end-to-end test (5172 instead of 5315 cycles).

**Why tiles are independent.** A 3x3 convolution needs one pixel of context
around the tile. The load stage therefore fetches a (TILE_H+2) x (TILE_W+2)
*halo tile*, and writes zeros wherever the halo falls outside the map. This
zero fill is the convolution's padding. As a result, no stage ever needs data
from a neighbouring tile. Halo pixels are read twice from DRAM. The 1x1
convolution and the pooling need no context.

**Cycle budget per tile** (cg = channels / PF):

| stage | cycles |
|---|---|
| load | about (TILE_H+2)(TILE_W+2)·cg_in, one word per cycle when DRAM keeps up |
| depth-wise | 9 · cg_in · TILE_H · TILE_W + 2 (one tap per cycle, PF multipliers) |
| 1x1 conv | cin · cg_out · TILE_H · TILE_W + 2 (one input channel per cycle, PF multipliers) |
| pool / copy | cg_out · TILE_H · TILE_W + 2 |
| write-back | 3 cycles per output word |

The 1x1 convolution is the bottleneck whenever `cin > 9`. So in practice a
pass takes about `n_tiles` times the 1x1 time, and the other stages are hidden
behind it. The
datapath has 2·PF = 32 multipliers. It is a correct, simple schedule, not a
tuned one. It will not reach the frame rates reported for the published
accelerator, which used the board's DSPs much more fully. To go faster,
widen the two convolution IPs (for example PF x PF MACs in `conv1x1_ip`).
Their interfaces to the buffers would not change.

## Numbers and memory formats

- **Feature maps** are unsigned, `FM_W` bits wide, with `FM_W-4` fractional
  bits. For 8-bit maps that is a range of 0 to 15.94 in steps of 1/16. With
  this format, both bounded activations fit: ReLU4 clips at code 64 and ReLU8
  at code 128. Plain ReLU saturates at 255.
- **Weights** are signed `W_W`-bit integers. **Accumulators** are 32 bits.
- **Requantization**: after each convolution, `acc` is shifted right
  arithmetically by `shift_dw` or `shift_pw`, rounding half up. The activation
  is applied after that. There is no bias and no separate normalization unit.
  Batch normalization is expected to be folded into the weights and the shift.
- **Words.** Every buffer and DRAM word holds PF = 16 lanes, one per channel
  of the same pixel. A 128-bit word holds 16 channels.
- **Feature maps in DRAM**: word `base + (y·W + x)·cg + g` holds channels
  `g·PF … g·PF+PF-1` of pixel (y, x).
- **Weights in DRAM**, starting at `w_base`:
  - First `cg_in·9` depth-wise words. Word `g·9 + k` holds tap `k` of the 3x3
    window, in row-major order, for channel group `g`.
  - Then `cin·cg_out` point-wise words. Word `og·cin + ci` holds the weights
    from input channel `ci` to output channels `og·PF … og·PF+PF-1`.
  - Weights sit in the low `PF·W_W` bits of a word.
- **On-chip buffers** are channel-group major: word `g·pixels + pixel`. The
  pooled tile is stored compactly in the first quarter.

## Running a network

One `start` pulse runs one Bundle over one feature map, as described by the
`bundle_cfg_t` on `cfg`:

| field | meaning |
|---|---|
| `h`, `w` | input map size; must be multiples of the tile size |
| `cin`, `cout` | channel counts; must be multiples of PF, at most `MAX_CH` |
| `pool_en` | down-sample by 2x2 max pooling at the end of the Bundle |
| `act` | `ACT_RELU`, `ACT_RELU4` or `ACT_RELU8`, applied after both convolutions |
| `shift_dw`, `shift_pw` | requantization shifts |
| `in_base`, `w_base`, `out_base` | DRAM word addresses |

`cfg` must stay stable until `done`. A network of N Bundle replications takes
N passes. Each pass reads the previous pass's output and has its own weights.
The channel expansion of the network is expressed through `cout` of each pass.
Down-sampling is expressed through `pool_en`. The host sequences the passes.
This is the "folded" structure: the same IP instances serve every layer.

Example: the most accurate network the co-design search produced has 5
replications of this Bundle, at most 512 channels, 8-bit maps and ReLU4. It
maps to five passes with `cin`/`cout` ≤ 512. The weight buffer is sized for a
full 512 → 512 1x1 layer: 16384 words, 2 Mbit.

## Interfaces and timing

- Clock: one clock. Reset: `rst_n`, synchronous and active low. Memories are
  not reset; every buffer word is written before it is read.
- `start` is a one-cycle pulse while `busy` is low. `done` is a one-cycle
  pulse at the end of the pass. `stage_active[4:0]` shows which stages are
  running.
- DRAM read is split into a request channel (`mem_rd_req_valid/ready/addr`)
  and a response channel (`mem_rd_resp_valid/ready/data`). Responses must
  return in request order. Up to 4 requests may be outstanding. The DMA
  accepts a response only when it is the next word it needs.
- DRAM write is one channel: `mem_wr_valid/ready/addr/data`.
- On every channel, a request, once offered, is held stable until it is
  taken. Assertions in `offchip_dma` check this.
- Internal IPs each take a one-cycle `start` and return a one-cycle `done`.
  Their buffer reads have one cycle of latency, as a block RAM does. Each
  IP's header gives its exact cycle count.

## Parameters

| parameter | default | origin |
|---|---|---|
| `PF` | 16 | largest parallel factor shown in the published Bundle evaluation; the final networks' PF is not given |
| `TILE_H`, `TILE_W` | 8, 8 | the published architecture diagram labels its tiling "8x8"; read here as 8x8-pixel tiles |
| `FM_W` | 8 | 8-bit feature maps of the selected networks (one of them uses 16 bits) |
| `W_W`, `ACC_W` | 8, 32 | own choice |
| `MAX_CH` | 512 | largest channel count of the selected networks |
| `ADDR_W` | 32 | own choice |

Buffer sizes follow from these values:

| buffer | size at the defaults |
|---|---|
| input | 2 × 3200 × 128 bits |
| each other data buffer | 2 × 2048 × 128 bits |
| weights | (288 + 16384) × 128 bits |

The total is 4.53 Mbit. `PF` must be a power of two.

## What follows the published design and what does not

Taken from the published description:
- Bundle-based, folded accelerator: one IP instance per layer type, reused
  across tiles, layers and Bundle replications.
- Depth-wise 3x3 + 1x1 Bundle with ReLU4 / ReLU8 / ReLU activations and a
  down-sampling spot between Bundles.
- On-chip weight and data buffers inside a Bundle; DRAM between Bundles.
- Off-chip data transfer with load and write-back phases per tile.
- A five-row tile pipeline (load, conv, conv, pool, write-back).
- A single PF and quantization shared by all IPs.
- 8x8 tiling, 8-bit maps, 512 channels.

This design's own choices:
- Fixed-point format, rounding and shift-based requantization.
- Halo tiles with zero fill.
- Two-bank buffers and their commit/release flag handshake.
- One-tap/one-channel-per-cycle IP schedules.
- DRAM data layouts and the valid/ready memory channels.
- Copy mode of the pooling IP.
- Host-driven sequencing of Bundle passes.
- The on-chip transfer between buffers and IPs is plain point-to-point
  wiring (each buffer has exactly one producer and one consumer), not a
  separate switch or bus.
- Reading the published "8x8 tiling" as 8x8-pixel tiles. It could also mean
  an 8x8 grid of tiles per map. With `TILE_H`/`TILE_W` as parameters, either
  reading can be built for a known map size.

Not built:
- The other IP types the co-design flow can choose from: standard 3x3/5x5
  convolution, 5x5/7x7 depth-wise convolution, average pooling, and a
  separate normalization unit.
- The other Bundles that were evaluated.
- The 16-bit configuration, as a default: set `FM_W = 16` for it. It is
  simulated (see `tb_workload_16bit`), but at 6.9 Mbit it does not fit the
  4.9 Mbit of the published board.
- The ARM-side image pre-processing, and the DRAM itself.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_act_quant` | 20000 random and edge-case accumulators against an integer reference |
| `tb_pingpong_buffer` | random producer and consumer: flags against a tile count, every read word, read latency, overlapped writes and reads |
| `tb_weight_buffer` | both regions, both read ports |
| `tb_dwconv3x3_ip`, `tb_conv1x1_ip`, `tb_maxpool2x2_ip` | every output word against a direct computation, plus exact cycle counts |
| `tb_offchip_dma` | weight load; corner and interior halo tiles including zero fill; write-back with and without pooling; all under random DRAM back-pressure |
| `tb_tile_pipeline_ctrl` | random stage delays: no start before the input tile exists or while the output buffer is full; every stage started within two cycles of being able to run; commit/release; tile order; tile counts |
| `tb_tile_arch_top` | see below |

`tb_tile_arch_top` runs three chained Bundle passes at the default parameters:
- 16x32 map, 32 → 48 channels, ReLU4, pooled;
- the resulting 8x16 map, 48 → 32 channels, ReLU8;
- a fresh 16x16 map, 16 → 16 channels, ReLU.

Each pass is compared word by word with a reference model of the Bundle. The
test also requires that each of the following occurred at least once:
- three stages running at once, and stages starting while another is mid-tile;
- halo zero fill;
- DRAM back-pressure on reads and writes;
- both pooling modes;
- activation clipping;
- channel expansion.

Two more testbenches run whole networks (default parameters, except `FM_W`
in the 16-bit one) as
chains of Bundle passes through DRAM, checking every output value:

| testbench | network |
|---|---|
| `tb_workload_8bit` | a 5-Bundle net with 32 → 64 → 128 → 256 → 512 → 512 channels and a 4-Bundle net with 48 → 96 → 192 → 384 → 384 channels, 8-bit maps, ReLU4, 32x32 input, pooling in the first two Bundles |
| `tb_workload_16bit` | the 4-Bundle net with `FM_W = 16` and ReLU |

The Bundle counts, largest channel counts, map widths and activations are
those of the three published networks. Their input sizes and per-layer
channels are not published, so the 32x32 input and the channel doubling are
stand-ins. `tb/bundle_harness.sv` holds the accelerator, the DRAM model and
the reference model for these two.

`tb/dram_model.sv` is the behavioural DRAM used by the DMA, end-to-end and
network testbenches.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_tile_arch_top \
    -Irtl -Itb -y rtl -y tb +libext+.sv rtl/tile_arch_pkg.sv tb/tb_tile_arch_top.sv
./obj_dir/Vtb_tile_arch_top +verilator+rand+reset+2
```

The unit testbenches override parameters to small sizes (PF = 4, 4x4 tiles,
16 channels), which exercises the address arithmetic at a size other than the
default. The end-to-end testbench uses the defaults and finishes in well under
a second.
