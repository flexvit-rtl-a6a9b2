# FlexViT GEMM accelerator in SystemVerilog

Vision transformers for edge devices come in two flavours. "Standard" models
such as ViT-T or DeiT-T spend their time in fully connected (FC) layers with
wide, balanced matrices. "Hybrid" models such as MobileViT or EfficientViT mix
those with convolutions whose lowered matrices are tall and narrow: many rows
(pixels), few output channels. An accelerator with one fixed dataflow is badly
used by one of the two families.

FlexViT handles both with one INT8 matrix-multiply engine. The host lowers every
convolution to a matrix product (im2col), pads the sizes to the tile sizes, and
sends the layer to the accelerator with a mode flag. The flag picks one of two
dataflows:

* **Input-Broadcast (IB)**: one tile of input rows is shared by all cores, and
  each core gets a different tile of weights. This suits wide layers.
* **Weight-Broadcast (WB)**: one weight tile is shared, and each core gets a
  different tile of input rows. This suits tall, narrow layers.

Only the loop order and the way operands are distributed change. The arithmetic
is the same in both modes. The on-chip buffers hold the full reduction depth of
a tile, so each output is accumulated in one pass. Partial sums never leave the
chip, and only requantized 8-bit results go back to the host.

This repository is a register-transfer implementation of that accelerator,
written from the published description of FlexViT (Dymarkowski et al., "FlexViT:
A Flexible FPGA-based Accelerator for Edge Vision Transformers"). It is not the
authors' code. The published text gives the structure, the tile sizes, the
dataflows and several latencies. Everything it leaves open had to be chosen
here, and each module's header comment says which parts follow the publication
and which are choices made for this RTL.

## Configuration

| symbol | parameter | default | meaning |
|---|---|---|---|
| T_N | `TN` | 64 | rows of the output tile computed by one core |
| T_M | `TM` | 64 | output channels of that tile |
| T_K | `TK` | 1024 | deepest reduction held on chip |
| C | `C` | 3 | parallel GEMM cores |
| K_f | `KF` | 16 | INT8 multiplies per core per cycle |
| | `PPU_LAT` | 29 | post-processing latency, in cycles |
| | `PPU_II` | 2 | cycles between results entering the post-processor |

These are the published values. `flexvit_pkg` holds them, and every module takes
them as parameters. At the defaults the design holds about 3.4 Mbit of on-chip
memory:

* per core, a 64 KiB input buffer, a 64 KiB weight buffer and a 16 KiB result store;
* a small bias/scale store.

## Block structure

```
 cfg stream ──► scheduler ──start/done──┬──────────┬───────────┬─────────┐
                                        ▼          ▼           ▼         ▼
 inp stream ──► read_unit (ReadInp) ─►┌─────────────────────┐  │         │
 wgt stream ──► read_unit (ReadWgt) ─►│ gemm_engine         │  │         │
                                      │  C x [tile_buffer   │  │         │
                                      │       tile_buffer   │  │         │
                                      │       gemm_core     │  │         │
                                      │        └ simd_mac]  │──┼──► ppu ─┴─► out stream
                                      └─────────────────────┘  │     ▲
 bias stream ─► read_bias (ReadBias) ──────────────────────────┴─────┘
```

| file | role |
|---|---|
| `flexvit_pkg.sv` | tile sizes, `mode_e`, `layer_e`, the packet struct `layer_cfg_t`, `qparam_t` |
| `scheduler.sv` | reads the packet, walks the tiles, drives every unit with start/done pulses |
| `read_unit.sv` | ReadInp and ReadWgt (the same module, instantiated twice) |
| `read_bias.sv` | ReadBias and its two-bank bias/scale store |
| `tile_buffer.sv` | banked per-core operand buffer |
| `simd_mac.sv` | the processing element: 16 multipliers, adder tree, 32-bit accumulator |
| `gemm_core.sv` | one core: output-stationary walk over a tile, result store |
| `gemm_engine.sv` | C cores with their buffers |
| `ppu.sv` | bias, requantization, clamping, packing, output stream |
| `flexvit_top.sv` | everything wired together |

## How a layer runs

### The configuration packet

Each layer starts with five 32-bit words on the configuration stream:

| word | contents |
|---|---|
| 0 | bit 0 mode (0 = IB, 1 = WB), bit 1 layer type (0 = FC, 1 = CONV), bit 2 has-bias |
| 1 | padded N, the number of rows (tokens, or output pixels of a convolution) |
| 2 | padded M, the number of output channels |
| 3 | padded K, the reduction depth |
| 4 | [7:0] output zero point, [15:8] activation minimum, [23:16] activation maximum |

N must be a multiple of T_N, M a multiple of T_M, and K a multiple of K_f no
larger than T_K. Any other packet raises `cfg_error`, skips the layer and
pulses `layer_done`. Such a layer has to run on the host. This is the case of
EfficientViT-b1's classifier (K = 1536). It is also the case of the Swin-T
layers with K = 1536 or 3072, although the publication says every Swin-T layer
fits in T_K = 1024. Depth-wise tiling (splitting K) is not built.

### Tile schedule

Let nt = N/T_N and mt = M/T_M. The scheduler runs two nested loops:

* **IB**: the outer loop runs over the nt row tiles. The inner loop runs over
  the mt channel tiles in groups of C. The input tile is loaded at the start of
  each outer step and used by every group. Every group loads C new weight tiles
  (one per core) and their biases and scales.
* **WB**: the outer loop runs over the mt channel tiles. The inner loop runs over
  the nt row tiles in groups of C. The weight tile, with its biases and scales,
  is loaded once per outer step. Every group loads C new input tiles.

When the tile count is not a multiple of C, the last group of the inner loop is
short. Only that many cores are started, and only that many tiles are streamed
and post-processed.

The IB versus WB decision is not made in hardware. The host makes it per layer:

* FC layers use IB when M ≥ C·T_M and WB otherwise;
* CONV layers use whichever mode needs fewer bytes moved.

The host model in `tb/flexvit_host.sv` implements this rule. Its byte estimate is
this design's own: for IB, all inputs once plus all weights once per row tile;
for WB, all weights once plus all inputs once per channel tile.

### One step, and what overlaps

Each step of the loops goes through three phases:

1. **LOAD**: the scheduler pulses `start` to the read units this step needs. They
   run in parallel, each on its own stream.
2. **COMP**: the scheduler waits for each of those units to pulse `done`. It also
   waits for the PPU to be idle, because the PPU must have finished reading the
   previous results. Then it starts the cores.
3. **PPU**: when the engine reports done, the scheduler starts a post-processing
   job for this tile and goes straight to the LOAD phase of the next step.

So the operand reads of tile t+1 run while the PPU converts tile t. The bias and
scale store has two banks for this reason: tile t+1's parameters are written into
one bank while the PPU reads tile t's from the other.

The result stores are single-buffered. The cores therefore cannot start tile t+1
before the PPU has drained tile t. This is where the design loses throughput on
shallow layers: post-processing a tile takes C·T_N·T_M·2 cycles, and computing
it takes T_N·T_M·K/16.

Each unit only knows "start" and "done", so none of the timing depends on how
fast the streams deliver. The testbenches throttle every stream at random to
check this.

### Stream formats

All data streams are 32 bits wide and carry four INT8 values per word, the
lowest index in the lowest byte.

* **Inputs**: tile after tile, row after row within a tile, K/4 words per row.
  In IB mode one tile is sent per outer step, for rows o·T_N to o·T_N+T_N−1. In
  WB mode each group sends as many consecutive row tiles as it has cores.
* **Weights**: the same layout, with one row per output channel (the weight
  matrix is M × K). In IB mode each group sends as many consecutive channel
  tiles as it has cores. In WB mode one tile is sent per outer step.
* **Bias and scales**, sent with every weight load: first one int32 bias per
  channel of the loaded tiles (only if has-bias is set), then the multipliers,
  then the shifts ([5:0]). A CONV layer sends one multiplier and one shift per
  channel. An FC layer sends a single multiplier and a single shift.
* **Outputs**: for each step, core by core, then row by row of the core's tile,
  four consecutive channels per word. `out_tlast` marks the last word of the
  layer. The host scatters the words back according to the mode:
  * IB: core c holds channels (base+c)·T_M onward;
  * WB: core c holds rows (base+c)·T_N onward.

The zero-point correction of the input (the zero point times the weight-row sum)
is expected to be folded into the bias by the host. The hardware only adds the
bias.

## The compute path

### Banked operand buffers (`tile_buffer`)

Each core has its own input buffer (T_N rows × T_K) and its own weight buffer
(T_M rows × T_K). Element k of a row is stored in bank k mod 16, at address
{row, k/16}. One read therefore returns the 16 consecutive elements that a core
multiplies in one cycle, with no bank conflicts.

The write side takes one stream word per cycle and writes it into 4 of the 16
banks. A **broadcast** tile is written into the buffers of all cores in the same
cycle. A **partitioned** tile goes into one core's buffers only. This is the
only place where the two modes differ in hardware, and it is decided by the
write enables that the read units produce.

### Processing element (`simd_mac`) and core (`gemm_core`)

Each core has one processing element. Every cycle the PE takes 16 input bytes
and 16 weight bytes, makes 16 signed 8×8 products, reduces them in a 4-level
adder tree, and adds the sum to a 32-bit accumulator. The accumulator restarts
on the first beat of each dot product.

The core walks its tile output by output in row-major order, issuing K/16 beats
per output, back to back with no bubbles. Finished dot products go to the core's
result store at address r·T_M + m.

Latency, counted from the cycle a buffer address is presented:

| stage | cycles |
|---|---|
| buffer read | 1 |
| multiply | 1 |
| adder tree | 4 |
| accumulate | 1 |
| **total** | **7** |

This matches the published MAC latency of 7 cycles at one beat per cycle. A core
needs T_N·T_M·K/16 + 8 cycles from `start` to `done`, and the engine one cycle
more. At the defaults, one full-depth tile takes 262,152 cycles. With 48 MACs
per cycle over three cores at 200 MHz, this is a peak of 9.6 GMAC/s.

The publication maps the multiply work partly to LUT logic and partly to DSP
slices. Here the lower 8 lanes carry a `use_dsp = "no"` attribute and the upper
8 lanes `use_dsp = "yes"`. This is one reading of a terse sentence. It affects
FPGA mapping only, not the results.

### Post-processing (`ppu`)

The PPU reads the results of one core at a time, one result every 2 cycles. For
a result `acc` of channel `ch` it computes:

```
y = clamp( ((acc + bias[ch]) * mult + 2^(shift-1)) >>> shift  + out_zp ,  act_min, act_max )
```

The details:

* The bias add is 32-bit, the product 64-bit, and the shift is arithmetic with
  round-half-up.
* `mult` and `shift` come from channel `ch` for CONV layers (per-channel scales)
  and from channel 0 for FC layers (one scale per tensor).
* The bias and scale lookup is addressed in the same cycle as the accumulator
  read, as a separate path in parallel with it.

The arithmetic takes 5 stages. A delay line pads the pipeline to the published
29 cycles, measured from the cycle a result is read to the cycle its output word
appears. With the output ready, the first word of a job therefore leaves 36
cycles after `start`, and each later word 8 cycles after the previous one.

The PPU packs four results into a word and writes it into an 8-word output FIFO.
A credit counter allows a new result to be read only while the FIFO has room for
it. Back-pressure on the output stream therefore pauses the reading of results,
and the 29-stage pipeline never has to stall.

## Where this RTL departs from, or adds to, the publication

The following items are interpretations or additions. The publication either does
not cover them or describes them only in a word:

* Stream word layouts, the configuration packet format, the output order and
  `tlast` are this design's own.
* All unit handshakes are one-cycle start and done pulses. The publication only
  says that stages are triggered by valid signals and acknowledge completion.
* The mode decision is made by the host. A CONV layer's mode comes from a byte
  estimate whose formula is this design's own.
* Finished 32-bit results wait in a per-core result store of T_N·T_M words. The
  publication says accumulators live in registers, but not where finished
  results wait for the PPU.
* The bias and scale store has two banks, so tile t+1's parameters can load while
  tile t is being post-processed.
* The PPU has rounding, an output zero point and an activation clamp.
* The PPU has an output FIFO with credit-based flow control.
* The input zero-point correction is folded into the bias by the host instead of
  being computed by ReadBias.
* A layer deeper than T_K is refused. It is not split into depth tiles.
* A short last group starts only the cores it needs.
* The LUT/DSP split of the multiplier exists only as synthesis attributes.
* Reset is asynchronous and active low. It clears control state but not the
  memories. Every memory is written before it is read.

## Fit of the evaluated models

The depth limit T_K = 1024 decides which layers can run:

* **ViT-T and DeiT-T** fit completely. Their deepest layer has K = 768.
* **EfficientViT-b1**: everything fits except the classifier, which has K = 1536.
* **Swin-T**: the MLP and patch-merging layers of its last two stages have
  K = 1536 or 3072, so this RTL refuses them, although the publication states
  that all of Swin-T fits.
* **MobileViT-S**: whether every layer fits depends on the exact shapes of the
  quantized graph, and could not be checked here.

The 16-bit N, M and K fields cover the largest dimensions of all five models.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares against an
independently computed reference and ends with a `TB_RESULT checks=N failures=M`
line.

| testbench | what it checks |
|---|---|
| `tb_tile_buffer` | banked writes and reads, one-cycle read latency |
| `tb_simd_mac` | dot products of 1–8 beats, including −128·−128; 6-cycle PE latency at one beat per cycle |
| `tb_gemm_core` | tiles of several depths against a reference GEMM; start-to-done cycle count |
| `tb_gemm_engine` | broadcast and partitioned buffer loading, a partial core group, cycle count |
| `tb_read_unit` | broadcast and partitioned loads with a stalling stream; transfer time |
| `tb_read_bias` | per-channel and per-tensor loads into both banks, bank isolation |
| `tb_ppu` | requantization against a reference, FC and CONV scale selection, clamping, tlast, back-pressure, 29-cycle latency and 2-cycle interval |
| `tb_scheduler` | the full tile schedule of IB and WB layers against the loop nest above; handshake order, bank alternation, overlap, a refused packet |
| `tb_flexvit_top` | end to end at T_N = T_M = 8, T_K = 64 (see below) |
| `tb_flexvit_full` | end to end at the full default configuration (see below) |
| `tb_flexvit_workloads` | layer shapes of the evaluated models at the full default configuration (see below) |

**`tb_flexvit_top`** runs five layers through the whole accelerator with random
data and random stalls on every stream. It compares every output word, and it
counts how often each mechanism occurred:

* IB and WB steps;
* input reuse and weight reuse;
* partial core groups;
* PPU work overlapping loads;
* source stalls and output back-pressure;
* a refused packet;
* FC and CONV scaling;
* clamped outputs.

Any mechanism that never occurred counts as a failure.

**`tb_flexvit_full`** uses the top with all parameters at their defaults. It runs
two layers:

* an FC layer with N = 128, M = 256, K = 1024 in IB mode;
* a CONV layer with N = 256, M = 64, K = 256 in WB mode.

Together they produce about 49,000 checked outputs, in a few seconds of Verilator
time.

**`tb_flexvit_workloads`** also runs at the defaults. It takes one layer shape
from each model family, padded to the tile sizes:

| layer | type | N × M × K | mode |
|---|---|---|---|
| ViT-T / DeiT-T QKV projection | FC | 256 × 576 × 192 | IB |
| ViT-T / DeiT-T MLP down-projection | FC | 256 × 192 × 768 | IB |
| MobileViT-S 3×3 convolution, 64 channels at 32×32 | CONV | 1024 × 64 × 576 | WB |
| Swin-T patch embedding | CONV | 3136 × 128 × 48 | WB |
| EfficientViT-b1 classifier | FC | K = 1536 | refused |

The four accepted layers take 4.2 million cycles. That is about 21 ms at
200 MHz, with randomly stalling streams. The test checks about 166,000 outputs
and needs about 12 s of simulation.

On the Swin-T patch embedding, the PPU takes longer than the cores. Each step
computes for 12,288 cycles, but post-processing its three tiles takes 24,576
cycles.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_flexvit_top \
    -Irtl -Itb -y rtl -y tb rtl/flexvit_pkg.sv tb/tb_flexvit_top.sv
./obj_dir/Vtb_flexvit_top
```

Replace the testbench name to run another one. The package must come first on
the command line. Everything else is found through `-y`.

Not verified:

* synthesis timing at 200 MHz;
* FPGA resource use beyond the memory estimate above;
* behaviour with the actual AXI DMA engines and host driver.
