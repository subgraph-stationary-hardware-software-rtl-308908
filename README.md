# A SubGraph-Stationary convolution accelerator

A weight-shared SuperNet packs many CNNs ("SubNets") into one set of
weights. A small SubNet uses the first kernels and channels of each layer and
the first blocks of each stage. A larger SubNet uses more of them. Any two
SubNets therefore share a large common part, called a *SubGraph*. An inference
server that picks a different SubNet for each query, to meet that query's
latency or accuracy target, reads the shared weights from DRAM again and
again. For the later, memory-bound layers of a network, that DRAM traffic is
what limits the latency.

This accelerator keeps one SubGraph on chip across queries, in a dedicated
**Persistent Buffer (PB)**. When a query runs, every weight tile inside the
cached SubGraph is read from the PB. Only the *distinct* weights, the part of
the SubNet outside the SubGraph, are streamed from DRAM into a ping-pong
**Dynamic Buffer (DB)**, overlapped with computation. The host decides which
SubGraph to cache and changes it rarely. Each change costs one extra load;
every query after it saves that traffic.

The RTL is SystemVerilog-2017 and does int8 3x3 convolutions, stride 1 or 2.
The defaults are the data-centre configuration the design was sized for:
- a 16 x 32 array of 9-multiplier dot-product engines: 9216 operations per
  cycle, 0.92 TOPS at 100 MHz;
- a 1152-bit DRAM beat: 14.4 GB/s at 100 MHz;
- 1.77 MB of PB;
- two DB banks of 576 KB each.

## Weight tiles: the unit everything is built around

Every layer is cut into **weight tiles**. A tile is K_P = 16 kernels by
C_P = 32 input channels by 3x3. One **word** is one kernel's row of a tile:
C_P x 9 int8 = 2304 bits. Lane `c`, window element `j = 3*row + col` sits at
bits `(c*9 + j)*8`. A tile is K_P words. The PB, the DB and the array bus all
use this word.

Tile `(kg, cg)` is kernel group `kg` (kernels `16kg..16kg+15`) and channel
group `cg`. Tiles are stored in DRAM in the SuperNet's own layout:

```
beat address of word r of tile (kg, cg) =
    wgt_base + (kg * cg_stride + cg) * K_P * BEATS + r * BEATS      (BEATS = 2304 / 1152 = 2)
```

`cg_stride` is the number of channel groups the SuperNet layer has. A SubNet
that uses fewer channels (`ncg < cg_stride`) or fewer kernels (`nkg`) reads a
sub-rectangle of the same array. Nothing is copied per SubNet.

A cached SubGraph of a layer is also a rectangle: tiles with `kg < pb_kg` and
`cg < pb_cg`. This matches how weight-shared SuperNets are built: the smaller
widths are always the leading kernels and channels. The PB holds those tiles
in `(kg, cg)` order from word `pb_base` on. Several layers can be cached
side by side by giving each one its own `pb_base`.

## One layer, tile by tile

`CMD_RUN_LAYER` runs one layer with this loop nest:

```
for kg in 0 .. nkg-1                  -- kernel groups: one pass over the output
  for cg in 0 .. ncg-1                -- channel groups: accumulate into the OB
    send the 16 words of tile (kg, cg) down the array bus (from PB or DB)
    stream the ih x iw pixels of channel group cg: SB -> line buffer -> array
  drain the OB through requantisation -> 16 int8 oActs per output pixel
```

Reuse at each level:

- **Window reuse.** The line buffer reads each pixel from the Streaming
  Buffer once and builds every 3x3 window that contains it.
- **Multi-kernel reuse.** The Streaming Buffer holds the whole input of the
  layer. The same iActs are streamed again for every kernel group, and never
  come from DRAM again.
- **Partial-sum reuse.** The Output Buffer adds each channel group's
  partial sums in place. Only finished values leave it.
- **Weight reuse inside a tile.** A weight word stays in its DPE row while
  all the windows of the channel group pass through.
- **SubGraph reuse across queries.** PB tiles are never fetched from DRAM
  during a query.

### Which tiles come from where, and the prefetcher

A tile is a **PB tile** if `kg < pb_kg && cg < pb_cg` and the PB holds a
valid SubGraph. If no valid SubGraph is loaded, every tile is a DB tile.
Every other tile is a **DB tile**.

A prefetcher runs beside the main sequencer. It walks the same `(kg, cg)`
order, skips PB tiles, and fetches each DB tile into whichever DB bank is
free. The handshake between the two sides:

1. The fetcher fills the *fill bank*, then raises `fill_done`. That marks the
   bank full and moves the fill side to the other bank.
2. The sequencer reads the *use bank* when `use_ready` says it holds a tile.
   When done, it raises `use_done`. That frees the bank and moves the use
   side on.
3. While the array works on tile *n* from one bank, tile *n+1* fills the
   other.

If the sequencer reaches a DB tile whose bank is not yet full, it waits. Each
waiting cycle is counted in `stats.stall_cycles`. These stalls are the
memory-bound part of a layer. The fraction of tiles served from the PB
(`stats.pb_tiles` against `stats.db_tiles`) is exactly the fraction of this
latency that SubGraph caching removes.

Because PB tiles need no fetch, the fetcher runs ahead through them. A PB
tile therefore also gives the fetcher more time to fetch the next DB tile.

### Caching a SubGraph

`CMD_LOAD_PB` uses the same layer description:
- `pb_kg`, `pb_cg` and `pb_base` give the rectangle and its location in the
  PB;
- `sg_id` is recorded as the SubGraph's name.

The command does the following:
1. It clears the PB's valid flag.
2. It copies the tiles from DRAM, packing two beats per word, lowest beat
   first.
3. It sets the valid flag again.

The flag and the id are on the top-level ports `pb_sg_valid` and `pb_sg_id`.
A host scheduler can read from them which SubGraph is resident. While the
flag is clear, no tile counts as a PB hit, so a half-written PB is never
used.

## The DPE array and its shared bus

The array has K_P rows (kernels) by C_P columns (input channels). Each cell
is a **DPE**: nine multipliers, an adder tree and an output register. One
DPE does one 3x3 window of one channel against one kernel.

Weights and windows travel on **one** bus. This saves the wide weight bus
that a second port would need. The bus enters row 0 and is registered once
per row on its way down (store and forward). Each bus word carries:
- `is_w`: whether it is a weight word;
- a row number;
- a tag (the output pixel index);
- a `first` flag (first channel group).

Row `r` keeps a weight word whose row number is `r`. Window words are used
by every row they pass.

Weights and windows move through the same registers in the same order. So a
row always holds the right weights for the windows that reach it, and the
next tile's weight words can follow the last window of the previous tile
without a gap. Loading a tile costs K_P bus cycles; all the windows of the
channel group follow behind it.

Each row adds its C_P DPE results in an adder tree. Row `r` sees a window
`r` cycles after row 0. A **deskew** delay of `K_P-1-r` on row `r` lines the
rows up again, so the array outputs all 16 partial sums of one output pixel
together. The array's latency is K_P + 2 cycles.

## Buffers

| buffer | word | default depth | capacity | role |
|---|---|---|---|---|
| SB, streaming | one pixel, C_P x int8 (256 b) | 18688 | 584 KB | whole input of a layer; address `cg*ih*iw + y*iw + x` |
| LB, line buffer | one pixel | 2 lines x 864 | 54 KB | serial to 3x3 windows, stride by window skipping |
| PB, persistent | weight word (2304 b) | 6144 | 1728 KB | cached SubGraph |
| DB, dynamic | weight word | 2 x 2048 | 2 x 576 KB | ping-pong distinct weights |
| OB, output | K_P x int32 (512 b) | 5232 | 327 KB | in-place accumulation, one word per output pixel |
| ZSB, zp/scale | K_P x {int32 scale, int8 zp} | 102 | 8 KB | requantisation parameters, one entry per kernel group |

The capacities are those of the board build the design was sized on:
- PB 1728 KB;
- each DB bank 576 KB;
- SB 576 + 8 KB;
- LB 54 KB;
- OB 327 KB;
- ZSB 8 KB.

The depths are those capacities divided by each buffer's word width.

The data-centre configuration quotes a 1.69 MB PB. 6144 words of 2304 bits
(1.77 MB) is the nearest whole number of weight tiles.

**Line buffer.** Pixels arrive one per cycle, row by row. Two line memories
hold the previous two rows, and a 3x3 register window gives one window per
pixel once `x >= 2` and `y >= 2`. With stride 2, windows whose top-left
corner is on an odd row or column are dropped. Each window is tagged with its
row-major output index, which the OB uses as its address.

**Output buffer.** The OB does a two-stage read-modify-write. An update to
the same word in the next cycle is forwarded, so one window per cycle can be
accumulated into any pattern of addresses. The first channel group writes
instead of adding.

**Requantisation.** `q = clamp(((acc * scale + 2^15) >>> 16) + zp, -128, 127)`
per output channel, over two pipeline stages.

## Control interface

All ports are synchronous to `clk`, with an asynchronous active-low `rst_n`.

- `cmd_valid / cmd_ready / cmd`: `cmd_t = {op, sg_id, layer}`. `done`
  pulses once when a command ends. The fields of `layer_cfg_t`:
  - `ih`, `iw`: input size, at least 3. The host writes the input already
    zero-padded.
  - `stride2`.
  - `ncg`, `nkg`: channel groups and kernel groups the SubNet uses.
  - `cg_stride`, `wgt_base`: the SuperNet layout in DRAM.
  - `pb_kg`, `pb_cg`, `pb_base`: the cached rectangle.
  - `zsb_base`: the ZSB entry of kernel group 0.
- `dram_req_valid / ready / addr`, `dram_resp_valid / data`: read-only DRAM
  port.
  - One 1152-bit beat per accepted request.
  - Responses come back in order, after any latency.
  - The port never back-pressures the accelerator.
- `sb_wr_*` and `zsb_wr_*`: the host loads the layer's iActs and its
  `{scale, zp}` pairs.
- `oact_valid / oact_data`: the int8 outputs.
  - Each beat holds the 16 output channels of one pixel.
  - Order: kernel group by kernel group, pixels in row-major order.
- `stats`: counters of busy cycles, stall cycles, PB tiles, DB tiles and
  DRAM beats.
- `pb_sg_valid`, `pb_sg_id`, `db_fill_bank`, `db_use_bank`: buffer state.

**Timing of a tile.** K_P cycles of weight words, then `ih*iw` pixel cycles
with one window per cycle, then a few cycles of turnaround. The drain after
the last channel group takes `oh*ow` cycles plus the pipeline. A layer with
no stalls thus takes about

`nkg * (ncg * (K_P + ih*iw + c) + oh*ow + K_P + c')` cycles,

with small constants `c` and `c'`. A DB tile costs 32 DRAM beats (2 per word).

## Files

- `rtl/sushi_pkg.sv`: constants, the command and layer types, the counters.
- `rtl/sushi_accel.sv`: the top level.
- `rtl/sushi_ctrl.sv`: the sequencer, the prefetcher and the PB loader.
- `rtl/dpe.sv`, `rtl/adder_tree.sv`, `rtl/dpe_array.sv`: the compute array.
- `rtl/streaming_buffer.sv`, `rtl/line_buffer.sv`, `rtl/persistent_buffer.sv`,
  `rtl/dynamic_buffer.sv`, `rtl/output_buffer.sv`, `rtl/zp_scale_buffer.sv`:
  the buffers.

Every module begins with a comment on its timing and on what follows the
original design and what was chosen here.

## Simulating

Every testbench checks itself and ends with `TB_RESULT checks=N failures=M`.
Each one has a watchdog. The tests for a single block, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sushi_pkg.sv rtl/adder_tree.sv \
  rtl/dpe.sv rtl/dpe_array.sv tb/tb_dpe_array.sv --top-module tb_dpe_array
./obj_dir/Vtb_dpe_array +verilator+rand+reset+2
```

The whole accelerator at its default size:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/sushi_pkg.sv rtl/adder_tree.sv rtl/dpe.sv rtl/dpe_array.sv rtl/line_buffer.sv \
  rtl/streaming_buffer.sv rtl/persistent_buffer.sv rtl/dynamic_buffer.sv \
  rtl/output_buffer.sv rtl/zp_scale_buffer.sv rtl/sushi_ctrl.sv rtl/sushi_accel.sv \
  tb/sushi_tb_pkg.sv tb/dram_model.sv tb/sushi_env.sv tb/tb_sushi_accel_full.sv \
  --top-module tb_sushi_accel_full
./obj_dir/Vtb_sushi_accel_full +verilator+rand+reset+2
```

`tb_sushi_accel` runs the same sequence on a 4 x 4 array with a 144-bit beat,
which builds in seconds. The sequence (`tb/sushi_env.sv`) is:

1. Load a SubGraph.
2. Run a layer that mixes PB and DB tiles over several kernel and channel
   groups.
3. Run a stride-2 layer against slow DRAM, which forces DB stalls.
4. Switch to a SubGraph that covers a whole layer.
5. Run repeated queries that must fetch no weights at all.

The testbench checks every oAct against a software convolution and
requantisation. It also checks the tile counts and beat counts, and the
cycle count against the array's one-window-per-cycle rate. Each mechanism is
counted, and one that never happens is a failure. The default size
(16 x 32 array, full buffer depths) is the largest one simulated.

`tb_resnet50_conv3x3` runs three ResNet50 3x3 layer shapes at the default
size:
- 64 -> 64 channels on 56x56, with no SubGraph cached;
- 128 -> 128 channels at stride 2 on 28x28 output, with part of the layer
  cached;
- 512 -> 512 channels on 7x7, with 192 of the 512 tiles cached.

It checks every oAct, the PB/DB tile split and the DRAM beats. It builds in
under a minute and runs in about ten seconds.

The DRAM model (`tb/dram_model.sv`) returns a hash of the address as data.
The testbenches use the same hash to compute their expected weights.

## How far it goes, and where it departs

The design implements:
- the PB / DB split;
- the ping-pong prefetch;
- the K_P x C_P array of 9-wide DPEs with a shared store-and-forward bus and
  row adder trees;
- the SB, LB, OB and ZSB roles;
- the weight-tile dataflow.

The following are not built or differ:

- **Kernels.** Only 3x3 convolutions with stride 1 or 2 are sequenced.
  - Larger kernels would be split into 3x3 pieces.
  - 1x1 convolutions would spread nine channels over a DPE's nine
    multipliers.
  - The DPE needs no change for either, but the sequencer does not issue
    them.
  - Depth-wise convolution, pooling, residual adds and fully connected
    layers are not supported.
  - A whole ResNet50 or MobileNetV3 SubNet therefore cannot run; only its 3x3
    layers can.
- **Padding.** The line buffer does not pad. The host writes padded inputs.
- **Output path.** oActs leave on a port. They are not written back to the
  SB or to DRAM for the next layer.
- **Drain.** The OB drain is not overlapped with the next kernel group's
  accumulation. That costs `oh*ow` cycles per kernel group.
- **Zero points.** Products use the raw signed iActs. Subtracting an iAct
  zero point would be folded into the bias on the host.
- **Requantisation.** The formula and the 16-bit shift are this design's
  choice.
- **Array size.** Array size, off-chip width and buffer capacities are from
  two different board builds.
  - The array (16 x 32) and the 14.4 GB/s beat are the data-centre
    configuration.
  - The buffer split comes from the embedded board's table, which lists the
    same total on-chip capacity.
  - The published block diagram draws a 2 x 3 array; that is only an
    illustration.
- **Bandwidths.** The per-buffer bandwidth table implies wider SB reads. Here
  the SB feeds the line buffer one pixel per cycle.
- **Controller and latency table.** The original controller's stage-by-stage
  schedule is not reproduced. The tile loop order, handshakes and all cycle
  timings are this design's. The host-side scheduler and its SubNet-by-SubGraph
  latency table are software and are not part of the RTL. The `stats`
  counters are the hardware side a latency table would be profiled from.

## Capacity for ResNet50's 3x3 layers

The largest 3x3 layers of ResNet50 fit the default buffers:
- **Largest input.** 64 channels at 56x56, padded to 58x58. That is
  2 channel groups x 3364 = 6728 SB words, against 18688.
- **Most output pixels.** 56 x 56 = 3136 OB words per kernel group, against
  5232.
- **Most weights.** A 512 x 512 layer is 32 x 16 tiles = 8192 words. That is
  more than the 6144-word PB, so such a layer is cached in part; the rest
  streams through the DB.

A whole SuperNet's shared weights are several MB and do not fit the PB. So
the cached SubGraph is always chosen to fit the PB's size.
