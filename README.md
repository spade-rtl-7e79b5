# SPADE: a sparse-pillar convolution accelerator in SystemVerilog

Pillar-based 3D object detectors start by flattening a lidar point cloud into a
bird's-eye-view grid. Each non-empty grid cell is a *pillar*: a vector of C channels.
A typical frame fills only 10–40 % of the grid. A dense 2D convolution still spends
its work on the empty cells.

This accelerator computes only on the non-empty pillars. It runs 3x3 sparse
convolutions in which a whole channel vector is either present or absent. Five
variants are supported:

| Mode | `conv_mode_e` | Output pillars |
|---|---|---|
| SpConv | `SPCONV` | Every grid cell within reach of an input. The active set dilates by one cell in each direction. |
| SpConv-S ("submanifold") | `SPCONV_S` | Exactly the input pillars. |
| SpConv-P ("pruned") | `SPCONV_P` | As SpConv. Output pillars with a small L1 magnitude are then dropped before write-back. |
| Strided SpConv | `SPSTCONV` | Stride 2. Outputs are placed at half the coordinate. |
| Sparse deconvolution | `SPDECONV` | 2x2 kernel, stride 2. Each input expands into a 2x2 output block. |

Each layer is evaluated as a list of *rules*. A rule is an (input pillar, output pillar) pair for each of the nine kernel weights. The rules are fed to a 64x64 weight-stationary systolic array, one pillar vector per cycle.

There are three hard parts, and each has its own unit:

- **Finding the rules without a hash table or a search.** This is done by the rule generator (RGU). It works because coordinates are kept in raster order.
- **Fitting an unbounded layer into fixed on-chip buffers.** This is done by the active tile manager (ATM).
- **Keeping the array fed while inputs and outputs are gathered from and scattered to memory.** This is done by the gather–scatter unit (GSU).

The default build is the high-end configuration:
- 64x64 MACs, int8 activations and weights, 32-bit accumulation.
- 1 GHz target, which gives 8 TOPS.
- A 32 KB input buffer.
- Two 1024-pillar output-buffer banks.
- Grids up to 512x512.
- 16384 input and 65536 output pillars per layer.

## Coordinates in compressed-pillar-row form

Input pillars arrive sorted in raster order: by row, then by column. They are numbered 0..P-1 in that order.

The **coordinate buffer** (`coord_buffer`) stores the column of each pillar. For each grid row it also stores:
- the index of the row's first pillar;
- the number of pillars in the row.

This is the compressed-pillar-row (CPR) form. It resembles CSR storage of a sparse matrix, except that the stored "values" are pillar indices.

Reads are combinational:
- a row number gives that row's start and length;
- a pillar index gives its column.

Writing is an append. The buffer asserts if a coordinate arrives out of raster order.

The buffer also holds the coordinates of the output pillars that the RGU creates. It has four write ports, enough for one 2x2 deconvolution block per cycle. On write-back these coordinates are read out next to the features.

## Rule generation by streaming merge

For one output row y, the inputs that matter are rows y-1, y and y+1. The RGU (`rgu`) holds these rows in three FIFOs: top, centre and bottom. Each row is processed in three stages:

1. **Alignment.**
   - The bottom FIFO is loaded with row y+1 from the coordinate buffer, one pillar per cycle.
   - While row y is processed, every entry popped from the centre FIFO is pushed into the top FIFO, and every entry popped from the bottom FIFO is pushed into the centre FIFO.
   - After the pass the three FIFOs hold rows y, y+1 and (about to be loaded) y+2.
   - Each input row is read from the coordinate buffer only once.
2. **Row merge.**
   - Each cycle the smallest column among the three FIFO heads is popped from every FIFO whose head has that column.
   - This gives one merged entry: a column plus up to three pillar indices (top, centre, bottom).
3. **Column dilation.**
   - A merged entry at column c contributes to output columns c-1, c and c+1.
   - A small window over the last merged entries decides which output columns exist.
   - An output index is handed out from a running counter when the output column is final. Output indices therefore come out in raster order.

Each of the nine rule banks receives at most one rule per cycle. Within a bank, rules arrive in ascending input and output order.

**Kernel orientation.** Weight w = 3(dy+1) + (dx+1) pairs an input at row y+dy with output row y, and an input at column x with output column x+dx. Equivalently:

  O(y,x) = Σ_{dy,dx} I(y+dy, x−dx) · W[dy,dx].

The modes change only the last stage:
- **`SPSTCONV`** keeps output positions with even row and even column, and stores them at half the coordinate. Odd rows are streamed but not emitted.
- **`SPCONV_S`** emits only at columns that have a centre-row input, with output index equal to input index. Horizontal neighbours are paired through a one-entry history register.
- **`SPDECONV`** does not merge. It walks each row once and emits the four rules of a 2x2 block per input:
  - output index = (first output index of the row pair) + a·2n + 2k + b;
  - n is the number of pillars in the row, and k is the pillar's position within the row;
  - (a, b) selects one of the four positions in the block.

**Run time.** A layer takes roughly 5·(rows+1) + 4·P cycles. That is linear in the number of pillars, with no data-dependent search.

The rules are stored in nine `rule_buffer` banks, one per weight. Each rule is an (input, output) index pair.

## Active tiles

A layer's pillars do not fit on chip all at once. The ATM (`atm`) cuts the input sequence into *active tiles*. A tile is a run of consecutive input pillars [I_s, I_e] such that:
- the tile's input vectors fit in the input buffer: at most `in_cap` = 512 / CT pillars, where CT is the number of 64-channel slices;
- every output those inputs reach lies in a window [O_s, O_e] of at most `out_cap` = 1024 pillars, so they fit in one output-buffer bank.

The ATM looks at one input per cycle. It reads the heads of the nine rule banks:
- The heads whose input index equals the current input are *hits*. Their largest output index may extend O_e.
- The smallest output index at any head is the lowest output that a not-yet-processed rule will still write.
- A new tile starts with O_s equal to that minimum.
- The tile grows while both ranges fit. Otherwise it closes and a new tile opens.

For each tile and each bank, the tile table records where the tile's rules start and how many there are (`ws`, `wc`). The compute loop therefore never searches the rule banks.

Because O_s is chosen this way:
- outputs below the next tile's O_s receive no further contributions once the current tile is done, so they can be written out;
- outputs from the next tile's O_s up to the current O_e are still open, and are carried into the next tile's bank (Copy_psum).

The ATM raises `overflow` in two cases:
- a single input reaches more outputs than a bank holds, for example a SpConv row wider than about 510 pillars;
- there are more tiles than the table holds (1024).

The layer then ends early with `error` set.

## The per-layer instruction sequence

The GSU controller (`gsu`) runs a layer as seven instructions. `cnt[0..6]` count the cycles spent in each.

```
RuleGen      load coordinates from DRAM, run the RGU, then the ATM
for each output-channel slice mt (64 channels)
  for each active tile
    Gather_inp   input vectors I_s..I_e, all CT slices, DRAM -> input buffer
    for each input-channel slice ct, for each weight w with rules in this tile
      Gather_wgt   64 weight rows, DRAM -> weight buffer
      Load_wgt     shift them into the PE array (64 cycles)
      MXU          one rule per cycle: input[(i-I_s)*CT+ct] enters the array,
                   tagged with o-O_s; results accumulate into the output buffer
                   (a drain of 128 cycles follows each weight group)
    Copy_psum    open outputs (next O_s .. O_e) move to the other bank
    Scatter_out  final outputs pass through the SFU and, if kept, are written
                 to DRAM with their coordinates; the banks swap
```

Buffer addresses are offsets from the tile's start indices. No address arithmetic beyond a subtraction is needed.

The DRAM port is a single valid/ready request channel (read or write, one 512-bit word). Read data returns in order on `mem_rsp_valid`. The controller tolerates any back-pressure and any read latency.

This build's word layout in DRAM:

| Data | Address | Contents |
|---|---|---|
| Coordinates | `coord_in + k`, `coord_out + k` | y in bits [19:10], x in bits [9:0] |
| Input slice (p, ct) | `feat_in + p·CT + ct` | 64 int8 |
| Weight row r of (mt, ct, w) | `wgt + ((mt·CT+ct)·9 + w)·64 + r` | 64 int8, one per output column |
| Output slice (k, mt) | `feat_out + k·MT + mt` | 64 int8 |

## Datapath

- **`pe`**:
  - holds one weight in a local register;
  - multiplies the int8 input arriving from the left and adds the 32-bit partial sum arriving from above;
  - passes both on.

  Weights enter by shifting down each column.
- **`mxu`**:
  - a 64x64 array of PEs;
  - input channels map to rows and output channels to columns;
  - triangular skew registers line up one input vector per cycle on the way in, and de-skew the 64 partial sums on the way out;
  - a tag (the output-buffer address) travels alongside;
  - latency is 127 cycles;
  - Load_wgt takes 64 cycles, last row first.
- **`global_buffer`**: the input buffer, 512 x 64 bytes = 32 KB.
- **`weight_buffer`**: one 64x64 weight tile.
- **`output_buffer`**:
  - two banks of 1024 x 64 x 32-bit partial sums;
  - a valid bit per entry turns the first accumulate into a plain store, so no clearing pass is needed;
  - a copy port serves Copy_psum;
  - `swap` exchanges the banks and invalidates the one being left.
- **`sfu`**:
  - pruning: drops a pillar whose L1 magnitude over the 64 channels is below the layer threshold;
  - then ReLU;
  - then requantisation by an arithmetic right shift with saturation to int8.
- **`spade_top`**: wires all of the above together with one DRAM port. `cfg` (`layer_cfg_t` in `spade_pkg`) holds:
  - mode;
  - grid size;
  - pillar count;
  - CT and MT;
  - base addresses;
  - shift;
  - threshold.

  A layer starts on a `start` pulse and finishes with `done`. `n_written` and `n_rule_out` count kept and generated output pillars.

## Where this design departs from the original proposal

These parts follow the published architecture:
- the overall block diagram;
- CPR coordinates;
- the three-stage rule generator;
- the nine rule banks;
- active tiles with min/max output bookkeeping and the partial-sum copy;
- the seven instructions;
- the 64x64 weight-stationary array;
- the SFU placement of pruning and ReLU;
- the precisions, the array size and the 32 KB input buffer.

These are this design's own choices:
- all cycle-level sequencing;
- the deconvolution kernel (2x2, stride 2);
- the L1 pruning measure and the rule of keeping a pillar when its magnitude is at or above the threshold;
- the requantisation step;
- the output-buffer depth;
- the DRAM layout;
- pillar and grid limits.

Left out or simplified:
- **No overlap.** RuleGen, gathers and scatters would hide behind MXU work with double-buffered buffers. Here every instruction runs after the previous one finishes, so results are exact but slower than the original.
- **RuleGen runs once per layer** instead of per tile. All rules of a layer must therefore fit in the rule banks (16384 per bank). This limits which frames fit: KITTI PointPillars with the submanifold backbone fits, while the dilating SpConv layers of full KITTI or nuScenes frames exceed the pillar limits.
- **Weight grouping and ganged scatter are not built.** These reduce Load_wgt stalls and DRAM write traffic.
- **Pruning only when MT = 1.** It needs all output channels of a pillar, so it is applied only when one 64-channel slice holds them all.
- **No dense Conv2D mode.** The detection head's dense convolutions are not supported.

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/spade_pkg.sv tb/tb_rgu.sv \
          --top-module tb_rgu -Mdir obj_rgu -o sim && obj_rgu/sim
```

- **`tb_rgu`** compares the rules and output coordinates of every mode with a brute-force neighbour lookup on a dense grid. It also checks ordering and the linear cycle bound.
- **`tb_atm`** checks tile properties one by one on random layers and capacities:
  - coverage;
  - the capacities;
  - rule windows;
  - O_s and O_e;
  - maximality;
  - overflow.
- **`tb_spade_top`** runs the whole accelerator on reduced sizes (4x4 array, 16-entry input buffer, 32-entry output banks). It runs the five modes plus an overflowing layer.
  - Every output word is compared with a direct software convolution.
  - It counts that tiling, Copy_psum, pruning, channel tiling, memory stalls and the error flag all occurred.
- **`tb_gsu`** uses the same harness and checks instruction cycle counts, gather and scatter volumes, and address ranges.
- **`tb_spade_full`** runs the default 64x64 build on a 64-channel layer with and without pruning. It compiles in about 4 minutes and runs in seconds.
- **`tb_spp3_layer`** runs one full-size layer of the kind found in a KITTI PointPillars backbone with submanifold convolutions. The layer is a 432x496 grid with about 12,800 pillars and 64 to 64 channels, run as SpConv-S. It checks every output and reports the cycles spent in each instruction.
- **`tb/dram_model.sv`** is the behavioural memory shared by the system tests. It has fixed latency and optional random back-pressure.

## Performance seen in simulation

`tb_spp3_layer` gives a sense of where time goes at full size. The layer is 12,912 pillars on a 432x496 grid, with 64 to 64 channels, run as SpConv-S.

- **Total:** 198,536 cycles, about 0.2 ms at 1 GHz, in 26 active tiles.
- **MXU:** 48,970 cycles.
- **RuleGen:** 77,614 cycles. This includes the coordinate load, the RGU and the ATM.
- **Load_wgt:** 14,976 cycles.
- **Gathers and scatters:** the rest.

With double buffering, RuleGen, the gathers and the scatter would mostly hide behind MXU work. That overlap is the largest speed-up this RTL leaves on the table.

## Limitations

- Timing closure at 1 GHz and SRAM macro mapping have not been studied.
- The buffers are written as plain arrays, so a logic synthesiser flattens the large ones into registers. At the default sizes, the output buffer, rule buffer, MXU and top level take a long time to synthesise.
