# Voxel-CIM: map search and compute-in-memory convolution for sparse voxel networks

Voxel-based point-cloud networks (SECOND for detection, MinkUNet for
segmentation) spend most of their time in two steps. The first is the map
search: before a sparse 3D convolution can run, every output voxel must learn
which of its 27 neighbours exist in the input. The second is the convolution
itself, which is sparse and irregular. This RTL builds one accelerator for
both:

* **Map search with bounded buffers.** Voxels are sorted by depth (z) in
  off-chip memory, and a small table records where each depth starts. The
  output voxels are then visited in memory order. Only a sliding window of a
  few rows of two adjacent depths is kept on chip, and a sorting network with
  an adjacent-pair comparator finds the neighbours in that window. The voxel
  space can also be cut into a grid of blocks so that each depth stays small.
  Voxels that a block needs from its neighbours are either copied into the
  block (the x+ side) or fetched into a backup FIFO (the y− and y+ sides).
* **Weight-stationary compute-in-memory.** Each 3×3×3 kernel position is a
  C1×C2 weight sub-matrix stored in its own processing element (PE) of an SRAM
  CIM tile. Every in-out pair found by the map search becomes one
  matrix-vector product in the PE of that pair's kernel position. Its result is
  added into the output voxel's accumulator. Some positions get far more pairs
  than others; the centre gets one for every voxel. Those positions therefore
  get several PE copies ("W2B", weight workload balancing). The same datapath
  runs dense 3×3 Conv2D layers on a second CIM unit.

The design is written in synthesizable SystemVerilog-2017. Only the CIM
macro's analog part is a behavioural model, and it is flagged as one.

## Block diagram and data flow

```
             depth-encoding table          off-chip voxel memory (vmem_*)
                     |                              |
   +---------------- map_search_core ---------------------------------+
   | map_search_ctrl -> voxel FIFOs I, II, backup -> bitonic_sorter(64)|
   |   kernel_offset_adder (13 candidates) ----^         |             |
   |                                  concat -> intersection_detector  |
   |                                               |                   |
   |                                   mapping_info_buffer (pairs)     |
   +-----------------------------------------------|-------------------+
                 conv2d_pair_gen --+               |     map_store (replay)
                                   v               v          |
 feature_buffer ---------------> gather_unit <----------------+
                                   | starts one free PE holding the pair's weights
                     cim_unit (Spconv3D, 64 PE) | cim_unit (Conv2D, 64 PE)
                                   v
                             scatter_unit -> accumulation_unit -> activation_unit -> o_rd_*
```

An in-out pair (`pair_t` in `vcim_pkg`) carries three fields. `in_id` is the
input feature index, `out_id` the output row, and `widx` the kernel position
0..26. Position `widx = (dz+1)*9 + (dy+1)*3 + (dx+1)` is used where the input
voxel is P = Q + (dx, dy, dz), so the centre is position 13.

## Voxel storage and the depth-encoding table

The voxel space is split into `GRID_X × GRID_Y` blocks in the x-y plane, with
(2, 8) at the default size. Block `b = i*GRID_Y + j` covers
x ∈ [i·BW, (i+1)·BW) and y ∈ [j·BH, (j+1)·BH). Each block's voxels are stored
one after another in memory, sorted by z, then y, then x. A memory word is a
`voxel_t`: a 20-bit feature index, a halo flag and the (z, y, x) coordinate.

The block also stores a **halo**: a copy of every voxel of block (i+1, j) that
lies in that block's first column x = (i+1)·BW. The halo word is placed at the
end of its row and flagged `halo`. A halo voxel is searched like any other but
never becomes an output.

The depth table has `GRID_X·GRID_Y·(SPACE_Z+1)` entries. Entry
`b*(SPACE_Z+1)+z` is the address of the first word of depth z in block b.
Entry `b*(SPACE_Z+1)+SPACE_Z` is the block's end, so depth z spans entries
z and z+1. The host writes the table, the memory and the features before a
layer. In the paper this happens through a bus, which is not modelled here.

## The map search (DOMS and block-DOMS)

This is the hardest part of the design. It lives in `map_search_ctrl`, which
drives the FIFOs and the sorter in `map_search_core`.

### Half kernel and symmetry

A subm3 layer (kernel 3, stride 1, outputs at the input positions) relates
P and Q by weight W_d exactly when it relates Q and P by W_−d. The search
therefore looks only for the 13 offsets of one half-kernel:

* (+1, 0, 0);
* (−1..+1, +1, 0);
* the nine offsets with dz = +1.

For each offset k found with input P it writes two pairs: (P→Q, W[k]) and the
reverse (Q→P, W[26−k]). It also writes the centre pair (Q→Q, W13) for every
output. All 27 relations are thus produced from a search over rows y0..y0+1 of
depth z0 and rows y0−1..y0+1 of depth z0+1.

### Window, release and load

Buffer I (FIFO 0) holds rows y0..y0+1 of depth z0. Buffer II (FIFO 1) holds
rows y0−1..y0+1 of depth z0+1. For each output Q, in memory order:

1. **Release.** Entries of buffer I with y < y0 and of buffer II with y < y0−1
   are popped from the head. Both FIFOs are sorted, so this is a head-only
   operation.
2. **Load.** Each buffer's stream continues reading memory where it stopped.
   Words below the window are skipped, and the stream stops at the first word
   above it. A one-word look-ahead register per stream keeps that word, so it
   is not read a second time for the next output. Buffer I's stream also
   supplies the next output voxel Q; this is the "output coordinate
   calculation".
3. **Sort.** 13 candidate slots, padded to 16, plus the 16 entries of each of
   buffer I, buffer II and the backup FIFO make the 64 inputs of a full bitonic
   sorting network. Unused slots are marked invalid and sort to the end. The
   sort key is {invalid, z, y, x, is_candidate}, so a voxel sorts directly
   before a candidate at the same position.
4. **Detect.** The intersection detector compares every adjacent pair of the
   sorted sequence on all three coordinates at once. A voxel followed by a
   candidate at the same position gives a hit for that candidate's offset,
   and the hit returns the voxel's feature index.
5. **Push.** The centre pair and then a forward and a reverse pair per hit go
   into the mapping info buffer, one per cycle, stalling while it is full.

At the end of a depth, buffer I is reloaded from depth z0+1 and buffer II from
z0+2.

### Multi-pass search

With 16 entries a FIFO may fill before its window is complete, which happens
in dense rows. The controller then searches what it holds and counts a
multi-pass (`cnt_ms_multipass`). It flushes each full FIFO that still has
window words left, loads the next part, and searches again. Only the buffers
that got new data take part in the later passes. Afterwards the stream is
rewound to the start of Q's window. Every pair is still found, at the cost of
extra reads (`cnt_ms_reads`). With a window that always fits, each voxel is
read about twice: once for its own depth and once as the next depth of the
depth below it.

### Cross-block search (block-DOMS)

When Q sits on a block edge, some neighbours live in other blocks. Before the
sort, the controller fills the backup FIFO through a list of up to 14
segments. Each segment is one row of one depth of one neighbour block, located
through that block's table entries:

| segments | block | rows | depths | how it is scanned |
|---|---|---|---|---|
| 0–5 | (i+dx, j−1), dx ∈ {−1, 0, +1} | y0−1 | z0, z0+1 | backwards from the end of the depth (the row is the block's last) |
| 6–11 | (i+dx, j+1), dx ∈ {−1, 0, +1} | y0+1 | z0, z0+1 | forwards from the start of the depth (the row is the block's first) |
| 12–13 | (i−1, j) | column x0−1, rows y0..y0+1 / y0−1..y0+1 | z0, z0+1 | whole depth, filtered |

Segments 0–11 follow the paper's search-space algorithm. Segments 12–13 are
this design's addition. The paper argues that the x− side needs no search
"by symmetry", but with the half kernel above an output on a block's first
column still needs the offsets with dx = −1, and those lie in block (i−1, j).
The halo of block (i−1, j) only serves that block's own outputs. Without
segments 12–13 pairs are lost; the map-search testbench checks this against a
brute-force reference. Each segment load counts into `cnt_ms_backup`. If the
backup FIFO overflows, `cnt_ms_backup_ovf` is raised; at depth 16 this does not
happen in any test.

## The computing core

### PE arithmetic (`cim_pe`, `cim_array`)

A PE is a 128×128 array of one-bit cells, so 64 PEs make a 1024×1024 tile.
Row r is input channel r. Output channel o uses columns 8o..8o+7, with column
8o+b holding bit b of the signed 8-bit weight W[r][o]. That gives 16 output
channels per PE.

Inputs are unsigned 8-bit features applied bit-serially, LSB first. In cycle
t the word lines carry bit t of every input. Each column's ADC counts the rows
where the input bit and the cell are both 1 (`$countones`, an ideal ADC). The
shift-adder adds Σ_b (b = 7 ? −cnt : cnt)·2^b·2^t into the channel's
accumulator. After 8 cycles `psum[o] = Σ_r in[r]·W[r][o]` is exact. The result
waits in the PE, which stays busy, until the scatter unit takes it.

`cim_array` is the behavioural stand-in for the SRAM macro: bit-line
summation and ADCs are analog. Everything around it is logic.

### Sub-matrix mapping and W2B (`cim_unit`, `gather_unit`)

Kernel position w owns PEs base(w) .. base(w)+copies(w)−1. The Spconv3D copy
factors are:

* W0–W8: 1 each
* W9: 2
* W10–W12: 4 each
* W13: 16
* W14–W16: 4 each
* W17: 2
* W18–W26: 1 each

That is 62 PEs. The centre and its in-plane neighbours, which get the most
pairs, get the most copies.

The Conv2D unit holds the 9 positions of a 3×3 kernel, with 7 copies each.

For every pair the gather unit reads the input vector from the feature buffer
in the same cycle. It then starts the lowest idle copy of the pair's position,
with `out_id` as tag. If all copies are busy the pair waits (`cnt_stall`).
With `cfg_w2b_en` low only copy 0 of each position is used. That is the evenly
mapped baseline, and it makes the effect of W2B measurable.

### Scatter, accumulate, activate

* The scatter unit collects finished PEs round-robin, one per cycle.
* The accumulation unit adds the 16 partial sums into output row `out_id`,
  using 32-bit accumulators and 8192 rows, in one read-modify-write cycle.
  Before each layer it clears all rows, one per cycle.
* The activation unit reads a row with ReLU, an arithmetic right shift by
  `cfg_shift` and saturation to 0..255. The result comes one cycle after
  `o_rd_en`.

### Conv2D (`conv2d_pair_gen`)

RPN layers are dense, so their pairs are generated rather than searched. The
generator covers 3×3 kernels with stride 1 and zero padding 1 on a
`cfg_width × cfg_height` map (pixel index y·W + x). It produces pairs
input-pixel major: one input vector meets its 9 sub-matrices in consecutive
cycles, and pairs that fall off the map are skipped.

## Layer sequencing and map reuse (`voxel_cim_top`)

A `start` pulse starts a layer, which runs in four phases:

1. Clear the accumulators, which takes `OUT_DEPTH` cycles.
2. Start the pair source:
   * Spconv3D (`cfg_mode = 0`): the map search core.
   * Conv2D (`cfg_mode = 1`): the Conv2D generator.
   * Spconv3D with `cfg_reuse = 1`: the map store.
3. Compute while pairs arrive. Convolution does not wait for the whole map.
4. `done` pulses once the source is finished, the mapping info buffer is
   empty, all PEs are idle and the last partial sum is accumulated.

`cnt_cycles` counts the layer's cycles.

Two consecutive subm3 layers keep the voxel positions and so share one IN-OUT
map. While a layer is searched, `map_store` records every pair the gather unit
accepts, up to `MAP_DEPTH` pairs; beyond that `map_ovf` is set. A following
layer run with `cfg_reuse` replays them, one per cycle, with no map search.
Compute is then the bottleneck, and that is where W2B pays off. During a
fresh search the search rate limits the pair rate instead.

Port groups:

* `tbl_wr_*`: depth table
* `w_wr_*`: weight rows; `w_wr_unit` selects the CIM unit
* `f_wr_*`: input features
* `vmem_*`: off-chip voxel reads, one cycle of latency
* `o_rd_*`: activation readout
* `cnt_*`: statistics

## Parameters

| parameter | default | origin |
|---|---|---|
| SPACE_X × SPACE_Y × SPACE_Z | 1408 × 1600 × 41 | the paper's high-resolution voxel space |
| GRID_X × GRID_Y | 2 × 8 | the paper's chosen block partition |
| SORT_N | 64 | the paper's sorter length |
| WBITS | 8 | the paper's weight precision |
| W2B copies | see above | the paper's copy table |
| FIFO_DEPTH, BACKUP_DEPTH | 16, 16 | own choice: 16 + 3·16 = 64 sorter inputs |
| ROWS × COLS per PE, NUM_PE | 128 × 128, 64 | own choice: 64 PEs fill a 1024×1024 tile |
| IBITS, C1, ACC_W | 8, 16, 32 | own choice |
| FEAT_DEPTH, OUT_DEPTH, MAP_DEPTH, MIB_DEPTH | 8192, 8192, 8192, 256 | own choice |

## Departures from the paper and limits

* **Extra x− segments.** The block-DOMS x− scan (segments 12–13) is added;
  see above.
* **Multi-pass.** The multi-pass handling of a full FIFO is this design's
  answer to a case the paper leaves open.
* **Only subm3 map search.** Strided (gconv2) and transposed sparse
  convolutions are not built. Conv2D covers 3×3 stride 1 only.
* **Batch selection.** The gather unit issues pairs in map order. It does not
  choose each cycle's batch for maximum overlap with the previous one.
* **No depth carry-over.** When a FIFO could hold a whole depth, the
  voxels of depth z0+1 could stay on chip for the next depth, which gives O(N)
  reads. This is not built: both buffers are reloaded at each depth change.
* **Sequential search.** Release, load, sort and push run one after another
  for each output; they are not overlapped. A fresh search therefore delivers
  pairs more slowly than the PEs can take them.
* **No cross-layer pipeline.** The map search of one layer does not overlap
  with the compute of the previous one.
* **Buffer sizes.** Feature and output buffers hold 8192 vectors of 16
  channels, with no tiling over channels or over voxels. Full SECOND and
  MinkUNet layers therefore do not fit. The 776 KB total buffer of the paper
  is not split into parts there, so these sizes are a guess.
* **Ideal analog.** The ADC is ideal. The input precision (8-bit unsigned,
  bit-serial) is assumed. Peak throughput follows from the PE count and is not
  tuned to the paper's 27.8 TOPS figure.
* **Units not built.** Voxelization, VFE, post-processing and the bus are not
  built. The top exposes plain ports where they would connect.

## Simulation

Every block has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`. To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -yrtl rtl/vcim_pkg.sv tb/tb_voxel_cim_top.sv \
          --top-module tb_voxel_cim_top -Mdir obj -o sim && obj/sim
```

* **`tb_map_search_core`** runs two cores on a 12×16×4 space with a 2×2 grid
  and random voxels.
  * The cores use 16-entry and 4-entry FIFOs; the small one forces many
    multi-pass searches.
  * It compares the pair set with a brute-force 27-neighbour search, both
    ways.
* **`tb_voxel_cim_top`** runs the whole accelerator at its default sizes, with
  no parameter overrides, in about 10 s of simulation. Its data is a random
  cluster of 189 voxels at the corner of four blocks.
  1. A searched Spconv3D layer.
  2. The next layer reusing the map with W2B off.
  3. The same with W2B on.
  4. An 8×6 Conv2D layer.

  Every activation is compared with a model of ReLU(Σ f·W) ≫ shift. The run
  also counts cross-block backup loads, multi-pass searches, gather stalls and
  the mode switch, and fails if any of them never happens or if W2B is not
  faster than the baseline.
* **`tb_doms_workload`** runs the map search on the two voxel spaces used to
  evaluate it. Each workload is searched by plain DOMS (one block) and by
  block-DOMS on the 2×8 grid, with 16-entry FIFOs, and checked against
  brute force.
  * 352×400×10 at sparsity 0.005: 7,040 voxels.
  * 1408×1600×41 at sparsity 0.001: 92,365 voxels.

  Each pass reads a stored voxel word about 2 times: 1.90 and 2.16 times on
  the small space, 1.98 and 2.11 times on the large one. That is the O(2N)
  behaviour expected without depth carry-over. In this design the halo words
  and the backup segments make block-DOMS read slightly more, not less. At
  these sparsities a row window never overflows a 16-entry FIFO, so the block
  grid's benefit, shorter depths for a bounded buffer, does not show. The run
  takes under a minute.
* The unit testbenches cover the sorter against a reference sort, the PE
  against integer dot products with a latency of 8 cycles, W2B copy selection
  and stalls, the scatter round-robin, accumulation, saturation, and Conv2D
  pair sets.
