# SpOctA: octree map search and sparsity-aware compute for 3D sparse convolution

Point-cloud networks built on 3D sparse convolution spend their time in two places.
The first is **map search**: for every output voxel, finding which input voxels lie
inside its kernel window. The second is **computation on features that are themselves
40-60 % zero**. This design handles both on one chip:

* **OCTENT** (octree-encoding-based search). Each 16x16x16 block of voxels is stored in
  an 8-bank table. Every bank is addressed by an octree code, so the 27 neighbours of a
  voxel are found with 8 parallel table reads per cycle. There are no hash tables and no
  sorting.
* **SPAC** (sparsity-aware computing). Zero input channels are dropped together with
  their weight rows before they reach the 16x16 PE array. The array therefore does work
  in proportion to the nonzero features, not to the channel count.

The two halves are joined by a **Map Table**: search runs ahead of computation and stalls
only when the table is full.

All of this is written in synthesizable SystemVerilog (`rtl/`), with a self-checking
testbench for every block (`tb/`).

## Layer types

| mode      | kernel / stride            | where the maps come from                | dataflow          |
|-----------|----------------------------|-----------------------------------------|-------------------|
| `M_SUBM3` | 3x3x3 submanifold, stride 1 | searched on chip                        | output stationary |
| `M_GCONV2`| 2x2x2 generalized, stride 2 | searched on chip, also exported         | output stationary |
| `M_GCONV3`| 3x3x3 generalized          | loaded through `map_ld_*`               | input stationary  |
| `M_TCONV2`| 2x2x2 transposed           | loaded (the exported Gconv2 maps)       | input stationary  |

A *map* (`map_entry_t`) is the triple (input voxel index, weight offset `w_idx` 0..26,
output voxel index), plus a `last` flag that closes an output window. The offset is
`w = (dx+1) + 3(dy+1) + 9(dz+1)`, where d is the output coordinate minus the input
coordinate, so 13 is the centre.

## Octree encoding (`coord_transformer`, `spocta_pkg::oct_phi1/oct_addr`)

A coordinate inside a block has 4 bits per axis. The lowest bit of each axis,
`phi1 = {z0,y0,x0}`, selects one of 8 banks. The remaining bits, interleaved from the
top as `{z3,y3,x3,z2,y2,x2,z1,y1,x1}`, form the 9-bit address inside the bank. The 8
voxels of any 2x2x2 cell therefore sit at the same address, one in each bank. This has
two consequences:

* The parent of a voxel in a stride-2 convolution is simply its address.
* Any 3x3x3 window touches each bank at most once per *query cycle*.

## Map search (`octent_core`)

Per block:

1. **LOAD.** Voxels stream in on `vox_*`. Each voxel is encoded and written into the
   `octree_table` (8 banks x 512 entries, with a valid bit per entry) and into the
   `voxel_list_fifo`.
2. **QUERY.** The `query_transmitter` takes voxels from the list. For Subm3 it spends 8
   cycles per voxel. In cycle `e` (0..7), bank `b` is read at a neighbour address built
   axis by axis:
   * where the bank's phi1 bit equals the centre's, the offset is 0. Only cycles with
     that bit of `e` clear are used; the others are vacant.
   * where the bits differ, the offset is -1 when bit `e[a]` is 0 and +1 when it is 1.

   Over the 8 cycles this visits all 27 neighbours exactly once. Neighbours that fall
   outside the block are suppressed, and the centre itself is read in the last cycle.
   This per-(centre phi1, cycle) table of offsets is computed by logic rather than
   stored.

   For Gconv2 one cycle per voxel is enough: all 8 banks are read at the voxel's own
   address. A hit in bank b is a child with weight `w = b`, and the output is the
   parent address.
3. **Filter and rectify.** `search_filter` compacts the hits of a cycle into consecutive
   maps. It sets `last` on the final map of a window. Then it rotates the maps by the
   Map Table's write pointer, so the 8 FIFOs of `map_table` fill evenly and read back in
   order. In Gconv2 mode, a parent reached from several children is emitted only by the
   query of its lowest-phi1 child; this removes duplicates.
4. **CLEAR.** The table's valid bits are cleared in one cycle, and `blk_done` pulses.

**Stall.** The query transmitter stops when any Map Table FIFO is one entry from full
(`search_stall`). Loaded maps (Gconv3/Tconv2) enter the same Map Table through
`map_ld_*`.

## From maps to jobs (`top_control_unit`)

The control unit pops maps until one carries `last`, which gives one output window of
at most 27 maps. In input-stationary modes every map is its own window. The window is
then replayed for every 16-channel output tile. Inside each tile it issues one job per
map and per 16-channel input chunk, and marks the first and last job of the
accumulation group. In Gconv2 mode every popped map is also exported on `map_exp_*`
with its input and output swapped, ready to be loaded back for the matching Tconv2.

A layer ends when `layer_end` is high, no maps are left and both cores are idle.
Input-stationary layers first drain the Ofmap Mem; then `done` is raised.

## Sparsity-aware computing (`spac_core`)

A job reads one feature word: 16 channels, plus a nonzero mask that the `ifmap_mem`
computes on write. It also reads one 16x16 weight tile. The computation then runs as
follows:

* **Gather.** `gather_unit` keeps only the nonzero channels, each with its own weight
  row (16 output-channel weights).
* **Data buffer.** `data_buffer` writes kept pair j into lane FIFO `(wr_ptr + j) mod 16`
  and advances `wr_ptr` by the count. Pairs from successive jobs therefore pack densely
  across the 16 lanes.
* **PE array.** `pe_array` fires as soon as all 16 lanes hold a pair. Each PE adds
  `sum over lanes (x * w)` for its output channel into a 32-bit psum. At the end of a
  group the buffer is flushed and the partly filled last vector fires too. A group of
  N nonzero pairs therefore costs exactly `ceil(N/16)` firings, and the testbenches
  check this number.
* **Write-out.** `ofmap_arranger` routes each finished psum vector.
  * In output-stationary mode the vector goes to `postprocessing_unit`, which computes
    `y = sat8(((psum + bias[c]) * scale) >>> shift)` with optional ReLU. The result
    leaves on `out_*` with a 16-bit nonzero mask, which is the next layer's
    sparsity mask.
  * In input-stationary mode the psum is written back to `ofmap_mem`, at address
    `out_idx * cout_tiles + otile` with a valid bit. The next group for the same output
    starts from that psum instead of zero.
  * `drain_req` scans the Ofmap Mem, postprocesses and exports every valid word, and
    clears it.

### Non-uniform weight caching (`weight_fetcher`, `weight_mem`)

The 448-tile Weight Mem is split by how often an offset is used in Subm3 layers:

| partition   | base | tiles | content                                              |
|-------------|------|-------|------------------------------------------------------|
| centre      | 0    | 256   | offset 13, all output tiles and input chunks         |
| mid layer   | 256  | 128   | the 8 other dz=0 offsets, first `mid_otiles` tiles   |
| upper layer | 384  | 32    | offsets in `up_list[0..n_up)`, first `ud_otiles` tiles |
| lower layer | 416  | 32    | offsets in `down_list[0..n_down)`                    |

For each job the fetcher returns the status pair (A = external access needed, R = read
the weight memory), the word address, and whether this particular tile must come from
outside. External tiles are requested on `ext_w_req / ext_w_widx / ext_w_otile /
ext_w_chunk`, and the core waits for `ext_w_valid`. The other modes use a linear layout
`(w * cout_tiles + otile) * cin_chunks + chunk`; tiles beyond word 447 are fetched
externally.

## Running a layer

1. Set `cfg` (`layer_cfg_t`):
   * mode;
   * `cin_chunks` and `cout_tiles` (channels / 16);
   * the caching fields;
   * `pp_scale`, `pp_shift` and `pp_relu`.
2. Write the weight tiles (`wm_wr_*`), the biases (`bias_wr_*`, indexed by
   `{otile, channel}`) and the input features (`ifm_wr_*`, at address
   `in_idx * cin_chunks + chunk`).
3. Stream the voxels of each block with `vox_last` on the final one. For Gconv3/Tconv2,
   push the maps on `map_ld_*` instead.
4. Raise `layer_end` and wait for `done`. Output words appear on `out_*` while the layer
   runs, or during the drain in input-stationary modes.

All control inputs are sampled on the rising edge; the reset (`rst_n`) is asynchronous
and active low. The internal latencies are:

* The octree table and all memories read in one cycle.
* A Subm3 query takes 8 cycles per voxel, a Gconv2 query 1 cycle.
* A job takes 2 cycles plus any external-weight wait.
* Each accumulation group adds a flush cycle and a result cycle.
* Postprocessing and export take 1 cycle each.

## Verification

Each block has `tb/tb_<module>.sv`. These testbenches compare the block against an
independent model written inside the testbench: a brute-force O(n^2) neighbour search
for the map search, and integer arithmetic for the computing path. They print
`TB_RESULT checks=... failures=...`. Example with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/spocta_pkg.sv \
        tb/tb_spocta_top.sv --top-module tb_spocta_top -Mdir build -o sim
    ./build/sim

`tb_spocta_top` runs the full-size top (all default parameters) through three layers:

1. Subm3 over two dense blocks, with part of the weights cached off chip.
2. Gconv2 over one block, whose maps are exported.
3. Tconv2 on those maps loaded back, ending with a drain.

It checks all 364 output words. It also counts, and requires at least once, each of:
search stall, external weight fetch, zero skip, mode switch, map export, map load,
Ofmap Mem write-back and drain. It runs in well under a second.

## Where this RTL departs from the paper, and its limits

* **Switch 1** (reusing one input word across several output tiles) is not built: every
  job re-reads its feature word.
* **Job issue is not pipelined**: a job takes two cycles, so the PE array is not kept
  busy every cycle. Zero skipping still reduces the firing count exactly.
* **The memory-management unit** is not a separate module. Its weight fetcher and ofmap
  arranger sit inside `spac_core`.
* **The external memory** (DDR) is modelled only in the testbenches. The top exposes
  plain request/data ports instead of a bus.
* **Widths and sizes.** Voxel indices are 12 bits, which limits one pass to 4096 voxels.
  The Ifmap Mem holds 4096 words of 16 channels, and there are at most 16 output tiles
  (256 channels). Full ScanNet, SemanticKITTI, KITTI or nuScenes frames (tens of
  thousands of voxels) must be split into passes by the host, with indices relabelled
  and features reloaded per pass. Kernel windows do not cross block borders.
* **Other own choices.** The Map Table depth (64 per FIFO), the data-buffer depth (4),
  the postprocessing formula, the bias table and the Gconv2 de-duplication rule are this
  design's choices where the paper is silent.
