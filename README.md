# PC2IM point-cloud accelerator in SystemVerilog

Point-cloud networks such as PointNet++ spend most of their time on two kinds of work:

- **Structuring the cloud into point sets.** Farthest point sampling (FPS) picks the centroids. A neighbour query (ball query or k-nearest-neighbours) groups the points around each centroid.
- **Computing features.** Shared MLPs run on the points of each set, followed by max pooling.

The first kind is dominated by distance computations over the whole tile and by repeated "find the maximum of the minimum distances". The second is ordinary multiply-accumulate work.

This design performs both inside SRAM-based compute-in-memory (CIM) arrays, using three ideas.

1. **L1 distances instead of Euclidean ones.** The distance |dx|+|dy|+|dz| needs only adders. The adders are built from two logic results that the SRAM sense amplifiers deliver anyway (OR and NAND of the stored bit and the driven bit). A ball of radius R becomes a "lattice" (an L1 diamond) of range L.
2. **A content-addressable memory (CAM) that finds a maximum.** FPS keeps, for every point, the minimum distance to the centroids chosen so far, then picks the point whose minimum is largest. Here every point owns a *pair* of temporary distances. The pair compares itself in place, so the minimum is always the smaller of the two and an update simply overwrites the larger one. The global maximum is then found by a bit-serial CAM search from the MSB, which takes 19 cycles for 19-bit distances whatever the number of points. Two such arrays alternate: while one is searched, the other can be loaded.
3. **A split-concatenate CIM for the MLPs.** Each input is cut into four interleaved 4-bit clusters, and each weight into four 4-bit blocks. A pair of 4-bit weights and two input bits can then produce 0, A, B or A+B. Because the bits of one cluster are 2^4 apart, the four 4-bit results of a cluster can be concatenated into one 16-bit word instead of being shifted and added. A 16-bit by 16-bit dot product takes 4 cycles instead of the 16 of a bit-serial CIM.

All files are IEEE 1800-2017 SystemVerilog. The digital behaviour of every CIM array (storage, sensing logic, near-memory adders, CAM match lines) is written as synthesizable RTL. The transistor-level circuits (bitcells, dynamic sense amplifiers, precharge) are not modelled.

## Block map

```
                      host ports (stand in for the bus/control block)
   points ──► apd_cim ──16 L1 distances/cycle──┬──► ping_pong_max_cam ──max index──► CIB
              (2048-pt tile)                    │        (FPS)
                                                └──► sorter_merger ──K-list──► NIB
                                                         (lattice / kNN query)
              pre_ctrl sequences the two flows above
   MLP inputs ─► input buffer ─► sc_cim ─► relu_bn ─┬─► input buffer (next layer)
                                                    └─► feature buffer
   CIB + NIB + feature buffer ─► aggregation_unit ─► aggregated features
```

| File | Role |
|---|---|
| `rtl/pc2im_pkg.sv` | Sizes, the point struct `point_t` (signed 16-bit x, y, z), the query mode enum and the neighbour entry `nb_entry_t` {valid, 11-bit index}. |
| `rtl/apd_nmu.sv`, `rtl/apd_cim.sv` | The distance CIM and its near-memory subtractor. |
| `rtl/max_cam_array.sv`, `rtl/ping_pong_max_cam.sv` | One MAX-CAM array, and the two arrays behind a global selector. |
| `rtl/sorter_merger.sv` | Builds the neighbour list of a centroid. |
| `rtl/pre_ctrl.sv` | Sequencer for FPS and the queries. |
| `rtl/sram_1r1w.sv` | The buffers. |
| `rtl/sc_fua.sv`, `rtl/sc_cim.sv` | The fused adder and the split-concatenate MLP engine. |
| `rtl/relu_bn.sv` | Folded batch normalisation, saturation and ReLU. |
| `rtl/aggregation_unit.sv` | Max pooling of neighbour features relative to the centroid. |
| `rtl/pc2im_top.sv` | The whole accelerator. |

## Point tile and the L1 distance array (`apd_cim`, `apd_nmu`)

A tile holds up to 2048 points with 16-bit two's-complement coordinates. That is 12 KB.

- The storage is 4 point groups × 16 point clusters × 32 rows.
- One active row of one group gives one point from each of the 16 clusters, so 16 distances come out per cycle.
- Each distance is 19 bits wide. That is enough for the largest possible sum, 3 × 65535.

Point index layout (this design's choice): `idx = {group, row, cluster}`, i.e. `{sweep_row[6:0], lane[3:0]}`. With this layout, sweep row r delivers points 16r … 16r+15. The MAX-CAM and the sorter use the same layout, so an index never has to be translated.

**Near-memory subtractor.** Each coordinate column has a near-memory unit (`apd_nmu`).

- The sense amplifier gives OR and NAND of the stored bit and the driven reference bit.
- From these: XOR = OR & NAND (the propagate signal), and generate = NOT NAND.
- A carry-ripple chain forms the sum.
- To subtract, the reference bits are driven inverted and the carry-in is 1.

The result is a 17-bit signed difference. The absolute values of the three differences are added into the 19-bit distance.

**Timing.** All outputs are registered, with one cycle of latency.

- `cmp_en` with `cmp_row` gives `dist_valid`, `dist_row` and `dist_out[16]` one cycle later.
- `ref_load` copies a stored point into the reference registers.
- `rd_en` reads a point.
- Only one array access per cycle is allowed. An assertion checks this.

## Farthest point sampling in the Ping-Pong-MAX CAM

This is the least obvious part of the design.

### What is stored

Each array (`max_cam_array`) has 16 temporary-distance groups (TDG) of 128 temporary-distance pairs (TDP). That is one pair per point of a 2048-point tile. Pair `p` of group `g` belongs to point `{p, g}`.

A pair holds:

- an upper and a lower 19-bit temporary distance (TD);
- an **AS** latch, the result of the in-place compare "upper ≥ lower";
- an **IM** latch, set while the pair is still a candidate in a maximum search.

With the two arrays this gives 2 × 16 × 128 × 2 × 19 bits = 19 KB.

### Why a pair

The smaller TD of a pair is always the point's current minimum distance D_s to the chosen centroids. When a new distance d arrives, the next minimum is min(D_s, d). Writing d over the *larger* TD yields exactly that pair of values, because the smaller of the two is now min(D_s, d). So the update is a plain write steered by AS, with no read-modify-write and no comparator in the write path.

The first distance of a tile is written into both TDs (`ld_first`).

### The search

`srch_start` runs the following steps. `srch_done` pulses DW+4 = 23 cycles after the start cycle, with `srch_max` and `srch_idx`.

1. **Compare (1 cycle).** Every pair sets AS = (upper ≥ lower) and IM = 1. From now on, "the smaller TD" means the lower TD if AS = 1, else the upper TD.
2. **Bit CAM (19 cycles, MSB to LSB).** In each group, a zero detector checks whether any candidate's smaller TD has a 1 at the current bit.
   - If one does, the candidates with a 0 drop out (IM cleared) and the group's running maximum gets a 1 at this bit.
   - If none does, nobody drops out and the bit is 0.
   - After 19 cycles each group holds its own maximum, and its surviving candidates are the pairs that equal it.
3. **MAX tree (1 cycle).** A 16-to-1 tree takes the largest group maximum.
4. **Data CAM (1 cycle).** All smaller TDs are compared with the global maximum. A priority encoder returns the lowest matching index.

Running the bit CAM per group and combining the groups with the MAX tree is this design's reading of the description. The description names both the per-group zero detector and the 16-to-1 MAX tree but does not say how they work together. The rule that ties go to the lowest index is also this design's own.

### Ping-pong

`ping_pong_max_cam` holds two arrays. The input `sel` names the array in load mode (it takes `ld_*` writes and clear). The other array is in search mode.

The array that performs a search is latched when the search starts. Its result is returned even if `sel` changes during the search. An assertion forbids loading or clearing an array while it searches.

Inside one tile, FPS is sequential: each iteration needs the centroid found by the previous one. So the sequencer here uses array `t mod 2` for tile `t`. Consecutive tiles alternate arrays, but the two arrays are never busy at the same time. Real overlap would need a second tile in the distance array, which the description does not provide. The selector and the per-array load/search separation are built and tested at block level, including loading one array while the other searches.

## Neighbour lists (`sorter_merger`)

Each cycle the 16 distances of one sweep row pass through two stages:

1. The 16 distances are sorted.
2. The sorted group is merged into a running sorted list of the K = 32 nearest qualifying points.

Both stages are rank-based: each element's position is the count of elements that come before it, by distance, then index, with invalid entries last. That costs one layer of comparators plus a selection per stage. The latency is two cycles.

There are two modes:

- **Lattice mode** (set abstraction layers): a point qualifies only if its L1 distance is ≤ L. The description scales L to 1.6 times the Euclidean ball radius; here L is an input, and the host applies the scaling.
- **kNN mode** (feature propagation layers): every point qualifies.

In lattice mode, keeping the *K nearest* points inside the lattice, rather than the first K found in index order, is this design's choice.

## Sequencing one tile (`pre_ctrl`)

Given `n_points` (≤ 2048) already in `apd_cim`, `n_samples` centroids (≤ 512), a mode and a range, the sequencer works in two phases.

**FPS phase.**

1. Clear the chosen CAM array.
2. Take point 0 as the first centroid. Write it to CIB entry 0.
3. Per iteration:
   - load the newest centroid as the reference;
   - sweep ⌈n_points/16⌉ rows into the CAM, in load mode;
   - switch the array to search mode and run the search;
   - write the index found to the next CIB entry. It becomes the next reference.

Lanes beyond `n_points` in the last row are masked, so they never take part. Starting at point 0 is this design's choice.

**Query phase.** For each centroid j:

1. Read its index back from the CIB and load it as the reference.
2. Sweep all rows into `sorter_merger`.
3. Wait 3 cycles for the pipeline to drain.
4. Write the K {valid, index} entries to NIB entry j.

**Cycle count.** With S centroids and R = ⌈n_points/16⌉ rows, a tile takes 2 + (S−1)(R+26) + S(R+6) + 1 cycles from start to done. For a full tile (R = 128) this is about 154 cycles per FPS iteration and 134 per query.

## Split-concatenate MLP engine (`sc_fua`, `sc_cim`)

The engine computes y[o] = Σ_i x[i]·W[row][o][i] for 16 outputs and 16 inputs. Inputs and weights are 16-bit signed. Results are 40-bit and exact.

### Slices and weight blocks

There are 64 weight slices, numbered `slice = 4·o + b`:

- `o` is the output;
- `b` is the weight block, bits 4b+3 … 4b of the weight.

This mapping is this design's own. Each slice has 8 pairs of 4-bit local weight blocks (LWB A and B). Each pair serves two adjacent inputs and holds 16 rows, i.e. 16 weight sets.

### Input clusters

Input cluster c holds input bits c, c+4, c+8 and c+12. Cluster c is applied in cycle c, for c = 0 … 3.

### Fused adder

For each of the 4 bits k of the cluster, the fused adder (`sc_fua`) picks one of:

- nothing;
- A;
- B;
- A+B, precomputed by a 4-bit adder.

Pick k is a 4-bit value that weighs 2^(4k). So the four picks are simply concatenated into a 16-bit *dense* word. The carry out of A+B (bit 4 of the sum) cannot go into that word, because it would overlap the next pick. It is instead placed at bit 4k+4 of a *sparse* word. The dense and sparse words of the 8 pairs go through two adder trees and are summed.

The local accumulator (LAcc) adds the tree result shifted left by c.

### Signs

This is the subtle part. The fused adders treat everything as unsigned. Two corrections are made in the periphery.

1. **Input sign bit.** Input bit 15 (cluster 3, k = 3) has weight −2^15, not +2^15. In the slice word, the pick at k = 3 sits at 2^12 and counts as positive. In cycle 3 a sign accumulator sums those picks over the 8 pairs (`top_val`) and subtracts twice the sum at bit 12 (`<< 13`). This turns +2^12 into −2^12. After the LAcc shift by 3, that is the required −2^15.
2. **Weight sign bit.** For weight block 3, nibble bit 3 is the weight's bit 15. The unsigned sum counts it as +8, but it should be −8. For that block, the slice also accumulates Σ_i x_i·w_i[15], with x_i taken in its signed cluster form. It subtracts 16 times that sum (`<< 4`), which turns +8 into −8.

The precision merger adds the four block results of an output with shifts of 4b.

The description says that signed and unsigned parts are concatenated separately and merged in the periphery. This arithmetic realises that and is checked exactly against a plain multiply in the testbench. The bit-level scheme, however, is this design's own.

### Timing

- `start` with `x` and `row` at cycle t.
- The clusters run in cycles t+1 … t+4.
- `y_valid` is high at t+5.
- `ready` is high in the last cluster cycle, so a new `start` can be accepted then. Vectors stream at one per 4 cycles.

## Post-processing and aggregation

**`relu_bn`** computes y = sat16((acc·scale + bias) >>> shift), then ReLU.

- `scale` and `bias` are per channel; `shift` is common to all channels.
- The shift rounds toward −∞.
- Latency is one cycle.
- After reset, scale = 1 and bias = 0.

**`aggregation_unit`** implements delayed aggregation. The MLP has already run on every point, so the feature buffer holds per-point features. For each centroid j the unit outputs:

out[j][ch] = max over the neighbours n of F[n][ch] − F[centroid][ch]

The output is 17 bits wide, so the subtraction cannot overflow. The centroid's own feature seeds the maximum.

The unit reads the CIB, NIB and feature buffer through their 1-cycle read ports. Each centroid takes K+4 cycles, and invalid list entries are skipped.

## Top level and host interface (`pc2im_top`)

The description has a bus/control block but gives no protocol. The top therefore exposes plain single-cycle-strobe host ports.

| Ports | Function |
|---|---|
| `pt_*` | Write or read tile points. |
| `pre_start`, `n_points`, `n_samples`, `qmode`, `range_l`, `pre_busy`, `pre_done` | Preprocessing of one tile. |
| `cib_*`, `nib_*` | Read the index buffers. |
| `w_*` | Write MLP weights. |
| `bn_*` | ReLU/BN configuration. |
| `fcb_*` | Write MLP input vectors. |
| `mlp_start`, `mlp_n`, `mlp_row`, `mlp_src`, `mlp_dst`, `mlp_to_fb`, `mlp_busy`, `mlp_done` | Run one MLP layer over `mlp_n` vectors. |
| `fb_*` | Read the feature buffer. |
| `agg_*` | Aggregation. |
| `cnt_*` | Event counters. |

**MLP sequencer.** It streams input-buffer entries `mlp_src+i` through `sc_cim` (weight set `mlp_row`) and `relu_bn`. Results go to entry `mlp_dst+i` of the feature buffer (`mlp_to_fb = 1`) or back into the input buffer, ready for the next layer. A new vector is issued whenever the engine is ready.

**Buffer sizes (this design's choice):**

| Buffer | Size |
|---|---|
| CIB | 512 × 11 bit |
| NIB | 512 × 32 × 12 bit |
| Feature buffer | 2048 × 16 × 16 bit |
| Input buffer | 2048 × 16 × 16 bit |

Together these are about 153 KB of the 512 KB of standard on-chip SRAM that the description quotes.

**Host rules:**

- Read ports are muxed, and the host may use them only while the internal user is idle.
- Points are loaded from off-chip memory by the host.
- The median-based spatial partitioning that cuts a large cloud into ≤ 2048-point tiles runs on the host.

## Capacity against typical workloads

The point counts below are the evaluation sizes the design was aimed at. The sampling ratios are those of the usual PointNet++ configurations.

| Workload | Points | Fits the default configuration? |
|---|---|---|
| ModelNet40 classification | 1k per cloud | Yes, in one tile. The 512 centroids × 32 neighbours of the first layer exactly fill the 512-entry CIB and NIB. |
| S3DIS segmentation | 4k per block | Yes, as 2 tiles of 2048 after host-side median partitioning. That gives 512 centroids per tile. |
| SemanticKITTI segmentation | 16k per scan | Yes, as 8 tiles of 2048, processed one after the other with alternating CAM arrays. |

Limits that apply to all of them:

- MLP layers wider than 16 × 16 must be tiled over the 16 weight rows, or the weights reloaded between passes.
- Feature-propagation layers still need host-side interpolation.

## How far it follows the description

**Taken from the description:**

- the tile organisation (4 × 16 × 32, 16-bit, 19-bit L1, 16 distances per cycle);
- OR/NAND-based near-memory adders with subtraction by inversion and carry-in;
- the MAX-CAM organisation (2 arrays × 16 groups × 128 pairs, upper/lower TD, AS and IM latches, the write to the larger TD, in-place compare, 19-cycle MSB-first bit CAM with per-group zero detectors, 16-to-1 MAX tree, data CAM for the index, global load/search selector);
- lattice versus kNN queries;
- the SC-CIM organisation (64 slices, 8 LWB pairs, 16 rows, 4-bit blocks, interleaved 4-bit input clusters, fused adder with 3-to-1 select, dense and sparse adder trees, LAcc, sign accumulator, precision merger, 4-cycle computation);
- the buffers and units named in the block diagram;
- delayed aggregation.

**This design's own:** all interfaces and latencies, the index layout, clear and first-load handling in the CAM, tie breaking, the FPS start point, the use of the two CAM arrays per tile, the sorting algorithm and K = 32, the exact sign arithmetic in SC-CIM, the slice mapping, the BN format, the buffer sizes and the host protocol.

**Known departures and gaps:**

- **Capacity and throughput.** The described SC-CIM structure holds 8 KB of weights (64 × 8 × 2 × 16 × 4 bit). The quoted figures are 256 KB and 2 TOPS at 250 MHz. One macro is built. It gives 256 MACs every 4 cycles, i.e. 32 GOPS at 250 MHz. How the remaining capacity is organised is not described.
- **Feature interpolation is not built.** Feature propagation layers need interpolation of the k nearest features. The kNN lists are produced, but the interpolation is left to the host.
- **No CAM overlap within a tile.** The two CAM arrays do not overlap within a tile; see the ping-pong section.
- **Circuits are not modelled.** Transistor-level circuits, timing at 250 MHz, power and area are not modelled. No timing constraints are supplied.

## Simulating

Each block has a self-checking testbench in `tb/`. Each compares the block against a model computed in the testbench and checks the latencies given above. Each prints `TB_RESULT checks=N failures=M` and stops on a watchdog.

`tb/tb_pc2im_top.sv` runs the whole accelerator with every parameter at its default:

- **Tile A: a full 2048-point tile.** FPS of 32 centroids, lattice queries, a two-layer MLP over all 2048 points, and aggregation.
- **Tile B: a 1000-point tile.** FPS of 16 centroids and kNN queries. This tile uses the other CAM array and exercises masked lanes.

The testbench also counts each mechanism and fails if one never occurs: FPS iterations, both query modes, points outside the lattice, partial rows, both CAM arrays, MLP write-back to both buffers, ReLU clipping, and aggregation. It finishes in well under a minute with Verilator.

Example build and run with Verilator 5:

```
verilator --binary --timing --assert -Irtl \
  rtl/pc2im_pkg.sv rtl/apd_nmu.sv rtl/apd_cim.sv rtl/max_cam_array.sv \
  rtl/ping_pong_max_cam.sv rtl/sorter_merger.sv rtl/sram_1r1w.sv rtl/sc_fua.sv \
  rtl/sc_cim.sv rtl/relu_bn.sv rtl/aggregation_unit.sv rtl/pre_ctrl.sv \
  rtl/pc2im_top.sv tb/tb_pc2im_top.sv --top-module tb_pc2im_top -Mdir obj_top
./obj_top/Vtb_pc2im_top
```

To run a block testbench, replace the last two sources and the top module name, e.g. `rtl/pc2im_pkg.sv rtl/sorter_merger.sv tb/tb_sorter_merger.sv --top-module tb_sorter_merger`. The package always comes first.

The simulator has no X state. Every register that is read is reset or written before use; the memory arrays are not reset.
