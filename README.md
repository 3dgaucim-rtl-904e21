# 3DGauCIM in SystemVerilog: a digital compute-in-memory renderer for static and dynamic Gaussian splatting

Splatting-based rendering draws a frame by projecting millions of 3D Gaussians onto the
screen. Each one is then depth-sorted per tile and alpha-blended front to back. An edge
device has two problems with this: moving the Gaussians out of DRAM, and the exponential
that every blend needs. This design attacks both.

- **Less DRAM traffic.**
  - Culling works on coarse space-time grids before any Gaussian is read.
  - Tiles are grouped so that data loaded once is reused across the tiles of a group.
  - An on-chip buffer is split by depth segment, so it fits the order in which the blender consumes Gaussians.
- **Faster depth sort.** The sort is a bucket sort whose bucket boundaries are learnt from the previous frame, with a bitonic network inside each bucket.
- **The exponential in memory.** The blending exponential `e^x` is rewritten as `2^x'`. The fraction of `x'` is split into four 3-bit fields, each looked up in a small table held in a digital compute-in-memory (DCIM) array. Weighting by opacity and colour uses the same arrays, and a near-memory unit accumulates transmittance and colour.

The RTL follows that structure block by block. Where the source description gives only what
a block does, the block here is the simplest circuit that does it; each such choice is named
in the header comment of its file and summarised under "Departures" below.

## Dataflow

```
 frustum planes, time ─► drfc_ctrl ──DRAM reads──► Gaussian records ─► (projection: external)
                                                                        │
 Gaussian screen boxes ─► atg_grouping ─► tile-block group labels       │ depth keys
                                                                        ▼
                                                   aii_sort (buckets + bitonic_sorter)
                                                                        │ sorted keys, bucket id
                                                                        ▼
                                                   seg_cache (segment = bucket, 2-way)
                                                                        │ record line
                                                                        ▼
 per-pixel u,v,t ─────────────────────────────► dcim_macro × NUM_MACROS (3 lanes each)
                                                   pixel_preproc → dcim_exp2 → opacity/colour
                                                   arrays → nmc_unit → RGB, transmittance
```

`gaucim_top` instantiates every block and connects the sorter output to the buffer lookup.
The parts this RTL does not contain come in and go out as ports:
- LPDDR5;
- Gaussian projection;
- the scheduler that streams records into the arrays.

The port groups are `fc_` (culling), `dram_`, `rec_`, `tg_` (grouping), `so_` (sort), `buf_` and `cim_`.

## Number formats

| quantity | format |
| --- | --- |
| stored array words: LUT entries `2^f`, opacity, colour, transmittance | UQ1.15 unsigned, `16'h8000` = 1.0 |
| exponent argument `x'` and `2^x'` result | IEEE half precision (FP16) |
| pixel coordinates | Q12.4 |
| conic coefficients, temporal slope, time | Q4.12 |
| depth keys | 16-bit unsigned |

The source evaluates everything in FP16. Every value stored in an array lies in [0, 2), so
these arrays keep 16-bit fixed point instead. Multipliers are then plain integer products
(`fix_mul` in `gaucim_pkg`, truncating and saturating).

## The exponential in DCIM (`sif_decouple`, `dcim_exp2`)

`x' = x · log2(e)` is split by `sif_decouple` into a signed integer `I` and a 12-bit fraction `F`.
For negative `x'` the fraction is two's-complemented and `I` lowered by one, so that
`x' = I + F/4096` with `0 ≤ F < 4096` always holds.

`2^(F/4096)` is then the product of four factors `2^(F[11:9]/8)`, `2^(F[8:6]/64)`,
`2^(F[5:3]/512)` and `2^(F[2:0]/4096)`. Each factor is read from an 8-entry table held in its own
`gc_dcim_array` stage, which multiplies the running product by the stored entry. Table `s`
entry `k` is `2^(k / 8^(s+1))` in UQ1.15. It is written through the array's write port:
- before use;
- entry `k` at block `k[2]`, row `k[1:0]`.

The formula is all that is needed to regenerate it.

The integer part travels next to the four stages in a small side FIFO and is applied at the end
as a binary shift. That result is given both as FP16 and as UQ1.15.

- Latency: 6 cycles.
- Throughput: one argument per cycle.
- Underflow gives 0; overflow saturates.

## Gain-cell arrays, lanes and macros

`gc_dcim_array` models one gain-cell DCIM array:
- 64 compute blocks of 64 bits, read as 4 rows of 16-bit words;
- a word is written on the write port;
- on the compute port, a broadcast operand is multiplied by the addressed word in one cycle.

`dcim_lane` chains eight arrays into one rendering lane:
- `pixel_preproc` computes `x' = -q/2`. Here `q` is the conic quadratic form of the pixel offset, plus a temporal term `λ·(t - μt)²` for dynamic Gaussians.
- Then the four exp stages.
- Then the opacity array, giving `α = o·G`.
- Then three colour arrays, giving `α·c`.
- Finally `nmc_unit` keeps transmittance `T` and the colour sum: `C += α·c·T`, `T ← T·(1-α)`, with `first` restarting a pixel.

`warr` selects which array a write goes to:
- 0–3 for the LUTs;
- 4 for opacity;
- 5–7 for R, G, B.

The slot that a splat's parameters occupy is `{blk,row}`. A lane has a latency of 10 cycles.

`dcim_macro` holds 24 arrays, i.e. 3 lanes. Writes are broadcast to them, and each lane has its own pixel.

The top has `NUM_MACROS = 12` macros, i.e. 12 × 12 KB = 144 KB, the dynamic-scene configuration. A static-scene build uses `NUM_MACROS = 4` (48 KB).

## Frustum culling on space-time grids (`drfc_ctrl`)

Gaussians are stored in DRAM sorted into `TG` temporal grids × `CD³` cubic grids (default 4 × 64).
A Gaussian that spans several cubic grids is stored in full once, in its central grid; the
neighbouring grids hold only a pointer word to it.

An on-chip table holds the start and end address of every grid, and is written before use. The controller works in three steps:
1. It tests every cubic grid of the selected temporal grid against six frustum planes, using the positive-vertex test on the grid's box.
2. It reads only the visible grids, one word per cycle.
3. It resolves each pointer word it meets:
   - if the central grid is itself visible, the pointer is skipped, because that record arrives anyway;
   - otherwise the record is fetched through the pointer.

A pointer word has bit 63 set, the central grid index in bits 47:40 and the address in bits 31:0.

The controller counts visible grids, words read, pointers skipped and records fetched.

## Bucket sort with learnt intervals (`aii_sort`, `bitonic_sorter`)

Keys of one tile go into `NB = 8` buckets.

- **First frame (or `restart`):** boundaries divide `[depth_min, depth_max]` uniformly.
- **Later frames:** at the end of a tile, the quantile keys of its sorted output (every `1/NB` of the count) become the boundaries for the next frame. The boundaries are averaged over the `TPB = 4` tiles of a tile block and stored per block.

At `tile_end` each non-empty bucket is loaded into a 16-input bitonic network. The network runs one compare-exchange stage per cycle (10 stages), and the keys stream out in order with their bucket index.

- Time from `tile_end` to `tile_done`: `2 + Σ(13 + size)` over non-empty buckets.
- A bucket holds `CAP = 16` keys. A key that arrives at a full bucket is dropped and counted in `overflow`.
- `max_occ` reports the fullest bucket, so balance can be observed.

## Adaptive tile grouping (`atg_grouping`)

The screen is divided into a grid of tile blocks (`GW × GH = 8 × 8`). Each block keeps a signed saturating strength toward each of its 8 neighbours.

Only Gaussians whose box covers two or more blocks update the strengths:
- strengthen the links between covered blocks;
- weaken the links from a covered block to an uncovered neighbour.

At `group_start`:
- Each block's threshold is `lower + 0.5·(upper - lower)`. Here `upper` and `lower` are the medians of its `K = 3` strongest and weakest links.
- A link survives if it is positive and reaches the thresholds of both its ends.
- Surviving links are merged with union-find, one link per cycle, capped at `UTH` blocks per group.
- The labels give the order in which tiles are rendered, so that tiles sharing Gaussians run back to back.

After the first frame, regrouping is selective:
- a group that lost a link is flagged as deformed, then dissolved and rebuilt;
- untouched groups keep their labels.

## Depth-segmented buffer (`seg_cache`)

The 256 KB Gaussian buffer is split into `NSEG = 8` equal segments, one per sort bucket. Each
segment is a 2-way set-associative cache of 64-byte records (8 × 64-bit words).

- **Lookup:** a lookup gives a Gaussian id and a segment, and returns hit/miss and a line. On a miss the LRU way is allocated.
- **Refill:** the line is filled through the write port.
- **Reuse:** the read port then reads the record.
- **Counters:** hits and misses are counted.
- **Clearing:** the tag memory has no reset. It is cleared one set per cycle after reset, and `ready` rises when the sweep is done.

## Departures and open points

- Fixed-point UQ1.15 arithmetic in the arrays instead of FP16 (see above).
- The internal organisation of a 64-bit compute block as 4 × 16-bit words, one-cycle array latency.
- Bucket capacity, the overflow rule (drop and count) and the sorter schedule are not given in the source and are choices of this design.
- The source does not give these ATG details, so they are choices of this design: the weakening rule, strength width, `K` and the group-size cap.
- The DR-FC pointer format, address table and plane format are likewise choices of this design.
- Not built:
  - Gaussian projection / preprocessing;
  - the dynamic mapping that schedules records into the arrays;
  - the LPDDR5 interface.

  `gaucim_top` exposes their signals as ports, so the top is a collection of connected engines rather than a self-sequencing frame renderer.
- The source's frame rate, power and area figures are not reproduced: they depend on scene sizes and a memory system that are not specified.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv`. A testbench prints
`TB_RESULT checks=<n> failures=<m>` and stops, and has a cycle watchdog. `tb_gaucim_top` runs
the whole design end to end at default parameters (12 macros, 256 KB buffer). It makes every
mechanism happen at least once:
- culled grids;
- skipped and fetched pointers;
- bucket overflow;
- learnt intervals;
- deformed groups;
- merges;
- buffer hits and misses;
- blended pixels.

Example with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  --top-module tb_gaucim_top -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/gaucim_pkg.sv tb/tb_util_pkg.sv tb/tb_gaucim_top.sv -o sim
obj_dir/sim
```

The top testbench runs in seconds. `tb/dram_model.sv` is a simple behavioural memory used by the culling and top testbenches.
