# A frame-pipelined 3D Gaussian Splatting renderer in SystemVerilog

3D Gaussian Splatting draws a scene that is stored as a cloud of anisotropic
Gaussians. Each Gaussian has a centre, a 3D covariance, an opacity and a
view-dependent colour given by spherical harmonics (SH). A frame is drawn in
four steps:

1. Drop the Gaussians behind the near plane.
2. Project the rest onto the screen as 2D ellipses.
3. Sort them by depth in every 16x16 pixel tile.
4. Alpha-blend them front to back into each pixel.

This RTL implements an accelerator built around four ideas of the published
1080p design it follows:

- **Two halves, two processing styles.** The front half (Stages 0 and 1)
  works point by point. The back half (Stages 2 and 3) works tile by tile.
  The two halves form a pipeline at frame level: while the back half renders
  frame *f*, the front half already preprocesses frame *f+1*.
- **One shared MAC array.** All of Stage 1's matrix work runs on a single
  6x1 array of multiply-accumulate units. The Jacobian entries that are
  always zero are never issued.
- **Sorting without comparators.** Sorting is tile-local. It uses a
  bit-sliced "largest element" detector, so the latency is fixed and no
  comparator is needed.
- **A shared overflow buffer.** A key/value global buffer serves the rare
  tiles that hold far more Gaussians than average. This avoids sizing every
  lane for the worst case.

The default parameters are the original design's:

| Parameter | Default |
|---|---|
| Image | 1920x1080 |
| Tiles | 8160 (120x68) |
| Render lanes | 4 |
| Keys per sub-sorter pass | 256 |
| Local key/value buffer per lane | 2000 entries |
| Shared global buffer | 6000 entries |
| SH degree | 1 (12 coefficients) |

## Frame flow and the top level

`gs_accel_top` connects the following blocks to one memory controller
(`mem_ctrl`):

- `stage0_unit`
- `stage1_unit`
- four `render_lane`s

The off-chip DRAM is outside the design. The `mem_*` port is a simple
in-order port of 32-bit words: a request, and a read return some cycles
later.

**Starting a frame.** A frame starts with `frame_start`, together with the
Gaussian count and a camera (`cam_t`). The camera holds:

- a 3x4 view matrix
- focal lengths and principal point
- the near plane
- the camera position

**Preprocessing.** Stages 0 and 1 run at the same time on the new frame and
write two things into DRAM:

- a feature record per visible Gaussian
- a list of `<depth key, Gaussian index>` words per tile

**Double buffering.** The feature records, the tile lists and the per-tile
counts are all double-buffered by frame parity. When both halves are idle, or
when the lanes finish the previous frame, the parity flips. The lanes then
render what was just written, and preprocessing may begin the next frame.

**Output.** Pixels leave on four streams, one per lane. Each beat carries:

- a tile number
- a 16-pixel group number (one tile row)
- 16 RGB pixels of 8 bits per channel

`frame_done` pulses when the last tile is out.

**DRAM map.** The map is this design's own (`gs_pkg`). All addresses are in
32-bit words.

| Region | Contents |
|---|---|
| `VIEW_BASE + 4g` | x, y, z, bounding radius (what culling needs) |
| `REC_BASE + 16g` | x, y, z, six covariance terms, opacity, SH codebook index |
| `MASK_BASE + g/32` | culling mask, bit `g%32`, 1 = culled |
| `CB_BASE + 12k + 3j + c` | codebook entry k: SH coefficient j of colour c |
| `FEAT_BASE + parity*2^24 + 16g` | u, v, conic a, b, c, opacity, r, g, b |
| `LIST_BASE + parity*2^27 + tile*8000 + k` | `{1'b0, key[14:0], index[15:0]}` |

## Stage 0: near-plane culling

`stage0_unit` does three things:

- It prefetches the 4-word view records into the View SRAM, a 1536-entry
  FIFO (`sync_fifo`).
- It feeds the records to `near_plane_cull`.
- It pushes the indices of the survivors into the Projection FIFO. It also
  packs the culling decisions into 32-bit mask words (`cull_mask`) and
  writes them to DRAM.

**How the culling unit works.** The culling unit is a single MAC. It loads
the view-matrix translation as the start value, then adds x·w0, y·w1 and
z·w2 over three cycles. The test is: cull if z_cam + r < z_near.

- r is the radius stored with the record. It stands in for the half-extent
  of the Gaussian's box along the camera axis.
- The latency is 4 cycles, and one point is accepted every 4 cycles.
- The result is held until the next stage takes it.

## Stage 1: projection on a shared 6x1 MAC array

`stage1_unit` does the following:

- **Codebook load.** At frame start it loads the vector-quantised SH
  codebook, 256 entries of 12 coefficients, into `codebook`.
- **Record fetch.** It fetches the 11-word record of each visible Gaussian
  into the Preprocess SRAM, a 512-record FIFO.
- **Projection.** It runs `stage1_core`.
- **Write-back.** It writes the feature record, then hands the Gaussian to
  `tile_duplicate`.

### The projection core

`stage1_core` runs eight passes over the PE array (`pe_array`, six
`mac_pe`s).

**The PE array.**

- The array has one broadcast operand W and six private operands.
- Each PE is a multiplier, a register, and an adder that takes either a start
  value or its own feedback.
- An output unit either passes the six accumulators out or sums them.

**The passes.** Each pass issues one column of products per cycle:

| Pass | Computes | Issue cycles |
|---|---|---|
| 0 | camera-space centre, and vector to the camera | 3 |
| 1 | ratios fx/tz, fy/tz, tx/tz, ty/tz and \|d\|² | 4 |
| 2 | screen position u, v and the two non-trivial Jacobian derivatives | 2 |
| 3 | T = J·W; only the four non-zero Jacobian terms are issued | 4 |
| 4 | M = T·Σ | 6 |
| 5 | Σ' = M·Tᵀ + 0.3·I (the usual low-pass term) | 6 |
| 6 | the two Schur complements of Σ', and the view direction | 3 |
| 7 | the conic, and the degree-1 SH colour | 5 |

The codebook stores coefficients already multiplied by the SH basis
constants, so the colour is a plain dot product. Division and square root
are scalar helpers between passes. A projection takes 50 cycles.

**The conic without a determinant.** Pass 6 and pass 7 avoid the usual
determinant. For Σ' = [[c00, c01], [c01, c11]]:

- e1 = c00 − c01·(c01/c11) = det/c11
- e2 = c11 − c01·(c01/c00) = det/c00
- a = 1/e1
- c = 1/e2
- b = −(c01/c11)·a

This gives the same conic as (1/det)·[[c11, −c01], [−c01, c00]]. It never
forms det = c00·c11 − c01², which overflows the fixed-point range for wide
footprints, nor 1/det, which underflows. The conic is also stored
multiplied by 2^8 (`CONIC_SH`), so that the small conic of a wide footprint
keeps its precision. The rasterizer removes the scale after forming the
quadratic form.

**The screen box.** The screen box is ±3σ on each axis,
3·sqrt(c00) × 3·sqrt(c11). Its radius saturates at 543 pixels.

## Duplication and per-tile lists

**Emitting keys.** `tile_duplicate` walks the tiles that the box touches,
one per cycle. For each tile it emits the tile id, a 15-bit depth key and the
Gaussian index.

**The depth key.** The key is the camera depth in Q8.7, taken from bits
23..9 of the Q16.16 value, saturated at 256, and then inverted. The
inversion turns "nearest first" into "largest first", which is what the
sorter finds. Like the original, the key has no sign bit.

**List addresses.** `tile_counter` is the tile address-offset controller. It
keeps a count per tile in two banks, one per frame parity. A new key is
written at `tile*TILE_CAP + count`. A key that arrives when the tile
already holds `TILE_CAP` = 8000 keys is dropped and counted.

**Clearing a bank.** At frame start a bank is cleared by a sweep of one
tile per cycle, 8160 cycles. Stage 1 waits on `busy` during the sweep.

## Stage 2: comparison-free sorting

Each `render_lane` reads a tile's count and its list of key/value words.

- The first 2000 words go into the lane's own buffer (`sram_1r1w`).
- Any further words go into `kv_global_buffer`, a 6000-entry buffer shared
  by the four lanes. A lane that needs it locks it, granted round-robin, for
  the rest of that tile. Another lane that needs it meanwhile waits.

**Chunks.** The lane then sorts and draws the tile in chunks of 256 keys:

1. It loads 256 keys into `cf_subsorter`.
2. It fetches the 256 matching feature records into the Feature SRAM.
3. It streams the sorted order to the rasterizer.

**Inside the sorter.** `cf_subsorter` keeps one bit per loaded key, the
Element Vector Table. The bit is 1 while the key is still unsorted.

- **Finding the maximum.** A chain of 15 bit blocks walks the key bits from
  the MSB. Block *b* narrows the candidate set to the keys with bit *b* = 1,
  if any candidate has it. Otherwise it leaves the set unchanged. Each block
  is an N-input OR and an AND per key.
- **Resolving duplicates.** The candidates left at the end all hold the
  maximum. `Fo & (~Fo + 1)` keeps the lowest one.
- **Output.** That bit is encoded to a slot number and cleared from the
  table.
- **Rate.** The blocks are grouped 3-4-4-4 and split over two register
  stages. One key therefore leaves every 2 cycles, whatever the data.

**Order across chunks.** Depth order is exact within a chunk of 256 keys.
It is not exact across chunks: chunk k is drawn before chunk k+1 in list
order. For tiles of at most 256 Gaussians the order is exact.

**Early stop.** When every pixel of the tile has become opaque, the lane
abandons the remaining chunks.

## Stage 3: the rasterizer

`rasterizer` blends one Gaussian at a time over the tile, 16 pixels per
cycle, so one Gaussian takes 16 cycles. For each pixel it computes:

- power = −½(a·dx² + c·dy²) − b·dx·dy
- α = min(0.99, opacity·exp(power))
- exp is 2^(x·log2 e), with a quadratic for the fractional part

If α < 1/255, or power > 0, the Gaussian is pruned for that pixel.
Otherwise it computes:

- w = α·T
- T' = T − w

If T' < 10⁻⁴ the pixel is finished and ignores every later Gaussian.
Otherwise it does C += w·colour and T = T'.

**Tile output.** At the end of a tile the colours are clamped to [0, 1],
scaled to 8 bits and streamed out row by row.

## Numbers and limits

The original computes in FP16. This RTL uses signed Q16.16 fixed point
throughout (`gs_pkg::fx_t`). Multiplies saturate. This gives the following
limits:

- **Footprint size.** 2D covariance entries saturate at 32767 px², which is
  σ ≈ 181 px. Larger splats are drawn too small, and their screen radius is
  capped at 543 px.
- **Depth keys.** Keys resolve depth to 1/128 of a world unit, up to 256
  units. Anything farther shares the last key.
- **Scene size.** A Gaussian index is 16 bits, the width that a 4 KB value
  buffer of 2000 entries implies. A scene may therefore hold at most 65536
  Gaussians. Real captured scenes, even after heavy pruning, hold a few
  hundred thousand to a million. Running them needs wider `GW`/`VW` and a
  wider list word.
- **Tile lists.** A tile list keeps at most 8000 keys. The tile densities
  reported for real scenes, up to about 5000, fit.
- **Memory port.** There is only one 32-bit DRAM port. Frame rate depends on
  the memory system and the scene, and has not been measured here.

## Where this RTL departs from the original

The original fixes the block structure, the 6x1 array with zero-Jacobian
skipping, the 4-cycle culling MAC, the comparison-free sorter (256 × 15-bit
keys, duplicate resolution by `Fo & (~Fo+1)`, one key per 2 cycles), the
buffer sizes and the rasterizer's three steps.

This design chose the following:

- Q16.16 fixed point instead of FP16. The determinant-free, scaled conic
  follows from this choice.
- The pass schedule on the PE array.
- The memory map and record layouts, and the memory controller's
  round-robin arbitration.
- The depth-key encoding.
- Static tile-to-lane assignment: lane *l* draws tiles *l*, *l*+4, and so on.
- Exclusive locking of the global buffer.
- Chunked sorting of lists longer than 256 keys.
- The sweep-clear of the tile counters.
- The culling radius stored in the record.
- A 256-entry codebook holding pre-scaled SH coefficients.
- Threshold τ = 10⁻⁴ and the 0.99 α clamp, as in the reference 3DGS
  software.

## Files

| File | Block |
|---|---|
| `rtl/gs_pkg.sv` | types, fixed-point helpers (multiply, divide, sqrt, exp), DRAM map, depth key |
| `rtl/gs_accel_top.sv` | top level, frame pipeline |
| `rtl/mem_ctrl.sv` | round-robin DRAM arbiter with in-order read returns |
| `rtl/sync_fifo.sv` | View SRAM, Projection FIFO, Preprocess SRAM |
| `rtl/sram_1r1w.sv` | local key/value buffers, Feature SRAM |
| `rtl/stage0_unit.sv`, `near_plane_cull.sv`, `cull_mask.sv` | Stage 0 |
| `rtl/stage1_unit.sv`, `stage1_core.sv`, `pe_array.sv`, `mac_pe.sv`, `codebook.sv` | Stage 1 |
| `rtl/tile_duplicate.sv`, `tile_counter.sv` | duplication and tile lists |
| `rtl/render_lane.sv`, `cf_subsorter.sv`, `kv_global_buffer.sv` | Stage 2 |
| `rtl/rasterizer.sv` | Stage 3 |
| `tb/tb_<block>.sv` | self-checking testbench per block |
| `tb/gs_ref_pkg.sv` | real-valued reference model (scene generator, projection, tile lists, blending) |
| `tb/dram_model.sv` | behavioural DRAM: sparse word memory, fixed read latency |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Each one also has a watchdog.

**Building and running.** With Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
  --top-module tb_gs_accel_top -y rtl -y tb \
  rtl/gs_pkg.sv tb/gs_ref_pkg.sv tb/tb_gs_accel_top.sv
./obj_dir/Vtb_gs_accel_top +verilator+rand+reset+2
```

Testbenches that do not use the reference model can leave
`tb/gs_ref_pkg.sv` out. The random reset shows whether anything depends on
uninitialised state.

**The end-to-end testbench.** `tb_gs_accel_top` renders two frames back to
back of an 80-Gaussian scene at 64x48, with small buffers so that every
mechanism occurs. It checks:

- every pixel against the reference, within 6/255
- the culled, visible, key and drop counts

It also counts, and requires, each of the following:

- culling
- multi-tile duplication
- dropped keys
- global-buffer use
- chunked sorting
- stalls
- α pruning
- pixel termination
- early tile stop
- overlap of the two frames

**The full-size testbench.** `tb_gs_accel_full` runs the top with every
parameter at its default: one 1080p frame of 48 Gaussians, all 8160 tiles.
It compares all 2 073 600 pixels with the reference. At most 1 pixel in 10⁵
may differ by more than 6/255, for a splat that sits exactly on a threshold.
It takes well under a minute in Verilator.
