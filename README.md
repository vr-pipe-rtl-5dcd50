# VR-Pipe cluster: early termination and quad merging in a raster graphics pipeline

Rendering 3D Gaussian splats on a GPU's raster pipeline is a form of volume
rendering. Every splat is drawn as a camera-facing rectangle (two triangles).
The splats are sorted by depth, and each pixel accumulates the colours of
hundreds of translucent fragments front to back:

    C_new = C_old + (1 - A_old) * c_frag        (pre-multiplied colour)

On a conventional pipeline this work ends up in the fixed-function blending
units (the colour ROP). Those units handle only a couple of quads (2x2 pixel
blocks) per cycle, while the shader cores sit mostly idle.

This RTL models one graphics processing cluster (GPC) with two additions that
remove that bottleneck:

1. **Hardware early termination (HET).** Once a pixel's accumulated alpha
   reaches a threshold (0.996), later fragments cannot change it visibly. The
   pixel is marked in the most significant bit of its 8-bit stencil value.
   Its remaining fragments are removed before they are shaded or blended. No
   new storage is needed: the stencil surface already exists.
2. **Multi-granular binning with quad merging (QM).** Front-to-back blending
   is associative: `f(f(a,b),c) = f(a,f(b,c))`. Two quads that cover the same
   pixels can therefore be blended with each other in the shader first. The
   ROP then blends a single quad instead of two. Making such pairs meet in
   the same warp takes two steps:
   - primitives are binned by a coarse *tile grid* ahead of the rasterizer;
   - a *quad reorder unit* finds overlapping quads and places them side by side.

Everything between the vertex stream and the colour surface is synthesizable
SystemVerilog. The shader cores are the exception: they are programmable and
lie outside this design. A behavioural model of them is used in the testbenches.

## 1. The cluster pipeline

```
 vertices ─► vpo ─► tgc_unit ─► rasterizer ─► tc_unit ─► zrop ──────────► qru ─► warps
 (12.4 fx)  tiles   tile-grid    setup/coarse/  screen-tile  termination      pairs    to shader
                    bins         Hi-z/fine      bins         test             + order  cores
                                    ▲                          ▲
                          vertex fetch port              termination
                          (positions by pointer)         update
                                                               │
 shaded quads (≤2/cycle) ─► crop: blend + alpha test ─────────┘
```

`vr_pipe_gpc` is the top. All links are valid/ready handshakes. Every unit
moves at most one item per cycle, except the colour ROP, which takes
`ROP_LANES` = 2 quads per cycle.

| Unit | Module | What it does |
|---|---|---|
| Vertex processing | `vpo` | Groups each 3 vertices into a triangle. Computes the bounding box, drops triangles entirely off screen, and emits the three vertex pointers plus the box in 16x16-pixel *screen tiles*. |
| Tile grid coalescing | `tgc_unit` | Bins primitives by 64x64-pixel *tile grid* (4x4 screen tiles). It has 128 bins of 16 primitives. |
| Rasterizer | `rasterizer` | For each primitive of a flushed grid bin: fetches the positions, sets up edge functions, walks 8x8 *raster tiles*, tests them against Hi-z, and emits covered quads. |
| Tile coalescing | `tc_unit` | Bins quads by screen tile. It has 32 bins of 128 quads. |
| Depth/stencil ROP | `zrop` | Holds the stencil surface. Runs the termination test (`term_test_unit`) and the termination update (`term_update_unit`). |
| Quad reorder | `qru` | Pairs overlapping quads of one TC flush and orders them into warps of 8 quads. |
| Colour ROP | `crop` | Holds the colour surface. Blends (`blending_unit`) and detects newly terminated pixels (`alpha_test_unit`). |

Shared types and arithmetic are in `vr_pkg`.

Data formats used throughout:

- **Vertex positions** are 12.4 fixed point.
- **Primitives** carry only their 32-bit attribute pointers. The rasterizer
  fetches the positions again over the vertex-fetch port, which mirrors the
  pointer-only bin entries.
- **Colour** is four UNORM16 channels, 64 bits per pixel, pre-multiplied by
  alpha.
- **Surfaces** are stored one word per 2x2 quad:
  - colour: 4 x 64 bits;
  - stencil: 4 x 8 bits.
- **Surface address** is `qy * ceil(SCREEN_W/2) + qx`. Odd frame sizes such
  as 979x546 get half-empty quads at the right or bottom edge.

## 2. Early termination

Three small units carry out early termination.

- **Alpha test (CROP).** After each blend, a pixel is newly terminated when
  its old alpha was below `alpha_th` and its new alpha is at or above it.
  Requiring the old alpha to be below the threshold has a purpose: it sends
  exactly one update per pixel, instead of one for every fragment that still
  arrives after termination.
- **Termination update (ZROP).** Terminated pixels of a quad travel as one
  request: the quad coordinate and a 4-bit mask. Requests from both ROP lanes
  enter an 8-deep FIFO. One request per cycle is handled: compute the
  address, read the quad's stencil word, OR bit 7 into the masked pixels, and
  write it back. The low seven bits are left untouched for an ordinary stencil
  test.
- **Termination test (ZROP).** Quads leaving the TC unit have the fragments
  of flagged pixels removed. A quad with nothing left is dropped. Sometimes a
  dropped quad carried the "last quad of this bin" marker. In that case an
  empty bubble still carries the marker to the QRU, so the bin's final warp
  is closed.

**Termination is best-effort.** The flag is set only after the CROP has
blended the fragment that crossed the threshold. Quads that passed the test
earlier and are still in flight (in the QRU, in the shader, or queued for the
ROP) are blended anyway. This is harmless for two reasons:

- each such fragment can add at most `1 - A`, below 0.4 %, of its colour;
- the blend still runs in order, so the pixel's alpha only increases.

It is also why a terminated pixel is not bit-identical to a render without
early termination. The testbenches allow for this, as described in §8.

`het_enable = 0` turns off the test. Pixels are still flagged, but nothing is
removed, which gives the baseline pipeline.

## 3. Binning at two granularities

**Why two levels.** Quad merging needs overlapping quads in the same TC bin
at the same time. The pipeline has 32 TC bins, which cover 32 screen tiles.
Large splats spread over many tiles fill and evict these bins before overlaps
accumulate. The TGC unit therefore regroups the primitive stream first: the
rasterizer works through one 64x64 grid (16 screen tiles) at a time, and
those quads fit in the TC bins together.

**`tgc_unit`.** A primitive's tile box may touch several grids. The unit
walks the grids the box touches, one per cycle, and forms a 16-bit grid ID
`{gy, gx}`. The ID is compared with all 128 bin tags in parallel:

- **Hit:** the primitive's three pointers are appended to that bin.
- **Miss with a free bin:** the bin is allocated to this grid.
- **Miss with no free bin:** the oldest bin is flushed first.

A bin is also flushed when it holds 16 primitives, and every bin is drained
at the end of the draw. A flush streams the bin's primitives to the
rasterizer in arrival order, tagged with the grid. This keeps per-pixel
front-to-back order: a pixel belongs to exactly one grid, and within a grid
the order never changes.

**`rasterizer`.** The rasterizer processes one primitive at a time:

1. **Fetch.** Sends three position requests and collects the in-order responses.
2. **Setup.** Computes three edge functions `E = A*x + B*y + C` at pixel
   centres with exact 48-bit arithmetic. Clockwise triangles are flipped.
3. **Bounding box.** Cuts the box to the current grid and the screen.
4. **Coarse raster.** Visits the 8x8 raster tiles of the box one per cycle.
   A tile is rejected when some edge is negative at its best corner.
5. **Hi-z.** Also rejects a tile whose stored Hi-z depth is smaller than the
   primitive's nearest depth.
6. **Fine raster.** Tests the 16 quads of a surviving tile, one per cycle,
   and emits those with coverage.

**Shared-edge rule.** A pixel on an edge counts if:

- `E > 0`; or
- `E == 0` and `A > 0`; or
- `A == 0` and `B > 0`.

This rule makes the two triangles of a rectangle cover every pixel exactly
once.

**`tc_unit`.** The unit holds 32 bins tagged by screen tile. A bin is
flushed, in this priority order:

1. a bin has been idle `TC_TIMEOUT` cycles since its last quad;
2. a bin became full (128 quads);
3. a quad of a new tile arrives while all bins are in use, in which case the
   oldest bin is flushed;
4. the end of the draw (`flush_all`).

A flush streams the bin in arrival order and marks its last quad.

## 4. Quad reorder and merging

The `qru` receives one flushed TC bin. All of its quads belong to one screen
tile, so a quad's position in the tile is one of 8x8 = 64 values. The unit
works in four phases:

1. **Collect.** Store up to 128 quads. A quad's QID is its arrival index.
2. **Pair.** Scan QIDs in order. Each position has an 8-bit register: valid
   plus a 7-bit QID.
   - **Empty register:** it takes the QID.
   - **Full register:** the stored quad and the current quad are an
     overlapping pair. Both are written to the next two launch slots (earlier
     quad first), both bits are set in the 128-bit merge bitmap, and the
     register is cleared. This lets a third and fourth quad at that position
     form the next pair.
3. **Fill.** Scan again. Every QID whose bitmap bit is clear goes to the next
   slot without a merge flag.
4. **Emit.** Send the slots one per cycle. Every 8th slot, and the final
   slot, is marked as the end of a warp.

A pair always starts at an even slot. The shader extension relies on this:

- slot `2n+1` takes slot `2n`'s colours through a warp shuffle;
- it computes `f(front = slot 2n, back = slot 2n+1)` per pixel;
- it returns one quad whose coverage is the union of both.

By associativity, the ROP then gets the same sum with one blend instead of
two. The only difference is rounding. `qm_enable = 0` skips the pair phase.

Order is still correct for two reasons:

- within a pair, the front quad is the earlier one;
- pairs are emitted in the order in which their second quad arrived.

Reordering does move unpaired quads behind the pairs of the same bin. A
pixel's quads within one bin can be split between a pair and a later single
quad. Two cases arise:

- if the single quad came later than the pair, the order is kept;
- if it came earlier, it would be an earlier register entry and would itself
  have been paired.

So the front-to-back order of any one pixel is preserved. The end-to-end test
checks this against an in-order reference.

## 5. Colour ROP

`crop` accepts two shaded quads per cycle. Lane 0 holds the earlier quad.
For every covered fragment it:

1. reads the pixel's colour from the surface word;
2. blends it with `f(dst, src)`;
3. compares old and new alpha;
4. writes the word back.

All four steps happen in the same cycle. When both lanes address the same
quad, lane 1 blends onto lane 0's result, so stream order holds at full rate.

The unit stalls (`sq_ready` low) in two cases:

- while a clear sweep runs;
- while the ZROP cannot accept a termination request.

UNORM16 arithmetic:

- products are `(x*y + 0x8000 + ((x*y + 0x8000) >> 16)) >> 16`, which is
  exact rounding of `x*y/65535`;
- sums saturate.

## 6. Using the top

Top-level ports of `vr_pipe_gpc`:

| Port | Purpose |
|---|---|
| `vtx_valid/vtx/vtx_ready` | Vertex stream. Three vertices per triangle, in depth order. |
| `vf_req_*`, `vf_rsp_*` | Vertex position fetch by 32-bit pointer. Responses must come back in request order; any latency is fine. |
| `warp_valid/warp_slot/warp_ready` | Quads to the shader cores: one slot per cycle, with merge flag and end-of-warp mark. |
| `sq_valid[1:0]/sq/sq_ready` | Shaded quads back from the shader cores. Lane 0 is earlier; lane 1 may be valid only together with lane 0. |
| `het_enable`, `qm_enable`, `hiz_enable`, `alpha_th` | Mode and threshold. 0.996 is 65273. |
| `hiz_clear`, `hiz_wr_*` | Hi-z store access. Nothing inside writes it, because the depth test is not built. |
| `clear_req/clear_busy` | Zero the colour and stencil surfaces, one quad per cycle. This also happens after reset. |
| `draw_end/draw_done` | After the last vertex, hold `draw_end`. The TGC drains, then the TC. `draw_done` rises when everything up to the warp output is empty and no termination update is pending. Shaded quads still inside the shader cores are the caller's to wait for. |
| `stats` | 20 event counters: primitives, culls, grid inserts, each TGC and TC flush cause, Hi-z culls, terminated quads and fragments, merge pairs, warps, blended quads and fragments, terminated pixels. |
| `dbg_addr`, `dbg_color`, `dbg_stencil` | Combinational read of one quad of each surface. |

Parameters, with their defaults and whether the number comes from the paper:

| Parameter | Default | From |
|---|---|---|
| `SCREEN_W x SCREEN_H` | 1552 x 1040 | Largest evaluated frame (Mip-NeRF 360 scenes). |
| `TGC_BINS`, `TGC_BIN_SIZE` | 128, 16 | Paper. |
| `TC_BINS`, `TC_BIN_SIZE` | 32, 128 | Paper. |
| `TC_TIMEOUT` | 256 cycles | Own choice. The paper gives no value. |
| `ROP_LANES` | 2 | Paper: 2 quads per cycle. |
| `STENCIL_BITS` | 8 | Paper. |
| Tile sizes | 16 (screen tile), 8 (raster tile), 64 (grid) pixels | Paper. |
| QRU | 128 quads, 64 position registers, 128-bit bitmap | Paper. |

At the default screen, the on-chip surfaces dominate the size: about 103 Mbit
of colour and 13 Mbit of stencil. The bin storage itself is small:

- TGC: 128 x 16 x 96 bits of pointers, plus tags;
- QRU: 128 quad entries, plus 64 bytes of registers and 16 bytes of bitmap.

All six evaluated scenes fit the default frame:

- Kitchen and Bonsai: 1552x1040;
- Train: 980x545;
- Truck: 979x546;
- Lego and Palace: 800x800.

The number of Gaussians does not matter, because the primitive stream is
never stored.

## 7. Where this departs from the paper

- **Colour format.** Colour is UNORM16, not RGBA16F. The bits per pixel are
  the same (64), but the arithmetic is fixed point. The alpha comparators are
  therefore integer comparisons.
- **Surfaces and caches.** The 16 KB CROP cache, the Z cache and L2 are
  replaced by whole-screen arrays inside the CROP and ZROP with single-cycle
  access. Memory stalls are therefore not modelled; throughput numbers are
  those of the pipeline alone.
- **ZROP contents.** There is no depth test and no ordinary stencil test.
  Splats are blended without depth writes. Hi-z is written from outside.
- **Rules the paper does not state** are this design's own:
  - the TGC's oldest-bin eviction and end-of-draw drain;
  - the TC timeout value;
  - the QRU's register clearing after a pair, and its launch order (pairs
    first, then singles by the bitmap);
  - the bubble that carries a dropped quad's last marker;
  - the clear sweep;
  - the 8-deep termination FIFO.
- **Rasterization of multi-grid primitives.** A primitive that touches several
  grids is rasterized once per grid, restricted to that grid.
- **Single cluster.** There is one cluster, so no crossbar is built, and
  screen culling is the only culling.

## 8. Verification

Each block has a self-checking testbench in `tb/` that compares it against
references written independently. Examples of these references:

- integer-division blending;
- cross-product coverage;
- a model of the paper's QRU procedure.

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it shows |
|---|---|
| `tb_blending_unit`, `tb_alpha_test_unit`, `tb_term_test_unit` | Exact arithmetic and corner values. |
| `tb_term_update_unit` | Final stencil words, untouched low bits, and one update per cycle. |
| `tb_zrop`, `tb_crop` | Surface contents against per-pixel models, lane forwarding, and termination requests. |
| `tb_vpo`, `tb_rasterizer` | Tile boxes, culling, rate; exact coverage of every quad against the reference and Hi-z culling. |
| `tb_tgc_unit`, `tb_tc_unit` | Per-grid and per-tile order, each flush cause, and oldest-first eviction. |
| `tb_qru` | Slot-by-slot launch order, merge flags and warp marks against the model. |
| `tb_vr_pipe_gpc` | End to end on a 256x192 screen with small bins. See below. |
| `tb_vr_pipe_full` | End to end with every parameter at its default. See below. |
| `tb_vr_pipe_workloads` | End to end at the other evaluated frame sizes. See below. |

**`tb_vr_pipe_gpc`.** This testbench uses small bins:

- 4 TGC bins of 4 primitives;
- 4 TC bins of 16 quads;
- a timeout of 120 cycles.

It renders 90 overlapping splats twice, with a clear in between:

1. **VR-Pipe mode** (HET and QM on). Every pixel must match the in-order
   reference within rounding, plus 300/65535 for terminated pixels. The
   stencil flag must be set exactly where alpha reached the threshold.
2. **Baseline mode** (both off). Every pixel must match the reference bit
   for bit.

It also counts each mechanism, and a mechanism that never happens is a
failure:

- every TGC and TC flush cause;
- Hi-z culls;
- dropped quads;
- termination updates;
- merge pairs;
- alpha pruning.

A typical run counts 2950 terminated pixels and 63 merged pairs. It blends
14225 quads in the ROP, against 16885 for the baseline.

**`tb_vr_pipe_full`.** This testbench runs the default 1552x1040 top:

1. it waits for the 403,520-cycle reset clear;
2. it renders 40 splats near the centre and one across the screen corner;
3. it checks the covered region the same way as the reduced test, about a
   million checks.

It runs in seconds.

**`tb_vr_pipe_workloads`.** This testbench runs three clusters side by side,
with default bins and ROP, at the frame sizes of the other evaluated scenes:

- 980x545 (Train);
- 979x546 (Truck);
- 800x800 (Lego and Palace).

Each renders 300 to 400 splats of 2 to 100 pixels with termination and
merging on, and checks every pixel and stencil flag of its frame (3.4 million
checks in all). The real scenes hold 0.3 to 2.5 million Gaussians and are
not available here. These synthetic scenes only exercise the same paths at
the same frame sizes. A typical run draws about 200K quads per frame in about
2.4 cycles per quad.

The shader cores are `tb/sm_model.sv`. Their colour function is made up:

- opacity comes from the splat's pointer;
- a fall-off depends on the pixel position;
- fragments with alpha below 1/255 are pruned;
- merge pairs are blended as described in §4.

To simulate a testbench with Verilator:

```
verilator --binary --timing -Irtl -Itb rtl/vr_pkg.sv tb/tb_ref_pkg.sv tb/sm_model.sv \
    tb/tb_vr_pipe_gpc.sv --top-module tb_vr_pipe_gpc
./obj_dir/Vtb_vr_pipe_gpc
```

Leaf testbenches need only `rtl/vr_pkg.sv`, plus `tb/tb_ref_pkg.sv` where they
use it. Other modules are found through `-Irtl`.

**What the tests do not show:**

- performance against the paper's figures, since there is no memory system or
  real shader timing;
- behaviour under back-pressure from a slow memory;
- the rounding behaviour of FP16.
