# Splatonic: a sparse-pixel training engine for 3D Gaussian Splatting SLAM

A Gaussian-splatting SLAM system spends almost all of its time in two loops. In
*tracking* it refines the camera pose against a fixed map of 3D Gaussians. In
*mapping* it refines the Gaussians against a fixed pose. Both loops render the map,
compare the result with the camera image, and back-propagate the error. Done densely,
every pixel of every frame pays for a full render and a full gradient pass.

This accelerator trains on **sparse pixels**: one pixel per tile of the image. On the
sparse pixel set, the usual tile-based rasterizer becomes wasteful, so the hardware
renders and back-propagates **per pixel**:

* A pixel's Gaussians are found and alpha-tested once, in the projection stage. The
  renderer therefore only blends. It never re-tests a Gaussian that turns out to be
  transparent at the pixel.
* A pixel's forward pass keeps its transmittance and prefix colors in a small on-chip
  cache. The backward pass then needs no reduction and no recomputation.
* The per-pixel gradient lists are summed into per-Gaussian gradients by a dedicated
  aggregation unit. It merges equal IDs, tracks pending sums in a scoreboard, and hides
  DRAM latency behind a Gaussian cache.

The RTL is SystemVerilog (IEEE 1800-2017). It lints cleanly in Verilator 5 and
elaborates in Yosys with the slang front end. Every block has a self-checking
testbench, and there is an end-to-end testbench at the default sizes.

## One training iteration, step by step

`splatonic_top` runs one iteration for one **batch** of `MAX_PIX` = 16 consecutive tiles
(row-major, starting at tile `(start_tx, start_ty)`). The phases follow each other:

| Phase  | Blocks | What happens |
|--------|--------|--------------|
| SAMPLE | `sampling_unit`, `sobel_unit` | Chooses one pixel per tile. Mapping also builds an *unseen* list. |
| PROJ   | 8 × `projection_unit` (each with `projection_core` and 4 × `alpha_filter_unit`), `isect_table` | Projects every Gaussian and alpha-tests it against the sampled pixels under its footprint. Surviving pixel–Gaussian *entries* go into the intersection table, one row per pixel. |
| RAST   | 4 lanes of `sorting_unit` + `raster_engine` | Each lane takes table rows `l, l+4, …`. It sorts the row by depth, renders it, takes the loss against the reference pixel, back-propagates, and streams the gradient tuples into aggregation channel `l`. |
| FLUSH  | `aggregation_unit` | Writes the Gaussian cache back to DRAM. |
| REPROJ | `reprojection_unit` | The host replays the Gaussian stream. For each Gaussian, its accumulated gradient is read from DRAM and turned into a world-space mean gradient, and the camera-pose gradient is accumulated. |

`busy` is high from `start` to `done`. `mode` (0 = tracking, 1 = mapping) is sampled at
`start`. A new batch can use the other mode with no other change.

### Sampling

* **Tracking.** The tile edge is `W_T` = 16. A 32-bit xorshift generator (shifts 13, 17,
  5, seeded by `seed`) picks one pixel per tile, one tile per cycle. The x offset comes
  from the low bits and the y offset from bits 16 and up. Pixels are clamped to the
  image.
* **Mapping.** The tile edge is `W_M` = 4. The host streams the tile's pixels, tile by
  tile, on `map_valid/map_ready`. Each pixel comes with its 3×3 luminance window and the
  transmittance Γ_final left by the previous render.
  * `sobel_unit` gives the squared gradient magnitude w².
  * The pixel with the largest w²·r² wins the tile, where r ∈ [0,1) is a random number.
    Both factors are non-negative, so this picks the same pixel as the largest w·r,
    without a square root. The tile's choice therefore leans towards texture but stays
    random.
  * Pixels with Γ_final > 0.5 are *unseen* (the map does not cover them yet). They go to
    a separate list of up to `MAX_UNSEEN` = 16; extra ones are counted in
    `st_unseen_dropped`.

### Projection and preemptive alpha check

`projection_core` is the standard EWA projection:

* camera transform R·m + t;
* Jacobian J of the pinhole model at the Gaussian's depth;
* Σ₂D = J R Σ Rᵀ Jᵀ + 0.3·I, the conic (inverse of Σ₂D), and a 3σ bounding box clipped to
  the image.

It culls Gaussians in front of the near plane (z < 0.01), with a non-positive
determinant, or with a box outside the image.

`projection_unit` then uses **direct indexing**. Sampling keeps exactly one pixel per
tile, in row-major tile order, so the sampled pixel of tile (tx, ty) sits at position
`(ty - start_ty) * tiles_x + (tx - start_tx)` of the pixel list. No search is needed:
the unit walks the tiles under the box row by row, four tiles per cycle. It reads those
four pixels and tests them in four `alpha_filter_unit`s. Unseen pixels cannot be
indexed that way, so they are scanned linearly, four per cycle, after the tiles.

An `alpha_filter_unit` computes, for pixel offset (dx, dy) from the projected mean:

```
power = -0.5 (a dx² + c dy²) - b dx dy          (a, b, c = conic)
G     = exp(power)                              (64-entry table, exp_lut)
alpha = min(0.99, opacity * G)
hit   = inside box  and  power <= 0  and  alpha >= 1/255
```

A hit produces a 12-field entry: gid, depth, α, G, dx, dy, the conic and the color. That
is everything the renderer and the reverse renderer need, so neither re-reads the
Gaussian. `exp_lut` holds exp(−(k+½)/8) for k = 0…63, computed at elaboration. The
argument is quantised to 1/8. Beyond −8, G is 0.

Entries leave each projection unit through an 8-deep FIFO. A round-robin arbiter gives
the intersection table one append per cycle. `st_arb_wait` counts the cycles a unit
waited, and a unit stalls rather than dropping an entry. A table row holds `MAX_K` = 256
entries; further entries for that pixel are dropped and counted in `st_overflow`.

### The rasterization engine: forward cache and backward pass

This is the arithmetic core, and the part that most rewards reading the code
(`raster_engine.sv`, `render_unit.sv`, `color_reduction_unit.sv`,
`rev_render_unit.sv`).

For the depth-sorted entries i = 1…k of one pixel, with Γ₁ = 1:

```
Γ_{i+1} = Γ_i (1 − α_i)                          transmittance
C_i     = Σ_{j<=i} Γ_j α_j c_j                   prefix color, including i
C       = C_k,   L = Σ_ch |C − C_ref|,   dL/dC = sign(C − C_ref)
```

**Forward (FWD)** takes four entries per cycle:

1. Four `render_unit`s form (1−α_i) and the partial colors α_i c_i.
2. The `color_reduction_unit` chains them into the four running Γ_i and C_i.
3. Those values are written into the forward cache.

**Loss (LOSS)** takes one cycle.

**Backward (BWD)** takes four entries per cycle. Four `rev_render_unit`s read the
cached Γ_i and C_i and evaluate

```
dL/dα_i    = Σ_ch dL/dC · ( Γ_i c_i − (C − C_i) / (1 − α_i) )
dL/dc_i    = Γ_i α_i · dL/dC
dL/dopac_i = dL/dα_i · G_i
g          = dL/dα_i · α_i
dL/dμ_i    = g · (a dx + b dy,  b dx + c dy)
dL/dconic  = −g · (dx²/2, dx dy, dy²/2)
```

This needs no sequential back-to-front sweep: the suffix sum C − C_i is just the final
color minus the cached prefix.

**Output (OUT)** streams one (gid, nine gradients) tuple per cycle to the engine's
aggregation channel. Without back-pressure, a pixel with k entries takes
2·⌈k/4⌉ + k + 3 cycles from start to done.

Gradients are ordered r, g, b, opacity, mean-x, mean-y, conic-a, conic-b, conic-c
(`G_R … G_CC` in the package).

### Aggregation

Four engines emit gradient lists at once, and many tuples name the same few Gaussians.
`aggregation_unit` accepts one tuple per channel per cycle (all or none) and processes
them in five parts:

1. **Merge unit.** Tuples of the same cycle with equal IDs are summed (`st_merged`).
2. **Scoreboard** (`SB_N` = 128 entries of ID and Δgradient). A tuple whose ID is
   already pending is added to that entry (`st_sb_hit`). Otherwise it takes a free
   entry. An entry is *ready* when its Gaussian is in the cache.
3. **Find union / address generation.** Only an ID that is new to the scoreboard and
   missing from the cache queues a fill, so each distinct ID is fetched once. Fills run
   one at a time. The victim line is written back if dirty, then the accumulated
   gradient is read by ID from DRAM (`st_fills`, `st_writebacks`).
4. **Gaussian cache.** 512 direct-mapped lines of (ID, 9 gradients), line = gid mod 512.
5. **Accumulation unit.** Every cycle it adds one ready scoreboard entry into its cache
   line and frees the entry. Updates of resident Gaussians keep flowing while a fill
   waits on DRAM.

Two rules keep the unit safe:

* **A line is never evicted while the scoreboard still holds an entry for its current
  Gaussian, or while a tuple for it is being accepted in the same cycle.** Tuples that
  are merely *offered* while the input is stalled must not count. Otherwise the unit
  deadlocks: a full scoreboard waits for an eviction, and the eviction waits for the
  stalled input.
* The input stalls (`st_agg_stall`) when fewer than four scoreboard entries or
  fill-queue slots are free. Tuples are never lost.

`flush` waits until the scoreboard and fill queue are empty, then writes every dirty
line back and pulses `flush_done`.

### Re-projection

For each Gaussian replayed in REPROJ, the top reads its accumulated gradient from DRAM.
The `reprojection_unit` maps the screen-space mean gradient back through the pinhole
model. With p = R m + t and (g_x, g_y) = dL/dμ:

```
dL/dp = ( fx g_x / z,  fy g_y / z,  −(fx p_x g_x + fy p_y g_y) / z² )
dL/dm = Rᵀ dL/dp                       per Gaussian, on gw_dmean
dL/dt += dL/dp,   dL/dR += dL/dp mᵀ    accumulated over the batch, on dl_dt / dl_dr
```

Color, opacity and conic gradients are passed through unchanged on `gw_grad`. The
conversion of the conic gradient into a 3D-covariance gradient is not built (see
*Departures*).

## Numbers and types

All arithmetic is signed fixed point **Q23.24** (`fx_t`, 48 bits). Products are
rounded down after the shift. Division (`fx_div`) returns 0 for a zero divisor.
`isqrt` is a restoring square root. Other widths:

* Gaussian IDs are 20 bits (about 1M Gaussians).
* Pixel coordinates are 16 bits.

The shared structs live in `splatonic_pkg`:

| Struct | Purpose |
|--------|---------|
| `gauss3d_t` | id, mean, upper triangle of Σ, opacity, color |
| `pose_t` | R, t, fx, fy, cx, cy |
| `gauss2d_t` | projected Gaussian and its box |
| `isect_t` | pixel–Gaussian entry |
| `gtuple_t` | id plus 9 gradients |

The format's range sets one real limit. Σ₂D's determinant grows as σ⁴ (in px⁴), so a
Gaussian whose on-screen σ exceeds about 50 px overflows the projection. The testbenches
use σ up to 45 px. Full-resolution frames with close-up Gaussians would need a wider or
floating-point projection datapath.

## Top-level interface

| Group | Signals | Notes |
|-------|---------|-------|
| control | `start`, `mode`, `seed`, `pose`, `img_w/img_h`, `start_tx/start_ty`, `tiles_x`, `n_tiles`, `n_gauss`, `busy`, `done` | Inputs must be stable from `start` to `done`. |
| Gaussian stream | `g_valid/g_ready/g_in` | Carries `n_gauss` Gaussians in PROJ, then the same ones again in REPROJ. |
| mapping stream | `map_valid/map_ready/map_win/map_gamma` | 16 pixels per 4×4 tile, tiles in batch order. |
| reference image | `ref_pix[l]` out, `ref_rgb[l]` in | Combinational lookup per lane, captured when the lane starts a pixel. |
| results | `res_valid/res_pix/res_color/res_gamma/res_loss` | One pulse per rendered pixel and lane. |
| DRAM | `mem_rd_*`, `mem_rsp_*`, `mem_wr_*` | Valid/ready requests addressed by Gaussian ID, one read outstanding, answered on `mem_rsp_valid`. |
| gradients | `gw_valid/gw_gid/gw_dmean/gw_grad`, `dl_dr`, `dl_dt` | Per Gaussian in REPROJ; the pose gradient is valid at `done`. |
| statistics | `st_*` | Culled, checked, rejected, table entries, arbiter waits, overflow, unseen, merged, scoreboard hits, fills, write-backs, aggregation stalls. |

## Parameters

| Parameter | Default | Meaning |
|-----------|---------|---------|
| `N_PROJ` | 8 | projection units |
| `N_AFILT` | 4 | alpha-filter units per projection unit |
| `N_ENGINE` | 4 | sorting units / rasterization engines / aggregation channels |
| `N_RU` | 4 | render and reverse render units per engine (2×2) |
| `EXP_LUT_N` | 64 | exp table entries |
| `W_T`, `W_M` | 16, 4 | tracking and mapping tile edge |
| `MAX_PIX`, `MAX_UNSEEN` | 16, 16 | sampled and unseen pixels per batch |
| `MAX_K` | 256 | entries per pixel (table row, sorter, engine cache) |
| `SB_N`, `CACHE_LINES` | 128, 512 | aggregation scoreboard and cache |

The unit counts, the table size and the tile sizes are those of the published
configuration (500 MHz target). The batch size, `MAX_K`, `SB_N` and the cache geometry
are this design's choices.

## Departures from the published design

* **No stage pipeline.** The phases run back to back for one batch. The published chip
  overlaps stages across batches with double buffers: a 64 KB global buffer, and an
  8 KB buffer per engine that lets the next pixel's forward pass overlap the current
  backward pass. Results are the same; throughput is lower.
* **Sorting.** The published chip reuses "hierarchical" sorting units from an earlier
  design without describing them. Here each lane has a one-entry-per-cycle insertion
  sorter, stable for equal depths.
* **Aggregation policies.** The published chip does not specify cache organisation,
  replacement, scoreboard size or the DRAM protocol. Here they are a direct-mapped
  cache, one fill at a time, and a simple valid/ready ID-addressed port.
* **Mapping pre-pass.** The previous render's Γ_final and the luminance windows come
  from outside on the `map_*` stream.
* **Re-projection.** Only the mean gradient is carried back to world space. The
  covariance (scale/rotation) gradient chain is not built.
* **Outside the design.** DRAM (4 × LPDDR3-1600 in the published evaluation) and the
  SRAM macros are not part of the RTL. Buffers are plain arrays.

## Verification

Each block has a testbench `tb/tb_<module>.sv` that computes its expected values
independently, mostly with a real-number model. Each prints
`TB_RESULT checks=N failures=M` and has a cycle-count watchdog.

| Testbench | What it checks |
|-----------|----------------|
| `tb_splatonic_pkg` | Fixed-point helpers. |
| `tb_exp_lut` | The exp table. |
| `tb_sobel_unit` | Sobel filtering. |
| `tb_alpha_filter_unit` | Alpha test and entry fields. |
| `tb_projection_core` | EWA projection against a real-number model. |
| `tb_projection_unit` | Entries against a brute-force test of every sampled pixel, with a batch that wraps onto the next tile row. Also the 4-pixels-per-cycle scan time. |
| `tb_isect_table` | Storage, overflow and clear. |
| `tb_sorting_unit` | Stable depth order. |
| `tb_sampling_unit` | One pixel per tile per cycle, and the mapping winner and unseen list against a model of the same random sequence. |
| `tb_render_unit`, `tb_color_reduction_unit`, `tb_loss_unit`, `tb_rev_render_unit` | The blending equations and their derivatives. |
| `tb_raster_engine` | Whole-pixel forward and backward against a real-number model, under random back-pressure, plus the cycle count above. |
| `tb_aggregation_unit` | A small scoreboard and cache so that evictions happen, random DRAM latency and back-pressure. After flush, every Gaussian's DRAM value must be the exact sum of its tuples. |
| `tb_reprojection_unit` | World-space and pose gradients. |
| `tb_splatonic_top` | End to end at the default parameters (see below). |

`tb_splatonic_top` runs three batches at the default parameters:

1. tracking with 80 Gaussians;
2. mapping with 80 Gaussians;
3. tracking with 300 large Gaussians, to overflow table rows.

For the first two, every pixel's color, transmittance and loss, and every Gaussian's
accumulated gradient in DRAM, are compared with a brute-force real-number render and
back-propagation. The re-projection outputs and the pose gradient are checked as well.
The testbench counts, and requires at least once, each of these mechanisms:

* culling, alpha rejection, table-arbiter wait and table overflow;
* unseen pixels and unseen-list overflow;
* merges, scoreboard hits, fills, write-backs and aggregation stalls;
* DRAM back-pressure, Gaussian-input stall, and both mode switches.

It runs in well under a minute.

Most testbenches compare against a real-number model with relative tolerances between
1e-3 and 5e-3. The exceptions are the fixed-point ones, such as the exp table steps, the
sampling positions, and the aggregation sums, which are exact.

To run one with plain Verilator from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb -Irtl +libext+.sv \
    rtl/splatonic_pkg.sv tb/tb_raster_engine.sv --top-module tb_raster_engine
./obj_dir/Vtb_raster_engine +verilator+rand+reset+2
```

Lint: `verilator --lint-only -Wall -Irtl rtl/splatonic_pkg.sv rtl/<module>.sv ...`.
The remaining warnings are width extensions and a few deliberately unused fields.
