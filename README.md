# FLICKER in SystemVerilog: a contribution-aware Gaussian-splatting renderer

## The idea

A 3D Gaussian Splatting renderer works on 16x16-pixel tiles. Every Gaussian whose bounding
box touches a tile is sorted by depth and alpha-blended into all 256 pixels. Most of that
work is wasted. A box is a loose bound, so many Gaussians reach only a corner of the tile,
and many contribute less than 1/255 to most pixels they nominally cover.

FLICKER cuts the waste in two stages before any pixel is blended:

1. **Stage 1 (sub-tile box test).** The tile is split into four 8x8 *sub-tiles*. A
   Gaussian is copied only into the depth lists of the sub-tiles its box overlaps.
2. **Stage 2 (Mini-Tile CAT, "contribution-aware test").** Each sub-tile is split into
   four 4x4 *mini-tiles*. Just before rendering, a dedicated test unit (CTU) evaluates
   the Gaussian's alpha at a few *leader pixels* of every mini-tile. The Gaussian is sent
   only to the mini-tiles where some leader pixel gets alpha >= 1/255.

The rendering hardware is organised around the same grid. Each mini-tile has its own
feature FIFO feeding two volume rendering units (VRUs) of eight pixels each. A Gaussian
that misses a mini-tile therefore costs that mini-tile nothing. This is also where the
speed comes from: the four mini-tiles of a sub-tile work through different Gaussian
streams at their own pace.

What makes the test cheap enough to run on every Gaussian:

* **Adaptive leader pixels.** Each Gaussian is classified as *spiky* (ellipse axis ratio
  of 3 or more) or *smooth*.
  * *Dense* sampling uses the four corners of each mini-tile.
  * *Sparse* sampling uses two diagonal pixels (top-left and bottom-right).
  * The default *Smooth-Focused* mode samples smooth Gaussians densely and spiky ones
    sparsely. *Spiky-Focused* does the opposite.
  * *Uniform-Dense* and *Uniform-Sparse* ignore the shape.
* **Pixel rectangles.** The skip test is `E > ln(255 o)`:
  * `E = ½ dᵀ Σ⁻¹ d` is the Gaussian's exponent at the pixel;
  * `o` is its opacity.

  The right-hand side is computed once per Gaussian. The leader pixels are grouped four
  at a time into *pixel rectangles* (PRs), whose corners share coordinate differences:
  `dx` is common to pixels in the same column, `dy` to pixels in the same row. A PR test
  unit (PRTU) therefore needs only two FP16 subtractions per axis for four pixels.
* **Mixed precision.** The differences are computed in FP16, then cut to FP8 before
  the quadratic products. The test only needs to be roughly right, and the 1/255
  threshold already has slack.

## Block structure

```
            DRAM ports (x4)
                 |
   +-------------v--------------+   x4 preprocessing cores
   | load -> cull -> spiky flag |
   |        -> sub-tile box     |
   +-------------+--------------+
                 | record + 4-bit sub-tile mask
        feature_buffer_writer (round robin, copies a record to every selected sub-tile)
                 |
   +-------------v------------------------------------------------------+  x4 lanes,
   | sorting_unit + feature_buffer -> ctu -> rendering_core             |  one per
   | (depth order)                  (CAT)   (demux, 4 FIFOs, 8 VRUs)    |  sub-tile
   |                                  ^---- stall (any FIFO full) ---   |
   +--------------------------------------------------------------------+
```

| File | Role |
|---|---|
| `flicker_pkg.sv` | Types and the FP16/FP8/fixed-point helper functions shared by all blocks |
| `gaussian_load_unit.sv` | Streams records from a DRAM request/response port through a prefetch FIFO |
| `culling_unit.sv` | Keeps Gaussians between the near and far planes whose box overlaps the image |
| `spiky_test.sv` | Axis ratio >= 3, tested exactly as `9·tr² >= 100·det` on the conic |
| `aabb_test.sv` | Stage 1: 4-bit mask of the overlapped sub-tiles |
| `preprocessing_core.sv` | The four blocks above with an output register: one record per cycle |
| `feature_buffer_writer.sv` | Arbitrates the four cores and writes a record to every selected sub-tile list in one cycle |
| `feature_buffer.sv` | Per-sub-tile feature memory (1024 entries, synchronous read) |
| `sorting_unit.sv` | Insertion sort by FP16 depth while the list is written, then streams the features in order |
| `ln_unit.sv` | `ln(255·o)` in Q.16, two cycles |
| `prtu.sv` | One pixel rectangle: FP16 differences, FP8 conversion, exact products, four pass flags; three cycles |
| `mask_merge_unit.sv` | Combines PRTU flags into the 4-bit mini-tile mask over one or two batches |
| `ctu.sv` | Controller, ln unit, two PRTUs, merge unit and the built-in output FIFO |
| `mini_tile_demux.sv` | Copies a Gaussian into the FIFOs its mask selects |
| `fifo_monitor.sv` | Stall = any mini-tile FIFO full; stall and cycle counters |
| `vru.sv` | Blends Gaussians into 8 pixels (2 rows x 4), one pixel per cycle, and forwards each Gaussian |
| `sync_fifo.sv` | Show-ahead FIFO, parameterised on the element type |
| `rendering_core.sv` | One 8x8 sub-tile: demux, monitor, 4 FIFOs (depth 16) and 4x2 VRUs |
| `flicker_top.sv` | One complete tile, with four of every per-sub-tile unit |

## The contribution test in detail

### Leader pixels and pixel rectangles

Mini-tile `m` of a sub-tile at `(sx, sy)` has its origin at
`(sx + 4·(m%2), sy + 4·(m/2))`. The CTU issues one PR to each of its two PRTUs per cycle:

* **Sparse Gaussian, one batch.**
  * PR A: top-left pixels of the four mini-tiles, `(0,0) (4,0) (0,4) (4,4)`.
  * PR B: bottom-right pixels, `(3,3) (7,3) (3,7) (7,7)`.

  Each is a 4-pixel rectangle, so the shared-difference trick applies. Pixel `i` of each
  PR lies in mini-tile `i`. The mask is `passA | passB`.
* **Dense Gaussian, two batches.**
  * Batch 1: PR A = corners of mini-tile 0, PR B = corners of mini-tile 1.
  * Batch 2: mini-tiles 2 and 3.

  The merge unit holds bits 0–1 from the first batch and outputs all four after the
  second.

The CTU therefore takes one Gaussian per cycle when sampling sparsely and one every two
cycles when sampling densely. Leader pixels outside the image are marked invalid and
never pass.

### Arithmetic

* **Coordinate differences.** `px − μx` and `py − μy` are computed as FP16 with truncation,
  then converted to FP8 E4M3 (truncating toward zero, saturating at ±448; no rounding
  mode is given, so every conversion in the design truncates).
* **Conic.** The three conic terms are also converted to FP8.
* **Weight.** `E = ½·dx²·a + ½·dy²·c + dx·dy·b` is formed from the FP8 values: each triple
  product is exact until it is truncated to signed Q.16 fixed point (64 bits). All rounding in the
  test therefore comes from the FP16 and FP8 conversions, which the testbenches model in
  real arithmetic.
* **Threshold.** The ln unit computes `ln(255·o)` as `ln2·(k + log2 m)`, with a quadratic
  correction of the mantissa term (checked to within 0.01).
* **Verdict.** A pixel passes when `E <= ln(255·o)`, that is when `alpha >= 1/255`.

The published inequality (Eq. 2) carries a minus sign on the quadratic form, which
contradicts the alpha definition it is derived from. This design follows the alpha
definition.

### Pipeline, stall and the built-in FIFO

From intake to FIFO write takes 4 cycles for a sparse Gaussian and 5 for a dense one:

1. PRTU stage 1 (subtract).
2. PRTU stage 2 (FP8 products), while the ln unit finishes.
3. PRTU stage 3 (compare).
4. Merge unit register.

Gaussians whose final mask is zero are counted as skipped and never enter the output
FIFO. The rendering core raises `stall` while any mini-tile FIFO is full. The CTU then
stops taking Gaussians, and what is already in the pipeline drains into its own FIFO
(8 entries here). To make that safe without a back-pressured pipeline, the CTU also
refuses a Gaussian when `FIFO count + Gaussians in flight` would reach the FIFO depth.

### Rendering

Each mini-tile FIFO feeds VRU A, which renders the top two rows of the mini-tile.
A passes each Gaussian through a forward register to VRU B, which renders the bottom two
rows.

A VRU handles one pixel per cycle: it computes `E` (FP16 differences and products, Q.16
result), then `alpha = min(0.99, o·2^(−E·log2 e))` using a quadratic fraction
approximation. It follows vanilla 3DGS:

* alpha below 1/255 leaves the pixel unchanged;
* a pixel whose transmittance would fall below 10⁻⁴ finishes and ignores everything
  after.

A busy VRU accepts its next Gaussian while it works on pixel 7, so a steady stream goes
at one Gaussian per 8 cycles. A VRU whose eight pixels have all finished takes one
Gaussian per cycle and only forwards it.

When all 64 pixels of a sub-tile have finished (`all_done`), the sorting unit stops
reading that list (sub-tile early termination). Colours are Q.16 per channel;
transmittance is Q.16, 17 bits.

## Operation of the top level

`flicker_top` renders one tile per `start` pulse, in two phases:

1. **Load.** Each of the four preprocessing cores reads `num[k]` records from `base_addr[k]`
   on its memory port. It culls them, flags spiky ones and computes the sub-tile mask.
   The writer copies each survivor into the selected sub-tile lists. The sorting units
   keep their lists ordered by depth as they are written. A list that reaches 1024
   entries drops further Gaussians and sets `st_overflow`.
2. **Render.** When every core is done, the four lanes stream their lists through their
   CTUs into their rendering cores. The mode input selects one of the four CAT modes:
   0 = Smooth-Focused (default), 1 = Spiky-Focused, 2 = Uniform-Dense, 3 = Uniform-Sparse.

`done` pulses once every list is exhausted or terminated and every FIFO and VRU is idle.
Pixel `(rd_x, rd_y)` of the tile can then be read on `rd_rgb`. Per-lane statistics
(`st_*`) count loaded, culled, listed, tested, dense-sampled and skipped Gaussians,
FIFO pushes, stall cycles and blends. The CTU counters run from reset; all others restart
with each tile.

Memory port protocol: `mem_req_valid/ready/addr` per core, and `mem_rsp_valid/data`
returning one 176-bit `dram_gauss_t` record per request, in order, with no back-pressure.
The load unit issues a request only when its prefetch FIFO has room for the answer.

The record holds:

* the projected 2D mean;
* the conic (inverse 2D covariance);
* opacity;
* RGB colour;
* depth, as FP16;
* a 16-bit pixel radius.

## Where this departs from the published design

* **No projection.** The feature computation stage (3D to 2D projection, spherical
  harmonics colour) is not built. Records arrive already projected, so the load unit's
  two-phase fetch (geometry first, colour only for survivors) and the culling of clustered
  "big Gaussians" are absent too.
* **The DRAM controller is outside.** Its side of each memory port is brought out as
  ports.
* **Phases do not overlap.** Loading and rendering do not overlap, neither within a tile
  nor across tiles. The published design does not say how it schedules them.
* **Own choices where the description is silent:**
  * the sorting method (insertion sort while the list is written);
  * the list depth (1024 per sub-tile; the design's total feature buffer is quoted only
    as 288 KB including other storage);
  * the CTU FIFO depth (8);
  * the FP8 format (E4M3);
  * the ln and exp approximations;
  * all handshakes;
  * the writer's round-robin arbitration;
  * the row split between the two VRUs of a mini-tile.
* **Tile and sub-tile sizes.** The 16x16 tile and 8x8 sub-tile come from vanilla 3DGS
  and the stated organisation (four cores of 4x2 VRUs covering one tile).
* **Mode switching is external.** The CAT mode is an input held for a whole tile. The
  published design suggests falling back to Uniform-Sparse when the CTU cannot keep the
  VRUs busy, but gives no rule for it, so no automatic policy is built.
* **The Eq. 2 sign,** as explained above.

## Verification

Every block has a self-checking testbench in `tb/`. Each one:

* compares against a reference computed independently in `real` arithmetic
  (`tb/tb_pkg.sv`);
* has a watchdog;
* ends with a `TB_RESULT checks=N failures=M` line.

Where a rate is stated or implied, the cycle counts are checked:

* CTU: 100 sparse Gaussians in 100 cycles, 100 dense in 199;
* VRU: 8 cycles per Gaussian, and 1 per cycle once finished;
* rendering core: the FIFO-limited rate into a single mini-tile.

`tb_flicker_top` runs the whole design at its default parameters against a
behavioural DRAM. It renders six tiles, covering all four modes, an opaque scene and an
overflowing sub-tile list, and compares every predictable pixel with a reference
renderer. It also counts each mechanism and fails if one never occurs:

| Mechanism | Count |
|---|---|
| Culling | 45 |
| CTU skips | about 1500 |
| Stalled lanes | 21 |
| Early terminations | 4 |
| List overflows | 1 |
| Adaptive tiles mixing dense and sparse sampling | 2 |
| Modes used | all 4 |

Pixels are compared to 0.03 per channel. Mini-tiles whose leader-pixel test lies within
0.02 of its threshold are excluded, because FP8 rounding can decide either way there.
The simulation takes about 9000 cycles per 1000-Gaussian tile.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/flicker_pkg.sv tb/tb_pkg.sv tb/tb_ctu.sv --top tb_ctu
obj_dir/Vtb_ctu
```

Replace `tb_ctu` with any other testbench name; `tb_flicker_top` takes about a minute
to build and half a minute to run.

How far to trust it:

* The datapaths agree with the real-arithmetic references within the stated tolerances.
* The top level has been exercised end to end.
* Nothing has been checked against the original authors' cycle-accurate simulator or
  image quality numbers.
* The yosys synthesis of the full top (four 1024-entry sorted lists of registers) is
  slow. The sorting lists and feature buffers are written as register arrays and would
  become SRAM macros in a real implementation.
