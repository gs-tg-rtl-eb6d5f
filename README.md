# GS-TG: a tile-grouping rasterizer for 3D Gaussian splatting, in SystemVerilog

3D Gaussian splatting renders an image by sorting and blending many 2D
ellipses ("splats") per screen tile. The tile size involves a trade-off:

- **Small tiles** (16×16 pixels) waste little work at raster time, because few
  pixels evaluate a Gaussian that does not reach them.
- **Large tiles** need far fewer sorts, because a Gaussian that covers many
  small tiles is otherwise sorted once for each of them.

GS-TG gets the benefits of both. It sorts per **group** of 4×4 tiles (64×64
pixels), and gives each Gaussian a **16-bit bitmask** that records which of
the group's 16 tiles it actually reaches. The rasterizer still works tile by
tile: it walks the group's single depth-sorted list and skips every entry
whose bitmask bit for the current tile is clear. One sort per group replaces
sixteen sorts per tile. Generating the bitmasks runs in parallel with the
sort. Rasterization does exactly the same per-tile work as a 16×16-tile
renderer would.

This repository holds synthesizable RTL for that accelerator:

- four preprocessing modules (PM), which project trained 3D Gaussians to the screen, cull them and identify the groups each one touches;
- four GS-TG cores, each with:
  - a bitmask generation module (BGM);
  - a group-wise sorting module (GSM);
  - a double-buffered group memory;
  - a rasterization module (RM) with 16 rasterization units.

Each block has a self-checking testbench. An end-to-end testbench renders a
whole frame with the default configuration. It compares every pixel against
a reference that has no tiles or bitmasks.

## Data flow

```
 3D Gaussians + camera ─► PM ×4 (feature calc ► cull + group id) ──(group, Gaussian) items──► [off-chip: bin per group]
                                                                 │ one group at a time
                                                                 ▼
      GS-TG core ×4:   BGM (4 tile checks) ──feature+bitmask──► group memory bank A/B
                       GSM (quick sort, 16 comparators) ─Sorted_G_Idx─►   │
                                                                          ▼
                       RM: tile filter (8 lanes) ► index FIFO ► 16 RUs ► memory controller ► pixels
```

| Module | Role |
|---|---|
| `gstg_pkg` | number formats, record types, threshold, ellipse quadratic form, alpha |
| `gstg_tile_check` | does one Gaussian's ellipse reach one square (16 or 64 px)? combinational |
| `gstg_feat` | feature calculation: depth, 2D position, 2D covariance as conic, radius, SH colour |
| `gstg_pm` | culling and group identification; emits one item per touched group |
| `gstg_bgm` | four tile checks, one tile row per cycle, so the 16-bit bitmask takes 4 cycles |
| `gstg_gsm` | quick sort of up to N depth keys with 16 comparators |
| `gstg_group_mem` | two banks of N records (features, bitmask) plus the sorted index list |
| `gstg_tile_filter` | 8 lanes: `valid = |(bitmask & Tile_Location)` |
| `gstg_idx_fifo` | packs up to 8 valid indices per cycle, pops one per cycle |
| `gstg_ru` | one row of 16 pixels: alpha computation and blending, with early exit |
| `gstg_tile_raster` | 16 RUs on one tile, plus the memory controller that writes the tile out |
| `gstg_rm` | walks the 16 tiles of a group through the filter, FIFO and raster |
| `gstg_core` | BGM + GSM + group memory + RM, double buffered |
| `gstg_top` | 4 PMs and 4 cores |

## Tiles, groups and the bitmask

A group is 64×64 pixels. Group (gx, gy) covers pixels `64*gx .. 64*gx+63`
horizontally and `64*gy .. 64*gy+63` vertically. Inside a group, tile
t = 4·row + col covers the 16×16 block at (64·gx + 16·col, 64·gy + 16·row).

Bitmask bit order:

- **Bit 15** of the bitmask is tile (row 0, col 0).
- **Bit 0** is tile (row 3, col 3).
- In general, bit `15 − (4·row + col)` is tile (row, col).

This is the order of the bitmask strings printed in the paper's pipeline
figure, read left to right with the tiles numbered row by row. The RM's
`Tile_Location` is the one-hot vector `1 << (15 − t)` in the same order.
Changing the order means changing both `gstg_bgm` and `gstg_rm`.

## Number formats

The paper's accelerator works on half-precision floating point. This RTL
uses fixed point throughout, so that every comparison and rounding is
explicit:

| Quantity | Format |
|---|---|
| pixel position 2D_XY | signed 18 bit, 4 fraction bits (±8192 px) |
| conic (a, b, c) = inverse 2D covariance | signed 32 bit, 24 fraction bits |
| opacity σ, colour | unsigned Q0.16 |
| depth D | 16-bit key compared as an unsigned integer (a positive FP16 depth sorts correctly this way) |
| transmittance T | unsigned Q1.16 (1.0 = 65536) |
| ellipse threshold | unsigned Q8.16 |

A Gaussian record (`gauss_t`) is 236 bits. It holds a 24-bit global index,
the XY position, the conic, the opacity, RGB and the depth. With its 16-bit
bitmask, a record fits in 32 bytes. The paper gives 42 KB per buffer bank,
so a bank holds N = 43008 / 32 = **1344** Gaussians. That is the default
group capacity everywhere.

Pixel (x, y) is sampled at its integer coordinates. The offset from the
Gaussian is d = (x, y) − XY. The rasterizer computes:

- q = a·dx² + 2b·dx·dy + c·dy²
- α = min(0.99, σ·2^(−q/(2 ln 2)))
- The exponential is a 17-entry table of `round(65536·2^(−k/16))`, with linear
  interpolation between entries (`gstg_pkg::alpha_of`).

The pixel is blended only if α ≥ 1/255 (checked as `255·α ≥ 65536`). Colour
and transmittance then update as C += RGB·α·T and T *= 1 − α.

## Which tiles does a Gaussian reach? (the hardest part)

The same test decides three things:

- whether a Gaussian touches a group (PM, 64 px squares);
- whether it touches a tile (BGM, 16 px squares);
- indirectly, whether any pixel will blend it.

Rendering is lossless only if the first two never miss a pixel that the
rasterizer would blend.

**Threshold.** A pixel blends only if σ·e^(−q/2) ≥ 1/255, that is
q ≤ T = 2·ln(255σ). A Gaussian with 255σ < 1 can never blend, so it is
culled. T comes from the opacity in `gstg_pkg::opac_thr` without a
logarithm unit:

1. Take the leading-one position of 255σ, plus the mantissa, plus 0.0862.
   This is an upper bound on log2(255σ), because log2(1+m) − m ≤ 0.0861.
2. Multiply by 90853/65536, which is slightly more than 2·ln 2.

T is therefore never smaller than the exact bound. It is at most about 0.12
larger, so a few extra tiles get marked, and none are missed.

**Ellipse against a square.** The sample positions of a square form
[x0, x0+S−1] × [y0, y0+S−1]. The ellipse q ≤ T reaches the square if either
of these holds:

- the centre lies inside it; or
- the minimum of q along one of the four edges is ≤ T.

Along an edge, one coordinate is fixed at u and the other, v, runs over
[lo, hi]. There q(v) = A·u² + 2B·u·v + C·v² is a parabola with C > 0. Its
minimum is at one of two places:

- an end point of the edge; or
- the vertex v* = −B·u/C, if v* lies strictly inside the edge. There
  q = u²(AC − B²)/C.

`gstg_tile_check` evaluates all of this with multiplies and compares only:

- the vertex condition is `C·lo < −B·u < C·hi`;
- the vertex value is compared as `u²(AC − B²) ≤ T·C`.

It needs no division or square root, and no 3-sigma box. The 3-sigma radius
(`pm_in_t.radius`) only bounds which groups the PM visits.

The BGM tests exactly the positions that the RUs sample, and with the same q.
So a tile whose bit is clear holds no pixel that could blend the Gaussian.
The end-to-end testbench checks this. At every pixel, its reference blends
every visible Gaussian whose bounding box reaches the pixel's 64×64 group,
with no tiles and no bitmasks.

## Preprocessing (PM)

A PM is two stages: `gstg_feat` followed by `gstg_pm`.

### Feature calculation

`gstg_feat` takes one trained Gaussian per cycle, with:

- mean, in Q16.16;
- activated scale, in Q8.24;
- rotation quaternion, in Q1.15;
- opacity;
- 16 spherical-harmonics coefficients per colour channel, in Q4.12.

It also takes the frame's camera (`cam_t`): the world-to-camera rotation
and translation, the focal lengths, the principal point, the frustum limits
1.3·tan(fov/2), and the camera centre. It computes the usual 3D-GS
features:

- camera-space mean t = W·p + t_w;
- depth key = FP16 bit pattern of t.z;
- screen position (f_x·t.x/t.z + c_x, f_y·t.y/t.z + c_y);
- 2D covariance = (T·R·S)(T·R·S)ᵀ + 0.3·I, with T = J·W and J the
  perspective Jacobian, whose t.x/t.z and t.y/t.z are clamped to the frustum
  limits;
- its inverse (the conic);
- radius = ⌈3·√λ_max⌉;
- colour = SH of degree 3 evaluated in the viewing direction, plus 0.5,
  clamped to [0, 1].

Everything is 64-bit fixed point with 24 fraction bits. The determinant and
the eigenvalue are taken in 128 bits, so that Gaussians up to about
2^19 px across do not overflow. Multiplying T·R·S before squaring keeps
tiny scales precise.

A Gaussian that cannot be projected leaves with opacity 0 and depth key 0,
so the next stage culls it. That covers three cases:

- t.z < 1/64;
- a singular covariance;
- a centre beyond ±8192 px.

The stage is written as one combinational step plus an output register, so
its latency is 1 and it accepts one Gaussian per cycle. A 1 GHz
implementation would cut it into pipeline stages. That changes only the
latency.

### Culling and group identification

The input is a projected Gaussian plus its bounding radius. `gstg_pm`
culls a Gaussian in any of these cases:

- 255σ < 1;
- its depth key is at or in front of the near plane (default FP16 0.2);
- its bounding box misses the image.

Otherwise it walks the groups of the box row by row, one group per cycle. It
emits a `(gx, gy, Gaussian)` item for every group the 64-pixel tile check
hits. The counters `n_culled` and `n_pairs` count culled Gaussians and
emitted items.

Between the PMs and the cores, items are binned per group in off-chip
memory. Both sides appear as ports of `gstg_top`, and the testbench plays
that memory.

## One core

A core receives one group's items, with `in_last` on the final one. For each
item:

1. The item is accepted.
2. Its depth key goes to the GSM.
3. The record goes to the BGM.
4. The BGM result (the record and its bitmask) is written to the **fill bank**
   of the group memory at the item's arrival index.

The BGM has latency 4 and accepts one Gaussian every 4 cycles. After the last
item, the GSM sorts and writes the sorted index list into the same bank. The
bank then becomes full, and filling moves to the other bank. The RM renders
full banks in order. So bitmask generation and sorting of group k+1 run
while group k is rasterized. The core's `n_overlap` counter counts those
cycles.

**Overflow.** A group with more than N = 1344 items keeps its first N, in
arrival order. It drops the rest, and `n_overflow` counts them. The paper
does not say what happens to a group larger than its buffer. This is the
simplest lossy choice, and the reason it is counted.

### GSM: quick sort with 16 comparators

Keys load one per cycle while the group fills. The sort is an iterative
quick sort with an explicit stack of (lo, hi) ranges. The larger range is
pushed first, which keeps the stack at 2·log2(N)+4 entries.

Partitioning is out of place:

- Each cycle, 16 comparators compare 16 keys of array A with the pivot, which
  is the range's middle element.
- Prefix counts scatter the keys to the low end and the high end of the same
  range in array B.
- B is then copied back into A, 16 per cycle.

The sort is ascending, so the nearest Gaussian comes first. It is not
stable. The sorted indices go out 16 per cycle. A full group of 1344 random
keys takes about 4200 cycles.

### RM: filter, FIFO, 16 RUs

The RM runs a front end and a back end.

**Front end.** For tiles t = 0..15 of the group:

1. It reads 8 sorted entries per cycle, each with its index and bitmask.
2. The 8-lane tile filter ANDs each bitmask with `Tile_Location` and ORs the
   16 bits into one valid flag per lane.
3. It pushes the valid indices into the FIFO in order.
4. It then pushes an end-of-tile marker.

The FIFO takes a batch only when all 8 lanes fit. `n_fifo_stall` counts the
cycles spent waiting for that. `n_filtered` counts the (Gaussian, tile)
pairs removed by the bitmask.

**Back end.** It pops one index, reads the record and broadcasts it to the
16 RUs. RU r shades row r of the tile, one pixel per cycle. A Gaussian
therefore costs 16 cycles per tile, and the 16 RUs together shade 16 pixels
per cycle. The front end can run ahead into the next tile's list while the
RUs finish the current tile.

**Early exit.** A pixel stops blending once T < 10⁻⁴ (7/65536). When all 256
pixels of a tile have stopped, the back end discards the remaining indices of
that tile. The front end also jumps to the end marker if it is still on that
tile. `n_skipped` counts the discarded indices.

**Memory controller.** At each end marker, the memory controller copies the
256 finished colours and clears the RUs for the next tile. It then streams
the pixels out as `(x, y, r, g, b)`, one per cycle, and drops pixels outside
the image. It can still be draining one tile while the RUs work on the next.

## Top level

`gstg_top` holds `NPM = 4` PMs and `NCORE = 4` cores. All external traffic is
on plain ports. The ports come in arrays of 4:

- `cam`: the camera of the frame, shared by all PMs;
- `gs_in*`: trained 3D Gaussians in;
- `pm_out*`: (group, Gaussian) items to memory;
- `core_in*` with `core_in_last`: group lists from memory;
- `pix*`: finished pixels to the frame buffer.

The top also has `idle` and per-unit event counters. Handshakes are
valid/ready, and a transfer happens on a rising edge where both are high.
Reset is asynchronous and active low. Deciding which core renders which
group is left to the memory side.

## Measured timing (default parameters)

| What | Cycles |
|---|---|
| tile check | combinational |
| BGM, per Gaussian | latency 4, one every 4 |
| GSM, 1344 random keys | ≈ 4200 |
| RU, per Gaussian per tile | 16 |
| RM tile filter | 8 list entries per cycle |
| memory controller | 256 cycles per tile, overlapped |
| 256×192 test frame (≈ 1700 visible Gaussians, one over-full group) | 57 029 |

## Where this RTL departs from the paper

- **Fixed point instead of FP16.** Formats are listed above. Depth keys keep
  FP16 ordering.
- **Feature calculation.** The paper only says that the PM keeps the
  conventional preprocessing. The datapath here follows the reference 3D-GS
  formulas. Its number formats and its single-stage structure are this
  design's own.
- **Exact ellipse test with a conservative threshold.** The paper names the
  ellipse boundary but gives no circuit. The threshold from the opacity and
  the edge-minimum test are this design's own.
- **RU organisation.** The paper gives 16 RUs per RM. The choice that each RU
  owns one tile row and shades one pixel per cycle is this design's own.
- **Group memory.** Capacity is derived as 42 KB / 32 B = 1344 records per
  bank. It is plain register arrays with combinational read, not an SRAM
  macro.
- **Overflow policy.** Items past 1344 in a group are dropped, which is not
  lossless. At the paper's scene statistics, an average 64×64 group needs
  about 1.8k–3.1k Gaussians with the ellipse test (more than a bank holds).
  Real scenes would therefore need the group list streamed or split. This
  RTL does not do that.
- **FIFO depth** (32) and the PM's near plane (0.2) are assumed.
- **Not modelled:** DRAM, the 51.2 GB/s bandwidth and the binning of items per
  group between the PM and the cores. The 1 GHz clock target is not checked.

## Simulating

Everything runs with plain Verilator 5 (`--binary --timing`). Every
testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself. Each
one also has a watchdog.

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/gstg_pkg.sv tb/tb_ref_pkg.sv tb/tb_gstg_top.sv \
    --top-module tb_gstg_top -Mdir obj_top -o sim
./obj_top/sim
```

Replace `tb_gstg_top` with any other `tb/tb_gstg_*.sv`. `tb_ref_pkg`
contains the independent references:

- real-valued ellipse and rectangle geometry;
- a separate derivation of the threshold;
- the fixed-point blending model of one pixel;
- a generator for random Gaussians (`make_gauss`) from centre, axis lengths,
  angle, opacity, colour and depth.

| Testbench | What it checks |
|---|---|
| `tb_gstg_tile_check` | against real-valued geometry; the fixed threshold against the exact one |
| `tb_gstg_bgm` | bitmasks against 16 reference tile tests (bit 15 − t for tile t); latency 4 / interval 4 under back-pressure |
| `tb_gstg_gsm` | sorted order and permutation for many sizes, up to 1344 |
| `tb_gstg_group_mem` | both banks and all ports against a model |
| `tb_gstg_tile_filter`, `tb_gstg_idx_fifo` | against models, with random back-pressure |
| `tb_gstg_ru`, `tb_gstg_tile_raster` | against the per-pixel blending model, including early exit |
| `tb_gstg_rm`, `tb_gstg_core` | whole groups against blending every Gaussian in depth order |
| `tb_gstg_feat` | every feature against a double-precision model, over random cameras; frustum clamp and behind-camera cases; latency 1 |
| `tb_gstg_pm` | culling and group lists against reference geometry |
| `tb_gstg_top` | a 256×192 frame through 4 PMs and 4 cores; every pixel against the unfiltered reference |

`tb_gstg_top` runs at the top's default parameters. It must see each
mechanism at least once: culling, a Gaussian in several groups, bitmask
filtering, early exit, FIFO back-pressure, overlap of fill and raster, and
group overflow. It simulates in a few seconds after a compile of about 40 s.

## Changing it

- **Group capacity.** `N` on `gstg_top` and `gstg_core` sets the group
  capacity. Index widths follow from it.
- **Comparators and lanes.** `LANES` (GSM comparators) and `RD` (filter
  lanes) are core parameters. `FIFO_DEPTH` must be a power of two and at
  least `RD`.
- **Tile and group geometry.** These are fixed by the 16-bit bitmask and set
  in `gstg_pkg` (`TILE`, `GROUP_TILES`). Changing them changes the mask width
  and the RM's tile walk.
- **Number formats.** The formats live in `gstg_pkg`. `opac_thr`, `quad` and
  `alpha_of` are the only places that do the arithmetic, so the tile check
  and the rasterizer always stay consistent.
