# Stereo 3D Gaussian splatting accelerator: client-side RTL

A VR headset has to draw every frame twice, once per eye, from two cameras
6 cm apart. In 3D Gaussian splatting (3DGS) a frame is drawn by projecting
millions of 3D Gaussians onto the screen, sorting them by depth for each 4x4
pixel tile, and alpha-blending them front to back in every pixel. The two eye
images are almost the same, so doing all of that twice wastes most of the work.

This RTL is the client-side rendering accelerator of a cloud/client 3DGS
system. Its core idea is **stereo rasterization**. The left eye is rendered
the usual way. While a left tile is rendered, every Gaussian that actually
blended into at least one of its pixels is re-projected into the right eye.
That is cheap: for a rectified stereo pair the only change is a horizontal
shift, the disparity `X = B*f/D` (baseline times focal length over depth). The
Gaussian is filed into a short per-tile list for the right eye. A right tile
is then rendered from the merge of a few such lists. It needs no projection
and no sorting of its own, and it only sees Gaussians that already proved
visible.

The design around that idea follows a published tile-based 3DGS accelerator:
- a decoder for compressed Gaussians;
- four projection units;
- four sorting units;
- a 144 KB global double buffer;
- eight volume rendering cores (VRCs), each with 16 rendering units (RUs), one per pixel of a 4x4 tile.

The stereo additions sit inside each VRC:
- a stereo re-projection unit (SRU);
- a 16 KB stereo buffer of four 4 KB rows;
- a merge unit;
- a "Left?" multiplexer in front of the RUs.

All defaults are the published sizes. The image is 2064x2208 pixels per eye
(516x552 tiles), the clock target is 1 GHz, and disparities are bounded to
16 px.

## Data flow

```
compressed Gaussians --> gauss_decoder --> 4 x projection_unit --> global_double_buffer
   (from DRAM)           (codebook)        (project, cull with       (half being written)
                                            the widened FoV)
global_double_buffer --> 4 x sorting_unit --> 8 x vrc --------------------> tile stream
  (half being read)      (per-tile lists,     (left tile, then the           (to DRAM)
                          sorted by depth)     right tile from the
                                               stereo buffer)
```

The buffer is double-buffered by frame. The loader fills one half with the
projected Gaussians of frame *n+1* while the renderer reads frame *n* from the
other half. The halves swap when the new frame is fully loaded and the old one
has finished rendering.

Tile rows go, in row-major order, to whichever VRC is idle. A VRC renders one
whole tile row of both eyes. It has to: the stereo buffer only works if one
core sees the left tiles of a row in order. Sorting unit *s* serves VRCs 2*s*
and 2*s*+1.

## Stereo rasterization inside a VRC

### Tile order of one row

For a row of `W` tiles (`W = 516` at full size), a VRC produces:

| step | tiles | list source |
|---|---|---|
| 1 | R0, R1, R2 | The sorting unit builds right-eye lists: each Gaussian's mean is shifted by its disparity before the overlap test. |
| 2 | L0, L1, L2 | Normal left-eye lists from the sorting unit. They already feed the stereo buffer. |
| 3 | L3, R3, L4, R4, ..., L(W-1), R(W-1) | Each left tile comes from the sorting unit and is immediately followed by the right tile of the same column, merged from the stereo buffer. |

Right tile `R_N` can only receive Gaussians from left tiles `L_(N-3) .. L_N`.
With the sign convention used throughout (as in the published design), a
Gaussian's right-eye position is its left-eye position shifted right by its
disparity. Disparities stay below 16 px = 4 tiles, so seen from its left tile
the Gaussian moves right by `k = floor(disparity / 4 px)` tiles, `k` in 0..3.
So once `L_N` is finished, all four lists that feed `R_N` are complete.
`R0..R2` would need left tiles that do not exist, so they are rendered on
their own.

### The three stereo units

**Rendering unit and alpha check** (`rendering_unit`). Each RU evaluates, for
its pixel:
- alpha = `min(0.99, opacity * exp(-q/2))`, where `q` is the conic's quadratic
  form at the pixel centre;
- skip the Gaussian if `alpha <= alpha_th`;
- blend it if the transmittance after it, `T*(1-alpha)`, stays at or above
  `T_MIN`; otherwise the pixel is saturated and ignores the rest of the list.

The RU's `used` output is high when the Gaussian really blended into the
pixel. For a right-eye tile the same RU simply adds the disparity to the
Gaussian's x mean.

**Stereo re-projection unit** (`stereo_reproj_unit`). While a left tile `L_N`
is rendered, the SRU ORs the 16 `used` bits. When any bit is set, it files
the Gaussian into list `L_N -> R_(N+k)`, which is stereo-buffer row `3-k`. The
Gaussian is written one cycle later. At the end of `L_N` it writes an
end-of-list (EOL) mark into every row whose target tile is one that gets a
merged list (3..W-1).

Each 4 KB row is a circular FIFO of 203 entries. Each entry is a 161-bit
record: one EOL bit plus the 160-bit rasterisation record. The SRU drops a
Gaussian when fewer than 4 free slots remain, and counts the drop. It never
drops an EOL, so the lists stay aligned. At full size and with realistic list
lengths, drops only happen if a single left tile sends more than about 200
visible Gaussians to one row.

**Merge unit** (`merge_unit`). For `R_N` the heads of the four rows are
exactly the heads of the lists `L_(N-3)->R_N` (row 0) to `L_N->R_N` (row 3).
Each list is already in depth order, because it was written in the order the
left tile consumed its sorted list. The merge unit:
- pops the row whose head has the smallest key, one entry per cycle;
- drops an entry whose key equals the previous one;
- stops when all four heads are EOL marks, which it pops together.

The "Left?" multiplexer then feeds this stream to the RUs instead of the
feature buffer.

Keys are `{depth, id}` (16-bit depth in Q12.4 metres, 16-bit id). Depth alone
can tie, and the id makes every key unique, so "equal key" means "same
Gaussian".

### What the stereo path saves, and where it is not exact

A merged right list contains only Gaussians that blended into some left pixel.
Gaussians that every pixel skipped, or that came after the pixels saturated,
never reach the right eye. The right tile also needs no sorting request. The
end-to-end testbench counts this: the right-eye list entries saved this way
are typically ~45% of what independent right-eye lists would hold.

Each Gaussian is filed once, into the one right tile chosen by
`floor(disparity / 4 px)`. A Gaussian whose shifted footprint straddles two
right tiles therefore reaches only one of them. In that case a merged right
tile can differ from a right tile rendered on its own. The testbenches compare
against a reference that applies this same rule, so they check the design as
built, not bit-equality with an independent right-eye render. The merge
unit's duplicate filter is in place, but under this one-list rule a Gaussian
never reaches the same right tile twice. So the filter is exercised only by
the merge unit's own testbench.

## Number formats

| quantity | format | where |
|---|---|---|
| compressed position / scale | signed Q10.6 m / unsigned Q6.10 m (16 bit) | decoder input |
| decoded position / scale | Q16.16 | decoder to projection |
| rotation / translation | Q2.14 / Q16.16 | `cam_t` |
| focal length, principal point | Q12.4 px | `cam_t` |
| stereo `B*f` | Q16.16 px·m | `cam_t` |
| 2D mean | signed Q16.4 px | `rast_gauss_t` |
| conic `ca, cc` / `cb` | unsigned / signed Q4.12 px^-2 | `rast_gauss_t` |
| depth (sort key) | Q12.4 m | `rast_gauss_t` |
| disparity | Q4.4 px, at most 15.94 | `rast_gauss_t` |
| transmittance | Q1.16 (65536 = 1), `T_MIN = 7` | RU |
| alpha | 8 bit, clamped to 252 (0.99) | RU |

The exponential uses base 2: `exp(-q/2) = 2^-t`, `t = q * 1477/2048`. The
fraction of `t` indexes a 16-entry table `round(256 * 2^-i/16)` and the
integer part shifts the result; an exponent of 9 or more counts as zero.

## Modules

| module | does | published vs. chosen here |
|---|---|---|
| `nebula_pkg` | shared sizes, record types, key and exponent helpers | sizes published; formats chosen |
| `gauss_decoder` | widens 16-bit fixed-point position/scale, looks the colour up in the codebook; 1 record/cycle | decoder with codebook published; record layout chosen; the codeword is an RGB colour (no spherical harmonics) |
| `codebook_buffer` | 256 x 24-bit codeword SRAM | existence published; size chosen |
| `projection_unit` | view transform, pinhole projection, axis-aligned footprint, depth, disparity; culls outside near/far and outside the widened two-eye FoV; 3 cycles per Gaussian | unit published (from the base accelerator); internals chosen and simplified |
| `global_double_buffer` | 2 x 72 KB of projected Gaussians (3510 per half), 1 write and 4 read ports | 144 KB published; contents and ports chosen |
| `sorting_unit` | per-tile list: scans the buffer half, overlap test (right eye: mean shifted by the disparity), insertion sort in a list memory, streams the list plus EOL | the published unit is hierarchical and not described; this one is a plain insertion sort |
| `feature_buffer` | 16 KB tile list SRAM in a VRC (819 records) | published |
| `rendering_unit` | sample, threshold, alpha check, colour accumulation for one pixel | published structure; arithmetic chosen |
| `stereo_reproj_unit` | files used Gaussians into stereo-buffer rows by disparity; writes EOL marks | published |
| `stereo_buffer` | four circular FIFO rows, 4 KB each | published |
| `merge_unit` | 4-way merge of the row heads with duplicate removal | published |
| `vrc` | 16 RUs, feature buffer, "Left?" mux, SRU, stereo buffer, merge unit, tile-order controller | published; how the first three right tiles are placed is chosen |
| `nebula_top` | the whole client accelerator | organisation published; frame hand-shake, VRC-to-sorter pairing and arbitration chosen |

## Interfaces of `nebula_top`

- `cam` (`cam_t`) and `alpha_th`.
  - `cam` is read while a frame loads.
  - `alpha_th` is read while a frame renders.
  - Because loading overlaps rendering, change `cam` only after the previous frame has been swapped in (`n_swaps` advanced), and keep `alpha_th` fixed.
- `cb_wr_*`: load the codebook before the first frame.
- `g_valid / g_ready / g_data / g_last`: compressed Gaussians of one frame (128-bit `comp_gauss_t`); `g_last` marks the final one. A frame must hold at least one Gaussian.
- `tile_valid / tile_ready`: one finished tile per transfer.
  - `tile_right` gives the eye, `tile_tx / tile_ty` the tile, and `tile_px[16]` the pixels in row-major order inside the tile.
  - Tiles of different rows and eyes interleave.
  - `frame_done` pulses after the last tile of a frame.
- Event counters: frames, swaps, overlap cycles, culled Gaussians, buffer overflow, list overflow, left / independent-right / stereo-right tiles, SRU writes and drops, merge duplicates, and broadcasts.

## Timing

- Decoder: one Gaussian per cycle.
- Projection: 3 cycles per Gaussian per unit, four units.
- Sorting unit, per tile request:
  - scan: one cycle per Gaussian in the frame;
  - insertion: 3 cycles per hit, plus 2 per entry moved;
  - emission: 3 cycles per list entry.
- VRC:
  - loads the list: one cycle per entry;
  - renders: one Gaussian per cycle, broadcast to all 16 RUs;
  - hands the tile out: 1 cycle;
  - merged right tile: one cycle per entry of its four lists, plus 2.

The sorter is the bottleneck of this implementation, because it scans the
whole frame for every tile. The published frame rate (about 70 FPS with 128
RUs) relies on the hierarchical sorter, which is not reproduced.

## Departures and limits

- **Sorting**: correct lists, not the published sorting hardware or its throughput.
- **Projection**:
  - the footprint is axis-aligned, so the conic is diagonal (`cb = 0`);
  - the 3D covariance rotation is not done;
  - colour is view-independent.
  - The RUs do support a full conic.
- **Frame size**: a frame must fit one buffer half (3510 projected Gaussians).
  - The excess is counted in `n_gbuf_drops` and lost.
  - Real scenes put hundreds of thousands to millions of Gaussians in view.
  - The published pipeline streams them through DRAM, which is not built here.
- **Where the re-projection happens**: the disparity is computed once per Gaussian in the projection unit, as part of the widened-FoV cull, and carried in the record. The SRU only uses it to choose the list, and the RU adds it to the x mean for right-eye tiles. The published description places the re-projection in the SRU; the resulting right-eye mean is the same.
- **Right tiles straddling a tile boundary**: see above.
- **Cloud side**: not part of this RTL. The level-of-detail search, the
  reuse-window management, compression and the client-side subgraph update
  produce the compressed Gaussian stream this accelerator consumes.

## Verification

Each module has a self-checking testbench in `tb/` that compares against
independent reference models in `tb/tb_ref_pkg.sv`. These are plain integer
arithmetic on `longint`: the pixel blend, the projection, list building, and
stereo lists built from the left tiles' alpha checks. `tb/tb_cam_pkg.sv` sets
up stereo cameras and random compressed Gaussians.

| testbench | what it checks |
|---|---|
| `tb_rendering_unit` | random tiles vs. the reference blend, `used` flags |
| `tb_stereo_buffer` | four FIFOs against queues, flags, random traffic |
| `tb_stereo_reproj_unit` | row choice, EOL marks, edge tiles, drop policy |
| `tb_merge_unit` | merge order, duplicate removal, cycle count |
| `tb_feature_buffer`, `tb_codebook_buffer`, `tb_global_double_buffer` | memories, read latency, half separation |
| `tb_gauss_decoder` | widening, codebook colour, one record per cycle under back-pressure |
| `tb_projection_unit` | 3000 Gaussians at full resolution, yawed and translated cameras, culling, 3-cycle latency |
| `tb_sorting_unit` | lists vs. the reference for both eyes, overflow with a 16-entry list, stalls |
| `tb_vrc` | tile order and pixels of 12 rows, left, independent-right and merged-right tiles, counters |
| `tb_nebula_top` | 32x16 image, 3 frames back to back, every tile of both eyes vs. the reference, and that each mechanism occurs |
| `tb_nebula_top_full` | the top at its default size (2064x2208, 8 VRCs): one full frame, every tile checked |

The end-to-end test requires each mechanism to occur at least once, or it
counts a failure:
- codebook decode;
- culling;
- Gaussians kept only by the widened field of view;
- list overflow;
- independent right tiles;
- merged right tiles;
- SRU writes;
- right-eye list entries saved;
- buffer swaps;
- loading overlapped with rendering.

Run one with plain verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/nebula_pkg.sv tb/tb_ref_pkg.sv tb/tb_cam_pkg.sv \
  rtl/codebook_buffer.sv rtl/gauss_decoder.sv rtl/projection_unit.sv \
  rtl/global_double_buffer.sv rtl/sorting_unit.sv rtl/feature_buffer.sv \
  rtl/stereo_buffer.sv rtl/merge_unit.sv rtl/rendering_unit.sv \
  rtl/stereo_reproj_unit.sv rtl/vrc.sv rtl/nebula_top.sv tb/tb_nebula_top.sv \
  --top-module tb_nebula_top -Mdir obj -o sim && obj/sim
```

Every testbench ends with `TB_RESULT checks=N failures=M`. The full-size
frame takes about 2 million cycles and under half a minute of simulation.

## Changing it

- Sizes live in `nebula_pkg` and as module parameters. The parameters include
  `W_PX`, `H_PX`, `NVRC`, `NSU`, `NPU`, `GB_BYTES`, `FB_DEPTH` and
  `CB_ENTRIES` on the top, and `LIST_MAX` on the sorter.
- `NVRC` must be a multiple of `NSU`.
- The tile size (4) and the four stereo rows are tied to the 16 px disparity
  bound. Changing them means revisiting `disp_tiles` and the SRU's target
  range.
