# ASDR: a CIM accelerator for hash-grid neural rendering, in SystemVerilog

Neural radiance fields render a pixel by marching a ray through the scene,
evaluating a small neural network at every sample point (192 points per
ray here) and compositing the returned densities and colors. In
hash-grid models (Instant-NGP), each point is first encoded by looking up
and interpolating feature vectors in 16 embedding tables of increasing
resolution. Most of the time therefore goes to three things:

* irregular, conflicting reads of the embedding tables;
* the two MLPs, run at every point;
* the sheer number of points.

This RTL implements an accelerator that attacks all three, in the edge
configuration of ASDR:

* **Fewer points per pixel (adaptive sampling).** A coarse grid of pixels is
  rendered at the full 192 points. The same pass also renders each of them
  with 96, 48, 24 and 12 points. The smallest count whose color stays within
  a threshold of the full render is kept. Every other pixel takes a count
  interpolated from its four grid neighbours.
* **Fewer color evaluations (density/color decoupling).** Along a ray,
  neighbouring points have nearly the same color. Only the first point of
  each group of 2^n points runs the color network. The others are given a
  linear interpolation between the group's first point and the next
  group's first point. Density is still computed at every point.
* **Fewer and conflict-free table reads (data reuse and mapping).** The four
  coarse tables are small enough to be stored without hashing, as
  several copies with a bit layout that puts the 8 vertices of a cube in 8
  different crossbars. Recently read entries are kept in small register
  caches. The tables and the MLP weights sit in ReRAM crossbars, and the
  MLPs are computed in the crossbars themselves (computing in memory, CIM).

## Top level and dataflow

`asdr_top` holds three engines and a controller:

```
 ray bus ──► asdr_controller ──points──► encoding_engine ──features──► mlp_engine ──σ, rgb──► render_engine
   ▲          │  phase I / II             hybrid_addr_gen                density net             dc_buffer
   │          │  sample-count table       sync_fifo (address buffer)    color net (skippable)    approx_unit
   │          ◄──────────── code, pixel ── embed_fetch: reg_cache,                                rgb_unit
 pixel port ◄─┘                            mem_xbars, embed buffer                                 adaptive_sample_unit
                                          fusion_unit
```

A frame begins with a `start` pulse and ends with `frame_done`:

1. **Phase I.** The controller asks the host for the rays of the grid pixels
   `(k·d, l·d)`. It continues until the grid covers the last column and row.
   Each ray is rendered at 192 points. The adaptive sampling unit returns a
   code `r` (the ray needs `192 >> r` points), which is stored in a 400×400
   table.
2. **Phase II.** Every pixel is rendered in raster order. Its count is
   `S = Σ w·(192 >> r_corner)`, where `w = (d−fx)(d−fy)`, `fx(d−fy)`, … are
   the bilinear weights of its four grid corners. The pixel uses the
   smallest allowed count `192 >> r` with `(192 >> r)·d² ≥ S`. Scaling by
   `d²` avoids a divider. Point `j` of the ray is `p0 + (j << r)·dp` and the
   spacing is `δ0 << r`, so a reduced ray reuses every 2^r-th point of the
   full one. The pixel leaves through the pixel port.

The controller keeps one ray in flight. It issues the ray's points in pairs
to the encoding engine. Each point carries its index and a `need_color`
flag, set for `j mod 2^n = 0`. The encoded points go through the MLP
engine, and the results are written into the render engine's
density & color buffer. Once all `m` results of the ray are in, the render
engine walks the ray at one point per cycle:
* it approximates the missing colors;
* it composites five renders at once (every 1st, 2nd, 4th, 8th and 16th
  point);
* two cycles later it returns the pixel and the code.

Host interface:

| Port group | Meaning |
|---|---|
| `tbl_we/waddr/wdata` | writes one 16-bit embedding entry; address = `{level[3:0], index[15:0]}`; also flushes the caches |
| `w_en/net/layer/pe/row/data` | writes one 64-bit row of a CIM PE (`net` 0 density, 1 color) |
| `ray_req_*` / `ray_rsp_*` | valid/ready: the design asks for pixel `(x, y)`; the host answers with `p0[3]`, `dp[3]` (Q0.16, unit cube) and `δ0` (Q4.8) |
| `pix_*` | valid/ready: final pixel `(x, y, rgb)` |
| `cfg_*` | image size, grid pitch `d` (2..15), group size `2^n_log2` (1, 2, 4), threshold, requantisation shifts |
| `cnt_*` | statistics: cache hits, crossbar rows read, conflict cycles, color-network runs and bypasses, approximated points, grid rays, pixels rendered with fewer than 192 points |

## Embedding tables: address generation and conflicts

There are 16 levels, with grid resolution `N_l = ⌊16·2^(l/3)⌋` = 16, 20,
25, 32, …, 512. Each level has a table of 2^16 entries of two int8
features, giving 2 MB in total. A memory crossbar holds 64 consecutive
entries and can return one row per cycle. The whole memory is one array
(`mem_xbars`) with 16 read ports. An assertion enforces the
one-row-per-crossbar rule that the scheduler guarantees.

**Coarse levels (0–3: 16³, 20³, 25³, 32³)** fit a table without hashing.
`lowres_unit` builds the address from bits, with `cb = ⌈log2 N⌉`:

```
 addr = { copy | x[1:0] y[1:0] z[1:0] | x[cb-1:2] y[cb-1:2] z[cb-1:2] }
          ^ high bits                      ^ 64-entry crossbar boundary below the low six bits
```

The two low bits of each coordinate lie above the crossbar boundary. The
eight vertices of any cube therefore fall into eight different crossbars.
For example, vertices (6,10,4), (6,11,4), (6,10,3) and (6,11,3) of the
16³ table land in crossbars 40, 44, 43 and 47. The free high bits select a
copy of the table: 16 copies at level 0 and 2 at levels 1–3. The copy is
chosen by the point lane, so the two points of a pair do not collide
either.

**Fine levels (4–15)** use the spatial hash
`(x·1 ⊕ y·2654435761 ⊕ z·805459861) mod 2^16` (`hash_unit`).

**Lookup (`embed_fetch`).** Every cycle, each of the 16 lanes that still
waits does the following:
* It first searches the register cache of its level. `reg_cache` is used at
  levels 0–3 only: 8 entries each (32 in all), with an all-to-all compare
  and LRU replacement.
* A lane that misses asks the crossbars. It is granted unless a
  lower-numbered waiting lane wants a different row of the same crossbar.
  Lanes that want the same row share one read.
* Rows read at levels 0–3 are inserted into the cache.

A batch with no conflicts completes in one cycle, and 16 lanes in one
crossbar take 16 cycles. The batch waits in the embed buffer until all 16
entries are in. `fusion_unit` then interpolates trilinearly (weights
`(256−f)` or `f` per axis, floor of the sum over 2^24). The two features
of level `l` go to positions `2l` and `2l+1` of the 32-entry encoding.

## MLPs in computing-in-memory crossbars

Each CIM PE (`cim_pe`, a behavioural model of the analog array) is a 64×64
crossbar of single-bit cells. One-bit inputs drive the rows. Each column's
count of conducting cells is converted by a 5-bit ADC, which saturates
at 31.

A layer (`cim_layer`) stores int8 weights bit-sliced: bit `k` of `W[o][i]`
sits in row `i`, column `8·(o mod 8)+k` of PE `⌊o/8⌋`. The int8 input is
applied one bit plane per cycle. The accumulation units form

```
 y[o] = Σ_b s_b 2^b Σ_k s_k 2^k · adc_b[8·(o mod 8)+k],   s_7 = −1, otherwise +1
```

This is exact when no column count exceeds 31. Otherwise the ADC clips, as
in the hardware. A layer takes 8 bit-serial cycles plus 1, and the
sub-engine adds 1 for its activation unit.

* **Density network** (`mlp_subengine`, 32→64→16): ReLU and a shift on the
  hidden layer, then int8 outputs; σ = clamp(y0, 0, 255). Latency 21 cycles.
* **Color network** (16→64→64→3): a hard sigmoid `clamp((y >> s) + 128)`.
  Latency 31 cycles.

`mlp_engine` runs the density network on every point. It sends only the
points that carry `need_color` on to the color network; the others bypass
it.

## Rendering arithmetic

* **Approximation.** For point `j` of group `[a, a+n)` the color is
  `c_a + ⌊(c_{a+n} − c_a)·(j−a)/n⌋`. The last group of a ray has no end
  point and keeps `c_a`.
* **Compositing (`rgb_unit`).** It uses `α = 1 − e^{−σδ}` and
  `C += T·α·c`, then `T ← T·(1−α)`, with T and α in Q0.16 and C in Q8.16.
  `e^{−x}` is computed as `2^{−x·log2 e}`: the integer part is a shift and
  the fraction uses the quadratic `1 − 0.6565f + 0.1606f²`. This is within
  about 1 % of full scale. Render `r` takes every 2^r-th point with
  `δ << r`. Render 0 is the pixel.
* **Adaptive choice.** The unit computes
  `rd_i = max_ch |C_0 − C_i|` on 16-bit colors (1/256 of an 8-bit step). The
  code is the largest `i` with `rd_i ≤ thr`, i.e. the fewest points, or 0.

## Where this RTL departs from the published design

* **Table size.** Each table has 2^16 entries, not 2^19, so that the memory
  is the 2 MB of the edge configuration. Low-resolution copies and the
  crossbar size follow from that.
* **Parallel units.** One point per cycle in the approximation and RGB
  units, one point at a time in the MLP engine (no pipelining across
  points) and one ray in flight. The published edge configuration lists 4
  approximation, 2 RGB, 8 fusion and 2 adaptive-sampling units. The results
  are the same; only the throughput differs.
* **Buffers.** The published edge configuration has 64 KB of buffers. Here
  the buffers hold exactly what the dataflow needs:
  - 4 level batches in the address buffer;
  - one batch in the embed buffer;
  - one ray (192 points) in the density & color buffer;
  - 400 × 400 three-bit codes in the sample-count table.
* **The view direction is not encoded**, and the color network sees only
  the density features.
* **Choices not fixed by the design:**
  - number formats and activation functions;
  - the cache split (8 entries for each of the 4 coarsest tables);
  - the arbitration order;
  - the bus protocol;
  - the rounding of interpolated counts to the next allowed count;
  - the set of reduced counts (192/2^i).
* The server configuration (larger tables, more units) and the early
  ray termination variant are not built.

## Verification

Every module has a self-checking testbench in `tb/` that compares it with
an independent reference model (`tb/asdr_ref_pkg.sv`: integer arithmetic,
bit loops, popcounts). The testbenches also check cycle counts where the
design fixes them:
* a conflict-free lookup takes 1 round, a 16-way conflict 16;
* a CIM layer is done 9 cycles after start;
* the sub-engines take 21 and 31 cycles.

`tb_asdr_top` runs the full-size design with no parameter overrides. It
writes all 2^20 table entries and the weights of both networks, then
renders a 5×4 frame with d = 2 and groups of 4. Every pixel is compared
with the reference. The test also requires each mechanism to occur: cache
hits, crossbar conflicts, color runs and bypasses, approximated points,
grid rays, the phase switch and reduced pixels. It takes about 2 minutes
of simulation after a few minutes of C++ compilation.

Simulate a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -j 8 --top-module tb_render_engine \
    rtl/asdr_pkg.sv tb/asdr_ref_pkg.sv $(ls rtl/*.sv | grep -v asdr_pkg) tb/tb_render_engine.sv
./obj_dir/Vtb_render_engine
```

Each testbench prints `TB_RESULT checks=<n> failures=<n>`.
