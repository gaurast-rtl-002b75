# A triangle rasterizer that also splats Gaussians

Rendering a 3D Gaussian Splatting (3DGS) scene comes down to one inner loop. For every pixel of a
screen tile, walk a depth-sorted list of 2D Gaussians. For each one, compute how opaque it is at
that pixel, then blend its colour in front to back. On a GPU this loop runs on the general-purpose
shader cores, and it takes most of the frame time. Meanwhile the GPU's fixed-function triangle
rasterizer sits idle.

That rasterizer already has most of what the loop needs, because a triangle rasterizer runs the same
kind of loop:

| | triangle mode | Gaussian mode |
|---|---|---|
| input per primitive | 9 numbers: three vertices (x, y, z) | 9 numbers: centre (x, y), inverse covariance (a, b, c), opacity, RGB |
| step 1 | shift the vertices to the pixel | shift the centre to the pixel |
| step 2 | edge functions and inside test (needs a divide) | Gaussian weight (needs an exponent) |
| step 3 | barycentric weights (u, v) | opacity times colour |
| step 4 | keep the nearest hit (depth test) | accumulate colour, update transmittance |
| output per pixel | 3 numbers: u, v, depth | 3 numbers: R, G, B |

Both modes use the same number of inputs and outputs. Both are mostly floating-point multiplies and
adds. So one processing element (PE) can do either: a mode bit picks the operands of a shared pool
of FP32 units. Only a divider (triangle only) and an exponent unit (Gaussian only), plus a few
adders and multipliers, belong to one mode.

This RTL builds one such enhanced rasterizer with 16 PEs. The shader cores do the rest of 3DGS:
projection, binning into tiles and depth sorting. They leave the sorted primitive lists in memory,
and the rasterizer turns them into finished tiles.

## Block structure

```
            memory bus (32-bit words)
                   |
          +--------+---------+        descriptors
          |  mem_interface   |<-------------------> top_controller
          +--------+---------+                        |  sel, start, first/last
    primitive words|  ^ pixel words                   |
                   v  |                               |
              +----+--+----+                          |
              |  tile_mux  |<-------------------------+
              +-+--------+-+
                |        |
        tile_buffer A  tile_buffer B     (ping-pong)
                |        |
              +-+--------+-+
              |  tile_mux  |  (PE side)
              +-----+------+
                    |
   +----------------+------------------------------------+
   | pe_block:  dispatch_ctrl -> 16 x gaurast_pe -> result_collector |
   +-----------------------------------------------------+
```

| module | role |
|---|---|
| `gaurast_top` | top level: command/status ports and the memory bus |
| `top_controller` | walks the batch list, runs the ping-pong schedule |
| `mem_interface` | DMA engine: fetch descriptors, load primitives, store pixels |
| `tile_mux` | gives one tile buffer to the PE block and the other to the memory interface |
| `tile_buffer` | primitives of one batch (up to 1024 × 9 words) and one tile of results (256 × 3 words) |
| `pe_block` | the dispatch controller, the PEs and the result collector |
| `dispatch_ctrl` | clears the PEs, streams (primitive, pixel) pairs, starts collection |
| `gaurast_pe` | 11-stage dual-mode datapath and the state of the pixels it owns |
| `result_collector` | copies the finished tile from the PEs into the tile buffer |
| `fp_add`, `fp_mul`, `fp_div`, `fp_exp` | combinational FP32 units |
| `gaurast_pkg` | shared types: `prim_t` (9 × FP32), `pix_t` (3 × FP32), modes, field indices |

## The processing element

Each PE owns 16 of the tile's 256 pixels: PE *i* holds tile pixels *p* with *p* mod 16 = *i*.
Slot *k* of the PE is pixel *p* = 16*k* + *i*, at x = tile_x + *p* mod 16 and
y = tile_y + *p* div 16. Pixel centres are taken at integer coordinates.

Every cycle a PE can accept one primitive paired with one of its slots. The pair goes through an
input register and 11 pipeline stages, one level of FP logic per stage. The slot's state is
updated 12 cycles after the pair was issued.

Gaussian mode computes

    alpha = o · exp(−½(a·dx² + c·dy²) − b·dx·dy),   C += T·alpha·rgb,   T ← T·(1 − alpha)

where (dx, dy) is the pixel minus the centre and (a, b, c) is the inverse 2D covariance
(the "conic"). The stages are:

1. shift
2. squares and the cross term
3. conic products
4. sum
5. halve
6. subtract the cross term
7. exponent
8. opacity
9. alpha·rgb and 1 − alpha
10. multiply by T
11. accumulate

Triangle mode computes three edge functions w0, w1, w2 from cross products of the vertices
relative to the pixel. The area is w0 + w1 + w2. The pixel is inside when all three edge
functions have the sign of the area. Both windings are accepted and edges count as inside. Then
u = w1/area, v = w2/area and depth = z0 + u(z1 − z0) + v(z2 − z0). The slot keeps (u, v, depth)
of the nearest covering triangle. A cleared slot holds depth = +∞.

Operand multiplexers steer the operands by mode. A unit the current mode does not use gets
zero operands, so it does not toggle. The pool holds:

| unit | used by both modes | Gaussian only | triangle only |
|---|---|---|---|
| multipliers (15) | 10 | 5 | |
| adders (15) | 8 | | 7 |
| exponent unit (1) | | 1 | |
| divider (1) | | | 1 |

**Hazard rule.** The transmittance T is read in stage 10 and written in stage 11. The same slot
must therefore never be issued on two cycles in a row. The dispatch order guarantees this as
long as a PE owns at least two pixels, and an assertion checks it.

## Dispatch and collection

The dispatch controller takes one batch of primitives from the PE-side tile buffer. It handles
them one after another, in buffer order, which is front to back:

1. On the first batch of a tile it pulses `clear` to every PE.
2. For each primitive it reads the 9 words once. It then broadcasts them to all 16 PEs over 16
   cycles, one slot index per cycle.
3. The tile buffer read is synchronous, so the valid and slot signals are delayed by one cycle to
   line up with the data.

A batch of *n* primitives therefore takes about 16·*n* cycles plus a 12-cycle drain. That is
256 primitive-pixel operations per 16 cycles, one per PE per cycle.

On the last batch of a tile, once the pipelines have drained, the result collector copies the
256 pixels into the tile buffer. It writes one pixel per cycle in raster order. The memory
interface later stores them from there.

## Batches, descriptors and the ping-pong schedule

Work is a list of batches in memory. Each batch has a 4-word descriptor:

| word | contents |
|---|---|
| 0 | bit 31: first batch of its tile; bit 30: last batch of its tile; bits 15:0: primitive count |
| 1 | word address of the primitives (9 words each, in the order of `gaurast_pkg`) |
| 2 | tile origin in pixels: y in bits 31:16, x in bits 15:0 |
| 3 | word address for the tile's 256 × 3 result words (used on the last batch) |

A tile with more than 1024 primitives is split into several batches. The PEs keep their pixel
state from the `first` batch to the `last`. If a count is above 1024, the batch is cut to 1024
and the sticky `overflow` output is set.

The two tile buffers alternate roles. In each phase the PE block computes on buffer `sel`.
Meanwhile the memory interface works on the other buffer:

1. store the tile results it holds, if any;
2. fetch the next descriptor;
3. load that batch's primitives.

When both sides are finished, `sel` flips. Loading batch *i*+1 and storing tile *i*−1 are thus
hidden behind the computation of batch *i*. `done` pulses when every batch has been computed and
every result stored.

Start a run by pulsing `start` with `mode`, `num_batches` and `desc_base`. All batches of one run
use the same mode. Switching mode between runs is free: nothing is reconfigured but the operand
multiplexers.

## Memory bus

The bus addresses 32-bit words. It has a request channel with `valid`/`ready`. A request must
stay unchanged until it is accepted, and an assertion checks this. Read responses come back in
order, with no back-pressure. Writes are posted.

Reads are issued back to back, with any number outstanding. Stores read the tile buffer first,
so they move at most one word every two cycles. Each pixel is stored as three words, pixel-major,
in raster order.

## Numbers

All arithmetic is FP32, round to nearest even. Subnormal inputs and results are flushed to zero.
NaN is not produced or handled, and infinities only where noted (x/0, the cleared depth).

`fp_exp` uses range reduction: *x*·log2(e) is split into an integer *n* and a fraction *f* with
|*f*| ≤ ½. 2^*f* is computed as a degree-5 polynomial in fixed point. The relative error is
about 3·10⁻⁶. Arguments below about −87 give zero.

## Where this departs from the original design

- **Floating-point units.** The original uses vendor FP32 IP. These four units are written here
  and are combinational, one per pipeline stage. Nothing was timed against the original's
  1 GHz target.
- **Unit counts.** The original reuses 9 adders and 9 multipliers of the triangle datapath and
  adds 2 adders, 1 multiplier and 1 exponent unit for Gaussians. This pipeline instead gives
  every operation its own unit at one pixel per cycle. Its counts are in the PE table above and
  are larger. The split into shared and single-mode units has the same shape.
- **No 3DGS shortcuts.** The reference 3DGS software clamps alpha at 0.99, skips Gaussians with
  alpha below 1/255 and stops a pixel once T is tiny. None of these is built, so results differ
  slightly from that software.
- **Triangle stage.** It covers the inside test, barycentrics and depth test with a depth-only
  output of (u, v, depth). Attribute interpolation, texturing and the rest of a GPU's triangle
  pipeline are not included.
- **Own choices.** Tile size (16 × 16), buffer capacity (1024 primitives), the descriptor format,
  the bus and the pixel-to-PE mapping are this design's. The original does not give them.
- **Outside this RTL.** The scaled-up system (several rasterizer instances in a GPU, fed by its
  shader cores and L2 cache) is not built. The shader cores' preprocessing and sorting are not
  built either.

## Verification

Every module has a self-checking testbench in `tb/`. Each one:

- compares against values computed independently in `real` arithmetic;
- ends with the line `TB_RESULT checks=N failures=M`;
- has a cycle watchdog.

`tb/tb_fp_pkg.sv` converts between `real` and FP32 bit patterns. `tb/mem_model.sv` is a
behavioural memory with a 6-cycle read latency and random request stalls.

| testbench | what it covers |
|---|---|
| `tb_fp_add`, `tb_fp_mul`, `tb_fp_div`, `tb_fp_exp` | thousands of random and corner operands each |
| `tb_gaurast_pe` | 12-cycle latency; random Gaussians blended over all slots; random triangles with nearest-hit and +∞ checks; input gating of the divider and exponent unit |
| `tb_dispatch_ctrl` | issue order, clear and collect handshakes, first/middle/last batches |
| `tb_result_collector` | pixel-to-PE mapping, one write per pixel |
| `tb_pe_block` | a full tile in both modes against a reference |
| `tb_tile_buffer`, `tb_tile_mux` | port behaviour and buffer steering |
| `tb_mem_interface` | all three DMA commands under random stalls |
| `tb_top_controller` | batch sequencing, the ping-pong schedule, overflow |
| `tb_gaurast_top` | end to end at the default size |
| `tb_scene_gauss` | a 48×32 3DGS frame: 1400 Gaussians binned by radius, depth-sorted, split into 1024-primitive batches; every pixel checked; PE utilisation |
| `tb_scene_tri` | a 48×32 frame of a 192-triangle height-field mesh behind 40 overlapping triangles; every pixel's nearest hit checked |

`tb_gaurast_top` runs two jobs:

1. Gaussian mode over 3 batches. One tile is split over two batches.
2. Triangle mode with a batch of 1100 triangles, which overflows to 1024.

It checks every stored pixel against a reference model. It also counts the mechanisms: buffer
swaps, continued batches, requests overlapped with computation, bus stalls, the overflow, and
the mode switch. A failure is counted for any of these that never happened.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/gaurast_pkg.sv tb/tb_fp_pkg.sv tb/tb_gaurast_top.sv --top-module tb_gaurast_top
./obj_dir/Vtb_gaurast_top
```

Replace the testbench name to run any other. The full top-level run takes about a minute,
including compilation.

`tb_scene_gauss` shows what the ping-pong schedule achieves and where it stops helping. Over its
frame the PEs are busy about 72% of the time. Without overlap, loading a primitive (9 bus cycles
at best) would come on top of its 16 compute cycles, capping utilisation at 64%.

The remaining idle time comes from short batches. When a tile's list is split 1024 + 19, the
second batch computes for only about 300 cycles. Meanwhile the other buffer must store a tile and
load the next full list, so the PEs wait. A tile binner that balances batch sizes would recover
most of this.
