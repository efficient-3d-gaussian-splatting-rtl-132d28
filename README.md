# A sort-free 3D Gaussian Splatting rasterizer in SystemVerilog

This is the RTL of a rendering engine for 3D Gaussian Splatting (3DGS). It takes the
Gaussians that a host has already projected to the screen and produces the image. It
differs from a conventional 3DGS rasterizer in two ways.

1. **No depth sort.** Standard 3DGS blends the Gaussians of a pixel front to back.
   That needs every tile's list sorted by depth, and on an edge device the sort costs
   more than the blending. Here each Gaussian's contribution is instead weighted by a
   decay factor `F(d)` of its depth `d`. `F` is a tiny learned network. The pixel
   colour becomes a normalised weighted sum, and a sum does not depend on order:

       C = sum_i F(d_i) * alpha_i * c_i  /  sum_i F(d_i) * alpha_i

   `F` is a 1-3-1 perceptron: three hidden units with Leaky ReLU (slope 1/8), and an
   exponential output. It has ten parameters, w1..w6 and b1..b4:

       F(d) = exp( w4*h1 + w5*h2 + w6*h3 + b4 ),   h_k = LeakyReLU(w_k*d + b_k)

2. **Axis-shared rasterization.** A Gaussian's opacity at pixel (x, y) is

       alpha = o * exp( c*dx*dy - (a/2)*dx^2 - (b/2)*dy^2 ),   dx = x - mu_x, dy = y - mu_y

   Inside a 16x16 tile only 16 different `dx` and 16 different `dy` occur.
   - Sixteen "X-PEs" each compute `c*dx` and `-(a/2)*dx^2` once per column.
   - Sixteen "Y-PEs" each compute `dy` and `-(b/2)*dy^2` once per row.
   - Each of the 256 pixel PEs then only multiplies and adds these shared terms.

The 256 pixel PEs are reconfigurable. The multipliers and adders that blend colours
in rasterization mode evaluate `F(d)` for 256 depths per cycle in MLP mode. So the
same array runs both the network and the rasterization, switching mode per subtile.

All arithmetic is IEEE half precision (FP16).

## Block overview

```
                     +------------------ gs_accel_top ----------------------------+
 tile headers  <---->|  controller ---- coord_gen (tile order, pixel coordinates)  |
 list entries  <---->|     |   \                                                    |
 depths        <---->|     |    depth_buffer (2 x 512 x {d, F})                     |
 features      <---->|  gs_feature_cache (4096 x 22 B, 4-way)                       |
                     |     |                                                        |
                     |  rpe_array: x_pe_line (16 X-PEs), y_pe_line (16 Y-PEs),      |
                     |             16 broadcast_reg, 16x16 rpe                      |
                     |     |  accumulators {sum F*alpha, sum F*alpha*R, G, B}        |
                     |  pixel_output_buffer (2 x 256 x 4 FP16)                      |
                     |     |                                                        |
 pixels        <-----|  div_array (4 x fp16_div)                                    |
                     +------------------------------------------------------------+
```

| file | what it is |
|---|---|
| `gs_pkg.sv` | types: `fp16_t`, the Gaussian feature struct, list entry, MLP weights, broadcast register, pixel accumulators; `MLP_LAT`, `RAS_LAT` |
| `fp16_add`, `fp16_mul`, `fp16_div`, `fp16_exp`, `leaky_relu` | combinational FP16 units |
| `x_pe`, `x_pe_line`, `y_pe`, `y_pe_line` | shared-term generators |
| `rpe` | one reconfigurable pixel PE |
| `broadcast_reg` | the ten-value register that feeds one PE row |
| `rpe_array` | 16x16 PEs, the two PE lines, 16 broadcast registers, operand alignment |
| `coord_gen` | tile scheduler and pixel coordinate generator |
| `gs_feature_cache` | on-chip cache of projected Gaussians |
| `depth_buffer` | depths and decay factors of two subtiles |
| `pixel_output_buffer` | accumulators of two tiles |
| `div_array` | final normalisation, four divisions per cycle |
| `controller`, `sync_fifo` | sequencing of the whole flow, and a list-entry FIFO |
| `gs_accel_top` | the top level |

The default parameters are the sizes the design targets:

| part | size |
|---|---|
| PE array | 16x16 |
| feature cache | 88 KB: 4096 lines of 22 B |
| depth buffer | 4 KB: 2 banks x 512 entries x (d + F) |
| pixel output buffer | 4 KB: 2 x 256 pixels x 4 FP16 |
| division array | four dividers |

## The rasterization pipeline and its timing

This is the part that needs the most care. Four things must meet in the same cycle at
each pixel PE:
- the shared terms from the two PE lines;
- the opacity, decay factor and colour of the Gaussian, from the row's broadcast
  register;
- the accumulators.

A Gaussian `i` enters `rpe_array` in cycle T. It carries its nine FP16 features
(`mu_x, mu_y, -a/2, -b/2, c, o, R, G, B`) and its `F(d_i)`:

| cycle | where | operation |
|---|---|---|
| T | X-PE line | `dx = x - mu_x` |
| T+1 | X-PE / Y-PE line | `c*dx` and `dx^2`; Y line starts: `dy = y - mu_y` |
| T+2 | X-PE / Y-PE line | `-(a/2)*dx^2`; `dy^2` |
| T+2 | PE | M-1: `(c*dx)*dy` |
| T+3 | Y-PE line | `-(b/2)*dy^2` |
| T+3 | PE | A-1: `+ -(a/2)dx^2` |
| T+4 | PE | A-2: `+ -(b/2)dy^2` (the exponent is complete) |
| T+5 | PE | E: `exp(...)` |
| T+6 | PE | M-2: `alpha = o * exp` |
| T+7 | PE | M-3: `F * alpha` |
| T+8 | PE | A-3: `den += F*alpha`; M-4-k: `F*alpha*{R,G,B}` |
| T+9 | PE | A-4-k: `num_k += ...` |

The Y line starts one cycle after the X line. The X-PE's extra multiplication by `c`
then lines up, so `c*dx` and `dy` arrive together. Each unit is followed by a
register. A Gaussian's contribution is in the accumulators ten cycles after it entered
(`RAS_LAT`), and the array accepts a new Gaussian every cycle.

Each row's broadcast register is reloaded every cycle, so it holds operands of three
different Gaussians at once:
- the opacity of the Gaussian now at the M-2 stage;
- the `F(d)` of the one at M-3;
- the colour of the one at M-4.

Seen from the loading side, this is `o` of Gaussian i+2, `F` of i+1 and `R,G,B` of i.
`rpe_array` delays the incoming feature record with a register chain so that each
field is taken from the right stage.

A valid bit travels with every Gaussian, so bubbles (cycles with no Gaussian) never
touch the accumulators. `busy` stays high while any valid Gaussian is in flight.

## MLP mode

MLP mode is one cycle per row of 256 depths, 6 cycles of latency (`MLP_LAT`):

| cycle | operation |
|---|---|
| 0 | M-4-k: `w_k*d` |
| 1 | A-4-k: `+ b_k` |
| 2 | Leaky ReLU, then M-1..3: `h1*w4`, `h2*w5`, `h3*w6` |
| 3 | A-1: `M1+M2`; A-3: `M3+b4` |
| 4 | A-2: `A1+A3` |
| 5 | E: `exp` |

Leaky ReLU needs no multiplier. For a normal negative number, dividing by 8 is
subtracting 3 from the exponent field. Zero, subnormals, positive numbers, infinities
and NaN pass unchanged. A negative number whose exponent field is 3 or less would leave
the normal range, so it becomes -0.

In this mode the ten broadcast-register units hold w1..w6 and b1..b4, loaded in one
cycle (`ld_w`).

The accumulator adders A-3 and A-4-k are reused as MLP adders. A tile's partial sums
therefore cannot stay in the PEs across an MLP phase:
- The controller saves all 256 x 4 accumulators into the pixel output buffer after
  each subtile.
- It restores them (`acc_ld`) when switching back to rasterization.
- The first subtile of a tile clears them instead (`acc_clr`).

The paper behind this design does not say how partial sums survive MLP mode; this
save/restore is this design's solution.

## Tiles, subtiles and the interleaved pipeline

A tile's Gaussian list can be any length: a few dozen, or thousands. The depth
buffer holds 512 Gaussians per bank, so the controller cuts each list into subtiles of
at most 512 consecutive entries. For every tile, in the scheduler's order:

1. Read the tile header `{list base address, n}`.
2. For subtile s:
   1. Wait until its depths are in depth-buffer bank `db`. For s = 0 the controller
      requests them here. For later subtiles they were loaded during the previous
      subtile's rasterization.
   2. One cycle to switch to MLP mode and load the weights.
   3. Stream the bank's depth rows, `ceil(n_s/256)` cycles. Write `F(d)` back into
      the same bank `MLP_LAT` cycles later.
   4. One cycle to switch back: clear (s = 0) or restore the accumulators. In the
      same cycle, start loading the depths of subtile s+1 into the other bank.
   5. Rasterize: the list entries stream in. Each goes through the feature cache to
      the array, together with `F(d)` read from the depth buffer at the entry's index
      in the subtile.
   6. When the array has drained, save the accumulators to the tile's bank of the
      pixel output buffer.
3. Hand that bank to the division array and go on with the next tile. The division
   (192 cycles: 768 divisions, four per cycle) overlaps with the next tile. The next
   tile uses the other bank, and waits only if it catches up with a division still
   running on it.

The depths for the next subtile are fetched while the current one is rasterized. So
only the first subtile of a tile exposes DRAM latency. The MLP phase itself costs two
cycles of rows per full subtile plus the pipeline fill.

## The feature cache

The Gaussians are stored in 32-bit list entries: a 28-bit Gaussian ID and a 4-bit
count of the tiles that Gaussian touches. Each cache line holds the nine FP16
features, the ID as tag and a 4-bit counter, 22 bytes in all.

The counter is read as "visits still to come":
- A fill stores count-1.
- Each hit decrements it.
- On a miss, the victim is an invalid way if there is one, else the way with the
  smallest remaining count.

So a Gaussian that no later tile needs is the first to go. The cache is 4-way set
associative, indexed by the low ID bits, and is invalidated at the start of each
frame.

A hit returns the feature one cycle after the request. A miss blocks the cache until
DRAM answers; only one fetch is outstanding. The rasterizer stalls for that time. The
`stat_stall_cycles` counter shows how much this costs.

## Tile order

A row-by-row walk only reuses Gaussians shared with the left neighbour. The scheduler
instead keeps nearby tiles close in time:
- The image is cut into 8x8-tile blocks.
- Inside a block, tiles follow a Hilbert curve, starting at the top-left tile and
  ending at the top-right one.
- Blocks are visited in serpentine order: left to right, then right to left.
- Tiles outside whole blocks (right and bottom strips) follow last, in a serpentine
  row order.

The coordinate generator also drives the sixteen x and sixteen y pixel coordinates of
the current tile, as FP16 integers `16*tile + k`.

## Top-level interface

The top-level interface is everything on `gs_accel_top`. All ports are synchronous to
`clk`, and `rst_n` is an asynchronous, active-low reset.

- **Frame control.** Pulse `start` with `tiles_x`, `tiles_y` (at most 255 each) and
  `mlp_w` stable. `done` pulses after the last pixel has left.
- **Tile headers.** `hdr_req_*` carries the tile index `ty*tiles_x + tx`. The reply on
  `hdr_rsp_*` is `{base, num}`.
- **List entries.** `lst_req_*` carries an address. The reply on `lst_rsp_*` is one
  32-bit `{count, id}` entry. Replies come in request order. Up to 16 reads may be in
  flight.
- **Depths.** `dep_req_*` carries the same list address plus a tag. The reply on
  `dep_rsp_*` returns the tag with the FP16 depth, in any order. The tag selects the
  depth-buffer bank and entry.
- **Features.** `feat_req_*` carries a Gaussian ID. The reply on `feat_rsp_*` is its
  nine FP16 features.
- **Pixels.** `pix_valid` comes with `pix_tx`, `pix_ty`, `pix_base` and four FP16
  values. Value k is element `e = pix_base + k` of the tile, which is channel `e % 3`
  (R, G, B) of pixel `e / 3`. Pixels are numbered row-major inside the tile.
- **Statistics.** Counters for cache hits and misses, tiles, subtiles, MLP rows,
  Gaussians, mode switches, stall cycles, and cycles where depth loading overlaps
  rasterization.

Response channels have no back-pressure. Request channels use valid/ready.

## Arithmetic

- **Adder and multiplier.** Round to nearest even. Subnormal inputs and results are
  flushed to zero. Overflow gives infinity.
- **Divider.** Divides the significands exactly as integers and then rounds. A zero
  denominator (a pixel that no Gaussian reaches) outputs 0.
- **Exponential.** `2^(x*log2 e)`:
  - the integer part of the product becomes the exponent;
  - the fraction is looked up in a 33-entry table of `2^(k/32)`, with linear
    interpolation;
  - the result is within one unit in the last place.

The accumulators are FP16, as in the PE datapath. For long lists, small contributions
are partly lost to rounding. In the end-to-end test (up to 687 Gaussians per tile) the
normalised colours stay within 0.006 of an exact computation.

## Where this design departs from, or goes beyond, the paper

- **y²-term timing.** The paper's timing sentence has the x²-term and y²-term arrive
  together, one cycle after the x/y terms. Here the y²-term arrives one cycle after
  the x²-term, because the Y line starts one cycle later and its PE consumes the two
  squares in successive adders (A-1, then A-2). The throughput is unchanged.
- **FP16 units.** The paper uses vendor FP16 cells. These are stand-ins with the
  rounding described above.
- **Details the paper does not specify**, all chosen here:
  - the cache organisation and replacement detail;
  - the memory interface and its handshakes;
  - the subtile size (taken as the depth-bank capacity);
  - the accumulator save/restore;
  - the single-cycle mode switches;
  - the order of output elements;
  - the Hilbert orientation inside each block.
- **Not part of this RTL:**
  - projection, colour evaluation and tile-list construction, which run on the host;
  - DRAM, which the end-to-end testbench models behaviourally.
- **Depth prefetch across tiles.** The depths of the next subtile are loaded while
  the current one is rasterized, but only inside a tile. The first subtile of every
  tile waits for its depths. Prefetching across a tile boundary would need the next
  tile's header during the current tile, and this design does not do that.
- **Feature-cache misses.** Only one miss is outstanding, and the rasterizer waits for
  it. In the end-to-end test, with DRAM latencies of 4 to 20 cycles, this is the main
  source of idle PE cycles.
- **Large images.** Pixel coordinates and Gaussian centres are FP16, as in the rest
  of the datapath. Above 2048 pixels FP16 integers are spaced by 2. A 2704-pixel-wide
  image is therefore evaluated at even x coordinates in its right quarter.
- **Clock frequency.** The design targets 1 GHz with one register after every
  arithmetic unit. It has not been synthesized to a cell library here, so timing
  closure is unverified.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog. The reference values
are computed independently in real arithmetic (`tb/fp16_ref_pkg.sv` rounds reals to
FP16).

| testbench | what it checks |
|---|---|
| `tb_fp16_*`, `tb_leaky_relu` | thousands of random and corner operands against real arithmetic |
| `tb_x_pe_line`, `tb_y_pe_line` | one Gaussian per cycle; every term at its cycle |
| `tb_rpe` | both modes, bubbles, clear/load of the accumulators, MLP latency |
| `tb_broadcast_reg` | reset, weight loading, rasterization loading, hold |
| `tb_rpe_array` | full 16x16: 120 Gaussians against the blending equation; four MLP rows against the network; both latencies |
| `tb_coord_gen` | the tile order and pixel coordinates for several image shapes, against an order built independently (inverse Hilbert mapping); Hilbert steps move between neighbouring tiles; includes the 169x127 and 98x65 tile grids of 2704x2028 and 1558x1038 images |
| `tb_gs_feature_cache` | a reduced 64-line cache against a reference model of the replacement policy |
| `tb_depth_buffer`, `tb_pixel_output_buffer`, `tb_div_array`, `tb_sync_fifo` | their storage and ordering |
| `tb_controller` | the sequencing against behavioural neighbours: list order, `F(d)` of the right bank and entry, MLP only after all depths arrived, clear/restore/save per subtile, tile lengths 0, 37, 200, 256, 512, 513 and 1300 |
| `tb_gs_accel_top` | the whole design at default parameters (see below) |

`tb_gs_accel_top` renders a 3x2-tile image. It runs about 23,000 clock cycles and
takes about a minute to build and run with Verilator.
- **Scene.** One tile holds a dense cluster of 687 Gaussians, so it is rendered as two
  subtiles. One tile is empty.
- **Memory model.** DRAM replies with random latency, depth replies come out of order,
  and request channels see random back-pressure.
- **Checks.** Every output colour is compared with the weighted-sum equation. The test
  also fails if any of these never happens:
  - cache hits;
  - cache misses;
  - a multi-subtile tile;
  - mode switches;
  - stalls;
  - depth loading overlapped with rasterization;
  - division overlapped with the next tile;
  - back-pressure;
  - out-of-order replies.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/gs_pkg.sv tb/fp16_ref_pkg.sv \
          tb/tb_gs_accel_top.sv --top-module tb_gs_accel_top -Mdir obj && obj/Vtb_gs_accel_top
```

The simulations are two-state. Registers start at random values until reset, so
every testbench resets the design before use.
