# Vorion Gaussian rasterizer — RTL

3D Gaussian Splatting draws a scene as millions of translucent, elliptical 2D
splats. Each pixel is the front-to-back blend of every splat that covers it:

    alpha_i = o_i * exp(-1/2 * dP^T * Sigma_i^-1 * dP)   (dP = pixel - splat centre)
    C      += T * alpha_i * c_i
    T      *= (1 - alpha_i)                              (T starts at 1)

Training needs the same sum run backwards to get gradients for each splat.
On a GPU both loops are bound by memory and divergence.

This design adds a fixed-function **Gaussian rasterizer** next to the SIMT
cores of a RISC-V GPU. The cores keep the programmable stages (projection,
colour evaluation, sorting, loss, the remaining gradients). The rasterizer
runs only the blend loop, and runs it *Gaussian-centrically*:

- a depth-sorted list of splats for one 64×64-pixel tile streams past once;
- the whole tile stays in an on-chip pixel buffer;
- for each splat, 16 lanes update all the pixels its bounding box covers,
  16 pixels per clock.

The same lanes, paired up, run the backward pass on a 64×32 tile. A small
*pixel unit* can take over the last, mostly occluded part of a tile, working
pixel by pixel.

The RTL covers one GPU cluster of the prototype:

- two sockets, each with a Gaussian rasterizer and a raster agent for its
  four cores;
- one pixel unit.

Cores, caches, L2 and the command processor are not included. Their
connections are ports of `vorion_top`.

## Block map

```
 core CSR ports ──► raster_agent ──CSR──► gaussian_rasterizer ──tile stream──┬──► fb port
  (4 per socket)        ▲                  │    ▲                            │
                        └── gradients ─────┘    └── L2 port                  └──► pixel_unit ──► out
                                                                     (pu_en/pu_sel)   ▲
                                                                                      └── L2 port
 gaussian_rasterizer:
   L2 fetch ─► gaussian_buffer (32) ─► dispatch_unit ─► 16 × raster_lane      ─► gather_unit ─► pixel_buffer
                                        (AABB ∩ tile,    8 × grad_lane_pair       (write-back,    (16 banks ×
                                         hazards)        (training)                adder trees)    256 × 128 b)
```

| File | Contents |
|---|---|
| `vorion_pkg` | Types (Gaussian record, pixel states, gradient record), tile constants, FP32 functions including `exp` |
| `gs_alpha`, `gs_blend`, `raster_lane` | The rendering lane: stages 1–2 (alpha) and stage 3 (blend) |
| `recip_approx`, `grad_lane_pair` | The training lane pair and its 1/(1−α) approximation |
| `pixel_buffer`, `gaussian_buffer` | The two on-chip stores |
| `dispatch_unit`, `gather_unit` | Pixel-task issue and result collection |
| `gaussian_rasterizer` | One rasterizer: CSRs, fetch, control FSM, everything above |
| `pixel_unit` | The pixel-centric back end |
| `raster_agent` | Core-side CSR bridge and gradient-block collector |
| `vorion_top` | The cluster |

## Numbers

All datapath arithmetic is IEEE single precision, built from the functions
in `vorion_pkg`. Those functions are simplified:

- results are truncated;
- subnormals are flushed to zero;
- NaN is never produced;
- `exp(x)` is computed as `2^(x·log2 e)`. The integer part goes into the
  exponent. The fraction uses a fifth-order fixed-point polynomial, with
  relative error near 1e-7.

The blend thresholds are the ones of the reference 3DGS code:

- α is clamped to 0.99;
- a Gaussian is skipped for a pixel when α < 1/255 or when the exponent is
  positive;
- a pixel stops when the next T would fall below 1e-4.

A finished ("collapsed") pixel is marked by the **sign bit of T**. It then
ignores all later Gaussians, and downstream units read the flag from the
pixel word itself.

## Rendering pass

1. **Initialise.** CSR `CTRL.init` writes T=1, C=0 into the whole tile in
   256 cycles. Software can instead load a previous state through the pixel
   word port. This is how z-tiles are chained: a later slice of the depth
   order starts from the T and C an earlier slice left.
2. **Fetch.** The fetch engine reads Gaussian records `G_BASE + i` from L2,
   `i = 0 … G_COUNT−1`. Each response carries one full record. Records enter
   a 32-entry show-ahead FIFO, so L2 latency hides behind the work on
   earlier Gaussians.
3. **Dispatch.** `dispatch_unit` clips the record's AABB against the tile:
   - a Gaussian that misses the tile is culled and costs one empty token;
   - otherwise the unit walks the clipped box in row groups of 16 aligned
     pixels, one group per clock, with a lane mask for the edges.
   Lane L always handles x = 16·xg + L.
4. **Lanes.** Each of the 16 `raster_lane`s is a three-stage pipeline:
   - stage 1: dx, dy and the three conic products;
   - stage 2: the power, `exp` and the opacity multiply, giving α and the
     skip flag;
   - stage 3: the blend.
   The pixel state is read from the pixel buffer in the cycle the group is
   issued. It travels alongside the Gaussian and meets α in stage 3.
5. **Gather.** `gather_unit` writes the group back and counts the pixels that
   collapsed.

**Hazards.** Successive Gaussians usually touch the same pixels. A group
cannot be read again while a previous update to it is still in the lanes.
The dispatch unit keeps a small scoreboard of the group ids in flight:

- 4 entries deep in rendering, 6 in training;
- a group that matches an entry waits (a *stall*).

With two or more rows per Gaussian the pipeline is normally full without
stalls. The rate is one group per clock, plus one idle clock per Gaussian
and one token per culled Gaussian.

**Banking.** The tile is held as 4096 words of 128 bits (R, G, B, T) in 16
banks of 256 words. Pixel (x, y) lives in bank `(x + y) mod 16`, at entry
`4y + x/16`. Because of this rotation, any 16 aligned pixels of a row sit in
16 different banks. Vertically adjacent pixels are also spread over banks,
which keeps the word port and streaming simple. The buffer rotates lanes to
banks and back, so the rest of the design sees data in lane order.

## Training pass

The tile is 64×32. Each pixel holds 256 bits: dL/dC (3), T, C_acc (3) and
T_final, split over two neighbouring banks:

- even bank `2·((x + y) mod 8)`;
- entry `8y + x/8`.

Software loads dL/dC and T_final per pixel, with T = T_final and C_acc = 0.
Gaussians are then fetched **back to front** (`G_COUNT−1` first). A row
group is 8 pixels, one per lane pair.

Each `grad_lane_pair` recomputes α with the same stage-1/2 logic. It then:

- undoes the forward step: `T_i = T / (1 − α)`;
- forms `dL/dc = T_i·α·dL/dC`;
- forms `dL/dα = T_i·Σ_ch (c − C_acc)·dL/dC − T_final/(1 − α) · Σ_ch bg·dL/dC`;
- updates `C_acc = α·c + (1 − α)·C_acc`.

The pipeline is 5 clocks. The even half of the datapath produces α and T_i
and the odd half the gradients.

**The reciprocal (`recip_approx`).** 1/(1 − α) has no divider:

- **α < 0.5**: the Taylor series `1 + a + a² + a³ + a⁴`. Its error is worst
  at α → 0.5, about 3%.
- **α ≥ 0.5**: two Newton–Raphson steps `y ← y(2 − d·y)`. The seed comes
  from an 8-entry table indexed by the top three mantissa bits of d = 1 − α.
  The final error is about 1e-5.

The gather unit sums the 8 pairs' four gradient values in 8-input adder
trees and accumulates them per Gaussian. On the Gaussian's last group it
emits one gradient record `{tag, dL/dc[3], dL/dα}`. The raster agent can
assert `grad_hold`, which freezes dispatch until records can leave again.

The record carries the Gaussian's 16-bit tag. Its MSB is the *intersect* bit
(the Gaussian spans several tiles). Software uses it to merge partial
gradients across tiles.

## Hand-off to the pixel unit

Late in a depth-sorted list most pixels have already collapsed. A
Gaussian-centric engine still walks every covered group for them. The
rasterizer therefore stops fetching in rendering mode when hand-off is
enabled (`MODE.ho_en`) and either:

- the number of collapsed pixels reaches `OCC_THRESH`, or
- the number of Gaussians not yet dispatched is at most `TAIL_THRESH`.

When it stops, it drains the lanes, sets `STATUS.handed_off` and records
`HANDOFF_IDX`, the first Gaussian not processed.

Software then programs the pixel unit with `G_BASE`, `FIRST = HANDOFF_IDX`
and `COUNT`, and streams the tile out (`CTRL.stream`). In `vorion_top`,
`pu_en`/`pu_sel` route that stream into the pixel unit.

The pixel unit works as follows:

- It loads the tail Gaussians (up to 128) into its own buffer.
- It takes one pixel per free lane. Each of its 4 lanes runs the same
  alpha and blend stages with the pixel state fed back, one Gaussian per
  clock.
- A lane stops when the pixel collapses or the tail is exhausted.
- Pixels that arrive already collapsed bypass the lanes.
- Output order is not the input order. Each pixel carries its x, y.
- A tail longer than the buffer sets `STATUS.overflow`, and only the first
  128 Gaussians are used.

## Software interface

### Rasterizer CSRs (8-bit address)

| Addr | Name | Meaning |
|---|---|---|
| 0x00 | CTRL | write: bit0 start, bit1 initialise tile, bit2 clear done, bit3 stream tile out |
| 0x01 | MODE | bit0 training, bit1 hand-off enable, bit2 Gaussians pushed through GSTAGE/GPUSH instead of fetched |
| 0x02 | STATUS | bit0 busy, bit1 done, bit2 handed off, bit3 streaming |
| 0x03/0x04 | TILE_X/Y | tile origin in pixels |
| 0x05/0x06 | G_BASE/G_COUNT | Gaussian list in L2 (record index) |
| 0x07/0x08 | OCC_THRESH/TAIL_THRESH | hand-off conditions |
| 0x09–0x0B | BG | background colour (training) |
| 0x0C | HANDOFF_IDX | first Gaussian not processed |
| 0x0D–0x0F | OCC/CULL/STALL_COUNT | statistics |
| 0x10 | PIX_XY | pixel selected for word access (`{y[5:0], 2'b0, x[5:0]}`) |
| 0x18–0x1F | PIX_WORD | words of that pixel (render: R, G, B, T at 0–3; training: dL/dC 0–2, T 3, C_acc 4–6, T_final 7), idle only |
| 0x20–0x2C | GSTAGE/GPUSH | staging of a Gaussian record and push (when MODE.bit2) |

Reads return one cycle after the request.

### Raster agent (12-bit core CSR address)

- `0x800–0x8FF` is forwarded to the rasterizer.
- `0x900` is the gradient status: `{blocks[15:0], count[7:0], 7'b0, block_ready}`.
- `0x901` selects a record of the current block; `0x902–0x906` read its
  tag, dL/dc[0..2] and dL/dα.
- `0x907` releases the block.

A block is 16 records, or whatever is left once the rasterizer reports done.
`block_irq` is raised while a block is ready. Cores arbitrate with fixed
priority (core 0 first). The granted access returns data one cycle later.

## Departures from the paper and choices of this design

- **Separate lanes for each mode.** The rendering lanes and the training
  lane pairs are separate instances. In the chip the training logic is a
  small addition to the same lanes. Area figures from this RTL overstate
  the rasterizer.
- **Training pixel groups.** The training group is 8 consecutive pixels of a
  row, not a 2×4 block.
- **Raster agents.** There is one raster agent per socket, arbitrating four
  cores, not one per core. It only moves CSR traffic and gradient records.
- **Gather adder trees.** There are four 8-input adder trees (three colour
  components and opacity), rather than a shared pair.
- **Fixed-design choices.** The following are all this design's choices:
  - stage boundaries inside the lanes;
  - training pipeline depth;
  - hazard scoreboard;
  - CSR maps;
  - L2 record-per-response interface;
  - stream-out port;
  - FIFO sizes other than the 32-entry Gaussian buffer;
  - pixel-unit buffer size (128).
- **Reciprocal table.** The table is replicated per lane pair rather than
  shared.
- **Last-contributor tracking.** The backward pass does not track each
  pixel's last contributing Gaussian. Its gradients are exact for pixels
  that did not collapse in the forward pass. For a collapsed pixel, the
  Gaussians behind the collapse point are not excluded.
- **Pixel-unit overflow.** The pixel unit does not handle tails longer than
  its buffer.
- **Floating point.** It is truncating and flushes subnormals. Results
  differ from IEEE round-to-nearest in the last bits.
- **Not included.** The SIMT cores, caches, shared memory, L2, DMA, command
  processor, DRAM controller, clock generation and chip–FPGA link.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares against
double-precision models in `tb/tb_pkg.sv` and prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_fp32_ops` | FP32 functions |
| `tb_raster_lane` | Rendering lane against the reference blend |
| `tb_recip_approx` | Reciprocal error bounds for both branches |
| `tb_grad_lane_pair` | Gradients and state update |
| `tb_pixel_buffer` | All three ports and the bank layout |
| `tb_gaussian_buffer` | FIFO order, full and empty |
| `tb_dispatch_unit` | Group order, lane masks and last flag against a model of the clipped walk; culling; no re-issue of a group in flight |
| `tb_gather_unit` | Write-back, collapse count, gradient sums |
| `tb_gaussian_rasterizer` | Full tile render, hand-off, training pass; issue rate |
| `tb_pixel_unit` | Tail rendering, early termination, bypass, overflow |
| `tb_raster_agent` | Forwarding, arbitration, blocks, hold |
| `tb_vorion_top` | The cluster at its default size, with both sockets running at once |

In `tb_vorion_top`, socket 0 renders a tile in hybrid mode: the rasterizer
hands off after 32 of 48 Gaussians and the pixel unit finishes the tile.
Meanwhile socket 1 renders the tile, switches to training, and its cores
read all 48 gradient records through the agent. The testbench counts:

- hazard stalls;
- culls;
- hand-offs;
- mode switches;
- early-terminated pixels in the rasterizer and in the pixel unit;
- gradient-hold cycles.

Each of these must occur at least once.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/vorion_pkg.sv tb/tb_pkg.sv tb/tb_vorion_top.sv --top-module tb_vorion_top
    ./obj_dir/Vtb_vorion_top

`tb/l2_model.sv` is a behavioural L2 used by the testbenches. It has a fixed
latency and random back-pressure.
