# Stereo depth from learned binary descriptors — RTL

This design computes a dense disparity (depth) map from a rectified stereo
camera pair in a single streaming pass. Instead of the hand-made census
transform of classical hardware stereo, each pixel is described by a small
learned convolutional network: one 9x9 convolution with 32 output channels,
quantised to 8-bit integers, whose 32 outputs are reduced to their signs.
The resulting 32-bit binary descriptors are matched with Hamming distance, the
matching costs are smoothed by a box filter and semi-global matching (SGM),
the best disparity is picked with sub-pixel refinement, and a left-right
consistency check removes unreliable pixels. The network runs only once per
stereo pair; the left-right check is obtained by matching every descriptor
line twice, the second time with the views swapped and mirrored.

The architecture follows L. Puglia and C. Brick, "Deep Learning Stereo Vision
at the edge" (Intel). That publication describes the network, its
quantisation and the block structure of the accelerator, but gives almost no
hardware detail; everything below the block level here — the streaming
schedule, the SGM path set, widths, the disparity range, the interfaces — is
this implementation's own, and is marked as such in each file's header and
in the "Departures" section.

## Data flow

```
 left camera ──► desc_cnn (NNA submodule) ──► left descriptors ─┐
                                                                 ├─► swap_flip ──► branch ──► lr_check ──► disparity map
 right camera ─► desc_cnn (NNA submodule) ──► right descriptors ─┘       │   ▲       (two channels)
                                                                        sel  │
                  view pixels (aligned with their descriptors) ──► view_mux ─┘
                                                     └─────────── sva ───────────┘
```

| module | role |
|---|---|
| `stereo_top` | the whole module: two network submodules, view multiplexer, accelerator |
| `desc_cnn` | one neural-network-accelerator submodule running the 9x9x32 descriptor network |
| `requant` | multiply-shift rescale of an accumulator to int8 (used per channel by `desc_cnn`) |
| `sva` | stereo vision accelerator: `swap_flip` + `branch` + `lr_check` |
| `swap_flip` | line banks; replays each line direct and swapped+mirrored |
| `view_mux` | gives the branch the image of the current reference view |
| `branch` | matching core: `hamming_cost` → `box_filter` → `sgm` → `wta_subpixel` |
| `lr_check` | left-right consistency check, merges both maps |
| `stereo_pkg` | shared constants, the position tag struct, the pass enum |

## The descriptor network (`desc_cnn`, `requant`)

For every pixel whose 9x9 neighbourhood lies inside the frame, and for each
channel c = 0..31:

```
acc_c  = B_c + Σ_{r=0..8} Σ_{k=0..8} W_c[r*9+k] · (p(r,k) − 128)
y_c    = clamp((acc_c · m_c) >>> h_c, −128, 127)
bit c  = (y_c > 0)
```

`W` and `B` are int8, `p(r,k)` is the 8-bit pixel at window row r, column k
(row 0 and column 0 are the oldest, i.e. top and left), and `m_c` (8 bits) and
`h_c` (5 bits) are the per-channel multiply-shift factors that replace the
division by the quantisation scale. Coefficients are found offline: the scale
of each output channel by an exhaustive search minimising the error between
the float and integer layer outputs, then the `(m, h)` pair by an exhaustive
search over their small integer ranges. For this single binarised layer only
the sign of `y` matters, so `(m, h)` only decide which near-zero
accumulators become 0; they are still built, because the same rescale feeds
any deeper network.

Hardware: eight line memories of `IMG_W` pixels feed one 9-pixel column per
cycle into a 9x9 window register; all 32×81 products are formed in parallel,
so the engine accepts one pixel per clock. The output is the "valid"
convolution, `(IMG_W−8) × (IMG_H−8)` descriptors. The first one leaves two
cycles after pixel (8, 8) is accepted, i.e. while the ninth camera row is
streaming in; no frame buffer is needed. Each descriptor carries the pixel at
its window centre, which is the image the matching stage uses.

Coefficients are written one per cycle through `cfg_*`: `cfg_w_we` writes
`W[cfg_ch][cfg_tap]`; `cfg_b_we` writes `B[cfg_ch]`; `cfg_q_we` writes
`m[cfg_ch]` and `h[cfg_ch]`. In `stereo_top` both views share one write port:
the two submodules run the same network.

## One network pass, two matching passes (`swap_flip`, `view_mux`)

This is the least obvious part of the design. A left-right consistency check
needs two disparity maps: one with the left view as reference (left pixel x
is compared with right pixels x−d), and one with the right view as reference
(right pixel x is compared with left pixels x+d). The matching core only
searches to the left. `swap_flip` therefore stores one descriptor line of each
view (two banks per view, so the next line is written while the current one
is replayed) and sends it to the branch twice:

| pass | position x = 0 … W−1 | reference | target | `view_sel` |
|---|---|---|---|---|
| 0, `PASS_LR` | image column x | left[x] | right[x] | 0 (left image) |
| 1, `PASS_RL` | image column W−1−x | right[W−1−x] | left[W−1−x] | 1 (right image) |

Reading both lines backwards in pass 1 mirrors them, and in mirrored
coordinates "right pixel x matches left pixel x+d" becomes "matches x−d": the
same search. The descriptor network never runs twice. Each pass ends with R
extra flush positions (R = 1, half the box size) so the centred box filter
can complete the line. `view_sel` drives `view_mux`, so the branch always
sees the image of the current reference view, in the same mirrored order.

`lr_mode` selects the mode; it is sampled when the first row of a frame
starts, so a change takes effect at the next frame. With `lr_mode = 0` only
pass 0 runs and every pixel is passed through as valid.

Every stream position carries a `tag_t` (see `stereo_pkg`): pass, whether the
line has both passes, first row of frame, flush flag and column.

## The matching core (`branch`)

All stages take one position per cycle and have no back-pressure. State that
spans lines is kept separately for the two passes, so direct and mirrored
lines can alternate.

1. **`hamming_cost`** — `C(x,d) = popcount(ref[x] XOR tgt[x−d])` for
   d = 0…N−1 (N = 64). Disparities reaching left of the line cost 32 (the
   maximum); flush positions cost 0 for every d.
2. **`box_filter`** — 3x3 sum per disparity. Columns x−1…x+1 (centred, using
   the flush position at the right end, zero at the left edge). Rows y−2…y
   (trailing: output row y aggregates the current and two previous rows,
   zero above the frame). The trailing rows shift the map down by one row;
   both passes shift alike, so the consistency check is unaffected.
3. **`sgm`** — semi-global matching on four paths: along the line in scan
   direction, and from the row above straight, above-left and above-right:
   `L(p,d) = C(p,d) + min(L(p−r,d), L(p−r,d±1)+P1, min_k L(p−r,k)+P2′) − min_k L(p−r,k)`,
   `S(p,d)` is the sum of the four `L`. `P2′ = p2_edge` where the reference image
   changes by more than `edge_th` along the path, `p2` otherwise, never below
   `p1`. A path starts with `L = C` where its previous position is outside the image
   (line start, first row, right end for the above-right path).
4. **`wta_subpixel`** — argmin of S (the lowest d wins a tie), refined by a
   parabola through S at d−1, d, d+1:
   `offset = (S[d−1] − S[d+1]) / (2(S[d−1] + S[d+1] − 2S[d]))`, |offset| ≤ ½,
   truncated to 4 fractional bits. No offset at d = 0 or N−1.

The result leaves on `lr_*` (pass 0) or `rl_*` (pass 1; `rl_x` counts from the
right edge of the image).

## Consistency check and output (`lr_check`)

Left disparities are stored at their column, right disparities at column
W−1−`rl_x`, in one of two line banks. When a line is complete it is read out
in column order, one pixel per cycle, while the next line fills the other
bank. Left pixel x with integer disparity dl is kept if the right disparity
at x−dl differs from dl by at most 1; otherwise, or if x−dl < 0, it is
invalidated (`o_ok = 0`, `o_disp = 0`). The kept value is the sub-pixel left
disparity.

Output stream: `o_valid`, `o_x`, `o_disp` (unsigned, 4 fractional bits, 10
bits at N = 64), `o_ok`, `o_sof` (first pixel of a frame), `o_eol` (last
pixel of a row). The map is `(IMG_W−8) × (IMG_H−8)`; output row y, column x
corresponds to the 9x9 window whose top-left corner is camera pixel (x, y),
centred at (x+4, y+4), with the one-row shift of the box filter.

## Timing

* Network submodules: one pixel per clock each when not stalled.
* Matching: W+R positions per pass, so a row of W = 1272 disparities takes
  2·1273 = 2546 cycles with the check (one disparity every 2.0016 cycles) and
  1273 without. `swap_flip` starts a buffered line immediately after the
  previous one, so there are no idle cycles between rows.
* With the check on, the accelerator is the bottleneck: the cameras see
  `l_ready`/`r_ready` low about half the time. Feed them from a frame buffer
  or a FIFO.
* A 1280x720 frame takes about 1.81 M cycles in left-right mode, so 30 frames
  per second need 55 MHz and 55 frames per second about 100 MHz.
* Latency: a disparity row leaves about nine camera rows after the matching
  camera row (window height) plus one line time for the banks.

## Parameters (`stereo_top`)

| parameter | default | origin |
|---|---|---|
| `IMG_W`, `IMG_H` | 1280, 720 | 720p target of the publication |
| kernel, channels | 9, 32 (`stereo_pkg`) | the publication's final network |
| `N` | 64 disparities | own choice (no range is given) |
| `K` | 3 (box size) | own choice |
| `FRAC` | 4 sub-pixel bits | own choice |
| `M_W`, `H_W` | 8, 5 | own choice for the multiply-shift factors |
| `PW` | 8 (penalty width) | own choice |

Run-time inputs: `lr_mode`, `p1`, `p2`, `p2_edge`, `edge_th`. The testbenches
use p1 = 4, p2 = 32, p2_edge = 12, edge_th = 24 (costs are 3x3 sums of 0…32).

Storage at the defaults: 2×8×1280 bytes of network line memories; 2×2×1272
descriptor+pixel words in `swap_flip`; 2 passes × 2 rows × 1273 × 64 × 6 bits
of box-filter rows (≈ 1.95 Mbit); 3 × 2 × 1272 × 64 × 11 bits of SGM state
for the three paths from the row above (≈ 5.37 Mbit); 2 × 1272 × 22 bits in
`lr_check`. These would be SRAM macros in silicon; here they are plain arrays.

## Departures and open points

* **Network accelerator.** The publication runs the network on a general
  accelerator with ten submodules that already exists on the chip and says
  two are enough. Here each of the two is a dedicated engine for this one
  network; the general accelerator is not modelled.
* **SGM uses four paths**, the ones a single raster pass allows. Classical
  SGM uses eight or sixteen; accuracy is lower than the published figures.
* **What the view image is for** is not stated in the publication (its block
  diagram only routes the views through a multiplexer into the matching
  core). Here it adapts the SGM penalty P2 at intensity edges.
* **Disparity range** N = 64, box size, sub-pixel method, consistency
  threshold, the one-row vertical shift and all stream formats are own
  choices.
* **Frame size is fixed by parameters.** Frames of another size need
  `IMG_W`/`IMG_H` changed.
* **Operation count.** The built network does 32×81 = 2592 multiplies per
  pixel, 2.39·10⁹ per 720p frame and view; the publication quotes 265·10⁶
  FLOPs per frame for the same network, which this design cannot reproduce.
* The offline quantisation search (scale factors, multiply-shift pairs) is
  software and is not part of the RTL.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_requant` | rescale vs. integer reference, saturation, ReLU |
| `tb_desc_cnn` | every descriptor of two random 14x12 frames vs. a direct convolution, with output stalls; flags; first-output timing |
| `tb_swap_flip` | replay order, mirroring, flush positions, mode latched per frame, no gaps |
| `tb_view_mux` | select |
| `tb_hamming_cost` | every cost vs. bitwise Hamming distance, edges, flush |
| `tb_box_filter` | every box sum vs. direct 3x3 sum, two passes, two frames |
| `tb_sgm` | every aggregated cost vs. a reference recursion |
| `tb_wta_subpixel` | argmin, ties, parabola offset (exact vertex 5.25 case) |
| `tb_branch` | shifted synthetic scene: disparities, column order, channels, latency |
| `tb_lr_check` | consistency decisions, left-edge invalidation, pass-through lines |
| `tb_sva` | shifted descriptor maps; invalidation; 2(W+R)-cycle row period |
| `tb_stereo_top` | 48x20 frames, 16 disparities, end to end, two frames (checked and unchecked), counts of stalls, swapped passes, flushes, invalidations, sub-pixel offsets and edge penalties |
| `tb_stereo_top_full` | one 1280x720 frame at the default parameters (≈1.83 M cycles, under a minute) |

The end-to-end tests use random texture for the left camera and the same
texture moved by three pixels for the right, so the true disparity is known
everywhere; they require ≥ 95 % of interior pixels to be valid and within
half a pixel of it, and every pixel without a match to be invalidated.

To run one, for example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
  rtl/stereo_pkg.sv tb/tb_stereo_top.sv --top-module tb_stereo_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

The simulator is two-state; every register that is read is reset or
written before use, and the testbenches pass with random initial values.
