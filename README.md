# Raster-order semi-global stereo matching in one pass

This is synthesizable SystemVerilog for a stereo depth pipeline of the kind
described in "R³SGM: Real-time Raster-Respecting Semi-Global Matching for
Power-Constrained Systems" (Rahnama, Cavallari, Golodetz, Walker, Torr). A
rectified stereo pair streams in pixel by pixel in raster order. Left-image
disparities, checked against the right image, stream out in the same order.
Nothing is buffered beyond a few image rows.

## The idea

Semi-global matching (SGM) smooths a per-pixel matching cost along several
1-D scan lines. It then sums the lines. Most lines need pixels that come later
in raster order, so a full SGM needs many passes and a stored cost volume.
Designs that stream in raster order usually keep only the four lines that
arrive from the left and from above, each with its own cost storage.

This design keeps **one** cost vector per pixel. Each vector draws on all four
neighbours that come earlier in raster order: left, top-left, top and
top-right. With `C(p,d)` the matching cost of pixel `p` at disparity `d`:

```
L(p,d) = C(p,d) + 1/4 * sum over q in {left, top-left, top, top-right} of
         ( min{ L(q,d), L(q,d-1)+P1, L(q,d+1)+P1, minL(q)+P2 } - minL(q) )

minL(q) = min over d' of L(q,d')
D(p)    = arg min over d of L(p,d)          (winner takes all)
```

Each bracketed term lies between 0 and `P2`. So `L` never exceeds
`max C + P2`, and a fixed-width datapath holds it with no normalisation. The
minimum of every vector is stored beside it, so the recursion computes it only
once.

Each image gets its own recursion, which makes the left-right check possible.
The matching costs are Hamming distances between census feature vectors.

## Data flow

```
 left pixel  -> census_unit -+                          +-> cost_aggregator L -> median_filter L -+
                             +-> unary_unit (B_L, B_R) -+                                         +-> lr_check -> disparity, ok
 right pixel -> census_unit -+                          +-> cost_aggregator R -> median_filter R -+
                                     frame_sequencer: pixel slots, frame admission, drain
```

| module | role |
|---|---|
| `r3sgm_pkg` | default sizes, penalties, width helpers |
| `frame_sequencer` | one pixel slot per 3 clocks; admits a frame, then waits for it to drain |
| `raster_window` | generic line buffers plus a W×W window, with its own drain (used twice) |
| `census_unit` | 13×13 census vector (168 bits) per pixel |
| `unary_unit` | rolling feature buffers; Hamming costs for 128 disparities of both images |
| `cost_aggregator` | the recursion above, with its line buffer, window buffer, left register and WTA |
| `wta_argmin` | comparison tree giving the minimum and its index |
| `median_filter` | 3×3 median of each disparity map |
| `lr_check` | left-right consistency test |
| `r3sgm_top` | the complete pipeline |

### Pixel slots and timing

The whole pipeline runs at one pixel pair per **slot** of three clock cycles.
Three cycles is what the cost recursion needs. A pixel cannot start until the
vector of its left neighbour is finished, and finishing it takes the full
minimum tree over 128 costs. At 100 MHz this gives `3·W·H` cycles per frame:

| frame | disparities | cycles per frame (3·W·H) | frames/s at 100 MHz |
|---|---|---|---|
| 384×288 | 32 | 331,776 | 301 |
| 450×375 | 64 | 506,250 | 198 |
| 640×480 | 128 | 921,600 | 109 |
| 1242×375 (default) | 128 | 1,397,250 | 71.6 |

These match the frame rates published for the method. The census window size
has no effect on the pixel rate. It changes only the drain at the end of a
frame (below) by `3·(WIDTH+1)` cycles per extra census row: 1,405,096 cycles
per 1242×375 frame with a 3×3 window, 1,423,741 with 13×13.

`frame_sequencer` drives a free-running counter of slot phases. `in_ready`
is high in phase 0 while a frame is being accepted. Each stage counts raster
positions for itself. No stage needs a global pixel index.

Data reaches each stage a fixed number of cycles into the slot:

| stage | offset (cycles) |
|---|---|
| census | 0 |
| unary | 2 |
| cost aggregation | 4 |
| median | 7 |
| LR check | 9 |

The output follows 10 cycles after the slot, plus the stage lags below.

### Lags and the drain

Three stages produce a pixel only after they have seen later ones:

| stage | lag (pixel positions) |
|---|---|
| census window | `R·WIDTH + R`, with `R = 6` for a 13×13 window |
| right unaries | `dmax = 127` (see next section) |
| median window | `WIDTH + 1` |

After the last pixel of a frame, each of these stages advances itself on its
slot phase, shifting in padding, until it has emitted its last pixel. The
sequencer accepts no new frame until the final disparity has left. At the
default size this adds 26,491 cycles: 1,423,741 cycles per frame, 70.2
frames/s. With a camera, this drain fits inside the vertical blanking.

## Matching costs: census, rolling buffers and the right-image lag

`raster_window` holds `W-1` line buffers as one memory of `WIDTH` words. Each
word holds the `W-1` earlier rows of one column. For each pixel it does two
things:

* It reads the word at the input column, shifts it up by one row, puts the
  new pixel at the bottom and writes the word back.
* It shifts the `W×W` register window left and loads the word, plus the new
  pixel, into the right-hand column.

The window centre is `R` rows and `R` columns behind the input. A census bit is
1 when that neighbour is darker than the centre. Bits are ordered in window
raster order, with the centre skipped. Positions outside the image give 0
bits.

`unary_unit` keeps shift registers `B_L[0..127]` and `B_R[0..127]` of census
vectors. Entry `d` belongs to pixel `p-d`. After pixel `p` enters:

```
left  unaries of p        : C_L(p,d)      = H(B_L[0],       B_R[d])    = H(phi_L(p),   phi_R(p-d))
right unaries of q=p-dmax : C_R(q,d)      = H(B_L[dmax-d],  B_R[dmax]) = H(phi_L(q+d), phi_R(q))
```

A right pixel can be scored only once every left pixel it might match has
arrived. That is `dmax` pixels later, just before the pixel falls out of
`B_R`. So the right-image stream trails the left one by 127 positions
throughout the pipeline.

The buffers run across row ends as one continuous stream, so the rate stays at
one pixel per slot. A disparity whose match lies outside the row
(`x-d < 0` on the left, `x+d ≥ WIDTH` on the right) gets the largest cost,
168. At the end of a frame the unit shifts in 127 padding slots to release the
last right pixels.

## The cost recursion in three cycles

`cost_aggregator` (one per image) needs four earlier vectors for each pixel.
It keeps them in three places:

* a **line buffer** of `WIDTH` entries, each holding a 128×8-bit vector and its
  minimum (1032 bits);
* a **window buffer** `TL, T, TR` holding the three vectors above the pixel;
* a **left register** holding the vector just computed.

| cycle | state | work |
|---|---|---|
| 0 | IDLE (`in_valid`) | latch the unaries; shift the window (`TL←T`, `T←TR`); read `TR` from line-buffer column `x+1` |
| 1 | AGG | compute all 128 entries of `L(p,·)` in parallel (four neighbour terms each, sum, shift right by 2, add `C`) |
| 2 | MIN | minimum and arg-minimum tree; write `{min, L}` to line-buffer column `x` and to the left register; emit the disparity |

Writing column `x` is safe: the vector above the pixel, which lived there, is
already in `T` and `TL`.

At the last column of a row, the MIN cycle also prefetches column 0 into
`TR`. The next row then starts with a correct `T`, and each pixel still reads
the line buffer only once.

Neighbours outside the image (row 0, column 0, last column) are replaced by
a zero vector with a zero minimum. Their term is then 0. The average of the
four terms is taken with a right shift, so it rounds down.

The cost vector is 8 bits wide: `168 + P2 = 248`. With other settings the
width follows `width_of(census_bits + P2)`.

`wta_argmin` is a balanced tree of comparators. On a tie the lower index wins,
so the smaller disparity is chosen. Its depth is the critical path that sets
the three-cycle slot.

## Median filter and left-right check

`median_filter` reuses `raster_window` with a 3×3 window on the 7-bit
disparities. The median is found by ranking, and border pixels pass through
unchanged.

`lr_check` receives the two median-filtered maps. Right pixel `q` always
arrives after left pixel `q`. Left disparities wait in a 256-entry circular
buffer, and the last 127 right disparities sit in a shift register. When right
pixel `q` arrives, left pixel `q` (disparity `dL`) leaves the buffer, and tap
`dL` of the shift register gives `dR` for right pixel `q - dL`. The pixel
passes when:

* `x - dL ≥ 0`, and
* `|dL - dR| ≤ 1`, or `100·|dL - dR| ≤ 3·dL`, which is "1 disparity or 3 %,
  whichever is greater".

A pixel that fails keeps its disparity but leaves with `out_ok = 0`.

## Top-level interface (`r3sgm_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `in_valid`, `in_ready` | in/out | 1 | pixel-pair handshake; a pair moves when both are high |
| `in_left`, `in_right` | in | 8 | grey-level pixels, raster order |
| `out_valid` | out | 1 | one pulse per left pixel, raster order |
| `out_disp` | out | 7 | median-filtered left disparity |
| `out_ok` | out | 1 | LR check passed |
| `out_last` | out | 1 | last pixel of the frame |
| `outr_valid`, `outr_disp` | out | 1, 7 | median-filtered right disparity map |
| `draining` | out | 1 | frame accepted; waiting for the pipeline to empty |

Reset is asynchronous and active low (`rst_n`). Memories and datapath
registers are not reset. Whatever stale data they hold is masked by the
border rules before use.

Assertions check three rules:

* no input arrives while a stage is draining;
* the cost aggregators are never offered a pixel while busy;
* the LR buffer neither underflows nor overflows.

## Parameters

| parameter | default | origin |
|---|---|---|
| `WIDTH × HEIGHT` | 1242 × 375 | KITTI frame size, as published |
| `NUM_DISP` | 128 (`dmax` = 127) | as published |
| `CENSUS_WIN` | 13 | the published configuration with the best accuracy (4.8 % error, 85 % density) |
| `CYCLES_PER_PIXEL` | 3 | as published (one disparity pair per three clocks) |
| `PIX_W` | 8 | this design's choice |
| `P1`, `P2` | 10, 80 | this design's choice (the method only needs `P1 < P2`) |
| `MEDIAN_WIN` | 3 | this design's choice |

Frame size, disparity range and window size are elaboration-time parameters.
Running another resolution means re-elaborating. The line buffers then shrink
or grow with `WIDTH`.

At the defaults, synthesis gives about 62k flip-flops and 2.8 Mbit of
memories. Most of the memory is the two cost line buffers, 1242 × 1032 bits
each.

## Where this RTL follows the method, and where it chooses

Taken from the method:

* the four-neighbour recursion and its rewritten form with a stored minimum;
* census unaries with Hamming distances;
* rolling buffers of `dmax+1` features, with right pixels scored as they leave;
* the line-buffer / window-buffer / left-register organisation of both
  windowed stages;
* WTA, then median, then the LR check with threshold max(1, 3 %);
* three cycles per pixel;
* 13×13 census, 128 disparities, 1242×375 frames.

Chosen here, because the method leaves them open:

* the penalty values;
* pixel width;
* census bit polarity and ordering;
* border handling of the census, the unaries, the recursion and the median
  (see the sections above);
* rounding of the 1/4 average;
* tie-breaking in the WTA;
* the 3×3 median size;
* taking 3 % of the left disparity;
* the valid/ready input and the flag-based LR output;
* whole-frame admission with a drain phase.

The published system was written in high-level synthesis for a Zynq board,
with the processor and data movers feeding it. Those are not part of this
RTL; the pixel-stream ports stand in for them.

The error rates and densities published for the method on real stereo
datasets have not been reproduced with this RTL. Its testbenches use synthetic
image pairs with known disparities. Nor does this RTL reproduce the published
FPGA resource and power figures: it targets no particular device.

## Simulating

Each testbench in `tb/` checks itself. It ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
          --top-module tb_r3sgm_top rtl/r3sgm_pkg.sv tb/tb_r3sgm_top.sv
./obj_dir/Vtb_r3sgm_top
```

Substitute any other testbench name.

| testbench | what it checks |
|---|---|
| `tb_census_unit` | every census vector against a reference, two frames, drain, `out_last` |
| `tb_unary_unit` | every left and right unary against Hamming distances of the stored features, out-of-row costs, 2-cycle latency, 127-pixel right lag |
| `tb_cost_aggregator` | every cost vector, minimum and disparity against a reference model of the recursion, fed at full rate; 3-cycle latency |
| `tb_wta_argmin` | minimum and index against a linear scan, including ties |
| `tb_median_filter` | every output against a sorted 3×3 reference |
| `tb_lr_check` | every decision against the threshold rule, including matches left of the image |
| `tb_frame_sequencer` | slot spacing, frame admission and the drain |
| `tb_r3sgm_top` | whole pipeline, 64×24, 16 disparities, 5×5 census, two frames |
| `tb_r3sgm_full` | whole pipeline at the defaults, one 1242×375 frame (about 1 minute) |
| `tb_r3sgm_workloads` | whole pipeline at 384×288/32, 450×375/64 and 640×480/128 disparities, 13×13 census, side by side (about 30 s), through the helper `r3sgm_e2e_run` |
| `tb_r3sgm_census_sweep` | whole pipeline at 1242×375/128 with census windows 3, 5, 7, 9 and 11, side by side (about 2 minutes) |

The end-to-end testbenches share `tb/r3sgm_tb_common.svh`. Their images
are synthetic: random right-image texture, and a left image shifted by a known
disparity (20 on the background, 45 inside a rectangle at full size).

They check four things:

* every frame produces exactly `W·H` outputs;
* pixels are accepted exactly three cycles apart;
* a frame takes no more than `3·W·H` cycles plus its drain (for example,
  935,449 cycles for 640×480 against 921,600 for the pixels alone);
* at least 90 % of the pixels with an unambiguous true disparity come out
  LR-valid and correct.

They also count each mechanism and fail if one never happens: input refused
during the drain, out-of-row unaries, LR rejections and acceptances, and pixels
changed by the median.

At full size all 369,229 evaluated pixels are correct. 97 % of all pixels pass
the LR check; the rejected ones lie mostly in the unmatched band at the left
edge.

These images say nothing about accuracy on real scenes. The published error
rates (KITTI, Middlebury) were not reproduced here.
