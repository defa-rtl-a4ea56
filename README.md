# A multi-scale deformable attention core with pruned grid sampling

Multi-scale deformable attention (as used in the encoders of Deformable DETR, DN-DETR
and DINO) replaces the all-to-all `Q x K^T` of ordinary attention by a small set of
sampling points per query: for every head, every query looks at `NP` points on each of
`NL` feature-map levels (here 4 x 4 = 16 points). Each point is a fractional position
`P + dP` (reference point plus a learned offset); its value is bilinearly interpolated
from the four surrounding pixels of that level's value map `V = X W^V`, weighted by a
softmax probability, and the 16 weighted values are summed into the head output.

On a GPU the expensive part is not arithmetic but the irregular reads of the grid
sampling. This core attacks that in three ways:

* **Pruning of sampling points (PAP).** After the softmax most probabilities are close
  to zero. Points whose probability is below a threshold are dropped before their
  position is computed, their pixels are fetched or interpolated.
* **Pruning of feature-map pixels (FWP).** While interpolating, the core counts how often
  each pixel is touched. At the end of an attention block, pixels sampled less often than
  `T = k * mean(F)` get a 0 in a bit mask. The *next* block neither fetches nor computes
  them; they read as zero.
* **Conflict-free, inter-level parallel sampling.** One point from each of the four
  levels is interpolated per clock. Together they need 16 pixels. The on-chip buffer has
  16 banks, four per level, laid out so that any 2x2 neighbourhood of a level falls into
  that level's four banks. The 16 reads therefore never collide. Sampling is also confined
  to a bounded range around the reference point, with a size chosen per level. The range
  is held as a circular window, so when the reference point moves one pixel only one new
  column is fetched.

Interpolation and aggregation are fused in a reconfigurable PE array. The interpolated
samples are weighted and summed in the array and never leave it. When no query is
running, the same array computes matrix products (the `Q W^S` / `X W^V` projections).

All arithmetic is 12-bit integer.

## Blocks

| file | block |
|---|---|
| `rtl/defa_pkg.sv` | shared sizes, types, bank mapping functions |
| `rtl/defa_top.sv` | the core: all blocks below wired together |
| `rtl/defa_controller.sv` | per-query state machine, window bookkeeping, MM/BA mode switch |
| `rtl/softmax_unit.sv` | softmax over the 16 logits of a head |
| `rtl/point_mask_gen.sv` | PAP: threshold, point mask, zeroed probabilities |
| `rtl/compression_unit.sv` | packs the kept points of each level into a dense list |
| `rtl/sample_addr_gen.sv` | offset clipping, `x0, y0, t0, t1`, bank addresses (one per level) |
| `rtl/fmap_sram.sv` | 16-bank circular bounded-range buffer |
| `rtl/decompression_unit.sv` | loads window pixels; pruned pixels become zeros without a fetch |
| `rtl/fmap_mask_gen.sv` | FWP: sampled-frequency counters, threshold scan, fmap mask |
| `rtl/recfg_pe.sv` | four multipliers shared between bilinear+aggregation and MM |
| `rtl/pe_lane.sv` | four PEs (one per level) and 16 accumulators |
| `rtl/pe_array.sv` | 16 lanes |

## Number formats

| quantity | format |
|---|---|
| pixel channels, MM operands | signed 12 bit |
| softmax logits | signed 12 bit, 6 fraction bits (`LF`) |
| probabilities | unsigned 12 bit, Q0.12 (4096 = 1.0, saturating at 4095) |
| sampling offsets | signed 16 bit, 8 fraction bits (`TF`) |
| `t0 = y - y0`, `t1 = x - x0` | unsigned 8 bit fractions |
| accumulators | signed 32 bit; BA results carry the Q0.12 scale of the probabilities |

A pixel word is one 16-channel slice (16 x 12 = 192 bits). Lane `c` of the PE array
handles channel `c`. A head with 32 channels is therefore processed in two passes.

## What one query does

A query is one reference point, one head and one 16-channel slice. It carries 16 logits
(`Q W^A`), 16 offsets (`Q W^S`) and the reference point on each level. Point `p` of
level `l` has index `l*NP + p`. `defa_controller` steps through:

1. **SMX**: the softmax takes `N+3 = 19` clocks. It finds the maximum and forms
   `e_i = 2^(-(max-x_i) log2 e)`. The integer part of the exponent is a shift. The top five
   fraction bits index a 32-entry table of `round(32768 * 2^(-i/32))`. One shared divider
   then produces one probability per clock. Its error against the exact softmax is
   within a few percent of full scale.
2. **PAP**: one clock. Probabilities `>= pap_thr` are kept; the rest become 0 and are
   cleared in the point mask. The compression unit turns the mask into a list of kept
   point indices for each level, plus `max_cnt`, the largest per-level count.
3. **LOAD**: for each level in turn, the controller compares the new reference point
   with the window the buffer already holds:
   * **same point**: nothing is loaded;
   * **moved +1 in x on the same row**: only the column entering the window
     (`x + BR/2 - 1`) is loaded; the other `BR-1` columns are reused in place;
   * **anything else**: the whole `BR x BR` window is loaded.

   Pixels outside the feature map are skipped. Each pixel goes through the
   decompression unit. If the fmap mask of the previous block marks it as pruned, the
   unit writes zeros in the same clock and makes no external request. Otherwise it issues
   one request on the `mem_*` port and writes the response.
4. **BA**: lasts `max_cnt` clocks (0 to 4). In clock `j` every level issues its `j`-th
   kept point. Levels with fewer kept points issue probability 0. For each level,
   `sample_addr_gen` works out the neighbours' bank addresses, the 16 banks are read, and
   one clock later the PE array interpolates and adds `sum_l prob_l * S_l` into each
   lane's accumulator. The same clock sends each level's `(x0, y0)` to the FWP counters.
5. **DRAIN / DONE**: the last accumulation, then `res_valid` for one clock. `res_acc`
   holds the 16 channels in Q0.12 scale. `res_pix` holds them floored to INT12 and
   saturated.

If no pixel has to be fetched, a query therefore takes about `1 + 19 + 1 + 4*(1 + pixels
loaded) + max_cnt + 2` clocks. The grid-sampling part (BA) is one clock per group of
four points, and pruned points cost no clocks.

## The fmap buffer: 16 banks without conflicts

This is the least obvious part of the design (`defa_pkg::bank_of/addr_of`,
`fmap_sram`, `sample_addr_gen`).

* Level `l` owns banks `4l .. 4l+3`. Within those four banks, pixel `(x, y)` goes to bank
  `{y[0], x[0]}`. Any 2x2 neighbourhood `(x0..x0+1, y0..y0+1)` covers all four parity
  combinations exactly once. The four neighbours of a sample therefore always sit in
  four different banks, and the four levels use disjoint bank groups.
* Which neighbour is in which bank depends on the parity of `(x0, y0)`. Neighbour `k =
  {dy, dx}` (N0 top-left, N1 top-right, N2 bottom-left, N3 bottom-right) is in bank
  `{y0[0]^dy, x0[0]^dx}`. `defa_top` has a small crossbar that restores the N0..N3 order
  before the PE array.
* The word address is `((y mod BR)/2) * (BR/2) + (x mod BR)/2`. `BR` is the level's
  bounded range, a power of two. Addressing modulo `BR` makes each level's storage a
  circular `BR x BR` window. The pixels a window shares with the previous one keep their
  addresses, so a one-pixel slide rewrites only the column that leaves.
* Offsets are clipped to `[-BR/2, BR/2 - 1)` pixels. The whole 2x2 neighbourhood of any
  sample then lies inside the window centred on the reference point (columns
  `x-BR/2 .. x+BR/2-1`). Positions are then clamped into the feature map
  (`[0, W-1)`), so pixels outside the map are never read.
* Bounded ranges are level-wise: 8x8 on level 0 (the largest map) and 16x16 on levels
  1-3. That is 832 pixel words in total, against 1024 for a uniform 16x16 range (23% more).
  Bank depth is `(BR/2)^2`: 16 words on level 0 and 64 on the others.

Reads are registered, like an SRAM macro. Addresses issued in clock `j` return data in
clock `j+1`. The controller delays `t0`, `t1`, the probabilities and the parity bits by one
clock to match.

## The reconfigurable PE

Because `x1 = x0 + 1` and `y1 = y0 + 1`, bilinear interpolation can be rearranged as

    S = N0 + (N2-N0) t0 + [ (N1-N0) + (N3-N2-N1+N0) t0 ] t1

This needs three multipliers and seven adders. A fourth multiplier forms `prob * S`.
`recfg_pe` implements exactly these four multipliers. In MM mode, operand multiplexers
turn them into four independent `q * w[i]` products. After each multiplication by
`t0`/`t1` the product is shifted right by 8 (floor). `S` is saturated to INT12. `S` is
within 3 LSB of the exact interpolation.

A lane has four PEs. In BA mode PE `l` handles level `l`, and the four `prob * S` are
added into accumulator 0. In MM mode PE `g` takes W columns `4g .. 4g+3`, and the lane
keeps 16 output-stationary accumulators. The array has 16 lanes:

* **BA mode**: lane `c` = channel `c` of every pixel.
* **MM mode**: lane `r` = row `r` of a 16-row Q block. Each `mm_step` broadcasts one row
  `k` of a 16x16 W tile (`mm_w`) and gives lane `r` the element `Q[r][k]` (`mm_q[r]`).
  After 16 steps `mm_res[r][j] = (Q W)[r][j]`. `mm_lane_en[r] = 0` freezes a row. This is
  how rows removed by a mask (pruned pixels in `X W^V`) cost no MACs. `mm_clr` clears the
  accumulators.

The array has 256 multipliers: 102 GMAC/s at 400 MHz.

## Frequency-weighted pixel pruning

`fmap_mask_gen` keeps one saturating 4-bit counter per pixel of every level. The
counters are banked by parity like the buffer, so the four increments of a sample land
in four banks in the same clock. A per-level sum tracks `sum F`. `fwp_start` starts a
scan that visits four pixels of every level per clock; the scan length is set by level
0, `(64/2)*(64/2) = 1024` clocks. Each pixel gets mask bit

    keep = 16 * F * (W*H) >= k_q * sum(F)        (k = k_q / 16)

which is `F >= k * mean(F)` without a division. The scan clears the counters and reports
the number of kept pixels. The new mask takes effect for the loads that follow, i.e. for
the next attention block. After reset every pixel is kept. A level that saw no samples
has `sum F = 0` and keeps everything.

## Interface of `defa_top`

* `clk`, `rst_n`: one clock; asynchronous active-low reset. The SRAM arrays are not
  reset.
* Configuration: `pap_thr` (Q0.12) and `fwp_k` (4 fraction bits) are sampled whenever
  they are used.
* Query: `q_valid`/`q_ready`, with `q_logits`, `q_off_x`, `q_off_y` (16 each) and
  `q_ref_x`, `q_ref_y` (one per level). The query is captured when both are high.
  `q_ready` is high only while idle.
* Result: `res_valid` pulse with `res_acc`, `res_pix` and `res_point_mask`.
* MM: `mm_clr`, `mm_step`, `mm_lane_en`, `mm_q`, `mm_w`, and `mm_res` one clock after
  the last step. These are honoured only while no query runs; a query takes priority.
* FWP: `fwp_start` pulse, then `fwp_busy` and `fwp_done`, and `fwp_kept_pixels`.
* External memory: `mem_req_valid`/`mem_req_ready` with `mem_req_level/x/y`, and a
  response `mem_rsp_valid` with `mem_rsp_data` (one 192-bit pixel word). One request is
  outstanding at a time. The memory itself (an HBM2 stack in the intended system) is
  not part of the RTL.
* Event pulses for monitoring: `ev_reuse`, `ev_slide`, `ev_full` (one per level and
  query), `ev_skip` (pruned pixel not fetched) and `ev_issue` (BA issue clock).

The host runs the dataflow in this order:
1. the logits, then PAP;
2. the offsets in MM mode;
3. `V = X W^V` in MM mode, with masked pixel rows disabled;
4. the queries, in raster order so that windows slide;
5. `fwp_start` at the end of the block.

The host also moves data between the MM results, external memory and the query port.

## Sizes and how to change them

All sizes are in `defa_pkg`:
* `LANES = 16`, `NL = 4` and 16 banks follow the architecture.
* `NP = 4` points per level, `TF`, `LF` and the formats above are choices.
* `br_size(l)` gives the bounded range per level. It must be a power of two, at most
  `BRMAX`, with `BAW` address bits.
* `fmap_w(l)`, `fmap_h(l)` give the feature-map extent (default 64, 32, 16, 8 per side).
  They size the FWP counters and the clamping. The widths must be even.

The COCO-sized encoders these networks run on have a level-0 map of about 100 x 167. That
does not fit the default 64 x 64. Raising `fmap_w/h` (and `XW` beyond 255) enlarges the
FWP arrays, but nothing else in the datapath.

## Where this RTL departs from, or goes beyond, the architecture it follows

The following is built as the architecture describes it:
* the 16-lane PE array with shared BI/AG and MM modes;
* the three-multiplier bilinear form;
* inter-level parallel sampling from 16 banks in 2x2 neighbour windows;
* level-wise bounded ranges with reuse;
* PAP and FWP with `T = k * mean(F)`;
* the ordering of softmax, point pruning, sampling and FWP.

The following are this design's own choices, because no detail was available for them:
* the softmax approximation;
* the MM-mode mapping. The architecture is described as multiplying one 16-element
  vector by a 16x16 tile, output-stationary. Here each clock gives every lane one
  element of a different Q row. Sixteen steps then produce a 16-row block. That is
  the same 256 multiplications per clock, with no adder tree across lanes;
* all fixed-point formats;
* the bounded-range sizes;
* edge clamping instead of zero padding;
* the per-query state machine, which runs loading after the softmax rather than
  overlapping them;
* the handshakes, and one outstanding memory request;
* saturating 4-bit frequency counters;
* keeping a probability or frequency equal to its threshold.

Not built:
* **On-chip orchestration of the full layer.** There is no buffer or sequencer that feeds
  `Q W^S` results to the query port, or that applies the point mask to the columns of
  `W^S` and the fmap mask to the rows of `X W^V` by itself. The `mm_lane_en` hook exists,
  but the host drives it.
* **The probability buffer.** It is represented only by the query registers.
* **The external memory**, and any DMA or compressed memory layout: pixels are requested
  by coordinate.
* **The intra-level parallel scheme.** It is only a baseline that the inter-level scheme
  is compared against.
* **Throughput.** The reported 418 GOPS at 400 MHz exceeds the 204.8 GOPS peak of 256
  multipliers. It presumably counts the work that pruning saves. Nothing here models that.

## Verification

Every block has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`. Each compares against a model written independently of
the RTL. Bilinear results are checked against the textbook formula in floating point,
the softmax against `exp()`, and MM results against integer products. Latencies
(softmax, FWP scan, BA issue clocks) are checked too.

`tb_defa_top` runs the whole core at its default sizes:
* an MM tile with two rows masked;
* a block of 12 queries sliding along a row;
* an FWP scan compared with a software count;
* a second block that reads the pruned pixels as zeros;
* a final MM tile.

Each result is checked against a floating-point model of the whole operator. The test
also requires every mechanism to occur at least once: full load, slide, reuse, skipped
fetch, pruned point, short issue, scan, masked MM row, and mode switch.

To run any testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/defa_pkg.sv tb/tb_defa_top.sv --top-module tb_defa_top
    ./obj_dir/Vtb_defa_top

Replace `tb_defa_top` with any other `tb_*` name. The testbenches rely only on two-state
simulation and `$urandom`.
