# Winograd DeConv accelerator

## Design idea

A GAN generator is mostly transposed convolutions ("DeConv"): each input pixel
is spread through a K_D x K_D filter over an output grid that is S times finer.
This accelerator computes such a layer as ordinary convolutions, and then does
those convolutions with Winograd's minimal filtering algorithm:

1. **TDC (transforming DeConv to Conv).** Every output pixel with sub-pixel
   position (sy, sx) = (y mod S, x mod S) sees only a fixed subset of the
   filter taps. Sorting the taps by sub-pixel turns one K_D x K_D DeConv filter
   into S^2 small Conv filter "kinds" of K_C x K_C taps: K_C = 3 for K_D = 5,
   S = 2 (padded to 3x3); K_C = 2 for K_D = 4, S = 2; and K_C = 3 for
   K_D = 3, S = 1.
2. **Winograd F(2x2, 3x3).** Each kind is applied with n = 4 input tiles,
   m = 2 output tiles and r = 3 taps: Y = A^T [(G f G^T) . (B^T Z B)] A. That
   is 16 multiplications per 2x2 output instead of 36.
3. **Vector-level sparsity.** A K_C = 2 filter or a zero-padded K_C = 3 filter
   placed in the 3x3 frame has zero rows or columns. After G f G^T these become
   whole zero rows or columns of the 4x4 Winograd filter, at the same place for
   every filter of that kind. The filters are rearranged as n^2 x N matrices
   (one row per Winograd element, one column per input channel), so a zero
   element is a zero *row* of length N for every channel. The engine never
   issues such rows:
   * Case 1: no zero rows (16 of 16 elements used).
   * Case 2: one Winograd row or column zero (12 of 16).
   * Case 3: both zero (9 of 16).

   Per 2x2 output tile and group of T_m maps, the S^2 kinds then cost
   36 element rows for K_C = 2 (4 x 9) and 49 for K_C = 3, S = 2
   (16 + 12 + 12 + 9). Dense S = 1 costs 16. The post-PE computes the inverse
   transform A^T Y A only from the elements that were produced.

## Block diagram and dataflow

```
 in stream ─> input_line_buffer ─> pre_pe ─> tile_matrix_buffer ─┐
 (T_n ch.)    (n+m = 6 rows)      window,   (n^2 x N, ping-pong) │
                                  B^T Z B                         v
 wt stream ─> filter_transform ─> weight_buffer ─────> accelerating_engine
 (3x3 TDC)    G f G^T             (T_m x S^2 x n^2 x N)  (T_m com-PEs x T_n MACs,
                                                          zero rows skipped)
                                                                   │
 o stream <── output_buffer <── post_pe <─────────────────────────┘
 (T_m maps)   (2 x mS rows,     sparse A^T Y A, >>shift, ReLU, saturate
              ping-pong)
                          controller: loop nest, handshakes, stalls
```

Loop nest for one layer (outermost first):

* **Map group.** T_m output maps. The filters of the group are loaded and
  transformed, then the input is streamed again.
* **Band.** m = 2 input rows, which give mS output rows.
* **Tile.** A 2-column step across the band.
* **Kind.** The S^2 TDC kinds.
* **Element.** The non-zero Winograd elements of the kind.
* **Channel tile.** T_n input channels, so ct = ceil(N / T_n) tiles.

Each cycle the engine reads one element row of one channel tile. That is T_n
transformed inputs, plus the matching T_n Winograd weights for each of the
T_m maps. Each com-PE multiplies the pairs, sums them and accumulates over
the channel tiles. So a tile takes sum_k nz(k) * ct cycles, which is the
compute time of eq. (5) of the method.

The stages overlap:

* pre_pe fills one half of the tile matrix while the engine reads the other.
* The post-PE writes one half of the output buffer while the other half
  drains.
* Input rows for the next band stream into the free line-buffer slots while
  the current band is computed.

## Module list

| Module | Role |
| --- | --- |
| `wino_pkg` | Constants, `layer_cfg_t`, result tag, row-skip mask `kind_mask`, A^T coefficients |
| `input_line_buffer` | 6 rows of T_n-channel pixels; row y lives in slot y mod 6; 4 slots read per cycle |
| `pre_pe` | Selects the 4x4 window with zero padding, reads it column by column, computes B^T Z B, writes one column block of the tile matrix |
| `tile_matrix_buffer` | 16 element banks x (2 halves x CT_MAX channel tiles) of T_n values |
| `filter_transform` | Combinational G' f G'^T for T_n filters (G' = 2G) |
| `weight_buffer` | T_m x 16 banks addressed by (kind, channel tile) |
| `com_pe` | T_n multipliers, adder tree, accumulator with first/last control |
| `accelerating_engine` | Sequencer over kind / non-zero element / channel tile, T_m com-PEs |
| `post_pe` | Sparse inverse transform, shift, ReLU, saturation, tile store |
| `output_buffer` | 2 x mS output rows of T_m maps, raster drain to the output stream |
| `controller` | Layer sequencing, input and filter loading, band / tile / flush state machine, stall flags |
| `winograd_deconv_top` | Connects the above |

## Interfaces

All streams are valid/ready. Reset is synchronous and active low.

* **`cfg`** (`layer_cfg_t`) is sampled on `start`. It holds:
  * H_I and W_I;
  * ct = ceil(N / T_n);
  * the number of map groups, ceil(M / T_m);
  * S, K_C, the output shift and the ReLU enable.
* **`wt_*`**: once per map group, for each map t < T_m, each kind k < S^2
  and each channel tile, one beat of T_n 3x3 TDC filters.
  * Tap (t, u) of kind (sy, sx) is DeConv tap
    w[S(1-t)+sy+P][S(1-u)+sx+P], with P = 2 for S = 2 and P = 1 for S = 1.
  * It is zero outside the kernel. K_C = 2 filters sit in the lower-right
    2x2 of the 3x3 frame.
* **`in_*`**: once per map group, the whole input, row by row. Each row is
  ct * W_I beats, channel-tile major. One beat is one pixel of T_n channels.
* **`o_*`**: per map group and band, mS output rows of S * W_I beats. One
  beat is one output pixel of the group's T_m maps. `o_last` marks the last
  beat of a band.
* **`done`** pulses at the end of the layer.
* **`stall_in`** and **`stall_out`** are high while a band waits for input
  rows or for output space.

## Parameters and limits

| Parameter | Default | Meaning |
| --- | --- | --- |
| `TM` | 4 | output maps computed in parallel (T_m of the method) |
| `TN` | 128 | input channels per cycle (T_n) |
| `MAX_W` | 32 | largest input width W_I |
| `DEPTH` | 32 | words per input line; ct * W_I <= DEPTH |
| `CT_MAX` | 8 | largest ct, i.e. N <= 1024 |

The package widths are:

* Data: DW = 16.
* Transformed input: VW = 18.
* Transformed weight: WW = 20.
* Accumulator: ACC_W = 48.

Further limits:

* H_I and W_I must be even and at most 63.
* S must be 1 or 2, and K_C must be 2 or 3.
* The number of map groups must be at most 255.

At the defaults, every DeConv layer of a 64x64 DCGAN generator fits:

* 4x4x1024
* 8x8x512
* 16x16x256
* 32x32x128

All four have ct * W_I = 32. The same holds for DCGAN-like 64x64 decoders
with K_D = 4.

## Arithmetic

The method was evaluated in 32-bit floating point. This RTL uses signed
fixed-point integers instead, so that the transforms are exact:

* G contains halves, so the filter transform uses G' = 2G. The
  Winograd-domain product is then 4x too large, and the post-PE applies an
  arithmetic right shift (`out_shift`, 2 for integer data) before saturating
  to DW bits.
* Any further shift can be added there for fractional fixed-point formats.
* ReLU can be turned on or off per layer (`relu_en`). The method's figure
  shows an unnamed "Activation" after the inverse transform.

## Verification

Each module has a self-checking testbench in `tb/`:

* Each prints `TB_RESULT checks=N failures=F` and stops on a watchdog.
* Unit tests compare against models written directly from the equations.
  Examples are B^T Z B, G f G^T, dot products and A^T Y A.

The end-to-end tests stream random layers through `winograd_deconv_top`. They
compare every output pixel with a *direct* transposed convolution, which
involves neither TDC nor Winograd:

* `tb_winograd_deconv_top` uses reduced parameters (T_m = 2, T_n = 4). Its
  five layers cover:
  * K_D = 5, 4 and 3;
  * S = 1 and 2;
  * several channel tiles and map groups;
  * ReLU on and off;
  * random gaps and back-pressure on all streams.

  It also counts each mechanism and requires every one to occur:
  * Case 1, Case 2 and Case 3 kinds;
  * both strides;
  * ReLU clamping;
  * border tiles.

  Input and output stall cycles are counted and reported.
* `tb_winograd_deconv_full` uses the default parameters (T_m = 4,
  T_n = 128).

Simulation with Verilator (5.x), for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/wino_pkg.sv -y rtl \
    tb/tb_winograd_deconv_top.sv --top-module tb_winograd_deconv_top
./obj_dir/Vtb_winograd_deconv_top
```

## Departures from the method and limitations

* **Fixed-point instead of FP32.** See *Arithmetic*.
* **TDC filter conversion is not in hardware.** It is a re-indexing of the
  stored weights, done when the weights are prepared. The testbench shows it.
* **No DDR3 interface.** Valid/ready streams stand where the off-chip memory
  would connect.
* **Filters are loaded per map group before its bands start.** Filter loading
  is not overlapped with computation. The input is streamed again for each
  map group.
* **The full 4x4 window is re-read for each tile.** The (n-m) x n overlap
  between neighbouring windows is reused from the on-chip line buffer, not
  from registers.
* **Engine results are not back-pressured.** The post-PE accepts one result
  per cycle. The output buffer's second half absorbs the drain, and the
  engine pauses between bands when both halves are full (`stall_out`).
* **Tile sizes are chosen by the user.** The design-space exploration
  (eqs. (6) to (9)) picks the tile sizes. Only its result, T_m = 4 and
  T_n = 128, is built in as the default.
