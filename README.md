# An approximate-full-adder 8x8 multiplier and a 3x3 binary mean filter

Image filters can tolerate small errors, so the arithmetic inside them can be cheapened. This design
starts from a full adder that has been reduced to one OR gate and a wire:

    sum  = a | cin
    cout = b

It builds an 8x8 unsigned multiplier whose partial products are compressed by counters, half adders
and this approximate cell, and then uses nine of those multipliers in a 3x3 mean filter for binary
images. Everything is synthesizable SystemVerilog. The multiplier is purely combinational. The filter
takes one pixel per clock.

The structure follows a published FPGA design of the multiplier and filter. Where that description
leaves a detail open, this RTL makes a choice, and each choice is named below and in the opening
comment of the file concerned.

## 1. The approximate full adder (`approx_fa`)

| a b cin | exact {c,s} | approx {c,s} | error |
|---|---|---|---|
| 0 0 0 | 00 | 00 | 0 |
| 0 0 1 | 01 | 01 | 0 |
| 0 1 0 | 01 | 10 | +1 |
| 0 1 1 | 10 | 11 | +1 |
| 1 0 0 | 01 | 01 | 0 |
| 1 0 1 | 10 | 01 | -1 |
| 1 1 0 | 10 | 11 | +1 |
| 1 1 1 | 11 | 11 | 0 |

Four of the eight rows are wrong, and each is wrong by exactly 1. So the error rate is 0.5, and the
mean error distance, normalised to the largest result (3), is 0.5 / 3 = 0.166. The cell passes `b`
straight on as its carry. A chain of these cells therefore has no carry propagation: the carry leaving any
approximate position depends only on that position's `b` input.

## 2. Ripple-carry adder with NAB approximate bits (`approx_rca`)

`approx_rca #(WIDTH, NAB)` is a ripple-carry adder. Its `NAB` least significant cells are
`approx_fa` and the rest are exact full adders (`exact_fa`). The "number of approximate bits" runs
from 0 (an exact adder) to WIDTH. The default, `WIDTH = 8, NAB = 8`, makes every cell approximate.
That gives `sum[i] = a[i] | (i == 0 ? cin : b[i-1])` and `cout = b[7]`. The usual accuracy comparison
for this cell uses NAB = 1: only bit 0 is approximate, and bit 0's `b` becomes the carry into the
exact upper part.

## 3. The 8x8 multiplier (`approx_mult8`)

This is the part that needs the most care. The 64 partial products `a[i] & b[j]` fall into 15
columns `k = i + j`. Three reduction rows (PPRT, for partial-product reduction tree) bring every
column down to at most two bits, and a final ripple-carry adder adds those two bits. Every cell
takes bits of one column. It returns a sum bit in that column and carries into the next one or two
columns. An n:3 counter (`counter_n3`) is an exact population count of up to seven bits. Its three
outputs are Sum (weight 1), Cout1 (weight 2) and Cout2 (weight 4).

Column heights and cell placement (HA = half adder, AFA = approximate full adder, FA = exact full
adder, n:3 = counter, "-" = bits pass through):

| column k | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 | 15 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| partial products | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 7 | 6 | 5 | 4 | 3 | 2 | 1 | 0 |
| row 1 cell | - | HA | AFA | 4:3 | 5:3 | 6:3 | 7:3 | 7:3 + 1 passed | 7:3 | 6:3 | 5:3 | 4:3 | AFA | HA | - | |
| bits after row 1 | 1 | 1 | 2 | 2 | 2 | 3 | 3 | 4 | 3 | 3 | 3 | 3 | 3 | 3 | 2 | 0 |
| row 2 cell | - | - | HA | HA | HA | FA | FA | 4:3 | FA | FA | FA | FA | FA | FA | - | |
| bits after row 2 | 1 | 1 | 1 | 2 | 2 | 2 | 2 | 2 | 2 | 3 | 2 | 2 | 2 | 2 | 3 | 0 |
| row 3 cell | - | - | - | HA | HA | HA | HA | HA | HA | FA | HA | HA | HA | HA | FA | |
| bits after row 3 | 1 | 1 | 1 | 1 | 2 | 2 | 2 | 2 | 2 | 2 | 2 | 2 | 2 | 2 | 2 | 1 |

`p[3:0]` comes straight from columns 0 to 3. Columns 4 to 15 are added by a 12-bit `approx_rca`
whose lowest `NAB` cells are approximate. Its operand A is the row-3 sum bit of each column and its
operand B is the carry row 3 sent into the column. Its carry out is dropped, since 255 x 255 fits in
16 bits.

Inside a column, partial products are ordered by rising `i`. For the two approximate cells of row 1
this means `A = a[i0]&b[k-i0]`, `B` the next one and `Cin` the third. All of a column's products are
equally likely, so this order does not change the error statistics.

**Choices made here.** The placement above is read from the published dot diagram. The bit counts
in the table agree with every row of that diagram. The published text, however, counts "three HAs
and nine FAs" in the second row, where the diagram shows three HAs, eight FAs and one 4:3 counter.
This RTL follows the diagram. Only the two row-1 full adders are named as approximate. The row-2 and
row-3 full adders here are exact: making them approximate as well raises NMED about four-fold. The
number of approximate cells in the final adder is a parameter, `NAB`, with default 1.

**Accuracy.** Measured over all 65,536 operand pairs, with MED = mean |p - a*b|,
MRED = mean |p - a*b| / (a*b) over non-zero products, and NMED = MED / 255^2:

| final adder | MED | MRED | NMED | products in error |
|---|---|---|---|---|
| NAB = 0 (exact) | 1152.9 | 0.0652 | 0.01773 | 48.3 % |
| NAB = 1 (default) | 1153.3 | 0.0654 | 0.01774 | 48.9 % |
| NAB = 12 | 4164.9 | 0.226 | 0.0641 | 77.0 % |

Nearly all of the error comes from the approximate cell in column 12 (weight 4096). The published
accuracy figures for this multiplier are about ten times better (NMED 0.0017, MRED 0.0148). No
arrangement of the named cells tried here reached them. Treat the multiplier's accuracy as this RTL's
own, not as a reproduction of the published numbers.

## 4. The binary 3x3 mean filter (`mean_filter`, the top)

    pix_in --> U8 -> U7 -> U6 -> U5 -> U4 -> U3 -> U2 -> U1 -> U0    (window_fifo, 9 flip-flops)
                |     |     |     |     |     |     |     |     |
               W8    W7    W6    W5    W4    W3    W2    W1    W0    (approx_mult8 x 9: {8{Ux}} * MASK)
                \_____|_____/     \_____|_____/     \_____|_____/
                  Adder 3           Adder 2           Adder 1         (tap_adder3, 16-bit in)
                        \_______________|_______________/
                                     Adder 0                          (tap_adder3, 18-bit in)
                                        |
                              output register --> out_sum, out_pixel, out_valid

- **Pixels.** Input pixels are one bit wide: grey images are thresholded after noise is added. Each
  bit is copied to all eight multiplier bits, so a pixel is 0x00 or 0xFF.
- **Mask.** Every mask weight is 1/9. The RTL encodes it as the 0.8 fixed-point value 28 (28/256 =
  0.109), in `approx_pkg::MASK_ONE_NINTH`, and the top can override it with parameter `MASK`. An
  all-ones window sums to 9 x 255 x 28 = 64,260, and `out_pixel = out_sum[15:8]` = 251. The clamp
  to 255 only matters for larger masks. For the operand pairs that occur (0 or 255 times 28), the
  approximate multiplier is exact, so at the default mask the filter output is the exact
  fixed-point mean.
- **Timing.** With `pix_valid` high, a pixel enters U8 at a rising edge. The multipliers and adders
  settle within that cycle, and the next rising edge registers the result. `out_valid` is high in
  the cycle after each accepted pixel, once nine pixels have been accepted since reset. An idle
  cycle (`pix_valid` low) holds the window and gives one cycle with `out_valid` low. Throughput is
  one result per accepted pixel, and latency is one clock. Reset is synchronous and active low, and
  it empties the window.
- **What a "window" is.** The hardware keeps the last nine pixels of the stream and has no line
  buffers. To filter a raster image, the pixel source sends each output pixel's nine neighbours
  back to back, bottom-right first and top-left last. After the ninth shift the top-left pixel then
  sits in U8 (W8) and the bottom-right one in U0 (W0), which matches the window layout W8 W7 W6 /
  W5 W4 W3 / W2 W1 W0. The output that follows the ninth
  pixel is the filtered pixel. `tb/tb_denoise_image.sv` does exactly this.
- **Width of the adder tree.** Four three-input adders are used rather than one nine-input adder, as
  in the original FPGA implementation. Each adder carries two guard bits, so nothing overflows:
  `out_sum` is 20 bits.

## 5. Where the RTL departs from, or adds to, the published design

- The multiplier's row-2 cells, the exactness of the row-2 and row-3 full adders, and `NAB` = 1
  for the final adder are as described in section 3. The published error metrics are not
  reproduced.
- The stand-alone 8-bit adder figure labels the top cell's B input "B1". It is read as B7.
- The encoding of 1/9, the valid handshake, reset, the output register and the clamp are this
  design's own. The original describes only the datapath.
- Adding noise and thresholding the grey images happen off-chip and are not part of the RTL. The
  image testbench generates a noisy binary image itself.
- The original reports a few flip-flops for the stand-alone multiplier without explaining them. The
  multiplier here has none.

## 6. Files, simulation and changing the design

`rtl/` holds one unit per file: `approx_pkg` (types and the mask constant), `approx_fa`, `exact_fa`,
`half_adder`, `counter_n3`, `approx_rca`, `approx_mult8`, `window_fifo`, `tap_adder3`, and
`mean_filter` (the top). Each unit has a self-checking testbench, `tb/tb_<unit>.sv`, that prints
`TB_RESULT checks=N failures=M`:

- `tb_approx_fa`: the truth table above.
- `tb_counter_n3`: every input pattern of the 4:3, 5:3, 6:3 and 7:3 counters.
- `tb_approx_rca`: exhaustive over the operands for NAB = 8, 1 and 0, against closed-form
  expressions.
- `tb_approx_mult8`: spot products, plus the exact total error distance and error count of the
  exhaustive sweep for NAB = 1 and 0. It also prints MED, MRED and NMED.
- `tb_window_fifo`: a random stream with random stalls.
- `tb_tap_adder3`: random and all-ones operands.
- `tb_mean_filter`: the top at its default parameters. It runs a random stream with stalls, all-zero
  and all-one windows, and a reset in mid-stream. Every output and every `out_valid` cycle is
  compared with a model.
- `tb_denoise_image`: a noisy 64x64 binary image, filtered window by window. It checks every output
  pixel and prints the PSNR before and after filtering (about 12 dB and 16 dB).

To simulate with Verilator, for example:

    verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/approx_pkg.sv tb/tb_mean_filter.sv --top-module tb_mean_filter -o sim
    ./obj_dir/sim

Replace the testbench name to run another unit. All testbenches finish in seconds.

Useful knobs:

- `approx_mult8 #(.NAB(n))` sets the number of approximate cells in the final adder (0 to 12).
- `approx_rca #(.WIDTH(w), .NAB(n))` sets the adder width and its approximate LSBs.
- `mean_filter #(.MASK(m), .NAB(n))` sets the mask weight and the multiplier's NAB.

To move the approximate cells elsewhere in the multiplier, swap `approx_fa` and `exact_fa` in the
row of `approx_mult8.sv` concerned. `tb_approx_mult8` then reports the new MED, MRED and NMED, and its
totals, which are for the default arrangement, will flag the change.
