# Exact multiplication from Mitchell's logarithm, and a 3x3 Gaussian filter built on it

Mitchell's logarithmic multiplier gets a product with shifts and additions
instead of partial products. It approximates `log2(1+x)` by `x`, so its
result is usually a little too small. The design here rests on one
observation. With 2-bit operands, 15 of the 16 operand pairs include a zero
or a power of two, and Mitchell's method is exact for those. The only wrong
case is `11 x 11`: Mitchell gives `1000` (8) where the answer is `1001` (9).
A 2x2 Mitchell cell with one correction term is therefore exact. Larger
multipliers are then built by the Karatsuba-Ofman style of decomposition
("KOM" below): split each operand into halves, multiply the halves, and
recurse down to the exact 2x2 cell. The result is an exact, pipelinable
N x N multiplier with no partial-product array.

The multiplier is applied to a 3x3 Gaussian smoothing filter for 8-bit
fingerprint images. Three row FIFOs feed a 3x3 register window. Nine 8x8
multipliers apply the kernel, and an adder tree and a shift by 8 give the
output pixel.

This RTL follows the design published by Bhairannawar, Rathan, Raja,
Venugopal and Patnaik ("FPGA Based Efficient Multiplier for Image
Processing Applications Using Recursive Error Free Mitchell Log Multiplier
and KOM Architecture"). That publication gives block diagrams and an
algorithm but no source code. Widths, the exact bit wiring, protocols,
reset behaviour and the filter's framing are choices made here; the section
"Departures and own choices" lists them.

## The 2x2 error-free Mitchell cell (`efmlm2`)

For an operand `a` with leading one at position `k`, Mitchell writes
`a = 2^k (1 + x)`, so `log2 a ≈ k + x`. The product is the antilog of the
summed logarithms. `efmlm2` works directly on the product scale, with small
integers:

| step | quantity | for `a`, `b` in {1, 2, 3} |
|---|---|---|
| characteristic | `k1 = a[1]`, `k2 = b[1]` | leading-one position |
| decoded characteristic | `d1 = 2^k1`, `d2 = 2^k2` | |
| mantissas on the product scale | `x1 = (a - d1) << k2`, `x2 = (b - d2) << k1` | `2^(k1+k2) * x` |
| characteristic sum | `d12 = 2^(k1+k2)` | |
| antilog | `P_MLM = d12 + x1 + x2` | |

A zero detector forces the product to `0000` when either operand is `00`.
A comparator replaces `P_MLM = 1000` by `1001`. That one correction makes
the cell exact, because 8 is never a true 2x2 product and `11 x 11` is the
only pair for which Mitchell returns 8. The cell is combinational: 4 input
bits and 4 output bits.

## From 2x2 to N x N (`kom_mult`, `kom_stage`)

Write `a = aH·2^(N/2) + aL` and `b = bH·2^(N/2) + bL`. Then

    a·b = low + (mid1 + mid2)·2^(N/2) + high·2^N
    low = aL·bL   mid1 = aH·bL   mid2 = aL·bH   high = aH·bH

All four half-size products are computed. The decomposition does **not**
use Karatsuba's three-multiplication trick `(aL-aH)(bH-bL)`. A 16x16
multiplier therefore holds 4 8x8, 16 4x4 and 64 2x2 multipliers. Because
each 2x2 leaf is exact, the whole product is exact: the average and the
maximum relative error are both 0.

`kom_mult` lays the tree out level by level, not as a module that
instantiates itself. At level `l` the sub-multipliers are `S x S` with
`S = 2^l`, and sub-multiplier `(i, j)` computes `a[i*S +: S] * b[j*S +: S]`.
Its four children one level down are:

| child | role |
|---|---|
| `(2i, 2j)` | low |
| `(2i+1, 2j)` | mid1 |
| `(2i, 2j+1)` | mid2 |
| `(2i+1, 2j+1)` | high |

Level 1 is made of `efmlm2` cells. Every higher level is made of
`kom_stage` instances.

`kom_stage` is the combining datapath of one level. It has three adders and
a fixed shift:

    adder 1   {cy, mid}  = mid1 + mid2                      N-bit, carry in 0
    shift     mid[N/2-1:0] moves up by N/2 bits             wiring only
    adder 2   {c1, p_lo} = low + {mid[N/2-1:0], N/2 zeros}
    adder 3   p_hi = high + {zero-extended cy, mid[N-1:N/2]} + c1
    align     p    = {p_hi, p_lo}

The carries are the subtle part. `mid1 + mid2` can be N+1 bits wide. Its
top carry `cy` has weight `2^(N/2 + N)`, so it enters adder 3 just above
`mid`'s upper half, zero-extended. Adder 2's carry `c1` also goes into
adder 3. Adder 3 cannot overflow, because `a·b < 2^(2N)`.

### Pipeline and latency

With `PIPELINED = 1` (the default), `kom_stage` has three register ranks:

1. on the four sub-products;
2. after adder 1 and the shift;
3. after adder 2.

Adder 3 and the alignment drive the output combinationally, and their
result is captured by the first rank of the next level up. Each KOM level
therefore costs three clocks, and the 2x2 leaves add none:

| N | latency (clocks) | throughput |
|---|---|---|
| 4 | 3 | one product per clock |
| 8 | 6 | one product per clock |
| 16 | 9 | one product per clock |

`refmlm_pkg::kom_latency(N, PIPELINED)` returns the latency. The pipeline
has no reset and no enable. It always advances, and the user carries a
valid bit alongside, as `gauss_filter` does. `PIPELINED = 0` gives the
purely combinational multiplier, and `clk` is then unused. The pipelined
16x16 multiplier has exactly 65 pins: clock, two 16-bit operands and a
32-bit product.

The published text also describes the pipeline in a second way: seven
periods per product, with the four sub-products coming out one period after
another. That account does not match its own block diagram, which draws the
four sub-multipliers in parallel. This RTL follows the diagram. The four
sub-multipliers work at the same time, and a new operand pair is accepted
on every clock.

## The Gaussian filter (`gauss_filter`)

    in_pixel -> FIFO0 -> FIFO1 -> FIFO2
                  |        |        |
                  v        v        v
            row r7-r9   r4-r6    r1-r3        3x3 register window
                           |
               r1..r9 x K1..K9   nine 8x8 kom_mult
                           |
               adder tree (conv_sum), >> 8, output register
                           |
              out_pixel, out_row, out_col, out_valid

The kernel is the sigma = 1.0 Gaussian scaled by 256 (taps sum to 256):

    21 31 21
    31 48 31
    21 31 21

The kernel is symmetric, so convolution and correlation give the same
result.

**Row FIFOs (`line_fifo`).** Each FIFO is kept full and so works as a delay
of exactly one row. It is a circular buffer of `len-1` words plus an output
register. On each push it returns the pixel pushed `len` pushes earlier.
The three FIFOs are in cascade, and the window reads the far end of each.
The row length is a run-time input (`cfg_width`), so one build handles any
width up to `MAX_WIDTH`.

**Window (`reg_window`).** Three rows of three registers. Each input pixel
shifts every row left by one column, and the three FIFO outputs enter at
the right. After the last column of a row, the window simply continues into
the next row. That is how it moves down the image.

**Position tracking.** After push `m` of a frame (`m = 0` at `in_sof`), the
window's top-left pixel is image pixel `m − (3·W + 2)`. Earlier windows hold
data from no frame and are ignored. A window is valid when its top-left
column is at most `W−3` and its top-left row at most `H−3`. Only valid
windows give an output, so a `W x H` frame yields `(W−2) x (H−2)` pixels in
raster order. Each is tagged with its window-centre coordinates
(`out_row`, `out_col`, both starting at 1). Border pixels are not produced.

**Sum and divide (`conv_sum`).** The products are added in the tree of the
published datapath: four pairwise adders on the products of r1–r8, then
two, then one, then a final adder for the r9 product. The sum is shifted
right by 8, which truncates. The result saturates at 255, which cannot
happen with this kernel.

### Streaming protocol and timing

- At most one pixel per clock, in raster order, qualified by `in_valid`.
  `in_sof` marks the first pixel of a frame and restarts the counters.
- `cfg_width` (3..640) and `cfg_height` (3..480) must stay stable during a
  frame.
- `in_valid` may drop at any time. The window then holds, and no output is
  made.
- **Padding.** The window reads the far ends of three cascaded row FIFOs.
  So the last output row leaves only after `W` more pixels have been pushed
  after the frame. These pixels can carry any value, but `in_sof` must stay
  low during them, because a new `in_sof` would restart the counters.
- An output appears 7 clocks after the push that completes its window: 6
  for the pipelined 8x8 multipliers and 1 for the output register. With
  `PIPELINED = 0` it is 1 clock. At one pixel per clock, the filter gives
  one output per clock along a row.
- `rst_n` is an asynchronous active-low reset of the control state. The
  data registers are not reset.
- Assertions check that the frame size at each `in_sof` is within range,
  and that every FIFO push has a legal row length.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `kom_mult` | `N` | 16 | operand width, power of two, at least 4 |
| `kom_mult`, `kom_stage`, `gauss_filter` | `PIPELINED` | 1 | 3 register ranks per KOM level; 0 = combinational |
| `gauss_filter` | `MAX_WIDTH`, `MAX_HEIGHT` | 640, 480 | largest frame (row FIFOs hold `MAX_WIDTH-1` words each) |
| `gauss_filter` | `MULT_N` | 8 | multiplier width used in the filter |
| `gauss_filter` | `KERNEL` | 21 31 21 / 31 48 31 / 21 31 21 | nine 8-bit taps, row-major |
| `line_fifo` | `DATA_W`, `MAX_LEN` | 8, 640 | pixel width, longest row |
| `conv_sum` | `PROD_W`, `OUT_W`, `SHIFT` | 16, 8, 8 | product width, pixel width, log2 of the kernel scale |

The defaults of 640 x 480 are the size of the largest FVC2004 fingerprint
images. The three other FVC2004 databases (328x364, 300x480, 288x384) fit
within them.

## Departures and own choices

Taken from the source design:

- the 2x2 cell, with its zero detector, log/antilog steps and `1000 → 1001`
  correction;
- the four-product decomposition down to 2x2, with the counts 64/16/4/1 for
  16x16;
- the three adders, zero extension and shift of each KOM level;
- the five-stage pipelined organisation;
- three row FIFOs, the 3x3 register window, nine multipliers, the adder
  tree and the divide-by-256 shift;
- the kernel taps and the 8x8 multiplier width in the filter.

Chosen here, because the source does not say:

- The exact bit wiring between the adders of a KOM level. The source names
  the blocks and bus widths only.
- Where the pipeline registers sit. Every signal that crosses a stage
  boundary is registered, so the pipeline is balanced at 3 clocks per
  level. This departs from the source's 7-period account, which is
  discussed above.
- No reset and no enable in the multiplier.
- The comparator tests the antilog output for `1000`. The source's
  algorithm table instead tests both operands for `11`, which selects the
  same case.
- The FIFOs are chained in cascade, and the window reads their far ends.
  This is why the padding rule exists.
- Run-time frame size, the `in_valid`/`in_sof` protocol, coordinate
  tagging and the valid-only border policy.
- Row-major assignment of r1..r9 to rows. The kernel is symmetric, so this
  does not affect results.
- The adders in the tree are two-operand adders. The source draws them as
  carry-save adders, but each has two inputs.
- Truncating division and saturation at 255.

Not built: the comparison multipliers of the source (Mitchell without
correction, operand decomposition, the basic block with 1–3 error
correction circuits), the FPGA-specific results (LUT counts, clock rates)
and the host side that reads images.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_efmlm2` | all 16 pairs; the `11 x 11` correction is observed |
| `tb_kom_mult` | 16x16 pipelined, one pair per clock, each product exactly 9 clocks later: corner operands, the worked examples 16·60 = 960 and 18·60 = 1080, and 3000 random pairs |
| | the same pairs on the combinational 16x16 |
| | all 256 4x4 pairs pipelined (latency 3), with AER = MER = 0 % |
| | all 65536 8x8 pairs |
| `tb_line_fifo` | delay of exactly `len` pushes for several lengths, with random idle cycles and clears |
| `tb_reg_window` | window contents against a model under random shift/hold |
| `tb_conv_sum` | kernel-weighted random windows, extremes, and saturation |
| `tb_gauss_filter` | end to end at the default parameters: frames of 5x4, 12x7, 3x3, 33x9 and 640x480 |
| | every output's value, coordinates and exact cycle (7 clocks after its window completes) are checked against a reference convolution |
| | counts stalls, frame restarts, size changes, back-to-back outputs, downward window moves and suppressed border windows, and requires each to occur at least once |
| `tb_gauss_filter_comb` | the same procedure with `PIPELINED = 0` and 64 x 32 row buffers; outputs 1 clock after their window |
| `tb_gauss_fvc2004` | FVC2004 frame sizes with 10/20/30/40 % salt-and-pepper noise on a synthetic ridge image; every output is checked and PSNR is reported |

Typical `tb_gauss_fvc2004` results, 640x480, PSNR against the clean image:

| noise | noisy | smoothed |
|---|---|---|
| 10 % | 15.5 dB | 22.5 dB |
| 20 % | 12.5 dB | 19.8 dB |
| 30 % | 10.7 dB | 18.1 dB |
| 40 % | 9.5 dB | 16.7 dB |

The image is synthetic, so these figures cannot be compared with the
published ones, which were measured on real fingerprints. Because the
multiplier is exact, the filter output is exactly the integer convolution.

To run a testbench with Verilator 5 from the folder that holds `rtl/` and
`tb/`:

    verilator --binary --timing -y rtl rtl/refmlm_pkg.sv tb/tb_gauss_filter.sv \
              --top-module tb_gauss_filter
    ./obj_dir/Vtb_gauss_filter

Replace the testbench name to run another one. The package comes first,
and `-y rtl` finds the modules. Every testbench finishes in seconds.

## Files

- `rtl/refmlm_pkg.sv`: pixel type, kernel, `kom_latency`.
- `rtl/efmlm2.sv`: the exact 2x2 cell.
- `rtl/kom_stage.sv`: the combining datapath of one KOM level.
- `rtl/kom_mult.sv`: the N x N multiplier tree.
- `rtl/line_fifo.sv`, `rtl/reg_window.sv`, `rtl/conv_sum.sv`: the filter's
  row buffer, window and adder tree.
- `rtl/gauss_filter.sv`: the filter, which is the top level.
- `tb/`: the testbenches listed above.
