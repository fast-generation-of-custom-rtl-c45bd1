# Custom floating-point spatial filters for streaming video

Spatial filters, whether a convolution, a median or an arbitrary non-linear function of a pixel
neighbourhood, are cheap to write in software and too slow to run there on HD video. This
design runs them in hardware at one output pixel per clock. The filters work on a pixel
stream in a small floating-point format of their own. The number format is a parameter: the
default is a 16-bit float with 10 mantissa bits and 5 exponent bits, written `float16(10,5)`.

The design follows the architecture of "Fast Generation of Custom Floating-Point Spatial
Filters on FPGAs". It covers:

- a window generator that turns a raster pixel stream into one H×W neighbourhood per clock,
  with border handling;
- a small library of pipelined floating-point operators, each with a fixed latency;
- five filters built from them:
  - 3×3 and 5×5 convolutions with run-time kernels;
  - a median filter built from two 5-input sorting networks;
  - a non-linear example filter that uses sqrt, log2, 2^x and division;
  - a Sobel gradient magnitude.

All five filters run side by side in the top module `fp_spatial_filters`, fed by one video
stream. Each filter's schedule is fixed at elaboration: every path through it is padded with
delay registers so that the operands of each operator arrive in the same clock.

## Number format

A float is `{s, e, m}`: 1 sign bit, `EXP_WIDTH` exponent bits and `MANTISSA_WIDTH` fraction
bits. Its value is `(-1)^s · 1.m · 2^(e − BIAS)`. With the defaults, 6.75 is `16'h46c0` and
1.0 is `16'h3c00`.

The arithmetic is kept simple on purpose. These rules are this design's own; the paper does not
specify them:

- An exponent field of 0 means zero. There are no subnormals.
- There is no Inf and no NaN. A result too large for the format saturates to the largest
  magnitude. A result too small becomes zero.
- Results are truncated toward zero, not rounded.

`rtl/fp_pkg.sv` holds what the modules share:

- the operator latencies;
- an ordering key that makes a float compare like an unsigned integer;
- real↔float conversion, used for constants at elaboration and by the testbenches;
- the coefficient generator for the polynomial operators.

## Operators and their latencies

Every operator is combinational logic followed by a chain of `LATENCY` registers, so it
accepts a new operand set on every clock. The latencies are the ones the filter schedules are
built from:

| operator | module | latency | how |
|---|---|---|---|
| a + b | `fp_adder` | 6 | align with 3 guard bits and a sticky bit, add or subtract, normalise |
| a · b | `fp_mult` | 2 | mantissa product, one-bit normalisation |
| max(a, b) | `fp_max` | 1 | ordering-key compare |
| CMP_and_SWAP | `fp_cmp_and_swap` | 2 | b0 = min, b1 = max |
| ×2^k | `fp_shift` | 1 | adds k to the exponent (`FP_RSH(1)` is k = −1, `FP_LSH(3)` is k = 3) |
| √a | `fp_sqrt` | 5 | 4-segment degree-2 polynomial |
| log2 a | `fp_log2` | 5 | exponent + 4-segment degree-2 polynomial of log2(1.m) |
| 2^a | `fp_pow2` | 6 | split into integer and fraction; 4-segment degree-2 polynomial of 2^f |
| a / b | `fp_div` | 7 | a × (1/b) with a 4-segment degree-3 polynomial of 1/m |

The polynomial operators share `poly4_eval`. It evaluates one of four polynomials in fixed
point with `MANTISSA_WIDTH + 6` fraction bits. The segment count and degree follow the
paper. The coefficients are this design's choice. They are interpolants through the Chebyshev
nodes of each segment, and `fp_pkg::poly_coef` computes them at elaboration, so they follow
the float format automatically. The square root segments on {odd, even exponent} ×
{mantissa below, above 1.5}. log2 and 1/x segment on the top two mantissa bits, and 2^f on
the top two bits of the fraction.

With `float16(10,5)`, the operators agree with double precision to within a few units in the
last place. The unit testbenches check each one against a real-valued reference.

## The window generator

The window generator is `rtl/window_generator.sv`, built from `line_buffer.sv` and
`counter_xy.sv`. It is the least obvious part of the design.

### Stream

Pixels arrive in raster order, `IMG_W` per line. `vld_pix` marks the cycles that carry a
pixel; blanking cycles simply hold it low. A one-cycle `vsync` before the first pixel of a
frame restarts the column/line counter.

### Line buffers

`WIN_H − 1` line buffers are chained. The input pixel feeds buffer 0, and buffer k feeds
buffer k+1. Each buffer reads the old pixel at the current column on the rising edge and
writes the new one on the following falling edge, at the address latched on the rising edge.
This removes the read-before-write hazard with a single address.

Together with the input, this gives `WIN_H` vertically aligned pixels per column. Row 0 of the
window is the newest line, and row k is the output of buffer k−1. Column `WIN_W − 1` holds
the newest pixel. `w[r][c]` is therefore the pixel at column `x + c − CW`, line
`y + CH − r` of the window centred on (x, y), where `CH = (WIN_H − 1)/2` and
`CW = (WIN_W − 1)/2`.

### Borders

Borders use constant extension: pixels outside the frame read as `BORDER`, which is 0.0 by
default. Two mechanisms produce it.

**Line selects.** A line select on each window row replaces a line that lies above the first
line or below the last line of the frame with `BORDER`. For row k < CH, the select is active
while `k ≤ y < CH`. For row k > CH, it is active while `CH ≤ y < k`. Here y is the line of
the pixel entering.

**Line wrap.** A window always ends one line with its rightmost columns and starts the next
line at its left border. While the newest pixel is in columns `0 … CW−1` of a new line, the
window is still finishing the previous line. `BORDER` is shifted into the newest column,
because those positions lie past the right edge of the previous line.

When the newest pixel reaches column CW, the window reloads:

- its left columns become `BORDER`;
- its middle columns come from the `H·(W−1)/2` border registers `r`, which captured the first
  pixels of the line as they went by;
- the newest pixel goes to the rightmost column.

A 3×3 window needs 3 border registers and a 5×5 window needs 10.

### Output timing

There is one window per valid input pixel. The window centred on pixel n (counting from the
start of the frame) appears after the clock edge that accepts input pixel
`n + CH·IMG_W + CW + 1`. `win_valid` pulses for that cycle, and `center_x`/`center_y` give
the centre. An input register (`pix_r`) aligns the input pixel with the registered
line-buffer outputs, which accounts for the "+1".

A consequence: the windows of the last CH lines of a frame are completed by the first pixels
of the next frame. After the last frame, feed `CH·IMG_W + CW + 1` dummy pixels to flush them
out.

### Departures from the paper

The paper's drawings of the line-select muxes carry conditions on the column counter. The
5×5 drawing also carries a select for one window mux. These did not produce correct windows
together with the border-register capture as timed here. The conditions described above
replace them, and the testbench checks them against windows cut out of a stored frame at
3×3 and 5×5.

## Filters

**Convolution (`conv_filter`).** It has one `fp_mult` per window position and an
`adder_tree`. `AdderTree(N)` splits N into N0 = 2^⌊log2 N⌋ inputs and the remaining
N − N0. The result of the smaller tree is delayed so that both arrive together. The latency is
`6·⌈log2 N⌉`:

- 3×3 is AdderTree(8) plus one product delayed by 18 cycles.
- 5×5 is AdderTree(16) plus AdderTree(9).

The kernel is an input port, so it can change at run time. The new kernel applies to the
windows that enter the multipliers after the change. Latency: 26 cycles for 3×3, 32 for 5×5.

**Median (`median_filter`, `sort5`).** Two 5-input Bose–Nelson sorting networks run in
parallel. Each has nine compare-and-swaps in six stages, with 12 cycles of latency.

- One network sorts the diagonal "×" footprint: w00, w02, w11, w20, w22.
- The other sorts the "+" footprint: w01, w10, w11, w12, w21.

Their two medians are averaged: added, then multiplied by 0.5 with an exponent shift.
Latency: 19 cycles. This is the paper's "median" filter. It is not the true 9-pixel median.

**Non-linear example (`nl_filter`).** With w′ = max(w, 1):

```
f_alpha = 0.5 · ( √(w′00·w′02) + √(w′20·w′22) )
f_beta  = 8 · ( log2(w′01·w′21) + log2(w′10·w′12) )
f_delta = 2^(0.0313 · w′11)
f_zeta  = f_alpha · min(f_beta, f_delta) / max(f_beta, f_delta)
```

The min/max pair comes from a compare-and-swap. The schedule:

- f_alpha and f_beta are ready at cycle 15.
- f_delta is ready at cycle 9 and is delayed by 6.
- The compare-and-swap and the division bring the ratio to cycle 24.
- f_alpha is delayed by 9, and the final multiply ends at cycle **26**.

The paper's prose once describes the 1-bit right shift as "2·a0". Its equation and drawings
use 0.5, and this design uses 0.5.

**Sobel (`sobel_filter`).** Two 3×3 convolutions share one window, with the constant kernels
Kx = [1 0 −1; 2 0 −2; 1 0 −1] and Ky = Kxᵀ. Each result is squared, the squares are added
and the square root is taken. Latency: 26 + 2 + 6 + 5 = 39 cycles.

## Top level: `fp_spatial_filters`

The top has two window generators:

- a 3×3 generator, shared by conv3x3, median, nl and Sobel;
- a 5×5 generator, which feeds conv5x5.

Each filter has four outputs: `<f>_pix`, `<f>_valid`, and `<f>_x`/`<f>_y`, which is the
window centre delayed by that filter's latency. The paper builds each filter as a separate
FPGA design, so combining them under one top is this design's choice.

| filter | latency after the window |
|---|---|
| `conv3` | 26 |
| `conv5` | 32 |
| `median` | 19 |
| `nl` | 26 |
| `sobel` | 39 |

Defaults: `IMG_W = 1920`, `IMG_H = 1080`, `float16(10,5)`.

- The line buffers hold 1920 words, so 640×480, 1280×720 and 1920×1080 streams all fit. A
  narrower image needs `IMG_W` set to its width, because the line length sets the wrap point.
- At one pixel per clock, 1080p60 needs the standard 148.5 MHz pixel clock: 2200×1125 total
  pixels per frame including blanking. Whether that clock closes on a given FPGA has not been
  checked here.
- Other float formats such as float24(16,7), float32(23,8) and float40(30,9) are parameter
  changes. Only `float16(10,5)` has been simulated.

## Verification

Each module has a self-checking testbench in `tb/`. Each testbench:

- drives random stimulus, one item per clock;
- checks every result exactly `LATENCY` cycles later against a double-precision model, with a
  tolerance sized to the truncating arithmetic;
- ends with `TB_RESULT checks=… failures=…`.

What the testbenches cover:

- **Window generator:** 3×3 and 5×5 on an 8×6 image with random blanking. It checks every
  window element, the centre coordinates and the position in the stream.
- **`tb_fp_spatial_filters`:** runs the whole top on a 12×8 image, three frames, with random
  blanking and kernel changes between frames. It checks all five filters' pixels and
  coordinates against models applied to the stored frames. It also counts top, bottom, left
  and right border windows, blanking cycles, vsync pulses, both outcomes of the nl filter's
  compare-and-swap, and clamped pixels, and fails if any count is zero.
- **`tb_fp_spatial_filters_full`:** runs one complete 1920×1080 frame through the top at its
  default parameters, with random blanking. It checks all 5 × 2,073,600 output pixels against
  the same models. This takes about half a minute with Verilator. Both end-to-end benches
  share `tb/fp_spatial_filters_bench.sv`.
- **Sobel range:** with real image data, the Sobel squares easily exceed the float16 range
  (largest value 131008). They then saturate, and the bench models that saturation.

To run a testbench with plain Verilator:

```
verilator --binary --timing -Irtl -Itb rtl/fp_pkg.sv tb/tb_nl_filter.sv --top-module tb_nl_filter
./obj_dir/Vtb_nl_filter
```

## Limits and open points

- The arithmetic truncates and has no subnormals, Inf or NaN. Filters fed with values near
  the format's range limits saturate or flush to zero.
- The polynomial coefficients are not the paper's, because it does not print them. The
  accuracy of sqrt, log2, 2^x and 1/x is set by this design's choice of segments.
- Kernel loading has no protocol: `k3`/`k5` are plain inputs. Change them only between
  frames, at the point described under "Convolution".
- The DSL that generated the filters in the paper is software and is not part of this RTL.
  The filters here are written by hand to the schedules it would produce.
