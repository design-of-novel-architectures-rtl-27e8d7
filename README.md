# A 2D Gaussian surround generator with three scales

Retinex-style image enhancement compares each pixel with a blurred "surround" of
it. The surround is a large 2D Gaussian, here 256 x 256 points. Storing such a
kernel costs 65,536 words for each scale. This design stores almost none of it.
It keeps a single 256-word row of coordinates, -128 ... 127. It then computes the
Gaussian on the fly, one grid point per clock, for three surround scales at once.

The trick is that the coordinate arrays of a square grid are highly redundant.
The x array repeats the same row 256 times, and the y array is its transpose. So
one small ROM, read through two ports, gives both coordinates of every point:
the column counter drives one port and the row counter drives the other. The
Gaussian then needs only squares, one addition, a divide by a constant and a
small exponent table.

## What is computed

For every grid point (x, y), with x and y in -128 ... 127 in raster order
(x fastest), the generator outputs

    k_c = floor((x^2 + y^2) / c^2)                 c = 16, 64, 128
    g_c = floor(128 * exp(-k_c))   if k_c <= 4,    0 otherwise

on three 8-bit outputs `g1` (c = 16), `g2` (c = 64) and `g3` (c = 128).

Because `k_c` is truncated to an integer before the exponent, each output takes
only six values: 128, 47, 17, 6, 2 and 0. The surround is therefore a set of
concentric rings, not a smooth bell:

| scale c | divisor c^2 | k at the grid corner | values that occur in g |
|---------|-------------|----------------------|------------------------|
| 16      | 256         | 128                  | 128, 47, 17, 6, 2, 0 (radius > ~36 gives 0) |
| 64      | 4096        | 8                    | 128, 47, 17, 6, 2, 0   |
| 128     | 16384       | 2                    | 128, 47, 17            |

The peak is 128 at (0, 0), which on the grid is column 128 and row 128.

This form, exp(-r^2/c^2) with an integer argument and a peak of 128, is what the
original design's simulation values show. At the corner, x^2 + y^2 = 32768 gives
scaled values 128, 8 and 2 and outputs 0, 0 and 17. Scaled values of 1 give 47.
It departs from the textbook form in three ways, and a user should know them:

* The divisor is c^2, not 2*sigma^2. That is the usual retinex surround,
  exp(-r^2/c^2).
* The output is not normalised to unit sum. A user who needs the normalising
  constant K = 1 / sum(g) must apply it downstream. The sum is fixed per scale,
  so it can be precomputed.
* The argument is quantised to an integer. This is the coarsest step in the
  design. A finer surround needs fractional bits out of the scale-down units and
  a larger exponent table.

## Data path

```
 start ─► gauss_control ─cnt1─► dual_port_rom ─dout1 (x)─► mult8u8u ─x²─┐
 (U1)    two 8-bit counters     (U2) 256 x 8   ─dout2 (y)─► mult8u8u ─y²─┤
         cnt2 steps when                                   (U3, U4)       ▼
         cnt1 = 255        ─cnt2─►                                  adder (U5)
                                                                        │ x²+y² (17 bit)
                     ┌──────────────────────┬───────────────────────────┤
                     ▼                      ▼                           ▼
              scale_down c=16        scale_down c=64           scale_down c=128   (U6..U8)
                     ▼                      ▼                           ▼
                exponent               exponent                    exponent       (U9..U11)
                     ▼                      ▼                           ▼
                    g1                     g2                          g3
```

| unit | module | clocks | what it does |
|------|--------|--------|--------------|
| U1 | `gauss_control` (two `counter`s) | — | raster counters, run flag |
| U2 | `dual_port_rom` | 1 | word a = a - 128, two registered read ports |
| U3, U4 | `mult8u8u` (uses `split_add`) | 8 | x*x and y*y |
| U5 | `adder` | 4 | x^2 + y^2, 4 bits per clock |
| U6..U8 | `scale_down` | 0 | divide by c^2 (a shift for these scales) |
| U9..U11 | `exponent` | 0 | 5-entry table |

The total latency from a counter value to its outputs is 13 clocks
(`gauss_pkg::LATENCY`). Throughput is one point per clock with no stalls. A
full surround takes 65,536 clocks.

Shared sizes, latencies and the exponent table live in `rtl/gauss_pkg.sv`.

## The pipelined multiplier

The squarers are general signed 8 x 8 multipliers with a deep, regular pipeline.
Each register bank is one clock:

1. **Clk 1:** both operands are turned into magnitudes, so -128 becomes 128, which
   still fits 8 unsigned bits. Eight partial products are registered:
   `P[i] = n1_mag` if bit i of `n2_mag` is set, else 0. The product sign,
   `sign(n1) XOR sign(n2)`, is registered with them.
2. **Clk 2-3:** four adds, `S1[j] = P[2j] + (P[2j+1] << 1)`.
3. **Clk 4-5:** two adds, `S2[j] = S1[2j] + (S1[2j+1] << 2)`.
4. **Clk 6-7:** one add, `S3 = S2[0] + (S2[1] << 4)`.
5. **Clk 8:** the sign is applied, giving `result = sign ? -S3 : S3`.

Each level of the adder tree is a `split_add`. On its first clock it adds the low
halves of its operands. On the second it adds the high halves and the carry. This
halves the carry chain per clock. The operands' high halves, and the sign bit,
travel in registers alongside. The tree is written with generate loops over
`$clog2(W)` levels. The latency is therefore `2*log2(W) + 2`, which is 8 for
W = 8. The registers have no reset: after power-up the first 8 results are
meaningless, and `gvalid` in the top hides them.

## The digit-pipelined adder

`adder` adds the two 16-bit squares four bits per clock. Stage k adds digit k-1
of both operands and the carry of stage k-1. It keeps the digits summed so far
and passes both operands on, shifted right by four. The next digit is then always
in the low bits. For example, 16384 becomes 1024, 64, 4 and 0 in successive
stages. After four stages, the 17-bit sum is the last carry followed by the
accumulated digits. The operand width W and the digit width are parameters. The
latency is W/DIGIT clocks.

## Control, start and the valid flag

`gauss_control` holds a run flag, `enable`. The flag is set on the first clock
where `start` is high while idle. While it is set:

* the column counter `cnt1` steps on every clock;
* the row counter `cnt2` steps on the clocks where `cnt1` is 255.

At point (255, 255) the flag clears, unless `start` is still high. In that case
the next scan begins on the next clock with no gap, and the generator can run
continuously. Both counters wrap to 0, so every scan starts at (-128, -128).

`gvalid` is `enable` delayed by 13 clocks. It is high for exactly the 65,536
points of each scan, so a consumer can count points from its rising edge.

## Top-level interface (`gauss`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk` | in | 1 | clock, all registers on the rising edge |
| `reset_n` | in | 1 | asynchronous active-low reset of counters, run flag, ROM outputs and valid line |
| `start` | in | 1 | start a scan; hold high to run scans back to back |
| `g1`, `g2`, `g3` | out | 8 | surround value at scales 16, 64, 128 |
| `gvalid` | out | 1 | `g1..g3` belong to a grid point |

The outputs come from combinational logic after the adder register. A user who
needs registered outputs should add a stage.

## Where this RTL follows its source and where it chooses

These parts follow the original architecture:

* the units and how they connect;
* the one-row coordinate ROM and its contents;
* the two cascaded 8-bit counters;
* the multiplier: magnitudes, eight partial products, a three-level tree with
  1/2/4-bit shifts, LSB/MSB clock pairs and a final sign clock;
* the adder's 4-bit digit pipeline;
* the three scales;
* an exponent implemented as a look-up table over inputs 0 ... 4.

Choices made in this design:

* **Multiplier depth.** Eight pipeline clocks are used. The original text speaks
  of five pipeline levels, while its detailed drawing numbers eight clocks.
* **Signed operands.** The original text calls the multiplier unsigned. Its
  simulation squares negative coordinates correctly and it names magnitude
  signals. Here the core is unsigned and the sign is handled around it.
* **Exponent table.** The table contents, 128 * exp(-k), are inferred from
  printed simulation values. So are the division by c^2 rather than 2*sigma^2,
  and the missing normalisation.
* **Widths.** The outputs are 8 bits wide. A 16-bit-data variant of the original
  has 16-bit outputs, 16-bit ROM words and 32-bit adder operands; that variant is
  not built.
* **Control.** The registered ROM read, the reset values, the run flag,
  back-to-back scans and `gvalid` are this design's own.
* **Pipeline reset.** The multiplier and adder have no reset, like the original
  units, which have only a clock pin.

Beyond the generator itself, nothing is built. The original work aims the
surround at filtering 1600 x 1200 video at 30 frames/s. That needs a pixel path:
line buffers and a convolution with this kernel. No such path is described, so
none is provided. The generator produces one kernel value per clock.

## Verification

Each module has a self-checking testbench in `tb/`. Expected values are computed
independently, from integer or real arithmetic in the testbench. Each testbench
prints `TB_RESULT checks=N failures=M` and stops on a watchdog if it hangs.

| testbench | checks |
|-----------|--------|
| `counter_tb` | random enable pattern over several wraps; asynchronous reset |
| `gauss_control_tb` | a full scan from a start pulse is exactly 65,536 points in raster order; idle holds; two back-to-back scans with no gap |
| `dual_port_rom_tb` | every word on port 1, random words on port 2, one-clock read, reset value |
| `mult8u8u_tb` | all 256 squares and 3,000 random signed products, result exactly 8 clocks later; the same for a 16 x 16 instance, 10 clocks later |
| `adder_tb` | carry-chain corners and 4,000 random sums, exactly 4 clocks later |
| `scale_down_tb` | every 17-bit input at all three scales |
| `exponent_tb` | every input up to 1023 plus random ones, against `floor(128*exp(-k))` |
| `gauss_tb` | three full scans at the default size: every output of every point, first output 13 clocks after start, 65,536 valid points per scan, no gap between back-to-back scans; counts row steps, back-to-back scans, use of every table entry and of the zero region, and fails if any never occurs |
| `gauss_paper_values_tb` | replays the values printed in the original simulation (squares of -128 ... -119, and 32768 → 128/8/2 → 0/0/17, 32258 → 126/7/1 → 0/0/47, 32005 → 125) on the internal nets, and 128 at the centre |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/gauss_pkg.sv tb/gauss_tb.sv \
          --top-module gauss_tb -Mdir obj_gauss && obj_gauss/Vgauss_tb
```

Swap in any other testbench name. The full-size `gauss_tb` simulates about
200,000 clocks and finishes in seconds.

## Changing it

* **Scales.** Change the `SCALE` parameters on U6..U8 in `gauss.sv`. A scale that
  is not a power of two gives a constant divider instead of a shift.
* **Exponent table.** The table is `EXP_LUT` and `EXP_MAX` in `gauss_pkg`. For a
  finer surround, widen the scale-down quotient with fractional bits and extend
  the table to match.
* **Grid size.** The grid follows `ADDR_W` and `DATA_W` in `gauss_pkg`. A larger
  grid needs wider coordinates. The multiplier is generic in `W`, with latency
  `2*log2(W)+2`. `MULT_LATENCY`, the adder width and the valid delay all follow
  from `DATA_W`. The two testbenches of the top assume the default size.
