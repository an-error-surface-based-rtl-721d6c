# Interpolation-free fractional motion estimation for VVC

Standard fractional motion estimation (FME) refines the integer motion vector
(IMV) found by integer motion estimation. It interpolates half- and
quarter-pel reference samples and then searches them in two rounds. In
hardware that means a large interpolation datapath and a sequential,
iterative search. This design does neither of these things.

For each coding unit (CU) it measures the rate-distortion cost of nine
integer positions only: the IMV and its eight neighbours. It fits a quadratic
surface through those nine costs and takes the minimum of that surface as
the fractional MV, rounded to quarter pel. The fit and the rounding use
adders, six multipliers and comparators. There is no divider, no
interpolation filter and no iteration.

The engine covers a whole 128x128 CTU. It handles every CU shape from 128x128
down to 8x8 that a binary/quad split produces along the main diagonal
(13 shapes): 8x8, 16x8, 8x16, 16x16, 32x16, 16x32, 32x32, 64x32, 32x64,
64x64, 128x64, 64x128 and 128x128. A quadtree-only mode runs just the five
square shapes and so is about 2.6 times faster.

## 1. The error surface

The candidates are numbered in raster order. Candidate `i` sits at
`(dx, dy) = (i%3 - 1, i/3 - 1)` relative to the IMV, with `y` growing
downwards. Candidate 4 is the IMV itself. The cost of candidate `i` is

    C_i = SATD_i + sqrt(lambda) * bits(MVD_i)

and the model is

    C(x, y) = P1 x^2 + P2 y^2 + P3 xy + P4 x + P5 y + P6 .

A least-squares fit over a 3x3 grid with `x, y` in `{-1, 0, 1}` decouples
completely. Each parameter becomes a fixed signed sum of the nine costs.
After multiplying by 12, all the coefficients are integers:

| parameter | closed form (x12)                               |
|-----------|-------------------------------------------------|
| 12 P1     | 2 (C0+C2+C3+C5+C6+C8) - 4 (C1+C4+C7)            |
| 12 P2     | 2 (C0+C1+C2+C6+C7+C8) - 4 (C3+C4+C5)            |
| 12 P3     | 3 (C0 - C2 - C6 + C8)                           |
| 12 P4     | 2 (C2+C5+C8 - C0-C3-C6)                         |
| 12 P5     | 2 (C6+C7+C8 - C0-C1-C2)                         |

`P6` is a constant offset and is never formed. The stationary point is
found by setting both partial derivatives to zero:

    x* = (2 P2 P4 - P3 P5) / (P3^2 - 4 P1 P2)
    y* = (2 P1 P5 - P3 P4) / (P3^2 - 4 P1 P2)

Using the x12 parameters scales the numerators and the denominator by 144,
so the scaling cancels. The point is a minimum only when the surface is a
bowl: `P3^2 - 4 P1 P2 < 0` and `P1 > 0`. Otherwise (a saddle, a ridge or a
flat surface) the design keeps the IMV and reports `fmv_convex = 0`.

### Rounding without a divider

Only `round(4 x*)` is needed, and it is limited to +-3 quarter pels. Let
`a = |numerator|` and `b = |denominator|`. Then:

    |frac| = 3  if 8a >= 5b
             2  if 8a >= 3b
             1  if 8a >=  b
             0  otherwise

The sign is `sign(numerator) xor sign(denominator)`. Each axis therefore
needs three comparators and a chain of three 2:1 multiplexers (3 or 2, then
1, then 0). The multiples `8a`, `3b` and `5b` are shifts plus one adder.
Ties round away from zero. The result is `fmv = 4 * IMV + frac`, in quarter
pel.

## 2. Cost calculator

### Distortion: nine SATD kernels

The source streams one 8x1 row of original pixels per cycle. With it comes a
3x10 window of integer reference samples: rows `dy = -1..1` and columns
`-1..8` around the row, already displaced by the CU's IMV. `fme_residual`
cuts nine 8-pixel residual rows out of the window, one per candidate.

Each of the nine `fme_satd_kernel`s splits its row into two halves of four
pixels. Each half goes through these steps:

1. A 1-D 4-point Hadamard step.
2. A 4x4 transpose buffer, `fme_transpose_buf`. It has two register banks
   used ping-pong: one is written row by row while the other is read column
   by column.
3. The second Hadamard step.
4. An absolute value.

An adder tree then sums all 16 magnitudes of both halves for every column
read out. It accumulates them into the unnormalised SATD of the 8x8 block,
which is the sum of its four 4x4 SATDs. A kernel takes one row per cycle and
reports a block 5 cycles after its eighth row.

### Rate: the MVD kernel and the coarse MV predictor

The true MV predictor is only known after mode decision, which comes later.
FME therefore uses a coarse predictor (CMVP) built from MVs this engine has
already produced. `fme_mvd_kernel` stores the final quarter-pel MV of every
8x8 CU of the CTU in a 16x16 array. For a CU with origin `(ox, oy)` (in 8x8
block units) and size `w x h` blocks, it looks at five neighbours, in this
order:

| name | position        |
|------|-----------------|
| A0   | (ox-1, oy+h)    |
| A1   | (ox-1, oy+h-1)  |
| B0   | (ox+w, oy-1)    |
| B1   | (ox+w-1, oy-1)  |
| B2   | (ox-1, oy-1)    |

The first neighbour that is *available* supplies the predictor. Available
means two things:

- the neighbour lies inside the CTU;
- it precedes the CU's first block in Z order, so its MV has already been
  written.

If no neighbour is available, the predictor is zero. B2 is checked last, so
it never wins: whenever B2 is available, A1 is too.

For each candidate the kernel does the following:

1. It forms the quarter-pel MVD `4 (IMV + d) - mvp` per component.
2. It counts the signed Exp-Golomb bits of that MVD.
3. It multiplies the bit count by `sqrt(lambda)`. The rate is
   `(sqrt_lambda_q8 * bits + 128) >> 8`, saturated to 16 bits.

`sqrt(lambda)` comes from the usual `lambda = 0.57 * 2^((QP-12)/6)` model,
held as a 6-entry mantissa table:

    sqrt_lambda_q8 = (M[QP % 6] << (QP / 6)) >> 2
    M[r] = round(256 * sqrt(0.57) * 2^(r/6)) = 193, 217, 244, 273, 307, 344

### Sum: accumulating CUs whose blocks are interleaved

A CU larger than 8x8 covers several 8x8 blocks, and the schedule (next
section) visits those blocks spread out over time. `fme_sum` keeps one set
of nine running sums for each open CU. In Z order only one CU of each shape
is open at a time, except for the tall shapes (8x16, 16x32, 32x64, 64x128).
For those, the left CU and the right CU are both open at once. That gives
13 + 4 = 17 accumulator sets. A set is selected by
`shape base + (tall ? bit lw of bx : 0)`.

The first block of a CU loads its set. Later blocks add to it. The last
block produces the costs:

    cost_i = min(65535, ((SATD_i >> 1) + rate_i) >> (log2 w8 + log2 h8))

`>> 1` is the usual Hadamard normalisation. The area shift keeps the costs
of all CU sizes in 16 bits for the fit. The same shift applies to all nine
costs, so up to rounding it does not move the minimum. The rate is added
once per CU, on its last block.

## 3. The interlaced schedule

`fme_control` walks the 256 8x8 blocks of the CTU in Z (Morton) order. The
x coordinate occupies the even index bits. For each block it runs every
shape in the list above (13, or the squares 0, 3, 6, 9 and 12 in
quadtree-only mode) for eight row cycles each. The engine therefore
processes the same 8x8 block once for each CU that contains it.

A block that is not the last of its CU in Z order only adds to that CU's
accumulators. The last block also triggers the fit and the FMV. The last
block in Z order is the CU's bottom-right block, so the test is
`(bx & (w8-1)) == w8-1 && (by & (h8-1)) == h8-1`, where w8 and h8 are the
CU's width and height in 8x8 blocks. The blocks of square and wide CUs are
contiguous in Morton order. Those of tall CUs are not: the walk alternates
between the left and the right tall CU, which is why those shapes need two
accumulator sets.

### Cycle budget

| mode          | row cycles             | one CTU alone (start to last FMV) | CTUs back to back |
|---------------|------------------------|-----------------------------------|-------------------|
| 13 shapes     | 8 x 13 x 256 = 26624   | 26633                             | 26625 per CTU     |
| quadtree only | 8 x 5 x 256  = 10240   | 10249                             | 10241 per CTU     |

A lone CTU takes its row cycles plus a 9-cycle drain. `start` is accepted
as soon as `in_ready` has fallen, while the previous CTU is still draining.
A stream of CTUs therefore costs only one cycle per CTU beyond its rows.

At these rates, 3840x2160 (510 CTUs) at 30 fps needs 407.4 M cycles/s.
7680x4320 (2040 CTUs) in quadtree-only mode needs 626.7 M cycles/s.

## 4. Pipeline and interface

```
  org_row, ref_win ─► fme_residual ─► 9 × fme_satd_kernel ─┐ satd (5 cy)
  imv ──► fme_control ─ slot ─► fme_mvd_kernel ── rate ────┤
                                    ▲                      ▼
                                    │ 8x8 FMVs          fme_sum      (1 cy)
                                    │                      ▼ 9 costs
                                    │               fme_param_gen    (2 cy)
                                    │                      ▼ nx, ny, den
                                    └──────────────  fme_fmv_divider (1 cy)
                                                           ▼
                                                    fmv_x/y, fmv_cu
```

`fme_top` ports:

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `start` | in | begin a CTU (accepted while idle) |
| `qt_only` | in | latched at `start`: only the square shapes |
| `qp[5:0]` | in | quantisation parameter for `sqrt(lambda)` |
| `in_valid` / `in_ready` | in / out | row handshake; a row moves when both are high; gaps allowed |
| `cur_bx`, `cur_by`, `cur_shape`, `cur_row` | out | the row the engine wants next |
| `org_row[7:0]` | in | the 8 original pixels (8 bit) |
| `ref_win[2:0][9:0]` | in | reference rows `dy=-1..1`, columns `-1..8`, at the CU's IMV |
| `imv_x`, `imv_y` | in | integer MV of the CU (14-bit signed); sampled on row 0 |
| `fmv_valid` | out | one pulse per CU |
| `fmv_x`, `fmv_y` | out | quarter-pel MV (16-bit signed) |
| `fmv_cu` | out | `cu_info_t`: shape, origin in 8x8 blocks, IMV |
| `fmv_frac_x/y` | out | fraction chosen, -3..3 quarter pel |
| `fmv_convex` | out | the surface had a minimum |
| `ctu_done` | out | with the 128x128 CU's FMV: CTU finished |

Latency: counted in clock edges, from the edge that samples a row to the
first edge that samples `fmv_valid` high, a CU's FMV comes 10 edges after
its eighth row and 17 edges after the first row of an 8x8 CU. The
registered stages after the eighth row are:

- 5 cycles for the SATD (reading out the last transpose group, then the
  output register);
- 1 cycle for the sum;
- 2 cycles for the fit (adder trees, then multipliers);
- 1 cycle for the comparators.

`fmv_valid` is then high for one cycle, and is sampled at the tenth edge.

The source has to fetch the reference window itself, at the CU's IMV and
for the requested block and row. The engine holds no reference memory.

Word widths are set in `fme_pkg`: costs 16 bit, x12 parameters 22 bit,
products 46 bit, accumulators 26 bit.

## 5. Departures and open points

The list below compares this RTL with the published description of the
architecture.

- **Latency.** The published design produces the first 8x8 FMV 12 cycles
  after its first row, and a CTU in 26628 cycles. Here they take 17 and
  26633 cycles. Throughput (one row per cycle) is the same. The published
  timing shows 8 cycles of distortion followed by 4 to get the FMV. Here the
  SATD kernels need 5 more cycles after the eighth row, to read the last
  4x4 group out of the transpose buffers column by column. The FMV
  calculator then takes 4 cycles (sum, two fit stages, comparators), as
  published.
- **Shift amounts.** The parameter generator in the block diagram carries
  shifts by 1, 2 and 3. Here the parameters are scaled by 12, and only the
  shifts of the minimum formula are used (by 1 and by 2). The factor 8 on
  the numerator sits in the comparators of the rounding stage.
- **4K budget.** The published cycle count (26628 per CTU) implies 407.4 M
  cycles/s for 4K at 30 fps, slightly more than the 400 MHz quoted for it.
  At 400 MHz this RTL, like the published count, reaches 29.5 fps. 8K
  quadtree-only at 631 MHz reaches 30.2 fps.
- **"Abs & Max".** The block diagram labels the SATD's last stage "Abs &
  Max". No maximum is described, so the stage computes the absolute value
  only.
- **Schedule figure labels.** The schedule figure labels blocks up to
  (16,16). A 128x128 CTU has 16x16 blocks, and this design uses coordinates
  0..15.
- **Lambda and bit count.** The rate model (the lambda formula, Exp-Golomb
  bit counts, 8 fractional bits) is this design's choice. The published
  design shows only a QP table, an MVD table and multipliers.
- **Predictor.** The neighbour order, the availability rule and the zero
  fallback are this design's. MVs from neighbouring CTUs are not used,
  because the store covers one CTU.
- **Cost scaling.** The cost normalisation (Hadamard `>> 1`, area shift,
  16-bit saturation) is this design's. It is described only as "shifted".
- **Accumulators.** The organisation into 17 sets is this design's.
- **No minimum.** The fallback to the IMV when the surface has no minimum,
  and the +-3/4 limit, are not specified in the source description.
- **Partial CTUs.** At the picture edge the source must pad the pixels: the
  engine always runs full 128x128 CTUs.
- **Not modelled.** Integer ME, the reference-sample memory and the encoder
  around the engine are outside this design, as is the compression result
  (BD-rate) reported for the algorithm.

## 6. Files and simulation

`rtl/`:

| file | content |
|------|---------|
| `fme_pkg.sv` | constants, types, shape tables, Morton helpers, 4-point Hadamard |
| `fme_residual.sv` | nine residual rows from one original row and the 3x10 window |
| `fme_transpose_buf.sv` | ping-pong 4x4 transpose buffer |
| `fme_satd_kernel.sv` | 8x8 SATD, one row per cycle |
| `fme_mvd_kernel.sv` | MV store, coarse predictor, rate of nine candidates |
| `fme_sum.sv` | 17 accumulator sets, cost output |
| `fme_param_gen.sv` | least-squares parameters, numerators and denominator |
| `fme_fmv_divider.sv` | comparator-based quarter-pel rounding |
| `fme_control.sv` | interlaced Z-order schedule, handshake |
| `fme_top.sv` | the engine |

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. Each
testbench computes its expected values independently of the RTL:

- the least-squares testbench solves the 6x6 normal equations by Gaussian
  elimination;
- the top-level testbench uses a behavioural model of the whole algorithm
  on synthetic frames, with real-valued surface fitting.

`tb_fme_top` runs three full CTUs at the default sizes:

1. 13 shapes with random input gaps;
2. 13 shapes with no gaps, checking the 26633-cycle CTU time and the
   17-cycle first FMV;
3. quadtree-only mode.

It checks every FMV against the model and counts that each mechanism
occurred: input stalls, every shape, each predictor source, non-convex
surfaces and the 3/4-pel clamp.

`tb_fme_workload` streams CTUs back to back at QP 22, 27, 32 and 37,
first with 13 shapes and then quadtree-only. It uses smooth synthetic
content moved by a known quarter-pel motion. It checks three things:

- the sustained cycles per CTU;
- that every CU produces an FMV;
- how often the FMV hits the true motion. On this content about 75% of
  FMVs are exact and over 99% are within one quarter pel. The test asks
  for at least 50% and 90%.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/fme_pkg.sv tb/tb_fme_top.sv --top-module tb_fme_top
    ./obj_dir/Vtb_fme_top

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. A
watchdog ends a hung run with a failure.
