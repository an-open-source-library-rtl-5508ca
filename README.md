# Large-integer multipliers: schoolbook, Karatsuba, Toom-Cook and digit-serial

Public-key cryptography spends most of its time multiplying very wide
integers. Elliptic-curve arithmetic over the NIST fields uses 163- to 571-bit
operands, and several post-quantum schemes multiply polynomial coefficients
of similar or larger size. No single multiplier is best for every use. A
bit-serial schoolbook multiplier is small but needs one clock per operand bit.
Splitting the operands (Karatsuba, Toom-Cook) and multiplying the pieces in
parallel cuts the cycle count by the split factor, at the price of more
sub-multipliers and more adders. A digit-serial multiplier sits between the
two: the digit size sets how many operand bits it handles per step.

This RTL provides five such multipliers for unsigned operands of any width.
All of them share one interface, so one can replace another:

| module             | method                                     | cycles after `rst` falls (H = ceil(WIDTH/k)) | at WIDTH = 1024 |
|--------------------|--------------------------------------------|-----------------------------------------------|-----------------|
| `sbm`              | schoolbook, one bit of `b` per cycle       | WIDTH - 1 (WIDTH counting the load cycle)     | 1023            |
| `karatsuba2_mul`   | 2-way Karatsuba, 3 parallel schoolbooks    | H + 1                                         | 513             |
| `toom3_mul`        | 3-way Toom-Cook, 5 parallel schoolbooks    | H + 3                                         | 345             |
| `toom4_mul`        | 4-way Toom-Cook, 7 parallel schoolbooks    | H + 4                                         | 260             |
| `digit_serial_mul` | digit-serial, DIGIT bits of `b` per step   | ceil(WIDTH/DIGIT) * DIGIT                     | 1024 (DIGIT 64) |

`polymul_top` instantiates all five at one width and selects one at run time.

The arithmetic is ordinary integer multiplication, `c = a * b` with a
2·WIDTH-bit result. There is no carry-less (GF(2)[x]) mode. A binary-field
product needs a different adder and is not provided here.

## Common interface and timing

```
input  clk, rst            rst: active high, synchronous
input  [WIDTH-1:0] a, b
output [2*WIDTH-1:0] c
output done
```

`clk`, `rst`, `a`, `b` and `c` are the library's standard port set. `done`
is added so that a user knows when `c` is valid. The protocol is the same
everywhere:

1. Hold `rst` high for at least one rising edge with the operands on `a` and
   `b`. The multiplier captures them, so they may change afterwards.
2. Drop `rst`. The multiplier runs on its own for the number of cycles in the
   table above. During this time `done` is low.
3. `done` rises and `c` holds the product. Both stay until the next `rst`.

A new operation can start on the cycle after `done`, or at any earlier time:
asserting `rst` aborts the current operation and loads new operands.

## Schoolbook multiplier (`sbm`)

`sbm #(WA, WB)` multiplies a WA-bit `a` by a WB-bit `b`. The shifted copy of
`a` and the accumulator are both WA+WB bits wide. In each cycle the shifted
`a` is added when the current bit of `b` is set, then shifted left once
more. Bit 0 of `b` is already applied in the load cycle, so a product takes
WB cycles in all and `done` rises WB-1 cycles after `rst` falls. The
non-square form is what the digit-serial wrapper uses (WB = digit size); the
other multipliers use it square.

This gives one cycle per bit, which is how the schoolbook multiplier behaves
in published cycle counts. For example, 0.382 µs at 500 MHz for 192 bits is
191 cycles. A "2m cycles" figure that also appears for the schoolbook method
is not followed.

## Split multipliers: the "hybrid" scheme

The Karatsuba and Toom-Cook multipliers do not recurse. They split each
operand once into k limbs, form the small products with schoolbook
multipliers that all run at the same time, and combine the results in one
registered output stage. Their latency is that of the slowest sub-multiplier
plus one cycle, roughly WIDTH/k.

### 2-way Karatsuba (`karatsuba2_mul`)

With H = ceil(WIDTH/2), `a = a1·2^H + a0` and likewise for `b`. Three `sbm`
instances form, in parallel:

- `c0 = a0·b0` (H×H bits)
- `c1 = a1·b1` (H×H bits)
- `cm = (a0+a1)·(b0+b1)` ((H+1)×(H+1) bits)

The result is `c1·2^(2H) + (cm − c1 − c0)·2^H + c0`, computed modulo 2^(2·WIDTH)
(exact, because the true product fits). The middle multiplier is one bit wider
than the halves so that the carry of `a0+a1` is not lost. That is why the
latency is H+1 rather than exactly WIDTH/2.

### 3-way and 4-way Toom-Cook (`toom3_mul`, `toom4_mul`)

Toom-Cook generalises Karatsuba. Regard the k limbs of `a` as the
coefficients of a polynomial `a(x)` with `x = 2^H`, H = ceil(WIDTH/k), and
likewise for `b`. The product `c(x) = a(x)·b(x)` has degree 2k−2, so 2k−1
values determine it. The multiplier works in three steps:

1. **Evaluation.** Both operands are evaluated at 2k−1 points, using
   small integer weights:
   - 3-way: points {0, 1, −1, −2, ∞}, 5 products;
   - 4-way: points {0, 1, −1, 2, −2, ½, ∞}, 7 products. The point ½ is taken
     in scaled form, `8·a(½) = 8a0 + 4a1 + 2a2 + a3`, which keeps every
     weight an integer.

   An evaluated value can be negative and exceeds H bits by at most
   log2(sum of the weights' magnitudes): 3 bits for 3-way (1+2+4) and 4 bits
   for 4-way (8+4+2+1). The weight tables are `TOOM3_EVAL` and `TOOM4_EVAL` in
   `polymul_pkg`.

2. **Pointwise products.** Each pair of evaluated values is multiplied by
   `smul`, a signed wrapper around `sbm`. It takes magnitudes, multiplies
   them unsigned in H+G cycles (G = 3 or 4), and negates the product when
   the signs differ. All 2k−1 products run in parallel.

3. **Interpolation.** Each coefficient of `c(x)` is a fixed rational
   combination of the products, given by the inverse of the matrix
   `V[p][i] = num_p^i · den_p^(2k−2−i)`. For point p, num_p/den_p is its value
   (∞ is 1/0, ½ is 1/2). `polymul_pkg` holds every row of the inverse scaled
   to integers (`TOOMk_INTERP`) together with its denominator (`TOOMk_DEN`):

   ```
   c_i = ( Σ_p TOOMk_INTERP[i][p] · v_p ) / TOOMk_DEN[i]
   ```

   The 3-way denominators are 1, 6, 2, 6, 1. The 4-way ones are 1, 180, 24,
   18, 24, 180, 1. The division is always exact. The hardware uses that: it
   writes the denominator as 2^s·q with q odd, shifts the numerator right
   arithmetically by s, and multiplies by q⁻¹ mod 2^IW. That inverse is a
   constant, computed at elaboration by Newton iteration
   (`x ← x·(2 − q·x)`). So there is no divider, only constant
   multiplications and adds. The numerators use IW = 2(H+G)+1+12 bits, ample
   for the largest row sum (896).

Finally, the coefficients are added at offsets i·H into the 2·WIDTH-bit
result and registered.

The choice of points is what sets the widths. Points of larger magnitude
would make the evaluated values, the products and the denominators larger.
To change the points, recompute the inverse of V and replace the three
tables. The testbenches check products against the simulator's own
multiplication, so a wrong table shows at once.

## Digit-serial multiplier (`digit_serial_mul`)

`b` is cut into d = ceil(WIDTH/DIGIT) digits, zero-padded at the top. One
WIDTH×DIGIT schoolbook multiplier forms `a·digit_i` in DIGIT cycles,
starting with the least significant digit. Each partial product is added to
the running upper part of the result (`hi`, WIDTH bits). The adder is
WIDTH+DIGIT bits wide. The low DIGIT bits of the sum are final and shift
into a register `lo` that collects the low half of the product, while the
rest becomes the new `hi`. After d digits the product is `{hi, lo}`.

There is no idle cycle between digits. On the clock edge where the wrapper
takes a product, it also restarts the inner multiplier (through that
multiplier's own `rst`) on the next digit. The whole product therefore
takes exactly d·DIGIT cycles: 1024 cycles for 1024-bit operands at any
power-of-two digit size. The digit size trades adder and multiplier width
against control overhead. With the schoolbook inner multiplier it does not
change the cycle count much; it changes area and the achievable clock rate.
Published ASIC results for a 1024-bit multiplier favour 64-bit digits, and
64 is the default here.

The inner multiplier can be replaced (`INNER`, a `polymul_pkg::method_e`)
by the Karatsuba or either Toom-Cook multiplier. These are square, so the
digit is zero-extended to WIDTH bits, and each digit costs that multiplier's
latency plus one cycle. The default `M_SBM` is the non-square schoolbook.

## The top level (`polymul_top`)

`polymul_top #(WIDTH = 1024, DIGIT = 64)` contains all five multipliers and
has one extra input, `method` (`M_SBM`, `M_KARATSUBA2`, `M_TOOM3`, `M_TOOM4`,
`M_DIGIT_SERIAL`). `method` is captured with the operands while `rst` is
high. After that, the selected multiplier runs and the others are held in
reset. `c` and `done` come from the selected multiplier. An unused method
can be removed by deleting its instance; no other logic depends on it.

Size after coarse synthesis at the defaults (word-level cells / flip-flop
bits): `sbm` 21 / 5129, `karatsuba2_mul` 77 / 9758, `toom3_mul` 149 / 10702,
`toom4_mul` 219 / 11192, `digit_serial_mul` 43 / 6347, whole top
537 / 43131.

## Where this RTL departs from the method as published

- **`done` port.** The published port set is `clk, rst, a, b, c`. `done` is
  added, and starting on the fall of `rst` is this design's protocol.
- **Latency of the split multipliers.** The published values are m/2, m/3
  and m/4 cycles. Here the sub-multipliers are wider than a limb: H+1 bits
  for Karatsuba, H+3 and H+4 for Toom-Cook. They have to hold the carry of
  a0+a1 or the evaluated values. The output register adds one more cycle.
  For 1024 bits that is 513, 345 and 260 cycles against 512, 341 and 256.
- **Toom-Cook internals.** The points, the signed handling and the exact
  division are this design's own choices; the published description gives
  none of them. It mentions "fifteen m/3-bit incrementers" and "sixteen
  m/4-bit incrementers" for the two Toom-Cook datapaths. Here the datapaths
  are plain adders and constant multipliers.
- **Digit count** is rounded up, d = ceil(m/n). This matches the published
  tables, for example 17 digits for 521 bits with 32-bit digits.
- **One run-time top.** The library itself emits each multiplier as a
  separate file for a chosen size. Gathering them under a select input is
  this design's choice.
- **Integer only.** Nothing here multiplies without carries, as binary-field
  (B-163 … B-571) arithmetic would. Those sizes are tested as integer
  products.

## Verification

Every testbench compares products with the simulator's own wide
multiplication. Each also checks the cycle count from the fall of `rst` to
`done` against the formulas above, and ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|-----------|----------------|
| `tb/sbm_tb.sv` | 45×29-bit schoolbook: zero, one, all-ones, sparse and random operands, latency, operand capture, result hold, an operation aborted by a new `rst` |
| `tb/karatsuba2_mul_tb.sv` | 97-bit Karatsuba (odd width, unequal halves), same vectors and abort |
| `tb/toom3_mul_tb.sv`, `tb/toom4_mul_tb.sv` | 100- and 101-bit Toom-Cook; sparse word patterns drive evaluations negative and to their maxima |
| `tb/digit_serial_mul_tb.sv` | 70-bit operands with 8-bit digits (padded last digit), latency d·n |
| `tb/digit_serial_inner_tb.sv` | the wrapper with Karatsuba, 3-way and 4-way Toom-Cook inside |
| `tb/nist_fields_tb.sv` | all four split/schoolbook methods at P-192 … P-521 and B-163 … B-571; Karatsuba at 128, 256, 512 bits |
| `tb/digitized_tb.sv` | the wrapper at 521/571 bits with 32/41/53/64/81/128-bit digits; 1024 bits with 2 … 1024-bit digits; 2048 bits with 2/4/8-bit digits. Also checks the digit count against the published values |
| `tb/polymul_top_tb.sv` | the top at its defaults (1024 bits, 64-bit digits): every method, switched with no gap. It checks that only the selected multiplier raises `done`, and counts that a Karatsuba middle carry, negative Toom-Cook evaluations and every digit hand-off occurred |

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl rtl/polymul_pkg.sv tb/toom4_mul_tb.sv \
          --top-module toom4_mul_tb -Mdir obj
./obj/Vtoom4_mul_tb
```

The full-size top-level test builds in about a minute and a half and runs in
a few seconds. The other testbenches override `WIDTH` and `DIGIT` to stay
small. All module parameters default to the 1024-bit, 64-bit-digit
configuration.

## Files

- `rtl/polymul_pkg.sv`: method enum, Toom-Cook evaluation and interpolation tables
- `rtl/sbm.sv`: schoolbook multiplier
- `rtl/smul.sv`: signed wrapper around `sbm`
- `rtl/karatsuba2_mul.sv`, `rtl/toom3_mul.sv`, `rtl/toom4_mul.sv`: split multipliers
- `rtl/digit_serial_mul.sv`: digit-serial wrapper
- `rtl/polymul_top.sv`: all methods behind one interface
- `tb/*.sv`: the testbenches listed above
