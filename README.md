# An 8-bit log-float GEMM array with exact log-linear multiply-add

This is RTL for a matrix-multiply array whose numbers are 8-bit
*logarithmic* floats. Multiplying two logs is just adding them. Summing
products is done in a wide fixed-point register, so it is exact. The only
rounding happens once, when a finished dot product is converted back to
8 bits. The arithmetic is called ELMA, for exact log-linear multiply-add. Its
format is the (8,1,5,5,7) posit-tapered log:

* **8-bit word, posit tapering (N = 8, s = 1).** A word stands for
  ±2^(m + f/16). The exponent m is coded like a posit exponent: a unary
  "regime" run plus one exponent bit. The log fraction f takes the bits left
  over, up to 4 of them. The range runs from 2^-12 to 2^12. Near 1.0 there
  are 4 fraction bits; near the ends of the range there are none.
* **Log multiply.** The two operands' m.f are added in a 9-bit fixed-point
  adder. The sum gets one extra integer bit, so it cannot overflow.
* **Log to linear (alpha = 5).** A 16 x 5-bit table turns the product's log
  fraction into a linear significand 1.p, with p = round(32·(2^(f/16) − 1)).
* **Kulisch accumulation.** The 6-bit significand is shifted into place in a
  38-bit two's-complement accumulator and added. The accumulator's LSB weighs
  2^-24 (the smallest product, f_min²) and its top magnitude bit 2^12
  (f_max). Adding into it is exact and does not depend on order.
* **Linear to log (beta = 5, gamma = 7).** Once per dot product the
  accumulator is normalised. Its fraction is rounded to 5 bits and mapped
  through a 32 x 7-bit table, q = round(128·log2(1 + g/32)). The result is
  then rounded into the 8-bit tapered word. The 3 extra bits of q serve as
  guard, round and sticky bits.

All the PEs together hold no rounding logic at all. The expensive
conversions (leading-one detection, normalising shift, rounding) sit only at
the array's output edge, one per column.

## Array organisation

`elma_gemm_top` computes C = A·B, where A is 32 x K, B is K x 32, and K has
no limit. C is *output stationary*: element C[i][j] builds up in the
accumulator of PE (i, j).

```
            b_row[0..31] (row k of B)
                 |
           skew_buffer (lane j delayed j cycles)
                 |
           32 x posit_log_decoder
                 v
a_col  -> skew -> 32 x decoder -> [ 32 x 32 elma_pe ] (A moves right, B moves down)
(col k of A)                          | accumulators shift down
                                      v
                        32 x kulisch_to_log_encoder -> c_row (one row per cycle)
```

* **Input edge.** Each cycle one k-slice enters: column k of A and row k of
  B, 32 words each. Lane i of each side is delayed i cycles by a triangular
  register line (`skew_buffer`). 64 taper decoders then expand the words
  into sign/zero/infinity/m/f fields at the array edge.
* **PE (`elma_pe`).** Each PE registers its decoded A and B operands and
  passes them on to the right and downwards. In the same cycle it does one
  full multiply-add from the registered pair into its accumulator:
  `log_multiplier` → `log_to_linear_lut` → `kulisch_shifter` →
  `kulisch_adder`. A *valid* and a *first-of-sum* flag travel with A. The
  first product of a dot product overwrites the accumulator instead of being
  added, so no clearing cycle is needed between GEMMs.
* **Output edge.** When a GEMM is done, every accumulator takes the value of
  the one above it, once per cycle, for 32 cycles. Each cycle the bottom row
  goes through 32 `kulisch_to_log_encoder`s into the `c_row` register. Rows
  come out last row first, and `out_row` gives each row's index.

### Schedule and handshake (`gemm_controller`)

| phase | cycles | `in_ready` | what happens |
|-------|--------|-----------|--------------|
| FEED  | K plus bubbles | 1 | one slice is accepted per cycle with `in_valid`; `in_last` marks the final one |
| DRAIN | 2·32 − 1 = 63 | 0 | the last wavefront reaches PE (31, 31) |
| SHIFT | 32 | 0 | accumulators shift down; `out_valid` follows one cycle later |

The first result row comes out 2·DIM + 1 = 65 cycles after the cycle the
last slice was accepted. The last row follows 31 cycles after that. A
cycle with `in_valid` low during FEED enters the array as a bubble. A slice
offered during DRAIN or SHIFT waits (`in_ready` low). The next GEMM does
not overlap the shift-out of the previous one.

### Exponent biases

`bias_in` (m) is added to every product's exponent before alignment.
`bias_out` (n) is added to the exponent before the result is encoded. Both
are 6-bit signed values. They are captured with the first slice of a GEMM
and apply to the whole GEMM. A typical use is n = −4 on a final classifier
layer: it brings sums of about 16 back to about 1.

## Special values, range and rounding

* Word `8'h00` is zero and word `8'h80` is the single infinity. There is no
  NaN. Negative words are the two's complement of the positive word.
* Infinity times anything, including zero, is infinity. Zero times a finite
  value contributes nothing.
* A product above 2^12 (after `bias_in`) makes the sum infinite. So does an
  accumulator that overflows its 38 bits. The infinity flag is sticky for
  the rest of that dot product. `ev_overflow` pulses when this happens.
* A product below 2^-24 is dropped and `ev_underflow` pulses. Bits of a
  product that fall below 2^-24 are truncated.
* Both roundings on the way out are round-to-nearest-even with a sticky bit:
  first the linear fraction to 5 bits, then the tapered word. A finite
  non-zero sum never rounds to zero or infinity. Beyond 2^12 it saturates to
  `8'h7f`, and below 2^-12 to `8'h01` (or their negatives).
* Round trip: for every finite word x, x·1.0 converts back to exactly x.
  `tb_kulisch_to_log_encoder` checks this for all 254 words.

## Where this RTL goes beyond the source description

The arithmetic follows the source description exactly: the format, the
widths, the two tables, the 38-bit accumulator range, the 9-bit log adder,
both exponent biases, the 32 x 32 output-stationary array, the 64 input
decoders and the 32 output encoders. The following are this
implementation's own choices:

* the valid/ready/last handshake, the skew buffers, the direction of flow and
  the three-phase schedule, including not overlapping shift-out with the
  next GEMM;
* the valid and first-of-sum flags, and capturing the biases with the first
  slice;
* treating products above 2^12 and accumulator overflow as a sticky
  infinity, and truncating product bits below 2^-24;
* the decoded field layout (5-bit m, 4-bit f);
* doing the output conversion in one combinational stage followed by a
  register, and doing each PE's multiply-add in one combinational stage
  after the operand registers;
* synchronous active-low reset.

Not included: the 16-bit IEEE-style log variant, linear-posit EMA variants,
the integer and float16 baselines, and the host/FPGA integration. Also
left out is average pooling by dividing an accumulator, which was done
outside the array.

## Files

| file | contents |
|------|----------|
| `rtl/elma_pkg.sv` | widths, word/accumulator types, decoded-number structs |
| `rtl/posit_log_decoder.sv` | word → sign, zero, inf, m, f |
| `rtl/log_multiplier.sv` | 9-bit log adder, sign, special values |
| `rtl/log_to_linear_lut.sv` | r(p(f)) table, 16 x 5 |
| `rtl/kulisch_shifter.sv` | 6 → 38-bit alignment, input bias, range checks |
| `rtl/kulisch_adder.sv` | 38-bit exact add, sticky infinity |
| `rtl/elma_pe.sv` | PE: operand registers, multiply-add, accumulator shift |
| `rtl/linear_to_log_lut.sv` | r(q(g)) table, 32 x 7 |
| `rtl/posit_log_encoder.sv` | taper encode with round-to-nearest-even, saturation |
| `rtl/kulisch_to_log_encoder.sv` | accumulator → word: leading one, normalise, round, q table, output bias, encode |
| `rtl/skew_buffer.sv` | triangular input delay lines |
| `rtl/systolic_array.sv` | DIM x DIM grid of PEs |
| `rtl/gemm_controller.sv` | FEED / DRAIN / SHIFT sequencer |
| `rtl/elma_gemm_top.sv` | the whole array |
| `tb/elma_ref_pkg.sv` | reference model used by the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_resnet_conv_tile.sv` | a K = 4,608 convolution tile on the full array |

The table contents are given by the formulas above. `tb_log_to_linear_lut`
and `tb_linear_to_log_lut` recompute them with real arithmetic.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog. The reference model in `tb/elma_ref_pkg.sv` is written
independently of the RTL. It decodes words by walking their bit strings,
computes the tables with real-valued `$pow`/`$ln`, and aligns products by
integer multiplication. It rounds the accumulator with integer division,
and encodes by searching all 127 positive words for the nearest one in the
log domain, ties going to the even word.

* The decoder is checked on all 256 words and the multiplier on all 65,536
  word pairs. The tables are checked entry by entry. The shifter, adder and
  encoder get random and corner cases: overflow, underflow, saturation,
  biases.
* `tb_elma_pe` runs 200 dot products of random length with bubbles, biases
  and overflowing sums. `tb_systolic_array` runs 12 GEMMs on a 4 x 4 array.
  `tb_gemm_controller` checks the phase lengths and the row order.
* `tb_elma_gemm_top` uses the default 32 x 32 size. It runs four GEMMs back
  to back: K = 128 with N(0,1) data and random bubbles; K = 64 with n = −4;
  K = 16 with overflowing, underflowing, zero and infinite rows and m = −2;
  and K = 1. All 4,096 result words are compared with the model. It also
  checks the 65-cycle latency, the row order, back-pressure, and that each
  of these mechanisms really occurred.
* `tb_resnet_conv_tile` computes one 32 x 32 output tile of the deepest
  ResNet-50 inner product, a 3 x 3 convolution over 512 channels
  (K = 4,608). It uses ReLU-style activations |N(0,1)| and He-scaled weights
  N(0, sqrt(2/4608)), and compares all 1,024 results. It takes about 4,700
  cycles.

Running one testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
  rtl/elma_pkg.sv tb/elma_ref_pkg.sv tb/tb_elma_gemm_top.sv \
  --top-module tb_elma_gemm_top
./obj_dir/Vtb_elma_gemm_top
```

`-y rtl -y tb` lets Verilator find every other module by its file name.
Any other testbench runs the same way.

The full-size test builds in well under a minute and runs in a fraction of
a second.

## Changing the design

`DIM` (the array size) is a parameter of the top, the array, the controller
and the skew buffers. The number format is fixed by `elma_pkg` and the two
table modules. Changing N, s, alpha, beta or gamma means regenerating both
tables from their formulas, and checking the decoder/encoder field slicing
and the 16-bit encode string in `posit_log_encoder`.
