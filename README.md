# A floating-point JPEG block codec in SystemVerilog

This design compresses and decompresses greyscale 8x8 image blocks the way baseline JPEG does. The steps are level shift, two-dimensional discrete cosine transform (DCT), quantization, zigzag reordering and run-length coding of zero runs, and then the same steps in reverse.

What makes it unusual is the transform. Most hardware JPEG cores use fixed-point butterfly DCTs. This one computes the DCT as two full 8x8 matrix products in IEEE-754 single precision:

    DCT = C · P · Cᵀ

Here C is the orthonormal 8-point DCT matrix and P is the level-shifted pixel block. Both products run on one fully parallel matrix multiplier:

- 64 dot-product units, one per result element.
- 8 floating-point multipliers in each unit.
- 512 multipliers in all.

Because C is orthogonal, the inverse transform is the same engine with the two constant matrices swapped.

The codec takes one 8x8 block of one colour channel at a time. Splitting an image into blocks and channels, and packing the result into a JPEG file, is done by host software. So is the Huffman stage of real JPEG. None of that is in the RTL.

## Block diagram

```
                      jpeg_codec (top)
  ┌──────────────────────────── image_compression ───────────────────────────┐
  │ pixels 8x8x8 ─► int_to_ieee ─► dct_2d ─► quantizer ─► zigzag ─► run_length_enc ─► 96 coeffs + length
  │                  (−128)         C·P·Cᵀ   round(D/Q)    8x8→64    64→96
  │                                              ▲
  │ quality ─────────────────────────────► quant_table
  └──────────────────────────────────────────────────────────────────────────┘
  ┌─────────────────────────── image_decompression ──────────────────────────┐
  │ 96 coeffs + length ─► run_length_dec ─► inv_zigzag ─► dequantizer ─► int_to_ieee ─► idct_2d ─► pixels
  │                        96→64             64→8x8       X·Q            (signed)      Cᵀ·X·C, +128, clip
  │ quality ──────────────────────────────────────► quant_table
  └──────────────────────────────────────────────────────────────────────────┘
```

Inside the top, the compressor and the decompressor are independent. The host moves compressed blocks from one to the other, or stores them. Each side has its own quality input. A block must be decompressed with the quality it was compressed with.

## The floating-point DCT engine

Most of the logic, and most of the subtlety, is in the transform. It is built in four layers.

### `fp_mul`: the single-precision multiplier

Each operand is split into:

- an 8-bit exponent;
- a 24-bit mantissa, which is the 23 stored fraction bits with the hidden 1 put in front.

The multiplier then works as follows:

1. The exponents are added and the bias of 127 is subtracted.
2. The sign is the XOR of the two operand signs.
3. The 24x24 mantissa product is 48 bits wide. Its top bit decides the normalisation:
   - If bit 47 is set, the fraction is bits 46:24 and the exponent is incremented.
   - Otherwise, the fraction is bits 45:23.
4. The remaining low bits are truncated, not rounded.

Special values are handled like this:

- An operand with exponent 0 is taken as zero.
- An exponent that drops below 1 flushes the result to zero.
- An exponent above 254 saturates to the largest finite number.
- NaN and infinity are not handled. The codec never produces them.

The multiplier has two pipeline stages: operand registers, then the result register.

### `row_col_mult`: an 8-term dot product

The unit takes one row and one column, each of 8 floats, and returns their dot product. The 8 products are not added one after another with floating-point adders. Instead, they are summed in one fixed-point step:

1. **AR/BR registers** capture the row and the column.
2. **Eight `fp_mul`** form the products.
3. **Alignment.** The largest product exponent `emax` is found. Each product mantissa is then:
   - given `GUARD` = 8 extra zero bits below it;
   - shifted right by `emax − e`;
   - negated if the product is negative.

   This gives eight signed terms of 24+8+4 = 36 bits. Four bits of headroom cover the growth of an 8-term sum and the sign.
4. **Carry-save tree.** Six 3:2 compressors reduce the eight terms to a sum vector and a carry vector. No carry propagates at this stage.
5. **CPA input register** holds the sum vector, the carry vector and `emax`.
6. **CPA and IEEE formatter.** A carry-propagate add gives the exact two's-complement total. The formatter then:
   - takes the magnitude;
   - finds its leading one at bit position `p`;
   - shifts the magnitude so that this one sits at bit 23;
   - sets the exponent to `emax − 23 − GUARD + p`;
   - truncates what is left below.

The sum is exact except for bits that alignment shifts out beyond the guard bits. So the dot product is more accurate than a chain of seven rounded additions. The unit has a latency of 4 cycles and is fully pipelined.

The formatter is combinational from the CPA input register, so the consumer must register `y`. `two_matrix_mult` does this.

### `two_matrix_mult`: 8x8 times 8x8

The multiplier matrix A and the multiplicand matrix B are captured in input registers. Unit (i, j) of the 64 `row_col_mult` instances receives row i of A and column j of B. All 64 results land in an output register.

- Latency: 6 cycles.
- A new pair of matrices may enter every cycle.

This is the big block: 512 multipliers of 24x24 bits. Synthesis of this block and of everything above it takes minutes.

### `dct_2d`: two passes through one multiplier

The engine holds:

- a constant C register;
- a constant Cᵀ register;
- an input register.

Two multiplexer pairs, switched by a "second multiplication" signal, choose the operands of the single `two_matrix_mult`:

| pass | multiplier operand | multiplicand operand | result |
|---|---|---|---|
| 1 | C | input block P | C·P: every column transformed |
| 2 | result of pass 1 (fed back) | Cᵀ | C·P·Cᵀ: every row transformed |

The second pass starts in the cycle the first result appears. The total latency is therefore 1 + 6 + 6 = 13 cycles. While a block is being transformed, `in_ready` is low.

With the parameter `INVERSE = 1`, the constant registers hold Cᵀ and C instead of C and Cᵀ. The same two passes then compute Cᵀ·X·C. That is the inverse DCT, because C⁻¹ = Cᵀ.

The DCT matrix is:

- C(0, v) = √(1/8);
- C(u, v) = √(2/8)·cos((2v+1)uπ/16) for u > 0.

`jpeg_pkg::dct_coef` builds it from the eight single-precision words √(2/8)·cos(kπ/16), k = 0…7, using the symmetry of the cosine.

**Accuracy.** The testbenches compare the engine with a double-precision cosine-sum DCT. The error stays below 2·10⁻³ in absolute value on values of up to ±1024. After quantization this almost never matters. The end-to-end test accepts a ±1 difference in a quantized coefficient only where the exact quotient lies within 10⁻³ of a .5 rounding boundary. In all other places it demands bit-exact agreement.

## Quantization

**Table.** `quant_table` turns the 7-bit quality n into a table Q_n, built from the standard JPEG luminance table Q50:

- For n ≥ 50: Q_n = Q50·(100 − n)/50.
- For n < 50: Q_n = Q50·50/n.

The values are then adjusted:

- Each entry is rounded to nearest and is at least 1. So n = 100 gives a table of ones: coefficients are only rounded to integers.
- n = 0 is read as 1, and values above 100 are read as 100.

The table is registered.

**Quantizer.** The `quantizer` computes round(D/Q) for all 64 coefficients in one cycle. No floating-point divider is used. Each single-precision coefficient is converted exactly to a fixed-point magnitude with 8 fraction bits. Entries smaller than 2⁻⁸ become 0, which cannot change the rounded result. The magnitude is then divided by Q with rounding half away from zero.

The result is exact round() of the floating-point quotient. It is saturated to a 12-bit signed coefficient. For 8-bit pixels the largest DCT magnitude is 1024, so saturation never occurs in practice.

**Dequantizer.** The `dequantizer` multiplies each coefficient by its table entry. The product is an exact 25-bit signed value.

## Zigzag and run-length coding

**Zigzag.** `zigzag` and `inv_zigzag` are pure wiring behind a register. They use the standard JPEG scan order, which `jpeg_pkg::zz_row/zz_col` compute at elaboration by walking the anti-diagonals of the block.

**Run-length encoder.** `run_length_enc` copies non-zero values and replaces every run of zeros by the pair (0, run length). For example:

```
in : 4 0 0 0 9 0 0 0 0 1 1 0 0 7 5 0 0 0 0 0 0 0 32 ...
out: 4 0 3 9 0 4 1 1 0 2 7 5 0 7 32 ...
```

The worst case is alternating non-zero and zero values. That gives 32 values and 32 pairs, so the output is a 96-entry vector. A 0 in the output always starts a pair, so the vector alone cannot say where the data ends. A 7-bit length output `len` therefore gives the number of used entries; the rest are 0.

The encoder scans its captured input one element per cycle. In one cycle it can write up to three entries: the pair that closes a run, and the value after it. It takes 64 cycles per block, plus one cycle for the output register.

**Run-length decoder.** `run_length_dec` reads one token per cycle:

- A value is written to the next position.
- A (0, n) pair skips n positions. The work vector is cleared at the start of each block, so the skipped positions hold zeros.

It stops when it has read `len` entries or has filled 64 positions. Its latency is therefore data dependent: number of tokens + 2 cycles.

## Timing and flow control

Every block uses the same handshake:

- A one-cycle `in_valid` pulse delivers the data.
- Blocks that take more than one cycle have an `in_ready` output. A block is taken on a cycle with `in_valid && in_ready`.
- A one-cycle `out_valid` pulse marks the result. The result then holds until it is overwritten.

There is no backpressure on outputs. The consumer must take a result when `out_valid` pulses.

| block | latency (cycles) | accepts a new block every |
|---|---|---|
| fp_mul | 2 | cycle |
| row_col_mult | 4 | cycle |
| two_matrix_mult | 6 | cycle |
| dct_2d | 13 | 13 cycles |
| int_to_ieee, quantizer, zigzag, inv_zigzag, dequantizer, quant_table | 1–2 | cycle |
| run_length_enc | 65 | 65 cycles |
| run_length_dec | tokens + 2 | when done |
| idct_2d | 14 | 14 cycles |
| **image_compression** | **82** | **65 cycles** |
| **image_decompression** | **tokens + 20** | **when done** |

**Compressor control.** The compressor's controller is one admission counter. After accepting a block, `in_ready` stays low for 64 cycles, so a new block can enter every 65 cycles. All stage latencies are fixed, so this guarantees:

- A block reaches `dct_2d` only when it is idle.
- A block reaches `run_length_enc` only when it is idle.

Two blocks can be in flight at once: one in the transform and quantizer, one in the encoder. Assertions (`a_dct_free`, `a_rle_free`) check the guarantee in simulation.

**Decompressor control.** The decompressor holds one block at a time, because the run-length decoder's time depends on the data.

At one block per 65 cycles, a 1024x768 image is 12288 blocks per channel and 36864 blocks for three channels. That is 2.4 million cycles per image for the compressor.

## Where this design departs from the description it is based on

The published description of this codec gives the block structure and the arithmetic, but several details are missing or inconsistent. These choices were made:

- **Multiplier bias and product slice.** The multiplier drawing shows a bias constant of 125 and takes bits "48–25" of the product. Neither gives correct IEEE-754 results. This design uses bias 127 and normalises on bit 47 of the product.
- **Float format.** The text speaks of a 32-bit result with 7 exponent and 24 mantissa bits, while the drawing feeds 8 exponent and 23 fraction bits. This design uses the standard 1/8/23 split throughout, so products can be multiplied again.
- **First row of C.** One equation gives √(2/N) for the first row of the DCT matrix, while the DCT sum formula next to it implies √(1/N). This design uses √(1/8). That makes C orthogonal, which is what lets the inverse transform reuse the engine.
- **Inside of the adder stage.** The dot-product unit is described only by its stage names: AR register, mantissa multipliers, an adder stage, CPA input register, CPA, IEEE formatter. The alignment and carry-save tree inside the adder stage are this design's.
- **Booth multiplier.** The mantissa multiplier is drawn as a Booth multiplier. Here it is written as `*`, and synthesis chooses the architecture.
- **Decoder table.** The decoder is said to use a "Q75" matrix, but the matrix printed for it has negative and zero entries, so it cannot be a quantization table. Here both sides build Q_n from the quality input, and the same formula gives Q75 when n = 75.
- **Quantizer divider.** Division for quantization is called for but not designed. The exact fixed-point divider here is this design's.
- **Run-length interface.** The run-length vector is 96 entries wide, as described. The length output, the serial one-element-per-cycle scan and the decoder's token-per-cycle walk are additions.
- **Level shift.** The −128 level shift is required before the transform, but no block is named for it. Here it is done in `int_to_ieee`, and +128 with clipping to 0…255 is done in `idct_2d`.
- **Control and handshakes.** No controller, handshake or reset behaviour is described. The admission counter, the busy flags, the valid/ready signals and the asynchronous active-low reset are this design's.
- **Inverse DCT hardware.** The decompression path is described only by its equations. It is built here from the same blocks as the compression path.
- **Rounding.** Multipliers truncate. Quantization and the final pixel rounding go half away from zero.

Not built in hardware are colour-space conversion, chroma down sampling, Huffman coding and JPEG file formatting. These are host-side steps in the described system.

## Files

`rtl/` holds one module or package per file:

| file | contents |
|---|---|
| `jpeg_pkg.sv` | types (`ieee754_t`, 8x8 float/int/pixel blocks), Q50, DCT matrix entries, zigzag order |
| `fp_mul.sv` | single-precision multiplier |
| `row_col_mult.sv` | 8-term float dot product |
| `two_matrix_mult.sv` | 8x8 matrix product, 64 dot-product units |
| `dct_2d.sv` | two-pass DCT / IDCT engine |
| `int2ieee.sv` | combinational signed-integer-to-float converter |
| `int_to_ieee.sv` | 8x8 integer block to floats, optional level shift |
| `quant_table.sv` | Q_n from quality |
| `quantizer.sv` | exact round(D/Q) |
| `zigzag.sv`, `inv_zigzag.sv` | scan reordering |
| `run_length_enc.sv`, `run_length_dec.sv` | zero-run coding |
| `dequantizer.sv` | X·Q |
| `idct_2d.sv` | inverse engine, +128, clip |
| `image_compression.sv`, `image_decompression.sv` | the two chains with their control |
| `jpeg_codec.sv` | top level |

`tb/` has a self-checking testbench `tb_<module>.sv` for every module, and `tb_ref_pkg.sv`. The package holds the independent reference models:

- DCT and IDCT as double-precision cosine sums;
- the quantization rule in real arithmetic;
- the zigzag table written out;
- loop-based run-length coding;
- conversion between floats and their bit patterns.

Every testbench:

- prints `TB_RESULT checks=<n> failures=<n>` and stops;
- has a watchdog;
- for pipelined and multi-cycle blocks, checks the latency cycle by cycle.

`tb_jpeg_codec` runs the whole codec at its default sizes. It compresses and decompresses 32 blocks at qualities 50, 75, 20 and 5. It counts these events and fails if any of them never happens:

- input stalls on both sides;
- zero runs inside and at the end of a block;
- both branches of the table rule;
- clipping at 0 and at 255;
- two blocks in flight at once.

It runs in about half a minute.

`tb_image_band` streams one full-width band of a generated 1024x768 image through the top at quality 75. The band is 8 pixel rows, or 128 blocks. The compressor is fed back to back. The test checks:

- that blocks are accepted exactly 65 cycles apart;
- every compressed block and every reconstructed pixel against the references;
- a PSNR above 30 dB for the band.

It reports 2996 run-length entries for the 8192 input samples and a PSNR of 39.9 dB. These figures are before any Huffman coding.

## Simulating

The code is IEEE 1800-2017 and has been checked with Verilator 5 (lint and simulation) and with the slang front end of Yosys. The simulator runs two-state, so everything that is read is reset. To build and run one testbench:

```
verilator --binary --timing --assert -Wno-fatal -O1 \
    --top-module tb_jpeg_codec -y rtl -y tb +libext+.sv \
    rtl/jpeg_pkg.sv tb/tb_ref_pkg.sv tb/tb_jpeg_codec.sv
./obj_dir/Vtb_jpeg_codec
```

Replace the testbench name to run another one. Building anything that contains `two_matrix_mult` takes a minute or two, because it is 512 multipliers wide.

To change the design:

- The guard-bit count of the dot product is the `GUARD` parameter of `row_col_mult`.
- The integer precision of the quantizer is set by `FRAC` and `INT_W`.
- Coefficient and table widths are in `jpeg_pkg`.
