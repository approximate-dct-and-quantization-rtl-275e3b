# Approximate JPEG compression core: shift-add DCT, power-of-two quantiser, precision scaling and loop skipping

An image sensor that compresses its own output spends most of the encoder's
energy on two steps: the 8x8 discrete cosine transform (DCT) and the
quantisation that follows it. This RTL implements an encoder core for exactly
those two steps. It saves energy in four ways, and the last two can be turned
up or down while it runs:

1. **No multipliers in the DCT.** Every cosine factor is replaced by a small
   integer over a power of two, and each product is built from shifts and
   adders.
2. **No dividers in the quantiser.** Each quantisation step `q` is rounded
   down to a power of two, `q' = 2^floor(log2 q)`. Division then becomes an
   arithmetic right shift, and a priority encoder finds the shift amount.
3. **Precision scaling (knob B, 0..4).** The pixels are rounded to
   `M / 2^B` before the DCT, so fewer bits toggle in the datapath.
4. **Loop skipping (knob L, 0..6).** If every pixel of a block is within
   `5*L` of the block last compressed, the DCT is left idle. The stored
   result of that earlier block is sent out again instead.

The core accepts one level-shifted 8x8 block per clock cycle (pixels in
-128..127). Three cycles later it delivers the block of quantised
coefficients. The approach and its constants come from *Approximate DCT and
Quantization Techniques for Energy-Constrained Image Sensors*. The pipeline,
word widths, rounding, reset and handshake are choices made for this RTL;
they are marked as such below and in each file's header.

## Dataflow

```
            +-----------------+   similar
 in_blk --->| similarity_check|-----------+------------------------------+
   |        +-----------------+           |                              |
   |              ^ prev_blk              v                              |
   |        +-----------+          +-------------+                       |
   +------->| block_reg |  core_go | zero-input  |                       |
   |   we=core_go (prev block)     |   MUX       |                       |
   |        +-----------+          +------+------+                       |
   v                                      |                              |
 precision_scaler (B) ----------------->--+                              |
                                          v                              |
                       dct_2d: columns | reg | rows, >>>2 | reg          |
                                                     |  (cycles 1, 2)    |
                                             <<< B   v                   |
                                       approx_quantizer (64 shift cells) |
                                                     |                   |
                              +----------------------+--------+          |
                              v                               v          v
                       block_reg (result, we = computed)   output MUX --> reg --> out_blk
```

| cycle | what happens to a block that enters at cycle 0 |
|-------|------------------------------------------|
| 0 | `similarity_check` compares it with the previous-block register. If it is *not* similar (`core_go`), it is truncated by `precision_scaler`, it enters the DCT, and it becomes the new previous block. If it is similar, the DCT input is forced to zero and the DCT registers keep their value. |
| 1 | the column pass of the 2D DCT is registered |
| 2 | the row pass is registered. Its output is shifted left by B, quantised, and ready at the end of the cycle. |
| 3 | `out_blk` is registered. It holds either the fresh quantised block, which is also written into the result register, or the result register's contents for a skipped block. `out_valid` and `out_skipped` go out with it. |

A small tag `{valid, skip, B}` travels down the pipeline with each block. As
a result B and L may change on every block. A reused result is always that of
the last computed block *in stream order*, even when that block is still in
the pipeline when the similar one arrives. The paper draws the skip path as
combinational logic around an unpipelined core; the tag is what keeps that
behaviour once the core is pipelined.

## The multiplier-less DCT

### One dimension

`fdct_1d` computes `y = 2*T*x`. Here `T` is the orthonormal 8-point DCT-II
matrix (`t_0j = 1/sqrt 8`, `t_kj = 1/2 cos((2j+1)k*pi/16)`). The factor 2
keeps all constants below one and the scaling free. The structure is Chen's
fast DCT flow graph:

```
stage 1   s_n = x_n + x_(7-n)         d_(7-n) = x_n - x_(7-n)        n = 0..3
even      b0 = s0+s3  b1 = s1+s2  b2 = s1-s2  b3 = s0-s3
          y0 = c4 (b0+b1)   y4 = c4 (b0-b1)   (y2, y6) = R(pi/8)  (b3, b2)
odd       e5 = c4 (d6-d5)   e6 = c4 (d6+d5)
          p4 = d4+e5  p5 = e5-d4  p6 = d7-e6  p7 = d7+e6
          (y1, y7) = R(pi/16) (p7, p4)      (y3, y5) = R(3pi/16) (p6, p5)
```

`R(a)(x, y) = (x cos a + y sin a, x sin a - y cos a)`. The graph yields the
frequencies in the order 0,4,2,6,1,7,3,5; the module puts them back in
natural order. The drawing of the graph does not mark which input of each
subtractor is negated. The signs above were chosen so that each output equals
its cosine sum; the testbench checks this against a real-valued DCT.

The four kinds of multiplication are separate modules. Each is a fixed
shift-add network:

| module | approximates | integers | network (all shifts arithmetic) |
|---|---|---|---|
| `fdct_scale_c4` | cos(pi/4) = 0.7071 | 181/256 | `a = 5x`, `b = 256x + a - 16a`, `>>> 8` |
| `fdct_rot_c2c6` | cos(pi/8), cos(3pi/8) = 0.9239, 0.3827 | 473/512, 196/512 | shared terms `x-2y`, `-7x+4y`, `4x-7y`, `25x-60y`, then `>>> 9` |
| `fdct_rot_c1c7` | cos(pi/16), cos(7pi/16) = 0.9808, 0.1951 | 251/256, 50/256 | `10y-x`, `10x+y`, then `256x + 5(10y-x)` and `5(10x+y) - 256y`, `>>> 8` |
| `fdct_rot_c3c5` | cos(3pi/16), cos(5pi/16) = 0.8315, 0.5556 | 213/256, 142/256 | common factor -71: `-71(-3x-2y)`, `-71(-2x+3y)`, `>>> 8` |

Every shift right rounds toward minus infinity (two's complement, arithmetic
shift). The internal nets are 9 to 11 bits wider than the operands, so no
intermediate value overflows. Inside `fdct_1d` the nets are `IN_W+4` bits and
the outputs `IN_W+3` bits, which holds `|y| <= 2*sqrt(8)*128`.

### Two dimensions

`dct_2d` applies the 1D transform twice, with the transpose done as wiring in
between. Eight `fdct_1d` units transform the columns and a register follows.
Eight more units transform the rows, an arithmetic `>>> 2` removes the 2*2
gain, and a second register follows. The result is `D = T M T'`. Pixels enter
as 8-bit values, the column pass produces 11-bit values, the row pass works
on them and yields 14 bits, and the 12-bit output (`COEF_W`) holds
`|D| <= 1024`. Over random blocks the output differs from the exact
real-valued 2D DCT by less than 3 LSB (largest value seen: 2.99). The
testbench allows 4.

The paper only gives the two-round structure. Using sixteen 1D units and a
two-stage pipeline is this design's choice: it gives one block per cycle at
low clock rates. A serial version (one 1D unit reused 16 times) would trade
throughput for area.

## Quantising with a shift

With `q' = 2^s` and `s = floor(log2 q)`, the division `round(D/q)` becomes
`C = D >>> s`. A priority encoder (`prio_enc_8to3`) builds eight range
comparators `2^k <= q < 2^(k+1)`. Their one-hot output is encoded into the
3-bit `s`, so the quantiser needs 3 bits per entry instead of 8. Each of the
64 `quant_cell`s is an encoder plus a barrel shifter. `approx_quantizer`
holds 64 cells, one per coefficient, all working in parallel.

Things to know when decoding:

* The shift rounds toward minus infinity, not to nearest. A small negative
  coefficient becomes -1, not 0. A decoder that rebuilds each coefficient at
  the centre of its bin, `(C + 1/2) * q'`, undoes that bias. The image
  testbench decodes this way.
* The effective matrix is `Q'`, not `Q`, so decode with `Q'`. For Q50 every
  entry drops to the power of two below it. Q50(0,0) = 16 is already a power
  of two. Q90(0,0) = 3 becomes 2, so decoding Q90 streams with the standard
  matrix damages the DC term.
* The `Q'` table printed in the paper for Q50 has a 32 at row 5, column 3.
  The rule gives 64 there, because Q50 has 64 at that position, and the
  hardware follows the rule.

`q_mat` is an input port (64 x 8 bits). Q50 and Q90 are provided as
constants in `jpeg_pkg`. `q = 0` is outside the allowed 1..255 and gives
`s = 0`, i.e. no division.

## Precision scaling and how its scale is undone

`precision_scaler` rounds every pixel to `M_tr = (m + 2^(B-1)) >>> B`, that
is, half up. It works on 9 bits, and the result always fits in 8. The
truncated block passes through the normal-width DCT. At the DCT output the
core multiplies by `2^B` (a left shift) before quantising. As a result:

* the output coefficients have the scale of an untruncated run, and the
  decoder needs no knowledge of B;
* `(D_tr << B) >>> s` equals `D_tr >>> (s - B)` when `s >= B`. Only that
  much of the quantiser's work is left, and the B lowest bits of the result
  are truly gone.

The paper does not say where the scale is restored; this is this design's
choice. The paper also clock-gates the unused low bits. That is a power
measure with no logic function and is not modelled. B is 3 bits wide. B5 to
B7 also work but are not used by the paper.

## Loop skipping

`similarity_check` evaluates the paper's pixel-by-pixel loop for all 64
pixels at once. With `eps = 5*L`, a band is clipped to the pixel range
around each stored pixel:

```
ceiling = min(m_prev + eps, 127)    floor = max(m_prev - eps, -128)
similar = AND over 64 pixels of (floor <= m_in <= ceiling)
```

The loop's early exit becomes a 64-input AND. The previous-block register
(`block_reg`) holds the last block that was *computed*, not the last block
seen. This prevents a slow drift from chaining similar blocks forever. L0 is
not an off switch: a block identical to the stored one is skipped even at
L0. Both block registers reset to zero, so after reset an all-zero block is
skipped and returns zeros, which is also the right answer.

On a skip the core's input MUX selects the all-zero block and the DCT's
pipeline registers hold their value. No node in the datapath toggles, which
is where the energy goes on a skip.

## Interface of `approx_jpeg_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of all registers |
| `trunc_level` | in | 3 | B, sampled with each block |
| `skip_level` | in | 3 | L, sampled with each block (eps = 5L) |
| `q_mat` | in | 8x8x8 | quantisation matrix; keep stable while blocks are in flight |
| `in_valid` | in | 1 | a block is present on `in_blk` |
| `in_blk` | in | 8x8 signed 8 | level-shifted pixels, `[row][column]` |
| `out_valid` | out | 1 | exactly 3 cycles after `in_valid` |
| `out_skipped` | out | 1 | this result is a reused one |
| `out_blk` | out | 8x8 signed 12 | quantised coefficients, `[vertical freq][horizontal freq]` |

There is no back-pressure: the consumer must take one block per cycle when
one is offered. The block types (`pix_blk_t`, `coef_blk_t`, `q_mat_t`) and
the widths (`N`, `PIX_W`, `Q_W`, `COEF_W`) are defined in `jpeg_pkg`. An
assertion in the top module checks that the result register is written only
when the DCT has a valid block.

Throughput: at 100 MHz the core takes 10^8 blocks/s. A 512x512 colour image
(3 x 4096 blocks at 4:4:4) takes 123 us. A 640x480 colour stream at 6 frames/s
needs fewer than 10^5 blocks/s, so the core is idle almost all of the time.

## Where this RTL departs from, or chooses for, the paper

* **Rotation constants.** The paper's equations pair 251/50 with
  0.8315/0.5556, and 213/142 with 0.9807/0.1951. Its flow graph places those
  cosines at pi/16 and 3pi/16. Since 251/256 = 0.980 and 213/256 = 0.832,
  the integers are used with the cosines they approximate.
* **The 251/50 network.** Its equation writes `>> 2` after `y + (y << 2)`,
  while its figure shows `<< 1`. Only `<< 1` gives 50y, so the figure is
  followed.
* **Quantiser shift direction.** The quantiser figure prints `d << s`, but
  the text defines the operation as a division, so the shift is to the right.
* **Q50', row 5, column 3.** The paper prints 32; the rule, used here, gives
  64.
* **Cosine value.** The text gives 0.3836 for cos(3pi/8), the flow graph
  0.3826. Neither is used directly: 196/512 = 0.3828.
* **Pipelining and handshake.** Chosen here, as described above. The paper's
  core is shown as a single combinational unit with registers around the
  skip path.
* **Comparison on raw pixels.** The similarity check compares pixels before
  truncation. The paper does not say which.

## Not in this RTL

Colour-space conversion, chroma downsampling and blocking, and Huffman
coding are outside the paper's hardware: it runs them in software around the
DCT and quantisation core. The gradient-descent search that picks B and L for
a target quality also runs in software. Here B and L are simply input ports.
Clock gating of truncated bits has no logic function and is left to the
physical flow.

## Verification

`tb/jpeg_ref_pkg.sv` is a reference model written independently of the RTL
(integer arithmetic that follows the equations, plus a real-valued exact
DCT). Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops via
a watchdog if it hangs.

| testbench | checks |
|---|---|
| `tb_fdct_scale_c4`, `tb_fdct_rot_*` | exhaustive or random operands against `floor(k*x/2^n)`, sign and range corners |
| `tb_fdct_1d` | 2000 random vectors plus corners, bit-exact against the model and within 3 LSB of `2*T*x` |
| `tb_dct_2d` | random and extreme blocks, bit-exact, within 4 LSB of the exact DCT, latency 2, back-to-back and gapped streams |
| `tb_prio_enc_8to3`, `tb_quant_cell`, `tb_approx_quantizer` | all q in 0..255, shift results against `floor(d / 2^s)`, Q50' and Q90' tables |
| `tb_precision_scaler`, `tb_similarity_check`, `tb_block_reg` | all B and L levels, clipping at -128/127, band edges, write enable and reset |
| `tb_approx_jpeg_top` | end to end at default sizes: random, smooth and repeated block streams under changing B, L and Q. Every output is compared with the model, latency is 3, and the counted mechanisms (skips, computes, skip right after a compute, truncation, B changes, Q90, the all-zero skip after reset, every L level) must each occur |
| `tb_image_workload` | a generated 512x512 image (4096 blocks) streamed back to back with Q50 B0 L0, Q50 B1 L2, Q50 B0 L3 and Q90 B0 L0. Every block is checked, the image must leave in 4096+3 cycles, and skip rate and PSNR are reported |

On the generated image, which has a flat band, smooth shading and one
strongly textured quadrant, the skip rate is 17.8% at L0, 52.5% at B1/L2 and
59.5% at L3. PSNR is 21.7 dB (Q50), 21.5 dB (B1/L2), 21.4 dB (L3) and
34.8 dB (Q90). The textured quadrant dominates the error. These numbers
describe that synthetic image, not natural photographs.

## Simulating

Everything is plain SystemVerilog-2017 with no DPI or file I/O. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/jpeg_pkg.sv tb/jpeg_ref_pkg.sv tb/tb_approx_jpeg_top.sv \
    --top-module tb_approx_jpeg_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. The unit testbenches finish
in seconds. `tb_approx_jpeg_top` takes a few seconds, and
`tb_image_workload` about 20 s. To change the coefficient or pixel width,
edit `jpeg_pkg`. The 1D units take their widths as parameters (`W`, `IN_W`,
`OUT_W`), and `dct_2d` derives its internal widths from the package.
