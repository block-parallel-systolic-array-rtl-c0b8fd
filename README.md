# Fragile watermark embedder on the 4x4 special Hartley NTT over GF(3)

A fragile watermark has to break under any change to the image, however
small: an LSB flip or a lossless-looking JPEG round trip should be enough.
This design embeds such a watermark in 8-bit greyscale images. It
follows the block-parallel systolic architecture in "Block-Parallel
Systolic-Array Architecture for 2-D NTT-based Fragile Watermark Embedding"
(Madanayake, Cintra, Dimitrov, Bruton), which builds on the Tamori et al.
NTT watermarking scheme. The embedder works in a number-theoretic
transform domain over the field GF(3) = {0, 1, 2}:

* all of its arithmetic is exact, so there is no rounding for a tamperer to hide in;
* a transform coefficient has no physical meaning, so changing a single pixel
  residue changes every coefficient of its block.

The array takes one 4x4 block of pixels and one 4x4 block of watermark
digits every clock, and returns one watermarked block every clock after a
fixed latency of 91 clocks.

## The idea in one block

Every pixel `x` (0..255) is split into a residue and a divisible part:

    r = x mod 3            (0, 1 or 2)
    d = x - r              (a multiple of 3)

Only the 4x4 block of residues `r` carries the watermark:

    R  = H4 * r  * H4   (mod 3)    forward transform
    R' = R + w          (mod 3)    add the watermark digits w (0..2)
    r' = H4 * R' * H4   (mod 3)    inverse transform
    x' = d + r'                    watermarked pixel

Each pixel therefore moves by at most 2 grey levels, and only inside its
own group of three levels.

To check an image, recompute the transform of the residues of both images
and subtract them. The result is `w` again:

    H4*(x' mod 3)*H4 - H4*(x mod 3)*H4 = R' - R = w   (mod 3)

Now change any pixel of a block by one grey level. Its residue changes by ±1.
The outer product of a column and a row of `H4` has no zero entry, so all
sixteen recovered digits of that block change. That is the fragility.
Extraction is not part of this hardware; the testbenches carry an integer
model of it.

## The transform matrix and why it is cheap

The transform is the Hartley NTT of length 4 over GF(3), built with
`zeta = j` (j² = −1). `cas(i) = cos(i) + sin(i)` then takes only the values
±1:

         | 1  1  1  1 |     | 1  1  1  1 |
    H4 = | 1  1  2  2 |  =  | 1  1 -1 -1 |   (mod 3)
         | 1  2  1  2 |     | 1 -1  1 -1 |
         | 1  2  2  1 |     | 1 -1 -1  1 |

Three properties make the hardware small:

1. **No multiplier.** Every entry is ±1, so a transform uses only GF(3)
   additions and subtractions.
2. **It is its own inverse.** `H4 * H4 = 4·I`, and 4 ≡ 1 (mod 3). The inverse
   transform is therefore the same block, with no scaling factor. The
   "forward" and "inverse" cores are two instances of one module.
3. **Two bits are enough.** A GF(3) digit fits in 2 bits. An adder of two
   digits has 4 input bits and 2 output bits, so each output bit is one
   4-input LUT (`mod3_add`).

The true 2-D Hartley transform would also need index-reversed copies of
`H4*A*H4`. A watermark only needs an invertible, error-spreading transform,
so the design uses the **special** 2-D HNTT, `B = H4 * A * H4`. This is a plain
row-column transform.

### 1-D transform: two butterfly ranks (`hntt_1d`)

    rank 1:  (s01, d01) = B(x0, x1) = (x0+x1, x0-x1)
             (s23, d23) = B(x2, x3) = (x2+x3, x2-x3)
    rank 2:  (X0, X1)   = B(s01, s23)
             (X2, X3)   = B(d01, d23)

Each butterfly `B` (`hntt_butterfly`) computes `(a+b, a−b) mod 3` from two
LUT adders and registers both results. Between the ranks, the difference
output of the first butterfly and the sum output of the second cross over.

### 2-D transform: columns, transpose, rows (`special_hntt_2d`)

Four `hntt_1d` units transform the four columns of the block. Fixed wiring
transposes the result. Four more `hntt_1d` units then transform the rows.
`H4` is symmetric, so rows-after-columns gives `H4*A*H4`. All 16 digits go
through in parallel; the core accepts a block every clock with a latency of
4 clocks.

## The embedding array (`ntt_wm_embed`)

```
 x ─► div_res_split ─┬─ d (16x8 b) ─► delay_fifo (z^-M) ──────────────────────┐
      (256-deep      │                                                         ▼
       table)        └─ r (16x2 b) ─► special_hntt_2d ─► wm_insert ─► special_hntt_2d ─► balance ─► recombine_add ─► x'
                                       (forward)          ▲ (+w mod 3)   (inverse)        regs      (16 x 8-bit add)
 w ─► pipe_delay (5) ─────────────────────────────────────┘
```

* `div_res_split` finds `d` in a constant 256-entry table,
  `DIV_ROM[v] = v − (v mod 3)`, computed at elaboration. It then takes
  `r = x − d`. One table is read per pixel, sixteen in parallel.
* `wm_insert` is sixteen GF(3) adders, `R' = R + w`.
* `delay_fifo` is the `z^-m` FIFO. It holds the divisible parts until the
  marked residues of the same block come out of the inverse core. It is a
  circular buffer of 88 words of 128 bits plus an output register, with one
  pointer.
* `recombine_add` is sixteen 8-bit adders, `x' = d + r'`.

### Latency budget

The published figure is `m = 89` pipeline stages. The paper gives only this
total, not how it is split, and the top parameter `M` defaults to it. `M` is
the latency of the residue path from the input of the forward core to the
balanced output of the inverse core. This is also the length of the FIFO.

| stage | clocks |
|---|---|
| `div_res_split` (table read) | 1 |
| forward `special_hntt_2d` (2 butterfly ranks × 2 dimensions) | 4 |
| `wm_insert` | 1 |
| inverse `special_hntt_2d` | 4 |
| balancing registers (`pipe_delay`, `M − 9`) | 80 |
| `recombine_add` | 1 |
| **x to x'** | **M + 2 = 91** |

The 80 balancing registers only serve to reproduce the published latency. The
arithmetic needs none of them. Set `M = 9` for the shortest array this RTL
allows, with a 9-clock FIFO. `M` must be at least 9, and an elaboration-time
assertion checks this.

### Interface and timing

| port | width | meaning |
|---|---|---|
| `clk`, `rst_n` | 1 | rising-edge clock, synchronous active-low reset |
| `in_valid` | 1 | `x` and `w` carry a block this clock |
| `x[i][k]` | 4×4×8 | pixel block, `[row][column]` |
| `w[i][k]` | 4×4×2 | watermark digits 0..2 (an assertion rejects the code 3) |
| `out_valid` | 1 | `xp` carries a block |
| `xp[i][k]` | 4×4×8 | watermarked block, exactly `M + 2` clocks after its input |

There is no back-pressure, because the array accepts a block every clock.
`in_valid` may have gaps, and `out_valid` repeats the same pattern `M + 2`
clocks later. The watermark is sampled together with its block. Each block
may therefore carry its own watermark, or one pattern can be held constant
for the whole image, as in the published experiments.

The types (`gf3_t`, `gf3_blk_t`, `pix_blk_t`) and the GF(3) helper functions
are in `hntt_pkg`. A digit is coded 00/01/10 for 0/1/2. Every table treats
the unused code 11 as 0.

### Pixels at 255

The output adders are 8 bits wide, like the published ones. A pixel of 255
has `d = 255`. If its marked residue `r'` is 1 or 2, the sum wraps to 0 or 1.
The published design does not say how it handles this case. This RTL wraps,
which is what a plain 8-bit adder does. Since 256 ≡ 1 (mod 3), a wrapped
pixel reads back with residue `r' − 1` instead of `r'`. A block that holds
one therefore does not return its watermark, and a checker would report it
as tampered. An image can avoid this by clipping its input to 0..254. The
end-to-end testbench counts wrapped blocks separately from the others.

## Resource picture

The published FPGA prototype (Virtex-4 SX35) used:

* 2034 slices;
* 3272 LUTs;
* 160 FIFO16/RAM16 blocks.

It ran above 100 MHz, which at one block per clock gives 100 million 4x4
blocks per second, or 95.3 frames/s of 4096x4096 video. The RTL has the same
one-block-per-clock throughput. No FPGA or ASIC implementation of this RTL
was made, so clock rate and area are not confirmed.

Roughly, at `M = 89` the logic is:

* 144 GF(3) LUT adders: 2 cores × 8 units × 4 butterflies × 2, plus 16 in
  `wm_insert`;
* 16 table reads and 16 8-bit adders;
* a FIFO of 88 × 128 bits;
* about 3.5 kbit of registers, of which 2.6 kbit are the balancing stages.

## Files

| file | role |
|---|---|
| `rtl/hntt_pkg.sv` | types, sizes, GF(3) helper functions |
| `rtl/mod3_add.sv` | GF(3) add (`SUB=0`) or subtract (`SUB=1`), a 16-entry table |
| `rtl/hntt_butterfly.sv` | butterfly `B`, registered |
| `rtl/hntt_1d.sv` | 4-point HNTT, 2 clocks |
| `rtl/special_hntt_2d.sv` | 4x4 special 2-D HNTT, 4 clocks |
| `rtl/div_res_split.sv` | residue / divisible split, 1 clock |
| `rtl/wm_insert.sv` | 16 GF(3) watermark adders, 1 clock |
| `rtl/delay_fifo.sv` | `z^-m` delay of the divisible parts |
| `rtl/recombine_add.sv` | 16 8-bit output adders, 1 clock |
| `rtl/pipe_delay.sv` | generic register pipeline (watermark alignment, balancing) |
| `rtl/ntt_wm_embed.sv` | top level |
| `tb/hntt_ref_pkg.sv` | integer reference: `H4` as printed, matrix products mod 3, embedding and extraction |
| `tb/<module>_tb.sv` | one self-checking testbench per module |
| `tb/ntt_wm_embed_short_tb.sv` | whole array with the shortest pipeline, `M = 9` |
| `tb/wm_image_tb.sv` | whole-image run with LSB perturbation |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=F` and stops. Each also
has a watchdog that counts a failure if the run hangs. With Verilator 5, run
from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/hntt_pkg.sv tb/hntt_ref_pkg.sv tb/ntt_wm_embed_tb.sv \
        --top-module ntt_wm_embed_tb -Mdir obj -o sim && ./obj/sim

To run another testbench, put its file and module name in place of
`ntt_wm_embed_tb`. Verilator finds the other modules through `-Irtl`.

What the testbenches establish:

* **`mod3_add_tb`** checks all 16 input codes of both the add and the
  subtract table.
* **`hntt_butterfly_tb`, `hntt_1d_tb`, `special_hntt_2d_tb`** stream random
  data every clock. They compare each result with integer matrix products,
  at exactly the stated latency. `special_hntt_2d_tb` also chains two cores
  and checks that the second returns the original block, which confirms that
  the transform is its own inverse.
* **`div_res_split_tb`** covers all 256 pixel values.
* **`delay_fifo_tb`** checks the 89-clock delay over several trips around
  the buffer.
* **`recombine_add_tb`** includes wrapping sums.
* **`ntt_wm_embed_tb`** runs the whole array at its default parameters.
  It feeds 3000 clocks of blocks, each with its own watermark, with random
  gaps and a long back-to-back run.
  * It checks every output pixel against the reference and the latency of
    every block.
  * It recovers the watermark from every block that did not wrap.
  * It checks that a single LSB flip destroys the recovered watermark.
  * It counts idle clocks, back-to-back blocks, wrapped blocks, watermark
    changes, recoveries and detected tampers, and fails if any count is zero.
* **`ntt_wm_embed_short_tb`** builds the array with `M = 9`, the shortest
  pipeline: 11 clocks, no balancing registers. It checks the output values
  and the 11-clock latency.
* **`wm_image_tb`** streams a generated 512x512 image (16384 blocks) with
  one regular 4x4 watermark pattern. Each pixel's LSB is then flipped with
  probability 1/100, which is the first of the published perturbation tests.
  The testbench checks that every touched block is flagged and every
  untouched block is intact. The JPEG and JPEG 2000 perturbations are image
  codecs outside the embedder and are not modelled.

## Where this RTL follows the paper and where it chooses

These parts follow the paper:

* the field, transform matrix and butterfly structure;
* the column/transpose/row layout of the 2-D core;
* reuse of one core for the inverse;
* the residue/divisible split through a 256-deep table;
* 16 GF(3) watermark adders and 16 8-bit output adders;
* the `z^-m` FIFO with `m = 89`;
* a throughput of one block per clock.

These are this design's own choices:

* **Registers.** A register sits after every butterfly and after each of the
  split, insert and output stages. The remaining 80 stages are balancing
  registers after the inverse core. The published design was retimed by its
  tool flow, and its split of the 89 stages is not known.
* **Valid flag and reset.** The `in_valid`/`out_valid` flag and the
  synchronous reset are additions. The FIFO memory is not reset; its output
  is ignored until valid data reach it.
* **Subtraction.** The butterfly's `a − b` is one table, not a negator
  followed by an adder.
* **Residue.** `r` is derived as `x − d`, not read from a second table.
* **Watermark timing.** The watermark is sampled with its pixel block, not
  applied directly at the insertion adders.
* **Wrapping.** The output adders wrap at 255, as described above.

These parts are not included:

* the PCI glue logic;
* the hardware co-simulation gateways of the FPGA prototype.

Both were generated by the vendor tool flow and are not described. The
block-parallel pixel and watermark buses are the top's ports instead.
