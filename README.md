# Accuracy-reconfigurable stochastic DCT/IDCT engine

Chips slow down as they age. Bias temperature instability raises transistor
thresholds, so after some years a circuit no longer closes timing at the
clock it shipped with. This engine trades accuracy for speed, and makes that
trade at run time. Every multiplication is a *counter-based stochastic
multiplication*. Its running time is proportional to 2^(data bit width). A
3-bit accuracy selection signal `SEL` cuts the data width from 10 bits down
to 6 bits, one bit per step. Each bit removed halves the computing time. The
clock can then be halved (aging, or power saving) while the frame rate stays
the same. The cost is a few dB of image quality.

The application is image filtering with a 2D 8×8 discrete cosine transform
(DCT): the image goes through a DCT, a frequency mask and an inverse DCT. This
repository holds synthesizable SystemVerilog for the whole engine. It
follows the published architecture: input buffer, 2D DCT block, 2D inverse DCT
block, output buffer, logic control and the accuracy selection signal. Where
the publication leaves something open, such as number formats, operand roles,
schedule or image size, the choice made here is stated in the section
*Design choices* below.

## 1. Counter-based stochastic multiplication

Conventional stochastic computing turns a number into a random bit stream
whose density of ones is the value. Two streams are ANDed to multiply, and
the ones are counted over 2^n cycles. The counter-based multiplier
(`cbsc_mult`) does better:

* A **down counter** is loaded with the integer operand `w`.
* A **deterministic stochastic number generator** (`det_sng`) emits a stream for the
  fractional operand `x` (`x/2^Q`). In the first 2^Q − 1 positions, bit `x[i]`
  appears exactly 2^i times, spread evenly. For Q = 4 the stream, from
  time 0, is

      x3 x2 x3 x1 x3 x2 x3 x0 x3 x2 x3 x1 x3 x2 x3 0

  In hardware this is a time counter `t` (the FSM) driving a multiplexer. At
  time `t` the multiplexer passes `x[Q-1-z]`, where `z` is the number of
  trailing zeros of `t+1`. It passes 0 when `z ≥ Q`.
* An **up counter** adds the stream bit every cycle while the down counter is
  non-zero. When the down counter reaches zero it stops. The up counter then
  holds the number of ones among the first `w` stream bits, which is ≈ `x·w/2^Q`.

A multiplication therefore takes `w` cycles, not 2^n. No random number
generator is involved. Example with Q = 4: x = 1101b (13/16) and w = 9 count
8 ones, so the product is 8/16. The exact product is 0.457·16 ≈ 7.3. The
testbench checks this case.

The count has a closed form, which the reference model uses:
`Σ_b x[b]·(⌊w/2^s⌋ − ⌊w/2^(s+1)⌋)` with `s = Q−1−b`. Its error is below Q
units, whatever `w` is.

## 2. Number formats and the accuracy selection signal

| item | format |
|---|---|
| pixel | 8-bit unsigned |
| data word (everywhere between the buffers) | M = 10-bit signed-magnitude: bit 9 sign, bits 8..0 magnitude |
| DCT coefficient | sign + 9-bit magnitude fraction (value = mag/512), orthonormal DCT-II |
| SEL | 3 bits: 000, 001, 010, 011, 100 → 10, 9, 8, 7, 6 bits; 101..111 behave as 100 |

**Truncation** (`data_trunc`) keeps the sign and drops `SEL` least
significant magnitude bits. For example, SEL = 010 turns `1 111010101` into
the 8-bit `1 1110101`. The shortened magnitude is the down-counter operand.
So a 10-bit word can run a round of up to 511 cycles and a 6-bit word up to 31.

**Adder block** (`adder_block`). Each product's sign is the XOR of the data
sign and the coefficient sign. The adder adds or subtracts each count. It then
appends the `SEL` zeros that truncation removed, which restores the full-width
scale. Finally it scales the result by 2^−OSHIFT on the magnitude and
saturates to ±511. The scaling keeps transform results inside 10 bits. A 1D
DCT of eight pixels reaches √8·255 ≈ 721, so each forward pass divides by 2
(OSHIFT = 1). Each inverse pass multiplies by 2 (OSHIFT = −1). The forward DCT
output is therefore the true 2D DCT divided by 4, and the inverse DCT returns
to pixel scale. With 8-bit pixels nothing saturates.

## 3. The ARSC MAC unit (`arsc_mac`)

One MAC unit computes the eight outputs of a 1D 8-point DCT, or inverse DCT,
of one input vector. It contains a truncation block, eight multipliers (one
per vector element, each with its sign XOR) and the adder block. It produces
one output per *round*:

* `start` latches the vector (truncated) and `SEL`.
* Round `j` starts all eight multipliers, with coefficient `C[j][i]` for lane
  `i` (inverse: `C[i][j]`). The same truncated data magnitudes go to the down
  counters every round.
* The round ends when all eight down counters are zero. The adder result is
  then registered and `out_valid` pulses with `out_idx = j`.

Timing: let D be the largest truncated magnitude in the vector. Output `j`
appears exactly `(j+1)·(D+2)` cycles after the edge that sampled `start`, and
`done` comes with output 7. D is at most 2^(9−SEL) − 1, so each step of `SEL`
halves the worst-case time. For a typical vector the time is data dependent in
the same proportion. The unit testbench measured 4016, 2016, 1016, 512 and 264
cycles for one vector at SEL 0..4.

The coefficient table is computed at elaboration from
`round(512 · a(u) · cos((2x+1)uπ/16))`, with `a(0) = √(1/8)` and `a(u>0) = ½`.
It is `gen_table()` in `arsc_mac.sv`, built on `arsc_pkg::dct_coef`.

## 4. Two-dimensional blocks and the transposing buffer

`dct2d_block` is two MAC units with an 8×8 intermediate buffer
(`inter_buffer`) between them. The forward block and the inverse block are the
same module; the parameter `INVERSE` selects the coefficient orientation and
the scaling.

* The first MAC unit transforms eight *lines* one after another. Result
  element `j` of line `l` is written to cell `[l][j]`.
* The buffer's read port is transposed: line `q` of the read is cells
  `[0..7][q]`. A row transform followed by a transposed read gives a column
  transform.
* `full` rises once all eight lines are complete. The second MAC unit may
  only start then (an assertion checks this).
* The outputs of the second unit are gathered into `vec_out`.

Data orientation through the engine:

| stage | input lines | output vector `q` |
|---|---|---|
| DCT block | tile rows y (pixels) | coefficient column u = q, elements v |
| mask | `F(v,u)` kept where `mask[v*8+u]` = 1 | |
| inverse DCT block | coefficient columns u | reconstructed tile row y = q, elements x |

The inverse block's output vector is a tile row. It is clamped to 0..255 and
written to the output buffer as one word.

## 5. Frame schedule and host interface

`logic_control` runs a frame tile by tile, in raster order. It samples `SEL`
when the frame starts and holds it until the frame ends. The work on a tile
is split into three stages, and each stage has its own small sequencer:

1. **fill**: for each of the 8 rows, read the row from the input buffer (one
   64-bit word) and run the DCT block's first MAC unit on it;
2. **middle**: once the DCT buffer is full, for each column `c` run the DCT
   block's second MAC unit on line `c`, then the inverse block's first MAC
   unit on the masked result;
3. **drain**: once the inverse buffer is full, for each row `r` run the
   inverse block's second MAC unit and write the row to the output buffer.

The stages overlap across tiles. While the middle stage works on tile t, the
fill stage may already load tile t+1 into the DCT buffer as soon as the last
column has been started, and the drain stage empties tile t-1 from the
inverse buffer. Inside the middle stage the DCT second unit computes column
c+1 while the inverse first unit works on column c. Each intermediate buffer
is owned by one stage at a time; ownership passes to the next stage when the
buffer becomes full and back when its reader has started its last line
(a MAC unit latches its input vector at start, so the buffer may then be
cleared and refilled).

`frame_ram` is a simple dual-port RAM with 64-bit words, each holding eight
pixels of one image row. It is used for both buffers. Word
`y·IMG_W/8 + x/8` holds pixels x..x+7 of row y, and pixel k sits in bits
`8k+7:8k`.

Top-level ports of `arsc_top` (defaults `N = 8`, `M = 10`, `CQ = 9`,
`IMG_W = IMG_H = 256`):

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `sel` | in | 3 | accuracy selection, sampled at `start` |
| `mask` | in | 64 | frequency mask m(u,v) at bit v·8+u (1 = keep) |
| `start` | in | 1 | start a frame (while `busy` is low) |
| `busy`, `done` | out | 1 | frame running; one-cycle pulse at the end |
| `sel_active` | out | 3 | SEL of the running or last frame |
| `in_we`, `in_waddr`, `in_wdata` | in | 1, 13, 64 | write the input image |
| `out_re`, `out_raddr` | in | 1, 13 | read the result |
| `out_rdata` | out | 64 | result, one cycle after `out_re` |

Usage: write the 8192 words of the image, set `sel` and `mask`, pulse
`start`, wait for `done`, then read 8192 words.

## 6. Measured behaviour

These figures come from the full-size testbench: a 256×256 synthetic scene
with smooth shading, a bright disc, a dark bar and fine texture, with all
mask bits set. Every output pixel matches the bit-true reference model.

| bits | SEL | cycles / frame | frames/s at 85.7 MHz | clock for the 10-bit frame rate | PSNR |
|---|---|---|---|---|---|
| 10 | 000 | 13 064 646 | 6.56 | 85.7 MHz | 37.3 dB |
| 9 | 001 | 6 655 967 | 12.9 | 43.7 MHz | 34.3 dB |
| 8 | 010 | 3 413 929 | 25.1 | 22.4 MHz | 29.1 dB |
| 7 | 011 | 1 849 403 | 46.3 | 12.1 MHz | 26.0 dB |
| 6 | 100 | 1 037 665 | 82.6 | 6.8 MHz | 18.4 dB |

For comparison, the publication's FPGA prototype kept its frame rate at 85.7,
43.8, 22.9, 12.4 and 7.1 MHz for 10..6 bits. It reported 38.1, 34.7, 31.3,
28.7 and 27.5 dB on its own test image. The clock ladder is reproduced
closely. Quality matches at 10 and 9 bits but falls faster at 7 and 6 bits.
That is likely because here every one of the four 1D passes truncates its
input, towards zero. The publication does not say how its intermediate
results are formatted. Its absolute frame rate is 7.19 frames/s at 85.7 MHz
(0.139 s per frame); this engine reaches 6.56 frames/s under the assumed
256×256 image size. The publication does not give its image size or how far
its units overlap; here one DCT block and one inverse DCT block run with the
three overlapping stages of section 5. A strictly sequential schedule of the
same hardware needed 24.2 million cycles for a 10-bit frame, almost twice as
many.

## 7. Design choices and departures

Taken from the publication:

* the counter-based multiplier with a deterministic FSM+MUX stream generator
  (including the exact 16-bit pattern);
* the MAC unit made of truncation, multipliers, sign XOR and adder;
* the SEL encoding for 10..6 bits;
* truncation that keeps the sign and drops LSBs;
* the zeros appended after the MAC;
* the 2D block made of MAC unit, N×N buffer and MAC unit, with the second
  unit waiting for a full buffer;
* the top-level block set;
* N = 8 and 10-bit data.

Choices made here:

* **Operand roles.** The truncated data drives the down counters and the
  coefficient drives the stream generator, so time follows the data width.
* **One output per round.** The MAC unit reuses its eight multipliers for
  the eight outputs, one after another.
* **Formats.** Coefficients are sign plus 9-bit fraction. Transform results
  are scaled per pass (÷2 forward, ×2 inverse) and saturate. Pixels enter as
  non-negative magnitudes and leave clamped to 0..255.
* **Transform definition.** The forward transform is the orthonormal DCT-II.
  The publication's forward-DCT equation is garbled; its inverse equation is
  the orthonormal DCT-III, and the forward transform here is chosen to match
  that inverse.
* **Mask.** The frequency mask is a 64-bit port applied between the two
  blocks. The publication defines the mask but gives no values and draws no
  hardware for it.
* **Image and buffers.** The image is 256×256, with 8-pixel RAM words. This
  is inferred from the prototype's block-RAM count; the size itself is not
  published.
* **Schedule.** The logic control runs three overlapping stages with
  buffer hand-over, as described in section 5. SEL is held per frame.
* **Reset.** Registers use an asynchronous active-low reset. The RAMs have
  no reset.
* **Not included.** The FPGA clock manager that produced the scaled clocks
  is not part of the RTL: `clk` is an input. Frequency scaling itself
  happens outside this design.

## 8. Files

`rtl/`:

| file | content |
|---|---|
| `arsc_pkg.sv` | constants, SEL type, `sel_shift`, `dct_coef` |
| `det_sng.sv` | deterministic stochastic number generator |
| `cbsc_mult.sv` | counter-based multiplier |
| `data_trunc.sv` | truncation block |
| `adder_block.sv` | signed adder, zero append, scaling, saturation |
| `arsc_mac.sv` | ARSC MAC unit (1D DCT / IDCT of one vector) |
| `inter_buffer.sv` | N×N transposing intermediate buffer |
| `dct2d_block.sv` | 2D DCT / inverse DCT block |
| `frame_ram.sv` | input / output image buffer |
| `logic_control.sv` | frame sequencer |
| `arsc_top.sv` | top level |

`tb/`: one self-checking testbench per module, named `tb_<module>.sv`. There
is also `tb_arsc_top_full.sv`, which runs the default 256×256 configuration
at all five accuracy settings. `arsc_ref_pkg.sv` is the bit-true reference
model they share. The model is written independently of the RTL, from the
formulas above. Each testbench prints `TB_RESULT checks=N failures=F` and has
a watchdog.

Simulating with Verilator 5, from the repository root. Replace the
testbench name, and list the modules it needs. The example is the end-to-end
test on a 16×16 image:

    verilator --binary --timing --assert -Irtl \
      rtl/arsc_pkg.sv rtl/det_sng.sv rtl/cbsc_mult.sv rtl/data_trunc.sv \
      rtl/adder_block.sv rtl/arsc_mac.sv rtl/inter_buffer.sv rtl/dct2d_block.sv \
      rtl/frame_ram.sv rtl/logic_control.sv rtl/arsc_top.sv \
      tb/arsc_ref_pkg.sv tb/tb_arsc_top.sv --top-module tb_arsc_top
    ./obj_dir/Vtb_arsc_top

The 16×16 test runs in under a second once built. The full-size test
simulates about 25 M cycles and needs roughly two minutes.

Changing things:

* `IMG_W` and `IMG_H` on `arsc_top` set the frame size. Both must be
  multiples of 8.
* `CQ` sets the coefficient precision.
* The data width `M` and the narrowest configuration (`MIN_BITS` in
  `arsc_pkg`) set the SEL range.
* The reference model in `tb/arsc_ref_pkg.sv` assumes the defaults
  N = 8, M = 10 and CQ = 9.
