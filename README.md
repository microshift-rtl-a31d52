# Microshift image compression core

Microshift is a lossy image compressor small enough to sit beside the
read-out of a CMOS image sensor. It works on the pixel stream as the sensor
delivers it, in raster order and one pixel per clock. It needs about three
image lines of 3-bit storage and no frame memory. It rests on two ideas.

1. **Micro-shifted coarse quantization.** Every 8-bit pixel gets a small
   offset that depends only on its place in a repeating 3x3 pattern. The
   offsets are 0, 4, 7 / 11, 14, 18 / 21, 25, 28, spread evenly over one
   quantization step of 32. The shifted value is wrapped modulo 256 and cut
   to its top 3 bits. Neighbouring pixels are therefore quantized on nine
   different grids. A receiver that looks at a 3x3 neighbourhood can narrow
   each pixel down to about 1/9 of a step, so it gets back much more than 3
   bits of depth. This step is lossy and gives a fixed ratio of 8:3.
2. **Lossless coding of the nine subimages.** The pixels that share one
   offset form a subimage: every third pixel of every third line. Inside one
   subimage, smooth areas turn into large flat areas. Subimage 1 is coded
   from its own past pixels with a context-driven predictor. Subimages 2 to
   9 are predicted from the already coded pixels of the same 3x3 tile. Those
   pixels are at most two pixels away in the real image, so they predict far
   better than the subimage's own neighbours. Residuals are Golomb-coded.
   Flat contexts switch to adaptive run-length coding. Each subimage goes to
   its own output buffer, and the buffers are sent one after the other. A
   receiver can show a coarse picture after subimage 1 and refine it as the
   rest arrives. It can also stop the transmission early.

The core compresses one H x W frame in H·W + 8 clock cycles. The defaults
are W = 640 and H = 480.

Decompression is not part of this RTL. It runs on the receiving computer.
The simplest decoder inverts the lossless step and then estimates each pixel
as the midpoint of the ranges allowed by its 3x3 neighbours. Better decoders
use smoothing or a Markov random field. The word stream defined below holds
everything a decoder needs.

## Data path at a glance

```
in_pixel ─► ms_quantizer ─► memory_block ───────────────────────┐
 (8 bit)     (3 bit)         3 line buffers + 2x10 kernel       │ template A..E, X,
                             (X lags the input by 3 samples)    │ 3x3 tile of X
                                                                ▼
            S1 texture_calc    context l (0..312), sign, flat flag
            S2 predictor       intra: X^ = B ± D(l) (dict_rom)
                               inter: midpoint of tile ranges, re-quantized
            S3 error_map       e = X - X^ folded to 0..7
            S4 golomb_coder / run_counter + run_length_coder → one code ≤ 24 bit
                                                                │
            bit_packer[t] ─► sync_fifo[t]   (t = pattern position 0..8)
                                                                │
            tx_sequencer: FIFO 1, then 2, …, then 9 ─► out_data / out_sub / out_last
```

`scan_ctrl` counts rows and columns, drives the shifts, flushes the kernel
at frame end and holds off the next frame until the current one is sent.
`microshift_pkg` holds the constants, the offset table, the run-index table
and the pipeline structs.

## Pattern positions and subimages

For the pixel at row r and column c the pattern position is
t = 3·(r mod 3) + (c mod 3), and its subimage is t + 1. The offset δ_t is
`shift_of(t)` in the package. The values are round(32·t/9).

`ms_quantizer` computes `q = (pixel + δ_t) mod 256 >> 5`. A pixel near 255
can wrap to level 0. This is deliberate: the decoder applies the same
wrap, and the inter-predictor models it too.

## The line memory and the kernel (memory_block)

This is the part that needs the most care, because all template and tile
addressing comes from it.

Three W-stage shift registers, 3 bits wide, are chained in series
(`line_buffer`). One sample enters per accepted pixel. The output of each
buffer is therefore the same column one, two and three lines earlier. Two
10-stage kernel rows sit beside them:

* **row 0** is fed straight from the quantizer. It holds the newest ten
  samples of the current line.
* **row 3** is fed from the output of the third line buffer. It holds the
  same columns three lines up.

Prediction needs the pixel D, which is up-right of X in its subimage:
column c+3, three lines up. So X cannot be the newest sample. The kernel
codes the pixel that entered three samples ago. With the newest sample at
column c+3 the template is:

| pixel | meaning (subimage neighbour of X) | image position | kernel stage |
|-------|-----------------------------------|----------------|--------------|
| X     | pixel being coded                 | (r, c)         | row 0, stage 3 |
| B     | left                              | (r, c-3)       | row 0, stage 6 |
| E     | left of B                         | (r, c-6)       | row 0, stage 9 |
| D     | up-right                          | (r-3, c+3)     | row 3, stage 0 |
| A     | up                                | (r-3, c)       | row 3, stage 3 |
| C     | up-left                           | (r-3, c-3)     | row 3, stage 6 |
| G     | up-left of C                      | (r-3, c-6)     | row 3, stage 9 (held, unused) |

Template positions outside the image read as 0. These are rows above the
top, columns left of 0 and D beyond the right edge. Because rows are
consecutive in the shift registers, the kernel would otherwise see pixels
of the neighbouring line.

The inter-predictor also needs the other samples of X's 3x3 tile, in lines
r - (r mod 3) to r. The current line comes from kernel row 0. The line one
up comes from the first stages of the second line buffer, and the line two
up from the first stages of the third. Each line buffer exposes its first
six stages (`TAPS`). A tile sample at column offset dc from X is at stage
3 - dc, so offsets -2..+2 need stages 1..5. The `blk_ok` mask marks the
tile samples that come before X in the tile (pattern position u < t) and
lie inside the image. Only those have been coded, so only those may be
used.

At the end of a frame the last three pixels are still in the kernel.
`scan_ctrl` adds three flush shifts so that they are coded too, and it
refuses input (`in_ready` low) during those cycles.

## Texture contexts (texture_calc)

The texture vector is v = (A−C, C−B, D−A, B−E). Each element is clamped to
−2..2, giving 5^4 = 625 patterns. A pattern and its negation are treated
as the same context. The code value s = 125·v1 + 25·v2 + 5·v3 + v4 lies in
−312..312. Its magnitude is the context index l (0..312), and its sign is
kept as `neg`. The context is **flat** when all four elements are 0 (l = 0).

## Prediction (predictor, dict_rom)

**Subimage 1 (t = 0), intra-prediction.** The predictor guesses the
difference X − B, not X itself. A 313-entry dictionary gives the most likely
X − B for each context: X^ = B + D(l), or B − D(l) when the context was
merged from −v. The result is clamped to 0..7. The dictionary should be
trained on a set of images by taking the most frequent X − B for each
context. The trained values are not published, so `dict_rom` fills itself
by formula: D(l) = v1 of context l. That is the planar guess X ≈ B + (A − C),
clamped to ±2. A trained table can be loaded with the `DICT_FILE`
parameter of the top, or `INIT_FILE` of `dict_rom`. The file has 313 lines,
and each line holds one hex digit: the entry as a 4-bit two's-complement
number, for example `f` for −1.

**Subimages 2..9 (t > 0), inter-prediction.** Take each coded tile sample
z_u at pattern position u < t. It says that the original pixel there was in
[32·z_u − δ_u, 32·z_u − δ_u + 32). For a smooth image all these pixels are
nearly equal. The predictor intersects the ranges and takes the midpoint
Dec = ⌊(max lower + min upper)/2⌋. It then quantizes that value the way the
encoder would quantize X: X^ = ((Dec + δ_t) mod 256) >> 5. When the ranges
do not overlap, which happens at edges, the same formula is used on the
crossed bounds. Tile positions right of the image edge are skipped.

## Residual mapping and Golomb coding (error_map, golomb_coder)

With X and X^ in 0..7, only the eight residuals −X^ .. 7−X^ can occur.
`error_map` folds them onto 0..7. Small magnitudes come first, with the
signs alternating while both signs are still possible; after that the
count continues with the sign that is left. For X^ ≤ 4 a positive residual
gets the first odd code. For X^ > 4 a negative residual does.

`golomb_coder` sends value v as (v >> K) zeros, a one, and the K low bits.
The default K = 0 gives a unary code: 0 → `1`, 1 → `01`, …, 7 → `00000001`.
A perfectly predicted pixel still costs one bit. This is why flat regions
are handled by run mode.

## Run mode (run_counter, run_length_coder)

A pixel with a flat context enters run mode in its subimage. From then on,
pixels of that subimage are compared with their left neighbour B:

* **hit (X = B):** the run count grows. When it reaches 2^J, a `1` is sent,
  the count restarts and the run index grows by one (up to 31).
  J = J[index] is the JPEG-LS table 0,0,0,0,1,1,1,1,2,2,2,2,3,3,3,3,
  4,4,5,5,6,6,7,7,8,9,10,11,12,13,14,15.
* **end of the subimage row:** this is the last pixel of the row that
  belongs to the subimage, c + 3 ≥ W. If the final pixel is a hit and a
  partial segment is open, a `1` closes it. Run mode then ends. A decoder
  knows the row length, so it knows the run stopped at the edge.
* **interruption (X ≠ B):** a `0` is sent, then the current count in J bits,
  then the pixel's residual, Golomb-coded with the usual intra or inter
  prediction. The run index drops by one, and run mode ends.

The nine subimages are interleaved in the raster scan but are separate
streams. Each subimage therefore keeps its own {active, count, index}
state. All run states are cleared at the start of a frame.

One pixel yields at most 1 + 15 + 8 = 24 bits. Stage S4 merges the run
bits and the Golomb code into one right-aligned code of up to 24 bits with
its length.

## Pipeline and timing

| cycle after the pixel is accepted | what happens |
|---|---|
| 0 | pixel quantized and shifted into the kernel (newest sample) |
| +3 | it becomes X in the kernel (three more samples or the end-of-frame flush) |
| +4 | S1 registered: template, context, flat flag, tile |
| +5 | S2 registered: prediction X^, hit flag |
| +6 | S3 registered: mapped residual |
| +7 | S4 registered: code and length, run state updated |
| +8 | bit packer absorbs the code |

With back-to-back input, the last pixel of a frame enters at cycle H·W.
Counting the first accepted pixel as cycle 1, `frame_done` pulses at cycle
H·W + 8. The input may pause (`in_valid` low). The kernel and the pipeline
then simply wait, because the pipeline only advances X when a new sample
arrives.

## Output stream (bit_packer, sync_fifo, tx_sequencer)

Each subimage's codes are packed MSB-first into 32-bit words. The first bit
of the first code is bit 31 of the first word. At frame end the last word
is padded with zeros. The decoder knows how many pixels each subimage has,
so the padding needs no marker.

Each subimage has a FIFO of `FIFO_DEPTH` words (default 4096). It is
first-word-fall-through. A push into a full FIFO is dropped and sets that
subimage's sticky `fifo_overflow` bit. The bits are cleared at the start of
the next frame.

`tx_sequencer` puts the words on a valid/ready stream:

* `out_data`: the word; `out_sub`: the subimage 0..8; `out_last`: the last
  word of that subimage.
* FIFO 1 is drained while the frame is still being compressed. The
  sequencer moves on to FIFO s+1 only when FIFO s is empty and the frame is
  fully coded. `tx_done` pulses after FIFO 9.
* `tx_abort` requests an early stop. Once the frame is fully coded, all
  FIFOs are emptied and the frame ends with `tx_done` and `tx_aborted`.

A new frame is accepted only after `tx_done`, because the FIFOs hold one
frame. The nine FIFOs at the default size are by far the largest memory,
about 1.2 Mbit. The compressor itself needs 3·W·3 bits of line buffer plus
a few hundred flip-flops.

## Top-level interface (microshift_top)

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock, synchronous active-low reset |
| in_valid, in_pixel, in_ready | in/in/out | 1/8/1 | raster pixel stream |
| out_valid, out_ready | out/in | 1 | compressed word stream handshake |
| out_data, out_sub, out_last | out | 32/4/1 | word, subimage index, last word of subimage |
| tx_abort | in | 1 | stop sending this frame |
| frame_done | out | 1 | last code of the frame is in its packer |
| tx_done, tx_aborted | out | 1 | frame sent (or abandoned) |
| fifo_overflow | out | 9 | a subimage stream did not fit |

Parameters: `W` (640) and `H` (480) must equal the image size, since the line
buffers are exactly one line long. `FIFO_DEPTH` (4096) sets the words per
subimage buffer. `GOLOMB_K` (0) is the Golomb parameter. `DICT_FILE` ("")
names an optional trained dictionary.

## Sizes

| configuration | line buffers | cycles per frame | notes |
|---|---|---|---|
| 640x480 (default) | 5,760 bit | 307,208 | 163 frames/s at 50 MHz |
| 256x256 (`W=256,H=256`) | 2,304 bit | 65,544 | 1,525 frames/s at 100 MHz |
| 1280x720 (`W=1280,H=720`) | 11,520 bit | 921,608 | raise `FIFO_DEPTH` (≈16384) for average images |
| 512x512 (`W=512,H=512`) | 4,608 bit | 262,152 | |

A 4096-word FIFO holds about 3.8 bit per pixel of a 640x480 subimage.
Natural images average about 1.25 bit per pixel. Pure noise needs up to
8 bit per pixel with K = 0 and will overflow.

## Where this design departs from, or adds to, the published scheme

* **Dictionary contents.** The trained 313-entry table is not available.
  The default is the formula D(l) = v1 (planar prediction), and a trained
  table can be loaded. Compression ratios will be somewhat worse than with
  a trained table.
* **Run-length coding.** The scheme names adaptive run-length coding in the
  style of JPEG-LS without giving details. The rules above are the JPEG-LS
  run mode adapted to this design: X = B as run condition, row ends, a
  separate state per subimage, and the interruption coded with the normal
  prediction. The JPEG-LS special handling of the interruption sample's
  context and Golomb parameter is not used.
* **Golomb parameter.** It is fixed at K = 0, not adapted per context.
* **Boundaries.** Template pixels outside the image are 0. Intra prediction
  is clamped to 0..7. Inter-prediction uses the midpoint even when the
  ranges do not intersect. X^ = 4 uses the first mapping formula.
* **Tile access.** The 3x3-tile samples come from taps on the first stages
  of the line buffers. The published block diagram shows the line buffers
  and the 2x10 kernel but not how these samples are reached.
* **Interfaces.** The valid/ready streams, 32-bit words, FIFO depth,
  overflow flags, abort behaviour and frame hold are choices of this
  design.
* **Not included.** The image sensor and its read-out, the serial (UART)
  link, colour/Bayer handling (each colour plane would have to be fed as its
  own frame) and the decompressor. Gate counts and power have not been
  compared with published figures.

## Verification and simulation

Every module has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=<n> failures=<n>` at the end and has a watchdog.
`tb/ms_ref_pkg.sv` is an independent whole-image software model of the
encoder: no line buffers, no pipeline, and its own array indexing. It
produces the expected word streams and counts how often each coding
mechanism was used.

* `tb_microshift_top` runs a 26x13 image with 4-word FIFOs. It has five
  frames: back-to-back input with an exact H·W + 8 latency check, input
  gaps and output back-pressure, an abort, a FIFO overflow and a recovery
  frame. Every word, tag and last flag is compared with the model. The
  test fails if any mechanism never occurred: intra and inter prediction,
  run segments, interruptions and row ends, modulo wrap, non-overlapping
  ranges, a partial tile at the right edge, input stall, back-pressure,
  draining during compression, abort, overflow and latency.
* `tb_microshift_full` runs one 640x480 frame through the core at its
  default parameters and compares all words. It takes a few seconds with
  Verilator.
* `tb_microshift_sizes` runs three more cores at once, at 256x256, 512x512
  and 1280x720, the last with 16384-word FIFOs. Each compresses one
  synthetic frame under random back-pressure and is checked word for word
  and for its H·W + 8 latency. It takes about a minute.

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    --top-module tb_microshift_top rtl/microshift_pkg.sv tb/ms_ref_pkg.sv \
    tb/tb_microshift_top.sv
./obj_dir/Vtb_microshift_top
```

For a unit testbench, drop `tb/ms_ref_pkg.sv` and name the testbench, for
example `--top-module tb_predictor rtl/microshift_pkg.sv tb/tb_predictor.sv`.
The package must come first on the command line. A testbench may override
parameters, for example `W` and `H`, to run small images.
