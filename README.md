# uHD: a unary-stream hyperdimensional image encoder

Hyperdimensional computing (HDC) classifies data by mapping each sample to a
long vector of +1/-1 values, a *hypervector*, and comparing it with one
stored hypervector per class. The usual image encoder needs two random
hypervectors per pixel: one for the pixel's *position* and one for its
intensity *level*. It multiplies (XORs) them, adds the products of all
pixels, and thresholds the sums. Finding random vectors that work well
often takes many training attempts.

uHD removes the position hypervectors. Each pixel position `i` gets its own
low-discrepancy (Sobol) sequence `S_i` of `D` numbers in `[0, 1)`, so the
position is carried by *which* sequence a pixel is compared against.
Bit `d` of pixel `i`'s level hypervector is

    L_i[d] = +1  if  level(pixel_i) >= level(S_i[d])   else  -1

The image hypervector is the sign of `sum_i L_i`. Nothing is multiplied and
nothing is random: the encoding is deterministic and needs a single pass.

The hardware makes each step cheap:

* Pixels and Sobol numbers are both stored as `M`-bit levels (M = 4, 16 levels).
* A level becomes a 16-bit **unary** (thermometer) stream by a table look-up.
* Two unary streams are compared by a few gates instead of a binary comparator.
* The sign is decided *while* counting, by a hardwired mask on the counter
  bits. No subtractor or comparator runs after the count.

This directory holds synthesizable SystemVerilog for that encoder. It also
holds a nearest-class search that turns the encoded hypervector into a
prediction, and self-checking testbenches for every block.

## Data flow

```
 raw pixel (8 b)                                   Sobol scalar (4 b)
      |                                                  |
 pixel_quantizer  round(X*15/255)                  host writes, address i*D+d
      |                                                  |
 data_regs  H x 4-bit registers            sobol_bram  H*D x 4-bit RAM (1-cycle read)
      |  (read pixel i, delayed 1 cycle)                 |  (read S_i[d])
      +-------------------+          +-------------------+
                          v          v
                    ust  (Unary Stream Table, 2 read ports)
                          |          |
              data stream (16 b)   Sobol stream (16 b)
                          v          v
                    unary_comparator  -> L_i[d]  (1 = +1)
                          |
                    accum_binarize  (POP++ counter + TOB mask + sign flop)
                          |  after H pixels: sign of dimension d
                          v
           hv_o[d] (D-bit register), hv_bit_o stream --> hv_classifier --> class
```

`encoder_ctrl` drives the addresses. For dimension `d = 0 .. D-1` it visits
every pixel `i = 0 .. H-1`. After the last pixel of a dimension the counter
holds `sum_i (L_i[d] == +1)`, and the sign bit of that dimension is final.
A single counter and mask therefore serve all `D` dimensions in turn.

## Unary streams and the Unary Stream Table

A level `k` of `M` bits is represented by `N = 2^M = 16` bits holding `k`
ones, right-aligned: `U0 = 0000000000000000`, `U1 = ...0001`,
`U2 = ...0011`, ..., `U15 = 0111111111111111`. Row `k` is `2^k - 1`. The top
bit is always 0 because a 4-bit level has at most 15 ones.

The usual way to make such a stream is a counter plus a comparator that emit
it bit by bit. Because only 16 different streams exist, `ust` simply stores
all of them and indexes the right one. It is a hardwired constant with two
read ports, one for the pixel level and one for the Sobol level, so both
streams of a beat are fetched in the same cycle.

## The unary comparator

Two unary streams of the same length are maximally correlated, so a bitwise
AND of them is the smaller of the two. The comparator (`unary_comparator`)
tests whether that minimum is the Sobol stream:

```
minimum = data & sobol          // smaller of the two values
ored    = minimum | ~sobol      // 1 wherever the minimum agrees with sobol
ge      = &ored                 // N-input AND: 1 iff data >= sobol
```

Example with 7-bit streams: data = 2 (`0000011`) and Sobol = 5 (`0011111`).
The minimum is `0000011` and `~sobol` is `1100000`, so the OR gives
`1100011`. It contains zeros, so the output is 0, because 2 < 5. Since
`(a & b) | ~b` equals `a | ~b`, a synthesizer may reduce it further. The RTL
keeps the gates as they are described.

A 1 means +1 and a 0 means -1. A pixel whose level is at least the Sobol
level votes +1.

## Counting and binarizing on the spot

The hypervector bit of dimension `d` is +1 when at least half of the `H`
pixel bits are +1. The threshold of binarization is `TOB = H/2`, which is
392 for a 28 x 28 image. The counter (`pop_counter`) has `ceil(log2 H)` bits,
10 for H = 784.

`TOB` is a constant, so it is not compared arithmetically. `tob_mask` takes
the counter bits `B_1` (LSB) .. `B_CW` (MSB) into one AND gate. A bit goes in
inverted where `TOB` has a 0 and straight where it has a 1. For
`TOB = 392 = 0110001000b`, the AND is 1 exactly when the count is 392. A
5-bit example is `TOB = 00110b`: `B_1`, `B_4` and `B_5` are inverted, and
`B_2` and `B_3` pass straight.

This equality pulse needs one addition, which is this design's own. The
count keeps rising after it passes `TOB`, so the mask output is 1 for only
one count value. `accum_binarize` therefore adds a sticky flip-flop that
remembers that the threshold was reached. The flip-flop and the counter
restart on the first pixel of each dimension. The result is:

* sign = 1 if `count >= TOB` (an exact tie, 392 of 784, gives +1)
* sign = 0 otherwise

The count rises by at most one per beat, so it cannot step over `TOB`
without the mask seeing it. The counter has only `ceil(log2 H)` bits. When
`H` is a power of two, it can wrap only after all `H` bits were 1, and by
then the sign is already set.

The published circuit draws the counter as a ripple chain of flip-flops,
each with its inverted output fed back. The RTL uses a synchronous binary
counter with the same count sequence, so that all flip-flops share one
clock.

## Timing

One (pixel, dimension) beat enters per clock. The pipeline has three stages:

| stage | what happens |
|---|---|
| 0 | `encoder_ctrl` puts out pixel `i` and BRAM address `i*D + d`; the data registers are read combinationally |
| 1 | the BRAM word arrives and meets the pixel level (registered one cycle); UST, comparator and counter update |
| 2 | after the last pixel of dimension `d`: `hv_valid_o`, `hv_dim_o = d`, `hv_bit_o = sign`, and `hv_o[d]` is written |

Timing of one image, with the edge that samples `start_i` as edge 0:

* `done_o` rises `H*D + 1` clock edges later, with the bit of the last
  dimension.
* `hv_o` is complete one cycle after `done_o`.
* The prediction (`pred_valid_o`) comes two cycles after `done_o`.

At the default size (H = 784, D = 1024), one image takes 802,818 cycles,
about 8 ms at 100 MHz. The rate of one hypervector bit per pixel per cycle
and the dimension-by-dimension order are this design's choices. The paper
gives energy per hypervector bit and per image, but no clock rate or degree
of parallelism.

## Classification

`hv_classifier` stores `Q` binary class hypervectors, written whole by the
host, and compares them with the encoded hypervector as it streams out.
Cosine similarity of two +1/-1 vectors of length `D` is
`1 - 2*hamming/D`, so the most similar class is the one with the smallest
Hamming distance. The unit keeps one `ceil(log2(D+1))`-bit XOR counter per
class and picks the minimum, with ties going to the lowest class index.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `H` | 784 | pixels (features) per image, 28 x 28 |
| `D` | 1024 | hypervector dimensions (the published evaluation also uses 2048 and 8192) |
| `M` | 4 | bits per quantized pixel and Sobol scalar (16 levels) |
| `N` | 16 | unary stream length, `2^M` |
| `Q` | 10 | classes (MNIST) |
| `CW` | `ceil(log2 H)` = 10 | counter width |
| `TOB` | `H/2` = 392 | threshold of binarization |

Defaults live in `rtl/uhd_pkg.sv`. Every module takes the sizes as
parameters, so `uhd_top #(.H(3072), .D(8192))` is a legal instance. The
Sobol RAM is `H*D*M` bits: 3.2 Mbit at the defaults and 25.7 Mbit at
D = 8192.

## Using `uhd_top`

1. With `busy_o` low, load the Sobol scalars. Word `(i, d)`, the `d`-th
   scalar of pixel `i`'s sequence, goes to `sobol_addr_i = i*D + d`. A scalar
   is `round(S * 15)` of a Sobol point `S` in `[0, 1)`; for example, 0.671875
   becomes 10 and 0.859375 becomes 13.
2. Load the `H` raw 8-bit pixels (`pix_we_i`). They are quantized on the way
   in, to `round(X*15/255)`.
3. For inference, load the class hypervectors (`cls_we_i`, bit 1 = +1).
4. Pulse `start_i`. Read the hypervector from the stream or from `hv_o`, and
   the prediction from `pred_class_o` and `pred_dist_o`.

Writes are ignored while `busy_o` is high. Nothing in the design generates
Sobol sequences. They are computed offline and written in, and the same
contents serve every image and every dataset of that size. For training,
the host collects `hv_o` of the training images and forms the class
hypervectors.

## Where this RTL goes beyond the published description

Taken from the published design:

* the block structure: registers for pixels, block RAM for quantized Sobol
  scalars, table fetch of unary streams, counter plus hardwired mask
* the UST contents
* the gates of the unary comparator
* the counter width and `TOB = H/2`
* the mask's inverter-per-zero-bit rule
* the sizes `M = 4`, `N = 16`, `D` = 1K/2K/8K and 28 x 28 images

Choices made here, because the published description does not settle them:

* **Class hypervectors from many images.** The accumulator is sized for one
  image (it counts to `H`), so the hardware binarizes one image at a time.
  Combining the images of a class into a class hypervector is left to the
  host. The published background describes class hypervectors as sums over
  all images of a class, but gives no uHD hardware for that step.
* **Sticky sign flip-flop.** Added after the equality mask, see above. A tie
  rounds to +1.
* **Synchronous counter.** Used in place of the drawn ripple counter.
* **Traversal.** Dimension-major order, one beat per cycle, a single
  counter, and the three-stage pipeline.
* **Interfaces.** Host write ports, the start/busy/done handshake, the
  asynchronous active-low reset, and one-cycle synchronous BRAM reads.
* **Pixel quantization.** The Sobol rule, rounding `x * (2^M - 1)` to the
  nearest level, is also applied to pixels normalized by 255.
* **Classifier.** The nearest-class search uses Hamming distance. For binary
  vectors this picks the same class as cosine similarity.
* **Number of classes.** `Q = 10` is MNIST's class count. The published text
  leaves it general.

The published energy and area figures come from a 45 nm synthesis that
this RTL does not reproduce.

## Verification

Each block has a self-checking testbench in `tb/` that compares against
values computed independently, for example integer comparison for the
unary comparator, or a software count for the counter. Each testbench
prints `TB_RESULT checks=<n> failures=<m>`.

| testbench | what it checks |
|---|---|
| `tb_pixel_quantizer` | all 256 intensities |
| `tb_data_regs` | all 784 registers, reset, out-of-range writes |
| `tb_sobol_bram` | random reads, read latency, hold, read-before-write |
| `tb_ust` | all rows on both ports (k ones, right-aligned) |
| `tb_unary_comparator` | all 16 x 16 pairs, all 8 x 8 pairs at N = 7, the 2-vs-5 example |
| `tb_pop_counter` | 5000 random beats with gaps and restarts |
| `tb_tob_mask` | every count at TOB = 392, and the 5-bit TOB = 00110b example |
| `tb_accum_binarize` | 40 dimensions of 784 bits, counts 391/392/393/0/784 and random, with idle cycles |
| `tb_encoder_ctrl` | visiting order, addresses, stage alignment, latency, start ignored while busy |
| `tb_hv_classifier` | predictions against a direct cosine (dot product) computation |
| `tb_uhd_top` | end to end at H = 16, D = 32, Q = 4 through `uhd_e2e` |
| `tb_uhd_full` | end to end at the default size: 784 x 1024 Sobol words, 10 classes, 3 images |
| `tb_uhd_workloads` | end to end at 784 x 2048, 784 x 8192, 2352 x 1024 and 3072 x 1024 |

The end-to-end runs work as follows:

* A reference model written from the algorithm encodes each image; it is
  not derived from the RTL.
* Every streamed bit, the final hypervector, the latency and the predicted
  class are compared with it.
* The runs count how often each mechanism occurred and fail if one never
  did: threshold reached, threshold not reached, comparator outcomes in
  both directions, writes dropped while busy, back-to-back images, and
  predictions.

Their Sobol data is a van der Corput sequence with a different digital
shift per pixel, standing in for the real multi-dimensional Sobol set. The
pixels are synthetic, with levels chosen so that per-dimension counts fall
on both sides of `H/2`.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/uhd_pkg.sv tb/tb_uhd_full.sv --top-module tb_uhd_full -o sim
./obj_dir/sim
```

Substitute any testbench name. `tb_uhd_full` runs in a few seconds and
`tb_uhd_workloads` in under a minute.

## Files

* `rtl/uhd_pkg.sv`: default sizes.
* `rtl/uhd_top.sv`: the whole encoder.
* `rtl/encoder_ctrl.sv`: the sequencer.
* `rtl/data_regs.sv`, `rtl/sobol_bram.sv`: the storage.
* `rtl/pixel_quantizer.sv`, `rtl/ust.sv`, `rtl/unary_comparator.sv`: the
  level-to-bit path.
* `rtl/pop_counter.sv`, `rtl/tob_mask.sv`, `rtl/accum_binarize.sv`: counting
  and binarization.
* `rtl/hv_classifier.sv`: the nearest-class search.
* `tb/`: one testbench per block, plus `uhd_e2e.sv`, the shared end-to-end
  flow.
