# Lepton hardware encoder with set-associative probability memories

Lepton recompresses JPEG files without loss. It keeps the JPEG's quantized
DCT coefficients and replaces JPEG's Huffman coding with binary arithmetic
coding. Every bit of every coded value gets its own adaptive probability,
looked up in a context-indexed table. About 20 % is saved over the JPEG
file. The cost is the tables: the Lepton model set has roughly 685,000
probability bins, more than 11 Mbit of state. That is far too much to put on
a chip next to an encoder pipeline.

This RTL implements such an encoder. Its central idea is an observation
about those tables: within one image only a small part of each large model
is ever touched, and the touched part clusters in a few regions of the index
space. So each large model is given a memory much smaller than its index
range, managed like a set-associative cache:

* the index range is split into M intervals by M-1 programmable boundary
  indexes;
* each interval owns N physical bins (N "ways");
* an index is given a free way the first time it is used in an image, and
  keeps it until the image ends.

If an interval runs out of ways, the model reports an overflow. Software then
re-encodes that image, for example with better boundaries. The boundaries
are meant to be derived offline from image statistics, so that busy parts of
the index space get narrow intervals and rarely used parts get wide ones.

The rest of this document follows a coefficient block through the encoder,
then explains the probability models in detail, and ends with how to
simulate, what has been verified and where this RTL makes its own choices.

## Data flow

```
blocks ─► line_buffer ─► nz_counter x3 ─┐
                        dc_residual ────┼─► coef_serializer ─► binarizer ─► 76 probability models ─► p2s ─► arith_enc4 ─► tokens
                                        │      (1 element/cycle)   (all bins of an element in parallel)   (4 bins/cycle)
```

| stage | module | what it does |
|---|---|---|
| line buffer | `line_buffer` | Stores the previous block row of the current colour plane. It outputs each block together with the block above it and the block to its left, plus flags saying whether those neighbours exist. |
| preprocess | `nz_counter`, `dc_residual`, `coef_serializer` | Counts the non-zero coefficients of the three AC regions. Predicts the DC coefficient from the neighbours. Emits the block's syntax elements in coding order, one per cycle, each with its context. |
| binarization | `binarizer` | Turns one element into up to 22 bins. Each bin has a model id, a model index and a bit. All of its bins are sent to their models in the same cycle. |
| models | `opt_prob_model` (40 instances), `direct_prob_model` (36) | Each model looks up its bin, returns the probability that the bit is 0 (in 1/256), and updates the bin. |
| P2S | `p2s` | Collects one element's (bit, probability) pairs from the models in parallel. Hands them on four per cycle in coding order. |
| coder | `arith_enc4` | A boolean (binary) arithmetic coder that does four coding steps per cycle and writes bytes. |

### Block regions and coding order

Each 8x8 block (natural order, index `row*8+col`) is split into four regions:

* DC: position 0;
* x edge: row 0, columns 1-7;
* y edge: column 0, rows 1-7;
* 7x7 AC: the remaining 49 coefficients.

The elements of one block are coded in this order:

1. `num_nonzero_7x7` (0..49);
2. the 7x7 coefficients in zigzag order, up to the last non-zero one;
3. `num_nonzero_x` (0..7), then the x-edge coefficients up to the last non-zero one;
4. `num_nonzero_y`, then the y-edge coefficients likewise;
5. the DC residual.

A region whose count is 0 codes no coefficients. Coding "up to the last
non-zero one" is tracked with a count of non-zeros still left. That count
also serves as a context.

Blocks are coded in raster order, one plane after the other. The plane
(luma/chroma) is a context bit `flag_c` in every model index.

### Binarization

A coefficient or residual `v` is coded in three parts:

* Exponent: with magnitude `m = |v|` and `e = bitlen(m)` (0..11), the
  exponent is coded in unary. Bin `i` (i = 0..min(e,10)) goes to model
  `exp_*_i` with bit `i < e`. When e = 11 the terminating 0 is omitted.
* Sign: one bin in the `sign` model, if `e > 0`.
* Residual: the `e-1` bits of `m` below its leading one, MSB first. Bit
  position `p` is coded on model `res_*_p`.

The counts are coded as fixed-length binary numbers, MSB first:
`num_nonzero_7x7` with 6 bits on `nz_7x7_0..5`, and each edge count with 3
bits on `nz_edge{x,y}_0..2`. Their index includes the bits already coded.
This is why `nz_7x7_b` has 500, 260, 140, 80, 40, 20 bins.

Each model index combines several contexts as a mixed-radix number. The
ranges below are the bin counts of the Lepton model table. How the ranges
are split into contexts is this design's choice, made so that the products
match those counts.

| model(s) | bins | index |
|---|---|---|
| `exp_7x7_0..10` | 10780 | {flag_c 2, prior 11, nz-left bucket 10, coding position 49} |
| `exp_edge_0..10` | 2156 | {flag_c 2, prior 11, nz-left 7, edge position 14} |
| `exp_dc_0..10` | 204 | {flag_c 2, DC context 102} |
| `sign` | 66 | {flag_c 2, region 3, e-1 11} |
| `res_7x7_0..9` | 1260 | {flag_c 2, e-2 10, zigzag-1 63} |
| `res_thres_0..6` | 4096·2^k | {flag_c, position mod 16, e-2, prior capped 7} (12 bits), followed by the k residual bits already coded |
| `res_thres_7` | 4096 | the 12-bit context alone |
| `res_edge_0..1` | 196 | {flag_c 2, edge position 14, prior capped 7} |
| `res_dc_0..9` | 12 | {flag_c 2, e-2 capped 6} |
| `nz_7x7_b` | 500, 260, 140, 80, 40, 20 | {flag_c 2, neighbour count context 10} x ((49 >> (b+1)) + 1) values of the bits already coded |
| `nz_edge{x,y}_b` | 512, 256, 128 | {flag_c 2, 7x7 count bucket 8, neighbour edge count 8} x ((7 >> (b+1)) + 1) prefix values |

The contexts are defined as follows:

* `prior`: `min(10, bitlen((|above|+|left|+1)/2))` of the coefficient at the
  same position in the neighbouring blocks.
* nz-left bucket: `min(9, (left-1)/5)`.
* `num_nonzero_7x7` context: `((nz_above + nz_left + 1)/2)/5`.
* 7x7 count bucket: `min(7, nz7/7)`.
* Neighbour edge count: the x-edge count of the block above (for x) or the
  y-edge count of the left block (for y).
* DC context: `min(101, |DC_left - DC_above|)`.

The DC prediction is the floor mean of the left and above DC values, the
only one of them that exists, or 0.

The edges use eight threshold models and three plain residual models. Only
ten residual bits ever exist (`e <= 11`), so `res_edge_2` can never be
addressed. It is not built, which leaves 76 model instances instead of 77.

### Element throughput

The binarizer accepts one element per cycle. After an element with `n` bins
it stalls for `ceil(n/4)-1` cycles, because the coder consumes four bins per
cycle. This stall is what throttles the pipeline back to the line buffer
(`blk_ready` drops). The models answer `MODEL_LAT = 3` cycles after the
request. The element's bin order (model ids and bits) travels through a
matching 3-stage delay to `p2s`, which reassembles the coded bins in order.

## Probability models

### One bin

A bin holds two 8-bit counts, `{c0, c1}`, and starts at `{1,1}`.

* Its probability of a 0 is `clamp(256*c0/(c0+c1), 1, 255)`.
* Coding a bit increments that bit's count.
* When either count reaches 255, both are halved (rounding up).

The controller reads the bin, computes the probability and writes the
update back. Back-to-back accesses to the same bin are handled by
forwarding the last write. A bin whose way was just allocated starts from
`{1,1}` regardless of the old SRAM content. So clearing a model at the
start of an image only clears its allocation flags, not its SRAM.

### Direct models

`direct_prob_model` serves the 36 small models (counts, DC, sign,
`res_dc`, `res_edge`). It has one SRAM word per index and a "used in this
image" flag per index.

### Optimized (set-associative) models

`opt_prob_model` serves the four large groups: `exp_7x7`, `exp_edge`,
`res_7x7` and `res_thres`. A model with `MEM_DEPTH` bins and `N` ways per
unit has `M = MEM_DEPTH/N` units. An access goes through these parts:

1. **Enable generator** (`sa_enable_gen`). It compares the index in
   parallel with 0, the M-1 boundary registers and `MAX_INDEX` (`index >=
   boundary`). Unit `i` is enabled by `ge[i] XOR ge[i+1]`, ANDed with the
   request. No chain of comparisons is formed, so the delay does not grow
   with M.
2. **N-way set-associative units** (`nway_sa_unit`), M of them. Each unit
   holds N valid flags and N index records, and compares the index with all
   records at once:
   * on a hit, it returns that way;
   * on a miss with a free way, it takes the lowest free way, records the
     index and marks the way new;
   * on a miss with all ways taken, it raises `ovf` with the index.
3. **Address synthesizer** (`addr_synth`). It merges K units into one
   address `k*N + way` for a controller that manages `K*N` bins.
4. **Probability model controller + SRAM** (`prob_model_ctrl`,
   `prob_sram`), one per K units. This is the read-modify-write of a bin
   described above.
5. **Output synthesizer** (`output_synth`). It forwards the answer of the
   one controller that was enabled. The coded bit travels alongside in a
   bit data register.

The record width can be cut to `REC_W` low index bits. That is exact as long
as every interval is at most `2^REC_W` indexes wide. The top stores full
indexes, so any boundary setting is safe.

An overflowing access returns nothing. Its bit is still coded, at
probability 128, so the stream stays decodable by a decoder that mirrors
the overflow. But the image is flagged.

### Memory budget

The total depths per group come from the evaluation of this scheme with
N = 32. For `exp_7x7`, the per-model utilization rates measured on test
images give the split. For the other groups the total is split evenly. Every
depth is rounded up to a multiple of N (`lepton_pkg::model_depth`).

| group | per model (N = 32) | group total | reference total |
|---|---|---|---|
| `exp_7x7_0..10` | 5504, 5376, 5024, 4672, 4320, 3648, 2624, 1600, 896, 352, 32 | 34048 | 33152 |
| `exp_edge_0..10` | 896 | 9856 | 9536 |
| `res_7x7_0..9` | 416 | 4160 | 3968 |
| `res_thres_0..7` | 1792 | 14336 | 14336 |

The four groups together have 679,184 index values (`res_thres` alone
524,288). They are served by 62,400 physical bins, about 9 %.

The top uses K = M: one controller and one SRAM per model. Any K that
divides M is accepted by `opt_prob_model`.

The default boundaries split each range into equal intervals. That is a
placeholder: images concentrate their indexes, so equal intervals overflow
much earlier than boundaries fitted to statistics. For example, a sparse
block codes all 49 coding positions of `exp_7x7_0` within one small index
region. Real use needs the boundaries to be written through the
configuration port. They keep their value across images (`rst_n` resets
them).

## Arithmetic coder and output format

`arith_enc4` is the VP8-style boolean coder used by Lepton:

* `split = 1 + ((range-1)*prob >> 8)`;
* a 1 takes the upper part of the interval;
* `range` is renormalized to 128..255;
* a byte leaves whenever 8 bits have accumulated.

Four such steps are chained combinationally per cycle.

A carry can ripple into bytes that were already emitted. The coder resolves
carries by holding back the last byte that is not 0xFF and counting the
0xFF bytes that follow it. When the next byte arrives, the held byte (plus
the carry) and the run (0xFF, or 0x00 after a carry) are final. They leave
as one token: `{lead_valid, lead_byte, run_len, run_byte}`. Up to four
tokens leave per cycle (`tok[0..3]`, in that order), with no back-pressure.
The byte stream is the concatenation of all tokens' bytes.

At the end of an image the coder codes 32 zero bits at probability 128
(8 cycles), emits the held byte and run, and pulses `done`.

## Top-level interface (`lepton_encoder`)

| port | meaning |
|---|---|
| `img_start` | one cycle while idle: clears allocations, coder state and status |
| `plane_start`, `plane_width` | start of a colour plane; width in blocks (at most `MAX_W`) |
| `blk_valid/blk_ready`, `blk` | one 8x8 block, natural order, 12-bit signed coefficients |
| `blk_flag_c`, `blk_last` | chroma flag; last block of the image (triggers the flush) |
| `cfg_we`, `cfg_model`, `cfg_sel`, `cfg_val` | write boundary `cfg_sel` (1..M-1) of model `cfg_model` |
| `tok[4]`, `done` | output tokens; end of image |
| `irq` | overflow or range error in this image |
| `ovf_valid`, `ovf_model`, `ovf_index` | the first model overflow of the image (lowest model id if several in one cycle) |
| `range_err` | a coefficient of -2048 or a DC residual beyond ±2047 was clamped |

Parameters:

* `MAX_W` (240, the block width of a 1920-pixel row);
* `N` (32 ways);
* `MEM_DIV` (1). This divides every optimized model's memory by the given
  factor, for quick overflow experiments.

Model ids, widths and the memory table are in `lepton_pkg`.

Software protocol:

1. Write the boundaries.
2. Pulse `img_start`.
3. For each plane, pulse `plane_start` and then stream the plane's blocks.
4. Wait for `done`.
5. If `irq` is set, the stream must not be used. Re-encode the image in
   software (or with new boundaries).

## Simulation

All testbenches are self-checking and print
`TB_RESULT checks=<n> failures=<n>`. With plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/lepton_pkg.sv tb/lepton_ref_pkg.sv \
          tb/tb_lepton_encoder.sv --top-module tb_lepton_encoder
./obj_dir/Vtb_lepton_encoder
```

`tb/lepton_ref_pkg.sv` is an independent behavioural model of the whole
algorithm:

* block binarization with all contexts;
* count-pair bins;
* set-associative way limits with the same interval boundaries;
* a byte-buffer boolean coder that propagates carries backwards.

The unit testbenches compare each module against it or against simple
arithmetic.

* `tb_lepton_encoder` runs 14 random images (three planes each, up to 8
  blocks wide) through the top with `MAX_W=8, MEM_DIV=8`. It compares every
  output byte with the reference, including images with hundreds of
  overflows, since the reference mirrors the overflow behaviour exactly. It
  also checks `done`, `irq`, `ovf_*` and `range_err`. It requires each of
  these to occur at least once:
  * back-pressure stalls;
  * overflow images;
  * range errors (DC and -2048 coefficients);
  * boundary reconfiguration;
  * 0xFF runs;
  * an all-zero image.
* The top has not been simulated at its default parameters. At full size
  the 40 optimized models contain about 1,950 set-associative units with 32
  comparators each, and Verilator's C++ build of that model takes well over
  15 minutes. The largest configuration simulated end to end is the one
  above: `MAX_W=8` and `MEM_DIV=8`, with N = 32 and all 76 models. That is
  one eighth of every optimized model's memory. At the defaults the design
  has only been linted and elaborated. The same testbench runs at the
  defaults by changing its `TB_MAXW`/`TB_DIV` constants and removing the
  parameter list from the instance, given enough build time.
* `tb_arith_enc4` steers the coded bits towards an interval boundary so
  that carries really happen. Random data almost never produces them,
  because about 16 pending one-bits are needed.

## Departures from the source and open points

* **Contexts and bin update rule.** These are this design's own: the prior,
  neighbour counts, DC predictor and context, count-pair bins with halving
  at 255, and probability 128 for an overflowed bin. The model ranges and
  the binarization follow Lepton's model table. A stream from this encoder
  is therefore not bit-compatible with the Lepton software.
* **76 models instead of 77.** `res_edge_2` can never be addressed (see
  above).
* **Unary exponent code.** The printed example for magnitude 0x3FF shows
  eleven 1s. The unary rule it illustrates gives ten 1s and a 0, and the
  rule is what is built.
* **Line buffer neighbours.** The description says the line buffer delivers
  the "upper left" block, while the block diagram shows the block above.
  The block above is delivered, since the prediction needs it.
* **Which models are optimized.** The four groups evaluated for the scheme
  are optimized. This includes `res_7x7`, although its 67 % memory
  reduction is below the 70 % the evaluation names as the point where the
  scheme starts to save area.
* **Default boundaries.** They are equal intervals (see above). The
  per-model controller count K is not specified; K = M is used.
* **Not built.** The JPEG decoder in front of the encoder (blocks enter as
  coefficients) and the quantization-table register. No consumer of the
  quantization table is described.
* **Throughput.** The reference rate of about 318 FHD images/s at 618 MHz
  is 40 cycles per 8x8 block. This design needs `ceil(bins/4)` cycles per
  coded element, so it reaches that only on sparse blocks. It has not been
  measured on real images.
* **Widths.** 1920-pixel rows fit. 4K rows (480 blocks) need `MAX_W=480`.
