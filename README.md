# Ecco: an entropy-aware compression engine for LLM data beside a GPU L2

LLM decoding is limited by memory bandwidth and capacity. The Ecco engine
keeps weights, KV cache and activations compressed in HBM and expands them
on the way from the L2 cache to the SMs. Every compressed line is still a
fixed 64-byte block, so addresses stay simple and the L2 needs no
variable-size bookkeeping. Two ratios are supported:

* **4x** (weights, KV cache): a group of 128 FP16 values (256 bytes) becomes
  one 64-byte block. The values are quantized to one of 64 *shared k-means
  patterns* of 15 centroids, scaled by the group's absolute maximum. The
  indices are Huffman-coded with one of 4 codebooks per pattern. If the code
  is too long it is cut off at the block end (*clipping*). If it is short,
  the spare bits are filled with the largest remaining values as explicit
  outliers (*padding*).
* **2x** (activations): 64 FP16 values become 64 bytes of 7-bit integers.
  The scale and the zero point hide in the eighth bit of the first 32 bytes.

The hard part is the 4x decompressor. Huffman decoding is serial by nature,
yet it must run at one block per cycle per lane. It does this with 64
speculative segment decoders and a merge tree. Most of this document
explains that path and the bit format it reads.

This RTL implements the engine's digital part: metadata buffer,
compressors, decompressors and a top level with 20 parallel lanes. The L2,
HBM, SMs, page tables and the offline calibration that produces the
patterns and codebooks lie outside it.

## The 4x block, bit by bit

A block is a stream of 512 bits written most significant bit first: stream
bit 0 is `block[511]`.

| field | width | content |
|---|---|---|
| ID_KP | 1..15 bits | Huffman code of the pattern number (0..63) |
| ID_HF | 2 bits | which of the pattern's 4 codebooks codes the data |
| SF | 8 bits | group scale factor, FP8 E4M3, signed absolute maximum |
| data | variable | 128 Huffman codes of 2..8 bits, one per value in order |
| outliers | 15 bits each | `{7-bit position, FP8 value}`, as many as fit, at most 16 |
| (rest) | | zero |

Header fields and codes are stored right-aligned in the tables, each with a
4-bit length, and emitted MSB first. Index 15 of every codebook means "the
scale factor itself". The value holding the group's absolute maximum is
always coded this way, so it comes back exactly.

Clipping and padding follow from one rule: the stream is written as if
unbounded, then cut at bit 512.

* If the data codes run past the end, the block is *clipped*. Values whose
  codes were cut decode as +0. No outlier fits in a clipped block.
* If the data ends early, outlier fields follow: the 2nd, 3rd, ... largest
  magnitudes, at most 16. Only fields that end within 512 bits are written.
  The decoder recovers their number from where the data ends.

## Number formats

FP16 is IEEE binary16. FP8 is E4M3: bias 7, largest value 448, no
infinities. The per-tensor FP16-to-FP8 scale is a power of two, stored as a
signed exponent `TEXP` (fp8 = fp16 x 2^-TEXP), so converting back is an
exponent addition. Every conversion rounds to nearest even and saturates.
Comparisons and sums that must be exact (pattern error, nearest centroid,
2x dequantization) use a 42-bit fixed-point image with 24 fraction bits.
It holds every finite FP16 value exactly. The products of pattern
centroids and the scale factor are FP16 multiplies with one rounding.

## Compressing a group (`ecco_compressor`)

One unit takes one group at a time through a valid/ready handshake:

1. **Bitonic sorter** (`ecco_bitonic_sorter`). It is a 128-input bitonic
   network. One of its 28 compare-exchange stages runs per clock. It sorts
   by magnitude, equal magnitudes lower position first, and carries each
   value's position. Rank 0 is the absolute maximum. Ranks 1..16 are the
   outlier candidates. It also returns the signed min and max of ranks
   1..127.
2. **Pattern selection** (`ecco_pattern_selector`). The candidates are
   patterns 0..15. Each pattern's smallest and largest centroids are scaled
   by |SF|. The error (gmax - max)^2 + (gmin - min)^2 is computed exactly
   and the smallest wins. This replaces a full MSE search over all values
   with two comparisons per pattern.
3. **Scaling**. The 15 centroids are multiplied by |SF|. Index 15 holds the
   signed SF.
4. **Encoding** (`ecco_value_mapper`, `ecco_huffman_encoder`). Sixteen
   values per clock are mapped to their nearest centroid and encoded with
   all 4 codebooks at once. After 8 clocks the shortest of the 4 sequences
   is kept.
5. **Assembly**. Header, chosen sequence and padded outliers are placed in
   the 512-bit block, which is then clipped.

The done signal comes 12 cycles after the start of steps 2..5. A whole 4x
request takes 42 cycles from acceptance to `out_valid`.

A 2x request uses the same sorter for its minimum and maximum. Its 64
values are fed twice to fill the 128 inputs. Then `ecco_compressor_2x`
quantizes in one cycle, so a 2x request takes 31 cycles.

## Decompressing a 4x block at one block per cycle (`ecco_decompressor_4x`)

The pipeline has 9 register stages.

**Stage 1, header** (`ecco_pattern_retriever`, `ecco_huffman_lut`). ID_KP
is found by matching the first 15 bits against all 64 codes at once. This
selects the pattern and, with ID_HF, the codebook. The SF goes back to FP16
by adding TEXP to its exponent. The stream is shifted left so that the
data starts at bit 0. The codebook is turned into a 256-entry table: for
each possible next byte, the code it begins with and its length.

**Stage 2, 64 speculative decoders** (`ecco_huffman_segment_decoder`). The
data area is split into 64 segments of 8 bits. Codes are 2..8 bits long,
so one to four codes start in each segment, and the last may reach 7 bits
into the next. Each decoder therefore reads 15 bits. It cannot know where
its first code starts, because that depends on every code before it. So it
decodes from all 8 possible offsets at once. For each offset it reports:

* the indices of the codes that start inside the segment (D_Out);
* their count;
* the offset in the next segment where decoding continues (EOP);
* a `term` flag, set when no code matched or a code would pass the end of
  the block. This marks the end of the data.

In the same stage the 15 centroids are scaled by |SF|.

**Stages 3-8, merge tree** (`ecco_data_concatenator`). Six levels merge
neighbours pairwise: 64 -> 32 -> ... -> 1. A merged node again has 8
candidates, one per start offset of its left half. For each, the left
half's EOP picks which of the right half's 8 candidates follows. A
candidate that ended with `term` takes nothing from its right neighbour.
Lists are capped at 128 indices. After six levels, the offset-0 candidate
of the single node is the decoded sequence.

A combinational tail then finds where the data ends: the sum of the 128
code lengths. From there it cuts the outlier fields and builds the mask of
those that fit.

**Stage 9, mapping** (`ecco_data_mapper`). There are 128 parallel mappers.
Each picks the scaled centroid of its index, or the outlier value if a
present outlier names this position. Outliers are FP8 times 2^TEXP.
Positions past a clipped end read +0.

## The 2x format (`ecco_compressor_2x`, `ecco_decompressor_2x`)

Byte b is `{meta_b, q_b[6:0]}`, where q is a signed 7-bit integer. The
meta bits of bytes 0..15 hold the FP16 scale S, MSB first; those of bytes
16..31 hold the FP16 zero point Z. The zero point is Z = FP16((max+min)/2).
S is the smallest power of two with 126*S >= max - min, so quantizing is a
shift with rounding, q = round((x - Z)/S), saturated to -64..63.
Decompressing computes q*S + Z exactly and rounds once, in one cycle.

## Subsystem top (`ecco_top`)

The top holds one metadata buffer and `NUM_UNITS` = 20 lanes. Each lane
has a compression unit and a read lane. Twenty lanes of 256 bytes per
cycle match an L2 that delivers 5120 bytes per cycle.

A read carries the page's two PTE bits, *compressed* and *4x*, and is
routed to one of three paths:

* the 4x decompressor;
* the 2x decompressor;
* a bypass for uncompressed lines (32 raw FP16 values).

2x and raw reads are delayed so every path answers after exactly 9
cycles. Each lane therefore returns one result per cycle in request order.
An assertion checks that only one path answers in any cycle.

Writes use valid/ready per unit and return one block on `hbm_valid`.
Writes to uncompressed pages bypass the engine altogether.

**Metadata port.** Write `wr_data` at `wr_addr` with table select `wr_sel`:

| wr_sel | table | address | data |
|---|---|---|---|
| 0 | centroid | `{pattern[5:0], c[3:0]}`, c < 15 | FP16 |
| 1 | codebook entry | `{pattern[5:0], book[1:0], index[3:0]}` | `{code[7:0], len[3:0]}` |
| 2 | ID_KP code | `pattern[5:0]` | `{code[14:0], len[3:0]}` |
| 3 | tensor exponent | - | signed `TEXP[5:0]` |

Load the metadata before any compressed traffic for that tensor.

## Where this design departs from the paper, or fills gaps

* **Latencies.** The paper reports a 28-cycle pipelined decompressor and a
  62-cycle compressor. Here the decompressor has 9 register stages and the
  compressor takes 42 cycles (31 for 2x). No gate-level timing was done, so
  a real implementation may need more stages.
* **Own choices where the paper is silent.** These include:
  * the field order inside the block and MSB-first packing;
  * E4M3 as the FP8 format;
  * the power-of-two 2x scale and the midpoint zero point;
  * the placement of the 2x metadata bits;
  * tie rules (lower position, lower index, lower pattern);
  * the end-of-data flag in the parallel decoder;
  * +0 for clipped values;
  * the 15-bit limit on ID_KP codes;
  * the metadata port.
* **Which 16 patterns are searched online.** The paper cuts the search
  from 64 patterns to 16 but does not say which. Here it is the first 16;
  offline-compressed blocks may use any of the 64.
* **Outlier scaling.** Outliers are decoded with the per-tensor scale, as
  the compression description says. One sentence on the decompressor
  speaks of multiplying them by "the scale factor"; that reading was not
  followed.
* **Not part of this RTL.** The L2 cache and its controller, HBM, SMs, page
  table and TLB bits, and the offline k-means and Huffman calibration. The
  paper's 4x decompressor figure was not available. That path follows the
  text only.

## Verification

Each block has a self-checking testbench in `tb/`. They all compare against
`tb_ecco_ref_pkg`, a reference model written independently of the RTL:

* number formats computed in `real` arithmetic;
* a selection sort;
* a bit-serial Huffman encoder and decoder;
* a generator of test metadata: skewed patterns, canonical codebooks from
  four code-length profiles, and ID_KP codes of 1..15 bits.

Test groups are drawn with the probabilities a codebook was built for, so
short, full and clipped blocks all occur. The testbenches also check cycle
counts: sorter 29, 4x datapath 12, unit 42/31, concatenator 6, 4x
decompressor 9 back to back, 2x 1, read lanes 9.

`tb_ecco_top` runs the top end to end with 2 lanes (`NUM_UNITS = 2`). It
loads the metadata, compresses 4x and 2x groups on all lanes, then reads
them back with uncompressed lines in between. It counts every mechanism:
stall, mode switch, clipping, padding, bypass, both decompressors. A
mechanism that never occurs is a failure.

The lanes are identical copies. The full 20-lane top passes lint and
elaboration, but building its simulation took more than 18 minutes, so 2
lanes is the largest size simulated here.

Run a testbench with plain Verilator, for example:

```
verilator --binary --timing -Irtl -Itb rtl/ecco_pkg.sv tb/tb_ecco_ref_pkg.sv \
  -y rtl -y tb --top-module tb_ecco_decompressor_4x tb/tb_ecco_decompressor_4x.sv
./obj_dir/Vtb_ecco_decompressor_4x
```

Each prints `TB_RESULT checks=N failures=M`.

## Files

`rtl/ecco_pkg.sv` holds the sizes, types and number-format functions.

| block | file |
|---|---|
| metadata buffer | `ecco_meta_buffer.sv` |
| compression | `ecco_bitonic_sorter.sv`, `ecco_pattern_selector.sv`, `ecco_value_mapper.sv`, `ecco_huffman_encoder.sv`, `ecco_compressor_4x.sv`, `ecco_compressor_2x.sv`, `ecco_compressor.sv` |
| 4x decompression | `ecco_pattern_retriever.sv`, `ecco_huffman_lut.sv`, `ecco_huffman_segment_decoder.sv`, `ecco_data_concatenator.sv`, `ecco_data_mapper.sv`, `ecco_decompressor_4x.sv` |
| 2x decompression | `ecco_decompressor_2x.sv` |
| top level | `ecco_top.sv` |

Every module's opening comment gives its interface and timing.
