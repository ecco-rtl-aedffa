// ecco_huffman_segment_decoder: one of the 64 parallel Huffman decoders.
//
// The Huffman-coded data of a 4x block is cut into 8-bit segments. Since a
// code is 2..8 bits long, between one and four codes start inside a segment,
// and the last of them ends at most 7 bits into the next segment. The
// decoder therefore reads a 15-bit chunk (its 8 bits plus a 7-bit overlap).
// It does not know where in its segment the first code starts, so, as in the
// paper, it runs 8 sub-decoders, one per possible start offset 0..7. Each
// sub-decoder converts codes to indices until the next code would start
// beyond the segment, and reports the indices (D_Out), how many there are,
// and the offset at which decoding continues in the next segment (EOP).
// Choosing the right sub-decoder result is left to the concatenator.
//
// This design adds an end limit: a code is accepted only if it ends within
// the first `limit` bits of the data stream (bits past the block end are
// zero-filled). When a code is rejected, or no code of the book matches,
// the sub-decoder sets `term`: the data ends here and no later segment may
// add indices. Codes are converted to indices through a 256-entry table,
// indexed by the next 8 stream bits, which the decompressor builds once per
// block from the selected codebook (ecco_huffman_lut).
//
// Purely combinational.
module ecco_huffman_segment_decoder
  import ecco_pkg::*;
(
  input  logic [SEG_BITS+HF_MAXLEN-2:0] chunk,   // [14] is the first bit
  input  hf_lut_t   lut [256],
  input  logic [9:0] seg_base,                   // stream position of bit [14]
  input  logic [9:0] limit,                      // usable stream bits
  output logic [2:0] cnt  [SEG_BITS],            // indices decoded, 0..4
  output idx_t       syms [SEG_BITS][SEG_SYMS],  // in stream order
  output logic [2:0] eop  [SEG_BITS],            // next start offset
  output logic       term [SEG_BITS]             // decoding stopped here
);
  localparam int CW = SEG_BITS + HF_MAXLEN - 1;  // 15

  always_comb begin
    for (int k = 0; k < SEG_BITS; k++) begin
      int pos;
      logic stop;
      cnt[k]  = '0;
      eop[k]  = '0;
      term[k] = 1'b0;
      for (int n = 0; n < SEG_SYMS; n++) syms[k][n] = '0;
      pos  = k;
      stop = 1'b0;
      for (int n = 0; n < SEG_SYMS; n++) begin
        if (!stop && pos < SEG_BITS) begin
          hf_lut_t t;
          int  len;
          t   = lut[8'(chunk >> (CW - 8 - pos))];
          len = int'(t.len);
          if (t.hit && (int'(seg_base) + pos + len <= int'(limit))) begin
            syms[k][n] = t.sym;
            cnt[k]     = cnt[k] + 3'd1;
            pos        = pos + len;
          end else begin
            stop    = 1'b1;
            term[k] = 1'b1;
          end
        end
      end
      eop[k] = 3'(pos - SEG_BITS);
    end
  end
endmodule
