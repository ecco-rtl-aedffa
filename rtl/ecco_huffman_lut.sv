// ecco_huffman_lut: expands one Huffman codebook into a 256-entry decode
// table.
//
// Entry w tells which code is a prefix of the 8-bit window w (MSB = next
// stream bit), giving its index and length; hit is low if none is. Since
// codes are at most 8 bits, one table lookup decodes one code. The 4x
// decompressor builds the table once per block, after the pattern retriever
// has selected the codebook, and all 512 sub-decoders share it. The paper
// only says the sub-decoders convert codes to indices; the shared table is
// this design's way of doing so. If several codes match (a book that is not
// prefix-free) the lowest index wins.
//
// Purely combinational.
module ecco_huffman_lut
  import ecco_pkg::*;
(
  input  hf_code_t book [NUM_IDX],
  output hf_lut_t  lut  [256]
);
  for (genvar w = 0; w < 256; w++) begin : g_w
    always_comb begin
      lut[w] = '0;
      for (int c = NUM_IDX - 1; c >= 0; c--) begin
        if (code_match8(8'(w), book[c])) begin
          lut[w].hit = 1'b1;
          lut[w].sym = idx_t'(c);
          lut[w].len = book[c].len;
        end
      end
    end
  end
endmodule
