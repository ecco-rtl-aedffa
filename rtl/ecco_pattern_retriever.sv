// ecco_pattern_retriever: first step of the 4x decompressor.
//
// Reads the block header: the Huffman-coded pattern choice ID_KP (1..15
// bits), the codebook choice ID_HF (2 bits) and the FP8 group scale factor
// (8 bits). ID_KP is decoded by comparing the head of the block with the
// code of every pattern at once (the codes are prefix-free, so exactly one
// matches in a well-formed block). The pattern's centroids and the codebook
// {ID_KP, ID_HF} are then selected, and the scale factor is brought back to
// FP16 by adding the per-tensor exponent, as the paper describes.
// The parallel code match and the left-aligning of the remaining stream (so
// that the Huffman data starts at bit 511 of data_aligned) are this design's
// way of providing the "decode start position".
//
// Purely combinational.
module ecco_pattern_retriever
  import ecco_pkg::*;
(
  input  logic [BLOCK_BITS-1:0] block,
  input  fp16_t     centroids [NUM_KP][NUM_CENT],
  input  hf_code_t  hf_books  [NUM_KP][NUM_HF][NUM_IDX],
  input  kp_code_t  kp_codes  [NUM_KP],
  input  texp_t     tensor_exp,
  output logic      kp_found,
  output kp_id_t    id_kp,
  output hf_id_t    id_hf,
  output fp8_t      sf8,
  output fp16_t     sf16,
  output logic [4:0] hdr_len,
  output logic [9:0] data_limit,              // stream bits after the header
  output logic [BLOCK_BITS-1:0] data_aligned,
  output fp16_t     pattern [NUM_CENT],
  output hf_code_t  book [NUM_IDX]
);
  always_comb begin
    logic [14:0] head, mask;
    logic [3:0] kl;
    head     = block[BLOCK_BITS-1 -: KP_MAXLEN];
    kp_found = 1'b0;
    id_kp    = '0;
    kl       = 4'd1;
    mask     = '0;
    for (int k = 0; k < NUM_KP; k++) begin
      if (kp_codes[k].len != 4'd0) begin
        mask = 15'h7FFF << (4'd15 - kp_codes[k].len);
        if (!kp_found &&
            ((head & mask) == ((kp_codes[k].code << (4'd15 - kp_codes[k].len)) & mask))) begin
          kp_found = 1'b1;
          id_kp    = kp_id_t'(k);
          kl       = kp_codes[k].len;
        end
      end
    end
    hdr_len = 5'(kl) + 5'd10;
    id_hf   = hf_id_t'(block >> (BLOCK_BITS - int'(kl) - 2));
    sf8     = fp8_t'(block >> (BLOCK_BITS - int'(hdr_len)));
    sf16    = fp8_to_fp16(sf8, tensor_exp);
    data_limit   = 10'(BLOCK_BITS) - 10'(hdr_len);
    data_aligned = block << hdr_len;
    pattern = centroids[id_kp];
    book    = hf_books[id_kp][id_hf];
  end
endmodule
