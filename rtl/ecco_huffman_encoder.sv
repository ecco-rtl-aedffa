// ecco_huffman_encoder: Huffman-codes a slice of quantization indices with
// one codebook.
//
// One of the compressor's four parallel encoders (one per Huffman codebook
// of the selected pattern), as drawn in the paper's compressor figure: each
// index is looked up in the codebook (H_Code), the lengths are summed by an
// adder (total length) and the codes are shifted together into one sequence.
// SLICE indices are handled per call; the compressor feeds the group in
// GROUP/SLICE passes and appends the results.
//
// Output bits are left-aligned and MSB first: index 0's code starts at
// bits[SLICE*8-1]. Unused low bits are zero. Purely combinational.
module ecco_huffman_encoder
  import ecco_pkg::*;
#(
  parameter int unsigned SLICE = ENC_SLICE
) (
  input  idx_t     idx  [SLICE],
  input  hf_code_t book [NUM_IDX],
  output logic [SLICE*HF_MAXLEN-1:0] bits,
  output logic [$clog2(SLICE*HF_MAXLEN+1)-1:0] len
);
  localparam int W = SLICE * HF_MAXLEN;

  always_comb begin
    int pos;
    hf_code_t c;
    bits = '0;
    pos  = 0;
    for (int i = 0; i < SLICE; i++) begin
      c = book[idx[i]];
      bits = bits | ((W'(c.code) & ((W'(1) << c.len) - W'(1))) << (W - pos - int'(c.len)));
      pos  = pos + int'(c.len);
    end
    len = ($clog2(W+1))'(pos);
  end
endmodule
