// ecco_data_mapper: last step of the 4x decompressor, 128 parallel mappers.
//
// Mapper i turns decoded index i into a value: indices 0..14 select the
// pattern's centroid already multiplied by the group scale factor, index 15
// selects the signed scale factor itself. If a present padded outlier
// carries address i, the outlier replaces the centroid value: its FP8 value
// is brought to FP16 with the per-tensor power-of-two scale (the padded
// outliers were quantized with that same per-tensor factor). The outlier
// address plus the outlier mask act as the selector, as in the paper.
// Positions beyond the decoded count (a clipped block) read as +0; the
// paper does not say what a clipped value becomes, this is this design's
// choice. If two outliers carried the same address, the later one wins.
//
// Purely combinational.
module ecco_data_mapper
  import ecco_pkg::*;
(
  input  idx_t      seq [GROUP],
  input  logic [7:0] seq_cnt,
  input  fp16_t     cent [NUM_IDX],         // scaled centroids, [15] = sf16
  input  outlier_t  outliers [NUM_OUT],
  input  logic [NUM_OUT-1:0] out_mask,
  input  texp_t     tensor_exp,
  output fp16_t     data_out [GROUP]
);
  fp16_t out_val [NUM_OUT];

  always_comb begin
    for (int m = 0; m < NUM_OUT; m++)
      out_val[m] = fp8_to_fp16(outliers[m].val, tensor_exp);
  end

  for (genvar i = 0; i < GROUP; i++) begin : g_map
    always_comb begin
      data_out[i] = (i < int'(seq_cnt)) ? cent[seq[i]] : 16'h0000;
      for (int m = 0; m < NUM_OUT; m++)
        if (out_mask[m] && int'(outliers[m].addr) == i) data_out[i] = out_val[m];
    end
  end
endmodule
