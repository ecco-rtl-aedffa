// ecco_value_mapper: nearest-centroid quantizer for one value.
//
// As drawn in the paper's compressor figure, the value is subtracted from
// each of the 16 centroids of the chosen pattern (KC#0..KC#15: the 15
// k-means centroids already multiplied by the group scale factor, and the
// signed scale factor itself as index 15) and a min finder returns the index
// with the smallest absolute difference. Ties go to the lower index (this
// design's choice). Differences are exact on the fixed-point image of FP16.
//
// Purely combinational.
module ecco_value_mapper
  import ecco_pkg::*;
(
  input  fix_t data,
  input  fix_t cent [NUM_IDX],
  output idx_t idx
);
  always_comb begin
    logic [42:0] best, d;
    logic signed [42:0] s;
    idx  = '0;
    best = '1;
    for (int c = 0; c < NUM_IDX; c++) begin
      s = 43'(data) - 43'(cent[c]);
      d = s[42] ? 43'(-s) : 43'(s);
      if (d < best) begin
        best = d;
        idx  = idx_t'(c);
      end
    end
  end
endmodule
