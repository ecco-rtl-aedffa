// ecco_pattern_selector: online choice of the shared k-means pattern.
//
// Following the paper, the compressor does not try every pattern on every
// value. Because the patterns are strongly skewed, it compares only the
// group's minimum and maximum (without the absolute maximum) with each
// candidate pattern's minimum and maximum: the fitness of pattern p is
// (gmax - max_p)^2 + (gmin - min_p)^2, and the smallest wins (ties go to the
// lower pattern number). The paper searches 16 of the 64 patterns.
//
// This design's choices: the patterns are stored normalised to (-1,1), so
// their min/max are first scaled by the group's |scale factor| (one FP16
// multiply each) instead of dividing the group's min/max; the argmin is the
// same up to rounding. Differences and squares are exact on the fixed-point
// image of FP16. Sorted centroids mean min_p = centroid 0, max_p = centroid
// NUM_CENT-1.
//
// Purely combinational: sel_id is valid in the same cycle as the inputs.
module ecco_pattern_selector
  import ecco_pkg::*;
#(
  parameter int unsigned N_SEL = NUM_SEL
) (
  input  fp16_t kp_min [N_SEL],   // normalised pattern minimum
  input  fp16_t kp_max [N_SEL],   // normalised pattern maximum
  input  fp16_t sf_mag,           // |group scale factor| in FP16
  input  fp16_t group_min,
  input  fp16_t group_max,
  output logic [$clog2(N_SEL)-1:0] sel_id,
  output logic [87:0] sel_err
);
  logic [87:0] err [N_SEL];

  always_comb begin
    fix_t gmin, gmax;
    gmin = fp16_to_fix(group_min);
    gmax = fp16_to_fix(group_max);
    for (int p = 0; p < N_SEL; p++) begin
      logic signed [42:0] dmin, dmax;
      logic [42:0] amin, amax;
      dmin = 43'(gmin) - 43'(fp16_to_fix(fp16_mul(kp_min[p], sf_mag)));
      dmax = 43'(gmax) - 43'(fp16_to_fix(fp16_mul(kp_max[p], sf_mag)));
      amin = dmin[42] ? 43'(-dmin) : 43'(dmin);
      amax = dmax[42] ? 43'(-dmax) : 43'(dmax);
      err[p] = 88'(amin) * 88'(amin) + 88'(amax) * 88'(amax);
    end
  end

  always_comb begin
    sel_id  = '0;
    sel_err = err[0];
    for (int p = 1; p < N_SEL; p++) begin
      if (err[p] < sel_err) begin
        sel_err = err[p];
        sel_id  = ($clog2(N_SEL))'(p);
      end
    end
  end

endmodule
