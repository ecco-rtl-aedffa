// tb_ecco_pattern_selector: self-checking test of the online k-means
// pattern choice.
//
// For random group minima/maxima and scale factors, the reference scales
// each pattern's minimum and maximum to FP16 and picks the pattern with the
// smallest (gmax - max)^2 + (gmin - min)^2, computed in `real` arithmetic,
// lower index on ties. Cases where two patterns are within rounding of each
// other are not counted (the reference's squares are not exact). The
// selector is combinational: results are checked within the same cycle.
module tb_ecco_pattern_selector;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  fp16_t kp_min [NUM_SEL];
  fp16_t kp_max [NUM_SEL];
  fp16_t sf_mag, group_min, group_max;
  logic [$clog2(NUM_SEL)-1:0] sel_id;
  logic [87:0] sel_err;

  ecco_pattern_selector dut (.*);

  meta_t m;
  int checks, failures;

  initial begin : watchdog
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int n_nonzero;
    checks = 0; failures = 0; n_nonzero = 0;
    make_meta(m, 0, 3);
    for (int t = 0; t < 3000; t++) begin
      real sf, gmn, gmx, e1, e2;
      int best, second;
      int base;
      base = int'($urandom_range(NUM_KP - NUM_SEL));
      for (int p = 0; p < NUM_SEL; p++) begin
        kp_min[p] = m.cent[base + p][0];
        kp_max[p] = m.cent[base + p][NUM_CENT - 1];
      end
      sf = real'($urandom_range(30000) + 1) / 100.0;
      sf_mag = r2h(sf);
      gmn = -real'($urandom_range(1000)) / 1000.0 * h2r(sf_mag);
      gmx = real'($urandom_range(1000)) / 1000.0 * h2r(sf_mag);
      group_min = r2h(gmn);
      group_max = r2h(gmx);
      best = 0; second = -1;
      e1 = 0.0; e2 = 0.0;
      for (int p = 0; p < NUM_SEL; p++) begin
        real a, b, e;
        a = h2r(group_max) - h2r(hmul(kp_max[p], sf_mag));
        b = h2r(group_min) - h2r(hmul(kp_min[p], sf_mag));
        e = a * a + b * b;
        if (p == 0 || e < e1) begin e2 = e1; second = best; e1 = e; best = p; end
        else if (second < 0 || e < e2) begin e2 = e; second = p; end
      end
      #1;
      if (e2 - e1 > 1e-9 * (e1 + 1e-30)) begin
        checks++;
        if (int'(sel_id) != best) begin
          failures++;
          if (failures < 5) $display("t %0d: got %0d exp %0d (err %e vs %e)", t, sel_id, best, e1, e2);
        end
      end
      if (sel_err != 0) n_nonzero++;
    end
    checks++;
    if (n_nonzero == 0) begin
      failures++;
      $display("error output never nonzero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
