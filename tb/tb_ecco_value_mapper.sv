// tb_ecco_value_mapper: self-checking test of the nearest-centroid search.
//
// Random FP16 values against random sorted centroid sets (including ties
// and values equal to a centroid). The reference finds the nearest centroid
// in `real` arithmetic, lower index winning ties. The mapper is
// combinational: the result is checked one time step after the inputs
// change, within the same clock cycle.
module tb_ecco_value_mapper;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  fix_t data;
  fix_t cent [NUM_IDX];
  idx_t idx;

  ecco_value_mapper dut (.*);

  int checks, failures;

  initial begin : watchdog
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [15:0] ch [NUM_IDX];
    logic [15:0] dh;
    int n_tie;
    checks = 0; failures = 0; n_tie = 0;
    for (int t = 0; t < 3000; t++) begin
      real sc, bd;
      int e;
      sc = real'($urandom_range(1000) + 1) / 10.0;
      for (int c = 0; c < NUM_IDX; c++)
        ch[c] = r2h((real'(int'($urandom_range(2000)) - 1000) / 1000.0) * sc);
      if (t % 7 == 0) ch[3] = ch[2];                       // duplicated centroid
      dh = (t % 5 == 0) ? ch[$urandom_range(NUM_IDX - 1)]
                        : r2h((real'(int'($urandom_range(2400)) - 1200) / 1000.0) * sc);
      if (t % 11 == 0) dh = r2h((h2r(ch[4]) + h2r(ch[5])) / 2.0);   // midpoint
      for (int c = 0; c < NUM_IDX; c++) cent[c] = fp16_to_fix(ch[c]);
      data = fp16_to_fix(dh);
      e = 0;
      bd = -1.0;
      for (int c = 0; c < NUM_IDX; c++) begin
        real dd;
        dd = rabs(h2r(dh) - h2r(ch[c]));
        if (bd < 0.0 || dd < bd) begin bd = dd; e = c; end
        else if (dd == bd) n_tie++;
      end
      #1;
      checks++;
      if (int'(idx) != e) begin
        failures++;
        if (failures < 5) $display("t %0d: data %h got %0d exp %0d", t, dh, idx, e);
      end
    end
    checks++;
    if (n_tie == 0) begin
      failures++;
      $display("no tie exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
