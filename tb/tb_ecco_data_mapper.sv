// tb_ecco_data_mapper: self-checking test of the 128 parallel data mappers.
//
// Random index sequences, decoded counts (full and clipped), scaled
// centroids, outliers and outlier masks. Expected value of position i: the
// last present outlier addressed to i (FP8 times 2^TEXP), else the centroid
// of its index if i < count, else +0. Combinational: checked within the same
// cycle.
module tb_ecco_data_mapper;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  idx_t      seq [GROUP];
  logic [7:0] seq_cnt;
  fp16_t     cent [NUM_IDX];
  outlier_t  outliers [NUM_OUT];
  logic [NUM_OUT-1:0] out_mask;
  texp_t     tensor_exp;
  fp16_t     data_out [GROUP];

  ecco_data_mapper dut (.*);

  int checks, failures;

  initial begin : watchdog
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int n_over;
    checks = 0; failures = 0; n_over = 0;
    for (int t = 0; t < 1000; t++) begin
      int bad;
      tensor_exp = texp_t'(int'($urandom_range(12)) - 6);
      for (int i = 0; i < GROUP; i++) seq[i] = idx_t'($urandom);
      seq_cnt = (t % 3 == 0) ? 8'($urandom_range(GROUP)) : 8'(GROUP);
      for (int c = 0; c < NUM_IDX; c++) cent[c] = 16'($urandom) & 16'hFBFF;
      for (int o = 0; o < NUM_OUT; o++) begin
        outliers[o].addr = 7'($urandom);
        outliers[o].val  = 8'($urandom);
      end
      if (t % 5 == 0) outliers[3].addr = outliers[9].addr;   // same address twice
      out_mask = 16'($urandom);
      #1;
      bad = 0;
      for (int i = 0; i < GROUP; i++) begin
        logic [15:0] e;
        e = (i < int'(seq_cnt)) ? cent[seq[i]] : 16'h0000;
        for (int o = 0; o < NUM_OUT; o++)
          if (out_mask[o] && int'(outliers[o].addr) == i) e = f82h(outliers[o].val, int'(tensor_exp));
        if (data_out[i] !== e) begin
          if (bad == 0 && failures < 5) $display("t %0d i %0d: got %h exp %h", t, i, data_out[i], e);
          bad++;
        end
      end
      checks++;
      if (bad != 0) failures++;
      if (out_mask != 0) n_over++;
    end
    checks++;
    if (n_over == 0) begin failures++; $display("no outliers applied"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
