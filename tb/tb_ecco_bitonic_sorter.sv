// tb_ecco_bitonic_sorter: self-checking test of the sequential bitonic
// sorter (sort by magnitude, largest first, ties by lower position).
//
// Random groups, some with many equal magnitudes and +-0, are sorted; the
// reference is a selection sort. Checked: sorted values and positions, the
// signed maximum and minimum of ranks 1..127, busy during the sort, and the
// number of cycles from the start edge to done (29: one per bitonic
// stage, 28, plus the registered done).
module tb_ecco_bitonic_sorter;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  localparam int CYCLES = 29;   // 28 stages, then done is registered

  logic clk, rst_n, start, busy, done;
  fp16_t data_in [GROUP];
  fp16_t sorted_val [GROUP];
  logic [6:0] sorted_idx [GROUP];
  fp16_t group_max, group_min;

  ecco_bitonic_sorter dut (.*);

  int checks, failures, cycle;

  initial begin
    clk = 0;
    forever #5 clk = ~clk;
  end

  initial begin : watchdog
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    logic [15:0] d [GROUP];
    int order [GROUP];
    checks = 0; failures = 0; cycle = 0;
    rst_n = 0; start = 0;
    for (int i = 0; i < GROUP; i++) data_in[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int t0, bad;
      real mn, mx;
      for (int i = 0; i < GROUP; i++) begin
        d[i] = 16'($urandom);
        if (d[i][14:10] == 5'd31) d[i][14] = 1'b0;
        if (t % 4 == 1) d[i] = {1'($urandom), 12'd0, 3'($urandom)};   // many ties, +-0
      end
      ref_sort(d, order);
      mn = h2r(d[order[1]]);
      mx = mn;
      for (int r = 2; r < GROUP; r++) begin
        if (h2r(d[order[r]]) < mn) mn = h2r(d[order[r]]);
        if (h2r(d[order[r]]) > mx) mx = h2r(d[order[r]]);
      end
      @(negedge clk);
      data_in = d;
      start = 1;
      @(posedge clk);
      t0 = cycle;
      @(negedge clk);
      start = 0;
      for (int i = 0; i < GROUP; i++) data_in[i] = 16'($urandom);  // input may change
      checks++;
      if (!busy) begin failures++; $display("t %0d: not busy", t); end
      while (!done) @(posedge clk);
      checks++;
      if (cycle - t0 != CYCLES) begin
        failures++;
        $display("t %0d: %0d cycles", t, cycle - t0);
      end
      bad = 0;
      for (int r = 0; r < GROUP; r++)
        if (int'(sorted_idx[r]) != order[r] || sorted_val[r] !== d[order[r]]) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("t %0d: %0d ranks wrong", t, bad); end
      checks++;
      if (h2r(group_min) != mn || h2r(group_max) != mx) begin
        failures++;
        $display("t %0d: min/max %h %h", t, group_min, group_max);
      end
      repeat ($urandom_range(2)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
