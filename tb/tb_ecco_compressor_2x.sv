// tb_ecco_compressor_2x: self-checking test of the 2x (7-bit uniform
// quantization) compressor.
//
// Random groups of 64 values of varied range (including constant groups and
// full-range FP16) are compressed; block, scale and zero point must equal
// the reference compressor of tb_ecco_ref_pkg, and done must follow start
// by exactly one cycle.
module tb_ecco_compressor_2x;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  logic clk, rst_n, start, done;
  fp16_t data [GROUP_2X];
  fp16_t group_min, group_max, scale, zero_point;
  logic [BLOCK_BITS-1:0] block;

  ecco_compressor_2x dut (.*);

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
    logic [15:0] d [GROUP_2X];
    logic [511:0] eb;
    checks = 0; failures = 0; cycle = 0;
    rst_n = 0; start = 0;
    for (int i = 0; i < GROUP_2X; i++) data[i] = '0;
    group_min = '0; group_max = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      real mn, mx, sc;
      int t0;
      sc = real'($urandom_range(10000)) / real'($urandom_range(1000) + 1);
      for (int i = 0; i < GROUP_2X; i++) begin
        d[i] = r2h((real'(int'($urandom_range(2000)) - 1000) / 1000.0) * sc + sc * real'(t % 3));
        if (t % 10 == 9) d[i] = 16'($urandom) & 16'hFBFF;
        if (t % 10 == 8) d[i] = 16'h3C00;                         // constant group
      end
      mn = h2r(d[0]); mx = mn;
      for (int i = 1; i < GROUP_2X; i++) begin
        if (h2r(d[i]) < mn) mn = h2r(d[i]);
        if (h2r(d[i]) > mx) mx = h2r(d[i]);
      end
      eb = ref_compress2x(d);
      @(negedge clk);
      data = d;
      group_min = r2h(mn);
      group_max = r2h(mx);
      start = 1;
      @(posedge clk);
      t0 = cycle;
      @(negedge clk);
      start = 0;
      while (!done) @(posedge clk);
      checks++;
      if (cycle - t0 != 1) begin failures++; $display("t %0d: %0d cycles", t, cycle - t0); end
      checks++;
      if (block !== eb || scale !== {eb[511], eb[503], eb[495], eb[487], eb[479], eb[471], eb[463], eb[455],
                                      eb[447], eb[439], eb[431], eb[423], eb[415], eb[407], eb[399], eb[391]}) begin
        failures++;
        if (failures < 5) $display("t %0d: block\n got %h\n exp %h", t, block, eb);
      end
      checks++;
      if (zero_point !== r2h((mx + mn) / 2.0)) begin
        failures++;
        $display("t %0d: zero point %h", t, zero_point);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
