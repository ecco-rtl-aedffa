// tb_ecco_decompressor_2x: self-checking test of the 2x decompressor.
//
// Blocks made by the reference 2x compressor, and random blocks (random
// codes and zero point, a power-of-two scale as the format requires), are
// decompressed; every value, the scale and the zero point must equal the
// reference decoder of tb_ecco_ref_pkg (q * S + Z rounded once to FP16).
// Blocks are issued back to back and each result must appear exactly one
// cycle later.
module tb_ecco_decompressor_2x;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  localparam int NBLK = 400;

  logic clk, rst_n, in_valid, out_valid;
  logic [BLOCK_BITS-1:0] in_block;
  fp16_t data_out [GROUP_2X];
  fp16_t scale, zero_point;

  ecco_decompressor_2x dut (.*);

  int checks, failures, cycle;
  logic [15:0] exp_d [NBLK][GROUP_2X];
  logic [511:0] blks [NBLK];
  int issue_cyc [NBLK];
  int n_in, n_out;

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

  always @(posedge clk) if (rst_n && in_valid) begin issue_cyc[n_in] = cycle; n_in++; end

  always @(posedge clk)
    if (rst_n && out_valid) begin
      int bad;
      bad = 0;
      for (int i = 0; i < GROUP_2X; i++) if (data_out[i] !== exp_d[n_out][i]) bad++;
      checks++;
      if (bad != 0) begin failures++; if (failures < 5) $display("blk %0d: %0d values wrong", n_out, bad); end
      checks++;
      if (cycle - issue_cyc[n_out] != 1) begin failures++; $display("blk %0d latency", n_out); end
      checks++;
      if (scale[15] !== blks[n_out][511] || zero_point[15] !== blks[n_out][383]) begin
        failures++;
        $display("blk %0d: scale/zero %h %h", n_out, scale, zero_point);
      end
      n_out++;
    end

  initial begin
    logic [15:0] d [GROUP_2X];
    checks = 0; failures = 0; cycle = 0; n_in = 0; n_out = 0;
    rst_n = 0; in_valid = 0; in_block = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < NBLK; b++) begin
      real sc;
      sc = real'($urandom_range(10000)) / real'($urandom_range(1000) + 1);
      for (int i = 0; i < GROUP_2X; i++)
        d[i] = r2h((real'(int'($urandom_range(2000)) - 1000) / 1000.0) * sc - sc * real'(b % 3));
      if (b % 5 == 4) begin
        // random codes and zero point, a valid power-of-two scale
        logic [15:0] sh, zh;
        for (int w = 0; w < 16; w++) blks[b][32*w +: 32] = $urandom;
        sh = r2h(pow2(int'($urandom_range(35)) - 24));
        zh = 16'($urandom) & 16'hFBFF;
        for (int i = 0; i < 16; i++) begin
          blks[b][511 - 8 * i] = sh[15 - i];
          blks[b][511 - 8 * (i + 16)] = zh[15 - i];
        end
      end
      else blks[b] = ref_compress2x(d);
      ref_decompress2x(blks[b], exp_d[b]);
      @(negedge clk);
      in_valid = 1;
      in_block = blks[b];
      if (b % 7 == 6) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (n_out != NBLK) begin failures++; $display("%0d of %0d results", n_out, NBLK); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
