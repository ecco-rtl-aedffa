// tb_ecco_decompressor_4x: self-checking test of the pipelined 4x
// decompressor.
//
// Blocks are built by the reference compressor of tb_ecco_ref_pkg, with the
// pattern either chosen online or forced to any of the 64 patterns (so ID_KP
// codes of 1..15 bits occur), from groups of varying entropy so that short,
// full and clipped blocks all appear. Also fed: random bit patterns. Every
// output is compared with the bit-serial reference decoder. Blocks are issued
// back to back with random gaps; each result must appear exactly 9 cycles
// after its block, in order.
module tb_ecco_decompressor_4x;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  localparam int LAT = 9;
  localparam int NBLK = 160;

  logic clk, rst_n;
  logic in_valid;
  logic [BLOCK_BITS-1:0] in_block;
  fp16_t    centroids [NUM_KP][NUM_CENT];
  hf_code_t hf_books  [NUM_KP][NUM_HF][NUM_IDX];
  kp_code_t kp_codes  [NUM_KP];
  texp_t    tensor_exp;
  logic     out_valid;
  fp16_t    data_out [GROUP];
  logic [4:0] out_outliers;
  logic     out_clipped, kp_err;

  ecco_decompressor_4x dut (.*);

  meta_t m;
  int checks, failures, cycle;
  int n_clipped, n_full_out, n_long_kp;

  // expected results, indexed by issue order
  logic [15:0] exp_d [NBLK][GROUP];
  int exp_nout [NBLK];
  int exp_cnt  [NBLK];
  int issue_cyc [NBLK];
  int n_issued, n_seen;

  initial begin
    clk = 0;
    forever #5 clk = ~clk;
  end

  initial begin : watchdog
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) cycle <= cycle + 1;

  int n_sampled;
  always @(posedge clk)
    if (rst_n && in_valid) begin
      issue_cyc[n_sampled] = cycle;
      n_sampled++;
    end

  // result checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (n_seen >= n_issued) begin
        failures++;
        $display("unexpected output");
      end else begin
        int bad;
        bad = 0;
        for (int i = 0; i < GROUP; i++)
          if (data_out[i] !== exp_d[n_seen][i]) begin
            if (bad < 3)
              $display("blk %0d val %0d got %h exp %h", n_seen, i, data_out[i], exp_d[n_seen][i]);
            bad++;
          end
        if (bad != 0) failures++;
        checks++;
        if (int'(out_outliers) != exp_nout[n_seen] ||
            out_clipped != (exp_cnt[n_seen] < GROUP) || kp_err) begin
          failures++;
          $display("blk %0d nout %0d/%0d clip %0d cnt %0d", n_seen, out_outliers,
                   exp_nout[n_seen], out_clipped, exp_cnt[n_seen]);
        end
        checks++;
        if (cycle - issue_cyc[n_seen] != LAT) begin
          failures++;
          $display("blk %0d latency %0d", n_seen, cycle - issue_cyc[n_seen]);
        end
      end
      n_seen++;
    end
  end

  initial begin
    logic [15:0] d [GROUP];
    logic [511:0] blk;
    c4_info_t info;
    checks = 0; failures = 0; cycle = 0;
    n_issued = 0; n_seen = 0; n_sampled = 0;
    n_clipped = 0; n_full_out = 0; n_long_kp = 0;
    rst_n = 0;
    in_valid = 0;
    in_block = '0;
    make_meta(m, -2, 1);
    meta_to_rtl(m, centroids, hf_books, kp_codes);
    tensor_exp = texp_t'(m.texp);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < NBLK; b++) begin
      int p, fk, noise;
      real amax;
      p = int'($urandom_range(NUM_KP - 1));
      noise = (b % 5 == 4) ? 60 : int'($urandom_range(8));
      amax = real'($urandom_range(2000) + 10) / 20.0;
      gen_group(m, p, (b % 4 == 3) ? -1 : int'($urandom_range(NUM_HF - 1)), amax, noise, d);
      fk = (b % 3 == 0) ? -1 : p;
      if (b % 11 == 10) begin
        for (int w = 0; w < 16; w++) blk[32*w +: 32] = $urandom;
      end else begin
        blk = ref_compress4x(m, d, fk, info);
        if (m.klen[info.kp] >= 12) n_long_kp++;
      end
      exp_cnt[b] = ref_decompress4x(m, blk, exp_d[b], exp_nout[b]);
      if (exp_cnt[b] < GROUP) n_clipped++;
      if (exp_nout[b] == NUM_OUT) n_full_out++;
      @(negedge clk);
      in_valid = 1;
      in_block = blk;
      n_issued = b + 1;
      @(negedge clk);
      in_valid = 0;
      if ($urandom_range(3) == 0) repeat ($urandom_range(3)) @(negedge clk);
    end
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (n_seen != NBLK) begin
      failures++;
      $display("saw %0d of %0d results", n_seen, NBLK);
    end
    checks++;
    if (n_clipped == 0 || n_clipped == NBLK || n_full_out == 0 || n_long_kp == 0) begin
      failures++;
      $display("coverage: clipped %0d full_outliers %0d long_kp %0d", n_clipped, n_full_out, n_long_kp);
    end
    $display("clipped %0d full_outliers %0d long_kp %0d", n_clipped, n_full_out, n_long_kp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
