// tb_ecco_compressor: self-checking test of the compression unit (shared
// sorter, 4x and 2x paths).
//
// Random groups, 4x and 2x requests in random order, are offered with
// in_valid held until in_ready; each output block is compared bit for bit
// with the reference compressors of tb_ecco_ref_pkg, and the outlier count
// and clip flag with the reference's. The test also checks that in_ready is
// low while a request is in flight (the stall), and the cycle count from the
// accepting edge to out_valid: C4 cycles for 4x, C2 for 2x.
module tb_ecco_compressor;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  localparam int C4 = 42;
  localparam int C2 = 31;
  localparam int NREQ = 60;

  logic clk, rst_n;
  logic in_valid, in_ready, in_ratio4x;
  fp16_t in_data [GROUP];
  fp16_t    centroids [NUM_KP][NUM_CENT];
  hf_code_t hf_books  [NUM_KP][NUM_HF][NUM_IDX];
  kp_code_t kp_codes  [NUM_KP];
  texp_t    tensor_exp;
  logic out_valid, out_ratio4x, out_clipped;
  logic [BLOCK_BITS-1:0] out_block;
  logic [4:0] out_outliers;

  ecco_compressor dut (.*);

  meta_t m;
  int checks, failures, cycle;
  int n4, n2, n_clip, n_stall;

  initial begin
    clk = 0;
    forever #5 clk = ~clk;
  end

  initial begin : watchdog
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    logic [15:0] d [GROUP];
    logic [15:0] d2 [GROUP_2X];
    logic [511:0] exp_blk;
    c4_info_t info;
    int t0, lat;
    checks = 0; failures = 0; cycle = 0;
    n4 = 0; n2 = 0; n_clip = 0; n_stall = 0;
    rst_n = 0;
    in_valid = 0;
    in_ratio4x = 0;
    for (int i = 0; i < GROUP; i++) in_data[i] = '0;
    make_meta(m, 0, 2);
    meta_to_rtl(m, centroids, hf_books, kp_codes);
    tensor_exp = texp_t'(m.texp);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < NREQ; r++) begin
      logic is4;
      int p;
      is4 = ($urandom_range(2) != 0);
      p = int'($urandom_range(NUM_SEL - 1));
      gen_group(m, p, (r % 4 == 3) ? -1 : int'($urandom_range(NUM_HF - 1)),
                real'($urandom_range(4000) + 1) / 16.0, int'($urandom_range(10)), d);
      if (r % 9 == 8) for (int i = 0; i < GROUP; i++) d[i] = 16'(int'($urandom_range(16'h7BFF)) | (int'($urandom_range(1)) << 15));
      for (int i = 0; i < GROUP_2X; i++) d2[i] = d[i];
      if (is4) exp_blk = ref_compress4x(m, d, -1, info);
      else     exp_blk = ref_compress2x(d2);
      @(negedge clk);
      in_valid = 1;
      in_ratio4x = is4;
      in_data = d;
      // wait for the accepting edge
      while (1) begin
        @(posedge clk);
        if (in_ready) break;
      end
      t0 = cycle;
      @(negedge clk);
      in_valid = 0;
      // a second request offered now must stall
      in_valid = 1;
      @(posedge clk);
      checks++;
      if (in_ready) begin
        failures++;
        $display("req %0d: ready while busy", r);
      end else n_stall++;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(posedge clk);
      lat = cycle - t0;
      checks++;
      if (lat != (is4 ? C4 : C2)) begin
        failures++;
        $display("req %0d: latency %0d", r, lat);
      end
      checks++;
      if (out_block !== exp_blk || out_ratio4x !== is4) begin
        failures++;
        $display("req %0d (4x=%0d): block mismatch\n got %h\n exp %h", r, is4, out_block, exp_blk);
      end
      checks++;
      if (is4 && (int'(out_outliers) != info.n_out || out_clipped != info.clipped)) begin
        failures++;
        $display("req %0d: outliers %0d/%0d clipped %0d/%0d", r, out_outliers, info.n_out,
                 out_clipped, info.clipped);
      end
      if (is4) n4++; else n2++;
      if (is4 && info.clipped) n_clip++;
      repeat ($urandom_range(2)) @(posedge clk);
    end
    checks++;
    if (n4 == 0 || n2 == 0 || n_clip == 0 || n_stall == 0) begin
      failures++;
      $display("coverage: 4x %0d 2x %0d clipped %0d stall %0d", n4, n2, n_clip, n_stall);
    end
    $display("4x %0d 2x %0d clipped %0d stall %0d", n4, n2, n_clip, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
