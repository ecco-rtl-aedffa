// tb_ecco_compressor_4x: self-checking test of the 4x compression datapath
// (pattern selection, scaling, value mapping, Huffman encoding, block
// assembly) on its own, with the sorted ranks supplied by the testbench.
//
// Groups of varying entropy are compressed; block, ID_KP, ID_HF, outlier
// count, clip flag and unclipped length must equal the reference compressor
// of tb_ecco_ref_pkg. busy must be high while working, and done must come
// 4 + GROUP/ENC_SLICE = 12 cycles after the start edge (SEL, SCALE, 8 ENC,
// ASM, then the registered done).
module tb_ecco_compressor_4x;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  localparam int CYCLES = 4 + GROUP / ENC_SLICE;

  logic clk, rst_n, start;
  fp16_t data [GROUP];
  fp16_t top_val [NUM_OUT+1];
  logic [6:0] top_idx [NUM_OUT+1];
  fp16_t group_min, group_max;
  fp16_t    centroids [NUM_KP][NUM_CENT];
  hf_code_t hf_books  [NUM_KP][NUM_HF][NUM_IDX];
  kp_code_t kp_codes  [NUM_KP];
  texp_t    tensor_exp;
  logic busy, done, clipped;
  logic [BLOCK_BITS-1:0] block;
  kp_id_t id_kp;
  hf_id_t id_hf;
  logic [4:0] n_outliers;
  logic [10:0] total_bits;

  ecco_compressor_4x dut (.*);

  meta_t m;
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
    logic [511:0] eb;
    c4_info_t info;
    int n_clip, n_fit;
    checks = 0; failures = 0; cycle = 0; n_clip = 0; n_fit = 0;
    rst_n = 0; start = 0;
    for (int i = 0; i < GROUP; i++) data[i] = '0;
    for (int i = 0; i <= NUM_OUT; i++) begin top_val[i] = '0; top_idx[i] = '0; end
    group_min = '0; group_max = '0;
    make_meta(m, 1, 0);
    meta_to_rtl(m, centroids, hf_books, kp_codes);
    tensor_exp = texp_t'(m.texp);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 80; t++) begin
      int t0;
      real mn, mx;
      gen_group(m, int'($urandom_range(NUM_SEL - 1)), (t % 4 == 3) ? -1 : int'($urandom_range(NUM_HF - 1)),
                real'($urandom_range(3000) + 1) / 8.0, int'($urandom_range(12)), d);
      eb = ref_compress4x(m, d, -1, info);
      ref_sort(d, order);
      mn = h2r(d[order[1]]);
      mx = mn;
      for (int r = 2; r < GROUP; r++) begin
        if (h2r(d[order[r]]) < mn) mn = h2r(d[order[r]]);
        if (h2r(d[order[r]]) > mx) mx = h2r(d[order[r]]);
      end
      @(negedge clk);
      data = d;
      for (int r = 0; r <= NUM_OUT; r++) begin
        top_val[r] = d[order[r]];
        top_idx[r] = 7'(order[r]);
      end
      group_min = r2h(mn);
      group_max = r2h(mx);
      start = 1;
      @(posedge clk);
      t0 = cycle;
      @(negedge clk);
      start = 0;
      checks++;
      if (!busy) begin failures++; $display("t %0d: not busy", t); end
      while (!done) @(posedge clk);
      checks++;
      if (cycle - t0 != CYCLES) begin failures++; $display("t %0d: %0d cycles", t, cycle - t0); end
      checks++;
      if (block !== eb) begin failures++; $display("t %0d: block\n got %h\n exp %h", t, block, eb); end
      checks++;
      if (int'(id_kp) != info.kp || int'(id_hf) != info.hf || int'(n_outliers) != info.n_out ||
          clipped != info.clipped || int'(total_bits) != info.total) begin
        failures++;
        $display("t %0d: kp %0d/%0d hf %0d/%0d out %0d/%0d clip %0d/%0d bits %0d/%0d", t,
                 id_kp, info.kp, id_hf, info.hf, n_outliers, info.n_out, clipped, info.clipped,
                 total_bits, info.total);
      end
      if (info.clipped) n_clip++; else n_fit++;
    end
    checks++;
    if (n_clip == 0 || n_fit == 0) begin failures++; $display("coverage: clipped %0d fitting %0d", n_clip, n_fit); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
