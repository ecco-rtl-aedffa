// tb_ecco_data_concatenator: self-checking test of the six-stage merge tree
// that joins the 64 segment-decoder results.
//
// The candidates are produced by the segment decoders themselves (tested on
// their own), fed from the aligned Huffman data of reference-compressed
// blocks and of random streams. The merged sequence, its count, the coded
// data length, the outlier fields and the outlier mask are compared with a
// bit-serial reference parse. in_valid is pulsed once per block and
// out_valid must follow exactly 6 cycles later; book, stream and limit are
// held for the whole block, as they are used only at the output.
module tb_ecco_data_concatenator;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  localparam int LAT = 6;

  logic clk, rst_n, in_valid, out_valid;
  logic [2:0] d_cnt  [NUM_SEG][SEG_BITS];
  idx_t       d_syms [NUM_SEG][SEG_BITS][SEG_SYMS];
  logic [2:0] d_eop  [NUM_SEG][SEG_BITS];
  logic       d_term [NUM_SEG][SEG_BITS];
  hf_code_t   book [NUM_IDX];
  logic [BLOCK_BITS-1:0] stream;
  logic [9:0] limit;
  idx_t       seq [GROUP];
  logic [7:0] seq_cnt;
  logic [9:0] data_bits;
  outlier_t   outliers [NUM_OUT];
  logic [NUM_OUT-1:0] out_mask;

  ecco_data_concatenator dut (.*);

  hf_lut_t lut [256];
  ecco_huffman_lut u_lut (.book(book), .lut(lut));
  for (genvar j = 0; j < NUM_SEG; j++) begin : g_seg
    logic [BLOCK_BITS+6:0] ext;
    assign ext = {stream, 7'd0};
    ecco_huffman_segment_decoder u_dec (
      .chunk(ext[BLOCK_BITS+6-8*j -: 15]), .lut(lut), .seg_base(10'(8 * j)), .limit(limit),
      .cnt(d_cnt[j]), .syms(d_syms[j]), .eop(d_eop[j]), .term(d_term[j])
    );
  end

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
    logic [511:0] blk;
    c4_info_t info;
    int e_syms [GROUP];
    logic [7:0] hc [NUM_IDX];
    int hl [NUM_IDX];
    int n_clip, n_full;
    checks = 0; failures = 0; cycle = 0; n_clip = 0; n_full = 0;
    rst_n = 0; in_valid = 0; stream = '0; limit = '0;
    make_meta(m, 0, 1);
    for (int s = 0; s < NUM_IDX; s++) book[s] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 150; t++) begin
      int kp, hf, hdr, ecnt, ebits, t0, bad;
      kp = int'($urandom_range(NUM_KP - 1));
      gen_group(m, kp, (t % 4 == 3) ? -1 : int'($urandom_range(NUM_HF - 1)),
                real'($urandom_range(500) + 1), int'($urandom_range(6)), d);
      blk = ref_compress4x(m, d, kp, info);
      hf = info.hf;
      hdr = m.klen[kp] + 10;
      @(negedge clk);
      for (int s = 0; s < NUM_IDX; s++) begin
        hc[s] = m.hcode[kp][hf][s];
        hl[s] = m.hlen[kp][hf][s];
        book[s].code = hc[s];
        book[s].len  = 4'(hl[s]);
      end
      stream = blk << hdr;
      if (t % 10 == 9) for (int w = 0; w < 16; w++) stream[32*w +: 32] = $urandom;
      limit = 10'(512 - hdr);
      ecnt = ref_parse_data(hc, hl, stream, 512 - hdr, e_syms, ebits);
      in_valid = 1;
      @(posedge clk);
      t0 = cycle;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(posedge clk);
      checks++;
      if (cycle - t0 != LAT) begin failures++; $display("t %0d: %0d cycles", t, cycle - t0); end
      bad = 0;
      for (int i = 0; i < ecnt; i++) if (int'(seq[i]) != e_syms[i]) bad++;
      checks++;
      if (bad != 0 || int'(seq_cnt) != ecnt || int'(data_bits) != ebits) begin
        failures++;
        $display("t %0d: %0d wrong, cnt %0d/%0d bits %0d/%0d", t, bad, seq_cnt, ecnt, data_bits, ebits);
      end
      bad = 0;
      for (int o = 0; o < NUM_OUT; o++) begin
        bit present;
        present = (ebits + 15 * (o + 1) <= 512 - hdr);
        if (out_mask[o] != present) bad++;
        if (present && outliers[o] !== outlier_t'(stream[511 - ebits - 15 * o -: 15])) bad++;
      end
      checks++;
      if (bad != 0) begin failures++; $display("t %0d: outliers %b", t, out_mask); end
      if (ecnt < GROUP) n_clip++; else n_full++;
      @(negedge clk);
    end
    checks++;
    if (n_clip == 0 || n_full == 0) begin failures++; $display("coverage: clipped %0d full %0d", n_clip, n_full); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
