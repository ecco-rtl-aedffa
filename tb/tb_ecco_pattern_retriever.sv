// tb_ecco_pattern_retriever: self-checking test of the 4x block header
// decoder.
//
// Blocks are produced by the reference compressor with every one of the 64
// patterns forced in turn (ID_KP codes of 1 to 15 bits) and random codebook
// choices. Checked against the values the reference wrote: ID_KP, ID_HF,
// FP8 scale factor, header length, the FP16 scale factor (FP8 times
// 2^TEXP), the data limit, the left-aligned data stream, and the selected
// pattern and codebook. Combinational: checked within the same cycle.
module tb_ecco_pattern_retriever;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  logic [BLOCK_BITS-1:0] block;
  fp16_t    centroids [NUM_KP][NUM_CENT];
  hf_code_t hf_books  [NUM_KP][NUM_HF][NUM_IDX];
  kp_code_t kp_codes  [NUM_KP];
  texp_t    tensor_exp;
  logic     kp_found;
  kp_id_t   id_kp;
  hf_id_t   id_hf;
  fp8_t     sf8;
  fp16_t    sf16;
  logic [4:0] hdr_len;
  logic [9:0] data_limit;
  logic [BLOCK_BITS-1:0] data_aligned;
  fp16_t    pattern [NUM_CENT];
  hf_code_t book [NUM_IDX];

  ecco_pattern_retriever dut (.*);

  meta_t m;
  int checks, failures;

  initial begin : watchdog
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [15:0] d [GROUP];
    c4_info_t info;
    checks = 0; failures = 0;
    for (int t = 0; t < 256; t++) begin
      int kp, hl, bad;
      if (t % 64 == 0) begin
        make_meta(m, (t / 64) - 2, t / 64);
        meta_to_rtl(m, centroids, hf_books, kp_codes);
        tensor_exp = texp_t'(m.texp);
      end
      kp = t % 64;
      gen_group(m, kp, int'($urandom_range(NUM_HF - 1)), real'($urandom_range(900) + 1) / 3.0, 3, d);
      block = ref_compress4x(m, d, kp, info);
      hl = m.klen[kp] + 10;
      #1;
      checks++;
      if (!kp_found || int'(id_kp) != kp || int'(id_hf) != info.hf || sf8 !== info.sf8 ||
          int'(hdr_len) != hl || sf16 !== f82h(info.sf8, m.texp) || int'(data_limit) != 512 - hl) begin
        failures++;
        $display("t %0d: kp %0d/%0d hf %0d/%0d sf %h/%h hdr %0d/%0d", t, id_kp, kp, id_hf, info.hf,
                 sf8, info.sf8, hdr_len, hl);
      end
      checks++;
      if (data_aligned !== (block << hl)) begin failures++; $display("t %0d: stream", t); end
      bad = 0;
      for (int c = 0; c < NUM_CENT; c++) if (pattern[c] !== m.cent[kp][c]) bad++;
      for (int s = 0; s < NUM_IDX; s++)
        if (book[s].code !== m.hcode[kp][info.hf][s] || int'(book[s].len) != m.hlen[kp][info.hf][s]) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("t %0d: tables", t); end
    end
    // a head that matches no code (all ID_KP codes disabled)
    for (int k = 0; k < NUM_KP; k++) kp_codes[k].len = 4'd0;
    #1;
    checks++;
    if (kp_found) begin failures++; $display("kp_found without codes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
