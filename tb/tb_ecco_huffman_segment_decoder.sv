// tb_ecco_huffman_segment_decoder: self-checking test of one parallel
// Huffman segment decoder (8 sub-decoders, one per start offset).
//
// The decode table is built here from the codebook (for every 8-bit window,
// the code that prefixes it). Random 15-bit chunks, segment positions and
// end limits are decoded; for each start offset k the reference walks the
// codebook directly: it takes codes while they start inside the 8-bit
// segment and end within the limit, and reports count, indices, the next
// start offset and whether it stopped early. Combinational: checked within
// the same cycle.
module tb_ecco_huffman_segment_decoder;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  logic [14:0] chunk;
  hf_lut_t     lut [256];
  logic [9:0]  seg_base, limit;
  logic [2:0]  cnt  [SEG_BITS];
  idx_t        syms [SEG_BITS][SEG_SYMS];
  logic [2:0]  eop  [SEG_BITS];
  logic        term [SEG_BITS];

  ecco_huffman_segment_decoder dut (.*);

  meta_t m;
  int checks, failures;

  initial begin : watchdog
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int n_term, n_four;
    checks = 0; failures = 0; n_term = 0; n_four = 0;
    make_meta(m, 0, 0);
    for (int t = 0; t < 3000; t++) begin
      int p, h;
      p = int'($urandom_range(NUM_KP - 1));
      h = int'($urandom_range(NUM_HF - 1));
      for (int w = 0; w < 256; w++) begin
        lut[w] = '0;
        for (int s = NUM_IDX - 1; s >= 0; s--)
          if ((w >> (8 - m.hlen[p][h][s])) == int'(m.hcode[p][h][s])) begin
            lut[w].hit = 1'b1;
            lut[w].sym = idx_t'(s);
            lut[w].len = 4'(m.hlen[p][h][s]);
          end
      end
      chunk = 15'($urandom);
      seg_base = 10'(8 * $urandom_range(62));
      limit = (t % 3 == 0) ? 10'(int'(seg_base) + int'($urandom_range(15))) : 10'd502;
      #1;
      for (int k = 0; k < SEG_BITS; k++) begin
        int pos, c, e_syms [SEG_SYMS];
        bit stop, bad;
        pos = k; c = 0; stop = 0;
        for (int n = 0; n < SEG_SYMS; n++) e_syms[n] = 0;
        while (!stop && pos < SEG_BITS) begin
          int sym;
          sym = -1;
          for (int s = 0; s < NUM_IDX && sym < 0; s++) begin
            bit ok;
            ok = (int'(seg_base) + pos + m.hlen[p][h][s] <= int'(limit));
            for (int b = 0; b < m.hlen[p][h][s]; b++)
              if (chunk[14 - pos - b] != m.hcode[p][h][s][m.hlen[p][h][s] - 1 - b]) ok = 0;
            if (ok) sym = s;
          end
          if (sym < 0) stop = 1;
          else begin
            e_syms[c] = sym;
            c++;
            pos += m.hlen[p][h][sym];
          end
        end
        bad = (int'(cnt[k]) != c) || (term[k] != stop) || (!stop && int'(eop[k]) != pos - 8);
        for (int n = 0; n < c; n++) if (int'(syms[k][n]) != e_syms[n]) bad = 1;
        checks++;
        if (bad) begin
          failures++;
          if (failures < 6) $display("t %0d k %0d: cnt %0d/%0d term %0d/%0d eop %0d/%0d", t, k,
                                     cnt[k], c, term[k], stop, eop[k], pos - 8);
        end
        if (stop) n_term++;
        if (c == 4) n_four++;
      end
    end
    checks++;
    if (n_term == 0 || n_four == 0) begin failures++; $display("coverage: term %0d four %0d", n_term, n_four); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
