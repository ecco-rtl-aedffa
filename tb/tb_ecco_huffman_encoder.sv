// tb_ecco_huffman_encoder: self-checking test of the 16-value Huffman
// encoder slice.
//
// Random index slices are encoded with the test codebooks (code lengths
// 2..8 from four profiles); the reference concatenates the codes one bit at
// a time, MSB first, left-aligned in 128 bits, and sums the lengths. The
// encoder is combinational: results are checked within the same cycle.
module tb_ecco_huffman_encoder;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  idx_t     idx  [ENC_SLICE];
  hf_code_t book [NUM_IDX];
  logic [ENC_SLICE*HF_MAXLEN-1:0] bits;
  logic [$clog2(ENC_SLICE*HF_MAXLEN+1)-1:0] len;

  ecco_huffman_encoder dut (.*);

  meta_t m;
  int checks, failures;

  initial begin : watchdog
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int max_len;
    checks = 0; failures = 0; max_len = 0;
    make_meta(m, 0, 0);
    for (int t = 0; t < 2000; t++) begin
      int p, h, pos;
      logic [127:0] e;
      p = int'($urandom_range(NUM_KP - 1));
      h = int'($urandom_range(NUM_HF - 1));
      for (int s = 0; s < NUM_IDX; s++) begin
        // garbage above the code length must be ignored
        book[s].code = m.hcode[p][h][s] | (8'hFF << m.hlen[p][h][s]);
        book[s].len  = 4'(m.hlen[p][h][s]);
      end
      e = '0;
      pos = 0;
      for (int i = 0; i < ENC_SLICE; i++) begin
        int s;
        s = (t % 13 == 0) ? int'(m.hlen[p][h][0] == 8 ? 0 : 15) : int'($urandom_range(NUM_IDX - 1));
        if (t % 13 == 0) for (int q = 0; q < NUM_IDX; q++) if (m.hlen[p][h][q] == 8) s = q;
        idx[i] = idx_t'(s);
        for (int b = 0; b < m.hlen[p][h][s]; b++) begin
          e[127 - pos] = m.hcode[p][h][s][m.hlen[p][h][s] - 1 - b];
          pos++;
        end
      end
      if (pos > max_len) max_len = pos;
      #1;
      checks++;
      if (bits !== e || int'(len) != pos) begin
        failures++;
        if (failures < 5) $display("t %0d: got %h/%0d exp %h/%0d", t, bits, len, e, pos);
      end
    end
    checks++;
    if (max_len != ENC_SLICE * HF_MAXLEN) begin
      failures++;
      $display("longest slice %0d never reached 128 bits", max_len);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
