// tb_ecco_meta_buffer: self-checking test of the metadata buffer.
//
// Loads a full test metadata set (64 patterns x 15 centroids, 64 x 4 x 16
// codebook entries, 64 ID_KP codes, tensor exponent) through the write port,
// one word per cycle, then compares every table output with the model. Also
// checks: the tensor exponent resets to 0, writes become visible on the
// next cycle, out-of-range centroid addresses (c = 15) change nothing, and
// overwriting one entry leaves its neighbours alone.
module tb_ecco_meta_buffer;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  logic clk, rst_n, wr_en;
  logic [1:0] wr_sel;
  logic [11:0] wr_addr;
  logic [18:0] wr_data;
  fp16_t    centroids [NUM_KP][NUM_CENT];
  hf_code_t hf_books  [NUM_KP][NUM_HF][NUM_IDX];
  kp_code_t kp_codes  [NUM_KP];
  texp_t    tensor_exp;

  ecco_meta_buffer dut (.*);

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

  task automatic wr(input int sel, input int addr, input int data);
    @(negedge clk);
    wr_en = 1;
    wr_sel = 2'(sel);
    wr_addr = 12'(addr);
    wr_data = 19'(data);
    @(negedge clk);
    wr_en = 0;
  endtask

  function automatic int compare_all();
    int bad;
    bad = 0;
    for (int p = 0; p < NUM_KP; p++) begin
      for (int c = 0; c < NUM_CENT; c++) if (centroids[p][c] !== m.cent[p][c]) bad++;
      for (int h = 0; h < NUM_HF; h++)
        for (int s = 0; s < NUM_IDX; s++)
          if (hf_books[p][h][s].code !== m.hcode[p][h][s] || int'(hf_books[p][h][s].len) != m.hlen[p][h][s]) bad++;
      if (kp_codes[p].code !== m.kcode[p] || int'(kp_codes[p].len) != m.klen[p]) bad++;
    end
    if (int'(tensor_exp) != m.texp) bad++;
    return bad;
  endfunction

  initial begin
    int t0, bad;
    checks = 0; failures = 0; cycle = 0;
    rst_n = 0; wr_en = 0; wr_sel = 0; wr_addr = 0; wr_data = 0;
    make_meta(m, -3, 1);
    repeat (2) @(posedge clk);
    checks++;
    if (tensor_exp !== '0) begin failures++; $display("tensor_exp not reset"); end
    #1 rst_n = 1;
    t0 = cycle;
    for (int p = 0; p < NUM_KP; p++) begin
      for (int c = 0; c < NUM_CENT; c++) wr(0, p * 16 + c, int'(m.cent[p][c]));
      for (int h = 0; h < NUM_HF; h++)
        for (int s = 0; s < NUM_IDX; s++)
          wr(1, p * 64 + h * 16 + s, int'({m.hcode[p][h][s], 4'(m.hlen[p][h][s])}));
      wr(2, p, int'({m.kcode[p], 4'(m.klen[p])}));
    end
    wr(3, 0, m.texp & 63);
    checks++;
    // two cycles per write with the task above; the first starts at the
    // falling edge within the current cycle
    if (cycle - t0 != 2 * (NUM_KP * (NUM_CENT + NUM_HF * NUM_IDX + 1) + 1) - 1) begin
      failures++;
      $display("load took %0d cycles", cycle - t0);
    end
    bad = compare_all();
    checks++;
    if (bad != 0) begin failures++; $display("%0d entries wrong after load", bad); end
    // centroid slot 15 does not exist: nothing may change
    wr(0, 5 * 16 + 15, 16'h1234);
    bad = compare_all();
    checks++;
    if (bad != 0) begin failures++; $display("write to c=15 changed %0d entries", bad); end
    // single overwrites, visible right after the write edge
    for (int t = 0; t < 50; t++) begin
      int p, h, s;
      p = int'($urandom_range(NUM_KP - 1));
      h = int'($urandom_range(NUM_HF - 1));
      s = int'($urandom_range(NUM_IDX - 1));
      m.hcode[p][h][s] = 8'($urandom);
      m.hlen[p][h][s]  = int'($urandom_range(8, 2));
      @(negedge clk);
      wr_en = 1; wr_sel = 2'd1; wr_addr = 12'(p * 64 + h * 16 + s);
      wr_data = 19'({m.hcode[p][h][s], 4'(m.hlen[p][h][s])});
      @(posedge clk);
      #1;
      wr_en = 0;
      checks++;
      if (compare_all() != 0) begin failures++; $display("overwrite %0d failed", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
