// tb_ecco_top: end-to-end test of the Ecco subsystem with 2 of its 20 lanes
// (NUM_UNITS = 2; every lane is an identical copy, and the reduced count keeps
// the build short). The 20-lane build is not simulated (see README).
//
// 1. The metadata (64 patterns, 256 codebooks, 64 ID_KP codes, the tensor
//    exponent) is loaded through the metadata write port.
// 2. Rounds of writes: every unit gets a group at once, 4x or 2x, the mode
//    changing from round to round on most units. A second request is offered
//    while the unit is busy and must be held off (in_ready low). Each block
//    that comes out towards HBM must equal the reference compressor's, after
//    42 (4x) or 31 (2x) cycles.
// 3. Reads: each lane reads the block it just wrote back, then an
//    uncompressed line, back to back. Every lane's result must equal the
//    reference decoder (4x, 2x) or the raw line, in order, 9 cycles after
//    the request.
// Counted mechanisms, each must happen at least once: 4x and 2x
// compression, a write stall, a 4x/2x mode switch, a clipped (overflowing)
// 4x block, padded outliers, the raw bypass on the read side, 4x and 2x
// decompression.
module tb_ecco_top;
  import ecco_pkg::*;
  import tb_ecco_ref_pkg::*;

  localparam int U = 2;
  localparam int ROUNDS = 6;
  localparam int C4 = 42, C2 = 31, RD_LAT = 9;

  logic clk, rst_n;
  logic meta_wr_en;
  logic [1:0] meta_wr_sel;
  logic [11:0] meta_wr_addr;
  logic [18:0] meta_wr_data;
  logic wr_valid [U], wr_ready [U], wr_ratio4x [U];
  fp16_t wr_data [U][GROUP];
  logic hbm_valid [U], hbm_ratio4x [U], hbm_clipped [U];
  logic [BLOCK_BITS-1:0] hbm_block [U];
  logic [4:0] hbm_outliers [U];
  logic rd_valid [U], rd_compressed [U], rd_ratio4x [U];
  logic [BLOCK_BITS-1:0] rd_block [U];
  logic sm_valid [U], sm_clipped [U];
  blk_kind_e sm_kind [U];
  fp16_t sm_data [U][GROUP];
  logic [4:0] sm_outliers [U];

  ecco_top #(.NUM_UNITS(U)) dut (.*);

  meta_t m;
  int checks, failures, cycle;
  int n_4x, n_2x, n_stall, n_switch, n_clip, n_outl, n_raw, n_d4, n_d2;

  // per-lane expectations
  logic [511:0] got_blk [U];
  int got_cyc [U];
  bit got [U];
  logic [15:0] exp_rd [U][2][GROUP];
  blk_kind_e exp_kind [U][2];
  int rd_issue [U][2];
  int rd_seen [U];

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

  always @(posedge clk)
    for (int u = 0; u < U; u++) begin
      if (rst_n && hbm_valid[u]) begin
        got_blk[u] = hbm_block[u];
        got_cyc[u] = cycle;
        got[u] = 1;
      end
      if (rst_n && sm_valid[u]) begin
        int k, bad;
        k = rd_seen[u];
        checks++;
        if (k > 1) begin
          failures++;
          $display("lane %0d: extra result", u);
        end else begin
          bad = 0;
          for (int i = 0; i < GROUP; i++) if (sm_data[u][i] !== exp_rd[u][k][i]) bad++;
          if (bad != 0 || sm_kind[u] != exp_kind[u][k] || cycle - rd_issue[u][k] != RD_LAT) begin
            failures++;
            $display("lane %0d read %0d: %0d values wrong, kind %0d/%0d, latency %0d", u, k, bad,
                     sm_kind[u], exp_kind[u][k], cycle - rd_issue[u][k]);
          end
          if (sm_kind[u] == KIND_RAW) n_raw++;
          if (sm_kind[u] == KIND_4X) n_d4++;
          if (sm_kind[u] == KIND_2X) n_d2++;
        end
        rd_seen[u] = k + 1;
      end
    end

  task automatic meta_wr(input int sel, input int addr, input int data);
    @(negedge clk);
    meta_wr_en = 1;
    meta_wr_sel = 2'(sel);
    meta_wr_addr = 12'(addr);
    meta_wr_data = 19'(data);
  endtask

  initial begin
    logic [15:0] d [U][GROUP];
    logic [15:0] d2 [GROUP_2X];
    logic [15:0] d2o [GROUP_2X];
    logic [511:0] exp_blk [U];
    c4_info_t info [U];
    logic mode [U], prev_mode [U];
    int acc_cyc [U];
    checks = 0; failures = 0; cycle = 0;
    n_4x = 0; n_2x = 0; n_stall = 0; n_switch = 0; n_clip = 0; n_outl = 0;
    n_raw = 0; n_d4 = 0; n_d2 = 0;
    rst_n = 0;
    meta_wr_en = 0; meta_wr_sel = 0; meta_wr_addr = 0; meta_wr_data = 0;
    for (int u = 0; u < U; u++) begin
      wr_valid[u] = 0; wr_ratio4x[u] = 0; rd_valid[u] = 0; rd_compressed[u] = 0;
      rd_ratio4x[u] = 0; rd_block[u] = '0; got[u] = 0; rd_seen[u] = 0; prev_mode[u] = 0;
      for (int i = 0; i < GROUP; i++) wr_data[u][i] = '0;
    end
    make_meta(m, -1, 0);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // 1. metadata
    for (int p = 0; p < NUM_KP; p++) begin
      for (int c = 0; c < NUM_CENT; c++) meta_wr(0, p * 16 + c, int'(m.cent[p][c]));
      for (int h = 0; h < NUM_HF; h++)
        for (int s = 0; s < NUM_IDX; s++)
          meta_wr(1, p * 64 + h * 16 + s, int'({m.hcode[p][h][s], 4'(m.hlen[p][h][s])}));
      meta_wr(2, p, int'({m.kcode[p], 4'(m.klen[p])}));
    end
    meta_wr(3, 0, m.texp & 63);
    @(negedge clk);
    meta_wr_en = 0;

    for (int r = 0; r < ROUNDS; r++) begin
      // 2. writes
      for (int u = 0; u < U; u++) begin
        mode[u] = ((u + r) % 3 != 0);
        gen_group(m, (u + r) % NUM_SEL, ((u + r) % 4 == 3) ? -1 : (u % NUM_HF),
                  real'(u * 13 + r * 7 + 1) / 4.0, (u + 2 * r) % 9, d[u]);
        if (mode[u]) exp_blk[u] = ref_compress4x(m, d[u], -1, info[u]);
        else begin
          for (int i = 0; i < GROUP_2X; i++) d2[i] = d[u][i];
          exp_blk[u] = ref_compress2x(d2);
        end
        got[u] = 0;
        rd_seen[u] = 0;
      end
      @(negedge clk);
      for (int u = 0; u < U; u++) begin
        wr_valid[u] = 1;
        wr_ratio4x[u] = mode[u];
        wr_data[u] = d[u];
      end
      @(posedge clk);
      for (int u = 0; u < U; u++) begin
        checks++;
        if (!wr_ready[u]) begin failures++; $display("unit %0d not ready", u); end
        acc_cyc[u] = cycle;
      end
      @(negedge clk);
      // keep offering: the units are busy now and must hold the requests off
      @(posedge clk);
      for (int u = 0; u < U; u++) begin
        checks++;
        if (wr_ready[u]) begin failures++; $display("unit %0d ready while busy", u); end
        else n_stall++;
      end
      @(negedge clk);
      for (int u = 0; u < U; u++) wr_valid[u] = 0;
      repeat (C4 + 2) @(posedge clk);
      for (int u = 0; u < U; u++) begin
        checks++;
        if (!got[u] || got_blk[u] !== exp_blk[u] || got_cyc[u] - acc_cyc[u] != (mode[u] ? C4 : C2)) begin
          failures++;
          $display("round %0d unit %0d: block %0s, latency %0d", r, u,
                   (got_blk[u] === exp_blk[u]) ? "ok" : "wrong", got_cyc[u] - acc_cyc[u]);
        end
        if (mode[u]) begin
          n_4x++;
          if (info[u].clipped) n_clip++;
          if (info[u].n_out > 0) n_outl++;
        end else n_2x++;
        if (r > 0 && mode[u] != prev_mode[u]) n_switch++;
        prev_mode[u] = mode[u];
      end
      // 3. reads: the block just written, then a raw line
      for (int u = 0; u < U; u++) begin
        int nout;
        if (mode[u]) begin
          void'(ref_decompress4x(m, exp_blk[u], exp_rd[u][0], nout));
          exp_kind[u][0] = KIND_4X;
        end else begin
          ref_decompress2x(exp_blk[u], d2o);
          for (int i = 0; i < GROUP; i++) exp_rd[u][0][i] = (i < GROUP_2X) ? d2o[i] : 16'h0000;
          exp_kind[u][0] = KIND_2X;
        end
      end
      @(negedge clk);
      for (int u = 0; u < U; u++) begin
        rd_valid[u] = 1;
        rd_compressed[u] = 1;
        rd_ratio4x[u] = mode[u];
        rd_block[u] = exp_blk[u];
        rd_issue[u][0] = cycle;
      end
      @(negedge clk);
      for (int u = 0; u < U; u++) begin
        logic [511:0] raw;
        for (int w = 0; w < 16; w++) raw[32*w +: 32] = $urandom;
        rd_compressed[u] = 0;
        rd_ratio4x[u] = 1'($urandom);
        rd_block[u] = raw;
        rd_issue[u][1] = cycle;
        for (int i = 0; i < GROUP; i++) exp_rd[u][1][i] = (i < 32) ? raw[511 - 16 * i -: 16] : 16'h0000;
        exp_kind[u][1] = KIND_RAW;
      end
      @(negedge clk);
      for (int u = 0; u < U; u++) rd_valid[u] = 0;
      repeat (RD_LAT + 3) @(posedge clk);
      for (int u = 0; u < U; u++) begin
        checks++;
        if (rd_seen[u] != 2) begin failures++; $display("lane %0d: %0d results", u, rd_seen[u]); end
      end
    end

    $display("4x %0d 2x %0d stall %0d switch %0d clipped %0d outliers %0d raw %0d d4 %0d d2 %0d",
             n_4x, n_2x, n_stall, n_switch, n_clip, n_outl, n_raw, n_d4, n_d2);
    checks++;
    if (n_4x == 0 || n_2x == 0 || n_stall == 0 || n_switch == 0 || n_clip == 0 || n_outl == 0 ||
        n_raw == 0 || n_d4 == 0 || n_d2 == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
