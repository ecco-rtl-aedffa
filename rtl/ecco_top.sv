// ecco_top: the Ecco compression subsystem beside a GPU L2 cache.
//
// Pages marked compressible are kept compressed in HBM: 4x for weights and
// KV cache, 2x for activations. On the way from L2 to HBM a compressor turns
// the uncompressed data of a block into one 64-byte block; on the way from
// L2 to the SMs a decompressor expands a compressed 64-byte line again.
// This top holds:
//   - one metadata buffer (shared k-means patterns, ID_KP codes, Huffman
//     codebooks, per-tensor FP8 exponent), loaded once per tensor;
//   - NUM_UNITS compression units (shared bitonic sorter, 4x and 2x paths);
//   - NUM_UNITS read lanes, each with a 4x and a 2x decompressor and a
//     bypass for uncompressed lines.
// The paper replicates compressor and decompressor 20 times so that they
// keep up with the L2's 5120 bytes per cycle (20 x 256 B); NUM_UNITS = 20
// follows it.
//
// Routing (the L2 controller's job in the paper, modelled here): a read
// request carries the page's two PTE bits, rd_compressed and rd_ratio4x.
// Compressed 4x lines go to the 4x decompressor (9 cycles); 2x lines and
// uncompressed lines are delayed so that every lane returns its results in
// request order with the same fixed latency RD_LATENCY = 9 cycles, one per
// cycle. sm_data holds 128 values for 4x, 64 for 2x (sm_data[0..63]) and
// the 32 raw FP16 values of an uncompressed line (sm_data[0..31]); unused
// entries are zero. Write requests use valid/ready per unit and return one
// block on hbm_valid; writes to uncompressed pages do not come here.
// The L2 cache, HBM, SMs and page tables are outside this design.
module ecco_top
  import ecco_pkg::*;
#(
  parameter int unsigned NUM_UNITS = 20
) (
  input  logic       clk,
  input  logic       rst_n,
  // metadata load
  input  logic       meta_wr_en,
  input  logic [1:0] meta_wr_sel,
  input  logic [11:0] meta_wr_addr,
  input  logic [18:0] meta_wr_data,
  // write path: L2 -> compressor -> HBM
  input  logic       wr_valid   [NUM_UNITS],
  output logic       wr_ready   [NUM_UNITS],
  input  logic       wr_ratio4x [NUM_UNITS],
  input  fp16_t      wr_data    [NUM_UNITS][GROUP],
  output logic       hbm_valid  [NUM_UNITS],
  output logic       hbm_ratio4x[NUM_UNITS],
  output logic [BLOCK_BITS-1:0] hbm_block [NUM_UNITS],
  output logic [4:0] hbm_outliers [NUM_UNITS],
  output logic       hbm_clipped  [NUM_UNITS],
  // read path: L2 -> decompressor -> SM
  input  logic       rd_valid      [NUM_UNITS],
  input  logic       rd_compressed [NUM_UNITS],
  input  logic       rd_ratio4x    [NUM_UNITS],
  input  logic [BLOCK_BITS-1:0] rd_block [NUM_UNITS],
  output logic       sm_valid [NUM_UNITS],
  output blk_kind_e  sm_kind  [NUM_UNITS],
  output fp16_t      sm_data  [NUM_UNITS][GROUP],
  output logic [4:0] sm_outliers [NUM_UNITS],
  output logic       sm_clipped  [NUM_UNITS]
);
  localparam int RD_LATENCY = 9;   // latency of ecco_decompressor_4x

  fp16_t    centroids [NUM_KP][NUM_CENT];
  hf_code_t hf_books  [NUM_KP][NUM_HF][NUM_IDX];
  kp_code_t kp_codes  [NUM_KP];
  texp_t    tensor_exp;

  ecco_meta_buffer u_meta (
    .clk(clk), .rst_n(rst_n), .wr_en(meta_wr_en), .wr_sel(meta_wr_sel),
    .wr_addr(meta_wr_addr), .wr_data(meta_wr_data), .centroids(centroids),
    .hf_books(hf_books), .kp_codes(kp_codes), .tensor_exp(tensor_exp)
  );

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    // ------------------------------------------------------ write path
    ecco_compressor u_comp (
      .clk(clk), .rst_n(rst_n), .in_valid(wr_valid[u]), .in_ready(wr_ready[u]),
      .in_ratio4x(wr_ratio4x[u]), .in_data(wr_data[u]),
      .centroids(centroids), .hf_books(hf_books), .kp_codes(kp_codes),
      .tensor_exp(tensor_exp), .out_valid(hbm_valid[u]),
      .out_ratio4x(hbm_ratio4x[u]), .out_block(hbm_block[u]),
      .out_outliers(hbm_outliers[u]), .out_clipped(hbm_clipped[u])
    );

    // ------------------------------------------------------ read path
    blk_kind_e kind_in;
    assign kind_in = !rd_compressed[u] ? KIND_RAW : (rd_ratio4x[u] ? KIND_4X : KIND_2X);

    logic d4_v, d4_clip, d4_kperr;
    fp16_t d4_data [GROUP];
    logic [4:0] d4_nout;
    ecco_decompressor_4x u_d4 (
      .clk(clk), .rst_n(rst_n), .in_valid(rd_valid[u] && kind_in == KIND_4X),
      .in_block(rd_block[u]), .centroids(centroids), .hf_books(hf_books),
      .kp_codes(kp_codes), .tensor_exp(tensor_exp), .out_valid(d4_v),
      .data_out(d4_data), .out_outliers(d4_nout), .out_clipped(d4_clip),
      .kp_err(d4_kperr)
    );

    // 2x and raw lines wait RD_LATENCY-1 cycles, then take one more cycle
    logic [BLOCK_BITS-1:0] blk_q [RD_LATENCY-1];
    logic      v_q [RD_LATENCY-1];
    blk_kind_e k_q [RD_LATENCY-1];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int s = 0; s < RD_LATENCY-1; s++) v_q[s] <= 1'b0;
      end else begin
        v_q[0] <= rd_valid[u] && kind_in != KIND_4X;
        for (int s = 1; s < RD_LATENCY-1; s++) v_q[s] <= v_q[s-1];
      end
    end
    always_ff @(posedge clk) begin
      blk_q[0] <= rd_block[u];
      k_q[0]   <= kind_in;
      for (int s = 1; s < RD_LATENCY-1; s++) begin
        blk_q[s] <= blk_q[s-1];
        k_q[s]   <= k_q[s-1];
      end
    end

    logic d2_v;
    fp16_t d2_data [GROUP_2X];
    fp16_t d2_s, d2_z;
    ecco_decompressor_2x u_d2 (
      .clk(clk), .rst_n(rst_n),
      .in_valid(v_q[RD_LATENCY-2] && k_q[RD_LATENCY-2] == KIND_2X),
      .in_block(blk_q[RD_LATENCY-2]), .out_valid(d2_v), .data_out(d2_data),
      .scale(d2_s), .zero_point(d2_z)
    );

    logic raw_v;
    logic [BLOCK_BITS-1:0] raw_blk;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) raw_v <= 1'b0;
      else        raw_v <= v_q[RD_LATENCY-2] && k_q[RD_LATENCY-2] == KIND_RAW;
    end
    always_ff @(posedge clk) raw_blk <= blk_q[RD_LATENCY-2];

    always_comb begin
      sm_valid[u]    = d4_v || d2_v || raw_v;
      sm_kind[u]     = d4_v ? KIND_4X : (d2_v ? KIND_2X : KIND_RAW);
      sm_outliers[u] = d4_v ? d4_nout : 5'd0;
      sm_clipped[u]  = d4_v && (d4_clip || d4_kperr);
      for (int i = 0; i < GROUP; i++) begin
        if (d4_v)                    sm_data[u][i] = d4_data[i];
        else if (d2_v && i < GROUP_2X) sm_data[u][i] = d2_data[i];
        else if (raw_v && i < 32)    sm_data[u][i] = raw_blk[BLOCK_BITS-1-16*i -: 16];
        else                         sm_data[u][i] = 16'h0000;
      end
    end

    // the three read paths have equal latency, so at most one is valid
    a_one_result: assert property (@(posedge clk) disable iff (!rst_n)
                                   $onehot0({d4_v, d2_v, raw_v}));
  end

endmodule
