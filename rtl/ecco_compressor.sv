// ecco_compressor: one compression unit between the L2 cache and HBM.
//
// When the L2 controller has gathered all the uncompressed data of a block
// of a compressible page, it hands the data here: 128 FP16 values (256
// bytes) for a 4x page (weights, KV cache) or 64 FP16 values (128 bytes,
// in in_data[0..63]) for a 2x page (activations). The unit returns one
// 64-byte compressed block for HBM. As in the paper, both ratios share one
// bitonic sorter: it gives the 4x path its scale factor, outlier candidates
// and min/max, and the 2x path its min/max. For 2x the 64 values are fed to
// the 128-input sorter twice, which leaves the min/max unchanged.
//
// Interface (valid/ready): in_ready is high when idle; a request is taken
// when in_valid && in_ready. out_valid pulses for one cycle with the block
// and the statistics; there is no back-pressure on the output (the HBM write
// queue is outside this design). Latency from acceptance to out_valid:
// 4x 29 + 3 + GROUP/ENC_SLICE cycles, 2x 29 + 1 cycles (sorter 28 stages).
module ecco_compressor
  import ecco_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  logic      in_ratio4x,
  input  fp16_t     in_data [GROUP],
  input  fp16_t     centroids [NUM_KP][NUM_CENT],
  input  hf_code_t  hf_books  [NUM_KP][NUM_HF][NUM_IDX],
  input  kp_code_t  kp_codes  [NUM_KP],
  input  texp_t     tensor_exp,
  output logic      out_valid,
  output logic      out_ratio4x,
  output logic [BLOCK_BITS-1:0] out_block,
  output logic [4:0] out_outliers,
  output logic      out_clipped
);
  typedef enum logic [1:0] {C_IDLE, C_SORT, C_RUN} cstate_e;
  cstate_e state;
  logic    mode4x;
  fp16_t   data_q [GROUP];
  fp16_t   sort_in [GROUP];

  logic sort_busy, sort_done;
  fp16_t sorted_val [GROUP];
  logic [6:0] sorted_idx [GROUP];
  fp16_t gmin, gmax;

  logic c4_busy, c4_done, c2_done;
  logic [BLOCK_BITS-1:0] c4_block, c2_block;
  kp_id_t c4_kp;
  hf_id_t c4_hf;
  logic [4:0] c4_nout;
  logic c4_clip;
  logic [10:0] c4_bits;
  fp16_t c2_s, c2_z;

  fp16_t top_val [NUM_OUT+1];
  logic [6:0] top_idx [NUM_OUT+1];
  fp16_t act [GROUP_2X];

  always_comb begin
    for (int i = 0; i < GROUP; i++)
      sort_in[i] = in_ratio4x ? in_data[i] : in_data[i % GROUP_2X];
    for (int i = 0; i <= NUM_OUT; i++) begin
      top_val[i] = sorted_val[i];
      top_idx[i] = sorted_idx[i];
    end
    for (int i = 0; i < GROUP_2X; i++) act[i] = data_q[i];
  end

  assign in_ready = (state == C_IDLE);

  ecco_bitonic_sorter #(.N(GROUP)) u_sort (
    .clk(clk), .rst_n(rst_n), .start(in_valid && in_ready), .data_in(sort_in),
    .busy(sort_busy), .done(sort_done), .sorted_val(sorted_val),
    .sorted_idx(sorted_idx), .group_max(gmax), .group_min(gmin)
  );

  ecco_compressor_4x u_c4 (
    .clk(clk), .rst_n(rst_n), .start(sort_done && mode4x), .data(data_q),
    .top_val(top_val), .top_idx(top_idx), .group_min(gmin), .group_max(gmax),
    .centroids(centroids), .hf_books(hf_books), .kp_codes(kp_codes),
    .tensor_exp(tensor_exp), .busy(c4_busy), .done(c4_done), .block(c4_block),
    .id_kp(c4_kp), .id_hf(c4_hf), .n_outliers(c4_nout), .clipped(c4_clip),
    .total_bits(c4_bits)
  );

  ecco_compressor_2x u_c2 (
    .clk(clk), .rst_n(rst_n), .start(sort_done && !mode4x), .data(act),
    .group_min(gmin), .group_max(gmax), .done(c2_done), .block(c2_block),
    .scale(c2_s), .zero_point(c2_z)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        C_IDLE: if (in_valid) state <= C_SORT;
        C_SORT: if (sort_done) state <= C_RUN;
        C_RUN:  if (c4_done || c2_done) begin
                  state     <= C_IDLE;
                  out_valid <= 1'b1;
                end
        default: state <= C_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      data_q <= in_data;
      mode4x <= in_ratio4x;
    end
    if (c4_done || c2_done) begin
      out_ratio4x  <= mode4x;
      out_block    <= mode4x ? c4_block : c2_block;
      out_outliers <= mode4x ? c4_nout : 5'd0;
      out_clipped  <= mode4x ? c4_clip : 1'b0;
    end
  end

endmodule
