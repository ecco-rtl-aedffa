// ecco_decompressor_4x: pipelined decompressor for 4x blocks (weights, KV).
//
// Turns one 512-bit block into the group's 128 FP16 values, accepting a new
// block every cycle. Pipeline (one register after each step):
//   1  pattern retriever: decode ID_KP, read ID_HF and the FP8 scale factor,
//      select pattern and codebook, left-align the coded data; expand the
//      codebook into a 256-entry decode table.
//   2  64 parallel segment decoders (8 sub-decoders each) on overlapping
//      15-bit chunks; in parallel the 15 centroids are multiplied by the
//      |scale factor| (index 15 is the scale factor itself).
//   3-8 six-stage merge tree of the data concatenator.
//   9  end-of-data / outlier extraction and the 128 data mappers.
// The steps and their parallelism (64 decoders, 8 sub-decoders, six merge
// stages, 128 mappers) follow the paper. The paper reports 28 cycles for its
// synthesized pipeline; this RTL registers once per step, so out_valid comes
// 9 cycles after in_valid. Where the register boundaries sit is this design's
// choice.
//
// Interface: in_valid with in_block; out_valid with data_out (no stall, one
// result per accepted block, in order). kp_err flags a block whose header
// matched no ID_KP code (its data is then decoded with pattern 0).
module ecco_decompressor_4x
  import ecco_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  logic [BLOCK_BITS-1:0] in_block,
  input  fp16_t     centroids [NUM_KP][NUM_CENT],
  input  hf_code_t  hf_books  [NUM_KP][NUM_HF][NUM_IDX],
  input  kp_code_t  kp_codes  [NUM_KP],
  input  texp_t     tensor_exp,
  output logic      out_valid,
  output fp16_t     data_out [GROUP],
  output logic [4:0] out_outliers,     // padded outliers found
  output logic      out_clipped,       // fewer than GROUP codes decoded
  output logic      kp_err
);
  localparam int MERGE = $clog2(NUM_SEG);

  // ------------------------------------------------------- stage 1
  logic kp_found_d;
  kp_id_t id_kp_d;
  hf_id_t id_hf_d;
  fp8_t sf8_d;
  fp16_t sf16_d;
  logic [4:0] hdr_d;
  logic [9:0] lim_d;
  logic [BLOCK_BITS-1:0] al_d;
  fp16_t pat_d [NUM_CENT];
  hf_code_t book_d [NUM_IDX];

  ecco_pattern_retriever u_ret (
    .block(in_block), .centroids(centroids), .hf_books(hf_books),
    .kp_codes(kp_codes), .tensor_exp(tensor_exp), .kp_found(kp_found_d),
    .id_kp(id_kp_d), .id_hf(id_hf_d), .sf8(sf8_d), .sf16(sf16_d),
    .hdr_len(hdr_d), .data_limit(lim_d), .data_aligned(al_d),
    .pattern(pat_d), .book(book_d)
  );

  logic v1, kpf1;
  fp16_t sf16_1;
  logic [9:0] lim1;
  logic [BLOCK_BITS-1:0] al1;
  fp16_t pat1 [NUM_CENT];
  hf_code_t book1 [NUM_IDX];
  hf_lut_t  lut_d [256];
  hf_lut_t  lut1 [256];

  ecco_huffman_lut u_lut (.book(book_d), .lut(lut_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end
  always_ff @(posedge clk) begin
    kpf1   <= kp_found_d;
    sf16_1 <= sf16_d;
    lim1   <= lim_d;
    al1    <= al_d;
    pat1   <= pat_d;
    book1  <= book_d;
    lut1   <= lut_d;
  end

  // ------------------------------------------------------- stage 2
  logic [BLOCK_BITS+HF_MAXLEN-2:0] ext1;
  assign ext1 = {al1, (HF_MAXLEN-1)'(0)};

  logic [2:0] dc_d [NUM_SEG][SEG_BITS];
  idx_t       ds_d [NUM_SEG][SEG_BITS][SEG_SYMS];
  logic [2:0] de_d [NUM_SEG][SEG_BITS];
  logic       dt_d [NUM_SEG][SEG_BITS];

  for (genvar j = 0; j < NUM_SEG; j++) begin : g_seg
    ecco_huffman_segment_decoder u_dec (
      .chunk(ext1[BLOCK_BITS+HF_MAXLEN-2-SEG_BITS*j -: SEG_BITS+HF_MAXLEN-1]),
      .lut(lut1), .seg_base(10'(SEG_BITS*j)), .limit(lim1),
      .cnt(dc_d[j]), .syms(ds_d[j]), .eop(de_d[j]), .term(dt_d[j])
    );
  end

  logic v2;
  logic [2:0] dc2 [NUM_SEG][SEG_BITS];
  idx_t       ds2 [NUM_SEG][SEG_BITS][SEG_SYMS];
  logic [2:0] de2 [NUM_SEG][SEG_BITS];
  logic       dt2 [NUM_SEG][SEG_BITS];
  fp16_t cent2 [NUM_IDX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
  end
  always_ff @(posedge clk) begin
    dc2 <= dc_d;
    ds2 <= ds_d;
    de2 <= de_d;
    dt2 <= dt_d;
    for (int c = 0; c < NUM_CENT; c++) cent2[c] <= fp16_mul(pat1[c], fp16_abs(sf16_1));
    cent2[SF_IDX] <= sf16_1;
  end

  // sideband delay lines: stage 1 -> output of the merge tree
  logic [BLOCK_BITS-1:0] al_p [MERGE+1];
  logic [9:0] lim_p [MERGE+1];
  hf_code_t book_p [MERGE+1][NUM_IDX];
  fp16_t cent_p [MERGE][NUM_IDX];
  logic kpf_p [MERGE+1];

  always_ff @(posedge clk) begin
    al_p[0]   <= al1;
    lim_p[0]  <= lim1;
    book_p[0] <= book1;
    kpf_p[0]  <= kpf1;
    cent_p[0] <= cent2;
    for (int s = 1; s <= MERGE; s++) begin
      al_p[s]   <= al_p[s-1];
      lim_p[s]  <= lim_p[s-1];
      book_p[s] <= book_p[s-1];
      kpf_p[s]  <= kpf_p[s-1];
    end
    for (int s = 1; s < MERGE; s++) cent_p[s] <= cent_p[s-1];
  end

  // ------------------------------------------------------- stages 3..8
  logic cv;
  idx_t seq [GROUP];
  logic [7:0] seq_cnt;
  logic [9:0] data_bits;
  outlier_t outl [NUM_OUT];
  logic [NUM_OUT-1:0] omask;

  ecco_data_concatenator u_cat (
    .clk(clk), .rst_n(rst_n), .in_valid(v2),
    .d_cnt(dc2), .d_syms(ds2), .d_eop(de2), .d_term(dt2),
    .book(book_p[MERGE]), .stream(al_p[MERGE]), .limit(lim_p[MERGE]),
    .out_valid(cv), .seq(seq), .seq_cnt(seq_cnt), .data_bits(data_bits),
    .outliers(outl), .out_mask(omask)
  );

  // ------------------------------------------------------- stage 9
  fp16_t mapped [GROUP];
  ecco_data_mapper u_map (
    .seq(seq), .seq_cnt(seq_cnt), .cent(cent_p[MERGE-1]), .outliers(outl),
    .out_mask(omask), .tensor_exp(tensor_exp), .data_out(mapped)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= cv;
  end
  always_ff @(posedge clk) begin
    data_out     <= mapped;
    out_outliers <= 5'($countones(omask));
    out_clipped  <= (seq_cnt != 8'(GROUP));
    kp_err       <= !kpf_p[MERGE];
  end

endmodule
