// ecco_compressor_4x: builds the 512-bit 4x block of one 128-value group.
//
// Works on the result of the bitonic sorter (rank 0 = absolute maximum,
// ranks 1..16 = outlier candidates, group min/max without rank 0):
//   SEL   The absolute maximum becomes the FP8 group scale factor
//         (value * 2^-TEXP); its FP16 image sf16 is recovered the way the
//         decompressor will. The pattern selector picks ID_KP among the
//         first NUM_SEL patterns.
//   SCALE The 15 centroids of that pattern are multiplied by |sf16|;
//         index 15 stands for sf16 itself.
//   ENC   GROUP/ENC_SLICE passes. Each pass maps ENC_SLICE values to their
//         nearest centroid (the scale factor's own position is forced to
//         index 15) and runs the four Huffman encoders, one per codebook of
//         the pattern, appending their codes and lengths.
//   ASM   The shortest of the four sequences is kept (ID_HF). The block is
//         ID_KP code | ID_HF (2b) | scale factor (8b) | code sequence |
//         as many 15-bit outliers {7b position, 8b FP8} as fit, in
//         descending magnitude. A sequence that does not fit is clipped.
// Steps, the block layout and the field widths follow the paper; the
// per-state schedule (one slice of 16 values per clock, giving
// 4 + GROUP/ENC_SLICE = 12 cycles from the start edge to done) is this design's choice,
// as is searching patterns 0..NUM_SEL-1 as the online candidate set.
//
// Interface: pulse start; data and the sorter outputs must stay stable until
// done. done pulses with block, and the statistics, valid; they hold until
// the next start.
module ecco_compressor_4x
  import ecco_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  fp16_t     data     [GROUP],
  input  fp16_t     top_val  [NUM_OUT+1],   // sorted ranks 0..16
  input  logic [6:0] top_idx [NUM_OUT+1],
  input  fp16_t     group_min,
  input  fp16_t     group_max,
  input  fp16_t     centroids [NUM_KP][NUM_CENT],
  input  hf_code_t  hf_books  [NUM_KP][NUM_HF][NUM_IDX],
  input  kp_code_t  kp_codes  [NUM_KP],
  input  texp_t     tensor_exp,
  output logic      busy,
  output logic      done,
  output logic [BLOCK_BITS-1:0] block,
  output kp_id_t    id_kp,
  output hf_id_t    id_hf,
  output logic [4:0] n_outliers,   // outliers that fitted
  output logic      clipped,       // code sequence cut at the block end
  output logic [10:0] total_bits   // header + chosen sequence, unclipped
);
  localparam int NPASS = GROUP / ENC_SLICE;
  localparam int SW    = ENC_SLICE * HF_MAXLEN;

  typedef enum logic [2:0] {S_IDLE, S_SEL, S_SCALE, S_ENC, S_ASM} state_e;
  state_e state;
  logic [$clog2(NPASS)-1:0] pass;

  fp8_t  sf8;
  fp16_t sf16;
  fix_t  cent_fix [NUM_IDX];
  logic [BLOCK_BITS-1:0] seq [NUM_HF];
  logic [10:0] seq_len [NUM_HF];

  // ---------------------------------------------------------- SEL datapath
  fp8_t  sf8_d;
  fp16_t sf16_d;
  fp16_t kp_min [NUM_SEL];
  fp16_t kp_max [NUM_SEL];
  logic [$clog2(NUM_SEL)-1:0] sel_id;
  logic [87:0] sel_err;

  always_comb begin
    sf8_d  = fp16_to_fp8(top_val[0], tensor_exp);
    sf16_d = fp8_to_fp16(sf8_d, tensor_exp);
    for (int p = 0; p < NUM_SEL; p++) begin
      kp_min[p] = centroids[p][0];
      kp_max[p] = centroids[p][NUM_CENT-1];
    end
  end

  ecco_pattern_selector #(.N_SEL(NUM_SEL)) u_sel (
    .kp_min(kp_min), .kp_max(kp_max), .sf_mag(fp16_abs(sf16_d)),
    .group_min(group_min), .group_max(group_max),
    .sel_id(sel_id), .sel_err(sel_err)
  );

  // -------------------------------------------------------- ENC datapath
  idx_t slice_idx [ENC_SLICE];
  logic [SW-1:0] enc_bits [NUM_HF];
  logic [$clog2(SW+1)-1:0] enc_len [NUM_HF];

  for (genvar i = 0; i < ENC_SLICE; i++) begin : g_map
    idx_t mapped;
    logic [6:0] pos;
    assign pos = 7'(int'(pass) * ENC_SLICE + i);
    ecco_value_mapper u_map (
      .data(fp16_to_fix(data[pos])), .cent(cent_fix), .idx(mapped)
    );
    assign slice_idx[i] = (pos == top_idx[0]) ? idx_t'(SF_IDX) : mapped;
  end

  for (genvar h = 0; h < NUM_HF; h++) begin : g_enc
    ecco_huffman_encoder #(.SLICE(ENC_SLICE)) u_enc (
      .idx(slice_idx), .book(hf_books[id_kp][h]),
      .bits(enc_bits[h]), .len(enc_len[h])
    );
  end

  // -------------------------------------------------------- ASM datapath
  logic [BLOCK_BITS-1:0] blk_d;
  hf_id_t best;
  logic [4:0] nout_d;
  logic [10:0] end_d;

  always_comb begin
    kp_code_t kc;
    int hdr, p;
    logic [BLOCK_BITS-1:0] fld;
    best = '0;
    for (int h = 1; h < NUM_HF; h++)
      if (seq_len[h] < seq_len[best]) best = hf_id_t'(h);
    kc  = kp_codes[id_kp];
    hdr = int'(kc.len) + 2 + 8;
    fld = BLOCK_BITS'(kc.code) & ((BLOCK_BITS'(1) << kc.len) - BLOCK_BITS'(1));
    blk_d = fld << (BLOCK_BITS - int'(kc.len));
    blk_d = blk_d | (BLOCK_BITS'({best, sf8}) << (BLOCK_BITS - hdr));
    blk_d = blk_d | (seq[best] >> hdr);
    end_d = 11'(hdr) + seq_len[best];
    nout_d = '0;
    for (int m = 0; m < NUM_OUT; m++) begin
      p = int'(end_d) + OUT_BITS * m;
      if (p + OUT_BITS <= BLOCK_BITS) begin
        fld = BLOCK_BITS'({top_idx[m+1], fp16_to_fp8(top_val[m+1], tensor_exp)});
        blk_d = blk_d | (fld << (BLOCK_BITS - p - OUT_BITS));
        nout_d = nout_d + 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      pass  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) state <= S_SEL;
        S_SEL:   state <= S_SCALE;
        S_SCALE: begin state <= S_ENC; pass <= '0; end
        S_ENC:   begin
          pass <= pass + 1'b1;
          if (int'(pass) == NPASS - 1) state <= S_ASM;
        end
        S_ASM:   begin state <= S_IDLE; done <= 1'b1; end
        default: state <= S_IDLE;
      endcase
    end
  end
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    unique case (state)
      S_SEL: begin
        sf8   <= sf8_d;
        sf16  <= sf16_d;
        id_kp <= kp_id_t'(sel_id);
      end
      S_SCALE: begin
        for (int c = 0; c < NUM_CENT; c++)
          cent_fix[c] <= fp16_to_fix(fp16_mul(centroids[id_kp][c], fp16_abs(sf16)));
        cent_fix[SF_IDX] <= fp16_to_fix(sf16);
        for (int h = 0; h < NUM_HF; h++) begin
          seq[h]     <= '0;
          seq_len[h] <= '0;
        end
      end
      S_ENC: begin
        for (int h = 0; h < NUM_HF; h++) begin
          seq[h]     <= seq[h] | ({enc_bits[h], (BLOCK_BITS-SW)'(0)} >> seq_len[h]);
          seq_len[h] <= seq_len[h] + 11'(enc_len[h]);
        end
      end
      S_ASM: begin
        block      <= blk_d;
        id_hf      <= best;
        n_outliers <= nout_d;
        clipped    <= (end_d > 11'(BLOCK_BITS));
        total_bits <= end_d;
      end
      default: ;
    endcase
  end

endmodule
