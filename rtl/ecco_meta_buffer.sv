// ecco_meta_buffer: tensor-wise metadata store of the Ecco engine.
//
// Before compressed traffic to a tensor starts, software loads the tensor's
// shared metadata once: NUM_KP k-means patterns of NUM_CENT sorted FP16
// centroids each (in the normalised range (-1,1)), the Huffman code of every
// pattern index (ID_KP is itself Huffman coded, 1..15 bits), NUM_KP*NUM_HF
// Huffman codebooks of 16 codes (2..8 bits), and the power-of-two FP16-to-FP8
// scale factor as a signed exponent. The paper states what is stored and that
// it is loaded once; the write port, its address map and the register-array
// form are this design's choices.
//
// Interface: one write per cycle when wr_en is high.
//   wr_sel = 0 centroid  : wr_addr = {kp[5:0], c[3:0]},       wr_data[15:0]
//   wr_sel = 1 codebook  : wr_addr = {kp[5:0], hf[1:0], sym[3:0]},
//                          wr_data[11:0] = {code[7:0], len[3:0]}
//   wr_sel = 2 ID_KP code: wr_addr = kp[5:0], wr_data = {code[14:0], len[3:0]}
//   wr_sel = 3 exponent  : wr_data[5:0] = signed TEXP
// All tables are visible on the outputs at all times; a write shows on the
// outputs on the next cycle. Only the exponent is reset (to 0); the tables
// must be loaded before use, like an SRAM.
module ecco_meta_buffer
  import ecco_pkg::*;
#(
  parameter int unsigned N_KP   = NUM_KP,
  parameter int unsigned N_HF   = NUM_HF,
  parameter int unsigned N_CENT = NUM_CENT
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      wr_en,
  input  logic [1:0] wr_sel,
  input  logic [11:0] wr_addr,
  input  logic [18:0] wr_data,
  output fp16_t     centroids [N_KP][N_CENT],
  output hf_code_t  hf_books  [N_KP][N_HF][NUM_IDX],
  output kp_code_t  kp_codes  [N_KP],
  output texp_t     tensor_exp
);

  logic [5:0] a_kp;
  logic [3:0] a_c;
  logic [1:0] a_hf;
  assign a_kp = wr_addr[11:6];
  assign a_hf = wr_addr[5:4];
  assign a_c  = wr_addr[3:0];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_sel)
        2'd0: if (32'(wr_addr[9:4]) < N_KP && 32'(a_c) < N_CENT)
                centroids[wr_addr[9:4]][a_c] <= wr_data[15:0];
        2'd1: if (32'(a_kp) < N_KP && 32'(a_hf) < N_HF)
                hf_books[a_kp][a_hf][a_c] <= hf_code_t'(wr_data[11:0]);
        2'd2: if (32'(wr_addr[5:0]) < N_KP)
                kp_codes[wr_addr[5:0]] <= kp_code_t'(wr_data);
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tensor_exp <= '0;
    else if (wr_en && wr_sel == 2'd3) tensor_exp <= texp_t'(wr_data[5:0]);
  end

endmodule
