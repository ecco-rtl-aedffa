// ecco_data_concatenator: merges the 64 segment-decoder results into the
// decoded index sequence of a 4x block.
//
// Each segment decoder hands over 8 candidate results, one per start offset.
// As in the paper, neighbouring results are merged pairwise in a tree of six
// stages (64 -> 32 -> ... -> 1): for every start offset of the left half,
// its EOP (the offset where decoding continues) selects which of the right
// half's 8 candidates follows it, and the two index lists are concatenated.
// After six stages one node remains; its offset-0 candidate is the decoded
// sequence (the stream was left-aligned by the pattern retriever). Lists are
// capped at GROUP indices. A candidate that stopped early (`term`, end of
// coded data) takes nothing from its right neighbour.
//
// The paper also has the concatenator produce the outlier mask. Here the
// last, combinational step sums the code lengths of the GROUP decoded indices
// (the end of the coded data), cuts the up to NUM_OUT 15-bit outlier fields
// that follow, and marks those that lie wholly inside the block.
//
// Timing: one register per merge stage, so out_valid follows in_valid by 6
// cycles; one new block per cycle. book, stream and limit must be supplied
// already delayed to match the outputs (they are used only combinationally).
module ecco_data_concatenator
  import ecco_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  logic [2:0] d_cnt  [NUM_SEG][SEG_BITS],
  input  idx_t       d_syms [NUM_SEG][SEG_BITS][SEG_SYMS],
  input  logic [2:0] d_eop  [NUM_SEG][SEG_BITS],
  input  logic       d_term [NUM_SEG][SEG_BITS],
  // aligned with the outputs:
  input  hf_code_t  book [NUM_IDX],
  input  logic [BLOCK_BITS-1:0] stream,
  input  logic [9:0] limit,
  output logic      out_valid,
  output idx_t      seq [GROUP],
  output logic [7:0] seq_cnt,          // indices decoded (GROUP unless clipped)
  output logic [9:0] data_bits,        // length of the coded data
  output outlier_t  outliers [NUM_OUT],
  output logic [NUM_OUT-1:0] out_mask  // outlier m present
);
  localparam int LEVELS = $clog2(NUM_SEG);   // 6

  for (genvar l = 0; l <= LEVELS; l++) begin : lv
    localparam int NL = NUM_SEG >> l;
    localparam int SL = ((SEG_SYMS << l) > GROUP) ? GROUP : (SEG_SYMS << l);
    logic [SL*4-1:0] sy [NL][SEG_BITS];
    logic [7:0]      ct [NL][SEG_BITS];
    logic [2:0]      ep [NL][SEG_BITS];
    logic            tm [NL][SEG_BITS];
    logic            v;

    if (l == 0) begin : g_leaf
      assign v = in_valid;
      always_comb begin
        for (int n = 0; n < NL; n++)
          for (int k = 0; k < SEG_BITS; k++) begin
            for (int s = 0; s < SEG_SYMS; s++) sy[n][k][4*s +: 4] = d_syms[n][k][s];
            ct[n][k] = 8'(d_cnt[n][k]);
            ep[n][k] = d_eop[n][k];
            tm[n][k] = d_term[n][k];
          end
      end
    end else begin : g_merge
      always_ff @(posedge clk) begin
        for (int n = 0; n < NL; n++)
          for (int k = 0; k < SEG_BITS; k++) begin
            logic [2:0] e;
            logic [8:0] sum;
            e = lv[l-1].ep[2*n][k];
            if (lv[l-1].tm[2*n][k]) begin
              sy[n][k] <= (SL*4)'(lv[l-1].sy[2*n][k]);
              ct[n][k] <= lv[l-1].ct[2*n][k];
              ep[n][k] <= '0;
              tm[n][k] <= 1'b1;
            end else begin
              sum = 9'(lv[l-1].ct[2*n][k]) + 9'(lv[l-1].ct[2*n+1][e]);
              sy[n][k] <= (SL*4)'(lv[l-1].sy[2*n][k]) |
                          ((SL*4)'(lv[l-1].sy[2*n+1][e]) << (4 * int'(lv[l-1].ct[2*n][k])));
              ct[n][k] <= (sum > 9'(GROUP)) ? 8'(GROUP) : 8'(sum);
              ep[n][k] <= lv[l-1].ep[2*n+1][e];
              tm[n][k] <= lv[l-1].tm[2*n+1][e];
            end
          end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) v <= 1'b0;
        else        v <= lv[l-1].v;
      end
    end
  end

  assign out_valid = lv[LEVELS].v;
  assign seq_cnt   = lv[LEVELS].ct[0][0];

  always_comb begin
    int bits;
    logic [BLOCK_BITS-1:0] rest;
    bits = 0;
    for (int i = 0; i < GROUP; i++) begin
      seq[i] = lv[LEVELS].sy[0][0][4*i +: 4];
      if (i < int'(seq_cnt)) bits = bits + int'(book[seq[i]].len);
    end
    data_bits = 10'(bits);
    rest = stream << bits;
    for (int m = 0; m < NUM_OUT; m++) begin
      outliers[m] = outlier_t'(rest[BLOCK_BITS-1-OUT_BITS*m -: OUT_BITS]);
      out_mask[m] = (bits + OUT_BITS * (m + 1) <= int'(limit));
    end
  end

endmodule
