// ecco_bitonic_sorter: magnitude sort of one group for the compressor.
//
// The compressor starts by sorting the group's FP16 values by magnitude,
// largest first, carrying each value's 7-bit position. Rank 0 is the
// group's absolute maximum (the scale factor); ranks 1..16 are the padded-
// outlier candidates. The sorter also reports the signed minimum and maximum
// of the group without the rank-0 element, which the pattern selector needs.
// The paper names a bitonic sorter and its outputs; how it is scheduled is
// this design's choice: one bitonic stage per clock on N/2 compare-exchange
// units reused over the log2(N)*(log2(N)+1)/2 stages (28 for N = 128),
// trading latency for area as the paper does for its compressor.
// Ties in magnitude are broken by position (lower position ranks first),
// so the order is fully determined.
//
// Interface: pulse start with data_in valid (sampled at start). done pulses
// one cycle after the last stage, STAGES+1 cycles after start; the outputs
// stay valid until the next start. busy is high from start until done.
module ecco_bitonic_sorter
  import ecco_pkg::*;
#(
  parameter int unsigned N = GROUP
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp16_t data_in [N],
  output logic  busy,
  output logic  done,
  output fp16_t sorted_val [N],
  output logic [$clog2(N)-1:0] sorted_idx [N],
  output fp16_t group_max,      // signed max of ranks 1..N-1
  output fp16_t group_min       // signed min of ranks 1..N-1
);
  localparam int LG = $clog2(N);
  typedef logic [LG-1:0] pos_t;

  fp16_t v_q [N];
  pos_t  i_q [N];
  logic [$clog2(LG+1)-1:0] k_lg;   // current merge size 2^k_lg
  logic [$clog2(LG+1)-1:0] j_lg;   // current partner distance 2^j_lg

  // sort key: larger magnitude first, then lower position first
  function automatic logic [15+LG-1:0] key(input fp16_t v, input pos_t p);
    return {v[14:0], ~p};
  endfunction

  fp16_t v_d [N];
  pos_t  i_d [N];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      int p;
      logic take_big, a_big;
      p = i ^ (1 << j_lg);
      // descending overall: block bit k selects direction
      take_big = ((i >> k_lg) & 1) == 0 ? (i < p) : (i > p);
      a_big = key(v_q[i], i_q[i]) > key(v_q[p], i_q[p]);
      if (take_big == a_big) begin
        v_d[i] = v_q[i]; i_d[i] = i_q[i];
      end else begin
        v_d[i] = v_q[p]; i_d[i] = i_q[p];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      k_lg <= '0;
      j_lg <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        k_lg <= 1;
        j_lg <= 0;
      end else if (busy) begin
        if (j_lg == 0) begin
          if (int'(k_lg) == LG) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            k_lg <= k_lg + 1'b1;
            j_lg <= k_lg;          // next merge starts at distance 2^k_lg
          end
        end else begin
          j_lg <= j_lg - 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start && !busy) begin
      for (int i = 0; i < N; i++) begin
        v_q[i] <= data_in[i];
        i_q[i] <= pos_t'(i);
      end
    end else if (busy) begin
      v_q <= v_d;
      i_q <= i_d;
    end
  end

  always_comb begin
    group_max = v_q[1];
    group_min = v_q[1];
    for (int i = 2; i < N; i++) begin
      if (fp16_order_key(v_q[i]) > fp16_order_key(group_max)) group_max = v_q[i];
      if (fp16_order_key(v_q[i]) < fp16_order_key(group_min)) group_min = v_q[i];
    end
  end

  assign sorted_val = v_q;
  assign sorted_idx = i_q;

endmodule
