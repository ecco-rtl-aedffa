// ecco_decompressor_2x: decompressor for 2x activation blocks.
//
// A 2x block is 64 bytes; byte b (bits 511-8b down to 504-8b) is
// {meta_b, q_b[6:0]}. The spare bits of bytes 0..15 form the FP16 scale S,
// those of bytes 16..31 the FP16 zero point Z (MSB first). As the paper
// describes, the decompressor gathers S and Z from the spare bits,
// sign-extends each 7-bit q to 8 bits and dequantizes with two operations,
// a multiply and an add: x = q * S + Z. Because the matching compressor
// always picks a power-of-two S, the multiply is a shift; the sum is formed
// exactly on the fixed-point image of FP16 and rounded once to FP16. A
// non-power-of-two S is treated as the power of two of its leading bit
// (this design's choice; such blocks are never produced here).
//
// Timing: one register; out_valid follows in_valid by one cycle, one block
// per cycle.
module ecco_decompressor_2x
  import ecco_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  logic [BLOCK_BITS-1:0] in_block,
  output logic      out_valid,
  output fp16_t     data_out [GROUP_2X],
  output fp16_t     scale,
  output fp16_t     zero_point
);
  fp16_t s_d, z_d;
  fp16_t x_d [GROUP_2X];

  always_comb begin
    fix_t sfix, zfix;
    int sh;
    logic signed [7:0] q8;
    logic signed [47:0] acc;     // |q*S + Z| < 2^42 * 2^-24 * 3, no overflow
    for (int b = 0; b < 16; b++) begin
      s_d[15-b] = in_block[BLOCK_BITS-1-8*b];
      z_d[15-b] = in_block[BLOCK_BITS-1-8*(b+16)];
    end
    sfix = fp16_to_fix(s_d);
    zfix = fp16_to_fix(z_d);
    sh = 0;
    for (int i = 0; i < 41; i++) if (sfix[i]) sh = i;
    for (int b = 0; b < GROUP_2X; b++) begin
      q8 = {in_block[BLOCK_BITS-2-8*b], in_block[BLOCK_BITS-2-8*b -: 7]};
      acc = (48'(signed'(q8)) <<< sh) + 48'(zfix);
      x_d[b] = wide_to_fp16(acc[47], WIDE'(acc[47] ? -acc : acc), 24);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
  always_ff @(posedge clk) begin
    data_out   <= x_d;
    scale      <= s_d;
    zero_point <= z_d;
  end
endmodule
