// ecco_compressor_2x: 2x activation compressor (64 FP16 values -> 512 bits).
//
// Activations use plain uniform quantization with a zero point: each value
// becomes a signed 7-bit integer q, and the block keeps one spare bit per
// byte for the 16-bit scale factor S and the 16-bit zero point Z, so that
// x ~= q * S + Z. Byte b of the block (MSB first, byte 0 = bits 511:504) is
// {meta_b, q_b[6:0]}. The paper gives the 7+1 bit layout and that S and Z are
// 16 bits each; this design places S (FP16, MSB first) in the spare bits of
// bytes 0..15, Z (FP16) in bytes 16..31 and zeros in bytes 32..63.
//
// Scale and zero point are derived from the group min/max found by the
// shared bitonic sorter (as in the paper). This design's choices, where the
// paper is silent: Z is the FP16 midpoint (max+min)/2, S is the smallest
// power of two with 126*S >= max-min, so the "multiply and round" step is an
// exact shift with round-half-up, and q is clamped to [-64, 63].
//
// Interface: start samples data, group_min and group_max; done pulses one
// cycle later with block valid (held until the next start).
module ecco_compressor_2x
  import ecco_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp16_t data [GROUP_2X],
  input  fp16_t group_min,
  input  fp16_t group_max,
  output logic  done,
  output logic [BLOCK_BITS-1:0] block,
  output fp16_t scale,
  output fp16_t zero_point
);
  logic [BLOCK_BITS-1:0] blk_d;
  fp16_t s_d, z_d;

  always_comb begin
    fix_t fmax, fmin, zfix;
    logic signed [42:0] mid2;
    logic [42:0] range;
    int sh;
    logic signed [42:0] d, r;
    logic signed [6:0] q;
    logic meta;
    fmax  = fp16_to_fix(group_max);
    fmin  = fp16_to_fix(group_min);
    mid2  = 43'(fmax) + 43'(fmin);
    z_d   = fix_to_fp16(fix_t'(mid2 >>> 1));
    zfix  = fp16_to_fix(z_d);
    range = 43'(43'(fmax) - 43'(fmin));
    sh = 35;
    for (int s = 35; s >= 0; s--)
      if ((48'(126) << s) >= 48'(range)) sh = s;
    s_d = fix_to_fp16(fix_t'(42'(1) << sh));
    blk_d = '0;
    for (int b = 0; b < GROUP_2X; b++) begin
      d = 43'(fp16_to_fix(data[b])) - 43'(zfix);
      if (sh > 0) r = (d + (43'(1) <<< (sh - 1))) >>> sh;
      else        r = d;
      if (r > 43'sd63)       q = 7'sd63;
      else if (r < -43'sd64) q = -7'sd64;
      else                   q = 7'(r);
      if (b < 16)      meta = s_d[15-b];
      else if (b < 32) meta = z_d[31-b];
      else             meta = 1'b0;
      blk_d[BLOCK_BITS-1-8*b -: 8] = {meta, q};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= start;
  end

  always_ff @(posedge clk) begin
    if (start) begin
      block      <= blk_d;
      scale      <= s_d;
      zero_point <= z_d;
    end
  end

endmodule
