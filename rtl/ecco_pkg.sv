// ecco_pkg: shared constants, types and number-format helpers of the Ecco
// compression engine.
//
// Ecco compresses LLM weights and KV cache 4x (a 128-value FP16 group, 256
// bytes, into one 64-byte block) with shared k-means patterns plus Huffman
// coding, and activations 2x (64 FP16 values into 64 bytes) with 7-bit
// uniform quantization. The constants below are the sizes the paper gives:
// 64-byte blocks, 128-value groups, 15 centroids plus the scale factor
// (16 indices), 64 shared patterns of which 16 are searched online, 4 Huffman
// codebooks per pattern, codes of 2..8 bits, 16 padded outliers of 15 bits.
//
// Bit order: a compressed block is a bit stream written MSB first, i.e. the
// first stream bit is block[511]. A Huffman code of length L is stored
// right-aligned in a table entry and emitted MSB first.
//
// Number formats (this design's own choices, the paper names the formats
// only): FP16 is IEEE binary16; FP8 is E4M3 (bias 7, no infinities, largest
// value 448, encodings 0x7F/0xFF treated as 448). The per-tensor FP16-to-FP8
// scale factor is a power of two kept as a signed exponent TEXP:
// fp8 = fp16 * 2^-TEXP. All conversions round to nearest even and saturate
// instead of producing Inf/NaN; FP16 Inf/NaN inputs are read as +-65504.
// Exact arithmetic is done on a signed fixed-point image of FP16 with 24
// fraction bits (fix_t), which holds every finite FP16 value exactly.
package ecco_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int BLOCK_BITS  = 512;  // compressed block, 64 bytes
  localparam int GROUP       = 128;  // values per 4x group
  localparam int GROUP_2X    = 64;   // values per 2x group
  localparam int NUM_CENT    = 15;   // centroids per k-means pattern
  localparam int NUM_IDX     = 16;   // 15 centroids + scale-factor index
  localparam int SF_IDX      = 15;   // index reserved for the scale factor
  localparam int NUM_KP      = 64;   // shared k-means patterns (S)
  localparam int NUM_SEL     = 16;   // patterns searched by the compressor
  localparam int NUM_HF      = 4;    // Huffman codebooks per pattern (H)
  localparam int HF_MAXLEN   = 8;    // longest data code
  localparam int KP_MAXLEN   = 15;   // longest ID_KP code
  localparam int NUM_OUT     = 16;   // padded outliers at most
  localparam int OUT_BITS    = 15;   // 7-bit address + FP8 value
  localparam int NUM_SEG     = 64;   // parallel Huffman decoders
  localparam int SEG_BITS    = 8;    // bits owned by one decoder
  localparam int SEG_SYMS    = 4;    // codes starting in one segment, at most
  localparam int ENC_SLICE   = 16;   // values encoded per compressor cycle

  // ---------------------------------------------------------------- types
  typedef logic [15:0] fp16_t;
  typedef logic [7:0]  fp8_t;
  typedef logic signed [5:0] texp_t;     // log2 of per-tensor scale
  typedef logic signed [41:0] fix_t;     // value * 2^24, exact for FP16
  typedef logic [3:0]  idx_t;            // quantization index 0..15
  typedef logic [5:0]  kp_id_t;
  typedef logic [1:0]  hf_id_t;

  typedef struct packed {
    logic [7:0] code;  // right-aligned
    logic [3:0] len;   // 2..8, 0 = unused entry
  } hf_code_t;

  typedef struct packed {
    logic [14:0] code; // right-aligned
    logic [3:0]  len;  // 1..15
  } kp_code_t;

  typedef struct packed {
    logic [6:0] addr;  // position in the group
    fp8_t       val;   // value * 2^-TEXP in E4M3
  } outlier_t;

  // entry of the 256-entry decode table of one codebook, indexed by the
  // next 8 stream bits
  typedef struct packed {
    logic       hit;   // some code is a prefix of the 8 bits
    idx_t       sym;
    logic [3:0] len;
  } hf_lut_t;

  // one read request arriving from L2 (4x, 2x or uncompressed line)
  typedef enum logic [1:0] {
    KIND_RAW = 2'd0,
    KIND_2X  = 2'd1,
    KIND_4X  = 2'd2
  } blk_kind_e;

  localparam int WIDE = 96;

  // ------------------------------------------------------------- helpers
  // magnitude of an FP16 value in units of 2^-24 (exact, 41 bits)
  function automatic logic [40:0] fp16_mag(input fp16_t h);
    logic [4:0] e;
    logic [10:0] sig;
    e = h[14:10];
    if (e == 5'd31) return 41'(2047) << 29;           // saturate Inf/NaN
    if (e == 5'd0) return 41'(h[9:0]);
    sig = {1'b1, h[9:0]};
    return 41'(sig) << (e - 5'd1);
  endfunction

  function automatic fix_t fp16_to_fix(input fp16_t h);
    fix_t m;
    m = fix_t'({1'b0, fp16_mag(h)});
    return h[15] ? -m : m;
  endfunction

  // round a magnitude given in units of 2^-frac to FP16 (RNE, saturating)
  function automatic fp16_t wide_to_fp16(input logic sign,
                                         input logic [WIDE-1:0] mag,
                                         input int frac);
    int p, sh, e;
    logic [14:0] comb;
    logic [WIDE-1:0] rest;
    logic guard, sticky;
    logic [15:0] sum;
    p = -1;
    for (int i = 0; i < WIDE; i++) if (mag[i]) p = i;
    if (p < 0) return {sign, 15'd0};
    e = p - frac + 15;
    if (e >= 1) begin
      sh = p - 10;
      comb = {5'(e > 31 ? 31 : e), 10'(mag >> sh)};
    end else begin
      sh = frac - 24;
      comb = {5'd0, 10'(mag >> sh)};
    end
    if (e > 30) return {sign, 15'h7BFF};
    if (sh > 0) begin
      guard  = mag[sh-1];
      rest   = mag & ((WIDE'(1) << (sh - 1)) - WIDE'(1));
      sticky = |rest;
    end else begin
      guard  = 1'b0;
      sticky = 1'b0;
    end
    sum = {1'b0, comb} + 16'(guard && (sticky || comb[0]));
    if (sum >= 16'h7C00) return {sign, 15'h7BFF};
    return {sign, sum[14:0]};
  endfunction

  // round a magnitude given in units of 2^-frac to FP8 E4M3 (RNE, saturating)
  function automatic fp8_t wide_to_fp8(input logic sign,
                                       input logic [WIDE-1:0] mag,
                                       input int frac);
    int p, sh, e;
    logic [6:0] comb;
    logic [WIDE-1:0] rest;
    logic guard, sticky;
    logic [7:0] sum;
    p = -1;
    for (int i = 0; i < WIDE; i++) if (mag[i]) p = i;
    if (p < 0) return {sign, 7'd0};
    e = p - frac + 7;
    if (e > 15) return {sign, 7'h7E};
    if (e >= 1) begin
      sh = p - 3;
      comb = {4'(e), 3'(mag >> sh)};
    end else begin
      sh = frac - 9;
      comb = {4'd0, 3'(mag >> sh)};
    end
    if (sh > 0) begin
      guard  = mag[sh-1];
      rest   = mag & ((WIDE'(1) << (sh - 1)) - WIDE'(1));
      sticky = |rest;
    end else begin
      guard  = 1'b0;
      sticky = 1'b0;
    end
    sum = {1'b0, comb} + 8'(guard && (sticky || comb[0]));
    if (sum > 8'h7E) return {sign, 7'h7E};
    return {sign, sum[6:0]};
  endfunction

  // signed fixed point (2^-24 units) to FP16
  function automatic fp16_t fix_to_fp16(input fix_t f);
    logic [41:0] m;
    m = f[41] ? 42'(-f) : 42'(f);
    return wide_to_fp16(f[41], WIDE'(m), 24);
  endfunction

  // FP16 * FP16 -> FP16: 11x11 significand product, one rounding
  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    logic [10:0] sa, sb;
    logic [21:0] prod;
    int ea, eb;
    logic [WIDE-1:0] mag;
    ea = (a[14:10] == 5'd0) ? 1 : int'(a[14:10]);
    eb = (b[14:10] == 5'd0) ? 1 : int'(b[14:10]);
    sa = (a[14:10] == 5'd31) ? 11'h7FF : {a[14:10] != 5'd0, a[9:0]};
    sb = (b[14:10] == 5'd31) ? 11'h7FF : {b[14:10] != 5'd0, b[9:0]};
    if (a[14:10] == 5'd31) ea = 30;
    if (b[14:10] == 5'd31) eb = 30;
    prod = sa * sb;                       // value = prod * 2^(ea+eb-50)
    mag = WIDE'(prod) << (ea + eb - 2);   // units of 2^-48
    return wide_to_fp16(a[15] ^ b[15], mag, 48);
  endfunction

  // FP16 -> FP8 E4M3 of value * 2^-texp
  function automatic fp8_t fp16_to_fp8(input fp16_t h, input texp_t texp);
    logic [WIDE-1:0] mag;
    mag = WIDE'(fp16_mag(h)) << 32;        // units of 2^-(56)
    return wide_to_fp8(h[15], mag, 56 + int'(texp));
  endfunction

  // FP8 E4M3 -> FP16 of value * 2^texp (an exponent adjustment)
  function automatic fp16_t fp8_to_fp16(input fp8_t f, input texp_t texp);
    logic [17:0] m;                        // units of 2^-9
    logic [3:0] e;
    e = f[6:3];
    if (f[6:0] == 7'h7F) m = 18'(14) << 14; // NaN encoding read as 448
    else if (e == 4'd0) m = 18'(f[2:0]);
    else m = 18'({1'b1, f[2:0]}) << (e - 4'd1);
    return wide_to_fp16(f[7], WIDE'(m) << 48, 57 - int'(texp));
  endfunction

  function automatic fp16_t fp16_abs(input fp16_t h);
    return {1'b0, h[14:0]};
  endfunction

  // key that orders FP16 values by signed value as unsigned integers
  function automatic logic [15:0] fp16_order_key(input fp16_t h);
    return h[15] ? ~h : (h | 16'h8000);
  endfunction

  // read one entry of a right-aligned code table against an MSB-first window
  function automatic logic code_match8(input logic [7:0] win, input hf_code_t c);
    logic [7:0] mask;
    if (c.len == 4'd0) return 1'b0;
    mask = 8'hFF << (4'd8 - c.len);
    return ((win & mask) == ((c.code << (4'd8 - c.len)) & mask));
  endfunction

endpackage
