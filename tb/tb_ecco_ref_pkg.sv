// tb_ecco_ref_pkg: reference model and stimulus helpers for the Ecco
// testbenches.
//
// The model is written independently of the RTL: number formats are
// converted through `real` arithmetic (every FP16/FP8 value and every
// difference of them is exact in double precision), sorting is a plain
// selection sort, Huffman data is produced and parsed one bit at a time.
// It defines the expected behaviour of the engine:
//   - test metadata: 64 skewed k-means patterns, canonical Huffman codebooks
//     built from four code-length profiles, canonical ID_KP codes;
//   - ref_compress4x / ref_decompress4x: the 4x block format;
//   - ref_compress2x / ref_decompress2x: the 2x block format.
package tb_ecco_ref_pkg;
  import ecco_pkg::*;

  // ------------------------------------------------------ number formats
  function automatic real rne(input real y);  // round half to even, y >= 0
    real f, d;
    f = $floor(y);
    d = y - f;
    if (d > 0.5) return f + 1.0;
    if (d < 0.5) return f;
    return (f / 2.0 == $floor(f / 2.0)) ? f : f + 1.0;
  endfunction

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic int flog2(input real a);   // a > 0
    int e;
    e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    return e;
  endfunction

  function automatic real h2r(input logic [15:0] h);
    real m;
    int e;
    e = int'(h[14:10]);
    if (e == 31) m = 65504.0;
    else if (e == 0) m = real'(h[9:0]) * pow2(-24);
    else m = (1.0 + real'(h[9:0]) / 1024.0) * pow2(e - 15);
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(input real x);
    real a, m;
    int e;
    logic s;
    s = (x < 0.0);
    a = s ? -x : x;
    if (a == 0.0) return {s, 15'd0};
    if (a < pow2(-14)) begin
      m = rne(a / pow2(-24));
      return {s, 15'(int'(m))};
    end
    e = flog2(a);
    m = rne(a / pow2(e - 10));
    if (m >= 2048.0) begin e++; m = 1024.0; end
    if (e + 15 > 30) return {s, 15'h7BFF};
    return {s, 5'(e + 15), 10'(int'(m) - 1024)};
  endfunction

  function automatic real f82r(input logic [7:0] f);
    real m;
    int e;
    e = int'(f[6:3]);
    if (f[6:0] == 7'h7F) m = 448.0;
    else if (e == 0) m = real'(f[2:0]) * pow2(-9);
    else m = (1.0 + real'(f[2:0]) / 8.0) * pow2(e - 7);
    return f[7] ? -m : m;
  endfunction

  function automatic logic [7:0] r2f8(input real x);
    real a, m;
    int e;
    logic s;
    s = (x < 0.0);
    a = s ? -x : x;
    if (a == 0.0) return {s, 7'd0};
    if (a < pow2(-6)) begin
      m = rne(a / pow2(-9));
      return {s, 7'(int'(m))};
    end
    e = flog2(a);
    m = rne(a / pow2(e - 3));
    if (m >= 16.0) begin e++; m = 8.0; end
    if (e + 7 > 15 || (e + 7 == 15 && m > 14.0)) return {s, 7'h7E};
    return {s, 4'(e + 7), 3'(int'(m) - 8)};
  endfunction

  // sign-exact wrappers: the sign of a product or conversion follows the
  // sign bits, so that -0 stays -0 as in IEEE arithmetic
  function automatic real rabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  function automatic logic [15:0] hmul(input logic [15:0] a, input logic [15:0] b);
    logic [15:0] r;
    r = r2h(rabs(h2r(a)) * rabs(h2r(b)));
    return {a[15] ^ b[15], r[14:0]};
  endfunction

  function automatic logic [7:0] h2f8(input logic [15:0] h, input int texp);
    logic [7:0] r;
    r = r2f8(rabs(h2r(h)) * pow2(-texp));
    return {h[15], r[6:0]};
  endfunction

  function automatic logic [15:0] f82h(input logic [7:0] f, input int texp);
    logic [15:0] r;
    r = r2h(rabs(f82r(f)) * pow2(texp));
    return {f[7], r[14:0]};
  endfunction

  // --------------------------------------------------------- metadata
  typedef struct {
    logic [15:0] cent [NUM_KP][NUM_CENT];
    logic [7:0]  hcode [NUM_KP][NUM_HF][NUM_IDX];
    int          hlen  [NUM_KP][NUM_HF][NUM_IDX];
    logic [14:0] kcode [NUM_KP];
    int          klen  [NUM_KP];
    int          texp;
  } meta_t;

  // code-length profiles (Kraft sum <= 1)
  function automatic int profile_len(input int prof, input int r);
    int p0 [16] = '{4,4,4,4,4,4,4,4,4,4,4,4,4,4,4,4};
    int p1 [16] = '{2,3,3,4,4,4,5,5,5,6,6,6,7,7,8,8};
    int p2 [16] = '{2,2,3,4,5,6,7,8,8,8,8,8,8,8,8,8};
    int p3 [16] = '{3,3,3,3,4,4,4,4,4,4,5,5,6,7,8,8};
    case (prof)
      0: return p0[r];
      1: return p1[r];
      2: return p2[r];
      default: return p3[r];
    endcase
  endfunction

  // canonical code assignment for n symbols with the given lengths
  function automatic void canon(input int n, input int len [64], output logic [14:0] code [64]);
    int c, prev;
    c = 0;
    prev = 0;
    for (int l = 1; l <= 15; l++)
      for (int s = 0; s < n; s++)
        if (len[s] == l) begin
          c = c << (l - prev);
          prev = l;
          code[s] = 15'(c);
          c++;
        end
  endfunction

  function automatic void make_meta(output meta_t m, input int texp, input int flavour);
    int len [64];
    logic [14:0] code [64];
    m.texp = texp;
    for (int p = 0; p < NUM_KP; p++) begin
      real lo, hi, g;
      lo = -0.95 + 0.6 * real'(p % 8) / 8.0;
      hi = 0.35 + 0.6 * real'(p / 8) / 8.0;
      g  = 0.6 + 0.15 * real'((p + flavour) % 7);
      for (int c = 0; c < NUM_CENT; c++) begin
        real t;
        t = real'(c) / 14.0;
        t = t ** g;
        m.cent[p][c] = r2h(lo + (hi - lo) * t);
      end
      for (int h = 0; h < NUM_HF; h++) begin
        int prof, rot;
        prof = (p + h + flavour) % 4;
        rot  = (p * 3 + h * 5 + flavour) % 16;
        for (int s = 0; s < 64; s++) len[s] = 0;
        for (int s = 0; s < NUM_IDX; s++) len[s] = profile_len(prof, (s + rot) % 16);
        canon(NUM_IDX, len, code);
        for (int s = 0; s < NUM_IDX; s++) begin
          m.hcode[p][h][s] = 8'(code[s]);
          m.hlen[p][h][s]  = len[s];
        end
      end
    end
    for (int s = 0; s < 64; s++) len[s] = (s < 6) ? s + 1 : (s < 63 ? 12 : 15);
    canon(64, len, code);
    for (int s = 0; s < 64; s++) begin
      m.kcode[s] = code[s];
      m.klen[s]  = len[s];
    end
  endfunction

  // a group that roughly follows pattern p, absolute maximum amax; with
  // h >= 0 the centroids are drawn with the probabilities codebook h of
  // pattern p was built for (2^-length), otherwise uniformly
  function automatic void gen_group(input meta_t m, input int p, input int h, input real amax,
                                    input int noise_pct, output logic [15:0] d [GROUP]);
    int apos, tot;
    apos = int'($urandom_range(GROUP - 1));
    tot = 0;
    if (h >= 0) for (int s = 0; s < NUM_CENT; s++) tot += 256 >> m.hlen[p][h][s];
    for (int i = 0; i < GROUP; i++) begin
      real v;
      int c;
      c = int'($urandom_range(NUM_CENT - 1));
      if (h >= 0) begin
        int r;
        r = int'($urandom_range(tot - 1));
        for (int s = 0; s < NUM_CENT; s++) begin
          if (r >= 0 && r < (256 >> m.hlen[p][h][s])) c = s;
          r -= 256 >> m.hlen[p][h][s];
        end
      end
      v = h2r(m.cent[p][c]);
      v = v + real'(int'($urandom_range(200)) - 100) / 100.0 * real'(noise_pct) / 100.0;
      if (v > 0.97) v = 0.97;
      if (v < -0.97) v = -0.97;
      d[i] = r2h(v * amax);
    end
    d[apos] = r2h(($urandom_range(1) != 0) ? amax : -amax);
  endfunction

  // ------------------------------------------------------ bit streams
  function automatic void put_bits(inout logic [511:0] blk, inout int pos,
                                   input logic [31:0] v, input int n);
    for (int k = 0; k < n; k++) begin
      if (pos < 512) blk[511 - pos] = v[n - 1 - k];
      pos++;
    end
  endfunction

  function automatic logic get_bit(input logic [511:0] blk, input int pos);
    return (pos < 512) ? blk[511 - pos] : 1'b0;
  endfunction

  // ------------------------------------------------------ 4x reference
  typedef struct {
    int kp, hf, n_out, total;
    logic clipped;
    logic [7:0] sf8;
    int rank_idx [GROUP];
  } c4_info_t;

  function automatic void ref_sort(input logic [15:0] d [GROUP], output int order [GROUP]);
    bit used [GROUP];
    for (int i = 0; i < GROUP; i++) used[i] = 0;
    for (int r = 0; r < GROUP; r++) begin
      int best;
      best = -1;
      for (int i = 0; i < GROUP; i++)
        if (!used[i] && (best < 0 || d[i][14:0] > d[best][14:0])) best = i;
      used[best] = 1;
      order[r] = best;
    end
  endfunction

  // forced_kp < 0: online choice among the first NUM_SEL patterns
  function automatic logic [511:0] ref_compress4x(input meta_t m, input logic [15:0] d [GROUP],
                                                  input int forced_kp, output c4_info_t info);
    int order [GROUP];
    logic [7:0] sf8;
    logic [15:0] sfh;
    real sf, sfa, gmin, gmax, best_err;
    real cent [NUM_IDX];
    int idx [GROUP];
    int kp, hf, best_len, pos;
    int lens [NUM_HF];
    logic [511:0] blk;
    ref_sort(d, order);
    info.rank_idx = order;
    sf8 = h2f8(d[order[0]], m.texp);
    sfh = f82h(sf8, m.texp);
    sf  = h2r(sfh);
    sfa = (sf < 0.0) ? -sf : sf;
    gmin = h2r(d[order[1]]);
    gmax = gmin;
    for (int r = 2; r < GROUP; r++) begin
      real v;
      v = h2r(d[order[r]]);
      if (v < gmin) gmin = v;
      if (v > gmax) gmax = v;
    end
    kp = 0;
    best_err = 0.0;
    if (forced_kp >= 0) kp = forced_kp;
    else
      for (int p = 0; p < NUM_SEL; p++) begin
        real e, a, b;
        a = gmax - h2r(hmul(m.cent[p][NUM_CENT-1], {1'b0, sfh[14:0]}));
        b = gmin - h2r(hmul(m.cent[p][0], {1'b0, sfh[14:0]}));
        e = a * a + b * b;
        if (p == 0 || e < best_err) begin best_err = e; kp = p; end
      end
    for (int c = 0; c < NUM_CENT; c++) cent[c] = h2r(hmul(m.cent[kp][c], {1'b0, sfh[14:0]}));
    cent[SF_IDX] = sf;
    for (int i = 0; i < GROUP; i++) begin
      real bd;
      bd = -1.0;
      for (int c = 0; c < NUM_IDX; c++) begin
        real dd;
        dd = h2r(d[i]) - cent[c];
        if (dd < 0.0) dd = -dd;
        if (bd < 0.0 || dd < bd) begin bd = dd; idx[i] = c; end
      end
      if (i == order[0]) idx[i] = SF_IDX;
    end
    hf = 0;
    for (int h = 0; h < NUM_HF; h++) begin
      lens[h] = 0;
      for (int i = 0; i < GROUP; i++) lens[h] += m.hlen[kp][h][idx[i]];
      if (lens[h] < lens[hf]) hf = h;
    end
    best_len = lens[hf];
    blk = '0;
    pos = 0;
    put_bits(blk, pos, 32'(m.kcode[kp]), m.klen[kp]);
    put_bits(blk, pos, 32'(hf), 2);
    put_bits(blk, pos, 32'(sf8), 8);
    for (int i = 0; i < GROUP; i++)
      put_bits(blk, pos, 32'(m.hcode[kp][hf][idx[i]]), m.hlen[kp][hf][idx[i]]);
    info.total = pos;
    info.clipped = (pos > 512);
    info.n_out = 0;
    for (int o = 0; o < NUM_OUT; o++)
      if (pos + 15 <= 512) begin
        put_bits(blk, pos, 32'({7'(order[o + 1]), h2f8(d[order[o + 1]], m.texp)}), 15);
        info.n_out++;
      end
    info.kp = kp;
    info.hf = hf;
    info.sf8 = sf8;
    return blk;
  endfunction

  // bit-serial decoder; returns the number of data codes decoded
  function automatic int ref_decompress4x(input meta_t m, input logic [511:0] blk,
                                          output logic [15:0] d [GROUP], output int n_out);
    int pos, kp, hf, cnt, dend;
    logic [7:0] sf8;
    logic [15:0] sfh;
    logic [15:0] cent [NUM_IDX];
    kp = -1;
    for (int k = 0; k < NUM_KP && kp < 0; k++) begin
      bit ok;
      ok = 1;
      for (int b = 0; b < m.klen[k]; b++)
        if (get_bit(blk, b) != m.kcode[k][m.klen[k] - 1 - b]) ok = 0;
      if (ok) kp = k;
    end
    if (kp < 0) kp = 0;
    pos = m.klen[kp];
    hf = 0;
    for (int b = 0; b < 2; b++) begin hf = hf * 2 + int'(get_bit(blk, pos)); pos++; end
    for (int b = 0; b < 8; b++) begin sf8[7 - b] = get_bit(blk, pos); pos++; end
    sfh = f82h(sf8, m.texp);
    for (int c = 0; c < NUM_CENT; c++) cent[c] = hmul(m.cent[kp][c], {1'b0, sfh[14:0]});
    cent[SF_IDX] = sfh;
    cnt = 0;
    for (int i = 0; i < GROUP; i++) d[i] = 16'h0000;
    for (int i = 0; i < GROUP; i++) begin
      int sym;
      sym = -1;
      for (int s = 0; s < NUM_IDX && sym < 0; s++) begin
        bit ok;
        ok = (pos + m.hlen[kp][hf][s] <= 512);
        for (int b = 0; b < m.hlen[kp][hf][s]; b++)
          if (get_bit(blk, pos + b) != m.hcode[kp][hf][s][m.hlen[kp][hf][s] - 1 - b]) ok = 0;
        if (ok) sym = s;
      end
      if (sym < 0) break;
      d[i] = cent[sym];
      pos += m.hlen[kp][hf][sym];
      cnt++;
    end
    dend = pos;
    n_out = 0;
    for (int o = 0; o < NUM_OUT; o++) begin
      if (dend + 15 * (o + 1) <= 512) begin
        int a;
        logic [7:0] v;
        a = 0;
        for (int b = 0; b < 7; b++) a = a * 2 + int'(get_bit(blk, dend + 15 * o + b));
        for (int b = 0; b < 8; b++) v[7 - b] = get_bit(blk, dend + 15 * o + 7 + b);
        d[a] = f82h(v, m.texp);
        n_out++;
      end
    end
    return cnt;
  endfunction

  // decode the Huffman data of an aligned stream (first bit = stream[511])
  // with one codebook: a code is taken only if it ends within `limit` bits
  function automatic int ref_parse_data(input logic [7:0] hcode [NUM_IDX], input int hlen [NUM_IDX],
                                        input logic [511:0] stream, input int limit,
                                        output int syms [GROUP], output int dbits);
    int pos, cnt;
    pos = 0;
    cnt = 0;
    for (int i = 0; i < GROUP; i++) syms[i] = 0;
    for (int i = 0; i < GROUP; i++) begin
      int sym;
      sym = -1;
      for (int s = 0; s < NUM_IDX && sym < 0; s++) begin
        bit ok;
        ok = (hlen[s] > 0) && (pos + hlen[s] <= limit);
        for (int b = 0; b < hlen[s]; b++)
          if (get_bit(stream, pos + b) != hcode[s][hlen[s] - 1 - b]) ok = 0;
        if (ok) sym = s;
      end
      if (sym < 0) break;
      syms[i] = sym;
      pos += hlen[sym];
      cnt++;
    end
    dbits = pos;
    return cnt;
  endfunction

  // ------------------------------------------------------ 2x reference
  function automatic logic [511:0] ref_compress2x(input logic [15:0] d [GROUP_2X]);
    real mn, mx, z, s, range;
    logic [15:0] zh, sh;
    int e;
    logic [511:0] blk;
    mn = h2r(d[0]);
    mx = mn;
    for (int i = 1; i < GROUP_2X; i++) begin
      if (h2r(d[i]) < mn) mn = h2r(d[i]);
      if (h2r(d[i]) > mx) mx = h2r(d[i]);
    end
    zh = r2h((mx + mn) / 2.0);
    z  = h2r(zh);
    range = mx - mn;
    e = -24;
    while (126.0 * pow2(e) < range) e++;
    s  = pow2(e);
    sh = r2h(s);
    blk = '0;
    for (int b = 0; b < GROUP_2X; b++) begin
      real q;
      int qi;
      q = (h2r(d[b]) - z) / s;
      qi = int'($floor(q + 0.5));
      if (qi > 63) qi = 63;
      if (qi < -64) qi = -64;
      blk[511 - 8 * b -: 8] = {(b < 16) ? sh[15 - b] : ((b < 32) ? zh[31 - b] : 1'b0), 7'(qi)};
    end
    return blk;
  endfunction

  function automatic void ref_decompress2x(input logic [511:0] blk, output logic [15:0] d [GROUP_2X]);
    logic [15:0] sh, zh;
    for (int b = 0; b < 16; b++) begin
      sh[15 - b] = blk[511 - 8 * b];
      zh[15 - b] = blk[511 - 8 * (b + 16)];
    end
    for (int b = 0; b < GROUP_2X; b++) begin
      logic [6:0] q;
      int qi;
      q  = blk[510 - 8 * b -: 7];
      qi = q[6] ? int'(q) - 128 : int'(q);
      d[b] = r2h(real'(qi) * h2r(sh) + h2r(zh));
    end
  endfunction

  // -------------------------------------------------- RTL-side helpers
  // load the model's metadata into the RTL table types
  function automatic void meta_to_rtl(input meta_t m,
                                      output fp16_t cent [NUM_KP][NUM_CENT],
                                      output hf_code_t books [NUM_KP][NUM_HF][NUM_IDX],
                                      output kp_code_t kps [NUM_KP]);
    for (int p = 0; p < NUM_KP; p++) begin
      for (int c = 0; c < NUM_CENT; c++) cent[p][c] = m.cent[p][c];
      for (int h = 0; h < NUM_HF; h++)
        for (int s = 0; s < NUM_IDX; s++) begin
          books[p][h][s].code = m.hcode[p][h][s];
          books[p][h][s].len  = 4'(m.hlen[p][h][s]);
        end
      kps[p].code = m.kcode[p];
      kps[p].len  = 4'(m.klen[p]);
    end
  endfunction

endpackage
