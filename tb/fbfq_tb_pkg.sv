// fbfq_tb_pkg: reference models shared by the F-BFQ testbenches.
//
// Generates random Q2_K, Q3_K and Q8_K super-blocks as byte images in the GGUF
// layouts, decodes them the way the reference CPU dequantisation does (whole
// super-block to 256 integer weights, scales unpacked with the 32-bit mask
// trick) and computes the expected dot products in double precision. None of
// this reuses the RTL's slicing formulas.
package fbfq_tb_pkg;
  import fbfq_pkg::*;

  typedef byte unsigned sb_t[MAX_SB_BYTES];

  function automatic real f32_to_real(input logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    m = (e >= 0) ? m * real'(64'd1 << e) : m / real'(64'd1 << (-e));
    return f[31] ? -m : m;
  endfunction

  function automatic real f16_to_real(input logic [15:0] h);
    real m;
    int  e;
    if (h[14:10] == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    m = (e >= 0) ? m * real'(64'd1 << e) : m / real'(64'd1 << (-e));
    return h[15] ? -m : m;
  endfunction

  // random positive fp16 in about [2^-6, 2)
  function automatic logic [15:0] rand_f16();
    return {1'b0, 5'(9 + $urandom_range(0, 6)), 10'($urandom)};
  endfunction

  // random fp32 of either sign in about [2^-8, 4)
  function automatic logic [31:0] rand_f32();
    return {1'($urandom), 8'(119 + $urandom_range(0, 9)), 23'($urandom)};
  endfunction

  function automatic sb_t gen_q2();
    sb_t s;
    logic [15:0] d, dm;
    foreach (s[i]) s[i] = 0;
    for (int i = 0; i < 80; i++) s[i] = 8'($urandom);   // scales[16], qs[64]
    d  = rand_f16();
    dm = rand_f16();
    s[80] = d[7:0];  s[81] = d[15:8];
    s[82] = dm[7:0]; s[83] = dm[15:8];
    return s;
  endfunction

  function automatic sb_t gen_q3();
    sb_t s;
    logic [15:0] d;
    foreach (s[i]) s[i] = 0;
    for (int i = 0; i < 108; i++) s[i] = 8'($urandom);  // hmask, qs, scales
    d = rand_f16();
    s[108] = d[7:0]; s[109] = d[15:8];
    return s;
  endfunction

  function automatic sb_t gen_q8();
    sb_t s;
    logic [31:0] d;
    int sum;
    foreach (s[i]) s[i] = 0;
    d = rand_f32();
    for (int b = 0; b < 4; b++) s[b] = d[8*b +: 8];
    for (int i = 0; i < 256; i++) s[4 + i] = 8'($urandom);
    for (int j = 0; j < 16; j++) begin
      sum = 0;
      for (int i = 0; i < 16; i++) sum += int'($signed(s[4 + 16*j + i]));
      s[260 + 2*j] = 8'(sum);
      s[261 + 2*j] = 8'(sum >> 8);
    end
    return s;
  endfunction

  // ---- dequantisation-style decoding ----
  typedef int q_t[256];
  typedef int sc_t[16];

  function automatic q_t dec_weights(input sb_t s, input bit q3);
    q_t q;
    int qs_off;
    qs_off = q3 ? 32 : 16;
    for (int n = 0; n < 2; n++)
      for (int j = 0; j < 4; j++)
        for (int l = 0; l < 32; l++) begin
          int idx, v;
          idx = 128*n + 32*j + l;
          v = (int'(s[qs_off + 32*n + l]) >> (2*j)) & 3;
          if (q3 && (((int'(s[l]) >> (4*n + j)) & 1) == 0)) v -= 4;
          q[idx] = v;
        end
    return q;
  endfunction

  // Q3_K scales, unpacked with the reference 32-bit mask sequence
  function automatic sc_t dec_q3_scales(input sb_t s);
    sc_t sc;
    logic [31:0] aux[4];
    logic [31:0] tmp;
    for (int w = 0; w < 3; w++)
      aux[w] = {s[96+4*w+3], s[96+4*w+2], s[96+4*w+1], s[96+4*w]};
    tmp    = aux[2];
    aux[2] = ((aux[0] >> 4) & 32'h0f0f0f0f) | (((tmp >> 4) & 32'h03030303) << 4);
    aux[3] = ((aux[1] >> 4) & 32'h0f0f0f0f) | (((tmp >> 6) & 32'h03030303) << 4);
    aux[0] = (aux[0] & 32'h0f0f0f0f) | (((tmp >> 0) & 32'h03030303) << 4);
    aux[1] = (aux[1] & 32'h0f0f0f0f) | (((tmp >> 2) & 32'h03030303) << 4);
    for (int j = 0; j < 16; j++) sc[j] = int'(aux[j/4][8*(j%4) +: 8]);
    return sc;
  endfunction

  function automatic int q8_val(input sb_t y, input int i);
    return int'($signed(y[4 + i]));
  endfunction

  function automatic int q8_bsum(input sb_t y, input int j);
    return int'($signed({y[261 + 2*j], y[260 + 2*j]}));
  endfunction

  function automatic real q8_d(input sb_t y);
    return f32_to_real({y[3], y[2], y[1], y[0]});
  endfunction

  // expected dot product of one weight SB with one input SB; mag returns the
  // sum of magnitudes of the terms, used to size the comparison tolerance
  function automatic real ref_dot(input sb_t w, input sb_t y, input bit q3, output real mag);
    q_t  q;
    sc_t sc;
    real d, r;
    longint isum, msum, bs;
    q    = dec_weights(w, q3);
    isum = 0;
    msum = 0;
    mag  = 0.0;
    if (q3) sc = dec_q3_scales(w);
    for (int j = 0; j < 16; j++) begin
      bs = 0;
      for (int i = 0; i < 16; i++) bs += q[16*j + i] * q8_val(y, 16*j + i);
      if (q3) isum += (sc[j] - 32) * bs;
      else begin
        isum += (int'(w[j]) & 15) * bs;
        msum += (int'(w[j]) >> 4) * q8_bsum(y, j);
      end
    end
    if (q3) begin
      d   = f16_to_real({w[109], w[108]}) * q8_d(y);
      r   = d * real'(isum);
      mag = (r < 0) ? -r : r;
    end else begin
      real a, b;
      a   = f16_to_real({w[81], w[80]}) * q8_d(y) * real'(isum);
      b   = f16_to_real({w[83], w[82]}) * q8_d(y) * real'(msum);
      r   = a - b;
      mag = ((a < 0) ? -a : a) + ((b < 0) ? -b : b);
    end
    return r;
  endfunction

  // expected contents of cache row b of a weight SB
  function automatic w_row_t ref_w_row(input sb_t w, input bit q3, input int b);
    w_row_t r;
    q_t  q;
    sc_t sc;
    q = dec_weights(w, q3);
    r = '0;
    for (int i = 0; i < 16; i++) begin
      int v;
      v = q[16*b + i];
      if (q3) begin
        r.w_low[i]  = (v >= 0);
        r.w_high[i] = 2'((v >= 0) ? v : v + 4);
      end else begin
        r.w_high[i] = 2'(v);
      end
    end
    if (q3) begin
      sc = dec_q3_scales(w);
      r.w_scales = 8'(sc[b]);
    end else begin
      r.w_scales = w[b];
    end
    return r;
  endfunction

  function automatic i_row_t ref_i_row(input sb_t y, input int b);
    i_row_t r;
    for (int i = 0; i < 16; i++) r.i_data[i] = y[4 + 16*b + i];
    r.i_bsums = 16'(q8_bsum(y, b));
    return r;
  endfunction

  // number of stream words for one SB (padded)
  function automatic int words_of(input sbkind_e k);
    return int'(sb_words(k, N_FIFO));
  endfunction

  function automatic logic [31:0] sb_word(input sb_t s, input int w);
    return {s[4*w+3], s[4*w+2], s[4*w+1], s[4*w]};
  endfunction

  function automatic bit close(input real got, input real exp, input real mag);
    real diff;
    diff = got - exp;
    if (diff < 0) diff = -diff;
    return diff <= 1e-5 * mag + 1e-30;
  endfunction

endpackage
