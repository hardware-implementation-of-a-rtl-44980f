// vlc_tb_pkg: reference models shared by the receiver testbenches.
//
// It models what sits in front of the receiver (the microcontroller
// transmitter: scrambler x^15+x^14+1, non-systematic or systematic (256,158)
// polar encoder, OOK levels plus noise) and gives bit-exact reference
// versions of the receiver's arithmetic: the soft-decision mapping
// (thresholds, table, 9-to-5-bit scaling) and a recursive successive-
// cancellation decoder with the same min-sum f, saturating 7-bit g and
// decision rule. The models are written independently of the RTL (recursion
// instead of layers, integer arithmetic instead of bit vectors).
package vlc_tb_pkg;
  import vlc_pkg::*;

  typedef int intq_t [$];
  typedef bit bitq_t [$];

  // ---------------- polar transform, recursive: x = [enc(a)^enc(b), enc(b)]
  function automatic bitq_t enc_rec(input bitq_t u);
    bitq_t a, b, xa, xb, x;
    int h;
    if (u.size() == 1) return u;
    h = u.size() / 2;
    for (int i = 0; i < h; i++) begin a.push_back(u[i]); b.push_back(u[i+h]); end
    xa = enc_rec(a);
    xb = enc_rec(b);
    for (int i = 0; i < h; i++) x.push_back(xa[i] ^ xb[i]);
    for (int i = 0; i < h; i++) x.push_back(xb[i]);
    return x;
  endfunction

  function automatic word_t enc_word(input word_t u);
    bitq_t q, x;
    word_t r;
    for (int i = 0; i < int'(N); i++) q.push_back(u[i]);
    x = enc_rec(q);
    for (int i = 0; i < int'(N); i++) r[i] = x[i];
    return r;
  endfunction

  // ---------------- scrambler (same LFSR on both sides)
  function automatic msg_t scramble(input msg_t m, input logic [14:0] seed = 15'h7FFF);
    logic [14:0] s;
    logic p;
    msg_t r;
    s = seed;
    for (int i = 0; i < int'(K); i++) begin
      p = s[14] ^ s[13];
      s = {s[13:0], p};
      r[i] = m[i] ^ p;
    end
    return r;
  endfunction

  // ---------------- polar encoders of the transmitter
  function automatic word_t place(input msg_t m);
    word_t v;
    int k;
    v = '0; k = 0;
    for (int i = 0; i < int'(N); i++)
      if (INFO_MASK[i]) begin v[i] = m[k]; k++; end
    return v;
  endfunction

  function automatic msg_t pick(input word_t w);
    msg_t m;
    int k;
    m = '0; k = 0;
    for (int i = 0; i < int'(N); i++)
      if (INFO_MASK[i]) begin m[k] = w[i]; k++; end
    return m;
  endfunction

  function automatic word_t nspe(input msg_t m);
    return enc_word(place(m));
  endfunction

  // systematic: encode, clear the frozen positions, encode again
  function automatic word_t spe(input msg_t m);
    return enc_word(enc_word(place(m)) & INFO_MASK);
  endfunction

  // ---------------- channel: bit 0 -> high level, bit 1 -> low level,
  // so that a high sample gives a positive LLR (LLR = ln P0/P1).
  function automatic adc_t ook_sample(input bit b, input int amp, input int noise);
    int v, n;
    n = 0;
    for (int i = 0; i < 4; i++) n += int'($urandom_range(0, 2 * noise)) - noise;
    v = 2048 + (b ? -amp : amp) + n / 2;
    if (v < 0) v = 0;
    if (v > 4095) v = 4095;
    return adc_t'(v);
  endfunction

  // ---------------- soft-decision reference
  function automatic int ref_thr(input int snr, input int k);
    return 2048 + (k - 3) * (320 - 16 * snr);
  endfunction

  function automatic int ref_level(input int sample, input int snr);
    int lvl;
    lvl = 0;
    for (int k = 0; k < 7; k++) if (sample >= ref_thr(snr, k)) lvl = k + 1;
    return lvl;
  endfunction

  // paper table * 128, rounded
  function automatic int ref_llr9(input int lvl);
    real t [8] = '{-1.1943, -0.3547, -0.2116, -0.0702, 0.0656, 0.2185, 0.3630, 1.2017};
    real v;
    v = t[lvl] * 128.0;
    return int'(v);   // real-to-int conversion rounds to nearest
  endfunction

  function automatic int ref_scale(input int v9);
    int r;
    r = v9 + 4;
    r = (r >= 0) ? r / 8 : -((-r + 7) / 8);   // floor division by 8
    if (r > 15) r = 15;
    if (r < -15) r = -15;
    return r;
  endfunction

  // ---------------- reference SC decoder
  function automatic int sat7(input int v);
    return (v > 63) ? 63 : (v < -63) ? -63 : v;
  endfunction

  function automatic int f_ms(input int a, input int b);
    int m;
    m = ((a < 0 ? -a : a) < (b < 0 ? -b : b)) ? (a < 0 ? -a : a) : (b < 0 ? -b : b);
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  function automatic bitq_t sc_rec(input intq_t l, input int base, ref bit uh [N]);
    intq_t la, lb;
    bitq_t xl, xr, x;
    int h;
    if (l.size() == 1) begin
      bit b;
      b = INFO_MASK[base] ? (l[0] < 0) : 1'b0;
      uh[base] = b;
      x.push_back(b);
      return x;
    end
    h = l.size() / 2;
    for (int i = 0; i < h; i++) la.push_back(f_ms(l[i], l[i+h]));
    xl = sc_rec(la, base, uh);
    for (int i = 0; i < h; i++) lb.push_back(sat7(xl[i] ? l[i+h] - l[i] : l[i+h] + l[i]));
    xr = sc_rec(lb, base + h, uh);
    for (int i = 0; i < h; i++) x.push_back(xl[i] ^ xr[i]);
    for (int i = 0; i < h; i++) x.push_back(xr[i]);
    return x;
  endfunction

  // decoded message for 5-bit channel LLRs llr[0..255]
  function automatic msg_t ref_decode(input int llr [N], input bit systematic);
    intq_t l;
    bit uh [N];
    bitq_t x;
    word_t w;
    for (int i = 0; i < int'(N); i++) l.push_back(llr[i]);
    x = sc_rec(l, 0, uh);
    for (int i = 0; i < int'(N); i++) w[i] = systematic ? x[i] : uh[i];
    return pick(w);
  endfunction

endpackage
