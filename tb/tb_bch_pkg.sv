// tb_bch_pkg: reference models for the product-decoder testbenches.
//
// Everything here is written independently of the RTL: GF(2^8) arithmetic
// through log/antilog tables (the RTL uses shift-and-add multipliers), a
// systematic BCH encoder built on the generator polynomial
// g(x) = m1(x) m3(x) m5(x), a bounded-distance decoder that solves the
// Peterson equations with true divisions and finds roots by Horner
// evaluation, the iBDD-SR block schedule, and a quantized BI-AWGN channel
// giving a hard-decision bit and a reliability bit per code bit.
// Call tb_init() once before use.
package tb_bch_pkg;

  typedef bit [254:0] word_t;
  typedef word_t      blk_t [255];

  int unsigned gexp [0:509];
  int unsigned glog [0:255];
  bit [24:0]   gpoly;            // generator polynomial, bit k = coeff of x^k

  function automatic int unsigned mul(int unsigned a, int unsigned b);
    if (a == 0 || b == 0) return 0;
    return gexp[glog[a] + glog[b]];
  endfunction

  function automatic int unsigned dvd(int unsigned a, int unsigned b);
    if (a == 0) return 0;
    return gexp[(glog[a] + 255 - glog[b]) % 255];
  endfunction

  function automatic int unsigned apow(int unsigned e);
    return gexp[e % 255];
  endfunction

  function automatic void tb_init();
    int unsigned v;
    int unsigned g [0:24];
    int unsigned deg;
    int unsigned e;
    v = 1;
    for (int i = 0; i < 510; i++) begin
      gexp[i] = v;
      v = v << 1;
      if (v & 256) v = v ^ 'h11D;
    end
    glog[0] = 0;
    for (int i = 0; i < 255; i++) glog[gexp[i]] = i;
    // g(x) = product of (x + alpha^e) over the cyclotomic cosets of 1, 3, 5
    for (int i = 0; i < 25; i++) g[i] = 0;
    g[0] = 1;
    deg = 0;
    for (int c = 0; c < 3; c++) begin
      e = 2 * c + 1;
      for (int r = 0; r < 8; r++) begin
        // multiply g by (x + alpha^e)
        for (int k = int'(deg) + 1; k >= 1; k--) g[k] = g[k-1] ^ mul(g[k], apow(e));
        g[0] = mul(g[0], apow(e));
        deg++;
        e = (2 * e) % 255;
      end
    end
    for (int k = 0; k < 25; k++) begin
      if (g[k] > 1) $fatal(1, "generator polynomial not binary");
      gpoly[k] = g[k][0];
    end
  endfunction

  // Systematic encoding of an n-bit word: bits 24..n-1 carry the message,
  // bits 0..23 the remainder of x^24 m(x) divided by g(x).
  function automatic word_t encode(word_t msg_word, int n);
    word_t     w;
    bit [23:0] rem;
    bit        fb;
    w = msg_word;
    for (int j = 0; j < 24; j++) w[j] = 0;
    for (int j = n; j < 255; j++) w[j] = 0;
    rem = 0;
    for (int j = n - 1; j >= 24; j--) begin
      fb  = w[j] ^ rem[23];
      rem = {rem[22:0], 1'b0};
      if (fb) rem = rem ^ gpoly[23:0];
    end
    for (int j = 0; j < 24; j++) w[j] = rem[j];
    return w;
  endfunction

  function automatic void syndromes(word_t w, int n, output int unsigned s1,
                                    output int unsigned s3, output int unsigned s5);
    s1 = 0; s3 = 0; s5 = 0;
    for (int j = 0; j < n; j++) if (w[j]) begin
      s1 ^= apow(j); s3 ^= apow(3 * j); s5 ^= apow(5 * j);
    end
  endfunction

  // Bounded-distance decoding. status: 0 zero syndrome, 1 corrected,
  // 2 failure (left unchanged). err holds the positions to flip.
  function automatic void bdd(word_t w, int n, output word_t err, output int status);
    int unsigned s1, s3, s5, d, l1, l2, l3, v, x, deg, cnt;
    err = '0;
    syndromes(w, n, s1, s3, s5);
    if (s1 == 0 && s3 == 0 && s5 == 0) begin status = 0; return; end
    d = mul(mul(s1, s1), s1) ^ s3;
    if (d == 0) begin
      if (s1 != 0 && s5 == mul(mul(mul(s1, s1), mul(s1, s1)), s1)) begin
        l1 = s1; l2 = 0; l3 = 0;
      end else begin status = 2; return; end
    end else begin
      l1 = s1;
      l2 = dvd(mul(mul(s1, s1), s3) ^ s5, d);
      l3 = d ^ mul(s1, l2);
    end
    deg = (l3 != 0) ? 3 : (l2 != 0) ? 2 : 1;
    cnt = 0;
    for (int j = 0; j < n; j++) begin
      x = apow(255 - j);
      v = mul(mul(mul(l3, x) ^ l2, x) ^ l1, x) ^ 1;   // Horner
      if (v == 0) begin err[j] = 1; cnt++; end
    end
    if (cnt != deg) begin err = '0; status = 2; end
    else status = 1;
  endfunction

  // iBDD-SR: iters iterations, the last hd_iters of them plain iBDD.
  function automatic void ibdd_sr(ref blk_t b, input blk_t wk, input int n,
                                  input int iters, input int hd_iters);
    word_t e;
    int    st;
    bit    sr;
    word_t col;
    for (int it = 0; it < iters; it++) begin
      sr = (it + hd_iters) < iters;
      for (int i = 0; i < n; i++) begin
        bdd(b[i], n, e, st);
        if (sr) e = e & wk[i];
        b[i] ^= e;
      end
      for (int j = 0; j < n; j++) begin
        col = '0;
        for (int i = 0; i < n; i++) col[i] = b[i][j];
        bdd(col, n, e, st);
        for (int i = 0; i < n; i++) if (e[i] && (!sr || wk[i][j])) b[i][j] ^= 1'b1;
      end
    end
  endfunction

  // Random product codeword of n x n bits.
  function automatic void random_codeword(int n, output blk_t c);
    word_t col;
    for (int i = 0; i < 255; i++) c[i] = '0;
    for (int i = 24; i < n; i++) begin
      word_t m;
      for (int j = 0; j < 255; j += 32) m[j +: 32] = $urandom;
      c[i] = encode(m, n);
    end
    for (int j = 0; j < n; j++) begin
      col = '0;
      for (int i = 24; i < n; i++) col[i] = c[i][j];
      col = encode(col, n);
      for (int i = 0; i < n; i++) c[i][j] = col[i];
    end
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BI-AWGN channel with BPSK (0 -> +1, 1 -> -1) at the given Eb/N0 in dB for
  // code rate rate, quantized to a hard decision and a "wk" bit
  // (|y| below the threshold w).
  function automatic void channel(input blk_t c, input int n, input real ebn0_db,
                                  input real rate, input real w,
                                  output blk_t hd, output blk_t wk);
    real sigma, y;
    sigma = $sqrt(1.0 / (2.0 * rate * (10.0 ** (ebn0_db / 10.0))));
    for (int i = 0; i < 255; i++) begin hd[i] = '0; wk[i] = '0; end
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        y = (c[i][j] ? -1.0 : 1.0) + sigma * gauss();
        hd[i][j]   = (y < 0.0);
        wk[i][j] = (y < w) && (y > -w);
      end
  endfunction

endpackage
