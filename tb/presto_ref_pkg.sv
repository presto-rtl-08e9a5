// presto_ref_pkg: a plain behavioural model of HERA and Rubato stream-key
// generation, written independently of the RTL, for the testbenches.
//
// It works on the whole state as an array, applies each layer by its
// definition (MixColumns on columns, MixRows on rows, Cube, Feistel, ARK,
// truncation, AGN) and draws round constants and noise from its own AES-128
// (byte-wise, S-box found by searching for the multiplicative inverse). The
// XOF conventions are the ones the RTL documents: AES-128 in counter mode on
// {nonce, domain bit, 63-bit counter}; round constants are the 25-bit chunks
// of each block from bit 0 that are below q; noise samples come from the two
// 64-bit halves of each block by inverse CDF.
package presto_ref_pkg;

  localparam longint unsigned QREF = 64'd33292289;
  localparam int QWR = 25;

  typedef longint unsigned vec_t[];

  // uniform residue mod q (two 32-bit draws, so the bias is negligible)
  function automatic longint unsigned rand_elem();
    longint unsigned u;
    u = {32'($urandom), 32'($urandom)};
    return u % QREF;
  endfunction

  // ------------------------------------------------------------ AES-128 --
  function automatic byte unsigned gf_mul(byte unsigned a, byte unsigned b);
    byte unsigned p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      a = (a[7]) ? byte'((a << 1) ^ 8'h1b) : byte'(a << 1);
      b = b >> 1;
    end
    return p;
  endfunction

  function automatic byte unsigned sbox(byte unsigned x);
    byte unsigned inv = 0, s;
    if (x != 0)
      for (int y = 1; y < 256; y++)
        if (gf_mul(x, byte'(y)) == 1) inv = byte'(y);
    s = inv;
    for (int i = 1; i <= 4; i++) s ^= byte'((inv << i) | (inv >> (8 - i)));
    return s ^ 8'h63;
  endfunction

  function automatic logic [127:0] aes_enc(logic [127:0] key, logic [127:0] pt);
    byte unsigned st[16], k[16], t[16], sb[256], rc;
    byte unsigned a0, a1, a2, a3;
    for (int i = 0; i < 256; i++) sb[i] = sbox(byte'(i));
    for (int i = 0; i < 16; i++) begin
      st[i] = pt[127-8*i -: 8];
      k[i]  = key[127-8*i -: 8];
    end
    rc = 1;
    for (int i = 0; i < 16; i++) st[i] ^= k[i];
    for (int r = 1; r <= 10; r++) begin
      // SubBytes + ShiftRows (byte i = row i%4, column i/4)
      for (int i = 0; i < 16; i++) t[i] = sb[st[((i/4 + i%4) % 4)*4 + i%4]];
      // MixColumns
      if (r != 10)
        for (int c = 0; c < 4; c++) begin
          a0 = t[4*c]; a1 = t[4*c+1]; a2 = t[4*c+2]; a3 = t[4*c+3];
          t[4*c]   = gf_mul(a0,2) ^ gf_mul(a1,3) ^ a2 ^ a3;
          t[4*c+1] = a0 ^ gf_mul(a1,2) ^ gf_mul(a2,3) ^ a3;
          t[4*c+2] = a0 ^ a1 ^ gf_mul(a2,2) ^ gf_mul(a3,3);
          t[4*c+3] = gf_mul(a0,3) ^ a1 ^ a2 ^ gf_mul(a3,2);
        end
      // next round key
      k[0] ^= sb[k[13]] ^ rc; k[1] ^= sb[k[14]]; k[2] ^= sb[k[15]]; k[3] ^= sb[k[12]];
      for (int i = 4; i < 16; i++) k[i] ^= k[i-4];
      rc = gf_mul(rc, 2);
      for (int i = 0; i < 16; i++) st[i] = t[i] ^ k[i];
    end
    for (int i = 0; i < 16; i++) aes_enc[127-8*i -: 8] = st[i];
  endfunction

  // ------------------------------------------------------------ samplers --
  function automatic vec_t gen_rc(logic [127:0] key, logic [63:0] nonce, int total);
    vec_t r = new[total];
    int n = 0;
    logic [127:0] b;
    longint unsigned c;
    for (longint ctr = 0; n < total; ctr++) begin
      b = aes_enc(key, {nonce, 1'b0, 63'(ctr)});
      for (int j = 0; j < 5 && n < total; j++) begin
        c = 64'(b[25*j +: 25]);
        if (c < QREF) begin r[n] = c; n++; end
      end
    end
    return r;
  endfunction

  function automatic vec_t gen_noise(logic [127:0] key, logic [63:0] nonce,
                                     longint unsigned cdf[], int tail, int total);
    vec_t r = new[total];
    logic [127:0] b;
    logic [63:0] u;
    int cnt;
    for (int s = 0; s < total; s++) begin
      if (s % 2 == 0) b = aes_enc(key, {nonce, 1'b1, 63'(s / 2)});
      u = (s % 2 == 0) ? b[63:0] : b[127:64];
      cnt = 0;
      foreach (cdf[i]) if (u >= cdf[i]) cnt++;
      r[s] = (cnt >= tail) ? longint'(cnt - tail) : QREF - longint'(tail - cnt);
    end
    return r;
  endfunction

  // floor(2^64 * P(E <= i - tail)) for a discrete Gaussian of width sigma
  function automatic void make_cdf(real sigma, int tail, ref longint unsigned cdf[]);
    real w[], tot, acc, hi;
    longint unsigned h, l;
    w = new[2*tail+1];
    tot = 0.0;
    for (int k = -tail; k <= tail; k++) begin
      w[k+tail] = $exp(-(k*k) / (2.0*sigma*sigma));
      tot += w[k+tail];
    end
    cdf = new[2*tail];
    acc = 0.0;
    for (int i = 0; i < 2*tail; i++) begin
      acc += w[i] / tot;
      if (acc >= 1.0) acc = 1.0 - 1.0e-15;
      hi = acc * 4294967296.0;
      h = longint'($floor(hi));
      l = longint'($floor((hi - $floor(hi)) * 4294967296.0));
      cdf[i] = (h << 32) | l;
    end
  endfunction

  // ------------------------------------------------------------ cipher ----
  function automatic longint unsigned mv(int v, int i, int j);
    int r4[4] = '{2,3,1,1};
    int r6[6] = '{4,2,4,3,1,1};
    int r8[8] = '{5,3,4,3,6,2,1,1};
    int d = (j - i + v) % v;
    return (v == 4) ? r4[d] : (v == 6) ? r6[d] : r8[d];
  endfunction

  function automatic vec_t mix_columns(vec_t x, int v);
    vec_t y = new[v*v];
    for (int c = 0; c < v; c++)
      for (int i = 0; i < v; i++) begin
        y[i*v+c] = 0;
        for (int j = 0; j < v; j++) y[i*v+c] = (y[i*v+c] + mv(v,i,j) * x[j*v+c]) % QREF;
      end
    return y;
  endfunction

  function automatic vec_t mix_rows(vec_t x, int v);
    vec_t y = new[v*v];
    for (int c = 0; c < v; c++)
      for (int i = 0; i < v; i++) begin
        y[c*v+i] = 0;
        for (int j = 0; j < v; j++) y[c*v+i] = (y[c*v+i] + mv(v,i,j) * x[c*v+j]) % QREF;
      end
    return y;
  endfunction

  function automatic vec_t nonlin(vec_t x, bit rubato);
    vec_t y = new[x.size()];
    for (int i = 0; i < x.size(); i++)
      if (rubato) y[i] = (i == 0) ? x[0] : (x[i] + (x[i-1] * x[i-1]) % QREF) % QREF;
      else        y[i] = (((x[i] * x[i]) % QREF) * x[i]) % QREF;
    return y;
  endfunction

  function automatic vec_t ark_f(vec_t x, vec_t k, vec_t rc, int off, int cnt);
    vec_t y = new[x.size()];
    for (int i = 0; i < x.size(); i++)
      y[i] = (i < cnt) ? (x[i] + (k[i] * rc[off+i]) % QREF) % QREF : x[i];
    return y;
  endfunction

  // Full key stream: R rounds, v x v state, first l outputs (+ noise if rubato)
  function automatic vec_t keystream(bit rubato, int v, int rounds, int l, vec_t key,
                                     vec_t rc, vec_t noise);
    int n = v*v;
    vec_t x = new[n], y;
    for (int i = 0; i < n; i++) x[i] = i + 1;
    x = ark_f(x, key, rc, 0, n);
    for (int r = 1; r < rounds; r++) begin
      x = nonlin(mix_rows(mix_columns(x, v), v), rubato);
      x = ark_f(x, key, rc, r*n, n);
    end
    x = nonlin(mix_rows(mix_columns(x, v), v), rubato);
    x = mix_rows(mix_columns(x, v), v);
    x = ark_f(x, key, rc, rounds*n, l);
    y = new[l];
    for (int i = 0; i < l; i++) y[i] = rubato ? (x[i] + noise[i]) % QREF : x[i];
    return y;
  endfunction

endpackage
