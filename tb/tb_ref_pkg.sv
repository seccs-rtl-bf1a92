// tb_ref_pkg -- reference models used by the testbenches.
//
// Written independently of the RTL, straight from the algorithm definitions:
//  - SHA-256: round constants and initial value are computed here from the
//    cube and square roots of the first primes (real arithmetic), then a
//    textbook 64-word-schedule compression and word-level padding.
//  - Trivium: bit-serial, with the state indexed s[1..288] as in the cipher
//    specification.
//  - Arbiter PUF: the additive delay model with the same per-device weight
//    draw as the PUF model (this is the definition of the simulated chip).
package tb_ref_pkg;

  typedef logic [31:0] w32;
  typedef logic [7:0][31:0] digest_t;

  function automatic w32 ror(input w32 x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic bit is_prime(input int n);
    for (int d = 2; d * d <= n; d++) if (n % d == 0) return 0;
    return 1;
  endfunction

  // frac(p^(1/e)) * 2^32
  function automatic w32 root_frac(input int p, input real e);
    real r, f;
    r = $pow(real'(p), 1.0 / e);
    f = (r - $floor(r)) * 4294967296.0;
    return w32'(longint'($floor(f)));
  endfunction

  function automatic void sha_consts(output w32 k[64], output w32 h0[8]);
    int n, p;
    n = 0; p = 2;
    while (n < 64) begin
      if (is_prime(p)) begin
        k[n] = root_frac(p, 3.0);
        if (n < 8) h0[n] = root_frac(p, 2.0);
        n++;
      end
      p++;
    end
  endfunction

  function automatic digest_t sha_compress(input digest_t chain, input logic [15:0][31:0] blk);
    w32 k[64], h0[8], w[64], a, b, c, d, e, f, g, h, t1, t2, s0, s1;
    digest_t r;
    sha_consts(k, h0);
    for (int t = 0; t < 16; t++) w[t] = blk[t];
    for (int t = 16; t < 64; t++) begin
      s0 = ror(w[t-15], 7) ^ ror(w[t-15], 18) ^ (w[t-15] >> 3);
      s1 = ror(w[t-2], 17) ^ ror(w[t-2], 19) ^ (w[t-2] >> 10);
      w[t] = w[t-16] + s0 + w[t-7] + s1;
    end
    a = chain[0]; b = chain[1]; c = chain[2]; d = chain[3];
    e = chain[4]; f = chain[5]; g = chain[6]; h = chain[7];
    for (int t = 0; t < 64; t++) begin
      t1 = h + (ror(e, 6) ^ ror(e, 11) ^ ror(e, 25)) + ((e & f) ^ (~e & g)) + k[t] + w[t];
      t2 = (ror(a, 2) ^ ror(a, 13) ^ ror(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
      h = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
    end
    r[0] = chain[0] + a; r[1] = chain[1] + b; r[2] = chain[2] + c; r[3] = chain[3] + d;
    r[4] = chain[4] + e; r[5] = chain[5] + f; r[6] = chain[6] + g; r[7] = chain[7] + h;
    return r;
  endfunction

  function automatic digest_t sha_iv();
    w32 k[64], h0[8];
    digest_t r;
    sha_consts(k, h0);
    for (int i = 0; i < 8; i++) r[i] = h0[i];
    return r;
  endfunction

  // SHA-256 of a message made of whole 32-bit words (big-endian words).
  function automatic digest_t sha256_words(input w32 msg[$]);
    w32 m[$];
    longint unsigned nbits;
    digest_t hsh;
    logic [15:0][31:0] blk;
    m = msg;
    nbits = 64'(msg.size()) * 32;
    m.push_back(32'h8000_0000);
    while ((m.size() % 16) != 14) m.push_back(32'h0);
    m.push_back(nbits[63:32]);
    m.push_back(nbits[31:0]);
    hsh = sha_iv();
    for (int b = 0; b < m.size() / 16; b++) begin
      for (int i = 0; i < 16; i++) blk[i] = m[16*b + i];
      hsh = sha_compress(hsh, blk);
    end
    return hsh;
  endfunction

  // Keyed MAC of the SECCS design: SHA-256(K || 0-pad to 512 bits || msg).
  function automatic digest_t mac_ref(input logic [511:0] key_msb_first, input int key_bits,
                                      input w32 msg[$]);
    w32 m[$];
    logic [511:0] kb;
    kb = key_msb_first << (512 - key_bits);
    for (int i = 0; i < 16; i++) m.push_back(kb[511 - 32*i -: 32]);
    foreach (msg[i]) m.push_back(msg[i]);
    return sha256_words(m);
  endfunction

  // Trivium keystream, nbits bits, key[i-1] = K_i, iv[i-1] = IV_i.
  function automatic void trivium_bits(input logic [79:0] key, input logic [79:0] iv,
                                       input int nbits, output bit z[$]);
    bit s[1:288];
    bit t1, t2, t3, zz;
    z.delete();
    for (int i = 1; i <= 288; i++) s[i] = 0;
    for (int i = 1; i <= 80; i++) s[i] = key[i-1];
    for (int i = 1; i <= 80; i++) s[93+i] = iv[i-1];
    s[286] = 1; s[287] = 1; s[288] = 1;
    for (int n = 0; n < 1152 + nbits; n++) begin
      t1 = s[66] ^ s[93];
      t2 = s[162] ^ s[177];
      t3 = s[243] ^ s[288];
      zz = t1 ^ t2 ^ t3;
      t1 = t1 ^ (s[91] & s[92]) ^ s[171];
      t2 = t2 ^ (s[175] & s[176]) ^ s[264];
      t3 = t3 ^ (s[286] & s[287]) ^ s[69];
      for (int i = 93; i >= 2; i--) s[i] = s[i-1];
      s[1] = t3;
      for (int i = 177; i >= 95; i--) s[i] = s[i-1];
      s[94] = t1;
      for (int i = 288; i >= 179; i--) s[i] = s[i-1];
      s[178] = t2;
      if (n >= 1152) z.push_back(zz);
    end
  endfunction

  // Keystream as 32-bit words, first bit in bit 0.
  function automatic void trivium_words(input logic [79:0] key, input logic [79:0] iv,
                                        input int nwords, output w32 ks[$]);
    bit z[$];
    w32 w;
    trivium_bits(key, iv, 32 * nwords, z);
    ks.delete();
    for (int i = 0; i < nwords; i++) begin
      for (int j = 0; j < 32; j++) w[j] = z[32*i + j];
      ks.push_back(w);
    end
  endfunction

  // Arbiter PUF response under the additive delay model.
  function automatic bit puf_ref(input logic [31:0] seed, input int n, input logic [63:0] chal);
    longint delta;
    bit neg;
    delta = puf_w(seed, n);
    neg = 0;
    for (int i = n - 1; i >= 0; i--) begin
      neg ^= chal[i];
      delta += neg ? -puf_w(seed, i) : puf_w(seed, i);
    end
    return delta > 0;
  endfunction

  function automatic longint puf_w(input logic [31:0] seed, input int i);
    logic [31:0] h;
    logic signed [15:0] v;
    h = seed ^ (32'(i) * 32'h9e37_79b9);
    h = h ^ (h >> 16); h = h * 32'h85eb_ca6b;
    h = h ^ (h >> 13); h = h * 32'hc2b2_ae35;
    h = h ^ (h >> 16);
    v = signed'(h[31:16] ^ h[15:0]);
    return longint'(v);
  endfunction

endpackage
