// tb_ref_pkg: reference models used by the testbenches.
//
// Written independently of the RTL and for clarity, not speed: SHA-1 and
// SHA-512 over byte queues of any length (full padding, any number of
// blocks, the whole 80-word message schedule expanded up front), modular
// multiplication with the simulator's wide '*' and '%', modular inversion by
// Fermat's little theorem (y^(m-2) mod m), and the hash-tree path function
// that the TPM's Update_Leaf sequence computes: t = hash(t || sibling) for
// each level, or t = hash(sibling || t) on the levels marked as having the
// sibling on the left.
package tb_ref_pkg;

  typedef byte unsigned bytes_t[$];

  function automatic bytes_t str_bytes(string s);
    bytes_t q;
    for (int i = 0; i < s.len(); i++) q.push_back(s[i]);
    return q;
  endfunction

  function automatic void push_bits(ref bytes_t q, input logic [1023:0] v, input int nbytes);
    for (int i = nbytes - 1; i >= 0; i--) q.push_back(v[8*i +: 8]);
  endfunction

  function automatic logic [31:0] rol32(logic [31:0] x, int n);
    return (x << n) | (x >> (32 - n));
  endfunction

  function automatic logic [63:0] ror64(logic [63:0] x, int n);
    return (x >> n) | (x << (64 - n));
  endfunction

  function automatic logic [159:0] sha1(bytes_t msg);
    bytes_t m = msg;
    longint unsigned bitlen = 64'(msg.size()) * 8;
    logic [31:0] h [5] = '{32'h67452301, 32'hEFCDAB89, 32'h98BADCFE, 32'h10325476, 32'hC3D2E1F0};
    m.push_back(8'h80);
    while (m.size() % 64 != 56) m.push_back(8'h00);
    for (int i = 7; i >= 0; i--) m.push_back(bitlen[8*i +: 8]);
    for (int blk = 0; blk < m.size() / 64; blk++) begin
      logic [31:0] w [80];
      logic [31:0] a, b, c, d, e, f, k, tmp;
      for (int t = 0; t < 16; t++)
        w[t] = {m[64*blk+4*t], m[64*blk+4*t+1], m[64*blk+4*t+2], m[64*blk+4*t+3]};
      for (int t = 16; t < 80; t++) w[t] = rol32(w[t-3] ^ w[t-8] ^ w[t-14] ^ w[t-16], 1);
      a = h[0]; b = h[1]; c = h[2]; d = h[3]; e = h[4];
      for (int t = 0; t < 80; t++) begin
        case (t / 20)
          0: begin f = (b & c) ^ (~b & d);           k = 32'h5A827999; end
          1: begin f = b ^ c ^ d;                    k = 32'h6ED9EBA1; end
          2: begin f = (b & c) ^ (b & d) ^ (c & d);  k = 32'h8F1BBCDC; end
          default: begin f = b ^ c ^ d;              k = 32'hCA62C1D6; end
        endcase
        tmp = rol32(a, 5) + f + e + k + w[t];
        e = d; d = c; c = rol32(b, 30); b = a; a = tmp;
      end
      h[0] += a; h[1] += b; h[2] += c; h[3] += d; h[4] += e;
    end
    return {h[0], h[1], h[2], h[3], h[4]};
  endfunction

  // SHA-512 round constants, derived at run time from the cube roots of the
  // first 80 primes (integer cube root of p * 2^192, low 64 bits).
  function automatic logic [63:0] k512(int t);
    int p = 1, cnt = -1;
    logic [255:0] target, lo, hi, mid;
    while (cnt != t) begin
      bit isp;
      p++;
      isp = 1;
      for (int d = 2; d * d <= p; d++) if (p % d == 0) isp = 0;
      if (isp) cnt++;
    end
    target = 256'(p) << 192;
    lo = 0;
    hi = 256'd1 << 70;
    while (lo < hi) begin
      mid = (lo + hi + 1) >> 1;
      if (mid * mid * mid <= target) lo = mid;
      else hi = mid - 1;
    end
    return lo[63:0];
  endfunction

  function automatic logic [511:0] sha512(bytes_t msg);
    bytes_t m = msg;
    longint unsigned bitlen = 64'(msg.size()) * 8;
    logic [63:0] kc [80];
    logic [63:0] h [8] = '{64'h6A09E667F3BCC908, 64'hBB67AE8584CAA73B, 64'h3C6EF372FE94F82B,
                          64'hA54FF53A5F1D36F1, 64'h510E527FADE682D1, 64'h9B05688C2B3E6C1F,
                          64'h1F83D9ABFB41BD6B, 64'h5BE0CD19137E2179};
    for (int t = 0; t < 80; t++) kc[t] = k512(t);
    m.push_back(8'h80);
    while (m.size() % 128 != 112) m.push_back(8'h00);
    for (int i = 0; i < 8; i++) m.push_back(8'h00);
    for (int i = 7; i >= 0; i--) m.push_back(bitlen[8*i +: 8]);
    for (int blk = 0; blk < m.size() / 128; blk++) begin
      logic [63:0] w [80];
      logic [63:0] a, b, c, d, e, f, g, hh, t1, t2;
      for (int t = 0; t < 16; t++)
        for (int j = 0; j < 8; j++) w[t][63-8*j -: 8] = m[128*blk + 8*t + j];
      for (int t = 16; t < 80; t++)
        w[t] = (ror64(w[t-2], 19) ^ ror64(w[t-2], 61) ^ (w[t-2] >> 6)) + w[t-7] +
               (ror64(w[t-15], 1) ^ ror64(w[t-15], 8) ^ (w[t-15] >> 7)) + w[t-16];
      a = h[0]; b = h[1]; c = h[2]; d = h[3]; e = h[4]; f = h[5]; g = h[6]; hh = h[7];
      for (int t = 0; t < 80; t++) begin
        t1 = hh + (ror64(e, 14) ^ ror64(e, 18) ^ ror64(e, 41)) + ((e & f) ^ (~e & g)) + kc[t] + w[t];
        t2 = (ror64(a, 28) ^ ror64(a, 34) ^ ror64(a, 39)) + ((a & b) ^ (a & c) ^ (b & c));
        hh = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
      end
      h[0] += a; h[1] += b; h[2] += c; h[3] += d; h[4] += e; h[5] += f; h[6] += g; h[7] += hh;
    end
    return {h[0], h[1], h[2], h[3], h[4], h[5], h[6], h[7]};
  endfunction

  // Modular arithmetic on up to 512-bit numbers.
  function automatic logic [511:0] mulmod(logic [511:0] a, logic [511:0] b, logic [511:0] m);
    logic [1023:0] p;
    p = 1024'(a) * 1024'(b);
    return 512'(p % 1024'(m));
  endfunction

  function automatic logic [511:0] powmod(logic [511:0] a, logic [511:0] e, logic [511:0] m);
    logic [511:0] r = 512'd1 % m;
    logic [511:0] base = a % m;
    for (int i = 511; i >= 0; i--) begin
      r = mulmod(r, r, m);
      if (e[i]) r = mulmod(r, base, m);
    end
    return r;
  endfunction

  function automatic logic [511:0] divmod(logic [511:0] x, logic [511:0] y, logic [511:0] m);
    return mulmod(x % m, powmod(y, m - 512'd2, m), m);
  endfunction

  // Hash-tree path: t = SHA-1(t || s) for each sibling s, or SHA-1(s || t)
  // where bit k of left is set.
  function automatic logic [159:0] ht_path(logic [159:0] leaf, logic [159:0] sib[$],
                                           logic [63:0] left = '0);
    logic [159:0] t = leaf;
    foreach (sib[k]) begin
      bytes_t q;
      if (left[k]) begin
        push_bits(q, 1024'(sib[k]), 20);
        push_bits(q, 1024'(t), 20);
      end else begin
        push_bits(q, 1024'(t), 20);
        push_bits(q, 1024'(sib[k]), 20);
      end
      t = sha1(q);
    end
    return t;
  endfunction

  // 160-bit random value
  function automatic logic [159:0] rand160();
    return {$urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  function automatic logic [511:0] rand512();
    logic [511:0] r;
    for (int i = 0; i < 16; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

endpackage
