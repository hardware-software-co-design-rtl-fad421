// bike_ref_pkg: reference models for the testbenches, written independently of
// the RTL: Keccak-f[1600] (round constants from the LFSR definition, rotation
// offsets from the (x,y) walk of FIPS 202), the SHA3-384/SHAKE256 sponge over
// 64-bit words, the fixed-weight sampler rule, and bit-level polynomial
// arithmetic modulo x^r - 1. Polynomials are dynamic arrays of 64-bit words.
package bike_ref_pkg;

  typedef logic [63:0] word_t;
  typedef word_t       words_t[];

  function automatic int nwords(int r, int levels);
    int n;
    n = (r + 63) / 64;
    n = ((n + (1 << levels) - 1) >> levels) << levels;
    return n;
  endfunction

  // ---------------------------------------------------------------- Keccak
  function automatic bit rc_bit(int t);
    bit [7:0] s;
    if (t % 255 == 0) return 1'b1;
    s = 8'h01;
    for (int i = 1; i <= t % 255; i++) begin
      bit b;
      b = s[7];
      s = {s[6:0], 1'b0};
      if (b) s = s ^ 8'h71;
    end
    return s[0];
  endfunction

  function automatic word_t rol(word_t v, int n);
    n = n % 64;
    if (n == 0) return v;
    return (v << n) | (v >> (64 - n));
  endfunction

  function automatic void keccak_f(ref word_t a[5][5]);   // a[x][y]
    int    rotc [5][5];
    int    x, y, nx;
    word_t c[5], d[5], b[5][5];
    rotc[0][0] = 0;
    x = 1; y = 0;
    for (int t = 0; t < 24; t++) begin
      rotc[x][y] = ((t + 1) * (t + 2) / 2) % 64;
      nx = y;
      y  = (2 * x + 3 * y) % 5;
      x  = nx;
    end
    for (int rnd = 0; rnd < 24; rnd++) begin
      word_t rc;
      for (int i = 0; i < 5; i++) c[i] = a[i][0] ^ a[i][1] ^ a[i][2] ^ a[i][3] ^ a[i][4];
      for (int i = 0; i < 5; i++) d[i] = c[(i + 4) % 5] ^ rol(c[(i + 1) % 5], 1);
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) a[i][j] ^= d[i];
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++)
        b[j][(2 * i + 3 * j) % 5] = rol(a[i][j], rotc[i][j]);
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++)
        a[i][j] = b[i][j] ^ ((~b[(i + 1) % 5][j]) & b[(i + 2) % 5][j]);
      rc = '0;
      for (int j = 0; j <= 6; j++) rc[(1 << j) - 1] = rc_bit(j + 7 * rnd);
      a[0][0] ^= rc;
    end
  endfunction

  // shake = 0: SHA3-384, 1: SHAKE256. Returns nout output words.
  function automatic words_t sponge(bit shake, words_t msg, int nout);
    word_t  a[5][5];
    int     rate, pos, n;
    words_t o;
    rate = shake ? 17 : 13;
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) a[i][j] = '0;
    pos = 0;
    foreach (msg[i]) begin
      a[pos % 5][pos / 5] ^= msg[i];
      pos++;
      if (pos == rate) begin
        keccak_f(a);
        pos = 0;
      end
    end
    a[pos % 5][pos / 5] ^= shake ? 64'h1F : 64'h06;
    a[(rate - 1) % 5][(rate - 1) / 5] ^= 64'h8000000000000000;
    keccak_f(a);
    o = new[nout];
    pos = 0;
    n = 0;
    while (n < nout) begin
      o[n] = a[pos % 5][pos / 5];
      n++;
      pos++;
      if (pos == rate) begin
        keccak_f(a);
        pos = 0;
      end
    end
    return o;
  endfunction

  // ---------------------------------------------------------------- sampler
  // Candidates are 32-bit halves of the stream words (low half first), masked to
  // the next power of two above nblk*r; out-of-range and repeated ones are dropped.
  // Returns the dense vector (nblk blocks of nw words) and how many stream words
  // were used.
  function automatic words_t sample(words_t stream, int r, int nblk, int weight, int nw,
                                    output int used);
    words_t v;
    int     bits, cnt, p, q;
    v = new[nblk * nw];
    foreach (v[i]) v[i] = '0;
    bits = 1;
    while ((1 << bits) < nblk * r) bits++;
    cnt = 0;
    used = 0;
    for (int w = 0; w < stream.size() && cnt < weight; w++) begin
      used = w + 1;
      for (int h = 0; h < 2 && cnt < weight; h++) begin
        p = int'((h == 0 ? stream[w][31:0] : stream[w][63:32]) & ((1 << bits) - 1));
        if (p < nblk * r) begin
          q = (p >= r) ? p - r + nw * 64 : p;
          if (!v[q / 64][q % 64]) begin
            v[q / 64][q % 64] = 1'b1;
            cnt++;
          end
        end
      end
    end
    return v;
  endfunction

  // ---------------------------------------------------------------- polynomials
  function automatic bit getb(words_t a, int i);
    return a[i / 64][i % 64];
  endfunction

  function automatic words_t zero_poly(int nw);
    words_t z;
    z = new[nw];
    foreach (z[i]) z[i] = '0;
    return z;
  endfunction

  // a * b mod x^r - 1, bit by bit over the set bits of both operands
  function automatic words_t mulmod(words_t a, words_t b, int r, int nw);
    words_t p;
    int     ia[$], ib[$];
    p = zero_poly(nw);
    for (int i = 0; i < r; i++) begin
      if (getb(a, i)) ia.push_back(i);
      if (getb(b, i)) ib.push_back(i);
    end
    foreach (ia[x]) foreach (ib[y]) begin
      int k;
      k = ia[x] + ib[y];
      if (k >= r) k -= r;
      p[k / 64][k % 64] = ~p[k / 64][k % 64];
    end
    return p;
  endfunction

  function automatic words_t sqr(words_t a, int r, int nw);
    words_t p;
    p = zero_poly(nw);
    for (int i = 0; i < r; i++)
      if (getb(a, i)) p[(2 * i % r) / 64][(2 * i % r) % 64] = 1'b1;
    return p;
  endfunction

  function automatic words_t random_poly(int r, int nw);
    words_t p;
    p = zero_poly(nw);
    for (int i = 0; i < r; i++) p[i / 64][i % 64] = $urandom_range(0, 1);
    return p;
  endfunction

  function automatic words_t random_sparse(int r, int nw, int weight);
    words_t p;
    int     cnt, k;
    p = zero_poly(nw);
    cnt = 0;
    while (cnt < weight) begin
      k = $urandom_range(0, r - 1);
      if (!p[k / 64][k % 64]) begin
        p[k / 64][k % 64] = 1'b1;
        cnt++;
      end
    end
    return p;
  endfunction

  function automatic int weight(words_t a);
    int w;
    w = 0;
    foreach (a[i]) w += $countones(a[i]);
    return w;
  endfunction

  function automatic bit is_one(words_t a);
    if (a[0] != 64'd1) return 1'b0;
    for (int i = 1; i < a.size(); i++) if (a[i] != '0) return 1'b0;
    return 1'b1;
  endfunction

  // inverse by a^(2^(r-1) - 2): r-2 squarings and multiplications (small r only)
  function automatic words_t inverse(words_t a, int r, int nw);
    words_t acc, sq;
    acc = zero_poly(nw);
    acc[0] = 64'd1;
    sq = sqr(a, r, nw);          // a^2
    for (int i = 1; i < r - 1; i++) begin
      acc = mulmod(acc, sq, r, nw);
      sq  = sqr(sq, r, nw);
    end
    return acc;                  // product of a^(2^i), i = 1 .. r-2
  endfunction

endpackage
