// bike_encaps_model: behavioural model of the software encapsulation that runs on
// the processor in the co-design (Algorithm 2): e from SHAKE256(m) with the same
// fixed-weight rule as the hardware, c0 = e0 + e1*h, c1 = m xor SHA3-384(e),
// K = SHA3-384(m, c0, c1), truncated to 256 bits. Also gives the key that
// implicit rejection must produce, SHA3-384(sigma, c0, c1).
package bike_encaps_model;
  import bike_ref_pkg::*;

  typedef struct {
    words_t       c0;
    logic [255:0] c1;
    logic [255:0] key;
    words_t       e;
  } encaps_t;

  function automatic logic [255:0] key_of(logic [255:0] a, words_t c0, logic [255:0] c1);
    words_t msg, d;
    logic [255:0] k;
    msg = new[8 + c0.size()];
    for (int i = 0; i < 4; i++) msg[i] = a[64*i +: 64];
    foreach (c0[i]) msg[4 + i] = c0[i];
    for (int i = 0; i < 4; i++) msg[4 + c0.size() + i] = c1[64*i +: 64];
    d = sponge(1'b0, msg, 4);
    for (int i = 0; i < 4; i++) k[64*i +: 64] = d[i];
    return k;
  endfunction

  function automatic encaps_t encaps(words_t h, logic [255:0] m, int r, int t, int nw);
    encaps_t o;
    words_t  mw, stream, e0, e1, p, l;
    int      used;
    mw = new[4];
    for (int i = 0; i < 4; i++) mw[i] = m[64*i +: 64];
    stream = sponge(1'b1, mw, 2 * t + 64);
    o.e = sample(stream, r, 2, t, nw, used);
    e0 = new[nw];
    e1 = new[nw];
    for (int i = 0; i < nw; i++) begin
      e0[i] = o.e[i];
      e1[i] = o.e[nw + i];
    end
    p = mulmod(e1, h, r, nw);
    o.c0 = new[nw];
    foreach (p[i]) o.c0[i] = p[i] ^ e0[i];
    l = sponge(1'b0, o.e, 4);
    for (int i = 0; i < 4; i++) o.c1[64*i +: 64] = m[64*i +: 64] ^ l[i];
    o.key = key_of(m, o.c0, o.c1);
    return o;
  endfunction
endpackage
