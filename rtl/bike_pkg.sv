// bike_pkg: constants and small helpers shared by the BIKE accelerators.
//
// The code parameters are those of BIKE at NIST security level 1 (the level the
// design is evaluated at): block length r = 12323, row weight w = 142 (d = w/2 = 71
// ones per circulant block), error weight t = 134, 256-bit messages and keys.
// These numbers come from the BIKE specification; the paper only names the
// security level. Polynomials are stored as arrays of 64-bit words, bit i of the
// polynomial in bit (i mod 64) of word (i / 64), padding bits above r always zero.
package bike_pkg;

  localparam int unsigned R_L1      = 12323;  // circulant block length r
  localparam int unsigned D_L1      = 71;     // weight of h0 and of h1 (w/2)
  localparam int unsigned T_L1      = 134;    // error weight t
  localparam int unsigned WORD      = 64;     // storage / datapath word

  // Threshold of the bit-flipping decoder, as in the BIKE specification for
  // level 1: thr = max(floor(0.0069722*|s| + 13.530), 36), evaluated in 24-bit
  // fixed point as (|s|*THR_MUL + THR_ADD) >> 24.
  localparam int unsigned THR_MUL_L1 = 116974;     // round(0.0069722 * 2^24)
  localparam int unsigned THR_ADD_L1 = 226995732;  // floor(13.530 * 2^24)
  localparam int unsigned THR_MIN_L1 = 36;

  // Sponge rates (in 64-bit lanes) and domain-separation pad bytes.
  localparam int unsigned SHA3_384_RATE = 13;  // 832-bit rate
  localparam int unsigned SHAKE256_RATE = 17;  // 1088-bit rate

  typedef enum logic {
    MODE_SHA3_384 = 1'b0,
    MODE_SHAKE256 = 1'b1
  } sponge_mode_e;

  // Number of words that hold an r-bit polynomial, rounded up to a multiple of
  // 2^levels so that Karatsuba can split it evenly.
  function automatic int unsigned poly_words(int unsigned r, int unsigned levels);
    int unsigned n;
    n = (r + WORD - 1) / WORD;
    n = ((n + (1 << levels) - 1) >> levels) << levels;
    return n;
  endfunction

  function automatic int unsigned clog2(int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction

endpackage
