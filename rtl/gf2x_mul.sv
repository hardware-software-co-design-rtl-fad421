// gf2x_mul: multiplication of two binary polynomials modulo x^R - 1, built as
// LEVELS layers of Karatsuba on top of a word-serial Comba (product-scanning)
// core, the structure the paper adopts for all three BIKE primitives.
//
// Operands are written word by word through the a/b write ports while the unit
// is idle (both ports share w_addr). `start` runs the product; `done` pulses at
// the end, after which the reduced result is read combinationally on
// r_addr/r_data until the next start.
//
// How it works. The NW-word operands are cut into 2^LEVELS chunks of NC words.
// Unrolling the Karatsuba recursion gives 3^LEVELS half-size products; product t
// has one ternary digit per level (0: low halves, 1: high halves, 2: sum of
// halves), so its operand word w is the XOR of the chunks whose level bits the
// digits select. Each product is formed by the Comba loop, column by column, with
// the inner loop unrolled UNROLL times (UNROLL 64x64 carry-less multiplications per
// clock, their results XORed), and each finished column word is
// XORed into the 2*NW-word product memory at every offset that the digits give
// (digit 0: 0 and h, digit 1: h and 2h, digit 2: h, with h the half size of that
// level; offsets reached an even number of times cancel). The reduction modulo
// x^R - 1 is folded into the read port: result word j is product word j (bits
// below R) XOR the 64 product bits that start at bit R + 64j.
// Latency: 3^LEVELS * (1 + sum over the 2NC-1 columns of ceil(terms/UNROLL))
// cycles from the edge that takes `start` to the edge that raises `done`; with
// UNROLL = 1 that is 3^LEVELS * (NC*NC + 1).
// The number of Karatsuba levels is a compile-time parameter, as in the paper;
// the paper also unrolls and pipelines the inner Comba loop but gives no factor:
// the defaults of one Karatsuba level and an unroll factor of 2 are this design's
// choices.
module gf2x_mul
  import bike_pkg::*;
#(
  parameter int unsigned R      = R_L1,
  parameter int unsigned LEVELS = 1,
  parameter int unsigned UNROLL = 2,
  localparam int unsigned NW    = poly_words(R, LEVELS),
  localparam int unsigned AW    = clog2(NW)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          a_we,
  input  logic          b_we,
  input  logic [AW-1:0] w_addr,
  input  logic [63:0]   a_wdata,
  input  logic [63:0]   b_wdata,
  input  logic          start,
  output logic          busy,
  output logic          done,
  input  logic [AW-1:0] r_addr,
  output logic [63:0]   r_data
);

  localparam int unsigned NCH   = 1 << LEVELS;   // chunks per operand
  localparam int unsigned NC    = NW / NCH;      // words per chunk
  localparam int unsigned NSUB  = 3 ** LEVELS;   // sub-products
  localparam int unsigned PWRDS = 2 * NW;
  localparam int unsigned RW    = R / 64;
  localparam int unsigned RB    = R % 64;
  localparam int unsigned CIW   = clog2(2 * NC);
  localparam int unsigned TW    = clog2(NSUB + 1);

  logic [63:0] a_mem [NW];
  logic [63:0] b_mem [NW];
  logic [63:0] p_mem [PWRDS];

  logic [TW-1:0]  t;        // current sub-product
  logic [CIW-1:0] k;        // current column
  logic [CIW-1:0] i;        // current term in the column
  logic [127:0]   acc;      // column sum, upper half carried to next column
  logic           flush;    // emitting the last word of a sub-product

  // ternary digits of the sub-product index
  function automatic int unsigned digit(int unsigned tt, int unsigned l);
    int unsigned v;
    v = tt;
    for (int unsigned q = 0; q < l; q++) v = v / 3;
    return v % 3;
  endfunction

  function automatic logic chunk_sel(int unsigned tt, int unsigned c);
    logic s;
    s = 1'b1;
    for (int unsigned l = 0; l < LEVELS; l++) begin
      unique case (digit(tt, l))
        0:       if (c[l]) s = 1'b0;
        1:       if (!c[l]) s = 1'b0;
        default: ;
      endcase
    end
    return s;
  endfunction

  // operand word w of sub-product tt
  function automatic logic [63:0] op_word(logic [63:0] m [NW], int unsigned tt, int unsigned w);
    logic [63:0] v;
    v = '0;
    for (int unsigned c = 0; c < NCH; c++)
      if (chunk_sel(tt, c)) v ^= m[c*NC + w];
    return v;
  endfunction

  // word offset of combination cb (one bit per level) for sub-product tt;
  // returns -1 when the combination does not exist for these digits
  function automatic int offset_of(int unsigned tt, int unsigned cb);
    int off;
    off = 0;
    for (int unsigned l = 0; l < LEVELS; l++) begin
      int h;
      h = int'(NC) << l;
      unique case (digit(tt, l))
        0: off += cb[l] ? h : 0;
        1: off += cb[l] ? 2*h : h;
        default: begin
          if (cb[l]) return -1;
          off += h;
        end
      endcase
    end
    return off;
  endfunction

  function automatic logic [127:0] clmul(logic [63:0] x, logic [63:0] y);
    logic [127:0] r;
    r = '0;
    for (int b = 0; b < 64; b++)
      if (y[b]) r ^= {64'b0, x} << b;
    return r;
  endfunction

  // column bounds
  logic [CIW-1:0] i_hi;
  logic           col_end;   // the terms of this clock finish the column
  always_comb begin
    i_hi    = (32'(k) < NC) ? k : CIW'(NC - 1);
    col_end = (32'(i) + UNROLL - 1 >= 32'(i_hi));
  end

  logic [127:0] prod, col;
  logic [63:0]  emit_word;
  logic         emit;
  always_comb begin
    // UNROLL terms of the column per clock (the unrolled inner Comba loop)
    prod = '0;
    for (int unsigned u = 0; u < UNROLL; u++)
      if (32'(i) + u <= 32'(i_hi))
        prod ^= clmul(op_word(a_mem, 32'(t), 32'(i) + u), op_word(b_mem, 32'(t), 32'(k) - 32'(i) - u));
    col       = flush ? acc : (acc ^ prod);
    emit      = busy && (flush || col_end);
    emit_word = col[63:0];
  end

  // offsets of the current sub-product; an offset hit an even number of times
  // cancels, so only its first occurrence is enabled and only for odd counts
  int             offs [NCH];
  logic [NCH-1:0] off_en;
  always_comb begin
    for (int unsigned cb = 0; cb < NCH; cb++) offs[cb] = offset_of(32'(t), cb);
    for (int unsigned cb = 0; cb < NCH; cb++) begin
      int unsigned par;
      logic        first;
      par   = 0;
      first = 1'b1;
      for (int unsigned cc = 0; cc < NCH; cc++)
        if (offs[cc] == offs[cb]) begin
          par++;
          if (cc < cb) first = 1'b0;
        end
      off_en[cb] = (offs[cb] >= 0) && first && par[0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < NW; q++) begin
        a_mem[q] <= '0;
        b_mem[q] <= '0;
      end
      for (int q = 0; q < PWRDS; q++) p_mem[q] <= '0;
      t     <= '0;
      k     <= '0;
      i     <= '0;
      acc   <= '0;
      flush <= 1'b0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (a_we) a_mem[w_addr] <= a_wdata;
        if (b_we) b_mem[w_addr] <= b_wdata;
        if (start) begin
          for (int q = 0; q < PWRDS; q++) p_mem[q] <= '0;
          t     <= '0;
          k     <= '0;
          i     <= '0;
          acc   <= '0;
          flush <= 1'b0;
          busy  <= 1'b1;
        end
      end else begin
        if (emit) begin
          // XOR the finished column word into every enabled offset
          for (int unsigned cb = 0; cb < NCH; cb++)
            if (off_en[cb])
              p_mem[offs[cb] + int'(k)] <= p_mem[offs[cb] + int'(k)] ^ emit_word;
        end
        if (flush) begin
          flush <= 1'b0;
          acc   <= '0;
          k     <= '0;
          i     <= '0;
          if (32'(t) == NSUB - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            t <= t + 1'b1;
          end
        end else if (col_end) begin
          acc <= {64'b0, col[127:64]};
          if (32'(k) == 2 * NC - 2) begin
            flush <= 1'b1;
            k     <= k + 1'b1;
          end else begin
            k <= k + 1'b1;
            i <= (32'(k) + 1 >= NC) ? CIW'(32'(k) + 2 - NC) : '0;
          end
        end else begin
          acc <= col;
          i   <= i + CIW'(UNROLL);
        end
      end
    end
  end

  // reduction modulo x^R - 1, folded into the read port
  logic [63:0]  lo_word;
  logic [127:0] hi_pair;
  always_comb begin
    lo_word = p_mem[32'(r_addr)];
    if (32'(r_addr) > RW) lo_word = '0;
    else if (32'(r_addr) == RW) lo_word = lo_word & ((64'd1 << RB) - 64'd1);
    hi_pair = {p_mem[32'(r_addr) + RW + 1], p_mem[32'(r_addr) + RW]};
    r_data  = lo_word ^ 64'(hi_pair >> RB);
  end

endmodule
