// gf2x_pow2k: raises a polynomial to the power 2^K modulo x^R - 1 (K repeated
// squarings, the f^(2^k) terms of the inversion chain).
//
// Squaring over GF(2) modulo x^R - 1 maps coefficient j to position 2j mod R, so
// K squarings are the permutation j -> j * 2^K mod R. The unit first works out
// P = 2^K mod R by K modular doublings (one per clock), then clears the
// destination and walks j = 0 .. R-1, copying source bit j to destination bit
// j*P mod R, one bit per clock (the index is kept incrementally by adding P
// modulo R). The source is written word by word through src_we/src_addr/src_wdata
// while idle; after `done` the result is read combinationally on r_addr/r_data.
// Latency: K + R + 2 cycles. The paper gives the exponentiations only as
// formulas; doing them as an index permutation instead of K squaring passes is
// this design's choice.
module gf2x_pow2k
  import bike_pkg::*;
#(
  parameter int unsigned R      = R_L1,
  parameter int unsigned LEVELS = 1,
  localparam int unsigned NW    = poly_words(R, LEVELS),
  localparam int unsigned AW    = clog2(NW),
  localparam int unsigned IW    = clog2(R + 1)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          src_we,
  input  logic [AW-1:0] src_addr,
  input  logic [63:0]   src_wdata,
  input  logic [IW-1:0] k,
  input  logic          start,
  output logic          busy,
  output logic          done,
  input  logic [AW-1:0] r_addr,
  output logic [63:0]   r_data
);

  typedef enum logic [1:0] {S_IDLE, S_EXP, S_PERM} state_e;

  state_e        state;
  logic [63:0]   src [NW];
  logic [63:0]   dst [NW];
  logic [IW-1:0] kcnt, p, j, idx;

  function automatic logic [IW-1:0] add_mod(logic [IW-1:0] x, logic [IW-1:0] y);
    logic [IW:0] s;
    s = {1'b0, x} + {1'b0, y};
    if (s >= (IW+1)'(R)) s = s - (IW+1)'(R);
    return s[IW-1:0];
  endfunction

  assign busy   = (state != S_IDLE);
  assign r_data = dst[r_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      for (int q = 0; q < NW; q++) begin
        src[q] <= '0;
        dst[q] <= '0;
      end
      kcnt <= '0;
      p    <= '0;
      j    <= '0;
      idx  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (src_we) src[src_addr] <= src_wdata;
          if (start) begin
            kcnt  <= k;
            p     <= IW'(1);
            state <= S_EXP;
          end
        end
        S_EXP: begin
          if (kcnt == '0) begin
            for (int q = 0; q < NW; q++) dst[q] <= '0;
            j     <= '0;
            idx   <= '0;
            state <= S_PERM;
          end else begin
            p    <= add_mod(p, p);
            kcnt <= kcnt - 1'b1;
          end
        end
        S_PERM: begin
          dst[idx[IW-1:6]][idx[5:0]] <= src[j[IW-1:6]][j[5:0]];
          idx <= add_mod(idx, p);
          j   <= j + 1'b1;
          if (32'(j) == R - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
