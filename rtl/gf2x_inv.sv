// gf2x_inv: controller for polynomial inversion modulo x^R - 1 by the
// square-and-multiply chain of the paper's key generation (Algorithm 1,
// lines 4-9), a^-1 = (a^(2^(R-2) - 1))^2.
//
// Starting from f = res = a, step i = 1 .. floor(log2(R-2)) computes
//   f   = f * f^(2^(2^(i-1)))                      (now f = a^(2^(2^i) - 1))
//   res = res * f^(2^((R-2) mod 2^i))   when bit i of R-2 is set
// and the result is res^2. The controller owns the two polynomial buffers f and
// res and drives a gf2x_mul and a gf2x_pow2k unit through their ports; the units
// are outside so that the key generation can share them (the paper's resource
// sharing). Between unit runs, polynomials are copied one word per clock.
// Interface: write a through a_we/a_addr/a_wdata while idle, pulse `start`,
// wait for `done`; the inverse is then in the gf2x_pow2k unit's result buffer.
// Latency is dominated by the multiplications: floor(log2(R-2)) plus
// popcount((R-2) >> 1) products (16 for R = 12323).
// The paper's listing returns f^2 at the end; that is not the inverse (f then
// equals a^(2^(2^t) - 1)), so this design returns res^2, as the chain requires.
module gf2x_inv
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
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [63:0]   a_wdata,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // multiplier unit
  output logic          mul_a_we,
  output logic          mul_b_we,
  output logic [AW-1:0] mul_w_addr,
  output logic [63:0]   mul_a_wdata,
  output logic [63:0]   mul_b_wdata,
  output logic          mul_start,
  input  logic          mul_done,
  output logic [AW-1:0] mul_r_addr,
  input  logic [63:0]   mul_r_data,
  // power-of-two exponentiation unit
  output logic          pow_we,
  output logic [AW-1:0] pow_w_addr,
  output logic [63:0]   pow_wdata,
  output logic [IW-1:0] pow_k,
  output logic          pow_start,
  input  logic          pow_done,
  output logic [AW-1:0] pow_r_addr,
  input  logic [63:0]   pow_r_data
);

  localparam int unsigned RM2   = R - 2;
  localparam int unsigned STEPS = $clog2(RM2 + 1) - 1;   // floor(log2(R-2))
  localparam int unsigned SW    = clog2(STEPS + 2);

  typedef enum logic [3:0] {
    S_IDLE, S_TO_POW, S_RUN_POW, S_TO_MUL, S_RUN_MUL, S_FROM_MUL, S_NEXT, S_FINAL_POW
  } state_e;

  state_e        state;
  logic [63:0]   f_mem   [NW];
  logic [63:0]   res_mem [NW];
  logic [AW-1:0] cnt;
  logic [SW-1:0] step;
  logic          on_res;   // second half of a step: res update
  logic          final_sq;

  logic last_word;
  assign last_word = (32'(cnt) == NW - 1);
  assign busy      = (state != S_IDLE);

  // unit port drive
  always_comb begin
    mul_a_we    = (state == S_TO_MUL);
    mul_b_we    = (state == S_TO_MUL);
    mul_w_addr  = cnt;
    mul_a_wdata = on_res ? res_mem[cnt] : f_mem[cnt];
    mul_b_wdata = pow_r_data;
    mul_r_addr  = cnt;
    pow_we      = (state == S_TO_POW);
    pow_w_addr  = cnt;
    pow_wdata   = (final_sq || !on_res) ? ((final_sq) ? res_mem[cnt] : f_mem[cnt]) : f_mem[cnt];
    pow_r_addr  = cnt;
    if (final_sq)
      pow_k = IW'(1);
    else if (!on_res)
      pow_k = IW'(32'd1 << (32'(step) - 1));
    else
      pow_k = IW'(RM2 & ((32'd1 << 32'(step)) - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      for (int q = 0; q < NW; q++) begin
        f_mem[q]   <= '0;
        res_mem[q] <= '0;
      end
      cnt       <= '0;
      step      <= '0;
      on_res    <= 1'b0;
      final_sq  <= 1'b0;
      mul_start <= 1'b0;
      pow_start <= 1'b0;
      done      <= 1'b0;
    end else begin
      mul_start <= 1'b0;
      pow_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (a_we) begin
            f_mem[a_addr]   <= a_wdata;
            res_mem[a_addr] <= a_wdata;
          end
          if (start) begin
            step     <= SW'(1);
            on_res   <= 1'b0;
            final_sq <= 1'b0;
            cnt      <= '0;
            state    <= S_TO_POW;
          end
        end
        S_TO_POW: begin
          cnt <= last_word ? '0 : cnt + 1'b1;
          if (last_word) begin
            pow_start <= 1'b1;
            state     <= final_sq ? S_FINAL_POW : S_RUN_POW;
          end
        end
        S_RUN_POW: if (pow_done) state <= S_TO_MUL;
        S_TO_MUL: begin
          cnt <= last_word ? '0 : cnt + 1'b1;
          if (last_word) begin
            mul_start <= 1'b1;
            state     <= S_RUN_MUL;
          end
        end
        S_RUN_MUL: if (mul_done) state <= S_FROM_MUL;
        S_FROM_MUL: begin
          if (on_res) res_mem[cnt] <= mul_r_data;
          else        f_mem[cnt]   <= mul_r_data;
          cnt <= last_word ? '0 : cnt + 1'b1;
          if (last_word) state <= S_NEXT;
        end
        S_NEXT: begin
          if (!on_res && RM2[step]) begin
            on_res <= 1'b1;
            state  <= S_TO_POW;
          end else if (32'(step) == STEPS) begin
            on_res   <= 1'b0;
            final_sq <= 1'b1;
            state    <= S_TO_POW;
          end else begin
            on_res <= 1'b0;
            step   <= step + 1'b1;
            state  <= S_TO_POW;
          end
        end
        S_FINAL_POW: if (pow_done) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
