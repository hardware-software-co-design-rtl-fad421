// decaps_accel: the BIKE decapsulation accelerator (the paper's Algorithm 3, the
// Decaps HLS module placed in the FPGA on the Z-7015 and Z-7020 designs).
//
// Inputs, written while idle on ld_we/ld_sel/ld_addr/ld_wdata: the private
// blocks h0 (ld_sel 0) and h1 (1) and the ciphertext polynomial c0 (2), all as
// NW-word polynomials; the ciphertext's 256-bit second half c1 = m' and the
// private sigma are plain ports. After `start`:
//   1. s' = h0 * c0 (gf2x_mul);
//   2. e' = bit-flipping decode of s' (bf_decoder);
//   3. m'' = m' xor SHA3-384(e'), first 256 bits;
//   4. e'' = fixed-weight sample from SHAKE256(m''), compared with e';
//   5. a = m'' when they match, sigma otherwise (implicit rejection);
//   6. K = SHA3-384(a, c0, m'), first 256 bits, on `key` when `done` pulses.
// `accepted` tells whether step 5 took m''; dec_success and dec_iters report the
// decoder. One sha3_shake unit serves steps 3, 4 and 6.
// Hash inputs are sequences of whole 64-bit words: e' is hashed as the NW words of
// e0 followed by the NW words of e1, and c0 as its NW words, each with zero
// padding above bit R. This byte layout is this design's choice and differs
// from the byte strings of the BIKE specification. Time is dominated by the
// decoder (about 2R*D cycles per iteration).
module decaps_accel
  import bike_pkg::*;
#(
  parameter int unsigned R        = R_L1,
  parameter int unsigned D        = D_L1,
  parameter int unsigned T        = T_L1,
  parameter int unsigned LEVELS   = 1,
  parameter int unsigned MAX_ITER = 20,
  parameter int unsigned THR_MUL  = THR_MUL_L1,
  parameter int unsigned THR_ADD  = THR_ADD_L1,
  parameter int unsigned THR_MIN  = THR_MIN_L1,
  localparam int unsigned NW      = poly_words(R, LEVELS),
  localparam int unsigned AW      = clog2(NW),
  localparam int unsigned ITW     = clog2(MAX_ITER + 1)
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           ld_we,
  input  logic [1:0]     ld_sel,
  input  logic [AW-1:0]  ld_addr,
  input  logic [63:0]    ld_wdata,
  input  logic [255:0]   m_prime,
  input  logic [255:0]   sigma,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [255:0]   key,
  output logic           accepted,
  output logic           dec_success,
  output logic [ITW-1:0] dec_iters
);

  localparam int unsigned CW  = clog2(2 * NW + 9);
  localparam int unsigned EAW = clog2(2 * NW);

  typedef enum logic [3:0] {
    S_IDLE, S_MUL, S_SYN, S_DEC, S_HE_WAIT, S_HASH_E, S_DIG_E, S_HM_WAIT, S_HASH_M,
    S_SAMPLE, S_CMP, S_HK_WAIT, S_HASH_K, S_DIG_K
  } state_e;

  state_e        state;
  logic [CW-1:0] cnt;
  logic [63:0]   c0_mem [NW];
  logic [255:0]  m2, a_q;
  logic          match;

  // multiplier: A = h0, B = c0, loaded straight from the load port
  logic          mul_start, mul_busy, mul_done;
  logic [63:0]   mul_r_data;
  gf2x_mul #(.R(R), .LEVELS(LEVELS)) u_mul (
    .clk(clk), .rst_n(rst_n),
    .a_we(ld_we && ld_sel == 2'd0 && state == S_IDLE),
    .b_we(ld_we && ld_sel == 2'd2 && state == S_IDLE),
    .w_addr(ld_addr), .a_wdata(ld_wdata), .b_wdata(ld_wdata),
    .start(mul_start), .busy(mul_busy), .done(mul_done),
    .r_addr(AW'(cnt)), .r_data(mul_r_data)
  );

  // decoder
  logic           dec_start, dec_busy, dec_done, dec_ok;
  logic [ITW-1:0] dec_it;
  logic [63:0]    e_data;
  bf_decoder #(
    .R(R), .D(D), .LEVELS(LEVELS), .MAX_ITER(MAX_ITER),
    .THR_MUL(THR_MUL), .THR_ADD(THR_ADD), .THR_MIN(THR_MIN)
  ) u_dec (
    .clk(clk), .rst_n(rst_n),
    .h_we(ld_we && ld_sel != 2'd2 && state == S_IDLE), .h_sel(ld_sel[0]),
    .h_addr(ld_addr), .h_wdata(ld_wdata),
    .syn_we(state == S_SYN), .syn_addr(AW'(cnt)), .syn_wdata(mul_r_data),
    .start(dec_start), .busy(dec_busy), .done(dec_done), .success(dec_ok), .iters(dec_it),
    .e_addr(EAW'(cnt)), .e_data(e_data)
  );

  // sponge
  logic         sp_init, sp_in_valid, sp_in_ready, sp_in_last, sp_out_valid, sp_out_ready;
  logic [63:0]  sp_in_data, sp_out_data;
  sponge_mode_e sp_mode;
  logic         smp_in_ready;
  sha3_shake u_sponge (
    .clk(clk), .rst_n(rst_n), .init(sp_init), .mode(sp_mode),
    .in_valid(sp_in_valid), .in_ready(sp_in_ready), .in_data(sp_in_data), .in_last(sp_in_last),
    .out_valid(sp_out_valid), .out_ready(sp_out_ready), .out_data(sp_out_data)
  );

  // re-encryption sampler: T positions over the two blocks
  logic          smp_start, smp_busy, smp_done, smp_pos_valid;
  logic [63:0]   smp_rd_data;
  logic [clog2(2*R)-1:0] smp_pos;
  poly_sampler #(.R(R), .NBLK(2), .WEIGHT(T), .LEVELS(LEVELS)) u_sampler (
    .clk(clk), .rst_n(rst_n), .start(smp_start),
    .in_valid(sp_out_valid && state == S_SAMPLE), .in_ready(smp_in_ready), .in_data(sp_out_data),
    .pos_valid(smp_pos_valid), .pos(smp_pos), .busy(smp_busy), .done(smp_done),
    .rd_addr(EAW'(cnt)), .rd_data(smp_rd_data)
  );

  // sponge input and output steering
  always_comb begin
    sp_in_valid  = 1'b0;
    sp_in_data   = '0;
    sp_in_last   = 1'b0;
    sp_out_ready = 1'b0;
    unique case (state)
      S_HASH_E: begin
        sp_in_valid = 1'b1;
        sp_in_data  = e_data;
        sp_in_last  = (32'(cnt) == 2 * NW - 1);
      end
      S_HASH_M: begin
        sp_in_valid = 1'b1;
        sp_in_data  = m2[64*cnt[1:0] +: 64];
        sp_in_last  = (cnt[1:0] == 2'd3);
      end
      S_HASH_K: begin
        sp_in_valid = 1'b1;
        if (32'(cnt) < 4)           sp_in_data = a_q[64*cnt[1:0] +: 64];
        else if (32'(cnt) < 4 + NW) sp_in_data = c0_mem[32'(cnt) - 4];
        else                        sp_in_data = m_prime[64*(32'(cnt) - 4 - NW) +: 64];
        sp_in_last = (32'(cnt) == NW + 7);
      end
      S_DIG_E, S_DIG_K: sp_out_ready = 1'b1;
      S_SAMPLE:         sp_out_ready = smp_in_ready;
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cnt         <= '0;
      m2          <= '0;
      a_q         <= '0;
      match       <= 1'b0;
      key         <= '0;
      accepted    <= 1'b0;
      dec_success <= 1'b0;
      dec_iters   <= '0;
      mul_start   <= 1'b0;
      dec_start   <= 1'b0;
      smp_start   <= 1'b0;
      sp_init     <= 1'b0;
      sp_mode     <= MODE_SHA3_384;
      done        <= 1'b0;
      for (int q = 0; q < NW; q++) c0_mem[q] <= '0;
    end else begin
      mul_start <= 1'b0;
      dec_start <= 1'b0;
      smp_start <= 1'b0;
      sp_init   <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (ld_we && ld_sel == 2'd2) c0_mem[ld_addr] <= ld_wdata;
          if (start) begin
            mul_start <= 1'b1;
            cnt       <= '0;
            state     <= S_MUL;
          end
        end
        S_MUL: if (mul_done) state <= S_SYN;
        S_SYN: begin
          if (32'(cnt) == NW - 1) begin
            cnt       <= '0;
            dec_start <= 1'b1;
            state     <= S_DEC;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DEC: if (dec_done) begin
          dec_success <= dec_ok;
          dec_iters   <= dec_it;
          sp_init     <= 1'b1;
          sp_mode     <= MODE_SHA3_384;
          state       <= S_HE_WAIT;
        end
        S_HE_WAIT: state <= S_HASH_E;
        S_HASH_E: if (sp_in_ready) begin
          if (32'(cnt) == 2 * NW - 1) begin
            cnt   <= '0;
            state <= S_DIG_E;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DIG_E: if (sp_out_valid) begin
          m2[64*cnt[1:0] +: 64] <= m_prime[64*cnt[1:0] +: 64] ^ sp_out_data;
          cnt <= cnt + 1'b1;
          if (cnt[1:0] == 2'd3) begin
            cnt     <= '0;
            sp_init <= 1'b1;
            sp_mode <= MODE_SHAKE256;
            state   <= S_HM_WAIT;
          end
        end
        S_HM_WAIT: state <= S_HASH_M;
        S_HASH_M: if (sp_in_ready) begin
          cnt <= cnt + 1'b1;
          if (cnt[1:0] == 2'd3) begin
            cnt       <= '0;
            smp_start <= 1'b1;
            state     <= S_SAMPLE;
          end
        end
        S_SAMPLE: if (smp_done) begin
          cnt   <= '0;
          match <= 1'b1;
          state <= S_CMP;
        end
        S_CMP: begin
          logic eq;
          eq = match && (smp_rd_data == e_data);
          match <= eq;
          if (32'(cnt) == 2 * NW - 1) begin
            a_q      <= eq ? m2 : sigma;
            accepted <= eq;
            cnt      <= '0;
            sp_init  <= 1'b1;
            sp_mode  <= MODE_SHA3_384;
            state    <= S_HK_WAIT;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_HK_WAIT: state <= S_HASH_K;
        S_HASH_K: if (sp_in_ready) begin
          if (32'(cnt) == NW + 7) begin
            cnt   <= '0;
            state <= S_DIG_K;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DIG_K: if (sp_out_valid) begin
          key[64*cnt[1:0] +: 64] <= sp_out_data;
          cnt <= cnt + 1'b1;
          if (cnt[1:0] == 2'd3) begin
            cnt   <= '0;
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
