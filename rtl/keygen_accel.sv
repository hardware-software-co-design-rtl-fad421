// keygen_accel: the BIKE key-generation accelerator (the paper's Algorithm 1,
// the KeyGen HLS module placed in the FPGA on the Z-7010 and Z-7020 designs).
//
// Sequence after `start`:
//   1. absorb the 32-bit TRNG seed (one zero-extended word) into SHAKE256;
//   2. sample h0, then h1, each of weight D below R, from the SHAKE256 stream;
//   3. invert h0 modulo x^R - 1 (gf2x_inv, Alg. 1 lines 4-9);
//   4. h = h1 * h0^-1 (gf2x_mul);
//   5. latch the 256-bit TRNG value sigma.
// One gf2x_mul and one gf2x_pow2k serve both the inversion and step 4, and one
// sha3_shake unit serves all hashing, the resource sharing the paper applies.
// Results are read word by word on rd_sel/rd_addr/rd_data (0: h0, 1: h1, 2: h),
// sigma on `sigma`, after `done`. The private key is (h0, h1, sigma), the public
// key is h. Timing is dominated by the 17 products of step 3 and 4 (each
// 14,262 cycles at the defaults, see gf2x_mul) and the 17 power-of-two
// permutations (about R cycles each).
// The paper fixes the seed at 32 bits and calls the hash SHAKE; how the seed is
// packed and how positions are drawn are this design's choices.
module keygen_accel
  import bike_pkg::*;
#(
  parameter int unsigned R      = R_L1,
  parameter int unsigned D      = D_L1,
  parameter int unsigned LEVELS = 1,
  localparam int unsigned NW    = poly_words(R, LEVELS),
  localparam int unsigned AW    = clog2(NW),
  localparam int unsigned IW    = clog2(R + 1)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   seed,        // TRNG
  input  logic [255:0]  sigma_trng,  // TRNG
  output logic          busy,
  output logic          done,
  input  logic [1:0]    rd_sel,
  input  logic [AW-1:0] rd_addr,
  output logic [63:0]   rd_data,
  output logic [255:0]  sigma
);

  typedef enum logic [3:0] {
    S_IDLE, S_ABSORB, S_SAMPLE0, S_COPY0, S_SAMPLE1, S_COPY1,
    S_INV, S_TO_MUL, S_MUL, S_FROM_MUL
  } state_e;

  state_e        state;
  logic [31:0]   seed_q;
  logic [AW-1:0] cnt;
  logic [63:0]   h0_mem [NW];
  logic [63:0]   h1_mem [NW];
  logic [63:0]   h_mem  [NW];
  logic          last_word;
  assign last_word = (32'(cnt) == NW - 1);

  // sponge
  logic        sp_init, sp_in_valid, sp_in_ready, sp_out_valid, sp_out_ready;
  logic [63:0] sp_out_data;
  sha3_shake u_sponge (
    .clk(clk), .rst_n(rst_n), .init(sp_init), .mode(MODE_SHAKE256),
    .in_valid(sp_in_valid), .in_ready(sp_in_ready), .in_data({32'b0, seed_q}), .in_last(1'b1),
    .out_valid(sp_out_valid), .out_ready(sp_out_ready), .out_data(sp_out_data)
  );
  assign sp_in_valid = (state == S_ABSORB);

  // sampler
  logic          smp_start, smp_busy, smp_done, smp_pos_valid;
  logic [63:0]   smp_rd_data;
  logic [clog2(R)-1:0] smp_pos;
  poly_sampler #(.R(R), .NBLK(1), .WEIGHT(D), .LEVELS(LEVELS)) u_sampler (
    .clk(clk), .rst_n(rst_n), .start(smp_start),
    .in_valid(sp_out_valid), .in_ready(sp_out_ready), .in_data(sp_out_data),
    .pos_valid(smp_pos_valid), .pos(smp_pos), .busy(smp_busy), .done(smp_done),
    .rd_addr(cnt), .rd_data(smp_rd_data)
  );

  // shared arithmetic units
  logic          mul_a_we, mul_b_we, mul_start, mul_busy, mul_done;
  logic [AW-1:0] mul_w_addr, mul_r_addr;
  logic [63:0]   mul_a_wdata, mul_b_wdata, mul_r_data;
  logic          pow_we, pow_start, pow_busy, pow_done;
  logic [AW-1:0] pow_w_addr, pow_r_addr;
  logic [63:0]   pow_wdata, pow_r_data;
  logic [IW-1:0] pow_k;

  gf2x_mul #(.R(R), .LEVELS(LEVELS)) u_mul (
    .clk(clk), .rst_n(rst_n), .a_we(mul_a_we), .b_we(mul_b_we), .w_addr(mul_w_addr),
    .a_wdata(mul_a_wdata), .b_wdata(mul_b_wdata), .start(mul_start), .busy(mul_busy),
    .done(mul_done), .r_addr(mul_r_addr), .r_data(mul_r_data)
  );
  gf2x_pow2k #(.R(R), .LEVELS(LEVELS)) u_pow (
    .clk(clk), .rst_n(rst_n), .src_we(pow_we), .src_addr(pow_w_addr), .src_wdata(pow_wdata),
    .k(pow_k), .start(pow_start), .busy(pow_busy), .done(pow_done),
    .r_addr(pow_r_addr), .r_data(pow_r_data)
  );

  // inversion controller
  logic          inv_a_we, inv_start, inv_busy, inv_done;
  logic          i_mul_a_we, i_mul_b_we, i_mul_start, i_pow_we, i_pow_start;
  logic [AW-1:0] i_mul_w_addr, i_mul_r_addr, i_pow_w_addr, i_pow_r_addr;
  logic [63:0]   i_mul_a_wdata, i_mul_b_wdata, i_pow_wdata;
  logic [IW-1:0] i_pow_k;
  gf2x_inv #(.R(R), .LEVELS(LEVELS)) u_inv (
    .clk(clk), .rst_n(rst_n), .a_we(inv_a_we), .a_addr(cnt), .a_wdata(smp_rd_data),
    .start(inv_start), .busy(inv_busy), .done(inv_done),
    .mul_a_we(i_mul_a_we), .mul_b_we(i_mul_b_we), .mul_w_addr(i_mul_w_addr),
    .mul_a_wdata(i_mul_a_wdata), .mul_b_wdata(i_mul_b_wdata), .mul_start(i_mul_start),
    .mul_done(mul_done), .mul_r_addr(i_mul_r_addr), .mul_r_data(mul_r_data),
    .pow_we(i_pow_we), .pow_w_addr(i_pow_w_addr), .pow_wdata(i_pow_wdata), .pow_k(i_pow_k),
    .pow_start(i_pow_start), .pow_done(pow_done), .pow_r_addr(i_pow_r_addr),
    .pow_r_data(pow_r_data)
  );
  assign inv_a_we = (state == S_COPY0);

  // unit sharing: the inversion owns the units while it runs
  always_comb begin
    if (state == S_INV) begin
      mul_a_we    = i_mul_a_we;
      mul_b_we    = i_mul_b_we;
      mul_w_addr  = i_mul_w_addr;
      mul_a_wdata = i_mul_a_wdata;
      mul_b_wdata = i_mul_b_wdata;
      mul_start   = i_mul_start;
      mul_r_addr  = i_mul_r_addr;
      pow_we      = i_pow_we;
      pow_w_addr  = i_pow_w_addr;
      pow_wdata   = i_pow_wdata;
      pow_k       = i_pow_k;
      pow_start   = i_pow_start;
      pow_r_addr  = i_pow_r_addr;
    end else begin
      mul_a_we    = (state == S_TO_MUL);
      mul_b_we    = (state == S_TO_MUL);
      mul_w_addr  = cnt;
      mul_a_wdata = h1_mem[cnt];
      mul_b_wdata = pow_r_data;        // h0^-1 is left in the power unit
      mul_start   = (state == S_TO_MUL) && last_word;
      mul_r_addr  = cnt;
      pow_we      = 1'b0;
      pow_w_addr  = cnt;
      pow_wdata   = '0;
      pow_k       = '0;
      pow_start   = 1'b0;
      pow_r_addr  = cnt;
    end
  end

  assign busy = (state != S_IDLE);

  always_comb begin
    unique case (rd_sel)
      2'd0:    rd_data = h0_mem[rd_addr];
      2'd1:    rd_data = h1_mem[rd_addr];
      default: rd_data = h_mem[rd_addr];
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      seed_q    <= '0;
      cnt       <= '0;
      sigma     <= '0;
      sp_init   <= 1'b0;
      smp_start <= 1'b0;
      inv_start <= 1'b0;
      done      <= 1'b0;
      for (int q = 0; q < NW; q++) begin
        h0_mem[q] <= '0;
        h1_mem[q] <= '0;
        h_mem[q]  <= '0;
      end
    end else begin
      sp_init   <= 1'b0;
      smp_start <= 1'b0;
      inv_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          seed_q    <= seed;
          sp_init   <= 1'b1;
          smp_start <= 1'b1;
          state     <= S_ABSORB;
        end
        S_ABSORB:  if (sp_in_ready) state <= S_SAMPLE0;
        S_SAMPLE0: if (smp_done) begin
          cnt   <= '0;
          state <= S_COPY0;
        end
        S_COPY0: begin
          h0_mem[cnt] <= smp_rd_data;
          cnt <= last_word ? '0 : cnt + 1'b1;
          if (last_word) begin
            smp_start <= 1'b1;
            state     <= S_SAMPLE1;
          end
        end
        S_SAMPLE1: if (smp_done) state <= S_COPY1;
        S_COPY1: begin
          h1_mem[cnt] <= smp_rd_data;
          cnt <= last_word ? '0 : cnt + 1'b1;
          if (last_word) begin
            inv_start <= 1'b1;
            state     <= S_INV;
          end
        end
        S_INV: if (inv_done) state <= S_TO_MUL;
        S_TO_MUL: begin
          cnt <= last_word ? '0 : cnt + 1'b1;
          if (last_word) state <= S_MUL;
        end
        S_MUL: if (mul_done) state <= S_FROM_MUL;
        S_FROM_MUL: begin
          h_mem[cnt] <= mul_r_data;
          cnt <= last_word ? '0 : cnt + 1'b1;
          if (last_word) begin
            sigma <= sigma_trng;
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
