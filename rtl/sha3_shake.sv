// sha3_shake: one sponge that computes both SHA3-384 digests and SHAKE256 output
// streams around a single shared keccak_f1600 core.
//
// The paper shares the common SHA-3/SHAKE logic once per KEM primitive; this
// module is that shared unit. `init` (one cycle, with `mode`) clears the state
// and selects the rate (13 lanes for SHA3-384, 17 for SHAKE256) and the
// domain-separation byte (0x06 or 0x1F). Message words are then taken on the
// in_valid/in_ready handshake; every word carries 8 message bytes, little-endian,
// and `in_last` marks the final one (messages are whole 64-bit words and never
// empty; that restriction is this design's choice). After padding and the last
// permutation the output is streamed on out_valid/out_ready, one lane per word:
// a SHA3-384 digest is the first 6 words, a SHAKE256 stream continues for as long
// as words are taken, with a new permutation every 17 words. Each permutation
// costs 24 cycles plus one cycle of control; a full block costs `rate` cycles to
// absorb.
module sha3_shake
  import bike_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  sponge_mode_e mode,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [63:0]  in_data,
  input  logic         in_last,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [63:0]  out_data
);

  typedef enum logic [2:0] {S_IDLE, S_ABSORB, S_PAD, S_PERM, S_SQUEEZE} state_e;

  state_e            state, after_perm;
  sponge_mode_e      mode_q;
  logic [24:0][63:0] lanes;
  logic [4:0]        pos;
  logic [4:0]        rate;
  logic              perm_start, perm_busy, perm_done;
  logic [24:0][63:0] perm_out;

  assign rate = (mode_q == MODE_SHAKE256) ? 5'(SHAKE256_RATE) : 5'(SHA3_384_RATE);

  keccak_f1600 u_keccak (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (perm_start),
    .state_i(lanes),
    .state_o(perm_out),
    .busy   (perm_busy),
    .done   (perm_done)
  );

  assign in_ready  = (state == S_ABSORB);
  assign out_valid = (state == S_SQUEEZE);
  assign out_data  = lanes[pos];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      after_perm <= S_IDLE;
      mode_q     <= MODE_SHA3_384;
      lanes      <= '0;
      pos        <= '0;
      perm_start <= 1'b0;
    end else begin
      perm_start <= 1'b0;
      if (init) begin
        state  <= S_ABSORB;
        mode_q <= mode;
        lanes  <= '0;
        pos    <= '0;
      end else begin
        unique case (state)
          S_IDLE: ;
          S_ABSORB: if (in_valid) begin
            lanes[pos] <= lanes[pos] ^ in_data;
            if (pos == rate - 5'd1) begin
              pos        <= '0;
              perm_start <= 1'b1;
              state      <= S_PERM;
              after_perm <= in_last ? S_PAD : S_ABSORB;
            end else begin
              pos   <= pos + 5'd1;
              state <= in_last ? S_PAD : S_ABSORB;
            end
          end
          S_PAD: begin
            // pad10*1 with the domain bits: first pad byte right after the
            // message, 0x80 in the last byte of the rate.
            logic [24:0][63:0] t;
            t = lanes;
            t[pos] ^= (mode_q == MODE_SHAKE256) ? 64'h1F : 64'h06;
            t[rate - 5'd1] ^= 64'h8000_0000_0000_0000;
            lanes      <= t;
            pos        <= '0;
            perm_start <= 1'b1;
            state      <= S_PERM;
            after_perm <= S_SQUEEZE;
          end
          S_PERM: if (perm_done) begin
            lanes <= perm_out;
            state <= after_perm;
          end
          S_SQUEEZE: if (out_ready) begin
            if (pos == rate - 5'd1) begin
              pos        <= '0;
              perm_start <= 1'b1;
              state      <= S_PERM;
              after_perm <= S_SQUEEZE;
            end else begin
              pos <= pos + 5'd1;
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
