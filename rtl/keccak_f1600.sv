// keccak_f1600: the Keccak-f[1600] permutation used by SHA3-384 and SHAKE256.
//
// One round (theta, rho, pi, chi, iota) is computed per clock, so a permutation
// takes 24 cycles after the start pulse. The state is 25 lanes of 64 bits,
// lane (x, y) at index x + 5*y, bit z of a lane at bit z, exactly as in FIPS 202.
// Interface: pulse `start` with the input state on `state_i`; `busy` is high while
// rounds run; `done` pulses for one cycle when `state_o` holds the result, which
// then stays stable until the next start. The round-per-cycle structure is this
// design's choice; the paper only names SHA-3 and SHAKE as operations to be
// implemented in hardware.
module keccak_f1600 (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [24:0][63:0] state_i,
  output logic [24:0][63:0] state_o,
  output logic              busy,
  output logic              done
);

  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};

  // rho rotation offsets, indexed x + 5*y
  localparam int ROT [25] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14};

  logic [24:0][63:0] st;
  logic [4:0]        rnd;

  function automatic logic [63:0] rotl(logic [63:0] v, int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic logic [24:0][63:0] round_f(logic [24:0][63:0] a, logic [63:0] rc);
    logic [4:0][63:0]  c, d;
    logic [24:0][63:0] b, o;
    for (int x = 0; x < 5; x++)
      c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    // theta, rho and pi: B[y, 2x+3y] = rot(A[x,y] ^ D[x], ROT[x,y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x+5*y] ^ d[x], ROT[x+5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        o[x+5*y] = b[x+5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    o[0] = o[0] ^ rc;  // iota
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= '0;
      rnd  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        st   <= state_i;
        rnd  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        st  <= round_f(st, RC[rnd]);
        rnd <= rnd + 5'd1;
        if (rnd == 5'd23) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign state_o = st;

endmodule
