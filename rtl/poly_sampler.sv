// poly_sampler: fixed-weight sampling of a sparse binary vector from a SHAKE256
// output stream (the PRNG(SHAKE(.)) steps of key generation and decapsulation).
//
// The vector has NBLK blocks of R bits; a position p in [0, NBLK*R) is sampled.
// Every 64-bit input word gives two 32-bit candidates (low half first). A
// candidate is masked to the smallest power of two that covers NBLK*R and is
// rejected when it is out of range or already set; otherwise it is set and
// reported on pos_valid/pos. After WEIGHT accepted positions `done` pulses; the
// rest of a half-used word is dropped. The vector is held as words laid out like
// every polynomial of the design: block b occupies words [b*NW, (b+1)*NW), with
// NW = poly_words(R, LEVELS). It is read combinationally through rd_addr/rd_data.
// `start` clears the vector. One candidate is examined per clock.
// The paper names SHAKE-based sampling only; this rejection rule is this
// design's own and is not bit-compatible with the BIKE reference sampler.
module poly_sampler
  import bike_pkg::*;
#(
  parameter int unsigned R      = R_L1,
  parameter int unsigned NBLK   = 1,
  parameter int unsigned WEIGHT = D_L1,
  parameter int unsigned LEVELS = 1,
  localparam int unsigned NW    = poly_words(R, LEVELS),
  localparam int unsigned AW    = clog2(NBLK * NW),
  localparam int unsigned PW    = clog2(NBLK * R)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [63:0]   in_data,
  output logic          pos_valid,
  output logic [PW-1:0] pos,
  output logic          busy,
  output logic          done,
  input  logic [AW-1:0] rd_addr,
  output logic [63:0]   rd_data
);

  localparam int unsigned NWORDS = NBLK * NW;
  localparam int unsigned CW     = clog2(WEIGHT + 1);

  logic [63:0]   vec [NWORDS];
  logic [63:0]   word_q;
  logic          have_word, half;
  logic [CW-1:0] count;

  logic [31:0]   cand;
  logic [PW-1:0] cpos;
  logic [31:0]   bitidx;
  logic          in_range, already;

  always_comb begin
    cand     = half ? word_q[63:32] : word_q[31:0];
    cpos     = cand[PW-1:0];
    in_range = (32'(cpos) < NBLK * R);
    bitidx   = (32'(cpos) >= R) ? 32'(cpos) - R + NW * 64 : 32'(cpos);
    already  = in_range ? vec[bitidx[31:6]][bitidx[5:0]] : 1'b1;
  end

  assign in_ready = busy && !have_word;
  assign rd_data  = vec[rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NWORDS; i++) vec[i] <= '0;
      word_q    <= '0;
      have_word <= 1'b0;
      half      <= 1'b0;
      count     <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      pos_valid <= 1'b0;
      pos       <= '0;
    end else begin
      done      <= 1'b0;
      pos_valid <= 1'b0;
      if (start) begin
        for (int i = 0; i < NWORDS; i++) vec[i] <= '0;
        have_word <= 1'b0;
        half      <= 1'b0;
        count     <= '0;
        busy      <= 1'b1;
      end else if (busy) begin
        if (!have_word) begin
          if (in_valid) begin
            word_q    <= in_data;
            have_word <= 1'b1;
            half      <= 1'b0;
          end
        end else begin
          if (!already) begin
            vec[bitidx[31:6]][bitidx[5:0]] <= 1'b1;
            pos_valid <= 1'b1;
            pos       <= cpos;
            count     <= count + 1'b1;
            if (32'(count) == WEIGHT - 1) begin
              busy      <= 1'b0;
              done      <= 1'b1;
              have_word <= 1'b0;
            end
          end
          half <= ~half;
          if (half) have_word <= 1'b0;
        end
      end
    end
  end

endmodule
