// bf_decoder: QC-MDPC bit-flipping decoder of the decapsulation (Algorithm 3,
// lines 3-7 of the paper): while the syndrome is not zero, count for every one of
// the 2R error bits its unsatisfied parity checks (upc), flip the bits whose count
// reaches the threshold, and update the syndrome.
//
// Inputs, written while idle: the dense private blocks h0 and h1 (h_we, h_sel,
// h_addr, h_wdata) and the syndrome s' = h0 * c0 (syn_we, syn_addr, syn_wdata).
// `start` runs the decoder; `done` pulses at the end with `success` high when the
// syndrome reached zero within MAX_ITER iterations and `iters` the iterations
// used. The error estimate e' is then read on e_addr/e_data: e0 in words
// [0, NW), e1 in words [NW, 2NW).
//
// How it works. The start phase scans h0 and h1 bit by bit and keeps the D
// positions of each as index lists, and counts the syndrome weight |s|. Each
// iteration computes thr = max((|s|*THR_MUL + THR_ADD) >> 24, THR_MIN) and then,
// one parity check per clock, upc_j = sum over the D positions p of block b(j)
// of s[(j mod R + p) mod R]. A bit with upc_j >= thr is marked in a flip map;
// all counts of an iteration use the same syndrome, as in the paper's listing.
// The update pass then walks the flip map, toggles e'_j and the D syndrome
// bits of each flipped j and keeps |s| up to date. This gives the same syndrome
// as recomputing s' from e' (the paper's line 7) at a fraction of the work.
// Cycles per iteration: about 2R*D + 2R + (flips)*D.
// The threshold rule and its constants are those of the BIKE specification for
// level 1 (the paper only writes "upc >= thr"); the iteration cap MAX_ITER is this
// design's choice, the paper's loop has none.
module bf_decoder
  import bike_pkg::*;
#(
  parameter int unsigned R        = R_L1,
  parameter int unsigned D        = D_L1,
  parameter int unsigned LEVELS   = 1,
  parameter int unsigned MAX_ITER = 20,
  parameter int unsigned THR_MUL  = THR_MUL_L1,
  parameter int unsigned THR_ADD  = THR_ADD_L1,
  parameter int unsigned THR_MIN  = THR_MIN_L1,
  localparam int unsigned NW      = poly_words(R, LEVELS),
  localparam int unsigned AW      = clog2(NW),
  localparam int unsigned EAW     = clog2(2 * NW),
  localparam int unsigned IW      = clog2(R + 1),
  localparam int unsigned ITW     = clog2(MAX_ITER + 1)
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           h_we,
  input  logic           h_sel,      // 0: h0, 1: h1
  input  logic [AW-1:0]  h_addr,
  input  logic [63:0]    h_wdata,
  input  logic           syn_we,
  input  logic [AW-1:0]  syn_addr,
  input  logic [63:0]    syn_wdata,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic           success,
  output logic [ITW-1:0] iters,
  input  logic [EAW-1:0] e_addr,
  output logic [63:0]    e_data
);

  localparam int unsigned JW = clog2(2 * R + 1);
  localparam int unsigned DW = clog2(D + 1);
  localparam int unsigned SWT = clog2(R + 1);

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_WEIGHT, S_THR, S_UPC, S_UPDATE, S_TOGGLE} state_e;

  state_e         state;
  logic [63:0]    h_mem [2][NW];
  logic [63:0]    s_mem [NW];
  logic [63:0]    e_mem [2*NW];
  logic [63:0]    f_mem [2*NW];    // flip map of the current iteration
  logic [IW-1:0]  idx   [2][D];    // supports of h0 and h1
  logic [DW-1:0]  fill  [2];
  logic [JW-1:0]  j;               // error bit 0 .. 2R-1
  logic [DW-1:0]  l;               // position in the support list
  logic [DW:0]    upc;
  logic [SWT-1:0] wt;              // syndrome weight
  logic [31:0]    thr;
  logic [ITW-1:0] it;

  // block and in-block index of j
  logic           jb;
  logic [IW-1:0]  jr;
  always_comb begin
    jb = (32'(j) >= R);
    jr = jb ? IW'(32'(j) - R) : IW'(j);
  end

  // syndrome position checked by (j, l)
  logic [IW-1:0] spos;
  logic          sbit;
  always_comb begin
    logic [IW:0] sum;
    sum = {1'b0, jr} + {1'b0, idx[jb][l]};
    if (sum >= (IW+1)'(R)) sum = sum - (IW+1)'(R);
    spos = sum[IW-1:0];
    sbit = s_mem[spos[IW-1:6]][spos[5:0]];
  end

  // e'/flip map bit address of j
  logic [31:0] ebit;
  assign ebit = jb ? 32'(jr) + NW * 64 : 32'(jr);

  assign busy   = (state != S_IDLE);
  assign e_data = e_mem[e_addr];
  assign iters  = it;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      for (int q = 0; q < NW; q++) begin
        h_mem[0][q] <= '0;
        h_mem[1][q] <= '0;
        s_mem[q]    <= '0;
      end
      for (int q = 0; q < 2*NW; q++) begin
        e_mem[q] <= '0;
        f_mem[q] <= '0;
      end
      for (int q = 0; q < D; q++) begin
        idx[0][q] <= '0;
        idx[1][q] <= '0;
      end
      fill[0] <= '0;
      fill[1] <= '0;
      j       <= '0;
      l       <= '0;
      upc     <= '0;
      wt      <= '0;
      thr     <= '0;
      it      <= '0;
      done    <= 1'b0;
      success <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (h_we)   h_mem[h_sel][h_addr] <= h_wdata;
          if (syn_we) s_mem[syn_addr] <= syn_wdata;
          if (start) begin
            for (int q = 0; q < 2*NW; q++) e_mem[q] <= '0;
            fill[0] <= '0;
            fill[1] <= '0;
            j       <= '0;
            wt      <= '0;
            it      <= '0;
            success <= 1'b0;
            state   <= S_SCAN;
          end
        end
        // collect the supports of h0 and h1, one bit per clock
        S_SCAN: begin
          if (h_mem[jb][jr[IW-1:6]][jr[5:0]] && 32'(fill[jb]) < D) begin
            idx[jb][fill[jb]] <= jr;
            fill[jb]          <= fill[jb] + 1'b1;
          end
          if (32'(j) == 2 * R - 1) begin
            j     <= '0;
            state <= S_WEIGHT;
          end else begin
            j <= j + 1'b1;
          end
        end
        // syndrome weight, one word per clock
        S_WEIGHT: begin
          wt <= wt + SWT'($countones(s_mem[j[AW-1:0]]));
          if (32'(j) == NW - 1) begin
            j     <= '0;
            state <= S_THR;
          end else begin
            j <= j + 1'b1;
          end
        end
        S_THR: begin
          logic [63:0] tv;
          tv = (64'(wt) * 64'(THR_MUL) + 64'(THR_ADD)) >> 24;
          thr <= (tv < 64'(THR_MIN)) ? THR_MIN : tv[31:0];
          if (wt == '0) begin
            success <= 1'b1;
            done    <= 1'b1;
            state   <= S_IDLE;
          end else if (32'(it) == MAX_ITER) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            for (int q = 0; q < 2*NW; q++) f_mem[q] <= '0;
            it    <= it + 1'b1;
            j     <= '0;
            l     <= '0;
            upc   <= '0;
            state <= S_UPC;
          end
        end
        // unsatisfied parity checks of bit j, one check per clock
        S_UPC: begin
          if (32'(l) == D - 1) begin
            if (32'(upc) + 32'(sbit) >= thr)
              f_mem[ebit[31:6]][ebit[5:0]] <= 1'b1;
            upc <= '0;
            l   <= '0;
            if (32'(j) == 2 * R - 1) begin
              j     <= '0;
              state <= S_UPDATE;
            end else begin
              j <= j + 1'b1;
            end
          end else begin
            upc <= upc + (DW+1)'(sbit);
            l   <= l + 1'b1;
          end
        end
        // walk the flip map
        S_UPDATE: begin
          if (f_mem[ebit[31:6]][ebit[5:0]]) begin
            e_mem[ebit[31:6]][ebit[5:0]] <= ~e_mem[ebit[31:6]][ebit[5:0]];
            l     <= '0;
            state <= S_TOGGLE;
          end else if (32'(j) == 2 * R - 1) begin
            state <= S_THR;
          end else begin
            j <= j + 1'b1;
          end
        end
        // toggle the D syndrome bits touched by bit j
        S_TOGGLE: begin
          s_mem[spos[IW-1:6]][spos[5:0]] <= ~sbit;
          wt <= sbit ? wt - 1'b1 : wt + 1'b1;
          if (32'(l) == D - 1) begin
            l <= '0;
            if (32'(j) == 2 * R - 1) begin
              state <= S_THR;
            end else begin
              j     <= j + 1'b1;
              state <= S_UPDATE;
            end
          end else begin
            l <= l + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
