// tb_bf_decoder: plants a random error of weight t in the syndrome of random
// private blocks and checks that the decoder returns exactly that error with a
// zero syndrome. The default instance runs the level-1 parameters (r = 12323,
// d = 71, t = 134, specification threshold); a second, small instance with a
// fixed threshold runs several easy cases and one hopeless error that must end
// unsuccessfully after MAX_ITER iterations. Cycle counts are checked against
// 2R + iters*2R*D (lower bound) and that plus the update passes (upper bound).
module tb_bf_decoder;
  import bike_pkg::*;
  import bike_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`define DEC_INST(NAME, RR, DD, MI, TM, TA, TN) \
  localparam int NW_``NAME = poly_words(RR, 1); \
  logic h_we_``NAME = 0, h_sel_``NAME = 0, s_we_``NAME = 0, st_``NAME = 0; \
  logic busy_``NAME, done_``NAME, ok_``NAME; \
  logic [clog2(MI+1)-1:0] it_``NAME; \
  logic [clog2(NW_``NAME)-1:0] wa_``NAME = '0; \
  logic [clog2(2*NW_``NAME)-1:0] ea_``NAME = '0; \
  logic [63:0] wd_``NAME = '0, ed_``NAME; \
  bf_decoder #(.R(RR), .D(DD), .LEVELS(1), .MAX_ITER(MI), .THR_MUL(TM), .THR_ADD(TA), .THR_MIN(TN)) \
  u_``NAME (.clk, .rst_n, .h_we(h_we_``NAME), .h_sel(h_sel_``NAME), .h_addr(wa_``NAME), \
    .h_wdata(wd_``NAME), .syn_we(s_we_``NAME), .syn_addr(wa_``NAME), .syn_wdata(wd_``NAME), \
    .start(st_``NAME), .busy(busy_``NAME), .done(done_``NAME), .success(ok_``NAME), \
    .iters(it_``NAME), .e_addr(ea_``NAME), .e_data(ed_``NAME));

  `DEC_INST(full, R_L1, D_L1, 20, THR_MUL_L1, THR_ADD_L1, THR_MIN_L1)
  `DEC_INST(small, 269, 15, 5, 0, 9 << 24, 0)

`define DEC_RUN(NAME, RR, DD, TT, EXPECT_OK) \
  begin \
    words_t h0, h1, e0, e1, s; \
    int cyc, lo, hi, nit; \
    h0 = random_sparse(RR, NW_``NAME, DD); \
    h1 = random_sparse(RR, NW_``NAME, DD); \
    e0 = random_sparse(RR, NW_``NAME, TT / 2); \
    e1 = random_sparse(RR, NW_``NAME, TT - TT / 2); \
    s = mulmod(e0, h0, RR, NW_``NAME); \
    begin words_t s1; s1 = mulmod(e1, h1, RR, NW_``NAME); foreach (s[i]) s[i] ^= s1[i]; end \
    for (int i = 0; i < NW_``NAME; i++) begin \
      @(negedge clk); wa_``NAME = $bits(wa_``NAME)'(i); \
      h_we_``NAME = 1; h_sel_``NAME = 0; wd_``NAME = h0[i]; \
      @(negedge clk); h_sel_``NAME = 1; wd_``NAME = h1[i]; \
      @(negedge clk); h_we_``NAME = 0; s_we_``NAME = 1; wd_``NAME = s[i]; \
    end \
    @(negedge clk); s_we_``NAME = 0; st_``NAME = 1; \
    @(negedge clk); st_``NAME = 0; cyc = 1; \
    while (!done_``NAME) begin @(negedge clk); cyc++; end \
    nit = int'(it_``NAME); \
    checks++; \
    if (ok_``NAME != EXPECT_OK) begin failures++; $display("%s: success=%0d", `"NAME`", ok_``NAME); end \
    if (EXPECT_OK) begin \
      for (int i = 0; i < 2 * NW_``NAME; i++) begin \
        ea_``NAME = $bits(ea_``NAME)'(i); #1; checks++; \
        if (ed_``NAME != ((i < NW_``NAME) ? e0[i] : e1[i - NW_``NAME])) begin \
          failures++; $display("%s: e word %0d differs", `"NAME`", i); \
        end \
      end \
    end \
    lo = 2 * RR + nit * 2 * RR * DD; \
    hi = lo + NW_``NAME + nit * (2 * RR + 2) + DD * 3 * nit * 2 * RR / 4 + 10; \
    checks++; \
    if (cyc < lo || cyc > hi) begin failures++; $display("%s: %0d cycles, outside [%0d, %0d]", `"NAME`", cyc, lo, hi); end \
    $display("%s: iterations %0d, cycles %0d", `"NAME`", nit, cyc); \
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 6; n++) `DEC_RUN(small, 269, 15, 4, 1'b1)
    `DEC_RUN(small, 269, 15, 200, 1'b0)
    checks++;
    if (it_small != 5) begin failures++; $display("hopeless case stopped after %0d iterations", it_small); end
    `DEC_RUN(full, R_L1, D_L1, T_L1, 1'b1)
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
