// tb_gf2x_mul: random products checked against the bit-level reference, for
// Karatsuba depths 0, 1 and 2 (with unroll factors 1, 2 and 3) at a small r and
// for the default configuration (r = 12323, one level, unroll 2). Checks the
// exact latency, 3^L * (1 + sum over columns of ceil(terms/UNROLL)), as well.
module tb_gf2x_mul;
  import bike_pkg::*;
  import bike_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int RS = 389;
`define MUL_INST(NAME, RR, LL, UU) \
  localparam int NW_``NAME = poly_words(RR, LL); \
  logic a_we_``NAME = 0, b_we_``NAME = 0, st_``NAME = 0, busy_``NAME, done_``NAME; \
  logic [clog2(NW_``NAME)-1:0] wa_``NAME = '0, ra_``NAME = '0; \
  logic [63:0] ad_``NAME = '0, bd_``NAME = '0, rd_``NAME; \
  gf2x_mul #(.R(RR), .LEVELS(LL), .UNROLL(UU)) u_``NAME ( \
    .clk, .rst_n, .a_we(a_we_``NAME), .b_we(b_we_``NAME), .w_addr(wa_``NAME), \
    .a_wdata(ad_``NAME), .b_wdata(bd_``NAME), .start(st_``NAME), .busy(busy_``NAME), \
    .done(done_``NAME), .r_addr(ra_``NAME), .r_data(rd_``NAME));

  `MUL_INST(l0, RS, 0, 1)
  `MUL_INST(l1, RS, 1, 2)
  `MUL_INST(l2, RS, 2, 3)
  `MUL_INST(full, R_L1, 1, 2)

`define MUL_RUN(NAME, RR, LL, UU) \
  begin \
    words_t a, b, exp; \
    int cyc, nc, lat; \
    a = random_poly(RR, NW_``NAME); \
    b = random_poly(RR, NW_``NAME); \
    exp = mulmod(a, b, RR, NW_``NAME); \
    for (int i = 0; i < NW_``NAME; i++) begin \
      @(negedge clk); \
      a_we_``NAME = 1; b_we_``NAME = 1; wa_``NAME = $bits(wa_``NAME)'(i); \
      ad_``NAME = a[i]; bd_``NAME = b[i]; \
    end \
    @(negedge clk); \
    a_we_``NAME = 0; b_we_``NAME = 0; st_``NAME = 1; \
    @(negedge clk); \
    st_``NAME = 0; cyc = 1; \
    while (!done_``NAME) begin @(negedge clk); cyc++; end \
    nc = NW_``NAME >> LL; lat = 1; \
    for (int kk = 0; kk < 2 * nc - 1; kk++) begin \
      int nt; nt = ((kk < nc) ? kk : nc - 1) - ((kk >= nc) ? kk - nc + 1 : 0) + 1; \
      lat += (nt + UU - 1) / UU; \
    end \
    lat = (3 ** LL) * lat; \
    checks++; \
    if (cyc - 1 != lat) begin failures++; $display("%s latency %0d expected %0d", `"NAME`", cyc - 1, lat); end \
    for (int i = 0; i < NW_``NAME; i++) begin \
      ra_``NAME = $bits(ra_``NAME)'(i); #1; checks++; \
      if (rd_``NAME != exp[i]) begin \
        failures++; \
        $display("%s word %0d: got %h expected %h", `"NAME`", i, rd_``NAME, exp[i]); \
      end \
    end \
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3; n++) begin
      `MUL_RUN(l0, RS, 0, 1)
      `MUL_RUN(l1, RS, 1, 2)
      `MUL_RUN(l2, RS, 2, 3)
    end
    `MUL_RUN(full, R_L1, 1, 2)
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
