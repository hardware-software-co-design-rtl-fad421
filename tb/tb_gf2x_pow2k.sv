// tb_gf2x_pow2k: raises random polynomials to 2^k for several k (0, 1, small,
// and above r) and compares with k reference squarings; checks the K + R cycle
// latency.
module tb_gf2x_pow2k;
  import bike_pkg::*;
  import bike_ref_pkg::*;

  localparam int R  = 269;
  localparam int NW = poly_words(R, 1);
  localparam int IW = clog2(R + 1);

  logic              clk = 1'b0, rst_n = 1'b0, we = 0, start = 0, busy, done;
  logic [clog2(NW)-1:0] wa = '0, ra = '0;
  logic [63:0]       wd = '0, rd;
  logic [IW-1:0]     k = '0;
  int                checks = 0, failures = 0;
  always #5 clk = ~clk;

  gf2x_pow2k #(.R(R), .LEVELS(1)) dut (.clk, .rst_n, .src_we(we), .src_addr(wa), .src_wdata(wd),
    .k, .start, .busy, .done, .r_addr(ra), .r_data(rd));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ks[] = '{0, 1, 2, 5, 64, 100, 268};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (ks[n]) begin
      words_t a, exp;
      int cyc;
      a = random_poly(R, NW);
      exp = a;
      for (int q = 0; q < ks[n]; q++) exp = sqr(exp, R, NW);
      for (int i = 0; i < NW; i++) begin
        @(negedge clk);
        we = 1; wa = $bits(wa)'(i); wd = a[i];
      end
      @(negedge clk);
      we = 0; start = 1; k = IW'(ks[n]);
      @(negedge clk);
      start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc - 1 != ks[n] + R + 1) begin
        failures++;
        $display("k=%0d latency %0d expected %0d", ks[n], cyc - 1, ks[n] + R + 1);
      end
      for (int i = 0; i < NW; i++) begin
        ra = $bits(ra)'(i); #1; checks++;
        if (rd != exp[i]) begin
          failures++;
          $display("k=%0d word %0d: got %h expected %h", ks[n], i, rd, exp[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
