// tb_gf2x_inv: inverts random odd-weight polynomials with the controller driving
// its own multiplier and power units, and checks a * a^-1 = 1 with the
// reference multiplication, plus equality with the reference inverse
// a^(2^(r-1)-2) for the small r. Also counts the multiplications started
// (floor(log2(r-2)) + popcount((r-2) >> 1)).
module tb_gf2x_inv;
  import bike_pkg::*;
  import bike_ref_pkg::*;

  localparam int R  = 139;   // 2 is primitive modulo 139
  localparam int L  = 1;
  localparam int NW = poly_words(R, L);
  localparam int AW = clog2(NW);
  localparam int IW = clog2(R + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic          a_we = 0, start = 0, busy, done;
  logic [AW-1:0] a_addr = '0;
  logic [63:0]   a_wdata = '0;
  logic          mul_a_we, mul_b_we, mul_start, mul_busy, mul_done;
  logic [AW-1:0] mul_w_addr, mul_r_addr;
  logic [63:0]   mul_a_wdata, mul_b_wdata, mul_r_data;
  logic          pow_we, pow_start, pow_busy, pow_done;
  logic [AW-1:0] pow_w_addr, pow_r_addr, rd_addr = '0;
  logic [63:0]   pow_wdata, pow_r_data;
  logic [IW-1:0] pow_k;
  logic          reading = 0;

  gf2x_inv #(.R(R), .LEVELS(L)) dut (
    .clk, .rst_n, .a_we, .a_addr, .a_wdata, .start, .busy, .done,
    .mul_a_we, .mul_b_we, .mul_w_addr, .mul_a_wdata, .mul_b_wdata, .mul_start, .mul_done,
    .mul_r_addr, .mul_r_data, .pow_we, .pow_w_addr, .pow_wdata, .pow_k, .pow_start, .pow_done,
    .pow_r_addr, .pow_r_data);
  gf2x_mul #(.R(R), .LEVELS(L)) u_mul (
    .clk, .rst_n, .a_we(mul_a_we), .b_we(mul_b_we), .w_addr(mul_w_addr), .a_wdata(mul_a_wdata),
    .b_wdata(mul_b_wdata), .start(mul_start), .busy(mul_busy), .done(mul_done),
    .r_addr(mul_r_addr), .r_data(mul_r_data));
  gf2x_pow2k #(.R(R), .LEVELS(L)) u_pow (
    .clk, .rst_n, .src_we(pow_we), .src_addr(pow_w_addr), .src_wdata(pow_wdata), .k(pow_k),
    .start(pow_start), .busy(pow_busy), .done(pow_done),
    .r_addr(reading ? rd_addr : pow_r_addr), .r_data(pow_r_data));

  int nmul;
  always @(posedge clk) if (mul_start) nmul++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_mul;
    exp_mul = $clog2(R - 1) - 1 + $countones((R - 2) >> 1);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4; n++) begin
      words_t a, inv, p, ref_inv;
      a = random_sparse(R, NW, 2 * $urandom_range(3, 30) + 1);
      ref_inv = inverse(a, R, NW);
      for (int i = 0; i < NW; i++) begin
        @(negedge clk);
        a_we = 1; a_addr = AW'(i); a_wdata = a[i];
      end
      @(negedge clk);
      a_we = 0; start = 1; nmul = 0;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      reading = 1;
      inv = zero_poly(NW);
      for (int i = 0; i < NW; i++) begin
        rd_addr = AW'(i); #1;
        inv[i] = pow_r_data;
      end
      reading = 0;
      p = mulmod(a, inv, R, NW);
      checks++;
      if (!is_one(p)) begin
        failures++;
        $display("run %0d: a * inverse != 1", n);
      end
      checks++;
      if (inv != ref_inv) begin
        failures++;
        $display("run %0d: inverse differs from reference", n);
      end
      checks++;
      if (nmul != exp_mul) begin
        failures++;
        $display("run %0d: %0d multiplications, expected %0d", n, nmul, exp_mul);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
