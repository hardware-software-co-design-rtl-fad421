// tb_bike_hwsw_full: one complete key exchange with the co-design at its default
// size (BIKE level 1: r = 12323, d = 71, t = 134, one Karatsuba level): key
// generation in the accelerator, encapsulation by the software model with the
// generated public key, decapsulation in the accelerator, and comparison of the
// two shared keys. Also checks h * h0 = h1 and the key weights, and prints the
// cycle counts of both accelerators.
module tb_bike_hwsw_full;
  import bike_pkg::*;
  import bike_ref_pkg::*;
  import bike_encaps_model::*;

  localparam int R  = R_L1;
  localparam int NW = poly_words(R, 1);
  localparam int AW = clog2(NW);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          kg_start = 0, kg_busy, kg_done;
  logic [31:0]   kg_seed = '0;
  logic [255:0]  kg_sigma_trng = '0, kg_sigma;
  logic [1:0]    kg_rd_sel = '0;
  logic [AW-1:0] kg_rd_addr = '0;
  logic [63:0]   kg_rd_data;
  logic          dc_ld_we = 0, dc_start = 0, dc_busy, dc_done, dc_accepted, dc_dec_success;
  logic [1:0]    dc_ld_sel = '0;
  logic [AW-1:0] dc_ld_addr = '0;
  logic [63:0]   dc_ld_wdata = '0;
  logic [255:0]  dc_m_prime = '0, dc_sigma = '0, dc_key;
  logic [4:0]    dc_dec_iters;
  int            checks = 0, failures = 0;
  always #5 clk = ~clk;

  bike_hwsw_top dut (.*);

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    words_t       h0, h1, h;
    logic [255:0] m;
    encaps_t      enc;
    int           cyc;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // key generation
    @(negedge clk);
    kg_seed = $urandom;
    kg_sigma_trng = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    kg_start = 1;
    @(negedge clk);
    kg_start = 0;
    cyc = 1;
    while (!kg_done) begin @(negedge clk); cyc++; end
    $display("key generation: %0d cycles", cyc);
    h0 = zero_poly(NW); h1 = zero_poly(NW); h = zero_poly(NW);
    for (int i = 0; i < NW; i++) begin
      kg_rd_addr = AW'(i);
      kg_rd_sel = 0; #1; h0[i] = kg_rd_data;
      kg_rd_sel = 1; #1; h1[i] = kg_rd_data;
      kg_rd_sel = 2; #1; h[i]  = kg_rd_data;
    end
    checks++;
    if (weight(h0) != D_L1 || weight(h1) != D_L1) begin failures++; $display("key weights wrong"); end
    checks++;
    if (mulmod(h, h0, R, NW) != h1) begin failures++; $display("h * h0 != h1"); end
    // encapsulation in software
    m = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    enc = encaps(h, m, R, T_L1, NW);
    // decapsulation
    for (int s = 0; s < 3; s++) begin
      words_t p;
      p = (s == 0) ? h0 : (s == 1) ? h1 : enc.c0;
      for (int i = 0; i < NW; i++) begin
        @(negedge clk);
        dc_ld_we = 1; dc_ld_sel = 2'(s); dc_ld_addr = AW'(i); dc_ld_wdata = p[i];
      end
    end
    @(negedge clk);
    dc_ld_we = 0;
    dc_m_prime = enc.c1;
    dc_sigma = kg_sigma;
    dc_start = 1;
    @(negedge clk);
    dc_start = 0;
    cyc = 1;
    while (!dc_done) begin @(negedge clk); cyc++; end
    $display("decapsulation: %0d cycles, %0d decoder iterations", cyc, dc_dec_iters);
    checks++;
    if (!dc_accepted || !dc_dec_success) begin failures++; $display("ciphertext not accepted"); end
    checks++;
    if (dc_key != enc.key) begin failures++; $display("shared keys differ"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
