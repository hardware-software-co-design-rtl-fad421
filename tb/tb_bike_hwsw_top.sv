// tb_bike_hwsw_top: end-to-end run of the co-design at a reduced size (r = 269,
// d = 15, t = 4, fixed threshold 9): key generation in the accelerator, read-back
// of the keys, encapsulation by the software model, and decapsulation in the
// accelerator, repeated for several seeds. It also makes each mechanism happen
// and counts it: both accelerators busy at the same time, a decoder run needing
// more than one iteration, an accepted ciphertext, an implicit rejection after a
// successful decode (modified c1), and a decoding failure (random c0). A
// mechanism that never occurred counts as a failure.
module tb_bike_hwsw_top;
  import bike_pkg::*;
  import bike_ref_pkg::*;
  import bike_encaps_model::*;

  localparam int R  = 269;
  localparam int D  = 15;
  localparam int T  = 4;
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
  logic [2:0]    dc_dec_iters;
  int            checks = 0, failures = 0;
  int            n_concurrent = 0, n_multi_iter = 0, n_accept = 0, n_reject = 0, n_decfail = 0;
  always #5 clk = ~clk;

  bike_hwsw_top #(.R(R), .D(D), .T(T), .LEVELS(1), .MAX_ITER(5), .THR_MUL(0),
                  .THR_ADD(9 << 24), .THR_MIN(0)) dut (.*);

  logic conc_seen;
  always @(posedge clk) if (kg_busy && dc_busy) conc_seen <= 1'b1;

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic keygen(input logic [31:0] seed, output words_t h0, output words_t h1,
                        output words_t h, output logic [255:0] sigma);
    @(negedge clk);
    kg_seed = seed;
    kg_sigma_trng = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    kg_start = 1;
    @(negedge clk);
    kg_start = 0;
    while (!kg_done) @(negedge clk);
    h0 = zero_poly(NW); h1 = zero_poly(NW); h = zero_poly(NW);
    for (int i = 0; i < NW; i++) begin
      kg_rd_addr = AW'(i);
      kg_rd_sel = 0; #1; h0[i] = kg_rd_data;
      kg_rd_sel = 1; #1; h1[i] = kg_rd_data;
      kg_rd_sel = 2; #1; h[i]  = kg_rd_data;
    end
    sigma = kg_sigma;
  endtask

  task automatic load(input int sel, input words_t p);
    for (int i = 0; i < NW; i++) begin
      @(negedge clk);
      dc_ld_we = 1; dc_ld_sel = 2'(sel); dc_ld_addr = AW'(i); dc_ld_wdata = p[i];
    end
    @(negedge clk);
    dc_ld_we = 0;
  endtask

  task automatic decaps_start(input words_t c0, input logic [255:0] c1);
    load(2, c0);
    dc_m_prime = c1;
    @(negedge clk);
    dc_start = 1;
    @(negedge clk);
    dc_start = 0;
  endtask

  task automatic decaps_wait();
    while (!dc_done) @(negedge clk);
    if (dc_dec_iters > 1) n_multi_iter++;
    if (dc_accepted) n_accept++;
    else if (dc_dec_success) n_reject++;
    else n_decfail++;
  endtask

  initial begin
    words_t       h0, h1, h, c0bad;
    logic [255:0] sigma, m, c1bad;
    encaps_t      enc;
    conc_seen = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3; n++) begin
      keygen($urandom, h0, h1, h, sigma);
      checks++;
      if (mulmod(h, h0, R, NW) != h1) begin failures++; $display("key pair %0d inconsistent", n); end
      load(0, h0);
      load(1, h1);
      dc_sigma = sigma;
      for (int q = 0; q < 3; q++) begin
        m = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        enc = encaps(h, m, R, T, NW);
        decaps_start(enc.c0, enc.c1);
        decaps_wait();
        checks++;
        if (dc_key != enc.key) begin failures++; $display("key %0d/%0d differs", n, q); end
      end
      // implicit rejection after a successful decode
      c1bad = enc.c1 ^ (256'd1 << n);
      decaps_start(enc.c0, c1bad);
      decaps_wait();
      checks++;
      if (dc_key != key_of(sigma, enc.c0, c1bad)) begin failures++; $display("rejection key differs"); end
      // decoding failure, with the next key generation running alongside
      c0bad = random_poly(R, NW);
      decaps_start(c0bad, enc.c1);
      @(negedge clk);
      kg_start = 1; kg_seed = $urandom;
      @(negedge clk);
      kg_start = 0;
      fork
        decaps_wait();
        while (!kg_done) @(negedge clk);
      join
      checks++;
      if (dc_key != key_of(sigma, c0bad, enc.c1)) begin failures++; $display("failure key differs"); end
    end
    n_concurrent = conc_seen ? 1 : 0;
    $display("mechanisms: concurrent=%0d multi_iteration=%0d accepted=%0d rejected=%0d decode_failed=%0d",
             n_concurrent, n_multi_iter, n_accept, n_reject, n_decfail);
    checks += 5;
    if (n_concurrent == 0) failures++;
    if (n_multi_iter == 0) failures++;
    if (n_accept == 0) failures++;
    if (n_reject == 0) failures++;
    if (n_decfail == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
