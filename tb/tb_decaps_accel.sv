// tb_decaps_accel: builds a key pair with the reference model at a small r,
// encapsulates with the behavioural software model and decapsulates in the
// accelerator. Checks: a valid ciphertext gives the encapsulated key; a ciphertext
// with a modified c1 decodes but fails the re-encryption check and gives the
// implicit-rejection key SHA3(sigma, c0, c1); a random c0 does not decode and
// also gives the rejection key.
module tb_decaps_accel;
  import bike_pkg::*;
  import bike_ref_pkg::*;
  import bike_encaps_model::*;

  localparam int R  = 269;
  localparam int D  = 15;
  localparam int T  = 4;
  localparam int NW = poly_words(R, 1);
  localparam int AW = clog2(NW);

  logic          clk = 1'b0, rst_n = 1'b0, ld_we = 0, start = 0, busy, done;
  logic [1:0]    ld_sel = '0;
  logic [AW-1:0] ld_addr = '0;
  logic [63:0]   ld_wdata = '0;
  logic [255:0]  m_prime = '0, sigma = '0, key;
  logic          accepted, dec_success;
  logic [2:0]    dec_iters;
  int            checks = 0, failures = 0;
  always #5 clk = ~clk;

  decaps_accel #(.R(R), .D(D), .T(T), .LEVELS(1), .MAX_ITER(5), .THR_MUL(0), .THR_ADD(9 << 24),
                 .THR_MIN(0)) dut (
    .clk, .rst_n, .ld_we, .ld_sel, .ld_addr, .ld_wdata, .m_prime, .sigma, .start, .busy, .done,
    .key, .accepted, .dec_success, .dec_iters);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int sel, input words_t p);
    for (int i = 0; i < NW; i++) begin
      @(negedge clk);
      ld_we = 1; ld_sel = 2'(sel); ld_addr = AW'(i); ld_wdata = p[i];
    end
    @(negedge clk);
    ld_we = 0;
  endtask

  task automatic decaps(input words_t c0, input logic [255:0] c1);
    load(2, c0);
    m_prime = c1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    words_t       h0, h1, h, c0bad;
    encaps_t      enc;
    logic [255:0] m, c1bad;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    h0 = random_sparse(R, NW, D);
    h1 = random_sparse(R, NW, D);
    h  = mulmod(h1, inverse(h0, R, NW), R, NW);
    sigma = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    load(0, h0);
    load(1, h1);
    for (int n = 0; n < 3; n++) begin
      m = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      enc = encaps(h, m, R, T, NW);
      decaps(enc.c0, enc.c1);
      checks++;
      if (key != enc.key || !accepted || !dec_success) begin
        failures++;
        $display("valid ciphertext %0d: key %h expected %h (accepted %0d, decoded %0d)",
                 n, key, enc.key, accepted, dec_success);
      end
    end
    // modified c1: decodes, re-encryption check fails
    c1bad = enc.c1 ^ 256'd1;
    decaps(enc.c0, c1bad);
    checks++;
    if (key != key_of(sigma, enc.c0, c1bad) || accepted || !dec_success) begin
      failures++;
      $display("modified c1: key %h, accepted %0d", key, accepted);
    end
    // random c0: decoding fails
    c0bad = random_poly(R, NW);
    decaps(c0bad, enc.c1);
    checks++;
    if (key != key_of(sigma, c0bad, enc.c1) || accepted || dec_success) begin
      failures++;
      $display("random c0: key %h, accepted %0d, decoded %0d", key, accepted, dec_success);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
