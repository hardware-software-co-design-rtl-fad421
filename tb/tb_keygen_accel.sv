// tb_keygen_accel: runs key generation for several seeds at a small r and checks
// that h0 and h1 are the reference samples of SHAKE256(seed) (h1 continuing the
// stream after the word where h0 ended), that h = h1 * h0^-1 (via the
// reference inverse, and h * h0 = h1), and that sigma is the TRNG value.
module tb_keygen_accel;
  import bike_pkg::*;
  import bike_ref_pkg::*;

  localparam int R  = 139;
  localparam int D  = 11;
  localparam int NW = poly_words(R, 1);
  localparam int AW = clog2(NW);

  logic          clk = 1'b0, rst_n = 1'b0, start = 0, busy, done;
  logic [31:0]   seed = '0;
  logic [255:0]  sigma_trng = '0, sigma;
  logic [1:0]    rd_sel = '0;
  logic [AW-1:0] rd_addr = '0;
  logic [63:0]   rd_data;
  int            checks = 0, failures = 0;
  always #5 clk = ~clk;

  keygen_accel #(.R(R), .D(D), .LEVELS(1)) dut (.clk, .rst_n, .start, .seed, .sigma_trng,
    .busy, .done, .rd_sel, .rd_addr, .rd_data, .sigma);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3; n++) begin
      words_t stream, rest, h0e, h1e, he, h0, h1, h, chk;
      words_t seedmsg;
      int     used0, used1;
      seedmsg = new[1];
      seedmsg[0] = {32'b0, $urandom};
      stream = sponge(1'b1, seedmsg, 400);
      h0e = sample(stream, R, 1, D, NW, used0);
      rest = new[stream.size() - used0];
      foreach (rest[i]) rest[i] = stream[i + used0];
      h1e = sample(rest, R, 1, D, NW, used1);
      he = mulmod(h1e, inverse(h0e, R, NW), R, NW);
      @(negedge clk);
      seed = seedmsg[0][31:0];
      sigma_trng = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      h0 = zero_poly(NW); h1 = zero_poly(NW); h = zero_poly(NW);
      for (int i = 0; i < NW; i++) begin
        rd_addr = AW'(i);
        rd_sel = 0; #1; h0[i] = rd_data;
        rd_sel = 1; #1; h1[i] = rd_data;
        rd_sel = 2; #1; h[i]  = rd_data;
      end
      checks++;
      if (h0 != h0e) begin failures++; $display("seed %h: h0 differs", seed); end
      checks++;
      if (h1 != h1e) begin failures++; $display("seed %h: h1 differs", seed); end
      checks++;
      if (weight(h0) != D || weight(h1) != D) begin failures++; $display("weights %0d %0d", weight(h0), weight(h1)); end
      checks++;
      if (h != he) begin failures++; $display("seed %h: h differs", seed); end
      chk = mulmod(h, h0, R, NW);
      checks++;
      if (chk != h1) begin failures++; $display("seed %h: h*h0 != h1", seed); end
      checks++;
      if (sigma != sigma_trng) begin failures++; $display("sigma not latched"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
