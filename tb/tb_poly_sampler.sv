// tb_poly_sampler: feeds random stream words (with random gaps) to two
// samplers, one block of r bits and two blocks, and compares the dense vector,
// the reported positions and the number of words consumed with the reference
// rule. Small r so that rejections of both kinds (out of range, repeat) occur.
module tb_poly_sampler;
  import bike_ref_pkg::*;

  localparam int R  = 131;
  localparam int NW = 4;    // poly_words(131, 1)

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one-block sampler, weight 41 (repeats likely)
  logic        s1_start = 0, s1_valid = 0, s1_ready, s1_pv, s1_busy, s1_done;
  logic [63:0] s1_data = '0, s1_rd;
  logic [7:0]  s1_pos;
  logic [1:0]  s1_addr = '0;
  poly_sampler #(.R(R), .NBLK(1), .WEIGHT(41), .LEVELS(1)) u1 (
    .clk, .rst_n, .start(s1_start), .in_valid(s1_valid), .in_ready(s1_ready), .in_data(s1_data),
    .pos_valid(s1_pv), .pos(s1_pos), .busy(s1_busy), .done(s1_done), .rd_addr(s1_addr), .rd_data(s1_rd));

  // two-block sampler, weight 12
  logic        s2_start = 0, s2_valid = 0, s2_ready, s2_pv, s2_busy, s2_done;
  logic [63:0] s2_data = '0, s2_rd;
  logic [8:0]  s2_pos;
  logic [2:0]  s2_addr = '0;
  poly_sampler #(.R(R), .NBLK(2), .WEIGHT(12), .LEVELS(1)) u2 (
    .clk, .rst_n, .start(s2_start), .in_valid(s2_valid), .in_ready(s2_ready), .in_data(s2_data),
    .pos_valid(s2_pv), .pos(s2_pos), .busy(s2_busy), .done(s2_done), .rd_addr(s2_addr), .rd_data(s2_rd));

  int npos1, npos2;
  always @(posedge clk) begin
    if (s1_pv) npos1++;
    if (s2_pv) npos2++;
  end

  task automatic run(input int which, input int weight, input int nblk);
    words_t stream, exp;
    int     used, fed;
    stream = new[400];
    foreach (stream[i]) stream[i] = {$urandom, $urandom};
    exp = sample(stream, R, nblk, weight, NW, used);
    npos1 = 0;
    npos2 = 0;
    @(negedge clk);
    if (which == 1) s1_start = 1; else s2_start = 1;
    @(negedge clk);
    s1_start = 0;
    s2_start = 0;
    fed = 0;
    forever begin
      logic v;
      v = ($urandom_range(0, 2) != 0);
      if (which == 1) begin s1_valid = v; s1_data = stream[fed]; end
      else            begin s2_valid = v; s2_data = stream[fed]; end
      @(posedge clk);
      if (v && ((which == 1) ? s1_ready : s2_ready)) fed++;
      if ((which == 1) ? s1_done : s2_done) break;
      @(negedge clk);
    end
    @(negedge clk);
    s1_valid = 0;
    s2_valid = 0;
    checks++;
    if (fed != used) begin
      failures++;
      $display("sampler %0d used %0d words, expected %0d", which, fed, used);
    end
    checks++;
    if (((which == 1) ? npos1 : npos2) != weight) begin
      failures++;
      $display("sampler %0d reported %0d positions", which, (which == 1) ? npos1 : npos2);
    end
    for (int a = 0; a < nblk * NW; a++) begin
      if (which == 1) s1_addr = 2'(a); else s2_addr = 3'(a);
      #1;
      checks++;
      if (((which == 1) ? s1_rd : s2_rd) != exp[a]) begin
        failures++;
        $display("sampler %0d word %0d: got %h expected %h", which, a,
                 (which == 1) ? s1_rd : s2_rd, exp[a]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 10; n++) begin
      run(1, 41, 1);
      run(2, 12, 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
