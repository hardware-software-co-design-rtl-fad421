// tb_keccak_f1600: checks the permutation against the reference model on the
// all-zero state (whose first output lane is the published 0xF1258F7940E1DDE7)
// and on random states, and checks the 24-cycle latency.
module tb_keccak_f1600;
  import bike_ref_pkg::*;

  logic              clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [24:0][63:0] st_i, st_o;
  logic              busy, done;
  int                checks = 0, failures = 0;

  always #5 clk = ~clk;

  keccak_f1600 dut (.clk, .rst_n, .start, .state_i(st_i), .state_o(st_o), .busy, .done);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(input logic [24:0][63:0] s);
    word_t a[5][5];
    int    cyc;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) a[x][y] = s[x + 5*y];
    keccak_f(a);
    @(negedge clk);
    st_i  = s;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc - 1 != 24) begin  // cycles from the edge that takes start to done
      failures++;
      $display("latency %0d, expected 24", cyc - 1);
    end
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) begin
      checks++;
      if (st_o[x + 5*y] != a[x][y]) begin
        failures++;
        $display("lane (%0d,%0d): got %h expected %h", x, y, st_o[x + 5*y], a[x][y]);
      end
    end
  endtask

  initial begin
    logic [24:0][63:0] s;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    s = '0;
    run_one(s);
    checks++;
    if (st_o[0] != 64'hF1258F7940E1DDE7) begin
      failures++;
      $display("zero-state KAT failed: %h", st_o[0]);
    end
    for (int n = 0; n < 20; n++) begin
      for (int i = 0; i < 25; i++) s[i] = {$urandom, $urandom};
      run_one(s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
