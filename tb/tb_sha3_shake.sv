// tb_sha3_shake: hashes messages of several lengths (around the 13- and 17-lane
// block boundaries) in both modes and compares with the reference sponge and,
// for two messages, with published-implementation answers (bytes 0..7 and
// 0..103 as the message). Output back-pressure is exercised with random
// out_ready. Checks the absorb/permutation timing of a one-word SHA3 message.
module tb_sha3_shake;
  import bike_pkg::*;
  import bike_ref_pkg::*;

  logic         clk = 1'b0, rst_n = 1'b0, init = 1'b0;
  sponge_mode_e mode;
  logic         in_valid = 1'b0, in_ready, in_last = 1'b0, out_valid, out_ready = 1'b0;
  logic [63:0]  in_data = '0, out_data;
  int           checks = 0, failures = 0;

  always #5 clk = ~clk;

  sha3_shake dut (.clk, .rst_n, .init, .mode, .in_valid, .in_ready, .in_data, .in_last,
                  .out_valid, .out_ready, .out_data);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hash(input bit shake, input words_t msg, input int nout, output words_t got,
                      output int cycles);
    int n, t0;
    got = new[nout];
    @(negedge clk);
    init = 1'b1;
    mode = shake ? MODE_SHAKE256 : MODE_SHA3_384;
    @(negedge clk);
    init = 1'b0;
    t0 = $time;
    for (int i = 0; i < msg.size(); i++) begin
      in_valid = 1'b1;
      in_data  = msg[i];
      in_last  = (i == msg.size() - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 1'b0;
    in_last  = 1'b0;
    n = 0;
    while (n < nout) begin
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (out_ready && out_valid) begin
        if (n == 0) cycles = ($time - t0) / 10;
        got[n] = out_data;
        n++;
      end
      @(negedge clk);
    end
    out_ready = 1'b0;
  endtask

  function automatic words_t counting(int nw);
    words_t m;
    m = new[nw];
    foreach (m[i]) for (int b = 0; b < 8; b++) m[i][8*b +: 8] = 8'(8*i + b);
    return m;
  endfunction

  initial begin
    words_t msg, got, exp;
    int     cyc;
    int     lens[] = '{1, 2, 12, 13, 14, 16, 17, 18, 30, 40};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // known answers
    hash(1'b0, counting(1), 6, got, cyc);
    checks++;
    if (got[0] != 64'he299a38425d33f4e) begin
      failures++;
      $display("SHA3-384 KAT (8 bytes) failed: %h", got[0]);
    end
    checks++;
    // 1 word absorbed + pad cycle + 24 rounds + control: first output within 30 cycles
    if (cyc > 30) begin
      failures++;
      $display("first digest word after %0d cycles", cyc);
    end
    hash(1'b1, counting(1), 2, got, cyc);
    checks++;
    if (got[0] != 64'h490c36f293ae4db4) begin
      failures++;
      $display("SHAKE256 KAT failed: %h", got[0]);
    end
    hash(1'b0, counting(13), 6, got, cyc);
    checks++;
    if (got[0] != 64'he51bb4f85c0d8d5b) begin
      failures++;
      $display("SHA3-384 KAT (104 bytes) failed: %h", got[0]);
    end

    // reference comparisons, random messages
    foreach (lens[li]) begin
      for (int sh = 0; sh < 2; sh++) begin
        int nout;
        msg = new[lens[li]];
        foreach (msg[i]) msg[i] = {$urandom, $urandom};
        nout = sh ? 40 : 6;
        exp = sponge(sh[0], msg, nout);
        hash(sh[0], msg, nout, got, cyc);
        for (int i = 0; i < nout; i++) begin
          checks++;
          if (got[i] != exp[i]) begin
            failures++;
            $display("len %0d mode %0d word %0d: got %h expected %h", lens[li], sh, i, got[i], exp[i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
