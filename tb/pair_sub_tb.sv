// pair_sub_tb: self-checking test of the pair subcircuit.
// A reference model (with its own copy of the meeting flag) is compared every
// cycle under random hot, req_gen, grant_in and pair_in.  It checks that two
// grants on sides this module requested fire exactly one pair pulse back on both
// sides, that a held meeting does not fire again, that pair pulses cross a
// non-hot module and stop at a hot one, which raises reset_out, and the chain
// flag.  Directed cases first, then random.
module pair_sub_tb;
  import decoder_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, hot = 1'b0;
  side_vec_t req_gen = '0, grant_in = '0, pair_in = '0, pair_out;
  logic reset_out, chain;
  logic m_meet = 1'b0;
  side_vec_t exp_pair;
  logic exp_reset, exp_chain;
  int checks = 0, failures = 0, n_fire = 0;

  pair_sub dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step();
    side_vec_t m, pick;
    int n;
    logic ok, fire;
    m = hot ? '0 : (grant_in & req_gen);
    pick = '0; n = 0;
    for (int s = 0; s < 4; s++) if (m[s] && n < 2) begin pick[s] = 1; n++; end
    ok   = (n == 2);
    fire = ok && !m_meet;
    exp_chain = fire || (pair_in != '0);
    #1;
    checks++;
    if (chain !== exp_chain) begin
      failures++;
      $display("FAIL: chain=%0b expected %0b", chain, exp_chain);
    end
    exp_pair = fire ? pick : '0;
    if (!hot) exp_pair |= {pair_in[1], pair_in[0], pair_in[3], pair_in[2]};
    exp_reset = hot && (pair_in != '0);
    m_meet = ok;
    if (fire) n_fire++;
    @(negedge clk);
    checks++;
    if (pair_out !== exp_pair || reset_out !== exp_reset) begin
      failures++;
      $display("FAIL: hot=%0b gen=%b grant=%b pair_in=%b -> pair=%b/%b reset=%0b/%0b",
               hot, req_gen, grant_in, pair_in, pair_out, exp_pair, reset_out, exp_reset);
    end
  endtask

  initial begin : main
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // meeting of W and S grants, held for three cycles: one pulse only
    req_gen = 4'b1100; grant_in = 4'b1100;
    step();
    checks++; if (pair_out !== 4'b1100) begin failures++; $display("FAIL: no pair pulse"); end
    step();
    checks++; if (pair_out !== 4'b0000) begin failures++; $display("FAIL: second pulse"); end
    step();
    grant_in = '0; step();
    // pair passes a non-hot module, stops at a hot one
    pair_in = 4'b0001; step();
    checks++; if (pair_out !== 4'b0100) begin failures++; $display("FAIL: pair not passed N->S"); end
    hot = 1'b1; step();
    checks++; if (pair_out !== '0 || !reset_out) begin failures++; $display("FAIL: hot did not stop pair"); end
    hot = 1'b0; pair_in = '0; step();
    for (int i = 0; i < 3000; i++) begin
      hot      = ($urandom_range(4) == 0);
      req_gen  = side_vec_t'($urandom);
      grant_in = side_vec_t'($urandom);
      pair_in  = ($urandom_range(3) == 0) ? side_vec_t'($urandom) : '0;
      step();
    end
    checks++;
    if (n_fire < 10) begin failures++; $display("FAIL: only %0d meetings", n_fire); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
