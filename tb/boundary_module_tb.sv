// boundary_module_tb: self-checking test of the boundary module.
// Directed: a grow arriving is answered with a pair_request one cycle later; a
// grant coming back while the request stands yields a single one-cycle pair
// pulse; a global reset blocks both for DEPTH+1 cycles.  Random traffic is then
// compared every cycle with a reference model.
module boundary_module_tb;
  localparam int DEPTH = 5;

  logic clk = 1'b0, rst_n = 1'b0, reset_in = 1'b0, grow_in = 1'b0, grant_in = 1'b0;
  logic req_out, pair_out;
  logic m_req = 0, m_meet = 0, m_pair = 0;
  bit hist [$];
  int checks = 0, failures = 0, n_pair = 0;

  boundary_module #(.RESET_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step();
    logic blk, meet;
    blk = reset_in;
    foreach (hist[i]) blk |= hist[i];
    meet   = grant_in && m_req && !blk;
    m_pair = meet && !m_meet;
    m_meet = meet;
    m_req  = grow_in && !blk;
    hist.push_back(reset_in); void'(hist.pop_front());
    @(negedge clk);
    checks++;
    if (req_out !== m_req || pair_out !== m_pair) begin
      failures++;
      $display("FAIL: grow=%0b grant=%0b rst=%0b req=%0b/%0b pair=%0b/%0b",
               grow_in, grant_in, reset_in, req_out, m_req, pair_out, m_pair);
    end
    if (pair_out) n_pair++;
  endtask

  initial begin : main
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < DEPTH; i++) hist.push_back(1'b0);
    grow_in = 1; step();
    checks++; if (!req_out) begin failures++; $display("FAIL: no request"); end
    grant_in = 1; step();
    checks++; if (!pair_out) begin failures++; $display("FAIL: no pair"); end
    step();
    checks++; if (pair_out) begin failures++; $display("FAIL: pair not a pulse"); end
    reset_in = 1; step(); reset_in = 0;
    for (int i = 0; i < DEPTH; i++) begin
      step();
      checks++; if (req_out) begin failures++; $display("FAIL: request during reset"); end
    end
    step(); step();
    checks++; if (!req_out) begin failures++; $display("FAIL: request not back after reset"); end
    for (int i = 0; i < 3000; i++) begin
      if ($urandom_range(7) == 0) grow_in = ~grow_in;
      if ($urandom_range(5) == 0) grant_in = ~grant_in;
      reset_in = ($urandom_range(49) == 0);
      step();
    end
    checks++;
    if (n_pair < 5) begin failures++; $display("FAIL: only %0d pairs", n_pair); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
