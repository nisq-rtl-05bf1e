// pair_grant_sub_tb: self-checking test of the pair_grant subcircuit.
// Directed: a hot module with requests arriving together grants the lowest side
// index only, keeps that grant when a higher-priority request appears later,
// and moves on once its request drops.  Random: a reference model with its own
// lock register is compared every cycle; a non-hot module forwards a grant only
// along a line on which it forwards a request.
module pair_grant_sub_tb;
  import decoder_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, hot = 1'b0;
  side_vec_t req_in = '0, req_pass = '0, grant_in = '0, grant_out;
  side_vec_t m_lock = '0, exp;
  int checks = 0, failures = 0;

  pair_grant_sub dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic side_vec_t lowest(side_vec_t v);
    for (int s = 0; s < 4; s++) if (v[s]) return side_vec_t'(1 << s);
    return '0;
  endfunction

  task automatic step(input string tag);
    side_vec_t nl;
    if (hot) begin
      nl  = ((m_lock & req_in) != '0) ? m_lock : lowest(req_in);
      exp = nl;
    end else begin
      nl  = '0;
      exp = '0;
      if (grant_in[0] && req_pass[0]) exp[2] = 1;
      if (grant_in[1] && req_pass[1]) exp[3] = 1;
      if (grant_in[2] && req_pass[2]) exp[0] = 1;
      if (grant_in[3] && req_pass[3]) exp[1] = 1;
    end
    m_lock = nl;
    @(negedge clk);
    checks++;
    if (grant_out !== exp) begin
      failures++;
      $display("FAIL %s: hot=%0b req=%b pass=%b grant_in=%b out=%b expected %b",
               tag, hot, req_in, req_pass, grant_in, grant_out, exp);
    end
  endtask

  initial begin : main
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    hot = 1'b1;
    req_in = 4'b1010; step("E and W together -> E");
    checks++; if (grant_out !== 4'b0010) begin failures++; $display("FAIL: E not granted"); end
    req_in = 4'b1011; step("N arrives later, E kept");
    checks++; if (grant_out !== 4'b0010) begin failures++; $display("FAIL: grant stolen"); end
    req_in = 4'b1001; step("E drops -> N");
    checks++; if (grant_out !== 4'b0001) begin failures++; $display("FAIL: N not granted"); end
    req_in = 4'b0000; step("idle");
    for (int i = 0; i < 2000; i++) begin
      if ($urandom_range(9) == 0) hot = ~hot;
      if ($urandom_range(3) == 0) req_in = side_vec_t'($urandom);
      req_pass = side_vec_t'($urandom);
      grant_in = side_vec_t'($urandom);
      step("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
