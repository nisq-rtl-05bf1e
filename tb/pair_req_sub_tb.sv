// pair_req_sub_tb: self-checking test of the pair_request subcircuit.
// Exhaustive over all 2^9 combinations of hot, grow_in and a random req_in,
// plus random cycles.  Expected: an idle (not hot) module receiving grow from an
// effective side pair (N+S, E+W, N+E, N+W) requests back towards both sources;
// S+E and S+W alone produce nothing; requests cross a non-hot module in a
// straight line and stop at a hot one.
module pair_req_sub_tb;
  import decoder_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, hot = 1'b0;
  side_vec_t grow_in = '0, req_in = '0, req_gen, req_pass, req_out;
  side_vec_t exp_gen, exp_pass;
  int checks = 0, failures = 0;
  int n_eff = 0;

  pair_req_sub dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step();
    logic gn, ge, gs, gw;
    {gw, gs, ge, gn} = grow_in;
    exp_gen = '0;
    if (!hot) begin
      if (gn && gs) begin exp_gen[0] = 1; exp_gen[2] = 1; end
      if (ge && gw) begin exp_gen[1] = 1; exp_gen[3] = 1; end
      if (gn && ge) begin exp_gen[0] = 1; exp_gen[1] = 1; end
      if (gn && gw) begin exp_gen[0] = 1; exp_gen[3] = 1; end
    end
    exp_pass = hot ? '0 : {req_in[1], req_in[0], req_in[3], req_in[2]};
    @(negedge clk);
    checks++;
    if (req_gen !== exp_gen || req_pass !== exp_pass || req_out !== (exp_gen | exp_pass)) begin
      failures++;
      $display("FAIL: hot=%0b grow=%b req_in=%b gen=%b/%b pass=%b/%b",
               hot, grow_in, req_in, req_gen, exp_gen, req_pass, exp_pass);
    end
    if (exp_gen != '0) n_eff++;
  endtask

  initial begin : main
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < 32; v++) begin
      hot     = v[4];
      grow_in = side_vec_t'(v);
      req_in  = side_vec_t'($urandom);
      step();
    end
    for (int i = 0; i < 1000; i++) begin
      hot     = ($urandom_range(3) == 0);
      grow_in = side_vec_t'($urandom);
      req_in  = side_vec_t'($urandom);
      step();
    end
    checks++;
    if (n_eff == 0) begin failures++; $display("FAIL: no intermediate seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
