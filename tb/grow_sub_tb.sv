// grow_sub_tb: self-checking test of the grow subcircuit.
// Random hot and grow inputs every cycle; the expected registered outputs are
// written out side by side: a hot module grows everywhere, otherwise a grow
// crosses the module in a straight line unless a grow arrives head-on.
module grow_sub_tb;
  import decoder_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, hot = 1'b0;
  side_vec_t grow_in = '0, grow_out, exp;
  int checks = 0, failures = 0;

  grow_sub dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    logic gn, ge, gs, gw;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      hot     = ($urandom_range(3) == 0);
      grow_in = side_vec_t'($urandom);
      {gw, gs, ge, gn} = grow_in;
      exp[0] = hot | (gs & ~gn);   // leaves N: came in from S
      exp[1] = hot | (gw & ~ge);   // leaves E: came in from W
      exp[2] = hot | (gn & ~gs);   // leaves S: came in from N
      exp[3] = hot | (ge & ~gw);   // leaves W: came in from E
      @(negedge clk);
      checks++;
      if (grow_out !== exp) begin
        failures++;
        $display("FAIL: hot=%0b in=%b out=%b expected %b", hot, grow_in, grow_out, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
