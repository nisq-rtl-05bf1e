// reset_keeper_tb: self-checking test of the reset keeper.
// Random one-cycle pulses on the global reset wire (sparse and dense); the
// expected block signal is recomputed from a history of the last DEPTH inputs,
// and a lone pulse must hold block high for exactly DEPTH+1 cycles.
module reset_keeper_tb;
  localparam int DEPTH = 5;

  logic clk = 1'b0, rst_n = 1'b0, reset_in = 1'b0, block;
  int checks = 0, failures = 0;
  bit hist [$];

  reset_keeper #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit expected();
    bit e = reset_in;
    foreach (hist[i]) e |= hist[i];
    return e;
  endfunction

  initial begin : main
    int len;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < DEPTH; i++) hist.push_back(1'b0);
    // a lone pulse
    @(negedge clk); reset_in = 1'b1;
    @(posedge clk); hist.push_back(reset_in); void'(hist.pop_front());
    @(negedge clk); reset_in = 1'b0;
    len = 2;  // the pulse cycle and the one now
    while (block) begin
      @(posedge clk); hist.push_back(reset_in); void'(hist.pop_front());
      @(negedge clk);
      if (block) len++;
    end
    checks++;
    if (len != DEPTH + 1) begin
      failures++;
      $display("FAIL: lone pulse held block for %0d cycles, expected %0d", len, DEPTH + 1);
    end
    // random traffic
    for (int i = 0; i < 2000; i++) begin
      reset_in = ($urandom_range(99) < ((i < 1000) ? 5 : 40));
      #1;
      checks++;
      if (block !== expected()) begin
        failures++;
        $display("FAIL cycle %0d: block=%0b expected %0b", i, block, expected());
      end
      @(posedge clk); hist.push_back(reset_in); void'(hist.pop_front());
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
