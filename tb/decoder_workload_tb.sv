// decoder_workload_tb: the code distances 3, 5, 7 and 9 under pure dephasing.
// Four meshes run Monte Carlo trials side by side (see workload_runner) at
// physical error rates of 1 % to 6 %.  Every decode must end and its correction
// must explain the syndrome exactly; logical error rates and decode times are
// printed for comparison with the expected accuracy of the approximate decoder.
module decoder_workload_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NR = 4;
  logic done [NR];
  int   chk  [NR];
  int   fail [NR];

  workload_runner #(.DISTANCE(3), .TRIALS(300)) u_d3 (.clk, .done(done[0]), .checks(chk[0]), .failures(fail[0]));
  workload_runner #(.DISTANCE(5), .TRIALS(300)) u_d5 (.clk, .done(done[1]), .checks(chk[1]), .failures(fail[1]));
  workload_runner #(.DISTANCE(7), .TRIALS(300)) u_d7 (.clk, .done(done[2]), .checks(chk[2]), .failures(fail[2]));
  workload_runner #(.DISTANCE(9), .TRIALS(300)) u_d9 (.clk, .done(done[3]), .checks(chk[3]), .failures(fail[3]));

  int checks, failures;

  task automatic report(input int extra_fail);
    checks = 0; failures = extra_fail;
    for (int i = 0; i < NR; i++) begin
      checks += chk[i];
      failures += fail[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    report(1);
  end

  initial begin : main
    #1;
    wait (done[0] && done[1] && done[2] && done[3]);
    report(0);
  end
endmodule
