// decoder_module_tb: self-checking test of one decoder module with its
// neighbours played by the testbench.
// Covers: syndrome load; a hot module growing on all sides and granting the one
// request it receives; a pair pulse reaching the hot module (reset_out, hot
// cleared, error set); an idle module passing grow, acting as intermediate
// (requests back to both grow sources, then one pair pulse back to both when the
// grants return); the reset hold blocking grow for RESET_DEPTH+1 cycles while a
// pair pulse still passes; and the error output as the parity of the pair pulses
// that crossed the module under random traffic.
module decoder_module_tb;
  import decoder_pkg::*;

  localparam int DEPTH = 5;

  logic  clk = 1'b0, rst_n = 1'b0, load = 1'b0, syndrome = 1'b0, reset_in = 1'b0;
  link_t link_in = '0, link_out;
  logic  reset_out, hot, error;
  int checks = 0, failures = 0;

  decoder_module #(.RESET_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic tick(input int n = 1);
    repeat (n) @(negedge clk);
  endtask

  initial begin : main
    bit par;
    tick(2);
    rst_n = 1'b1;
    tick();

    // ---- hot module
    syndrome = 1'b1; load = 1'b1; tick(); load = 1'b0; syndrome = 1'b0;
    check("hot after load", hot);
    tick();
    check("hot grows on all sides", link_out.grow == 4'b1111);
    link_in.req = 4'b0010;               // request from the east
    tick();
    check("grant back to the east", link_out.grant == 4'b0010);
    check("hot module does not forward the request", link_out.req == '0);
    link_in.pair = 4'b0010;              // pair pulse from the east
    tick();
    link_in.pair = '0;
    check("reset_out raised", reset_out);
    check("hot cleared", !hot);
    check("endpoint on the chain", error);
    check("pair absorbed", link_out.pair == '0);
    link_in.req = '0;
    tick();
    check("reset_out is a pulse", !reset_out);

    // ---- idle module: grow passes, intermediate
    load = 1'b1; tick(); load = 1'b0;
    check("load clears error", !error);
    link_in.grow = 4'b1000;              // grow from the west
    tick();
    check("grow W->E", link_out.grow == 4'b0010);
    link_in.grow = 4'b1001;              // and from the north: effective corner
    tick();
    check("requests back to N and W", link_out.req == 4'b1001);
    check("no grow passes through a meeting corner", link_out.grow == 4'b0110);
    link_in.grant = 4'b1001;             // both sources grant
    tick();
    check("pair pulse back to N and W", link_out.pair == 4'b1001);
    check("intermediate on the chain", error);
    tick();
    check("single pulse", link_out.pair == '0);
    link_in.grant = '0;
    link_in.grow = 4'b1100;              // S+W: ineffective corner
    tick(2);
    check("ineffective corner sends no request", link_out.req == '0);
    link_in.grow = '0;
    tick(2);

    // ---- reset hold: grow blocked, pair still passes
    reset_in = 1'b1; tick(); reset_in = 1'b0;
    link_in.grow = 4'b1000;
    for (int i = 0; i < DEPTH; i++) begin
      tick();
      check($sformatf("grow blocked %0d", i), link_out.grow == '0);
    end
    link_in.pair = 4'b1000;
    tick();
    link_in.pair = '0;
    check("pair passes during reset hold", link_out.pair == 4'b0010);
    tick();
    check("grow passes after reset hold", link_out.grow == 4'b0010);
    link_in.grow = '0;
    tick(3);

    // ---- error parity under random pair traffic on an idle module
    load = 1'b1; tick(); load = 1'b0;
    par = 0;
    for (int i = 0; i < 500; i++) begin
      link_in.pair = ($urandom_range(2) == 0) ? side_vec_t'($urandom) : '0;
      if (link_in.pair != '0) par = ~par;
      tick();
      check("error parity", error == par);
      check("pair passes straight",
            link_out.pair == {link_in.pair[1], link_in.pair[0], link_in.pair[3], link_in.pair[2]});
    end
    link_in.pair = '0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
