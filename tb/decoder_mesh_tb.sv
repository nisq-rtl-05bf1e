// decoder_mesh_tb: end-to-end test of the decoder mesh at its default size
// (distance 9, a 17 x 17 grid with 36 boundary modules).
//
// Directed cases, each with the exact expected correction worked out by hand:
//   inline      two X ancillas in one row pair through the midpoint; the decode
//               time is checked against 4h+1 cycles (h = half the distance);
//   corner      two X ancillas in different rows and columns pair through the
//               corner below the upper one;
//   top_bnd     one X ancilla next to the top edge pairs with the boundary;
//   left_bnd    one Z ancilla next to the left edge pairs with the boundary;
//   equidist    three equally spaced X ancillas: the middle one must grant one
//               of two simultaneous requests, the left one then goes to the top
//               boundary after the global reset.
// Then random pure-dephasing trials: Z errors on data qubits with probability
// 1 % to 8 %, X-ancilla syndrome computed here, and the decoder's correction must
// reproduce that syndrome exactly (every ancilla sees even parity of error plus
// correction) and the decode must end.  Internal events are counted through
// hierarchical references and every mechanism must have happened at least once.
module decoder_mesh_tb;
  import decoder_pkg::*;

  localparam int D = 9;
  localparam int N = 2 * D - 1;
  localparam int TIMEOUT = 2000;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [N*N-1:0] syndrome = '0, error;
  logic busy, global_reset;
  logic [15:0] cycles, resets;

  int checks = 0, failures = 0;

  decoder_mesh dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ event counters
  logic [N*N-1:0] ev_multi_req, ev_meet, ev_pass_pair;
  logic [4*N-1:0] ev_bnd_pair;
  for (genvar r = 0; r < N; r++) begin : g_er
    for (genvar c = 0; c < N; c++) begin : g_ec
      assign ev_multi_req[r*N+c] = dut.g_r[r].g_c[c].u_mod.hot &&
                                   ($countones(dut.g_r[r].g_c[c].u_mod.req_b) > 1);
      assign ev_meet[r*N+c]      = dut.g_r[r].g_c[c].u_mod.u_pair.fire;
      assign ev_pass_pair[r*N+c] = !dut.g_r[r].g_c[c].u_mod.hot &&
                                   (dut.g_r[r].g_c[c].u_mod.link_in.pair != '0);
    end
  end
  for (genvar s = 0; s < 4; s++) begin : g_es
    for (genvar k = 0; k < N; k++) begin : g_ek
      if (k % 2 == 0) begin : g_b
        assign ev_bnd_pair[s*N+k] = dut.g_bs[s].g_bk[k].g_b.u_bnd.pair_out;
      end else begin : g_nb
        assign ev_bnd_pair[s*N+k] = 1'b0;
      end
    end
  end

  int n_multi_req = 0, n_meet = 0, n_pass = 0, n_bnd = 0, n_reset = 0, n_block = 0;
  always @(posedge clk) begin
    n_multi_req += $countones(ev_multi_req);
    n_meet      += $countones(ev_meet);
    n_pass      += $countones(ev_pass_pair);
    n_bnd       += $countones(ev_bnd_pair);
    if (global_reset) n_reset++;
    if (dut.g_r[0].g_c[0].u_mod.block && !global_reset) n_block++;
  end

  // ------------------------------------------------------------------ helpers
  function automatic int idx(int r, int c);
    return r * N + c;
  endfunction

  function automatic bit is_data(int r, int c);
    return (r % 2) == (c % 2);
  endfunction

  // Parity of the data qubits around ancilla (r,c) in vector v.
  function automatic bit anc_parity(logic [N*N-1:0] v, int r, int c);
    bit p = 0;
    if (r > 0)     p ^= v[idx(r-1, c)];
    if (r < N - 1) p ^= v[idx(r+1, c)];
    if (c > 0)     p ^= v[idx(r, c-1)];
    if (c < N - 1) p ^= v[idx(r, c+1)];
    return p;
  endfunction

  task automatic decode(input logic [N*N-1:0] syn, output int took);
    @(negedge clk);
    syndrome = syn;
    load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    took = 0;
    while (busy && took < TIMEOUT) begin
      @(negedge clk);
      took++;
    end
    // let pair pulses that are still travelling drain
    repeat (2 * N + 10) @(negedge clk);
    checks++;
    if (busy) begin
      failures++;
      $display("FAIL: decode did not finish in %0d cycles", TIMEOUT);
    end
  endtask

  task automatic expect_error(input string name, input logic [N*N-1:0] exp);
    checks++;
    if (error !== exp) begin
      failures++;
      $display("FAIL %s: error map mismatch", name);
      for (int r = 0; r < N; r++) begin
        string line = "";
        for (int c = 0; c < N; c++)
          line = {line, error[idx(r,c)] ? (exp[idx(r,c)] ? "#" : "+") : (exp[idx(r,c)] ? "-" : ".")};
        $display("  %s", line);
      end
    end
  endtask

  // Every ancilla's parity over the data-qubit corrections equals its syndrome.
  // x_type selects X ancillas (odd,even), which see Z errors, else Z ancillas.
  task automatic expect_consistent(input string name, input logic [N*N-1:0] syn,
                                   input bit x_type = 1'b1);
    int bad = 0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (!is_data(r, c) && ((r % 2 == 1) == x_type) &&
            anc_parity(error & data_mask(), r, c) != syn[idx(r, c)]) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %s: %0d ancillas not explained by the correction", name, bad);
    end
  endtask

  function automatic logic [N*N-1:0] data_mask();
    logic [N*N-1:0] m = '0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (is_data(r, c)) m[idx(r, c)] = 1'b1;
    return m;
  endfunction

  task automatic expect_cycles(input string name, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: decode took %0d cycles, expected %0d", name, got, exp);
    end
  endtask

  // ------------------------------------------------------------------ stimulus
  initial begin : main
    logic [N*N-1:0] syn, exp, zerr;
    int took;
    int n_trials, n_busy_trials;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // inline: X(5,4) and X(5,8), midpoint (5,6), h = 2
    syn = '0; syn[idx(5,4)] = 1; syn[idx(5,8)] = 1;
    decode(syn, took);
    exp = '0;
    for (int c = 4; c <= 8; c++) exp[idx(5,c)] = 1;
    expect_error("inline", exp);
    expect_cycles("inline", int'(cycles), 4 * 2 + 1);
    expect_consistent("inline", syn);

    // inline, h = 4: X(9,2) and X(9,10)
    syn = '0; syn[idx(9,2)] = 1; syn[idx(9,10)] = 1;
    decode(syn, took);
    exp = '0;
    for (int c = 2; c <= 10; c++) exp[idx(9,c)] = 1;
    expect_error("inline4", exp);
    expect_cycles("inline4", int'(cycles), 4 * 4 + 1);

    // corner: X(5,2) and X(9,6) pair through (9,2)
    syn = '0; syn[idx(5,2)] = 1; syn[idx(9,6)] = 1;
    decode(syn, took);
    exp = '0;
    for (int r = 5; r <= 9; r++) exp[idx(r,2)] = 1;
    for (int c = 3; c <= 6; c++) exp[idx(9,c)] = 1;
    expect_error("corner", exp);
    expect_consistent("corner", syn);

    // corner, mirrored: X(5,10) and X(9,6) pair through (9,10)
    syn = '0; syn[idx(5,10)] = 1; syn[idx(9,6)] = 1;
    decode(syn, took);
    exp = '0;
    for (int r = 5; r <= 9; r++) exp[idx(r,10)] = 1;
    for (int c = 6; c <= 9; c++) exp[idx(9,c)] = 1;
    expect_error("corner_m", exp);

    // top boundary: X(1,4) pairs with the boundary above (0,4); 4b+1 cycles, b = 2
    syn = '0; syn[idx(1,4)] = 1;
    decode(syn, took);
    exp = '0; exp[idx(0,4)] = 1; exp[idx(1,4)] = 1;
    expect_error("top_bnd", exp);
    expect_cycles("top_bnd", int'(cycles), 4 * 2 + 1);
    expect_consistent("top_bnd", syn);

    // left boundary: Z(2,1) pairs with the boundary left of (2,0)
    syn = '0; syn[idx(2,1)] = 1;
    decode(syn, took);
    exp = '0; exp[idx(2,0)] = 1; exp[idx(2,1)] = 1;
    expect_error("left_bnd", exp);

    // equidistant: X(7,4), X(7,8), X(7,12).  The middle one receives requests
    // from W and E together and grants E; the left one then pairs with the top.
    syn = '0; syn[idx(7,4)] = 1; syn[idx(7,8)] = 1; syn[idx(7,12)] = 1;
    decode(syn, took);
    exp = '0;
    for (int c = 8; c <= 12; c++) exp[idx(7,c)] = 1;
    for (int r = 0; r <= 7; r++) exp[idx(r,4)] = 1;
    expect_error("equidist", exp);
    expect_consistent("equidist", syn);
    checks++;
    if (resets == 0) begin
      failures++;
      $display("FAIL equidist: no global reset");
    end

    // random pure-dephasing trials
    n_trials = 400;
    n_busy_trials = 0;
    for (int t = 0; t < n_trials; t++) begin
      zerr = '0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          int unsigned u;
          u = $urandom_range(99);
          if (is_data(r, c) && u < 1 + t % 8) zerr[idx(r, c)] = 1;
        end
      syn = '0;
      for (int r = 1; r < N; r += 2)
        for (int c = 0; c < N; c += 2)
          syn[idx(r, c)] = anc_parity(zerr, r, c);
      decode(syn, took);
      expect_consistent($sformatf("random%0d", t), syn);
      if (syn != '0) n_busy_trials++;
    end

    // every mechanism must have happened
    $display("events: multi_request_at_hot=%0d pair_origin=%0d pair_pass=%0d boundary_pair=%0d global_reset_cycles=%0d blocked_cycles=%0d nonempty_trials=%0d",
             n_multi_req, n_meet, n_pass, n_bnd, n_reset, n_block, n_busy_trials);
    checks++; if (n_multi_req == 0) begin failures++; $display("FAIL: no simultaneous requests"); end
    checks++; if (n_meet == 0)      begin failures++; $display("FAIL: no intermediate pairing"); end
    checks++; if (n_pass == 0)      begin failures++; $display("FAIL: no pair pass-through"); end
    checks++; if (n_bnd == 0)       begin failures++; $display("FAIL: no boundary pairing"); end
    checks++; if (n_reset == 0)     begin failures++; $display("FAIL: no global reset"); end
    checks++; if (n_block == 0)     begin failures++; $display("FAIL: no reset hold"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
