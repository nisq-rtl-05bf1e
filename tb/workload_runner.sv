// workload_runner: Monte Carlo decoding run on one decoder mesh (testbench
// helper, used by decoder_workload_tb).
//
// For each physical error rate in P_PERMILLE it draws TRIALS pure-dephasing
// error patterns (a Z error on every data qubit independently with probability
// p), computes the X-ancilla syndrome, lets the mesh decode it and then checks
// that the correction reproduces the syndrome exactly and that the decode ended.
// A trial is a logical error when the residual (error XOR correction), which
// has no syndrome left, flips the logical operator: the parity of the residual
// over the data qubits of row 0.  Per error rate it prints the logical error
// rate and the mean and maximum decode time in cycles.
module workload_runner #(
  parameter int unsigned DISTANCE = 3,
  parameter int unsigned TRIALS   = 200
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int N = 2 * DISTANCE - 1;
  localparam int NP = 6;
  localparam int P_PERMILLE [NP] = '{10, 20, 30, 40, 50, 60};

  logic rst_n = 1'b0, load = 1'b0;
  logic [N*N-1:0] syndrome = '0, error;
  logic busy, global_reset;
  logic [15:0] cycles, resets;

  decoder_mesh #(.DISTANCE(DISTANCE)) u_mesh (.*);

  function automatic int idx(int r, int c);
    return r * N + c;
  endfunction

  function automatic bit is_data(int r, int c);
    return (r % 2) == (c % 2);
  endfunction

  function automatic bit anc_parity(logic [N*N-1:0] v, int r, int c);
    bit p = 0;
    if (r > 0)     p ^= v[idx(r-1, c)];
    if (r < N - 1) p ^= v[idx(r+1, c)];
    if (c > 0)     p ^= v[idx(r, c-1)];
    if (c < N - 1) p ^= v[idx(r, c+1)];
    return p;
  endfunction

  initial begin : main
    logic [N*N-1:0] zerr, syn, corr, resid;
    int took, bad, n_log, max_cyc;
    longint sum_cyc;
    bit lpar;
    done = 1'b0; checks = 0; failures = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int pi = 0; pi < NP; pi++) begin
      n_log = 0; max_cyc = 0; sum_cyc = 0;
      for (int t = 0; t < TRIALS; t++) begin
        zerr = '0;
        corr = '0;
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++) begin
            int unsigned u;
            u = $urandom_range(999);
            if (is_data(r, c) && u < P_PERMILLE[pi]) zerr[idx(r, c)] = 1'b1;
          end
        syn = '0;
        for (int r = 1; r < N; r += 2)
          for (int c = 0; c < N; c += 2)
            syn[idx(r, c)] = anc_parity(zerr, r, c);
        syndrome = syn;
        load = 1'b1;
        @(negedge clk);
        load = 1'b0;
        took = 0;
        while (busy && took < 4000) begin
          @(negedge clk);
          took++;
        end
        repeat (2 * N + 8) @(negedge clk);
        checks++;
        if (busy) begin
          failures++;
          $display("FAIL d=%0d: decode did not end", DISTANCE);
        end
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++)
            if (is_data(r, c)) corr[idx(r, c)] = error[idx(r, c)];
        bad = 0;
        for (int r = 1; r < N; r += 2)
          for (int c = 0; c < N; c += 2)
            if (anc_parity(corr, r, c) != syn[idx(r, c)]) bad++;
        checks++;
        if (bad != 0) begin
          failures++;
          $display("FAIL d=%0d p=%0d/1000: %0d ancillas unexplained", DISTANCE, P_PERMILLE[pi], bad);
        end
        resid = zerr ^ corr;
        lpar = 0;
        for (int c = 0; c < N; c += 2) lpar ^= resid[idx(0, c)];
        if (lpar) n_log++;
        sum_cyc += cycles;
        if (int'(cycles) > max_cyc) max_cyc = int'(cycles);
      end
      $display("d=%0d p=%0d.%0d%%: logical errors %0d/%0d, decode cycles mean %0d.%02d max %0d",
               DISTANCE, P_PERMILLE[pi] / 10, P_PERMILLE[pi] % 10, n_log, TRIALS,
               sum_cyc / TRIALS, (sum_cyc * 100 / TRIALS) % 100, max_cyc);
    end
    done = 1'b1;
  end

endmodule
