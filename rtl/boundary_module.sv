// boundary_module: a decoder cell just outside the lattice edge.
//
// One of these sits beyond every data qubit on the lattice boundary, linked only
// to the edge module on its inward side.  It lets a hot syndrome pair with the
// boundary instead of with another hot syndrome.  It acts like a hot syndrome
// that never grows and is never cleared: a grow signal reaching it is answered
// with a pair_request back into the lattice (it is its own intermediate), and a
// pair_grant coming back is answered with one pair pulse, which travels to the
// hot module and completes the chain there.  Like every module it ignores its
// inputs while the reset keeper blocks them.  Pair pulses never arrive here,
// because a pair always travels towards a non-boundary hot module, so there is
// no pair input.  Outputs are registered, one cycle per hop; the pair pulse is
// made on the rising edge of the grant, as in pair_sub.  An assertion checks
// that pair_out is a single-cycle pulse.
module boundary_module #(
  parameter int unsigned RESET_DEPTH = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic reset_in,
  input  logic grow_in,
  input  logic grant_in,
  output logic req_out,
  output logic pair_out
);

  logic block, meet, meet_q;

  reset_keeper #(.DEPTH(RESET_DEPTH)) u_keep (
    .clk, .rst_n, .reset_in, .block
  );

  assign meet = grant_in & req_out & ~block;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_out  <= 1'b0;
      meet_q   <= 1'b0;
      pair_out <= 1'b0;
    end else begin
      req_out  <= grow_in & ~block;
      meet_q   <= meet;
      pair_out <= meet & ~meet_q;
    end
  end

  // The pair answer is a single pulse, and only while a request stands.
  a_pulse: assert property (@(posedge clk) disable iff (!rst_n) pair_out |=> !pair_out);

endmodule
