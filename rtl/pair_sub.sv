// pair_sub: pair subcircuit of a decoder module.
//
// At an intermediate module, pair_grant signals returning on two sides on which
// this module originated requests mean two hot modules have agreed to pair
// through it.  It then sends one pair pulse back out of both of those sides (if
// more than two grants meet, the first two in N, E, S, W order are used).  A
// module that is not hot forwards a pair pulse straight on; a hot module that
// receives one stops it, raises reset_out (which drives the global reset wire)
// and, in the enclosing module, clears its hot syndrome.  Every module a pair
// passes through or starts from lies on the correction chain: chain pulses for
// one cycle when that happens.
//
// The pair pulse lasts one cycle: it is made on the rising edge of the grant
// meeting (the paper's SFQ pulses are single pulses; a level would pass on
// through the far endpoint once that endpoint's hot syndrome is cleared).  As
// the paper requires, this subcircuit's pair path is not blocked by the reset.
// pair_out and reset_out are registered; chain is combinational.  Assertions
// check that a meeting fires on exactly two sides and never in two cycles
// running.
module pair_sub
  import decoder_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      hot,
  input  side_vec_t req_gen,
  input  side_vec_t grant_in,
  input  side_vec_t pair_in,
  output side_vec_t pair_out,
  output logic      reset_out,
  output logic      chain
);

  side_vec_t meet, first, second, pair_d;
  logic      meet_ok, meet_q, fire;

  always_comb begin
    meet    = hot ? '0 : (grant_in & req_gen);
    first   = first_one(meet);
    second  = first_one(meet & ~first);
    meet_ok = (second != '0);
    fire    = meet_ok & ~meet_q;
    for (int unsigned s = 0; s < NSIDES; s++)
      pair_d[s] = (fire & (first[s] | second[s])) | (pair_in[opp(s)] & ~hot);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meet_q    <= 1'b0;
      pair_out  <= '0;
      reset_out <= 1'b0;
    end else begin
      meet_q    <= meet_ok;
      pair_out  <= pair_d;
      reset_out <= hot & (|pair_in);
    end
  end

  assign chain = fire | (|pair_in);

  // A meeting fires pair on exactly two sides, and never twice in a row.
  a_two_sides: assert property (@(posedge clk) disable iff (!rst_n)
                                fire |-> $countones(first | second) == 2);
  a_single:    assert property (@(posedge clk) disable iff (!rst_n) fire |=> !fire);

endmodule
