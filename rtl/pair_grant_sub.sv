// pair_grant_sub: pair_grant subcircuit of a decoder module.
//
// A hot module that receives pair_request signals grants exactly one of them by
// sending a pair_grant back out of the side the request came in on.  Among
// requests that arrive together the lowest side index wins (N, E, S, W); once a
// grant is given it is held for as long as that request stays high, so a later
// request cannot take it over.  Both the priority order and the holding are this
// design's choices: the paper states only that one request is granted.
//
// A module that is not hot forwards a grant along the line it is forwarding a
// request on (a grant arriving on side s, where req_pass[s] is set, leaves on the
// opposite side).  A grant therefore stops at the intermediate module that
// originated the request, where the pair subcircuit consumes it.  Outputs are
// registered (one module per cycle).  An assertion checks that at most one grant
// is held.
module pair_grant_sub
  import decoder_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      hot,
  input  side_vec_t req_in,
  input  side_vec_t req_pass,
  input  side_vec_t grant_in,
  output side_vec_t grant_out
);

  side_vec_t lock_q, lock_d, grant_d;

  always_comb begin
    lock_d  = '0;
    grant_d = '0;
    if (hot) begin
      if ((lock_q & req_in) != '0) lock_d = lock_q;
      else                         lock_d = first_one(req_in);
      grant_d = lock_d;
    end else begin
      for (int unsigned s = 0; s < NSIDES; s++)
        grant_d[opp(s)] = grant_in[s] & req_pass[s];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock_q    <= '0;
      grant_out <= '0;
    end else begin
      lock_q    <= lock_d;
      grant_out <= grant_d;
    end
  end

  // A hot module grants at most one request at a time.
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(lock_q));

endmodule
