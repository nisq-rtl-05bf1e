// pair_req_sub: pair_request subcircuit of a decoder module.
//
// A module that is not hot becomes an intermediate module when grow signals from
// two hot modules meet in it.  It then sends a pair_request back towards each of
// the two grow sources.  Requests travel one module per cycle and are forwarded
// straight on until they reach a hot module, which absorbs them (its pair_grant
// subcircuit answers instead).
//
// When two hot modules are not in line, their grow signals meet at two corners of
// a rectangle.  The paper hardwires one of them to be effective: a module that
// sees grow from the up and left sides is effective, one that sees grow from the
// down and right sides is not.  This design extends that rule to every pair of
// sides: opposite sides (N+S, E+W) are always effective, and of the
// perpendicular pairs only those containing N (N+E, N+W) are.  For any two hot
// modules this leaves exactly one effective corner, the one below the upper
// module.  req_gen (requests this module originated) and req_pass (requests it
// forwards) are kept apart because the grant and pair subcircuits need to know
// which is which.  All outputs are registered.
module pair_req_sub
  import decoder_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      hot,
  input  side_vec_t grow_in,
  input  side_vec_t req_in,
  output side_vec_t req_gen,
  output side_vec_t req_pass,
  output side_vec_t req_out
);

  side_vec_t gen_d, pass_d;
  logic g_n, g_e, g_s, g_w;

  assign g_n = grow_in[SIDE_N];
  assign g_e = grow_in[SIDE_E];
  assign g_s = grow_in[SIDE_S];
  assign g_w = grow_in[SIDE_W];

  always_comb begin
    // Request back towards each grow source that forms an effective pair.
    gen_d[SIDE_N] = g_n & (g_s | g_e | g_w);
    gen_d[SIDE_S] = g_s & g_n;
    gen_d[SIDE_E] = g_e & (g_w | g_n);
    gen_d[SIDE_W] = g_w & (g_e | g_n);
    if (hot) gen_d = '0;
    for (int unsigned s = 0; s < NSIDES; s++)
      pass_d[s] = req_in[opp(s)] & ~hot;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_gen  <= '0;
      req_pass <= '0;
    end else begin
      req_gen  <= gen_d;
      req_pass <= pass_d;
    end
  end

  assign req_out = req_gen | req_pass;

endmodule
