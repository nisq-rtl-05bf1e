// decoder_module: the decoder cell placed over one data or ancilla qubit.
//
// The mesh holds one of these per qubit, linked to its four neighbours.  The
// module keeps a hot syndrome bit, loaded from the qubit's measurement, and
// answers four signal classes on each side:
//   grow        hot modules flood grow signals along their row and column;
//   pair_req    where two grows meet, an intermediate module asks both sources
//               to pair;
//   pair_grant  each hot module grants one request;
//   pair        an intermediate with two grants sends pair pulses back to both
//               sources, and every module on the way is part of the chain.
// A hot module reached by a pair pulse clears its hot bit and raises reset_out,
// which the mesh ORs into the global reset wire.  The reset keeper turns that
// wire into a block signal that ANDs away the grow, pair_req and pair_grant
// inputs for RESET_DEPTH+1 cycles; the hot bit and the pair inputs are not
// blocked (structure after the paper's module diagram).
//
// The error output toggles every time a pair pulse passes through or starts at
// the module, so it is high when the module lies on an odd number of chains
// (this accumulation, and the load strobe that clears it and samples the
// syndrome, are this design's choices).  Each subcircuit output is one register:
// every signal advances one module per clock.
module decoder_module
  import decoder_pkg::*;
#(
  parameter int unsigned RESET_DEPTH = 5
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,
  input  logic  syndrome,
  input  logic  reset_in,
  input  link_t link_in,
  output link_t link_out,
  output logic  reset_out,
  output logic  hot,
  output logic  error
);

  logic      block, chain;
  side_vec_t grow_b, req_b, grant_b;
  side_vec_t req_gen, req_pass;

  reset_keeper #(.DEPTH(RESET_DEPTH)) u_keep (
    .clk, .rst_n, .reset_in, .block
  );

  // Input blocking: one AND gate per input with the inverted block signal.
  assign grow_b  = link_in.grow  & {NSIDES{~block}};
  assign req_b   = link_in.req   & {NSIDES{~block}};
  assign grant_b = link_in.grant & {NSIDES{~block}};

  grow_sub u_grow (
    .clk, .rst_n, .hot, .grow_in(grow_b), .grow_out(link_out.grow)
  );

  pair_req_sub u_req (
    .clk, .rst_n, .hot, .grow_in(grow_b), .req_in(req_b),
    .req_gen, .req_pass, .req_out(link_out.req)
  );

  pair_grant_sub u_grant (
    .clk, .rst_n, .hot, .req_in(req_b), .req_pass, .grant_in(grant_b),
    .grant_out(link_out.grant)
  );

  pair_sub u_pair (
    .clk, .rst_n, .hot, .req_gen, .grant_in(grant_b), .pair_in(link_in.pair),
    .pair_out(link_out.pair), .reset_out, .chain
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hot   <= 1'b0;
      error <= 1'b0;
    end else if (load) begin
      hot   <= syndrome;
      error <= 1'b0;
    end else begin
      if (hot && (link_in.pair != '0)) hot <= 1'b0;
      if (chain) error <= ~error;
    end
  end

endmodule
