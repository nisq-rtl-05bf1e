// grow_sub: grow subcircuit of a decoder module.
//
// A module holding a hot syndrome drives grow on all four sides; any other module
// passes a grow signal straight on, so a grow that arrives on side s leaves on
// the opposite side.  Two grows travelling towards each other stop where they
// meet: a module that receives grow on both sides s and opp(s) passes neither
// along that line.  Without this, grow signals (which stay high while their
// source is hot) would overlap along the whole segment between two hot modules
// and every module on it would act as an intermediate; the stopping rule is this
// design's choice, the paper only says grows propagate in the same direction.
// The outputs are registered, which gives the paper's propagation of one module
// per clock cycle.  The inputs are expected to be
// already gated by the reset block signal.  Boundary modules never grow; they are
// a separate module.  Timing: grow_out in cycle t+1 reflects hot and grow_in in
// cycle t.
module grow_sub
  import decoder_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      hot,
  input  side_vec_t grow_in,
  output side_vec_t grow_out
);

  side_vec_t grow_d;

  always_comb begin
    for (int unsigned s = 0; s < NSIDES; s++)
      grow_d[s] = hot | (grow_in[opp(s)] & ~grow_in[s]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) grow_out <= '0;
    else        grow_out <= grow_d;
  end

endmodule
