// reset_keeper: the "keep the reset signal" circuit of a decoder module.
//
// A pairing raises the global reset wire for one cycle.  Every module must then
// ignore its grow, pair_request and pair_grant inputs long enough for all the
// signals already travelling through its logic to drain, i.e. for as many cycles
// as the module's logic depth.  As in the paper, the wire feeds a chain of DEPTH
// buffers (here a shift register) and the block output is the OR of the wire and
// every buffer stage, so block is high in the cycle reset_in is high and for the
// DEPTH cycles after it.  DEPTH defaults to the paper's depth of 5.  The
// asynchronous active-low rst_n, which clears the chain at power-up, is this
// design's addition.
module reset_keeper #(
  parameter int unsigned DEPTH = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic reset_in,
  output logic block
);

  logic [DEPTH-1:0] chain_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chain_q <= '0;
    else        chain_q <= {chain_q[DEPTH-2:0], reset_in};
  end

  assign block = reset_in | (|chain_q);

endmodule
