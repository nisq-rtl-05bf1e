// decoder_pkg: types and helpers shared by the surface-code decoder mesh.
//
// Every decoder module talks to its four neighbours over four one-bit-per-side
// signal classes: grow, pair_request, pair_grant and pair.  A side is encoded
// as a 2-bit index N=0, E=1, S=2, W=3 (this encoding is a design choice), so the
// opposite side is always index XOR 2.  For a link vector v, v[s] is the signal
// on side s: for an input it arrived from the neighbour on side s, for an output
// it leaves towards the neighbour on side s.
package decoder_pkg;

  localparam int unsigned NSIDES = 4;

  typedef enum logic [1:0] {
    SIDE_N = 2'd0,
    SIDE_E = 2'd1,
    SIDE_S = 2'd2,
    SIDE_W = 2'd3
  } side_e;

  // The same side indices as plain integers, for loop and case arithmetic.
  localparam int unsigned IDX_N = 0, IDX_E = 1, IDX_S = 2, IDX_W = 3;

  typedef logic [NSIDES-1:0] side_vec_t;

  // Everything one module exchanges with its neighbours.
  typedef struct packed {
    side_vec_t grow;
    side_vec_t req;    // pair_request
    side_vec_t grant;  // pair_grant
    side_vec_t pair;
  } link_t;

  // Index of the side opposite to s.
  function automatic int unsigned opp(input int unsigned s);
    return s ^ 2;
  endfunction

  // Lowest-index set bit of v as a one-hot vector (fixed priority N>E>S>W).
  function automatic side_vec_t first_one(input side_vec_t v);
    return v & (~v + side_vec_t'(1));
  endfunction

endpackage
