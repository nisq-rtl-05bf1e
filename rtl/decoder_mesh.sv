// decoder_mesh: online approximate surface-code decoder, top level.
//
// A distance-DISTANCE rotated surface code is laid out on an N x N grid,
// N = 2*DISTANCE-1 (289 qubits for the default distance 9).  Data qubits sit at
// (even,even) and (odd,odd), Z ancillas at (even,odd), X ancillas at (odd,even);
// position (r,c) is bit r*N+c of the syndrome and error vectors.  One
// decoder_module sits on every position, wired to its four neighbours in a
// rectilinear mesh.  Beyond each data qubit on the lattice edge (even columns on
// the top and bottom, even rows on the left and right) sits a boundary_module,
// so an X-ancilla chain can end on the top or bottom edge and a Z-ancilla chain
// on the left or right edge.
//
// Operation: pulse load for one cycle with the syndrome on its input.  The mesh
// then repeatedly pairs the two closest hot syndromes (or a hot syndrome and the
// boundary) by the grow / pair_request / pair_grant / pair exchange, marks the
// chain between them on the error outputs, and fires the global reset wire (the
// OR of every module's reset_out), after which the remaining hot syndromes start
// over.  busy stays high until no hot syndrome is left; error is then the
// correction (high bits on data positions are the qubits to flip).  cycles counts
// clock cycles from load until busy falls; resets counts cycles in which the
// global reset wire was high.  The status outputs and the load strobe are this
// design's interface; an assertion requires load to come only while busy is
// low.  The X and Z ancillas share one mesh; if both types are hot at once,
// their grow lines can meet at data modules and pair across types.
module decoder_mesh
  import decoder_pkg::*;
#(
  parameter int unsigned DISTANCE    = 9,
  parameter int unsigned RESET_DEPTH = 5,
  localparam int unsigned N          = 2 * DISTANCE - 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load,
  input  logic [N*N-1:0] syndrome,
  output logic [N*N-1:0] error,
  output logic           busy,
  output logic           global_reset,
  output logic [15:0]    cycles,
  output logic [15:0]    resets
);

  link_t          lin  [N][N];
  link_t          lout [N][N];
  logic [N*N-1:0] hot, rst_out;

  // Boundary module outputs, per side and edge position (odd positions unused).
  logic [N-1:0] b_req  [NSIDES];
  logic [N-1:0] b_pair [NSIDES];

  // ---------------------------------------------------------------- modules
  for (genvar r = 0; r < N; r++) begin : g_r
    for (genvar c = 0; c < N; c++) begin : g_c
      decoder_module #(.RESET_DEPTH(RESET_DEPTH)) u_mod (
        .clk, .rst_n, .load,
        .syndrome (syndrome[r*N+c]),
        .reset_in (global_reset),
        .link_in  (lin[r][c]),
        .link_out (lout[r][c]),
        .reset_out(rst_out[r*N+c]),
        .hot      (hot[r*N+c]),
        .error    (error[r*N+c])
      );
    end
  end

  // Edge module facing boundary side s at edge position k.
  function automatic int unsigned edge_r(input int unsigned s, input int unsigned k);
    case (s)
      IDX_N:  return 0;
      IDX_S:  return N - 1;
      default: return k;
    endcase
  endfunction

  function automatic int unsigned edge_c(input int unsigned s, input int unsigned k);
    case (s)
      IDX_W:  return 0;
      IDX_E:  return N - 1;
      default: return k;
    endcase
  endfunction

  for (genvar s = 0; s < NSIDES; s++) begin : g_bs
    for (genvar k = 0; k < N; k++) begin : g_bk
      if (k % 2 == 0) begin : g_b
        boundary_module #(.RESET_DEPTH(RESET_DEPTH)) u_bnd (
          .clk, .rst_n,
          .reset_in(global_reset),
          .grow_in (lout[edge_r(s, k)][edge_c(s, k)].grow[s]),
          .grant_in(lout[edge_r(s, k)][edge_c(s, k)].grant[s]),
          .req_out (b_req[s][k]),
          .pair_out(b_pair[s][k])
        );
      end else begin : g_nb
        assign b_req[s][k]  = 1'b0;
        assign b_pair[s][k] = 1'b0;
      end
    end
  end

  // ------------------------------------------------------------------ links
  // Input on side s of (r,c) is the neighbour's output on the opposite side, or
  // the boundary module's output on the lattice edge.
  for (genvar r = 0; r < N; r++) begin : g_lr
    for (genvar c = 0; c < N; c++) begin : g_lc
      for (genvar s = 0; s < NSIDES; s++) begin : g_ls
        localparam int NR = (s == IDX_N) ? r - 1 : (s == IDX_S) ? r + 1 : r;
        localparam int NC = (s == IDX_W) ? c - 1 : (s == IDX_E) ? c + 1 : c;
        localparam int K  = (s == IDX_N || s == IDX_S) ? c : r;
        if (NR >= 0 && NR < N && NC >= 0 && NC < N) begin : g_in
          assign lin[r][c].grow[s]  = lout[NR][NC].grow[opp(s)];
          assign lin[r][c].req[s]   = lout[NR][NC].req[opp(s)];
          assign lin[r][c].grant[s] = lout[NR][NC].grant[opp(s)];
          assign lin[r][c].pair[s]  = lout[NR][NC].pair[opp(s)];
        end else begin : g_edge
          assign lin[r][c].grow[s]  = 1'b0;
          assign lin[r][c].req[s]   = b_req[s][K];
          assign lin[r][c].grant[s] = 1'b0;
          assign lin[r][c].pair[s]  = b_pair[s][K];
        end
      end
    end
  end

  // ------------------------------------------------- global wire and status
  assign global_reset = |rst_out;
  assign busy         = |hot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycles <= '0;
      resets <= '0;
    end else if (load) begin
      cycles <= '0;
      resets <= '0;
    end else begin
      if (busy && cycles != '1)         cycles <= cycles + 16'd1;
      if (global_reset && resets != '1) resets <= resets + 16'd1;
    end
  end

  // Interface rule: a new syndrome is loaded only into an idle mesh.
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy);

endmodule
