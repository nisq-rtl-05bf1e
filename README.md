# A mesh decoder for the surface code: greedy matching by colliding wavefronts

A surface-code quantum memory measures its ancilla qubits every cycle. An ancilla
that reports odd parity (a *hot syndrome*) marks an end of an error chain, and a
decoder has to pair the hot syndromes up and say which data qubits lie on the chain
between each pair. If decoding falls behind syndrome generation, the backlog grows
exponentially with the number of T gates in the program. This decoder trades some
accuracy for speed. It does not search for a minimum-weight matching. It keeps
pairing the two hot syndromes that are closest together, or a hot syndrome and the
lattice boundary if that is closer, until none is left. That greedy rule is carried
out by physical signal propagation through a grid of identical cells, one per qubit,
so the time a decode takes grows with the distance between syndromes and not with
their number.

The design follows the decoder of Holmes et al., *NISQ+: Boosting quantum computing
power by approximating quantum error correction*. That decoder was
built from clocked superconducting single-flux-quantum gates. This RTL describes the
same cell at register-transfer level, for simulation and for ordinary synchronous
logic.

## The lattice

A distance-`d` rotated surface code is placed on an `N x N` grid, `N = 2d-1`. The
default `d = 9` gives 289 qubits. With row `r` and column `c`:

| position | qubit |
|---|---|
| (even, even) and (odd, odd) | data |
| (odd, even) | X ancilla (detects Z errors on its 4 neighbours) |
| (even, odd) | Z ancilla (detects X errors on its 4 neighbours) |

Position `(r,c)` is bit `r*N+c` of the `syndrome` and `error` vectors. Every grid
position, data or ancilla, holds one `decoder_module`. The modules are wired to
their four neighbours. Outside the grid, beyond every data qubit on the edge, sits a
`boundary_module`. There are `d` of them on each side: even columns on the top and
bottom, even rows on the left and right. An X-ancilla chain can therefore end on
the top or bottom edge through a data qubit, and a Z-ancilla chain on the left or
right edge.

## One pairing round, signal by signal

Every link between neighbours carries four one-bit signals in each direction:
`grow`, `req` (pair request), `grant` and `pair`. Each cell registers all its
outputs, so a signal moves one cell per clock.

1. **Grow.** A hot module drives `grow` on all four sides and keeps it high. Other
   modules pass a grow straight through, along its row or column. Two grows meeting
   head-on stop there: neither passes on along that line.
2. **Request.** A module that is not hot and sees grow arriving from two sides is
   an *intermediate*. It sends `req` back out of both sides towards the two
   sources. Requests travel straight and stop at the first hot module.
3. **Grant.** A hot module grants exactly one request. It drives `grant` back out
   of the side the request came in on. Grants retrace the request path and stop at
   the intermediate that made the request.
4. **Pair.** An intermediate that gets grants back on two of its request sides
   fires a single one-cycle `pair` pulse out of both sides. The pulse travels to
   the two hot modules. Every module it passes or starts from toggles its `error`
   output.
5. **Reset.** A hot module hit by a pair pulse clears its hot bit and raises
   `reset_out` for one cycle. The mesh ORs all of these into the global reset
   wire. For that cycle and the `RESET_DEPTH` (5) cycles after it, every module
   ignores its `grow`, `req` and `grant` inputs. This erases all half-finished
   negotiations. The hot bits and pair pulses still in flight are not affected.
   The remaining hot modules then start again from step 1.

The decode ends when no hot module is left. `busy` falls, and `error` holds the
correction: on data positions, a 1 is a qubit to flip.

For two hot modules `2h` apart in one row, the midpoint sees both grows `h` cycles
after `load`. The request, grant and pair each take about `h` more cycles. The hot
bits clear `4h+1` cycles after `load`. A hot module `b` cells from a boundary
module pairs with it in `4b+1` cycles. The closest pair always finishes first.
That ordering is what makes the mesh greedy.

## Breaking ties

Most of the subtlety is in what happens when distances are equal. The design uses
the following rules.

- **Two corners, one effective.** Two hot modules that share neither a row nor a
  column have grows that meet at two corners of a rectangle. Only one corner may
  act. The paper fixes two cases: a corner seeing grow from the top and left acts,
  and one seeing grow from the bottom and right does not. This design extends that
  to a complete rule. Grows from opposite sides (N+S, E+W) always act. Of the
  perpendicular pairs, only those that include N act (N+E, N+W). For any two hot
  modules this leaves exactly one corner: the one directly below the upper module.
- **One grant per hot module.** Requests that arrive together are ranked by side
  in fixed priority order: N, E, S, W. A grant, once given, is held while its
  request stays up, so a request arriving later cannot take it over.
- **At most one pairing per intermediate.** If more than two grants meet in one
  module, the first two in N, E, S, W order are paired.
- **Grows stop head-on.** Without this rule, grows that stay high would overlap
  along the whole segment between two hot modules. Every cell on that segment
  would then act as an intermediate and fire its own pairing. With the rule, the
  only intermediate is the midpoint, or the two middle cells when the distance is
  odd.

Three syndromes spaced equally along a row show all of these rules at work. The
middle one receives requests from W and E in the same cycle and grants E. The right
pair completes and fires the global reset. The left syndrome, now alone, pairs with
the top boundary.

## Boundary modules

A boundary module acts as a hot syndrome that never grows and is never cleared.
When a grow reaches it, it answers with a request. When the grant comes back, it
answers with one pair pulse. It is therefore its own intermediate, and the chain
runs from it to the hot module. Pair pulses never travel towards a boundary module,
so it has no pair input.

## Interface and timing of the top, `decoder_mesh`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `load` | in | 1 | one-cycle strobe: sample `syndrome` into the hot bits, clear `error` |
| `syndrome` | in | N*N | ancilla measurement results; data positions must be 0 |
| `error` | out | N*N | correction; a 1 on a data position means flip that qubit |
| `busy` | out | 1 | some module is still hot |
| `global_reset` | out | 1 | the global reset wire |
| `cycles` | out | 16 | clock cycles from `load` until `busy` fell |
| `resets` | out | 16 | cycles in which the global reset wire was high |

Pulse `load` only while the mesh is idle; an assertion in `decoder_mesh` checks this.
Further assertions check that a hot module holds at most one grant and that every
`pair` pulse is one cycle long and leaves an intermediate on exactly two sides. Wait for `busy` to fall, plus about `2N`
cycles if the error map must be read while no pulse is still moving (the last
pulse ends at a hot module, so in practice the map is final when `busy` falls).
The parameters are `DISTANCE` (default 9) and `RESET_DEPTH` (default 5).

## How it behaves

`decoder_workload_tb` runs Monte Carlo trials at distances 3, 5, 7 and 9. Each
trial puts an independent Z error on every data qubit with probability p (pure
dephasing), decodes the resulting X-ancilla syndrome, and checks that the
correction reproduces the syndrome exactly. A trial counts as a logical error when
error plus correction flips the logical operator, i.e. the parity along the top
row of data qubits. One run of 300 trials per point gave:

| p | d=3 logical | d=5 | d=7 | d=9 | max decode cycles d=3 / 5 / 7 / 9 |
|---|---|---|---|---|---|
| 1 % | 0/300 | 0/300 | 0/300 | 0/300 | 19 / 31 / 49 / 41 |
| 3 % | 7/300 | 4/300 | 3/300 | 2/300 | 23 / 41 / 57 / 89 |
| 5 % | 11/300 | 15/300 | 19/300 | 11/300 | 23 / 55 / 87 / 105 |
| 6 % | 19/300 | 24/300 | 27/300 | 19/300 | 23 / 67 / 91 / 114 |

Logical error rates grow steeply between 3 % and 6 %. This agrees with the
original design's accuracy threshold near 5 %. The trial counts are too small for
more than a rough comparison, and the original evaluation used full stabilizer-
circuit simulation, not this code-capacity model. The decode times compare more
closely. At the original module latency of about 163 ps per hop, the reported
maximum decode times of 3.74, 9.28, 14.2 and 19.2 ns correspond to about 23, 57,
87 and 118 cycles. The maxima above are 23, 67, 91 and 114 cycles.

## Where this RTL departs from, or adds to, the original design

- **One register per cell.** The original cell is a clocked SFQ gate network with a
  logic depth of 5-6 gates. Here each subcircuit output is a single register, so a
  signal crosses one cell per cycle. The reset hold keeps the original 5 cycles,
  which is more than one-register cells need.
- **Choices of this design, where the original is silent:**
  - the generalised effective-corner rule;
  - the grant priority and grant holding;
  - grows stopping head-on;
  - the single-cycle pair pulse;
  - grants following only an active request line;
  - the toggling error output;
  - the exact placement of boundary modules (one beyond each edge data qubit);
  - the `load` / `busy` / `cycles` interface.
- **Shared mesh.** X and Z ancillas share one mesh. When both types are hot at once,
  an X grow line and a Z grow line can cross at a data module, and the mesh may pair
  across types. All evaluation here, like the original's, uses pure dephasing, where
  only X ancillas are hot. Decoding both types at once would need two meshes, or
  grow signals tagged by type.
- **No deadlock guard.** Greedy grants could in principle wait on each other in a
  cycle of three or more syndromes. No such hang appeared in the roughly 8,000
  random decodes in the testbenches, but nothing in the logic prevents it.
- **Not modelled:** the SFQ cell library, splitters and clock distribution; the
  quantum chip and its stabilizer circuits; the offline backlog and quantum-volume
  analyses.

## Files

| file | what it is |
|---|---|
| `rtl/decoder_pkg.sv` | side encoding (N=0, E=1, S=2, W=3), link struct, helpers |
| `rtl/reset_keeper.sv` | holds the global reset as an input block for DEPTH+1 cycles |
| `rtl/grow_sub.sv` | grow subcircuit |
| `rtl/pair_req_sub.sv` | intermediate detection and request forwarding |
| `rtl/pair_grant_sub.sv` | grant arbitration and grant forwarding |
| `rtl/pair_sub.sv` | pair pulse generation and forwarding, reset_out, chain flag |
| `rtl/decoder_module.sv` | one cell: the above, input blocking, hot bit, error output |
| `rtl/boundary_module.sv` | cell beyond the lattice edge |
| `rtl/decoder_mesh.sv` | the mesh, boundary ring, global reset wire, status |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/decoder_mesh_tb.sv` | full-size (d=9) end-to-end test: directed cases with exact expected chains and cycle counts, 400 random decodes, event coverage |
| `tb/decoder_workload_tb.sv`, `tb/workload_runner.sv` | Monte Carlo runs at d = 3, 5, 7, 9 |

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and ends with `$finish`.
To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/decoder_pkg.sv tb/decoder_mesh_tb.sv --top-module decoder_mesh_tb -o sim
./obj_dir/sim
```

The full-size mesh test takes under a second of simulation. The four-distance
workload run takes about half a minute.
