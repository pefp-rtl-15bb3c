// barrier_checker: barrier check stage of the validity check (Algorithm 2, lines 5-6).
// A successor u of path p is pruned when len(p) + 1 + bar[u] > k, bar[u] being the shortest
// distance from u to t computed on the host. Combinational; it sees only the path length,
// the barrier and k (data separation: the path's vertices are not needed here).
// The sum is formed one bit wider than a hop count so that it cannot wrap.
module barrier_checker
  import pefp_pkg::*;
(
  input  hop_t path_len,   // len(p)
  input  hop_t barrier,    // bar[u]
  input  hop_t k,          // hop constraint
  output logic pruned      // len(p) + 1 + bar[u] > k
);
  logic [LEN_W:0] reach;
  always_comb begin
    reach  = {1'b0, path_len} + {1'b0, barrier} + (LEN_W+1)'(1);
    pruned = reach > {1'b0, k};
  end
endmodule
