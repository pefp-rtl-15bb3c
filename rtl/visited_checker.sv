// visited_checker: visited check stage of the validity check (Algorithm 2, lines 7-8).
// Reports whether successor u already lies on path p. The loop over the path is unrolled over
// all MAX_K vertex slots, so the check is one compare per slot and an OR, independent of k
// (the O(k) loop of the paper turned into O(1) time). Slots above len(p) are masked out.
// Combinational; it sees only the path's vertices, its length and u.
module visited_checker
  import pefp_pkg::*;
(
  input  vid_t [MAX_K-1:0] path_v,   // vertices of p, path_v[0] = s
  input  hop_t             path_len, // len(p): slots 0..len(p) are used
  input  vid_t             succ,     // successor u
  output logic             visited   // u appears in p
);
  logic [MAX_K-1:0] hit;
  always_comb begin
    for (int i = 0; i < MAX_K; i++)
      hit[i] = (i <= int'(path_len)) && (path_v[i] == succ);
    visited = |hit;
  end
endmodule
