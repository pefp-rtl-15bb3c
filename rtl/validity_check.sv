// validity_check: the path validity check module with data separation.
//
// For one expansion (path p, successor u, barrier bar[u]) it decides whether p+u is a new
// intermediate path, a result (u == t) or is pruned. Following the paper's optimised pipeline,
// the input is split per stage: (p, u) go to the target and visited checkers, (len(p), bar[u])
// to the barrier checker, so the three stages evaluate side by side instead of one after the
// other; their flags are then merged with the priority of Algorithm 2: target first, then
// barrier, then visited.
//
// Interface: in_valid qualifies the inputs; one cycle later out_valid and out_verdict give
// the verdict (one result register; a new input can be accepted every cycle).
// The single-lane form (one successor per cycle) and the one-cycle latency are this design's
// choices; the paper's figure draws n such lanes without giving n.
module validity_check
  import pefp_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  vid_t [MAX_K-1:0] path_v,     // p
  input  hop_t             path_len,   // len(p)
  input  vid_t             succ,       // u
  input  hop_t             barrier,    // bar[u]
  input  vid_t             target,     // t
  input  hop_t             k,          // hop constraint
  output logic             out_valid,
  output verdict_e         out_verdict
);
  logic is_target, is_pruned, is_visited;
  verdict_e verdict;

  target_checker  u_target  (.succ(succ), .target(target), .is_target(is_target));
  barrier_checker u_barrier (.path_len(path_len), .barrier(barrier), .k(k), .pruned(is_pruned));
  visited_checker u_visited (.path_v(path_v), .path_len(path_len), .succ(succ), .visited(is_visited));

  // merge of the three stage results
  always_comb begin
    if (is_target)       verdict = VERDICT_TARGET;
    else if (is_pruned)  verdict = VERDICT_BARRIER;
    else if (is_visited) verdict = VERDICT_VISITED;
    else                 verdict = VERDICT_VALID;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_verdict <= VERDICT_VALID;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_verdict <= verdict;
    end
  end
endmodule
