// target_checker: target check stage of the validity check (Algorithm 2, lines 1-4).
// Flags a successor that equals the target vertex t; such a successor closes an s-t path that
// is reported and never written back. Purely combinational; it sees only the successor and t,
// which is the input split the data-separation optimisation gives this stage.
module target_checker
  import pefp_pkg::*;
(
  input  vid_t succ,       // successor u
  input  vid_t target,     // target vertex t
  output logic is_target   // u == t
);
  always_comb is_target = (succ == target);
endmodule
