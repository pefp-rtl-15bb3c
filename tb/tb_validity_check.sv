// tb_validity_check: random and directed checks of the validity check module.
// Each cycle a random (path, successor, barrier, t, k) is applied; the expected verdict is
// recomputed here from Algorithm 2 (target, then barrier, then visited) and compared with the
// output one cycle later, which also checks the one-cycle latency.
module tb_validity_check;
  import pefp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             in_valid;
  vid_t [MAX_K-1:0] path_v;
  hop_t             path_len, barrier, k;
  vid_t             succ, target;
  logic             out_valid;
  verdict_e         out_verdict;
  int checks = 0, failures = 0;
  int seen [4] = '{0, 0, 0, 0};

  validity_check dut (.*);

  function automatic verdict_e ref_verdict(vid_t [MAX_K-1:0] pv, hop_t len, vid_t u, hop_t b,
                                           vid_t tt, hop_t kk);
    if (u == tt) return VERDICT_TARGET;
    if (int'(len) + 1 + int'(b) > int'(kk)) return VERDICT_BARRIER;
    for (int i = 0; i <= int'(len); i++) if (pv[i] == u) return VERDICT_VISITED;
    return VERDICT_VALID;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    verdict_e exp_v;
    in_valid = 0; path_v = '0; path_len = '0; barrier = '0; k = 5'd6; succ = '0; target = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // small vertex ids so that visited / target hits are common
      for (int i = 0; i < MAX_K; i++) path_v[i] = vid_t'($urandom_range(40));
      k        = hop_t'($urandom_range(MAX_K, 1));
      path_len = hop_t'($urandom_range(int'(k) - 1));
      barrier  = hop_t'($urandom_range(int'(k) + 1));
      succ     = vid_t'($urandom_range(40));
      target   = vid_t'($urandom_range(40));
      if (n % 7 == 0) succ = path_v[$urandom_range(int'(path_len))];  // force visited candidates
      if (n % 11 == 0) path_v[MAX_K-1] = succ;                          // beyond len: must be ignored
      exp_v    = ref_verdict(path_v, path_len, succ, barrier, target, k);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_verdict != exp_v) begin
        failures++;
        if (failures < 10) $display("mismatch n=%0d got %s exp %s", n, out_verdict.name(), exp_v.name());
      end
      seen[exp_v]++;
    end
    // every verdict must have been exercised
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (seen[i] == 0) failures++;
    end
    $display("verdicts valid=%0d target=%0d barrier=%0d visited=%0d", seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
