// tb_pefp_top: end-to-end test of the PEFP engine with reduced on-chip sizes.
// For a series of random graphs and hop constraints the host model runs Pre-BFS, writes the
// reduced CSR graph and barrier to the graph DRAM model and starts a query. Every reported
// path is translated back to original vertex ids and must be one of the s-t k-paths found
// by the reference depth-first search, with no path reported twice; at the end of each
// query the number of results must equal the reference count.
// The sizes are chosen so that every mechanism of the engine occurs: graph-cache misses
// served by DRAM, super nodes split across batches by Batch-DFS, buffer-area flushes and
// refills, barrier and visited pruning, and result back-pressure. Each is counted and must
// have happened at least once.
module tb_pefp_top;
  import pefp_pkg::*;
  import pefp_host_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, done;
  vid_t        s, t;
  hop_t        k;
  logic [31:0] num_vertices, num_edges;
  logic        res_valid, res_ready;
  result_t     res_data;
  logic        g_req_valid, g_req_ready, g_rsp_valid;
  logic [31:0] g_req_addr, g_rsp_data;
  logic        p_req_valid, p_req_write, p_req_ready, p_rsp_valid;
  logic [31:0] p_req_addr;
  path_rec_t   p_req_wdata, p_rsp_rdata;
  pefp_stats_t stats;

  localparam logic [31:0] OFF_B = 32'h0, EDGE_B = 32'h1_0000, BAR_B = 32'h4_0000;

  pefp_top #(.VCAP(8), .ECAP(24), .BUF_DEPTH(4), .THETA2(4), .THETA1(2)) dut (
    .clk, .rst_n, .start, .s, .t, .k, .num_vertices, .num_edges,
    .off_base(OFF_B), .edge_base(EDGE_B), .bar_base(BAR_B), .busy, .done,
    .res_valid, .res_data, .res_ready,
    .g_req_valid, .g_req_addr, .g_req_ready, .g_rsp_valid, .g_rsp_data,
    .p_req_valid, .p_req_write, .p_req_addr, .p_req_wdata, .p_req_ready, .p_rsp_valid,
    .p_rsp_rdata, .stats
  );
  graph_dram_model #(.LATENCY(8), .STALL_PCT(10)) u_gdram (
    .clk, .req_valid(g_req_valid), .req_addr(g_req_addr), .req_ready(g_req_ready),
    .rsp_valid(g_rsp_valid), .rsp_data(g_rsp_data)
  );
  path_dram_model #(.LATENCY(8), .STALL_PCT(10)) u_pdram (
    .clk, .req_valid(p_req_valid), .req_write(p_req_write), .req_addr(p_req_addr),
    .req_wdata(p_req_wdata), .req_ready(p_req_ready), .rsp_valid(p_rsp_valid),
    .rsp_rdata(p_rsp_rdata)
  );

  int checks = 0, failures = 0;
  host_graph g;
  int got[string];
  int n_bad = 0, n_dup = 0, n_backpressure = 0;
  bit stall_results = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // result sink
  always @(posedge clk) begin
    if (rst_n && res_valid && res_ready) begin
      int p[$];
      string sg;
      int idx, ov;
      p.delete();
      for (int i = 0; i <= int'(res_data.len); i++) begin
        idx = int'(res_data.v[i]);
        ov  = g.orig_of_sub[idx];
        p.push_back(ov);
      end
      sg = path_sig(p);
      if (!g.ref_paths.exists(sg)) n_bad++;
      if (got.exists(sg)) n_dup++;
      got[sg] = 1;
    end
    if (rst_n && res_valid && !res_ready) n_backpressure++;
  end
  always @(negedge clk) res_ready <= stall_results ? ($urandom_range(3) != 0) : 1'b1;

  task automatic run_query(input int q, input int nv, input int kk, input int hubdeg);
    int nref, cycles = 0;
    pefp_stats_t st0;
    g = new(nv);
    do begin
      g.randomize_graph(4, 3, hubdeg);
      g.pre_bfs(0, 1, kk);
      nref = g.enumerate(0, 1, kk);
    end while (nref == 0);
    foreach (g.off[i]) u_gdram.write_word(OFF_B + i, g.off[i]);
    foreach (g.edg[i]) u_gdram.write_word(EDGE_B + i, g.edg[i]);
    foreach (g.bar[i]) u_gdram.write_word(BAR_B + i, g.bar[i]);
    got.delete(); n_bad = 0; n_dup = 0;
    st0 = stats;
    s = vid_t'(g.sub_of_orig[0]);
    t = vid_t'(g.sub_of_orig[1]);
    k = hop_t'(kk);
    num_vertices = g.sub_nv;
    num_edges    = g.edg.size();
    stall_results = (q % 2 == 1);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cycles++; end
    check(!busy, "idle after done");
    check(n_bad == 0, $sformatf("query %0d: %0d paths not in the reference", q, n_bad));
    check(n_dup == 0, $sformatf("query %0d: %0d paths reported twice", q, n_dup));
    check(got.size() == nref, $sformatf("query %0d: %0d paths, reference %0d", q, got.size(), nref));
    check(stats.results - st0.results == nref, $sformatf("query %0d: result counter", q));
    $display("query %0d: |V'|=%0d |E'|=%0d k=%0d paths=%0d cycles=%0d batches=%0d flushes=%0d refills=%0d",
             q, g.sub_nv, g.edg.size(), kk, nref, cycles, stats.batches - st0.batches,
             stats.flushes - st0.flushes, stats.refills - st0.refills);
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; s = '0; t = '0; k = '0; num_vertices = '0; num_edges = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < 10; q++) run_query(q, 40 + 10 * q, 3 + (q % 4), 10);
    // every mechanism must have occurred
    check(stats.edge_miss > 0, "edge lookups from DRAM");
    check(stats.vtx_miss > 0, "vertex lookups from DRAM");
    check(stats.splits > 0, "super-node split by Batch-DFS");
    check(stats.flushes > 0, "buffer area flushed");
    check(stats.refills > 0, "buffer area refilled");
    check(stats.barrier > 0, "barrier pruning");
    check(stats.visited > 0, "visited pruning");
    check(n_backpressure > 0, "result back-pressure");
    $display("totals: results=%0d pushed=%0d barrier=%0d visited=%0d batches=%0d splits=%0d flushes=%0d refills=%0d edge_miss=%0d vtx_miss=%0d backpressure=%0d",
             stats.results, stats.pushed, stats.barrier, stats.visited, stats.batches, stats.splits,
             stats.flushes, stats.refills, stats.edge_miss, stats.vtx_miss, n_backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
