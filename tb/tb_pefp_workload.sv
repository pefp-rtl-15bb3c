// tb_pefp_workload: the PEFP engine at its default sizes on synthetic graphs shaped like the
// evaluation datasets. Each profile copies a dataset's edges per vertex (|E|/|V|) and a hop
// limit used for it, with the vertex count scaled down so that the reference enumeration and
// the simulation stay short. Out-degrees are uniform in 0..maxdeg, so |E|/|V| = maxdeg/2:
//   RT  - 6,300 vertices (full Reactome size), |E|/|V| 23, k = 4;
//   TS  - 465 vertices (1/1000), |E|/|V| 2, k = 8;
//   BD  - 4,250 vertices (1/100), |E|/|V| 7, eight super nodes of out-degree 600, k = 5
//         (a super node exceeds one batch and must be split by Batch-DFS);
//   AM  - 334 vertices (1/1000), |E|/|V| 3, k = 12 (long paths).
// Every profile is one query from vertex 0 to vertex 1; the graph is regenerated until s-t
// paths exist. The results are compared with the reference depth-first search (each path
// valid, none twice, count equal), and the cycle count and event counters are printed.
module tb_pefp_workload;
  import pefp_pkg::*;
  import pefp_host_pkg::*;

  localparam logic [31:0] OFF_B = 32'h0, EDGE_B = 32'h10_0000, BAR_B = 32'h80_0000;

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

  pefp_top dut (
    .clk, .rst_n, .start, .s, .t, .k, .num_vertices, .num_edges,
    .off_base(OFF_B), .edge_base(EDGE_B), .bar_base(BAR_B), .busy, .done,
    .res_valid, .res_data, .res_ready,
    .g_req_valid, .g_req_addr, .g_req_ready, .g_rsp_valid, .g_rsp_data,
    .p_req_valid, .p_req_write, .p_req_addr, .p_req_wdata, .p_req_ready, .p_rsp_valid,
    .p_rsp_rdata, .stats
  );
  graph_dram_model u_gdram (
    .clk, .req_valid(g_req_valid), .req_addr(g_req_addr), .req_ready(g_req_ready),
    .rsp_valid(g_rsp_valid), .rsp_data(g_rsp_data)
  );
  path_dram_model u_pdram (
    .clk, .req_valid(p_req_valid), .req_write(p_req_write), .req_addr(p_req_addr),
    .req_wdata(p_req_wdata), .req_ready(p_req_ready), .rsp_valid(p_rsp_valid),
    .rsp_rdata(p_rsp_rdata)
  );

  int checks = 0, failures = 0;
  host_graph g;
  int got[string];
  int n_bad = 0, n_dup = 0;
  int total_splits = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && res_valid && res_ready) begin
      int p[$];
      int idx, ov;
      string sg;
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
  end

  initial begin
    repeat (30000000) @(negedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_profile(input string name, input int nv, input int maxdeg, input int hubs,
                             input int hubdeg, input int kk);
    int nref, cycles = 0, tries = 0;
    pefp_stats_t st0;
    g = new(nv);
    do begin
      g.randomize_graph(maxdeg, hubs, hubdeg);
      g.pre_bfs(0, 1, kk);
      nref = g.enumerate(0, 1, kk);
      tries++;
    end while (nref < 1 && tries < 100);
    check(nref >= 1, {name, ": no graph with s-t paths"});
    foreach (g.off[i]) u_gdram.write_word(OFF_B + i, g.off[i]);
    foreach (g.edg[i]) u_gdram.write_word(EDGE_B + i, g.edg[i]);
    foreach (g.bar[i]) u_gdram.write_word(BAR_B + i, g.bar[i]);
    got.delete(); n_bad = 0; n_dup = 0;
    s = vid_t'(g.sub_of_orig[0]);
    t = vid_t'(g.sub_of_orig[1]);
    k = hop_t'(kk);
    num_vertices = g.sub_nv;
    num_edges    = g.edg.size();
    st0 = stats;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cycles++; end
    @(negedge clk);
    check(n_bad == 0, $sformatf("%s: %0d paths not in the reference", name, n_bad));
    check(n_dup == 0, $sformatf("%s: %0d paths reported twice", name, n_dup));
    check(got.size() == nref, $sformatf("%s: %0d paths, reference %0d", name, got.size(), nref));
    check(stats.results - st0.results == nref, {name, ": result counter"});
    total_splits += int'(stats.splits - st0.splits);
    $display("%s: |V|=%0d |E|=%0d |V'|=%0d |E'|=%0d k=%0d paths=%0d cycles=%0d batches=%0d splits=%0d pushed=%0d barrier=%0d visited=%0d flushes=%0d",
             name, nv, count_edges(), g.sub_nv, g.edg.size(), kk, nref,
             cycles, stats.batches - st0.batches, stats.splits - st0.splits,
             stats.pushed - st0.pushed, stats.barrier - st0.barrier, stats.visited - st0.visited,
             stats.flushes - st0.flushes);
  endtask

  function automatic int count_edges();
    int n = 0;
    foreach (g.adj[u]) n += g.adj[u].size();
    return n;
  endfunction

  initial begin
    start = 0; res_ready = 1;
    s = '0; t = '0; k = '0; num_vertices = '0; num_edges = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    run_profile("RT", 6300, 46, 0, 0, 4);
    run_profile("TS", 465, 4, 0, 0, 8);
    run_profile("BD", 4250, 14, 8, 600, 5);
    run_profile("AM", 334, 6, 0, 0, 12);
    check(total_splits > 0, "super nodes split at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
