// tb_pefp_full: one complete query on the PEFP engine with every parameter at its default
// (full on-chip sizes). A random graph of a few hundred vertices is reduced by the host
// model, loaded into the graph DRAM model, and one s-t k-path query with k = 6 is run to
// completion; every reported path must be in the reference set, none twice, and the count
// must match the reference depth-first search.
module tb_pefp_full;
  import pefp_pkg::*;
  import pefp_host_pkg::*;

  localparam int NV = 300, K = 6;
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
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nref, cycles = 0;
    start = 0; res_ready = 1;
    g = new(NV);
    do begin
      g.randomize_graph(6, 4, 40);
      g.pre_bfs(0, 1, K);
      nref = g.enumerate(0, 1, K);
    end while (nref < 20);
    foreach (g.off[i]) u_gdram.write_word(OFF_B + i, g.off[i]);
    foreach (g.edg[i]) u_gdram.write_word(EDGE_B + i, g.edg[i]);
    foreach (g.bar[i]) u_gdram.write_word(BAR_B + i, g.bar[i]);
    s = vid_t'(g.sub_of_orig[0]);
    t = vid_t'(g.sub_of_orig[1]);
    k = hop_t'(K);
    num_vertices = g.sub_nv;
    num_edges    = g.edg.size();
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cycles++; end
    check(n_bad == 0, $sformatf("%0d paths not in the reference", n_bad));
    check(n_dup == 0, $sformatf("%0d paths reported twice", n_dup));
    check(got.size() == nref, $sformatf("%0d paths, reference %0d", got.size(), nref));
    check(stats.results == nref, "result counter");
    check(stats.edge_miss == 0 && stats.vtx_miss == 0, "whole reduced graph held on chip");
    $display("|V|=%0d |V'|=%0d |E'|=%0d k=%0d paths=%0d cycles=%0d batches=%0d splits=%0d pushed=%0d barrier=%0d visited=%0d",
             NV, g.sub_nv, g.edg.size(), K, nref, cycles, stats.batches, stats.splits, stats.pushed,
             stats.barrier, stats.visited);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
