// tb_expander: the expansion module with a real graph cache, DRAM model and processing area.
// A random graph is reduced by the host model (Pre-BFS) and placed in DRAM. Batches of
// random simple paths from s, each with a random slice of its successor list, are written
// to the processing area. The expected write-backs and results are derived here from
// Algorithm 2 and compared in order with what the module pushes and reports.
// Batch 0 runs with no back-pressure and must take exactly 2 cycles per path plus
// 5 cycles per successor; later batches add result back-pressure and a full buffer area
// (flush request / flush done handshake).
module tb_expander;
  import pefp_pkg::*;
  import pefp_host_pkg::*;
  localparam int NV = 40, K = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, done, init_start, init_done;
  vid_t        target;
  hop_t        k;
  logic [31:0] pa_count, pa_rd_idx;
  path_rec_t   pa_rd_data, pa_wr_data, st_push_data;
  logic        pa_clear, pa_wr;
  logic        e_req, e_rsp_valid, v_req, v_rsp_valid, busy;
  eptr_t       e_addr, v_rsp_off_lo, v_rsp_off_hi;
  vid_t        e_rsp_nbr, v_id;
  hop_t        v_rsp_bar;
  logic        st_full, st_push, flush_req, flush_done;
  logic        res_valid, res_ready;
  result_t     res_data;
  logic [31:0] n_results, n_pushed, n_barrier, n_visited, emiss, vmiss;
  logic        g_req_valid, g_req_ready, g_rsp_valid;
  logic [31:0] g_req_addr, g_rsp_data;

  int checks = 0, failures = 0;
  path_rec_t exp_push [$], got_push [$];
  result_t   exp_res  [$], got_res  [$];
  int n_flush_req = 0;
  int last_full = -1;
  host_graph g;

  graph_cache #(.VCAP(64), .ECAP(512)) u_cache (
    .clk, .rst_n, .num_vertices(32'(g.sub_nv)), .num_edges(32'(g.edg.size())),
    .off_base(32'd0), .edge_base(32'd1000), .bar_base(32'd5000), .init_start, .init_done,
    .e_req, .e_addr, .e_rsp_valid, .e_rsp_nbr, .v_req, .v_id, .v_rsp_valid,
    .v_rsp_off_lo, .v_rsp_off_hi, .v_rsp_bar, .busy, .edge_miss_cnt(emiss), .vtx_miss_cnt(vmiss),
    .g_req_valid, .g_req_addr, .g_req_ready, .g_rsp_valid, .g_rsp_data
  );
  graph_dram_model u_dram (
    .clk, .req_valid(g_req_valid), .req_addr(g_req_addr), .req_ready(g_req_ready),
    .rsp_valid(g_rsp_valid), .rsp_data(g_rsp_data)
  );
  processing_area #(.DEPTH(64)) u_pa (
    .clk, .rst_n, .clear(pa_clear), .wr(pa_wr), .wr_data(pa_wr_data),
    .rd_idx(pa_rd_idx), .rd_data(pa_rd_data), .count(pa_count)
  );
  expander dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // capture the module's outputs
  always @(posedge clk) begin
    if (rst_n && st_push) got_push.push_back(st_push_data);
    if (rst_n && res_valid && res_ready) got_res.push_back(res_data);
  end

  // buffer-area side of the flush handshake
  bit flush_pending = 0;
  always @(posedge clk) if (flush_req) flush_pending <= 1;
  initial begin
    flush_done = 0;
    forever begin
      @(negedge clk);
      if (flush_pending) begin
        flush_pending = 0;
        n_flush_req++;
        repeat (4) @(negedge clk);
        flush_done = 1; st_full = 0;
        @(negedge clk);
        flush_done = 0;
      end
    end
  end

  // a random simple path from s of len hops inside the subgraph, or an empty queue
  function automatic void rand_path(int len, ref int p[$]);
    p.delete();
    p.push_back(g.sub_of_orig[0]);
    for (int h = 0; h < len; h++) begin
      int u = p[$];
      int cand[$];
      for (int e = g.off[u]; e < g.off[u+1]; e++) begin
        bit on = 0;
        foreach (p[i]) if (p[i] == g.edg[e]) on = 1;
        if (!on && g.edg[e] != int'(target)) cand.push_back(g.edg[e]);
      end
      if (cand.size() == 0) return;
      p.push_back(cand[$urandom_range(cand.size() - 1)]);
    end
  endfunction

  task automatic run_batch(input int b, input bit stress);
    int npaths = 0, nsucc = 0, cycles = 0;
    pa_clear = 1; @(negedge clk); pa_clear = 0;
    for (int n = 0; n < 8; n++) begin
      int p[$];
      path_rec_t r;
      int u, lo, hi;
      rand_path($urandom_range(K - 1), p);
      if (p.size() == 0) continue;
      u  = p[$];
      lo = g.off[u] + $urandom_range(g.off[u+1] - g.off[u]);
      hi = lo + $urandom_range(g.off[u+1] - lo);
      r = '0;
      foreach (p[i]) r.v[i] = p[i];
      r.len = hop_t'(p.size() - 1);
      r.nb_start = lo; r.nb_end = hi; r.nb_last = g.off[u+1];
      pa_wr = 1; pa_wr_data = r;
      @(negedge clk);
      pa_wr = 0;
      npaths++; nsucc += hi - lo;
      // expected outcome of each successor (Algorithm 2)
      for (int e = lo; e < hi; e++) begin
        int v = g.edg[e];
        bit on = 0;
        foreach (p[i]) if (p[i] == v) on = 1;
        if (v == int'(target)) begin
          result_t x = '0;
          foreach (p[i]) x.v[i] = p[i];
          x.v[p.size()] = v; x.len = hop_t'(p.size());
          exp_res.push_back(x);
        end else if (p.size() + g.bar[v] > K) begin
          // barrier
        end else if (!on) begin
          path_rec_t y = r;
          y.v[p.size()] = v; y.len = hop_t'(p.size());
          y.nb_start = g.off[v]; y.nb_end = g.off[v]; y.nb_last = g.off[v+1];
          exp_push.push_back(y);
        end
      end
    end
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin
      if (stress) begin
        res_ready = ($urandom_range(2) != 0);
        if (got_push.size() % 3 == 2 && got_push.size() != last_full) begin
          st_full   = 1;
          last_full = got_push.size();
        end
      end
      @(negedge clk);
      cycles++;
    end
    res_ready = 1;
    if (!stress) check(cycles == 2 * npaths + 5 * nsucc,
                       $sformatf("batch %0d cycles %0d, expected %0d", b, cycles, 2 * npaths + 5 * nsucc));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s_new, t_new;
    start = 0; init_start = 0; pa_clear = 0; pa_wr = 0; pa_wr_data = '0;
    st_full = 0; res_ready = 1;
    // graph with s = 0, t = 1; retry until the reduced graph has some paths
    g = new(NV);
    do begin
      g.randomize_graph(4, 3, 12);
      g.pre_bfs(0, 1, K);
    end while (g.enumerate(0, 1, K) < 5);
    s_new = g.sub_of_orig[0];
    t_new = g.sub_of_orig[1];
    target = vid_t'(t_new);
    k = hop_t'(K);
    foreach (g.off[i]) u_dram.write_word(i, g.off[i]);
    foreach (g.edg[i]) u_dram.write_word(1000 + i, g.edg[i]);
    foreach (g.bar[i]) u_dram.write_word(5000 + i, g.bar[i]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    init_start = 1; @(negedge clk); init_start = 0;
    while (!init_done) @(negedge clk);
    for (int b = 0; b < 30; b++) run_batch(b, b > 0);
    repeat (5) @(negedge clk);
    check(got_push.size() == exp_push.size(), $sformatf("push count %0d vs %0d", got_push.size(), exp_push.size()));
    foreach (exp_push[i]) if (i < got_push.size()) check(got_push[i] == exp_push[i], $sformatf("push %0d", i));
    check(got_res.size() == exp_res.size(), $sformatf("result count %0d vs %0d", got_res.size(), exp_res.size()));
    foreach (exp_res[i]) if (i < got_res.size()) check(got_res[i] == exp_res[i], $sformatf("result %0d got %p exp %p", i, got_res[i], exp_res[i]));
    check(n_results == exp_res.size() && n_pushed == exp_push.size(), "counters");
    check(n_flush_req > 0 && n_barrier > 0 && n_visited > 0 && n_results > 0, "all outcomes exercised");
    $display("pushed=%0d results=%0d barrier=%0d visited=%0d flush requests=%0d",
             n_pushed, n_results, n_barrier, n_visited, n_flush_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
