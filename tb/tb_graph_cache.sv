// tb_graph_cache: checks the on-chip caching of graph and barrier with DRAM fall-back.
// A random CSR graph larger than the on-chip arrays is placed in a DRAM model; after the
// initial load every vertex and every edge is looked up and compared with the graph built
// here. Lookups inside the cached range must answer after exactly 1 cycle (on-chip RAM),
// the others after at least the DRAM latency; the miss counters must match.
module tb_graph_cache;
  import pefp_pkg::*;
  localparam int VCAP = 8, ECAP = 16, LAT = 8;
  localparam int NV = 12;
  localparam logic [31:0] OFF_B = 100, EDGE_B = 200, BAR_B = 1000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        init_start, init_done, busy;
  logic        e_req, e_rsp_valid, v_req, v_rsp_valid;
  eptr_t       e_addr, v_rsp_off_lo, v_rsp_off_hi;
  vid_t        e_rsp_nbr, v_id;
  hop_t        v_rsp_bar;
  logic [31:0] edge_miss_cnt, vtx_miss_cnt;
  logic        g_req_valid, g_req_ready, g_rsp_valid;
  logic [31:0] g_req_addr, g_rsp_data;
  logic [31:0] num_vertices, num_edges;

  int checks = 0, failures = 0;
  int off[NV+1];
  int edges[$];
  int bar[NV];

  graph_cache #(.VCAP(VCAP), .ECAP(ECAP)) dut (
    .clk, .rst_n, .num_vertices, .num_edges, .off_base(OFF_B), .edge_base(EDGE_B),
    .bar_base(BAR_B), .init_start, .init_done,
    .e_req, .e_addr, .e_rsp_valid, .e_rsp_nbr,
    .v_req, .v_id, .v_rsp_valid, .v_rsp_off_lo, .v_rsp_off_hi, .v_rsp_bar, .busy,
    .edge_miss_cnt, .vtx_miss_cnt,
    .g_req_valid, .g_req_addr, .g_req_ready, .g_rsp_valid, .g_rsp_data
  );
  graph_dram_model #(.LATENCY(LAT), .STALL_PCT(20)) u_dram (
    .clk, .req_valid(g_req_valid), .req_addr(g_req_addr), .req_ready(g_req_ready),
    .rsp_valid(g_rsp_valid), .rsp_data(g_rsp_data)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, exp_emiss, exp_vmiss;
    init_start = 0; e_req = 0; v_req = 0; e_addr = '0; v_id = '0;
    // random CSR graph
    off[0] = 0;
    for (int v = 0; v < NV; v++) begin
      automatic int d = $urandom_range(4);
      for (int j = 0; j < d; j++) edges.push_back($urandom_range(NV - 1));
      off[v+1] = edges.size();
      bar[v] = $urandom_range(MAX_K + 1);
    end
    num_vertices = NV;
    num_edges    = edges.size();
    for (int v = 0; v <= NV; v++) u_dram.write_word(OFF_B + v, off[v]);
    foreach (edges[j]) u_dram.write_word(EDGE_B + j, edges[j]);
    for (int v = 0; v < NV; v++) u_dram.write_word(BAR_B + v, bar[v]);

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    init_start = 1;
    @(negedge clk);
    init_start = 0;
    while (!init_done) @(negedge clk);
    check(!busy, "cache ready after init");

    exp_vmiss = 0;
    for (int v = 0; v < NV; v++) begin
      automatic bit hit = (v + 1 < VCAP) && (v < VCAP);
      v_req = 1; v_id = v;
      @(negedge clk);
      v_req = 0;
      lat = 1;
      while (!v_rsp_valid) begin @(negedge clk); lat++; end
      check(v_rsp_off_lo == off[v] && v_rsp_off_hi == off[v+1] && v_rsp_bar == bar[v],
            $sformatf("vertex %0d data", v));
      if (hit) check(lat == 1, $sformatf("vertex %0d hit latency %0d", v, lat));
      else     check(lat >= LAT, $sformatf("vertex %0d miss latency %0d", v, lat));
      if (!hit) exp_vmiss++;
      while (busy) @(negedge clk);
    end
    exp_emiss = 0;
    foreach (edges[j]) begin
      automatic bit hit = (j < ECAP);
      e_req = 1; e_addr = j;
      @(negedge clk);
      e_req = 0;
      lat = 1;
      while (!e_rsp_valid) begin @(negedge clk); lat++; end
      check(e_rsp_nbr == edges[j], $sformatf("edge %0d data", j));
      if (hit) check(lat == 1, $sformatf("edge %0d hit latency %0d", j, lat));
      else     check(lat >= LAT, $sformatf("edge %0d miss latency %0d", j, lat));
      if (!hit) exp_emiss++;
      while (busy) @(negedge clk);
    end
    check(vtx_miss_cnt == exp_vmiss, "vertex miss count");
    check(edge_miss_cnt == exp_emiss, "edge miss count");
    check(exp_emiss > 0 && exp_vmiss > 0, "both hit and miss exercised");
    $display("edges=%0d vertex misses=%0d edge misses=%0d", edges.size(), vtx_miss_cnt, edge_miss_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
