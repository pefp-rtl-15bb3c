// pefp_top: PEFP engine, FPGA side of k-hop constrained s-t simple path enumeration.
//
// The host has already reduced the graph (only vertices u with sd(s,u)+sd(u,t) <= k kept),
// stored it in CSR form together with the barrier bar[u] = sd(u,t) in DRAM, and passes
// s, t, k and the layout. The engine then works BFS-style on batches while choosing the
// batches DFS-style:
//   1. load as much of the CSR arrays and the barrier into on-chip RAM as fits (graph_cache);
//   2. seed the buffer area with the one-vertex path {s};
//   3. loop: if the buffer area holds paths, Batch-DFS moves up to THETA2 successors from its
//      top into the processing area and the expander verifies and writes back every one of
//      them (results leave through the result port; a full buffer area is flushed to DRAM);
//      else if DRAM holds spilled paths, THETA1 of them are read back into the buffer area;
//      else the query is finished.
//
// Interface: start (pulse, with s/t/k and the layout stable during the query), busy and a
// done pulse; a valid/ready result stream with one s-t path per beat; a 32-bit graph DRAM
// read port and a path-record DRAM port for the spilled path set; event counters in stats
// (cleared only by reset).
// The batch flow follows the paper's Algorithms 1, 3 and 4. The on-chip sizes, the
// sequential (one successor at a time) expansion and the two DRAM ports are this design's
// own choices. Seeding {s} through the buffer area rather than straight into the processing
// area is also this design's choice; it gives the same batches.
module pefp_top
  import pefp_pkg::*;
#(
  parameter int unsigned VCAP      = 65536,   // on-chip vertex_arr / bar_arr entries
  parameter int unsigned ECAP      = 262144,  // on-chip edge_arr entries
  parameter int unsigned BUF_DEPTH = 4096,    // buffer area, paths
  parameter int unsigned THETA2    = 256,     // processing area, successors per batch
  parameter int unsigned THETA1    = 1024     // paths per refill from DRAM
) (
  input  logic        clk,
  input  logic        rst_n,
  // query
  input  logic        start,
  input  vid_t        s,
  input  vid_t        t,
  input  hop_t        k,
  input  logic [31:0] num_vertices,
  input  logic [31:0] num_edges,
  input  logic [31:0] off_base,
  input  logic [31:0] edge_base,
  input  logic [31:0] bar_base,
  output logic        busy,
  output logic        done,
  // results
  output logic        res_valid,
  output result_t     res_data,
  input  logic        res_ready,
  // graph DRAM read port
  output logic        g_req_valid,
  output logic [31:0] g_req_addr,
  input  logic        g_req_ready,
  input  logic        g_rsp_valid,
  input  logic [31:0] g_rsp_data,
  // path DRAM port
  output logic        p_req_valid,
  output logic        p_req_write,
  output logic [31:0] p_req_addr,
  output path_rec_t   p_req_wdata,
  input  logic        p_req_ready,
  input  logic        p_rsp_valid,
  input  path_rec_t   p_rsp_rdata,
  // monitoring
  output pefp_stats_t stats
);
  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_SEED_REQ, S_SEED_WAIT, S_LOOP, S_BATCH, S_EXPAND, S_FLUSH, S_REFILL
  } state_e;
  state_e state;

  // ---------------- graph cache
  logic        gc_init_start, gc_init_done;
  logic        gc_e_req, gc_e_rsp_valid, gc_v_req, gc_v_rsp_valid;
  eptr_t       gc_e_addr, gc_v_off_lo, gc_v_off_hi;
  vid_t        gc_e_nbr, gc_v_id;
  hop_t        gc_v_bar;

  // ---------------- buffer area
  logic        st_clear, st_push, st_pop, st_upd, st_empty, st_full;
  path_rec_t   st_push_data, st_upd_data, st_rd_data;
  logic [31:0] st_upd_idx, st_rd_idx, st_count;

  // ---------------- processing area
  logic        pa_clear, pa_wr;
  path_rec_t   pa_wr_data, pa_rd_data;
  logic [31:0] pa_rd_idx, pa_count;

  // ---------------- sub-block handshakes
  logic        bd_start, bd_done, bd_pop, bd_upd;
  logic [31:0] bd_rd_idx;
  logic        ex_start, ex_done, ex_e_req, ex_v_req, ex_push, ex_flush_req;
  eptr_t       ex_e_addr;
  vid_t        ex_v_id;
  path_rec_t   ex_push_data;
  logic        sp_flush_start, sp_refill_start, sp_done, sp_clear, sp_push;
  logic [31:0] sp_rd_idx, sp_pd_count;
  path_rec_t   sp_push_data;
  logic        seed_push;
  logic [31:0] cnt_edge_miss, cnt_vtx_miss, cnt_splits, cnt_results, cnt_pushed;
  logic [31:0] cnt_barrier, cnt_visited, cnt_flushes, cnt_refills, cnt_batches;
  path_rec_t   seed_rec;

  graph_cache #(.VCAP(VCAP), .ECAP(ECAP)) u_graph_cache (
    .clk, .rst_n,
    .num_vertices, .num_edges, .off_base, .edge_base, .bar_base,
    .init_start(gc_init_start), .init_done(gc_init_done),
    .e_req(gc_e_req), .e_addr(gc_e_addr), .e_rsp_valid(gc_e_rsp_valid), .e_rsp_nbr(gc_e_nbr),
    .v_req(gc_v_req), .v_id(gc_v_id), .v_rsp_valid(gc_v_rsp_valid),
    .v_rsp_off_lo(gc_v_off_lo), .v_rsp_off_hi(gc_v_off_hi), .v_rsp_bar(gc_v_bar),
    .busy(),
    .edge_miss_cnt(cnt_edge_miss), .vtx_miss_cnt(cnt_vtx_miss),
    .g_req_valid, .g_req_addr, .g_req_ready, .g_rsp_valid, .g_rsp_data
  );

  path_stack #(.DEPTH(BUF_DEPTH)) u_buffer_area (
    .clk, .rst_n,
    .clear(st_clear), .push(st_push), .push_data(st_push_data), .pop(st_pop),
    .upd(st_upd), .upd_idx(st_upd_idx), .upd_data(st_upd_data),
    .rd_idx(st_rd_idx), .rd_data(st_rd_data),
    .count(st_count), .empty(st_empty), .full(st_full)
  );

  processing_area #(.DEPTH(THETA2)) u_processing_area (
    .clk, .rst_n,
    .clear(pa_clear), .wr(pa_wr), .wr_data(pa_wr_data),
    .rd_idx(pa_rd_idx), .rd_data(pa_rd_data), .count(pa_count)
  );

  batch_dfs #(.THETA(THETA2)) u_batch_dfs (
    .clk, .rst_n, .start(bd_start), .done(bd_done),
    .st_count(st_count), .st_rd_idx(bd_rd_idx), .st_rd_data(st_rd_data),
    .st_pop(bd_pop), .st_upd(bd_upd), .st_upd_idx(st_upd_idx), .st_upd_data(st_upd_data),
    .pa_clear(pa_clear), .pa_wr(pa_wr), .pa_wr_data(pa_wr_data),
    .split_cnt(cnt_splits)
  );

  expander u_expander (
    .clk, .rst_n, .start(ex_start), .done(ex_done), .target(t), .k(k),
    .pa_count(pa_count), .pa_rd_idx(pa_rd_idx), .pa_rd_data(pa_rd_data),
    .e_req(ex_e_req), .e_addr(ex_e_addr), .e_rsp_valid(gc_e_rsp_valid), .e_rsp_nbr(gc_e_nbr),
    .v_req(ex_v_req), .v_id(ex_v_id), .v_rsp_valid(gc_v_rsp_valid),
    .v_rsp_off_lo(gc_v_off_lo), .v_rsp_off_hi(gc_v_off_hi), .v_rsp_bar(gc_v_bar),
    .st_full(st_full), .st_push(ex_push), .st_push_data(ex_push_data),
    .flush_req(ex_flush_req), .flush_done(sp_done && state == S_FLUSH),
    .res_valid, .res_data, .res_ready,
    .n_results(cnt_results), .n_pushed(cnt_pushed),
    .n_barrier(cnt_barrier), .n_visited(cnt_visited)
  );

  spill_ctrl #(.THETA1(THETA1)) u_spill_ctrl (
    .clk, .rst_n,
    .flush_start(sp_flush_start), .refill_start(sp_refill_start), .done(sp_done),
    .pd_count(sp_pd_count),
    .st_count(st_count), .st_rd_idx(sp_rd_idx), .st_rd_data(st_rd_data),
    .st_clear(sp_clear), .st_push(sp_push), .st_push_data(sp_push_data),
    .p_req_valid, .p_req_write, .p_req_addr, .p_req_wdata, .p_req_ready,
    .p_rsp_valid, .p_rsp_rdata,
    .flush_cnt(cnt_flushes), .refill_cnt(cnt_refills)
  );

  assign stats = '{results: cnt_results, pushed: cnt_pushed, barrier: cnt_barrier,
                   visited: cnt_visited, batches: cnt_batches, splits: cnt_splits,
                   flushes: cnt_flushes, refills: cnt_refills, edge_miss: cnt_edge_miss,
                   vtx_miss: cnt_vtx_miss};

  // ---------------- control
  always_comb begin
    gc_init_start   = (state == S_IDLE) && start;
    bd_start        = (state == S_LOOP) && !st_empty;
    sp_refill_start = (state == S_LOOP) && st_empty && (sp_pd_count != 32'd0);
    ex_start        = (state == S_BATCH) && bd_done;
    sp_flush_start  = (state == S_EXPAND) && ex_flush_req;

    // graph cache: the seed lookup, otherwise the expander
    gc_e_req  = ex_e_req;
    gc_e_addr = ex_e_addr;
    gc_v_req  = (state == S_SEED_REQ) ? 1'b1 : ex_v_req;
    gc_v_id   = (state == S_SEED_REQ) ? s : ex_v_id;

    // the seed path {s}
    seed_rec          = '0;
    seed_rec.v[0]     = s;
    seed_rec.len      = '0;
    seed_rec.nb_start = gc_v_off_lo;
    seed_rec.nb_end   = gc_v_off_lo;
    seed_rec.nb_last  = gc_v_off_hi;
    seed_push         = (state == S_SEED_WAIT) && gc_v_rsp_valid;

    // buffer area: one user per state
    st_push      = seed_push | ex_push | sp_push;
    st_push_data = seed_push ? seed_rec : (ex_push ? ex_push_data : sp_push_data);
    st_pop       = bd_pop;
    st_upd       = bd_upd;
    st_clear     = sp_clear;
    st_rd_idx    = (state == S_FLUSH) ? sp_rd_idx : bd_rd_idx;

    busy = (state != S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      done          <= 1'b0;
      cnt_batches <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:      if (start) state <= S_INIT;
        S_INIT:      if (gc_init_done) state <= S_SEED_REQ;
        S_SEED_REQ:  state <= S_SEED_WAIT;
        S_SEED_WAIT: if (gc_v_rsp_valid) state <= S_LOOP;
        S_LOOP: begin
          if (!st_empty) begin
            state         <= S_BATCH;
            cnt_batches <= cnt_batches + 32'd1;
          end else if (sp_pd_count != 32'd0) state <= S_REFILL;
          else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_BATCH:  if (bd_done) state <= S_EXPAND;
        S_EXPAND: begin
          if (ex_flush_req)  state <= S_FLUSH;
          else if (ex_done)  state <= S_LOOP;
        end
        S_FLUSH:  if (sp_done) state <= S_EXPAND;
        S_REFILL: if (sp_done) state <= S_LOOP;
        default:  state <= S_IDLE;
      endcase
    end
  end

  a_one_stack_writer: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({seed_push, ex_push, sp_push, bd_upd}));
endmodule
