// graph_cache: on-chip copies of the CSR graph and the barrier, with DRAM fall-back.
//
// Three on-chip arrays mirror the beginning of the three DRAM arrays the host writes:
// vertex_arr (CSR offsets), edge_arr (CSR neighbour lists) and bar_arr (barrier = distance
// to t). On init_start the arrays are filled from DRAM with as many entries as fit
// (VCAP offsets, ECAP edges, VCAP barriers). Afterwards every lookup is served from the
// on-chip array when the entry was loaded there, and from DRAM otherwise; this is the
// paper's "check the local array first" caching of graph and barrier.
//
// Lookups: an edge lookup (e_req, e_addr) returns the neighbour stored at edge pointer
// e_addr; a vertex lookup (v_req, v_id) returns off[v], off[v+1] and bar[v], i.e. the
// neighbour range and the barrier of v. One lookup is in flight at a time (busy); a hit
// answers on the next cycle (on-chip RAM latency 1), a miss after the DRAM round trips
// (one word for an edge, three words for a vertex).
//
// DRAM port: 32-bit word reads with a valid/ready request and in-order responses.
// The array sizes, the one-lookup-at-a-time policy and the port are this design's choices;
// the paper names the three arrays and the policy, but gives no sizes.
module graph_cache
  import pefp_pkg::*;
#(
  parameter int unsigned VCAP = 65536,   // vertex_arr and bar_arr entries
  parameter int unsigned ECAP = 262144   // edge_arr entries
) (
  input  logic        clk,
  input  logic        rst_n,
  // graph layout in DRAM (word addresses) and its size
  input  logic [31:0] num_vertices,
  input  logic [31:0] num_edges,
  input  logic [31:0] off_base,
  input  logic [31:0] edge_base,
  input  logic [31:0] bar_base,
  input  logic        init_start,
  output logic        init_done,       // level: arrays are loaded
  // edge lookup
  input  logic        e_req,
  input  eptr_t       e_addr,
  output logic        e_rsp_valid,
  output vid_t        e_rsp_nbr,
  // vertex lookup
  input  logic        v_req,
  input  vid_t        v_id,
  output logic        v_rsp_valid,
  output eptr_t       v_rsp_off_lo,
  output eptr_t       v_rsp_off_hi,
  output hop_t        v_rsp_bar,
  output logic        busy,
  // statistics
  output logic [31:0] edge_miss_cnt,
  output logic [31:0] vtx_miss_cnt,
  // graph DRAM read port
  output logic        g_req_valid,
  output logic [31:0] g_req_addr,
  input  logic        g_req_ready,
  input  logic        g_rsp_valid,
  input  logic [31:0] g_rsp_data
);
  localparam int VAW = (VCAP > 1) ? $clog2(VCAP) : 1;
  localparam int EAW = (ECAP > 1) ? $clog2(ECAP) : 1;

  eptr_t vertex_arr [VCAP];
  vid_t  edge_arr   [ECAP];
  hop_t  bar_arr    [VCAP];

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD_OFF, S_LOAD_EDGE, S_LOAD_BAR, S_READY, S_MISS_E, S_MISS_V
  } state_e;
  state_e state;

  logic [31:0] off_loaded, edge_loaded, bar_loaded;   // entries present on chip
  logic [31:0] ld_total, ld_issued, ld_recvd;         // current streaming read
  logic [31:0] ld_base;
  logic [1:0]  miss_issued, miss_recvd;               // DRAM words of the current miss
  logic [31:0] miss_addr [3];
  logic [31:0] miss_word [3];
  logic        loading;

  function automatic logic [31:0] min32(logic [31:0] a, logic [31:0] b);
    return (a < b) ? a : b;
  endfunction

  assign loading   = (state == S_LOAD_OFF) || (state == S_LOAD_EDGE) || (state == S_LOAD_BAR);
  assign init_done = (state != S_IDLE) && !loading;
  assign busy      = (state != S_READY);

  // DRAM request: streaming during loading, up to three words during a miss
  always_comb begin
    g_req_valid = 1'b0;
    g_req_addr  = '0;
    if (loading && ld_issued < ld_total) begin
      g_req_valid = 1'b1;
      g_req_addr  = ld_base + ld_issued;
    end else if (state == S_MISS_E && miss_issued == 2'd0) begin
      g_req_valid = 1'b1;
      g_req_addr  = miss_addr[0];
    end else if (state == S_MISS_V && miss_issued < 2'd3) begin
      g_req_valid = 1'b1;
      g_req_addr  = miss_addr[miss_issued];
    end
  end

  wire e_hit = (32'(e_addr) < edge_loaded);
  wire v_hit = (32'(v_id) + 32'd1 < off_loaded) && (32'(v_id) < bar_loaded);

  // on-chip array writes during loading
  always_ff @(posedge clk) begin
    if (g_rsp_valid && loading) begin
      case (state)
        S_LOAD_OFF:  vertex_arr[VAW'(ld_recvd)] <= eptr_t'(g_rsp_data);
        S_LOAD_EDGE: edge_arr[EAW'(ld_recvd)]   <= vid_t'(g_rsp_data);
        default:     bar_arr[VAW'(ld_recvd)]    <= hop_t'(g_rsp_data);
      endcase
    end
  end

  // on-chip array reads (registered, one cycle)
  always_ff @(posedge clk) begin
    if (state == S_READY && e_req && e_hit)
      e_rsp_nbr <= edge_arr[EAW'(e_addr)];
    else if (state == S_MISS_E && g_rsp_valid)
      e_rsp_nbr <= vid_t'(g_rsp_data);
    if (state == S_READY && v_req && !e_req && v_hit) begin
      v_rsp_off_lo <= vertex_arr[VAW'(v_id)];
      v_rsp_off_hi <= vertex_arr[VAW'(32'(v_id) + 32'd1)];
      v_rsp_bar    <= bar_arr[VAW'(v_id)];
    end else if (state == S_MISS_V && g_rsp_valid && miss_recvd == 2'd2) begin
      v_rsp_off_lo <= eptr_t'(miss_word[0]);
      v_rsp_off_hi <= eptr_t'(miss_word[1]);
      v_rsp_bar    <= hop_t'(g_rsp_data);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      off_loaded    <= '0;
      edge_loaded   <= '0;
      bar_loaded    <= '0;
      ld_total      <= '0;
      ld_issued     <= '0;
      ld_recvd      <= '0;
      ld_base       <= '0;
      miss_issued   <= '0;
      miss_recvd    <= '0;
      miss_addr     <= '{default: '0};
      miss_word     <= '{default: '0};
      e_rsp_valid   <= 1'b0;
      v_rsp_valid   <= 1'b0;
      edge_miss_cnt <= '0;
      vtx_miss_cnt  <= '0;
    end else begin
      e_rsp_valid <= 1'b0;
      v_rsp_valid <= 1'b0;
      if (g_req_valid && g_req_ready) begin
        if (loading) ld_issued <= ld_issued + 32'd1;
        else         miss_issued <= miss_issued + 2'd1;
      end
      unique case (state)
        S_IDLE, S_READY: begin
          if (init_start) begin
            state       <= S_LOAD_OFF;
            off_loaded  <= '0;
            edge_loaded <= '0;
            bar_loaded  <= '0;
            ld_base     <= off_base;
            ld_total    <= min32(num_vertices + 32'd1, VCAP);
            ld_issued   <= '0;
            ld_recvd    <= '0;
          end else if (state == S_READY && e_req) begin
            if (e_hit) e_rsp_valid <= 1'b1;
            else begin
              state         <= S_MISS_E;
              miss_addr[0]  <= edge_base + 32'(e_addr);
              miss_issued   <= '0;
              miss_recvd    <= '0;
              edge_miss_cnt <= edge_miss_cnt + 32'd1;
            end
          end else if (state == S_READY && v_req) begin
            if (v_hit) v_rsp_valid <= 1'b1;
            else begin
              state        <= S_MISS_V;
              miss_addr[0] <= off_base + 32'(v_id);
              miss_addr[1] <= off_base + 32'(v_id) + 32'd1;
              miss_addr[2] <= bar_base + 32'(v_id);
              miss_issued  <= '0;
              miss_recvd   <= '0;
              vtx_miss_cnt <= vtx_miss_cnt + 32'd1;
            end
          end
        end
        S_LOAD_OFF, S_LOAD_EDGE, S_LOAD_BAR: begin
          if (g_rsp_valid) ld_recvd <= ld_recvd + 32'd1;
          if (ld_recvd == ld_total || (g_rsp_valid && ld_recvd + 32'd1 == ld_total)) begin
            ld_issued <= '0;
            ld_recvd  <= '0;
            if (state == S_LOAD_OFF) begin
              off_loaded <= ld_total;
              state      <= S_LOAD_EDGE;
              ld_base    <= edge_base;
              ld_total   <= min32(num_edges, ECAP);
            end else if (state == S_LOAD_EDGE) begin
              edge_loaded <= ld_total;
              state       <= S_LOAD_BAR;
              ld_base     <= bar_base;
              ld_total    <= min32(num_vertices, VCAP);
            end else begin
              bar_loaded <= ld_total;
              state      <= S_READY;
            end
          end
        end
        S_MISS_E: begin
          if (g_rsp_valid) begin
            e_rsp_valid <= 1'b1;
            state       <= S_READY;
          end
        end
        S_MISS_V: begin
          if (g_rsp_valid) begin
            miss_word[miss_recvd] <= g_rsp_data;
            miss_recvd            <= miss_recvd + 2'd1;
            if (miss_recvd == 2'd2) begin
              v_rsp_valid <= 1'b1;
              state       <= S_READY;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // one lookup at a time, and only when the cache is ready
  a_no_req_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (e_req || v_req) |-> (state == S_READY));
  a_one_kind: assert property (@(posedge clk) disable iff (!rst_n) !(e_req && v_req));
endmodule
