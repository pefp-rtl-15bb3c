// expander: the expansion module, one-hop expansion and write-back of a batch.
//
// For every path P'[i] of the processing area and every edge pointer j in its slice
// [nb_start, nb_end), it reads the successor u = edge[j], then u's neighbour range
// off[u]..off[u+1] and barrier bar[u] from the graph cache, and hands (P'[i], u, bar[u]) to the
// validity check. Depending on the verdict it
//   - reports P'[i] + u on the result port (u == t),
//   - pushes P'[i] + u onto the buffer area, its neighbour pointers set to u's first
//     neighbour and its last pointer to off[u+1] (valid successor),
//   - or drops u (barrier or visited check failed).
// When the buffer area is full before a push, it raises flush_req and waits for flush_done;
// the spill controller then moves the buffer to DRAM (Algorithm 1, lines 13-14).
//
// Timing: one successor takes five cycles when the graph cache hits (edge lookup, vertex
// lookup, check, write-back), more on a cache miss, a flush or result back-pressure.
// The successors are processed one at a time; the paper's lane count n is not given and a
// single lane is this design's choice.
module expander
  import pefp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        done,
  input  vid_t        target,
  input  hop_t        k,
  // processing area
  input  logic [31:0] pa_count,
  output logic [31:0] pa_rd_idx,
  input  path_rec_t   pa_rd_data,
  // graph cache
  output logic        e_req,
  output eptr_t       e_addr,
  input  logic        e_rsp_valid,
  input  vid_t        e_rsp_nbr,
  output logic        v_req,
  output vid_t        v_id,
  input  logic        v_rsp_valid,
  input  eptr_t       v_rsp_off_lo,
  input  eptr_t       v_rsp_off_hi,
  input  hop_t        v_rsp_bar,
  // buffer area
  input  logic        st_full,
  output logic        st_push,
  output path_rec_t   st_push_data,
  output logic        flush_req,
  input  logic        flush_done,
  // results
  output logic        res_valid,
  output result_t     res_data,
  input  logic        res_ready,
  // statistics
  output logic [31:0] n_results,
  output logic [31:0] n_pushed,
  output logic [31:0] n_barrier,
  output logic [31:0] n_visited
);
  typedef enum logic [2:0] {S_IDLE, S_RD_PA, S_LD_PA, S_EDGE, S_W_EDGE, S_W_VTX, S_W_CHK, S_ACT} state_e;
  state_e state;

  path_rec_t rec_q;
  logic [31:0] i_q;
  eptr_t j_q;
  vid_t  nbr_q;
  eptr_t off_lo_q, off_hi_q;
  logic  flush_wait_q;

  logic     vc_valid;
  verdict_e vc_verdict;

  validity_check u_check (
    .clk(clk), .rst_n(rst_n),
    .in_valid   (state == S_W_VTX && v_rsp_valid),
    .path_v     (rec_q.v),
    .path_len   (rec_q.len),
    .succ       (nbr_q),
    .barrier    (v_rsp_bar),
    .target     (target),
    .k          (k),
    .out_valid  (vc_valid),
    .out_verdict(vc_verdict)
  );

  logic advance;   // current successor finished in this cycle

  always_comb begin
    pa_rd_idx = i_q;
    e_req     = (state == S_EDGE);
    e_addr    = j_q;
    v_req     = (state == S_W_EDGE) && e_rsp_valid;
    v_id      = e_rsp_nbr;

    st_push_data          = rec_q;
    st_push_data.v[rec_q.len + hop_t'(1)] = nbr_q;
    st_push_data.len      = rec_q.len + hop_t'(1);
    st_push_data.nb_start = off_lo_q;
    st_push_data.nb_end   = off_lo_q;
    st_push_data.nb_last  = off_hi_q;

    res_data.v   = '0;
    for (int n = 0; n < MAX_K; n++) res_data.v[n] = rec_q.v[n];
    res_data.v[rec_q.len + hop_t'(1)] = nbr_q;
    res_data.len = rec_q.len + hop_t'(1);

    res_valid = 1'b0;
    st_push   = 1'b0;
    flush_req = 1'b0;
    advance   = 1'b0;
    if (state == S_ACT) begin
      unique case (vc_verdict)
        VERDICT_TARGET: begin
          res_valid = 1'b1;
          advance   = res_ready;
        end
        VERDICT_VALID: begin
          if (st_full) flush_req = !flush_wait_q;
          else begin
            st_push = 1'b1;
            advance = 1'b1;
          end
        end
        default: advance = 1'b1;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      done         <= 1'b0;
      rec_q        <= '0;
      i_q          <= '0;
      j_q          <= '0;
      nbr_q        <= '0;
      off_lo_q     <= '0;
      off_hi_q     <= '0;
      flush_wait_q <= 1'b0;
      n_results    <= '0;
      n_pushed     <= '0;
      n_barrier    <= '0;
      n_visited    <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          i_q <= '0;
          if (pa_count == 32'd0) done  <= 1'b1;
          else                   state <= S_RD_PA;
        end
        S_RD_PA: state <= S_LD_PA;
        S_LD_PA: begin
          rec_q <= pa_rd_data;
          j_q   <= pa_rd_data.nb_start;
          if (pa_rd_data.nb_start == pa_rd_data.nb_end) begin
            // empty slice: next path
            if (i_q + 32'd1 < pa_count) begin
              i_q   <= i_q + 32'd1;
              state <= S_RD_PA;
            end else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end else state <= S_EDGE;
        end
        S_EDGE:   state <= S_W_EDGE;
        S_W_EDGE: if (e_rsp_valid) begin
          nbr_q <= e_rsp_nbr;
          state <= S_W_VTX;
        end
        S_W_VTX: if (v_rsp_valid) begin
          off_lo_q <= v_rsp_off_lo;
          off_hi_q <= v_rsp_off_hi;
          state    <= S_W_CHK;
        end
        S_W_CHK: if (vc_valid) state <= S_ACT;
        S_ACT: begin
          if (flush_req) flush_wait_q <= 1'b1;
          if (flush_done) flush_wait_q <= 1'b0;
          if (advance) begin
            unique case (vc_verdict)
              VERDICT_TARGET:  n_results <= n_results + 32'd1;
              VERDICT_VALID:   n_pushed  <= n_pushed + 32'd1;
              VERDICT_BARRIER: n_barrier <= n_barrier + 32'd1;
              default:         n_visited <= n_visited + 32'd1;
            endcase
            if (j_q + eptr_t'(1) != rec_q.nb_end) begin
              j_q   <= j_q + eptr_t'(1);
              state <= S_EDGE;
            end else if (i_q + 32'd1 < pa_count) begin
              i_q   <= i_q + 32'd1;
              state <= S_RD_PA;
            end else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_push_not_full: assert property (@(posedge clk) disable iff (!rst_n) st_push |-> !st_full);
  a_res_stable:    assert property (@(posedge clk) disable iff (!rst_n)
    (res_valid && !res_ready) |=> (res_valid && $stable(res_data)));
endmodule
