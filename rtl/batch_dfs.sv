// batch_dfs: Batch-DFS, fetching the next batch from the top of the buffer-area stack.
//
// Starting at the top entry of the stack it takes paths downwards until the batch holds
// THETA successors (Theta2). For each path P[i], ptr1 is its end neighbour pointer; the batch
// receives the slice [ptr1, ptr2) with ptr2 = ptr1 + (THETA - cnt) when that is still short
// of the last neighbour pointer, and ptr2 = last otherwise. The slice is written to the
// processing area; in the stack, the path's start/end pointers become ptr1/ptr2. A path whose
// successors are now all handed out is popped (it is always the current top, since all
// entries above it were popped before); a path handed out only in part is a "super node"
// split across batches and stays, with its end pointer advanced.
//
// Interface: start (pulse) begins a batch; done pulses when it is complete; the processing
// area is cleared at start and written through pa_wr. Timing: two cycles per stack entry
// visited (synchronous stack read, then decision).
// Popping exhausted paths and skipping paths with an empty slice are this design's reading of
// the algorithm, which leaves both implicit.
module batch_dfs
  import pefp_pkg::*;
#(
  parameter int unsigned THETA = 256   // Theta2, capacity of the processing area in successors
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        done,
  // buffer area (stack)
  input  logic [31:0] st_count,
  output logic [31:0] st_rd_idx,
  input  path_rec_t   st_rd_data,
  output logic        st_pop,
  output logic        st_upd,
  output logic [31:0] st_upd_idx,
  output path_rec_t   st_upd_data,
  // processing area
  output logic        pa_clear,
  output logic        pa_wr,
  output path_rec_t   pa_wr_data,
  // statistics
  output logic [31:0] split_cnt        // paths handed out only in part (super nodes)
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_EVAL} state_e;
  state_e state;

  logic [31:0] i_q, cnt_q;
  logic [PTR_W:0] ptr1, ptr2, room, last;
  logic [31:0] cnt_new;
  logic        exhausted;

  assign st_rd_idx = i_q;

  always_comb begin
    ptr1      = {1'b0, st_rd_data.nb_end};
    last      = {1'b0, st_rd_data.nb_last};
    room      = (PTR_W+1)'(THETA) - (PTR_W+1)'(cnt_q);
    ptr2      = (ptr1 + room < last) ? ptr1 + room : last;
    exhausted = (ptr2 >= last);
    cnt_new   = cnt_q + 32'(ptr2 - ptr1);

    pa_wr_data          = st_rd_data;
    pa_wr_data.nb_start = eptr_t'(ptr1);
    pa_wr_data.nb_end   = eptr_t'(ptr2);
    st_upd_data         = pa_wr_data;
    st_upd_idx          = i_q;

    pa_wr  = (state == S_EVAL) && (ptr2 > ptr1);
    st_pop = (state == S_EVAL) && exhausted;
    st_upd = (state == S_EVAL) && !exhausted;
    pa_clear = start && (state == S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      i_q       <= '0;
      cnt_q     <= '0;
      done      <= 1'b0;
      split_cnt <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cnt_q <= '0;
          i_q   <= st_count - 32'd1;
          if (st_count == 32'd0) done  <= 1'b1;
          else                   state <= S_ISSUE;
        end
        S_ISSUE: state <= S_EVAL;
        S_EVAL: begin
          cnt_q <= cnt_new;
          if (!exhausted) split_cnt <= split_cnt + 32'd1;
          if (cnt_new < THETA && i_q != 32'd0) begin
            i_q   <= i_q - 32'd1;
            state <= S_ISSUE;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // an exhausted path is popped, which is only correct for the top entry
  a_pop_top: assert property (@(posedge clk) disable iff (!rst_n) st_pop |-> (i_q == st_count - 32'd1));
endmodule
