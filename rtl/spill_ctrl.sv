// spill_ctrl: traffic between the buffer area and the path set P_D in FPGA DRAM.
//
// Flush (buffer area full): every path of the stack, bottom first, is appended at the tail
// of P_D and the stack is cleared. Refill (buffer area empty, P_D not empty): the last
// min(THETA1, |P_D|) paths of P_D are read back in order and pushed, so the stack order is
// kept and the most recently spilled (longest) paths end on top again. Both ends of P_D work
// at its tail, as the paper prescribes, so P_D stays one contiguous run of records starting
// at record address 0 of the path region.
//
// Interface: flush_start / refill_start (pulses, only when idle) and a done pulse; pd_count is
// the number of paths held in DRAM. DRAM port: one path record per word, valid/ready
// requests, in-order read responses; reads are issued back to back, writes one per
// two cycles (a synchronous stack read precedes each).
// THETA1 and the record-per-word port are this design's choices; the paper gives no value.
module spill_ctrl
  import pefp_pkg::*;
#(
  parameter int unsigned THETA1 = 1024   // Theta1, refill batch size
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush_start,
  input  logic        refill_start,
  output logic        done,
  output logic [31:0] pd_count,
  // buffer area (stack)
  input  logic [31:0] st_count,
  output logic [31:0] st_rd_idx,
  input  path_rec_t   st_rd_data,
  output logic        st_clear,
  output logic        st_push,
  output path_rec_t   st_push_data,
  // path DRAM port
  output logic        p_req_valid,
  output logic        p_req_write,
  output logic [31:0] p_req_addr,
  output path_rec_t   p_req_wdata,
  input  logic        p_req_ready,
  input  logic        p_rsp_valid,
  input  path_rec_t   p_rsp_rdata,
  // statistics
  output logic [31:0] flush_cnt,
  output logic [31:0] refill_cnt
);
  typedef enum logic [2:0] {S_IDLE, S_F_RD, S_F_WR, S_R_RUN} state_e;
  state_e state;

  logic [31:0] j_q, n_q, issued_q, recvd_q;

  assign st_rd_idx    = j_q;
  assign st_push      = (state == S_R_RUN) && p_rsp_valid;
  assign st_push_data = p_rsp_rdata;
  assign st_clear     = (state == S_F_RD) && (j_q == n_q);

  always_comb begin
    p_req_valid = 1'b0;
    p_req_write = 1'b0;
    p_req_addr  = '0;
    p_req_wdata = st_rd_data;
    if (state == S_F_WR) begin
      p_req_valid = 1'b1;
      p_req_write = 1'b1;
      p_req_addr  = pd_count + j_q;
    end else if (state == S_R_RUN && issued_q < n_q) begin
      p_req_valid = 1'b1;
      p_req_addr  = pd_count - n_q + issued_q;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      j_q        <= '0;
      n_q        <= '0;
      issued_q   <= '0;
      recvd_q    <= '0;
      pd_count   <= '0;
      done       <= 1'b0;
      flush_cnt  <= '0;
      refill_cnt <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (flush_start) begin
            state     <= S_F_RD;
            j_q       <= '0;
            n_q       <= st_count;
            flush_cnt <= flush_cnt + 32'd1;
          end else if (refill_start) begin
            state      <= S_R_RUN;
            n_q        <= (pd_count < THETA1) ? pd_count : THETA1;
            issued_q   <= '0;
            recvd_q    <= '0;
            refill_cnt <= refill_cnt + 32'd1;
          end
        end
        S_F_RD: begin
          if (j_q == n_q) begin            // all written: stack cleared this cycle
            pd_count <= pd_count + n_q;
            state    <= S_IDLE;
            done     <= 1'b1;
          end else state <= S_F_WR;
        end
        S_F_WR: if (p_req_ready) begin
          j_q   <= j_q + 32'd1;
          state <= S_F_RD;
        end
        S_R_RUN: begin
          if (p_req_valid && p_req_ready) issued_q <= issued_q + 32'd1;
          if (p_rsp_valid) recvd_q <= recvd_q + 32'd1;
          if (recvd_q == n_q) begin
            pd_count <= pd_count - n_q;
            state    <= S_IDLE;
            done     <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (flush_start || refill_start) |-> (state == S_IDLE));
endmodule
