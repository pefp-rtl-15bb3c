// path_dram_model: behavioural model of the FPGA DRAM region that holds spilled intermediate
// paths, one path record per word. Not synthesizable; for testbenches only.
// Writes complete when accepted; reads are answered in order LATENCY cycles later.
// With STALL_PCT > 0 requests are refused at random to exercise back-pressure.
module path_dram_model
  import pefp_pkg::*;
#(
  parameter int unsigned LATENCY   = 8,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic        clk,
  input  logic        req_valid,
  input  logic        req_write,
  input  logic [31:0] req_addr,
  input  path_rec_t   req_wdata,
  output logic        req_ready,
  output logic        rsp_valid,
  output path_rec_t   rsp_rdata
);
  path_rec_t mem [int unsigned];
  path_rec_t data_q [$];
  longint    due_q  [$];
  longint    cyc = 0;
  int        n_writes = 0;
  int        n_reads  = 0;

  initial begin
    req_ready = 1'b1;
    rsp_valid = 1'b0;
    rsp_rdata = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rsp_valid <= 1'b0;
    if (req_valid && req_ready) begin
      if (req_write) begin
        mem[req_addr] = req_wdata;
        n_writes++;
      end else begin
        data_q.push_back(mem.exists(req_addr) ? mem[req_addr] : '0);
        due_q.push_back(cyc + longint'(LATENCY) - 1);
        n_reads++;
      end
    end
    if (due_q.size() > 0 && due_q[0] <= cyc) begin
      void'(due_q.pop_front());
      rsp_rdata <= data_q.pop_front();
      rsp_valid <= 1'b1;
    end
    req_ready <= ($urandom_range(99) >= STALL_PCT);
  end
endmodule
