// graph_dram_model: behavioural model of the FPGA DRAM bank holding the CSR graph and the
// barrier, seen through a 32-bit word read port. Not synthesizable; for testbenches only.
// Requests are accepted every cycle (or, with STALL_PCT, refused at random) and answered in
// order LATENCY cycles later; the default of 8 cycles stands for the 7-8 cycle DRAM read
// latency the design targets. Contents are written with the write_word task.
module graph_dram_model #(
  parameter int unsigned LATENCY   = 8,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic        clk,
  input  logic        req_valid,
  input  logic [31:0] req_addr,
  output logic        req_ready,
  output logic        rsp_valid,
  output logic [31:0] rsp_data
);
  logic [31:0] mem [int unsigned];
  logic [31:0] data_q [$];
  longint      due_q  [$];
  longint      cyc = 0;

  task automatic write_word(input int unsigned addr, input logic [31:0] data);
    mem[addr] = data;
  endtask

  initial begin
    req_ready = 1'b1;
    rsp_valid = 1'b0;
    rsp_data  = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rsp_valid <= 1'b0;
    if (req_valid && req_ready) begin
      data_q.push_back(mem.exists(req_addr) ? mem[req_addr] : 32'hDEAD_BEEF);
      due_q.push_back(cyc + longint'(LATENCY) - 1);
    end
    if (due_q.size() > 0 && due_q[0] <= cyc) begin
      void'(due_q.pop_front());
      rsp_data  <= data_q.pop_front();
      rsp_valid <= 1'b1;
    end
    req_ready <= ($urandom_range(99) >= STALL_PCT);
  end
endmodule
