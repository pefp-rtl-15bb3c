// path_stack: the buffer area, the on-chip intermediate path set P, kept as a stack.
//
// Expanded paths are pushed on top; Batch-DFS reads paths from the top downwards, pops those
// whose successors it has handed out completely and rewrites the neighbour pointers of the
// one it handed out only in part. Treating the buffer as a stack makes the engine always
// continue with the longest, most recently produced paths, as the paper's Batch-DFS demands.
//
// Storage is one RAM of DEPTH path records with a synchronous read port (rd_idx -> rd_data
// one cycle later) and one write port shared by push and upd (never both in a cycle).
// pop removes the top entry; clear empties the stack (used after a flush to DRAM).
// DEPTH is this design's choice; the paper gives no buffer size.
module path_stack
  import pefp_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        push,
  input  path_rec_t   push_data,
  input  logic        pop,
  input  logic        upd,
  input  logic [31:0] upd_idx,
  input  path_rec_t   upd_data,
  input  logic [31:0] rd_idx,
  output path_rec_t   rd_data,
  output logic [31:0] count,
  output logic        empty,
  output logic        full
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  path_rec_t mem [DEPTH];

  assign empty = (count == 32'd0);
  assign full  = (count == DEPTH);

  always_ff @(posedge clk) begin
    if (push)     mem[AW'(count)]   <= push_data;
    else if (upd) mem[AW'(upd_idx)] <= upd_data;
    rd_data <= mem[AW'(rd_idx)];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) count <= '0;
    else if (push && !pop) count <= count + 32'd1;
    else if (pop && !push) count <= count - 32'd1;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
  a_one_write:    assert property (@(posedge clk) disable iff (!rst_n) !(push && upd));
endmodule
