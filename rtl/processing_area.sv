// processing_area: the batch P' that Batch-DFS fetched from the buffer area.
//
// Entry i holds path P'[i] with nb_start / nb_end set to the slice [ptr1, ptr2) of its
// successor list that belongs to this batch. Batch-DFS writes entries 0..n-1 in order
// (wr); the expansion module reads them back by index (rd_idx -> rd_data one cycle later).
// The entry count (n) is kept here, cleared by clear and advanced by every write.
// DEPTH is Theta2, the batch size threshold: a batch never holds more successors than
// Theta2, and every entry holds at least one, so Theta2 entries always suffice.
// The value of Theta2 is this design's choice; the paper gives none.
module processing_area
  import pefp_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        wr,
  input  path_rec_t   wr_data,
  input  logic [31:0] rd_idx,
  output path_rec_t   rd_data,
  output logic [31:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  path_rec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr) mem[AW'(count)] <= wr_data;
    rd_data <= mem[AW'(rd_idx)];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) count <= '0;
    else if (wr)         count <= count + 32'd1;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) wr |-> (count < DEPTH));
endmodule
