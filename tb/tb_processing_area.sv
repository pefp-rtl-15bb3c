// tb_processing_area: fills the processing area with random batches, reads every entry
// back and checks the entry count and clear.
module tb_processing_area;
  import pefp_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        clear, wr;
  path_rec_t   wr_data, rd_data;
  logic [31:0] rd_idx, count;
  int checks = 0, failures = 0;
  path_rec_t model [$];

  processing_area #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; wr = 0; wr_data = '0; rd_idx = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 50; b++) begin
      automatic int n = $urandom_range(DEPTH, 1);
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      check(count == 0, "cleared");
      model.delete();
      for (int i = 0; i < n; i++) begin
        for (int j = 0; j < MAX_K; j++) wr_data.v[j] = $urandom;
        wr_data.len = hop_t'($urandom); wr_data.nb_start = $urandom;
        wr_data.nb_end = $urandom; wr_data.nb_last = $urandom;
        wr = 1;
        model.push_back(wr_data);
        @(negedge clk);
      end
      wr = 0;
      check(count == n, "count");
      for (int i = 0; i < n; i++) begin
        rd_idx = i;
        @(negedge clk);
        check(rd_data == model[i], $sformatf("entry %0d", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
