// tb_path_stack: random push / pop / update / read traffic on the buffer-area stack,
// compared with a queue kept here. Also checks the full and empty flags and clear.
module tb_path_stack;
  import pefp_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        clear, push, pop, upd, empty, full;
  path_rec_t   push_data, upd_data, rd_data;
  logic [31:0] upd_idx, rd_idx, count;
  int checks = 0, failures = 0;
  path_rec_t model [$];
  int n_full = 0;

  path_stack #(.DEPTH(DEPTH)) dut (.*);

  function automatic path_rec_t rand_rec();
    path_rec_t r;
    for (int i = 0; i < MAX_K; i++) r.v[i] = $urandom;
    r.len = hop_t'($urandom); r.nb_start = $urandom; r.nb_end = $urandom; r.nb_last = $urandom;
    return r;
  endfunction

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
    clear = 0; push = 0; pop = 0; upd = 0; push_data = '0; upd_data = '0; upd_idx = 0; rd_idx = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 3000; n++) begin
      automatic int op = $urandom_range(9);
      push = 0; pop = 0; upd = 0; clear = 0;
      if (n == 1500) begin
        clear = 1;
        model.delete();
      end else if (op < 5 && model.size() < DEPTH) begin
        push = 1; push_data = rand_rec(); model.push_back(push_data);
      end else if (op < 8 && model.size() > 0) begin
        pop = 1; void'(model.pop_back());
      end else if (model.size() > 0) begin
        upd = 1; upd_idx = $urandom_range(model.size() - 1); upd_data = rand_rec();
        model[upd_idx] = upd_data;
      end
      if (model.size() > 0) rd_idx = $urandom_range(model.size() - 1);
      @(negedge clk);
      push = 0; pop = 0; upd = 0; clear = 0;
      check(count == model.size(), "count");
      check(empty == (model.size() == 0) && full == (model.size() == DEPTH), "flags");
      if (full) n_full++;
      if (model.size() > 0) begin
        @(negedge clk);     // synchronous read of the index set before
        check(rd_data == model[rd_idx], $sformatf("read idx %0d", rd_idx));
      end
    end
    check(n_full > 0, "stack reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
