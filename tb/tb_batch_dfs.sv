// tb_batch_dfs: Batch-DFS against a reference written here from the algorithm.
// The buffer-area stack is filled with random paths whose remaining successor ranges are
// random, some larger than the batch size (super nodes). Batches are then drawn until the
// stack is empty; after every batch the processing-area entries, the stack contents and
// the batch size bound (at most THETA successors) are compared with the reference.
// Between batches new paths are sometimes pushed, as the expansion module would do.
module tb_batch_dfs;
  import pefp_pkg::*;
  localparam int THETA = 8, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, done;
  logic [31:0] st_count, st_rd_idx, st_upd_idx, pa_count, pa_rd_idx, split_cnt;
  path_rec_t   st_rd_data, st_upd_data, pa_wr_data, pa_rd_data, push_data;
  logic        st_pop, st_upd, pa_clear, pa_wr, push, st_empty, st_full;
  logic [31:0] tb_rd_idx;
  logic        tb_reading;

  int checks = 0, failures = 0, ref_splits = 0;
  path_rec_t model [$];
  path_rec_t ref_pa [$];

  path_stack #(.DEPTH(DEPTH)) u_stack (
    .clk, .rst_n, .clear(1'b0), .push, .push_data, .pop(st_pop), .upd(st_upd),
    .upd_idx(st_upd_idx), .upd_data(st_upd_data),
    .rd_idx(tb_reading ? tb_rd_idx : st_rd_idx), .rd_data(st_rd_data),
    .count(st_count), .empty(st_empty), .full(st_full)
  );
  processing_area #(.DEPTH(THETA)) u_pa (
    .clk, .rst_n, .clear(pa_clear), .wr(pa_wr), .wr_data(pa_wr_data),
    .rd_idx(pa_rd_idx), .rd_data(pa_rd_data), .count(pa_count)
  );
  batch_dfs #(.THETA(THETA)) dut (
    .clk, .rst_n, .start, .done, .st_count, .st_rd_idx, .st_rd_data, .st_pop, .st_upd,
    .st_upd_idx, .st_upd_data, .pa_clear, .pa_wr, .pa_wr_data, .split_cnt
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic path_rec_t rand_path();
    path_rec_t r;
    int deg;
    r = '0;
    r.len = hop_t'($urandom_range(MAX_K - 1));
    for (int i = 0; i <= int'(r.len); i++) r.v[i] = $urandom_range(1000);
    r.nb_start = $urandom_range(5000);
    r.nb_end   = r.nb_start;
    deg = ($urandom_range(9) == 0) ? $urandom_range(3 * THETA, THETA + 1) : $urandom_range(4);
    r.nb_last  = r.nb_start + deg;
    return r;
  endfunction

  // Algorithm 4 on the model stack
  task automatic ref_batch();
    int cnt = 0;
    int i = model.size() - 1;
    ref_pa.delete();
    while (i >= 0) begin
      automatic path_rec_t p = model[i];
      automatic longint p1 = p.nb_end, p2;
      if (p1 + (THETA - cnt) < p.nb_last) p2 = p1 + (THETA - cnt);
      else p2 = p.nb_last;
      p.nb_start = eptr_t'(p1);
      p.nb_end   = eptr_t'(p2);
      if (p2 > p1) ref_pa.push_back(p);
      if (p2 == p.nb_last) void'(model.pop_back());
      else begin model[i] = p; ref_splits++; end
      cnt += int'(p2 - p1);
      if (cnt < THETA) i--;
      else break;
    end
  endtask

  task automatic push_path(input path_rec_t r);
    push = 1; push_data = r;
    @(negedge clk);
    push = 0;
    model.push_back(r);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int batches = 0, succ_total;
    start = 0; push = 0; push_data = '0; pa_rd_idx = 0; tb_rd_idx = 0; tb_reading = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 20; n++) push_path(rand_path());
    while (model.size() > 0) begin
      ref_batch();
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      batches++;
      // processing area
      check(pa_count == ref_pa.size(), $sformatf("batch %0d entry count %0d vs %0d", batches, pa_count, ref_pa.size()));
      succ_total = 0;
      for (int i = 0; i < ref_pa.size() && i < int'(pa_count); i++) begin
        pa_rd_idx = i;
        @(negedge clk);
        check(pa_rd_data == ref_pa[i], $sformatf("batch %0d entry %0d", batches, i));
        succ_total += int'(pa_rd_data.nb_end - pa_rd_data.nb_start);
      end
      check(succ_total <= THETA, "batch within THETA successors");
      // stack
      check(st_count == model.size(), "stack count");
      tb_reading = 1;
      for (int i = 0; i < model.size(); i++) begin
        tb_rd_idx = i;
        @(negedge clk);
        check(st_rd_data == model[i], $sformatf("stack entry %0d after batch %0d", i, batches));
      end
      tb_reading = 0;
      // new paths arrive from the expansion now and then
      if (batches < 40 && $urandom_range(2) == 0)
        repeat ($urandom_range(3, 1)) push_path(rand_path());
    end
    check(split_cnt == ref_splits && ref_splits > 0, $sformatf("super-node splits %0d vs %0d", split_cnt, ref_splits));
    $display("batches=%0d splits=%0d", batches, split_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
