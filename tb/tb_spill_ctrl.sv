// tb_spill_ctrl: flush and refill between the buffer-area stack and a DRAM model.
// Random paths are pushed and flushed twice, the DRAM image is compared with the pushed
// order, then the stack is refilled THETA1 paths at a time from the tail of the DRAM path
// set until it is empty; every refill must restore the last THETA1 spilled paths in order.
// The DRAM model refuses requests at random to exercise back-pressure.
module tb_spill_ctrl;
  import pefp_pkg::*;
  localparam int DEPTH = 16, THETA1 = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        flush_start, refill_start, done;
  logic [31:0] pd_count, st_count, st_rd_idx, flush_cnt, refill_cnt;
  path_rec_t   st_rd_data, sp_push_data, tb_push_data, p_req_wdata, p_rsp_rdata;
  logic        st_clear, sp_push, tb_push, st_empty, st_full;
  logic        p_req_valid, p_req_write, p_req_ready, p_rsp_valid;
  logic [31:0] p_req_addr, tb_rd_idx;
  logic        tb_reading;

  int checks = 0, failures = 0;
  path_rec_t spilled [$];   // reference image of P_D
  path_rec_t model [$];     // reference stack

  path_stack #(.DEPTH(DEPTH)) u_stack (
    .clk, .rst_n, .clear(st_clear), .push(sp_push | tb_push),
    .push_data(sp_push ? sp_push_data : tb_push_data), .pop(1'b0), .upd(1'b0),
    .upd_idx('0), .upd_data('0), .rd_idx(tb_reading ? tb_rd_idx : st_rd_idx),
    .rd_data(st_rd_data), .count(st_count), .empty(st_empty), .full(st_full)
  );
  spill_ctrl #(.THETA1(THETA1)) dut (
    .clk, .rst_n, .flush_start, .refill_start, .done, .pd_count, .st_count, .st_rd_idx,
    .st_rd_data, .st_clear, .st_push(sp_push), .st_push_data(sp_push_data),
    .p_req_valid, .p_req_write, .p_req_addr, .p_req_wdata, .p_req_ready, .p_rsp_valid,
    .p_rsp_rdata, .flush_cnt, .refill_cnt
  );
  path_dram_model #(.LATENCY(8), .STALL_PCT(25)) u_dram (
    .clk, .req_valid(p_req_valid), .req_write(p_req_write), .req_addr(p_req_addr),
    .req_wdata(p_req_wdata), .req_ready(p_req_ready), .rsp_valid(p_rsp_valid),
    .rsp_rdata(p_rsp_rdata)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic push_rand(input int n);
    for (int i = 0; i < n; i++) begin
      path_rec_t r;
      for (int j = 0; j < MAX_K; j++) r.v[j] = $urandom;
      r.len = hop_t'($urandom); r.nb_start = $urandom; r.nb_end = $urandom; r.nb_last = $urandom;
      tb_push = 1; tb_push_data = r;
      model.push_back(r);
      @(negedge clk);
      tb_push = 0;
    end
  endtask

  task automatic pulse(ref logic sig);
    sig = 1;
    @(negedge clk);
    sig = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic compare_stack(input string when);
    check(st_count == model.size(), {when, ": stack count"});
    tb_reading = 1;
    for (int i = 0; i < model.size(); i++) begin
      tb_rd_idx = i;
      @(negedge clk);
      check(st_rd_data == model[i], $sformatf("%s: stack entry %0d", when, i));
    end
    tb_reading = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flush_start = 0; refill_start = 0; tb_push = 0; tb_push_data = '0; tb_rd_idx = 0; tb_reading = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int round = 0; round < 2; round++) begin
      push_rand(round == 0 ? DEPTH : 7);
      pulse(flush_start);
      foreach (model[i]) spilled.push_back(model[i]);
      model.delete();
      check(st_empty, "stack empty after flush");
      check(pd_count == spilled.size(), "DRAM path count after flush");
    end
    foreach (spilled[i])
      check(u_dram.mem.exists(i) && u_dram.mem[i] == spilled[i], $sformatf("DRAM record %0d", i));
    while (pd_count != 0) begin
      automatic int n = (spilled.size() < THETA1) ? spilled.size() : THETA1;
      pulse(refill_start);
      model.delete();
      for (int i = spilled.size() - n; i < spilled.size(); i++) model.push_back(spilled[i]);
      repeat (n) void'(spilled.pop_back());
      compare_stack("refill");
      check(pd_count == spilled.size(), "DRAM path count after refill");
      // empty the stack again, as Batch-DFS would
      @(negedge clk);
      flush_start = 0;
      force u_stack.count = 0;
      @(negedge clk);
      release u_stack.count;
      model.delete();
    end
    check(flush_cnt == 2 && refill_cnt == 6, $sformatf("flush/refill counters %0d %0d", flush_cnt, refill_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
