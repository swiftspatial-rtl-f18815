// tb_write_results: self-checking test of the result writer with four burst
// buffers (burst threshold 8 pairs).
//
// Four producers write groups of pairs, each group all results or all tasks,
// into four real burst buffers, flushing after each group. Task bursts are
// drained by a second puller of the task kind. The testbench checks that the
// writer writes every result exactly once, at base + n for the n-th result,
// that each buffer's results keep their order, that a burst is never
// interleaved with another buffer's pairs, that no task is written, that
// result_count ends at the number of results, and that clear restarts the
// address. Rate check: with all buffers preloaded and the memory always
// ready, 64 results in 8 bursts must be written in at most 64 + 8 + 4 cycles
// (one result per cycle, one cycle to pick each burst).
module tb_write_results;
  import ss_pkg::*;

  localparam int unsigned NB    = 4;
  localparam int unsigned BURST = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [NB-1:0] in_valid, in_is_result, in_ready, flush_valid, flush_ready;
  pair_t         in_pair [NB];
  logic [NB-1:0] seg_valid, seg_is_result, empty, wr_take, wr_pop, tk_take, tk_pop;
  logic [15:0]   seg_len [NB];
  pair_t         head_pair [NB];

  for (genvar b = 0; b < NB; b++) begin : g_bb
    burst_buffer #(.BURST_PAIRS(BURST), .BUF_PAIRS(2*BURST)) u_bb (
      .clk, .rst_n,
      .in_valid(in_valid[b]), .in_pair(in_pair[b]), .in_is_result(in_is_result[b]),
      .in_ready(in_ready[b]), .flush_valid(flush_valid[b]), .flush_ready(flush_ready[b]),
      .seg_valid(seg_valid[b]), .seg_len(seg_len[b]), .seg_is_result(seg_is_result[b]),
      .seg_take(wr_take[b] | tk_take[b]), .head_pair(head_pair[b]),
      .pop(wr_pop[b] | tk_pop[b]), .empty(empty[b]));
  end

  logic  tk_valid, tk_first, tk_last;
  pair_t tk_pair;
  burst_arbiter #(.N_BUF(NB), .KIND_RESULT(1'b0)) u_task_sink (
    .clk, .rst_n, .seg_valid, .seg_len, .seg_is_result, .head_pair,
    .seg_take(tk_take), .pop(tk_pop), .out_valid(tk_valid), .out_pair(tk_pair),
    .out_first(tk_first), .out_last(tk_last), .out_ready(1'b1), .busy());

  logic  clear, mem_wr_valid, mem_wr_ready, busy;
  addr_t base_addr, mem_wr_addr, result_count;
  pair_t mem_wr_data;

  write_results #(.N_BUF(NB)) dut (
    .clk, .rst_n, .clear, .base_addr, .seg_valid, .seg_len, .seg_is_result,
    .head_pair, .seg_take(wr_take), .pop(wr_pop),
    .mem_wr_valid, .mem_wr_addr, .mem_wr_data, .mem_wr_ready, .result_count, .busy);

  // expected results per buffer; a result has r = {1, buffer, group}
  pair_t exp_q [NB][$];
  int    n_written, n_expected, n_tasks_seen;
  int    cur_buf;
  bit    rand_ready, ready_en;
  bit    new_burst = 1'b1;

  always @(posedge clk) mem_wr_ready <= ready_en && (!rand_ready || $urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n) begin
    if (mem_wr_valid && mem_wr_ready) begin
      int b;
      b = int'(mem_wr_data.r[27:24]);
      checks++;
      if (mem_wr_addr != base_addr + addr_t'(n_written)) begin
        failures++; $display("FAIL: result %0d written at %0d", n_written, mem_wr_addr);
      end
      checks++;
      if (mem_wr_data.r[31] != 1'b1 || b >= NB || exp_q[b].size() == 0 ||
          mem_wr_data != exp_q[b][0]) begin
        failures++; $display("FAIL: unexpected result %h", mem_wr_data);
      end else
        void'(exp_q[b].pop_front());
      if (!new_burst && b != cur_buf) begin
        failures++; $display("FAIL: burst mixes buffers %0d and %0d", cur_buf, b);
      end
      cur_buf = b;
      n_written++;
      new_burst = 1'b0;
    end
    // the writer is idle for at least one cycle between two bursts
    if (!busy) new_burst = 1'b1;
    if (tk_valid) begin
      n_tasks_seen++;
      if (tk_pair.r[31]) begin
        failures++; $display("FAIL: result %h taken as a task", tk_pair);
      end
    end
  end

  // one producer per buffer; kind: 0 tasks, 1 results, 2 random
  task automatic produce(input int b, input int groups, input int kind, input int max_n);
    int n, seq;
    bit res;
    seq = 0;
    for (int g = 0; g < groups; g++) begin
      n   = $urandom_range(1, max_n);
      res = (kind == 2) ? 1'($urandom_range(0, 1)) : 1'(kind);
      for (int k = 0; k < n; k++) begin
        pair_t p;
        @(negedge clk);
        p = '{r: {res, 3'b0, 4'(b), 24'(g)}, s: id_t'(seq++)};
        in_valid[b] = 1'b1; in_pair[b] = p; in_is_result[b] = res;
        if (res) begin exp_q[b].push_back(p); n_expected++; end
        do @(posedge clk); while (!in_ready[b]);
        #1 in_valid[b] = 1'b0;
      end
      @(negedge clk);
      flush_valid[b] = 1'b1;
      do @(posedge clk); while (!flush_ready[b]);
      #1 flush_valid[b] = 1'b0;
    end
  endtask

  task automatic wait_drained();
    int t;
    t = 0;
    while (t < 20000 && (n_written != n_expected || busy || !(&empty))) begin
      @(negedge clk); t++;
    end
  endtask

  initial begin
    int t0, t1, nw0;
    in_valid = '0; flush_valid = '0; in_is_result = '0;
    for (int b = 0; b < NB; b++) in_pair[b] = '0;
    clear = 1'b0; base_addr = 32'h0000_1000;
    ready_en = 1'b0; rand_ready = 1'b0;
    n_written = 0; n_expected = 0; n_tasks_seen = 0; cur_buf = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1: preload 2 full result bursts per buffer, then release the memory
    for (int b = 0; b < NB; b++) begin
      fork
        automatic int bb = b;
        begin
          for (int k = 0; k < 2*BURST; k++) begin
            pair_t p;
            @(negedge clk);
            p = '{r: {1'b1, 3'b0, 4'(bb), 24'hFFFFFF}, s: id_t'(k)};
            in_valid[bb] = 1'b1; in_pair[bb] = p; in_is_result[bb] = 1'b1;
            exp_q[bb].push_back(p); n_expected++;
            do @(posedge clk); while (!in_ready[bb]);
            #1 in_valid[bb] = 1'b0;
          end
        end
      join_none
    end
    wait fork;
    repeat (4) @(negedge clk);
    nw0 = n_written;
    ready_en = 1'b1;
    t0 = 0;
    while (n_written < nw0 + 8*BURST && t0 < 1000) begin @(negedge clk); t0++; end
    checks++;
    if (t0 > 8*BURST + 8 + 4) begin
      failures++; $display("FAIL: 64 preloaded results took %0d cycles", t0);
    end else
      $display("64 preloaded results written in %0d cycles", t0);

    // 2: random mix of results and tasks from all buffers, random memory stalls
    rand_ready = 1'b1;
    for (int b = 0; b < NB; b++) begin
      fork
        automatic int bb = b;
        produce(bb, 30, 2, 3*BURST);
      join_none
    end
    wait fork;
    wait_drained();
    checks++;
    if (n_written != n_expected || result_count != addr_t'(n_expected)) begin
      failures++;
      $display("FAIL: %0d of %0d results written, result_count %0d", n_written, n_expected, result_count);
    end
    checks++;
    if (n_tasks_seen == 0) begin
      failures++; $display("FAIL: no task burst was produced");
    end

    // 3: clear restarts the address at a new base
    @(negedge clk);
    clear = 1'b1; base_addr = 32'h0002_0000;
    @(negedge clk);
    clear = 1'b0;
    n_written = 0; n_expected = 0;
    produce(1, 5, 1, 20);
    wait_drained();
    checks++;
    if (result_count != addr_t'(n_expected) || n_written != n_expected) begin
      failures++; $display("FAIL: after clear %0d results, count %0d", n_expected, result_count);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
