// tb_task_queue_manager: self-checking test of the task queue manager with
// four burst buffers (burst threshold 8 pairs) and a task memory model with
// random request back-pressure and random read latency.
//
// Four producers write groups of task pairs (and some result groups, which a
// result-kind puller drains) into real burst buffers. At the same time the
// testbench, acting as the scheduler, issues read requests of random length
// over a preloaded region and checks that every word comes back, in order.
// At the end of a level it checks that level_count equals the number of
// tasks produced, that the tasks sit at consecutive addresses from the level
// base with nothing else in between, that every buffer's tasks keep their
// order, and that nothing was written outside the level's range. A second
// level checks that lvl_start restarts the count at the new base.
module tb_task_queue_manager;
  import ss_pkg::*;

  localparam int unsigned NB    = 4;
  localparam int unsigned BURST = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [NB-1:0] in_valid, in_is_result, in_ready, flush_valid, flush_ready;
  pair_t         in_pair [NB];
  logic [NB-1:0] seg_valid, seg_is_result, empty, tq_take, tq_pop, rs_take, rs_pop;
  logic [15:0]   seg_len [NB];
  pair_t         head_pair [NB];

  for (genvar b = 0; b < NB; b++) begin : g_bb
    burst_buffer #(.BURST_PAIRS(BURST), .BUF_PAIRS(2*BURST)) u_bb (
      .clk, .rst_n,
      .in_valid(in_valid[b]), .in_pair(in_pair[b]), .in_is_result(in_is_result[b]),
      .in_ready(in_ready[b]), .flush_valid(flush_valid[b]), .flush_ready(flush_ready[b]),
      .seg_valid(seg_valid[b]), .seg_len(seg_len[b]), .seg_is_result(seg_is_result[b]),
      .seg_take(tq_take[b] | rs_take[b]), .head_pair(head_pair[b]),
      .pop(tq_pop[b] | rs_pop[b]), .empty(empty[b]));
  end

  logic  rs_valid, rs_first, rs_last;
  pair_t rs_pair;
  burst_arbiter #(.N_BUF(NB), .KIND_RESULT(1'b1)) u_result_sink (
    .clk, .rst_n, .seg_valid, .seg_len, .seg_is_result, .head_pair,
    .seg_take(rs_take), .pop(rs_pop), .out_valid(rs_valid), .out_pair(rs_pair),
    .out_first(rs_first), .out_last(rs_last), .out_ready(1'b1), .busy());

  logic        lvl_start, rd_req_valid, rd_req_ready, rd_data_valid;
  addr_t       lvl_wr_base, level_count, rd_req_addr;
  logic [15:0] rd_req_len;
  pair_t       rd_data;
  logic        mem_req_valid, mem_req_we, mem_req_ready, mem_rsp_valid, busy;
  addr_t       mem_req_addr;
  pair_t       mem_req_wdata, mem_rsp_data;

  task_queue_manager #(.N_BUF(NB)) dut (
    .clk, .rst_n, .lvl_start, .lvl_wr_base, .level_count,
    .rd_req_valid, .rd_req_addr, .rd_req_len, .rd_req_ready, .rd_data_valid, .rd_data,
    .seg_valid, .seg_len, .seg_is_result, .head_pair, .seg_take(tq_take), .pop(tq_pop),
    .mem_req_valid, .mem_req_we, .mem_req_addr, .mem_req_wdata, .mem_req_ready,
    .mem_rsp_valid, .mem_rsp_data, .busy);

  // task memory: random ready, reads answered after a random delay, in order
  pair_t mem [addr_t];
  pair_t rsp_q[$];
  int    n_mem_writes;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_req_ready <= 1'b0;
      mem_rsp_valid <= 1'b0;
      mem_rsp_data  <= '0;
      rsp_q.delete();
    end else begin
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req_we) begin
          mem[mem_req_addr] = mem_req_wdata;
          n_mem_writes++;
        end else
          rsp_q.push_back(mem.exists(mem_req_addr) ? mem[mem_req_addr] : '0);
      end
      mem_req_ready <= ($urandom_range(0, 3) != 0);
      mem_rsp_valid <= 1'b0;
      if (rsp_q.size() > 0 && $urandom_range(0, 2) != 0) begin
        mem_rsp_valid <= 1'b1;
        mem_rsp_data  <= rsp_q.pop_front();
      end
    end
  end

  // read data check
  pair_t exp_rd[$];
  int    n_rd_words;
  always @(posedge clk) if (rst_n && rd_data_valid) begin
    checks++;
    n_rd_words++;
    if (exp_rd.size() == 0 || rd_data != exp_rd[0]) begin
      failures++; $display("FAIL: read data %h", rd_data);
    end
    void'(exp_rd.pop_front());
  end

  int n_tasks;
  int n_results_seen;
  always @(posedge clk) if (rst_n && rs_valid) n_results_seen++;

  task automatic produce(input int b, input int groups, input int lvl);
    int n, seq;
    bit res;
    seq = 0;
    for (int g = 0; g < groups; g++) begin
      n   = $urandom_range(1, 3*BURST);
      res = ($urandom_range(0, 3) == 0);
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        in_valid[b] = 1'b1;
        in_pair[b]  = '{r: {res, 3'b0, 4'(b), 8'(lvl), 16'(g)}, s: id_t'(seq++)};
        in_is_result[b] = res;
        if (!res) n_tasks++;
        do @(posedge clk); while (!in_ready[b]);
        #1 in_valid[b] = 1'b0;
      end
      @(negedge clk);
      flush_valid[b] = 1'b1;
      do @(posedge clk); while (!flush_ready[b]);
      #1 flush_valid[b] = 1'b0;
    end
  endtask

  bit producers_done;
  task automatic reader();
    int len;
    addr_t a;
    while (!producers_done) begin
      len = $urandom_range(1, 20);
      a   = addr_t'($urandom_range(0, 64 - len));
      for (int k = 0; k < len; k++) exp_rd.push_back(mem[a + addr_t'(k)]);
      @(negedge clk);
      rd_req_valid = 1'b1; rd_req_addr = a; rd_req_len = 16'(len);
      do @(posedge clk); while (!rd_req_ready);
      #1 rd_req_valid = 1'b0;
      while (exp_rd.size() != 0) @(negedge clk);
      repeat ($urandom_range(0, 10)) @(negedge clk);
    end
  endtask

  task automatic run_level(input addr_t base, input int lvl);
    int t;
    @(negedge clk);
    lvl_start = 1'b1; lvl_wr_base = base;
    @(negedge clk);
    lvl_start = 1'b0;
    n_tasks = 0;
    producers_done = 1'b0;
    fork
      begin
        fork
          produce(0, 20, lvl);
          produce(1, 20, lvl);
          produce(2, 20, lvl);
          produce(3, 20, lvl);
        join
        producers_done = 1'b1;
      end
      reader();
    join
    t = 0;
    while (t < 10000 && (busy || !(&empty) || rs_valid)) begin @(negedge clk); t++; end
    checks++;
    if (level_count != addr_t'(n_tasks)) begin
      failures++; $display("FAIL: level_count %0d, %0d tasks produced", level_count, n_tasks);
    end
    // the level's words: only tasks of this level, each buffer in order
    begin
      int last_seq [NB];
      int bad;
      bad = 0;
      for (int b = 0; b < NB; b++) last_seq[b] = -1;
      for (int k = 0; k < n_tasks; k++) begin
        pair_t p;
        int b;
        p = mem.exists(base + addr_t'(k)) ? mem[base + addr_t'(k)] : '1;
        b = int'(p.r[27:24]);
        if (p.r[31] || b >= NB || p.r[23:16] != 8'(lvl) || int'(p.s) <= last_seq[b]) bad++;
        else last_seq[b] = int'(p.s);
      end
      checks++;
      if (bad != 0) begin
        failures++; $display("FAIL: %0d bad words in level %0d", bad, lvl);
      end
      checks++;
      if (mem.exists(base + addr_t'(n_tasks))) begin
        failures++; $display("FAIL: a word written after the level's end");
      end
    end
    $display("level %0d: %0d tasks written, %0d read words checked", lvl, n_tasks, n_rd_words);
  endtask

  initial begin
    in_valid = '0; flush_valid = '0; in_is_result = '0;
    for (int b = 0; b < NB; b++) in_pair[b] = '0;
    lvl_start = 1'b0; lvl_wr_base = '0;
    rd_req_valid = 1'b0; rd_req_addr = '0; rd_req_len = '0;
    n_mem_writes = 0; n_rd_words = 0; n_results_seen = 0;
    for (int k = 0; k < 64; k++) mem[addr_t'(k)] = '{r: $urandom, s: $urandom};
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_level(32'h100, 1);
    run_level(32'h100 + level_count, 2);
    checks++;
    if (n_results_seen == 0 || n_rd_words == 0) begin
      failures++; $display("FAIL: test did not exercise results or reads");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
