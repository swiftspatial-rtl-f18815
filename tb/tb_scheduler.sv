// tb_scheduler: self-checking test of the scheduler with 4 join units and a
// task cache of 8 tasks.
//
// The testbench models everything around the scheduler: the task queue
// manager (a task memory, level-start handling, a running level_count, read
// requests answered after a random delay), the read unit (random
// back-pressure on assignments) and the join units (each finishes its tasks
// in order after a random time and then reports pair_done; a finished task
// of level L < 5 produces 0..3 child tasks, which are appended to the next
// level). It checks:
//  - every task of every level is dispatched exactly once, and no task of
//    level L+1 before all tasks of level L are done (the level barrier);
//  - each level starts writing right after the previous level's tasks;
//  - round-robin sends the n-th task of the join to unit n mod 4, and first-idle
//    sends each task to the lowest-numbered idle unit;
//  - no unit holds more than 2 tasks, reads never ask for more than the
//    cache holds, and a new read is issued only when the cache is empty;
//  - finish and done rise after the level that produces no task, with
//    levels_done equal to the number of levels, and the level metadata cache
//    holds every level's base and count;
//  - PBSM runs a single level and stops.
module tb_scheduler;
  import ss_pkg::*;

  localparam int unsigned N_JU  = 4;
  localparam int unsigned DEPTH = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic          start, done, finish;
  join_mode_e    mode;
  sched_policy_e policy;
  addr_t         task_base, n_init_tasks;
  logic [7:0]    levels_done;
  logic [3:0]    lvl_rd_idx;
  addr_t         lvl_rd_base, lvl_rd_count;
  logic          lvl_start, rd_req_valid, rd_req_ready, rd_data_valid;
  addr_t         lvl_wr_base, level_count, rd_req_addr;
  logic [15:0]   rd_req_len;
  pair_t         rd_data;
  logic          assign_valid, assign_ready;
  assign_t       assign_task;
  logic [N_JU-1:0] pair_done, bb_empty;
  logic          units_busy;
  logic [31:0]   cache_refills;

  scheduler #(.N_JU(N_JU), .TASK_CACHE_DEPTH(DEPTH)) dut (.*);

  // ---- task queue manager model ----
  pair_t mem [addr_t];
  pair_t rd_q[$];
  addr_t wr_base;
  addr_t lvl_bases[$];
  int    n_deliv, n_taken;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_req_ready  <= 1'b0;
      rd_data_valid <= 1'b0;
      rd_data       <= '0;
      level_count   <= '0;
      n_deliv       = 0;
      n_taken       = 0;
      rd_q.delete();
    end else begin
      if (rd_req_valid && rd_req_ready) begin
        checks++;
        if (rd_req_len == 0 || rd_req_len > 16'(DEPTH) || n_deliv != n_taken ||
            rd_q.size() != 0 || rd_data_valid) begin
          failures++; $display("FAIL: read of %0d with %0d cached", rd_req_len, n_deliv - n_taken);
        end
        for (int k = 0; k < int'(rd_req_len); k++)
          rd_q.push_back(mem.exists(rd_req_addr + addr_t'(k)) ? mem[rd_req_addr + addr_t'(k)] : '1);
      end
      // tasks in the scheduler's cache: delivered minus dispatched
      if (rd_data_valid) n_deliv++;
      if (assign_valid && assign_ready) n_taken++;
      rd_req_ready  <= ($urandom_range(0, 2) != 0);
      rd_data_valid <= 1'b0;
      if (rd_q.size() > 0 && $urandom_range(0, 2) != 0) begin
        rd_data_valid <= 1'b1;
        rd_data       <= rd_q.pop_front();
      end
      if (lvl_start) begin
        wr_base = lvl_wr_base;
        lvl_bases.push_back(lvl_wr_base);
        level_count <= '0;
      end
    end
  end

  // ---- join unit model ----
  typedef struct { pair_t t; int left; } job_t;
  job_t  jobs [N_JU][$];
  int    outstanding [N_JU];
  int    total_per_level [int];         // tasks created per level
  int    done_per_level [int];
  bit    seen [pair_t];
  int    n_dispatch, lvl_disp, cur_level, child_ctr, busy_hold, max_level;
  bit    rand_assign;

  function automatic int n_children(input pair_t t);
    return (int'(t.r[31:24]) < max_level) ? int'(t.s % 4) : 0;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pair_done    <= '0;
      assign_ready <= 1'b0;
      units_busy   <= 1'b0;
    end else begin
      logic [N_JU-1:0] pd;
      addr_t lc;
      lc = level_count;
      pd = '0;
      for (int k = 0; k < N_JU; k++) begin
        if (jobs[k].size() > 0) begin
          if (jobs[k][0].left > 0) jobs[k][0].left--;
          else begin
            pair_t t;
            int lv;
            t  = jobs[k][0].t;
            lv = int'(t.r[31:24]);
            void'(jobs[k].pop_front());
            pd[k] = 1'b1;
            done_per_level[lv]++;
            for (int c = 0; c < n_children(t); c++) begin
              pair_t ch;
              ch = '{r: {8'(lv + 1), 24'(child_ctr)}, s: $urandom_range(0, 1000)};
              child_ctr++;
              mem[wr_base + lc] = ch;
              lc++;
              total_per_level[lv + 1]++;
            end
            busy_hold = $urandom_range(0, 4);
          end
        end
      end
      level_count  <= lc;
      pair_done    <= pd;
      units_busy   <= (busy_hold > 0);
      if (busy_hold > 0) busy_hold--;
      assign_ready <= !rand_assign || ($urandom_range(0, 2) != 0);

      if (assign_valid && assign_ready) begin
        pair_t t;
        int lv, ju, exp_ju;
        t  = assign_task.nodes;
        lv = int'(t.r[31:24]);
        ju = int'(assign_task.ju);
        checks++;
        if (seen.exists(t) || t == '1) begin
          failures++; $display("FAIL: task %h dispatched twice or not a task", t);
        end
        seen[t] = 1'b1;
        if (lv != cur_level) begin
          checks++;
          if (lv != cur_level + 1 || done_per_level[cur_level] != total_per_level[cur_level]) begin
            failures++;
            $display("FAIL: level %0d task before level %0d finished (%0d/%0d)", lv, cur_level,
                     done_per_level[cur_level], total_per_level[cur_level]);
          end
          cur_level = lv;
          lvl_disp  = 0;
        end
        exp_ju = -1;
        if (policy == POLICY_FIRST_IDLE)
          for (int k = N_JU - 1; k >= 0; k--) if (outstanding[k] == 0) exp_ju = k;
        checks++;
        if (ju >= N_JU || outstanding[ju] >= 2 || (exp_ju >= 0 && ju != exp_ju)) begin
          failures++; $display("FAIL: task to unit %0d, expected %0d", ju, exp_ju);
        end
        lvl_disp++;
        n_dispatch++;
        jobs[ju].push_back('{t: t, left: $urandom_range(0, 12)});
      end
      for (int k = 0; k < N_JU; k++)
        outstanding[k] += ((assign_valid && assign_ready && int'(assign_task.ju) == k) ? 1 : 0)
                          - (pair_done[k] ? 1 : 0);
    end
  end

  // round-robin over the whole join: unit of the n-th task is n mod N_JU
  int rr_expect;
  always @(posedge clk) if (rst_n && assign_valid && assign_ready && policy == POLICY_ROUND_ROBIN) begin
    checks++;
    if (int'(assign_task.ju) != rr_expect % N_JU) begin
      failures++; $display("FAIL: round-robin gave unit %0d, expected %0d", assign_task.ju, rr_expect % N_JU);
    end
    rr_expect++;
  end

  task automatic run(input join_mode_e m, input sched_policy_e p, input int n0, input int depth);
    int t, n_levels, total;
    rst_n = 1'b0;
    mem.delete(); seen.delete(); lvl_bases.delete();
    total_per_level.delete(); done_per_level.delete();
    for (int k = 0; k < N_JU; k++) begin jobs[k].delete(); outstanding[k] = 0; end
    n_dispatch = 0; lvl_disp = 0; cur_level = 0; child_ctr = 0; busy_hold = 0; rr_expect = 0;
    max_level = depth;
    mode = m; policy = p; task_base = 32'h40; n_init_tasks = addr_t'(n0);
    for (int k = 0; k < n0; k++)
      mem[32'h40 + addr_t'(k)] = '{r: {8'd0, 24'(100000 + k)}, s: (m == MODE_PBSM) ? 0 : 3};
    total_per_level[0] = n0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t = 0;
    while (!done && t < 50000) begin @(negedge clk); t++; end
    n_levels = 0; total = 0;
    foreach (total_per_level[l]) if (total_per_level[l] > 0) begin n_levels++; total += total_per_level[l]; end
    checks++;
    if (!done || !finish || n_dispatch != total || int'(levels_done) != n_levels) begin
      failures++;
      $display("FAIL: done %0d, %0d of %0d tasks dispatched, levels_done %0d of %0d",
               done, n_dispatch, total, levels_done, n_levels);
    end
    // level bases and the level metadata cache
    for (int l = 0; l < n_levels; l++) begin
      addr_t exp_base;
      exp_base = 32'h40;
      for (int j = 0; j < l; j++) exp_base += addr_t'(total_per_level[j]);
      lvl_rd_idx = 4'(l);
      #1;
      checks++;
      if (lvl_rd_base != exp_base || lvl_rd_count != addr_t'(total_per_level[l]) ||
          lvl_bases[l] != exp_base + addr_t'(total_per_level[l])) begin
        failures++;
        $display("FAIL: level %0d base %0d count %0d write base %0d, expected %0d %0d %0d", l,
                 lvl_rd_base, lvl_rd_count, lvl_bases[l], exp_base, total_per_level[l],
                 exp_base + addr_t'(total_per_level[l]));
      end
    end
    $display("mode %0d policy %0d: %0d tasks in %0d levels, %0d cycles, %0d cache refills",
             m, p, total, n_levels, t, cache_refills);
  endtask

  initial begin
    start = 1'b0; mode = MODE_SYNC_TRAVERSAL; policy = POLICY_ROUND_ROBIN;
    task_base = '0; n_init_tasks = '0; lvl_rd_idx = '0; bb_empty = '1;
    rand_assign = 1'b1;
    #1;
    run(MODE_SYNC_TRAVERSAL, POLICY_ROUND_ROBIN, 1, 5);
    run(MODE_SYNC_TRAVERSAL, POLICY_FIRST_IDLE, 1, 5);
    run(MODE_PBSM, POLICY_FIRST_IDLE, 37, 0);
    run(MODE_PBSM, POLICY_ROUND_ROBIN, 21, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
