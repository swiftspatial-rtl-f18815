// scheduler: the on-chip scheduler. It runs the control flow of the join
// (BFS synchronous traversal of two R-trees, or PBSM over a list of tile
// pairs) and hands node-pair tasks to the join units.
//
// From the paper (synchronous traversal): the join proceeds level by level.
// At the start of a level the scheduler tells the task queue manager where to
// begin writing the next level's tasks. It then reads the current level's
// tasks from the task queue manager in bursts into a local task cache, asking
// again only when the cache is empty, and dispatches each task, with a join
// unit id, to the read unit. When all tasks of the level are done the task
// queue manager reports how many tasks were written, which fixes the next
// level's size and the address after it. This repeats until a level
// produces no new task (the leaf level); then the scheduler raises finish.
// PBSM is the same with a single level of leaf-leaf tile pairs.
//
// Dispatch policy (paper): static, round-robin over the units, or dynamic,
// each task to the first idle unit. The paper's synchronous traversal uses
// round-robin; here the policy input applies to both modes.
//
// This design's choices: tasks of level 0 (the root pair, or all tile pairs)
// are placed by the host at task_base; later levels follow contiguously. A
// unit may hold MAX_OUTSTANDING tasks (one being joined, the rest waiting in
// its input FIFO); the round-robin dispatcher waits for the unit whose turn
// it is. The level is over when every dispatched task has been reported done
// by its unit and the burst buffers, the read unit, the result writer and
// the task queue manager are all idle. The level metadata cache keeps
// {start address, task count} of every level, readable on lvl_rd_*.
//
// Interface: start (one cycle) with mode, policy, task_base and n_init_tasks;
// done stays high after finish until reset. One join per reset.
// Timing: at most one task is dispatched per cycle; a level boundary costs
// a few cycles (the wait for all units to be quiet, then level start).
module scheduler
  import ss_pkg::*;
#(
  parameter int unsigned N_JU             = 16,
  parameter int unsigned TASK_CACHE_DEPTH = 64,
  parameter int unsigned MAX_LEVELS       = 16,
  parameter int unsigned MAX_OUTSTANDING  = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // host control
  input  logic              start,
  input  join_mode_e        mode,
  input  sched_policy_e     policy,
  input  addr_t             task_base,
  input  addr_t             n_init_tasks,
  output logic              done,
  output logic [7:0]        levels_done,
  // level metadata cache read port
  input  logic [$clog2(MAX_LEVELS)-1:0] lvl_rd_idx,
  output addr_t             lvl_rd_base,
  output addr_t             lvl_rd_count,
  // task queue manager
  output logic              lvl_start,
  output addr_t             lvl_wr_base,
  input  addr_t             level_count,
  output logic              rd_req_valid,
  output addr_t             rd_req_addr,
  output logic [15:0]       rd_req_len,
  input  logic              rd_req_ready,
  input  logic              rd_data_valid,
  input  pair_t             rd_data,
  // read unit
  output logic              assign_valid,
  output assign_t           assign_task,
  input  logic              assign_ready,
  // join units and memory units
  input  logic [N_JU-1:0]   pair_done,
  input  logic [N_JU-1:0]   bb_empty,
  input  logic              units_busy,
  output logic              finish,
  // statistics
  output logic [31:0]       cache_refills
);
  localparam int unsigned JW = (N_JU > 1) ? $clog2(N_JU) : 1;
  localparam int unsigned LW = $clog2(MAX_LEVELS);
  localparam int unsigned OW = $clog2(MAX_OUTSTANDING + 1);

  typedef enum logic [2:0] { S_IDLE, S_LSTART, S_RUN, S_WAIT, S_FINISH, S_DONE } sstate_e;
  sstate_e state;

  typedef struct packed { addr_t base; addr_t count; } lvl_meta_t;
  lvl_meta_t lvl_cache [MAX_LEVELS];

  join_mode_e    mode_q;
  sched_policy_e policy_q;
  logic [LW-1:0] level;
  addr_t         lvl_base, lvl_count, wr_base;
  addr_t         fetched, dispatched;
  logic [15:0]   fetch_pending;
  logic [OW-1:0] outstanding [N_JU];
  logic [JW-1:0] rr;

  // task cache
  logic          tc_pop, tc_valid;
  pair_t         tc_head;
  logic          tc_wready;

  sync_fifo #(.WIDTH($bits(pair_t)), .DEPTH(TASK_CACHE_DEPTH)) u_task_cache (
    .clk, .rst_n,
    .wr_en(rd_data_valid), .wr_data(rd_data), .wr_ready(tc_wready),
    .rd_en(tc_pop), .rd_data(tc_head), .rd_valid(tc_valid),
    .count()
  );

  // burst load when the cache is empty
  addr_t remaining_fetch;
  assign remaining_fetch = lvl_count - fetched;
  assign rd_req_valid = (state == S_RUN) && !tc_valid && (fetch_pending == '0) &&
                        (remaining_fetch != '0);
  assign rd_req_addr  = lvl_base + fetched;
  assign rd_req_len   = (remaining_fetch > addr_t'(TASK_CACHE_DEPTH))
                        ? 16'(TASK_CACHE_DEPTH) : remaining_fetch[15:0];

  // choose a join unit
  logic          tgt_ok;
  logic [JW-1:0] tgt;
  always_comb begin
    tgt_ok = 1'b0;
    tgt    = rr;
    if (policy_q == POLICY_ROUND_ROBIN) begin
      tgt_ok = (outstanding[rr] != OW'(MAX_OUTSTANDING));
    end else begin
      for (int k = N_JU - 1; k >= 0; k--) begin
        if (outstanding[k] == '0) begin
          tgt_ok = 1'b1;
          tgt    = JW'(k);
        end
      end
    end
  end

  assign assign_valid      = (state == S_RUN) && tc_valid && tgt_ok;
  assign assign_task.nodes = tc_head;
  assign assign_task.ju    = 8'(tgt);
  assign tc_pop            = assign_valid && assign_ready;

  logic quiet;
  always_comb begin
    quiet = !units_busy && (&bb_empty) && !tc_valid;
    for (int k = 0; k < N_JU; k++) if (outstanding[k] != '0) quiet = 1'b0;
  end

  assign lvl_start   = (state == S_LSTART);
  assign lvl_wr_base = wr_base;
  assign finish      = (state == S_FINISH) || (state == S_DONE);
  assign done        = (state == S_DONE);
  assign lvl_rd_base  = lvl_cache[lvl_rd_idx].base;
  assign lvl_rd_count = lvl_cache[lvl_rd_idx].count;

  always_ff @(posedge clk) begin
    if (state == S_LSTART) lvl_cache[level] <= '{base: lvl_base, count: lvl_count};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      mode_q        <= MODE_SYNC_TRAVERSAL;
      policy_q      <= POLICY_ROUND_ROBIN;
      level         <= '0;
      levels_done   <= '0;
      lvl_base      <= '0;
      lvl_count     <= '0;
      wr_base       <= '0;
      fetched       <= '0;
      dispatched    <= '0;
      fetch_pending <= '0;
      rr            <= '0;
      cache_refills <= '0;
      for (int k = 0; k < N_JU; k++) outstanding[k] <= '0;
    end else begin
      // outstanding tasks per join unit
      for (int k = 0; k < N_JU; k++) begin
        if (tc_pop && (tgt == JW'(k)) && !pair_done[k])
          outstanding[k] <= outstanding[k] + 1'b1;
        else if (pair_done[k] && !(tc_pop && (tgt == JW'(k))))
          outstanding[k] <= outstanding[k] - 1'b1;
      end

      if (rd_req_valid && rd_req_ready) begin
        fetch_pending <= rd_req_len;
        fetched       <= fetched + addr_t'(rd_req_len);
        cache_refills <= cache_refills + 1'b1;
      end else if (rd_data_valid) begin
        fetch_pending <= fetch_pending - 1'b1;
      end

      if (tc_pop) begin
        dispatched <= dispatched + 1'b1;
        if (policy_q == POLICY_ROUND_ROBIN)
          rr <= (rr == JW'(N_JU - 1)) ? '0 : rr + 1'b1;
      end

      unique case (state)
        S_IDLE: begin
          if (start) begin
            mode_q    <= mode;
            policy_q  <= policy;
            level     <= '0;
            lvl_base  <= task_base;
            lvl_count <= n_init_tasks;
            wr_base   <= task_base + n_init_tasks;
            state     <= S_LSTART;
          end
        end
        S_LSTART: begin
          fetched    <= '0;
          dispatched <= '0;
          state      <= (lvl_count == '0) ? S_FINISH : S_RUN;
        end
        S_RUN: begin
          if (tc_pop && (dispatched + 1'b1 == lvl_count)) state <= S_WAIT;
        end
        S_WAIT: begin
          if (quiet) begin
            levels_done <= levels_done + 1'b1;
            if (mode_q == MODE_PBSM || level_count == '0 ||
                level == LW'(MAX_LEVELS - 1)) begin
              state <= S_FINISH;
            end else begin
              level     <= level + 1'b1;
              lvl_base  <= wr_base;
              lvl_count <= level_count;
              wr_base   <= wr_base + level_count;
              state     <= S_LSTART;
            end
          end
        end
        S_FINISH: state <= S_DONE;
        S_DONE: ;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cache_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      rd_data_valid |-> tc_wready);
  a_pbsm_no_tasks: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_WAIT && quiet && mode_q == MODE_PBSM) |-> (level_count == '0));
endmodule
