// tb_swiftspatial_top: end-to-end test of the accelerator at reduced size.
//
// The testbench builds two random 2-D datasets and bulk-loads an R-tree for
// each: objects are generated leaf by leaf inside the cells of a grid, so each
// leaf covers a compact area, and directory levels group up to MAX_ENTRIES
// consecutive nodes. Tree R has three levels and tree S two, so the traversal
// meets directory-directory, leaf-directory and leaf-leaf node pairs.
// It then runs
//   1. BFS synchronous traversal, round-robin dispatch, from the root pair;
//   2. PBSM over a grid of tiles, first-idle dispatch (objects are copied
//      into every tile they touch; a tile holding more than MAX_ENTRIES
//      objects is split into chunks and every chunk pair becomes a task);
//   3. PBSM again with round-robin dispatch;
// and compares the result set written to result memory with a brute-force
// nested loop over all object pairs. Synchronous traversal must produce each
// pair exactly once; PBSM output may repeat a pair found in several tiles and
// is compared after removing repeats (that step belongs to the host).
//
// The three memories are behavioural models: requests are accepted with a
// random stall, read data returns in order after a random latency.
// The test counts how often each mechanism of the design happened (output
// stalls, threshold and end-of-pair bursts, the three node-pair kinds,
// several traversal levels, task cache refills, both dispatch policies,
// the finish signal) and fails a mechanism that never happened.
module tb_swiftspatial_top;
  import ss_pkg::*;

  localparam int unsigned N_JU        = 4;
  localparam int unsigned MAX_ENTRIES = 8;
  localparam int unsigned BURST_PAIRS = 8;
  localparam int unsigned STRIDE      = MAX_ENTRIES + 1;
  localparam int unsigned MAP         = 1024;
  localparam int unsigned LEAF_GRID_R = 8;   // 64 leaves in R
  localparam int unsigned LEAF_GRID_S = 2;   // 4 leaves in S under the root
  localparam int unsigned NODE_WORDS  = 8192;
  localparam int unsigned TASK_WORDS  = 8192;
  localparam int unsigned RES_WORDS   = 65536;

  logic clk = 1'b0;
  logic rst_n = 1'b1;   // driven low by each run: the falling edge resets the design
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // DUT signals
  logic              start;
  join_mode_e        mode;
  sched_policy_e     policy;
  addr_t             task_base, n_init_tasks, result_base;
  logic              done;
  addr_t             result_count;
  logic [7:0]        levels_done;
  logic              node_req_valid, node_req_ready, node_rsp_valid, node_rsp_ready;
  addr_t             node_req_addr;
  logic [NODE_W-1:0] node_rsp_data;
  logic              task_req_valid, task_req_we, task_req_ready, task_rsp_valid;
  addr_t             task_req_addr;
  pair_t             task_req_wdata, task_rsp_data;
  logic              res_wr_valid, res_wr_ready;
  addr_t             res_wr_addr;
  pair_t             res_wr_data;
  logic [N_JU-1:0]   ju_ended;
  logic [31:0]       cache_refills;

  swiftspatial_top #(
    .N_JU(N_JU), .MAX_ENTRIES(MAX_ENTRIES), .BURST_PAIRS(BURST_PAIRS),
    .BUF_PAIRS(BURST_PAIRS), .IN_FIFO_DEPTH(16), .TASK_CACHE_DEPTH(4)
  ) dut (.*);

  // ---------------------------------------------------------------- memories
  logic [NODE_W-1:0] node_mem [NODE_WORDS];
  pair_t             task_mem [TASK_WORDS];
  pair_t             res_mem  [RES_WORDS];

  typedef struct { logic [NODE_W-1:0] data; longint t; } nrsp_t;
  typedef struct { pair_t data; longint t; } trsp_t;
  nrsp_t  nq[$];
  trsp_t  tq[$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    node_req_ready <= ($urandom_range(0, 3) != 0);
    task_req_ready <= ($urandom_range(0, 3) != 0);
    res_wr_ready   <= ($urandom_range(0, 4) != 0);
  end

  // node memory: in-order reads, latency 4..12 cycles
  always @(posedge clk) begin
    if (node_req_valid && node_req_ready) begin
      nrsp_t r;
      r.data = node_mem[node_req_addr % NODE_WORDS];
      r.t    = cyc + longint'($urandom_range(4, 12));
      if (nq.size() > 0 && nq[$].t > r.t) r.t = nq[$].t;
      nq.push_back(r);
    end
    // response register: reloaded when empty or taken
    if (!node_rsp_valid || node_rsp_ready) begin
      if (nq.size() > 0 && nq[0].t <= cyc) begin
        node_rsp_valid <= 1'b1;
        node_rsp_data  <= nq[0].data;
        void'(nq.pop_front());
      end else begin
        node_rsp_valid <= 1'b0;
      end
    end
  end

  // task memory: writes immediate, reads in order after 3..8 cycles
  always @(posedge clk) begin
    task_rsp_valid <= 1'b0;
    if (task_req_valid && task_req_ready) begin
      if (task_req_we) task_mem[task_req_addr % TASK_WORDS] <= task_req_wdata;
      else begin
        trsp_t r;
        r.data = task_mem[task_req_addr % TASK_WORDS];
        r.t    = cyc + longint'($urandom_range(3, 8));
        if (tq.size() > 0 && tq[$].t > r.t) r.t = tq[$].t;
        tq.push_back(r);
      end
    end
    if (tq.size() > 0 && tq[0].t <= cyc) begin
      task_rsp_valid <= 1'b1;
      task_rsp_data  <= tq[0].data;
      void'(tq.pop_front());
    end
  end

  always @(posedge clk) begin
    if (res_wr_valid && res_wr_ready) res_mem[res_wr_addr % RES_WORDS] <= res_wr_data;
  end

  // ---------------------------------------------------------------- data
  typedef struct { int l, r, b, t; int id; } obj_t;
  obj_t objs_r[$], objs_s[$];
  int   next_node;

  function automatic coord_t int2fp(input int n);
    int e;
    logic [31:0] m;
    if (n <= 0) return '0;
    e = 0;
    for (int k = 0; k < 24; k++) if (n >= (1 << k)) e = k;
    m = (32'(n) << (23 - e)) & 32'h007F_FFFF;
    return {1'b0, 8'(127 + e), m[22:0]};
  endfunction

  function automatic entry_t mk_entry(input int l, r, b, t, input int id);
    entry_t e;
    e.mbr.left   = int2fp(l);
    e.mbr.right  = int2fp(r);
    e.mbr.bottom = int2fp(b);
    e.mbr.top    = int2fp(t);
    e.mbr.back   = '0;
    e.mbr.front  = '0;
    e.id         = id_t'(id);
    return e;
  endfunction

  // write one node; returns its pointer
  function automatic int put_node(input bit leaf, input obj_t items[$]);
    int p;
    node_meta_t m;
    p = next_node++;
    m.is_leaf = leaf;
    m.count   = CNT_W'(items.size());
    m.ptr     = id_t'(p);
    node_mem[p*STRIDE] = pack_meta(m);
    foreach (items[k])
      node_mem[p*STRIDE + 1 + k] = pack_entry(mk_entry(items[k].l, items[k].r, items[k].b, items[k].t, items[k].id));
    return p;
  endfunction

  function automatic obj_t bound(input obj_t items[$], input int id);
    obj_t u;
    u = items[0];
    foreach (items[k]) begin
      if (items[k].l < u.l) u.l = items[k].l;
      if (items[k].r > u.r) u.r = items[k].r;
      if (items[k].b < u.b) u.b = items[k].b;
      if (items[k].t > u.t) u.t = items[k].t;
    end
    u.id = id;
    return u;
  endfunction

  // build an R-tree over grid x grid leaves; returns the root pointer
  function automatic int build_tree(input int grid, input int id_base, input int ext, ref obj_t objs[$]);
    obj_t level[$], upper[$], grp[$], leaf_objs[$];
    int csz, n, id;
    csz = MAP / grid;
    id   = id_base;
    for (int gy = 0; gy < grid; gy++)
      for (int gx = 0; gx < grid; gx++) begin
        leaf_objs.delete();
        n = $urandom_range(1, MAX_ENTRIES);
        for (int k = 0; k < n; k++) begin
          obj_t o;
          o.l  = gx*csz + $urandom_range(0, csz - 1);
          o.b  = gy*csz + $urandom_range(0, csz - 1);
          o.r  = o.l + $urandom_range(1, ext);
          o.t  = o.b + $urandom_range(1, ext);
          o.id = id++;
          leaf_objs.push_back(o);
          objs.push_back(o);
        end
        level.push_back(bound(leaf_objs, put_node(1'b1, leaf_objs)));
      end
    while (level.size() > 1) begin
      upper.delete();
      for (int k = 0; k < level.size(); k += MAX_ENTRIES) begin
        grp.delete();
        for (int q = k; q < k + MAX_ENTRIES && q < level.size(); q++) grp.push_back(level[q]);
        upper.push_back(bound(grp, put_node(1'b0, grp)));
      end
      level = upper;
    end
    return level[0].id;
  endfunction

  function automatic bit isect(input obj_t a, input obj_t b);
    return (a.r >= b.l) && (b.r >= a.l) && (a.t >= b.b) && (b.t >= a.b);
  endfunction

  // ---------------------------------------------------------------- checking
  int expected [longint];
  int root_r, root_s;

  // mechanism counters
  int n_out_stall, n_thresh_burst, n_flush_burst, n_dirdir, n_mixed, n_leafleaf;
  int n_res_backpressure, n_rr_dispatch, n_idle_dispatch, n_finish;
  int n_levels_max, n_refill_max;
  bit last_r_leaf;

  always @(posedge clk) if (rst_n) begin
    if ((dut.ju_out_valid & ~dut.ju_out_ready) != '0) n_out_stall++;
    if (res_wr_valid && !res_wr_ready) n_res_backpressure++;
    for (int j = 0; j < N_JU; j++)
      if (dut.wr_take[j] || dut.tq_take[j]) begin
        if (dut.bb_seg_len[j] == 16'(BURST_PAIRS)) n_thresh_burst++;
        else n_flush_burst++;
      end
    if (dut.rn_valid && dut.rn_ready && dut.rn_beat.is_meta) begin
      if (!dut.rn_side) last_r_leaf = dut.rn_beat.meta.is_leaf;
      else if (last_r_leaf && dut.rn_beat.meta.is_leaf) n_leafleaf++;
      else if (!last_r_leaf && !dut.rn_beat.meta.is_leaf) n_dirdir++;
      else n_mixed++;
    end
    if (dut.assign_valid && dut.assign_ready) begin
      if (dut.u_sched.policy_q == POLICY_ROUND_ROBIN) n_rr_dispatch++;
      else n_idle_dispatch++;
    end
  end

  task automatic run_join(input join_mode_e m, input sched_policy_e p, input int n_tasks,
                          input bit allow_dups, input string name);
    int got [longint];
    int dups, missing, extra, cnt;
    longint t0;
    rst_n = 1'b0;
    nq.delete();
    tq.delete();
    node_rsp_valid = 1'b0;
    task_rsp_valid = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    mode = m; policy = p; task_base = '0; n_init_tasks = addr_t'(n_tasks); result_base = '0;
    start = 1'b1;
    @(posedge clk);
    start = 1'b0;
    t0 = cyc;
    wait (done);
    repeat (5) @(posedge clk);
    if (ju_ended == '1) n_finish++;
    if (int'(levels_done) > n_levels_max) n_levels_max = int'(levels_done);
    if (int'(cache_refills) > n_refill_max) n_refill_max = int'(cache_refills);
    dups = 0;
    for (int k = 0; k < int'(result_count); k++) begin
      longint key = longint'(res_mem[k]);
      if (got.exists(key)) dups++;
      else got[key] = 1;
    end
    missing = 0; extra = 0;
    foreach (expected[key]) if (!got.exists(key)) missing++;
    foreach (got[key]) if (!expected.exists(key)) extra++;
    cnt = got.size();
    checks++;
    if (missing != 0 || extra != 0 || cnt != expected.size()) begin
      failures++;
      $display("FAIL %s: %0d distinct results, %0d expected, %0d missing, %0d extra",
               name, cnt, expected.size(), missing, extra);
    end
    checks++;
    if (!allow_dups && dups != 0) begin
      failures++;
      $display("FAIL %s: %0d repeated results", name, dups);
    end
    $display("%s: %0d results (%0d repeats), %0d expected, %0d levels, %0d cycles",
             name, result_count, dups, expected.size(), levels_done, cyc - t0);
  endtask

  // PBSM: copy objects into tiles, split crowded tiles, one task per chunk pair
  function automatic int build_pbsm(input int tiles, input int task_at);
    obj_t tr[$], ts[$], cr[$], cs[$];
    int ptrs_r[$], ptrs_s[$];
    int csz, n;
    csz = MAP / tiles;
    n = 0;
    for (int ty = 0; ty < tiles; ty++)
      for (int tx = 0; tx < tiles; tx++) begin
        obj_t tile;
        tile.l = tx*csz; tile.r = tx*csz + csz - 1;
        tile.b = ty*csz; tile.t = ty*csz + csz - 1;
        tr.delete(); ts.delete(); ptrs_r.delete(); ptrs_s.delete();
        foreach (objs_r[k]) if (isect(objs_r[k], tile)) tr.push_back(objs_r[k]);
        foreach (objs_s[k]) if (isect(objs_s[k], tile)) ts.push_back(objs_s[k]);
        if (tr.size() == 0 || ts.size() == 0) continue;
        for (int k = 0; k < tr.size(); k += MAX_ENTRIES) begin
          cr.delete();
          for (int q = k; q < k + MAX_ENTRIES && q < tr.size(); q++) cr.push_back(tr[q]);
          ptrs_r.push_back(put_node(1'b1, cr));
        end
        for (int k = 0; k < ts.size(); k += MAX_ENTRIES) begin
          cs.delete();
          for (int q = k; q < k + MAX_ENTRIES && q < ts.size(); q++) cs.push_back(ts[q]);
          ptrs_s.push_back(put_node(1'b1, cs));
        end
        foreach (ptrs_r[a]) foreach (ptrs_s[b]) begin
          task_mem[task_at + n] = '{r: id_t'(ptrs_r[a]), s: id_t'(ptrs_s[b])};
          n++;
        end
      end
    return n;
  endfunction

  initial begin
    int n_pbsm;
    start = 1'b0; mode = MODE_SYNC_TRAVERSAL; policy = POLICY_ROUND_ROBIN;
    task_base = '0; n_init_tasks = '0; result_base = '0;
    next_node = 0;
    root_r = build_tree(LEAF_GRID_R, 0, 40, objs_r);
    root_s = build_tree(LEAF_GRID_S, 100000, 400, objs_s);
    foreach (objs_r[a]) foreach (objs_s[b])
      if (isect(objs_r[a], objs_s[b]))
        expected[{32'(objs_r[a].id), 32'(objs_s[b].id)}] = 1;
    $display("R: %0d objects, S: %0d objects, %0d intersecting pairs, %0d nodes",
             objs_r.size(), objs_s.size(), expected.size(), next_node);

    // 1. synchronous traversal
    task_mem[0] = '{r: id_t'(root_r), s: id_t'(root_s)};
    run_join(MODE_SYNC_TRAVERSAL, POLICY_ROUND_ROBIN, 1, 1'b0, "sync traversal");

    // 2./3. PBSM
    n_pbsm = build_pbsm(8, 0);
    run_join(MODE_PBSM, POLICY_FIRST_IDLE, n_pbsm, 1'b1, "PBSM first-idle");
    run_join(MODE_PBSM, POLICY_ROUND_ROBIN, n_pbsm, 1'b1, "PBSM round-robin");

    $display("mechanisms: out_stall=%0d res_backpressure=%0d thresh_burst=%0d flush_burst=%0d",
             n_out_stall, n_res_backpressure, n_thresh_burst, n_flush_burst);
    $display("            dir-dir=%0d leaf-dir=%0d leaf-leaf=%0d levels=%0d refills=%0d",
             n_dirdir, n_mixed, n_leafleaf, n_levels_max, n_refill_max);
    $display("            rr_dispatch=%0d idle_dispatch=%0d finish=%0d",
             n_rr_dispatch, n_idle_dispatch, n_finish);
    checks++; if (n_out_stall == 0)        begin failures++; $display("FAIL: no output stall"); end
    checks++; if (n_res_backpressure == 0) begin failures++; $display("FAIL: no write backpressure"); end
    checks++; if (n_thresh_burst == 0)     begin failures++; $display("FAIL: no threshold burst"); end
    checks++; if (n_flush_burst == 0)      begin failures++; $display("FAIL: no end-of-pair burst"); end
    checks++; if (n_dirdir == 0)           begin failures++; $display("FAIL: no dir-dir pair"); end
    checks++; if (n_mixed == 0)            begin failures++; $display("FAIL: no leaf-dir pair"); end
    checks++; if (n_leafleaf == 0)         begin failures++; $display("FAIL: no leaf-leaf pair"); end
    checks++; if (n_levels_max < 3)        begin failures++; $display("FAIL: fewer than 3 levels"); end
    checks++; if (n_refill_max < 2)        begin failures++; $display("FAIL: task cache never refilled"); end
    checks++; if (n_rr_dispatch == 0)      begin failures++; $display("FAIL: no round-robin dispatch"); end
    checks++; if (n_idle_dispatch == 0)    begin failures++; $display("FAIL: no first-idle dispatch"); end
    checks++; if (n_finish != 3)           begin failures++; $display("FAIL: finish reached %0d of 3 times", n_finish); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
