// swiftspatial_top: the spatial-join accelerator kernel. Given two R-trees
// (or two sets of PBSM tiles) in memory, it finds every pair of objects whose
// minimum bounding rectangles intersect (the filtering step of a spatial
// join) and writes the id pairs to memory.
//
// Structure (follows the paper's overview figure): a scheduler (traversal
// FSM, level metadata cache, task cache) sends node-pair tasks with a join
// unit id to the read unit; the read unit loads the two nodes and streams
// them, through a pair of FIFOs per unit, to one of N_JU join units. Each
// join unit feeds its own burst buffer. The result writer pulls result
// bursts from the burst buffers and writes them with a self-incrementing
// address; the task queue manager pulls task bursts and writes them as the
// next traversal level, and reads tasks back for the scheduler.
//
// The memory controller and the DRAM channels are outside this module. The
// kernel has three memory ports, one per address space, which a system maps
// onto DRAM channels: node memory (read, 256-bit words), task memory (read
// and write, 64-bit words) and result memory (write, 64-bit words). Using
// one port per address space is this design's choice.
//
// Use: load the trees into node memory (see read_nodes for the layout) and
// the level-0 tasks at task_base (the root pair for synchronous traversal,
// every tile pair for PBSM), then pulse start. done rises when all results
// are written; result_count gives their number.
module swiftspatial_top
  import ss_pkg::*;
#(
  parameter int unsigned N_JU             = 16,
  parameter int unsigned MAX_ENTRIES      = 16,
  parameter int unsigned BURST_PAIRS      = 512,
  parameter int unsigned BUF_PAIRS        = 1024,
  parameter int unsigned IN_FIFO_DEPTH    = 32,
  parameter int unsigned TASK_CACHE_DEPTH = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // host control
  input  logic              start,
  input  join_mode_e        mode,
  input  sched_policy_e     policy,
  input  addr_t             task_base,
  input  addr_t             n_init_tasks,
  input  addr_t             result_base,
  output logic              done,
  output addr_t             result_count,
  output logic [7:0]        levels_done,
  // node memory (read)
  output logic              node_req_valid,
  output addr_t             node_req_addr,
  input  logic              node_req_ready,
  input  logic              node_rsp_valid,
  input  logic [NODE_W-1:0] node_rsp_data,
  output logic              node_rsp_ready,
  // task memory (read/write)
  output logic              task_req_valid,
  output logic              task_req_we,
  output addr_t             task_req_addr,
  output pair_t             task_req_wdata,
  input  logic              task_req_ready,
  input  logic              task_rsp_valid,
  input  pair_t             task_rsp_data,
  // result memory (write)
  output logic              res_wr_valid,
  output addr_t             res_wr_addr,
  output pair_t             res_wr_data,
  input  logic              res_wr_ready,
  // status
  output logic [N_JU-1:0]   ju_ended,
  output logic [31:0]       cache_refills
);
  // scheduler <-> task queue manager
  logic        lvl_start;
  addr_t       lvl_wr_base, level_count;
  logic        rd_req_valid, rd_req_ready, rd_data_valid;
  addr_t       rd_req_addr;
  logic [15:0] rd_req_len;
  pair_t       rd_data;
  // scheduler <-> read unit
  logic        assign_valid, assign_ready;
  assign_t     assign_task;
  // read unit -> join unit FIFOs
  logic        rn_valid, rn_side, rn_ready, rn_busy;
  node_beat_t  rn_beat;
  logic [7:0]  rn_ju;
  // per join unit
  logic [N_JU-1:0] fr_wready, fs_wready, fr_valid, fs_valid, fr_pop, fs_pop;
  node_beat_t      fr_data [N_JU];
  node_beat_t      fs_data [N_JU];
  logic [N_JU-1:0] ju_out_valid, ju_out_is_result, ju_out_ready;
  pair_t           ju_out_pair [N_JU];
  logic [N_JU-1:0] ju_flush_valid, ju_flush_ready, ju_pair_done, ju_idle;
  logic [15:0]     ju_pair_count [N_JU];
  // burst buffers
  logic [N_JU-1:0] bb_seg_valid, bb_seg_is_result, bb_empty;
  logic [15:0]     bb_seg_len [N_JU];
  pair_t           bb_head [N_JU];
  logic [N_JU-1:0] wr_take, wr_pop, tq_take, tq_pop;
  logic            finish, wr_busy, tq_busy;

  scheduler #(.N_JU(N_JU), .TASK_CACHE_DEPTH(TASK_CACHE_DEPTH)) u_sched (
    .clk, .rst_n,
    .start, .mode, .policy, .task_base, .n_init_tasks, .done, .levels_done,
    .lvl_rd_idx('0), .lvl_rd_base(), .lvl_rd_count(),
    .lvl_start, .lvl_wr_base, .level_count,
    .rd_req_valid, .rd_req_addr, .rd_req_len, .rd_req_ready,
    .rd_data_valid, .rd_data,
    .assign_valid, .assign_task, .assign_ready,
    .pair_done(ju_pair_done), .bb_empty,
    .units_busy(rn_busy || wr_busy || tq_busy),
    .finish, .cache_refills
  );

  read_nodes #(.MAX_ENTRIES(MAX_ENTRIES)) u_read (
    .clk, .rst_n,
    .task_valid(assign_valid), .task_in(assign_task), .task_ready(assign_ready),
    .mem_req_valid(node_req_valid), .mem_req_addr(node_req_addr),
    .mem_req_ready(node_req_ready), .mem_rsp_valid(node_rsp_valid),
    .mem_rsp_data(node_rsp_data), .mem_rsp_ready(node_rsp_ready),
    .out_valid(rn_valid), .out_beat(rn_beat), .out_ju(rn_ju), .out_side(rn_side),
    .out_ready(rn_ready), .busy(rn_busy)
  );

  localparam int unsigned JW = (N_JU > 1) ? $clog2(N_JU) : 1;
  logic [JW-1:0] rn_idx;
  assign rn_idx   = rn_ju[JW-1:0];
  assign rn_ready = rn_side ? fs_wready[rn_idx] : fr_wready[rn_idx];

  for (genvar j = 0; j < N_JU; j++) begin : g_ju
    logic wr_r, wr_s;
    assign wr_r = rn_valid && (rn_ju == 8'(j)) && !rn_side;
    assign wr_s = rn_valid && (rn_ju == 8'(j)) &&  rn_side;

    sync_fifo #(.WIDTH($bits(node_beat_t)), .DEPTH(IN_FIFO_DEPTH)) u_fifo_r (
      .clk, .rst_n,
      .wr_en(wr_r && fr_wready[j]), .wr_data(rn_beat), .wr_ready(fr_wready[j]),
      .rd_en(fr_pop[j]), .rd_data(fr_data[j]), .rd_valid(fr_valid[j]), .count()
    );
    sync_fifo #(.WIDTH($bits(node_beat_t)), .DEPTH(IN_FIFO_DEPTH)) u_fifo_s (
      .clk, .rst_n,
      .wr_en(wr_s && fs_wready[j]), .wr_data(rn_beat), .wr_ready(fs_wready[j]),
      .rd_en(fs_pop[j]), .rd_data(fs_data[j]), .rd_valid(fs_valid[j]), .count()
    );

    join_unit #(.MAX_ENTRIES(MAX_ENTRIES)) u_ju (
      .clk, .rst_n,
      .in_r_valid(fr_valid[j]), .in_r_beat(fr_data[j]), .in_r_pop(fr_pop[j]),
      .in_s_valid(fs_valid[j]), .in_s_beat(fs_data[j]), .in_s_pop(fs_pop[j]),
      .out_valid(ju_out_valid[j]), .out_pair(ju_out_pair[j]),
      .out_is_result(ju_out_is_result[j]), .out_ready(ju_out_ready[j]),
      .flush_valid(ju_flush_valid[j]), .flush_ready(ju_flush_ready[j]),
      .pair_done(ju_pair_done[j]), .pair_out_count(ju_pair_count[j]),
      .finish, .idle(ju_idle[j]), .ended(ju_ended[j])
    );

    burst_buffer #(.BURST_PAIRS(BURST_PAIRS), .BUF_PAIRS(BUF_PAIRS)) u_bb (
      .clk, .rst_n,
      .in_valid(ju_out_valid[j]), .in_pair(ju_out_pair[j]),
      .in_is_result(ju_out_is_result[j]), .in_ready(ju_out_ready[j]),
      .flush_valid(ju_flush_valid[j]), .flush_ready(ju_flush_ready[j]),
      .seg_valid(bb_seg_valid[j]), .seg_len(bb_seg_len[j]),
      .seg_is_result(bb_seg_is_result[j]),
      .seg_take(wr_take[j] | tq_take[j]), .head_pair(bb_head[j]),
      .pop(wr_pop[j] | tq_pop[j]), .empty(bb_empty[j])
    );
  end

  write_results #(.N_BUF(N_JU)) u_write (
    .clk, .rst_n, .clear(start), .base_addr(result_base),
    .seg_valid(bb_seg_valid), .seg_len(bb_seg_len), .seg_is_result(bb_seg_is_result),
    .head_pair(bb_head), .seg_take(wr_take), .pop(wr_pop),
    .mem_wr_valid(res_wr_valid), .mem_wr_addr(res_wr_addr),
    .mem_wr_data(res_wr_data), .mem_wr_ready(res_wr_ready),
    .result_count, .busy(wr_busy)
  );

  task_queue_manager #(.N_BUF(N_JU)) u_tqm (
    .clk, .rst_n,
    .lvl_start, .lvl_wr_base, .level_count,
    .rd_req_valid, .rd_req_addr, .rd_req_len, .rd_req_ready,
    .rd_data_valid, .rd_data,
    .seg_valid(bb_seg_valid), .seg_len(bb_seg_len), .seg_is_result(bb_seg_is_result),
    .head_pair(bb_head), .seg_take(tq_take), .pop(tq_pop),
    .mem_req_valid(task_req_valid), .mem_req_we(task_req_we),
    .mem_req_addr(task_req_addr), .mem_req_wdata(task_req_wdata),
    .mem_req_ready(task_req_ready), .mem_rsp_valid(task_rsp_valid),
    .mem_rsp_data(task_rsp_data), .busy(tq_busy)
  );

  a_one_taker: assert property (@(posedge clk) disable iff (!rst_n)
      (wr_take & tq_take) == '0);
endmodule
