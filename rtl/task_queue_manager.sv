// task_queue_manager: keeps the queue of node-pair tasks of the BFS
// synchronous traversal in memory.
//
// From the paper: at the start of a level the scheduler gives it the address
// at which to begin writing the tasks of the next level; during the level it
// (a) serves the scheduler's read requests, returning the node pairs asked
// for, and (b) pulls intermediate node pairs from the burst buffers and
// writes them to memory in bursts, at consecutive addresses. It counts the
// tasks written in the level so that the scheduler knows how many tasks the
// next level has and where the level after that may start.
//
// How it works (this design's choice): the memory port is shared. Between
// write bursts a pending read request wins; a write burst, once started, runs
// to its end. A read request asks for rd_req_len consecutive tasks; each
// word read is sent back on rd_data_* in order. Writes come from a
// burst_arbiter that takes task bursts from the burst buffers round-robin.
//
// Interface: lvl_start/lvl_wr_base (one cycle) open a level; level_count is
// the number of tasks written since; mem_req_* is a valid/ready request port
// of 64-bit words (one pair per word), mem_rsp_* the in-order read data,
// always accepted. busy is high while a write burst or read words are in
// flight. rd_data_* is mem_rsp_* passed straight through, so those outputs
// follow inputs with no logic in between.
// Timing: one memory request per cycle, read or write; a read request waits
// for the write burst in progress to end.
module task_queue_manager
  import ss_pkg::*;
#(
  parameter int unsigned N_BUF = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // level metadata from the scheduler
  input  logic              lvl_start,
  input  addr_t             lvl_wr_base,
  output addr_t             level_count,
  // read requests from the scheduler
  input  logic              rd_req_valid,
  input  addr_t             rd_req_addr,
  input  logic [15:0]       rd_req_len,
  output logic              rd_req_ready,
  output logic              rd_data_valid,
  output pair_t             rd_data,
  // burst buffers
  input  logic [N_BUF-1:0]  seg_valid,
  input  logic [15:0]       seg_len       [N_BUF],
  input  logic [N_BUF-1:0]  seg_is_result,
  input  pair_t             head_pair     [N_BUF],
  output logic [N_BUF-1:0]  seg_take,
  output logic [N_BUF-1:0]  pop,
  // task memory
  output logic              mem_req_valid,
  output logic              mem_req_we,
  output addr_t             mem_req_addr,
  output pair_t             mem_req_wdata,
  input  logic              mem_req_ready,
  input  logic              mem_rsp_valid,
  input  pair_t             mem_rsp_data,
  output logic              busy
);
  typedef enum logic { T_IDLE, T_READ } tstate_e;
  tstate_e state;

  addr_t       wr_base;
  addr_t       rd_addr;
  logic [15:0] rd_left;      // read requests still to issue
  logic [15:0] rd_pending;   // read words still to come back
  logic        w_valid, w_first, w_last, w_ready, w_busy;  // first/last: burst marks, unused here
  pair_t       w_pair;

  // The write puller only sees the buffers while the port is given to writes.
  logic [N_BUF-1:0] seg_valid_gated;
  assign seg_valid_gated = (state == T_READ || (state == T_IDLE && rd_req_valid))
                           ? '0 : seg_valid;

  burst_arbiter #(.N_BUF(N_BUF), .KIND_RESULT(1'b0)) u_arb (
    .clk, .rst_n,
    .seg_valid(seg_valid_gated), .seg_len, .seg_is_result, .head_pair,
    .seg_take, .pop,
    .out_valid(w_valid), .out_pair(w_pair), .out_first(w_first), .out_last(w_last),
    .out_ready(w_ready), .busy(w_busy)
  );

  assign rd_req_ready = (state == T_IDLE) && !w_busy;

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = rd_addr;
    mem_req_wdata = w_pair;
    w_ready       = 1'b0;
    if (state == T_READ && rd_left != '0) begin
      mem_req_valid = 1'b1;
    end else if (w_valid) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
      mem_req_addr  = wr_base + level_count;
      w_ready       = mem_req_ready;
    end
  end

  assign rd_data_valid = mem_rsp_valid;
  assign rd_data       = mem_rsp_data;
  assign busy          = w_busy || (rd_pending != '0) || (state == T_READ);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= T_IDLE;
      wr_base     <= '0;
      level_count <= '0;
      rd_addr     <= '0;
      rd_left     <= '0;
      rd_pending  <= '0;
    end else begin
      if (lvl_start) begin
        wr_base     <= lvl_wr_base;
        level_count <= '0;
      end else if (w_valid && w_ready) begin
        level_count <= level_count + 1'b1;
      end

      rd_pending <= rd_pending
                    + ((mem_req_valid && mem_req_ready && !mem_req_we) ? 16'd1 : 16'd0)
                    - (mem_rsp_valid ? 16'd1 : 16'd0);

      unique case (state)
        T_IDLE: begin
          if (rd_req_valid && rd_req_ready) begin
            rd_addr <= rd_req_addr;
            rd_left <= rd_req_len;
            state   <= T_READ;
          end
        end
        T_READ: begin
          if (mem_req_valid && mem_req_ready) begin
            rd_addr <= rd_addr + 1'b1;
            rd_left <= rd_left - 1'b1;
            if (rd_left == 16'd1) state <= T_IDLE;
          end
          if (rd_left == '0) state <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  a_no_write_during_level_start: assert property (@(posedge clk) disable iff (!rst_n)
      lvl_start |-> !w_busy);
endmodule
