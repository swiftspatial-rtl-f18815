// burst_buffer: collects one join unit's output pairs and hands them on in
// bursts, so that the memory sees long sequential writes instead of scattered
// 8-byte ones.
//
// Following the paper, a burst is released either when the pairs gathered
// reach a size threshold (BURST_PAIRS; the paper's example is 4 KB, i.e. 512
// eight-byte pairs) or when the join unit reports the end of a node pair
// (flush). Since all outputs of one node pair are of the same kind, every
// burst is either all results or all tasks; its kind is that of its first
// pair.
//
// How it works (this design's choice; the paper gives only the function):
// pairs go into a data FIFO of BUF_PAIRS words; a small descriptor FIFO holds
// the closed bursts {length, is_result}. A consumer (the result writer or
// the task queue manager) that sees seg_valid with its kind pops the
// descriptor with seg_take and then the seg_len pairs with pop (the first pop
// may come in the same cycle as seg_take). The next burst is shown only when
// the previous one is fully popped.
//
// Interface: in_* valid/ready pairs from the join unit; flush_valid/ready at
// the end of a node pair (a flush with no open pairs closes nothing).
// empty is high when nothing is stored or open.
// Timing: one pair in and one pair out per cycle; a burst closed by the
// threshold is offered on the cycle after its last pair is written.
module burst_buffer
  import ss_pkg::*;
#(
  parameter int unsigned BURST_PAIRS = 512,
  parameter int unsigned BUF_PAIRS   = 1024,
  parameter int unsigned SEG_DEPTH   = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  pair_t       in_pair,
  input  logic        in_is_result,
  output logic        in_ready,
  input  logic        flush_valid,
  output logic        flush_ready,
  // burst side
  output logic        seg_valid,
  output logic [15:0] seg_len,
  output logic        seg_is_result,
  input  logic        seg_take,
  output pair_t       head_pair,
  input  logic        pop,
  output logic        empty
);
  typedef struct packed {
    logic [15:0] len;
    logic        is_result;
  } seg_t;

  logic [15:0] open_len;
  logic        open_is_result;
  logic        close_now;
  logic        do_in;
  seg_t        seg_wdata, seg_rdata;
  logic        seg_wready, data_wready, data_rvalid, seg_rvalid;
  logic [15:0] owed;   // pairs of the taken burst not yet popped
  logic [$clog2(SEG_DEPTH+1)-1:0] seg_count;
  logic [$clog2(BUF_PAIRS+1)-1:0] data_count;

  assign do_in       = in_valid && in_ready;
  // a full descriptor FIFO blocks both new pairs and flushes
  assign in_ready    = data_wready && seg_wready;
  assign flush_ready = seg_wready && !in_valid;
  // close the open burst at the threshold or at a flush
  assign close_now   = (do_in && (open_len + 16'd1 == 16'(BURST_PAIRS))) ||
                       (flush_valid && flush_ready && open_len != '0);
  assign seg_wdata   = '{len: do_in ? open_len + 16'd1 : open_len,
                         is_result: (open_len == '0) ? in_is_result : open_is_result};

  sync_fifo #(.WIDTH($bits(pair_t)), .DEPTH(BUF_PAIRS)) u_data (
    .clk, .rst_n,
    .wr_en(do_in), .wr_data(in_pair), .wr_ready(data_wready),
    .rd_en(pop), .rd_data(head_pair), .rd_valid(data_rvalid),
    .count(data_count)
  );

  sync_fifo #(.WIDTH($bits(seg_t)), .DEPTH(SEG_DEPTH)) u_seg (
    .clk, .rst_n,
    .wr_en(close_now), .wr_data(seg_wdata), .wr_ready(seg_wready),
    .rd_en(seg_take), .rd_data(seg_rdata), .rd_valid(seg_rvalid),
    .count(seg_count)
  );

  // the next burst is offered only once the previous one has been drained,
  // so that two consumers never pop each other's pairs
  assign seg_valid     = seg_rvalid && (owed == '0);
  assign seg_len       = seg_rdata.len;
  assign seg_is_result = seg_rdata.is_result;
  assign empty         = (data_count == '0) && (seg_count == '0) && (open_len == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_len       <= '0;
      open_is_result <= 1'b0;
      owed           <= '0;
    end else begin
      if (seg_take) owed <= seg_rdata.len - (pop ? 16'd1 : 16'd0);
      else if (pop) owed <= owed - 1'b1;
      if (close_now) begin
        open_len <= '0;
      end else if (do_in) begin
        open_len <= open_len + 1'b1;
      end
      if (do_in && open_len == '0) open_is_result <= in_is_result;
    end
  end

  a_kind_uniform: assert property (@(posedge clk) disable iff (!rst_n)
      (do_in && open_len != '0) |-> (in_is_result == open_is_result));
  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n)
      pop |-> data_rvalid);
  a_take_valid: assert property (@(posedge clk) disable iff (!rst_n)
      seg_take |-> seg_valid);
  a_pop_owed: assert property (@(posedge clk) disable iff (!rst_n)
      (pop && !seg_take) |-> (owed != '0));
endmodule
