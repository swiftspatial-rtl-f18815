// write_results: the result write unit. It gathers the final join results
// (pairs of object ids) from all burst buffers and writes them to memory one
// after another.
//
// As in the paper, the unit owns the output address space: a self-incrementing
// counter gives each result the next address, so no join unit has to reserve
// memory for results it has not produced yet, and the writes of one burst
// go to consecutive addresses. The bursts are pulled round-robin from the
// burst buffers (burst_arbiter with the result kind).
//
// Interface: mem_wr_* is a valid/ready write port of 64-bit words (one pair
// per word) addressed in words from base_addr; clear (one cycle) restarts
// the counter at base_addr for a new join. result_count is the number of
// results written; busy is high while a burst is in flight.
// Timing: one result per cycle while the memory accepts.
module write_results
  import ss_pkg::*;
#(
  parameter int unsigned N_BUF = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  addr_t             base_addr,
  // burst buffers
  input  logic [N_BUF-1:0]  seg_valid,
  input  logic [15:0]       seg_len       [N_BUF],
  input  logic [N_BUF-1:0]  seg_is_result,
  input  pair_t             head_pair     [N_BUF],
  output logic [N_BUF-1:0]  seg_take,
  output logic [N_BUF-1:0]  pop,
  // memory write port
  output logic              mem_wr_valid,
  output addr_t             mem_wr_addr,
  output pair_t             mem_wr_data,
  input  logic              mem_wr_ready,
  output addr_t             result_count,
  output logic              busy
);
  logic  s_first, s_last;

  burst_arbiter #(.N_BUF(N_BUF), .KIND_RESULT(1'b1)) u_arb (
    .clk, .rst_n,
    .seg_valid, .seg_len, .seg_is_result, .head_pair, .seg_take, .pop,
    .out_valid(mem_wr_valid), .out_pair(mem_wr_data),
    .out_first(s_first), .out_last(s_last),
    .out_ready(mem_wr_ready), .busy
  );

  assign mem_wr_addr = base_addr + result_count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      result_count <= '0;
    end else if (clear) begin
      result_count <= '0;
    end else if (mem_wr_valid && mem_wr_ready) begin
      result_count <= result_count + 1'b1;
    end
  end

  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (mem_wr_valid && !mem_wr_ready) |=> (mem_wr_valid && $stable(mem_wr_data)));
endmodule
