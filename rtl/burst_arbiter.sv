// burst_arbiter: pulls whole bursts of one kind (results or tasks) from the
// per-join-unit burst buffers in round-robin order and turns them into one
// pair stream.
//
// The paper says the result writer and the task queue manager pull the bursts
// "in a round-robin fashion"; this module is that puller, shared by both.
// In PICK it looks, starting after the buffer served last, for the first
// buffer offering a burst of kind KIND_RESULT, takes its descriptor and then
// forwards its seg_len pairs one per accepted beat. out_first marks the
// first pair of a burst and out_last the last. busy is high while a burst is
// being forwarded.
// Timing: one pair per cycle while out_ready is high, and one idle cycle to
// pick each burst.
module burst_arbiter
  import ss_pkg::*;
#(
  parameter int unsigned N_BUF       = 16,
  parameter bit          KIND_RESULT = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_BUF-1:0]  seg_valid,
  input  logic [15:0]       seg_len       [N_BUF],
  input  logic [N_BUF-1:0]  seg_is_result,
  input  pair_t             head_pair     [N_BUF],
  output logic [N_BUF-1:0]  seg_take,
  output logic [N_BUF-1:0]  pop,
  output logic              out_valid,
  output pair_t             out_pair,
  output logic              out_first,
  output logic              out_last,
  input  logic              out_ready,
  output logic              busy
);
  localparam int unsigned IW = (N_BUF > 1) ? $clog2(N_BUF) : 1;

  logic          streaming;
  logic [IW-1:0] cur, rr;
  logic [15:0]   remaining;
  logic          first;

  logic [N_BUF-1:0] cand;
  logic             found;
  logic [IW-1:0]    pick;

  always_comb begin
    for (int k = 0; k < N_BUF; k++)
      cand[k] = seg_valid[k] && (seg_is_result[k] == KIND_RESULT) && (seg_len[k] != '0);
    found = 1'b0;
    pick  = rr;
    for (int k = 0; k < N_BUF; k++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(rr) + k) % N_BUF);
      if (!found && cand[idx]) begin
        found = 1'b1;
        pick  = idx;
      end
    end
  end

  always_comb begin
    seg_take = '0;
    pop      = '0;
    if (!streaming && found) seg_take[pick] = 1'b1;
    if (streaming && out_ready) pop[cur] = 1'b1;
  end

  assign out_valid = streaming;
  assign out_pair  = head_pair[cur];
  assign out_first = first;
  assign out_last  = (remaining == 16'd1);
  assign busy      = streaming;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      streaming <= 1'b0;
      cur       <= '0;
      rr        <= '0;
      remaining <= '0;
      first     <= 1'b0;
    end else if (!streaming) begin
      if (found) begin
        streaming <= 1'b1;
        cur       <= pick;
        remaining <= seg_len[pick];
        first     <= 1'b1;
        rr        <= (pick == IW'(N_BUF-1)) ? '0 : pick + 1'b1;
      end
    end else if (out_ready) begin
      first     <= 1'b0;
      remaining <= remaining - 1'b1;
      if (remaining == 16'd1) streaming <= 1'b0;
    end
  end
endmodule
