// tb_read_nodes: self-checking test of the node read unit at the default node
// size (16 entries).
//
// A node memory model holds 40 random nodes (random entry count 0..16, leaf
// or directory) in the unit's layout, answers reads in order after a random
// delay and applies random back-pressure on requests; the beat sink stalls at
// random. For random tasks the testbench checks every beat: the R metadata
// (count, leaf flag, pointer) on side 0, the S metadata on side 1, then the
// R entries on side 0 and the S entries on side 1, all tagged with the
// task's join unit id. Rate check: with a one-cycle memory that is always
// ready and a sink that never stalls, a 16 x 16 task must be streamed within
// 32 + 12 cycles of being accepted.
module tb_read_nodes;
  import ss_pkg::*;

  localparam int unsigned MAX_ENTRIES = 16;
  localparam int unsigned STRIDE      = MAX_ENTRIES + 1;
  localparam int unsigned N_NODES     = 40;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic              task_valid, task_ready;
  assign_t           task_in;
  logic              mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  addr_t             mem_req_addr;
  logic [NODE_W-1:0] mem_rsp_data;
  logic              out_valid, out_side, out_ready, busy;
  node_beat_t        out_beat;
  logic [7:0]        out_ju;

  read_nodes #(.MAX_ENTRIES(MAX_ENTRIES)) dut (.*);

  logic [NODE_W-1:0] mem [N_NODES*STRIDE];
  node_meta_t        node_meta [N_NODES];

  // memory: random ready, in-order responses after a random delay
  logic [NODE_W-1:0] rsp_q[$];
  bit fast;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_req_ready <= 1'b0;
      mem_rsp_valid <= 1'b0;
      mem_rsp_data  <= '0;
      rsp_q.delete();
    end else begin
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req_addr >= addr_t'(N_NODES*STRIDE)) begin
          failures++; $display("FAIL: read outside memory at %0d", mem_req_addr);
          rsp_q.push_back('0);
        end else
          rsp_q.push_back(mem[mem_req_addr]);
      end
      mem_req_ready <= fast || ($urandom_range(0, 3) != 0);
      if (!mem_rsp_valid || mem_rsp_ready) begin
        mem_rsp_valid <= 1'b0;
        if (rsp_q.size() > 0 && (fast || $urandom_range(0, 2) != 0)) begin
          mem_rsp_valid <= 1'b1;
          mem_rsp_data  <= rsp_q.pop_front();
        end
      end
    end
  end

  always @(posedge clk) out_ready <= fast || ($urandom_range(0, 2) != 0);

  // expected beats
  typedef struct { node_beat_t beat; bit side; logic [7:0] ju; } exp_t;
  exp_t exp_q[$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL: unexpected beat");
    end else begin
      if (out_beat != exp_q[0].beat || out_side != exp_q[0].side || out_ju != exp_q[0].ju) begin
        failures++;
        $display("FAIL: beat %h side %0d ju %0d, expected %h side %0d ju %0d", out_beat,
                 out_side, out_ju, exp_q[0].beat, exp_q[0].side, exp_q[0].ju);
      end
      void'(exp_q.pop_front());
    end
  end

  task automatic send_task(input int r, input int s, input int ju, output int cycles);
    node_beat_t b;
    b = '0; b.is_meta = 1'b1;
    b.meta = '{is_leaf: node_meta[r].is_leaf, count: node_meta[r].count, ptr: id_t'(r)};
    exp_q.push_back('{beat: b, side: 1'b0, ju: 8'(ju)});
    b.meta = '{is_leaf: node_meta[s].is_leaf, count: node_meta[s].count, ptr: id_t'(s)};
    exp_q.push_back('{beat: b, side: 1'b1, ju: 8'(ju)});
    for (int k = 0; k < int'(node_meta[r].count); k++) begin
      b = '0; b.entry = entry_t'(mem[r*STRIDE + 1 + k]);
      exp_q.push_back('{beat: b, side: 1'b0, ju: 8'(ju)});
    end
    for (int k = 0; k < int'(node_meta[s].count); k++) begin
      b = '0; b.entry = entry_t'(mem[s*STRIDE + 1 + k]);
      exp_q.push_back('{beat: b, side: 1'b1, ju: 8'(ju)});
    end
    @(negedge clk);
    task_valid = 1'b1;
    task_in = '{nodes: '{r: id_t'(r), s: id_t'(s)}, ju: 8'(ju)};
    do @(posedge clk); while (!task_ready);
    #1 task_valid = 1'b0;
    cycles = 0;
    while (exp_q.size() != 0 && cycles < 5000) begin @(negedge clk); cycles++; end
    checks++;
    if (exp_q.size() != 0) begin
      failures++; $display("FAIL: %0d beats missing for task (%0d,%0d)", exp_q.size(), r, s);
      exp_q.delete();
    end
  endtask

  initial begin
    int cyc;
    task_valid = 1'b0; task_in = '0; fast = 1'b0;
    for (int n = 0; n < N_NODES; n++) begin
      node_meta[n] = '{is_leaf: 1'($urandom_range(0, 1)),
                       count: CNT_W'((n < 2) ? MAX_ENTRIES : $urandom_range(0, MAX_ENTRIES)),
                       ptr: id_t'($urandom)};
      mem[n*STRIDE] = pack_meta(node_meta[n]);
      for (int k = 1; k < STRIDE; k++) begin
        entry_t e;
        e = '{mbr: '{left: $urandom, right: $urandom, bottom: $urandom, top: $urandom,
                     back: $urandom, front: $urandom}, id: $urandom};
        mem[n*STRIDE + k] = pack_entry(e);
      end
    end
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // rate with an ideal memory and sink
    fast = 1'b1;
    repeat (3) @(posedge clk);
    send_task(0, 1, 5, cyc);
    checks++;
    if (cyc > 32 + 12) begin
      failures++; $display("FAIL: 16x16 task took %0d cycles", cyc);
    end else
      $display("16x16 task streamed in %0d cycles", cyc);
    // random tasks, random memory and sink
    fast = 1'b0;
    for (int t = 0; t < 60; t++)
      send_task($urandom_range(0, N_NODES - 1), $urandom_range(0, N_NODES - 1),
                $urandom_range(0, 15), cyc);
    repeat (5) @(posedge clk);
    checks++;
    if (busy) begin
      failures++; $display("FAIL: busy after the last task");
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
