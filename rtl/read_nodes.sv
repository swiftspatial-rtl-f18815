// read_nodes: the node read unit. For each task the scheduler assigns (a
// pair of node pointers and a join unit id) it loads both nodes from memory
// and streams them to that join unit.
//
// From the paper: the scheduler sends the node pair and the join unit id to
// the read unit, which loads the node pair from memory and passes the data to
// the join unit; a join unit first receives the node metadata (entry count,
// leaf or directory) and then the node data.
//
// How it works (this design's choice of memory layout and order): node p
// occupies NODE_STRIDE = MAX_ENTRIES+1 consecutive 256-bit words starting at
// p*NODE_STRIDE, a header word (node_meta_t in its low bits) followed by the
// entries (entry_t in their low bits). The unit reads both headers, sends the
// two metadata beats (the header's ptr field is replaced by the node's
// pointer), then reads the entries of R and then those of S as one burst of
// sequential reads and forwards each word as it returns. One task is handled
// at a time; the read requests of a burst are issued back to back, so memory
// latency is paid about twice per task.
//
// Interface: task_* valid/ready in; mem_req_* valid/ready read requests and
// mem_rsp_* valid/ready in-order read data; out_* a valid/ready beat stream
// tagged with the destination join unit (out_ju) and side (out_side: 0 for R,
// 1 for S).
// Timing: a c_r x c_s task takes about c_r + c_s + 4 cycles plus two memory
// latencies when the memory and the join unit's FIFOs never stall.
module read_nodes
  import ss_pkg::*;
#(
  parameter int unsigned MAX_ENTRIES = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              task_valid,
  input  assign_t           task_in,
  output logic              task_ready,
  // node memory
  output logic              mem_req_valid,
  output addr_t             mem_req_addr,
  input  logic              mem_req_ready,
  input  logic              mem_rsp_valid,
  input  logic [NODE_W-1:0] mem_rsp_data,
  output logic              mem_rsp_ready,
  // to the join units
  output logic              out_valid,
  output node_beat_t        out_beat,
  output logic [7:0]        out_ju,
  output logic              out_side,
  input  logic              out_ready,
  output logic              busy
);
  localparam int unsigned NODE_STRIDE = MAX_ENTRIES + 1;

  typedef enum logic [2:0] { R_IDLE, R_HDR, R_META_R, R_META_S, R_DATA } rstate_e;
  rstate_e state;

  assign_t    cur;
  addr_t      base_r, base_s;
  node_meta_t meta_r, meta_s;
  logic [1:0] hdr_issued, hdr_recv;
  logic [CNT_W:0] issued, recv, total;

  assign base_r = addr_t'(cur.nodes.r) * addr_t'(NODE_STRIDE);
  assign base_s = addr_t'(cur.nodes.s) * addr_t'(NODE_STRIDE);
  assign total  = {1'b0, meta_r.count} + {1'b0, meta_s.count};

  logic [CNT_W:0] s_idx;   // index of the next S entry to request
  assign s_idx = issued - {1'b0, meta_r.count};

  node_meta_t rsp_meta;
  assign rsp_meta   = node_meta_t'(mem_rsp_data[$bits(node_meta_t)-1:0]);
  assign task_ready = (state == R_IDLE);
  assign out_ju     = cur.ju;
  assign busy       = (state != R_IDLE);

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_addr  = '0;
    mem_rsp_ready = 1'b0;
    out_valid     = 1'b0;
    out_beat      = '0;
    out_side      = 1'b0;
    unique case (state)
      R_HDR: begin
        mem_req_valid = (hdr_issued != 2'd2);
        mem_req_addr  = (hdr_issued == 2'd0) ? base_r : base_s;
        mem_rsp_ready = 1'b1;
      end
      R_META_R: begin
        out_valid      = 1'b1;
        out_beat.is_meta = 1'b1;
        out_beat.meta  = meta_r;
        out_side       = 1'b0;
      end
      R_META_S: begin
        out_valid      = 1'b1;
        out_beat.is_meta = 1'b1;
        out_beat.meta  = meta_s;
        out_side       = 1'b1;
      end
      R_DATA: begin
        mem_req_valid  = (issued != total);
        mem_req_addr   = (issued < {1'b0, meta_r.count})
                         ? base_r + 1 + addr_t'(issued)
                         : base_s + 1 + addr_t'(s_idx);
        out_valid      = mem_rsp_valid;
        out_beat.entry = entry_t'(mem_rsp_data[$bits(entry_t)-1:0]);
        out_side       = (recv >= {1'b0, meta_r.count});
        mem_rsp_ready  = out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= R_IDLE;
      cur        <= '0;
      meta_r     <= '0;
      meta_s     <= '0;
      hdr_issued <= '0;
      hdr_recv   <= '0;
      issued     <= '0;
      recv       <= '0;
    end else begin
      unique case (state)
        R_IDLE: begin
          if (task_valid) begin
            cur        <= task_in;
            hdr_issued <= '0;
            hdr_recv   <= '0;
            state      <= R_HDR;
          end
        end
        R_HDR: begin
          if (mem_req_valid && mem_req_ready) hdr_issued <= hdr_issued + 1'b1;
          if (mem_rsp_valid) begin
            if (hdr_recv == 2'd0) meta_r <= '{is_leaf: rsp_meta.is_leaf, count: rsp_meta.count, ptr: cur.nodes.r};
            else                  meta_s <= '{is_leaf: rsp_meta.is_leaf, count: rsp_meta.count, ptr: cur.nodes.s};
            hdr_recv <= hdr_recv + 1'b1;
            if (hdr_recv == 2'd1) state <= R_META_R;
          end
        end
        R_META_R: if (out_ready) state <= R_META_S;
        R_META_S: begin
          if (out_ready) begin
            issued <= '0;
            recv   <= '0;
            state  <= (total == '0) ? R_IDLE : R_DATA;
          end
        end
        R_DATA: begin
          if (mem_req_valid && mem_req_ready) issued <= issued + 1'b1;
          if (mem_rsp_valid && mem_rsp_ready) begin
            recv <= recv + 1'b1;
            if (recv + 1'b1 == total) state <= R_IDLE;
          end
        end
        default: state <= R_IDLE;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> $stable(out_beat));
endmodule
