// join_unit: joins one pair of R-tree nodes (or PBSM tiles) and emits every
// pair of entries whose minimum bounding rectangles intersect.
//
// Control (follows the paper's join-unit flow chart): wait for both node
// headers ("read node meta"), copy both entry lists into two local SRAMs
// ("read node data"), join, then a finish check that either ends the unit or
// goes back for the next node pair. If both nodes are leaves the outputs are
// results (object id pairs); otherwise they are tasks (node pointer pairs)
// for the next traversal level.
//
// Datapath (follows the paper's microarchitecture figure): a three-stage
// pipeline that takes one entry pair per cycle. Stage A reads entry i of R and
// entry j of S from the SRAMs into the object registers. Stage B evaluates
// the six comparisons of the intersect predicate in parallel and ANDs them;
// it also registers the id pair and the output selection (result if both
// nodes are leaves). Stage C offers the pair to the output if the predicate
// holds. A full output stalls all three stages.
//
// Mixed case (one leaf, one directory node), from the paper's recursive
// traversal algorithm: the leaf node is compared as a whole against each child
// of the directory node and the output task is (leaf node, child). The leaf
// node's MBR is the union of its entries, computed while the entries are
// loaded; its pointer arrives in the header. How the paper's hardware handles
// this case is not described; this is this design's choice.
//
// Interface: in_r_* / in_s_* are show-ahead FIFO read ports carrying
// node_beat_t (one header, then count entries). out_* is a valid/ready pair
// stream; out_is_result selects the result or the task queue. After the last
// output of a node pair the unit raises flush_valid (end of node pair, for
// the burst buffer) and, once accepted, pulses pair_done with the number of
// pairs it produced. finish from the scheduler ends the unit when it is idle.
//
// Timing: a c_r x c_s join takes c_r*c_s cycles plus a 2-cycle pipeline drain
// when the output never stalls; loading takes max(c_r, c_s) cycles after the
// headers.
module join_unit
  import ss_pkg::*;
#(
  parameter int unsigned MAX_ENTRIES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // node streams
  input  logic        in_r_valid,
  input  node_beat_t  in_r_beat,
  output logic        in_r_pop,
  input  logic        in_s_valid,
  input  node_beat_t  in_s_beat,
  output logic        in_s_pop,
  // join output
  output logic        out_valid,
  output pair_t       out_pair,
  output logic        out_is_result,
  input  logic        out_ready,
  // end of node pair
  output logic        flush_valid,
  input  logic        flush_ready,
  output logic        pair_done,
  output logic [15:0] pair_out_count,
  // control
  input  logic        finish,
  output logic        idle,
  output logic        ended
);
  localparam int unsigned AW = (MAX_ENTRIES > 1) ? $clog2(MAX_ENTRIES) : 1;

  typedef enum logic [2:0] {
    S_META, S_DATA, S_JOIN, S_DRAIN, S_FLUSH, S_CHECK, S_END
  } state_e;

  state_e state;

  // node SRAMs (BRAM_R, BRAM_S)
  entry_t bram_r [MAX_ENTRIES];
  entry_t bram_s [MAX_ENTRIES];

  node_meta_t meta_r, meta_s;
  logic [CNT_W-1:0] ld_r, ld_s;         // entries loaded
  mbr_t       node_mbr_r, node_mbr_s;   // union of entries

  // iteration
  logic [AW-1:0] ai, aj;
  logic          issuing_done;
  logic          use_node_r, use_node_s; // compare whole leaf node (mixed case)
  logic          both_leaf;

  // pipeline registers
  logic   a_v;   entry_t obj_r, obj_s;
  logic   b_v, b_pred, b_sel; pair_t b_res;
  logic   adv;
  logic   issue;
  logic [15:0] out_cnt;

  function automatic logic intersects(input mbr_t r, input mbr_t s);
    logic [5:0] c;
    c[0] = fp_ge(r.right, s.left);
    c[1] = fp_ge(s.right, r.left);
    c[2] = fp_ge(r.top,   s.bottom);
    c[3] = fp_ge(s.top,   r.bottom);
    c[4] = fp_ge(r.front, s.back);
    c[5] = fp_ge(s.front, r.back);
    return &c;
  endfunction

  function automatic mbr_t mbr_union(input mbr_t a, input mbr_t b);
    mbr_t u;
    u.left   = fp_ge(a.left,   b.left)   ? b.left   : a.left;
    u.bottom = fp_ge(a.bottom, b.bottom) ? b.bottom : a.bottom;
    u.back   = fp_ge(a.back,   b.back)   ? b.back   : a.back;
    u.right  = fp_ge(a.right,  b.right)  ? a.right  : b.right;
    u.top    = fp_ge(a.top,    b.top)    ? a.top    : b.top;
    u.front  = fp_ge(a.front,  b.front)  ? a.front  : b.front;
    return u;
  endfunction

  // last index of each loop
  logic [AW-1:0] last_i, last_j;
  assign last_i = AW'(meta_r.count - 1'b1);
  assign last_j = AW'(meta_s.count - 1'b1);

  // handshakes
  assign out_valid     = b_v && b_pred;
  assign out_pair      = b_res;
  assign out_is_result = b_sel;
  assign adv           = !(b_v && b_pred) || out_ready;
  assign issue         = (state == S_JOIN) && !issuing_done && adv;

  assign in_r_pop = ((state == S_META) && in_r_valid && in_s_valid) ||
                    ((state == S_DATA) && in_r_valid && (ld_r < meta_r.count));
  assign in_s_pop = ((state == S_META) && in_r_valid && in_s_valid) ||
                    ((state == S_DATA) && in_s_valid && (ld_s < meta_s.count));

  assign flush_valid    = (state == S_FLUSH);
  assign pair_out_count = out_cnt;
  assign idle           = (state == S_META) && !in_r_valid && !in_s_valid;
  assign ended          = (state == S_END);

  // SRAM writes while loading
  always_ff @(posedge clk) begin
    if (state == S_DATA && in_r_pop) bram_r[AW'(ld_r)] <= in_r_beat.entry;
    if (state == S_DATA && in_s_pop) bram_s[AW'(ld_s)] <= in_s_beat.entry;
  end

  // Stage A: SRAM read into the object registers
  always_ff @(posedge clk) begin
    if (adv) begin
      obj_r <= use_node_r ? '{mbr: node_mbr_r, id: meta_r.ptr} : bram_r[ai];
      obj_s <= use_node_s ? '{mbr: node_mbr_s, id: meta_s.ptr} : bram_s[aj];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_META;
      meta_r       <= '0;
      meta_s       <= '0;
      ld_r         <= '0;
      ld_s         <= '0;
      node_mbr_r   <= '0;
      node_mbr_s   <= '0;
      ai           <= '0;
      aj           <= '0;
      issuing_done <= 1'b0;
      use_node_r   <= 1'b0;
      use_node_s   <= 1'b0;
      both_leaf    <= 1'b0;
      a_v          <= 1'b0;
      b_v          <= 1'b0;
      b_pred       <= 1'b0;
      b_sel        <= 1'b0;
      b_res        <= '0;
      out_cnt      <= '0;
      pair_done    <= 1'b0;
    end else begin
      pair_done <= 1'b0;

      // Stage B: predicate evaluation; Stage C is the output handshake
      if (adv) begin
        a_v    <= issue;
        b_v    <= a_v;
        b_pred <= intersects(obj_r.mbr, obj_s.mbr);
        b_res  <= '{r: obj_r.id, s: obj_s.id};
        b_sel  <= both_leaf;
      end
      if (out_valid && out_ready) out_cnt <= out_cnt + 1'b1;

      unique case (state)
        S_META: begin
          if (in_r_valid && in_s_valid) begin
            meta_r     <= in_r_beat.meta;
            meta_s     <= in_s_beat.meta;
            ld_r       <= '0;
            ld_s       <= '0;
            both_leaf  <= in_r_beat.meta.is_leaf && in_s_beat.meta.is_leaf;
            use_node_r <= in_r_beat.meta.is_leaf && !in_s_beat.meta.is_leaf;
            use_node_s <= !in_r_beat.meta.is_leaf && in_s_beat.meta.is_leaf;
            out_cnt    <= '0;
            state      <= S_DATA;
          end else if (finish) begin
            state <= S_END;
          end
        end
        S_DATA: begin
          if (in_r_pop) begin
            ld_r       <= ld_r + 1'b1;
            node_mbr_r <= (ld_r == '0) ? in_r_beat.entry.mbr
                                       : mbr_union(node_mbr_r, in_r_beat.entry.mbr);
          end
          if (in_s_pop) begin
            ld_s       <= ld_s + 1'b1;
            node_mbr_s <= (ld_s == '0) ? in_s_beat.entry.mbr
                                       : mbr_union(node_mbr_s, in_s_beat.entry.mbr);
          end
          if ((ld_r + CNT_W'(in_r_pop)) == meta_r.count &&
              (ld_s + CNT_W'(in_s_pop)) == meta_s.count) begin
            ai           <= '0;
            aj           <= '0;
            issuing_done <= (meta_r.count == '0) || (meta_s.count == '0);
            state        <= S_JOIN;
          end
        end
        S_JOIN: begin
          if (issue) begin
            // the whole-leaf side is not iterated
            if (use_node_r) begin
              aj <= aj + 1'b1;
              if (aj == last_j) issuing_done <= 1'b1;
            end else if (use_node_s) begin
              ai <= ai + 1'b1;
              if (ai == last_i) issuing_done <= 1'b1;
            end else if (aj == last_j) begin
              aj <= '0;
              ai <= ai + 1'b1;
              if (ai == last_i) issuing_done <= 1'b1;
            end else begin
              aj <= aj + 1'b1;
            end
          end
          if (issuing_done) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (!a_v && !b_v) state <= S_FLUSH;
          else if (!a_v && adv) state <= S_FLUSH;  // last pair leaves stage B now
        end
        S_FLUSH: begin
          if (flush_ready) begin
            pair_done <= 1'b1;
            state     <= S_CHECK;
          end
        end
        S_CHECK: begin
          state <= finish ? S_END : S_META;
        end
        S_END: ;
        default: state <= S_META;
      endcase
    end
  end

  a_meta_first_r: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_META && in_r_pop) |-> in_r_beat.is_meta);
  a_meta_first_s: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_META && in_s_pop) |-> in_s_beat.is_meta);
  a_count_fits: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_META && in_r_pop) |->
      (in_r_beat.meta.count <= CNT_W'(MAX_ENTRIES) && in_s_beat.meta.count <= CNT_W'(MAX_ENTRIES)));
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_pair)));
endmodule
