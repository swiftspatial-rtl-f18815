// tb_join_unit: self-checking test of one join unit at the default node size
// (16 entries).
//
// The testbench plays both input FIFOs and the burst buffer. For random node
// pairs of every kind (leaf-leaf, directory-directory, leaf-directory,
// directory-leaf, and an empty node) it computes the expected output list
// itself: the nested loop over R entries (outer) and S entries (inner), or,
// in the mixed case, the whole leaf node's bounding box against each child,
// keeping the pairs whose rectangles intersect. It checks every output pair,
// its result/task selection, the count reported with pair_done, one flush
// per node pair, and the finish signal. With the output always ready it
// checks the paper's rate: a c_r x c_s join, loading included, must finish
// within c_r*c_s + max(c_r, c_s) + 8 cycles of the headers being taken.
// Coordinates include negative values to exercise the float ordering.
module tb_join_unit;
  import ss_pkg::*;

  localparam int unsigned MAX_ENTRIES = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        in_r_valid, in_s_valid, in_r_pop, in_s_pop;
  node_beat_t  in_r_beat, in_s_beat;
  logic        out_valid, out_is_result, out_ready;
  pair_t       out_pair;
  logic        flush_valid, flush_ready, pair_done, finish, idle, ended;
  logic [15:0] pair_out_count;

  join_unit #(.MAX_ENTRIES(MAX_ENTRIES)) dut (.*);

  // the testbench queues feed two real FIFOs, written on the falling edge
  node_beat_t qr[$], qs[$];
  logic       wr_r, wr_s, rdy_r, rdy_s;
  node_beat_t wd_r, wd_s;
  always @(negedge clk) begin
    wr_r = 1'b0; wr_s = 1'b0;
    if (qr.size() > 0 && rdy_r) begin wr_r = 1'b1; wd_r = qr.pop_front(); end
    if (qs.size() > 0 && rdy_s) begin wr_s = 1'b1; wd_s = qs.pop_front(); end
  end
  sync_fifo #(.WIDTH($bits(node_beat_t)), .DEPTH(32)) u_fr (
    .clk, .rst_n, .wr_en(wr_r), .wr_data(wd_r), .wr_ready(rdy_r),
    .rd_en(in_r_pop), .rd_data(in_r_beat), .rd_valid(in_r_valid), .count());
  sync_fifo #(.WIDTH($bits(node_beat_t)), .DEPTH(32)) u_fs (
    .clk, .rst_n, .wr_en(wr_s), .wr_data(wd_s), .wr_ready(rdy_s),
    .rd_en(in_s_pop), .rd_data(in_s_beat), .rd_valid(in_s_valid), .count());

  // float from a signed integer (|n| < 2^24)
  function automatic coord_t i2f(input int n);
    int a, e;
    logic [31:0] m;
    if (n == 0) return '0;
    a = (n < 0) ? -n : n;
    e = 0;
    for (int k = 0; k < 24; k++) if (a >= (1 << k)) e = k;
    m = (32'(a) << (23 - e)) & 32'h007F_FFFF;
    return {(n < 0), 8'(127 + e), m[22:0]};
  endfunction

  typedef struct { int l, r, b, t, k, f; int id; } box_t;

  function automatic bit isect(input box_t a, input box_t b);
    return (a.r >= b.l) && (b.r >= a.l) && (a.t >= b.b) && (b.t >= a.b) &&
           (a.f >= b.k) && (b.f >= a.k);
  endfunction

  function automatic node_beat_t ebeat(input box_t x);
    node_beat_t nb;
    nb = '0;
    nb.entry.mbr = '{left: i2f(x.l), right: i2f(x.r), bottom: i2f(x.b), top: i2f(x.t),
                     back: i2f(x.k), front: i2f(x.f)};
    nb.entry.id  = id_t'(x.id);
    return nb;
  endfunction

  function automatic box_t rbox(input int id, input bit three_d);
    box_t x;
    x.l = $urandom_range(0, 200) - 100; x.r = x.l + $urandom_range(0, 30);
    x.b = $urandom_range(0, 200) - 100; x.t = x.b + $urandom_range(0, 30);
    if (three_d) begin
      x.k = $urandom_range(0, 200) - 100; x.f = x.k + $urandom_range(0, 60);
    end else begin
      x.k = 0; x.f = 0;
    end
    x.id = id;
    return x;
  endfunction

  function automatic box_t ubox(input box_t xs[$], input int id);
    box_t u;
    u = xs[0];
    foreach (xs[k]) begin
      if (xs[k].l < u.l) u.l = xs[k].l;  if (xs[k].r > u.r) u.r = xs[k].r;
      if (xs[k].b < u.b) u.b = xs[k].b;  if (xs[k].t > u.t) u.t = xs[k].t;
      if (xs[k].k < u.k) u.k = xs[k].k;  if (xs[k].f > u.f) u.f = xs[k].f;
    end
    u.id = id;
    return u;
  endfunction

  pair_t exp_q[$];
  bit    exp_sel;
  int    n_flush;
  bit    random_ready;

  always @(posedge clk) out_ready <= random_ready ? ($urandom_range(0, 2) != 0) : 1'b1;
  assign flush_ready = 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output %h", out_pair);
      end else begin
        if (out_pair != exp_q[0] || out_is_result != exp_sel) begin
          failures++;
          $display("FAIL: got %h sel %0d, expected %h sel %0d", out_pair, out_is_result, exp_q[0], exp_sel);
        end
        void'(exp_q.pop_front());
      end
    end
    if (flush_valid && flush_ready) n_flush++;
  end

  task automatic run_pair(input int cr, input int cs, input bit leaf_r, input bit leaf_s,
                          input bit three_d, input bit check_rate);
    box_t br[$], bs[$], nr, ns;
    node_beat_t m;
    int t0, t1, nexp, fl0;
    br.delete(); bs.delete(); exp_q.delete();
    for (int k = 0; k < cr; k++) br.push_back(rbox(1000 + k, three_d));
    for (int k = 0; k < cs; k++) bs.push_back(rbox(2000 + k, three_d));
    exp_sel = leaf_r && leaf_s;
    if (cr > 0 && cs > 0) begin
      if (leaf_r && !leaf_s) begin
        nr = ubox(br, 77);
        foreach (bs[j]) if (isect(nr, bs[j])) exp_q.push_back('{r: 77, s: id_t'(bs[j].id)});
      end else if (!leaf_r && leaf_s) begin
        ns = ubox(bs, 88);
        foreach (br[i]) if (isect(br[i], ns)) exp_q.push_back('{r: id_t'(br[i].id), s: 88});
      end else begin
        foreach (br[i]) foreach (bs[j])
          if (isect(br[i], bs[j])) exp_q.push_back('{r: id_t'(br[i].id), s: id_t'(bs[j].id)});
      end
    end
    nexp = exp_q.size();
    fl0  = n_flush;
    m = '0; m.is_meta = 1'b1;
    m.meta = '{is_leaf: leaf_r, count: CNT_W'(cr), ptr: 77};
    qr.push_back(m);
    foreach (br[i]) qr.push_back(ebeat(br[i]));
    m.meta = '{is_leaf: leaf_s, count: CNT_W'(cs), ptr: 88};
    qs.push_back(m);
    foreach (bs[j]) qs.push_back(ebeat(bs[j]));
    t0 = 0;
    do begin
      @(negedge clk);
      t0++;
    end while (!pair_done && t0 < 100000);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d expected outputs missing (%0dx%0d leaf %0d/%0d)", exp_q.size(), cr, cs, leaf_r, leaf_s);
    end
    checks++;
    if (int'(pair_out_count) != nexp) begin
      failures++;
      $display("FAIL: pair_out_count %0d, expected %0d", pair_out_count, nexp);
    end
    checks++;
    if (n_flush != fl0 + 1) begin
      failures++;
      $display("FAIL: %0d flushes for one node pair", n_flush - fl0);
    end
    if (check_rate) begin
      int c_join, c_load;
      c_join = (leaf_r && !leaf_s) ? cs : (!leaf_r && leaf_s) ? cr : cr * cs;
      c_load = (cr > cs) ? cr : cs;
      t1 = c_join + c_load + 8;
      checks++;
      if (t0 > t1 || t0 < c_join) begin
        failures++;
        $display("FAIL: %0dx%0d join took %0d cycles, allowed %0d..%0d", cr, cs, t0, c_join, t1);
      end else
        $display("%0dx%0d join: %0d cycles (%0d pairs), %0d outputs", cr, cs, t0, c_join, nexp);
    end
  endtask

  initial begin
    random_ready = 1'b0;
    finish = 1'b0;
    wr_r = 1'b0; wr_s = 1'b0; wd_r = '0; wd_s = '0;
    n_flush = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    // full rate, full nodes
    run_pair(16, 16, 1, 1, 0, 1);
    run_pair(16, 16, 0, 0, 0, 1);
    run_pair(8, 16, 1, 0, 1, 1);
    run_pair(16, 5, 0, 1, 1, 1);
    // random sizes and output stalls
    random_ready = 1'b1;
    for (int n = 0; n < 40; n++)
      run_pair($urandom_range(1, 16), $urandom_range(1, 16), $urandom_range(0, 1),
               $urandom_range(0, 1), $urandom_range(0, 1), 0);
    run_pair(0, 7, 1, 1, 0, 0);
    // finish ends the unit
    finish = 1'b1;
    repeat (4) @(posedge clk);
    checks++;
    if (!ended) begin
      failures++;
      $display("FAIL: finish did not end the unit");
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
