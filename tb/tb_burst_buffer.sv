// tb_burst_buffer: self-checking test of the burst buffer with a burst
// threshold of 8 pairs.
//
// The testbench acts as a join unit, writing groups of pairs (one group per
// node pair, all results or all tasks, with random gaps) and a flush after
// each group, and as a consumer that takes bursts at random moments. From the
// group sizes it works out the bursts that must appear: each group is cut
// into full bursts of 8 pairs and one shorter burst for the remainder (none if
// the remainder is zero). It checks each burst's length and kind, every pair
// in order, that back-pressure occurs when the buffer is full, and that the
// buffer reports empty at the end.
module tb_burst_buffer;
  import ss_pkg::*;

  localparam int unsigned BURST = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        in_valid, in_is_result, in_ready, flush_valid, flush_ready;
  pair_t       in_pair;
  logic        seg_valid, seg_is_result, seg_take, pop, empty;
  logic [15:0] seg_len;
  pair_t       head_pair;

  burst_buffer #(.BURST_PAIRS(BURST), .BUF_PAIRS(2*BURST), .SEG_DEPTH(4)) dut (.*);

  typedef struct { int len; bit res; } seg_t;
  seg_t  exp_seg[$];
  pair_t exp_data[$];
  int    n_full_stall, n_segs;
  bit    producer_done;

  // producer
  initial begin
    int n, id;
    bit res;
    in_valid = 1'b0; flush_valid = 1'b0; in_pair = '0; in_is_result = 1'b0;
    producer_done = 1'b0;
    id = 0;
    #1 rst_n = 1'b0;
    #20 rst_n = 1'b1;
    for (int g = 0; g < 60; g++) begin
      n   = (g % 7 == 0) ? 0 : $urandom_range(1, 3*BURST);
      res = $urandom_range(0, 1);
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        in_valid = 1'b1; in_pair = '{r: id_t'(g), s: id_t'(id++)}; in_is_result = res;
        exp_data.push_back(in_pair);
        if ((k % BURST) == BURST - 1) exp_seg.push_back('{len: BURST, res: res});
        do @(posedge clk); while (!in_ready);
        #1 in_valid = 1'b0;
        if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
      end
      if (n % BURST != 0) exp_seg.push_back('{len: n % BURST, res: res});
      @(negedge clk);
      flush_valid = 1'b1;
      do @(posedge clk); while (!flush_ready);
      #1 flush_valid = 1'b0;
    end
    producer_done = 1'b1;
  end

  always @(posedge clk) if (rst_n && in_valid && !in_ready) n_full_stall++;

  // consumer
  initial begin
    int left;
    seg_take = 1'b0; pop = 1'b0;
    n_segs = 0; n_full_stall = 0;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      seg_take = 1'b0; pop = 1'b0;
      if (seg_valid && $urandom_range(0, 3) == 0) begin
        checks++;
        if (exp_seg.size() == 0) begin
          failures++; $display("FAIL: unexpected burst of %0d", seg_len);
        end else begin
          if (int'(seg_len) != exp_seg[0].len || seg_is_result != exp_seg[0].res) begin
            failures++;
            $display("FAIL: burst len %0d kind %0d, expected %0d kind %0d",
                     seg_len, seg_is_result, exp_seg[0].len, exp_seg[0].res);
          end
          void'(exp_seg.pop_front());
        end
        n_segs++;
        left = int'(seg_len);
        seg_take = 1'b1;
        while (left > 0) begin
          pop = 1'b1;
          checks++;
          if (exp_data.size() == 0 || head_pair != exp_data[0]) begin
            failures++; $display("FAIL: pair %h, expected %h", head_pair, exp_data[0]);
          end
          void'(exp_data.pop_front());
          left--;
          @(negedge clk);
          seg_take = 1'b0;
          pop = 1'b0;
          if ($urandom_range(0, 1) == 0) @(negedge clk);
        end
      end
    end
  end

  initial begin
    wait (producer_done);
    repeat (2000) @(posedge clk);
    checks++;
    if (exp_seg.size() != 0 || exp_data.size() != 0 || !empty) begin
      failures++;
      $display("FAIL: %0d bursts / %0d pairs left, empty=%0d", exp_seg.size(), exp_data.size(), empty);
    end
    checks++;
    if (n_full_stall == 0) begin
      failures++; $display("FAIL: the buffer never pushed back");
    end
    $display("%0d bursts, %0d full-buffer stall cycles", n_segs, n_full_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
