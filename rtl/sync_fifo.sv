// sync_fifo: single-clock first-in first-out buffer with a show-ahead output.
//
// The accelerator's blocks talk through FIFOs, like pipes in software. This
// one stores DEPTH words of WIDTH bits in an array (a block RAM on an FPGA).
// The head word is visible on rd_data whenever rd_valid is high; rd_en pops
// it. wr_en with wr_ready pushes a word. A push and a pop may happen in the
// same cycle. count gives the number of stored words. Reset empties it.
// Timing: a word pushed in one cycle is at the head in the next.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             wr_ready,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_valid,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign wr_ready = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rp];
  assign do_wr    = wr_en && wr_ready;
  assign do_rd    = rd_en && rd_valid;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      if (do_wr && !do_rd)      count <= count + 1'b1;
      else if (do_rd && !do_wr) count <= count - 1'b1;
    end
  end

  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) wr_en |-> wr_ready;
  endproperty
  property p_no_underflow;
    @(posedge clk) disable iff (!rst_n) rd_en |-> rd_valid;
  endproperty
  a_no_overflow:  assert property (p_no_overflow);
  a_no_underflow: assert property (p_no_underflow);
endmodule
