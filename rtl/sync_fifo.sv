// Shallow synchronous FIFO with first-word fall-through.
//
// dout shows the oldest entry whenever empty is low; pop removes it. A push
// while full or a pop while empty is a protocol error (asserted). Push and
// pop may happen in the same cycle. Used for the NoC router input queues
// and for the decoupling queues of the HLS wrapper, which the paper describes
// as "a set of shallow FIFO queues"; depth and storage style are this
// design's choice.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         full,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  assign full  = (cnt_q == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty = (cnt_q == '0);
  assign count = cnt_q;
  assign dout  = mem[rd_q];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= incr(wr_q);
      if (pop)  rd_q <= incr(rd_q);
      cnt_q <= cnt_q + $bits(cnt_q)'(push) - $bits(cnt_q)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_q] <= din;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
