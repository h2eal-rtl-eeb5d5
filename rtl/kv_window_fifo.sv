// kv_window_fifo: the sliding window of local tokens kept in the logic bank.
//
// A circular buffer of DEPTH (K,V) token vectors. New tokens are pushed at the
// tail; the oldest token is visible at the head (pop_k/pop_v) and is removed
// with `pop`. The bank controller pops a whole page (PAGE tokens back to back)
// once the window is full, so the window always holds between DEPTH-PAGE and
// DEPTH of the most recent tokens; the popped page goes to the memory die.
// Any stored token can be read combinationally by its age (rd_idx 0 = oldest)
// so the attention engine can sweep the window.
//
// Interface: push and pop may be asserted in the same cycle. Pushing into a
// full window or popping an empty one is a protocol error (asserted).
// Timing: all reads are combinational, writes take effect at the clock edge.
//
// The paper gives the function (a FIFO of local tokens whose popped tokens go
// to the memory die); depth, page-wise popping and the read port are choices
// of this design.
module kv_window_fifo #(
  parameter int unsigned D     = h2eal_pkg::HEAD_DIM,
  parameter int unsigned DEPTH = h2eal_pkg::WIN_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           push,
  input  logic [D*8-1:0] push_k,
  input  logic [D*8-1:0] push_v,
  input  logic           pop,
  output logic [D*8-1:0] pop_k,
  output logic [D*8-1:0] pop_v,
  output logic [CW-1:0]  count,
  output logic           full,
  input  logic [AW-1:0]  rd_idx,
  output logic [D*8-1:0] rd_k,
  output logic [D*8-1:0] rd_v
);
  logic [D*8-1:0] kmem [DEPTH];
  logic [D*8-1:0] vmem [DEPTH];
  logic [AW-1:0]  head, tail;

  function automatic logic [AW-1:0] wrap(input logic [AW:0] a);
    return (a >= (AW+1)'(DEPTH)) ? AW'(a - (AW+1)'(DEPTH)) : AW'(a);
  endfunction

  assign full  = (count == CW'(DEPTH));
  assign pop_k = kmem[head];
  assign pop_v = vmem[head];
  assign rd_k  = kmem[wrap({1'b0, head} + {1'b0, rd_idx})];
  assign rd_v  = vmem[wrap({1'b0, head} + {1'b0, rd_idx})];

  always_ff @(posedge clk) begin
    if (push) begin
      kmem[tail] <= push_k;
      vmem[tail] <= push_v;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
    end else begin
      if (push) tail <= wrap({1'b0, tail} + 1'b1);
      if (pop)  head <= wrap({1'b0, head} + 1'b1);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> (count != 0));
endmodule
