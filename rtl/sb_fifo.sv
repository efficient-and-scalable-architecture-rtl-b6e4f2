// sb_fifo: synchronous show-ahead FIFO. It is used for every queue of the
// chip: the RX queues behind the receive PHYs, the TX queues in front of the
// transmit PHYs, and the queues between the TE, MM and TX modules.
//
// Interface: push/din write one word; dout always shows the oldest word while
// empty is low, and pop removes it. A push and a pop may happen in the same
// cycle, also when the FIFO is full (the pop frees the slot). count is the
// number of stored words. Pushing into a full FIFO or popping an empty one is
// a protocol error, caught by assertions.
// Timing: a pushed word is visible at dout the cycle after the push.
// The paper only names these queues; depth, width and the show-ahead
// behaviour are this design's choice.
//
// Lint note: verilator's SYNCASYNCNET warning on rst_n comes from the
// assertions, which use rst_n in 'disable iff'; every flop uses rst_n only
// as an asynchronous reset, so the warning is expected.
module sb_fifo #(
  parameter int unsigned W     = 128,
  parameter int unsigned DEPTH = 256
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           push,
  input  logic [W-1:0]                   din,
  input  logic                           pop,
  output logic [W-1:0]                   dout,
  output logic                           empty,
  output logic                           full,
  output logic [$clog2(DEPTH+1)-1:0]     count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] a);
    return (a == AW'(DEPTH-1)) ? '0 : a + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= inc(wptr);
      if (pop)  rptr <= inc(rptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= din;
  end

  // Handshake rules of the queue.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
