// ap_fifo: small synchronous FIFO used for the word queues, info queues and
// index-line queue of the converters. Push when push && !full, pop when
// pop && !empty; data at the head is visible combinationally (first-word
// fall-through). Depth must be a power of two.
//
// The published design names decoupling queues but gives no depth or style;
// this first-word-fall-through FIFO is this design's own.
module ap_fifo #(
  parameter int unsigned Depth = 4,
  parameter type         T     = logic [31:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic push_i,
  input  T     data_i,
  output logic full_o,
  input  logic pop_i,
  output T     data_o,
  output logic empty_o,
  output logic [$clog2(Depth):0] count_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  T mem_q [Depth];
  logic [PtrW-1:0] wptr_q, rptr_q;
  logic [$clog2(Depth):0] cnt_q;

  logic do_push, do_pop;
  assign full_o  = (cnt_q == Depth[$clog2(Depth):0]);
  assign empty_o = (cnt_q == '0);
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;
  assign data_o  = mem_q[rptr_q];
  assign count_o = cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (do_push) wptr_q <= (Depth > 1) ? PtrW'(wptr_q + 1'b1) : '0;
      if (do_pop)  rptr_q <= (Depth > 1) ? PtrW'(rptr_q + 1'b1) : '0;
      cnt_q <= cnt_q + {{$clog2(Depth){1'b0}}, do_push} - {{$clog2(Depth){1'b0}}, do_pop};
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_push) mem_q[wptr_q] <= data_i;
  end

  // the request regulators upstream guarantee that no queue is pushed when full
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push_i && full_o))
    else $error("ap_fifo: push into full FIFO");
endmodule
