// sync_fifo: single-clock FIFO, used as the request queue (12 entries) and
// the response queue (64 entries) of an LLC slice.
//
// A word is written when push is high and the FIFO is not full, and the
// head word is removed when pop is high and the FIFO is not empty. dout
// always shows the head word (first-word fall-through), so a consumer sees
// a pushed word one cycle after the push. Depth need not be a power of
// two. Reset empties the FIFO; the storage itself is not reset.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 12
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     dout,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty = (count == '0);
  assign dout  = mem[rptr];

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= nxt(wptr);
      if (do_pop)  rptr <= nxt(rptr);
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
  end

`ifndef SYNTHESIS
  // An overflowing push or an underflowing pop is a caller error.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);
`endif
endmodule
