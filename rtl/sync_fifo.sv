// sync_fifo: single-clock FIFO used for the Vaddr queues, the output buffers and the queues
// between pipeline stages.
//
// DEPTH entries of type T held in an array. push is ignored when full, pop when empty.
// rdata shows the head entry and rdata2 the entry behind it (the Acc CTR looks at both to pair
// two tasks on one page). count is the number of entries held. Push and pop take effect at the
// clock edge; a pushed entry is visible at the head the cycle after. Synchronous active-low reset
// empties the FIFO.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     wdata,
  input  logic pop,
  output T     rdata,
  output T     rdata2,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] rptr, wptr, rptr1;

  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty = (count == '0);
  assign rptr1 = (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
  assign rdata  = mem[rptr];
  assign rdata2 = mem[rptr1];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= rptr1;
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
    end
  end
endmodule
