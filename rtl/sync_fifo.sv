// sync_fifo: the sub-block queue and the page queue of a DaeMon engine (also
// used as a plain storage FIFO elsewhere).
//
// A synchronous first-in first-out queue held in an array (an SRAM in the
// paper). A request is written when push is high and the queue is not full;
// the oldest entry is always visible on dout while empty is low and is removed
// by pop. Push and pop may happen in the same cycle, also when full. count
// reports the occupancy. No bypass: a pushed entry is visible the next cycle.
//
// From the paper: the queues are SRAM FIFOs with 128 (sub-block) and 256
// (page) entries in the compute engine and 512 / 1024 entries in the memory
// engine. Width, handshake and the zero-latency read port are this design's
// choices.
module sync_fifo #(
  parameter int unsigned W     = 38,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [W-1:0]  din,
  input  logic          pop,
  output logic [W-1:0]  dout,
  output logic          empty,
  output logic          full,
  output logic [AW:0]   count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic          do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= incr(wr_ptr);
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  // A push into a full queue without a pop is dropped; the user must not do it.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
endmodule
