// queue_controller: approximate bandwidth partitioning between the sub-block
// queue and the page queue of a DaeMon engine.
//
// The controller walks a fixed round of LINE_SLOTS cache-line slots followed
// by one page slot. In a cache-line slot it issues the head of the sub-block
// queue, in the page slot the head of the page queue. A slot whose queue is
// empty is skipped without issuing anything, so the ratio holds even when one
// queue is empty (the link may then stay idle for a cycle). A slot whose queue
// holds a request waits until the consumer takes it (out_ready). A page
// slot is also skipped while pg_hold is high (the memory engine raises it
// while its page path is still busy with the previous page), so cache lines
// are not held up behind a page that cannot be served yet.
//
// LINE_SLOTS follows the paper's formula: with a bandwidth share RATIO_PCT for
// cache lines, 64 B lines and 4 KB pages, the controller serves
// (4096/64) * 0.25 / (1 - 0.25) = 21 cache-line requests per page request
// (integer division, as the paper's "approximately 21"). The slot walk, the
// skipping of one slot per cycle and the handshake are this design's choices.
//
// Interface: the two queue heads come in (head, empty), the controller pops
// the queue it issued from in the same cycle as out_valid && out_ready.
// out_page tells which queue the issued request came from. Latency: zero
// cycles from queue head to out_valid.
module queue_controller
  import daemon_pkg::*;
#(
  parameter int unsigned RATIO_PCT  = 25,
  parameter int unsigned LINE_SLOTS = (PAGE_BYTES / LINE_BYTES) * RATIO_PCT / (100 - RATIO_PCT)
) (
  input  logic clk,
  input  logic rst_n,
  // sub-block queue head
  input  logic sb_empty,
  input  req_t sb_head,
  output logic sb_pop,
  // page queue head
  input  logic pg_empty,
  input  logic pg_hold,   // consumer cannot take a page now: skip the slot
  input  req_t pg_head,
  output logic pg_pop,
  // issued request
  output logic out_valid,
  output logic out_page,
  output req_t out_req,
  input  logic out_ready
);
  localparam int unsigned SW = $clog2(LINE_SLOTS + 1);
  logic [SW-1:0] slot;
  logic          page_slot, fire, advance;

  assign page_slot = (slot == SW'(LINE_SLOTS));
  assign out_page  = page_slot;
  assign out_valid = page_slot ? (!pg_empty && !pg_hold) : !sb_empty;
  assign out_req   = page_slot ? pg_head : sb_head;
  assign fire      = out_valid && out_ready;
  assign sb_pop    = fire && !page_slot;
  assign pg_pop    = fire &&  page_slot;
  // Move to the next slot after issuing, or at once if the slot's queue is empty.
  assign advance   = fire || !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       slot <= '0;
    else if (advance) slot <= page_slot ? '0 : slot + 1'b1;
  end
endmodule
