// selection_granularity_unit: decides, for each remote data request of the
// CPU, whether the compute engine moves the cache line, the whole page, both
// or neither.
//
// Decision (all combinational, one request per cycle):
//  * Page: requested only if the page has no entry in the inflight page buffer
//    and that buffer (and the page queue) has room.
//  * Line, page not yet inflight: always requested.
//  * Line, page already inflight: requested only if the sub-block buffer is
//    less utilized than the page buffer AND the page is still waiting in the
//    page queue (state scheduled). Otherwise the request is dropped: the page
//    will bring the line.
//  * A line whose request is already in flight is never requested twice.
// Utilization is compared as a fraction of each buffer's capacity
// (count_sb / SB_ENTRIES < count_pg / PG_ENTRIES, evaluated without
// division). If a line must be requested but the sub-block queue or buffer
// has no room, the request is stalled (req_ready low) rather than lost.
//
// Outputs do_page / do_line are the write strobes for the page queue plus
// inflight page buffer and the sub-block queue plus inflight sub-block
// buffer; dec_* classify the accepted request for statistics.
//
// From the paper: the rules above (Section 4.2). The fractional comparison,
// the stall on a full sub-block path and the interpretation of "not already
// in the process of migration (i.e., the page is in the page queue)" as state
// scheduled are this design's reading of the text.
module selection_granularity_unit
  import daemon_pkg::*;
#(
  parameter int unsigned SB_ENTRIES = 128,
  parameter int unsigned PG_ENTRIES = 256,
  localparam int unsigned SBW = $clog2(SB_ENTRIES),
  localparam int unsigned PGW = $clog2(PG_ENTRIES)
) (
  input  logic        req_valid,
  output logic        req_ready,
  // inflight page buffer view of the requested page
  input  logic        pg_hit,
  input  pg_state_e   pg_state,
  input  logic        pg_full,
  input  logic [PGW:0] pg_count,
  input  logic        pq_full,
  // inflight sub-block buffer view of the requested line
  input  logic        sb_page_hit,
  input  logic        sb_line_hit,
  input  logic        sb_full,
  input  logic [SBW:0] sb_count,
  input  logic        sbq_full,
  // actions
  output logic        do_page,
  output logic        do_line,
  output logic        dec_both,
  output logic        dec_line_only,
  output logic        dec_page_only,
  output logic        dec_drop
);
  logic sched_page, want_line, need_line, line_ok, stall, sb_less;
  logic [SBW+PGW+1:0] sb_frac, pg_frac;

  always_comb begin
    sb_frac    = (SBW+PGW+2)'(sb_count) * (SBW+PGW+2)'(PG_ENTRIES);
    pg_frac    = (SBW+PGW+2)'(pg_count) * (SBW+PGW+2)'(SB_ENTRIES);
    sb_less    = sb_frac < pg_frac;
    sched_page = !pg_hit && !pg_full && !pq_full;
    want_line  = !pg_hit || (sb_less && pg_state == PG_SCHEDULED);
    need_line  = want_line && !sb_line_hit;
    line_ok    = !sbq_full && (sb_page_hit || !sb_full);
    stall      = need_line && !line_ok;
    req_ready  = !stall;
    do_page    = req_valid && !stall && sched_page;
    do_line    = req_valid && !stall && need_line;
    dec_both      = do_page && do_line;
    dec_line_only = do_line && !do_page;
    dec_page_only = do_page && !do_line;
    dec_drop      = req_valid && !stall && !do_page && !do_line;
  end
endmodule
