// tb_selection_granularity_unit: self-checking testbench for the selection
// granularity unit (the decision of what to move for one LLC miss).
//
// How: the unit is combinational. The testbench drives random views of the
// two inflight buffers and queues (hit flags, page state, fullness and
// occupancy counts up to the paper's 128 / 256 entries) and compares every
// output with the decision rules written out independently here:
//   * page not inflight -> schedule the page (if buffer and queue have room)
//     and always the cache line;
//   * page inflight and still scheduled -> the cache line only if the
//     sub-block buffer is relatively less full than the page buffer;
//   * page already moved / throttled -> nothing is sent;
//   * a cache line already inflight is never requested twice;
//   * a needed line with no room (queue or buffer) stalls the request.
// Directed cases cover each of the four outcomes (both, line only, page only,
// drop) at least once. 20 000 random vectors plus the directed ones.
`timescale 1ns/1ps
module tb_selection_granularity_unit;
  import daemon_pkg::*;
  logic req_valid, req_ready, pg_hit, pg_full, pq_full, sb_page_hit, sb_line_hit, sb_full, sbq_full;
  pg_state_e pg_state;
  logic [8:0] pg_count;
  logic [7:0] sb_count;
  logic do_page, do_line, dec_both, dec_line_only, dec_page_only, dec_drop;
  int checks = 0, failures = 0;
  int seen[4];

  selection_granularity_unit dut (.*);

  initial begin #20_000_000; $display("WATCHDOG timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic evaluate();
    bit sched_page, want_line, need_line, room, stall, e_page, e_line;
    #1;
    sched_page = !pg_hit && !pg_full && !pq_full;
    // relative fullness: sb_count/128 < pg_count/256
    want_line  = !pg_hit || (pg_state == PG_SCHEDULED && (sb_count * 256 < pg_count * 128));
    need_line  = want_line && !sb_line_hit;
    room       = !sbq_full && (sb_page_hit || !sb_full);
    stall      = need_line && !room;
    e_page     = req_valid && !stall && sched_page;
    e_line     = req_valid && !stall && need_line;
    check(req_ready == !stall, "req_ready");
    check(do_page == e_page, "do_page");
    check(do_line == e_line, "do_line");
    check(dec_both == (e_page && e_line), "dec_both");
    check(dec_line_only == (!e_page && e_line), "dec_line_only");
    check(dec_page_only == (e_page && !e_line), "dec_page_only");
    check(dec_drop == (req_valid && !stall && !e_page && !e_line), "dec_drop");
    if (dec_both) seen[0]++;
    if (dec_line_only) seen[1]++;
    if (dec_page_only) seen[2]++;
    if (dec_drop) seen[3]++;
  endtask

  task automatic set(input bit ph, input pg_state_e st, input bit pf, input bit qf,
                     input bit sph, input bit slh, input bit sf, input bit sqf,
                     input int sc, input int pc);
    req_valid = 1; pg_hit = ph; pg_state = st; pg_full = pf; pq_full = qf;
    sb_page_hit = sph; sb_line_hit = slh; sb_full = sf; sbq_full = sqf;
    sb_count = 8'(sc); pg_count = 9'(pc);
  endtask

  initial begin
    // directed: fresh page -> both
    set(0, PG_INVALID, 0, 0, 0, 0, 0, 0, 10, 10); evaluate(); check(dec_both, "fresh page: both");
    // fresh page, page buffer full -> line only
    set(0, PG_INVALID, 1, 0, 0, 0, 0, 0, 10, 256); evaluate(); check(dec_line_only, "page buffer full: line only");
    // scheduled page, sub-block buffer relatively emptier -> line only
    set(1, PG_SCHEDULED, 0, 0, 0, 0, 0, 0, 2, 100); evaluate(); check(dec_line_only, "scheduled, sb emptier: line only");
    // scheduled page, sub-block buffer relatively fuller -> drop
    set(1, PG_SCHEDULED, 0, 0, 0, 0, 0, 0, 100, 2); evaluate(); check(dec_drop, "scheduled, sb fuller: drop");
    // moved page -> drop
    set(1, PG_MOVED, 0, 0, 0, 0, 0, 0, 0, 100); evaluate(); check(dec_drop, "moved: drop");
    // fresh page, line already inflight -> page only
    set(0, PG_INVALID, 0, 0, 1, 1, 0, 0, 10, 10); evaluate(); check(dec_page_only, "line inflight: page only");
    // fresh page, sub-block queue full -> stall
    set(0, PG_INVALID, 0, 0, 0, 0, 0, 1, 10, 10); evaluate(); check(!req_ready && !do_page && !do_line, "no room: stall");
    for (int i = 0; i < 20000; i++) begin
      req_valid   = ($urandom_range(7) != 0);
      pg_hit      = $urandom_range(1);
      pg_state    = pg_state_e'($urandom_range(3));
      pg_full     = ($urandom_range(5) == 0);
      pq_full     = ($urandom_range(5) == 0);
      sb_page_hit = $urandom_range(1);
      sb_line_hit = sb_page_hit && $urandom_range(1);
      sb_full     = ($urandom_range(5) == 0);
      sbq_full    = ($urandom_range(5) == 0);
      sb_count    = 8'($urandom_range(128));
      pg_count    = 9'($urandom_range(256));
      evaluate();
    end
    for (int k = 0; k < 4; k++) check(seen[k] > 0, $sformatf("outcome %0d seen", k));
    $display("both=%0d line_only=%0d page_only=%0d drop=%0d", seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
