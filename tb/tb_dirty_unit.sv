// tb_dirty_unit: self-checking testbench for the dirty unit (dirty data
// buffer of 256 lines, throttle threshold 8 lines per page) together with
// the inflight page buffer it reads and updates.
//
// How: the testbench allocates pages in the page buffer (scheduled, some
// moved) and sends dirty LLC evictions with random data to inflight and
// non-inflight pages. A reference model of the rules keeps the parked lines
// per page and predicts every write to remote memory (wb_*) and every line
// written to local memory at a page flush (lm_*). Produced and predicted
// lines are compared as sets after each operation, together with the buffer
// occupancy, the page state (throttled after more than 8 dirty lines or a
// full buffer) and the dirty vector. The wb/lm consumers apply random
// back-pressure. A phase with 40 pages x 8 lines fills the whole buffer.
// Inputs change on the falling edge.
`timescale 1ns/1ps
module tb_dirty_unit;
  import daemon_pkg::*;
  logic clk = 0, rst_n = 0;
  // dirty unit
  logic ev_valid = 0, ev_ready, hold = 0;
  line_addr_t ev_addr = '0;
  line_data_t ev_data = '0;
  page_addr_t c_page;
  logic c_hit, dw_valid, dw_throttle;
  pg_state_e c_state;
  logic [7:0] c_idx, dw_idx;
  logic [63:0] c_dirty;
  line_off_t dw_off;
  logic fl_valid = 0, fl_ready, fl_done, lm_valid, lm_ready = 1, wb_valid, wb_ready = 1;
  page_addr_t fl_page = '0;
  line_addr_t lm_addr, wb_addr;
  line_data_t lm_data, wb_data;
  logic [8:0] count;
  logic st_buffered, st_direct, st_throttle;
  // page buffer control from the testbench
  page_addr_t a_page = '0, b_page = '0, al_page = '0, mv_page = '0;
  logic a_hit, b_hit, pb_full, al_valid = 0, mv_valid = 0, rxw_valid = 0;
  pg_state_e a_state, b_state, rxw_state = PG_INVALID;
  logic [7:0] b_idx, rxw_idx = '0;
  logic [8:0] pb_count;

  dirty_unit dut (.*);
  inflight_page_buffer u_pb (
    .clk, .rst_n, .a_page, .a_hit, .a_state, .b_page, .b_hit, .b_state, .b_idx,
    .c_page, .c_hit, .c_state, .c_idx, .c_dirty,
    .al_valid, .al_page, .mv_valid, .mv_page, .rxw_valid, .rxw_idx, .rxw_state,
    .dw_valid, .dw_idx, .dw_throttle, .dw_off, .full(pb_full), .count(pb_count));

  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #50_000_000; $display("WATCHDOG timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s @%0t", msg, $time); end
  endtask

  // model
  line_data_t parked[line_addr_t];       // parked lines
  pg_state_e  mstate[page_addr_t];       // pages allocated in the page buffer
  line_data_t exp_wb[line_addr_t], exp_lm[line_addr_t];
  line_data_t got_wb[line_addr_t], got_lm[line_addr_t];
  int n_buf = 0, n_dir = 0, n_thr = 0, n_full_thr = 0, n_lm = 0, n_over = 0;

  always @(posedge clk) begin
    if (wb_valid && wb_ready) begin
      check(!got_wb.exists(wb_addr), "line written back twice");
      got_wb[wb_addr] = wb_data;
    end
    if (lm_valid && lm_ready) begin
      check(!got_lm.exists(lm_addr), "line flushed twice");
      got_lm[lm_addr] = lm_data;
    end
    if (st_buffered) n_buf++;
    if (st_direct) n_dir++;
    if (st_throttle) n_thr++;
  end
  always @(negedge clk) begin
    wb_ready <= ($urandom_range(3) != 0);
    lm_ready <= ($urandom_range(3) != 0);
  end

  function automatic int parked_of(input page_addr_t p);
    int n = 0;
    foreach (parked[a]) if (a.page == p) n++;
    return n;
  endfunction

  task automatic wait_idle();
    int t = 0;
    do begin @(posedge clk); t++; end while ((dut.state != 0 || wb_valid || lm_valid) && t < 10000);
    @(negedge clk);
  endtask

  task automatic compare(input string tag);
    check(got_wb.num() == exp_wb.num(), $sformatf("%s: write-back count %0d vs %0d", tag, got_wb.num(), exp_wb.num()));
    foreach (exp_wb[a]) check(got_wb.exists(a) && got_wb[a] == exp_wb[a], $sformatf("%s: write-back line %0h", tag, a));
    check(got_lm.num() == exp_lm.num(), $sformatf("%s: local count %0d vs %0d", tag, got_lm.num(), exp_lm.num()));
    foreach (exp_lm[a]) check(got_lm.exists(a) && got_lm[a] == exp_lm[a], $sformatf("%s: local line %0h", tag, a));
    check(count == parked.num(), $sformatf("%s: occupancy %0d vs %0d", tag, count, parked.num()));
    got_wb.delete(); exp_wb.delete(); got_lm.delete(); exp_lm.delete();
  endtask

  task automatic alloc(input page_addr_t p, input bit moved);
    @(negedge clk);
    al_valid = 1; al_page = p;
    @(negedge clk);
    al_valid = 0;
    mstate[p] = PG_SCHEDULED;
    if (moved) begin
      mv_valid = 1; mv_page = p;
      @(negedge clk);
      mv_valid = 0;
      mstate[p] = PG_MOVED;
    end
  endtask

  task automatic evict(input line_addr_t a);
    bit infl, present, over;
    int nd;
    line_data_t d;
    d = {16{$urandom}};
    infl    = mstate.exists(a.page) && (mstate[a.page] == PG_SCHEDULED || mstate[a.page] == PG_MOVED);
    present = parked.exists(a);
    nd      = parked_of(a.page) + (present ? 0 : 1);
    over    = nd > 8 || (!present && parked.num() == 256);
    if (!infl) exp_wb[a] = d;
    else if (over) begin
      foreach (parked[x]) if (x.page == a.page) exp_wb[x] = parked[x];
      foreach (exp_wb[x]) parked.delete(x);
      exp_wb[a] = d;
      mstate[a.page] = PG_THROTTLED;
      n_over++;
      if (nd <= 8) n_full_thr++;
    end else parked[a] = d;
    ev_valid = 1; ev_addr = a; ev_data = d;
    do @(posedge clk); while (!ev_ready);
    @(negedge clk);
    ev_valid = 0;
    wait_idle();
    // page state and dirty vector as seen by the page buffer
    a_page = a.page;
    b_page = a.page;
    #1;
    if (mstate.exists(a.page)) begin
      check(a_hit && a_state == mstate[a.page], "page state after eviction");
      if (infl && !over) check(c_dirty[a.off] || dut.c_page != a.page, "dirty bit");
    end
    compare("evict");
  endtask

  task automatic flush(input page_addr_t p);
    foreach (parked[x]) if (x.page == p) exp_lm[x] = parked[x];
    foreach (exp_lm[x]) parked.delete(x);
    fl_valid = 1; fl_page = p;
    do @(posedge clk); while (!fl_ready);
    @(negedge clk);
    fl_valid = 0;
    begin
      int t = 0;
      while (!fl_done && t < 10000) begin @(posedge clk); t++; end
      check(fl_done, "flush done pulse");
    end
    @(negedge clk);
    n_lm += exp_lm.num();
    compare("flush");
    // the receive path frees the page entry after the flush
    b_page = p; #1;
    if (b_hit) begin
      rxw_valid = 1; rxw_idx = b_idx; rxw_state = PG_INVALID;
      @(negedge clk);
      rxw_valid = 0;
    end
    mstate.delete(p);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Phase 1: random mix on 20 pages
    for (int p = 0; p < 20; p++) alloc(page_addr_t'(p), p % 2);
    for (int i = 0; i < 600; i++) begin
      line_addr_t a;
      a.page = page_addr_t'($urandom_range(29));   // 20..29 never inflight
      a.off  = line_off_t'($urandom_range(11));
      evict(a);
      if ($urandom_range(40) == 0) begin
        page_addr_t p = page_addr_t'($urandom_range(19));
        if (mstate.exists(p) && mstate[p] != PG_THROTTLED) begin
          flush(p);
          alloc(p, $urandom_range(1));
        end
      end
    end
    foreach (mstate[p]) if (mstate[p] != PG_THROTTLED) flush(p);
    // Phase 2: fill the buffer: 40 pages x 8 lines (the 33rd page finds it full)
    for (int p = 100; p < 140; p++) alloc(page_addr_t'(p), 1);
    for (int p = 100; p < 140; p++)
      for (int o = 0; o < 8; o++) begin
        line_addr_t a;
        a.page = page_addr_t'(p);
        a.off  = line_off_t'(o * 3);
        evict(a);
      end
    check(n_full_thr > 0, "throttle on a full buffer");
    for (int p = 100; p < 140; p++) if (mstate.exists(page_addr_t'(p)) && mstate[page_addr_t'(p)] != PG_THROTTLED) flush(page_addr_t'(p));
    check(count == 0, "buffer empty at end");
    check(n_buf > 0 && n_dir > 0 && n_thr > 0 && n_lm > 0, "all outcomes exercised");
    $display("buffered=%0d direct=%0d throttled=%0d (full-buffer %0d) flushed lines=%0d",
             n_buf, n_dir, n_thr, n_full_thr, n_lm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
