// tb_daemon_system: end-to-end test of one compute engine and one memory
// engine at their default sizes.
//
// Behavioural models stand in for the parts outside DaeMon: remote memory
// (content = gen(page, flit) until written, fixed read latency), local
// memory and the LLC (always ready, recorded), and the CPU (remote requests,
// dirty evictions, dirty page evictions). The test runs six phases:
//   A  lines of 40 fresh pages, plus second lines of the same pages
//   B  a few dirty evictions to an inflight page (parked, then flushed local)
//   C  nine dirty evictions to an inflight page (threshold: throttle,
//      flush to remote, page requested again)
//   D  dirty evictions to pages that are not inflight (straight to remote)
//   E  a dirty page eviction (compressed write-back)
//   F  a flood of requests to 300 fresh pages (full buffers: line-only
//      requests, stalls, dropped requests)
// A cache line that arrives after its page (and is ignored) cannot happen on
// this single in-order link; tb_compute_engine covers it by reordering.
// Every cache line delivered to the LLC and every page completed in local
// memory is compared with the models; remote memory is checked after the
// write-backs. Each mechanism must be seen at least once.
`timescale 1ns/1ps
module tb_daemon_system;
  import daemon_pkg::*;

  localparam int MEM_LAT = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic       cpu_req_valid, cpu_req_ready;
  line_addr_t cpu_req_addr;
  logic       llc_valid, llc_ready;
  line_addr_t llc_addr;
  line_data_t llc_data;
  logic       lm_valid, lm_ready;
  page_addr_t lm_page;
  logic [8:0] lm_flit;
  flit_t      lm_data;
  logic       lml_valid, lml_ready;
  line_addr_t lml_addr;
  line_data_t lml_data;
  logic       pd_valid;
  page_addr_t pd_page;
  logic       ev_valid, ev_ready;
  line_addr_t ev_addr;
  line_data_t ev_data;
  logic       pe_valid, pe_ready;
  page_addr_t pe_page;
  flit_t      pe_data;
  ce_stats_t  stats;
  logic       mr_valid, mr_ready;
  page_addr_t mr_page;
  logic [8:0] mr_flit;
  logic [9:0] mr_len;
  logic       md_valid, md_ready;
  flit_t      md_data;
  logic       mw_valid, mw_ready;
  page_addr_t mw_page;
  logic [8:0] mw_flit;
  flit_t      mw_data;

  daemon_system dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // ---------------- remote memory model ----------------
  function automatic flit_t gen(page_addr_t p, logic [8:0] f);
    return {p[15:0], 7'd0, f, 16'hC0DE, 8'(f[8:3]), 8'h5A};
  endfunction
  flit_t rmem [logic [40:0]];
  function automatic flit_t rmem_rd(page_addr_t p, logic [8:0] f);
    return rmem.exists({p, f}) ? rmem[{p, f}] : gen(p, f);
  endfunction

  logic       mr_busy;
  int         mr_wait, mr_left;
  page_addr_t mr_p;
  logic [8:0] mr_f;
  assign mr_ready = !mr_busy;
  assign md_valid = mr_busy && (mr_wait == 0);
  assign md_data  = rmem_rd(mr_p, mr_f);
  assign mw_ready = 1'b1;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mr_busy <= 1'b0; mr_wait <= 0; mr_left <= 0; mr_p <= '0; mr_f <= '0;
    end else if (!mr_busy) begin
      if (mr_valid) begin
        mr_busy <= 1'b1; mr_wait <= MEM_LAT; mr_left <= int'(mr_len);
        mr_p <= mr_page; mr_f <= mr_flit;
      end
    end else if (mr_wait != 0) begin
      mr_wait <= mr_wait - 1;
    end else if (md_ready) begin
      mr_f <= mr_f + 1'b1;
      mr_left <= mr_left - 1;
      if (mr_left == 1) mr_busy <= 1'b0;
    end
  end
  always @(posedge clk) if (mw_valid) rmem[{mw_page, mw_flit}] = mw_data;

  // ---------------- LLC and local memory models ----------------
  flit_t      lmem [logic [40:0]];
  line_data_t dirty_latest [line_addr_t];   // latest dirty data per line
  bit         page_local [page_addr_t];
  int         n_llc = 0, n_pd = 0;
  line_addr_t req_lines [$];

  assign llc_ready = 1'b1;
  assign lm_ready  = 1'b1;
  assign lml_ready = 1'b1;

  function automatic line_data_t rline(line_addr_t a);
    line_data_t d;
    for (int i = 0; i < 8; i++) d[i*64 +: 64] = rmem_rd(a.page, {a.off, 3'(i)});
    return d;
  endfunction

  always @(posedge clk) begin
    if (llc_valid && llc_ready) begin
      n_llc++;
      check(llc_data == rline(llc_addr), $sformatf("LLC line %h.%0d data", llc_addr.page, llc_addr.off));
    end
    if (lm_valid && lm_ready) lmem[{lm_page, lm_flit}] = lm_data;
    if (lml_valid && lml_ready)
      for (int i = 0; i < 8; i++) lmem[{lml_addr.page, lml_addr.off, 3'(i)}] = lml_data[i*64 +: 64];
    if (pd_valid) begin
      n_pd++;
      page_local[pd_page] = 1;
      // at page completion the local copy must hold the newest data
      for (int o = 0; o < 64; o++) begin
        line_addr_t la;
        line_data_t exp, got;
        la = '{page: pd_page, off: 6'(o)};
        exp = dirty_latest.exists(la) ? dirty_latest[la] : rline(la);
        for (int i = 0; i < 8; i++) got[i*64 +: 64] = lmem.exists({pd_page, 6'(o), 3'(i)}) ? lmem[{pd_page, 6'(o), 3'(i)}] : '0;
        if (o == 0 || dirty_latest.exists(la) || got != exp)
          check(got == exp, $sformatf("local page %h line %0d", pd_page, o));
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int c_both, c_line_only, c_page_only, c_drop, c_stall, c_line_used, c_line_ign;
  int c_rereq, c_dbuf, c_ddirect, c_dthr, c_dlocal, c_pevict, c_reql, c_reqp;
  always @(posedge clk) if (rst_n) begin
    c_both      += int'(stats.sgu_both);
    c_line_only += int'(stats.sgu_line_only);
    c_page_only += int'(stats.sgu_page_only);
    c_drop      += int'(stats.sgu_drop);
    c_stall     += int'(stats.sgu_stall);
    c_line_used += int'(stats.line_used);
    c_line_ign  += int'(stats.line_ignored);
    c_rereq     += int'(stats.page_rerequest);
    c_dbuf      += int'(stats.dirty_buffered);
    c_ddirect   += int'(stats.dirty_direct);
    c_dthr      += int'(stats.dirty_throttle);
    c_dlocal    += int'(stats.dirty_to_local);
    c_pevict    += int'(stats.page_evicted);
    c_reql      += int'(stats.req_line_sent);
    c_reqp      += int'(stats.req_page_sent);
  end

  // ---------------- drivers ----------------
  // Inputs change on the falling edge only; a request stays asserted until
  // it is taken, and the next call (or req_idle) replaces it.
  task automatic request(input page_addr_t p, input int o);
    @(negedge clk);
    cpu_req_addr  = '{page: p, off: 6'(o)};
    cpu_req_valid = 1'b1;
    @(posedge clk);
    while (!cpu_req_ready) @(posedge clk);
  endtask

  task automatic req_idle();
    @(negedge clk);
    cpu_req_valid = 1'b0;
  endtask

  task automatic evict(input page_addr_t p, input int o);
    line_addr_t la;
    line_data_t d;
    la = '{page: p, off: 6'(o)};
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = $urandom;
    dirty_latest[la] = d;
    @(negedge clk);
    ev_addr  = la;
    ev_data  = d;
    ev_valid = 1'b1;
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    @(negedge clk);
    ev_valid = 1'b0;
  endtask

  task automatic wait_pages(input int n, input int limit);
    int t = 0;
    while (n_pd < n && t < limit) begin @(posedge clk); t++; end
    check(n_pd >= n, $sformatf("pages completed %0d of %0d", n_pd, n));
  endtask

  flit_t pe_img [PAGE_FLITS];

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // A design that stops delivering lines and pages ends the run early.
  initial begin : progress_watchdog
    int last, idle;
    last = -1; idle = 0;
    forever begin
      @(posedge clk);
      if (n_llc + n_pd != last) begin last = n_llc + n_pd; idle = 0; end
      else if (++idle == 150_000) begin
        failures++;
        $display("FAIL: no line or page delivered for %0d cycles", idle);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    int base;
    cpu_req_valid = 0; cpu_req_addr = '0;
    ev_valid = 0; ev_addr = '0; ev_data = '0;
    pe_valid = 0; pe_page = '0; pe_data = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // A: 40 fresh pages, one line each, then a second line of each
    for (int p = 0; p < 40; p++) request(32'h100 + p, p % 64);
    for (int p = 0; p < 40; p++) request(32'h100 + p, (p + 7) % 64);
    req_idle();
    wait_pages(40, 400_000);
    check(n_llc >= 40, "phase A: every first line reached the LLC");

    // B: park a few dirty lines of an inflight page
    request(32'h200, 3);
    req_idle();
    repeat (20) @(posedge clk);
    for (int o = 10; o < 14; o++) evict(32'h200, o);
    wait_pages(41, 100_000);
    check(c_dbuf >= 4, "phase B: lines parked");
    check(c_dlocal >= 4, "phase B: parked lines flushed to local memory");

    // C: nine dirty lines of an inflight page exceed the threshold of eight
    request(32'h300, 0);
    req_idle();
    repeat (20) @(posedge clk);
    for (int o = 20; o < 29; o++) evict(32'h300, o);
    wait_pages(42, 100_000);
    check(c_dthr >= 1, "phase C: page throttled");
    check(c_rereq >= 1, "phase C: throttled page requested again");
    for (int o = 20; o < 29; o++)
      check(rline(line_addr_t'{page: 32'h300, off: 6'(o)}) == dirty_latest[line_addr_t'{page: 32'h300, off: 6'(o)}],
            $sformatf("phase C: remote line %0d written back", o));

    // D: dirty lines of pages that are not inflight go straight to remote
    for (int o = 0; o < 5; o++) evict(32'h400, o * 3);
    repeat (200) @(posedge clk);
    for (int o = 0; o < 5; o++)
      check(rline(line_addr_t'{page: 32'h400, off: 6'(o * 3)}) == dirty_latest[line_addr_t'{page: 32'h400, off: 6'(o * 3)}],
            $sformatf("phase D: remote line %0d", o * 3));
    // a later request of that page must see the written-back data
    request(32'h400, 1);
    req_idle();
    wait_pages(43, 100_000);

    // E: dirty page eviction, compressed on the way to remote memory
    for (int f = 0; f < PAGE_FLITS; f++)
      pe_img[f] = (f % 5 == 0) ? {$urandom, $urandom} : {32'hFACE_0000 + 32'(f / 16), 32'h0};
    pe_page = 32'h500;
    for (int f = 0; f < PAGE_FLITS; f++) begin
      @(negedge clk);
      pe_data  = pe_img[f];
      pe_valid = 1'b1;
      @(posedge clk);
      while (!pe_ready) @(posedge clk);
    end
    @(negedge clk);
    pe_valid = 1'b0;
    begin
      int t;
      t = 0;
      while (c_pevict == 0 && t < 50_000) begin @(posedge clk); t++; end
    end
    repeat (3000) @(posedge clk);
    check(c_pevict == 1, "phase E: page evicted");
    for (int f = 0; f < PAGE_FLITS; f++)
      if (f % 37 == 0 || rmem_rd(32'h500, 9'(f)) != pe_img[f])
        check(rmem_rd(32'h500, 9'(f)) == pe_img[f], $sformatf("phase E: remote flit %0d", f));

    // F: flood of fresh pages, then second lines
    base = n_pd;
    for (int p = 0; p < 300; p++) begin
      request(32'h1000 + p, (p * 13) % 64);
      if (p % 3 == 0) request(32'h1000 + p / 2, (p * 5 + 1) % 64);
    end
    req_idle();
    begin
      int t;
      t = 0;
      while (n_pd < c_both + c_page_only && t < 2_500_000) begin @(posedge clk); t++; end
    end
    repeat (2000) @(posedge clk);

    $display("both=%0d line_only=%0d page_only=%0d drop=%0d stall=%0d", c_both, c_line_only, c_page_only, c_drop, c_stall);
    $display("line_used=%0d line_ignored=%0d rereq=%0d dirty_buf=%0d direct=%0d throttle=%0d to_local=%0d page_evict=%0d",
             c_line_used, c_line_ign, c_rereq, c_dbuf, c_ddirect, c_dthr, c_dlocal, c_pevict);
    $display("requests sent: lines=%0d pages=%0d, pages completed=%0d, cycles=%0d", c_reql, c_reqp, n_pd, cycle);
    check(c_both > 0,      "mechanism: both granularities");
    check(c_line_only > 0, "mechanism: line only (page buffer full)");
    check(c_drop > 0,      "mechanism: request dropped");
    check(c_stall > 0,     "mechanism: stall");
    check(c_line_used > 0, "mechanism: line delivered");
    check(c_rereq > 0,     "mechanism: re-request");
    check(c_dbuf > 0,      "mechanism: dirty parked");
    check(c_ddirect > 0,   "mechanism: dirty direct");
    check(c_dthr > 0,      "mechanism: dirty throttle");
    check(c_dlocal > 0,    "mechanism: dirty flushed to local");
    check(c_pevict > 0,    "mechanism: page eviction");
    check(n_pd == c_both + c_page_only, "every scheduled page completed");
    check(c_reqp == n_pd + c_rereq, "one request per page plus re-requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
