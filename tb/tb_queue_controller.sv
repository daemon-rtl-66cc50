// tb_queue_controller: self-checking testbench for queue_controller at the
// paper's 25 % cache-line share (21 cache-line slots per page slot).
//
// How: the two queues are modelled in the testbench. Phase 1 keeps both
// queues full and checks that exactly one page is issued after every 21
// cache lines. Phase 2 leaves the sub-block queue empty and checks that a
// page still goes only once per 22-cycle round (the ratio is kept). Phase 3
// raises pg_hold and checks that page slots are skipped and lines continue.
// Phase 4 applies random back-pressure and checks that each queue is
// drained in order with nothing lost or duplicated.
// Inputs change on the falling edge; outputs sampled before the rising edge.
`timescale 1ns/1ps
module tb_queue_controller;
  import daemon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sb_empty, pg_empty, pg_hold = 0, sb_pop, pg_pop, out_valid, out_page, out_ready = 1;
  req_t sb_head, pg_head, out_req;
  int checks = 0, failures = 0;
  req_t sbq[$], pq[$];

  queue_controller dut (.*);

  always #5 clk = ~clk;
  initial begin #20_000_000; $display("WATCHDOG timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s @%0t", msg, $time); end
  endtask

  task automatic drive();
    sb_empty = (sbq.size() == 0);
    pg_empty = (pq.size() == 0);
    sb_head  = sb_empty ? '0 : sbq[0];
    pg_head  = pg_empty ? '0 : pq[0];
  endtask

  int n_line, n_page, run;
  int unsigned next_sb = 0, next_pg = 0, exp_sb = 0, exp_pg = 0;

  // one cycle: sample, check order, then pop the model queues
  task automatic step();
    drive();
    #1;
    if (out_valid && out_ready) begin
      if (out_page) begin
        check(out_req == req_t'(exp_pg), "page order");
        exp_pg++;
        n_page++;
      end else begin
        check(out_req == req_t'(exp_sb), "line order");
        exp_sb++;
        n_line++;
      end
      check(sb_pop == !out_page && pg_pop == out_page, "pop matches issued queue");
    end else check(!sb_pop && !pg_pop, "no pop without issue");
    @(posedge clk);
    #0;
    if (sb_pop) void'(sbq.pop_front());
    if (pg_pop) void'(pq.pop_front());
    @(negedge clk);
    drive();
  endtask

  task automatic fill(input int nsb, input int npg);
    while (sbq.size() < nsb) begin sbq.push_back(req_t'(next_sb)); next_sb++; end
    while (pq.size() < npg)  begin pq.push_back(req_t'(next_pg));  next_pg++; end
  endtask

  initial begin
    drive();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Phase 1: both queues always busy
    n_line = 0; n_page = 0; run = 0;
    for (int c = 0; c < 22 * 50; c++) begin
      int pl;
      fill(8, 8);
      pl = n_page;
      step();
      if (n_page != pl) begin
        check(run == 21, $sformatf("21 lines between pages (got %0d)", run));
        run = 0;
      end else run++;
    end
    check(n_page == 50 && n_line == 21 * 50, $sformatf("phase 1 ratio %0d:%0d", n_line, n_page));
    // Phase 2: only pages waiting: one page per 22 cycles
    sbq.delete();
    exp_sb = next_sb;
    n_line = 0; n_page = 0;
    for (int c = 0; c < 22 * 20; c++) begin fill(0, 8); step(); end
    check(n_page == 20 && n_line == 0, $sformatf("phase 2 pages %0d of 20", n_page));
    // Phase 3: page path held: lines every cycle except the skipped slot
    pg_hold = 1;
    n_line = 0; n_page = 0;
    for (int c = 0; c < 22 * 20; c++) begin fill(8, 8); step(); end
    check(n_page == 0, "phase 3 no page while held");
    check(n_line == 21 * 20, $sformatf("phase 3 lines %0d", n_line));
    pg_hold = 0;
    // Phase 4: random back-pressure and random queue contents
    n_line = 0; n_page = 0;
    for (int c = 0; c < 20000; c++) begin
      if ($urandom_range(3) == 0) fill(sbq.size() + 1, pq.size());
      if ($urandom_range(40) == 0) fill(sbq.size(), pq.size() + 1);
      out_ready = ($urandom_range(3) != 0);
      step();
    end
    out_ready = 1;
    for (int c = 0; c < 22 * 400 && (sbq.size() > 0 || pq.size() > 0); c++) step();
    check(sbq.size() == 0 && pq.size() == 0, "phase 4 queues drained");
    check(exp_sb == next_sb && exp_pg == next_pg, "phase 4 nothing lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
