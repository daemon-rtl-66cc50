// tb_inflight_page_buffer: self-checking testbench for the inflight page
// buffer at the paper's size (256 entries: page, 2-bit state, 64-bit dirty
// vector).
//
// How: a reference model (associative arrays page -> state, page -> dirty
// vector) follows every operation. Each cycle one random operation is
// applied: allocate a page (SCHEDULED), mark it sent (SCHEDULED -> MOVED),
// write a new state through the receive port (using the index returned by
// lookup port b, INVALID frees the entry), or record a dirty line / throttle
// through the dirty port (index from lookup port c). All three lookup ports
// are compared with the model before every rising edge, as are full and
// count. Inputs change on the falling edge.
`timescale 1ns/1ps
module tb_inflight_page_buffer;
  import daemon_pkg::*;
  localparam int unsigned ENTRIES = 256, IW = 8;
  logic clk = 0, rst_n = 0;
  page_addr_t a_page = '0, b_page = '0, c_page = '0, al_page = '0, mv_page = '0;
  logic a_hit, b_hit, c_hit, full;
  pg_state_e a_state, b_state, c_state, rxw_state = PG_INVALID;
  logic [IW-1:0] b_idx, c_idx, rxw_idx = '0, dw_idx = '0;
  logic [63:0] c_dirty;
  logic al_valid = 0, mv_valid = 0, rxw_valid = 0, dw_valid = 0, dw_throttle = 0;
  line_off_t dw_off = '0;
  logic [IW:0] count;
  int checks = 0, failures = 0;
  pg_state_e mstate[int unsigned];
  logic [63:0] mdirty[int unsigned];

  inflight_page_buffer dut (.*);

  always #5 clk = ~clk;
  initial begin #20_000_000; $display("WATCHDOG timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s @%0t", msg, $time); end
  endtask

  function automatic page_addr_t rp();
    return page_addr_t'($urandom_range(400));
  endfunction

  task automatic look(input page_addr_t p, input logic hit, input pg_state_e st, input string port);
    check(hit == mstate.exists(p), {port, " hit"});
    if (mstate.exists(p)) check(st == mstate[p], {port, " state"});
    else check(st == PG_INVALID, {port, " miss state"});
  endtask

  int n_full = 0, n_thr = 0, n_mv = 0;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 40000; cyc++) begin
      int op;
      @(negedge clk);
      al_valid = 0; mv_valid = 0; rxw_valid = 0; dw_valid = 0;
      a_page = rp(); b_page = rp(); c_page = rp();
      op = $urandom_range(99);
      #1;
      if (((cyc / 4000) % 2 == 0) ? op < 50 : op < 15) begin
        al_page = rp();
        if (!full && !mstate.exists(al_page)) al_valid = 1;
      end else if (op < 65) begin
        mv_valid = 1; mv_page = rp();
      end else if (op < 80) begin
        if (b_hit) begin
          rxw_valid = 1; rxw_idx = b_idx;
          rxw_state = pg_state_e'($urandom_range(3));
        end
      end else begin
        if (c_hit) begin
          dw_valid = 1; dw_idx = c_idx;
          dw_throttle = ($urandom_range(9) == 0);
          dw_off = line_off_t'($urandom_range(63));
        end
      end
      #1;
      look(a_page, a_hit, a_state, "a");
      look(b_page, b_hit, b_state, "b");
      look(c_page, c_hit, c_state, "c");
      check(c_dirty == (mstate.exists(c_page) ? mdirty[c_page] : 64'd0), "c dirty vector");
      check(count == mstate.num(), "count");
      check(full == (mstate.num() == ENTRIES), "full");
      if (full) n_full++;
      @(posedge clk);
      if (al_valid) begin mstate[al_page] = PG_SCHEDULED; mdirty[al_page] = '0; end
      if (mv_valid && mstate.exists(mv_page) && mstate[mv_page] == PG_SCHEDULED) begin
        mstate[mv_page] = PG_MOVED; n_mv++;
      end
      if (rxw_valid) begin
        if (rxw_state == PG_INVALID) begin mstate.delete(b_page); mdirty.delete(b_page); end
        else mstate[b_page] = rxw_state;
      end
      if (dw_valid) begin
        if (dw_throttle) begin mstate[c_page] = PG_THROTTLED; mdirty[c_page] = '0; n_thr++; end
        else mdirty[c_page][dw_off] = 1'b1;
      end
    end
    check(n_full > 0 && n_thr > 0 && n_mv > 0, "full, throttle and move exercised");
    $display("full cycles=%0d throttles=%0d moves=%0d", n_full, n_thr, n_mv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
