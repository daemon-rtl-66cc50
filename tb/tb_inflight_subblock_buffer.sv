// tb_inflight_subblock_buffer: self-checking testbench for the inflight
// sub-block buffer at the paper's size (128 entries, one per page, each with
// a 64-bit vector of inflight cache lines).
//
// How: a reference model (associative array page -> 64-bit vector) follows
// every operation. Each cycle one random operation is applied: insert a line
// request, arrival of a cache line (pending or not), or arrival of a page
// (drops all its lines). Before every rising edge the page-hit and line-hit
// lookups, arrival hit, full and count are compared with the model. A small
// page range makes hits and a full buffer frequent. Inputs change on the
// falling edge.
`timescale 1ns/1ps
module tb_inflight_subblock_buffer;
  import daemon_pkg::*;
  localparam int unsigned ENTRIES = 128;
  logic clk = 0, rst_n = 0;
  line_addr_t lk_addr = '0, ins_addr = '0, arr_addr = '0;
  logic lk_page_hit, lk_line_hit, ins_valid = 0, arr_valid = 0, arr_hit, rm_valid = 0, full;
  page_addr_t rm_page = '0;
  logic [$clog2(ENTRIES):0] count;
  int checks = 0, failures = 0;
  logic [63:0] model[int unsigned];

  inflight_subblock_buffer dut (.*);

  always #5 clk = ~clk;
  initial begin #20_000_000; $display("WATCHDOG timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s @%0t", msg, $time); end
  endtask

  function automatic line_addr_t rand_addr();
    line_addr_t a;
    a.page = page_addr_t'($urandom_range(180));
    a.off  = line_off_t'($urandom_range(7) * 9);
    return a;
  endfunction

  int n_full = 0, n_arr_hit = 0, n_line_hit = 0;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 40000; cyc++) begin
      int op;
      bit exp_pg, exp_ln, exp_arr;
      @(negedge clk);
      ins_valid = 0; arr_valid = 0; rm_valid = 0;
      lk_addr = rand_addr();
      op = $urandom_range(99);
      // phases: filling (mostly inserts) then draining (mostly arrivals)
      if ((cyc / 3000) % 2 == 0 ? op < 70 : op < 25) begin
        ins_addr = rand_addr();
        if (model.exists(ins_addr.page) || model.num() < ENTRIES) ins_valid = 1;
      end else if (op < 95) begin
        arr_valid = 1;
        arr_addr = rand_addr();
      end else begin
        rm_valid = 1;
        rm_page = page_addr_t'($urandom_range(180));
      end
      #1;
      exp_pg  = model.exists(lk_addr.page);
      exp_ln  = exp_pg && model[lk_addr.page][lk_addr.off];
      exp_arr = model.exists(arr_addr.page) && model[arr_addr.page][arr_addr.off];
      check(lk_page_hit == exp_pg, "page hit");
      check(lk_line_hit == exp_ln, "line hit");
      if (arr_valid) check(arr_hit == exp_arr, "arrival hit");
      check(count == model.num(), $sformatf("count %0d vs %0d", count, model.num()));
      check(full == (model.num() == ENTRIES), "full");
      if (full) n_full++;
      if (arr_valid && exp_arr) n_arr_hit++;
      if (exp_ln) n_line_hit++;
      @(posedge clk);
      if (ins_valid) begin
        if (!model.exists(ins_addr.page)) model[ins_addr.page] = '0;
        model[ins_addr.page][ins_addr.off] = 1'b1;
      end
      if (arr_valid && exp_arr) begin
        model[arr_addr.page][arr_addr.off] = 1'b0;
        if (model[arr_addr.page] == '0) model.delete(arr_addr.page);
      end
      if (rm_valid && model.exists(rm_page)) model.delete(rm_page);
    end
    check(n_full > 0, "buffer reached full");
    check(n_arr_hit > 100 && n_line_hit > 100, "hits exercised");
    $display("full cycles=%0d arrival hits=%0d line hits=%0d", n_full, n_arr_hit, n_line_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
