// tb_compute_engine: self-checking testbench for the compute engine at the
// paper's sizes, with the memory side played by the testbench.
//
// How: the testbench decodes the request and write-back packets the engine
// sends and answers page and cache-line requests itself, each after its own
// delay. Responses are delivered in due-time order, so the testbench can
// reorder them the way separate network paths or memory components would.
//   phase 1: lines answered quickly, pages slowly: critical lines reach the
//            LLC first (line used), pages follow;
//   phase 2: pages answered quickly, lines slowly: the page overtakes its
//            line, the page arrival drops the line from the inflight
//            sub-block buffer and the late line is ignored;
//   phase 3: dirty evictions to pages that are not inflight become
//            write-back packets whose data is checked.
// Page responses are compressed chunks built here from literal tokens only
// (a valid stream for the decompressor). Checked: LLC data, every flit
// written to local memory, one page-done per page, write-back data, and
// that both line-used and line-ignored happened.
// Inputs change on the falling edge; the watchdog ends a hung run.
`timescale 1ns/1ps
module tb_compute_engine;
  import daemon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cpu_req_valid = 0, cpu_req_ready;
  line_addr_t cpu_req_addr = '0;
  logic llc_valid, llc_ready = 1;
  line_addr_t llc_addr;
  line_data_t llc_data;
  logic lm_valid, lm_ready = 1;
  page_addr_t lm_page;
  logic [8:0] lm_flit;
  flit_t lm_data;
  logic lml_valid, lml_ready = 1;
  line_addr_t lml_addr;
  line_data_t lml_data;
  logic pd_valid;
  page_addr_t pd_page;
  logic ev_valid = 0, ev_ready;
  line_addr_t ev_addr = '0;
  line_data_t ev_data = '0;
  logic pe_valid = 0, pe_ready;
  page_addr_t pe_page = '0;
  flit_t pe_data = '0;
  logic tx_valid, tx_ready = 1, tx_last, rx_valid = 0, rx_ready, rx_last = 0;
  flit_t tx_data, rx_data = '0;
  ce_stats_t stats;
  logic [7:0] sb_count;
  logic [8:0] pg_count;

  compute_engine dut (.*);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #100_000_000; $display("WATCHDOG timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  function automatic void check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s @%0t", msg, $time); end
  endfunction

  function automatic flit_t gen(input page_addr_t p, input logic [8:0] f);
    return {p[15:0], 7'd0, f, 16'hC0DE, 8'(f[8:3]), 8'h5A};
  endfunction

  // ---------------- memory side ----------------
  longint cyc = 0;
  always @(posedge clk) cyc++;
  int dly_line = 20, dly_page = 300;
  typedef struct { longint due; flit_t f[$]; } resp_t;
  resp_t pend[$];
  flit_t txp[$];
  int n_req_line = 0, n_req_page = 0, n_wb_line = 0;
  line_data_t wb_expect[line_addr_t];

  function automatic void add_resp(input longint due, ref flit_t f[$]);
    resp_t r;
    int i;
    r.due = due;
    r.f = f;
    i = 0;
    while (i < pend.size() && pend[i].due <= due) i++;
    pend.insert(i, r);
  endfunction

  function automatic void respond(ref flit_t p[$]);
    pkt_hdr_t h, r;
    flit_t f[$];
    h = pkt_hdr_t'(p[0]);
    r = '0;
    r.page = h.page;
    r.off  = h.off;
    case (h.typ)
      PKT_REQ_LINE: begin
        n_req_line++;
        r.typ = PKT_RESP_LINE;
        f.push_back(flit_t'(r));
        for (int i = 0; i < 8; i++) f.push_back(gen(h.page, {h.off, 3'(i)}));
        add_resp(cyc + dly_line, f);
      end
      PKT_REQ_PAGE: begin
        n_req_page++;
        r.typ = PKT_RESP_PAGE;
        f.push_back(flit_t'(r));
        // four chunks, each all literals: 4 x 2304 bits = 4 x 36 flits
        for (int c = 0; c < 4; c++) begin
          f.push_back({16'd2304, 16'd2304, 16'd2304, 16'd2304});
          for (int k = 0; k < 4; k++) begin
            logic bits[$];
            for (int b = 0; b < 256; b++) begin
              int byte_i = 1024 * c + 256 * k + b;         // byte of the page
              flit_t g = gen(h.page, 9'(byte_i / 8));
              logic [7:0] v = g[8 * (byte_i % 8) +: 8];
              bits.push_back(1'b0);
              for (int j = 0; j < 8; j++) bits.push_back(v[j]);
            end
            for (int q = 0; q < 36; q++) begin
              flit_t w;
              for (int j = 0; j < 64; j++) w[j] = bits[64 * q + j];
              f.push_back(w);
            end
          end
        end
        add_resp(cyc + dly_page, f);
      end
      PKT_WB_LINE: begin
        line_addr_t a;
        line_data_t d;
        n_wb_line++;
        a = '{page: h.page, off: h.off};
        for (int i = 0; i < 8; i++) d[64 * i +: 64] = p[1 + i];
        check(p.size() == 9, "write-back line packet length");
        check(wb_expect.exists(a) && wb_expect[a] == d, "write-back line data");
      end
      default: check(0, "unexpected packet type");
    endcase
  endfunction

  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    txp.push_back(tx_data);
    if (tx_last) begin respond(txp); txp.delete(); end
  end

  // deliver due responses, one packet at a time
  resp_t cur;
  int cur_i = -1;
  always @(negedge clk) begin
    if (rst_n) begin
      if (rx_valid && rx_ready_q) begin
        cur_i++;
        if (cur_i == cur.f.size()) cur_i = -1;
      end
      if (cur_i < 0 && pend.size() > 0 && pend[0].due <= cyc) begin
        cur = pend.pop_front();
        cur_i = 0;
      end
      rx_valid = (cur_i >= 0);
      if (cur_i >= 0) begin
        rx_data = cur.f[cur_i];
        rx_last = (cur_i == cur.f.size() - 1);
      end
    end
  end
  logic rx_ready_q;
  always @(posedge clk) rx_ready_q <= rx_ready;

  // ---------------- checkers ----------------
  int n_llc = 0, n_lm = 0, n_pd = 0, c_used = 0, c_ign = 0, c_both = 0, c_lonly = 0;
  always @(posedge clk) if (rst_n) begin
    if (llc_valid && llc_ready) begin
      line_data_t e;
      for (int i = 0; i < 8; i++) e[64 * i +: 64] = gen(llc_addr.page, {llc_addr.off, 3'(i)});
      check(llc_data == e, "LLC line data");
      n_llc++;
    end
    if (lm_valid && lm_ready) begin
      check(lm_data == gen(lm_page, lm_flit), "local memory flit");
      n_lm++;
    end
    if (pd_valid) n_pd++;
    c_used  += int'(stats.line_used);
    c_ign   += int'(stats.line_ignored);
    c_both  += int'(stats.sgu_both);
    c_lonly += int'(stats.sgu_line_only);
  end

  task automatic request(input page_addr_t p, input int o);
    @(negedge clk);
    cpu_req_addr  = '{page: p, off: 6'(o)};
    cpu_req_valid = 1'b1;
    @(posedge clk);
    while (!cpu_req_ready) @(posedge clk);
    @(negedge clk);
    cpu_req_valid = 1'b0;
  endtask

  task automatic wait_pd(input int n);
    int t;
    t = 0;
    while (n_pd < n && t < 500000) begin @(posedge clk); t++; end
  endtask

  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1;
    // phase 1: lines first
    dly_line = 20; dly_page = 400;
    for (int p = 0; p < 20; p++) begin
      request(page_addr_t'(32'h100 + p), p);
      repeat (30) @(negedge clk);
    end
    wait_pd(20);
    repeat (2000) @(posedge clk);
    check(n_pd == 20, $sformatf("phase 1 pages done %0d", n_pd));
    check(c_used == 20, $sformatf("phase 1 lines used %0d", c_used));
    // phase 2: pages overtake lines
    dly_line = 4000; dly_page = 10;
    for (int p = 0; p < 10; p++) begin
      request(page_addr_t'(32'h200 + p), 3 * p);
      repeat (40) @(negedge clk);
    end
    wait_pd(30);
    repeat (6000) @(posedge clk);
    check(n_pd == 30, $sformatf("phase 2 pages done %0d", n_pd));
    check(c_ign > 0, $sformatf("phase 2 late lines ignored %0d", c_ign));
    check(n_llc == c_used && n_llc == 20, $sformatf("only used lines reach the LLC (%0d)", n_llc));
    check(sb_count == 0 && pg_count == 0, "inflight buffers empty");
    // phase 3: dirty evictions to pages not inflight go straight to memory
    for (int i = 0; i < 6; i++) begin
      line_addr_t a;
      line_data_t d;
      a = '{page: page_addr_t'(32'h900 + i), off: 6'(i)};
      for (int j = 0; j < 16; j++) d[32 * j +: 32] = $urandom;
      wb_expect[a] = d;
      @(negedge clk);
      ev_valid = 1; ev_addr = a; ev_data = d;
      @(posedge clk);
      while (!ev_ready) @(posedge clk);
      @(negedge clk);
      ev_valid = 0;
    end
    repeat (500) @(posedge clk);
    check(n_wb_line == 6, $sformatf("write-back packets %0d", n_wb_line));
    check(n_lm == 30 * PAGE_FLITS, $sformatf("local memory flits %0d", n_lm));
    check(n_req_page == 30, $sformatf("page requests %0d", n_req_page));
    check(c_used > 0 && c_ign > 0, "line used and line ignored both seen");
    $display("pages=%0d lines requested=%0d used=%0d ignored=%0d both=%0d line_only=%0d wb=%0d",
             n_pd, n_req_line, c_used, c_ign, c_both, c_lonly, n_wb_line);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
