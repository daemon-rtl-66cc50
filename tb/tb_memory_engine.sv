// tb_memory_engine: self-checking testbench for the memory engine at the
// paper's sizes (512 / 1024 queue entries, 32 KB packet buffer), with the
// compute side and the remote memory played by the testbench.
//
// How: the testbench sends request and write-back packets and decodes every
// response. Remote memory answers reads after 40 cycles and holds a known
// pattern unless written.
//   phase 1: 3 page requests followed by 60 line requests: all 60 lines must
//            come back, and lines must keep flowing while pages are being
//            compressed (the first line response arrives before the first
//            page response); page responses are decompressed here by an
//            independent LZ77 decoder and compared with memory;
//   phase 2: dirty-line write-backs, then reads of the same lines;
//   phase 3: a dirty-page write-back (compressed chunks of literal tokens),
//            then a page request for it: the response must hold the new data.
// Inputs change on the falling edge; the watchdog ends a hung run.
`timescale 1ns/1ps
module tb_memory_engine;
  import daemon_pkg::*;
  localparam int MEM_LAT = 40;
  logic clk = 0, rst_n = 0;
  logic rx_valid = 0, rx_ready, rx_last = 0, tx_valid, tx_ready = 1, tx_last;
  flit_t rx_data = '0, tx_data;
  logic mr_valid, mr_ready, md_valid, md_ready, mw_valid, mw_ready;
  page_addr_t mr_page, mw_page;
  logic [8:0] mr_flit, mw_flit;
  logic [9:0] mr_len;
  flit_t md_data, mw_data;

  memory_engine dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #100_000_000; $display("WATCHDOG timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  function automatic void check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s @%0t", msg, $time); end
  endfunction

  // ---------------- remote memory ----------------
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
  int n_mw = 0;
  always @(posedge clk) if (mw_valid && mw_ready) begin rmem[{mw_page, mw_flit}] = mw_data; n_mw++; end

  // ---------------- response checker ----------------
  flit_t rp[$];
  int n_resp_line = 0, n_resp_page = 0;
  longint t_first_line = 0, t_first_page = 0;

  // decode one compressed chunk starting at rp[w]; returns flits used
  function automatic int decode_chunk(input int w, output logic [7:0] out[1024]);
    int nb[4], base;
    for (int k = 0; k < 4; k++) nb[k] = int'(rp[w][16*k +: 16]);
    base = w + 1;
    for (int k = 0; k < 4; k++) begin
      logic [7:0] seg[$];
      int pos = 0;
      while (pos < nb[k] && base + (pos + 16) / 64 < rp.size() + 1) begin
        if (!rp[base + pos / 64][pos % 64]) begin
          logic [7:0] b;
          for (int j = 0; j < 8; j++) b[j] = rp[base + (pos + 1 + j) / 64][(pos + 1 + j) % 64];
          seg.push_back(b);
          pos += 9;
        end else begin
          logic [7:0] d, l;
          for (int j = 0; j < 8; j++) d[j] = rp[base + (pos + 1 + j) / 64][(pos + 1 + j) % 64];
          for (int j = 0; j < 8; j++) l[j] = rp[base + (pos + 9 + j) / 64][(pos + 9 + j) % 64];
          if (d == 0 || int'(d) > seg.size()) break;
          for (int j = 0; j < l; j++) seg.push_back(seg[seg.size() - d]);
          pos += 17;
        end
      end
      for (int i = 0; i < 256; i++) out[256 * k + i] = (i < seg.size()) ? seg[i] : 8'hxx;
      base += (nb[k] + 63) / 64;
    end
    return base - w;
  endfunction

  function automatic void check_resp();
    pkt_hdr_t h;
    h = pkt_hdr_t'(rp[0]);
    if (h.typ == PKT_RESP_LINE) begin
      bit ok = (rp.size() == 9);
      n_resp_line++;
      if (t_first_line == 0) t_first_line = cyc;
      for (int i = 0; i < 8 && ok; i++) if (rp[1 + i] != rmem_rd(h.page, {h.off, 3'(i)})) ok = 0;
      check(ok, $sformatf("line response %0h:%0d", h.page, h.off));
    end else if (h.typ == PKT_RESP_PAGE) begin
      int w = 1;
      bit ok = 1;
      n_resp_page++;
      if (t_first_page == 0) t_first_page = cyc;
      for (int c = 0; c < 4; c++) begin
        logic [7:0] b[1024];
        w += decode_chunk(w, b);
        for (int i = 0; i < 1024; i++) begin
          flit_t g = rmem_rd(h.page, 9'((1024 * c + i) / 8));
          if (b[i] !== g[8 * (i % 8) +: 8]) ok = 0;
        end
      end
      check(ok && w == rp.size(), $sformatf("page response %0h", h.page));
    end else check(0, "unexpected response type");
  endfunction

  always @(negedge clk) tx_ready <= ($urandom_range(7) != 0);
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    rp.push_back(tx_data);
    if (tx_last) begin check_resp(); rp.delete(); end
  end

  // ---------------- packet sender ----------------
  task automatic send(ref flit_t f[$]);
    foreach (f[i]) begin
      @(negedge clk);
      rx_valid = 1; rx_data = f[i]; rx_last = (i == f.size() - 1);
      @(posedge clk);
      while (!rx_ready) @(posedge clk);
    end
    @(negedge clk);
    rx_valid = 0; rx_last = 0;
  endtask

  task automatic send_hdr(input pkt_type_e t, input page_addr_t p, input int o);
    flit_t f[$];
    pkt_hdr_t h;
    h = '0; h.typ = t; h.page = p; h.off = 6'(o);
    f.push_back(flit_t'(h));
    send(f);
  endtask

  task automatic wait_resp(input int nl, input int np);
    int t;
    t = 0;
    while ((n_resp_line < nl || n_resp_page < np) && t < 200000) begin @(posedge clk); t++; end
    repeat (20) @(posedge clk);
  endtask

  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1;
    // phase 1
    for (int p = 0; p < 3; p++) send_hdr(PKT_REQ_PAGE, page_addr_t'(32'h40 + p), 0);
    for (int i = 0; i < 60; i++) send_hdr(PKT_REQ_LINE, page_addr_t'(32'h80 + i % 7), i % 64);
    wait_resp(60, 3);
    check(n_resp_line == 60 && n_resp_page == 3, $sformatf("phase 1 responses %0d/%0d", n_resp_line, n_resp_page));
    check(t_first_line < t_first_page, "lines served while the page is compressed");
    // phase 2: dirty lines
    for (int i = 0; i < 5; i++) begin
      flit_t f[$];
      pkt_hdr_t h;
      f.delete();
      h = '0; h.typ = PKT_WB_LINE; h.page = page_addr_t'(32'hA0); h.off = 6'(10 + i);
      f.push_back(flit_t'(h));
      for (int j = 0; j < 8; j++) f.push_back({$urandom, $urandom});
      send(f);
      for (int j = 0; j < 8; j++) rmem[{page_addr_t'(32'hA0), 6'(10 + i), 3'(j)}] = f[1 + j];
    end
    repeat (200) @(posedge clk);
    check(n_mw == 40, $sformatf("dirty line flits written %0d", n_mw));
    for (int i = 0; i < 5; i++) send_hdr(PKT_REQ_LINE, page_addr_t'(32'hA0), 10 + i);
    wait_resp(65, 3);
    check(n_resp_line == 65, "phase 2 line responses");
    // phase 3: dirty page (literal-only compressed chunks)
    begin
      flit_t f[$];
      flit_t img[512];
      pkt_hdr_t h;
      for (int i = 0; i < 512; i++) img[i] = {$urandom, $urandom};
      h = '0; h.typ = PKT_WB_PAGE; h.page = page_addr_t'(32'hB0);
      f.push_back(flit_t'(h));
      for (int c = 0; c < 4; c++) begin
        f.push_back({16'd2304, 16'd2304, 16'd2304, 16'd2304});
        for (int k = 0; k < 4; k++) begin
          logic bits[$];
          bits.delete();
          for (int b = 0; b < 256; b++) begin
            int bi;
            logic [7:0] v;
            bi = 1024 * c + 256 * k + b;
            v  = img[bi / 8][8 * (bi % 8) +: 8];
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
      n_mw = 0;
      send(f);
      repeat (3000) @(posedge clk);
      check(n_mw == 512, $sformatf("dirty page flits written %0d", n_mw));
      for (int i = 0; i < 512; i++)
        if (rmem_rd(page_addr_t'(32'hB0), 9'(i)) != img[i]) check(0, $sformatf("dirty page flit %0d", i));
      send_hdr(PKT_REQ_PAGE, page_addr_t'(32'hB0), 0);
      wait_resp(65, 4);
      check(n_resp_page == 4, "phase 3 page response");
    end
    $display("line responses=%0d page responses=%0d first line @%0d first page @%0d",
             n_resp_line, n_resp_page, t_first_line, t_first_page);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
