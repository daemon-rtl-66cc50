// tb_compression_unit: self-checking testbench for the LZ77 compression unit
// (1 KB chunks, four 256-byte engines).
//
// How: 1 KB chunks of several kinds (all zero, short repeating pattern,
// page-like data with repeated fields, mixed text-like bytes, random bytes)
// are sent as 128 flits with random input stalls and random output
// back-pressure. The compressed chunk is collected until m_last and decoded
// by an independent LZ77 decoder written here (header with four bit
// lengths, LSB-first token strings: literal {byte,0}, match {len,dist,1}).
// The test checks that the decoded chunk equals the input, that the flit
// count matches the header, that compressible kinds get smaller, that
// incompressible data stays within the worst-case bound, and the latency
// from the last input flit to the header flit.
`timescale 1ns/1ps
module tb_compression_unit;
  import daemon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 1, m_last;
  flit_t s_data = '0, m_data;
  int checks = 0, failures = 0;

  compression_unit dut (.*);

  always #5 clk = ~clk;
  initial begin #50_000_000; $display("WATCHDOG timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s @%0t", msg, $time); end
  endtask

  logic [7:0] chunk[1024];
  flit_t outf[$];
  int t_last_in, t_hdr;

  function automatic void make_chunk(input int kind);
    for (int i = 0; i < 1024; i++)
      case (kind)
        0: chunk[i] = 8'h00;
        1: chunk[i] = 8'(i % 7 * 17);
        2: chunk[i] = (i % 8 < 2) ? 8'(i / 64) : (i % 8 < 4 ? 8'hDE : 8'(i % 8));
        3: chunk[i] = ($urandom_range(3) == 0) ? 8'($urandom_range(255)) : 8'(8'h61 + $urandom_range(5));
        default: chunk[i] = 8'($urandom_range(255));
      endcase
  endfunction

  // independent decoder for one segment's bit string
  function automatic bit decode_seg(input int k, input int nb, input int w0, output int bytes_out);
    logic [7:0] seg[$];
    int pos = 0;
    bit ok = 1;
    while (pos < nb) begin
      logic f;
      f = outf[w0 + pos / 64][pos % 64];
      if (!f) begin
        logic [7:0] b;
        for (int j = 0; j < 8; j++) b[j] = outf[w0 + (pos + 1 + j) / 64][(pos + 1 + j) % 64];
        seg.push_back(b);
        pos += 9;
      end else begin
        logic [7:0] d, l;
        for (int j = 0; j < 8; j++) d[j] = outf[w0 + (pos + 1 + j) / 64][(pos + 1 + j) % 64];
        for (int j = 0; j < 8; j++) l[j] = outf[w0 + (pos + 9 + j) / 64][(pos + 9 + j) % 64];
        if (d == 0 || int'(d) > seg.size() || l < 2) begin ok = 0; break; end
        for (int j = 0; j < l; j++) seg.push_back(seg[seg.size() - d]);
        pos += 17;
      end
    end
    bytes_out = seg.size();
    if (pos != nb || seg.size() != 256) return 0;
    for (int i = 0; i < 256; i++) if (seg[i] != chunk[256 * k + i]) ok = 0;
    return ok;
  endfunction

  always @(negedge clk) m_ready <= ($urandom_range(4) != 0);
  always @(posedge clk) if (m_valid && m_ready) begin
    if (outf.size() == 0) t_hdr = $time / 10;
    outf.push_back(m_data);
  end

  int total_in = 0, total_out = 0;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 25; n++) begin
      int kind;
      int nbits[4], w, bo;
      kind = n % 5;
      make_chunk(kind);
      outf.delete();
      for (int f = 0; f < 128; f++) begin
        while ($urandom_range(5) == 0) @(negedge clk);
        s_valid = 1;
        for (int j = 0; j < 8; j++) s_data[8*j +: 8] = chunk[8*f + j];
        do @(posedge clk); while (!s_ready);
        t_last_in = $time / 10;
        @(negedge clk);
        s_valid = 0;
      end
      begin
        int t;
        t = 0;
        while (!(m_valid && m_ready && m_last) && t < 5000) begin @(posedge clk); t++; end
        @(negedge clk);
      end
      check(outf.size() > 0, "output produced");
      if (outf.size() == 0) continue;
      for (int k = 0; k < 4; k++) nbits[k] = int'(outf[0][16*k +: 16]);
      w = 1;
      for (int k = 0; k < 4; k++) begin
        check(decode_seg(k, nbits[k], w, bo), $sformatf("chunk %0d kind %0d segment %0d decodes to input", n, kind, k));
        w += (nbits[k] + 63) / 64;
      end
      check(outf.size() == w, $sformatf("flit count %0d vs header %0d", outf.size(), w));
      check(t_hdr - t_last_in >= 257 && t_hdr - t_last_in <= 270,
            $sformatf("latency last-in to header %0d cycles", t_hdr - t_last_in));
      if (kind < 3) check(outf.size() * 8 < 1024 / 2, $sformatf("kind %0d compresses below half (%0d flits)", kind, outf.size()));
      if (kind == 4) check(outf.size() <= 1 + 4 * 36, "incompressible within bound");
      total_in += 128; total_out += outf.size();
      if (n < 5) $display("kind %0d: 128 flits -> %0d flits, latency %0d", kind, outf.size(), t_hdr - t_last_in);
    end
    $display("total 1 KB chunks: %0d flits in, %0d flits out", total_in, total_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
