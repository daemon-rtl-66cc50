// tb_decompression_unit: self-checking testbench for the LZ77 decompression
// unit (one compressed 1 KB chunk in, 128 flits out).
//
// How: an independent encoder written here turns random 1 KB chunks into
// compressed chunks in the unit's format (header flit with four 16-bit bit
// lengths, then each segment's LSB-first token string). The encoder makes
// its own random choices (literal or a match of random length and distance,
// overlapping copies included, lengths up to 255), so the decoder sees token
// streams that the compression unit itself would not produce. The 128 output
// flits are compared with the original chunk. Random input stalls and output
// back-pressure are applied.
`timescale 1ns/1ps
module tb_decompression_unit;
  import daemon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 1, m_last;
  flit_t s_data = '0, m_data;
  int checks = 0, failures = 0;

  decompression_unit dut (.*);

  always #5 clk = ~clk;
  initial begin #50_000_000; $display("WATCHDOG timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s @%0t", msg, $time); end
  endtask

  logic [7:0] chunk[1024];
  flit_t inf[$], outf[$];
  int n_match = 0, n_overlap = 0, n_long = 0;

  function automatic void put_bits(ref logic bits[$], input logic [16:0] v, input int n);
    for (int j = 0; j < n; j++) bits.push_back(v[j]);
  endfunction

  // build chunk contents with repeats so matches are available
  function automatic void make_chunk(input int kind);
    for (int i = 0; i < 1024; i++)
      case (kind)
        0: chunk[i] = 8'h00;
        1: chunk[i] = 8'(i % 3);
        2: chunk[i] = ((i % 256) > 16 && $urandom_range(1)) ? chunk[i - 1 - $urandom_range(15)] : 8'($urandom_range(255));
        default: chunk[i] = 8'($urandom_range(255));
      endcase
  endfunction

  // encode: at each position choose literal or any valid match
  function automatic void encode();
    logic bits[4][$];
    int nb[4];
    flit_t w;
    for (int k = 0; k < 4; k++) begin
      int p = 0;
      while (p < 256) begin
        int best_d = 0, best_l = 0;
        if (p > 0 && $urandom_range(4) != 0) begin
          int maxd = (p > 255) ? 255 : p;
          for (int t = 0; t < 6; t++) begin
            int d = 1 + $urandom_range(maxd - 1);
            int l = 0;
            while (p + l < 256 && l < 255 && chunk[256*k + p + l] == chunk[256*k + p + l - d]) l++;
            if (l > best_l) begin best_l = l; best_d = d; end
          end
          if (best_l > 2) best_l = 2 + $urandom_range(best_l - 2);
        end
        if (best_l >= 2) begin
          put_bits(bits[k], {8'(best_l), 8'(best_d), 1'b1}, 17);
          n_match++;
          if (best_d < best_l) n_overlap++;
          if (best_l > 64) n_long++;
          p += best_l;
        end else begin
          put_bits(bits[k], {8'h00, chunk[256*k + p], 1'b0}, 9);
          p++;
        end
      end
      nb[k] = bits[k].size();
    end
    inf.delete();
    inf.push_back({16'(nb[3]), 16'(nb[2]), 16'(nb[1]), 16'(nb[0])});
    for (int k = 0; k < 4; k++)
      for (int q = 0; q < (nb[k] + 63) / 64; q++) begin
        w = '0;
        for (int j = 0; j < 64; j++) if (64*q + j < nb[k]) w[j] = bits[k][64*q + j];
        inf.push_back(w);
      end
  endfunction

  always @(negedge clk) m_ready <= ($urandom_range(4) != 0);
  always @(posedge clk) if (m_valid && m_ready) outf.push_back(m_data);

  int n_last;
  always @(posedge clk) if (m_valid && m_ready && m_last) n_last++;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      int t;
      make_chunk(n % 4);
      encode();
      outf.delete();
      n_last = 0;
      foreach (inf[f]) begin
        while ($urandom_range(5) == 0) @(negedge clk);
        s_valid = 1;
        s_data  = inf[f];
        do @(posedge clk); while (!s_ready);
        @(negedge clk);
        s_valid = 0;
      end
      t = 0;
      while (n_last == 0 && t < 5000) begin @(posedge clk); t++; end
      @(negedge clk);
      check(outf.size() == 128, $sformatf("chunk %0d: %0d output flits", n, outf.size()));
      for (int f = 0; f < 128 && f < outf.size(); f++) begin
        flit_t e;
        for (int j = 0; j < 8; j++) e[8*j +: 8] = chunk[8*f + j];
        if (outf[f] != e) check(0, $sformatf("chunk %0d flit %0d", n, f));
      end
      checks++;
    end
    check(n_match > 100 && n_overlap > 0 && n_long > 0, "matches, overlapping and long copies exercised");
    $display("matches=%0d overlapping=%0d long=%0d", n_match, n_overlap, n_long);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
