// tb_packet_buffer: self-checking testbench for the store-and-forward packet
// buffer at the compute engine's 8 KB (1024 flits).
//
// How: random packets of 1..600 flits are written with random gaps while
// the reader applies random back-pressure, with phases where the reader
// stops so the buffer fills and in_ready must drop. The testbench checks
// that every flit and its last flag come out in order, that no flit of a
// packet is visible before its last flit was written (store-and-forward),
// that pkt_count equals the number of complete packets held, and that the
// writer is throttled only when the buffer holds 1024 flits.
`timescale 1ns/1ps
module tb_packet_buffer;
  import daemon_pkg::*;
  localparam int unsigned DEPTH = 1024;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_last;
  flit_t in_data = '0, out_data;
  logic [10:0] pkt_count;
  int checks = 0, failures = 0;

  packet_buffer dut (.*);

  always #5 clk = ~clk;
  initial begin #50_000_000; $display("WATCHDOG timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s @%0t", msg, $time); end
  endtask

  logic [64:0] model[$];     // {last, data}
  int complete = 0, n_full = 0, n_pkts = 0, reader_stop = 0;

  // reader and checker
  always @(negedge clk) out_ready <= (reader_stop == 0) && ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (pkt_count != complete) begin failures++; if (failures < 10) $display("FAIL pkt_count %0d vs %0d", pkt_count, complete); end
    if (out_valid != (complete > 0)) begin failures++; if (failures < 10) $display("FAIL out_valid before packet complete"); end
    if (in_ready != (model.size() < DEPTH)) begin failures++; if (failures < 10) $display("FAIL in_ready"); end
    if (!in_ready) n_full++;
    if (out_valid && out_ready) begin
      checks++;
      if ({out_last, out_data} != model[0]) begin failures++; if (failures < 10) $display("FAIL data"); end
      if (model[0][64]) begin complete--; n_pkts++; end
      void'(model.pop_front());
    end
    if (in_valid && in_ready) begin
      model.push_back({in_last, in_data});
      if (in_last) complete++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 200; p++) begin
      int len = 1 + ((p % 10 == 0) ? 500 + $urandom_range(99) : $urandom_range(40));
      if (p % 50 == 10)
        fork
          begin
            reader_stop = 1;
            repeat (1500) @(posedge clk);
            reader_stop = 0;
          end
        join_none
      for (int f = 0; f < len; f++) begin
        @(negedge clk);
        while ($urandom_range(4) == 0) @(negedge clk);
        in_valid = 1;
        in_data  = {$urandom, $urandom};
        in_last  = (f == len - 1);
        do @(posedge clk); while (!in_ready);
        @(negedge clk);
        in_valid = 0;
        in_last  = 0;
      end
    end
    repeat (20000) @(posedge clk);
    check(model.size() == 0, "all flits delivered");
    check(n_pkts == 200, $sformatf("packets delivered %0d", n_pkts));
    check(n_full > 0, "buffer reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
