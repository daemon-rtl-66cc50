// tb_sync_fifo: self-checking testbench for sync_fifo at its default size
// (38-bit entries, 128 deep: the compute engine's sub-block queue). The same
// module is the page queue (256/1024 deep) and the packet-buffer store.
//
// How: random push/pop traffic (biased phases that fill the FIFO to full and
// drain it to empty) is checked every cycle against a SystemVerilog queue
// model: head data, empty, full and count. Inputs change on the falling
// edge, outputs are sampled just before the rising edge.
// Ends with the TB_RESULT line; a watchdog stops a hung run.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int unsigned W = 38, DEPTH = 128;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  logic [W-1:0] din = '0, dout;
  logic empty, full;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin #20_000_000; $display("WATCHDOG timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s @%0t", msg, $time); end
  endtask

  int seen_full = 0, seen_empty = 0;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int bias;
      @(negedge clk);
      bias = ((cyc / 600) % 2 == 0) ? 75 : 25;
      push = ($urandom_range(99) < bias) && (model.size() < DEPTH);
      pop  = ($urandom_range(99) < 100 - bias) && (model.size() > 0);
      din  = {$urandom, $urandom};
      #1;
      check(empty == (model.size() == 0), "empty");
      check(full  == (model.size() == DEPTH), "full");
      check(count == model.size(), "count");
      if (model.size() > 0) check(dout == model[0], "head data");
      if (full) seen_full++;
      if (empty) seen_empty++;
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    check(seen_full > 0, "reached full");
    check(seen_empty > 0, "reached empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
