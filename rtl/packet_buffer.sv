// packet_buffer: holds packets that arrived from the network until the engine
// processes them.
//
// Store-and-forward FIFO of 64-bit flits, each stored with its `last` flag.
// A packet becomes visible on the output only once its last flit has been
// written, so the engine can process a packet at its own pace without
// waiting for the link. in_ready is low when the buffer is full, which
// back-pressures the link. One flit in and one flit out per cycle.
//
// From the paper: an SRAM packet buffer of 8 KB in the compute engine and
// 32 KB in the memory engine. BYTES sets the capacity; the flit format and
// the store-and-forward rule are this design's choices. A packet must fit in
// the buffer (the largest, a compressed page, is at most 581 flits).
module packet_buffer
  import daemon_pkg::*;
#(
  parameter int unsigned BYTES = 8192,
  localparam int unsigned DEPTH = BYTES * 8 / FLIT_W,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_data,
  input  logic  in_last,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_data,
  output logic  out_last,
  output logic [AW:0] pkt_count
);
  logic        push, pop, empty, full;
  logic [AW:0] count;

  sync_fifo #(.W(FLIT_W + 1), .DEPTH(DEPTH)) u_mem (
    .clk, .rst_n,
    .push (push),
    .din  ({in_last, in_data}),
    .pop  (pop),
    .dout ({out_last, out_data}),
    .empty(empty),
    .full (full),
    .count(count)
  );

  assign in_ready  = !full;
  assign push      = in_valid && !full;
  assign out_valid = !empty && (pkt_count != 0);
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pkt_count <= '0;
    else pkt_count <= pkt_count + (AW+1)'(push && in_last) - (AW+1)'(pop && out_last);
  end
endmodule
