// lz_comp_engine: one LZ77 compression engine working on a 256-byte segment,
// one byte per cycle, with the segment itself as its 256-byte dictionary.
//
// How it works: the bytes already seen are compared with the new byte in
// parallel (a 256-entry CAM). A vector `active` marks every earlier position
// where the current match string ends; a new byte extends the match where the
// byte at the next position equals it. When no position extends the match
// (or it reaches MAX_LEN), the pending string is emitted as one token and a
// new string starts with the current byte. The most recent earlier
// occurrence is used as the match source.
//
// Token format (appended LSB first to the output bit string):
//   literal: 9 bits  {byte[7:0], 1'b0}
//   match  : 17 bits {len[7:0], dist[7:0], 1'b1}, copy `len` (2..255) bytes
//            starting `dist` (1..255) bytes back; copies may overlap.
// Worst case (all literals) is 256 * 9 = 2304 bits.
//
// Interface: pulse start with seg valid (held until done); done rises after
// 257 cycles and stays high until the next start; obits holds the
// compressed bit string and nbits its length.
//
// From the paper: LZ77 in the style of IBM MXT, 256-byte segments, 256-byte
// dictionary per engine, four engines per unit. The token format, the greedy
// most-recent match, one byte per cycle and the minimum match length of 2 are
// this design's choices (the paper cites a 64-cycle latency for 1 KB, which a
// one-byte-per-cycle engine does not reach).
module lz_comp_engine #(
  parameter int unsigned SEG_BYTES = 256,
  parameter int unsigned MAX_LEN   = 255,
  localparam int unsigned PW       = $clog2(SEG_BYTES),
  localparam int unsigned OBITS    = SEG_BYTES * 9 + 17
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [SEG_BYTES*8-1:0] seg,
  output logic                   done,
  output logic [OBITS-1:0]       obits,
  output logic [15:0]            nbits
);
  logic [PW:0]          pos;      // next byte position, SEG_BYTES = end
  logic [8:0]           len;      // bytes in the pending string
  logic [SEG_BYTES-1:0] active, eq, ext;
  logic                 busy;
  logic [7:0]           cur_byte;
  logic [PW-1:0]        hi;
  logic                 emit;
  logic [16:0]          tok;
  logic [4:0]           tok_len;
  logic                 extend;

  assign cur_byte = seg[pos[PW-1:0]*8 +: 8];

  always_comb begin
    for (int i = 0; i < SEG_BYTES; i++)
      eq[i] = (seg[i*8 +: 8] == cur_byte) && (i < int'(pos));
    ext = (active << 1) & eq;
    hi  = '0;
    for (int i = 0; i < SEG_BYTES; i++)
      if (active[i]) hi = PW'(i);
    extend = (pos < (PW+1)'(SEG_BYTES)) && (len != 0) && (|ext) && (len < 9'(MAX_LEN));
    emit   = busy && (len != 0) && !extend;
    // pending string ends at pos-1
    if (len == 9'd1) begin
      tok     = {8'd0, seg[(pos - 1'b1)*8 +: 8], 1'b0};
      tok_len = 5'd9;
    end else begin
      tok     = {len[7:0], 8'((pos - 1'b1) - (PW+1)'(hi)), 1'b1};
      tok_len = 5'd17;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      pos    <= '0;
      len    <= '0;
      active <= '0;
      nbits  <= '0;
      obits  <= '0;
    end else if (start) begin
      busy   <= 1'b1;
      done   <= 1'b0;
      pos    <= '0;
      len    <= '0;
      active <= '0;
      nbits  <= '0;
      obits  <= '0;
    end else if (busy) begin
      if (emit) begin
        obits[nbits[$clog2(OBITS)-1:0] +: 17] <= tok;
        nbits <= nbits + 16'(tok_len);
      end
      if (pos == (PW+1)'(SEG_BYTES)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        pos <= pos + 1'b1;
        if (extend) begin
          active <= ext;
          len    <= len + 1'b1;
        end else begin
          active <= eq;
          len    <= 9'd1;
        end
      end
    end
  end
endmodule
