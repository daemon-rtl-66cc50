// lz_decomp_engine: one LZ77 decompression engine, the inverse of
// lz_comp_engine, rebuilding a 256-byte segment from its token bit string.
//
// It reads tokens LSB first from ibits. A literal (flag 0) writes one byte; a
// match (flag 1) copies `len` bytes from `mdist` bytes back, one byte per
// cycle, so overlapping copies (runs) come out right. Decoding stops when
// nbits bits are consumed or the segment is full.
//
// Interface: pulse start with ibits/nbits valid (held until done); done
// rises when the segment in seg is complete and stays high until the next
// start. Timing: one cycle per literal, one cycle per match token plus one
// per copied byte (at most about 2 * 256 cycles).
//
// From the paper: LZ77 decompression at 256-byte granularity per engine. The
// token format and the byte-serial copy are this design's choices.
module lz_decomp_engine #(
  parameter int unsigned SEG_BYTES = 256,
  localparam int unsigned PW       = $clog2(SEG_BYTES),
  localparam int unsigned IBITS    = SEG_BYTES * 9 + 17
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [IBITS-1:0]       ibits,
  input  logic [15:0]            nbits,
  output logic                   done,
  output logic [SEG_BYTES*8-1:0] seg
);
  typedef enum logic [1:0] {D_IDLE, D_TOKEN, D_COPY} dstate_e;
  dstate_e     st;
  logic [15:0] bp;     // bit pointer
  logic [PW:0] q;      // next output byte
  logic [7:0]  cnt, mdist;
  logic [16:0] tok;

  assign tok = ibits[bp[$clog2(IBITS)-1:0] +: 17];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= D_IDLE;
      done <= 1'b0;
      bp   <= '0;
      q    <= '0;
      cnt  <= '0;
      mdist <= '0;
      seg  <= '0;
    end else if (start) begin
      st   <= D_TOKEN;
      done <= 1'b0;
      bp   <= '0;
      q    <= '0;
    end else begin
      unique case (st)
        D_IDLE: ;
        D_TOKEN: begin
          if (bp >= nbits || q == (PW+1)'(SEG_BYTES)) begin
            st   <= D_IDLE;
            done <= 1'b1;
          end else if (!tok[0]) begin
            seg[q[PW-1:0]*8 +: 8] <= tok[8:1];
            q  <= q + 1'b1;
            bp <= bp + 16'd9;
          end else begin
            mdist <= tok[8:1];
            cnt  <= tok[16:9];
            bp   <= bp + 16'd17;
            st   <= D_COPY;
          end
        end
        D_COPY: begin
          if (cnt == 0 || q == (PW+1)'(SEG_BYTES)) begin
            st <= D_TOKEN;
          end else begin
            seg[q[PW-1:0]*8 +: 8] <= seg[(q[PW-1:0] - PW'(mdist))*8 +: 8];
            q   <= q + 1'b1;
            cnt <= cnt - 1'b1;
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
