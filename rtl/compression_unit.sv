// compression_unit: link compression of page data, one 1 KB chunk at a time,
// with four LZ77 engines working in parallel on the four 256-byte segments of
// the chunk.
//
// Operation: the unit accepts the 128 64-bit flits of a chunk on s_*
// (byte j of a flit is bits 8j+7:8j; flit f holds chunk bytes 8f..8f+7),
// starts the four engines, and when all are done sends the compressed chunk
// on m_*:
//   flit 0     : header, four 16-bit fields, field k = bit length of
//                segment k's token string (bits 16k+15:16k)
//   then for k = 0..3: ceil(bits_k / 64) flits of segment k's bit string
// m_last marks the final flit. A page is sent as four such chunks.
//
// Timing: 128 cycles to load, 258 cycles of compression, then one flit per
// cycle out (at most 1 + 4 * 36 flits, at least 1 + 4 * 1). The paper quotes
// a 64-cycle (de)compression latency per 1 KB from the MXT design; this unit
// compresses one byte per engine per cycle and is therefore slower.
//
// From the paper: LZ77, MXT-like, 1 KB granularity, four engines of 256 B
// each with a 256 B dictionary. The chunk framing and the flit interface are
// this design's choices.
module compression_unit
  import daemon_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  s_valid,
  output logic  s_ready,
  input  flit_t s_data,
  output logic  m_valid,
  input  logic  m_ready,
  output flit_t m_data,
  output logic  m_last
);
  localparam int unsigned NENG  = 4;
  localparam int unsigned SEG   = CHUNK_BYTES / NENG;      // 256
  localparam int unsigned OBITS = SEG * 9 + 17;

  typedef enum logic [1:0] {C_LOAD, C_RUN, C_HDR, C_DATA} cstate_e;
  cstate_e st;

  logic [CHUNK_BYTES*8-1:0] chunk;
  logic [6:0]               ld_cnt;
  logic                     eng_start;
  logic [NENG-1:0]          eng_done;
  logic [OBITS-1:0]         eng_bits  [NENG];
  logic [15:0]              eng_nbits [NENG];
  logic [1:0]               k;
  logic [5:0]               w;
  logic [5:0]               nwords_k;

  for (genvar g = 0; g < NENG; g++) begin : g_eng
    lz_comp_engine #(.SEG_BYTES(SEG)) u_eng (
      .clk, .rst_n,
      .start (eng_start),
      .seg   (chunk[g*SEG*8 +: SEG*8]),
      .done  (eng_done[g]),
      .obits (eng_bits[g]),
      .nbits (eng_nbits[g])
    );
  end

  always_comb begin
    nwords_k = 6'((eng_nbits[k] + 16'd63) >> 6);
    s_ready  = (st == C_LOAD);
    m_valid  = (st == C_HDR) || (st == C_DATA);
    m_data   = (st == C_HDR) ? {eng_nbits[3], eng_nbits[2], eng_nbits[1], eng_nbits[0]}
                             : eng_bits[k][w*64 +: 64];
    m_last   = (st == C_DATA) && (k == 2'd3) && (w == nwords_k - 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= C_LOAD;
      ld_cnt    <= '0;
      eng_start <= 1'b0;
      k         <= '0;
      w         <= '0;
      chunk     <= '0;
    end else begin
      eng_start <= 1'b0;
      unique case (st)
        C_LOAD: if (s_valid) begin
          chunk[ld_cnt*64 +: 64] <= s_data;
          ld_cnt <= ld_cnt + 1'b1;
          if (ld_cnt == 7'(CHUNK_FLITS - 1)) begin
            eng_start <= 1'b1;
            st        <= C_RUN;
          end
        end
        C_RUN: if (!eng_start && &eng_done) st <= C_HDR;
        C_HDR: if (m_ready) begin
          st <= C_DATA;
          k  <= '0;
          w  <= '0;
        end
        C_DATA: if (m_ready) begin
          if (w == nwords_k - 1'b1) begin
            w <= '0;
            if (k == 2'd3) st <= C_LOAD;
            k <= k + 1'b1;
          end else begin
            w <= w + 1'b1;
          end
        end
        default: st <= C_LOAD;
      endcase
    end
  end
endmodule
