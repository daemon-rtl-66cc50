// decompression_unit: inverse of compression_unit. It receives one compressed
// 1 KB chunk (header flit with the four segment bit lengths, then each
// segment's bit string in 64-bit flits), decodes the four 256-byte segments
// in parallel with four LZ77 engines, and sends the 128 flits of the
// original chunk on m_* (m_last on the 128th).
//
// Timing: one cycle per input flit, up to about 2 * 256 cycles of decoding
// (one cycle per literal, one per match plus one per copied byte), then one
// flit per cycle out.
//
// From the paper: LZ77 decompression, 1 KB at a time, four engines. The
// chunk framing is this design's (see compression_unit).
module decompression_unit
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
  localparam int unsigned SEG   = CHUNK_BYTES / NENG;
  localparam int unsigned IBITS = SEG * 9 + 17;

  typedef enum logic [2:0] {U_HDR, U_DATA, U_RUN, U_WAIT, U_OUT} ustate_e;
  ustate_e st;

  logic [IBITS-1:0]  eng_bits  [NENG];
  logic [15:0]       eng_nbits [NENG];
  logic [NENG-1:0]   eng_done;
  logic [SEG*8-1:0]  eng_seg   [NENG];
  logic              eng_start;
  logic [1:0]        k;
  logic [5:0]        w;
  logic [6:0]        oc;
  logic [5:0]        nwords_k;

  for (genvar g = 0; g < NENG; g++) begin : g_eng
    lz_decomp_engine #(.SEG_BYTES(SEG)) u_eng (
      .clk, .rst_n,
      .start (eng_start),
      .ibits (eng_bits[g]),
      .nbits (eng_nbits[g]),
      .done  (eng_done[g]),
      .seg   (eng_seg[g])
    );
  end

  always_comb begin
    nwords_k = 6'((eng_nbits[k] + 16'd63) >> 6);
    s_ready  = (st == U_HDR) || (st == U_DATA);
    m_valid  = (st == U_OUT);
    m_data   = eng_seg[oc[6:5]][oc[4:0]*64 +: 64];
    m_last   = (st == U_OUT) && (oc == 7'(CHUNK_FLITS - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= U_HDR;
      eng_start <= 1'b0;
      k         <= '0;
      w         <= '0;
      oc        <= '0;
      for (int i = 0; i < NENG; i++) begin
        eng_bits[i]  <= '0;
        eng_nbits[i] <= '0;
      end
    end else begin
      eng_start <= 1'b0;
      unique case (st)
        U_HDR: if (s_valid) begin
          for (int i = 0; i < NENG; i++) begin
            eng_nbits[i] <= s_data[16*i +: 16];
            eng_bits[i]  <= '0;
          end
          k  <= '0;
          w  <= '0;
          st <= U_DATA;
        end
        U_DATA: if (s_valid) begin
          eng_bits[k][w*64 +: 64] <= s_data;
          if (w == nwords_k - 1'b1) begin
            w <= '0;
            k <= k + 1'b1;
            if (k == 2'd3) begin
              eng_start <= 1'b1;
              st        <= U_RUN;
            end
          end else begin
            w <= w + 1'b1;
          end
        end
        U_RUN:  st <= U_WAIT;   // engines clear done on start
        U_WAIT: if (&eng_done) begin
          oc <= '0;
          st <= U_OUT;
        end
        U_OUT: if (m_ready) begin
          oc <= oc + 1'b1;
          if (oc == 7'(CHUNK_FLITS - 1)) st <= U_HDR;
        end
        default: st <= U_HDR;
      endcase
    end
  end
endmodule
