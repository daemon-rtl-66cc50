// memory_engine: the DaeMon engine in the controller of a memory component.
// It serves the compute engines' cache-line and page requests from remote
// memory and applies their dirty write-backs.
//
// Receive path. Arriving packets wait in the 32 KB packet buffer. A line
// request goes into the sub-block queue (512 entries), a page request into
// the page queue (1024 entries). A dirty line (8 flits) is written to memory
// at once; a dirty page is decompressed chunk by chunk and written to memory.
//
// Serve path. The queue controller drains the two queues in the same fixed
// 21:1 ratio as the compute engine, so remote-memory bandwidth is
// partitioned too. A line is read from memory (mr_*/md_*) and sent back
// straight away (header + 8 flits). A page is read into a one-page raw buffer
// and then compressed (four 1 KB chunks) into a staging buffer, so the memory
// port is free for further cache lines while the page is being compressed;
// only one page is read at a time.
//
// Link. Outgoing packets are sent whole; a cache-line response goes ahead of
// a staged page when both are ready at a packet boundary.
//
// Memory interface: mr_* asks for mr_len consecutive flits starting at flit
// mr_flit of page mr_page; the flits come back in order on md_*. mw_* writes
// one flit. Both are this design's choices, as is the staging buffer.
//
// From the paper: the blocks (Fig. 6), the queue sizes of the memory engine
// (scaled for four compute components), the 32 KB packet buffer, page
// compression for responses and decompression for write-backs.
module memory_engine
  import daemon_pkg::*;
#(
  parameter int unsigned SBQ_DEPTH = 512,
  parameter int unsigned PQ_DEPTH  = 1024,
  parameter int unsigned PKT_BYTES = 32768,
  parameter int unsigned RATIO_PCT = 25
) (
  input  logic       clk,
  input  logic       rst_n,
  // network
  input  logic       rx_valid,
  output logic       rx_ready,
  input  flit_t      rx_data,
  input  logic       rx_last,
  output logic       tx_valid,
  input  logic       tx_ready,
  output flit_t      tx_data,
  output logic       tx_last,
  // remote memory read
  output logic       mr_valid,
  input  logic       mr_ready,
  output page_addr_t mr_page,
  output logic [8:0] mr_flit,
  output logic [9:0] mr_len,
  input  logic       md_valid,
  output logic       md_ready,
  input  flit_t      md_data,
  // remote memory write
  output logic       mw_valid,
  input  logic       mw_ready,
  output page_addr_t mw_page,
  output logic [8:0] mw_flit,
  output flit_t      mw_data
);
  localparam int unsigned SQW = $clog2(SBQ_DEPTH);
  localparam int unsigned PQW = $clog2(PQ_DEPTH);

  // ------------------------------------------------------------------
  // Receive path
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {R_HDR, R_QUEUE, R_WBLINE, R_WBPAGE, R_DISCARD} rstate_e;
  rstate_e    rst;
  logic       pb_valid, pb_ready, pb_last;
  flit_t      pb_data;
  pkt_hdr_t   pb_hdr, rx_hdr;
  logic [8:0] wcnt;
  logic       in_done;
  logic       sbq_push, sbq_pop, sbq_empty, sbq_full;
  logic       pq_push, pq_pop, pq_empty, pq_full;
  req_t       sbq_head, pq_head;
  logic [SQW:0] sbq_count;
  logic [PQW:0] pq_count;
  logic       du_s_valid, du_s_ready, du_m_valid, du_m_ready, du_m_last;
  flit_t      du_m_data;
  req_t       rx_req;

  assign rx_req = '{page: rx_hdr.page, off: rx_hdr.off};

  packet_buffer #(.BYTES(PKT_BYTES)) u_rxbuf (
    .clk, .rst_n,
    .in_valid(rx_valid), .in_ready(rx_ready), .in_data(rx_data), .in_last(rx_last),
    .out_valid(pb_valid), .out_ready(pb_ready), .out_data(pb_data), .out_last(pb_last),
    .pkt_count()
  );
  assign pb_hdr = pkt_hdr_t'(pb_data);

  decompression_unit u_decomp (
    .clk, .rst_n,
    .s_valid(du_s_valid), .s_ready(du_s_ready), .s_data(pb_data),
    .m_valid(du_m_valid), .m_ready(du_m_ready), .m_data(du_m_data), .m_last(du_m_last)
  );

  sync_fifo #(.W($bits(req_t)), .DEPTH(SBQ_DEPTH)) u_sbq (
    .clk, .rst_n, .push(sbq_push), .din(rx_req), .pop(sbq_pop),
    .dout(sbq_head), .empty(sbq_empty), .full(sbq_full), .count(sbq_count)
  );
  sync_fifo #(.W($bits(req_t)), .DEPTH(PQ_DEPTH)) u_pq (
    .clk, .rst_n, .push(pq_push), .din(rx_req), .pop(pq_pop),
    .dout(pq_head), .empty(pq_empty), .full(pq_full), .count(pq_count)
  );

  assign sbq_push = (rst == R_QUEUE) && rx_hdr.typ == PKT_REQ_LINE && !sbq_full;
  assign pq_push  = (rst == R_QUEUE) && rx_hdr.typ == PKT_REQ_PAGE && !pq_full;

  assign du_s_valid = (rst == R_WBPAGE) && pb_valid && !in_done;
  assign du_m_ready = (rst == R_WBPAGE) && mw_ready;

  always_comb begin
    pb_ready = 1'b0;
    mw_valid = 1'b0;
    mw_page  = rx_hdr.page;
    mw_flit  = wcnt;
    mw_data  = pb_data;
    unique case (rst)
      R_HDR:     pb_ready = pb_valid;
      R_WBLINE: begin
        mw_valid = pb_valid;
        mw_flit  = {rx_hdr.off, 3'(wcnt)};
        pb_ready = pb_valid && mw_ready;
      end
      R_WBPAGE: begin
        mw_valid = du_m_valid;
        mw_data  = du_m_data;
        pb_ready = du_s_valid && du_s_ready;
      end
      R_DISCARD: pb_ready = pb_valid;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rst     <= R_HDR;
      rx_hdr  <= '0;
      wcnt    <= '0;
      in_done <= 1'b0;
    end else begin
      unique case (rst)
        R_HDR: if (pb_valid) begin
          rx_hdr  <= pb_hdr;
          wcnt    <= '0;
          in_done <= 1'b0;
          unique case (pb_hdr.typ)
            PKT_REQ_LINE, PKT_REQ_PAGE: rst <= pb_last ? R_QUEUE : R_DISCARD;
            PKT_WB_LINE:                rst <= pb_last ? R_HDR : R_WBLINE;
            PKT_WB_PAGE:                rst <= pb_last ? R_HDR : R_WBPAGE;
            default:                    rst <= pb_last ? R_HDR : R_DISCARD;
          endcase
        end
        R_QUEUE: if (sbq_push || pq_push) rst <= R_HDR;
        R_WBLINE: if (pb_valid && mw_ready) begin
          wcnt <= wcnt + 1'b1;
          if (pb_last) rst <= R_HDR;
        end
        R_WBPAGE: begin
          if (du_s_valid && du_s_ready && pb_last) in_done <= 1'b1;
          if (du_m_valid && du_m_ready) begin
            wcnt <= wcnt + 1'b1;
            if (wcnt == 9'(PAGE_FLITS - 1)) rst <= R_HDR;
          end
        end
        R_DISCARD: if (pb_valid && pb_last) rst <= R_HDR;
        default: rst <= R_HDR;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // Serve path: queue controller, memory reads
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {S_IDLE, S_LREQ, S_LHDR, S_LDATA, S_PREQ, S_PDATA} sstate_e;
  sstate_e    sst;
  logic       qc_valid, qc_page, qc_ready;
  req_t       qc_req, cur;
  logic [9:0] scnt;
  logic       raw_push, raw_pop, raw_empty, raw_full;
  flit_t      raw_dout;
  logic       pc_busy;          // a page is being compressed
  page_addr_t rd_page;          // page read into the raw buffer
  logic [1:0] pc_chunk;
  logic       line_tx_valid, line_tx_ready;
  flit_t      line_tx_data;
  logic       line_tx_last;

  queue_controller #(.RATIO_PCT(RATIO_PCT)) u_qc (
    .clk, .rst_n,
    .sb_empty (sbq_empty), .sb_head(sbq_head), .sb_pop(sbq_pop),
    .pg_empty (pq_empty),  .pg_hold(pc_busy || !raw_empty), .pg_head(pq_head),  .pg_pop(pq_pop),
    .out_valid(qc_valid), .out_page(qc_page), .out_req(qc_req), .out_ready(qc_ready)
  );

  // A page is taken only when the previous one has left the raw buffer;
  // until then the queue controller skips page slots (pg_hold).
  assign qc_ready = (sst == S_IDLE);

  sync_fifo #(.W(FLIT_W), .DEPTH(PAGE_FLITS)) u_raw (
    .clk, .rst_n, .push(raw_push), .din(md_data), .pop(raw_pop),
    .dout(raw_dout), .empty(raw_empty), .full(raw_full), .count()
  );

  always_comb begin
    pkt_hdr_t h;
    h = '0;
    h.typ  = PKT_RESP_LINE;
    h.page = cur.page;
    h.off  = cur.off;
    mr_valid = (sst == S_LREQ) || (sst == S_PREQ);
    mr_page  = cur.page;
    mr_flit  = (sst == S_LREQ) ? {cur.off, 3'b000} : 9'd0;
    mr_len   = (sst == S_LREQ) ? 10'(LINE_FLITS) : 10'(PAGE_FLITS);
    line_tx_valid = (sst == S_LHDR) || ((sst == S_LDATA) && md_valid);
    line_tx_data  = (sst == S_LHDR) ? flit_t'(h) : md_data;
    line_tx_last  = (sst == S_LDATA) && (scnt == 10'(LINE_FLITS - 1));
    md_ready = ((sst == S_LDATA) && line_tx_ready) || ((sst == S_PDATA) && !raw_full);
    raw_push = (sst == S_PDATA) && md_valid && !raw_full;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sst  <= S_IDLE;
      cur  <= '0;
      rd_page <= '0;
      scnt <= '0;
    end else begin
      unique case (sst)
        S_IDLE: if (qc_valid && qc_ready) begin
          cur  <= qc_req;
          scnt <= '0;
          if (qc_page) rd_page <= qc_req.page;
          sst  <= qc_page ? S_PREQ : S_LREQ;
        end
        S_LREQ:  if (mr_ready) sst <= S_LHDR;
        S_LHDR:  if (line_tx_ready) sst <= S_LDATA;
        S_LDATA: if (md_valid && line_tx_ready) begin
          scnt <= scnt + 1'b1;
          if (line_tx_last) sst <= S_IDLE;
        end
        S_PREQ:  if (mr_ready) sst <= S_PDATA;
        S_PDATA: if (raw_push) begin
          scnt <= scnt + 1'b1;
          if (scnt == 10'(PAGE_FLITS - 1)) sst <= S_IDLE;
        end
        default: sst <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // Page compression into the staging buffer
  // ------------------------------------------------------------------
  logic  cu_s_ready, cu_m_valid, cu_m_ready, cu_m_last;
  flit_t cu_m_data;
  logic  stg_in_valid, stg_in_ready, stg_in_last;
  flit_t stg_in_data;
  logic  stg_out_valid, stg_out_ready, stg_out_last;
  flit_t stg_out_data;
  logic  pc_start;

  compression_unit u_comp (
    .clk, .rst_n,
    .s_valid(pc_busy && !raw_empty), .s_ready(cu_s_ready), .s_data(raw_dout),
    .m_valid(cu_m_valid), .m_ready(cu_m_ready), .m_data(cu_m_data), .m_last(cu_m_last)
  );
  assign raw_pop    = pc_busy && !raw_empty && cu_s_ready;
  assign cu_m_ready = pc_busy && stg_in_ready;
  // Start a page: write its header into the staging buffer as soon as its
  // first flit is in the raw buffer.
  assign pc_start   = !pc_busy && !raw_empty;

  always_comb begin
    pkt_hdr_t h;
    h = '0;
    h.typ  = PKT_RESP_PAGE;
    h.page = rd_page;
    stg_in_valid = pc_busy ? cu_m_valid : pc_start;
    stg_in_data  = pc_busy ? cu_m_data  : flit_t'(h);
    stg_in_last  = pc_busy && cu_m_last && (pc_chunk == 2'd3);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_busy  <= 1'b0;
      pc_chunk <= '0;
    end else if (!pc_busy) begin
      if (pc_start && stg_in_ready) begin
        pc_busy  <= 1'b1;
        pc_chunk <= '0;
      end
    end else if (cu_m_valid && cu_m_ready && cu_m_last) begin
      pc_chunk <= pc_chunk + 1'b1;
      if (pc_chunk == 2'd3) pc_busy <= 1'b0;
    end
  end

  packet_buffer #(.BYTES(8192)) u_stage (
    .clk, .rst_n,
    .in_valid(stg_in_valid), .in_ready(stg_in_ready), .in_data(stg_in_data), .in_last(stg_in_last),
    .out_valid(stg_out_valid), .out_ready(stg_out_ready), .out_data(stg_out_data), .out_last(stg_out_last),
    .pkt_count()
  );

  // ------------------------------------------------------------------
  // Transmit arbiter: whole packets, line responses first
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {T_NONE, T_LINE, T_PAGE} towner_e;
  towner_e towner, tsel;

  always_comb begin
    tsel = towner;
    if (towner == T_NONE) begin
      if (line_tx_valid)      tsel = T_LINE;
      else if (stg_out_valid) tsel = T_PAGE;
    end
    tx_valid      = 1'b0;
    tx_data       = '0;
    tx_last       = 1'b0;
    line_tx_ready = 1'b0;
    stg_out_ready = 1'b0;
    unique case (tsel)
      T_LINE: begin
        tx_valid = line_tx_valid; tx_data = line_tx_data; tx_last = line_tx_last;
        line_tx_ready = tx_ready;
      end
      T_PAGE: begin
        tx_valid = stg_out_valid; tx_data = stg_out_data; tx_last = stg_out_last;
        stg_out_ready = tx_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) towner <= T_NONE;
    else if (tx_valid && tx_ready) towner <= tx_last ? T_NONE : tsel;
  end
endmodule
