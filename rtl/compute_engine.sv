// compute_engine: the DaeMon engine of a compute component. It sits between
// the CPU (its last-level cache and the FPGA control logic), the local memory
// and the network, and moves remote data at cache-line and page granularity.
//
// Request path. A remote request of the CPU (a cache-line address that missed
// in local memory) goes to the selection granularity unit, which looks the
// page up in the inflight page buffer and the line in the inflight sub-block
// buffer and schedules the line (sub-block queue + sub-block buffer), the
// page (page queue + page buffer), both or neither. The queue controller
// drains the two queues in a fixed 21:1 ratio and sends one-flit request
// packets; a page request marks its page buffer entry moved.
//
// Receive path. Arriving packets wait in the 8 KB packet buffer.
//  * A cache line is delivered to the LLC (llc_*) only if the sub-block
//    buffer still expects it; otherwise (its page came first) it is dropped.
//  * A page is decompressed chunk by chunk and written to local memory
//    (lm_*, flit by flit). Then its page buffer entry is released, all its
//    sub-block entries are removed, the dirty unit flushes the page's parked
//    dirty lines into local memory (lml_*), and pd_valid reports the page to
//    the control logic (page table update). If the entry was throttled
//    instead, the data is dropped and the page is requested again.
//
// Dirty data. Dirty LLC evictions that missed in local memory go to the dirty
// unit (ev_*), which writes them to remote memory or parks them while their
// page is in flight. Dirty pages evicted from local memory (pe_*, 512 flits)
// are compressed and sent to remote memory.
//
// Network. tx_* / rx_* carry 64-bit flits with a last flag (see daemon_pkg
// for the packet format). Outgoing packets are sent whole. Dirty lines go
// first (so that a line written straight to remote memory always reaches it
// before a later request for its page), then requests, then compressed
// pages, which are assembled in a staging buffer so that compression never
// holds the link.
//
// From the paper: the blocks and their cooperation (Section 4, Fig. 5), the
// buffer and queue sizes of the compute engine. The interlock between the
// receive path and the dirty unit, the staging buffer for outgoing pages,
// the link priority and all interfaces are this design's choices.
module compute_engine
  import daemon_pkg::*;
#(
  parameter int unsigned SBQ_DEPTH  = 128,
  parameter int unsigned PQ_DEPTH   = 256,
  parameter int unsigned SB_ENTRIES = 128,
  parameter int unsigned PG_ENTRIES = 256,
  parameter int unsigned DIRTY_ENTRIES = 256,
  parameter int unsigned DIRTY_THRESH  = 8,
  parameter int unsigned PKT_BYTES  = 8192,
  parameter int unsigned RATIO_PCT  = 25
) (
  input  logic        clk,
  input  logic        rst_n,
  // CPU interface: remote data requests
  input  logic        cpu_req_valid,
  output logic        cpu_req_ready,
  input  line_addr_t  cpu_req_addr,
  // cache lines written to the LLC over the coherent interconnect
  output logic        llc_valid,
  input  logic        llc_ready,
  output line_addr_t  llc_addr,
  output line_data_t  llc_data,
  // page data written to local memory, one flit at a time
  output logic        lm_valid,
  input  logic        lm_ready,
  output page_addr_t  lm_page,
  output logic [8:0]  lm_flit,
  output flit_t       lm_data,
  // parked dirty lines written to local memory
  output logic        lml_valid,
  input  logic        lml_ready,
  output line_addr_t  lml_addr,
  output line_data_t  lml_data,
  // page now present in local memory
  output logic        pd_valid,
  output page_addr_t  pd_page,
  // dirty LLC evictions that missed in local memory
  input  logic        ev_valid,
  output logic        ev_ready,
  input  line_addr_t  ev_addr,
  input  line_data_t  ev_data,
  // dirty page evicted from local memory (512 flits, page held constant)
  input  logic        pe_valid,
  output logic        pe_ready,
  input  page_addr_t  pe_page,
  input  flit_t       pe_data,
  // network
  output logic        tx_valid,
  input  logic        tx_ready,
  output flit_t       tx_data,
  output logic        tx_last,
  input  logic        rx_valid,
  output logic        rx_ready,
  input  flit_t       rx_data,
  input  logic        rx_last,
  // statistics
  output ce_stats_t   stats,
  output logic [$clog2(SB_ENTRIES):0] sb_count,
  output logic [$clog2(PG_ENTRIES):0] pg_count
);
  localparam int unsigned PGW = $clog2(PG_ENTRIES);
  localparam int unsigned SQW = $clog2(SBQ_DEPTH);
  localparam int unsigned PQW = $clog2(PQ_DEPTH);
  localparam int unsigned PBW = $clog2(PKT_BYTES * 8 / FLIT_W);

  // ------------------------------------------------------------------
  // Queues, buffers, selection granularity unit
  // ------------------------------------------------------------------
  logic       sbq_push, sbq_pop, sbq_empty, sbq_full;
  logic       pq_push, pq_pop, pq_empty, pq_full;
  req_t       sbq_head, pq_head, pq_din;
  logic [SQW:0] sbq_count;
  logic [PQW:0] pq_count;

  logic       pg_a_hit, pg_b_hit, pg_c_hit, pg_full;
  pg_state_e  pg_a_state, pg_b_state, pg_c_state;
  logic [PGW-1:0] pg_b_idx, pg_c_idx;
  logic [LINES_PER_PAGE-1:0] pg_c_dirty;
  logic       pg_mv_valid, pg_rxw_valid, dw_valid, dw_throttle;
  pg_state_e  pg_rxw_state;
  logic [PGW-1:0] dw_idx;
  line_off_t  dw_off;
  page_addr_t pg_c_page;

  logic       sb_page_hit, sb_line_hit, sb_full, sb_arr_valid, sb_arr_hit, sb_rm_valid;
  logic       do_page, do_line, sgu_ready, sgu_valid;
  logic       rereq;   // receive path re-requests a throttled page this cycle

  pkt_hdr_t   rx_hdr;

  selection_granularity_unit #(.SB_ENTRIES(SB_ENTRIES), .PG_ENTRIES(PG_ENTRIES)) u_sgu (
    .req_valid  (sgu_valid),
    .req_ready  (sgu_ready),
    .pg_hit     (pg_a_hit),
    .pg_state   (pg_a_state),
    .pg_full    (pg_full),
    .pg_count   (pg_count),
    .pq_full    (pq_full),
    .sb_page_hit(sb_page_hit),
    .sb_line_hit(sb_line_hit),
    .sb_full    (sb_full),
    .sb_count   (sb_count),
    .sbq_full   (sbq_full),
    .do_page    (do_page),
    .do_line    (do_line),
    .dec_both   (stats.sgu_both),
    .dec_line_only(stats.sgu_line_only),
    .dec_page_only(stats.sgu_page_only),
    .dec_drop   (stats.sgu_drop)
  );

  assign sgu_valid       = cpu_req_valid && !rereq;
  assign cpu_req_ready   = sgu_ready && !rereq;
  assign stats.sgu_stall = cpu_req_valid && !rereq && !sgu_ready;

  assign sbq_push = do_line;
  assign pq_push  = do_page || rereq;
  assign pq_din   = rereq ? '{page: rx_hdr.page, off: '0} : cpu_req_addr;

  sync_fifo #(.W($bits(req_t)), .DEPTH(SBQ_DEPTH)) u_sbq (
    .clk, .rst_n, .push(sbq_push), .din(cpu_req_addr), .pop(sbq_pop),
    .dout(sbq_head), .empty(sbq_empty), .full(sbq_full), .count(sbq_count)
  );

  sync_fifo #(.W($bits(req_t)), .DEPTH(PQ_DEPTH)) u_pq (
    .clk, .rst_n, .push(pq_push), .din(pq_din), .pop(pq_pop),
    .dout(pq_head), .empty(pq_empty), .full(pq_full), .count(pq_count)
  );

  inflight_subblock_buffer #(.ENTRIES(SB_ENTRIES)) u_sb (
    .clk, .rst_n,
    .lk_addr    (cpu_req_addr),
    .lk_page_hit(sb_page_hit),
    .lk_line_hit(sb_line_hit),
    .ins_valid  (do_line),
    .ins_addr   (cpu_req_addr),
    .arr_valid  (sb_arr_valid),
    .arr_addr   ('{page: rx_hdr.page, off: rx_hdr.off}),
    .arr_hit    (sb_arr_hit),
    .rm_valid   (sb_rm_valid),
    .rm_page    (rx_hdr.page),
    .full       (sb_full),
    .count      (sb_count)
  );

  logic   qc_valid, qc_page, qc_ready;
  req_t   qc_req;

  inflight_page_buffer #(.ENTRIES(PG_ENTRIES)) u_pg (
    .clk, .rst_n,
    .a_page   (cpu_req_addr.page),
    .a_hit    (pg_a_hit),
    .a_state  (pg_a_state),
    .b_page   (rx_hdr.page),
    .b_hit    (pg_b_hit),
    .b_state  (pg_b_state),
    .b_idx    (pg_b_idx),
    .c_page   (pg_c_page),
    .c_hit    (pg_c_hit),
    .c_state  (pg_c_state),
    .c_idx    (pg_c_idx),
    .c_dirty  (pg_c_dirty),
    .al_valid (do_page),
    .al_page  (cpu_req_addr.page),
    .mv_valid (pg_mv_valid),
    .mv_page  (qc_req.page),
    .rxw_valid(pg_rxw_valid),
    .rxw_idx  (pg_b_idx),
    .rxw_state(pg_rxw_state),
    .dw_valid (dw_valid),
    .dw_idx   (dw_idx),
    .dw_throttle(dw_throttle),
    .dw_off   (dw_off),
    .full     (pg_full),
    .count    (pg_count)
  );

  queue_controller #(.RATIO_PCT(RATIO_PCT)) u_qc (
    .clk, .rst_n,
    .sb_empty (sbq_empty), .sb_head(sbq_head), .sb_pop(sbq_pop),
    .pg_empty (pq_empty),  .pg_hold(1'b0), .pg_head(pq_head),  .pg_pop(pq_pop),
    .out_valid(qc_valid), .out_page(qc_page), .out_req(qc_req), .out_ready(qc_ready)
  );

  assign pg_mv_valid         = qc_valid && qc_ready && qc_page;
  assign stats.req_line_sent = qc_valid && qc_ready && !qc_page;
  assign stats.req_page_sent = pg_mv_valid;

  // ------------------------------------------------------------------
  // Dirty unit
  // ------------------------------------------------------------------
  logic       du_hold, fl_valid, fl_ready, fl_done;
  logic       wb_valid, wb_ready;
  line_addr_t wb_addr;
  line_data_t wb_data;

  dirty_unit #(.ENTRIES(DIRTY_ENTRIES), .THRESH(DIRTY_THRESH), .PG_IW(PGW)) u_dirty (
    .clk, .rst_n,
    .ev_valid, .ev_ready, .ev_addr, .ev_data,
    .hold     (du_hold),
    .c_page   (pg_c_page),
    .c_hit    (pg_c_hit),
    .c_state  (pg_c_state),
    .c_idx    (pg_c_idx),
    .c_dirty  (pg_c_dirty),
    .dw_valid, .dw_idx, .dw_throttle, .dw_off,
    .fl_valid, .fl_page(rx_hdr.page), .fl_ready, .fl_done,
    .lm_valid (lml_valid), .lm_addr(lml_addr), .lm_data(lml_data), .lm_ready(lml_ready),
    .wb_valid, .wb_addr, .wb_data, .wb_ready,
    .count    (),
    .st_buffered(stats.dirty_buffered),
    .st_direct  (stats.dirty_direct),
    .st_throttle(stats.dirty_throttle)
  );
  assign stats.dirty_to_local = lml_valid && lml_ready;

  // ------------------------------------------------------------------
  // Dirty page eviction: compress into the staging buffer
  // ------------------------------------------------------------------
  logic       pe_busy, stg_in_valid, stg_in_ready, stg_in_last;
  flit_t      stg_in_data;
  logic       stg_out_valid, stg_out_ready, stg_out_last;
  flit_t      stg_out_data;
  logic [9:0] pe_cnt;
  logic [1:0] pe_chunk;
  page_addr_t pe_page_q;
  logic       cu_s_valid, cu_s_ready, cu_m_valid, cu_m_ready, cu_m_last;
  flit_t      cu_m_data;

  compression_unit u_comp (
    .clk, .rst_n,
    .s_valid(cu_s_valid), .s_ready(cu_s_ready), .s_data(pe_data),
    .m_valid(cu_m_valid), .m_ready(cu_m_ready), .m_data(cu_m_data), .m_last(cu_m_last)
  );

  assign cu_s_valid = pe_busy && pe_valid && (pe_cnt != 10'(PAGE_FLITS));
  assign pe_ready   = pe_busy && cu_s_ready && (pe_cnt != 10'(PAGE_FLITS));
  assign cu_m_ready = pe_busy && stg_in_ready;

  always_comb begin
    pkt_hdr_t h;
    h = '0;
    h.typ  = PKT_WB_PAGE;
    h.page = pe_page;
    stg_in_valid = pe_busy ? cu_m_valid : pe_valid;
    stg_in_data  = pe_busy ? cu_m_data  : flit_t'(h);
    stg_in_last  = pe_busy && cu_m_last && (pe_chunk == 2'd3);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pe_busy   <= 1'b0;
      pe_cnt    <= '0;
      pe_chunk  <= '0;
      pe_page_q <= '0;
    end else if (!pe_busy) begin
      if (pe_valid && stg_in_ready) begin   // header written
        pe_busy   <= 1'b1;
        pe_cnt    <= '0;
        pe_chunk  <= '0;
        pe_page_q <= pe_page;
      end
    end else begin
      if (pe_valid && pe_ready) pe_cnt <= pe_cnt + 1'b1;
      if (cu_m_valid && cu_m_ready && cu_m_last) begin
        pe_chunk <= pe_chunk + 1'b1;
        if (pe_chunk == 2'd3) pe_busy <= 1'b0;
      end
    end
  end
  assign stats.page_evicted = pe_busy && cu_m_valid && cu_m_ready && cu_m_last && (pe_chunk == 2'd3);

  packet_buffer #(.BYTES(PKT_BYTES)) u_stage (
    .clk, .rst_n,
    .in_valid(stg_in_valid), .in_ready(stg_in_ready), .in_data(stg_in_data), .in_last(stg_in_last),
    .out_valid(stg_out_valid), .out_ready(stg_out_ready), .out_data(stg_out_data), .out_last(stg_out_last),
    .pkt_count()
  );

  // ------------------------------------------------------------------
  // Transmit arbiter: dirty lines > requests > staged pages, whole packets
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {T_NONE, T_WB, T_PE} towner_e;
  towner_e    towner;
  logic [3:0] wb_cnt;

  always_comb begin
    pkt_hdr_t h;
    h = '0;
    tx_valid = 1'b0;
    tx_data  = '0;
    tx_last  = 1'b0;
    qc_ready = 1'b0;
    wb_ready = 1'b0;
    stg_out_ready = 1'b0;
    unique case (towner)
      T_NONE: if (qc_valid && !wb_valid) begin
        h.typ  = qc_page ? PKT_REQ_PAGE : PKT_REQ_LINE;
        h.page = qc_req.page;
        h.off  = qc_req.off;
        tx_valid = 1'b1;
        tx_data  = flit_t'(h);
        tx_last  = 1'b1;
        qc_ready = tx_ready;
      end
      T_WB: begin
        h.typ  = PKT_WB_LINE;
        h.page = wb_addr.page;
        h.off  = wb_addr.off;
        tx_valid = 1'b1;
        tx_data  = (wb_cnt == 0) ? flit_t'(h) : wb_data[(7'(wb_cnt) - 7'd1)*64 +: 64];
        tx_last  = (wb_cnt == 4'(LINE_FLITS));
        wb_ready = tx_ready && tx_last;
      end
      T_PE: begin
        tx_valid = stg_out_valid;
        tx_data  = stg_out_data;
        tx_last  = stg_out_last;
        stg_out_ready = tx_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      towner <= T_NONE;
      wb_cnt <= '0;
    end else begin
      unique case (towner)
        T_NONE: if (wb_valid) begin
          towner <= T_WB;
          wb_cnt <= '0;
        end else if (!qc_valid && stg_out_valid) begin
          towner <= T_PE;
        end
        T_WB: if (tx_ready) begin
          wb_cnt <= wb_cnt + 1'b1;
          if (tx_last) towner <= T_NONE;
        end
        T_PE: if (stg_out_valid && tx_ready && stg_out_last) towner <= T_NONE;
        default: towner <= T_NONE;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // Receive path
  // ------------------------------------------------------------------
  typedef enum logic [3:0] {
    R_HDR, R_LINE, R_LINE_DONE, R_PCHK, R_PAGE, R_DISCARD, R_FINISH,
    R_REREQ, R_FLUSH_REQ, R_FLUSH_WAIT
  } rstate_e;
  rstate_e     rst;
  logic        pb_valid, pb_ready, pb_last;
  flit_t       pb_data;
  line_data_t  line_q;
  logic [2:0]  lcnt;
  logic        in_done, out_done;
  logic [8:0]  ocnt;
  logic        du_s_valid, du_s_ready, du_m_valid, du_m_ready, du_m_last;
  flit_t       du_m_data;
  pkt_hdr_t    pb_hdr;

  assign pb_hdr = pkt_hdr_t'(pb_data);

  packet_buffer #(.BYTES(PKT_BYTES)) u_rxbuf (
    .clk, .rst_n,
    .in_valid(rx_valid), .in_ready(rx_ready), .in_data(rx_data), .in_last(rx_last),
    .out_valid(pb_valid), .out_ready(pb_ready), .out_data(pb_data), .out_last(pb_last),
    .pkt_count()
  );

  decompression_unit u_decomp (
    .clk, .rst_n,
    .s_valid(du_s_valid), .s_ready(du_s_ready), .s_data(pb_data),
    .m_valid(du_m_valid), .m_ready(du_m_ready), .m_data(du_m_data), .m_last(du_m_last)
  );

  assign du_s_valid = (rst == R_PAGE) && pb_valid && !in_done;
  assign du_m_ready = (rst == R_PAGE) && !out_done && lm_ready;
  assign lm_valid   = (rst == R_PAGE) && !out_done && du_m_valid;
  assign lm_page    = rx_hdr.page;
  assign lm_flit    = ocnt;
  assign lm_data    = du_m_data;

  assign llc_valid  = (rst == R_LINE_DONE) && sb_arr_hit;
  assign llc_addr   = '{page: rx_hdr.page, off: rx_hdr.off};
  assign llc_data   = line_q;
  assign sb_arr_valid = llc_valid && llc_ready;
  assign stats.line_used    = sb_arr_valid;
  assign stats.line_ignored = (rst == R_LINE_DONE) && !sb_arr_hit;

  assign rereq        = (rst == R_REREQ) && !pq_full;
  assign stats.page_rerequest = rereq;
  assign pg_rxw_valid = rereq || ((rst == R_FINISH) && pg_b_hit && pg_b_state != PG_THROTTLED);
  assign pg_rxw_state = rereq ? PG_SCHEDULED : PG_INVALID;
  assign sb_rm_valid  = (rst == R_FINISH) && !(pg_b_hit && pg_b_state == PG_THROTTLED);
  assign fl_valid     = (rst == R_FLUSH_REQ);
  assign du_hold      = (rst == R_FINISH) || (rst == R_FLUSH_REQ) || (rst == R_FLUSH_WAIT);
  assign pd_valid     = (rst == R_FLUSH_WAIT) && fl_done;
  assign pd_page      = rx_hdr.page;
  assign stats.page_written = pd_valid;

  always_comb begin
    pb_ready = 1'b0;
    unique case (rst)
      R_HDR:     pb_ready = pb_valid;
      R_LINE:    pb_ready = pb_valid;
      R_PAGE:    pb_ready = du_s_valid && du_s_ready;
      R_DISCARD: pb_ready = pb_valid;
      default:   pb_ready = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rst      <= R_HDR;
      rx_hdr   <= '0;
      line_q   <= '0;
      lcnt     <= '0;
      in_done  <= 1'b0;
      out_done <= 1'b0;
      ocnt     <= '0;
    end else begin
      unique case (rst)
        R_HDR: if (pb_valid) begin
          rx_hdr <= pkt_hdr_t'(pb_data);
          lcnt   <= '0;
          unique case (pb_hdr.typ)
            PKT_RESP_LINE: rst <= pb_last ? R_HDR : R_LINE;
            PKT_RESP_PAGE: rst <= pb_last ? R_HDR : R_PCHK;
            default:       rst <= pb_last ? R_HDR : R_DISCARD;
          endcase
        end
        R_LINE: if (pb_valid) begin
          line_q[lcnt*64 +: 64] <= pb_data;
          lcnt <= lcnt + 1'b1;
          if (pb_last) rst <= R_LINE_DONE;
        end
        R_LINE_DONE: if (!sb_arr_hit || llc_ready) rst <= R_HDR;
        R_PCHK: begin
          in_done  <= 1'b0;
          out_done <= 1'b0;
          ocnt     <= '0;
          rst <= (pg_b_hit && pg_b_state == PG_THROTTLED) ? R_DISCARD : R_PAGE;
        end
        R_PAGE: begin
          if (du_s_valid && du_s_ready && pb_last) in_done <= 1'b1;
          if (du_m_valid && du_m_ready) begin
            ocnt <= ocnt + 1'b1;
            if (ocnt == 9'(PAGE_FLITS - 1)) out_done <= 1'b1;
          end
          if (in_done && out_done) rst <= R_FINISH;
        end
        R_DISCARD: if (pb_valid && pb_last)
          rst <= (rx_hdr.typ == PKT_RESP_PAGE) ? R_REREQ : R_HDR;
        R_FINISH: rst <= (pg_b_hit && pg_b_state == PG_THROTTLED) ? R_REREQ : R_FLUSH_REQ;
        R_REREQ: if (!pq_full) rst <= R_HDR;
        R_FLUSH_REQ: if (fl_ready) rst <= R_FLUSH_WAIT;
        R_FLUSH_WAIT: if (fl_done) rst <= R_HDR;
        default: rst <= R_HDR;
      endcase
    end
  end

  a_rereq_entry: assert property (@(posedge clk) disable iff (!rst_n)
    (rst == R_REREQ) |-> (pg_b_hit && pg_b_state == PG_THROTTLED));
endmodule
