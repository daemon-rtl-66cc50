// dirty_unit: keeps dirty cache lines evicted by the LLC consistent with pages
// that are still in flight towards the compute component.
//
// It holds the dirty data buffer (ENTRIES entries of line address + 512-bit
// line) and a small controller. For each dirty eviction that missed in local
// memory it looks the page up in the inflight page buffer (c_* port):
//  * page not inflight, or throttled: the line is written straight to remote
//    memory (wb_* port, becomes a write-back packet);
//  * page scheduled or moved: the line is parked in the dirty data buffer and
//    its bit is set in the page's dirty vector (dw_* port). A line that is
//    already parked is overwritten in place.
//  * if parking it would give the page more than THRESH dirty lines (or the
//    buffer is full), all parked lines of the page plus the new one are
//    written to remote memory and the page entry is marked throttled, so the
//    stale page will be ignored and requested again when it arrives.
// When a (non-throttled) page has arrived and been written to local memory,
// the receive path issues a flush (fl_valid/fl_page); the unit then writes
// every parked line of that page to local memory (lm_* port), frees the
// entries and pulses fl_done.
//
// Timing: one decision per cycle in IDLE; draining moves one line per cycle
// when the consumer is ready. hold blocks new evictions (the receive path
// uses it while it releases a page), a pending flush is served before
// evictions.
//
// From the paper: the rules above, the 256-entry buffer, the example
// threshold of 8 lines. The serial one-line-per-cycle draining, the handling
// of a full buffer and the interlock with the receive path are this
// design's choices. The entry address is stored as page number + offset
// (38 bits) where the paper prints a 32-bit address field.
module dirty_unit
  import daemon_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned THRESH  = 8,
  parameter int unsigned PG_IW   = 8,
  localparam int unsigned IW = $clog2(ENTRIES)
) (
  input  logic        clk,
  input  logic        rst_n,
  // dirty evictions from the LLC
  input  logic        ev_valid,
  output logic        ev_ready,
  input  line_addr_t  ev_addr,
  input  line_data_t  ev_data,
  input  logic        hold,
  // inflight page buffer: lookup and dirty-bit / throttle write
  output page_addr_t  c_page,
  input  logic        c_hit,
  input  pg_state_e   c_state,
  input  logic [PG_IW-1:0] c_idx,
  input  logic [LINES_PER_PAGE-1:0] c_dirty,
  output logic        dw_valid,
  output logic [PG_IW-1:0] dw_idx,
  output logic        dw_throttle,
  output line_off_t   dw_off,
  // flush of a page's parked lines into local memory
  input  logic        fl_valid,
  input  page_addr_t  fl_page,
  output logic        fl_ready,
  output logic        fl_done,
  output logic        lm_valid,
  output line_addr_t  lm_addr,
  output line_data_t  lm_data,
  input  logic        lm_ready,
  // write-back of dirty lines to remote memory
  output logic        wb_valid,
  output line_addr_t  wb_addr,
  output line_data_t  wb_data,
  input  logic        wb_ready,
  // status
  output logic [IW:0] count,
  output logic        st_buffered,
  output logic        st_direct,
  output logic        st_throttle
);
  typedef enum logic [1:0] {S_IDLE, S_FLUSH_REMOTE, S_SEND_EV, S_FLUSH_LOCAL} state_e;
  state_e state;

  logic [ENTRIES-1:0] vld;
  line_addr_t         addr [ENTRIES];
  line_data_t         data [ENTRIES];

  page_addr_t  cur_page;
  line_addr_t  ev_addr_q;
  line_data_t  ev_data_q;

  logic [ENTRIES-1:0] page_m, line_m;
  logic [IW-1:0]      pick_idx, free_idx, line_idx;
  logic               pick_found, free_found, line_found;
  logic               inflight, line_present, over;
  logic [6:0]         ndirty;

  // Entry search: parked lines of cur_page (draining) and the exact line of
  // the eviction (overwrite), plus the lowest free entry.
  always_comb begin
    pick_found = 1'b0; pick_idx = '0;
    free_found = 1'b0; free_idx = '0;
    line_found = 1'b0; line_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      page_m[i] = vld[i] && addr[i].page == cur_page;
      line_m[i] = vld[i] && addr[i] == ev_addr;
      if (page_m[i]) begin pick_found = 1'b1; pick_idx = IW'(i); end
      if (line_m[i]) begin line_found = 1'b1; line_idx = IW'(i); end
      if (!vld[i])   begin free_found = 1'b1; free_idx = IW'(i); end
    end
    count = (IW+1)'($countones(vld));
  end

  assign c_page       = ev_addr.page;
  assign inflight     = c_hit && (c_state == PG_SCHEDULED || c_state == PG_MOVED);
  assign line_present = c_dirty[ev_addr.off] && line_found;
  assign ndirty       = 7'($countones(c_dirty)) + (line_present ? 7'd0 : 7'd1);
  assign over         = (ndirty > 7'(THRESH)) || (!line_present && !free_found);

  wire idle_ev = (state == S_IDLE) && !fl_valid && ev_valid && !hold;

  assign ev_ready    = idle_ev;
  assign fl_ready    = (state == S_IDLE) && fl_valid;
  assign dw_valid    = idle_ev && inflight;
  assign dw_idx      = c_idx;
  assign dw_throttle = over;
  assign dw_off      = ev_addr.off;
  assign st_buffered = idle_ev && inflight && !over;
  assign st_direct   = idle_ev && !inflight;
  assign st_throttle = idle_ev && inflight && over;

  assign lm_valid = (state == S_FLUSH_LOCAL) && pick_found;
  assign lm_addr  = addr[pick_idx];
  assign lm_data  = data[pick_idx];

  always_comb begin
    wb_valid = 1'b0;
    wb_addr  = ev_addr_q;
    wb_data  = ev_data_q;
    if (state == S_FLUSH_REMOTE && pick_found) begin
      wb_valid = 1'b1;
      wb_addr  = addr[pick_idx];
      wb_data  = data[pick_idx];
    end else if (state == S_SEND_EV) begin
      wb_valid = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (idle_ev && inflight && !over) begin
      addr[line_present ? line_idx : free_idx] <= ev_addr;
      data[line_present ? line_idx : free_idx] <= ev_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      vld       <= '0;
      cur_page  <= '0;
      ev_addr_q <= '0;
      ev_data_q <= '0;
      fl_done   <= 1'b0;
    end else begin
      fl_done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (fl_valid) begin
            cur_page <= fl_page;
            state    <= S_FLUSH_LOCAL;
          end else if (idle_ev) begin
            ev_addr_q <= ev_addr;
            ev_data_q <= ev_data;
            cur_page  <= ev_addr.page;
            if (!inflight)  state <= S_SEND_EV;
            else if (over)  state <= S_FLUSH_REMOTE;
            else if (!line_present) vld[free_idx] <= 1'b1;
          end
        end
        S_FLUSH_REMOTE: begin
          if (!pick_found)   state <= S_SEND_EV;
          else if (wb_ready) vld[pick_idx] <= 1'b0;
        end
        S_SEND_EV: if (wb_ready) state <= S_IDLE;
        S_FLUSH_LOCAL: begin
          if (!pick_found) begin
            fl_done <= 1'b1;
            state   <= S_IDLE;
          end else if (lm_ready) vld[pick_idx] <= 1'b0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
