// inflight_page_buffer: tracks the page migrations of the compute engine that
// are scheduled or under way, and which dirty cache lines of each such page
// are parked in the dirty data buffer.
//
// A content-addressable buffer of ENTRIES entries searched by page number.
// Each entry holds the page number, a 2-bit state and a 64-bit dirty-line
// vector. States: 00 scheduled (waiting in the page queue), 01 moved (request
// sent), 10 throttled (too many dirty lines; the arriving page is stale and
// must be requested again), 11 invalid (free entry).
//
// Ports:
//  * three combinational lookups: a_* for the selection granularity unit,
//    b_* for the receive path and c_* for the dirty unit. Each returns hit,
//    state and the entry index; c_* also the dirty vector.
//  * al_valid allocates the lowest free entry as scheduled (full must be low).
//  * mv_valid marks the page mv_page moved (the queue controller issued it).
//  * rxw_* writes the state of entry rxw_idx (release to invalid on arrival,
//    or back to scheduled when a throttled page is requested again).
//  * dw_* is the dirty unit's port: set one dirty bit, or throttle the entry
//    (state throttled, vector cleared).
//  * count is the number of entries not invalid (the utilization).
// Updates take effect at the next clock edge; when two ports write the same
// entry in one cycle the later one in the list above wins.
//
// From the paper: 256 entries, page-indexed CAM, 32-bit address, 2-bit state
// with the printed encoding, 64-bit dirty cache line offset vector, and the
// state transitions of Section 4. The ports and their priority are this
// design's choices.
module inflight_page_buffer
  import daemon_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  localparam int unsigned IW = $clog2(ENTRIES)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  page_addr_t  a_page,
  output logic        a_hit,
  output pg_state_e   a_state,
  input  page_addr_t  b_page,
  output logic        b_hit,
  output pg_state_e   b_state,
  output logic [IW-1:0] b_idx,
  input  page_addr_t  c_page,
  output logic        c_hit,
  output pg_state_e   c_state,
  output logic [IW-1:0] c_idx,
  output logic [LINES_PER_PAGE-1:0] c_dirty,
  input  logic        al_valid,
  input  page_addr_t  al_page,
  input  logic        mv_valid,
  input  page_addr_t  mv_page,
  input  logic        rxw_valid,
  input  logic [IW-1:0] rxw_idx,
  input  pg_state_e   rxw_state,
  input  logic        dw_valid,
  input  logic [IW-1:0] dw_idx,
  input  logic        dw_throttle,
  input  line_off_t   dw_off,
  output logic        full,
  output logic [IW:0] count
);
  // Entries are kept as per-entry registers written by their own process
  // (one decoded write per entry), so they map to flip-flops.
  logic [ENTRIES-1:0][PAGE_W-1:0]         e_page;
  pg_state_e [ENTRIES-1:0]                 e_state;
  logic [ENTRIES-1:0][LINES_PER_PAGE-1:0] e_dirty;
  logic [ENTRIES-1:0] valid, a_m, b_m, c_m;
  logic [IW-1:0]      free_idx, a_idx;
  logic               free_found;

  for (genvar g = 0; g < ENTRIES; g++) begin : g_ent
    page_addr_t                page_q;
    pg_state_e                 state_q;
    logic [LINES_PER_PAGE-1:0] dirty_q;

    assign e_page[g]  = page_q;
    assign e_state[g] = state_q;
    assign e_dirty[g] = dirty_q;
    assign valid[g]   = (state_q != PG_INVALID);
    assign a_m[g]     = valid[g] && page_q == a_page;
    assign b_m[g]     = valid[g] && page_q == b_page;
    assign c_m[g]     = valid[g] && page_q == c_page;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        page_q  <= '0;
        state_q <= PG_INVALID;
        dirty_q <= '0;
      end else begin
        if (al_valid && free_found && free_idx == IW'(g)) begin
          page_q  <= al_page;
          state_q <= PG_SCHEDULED;
          dirty_q <= '0;
        end
        if (mv_valid && valid[g] && page_q == mv_page && state_q == PG_SCHEDULED)
          state_q <= PG_MOVED;
        if (rxw_valid && rxw_idx == IW'(g)) state_q <= rxw_state;
        if (dw_valid && dw_idx == IW'(g)) begin
          if (dw_throttle) begin
            state_q <= PG_THROTTLED;
            dirty_q <= '0;
          end else begin
            dirty_q[dw_off] <= 1'b1;
          end
        end
      end
    end
  end

  // Index of the (unique) matching entry and of the lowest free entry, as
  // OR-reductions of one-hot vectors (bit b of the index = OR of the entries
  // whose number has bit b set).
  function automatic logic [ENTRIES-1:0] idx_mask(input int unsigned b);
    logic [ENTRIES-1:0] m;
    for (int unsigned i = 0; i < ENTRIES; i++) m[i] = 1'((i >> b) & 1);
    return m;
  endfunction

  logic [ENTRIES-1:0] free_oh;
  assign free_oh = ~valid & (valid + 1'b1);   // lowest free entry, one-hot

  for (genvar b = 0; b < IW; b++) begin : g_idx
    localparam logic [ENTRIES-1:0] M = idx_mask(b);
    assign a_idx[b]    = |(a_m & M);
    assign b_idx[b]    = |(b_m & M);
    assign c_idx[b]    = |(c_m & M);
    assign free_idx[b] = |(free_oh & M);
  end

  assign a_hit      = |a_m;
  assign b_hit      = |b_m;
  assign c_hit      = |c_m;
  assign free_found = !(&valid);
  assign a_state    = a_hit ? e_state[a_idx] : PG_INVALID;
  assign b_state    = b_hit ? e_state[b_idx] : PG_INVALID;
  assign c_state    = c_hit ? e_state[c_idx] : PG_INVALID;
  assign c_dirty    = c_hit ? e_dirty[c_idx] : '0;
  assign full       = !free_found;
  assign count      = (IW+1)'($countones(valid));

  a_no_alloc_when_full: assert property (@(posedge clk) disable iff (!rst_n) !(al_valid && full));
endmodule
