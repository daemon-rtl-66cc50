// inflight_subblock_buffer: tracks the cache-line requests of the compute
// engine that have been scheduled but whose data has not yet arrived.
//
// A content-addressable buffer of ENTRIES entries indexed by page number.
// Each entry holds the page number, a state bit (0 scheduled, 1 invalid) and
// a 64-bit vector with one bit per cache line of the page that is in flight,
// so several inflight lines of the same page share one entry.
//
//  * Lookup (combinational): lk_page_hit if the page has a scheduled entry,
//    lk_line_hit if in addition the line's bit is set.
//  * Insert (ins_valid): sets the line's bit in the page's entry, or takes the
//    lowest free entry if the page has none. The user must not insert a new
//    page while full is high.
//  * Arrival (arr_valid): a returning cache line. arr_hit tells whether it is
//    still wanted; if so its bit is cleared, and the entry becomes invalid
//    when no bit is left.
//  * Page removal (rm_valid): the whole page arrived, so its entry is
//    invalidated and late cache lines of that page will miss (arr_hit low).
//  * count is the number of valid entries (the buffer's utilization).
// All updates take effect at the next clock edge.
//
// From the paper: 128 entries, page-indexed CAM, entry layout 32-bit address,
// 1-bit state, 64-bit offset vector. The port structure and the allocation
// order are this design's choices.
module inflight_subblock_buffer
  import daemon_pkg::*;
#(
  parameter int unsigned ENTRIES = 128,
  localparam int unsigned IW = $clog2(ENTRIES)
) (
  input  logic        clk,
  input  logic        rst_n,
  // lookup
  input  line_addr_t  lk_addr,
  output logic        lk_page_hit,
  output logic        lk_line_hit,
  // insert
  input  logic        ins_valid,
  input  line_addr_t  ins_addr,
  // cache-line arrival
  input  logic        arr_valid,
  input  line_addr_t  arr_addr,
  output logic        arr_hit,
  // page arrival: drop all lines of the page
  input  logic        rm_valid,
  input  page_addr_t  rm_page,
  // utilization
  output logic        full,
  output logic [IW:0] count
);
  // Entries are kept as per-entry registers written by their own process
  // (one decoded write per entry), so they map to flip-flops. The paper's
  // 1-bit state (0 scheduled, 1 invalid) is kept inverted, as a valid flag.
  logic [ENTRIES-1:0][PAGE_W-1:0]         e_page;
  logic [ENTRIES-1:0][LINES_PER_PAGE-1:0] e_vec;
  logic [ENTRIES-1:0] valid, lk_m, lk_l, ins_m, arr_m, rm_m;
  logic [IW-1:0]      free_idx;
  logic               free_found, ins_hit;

  for (genvar g = 0; g < ENTRIES; g++) begin : g_ent
    page_addr_t                page_q;
    logic [LINES_PER_PAGE-1:0] vec_q, v;
    logic                      valid_q;

    assign e_page[g] = page_q;
    assign e_vec[g]  = vec_q;
    assign valid[g]  = valid_q;
    assign lk_m[g]   = valid_q && page_q == lk_addr.page;
    assign lk_l[g]   = lk_m[g] && vec_q[lk_addr.off];
    assign ins_m[g]  = valid_q && page_q == ins_addr.page;
    assign arr_m[g]  = valid_q && page_q == arr_addr.page && vec_q[arr_addr.off];
    assign rm_m[g]   = valid_q && page_q == rm_page;

    // next line vector of an already valid entry
    always_comb begin
      v = vec_q;
      if (ins_valid && ins_m[g]) v[ins_addr.off] = 1'b1;
      if (arr_valid && arr_m[g]) v[arr_addr.off] = 1'b0;
      if (rm_valid && rm_m[g])   v = '0;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        page_q  <= '0;
        vec_q   <= '0;
        valid_q <= 1'b0;
      end else if (ins_valid && !ins_hit && free_found && free_idx == IW'(g)) begin
        page_q  <= ins_addr.page;
        vec_q   <= LINES_PER_PAGE'(1) << ins_addr.off;
        valid_q <= 1'b1;
      end else if (valid_q) begin
        vec_q   <= v;
        valid_q <= (v != '0);
      end
    end
  end

  // lowest free entry: one-hot, then encoded by OR-reduction
  function automatic logic [ENTRIES-1:0] idx_mask(input int unsigned b);
    logic [ENTRIES-1:0] m;
    for (int unsigned i = 0; i < ENTRIES; i++) m[i] = 1'((i >> b) & 1);
    return m;
  endfunction

  logic [ENTRIES-1:0] free_oh;
  assign free_oh = ~valid & (valid + 1'b1);
  for (genvar b = 0; b < IW; b++) begin : g_idx
    localparam logic [ENTRIES-1:0] M = idx_mask(b);
    assign free_idx[b] = |(free_oh & M);
  end


  assign lk_page_hit = |lk_m;
  assign lk_line_hit = |lk_l;
  assign ins_hit     = |ins_m;
  assign arr_hit     = |arr_m;
  assign free_found  = !(&valid);
  assign full        = !free_found;
  assign count       = (IW+1)'($countones(valid));

  a_no_insert_when_full: assert property (@(posedge clk) disable iff (!rst_n)
    !(ins_valid && !ins_hit && full));
endmodule
