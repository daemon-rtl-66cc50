// daemon_pkg: types and constants shared by the DaeMon compute and memory
// engines.
//
// Data moves between the engines as 64-bit flits. A packet is one header flit
// followed by an optional payload; the last flit of every packet carries a
// `last` flag on the link. A cache line is 64 bytes (8 flits) and a page is
// 4 KB (512 flits, 64 lines). Page numbers are 32 bits wide, as printed for
// the address field of the inflight buffer entries; a cache-line address is a
// page number plus a 6-bit line offset within the page.
//
// The page states (00 scheduled, 01 moved, 10 throttled, 11 invalid) and the
// sub-block states (0 scheduled, 1 invalid) follow the entry layouts of the
// inflight buffers in the paper. The packet types, the header layout and the
// flit width are this design's own choices: the paper does not describe the
// wire format.
package daemon_pkg;

  localparam int unsigned FLIT_W         = 64;
  localparam int unsigned PAGE_W         = 32;   // page number (address field)
  localparam int unsigned OFF_W          = 6;    // cache line offset in a page
  localparam int unsigned LINE_BYTES     = 64;
  localparam int unsigned PAGE_BYTES     = 4096;
  localparam int unsigned LINES_PER_PAGE = PAGE_BYTES / LINE_BYTES;      // 64
  localparam int unsigned LINE_BITS      = LINE_BYTES * 8;               // 512
  localparam int unsigned LINE_FLITS     = LINE_BITS / FLIT_W;           // 8
  localparam int unsigned PAGE_FLITS     = PAGE_BYTES * 8 / FLIT_W;      // 512
  localparam int unsigned CHUNK_BYTES    = 1024;  // compression granularity
  localparam int unsigned CHUNK_FLITS    = CHUNK_BYTES * 8 / FLIT_W;     // 128
  localparam int unsigned CHUNKS_PER_PAGE = PAGE_BYTES / CHUNK_BYTES;    // 4

  typedef logic [PAGE_W-1:0]    page_addr_t;
  typedef logic [OFF_W-1:0]     line_off_t;
  typedef logic [LINE_BITS-1:0] line_data_t;
  typedef logic [FLIT_W-1:0]    flit_t;

  typedef struct packed {
    page_addr_t page;
    line_off_t  off;
  } line_addr_t;

  // Inflight page buffer entry state (2 bits).
  typedef enum logic [1:0] {
    PG_SCHEDULED = 2'b00,
    PG_MOVED     = 2'b01,
    PG_THROTTLED = 2'b10,
    PG_INVALID   = 2'b11
  } pg_state_e;

  // Inflight sub-block buffer entry state (1 bit).
  typedef enum logic {
    SB_SCHEDULED = 1'b0,
    SB_INVALID   = 1'b1
  } sb_state_e;

  // Packet types carried in the header flit.
  typedef enum logic [2:0] {
    PKT_REQ_LINE  = 3'd0,  // compute -> memory: read one cache line
    PKT_REQ_PAGE  = 3'd1,  // compute -> memory: read one page
    PKT_RESP_LINE = 3'd2,  // memory -> compute: header + 8 data flits
    PKT_RESP_PAGE = 3'd3,  // memory -> compute: header + compressed page
    PKT_WB_LINE   = 3'd4,  // compute -> memory: dirty line, header + 8 flits
    PKT_WB_PAGE   = 3'd5   // compute -> memory: dirty page, compressed
  } pkt_type_e;

  typedef struct packed {
    pkt_type_e  typ;      // 3
    logic [21:0] rsvd;    // 22
    logic        rsvd1;   // 1
    page_addr_t page;     // 32
    line_off_t  off;      // 6
  } pkt_hdr_t;            // 64 bits

  // A pending request in a sub-block or page queue (the line offset is
  // unused for a page request).
  typedef line_addr_t req_t;

  // One-cycle event strobes of the compute engine, for counters outside it.
  typedef struct packed {
    logic sgu_both;        // request served at both granularities
    logic sgu_line_only;   // cache line only (page not requested)
    logic sgu_page_only;   // page only
    logic sgu_drop;        // neither: page already on its way
    logic sgu_stall;       // request held back: no room for the line
    logic req_line_sent;   // line request left through the link
    logic req_page_sent;   // page request left through the link
    logic line_used;       // arriving line delivered to the LLC
    logic line_ignored;    // arriving line dropped (its page came first)
    logic page_written;    // arriving page written to local memory
    logic page_rerequest;  // arriving page was throttled: requested again
    logic dirty_buffered;  // dirty eviction parked in the dirty buffer
    logic dirty_direct;    // dirty eviction written straight to remote
    logic dirty_throttle;  // threshold exceeded: page throttled
    logic dirty_to_local;  // parked line flushed into local memory
    logic page_evicted;    // dirty page sent compressed to remote memory
  } ce_stats_t;

endpackage
