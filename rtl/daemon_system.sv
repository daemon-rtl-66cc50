// daemon_system: a disaggregated system slice with one compute component and
// one memory component, each carrying its DaeMon engine, joined by the
// network link.
//
// The compute engine's transmit flits go straight to the memory engine's
// receive side and back; the network itself (its latency and bandwidth) is
// outside this design, so the link here is a plain valid/ready flit channel
// in each direction. Everything the engines connect to outside DaeMon is
// brought out as ports: the CPU's remote requests and dirty evictions, the
// LLC fill port, the local memory write ports, the page-arrival notice for
// the control logic, and the read/write ports of remote memory.
//
// From the paper: the two engines and their placement (one per compute
// component, one per memory component). The direct link is this design's
// simplification; the paper's evaluation uses one memory component.
module daemon_system
  import daemon_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // compute component side
  input  logic       cpu_req_valid,
  output logic       cpu_req_ready,
  input  line_addr_t cpu_req_addr,
  output logic       llc_valid,
  input  logic       llc_ready,
  output line_addr_t llc_addr,
  output line_data_t llc_data,
  output logic       lm_valid,
  input  logic       lm_ready,
  output page_addr_t lm_page,
  output logic [8:0] lm_flit,
  output flit_t      lm_data,
  output logic       lml_valid,
  input  logic       lml_ready,
  output line_addr_t lml_addr,
  output line_data_t lml_data,
  output logic       pd_valid,
  output page_addr_t pd_page,
  input  logic       ev_valid,
  output logic       ev_ready,
  input  line_addr_t ev_addr,
  input  line_data_t ev_data,
  input  logic       pe_valid,
  output logic       pe_ready,
  input  page_addr_t pe_page,
  input  flit_t      pe_data,
  output ce_stats_t  stats,
  // memory component side: remote memory
  output logic       mr_valid,
  input  logic       mr_ready,
  output page_addr_t mr_page,
  output logic [8:0] mr_flit,
  output logic [9:0] mr_len,
  input  logic       md_valid,
  output logic       md_ready,
  input  flit_t      md_data,
  output logic       mw_valid,
  input  logic       mw_ready,
  output page_addr_t mw_page,
  output logic [8:0] mw_flit,
  output flit_t      mw_data
);
  logic  c2m_valid, c2m_ready, c2m_last;
  flit_t c2m_data;
  logic  m2c_valid, m2c_ready, m2c_last;
  flit_t m2c_data;

  compute_engine u_ce (
    .clk, .rst_n,
    .cpu_req_valid, .cpu_req_ready, .cpu_req_addr,
    .llc_valid, .llc_ready, .llc_addr, .llc_data,
    .lm_valid, .lm_ready, .lm_page, .lm_flit, .lm_data,
    .lml_valid, .lml_ready, .lml_addr, .lml_data,
    .pd_valid, .pd_page,
    .ev_valid, .ev_ready, .ev_addr, .ev_data,
    .pe_valid, .pe_ready, .pe_page, .pe_data,
    .tx_valid(c2m_valid), .tx_ready(c2m_ready), .tx_data(c2m_data), .tx_last(c2m_last),
    .rx_valid(m2c_valid), .rx_ready(m2c_ready), .rx_data(m2c_data), .rx_last(m2c_last),
    .stats,
    .sb_count(), .pg_count()
  );

  memory_engine u_me (
    .clk, .rst_n,
    .rx_valid(c2m_valid), .rx_ready(c2m_ready), .rx_data(c2m_data), .rx_last(c2m_last),
    .tx_valid(m2c_valid), .tx_ready(m2c_ready), .tx_data(m2c_data), .tx_last(m2c_last),
    .mr_valid, .mr_ready, .mr_page, .mr_flit, .mr_len,
    .md_valid, .md_ready, .md_data,
    .mw_valid, .mw_ready, .mw_page, .mw_flit, .mw_data
  );
endmodule
