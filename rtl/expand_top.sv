// expand_top: the expander-driven prefetcher as a whole: one reflector in
// the host's CXL root complex joined to the decider of one CXL-SSD.
//
// The CXL.mem channels (M2S RwD, M2S BIRsp, S2M BISnp, S2M data) and the
// CXL.io channels (configuration requests/completions, hit notifications)
// run straight from one half to the other; the CXL switches, link and PHY
// between them are standard parts and not modelled, so their latency does
// not appear on these wires. Their effect on timing enters through the
// end-to-end latency that the reflector computes from the switch depth
// found at enumeration and writes into the CXL-SSD's configuration space.
//
// The ports are those of the parts this design does not contain: the host
// LLC controller and enumeration walk, the address predictor and the
// decision-tree classifier of the decider, and the SSD's backend media.
module expand_top
  import expand_pkg::*;
#(
  parameter int unsigned BUF_BYTES  = 16384,
  parameter int unsigned MAX_DEV    = 16,
  parameter int unsigned DEPTH_W    = 4,
  parameter int unsigned SWITCH_LAT = 250,
  parameter int unsigned DSLBIS_LAT = 3000,
  parameter int unsigned TP_ENTRIES = 10,
  parameter int unsigned WIN        = 8,
  parameter int unsigned OUTST      = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // host LLC controller
  input  logic       llc_req_valid,
  output logic       llc_req_ready,
  input  llc_req_t   llc_req,
  output logic       llc_rsp_valid,
  output llc_rsp_t   llc_rsp,
  // host enumeration
  input  logic       enum_evt_valid,
  input  enum_evt_t  enum_evt,
  input  logic       topo_start,
  output logic       topo_done,
  // address predictor
  output logic              ap_in_valid,
  output line_addr_t        ap_in_addr,
  output logic [HASH_W-1:0] ap_in_hash,
  output logic              ap_in_change,
  input  logic              pa_valid,
  output logic              pa_ready,
  input  line_addr_t        pa_addr,
  // decision-tree classifier
  output logic              cls_req,
  output logic [WIN*(LINE_ADDR_W+HASH_W)-1:0] cls_window,
  input  logic              cls_valid,
  input  logic [CAT_W-1:0]  cls_category,
  // backend media
  output logic       be_req_valid,
  input  logic       be_req_ready,
  output logic       be_req_we,
  output line_addr_t be_req_addr,
  output line_t      be_req_data,
  input  logic       be_rsp_valid,
  output logic       be_rsp_ready,
  input  line_t      be_rsp_data,
  // observation
  output lat_t       e2e_lat,
  output logic       e2e_valid,
  output lat_t       host_e2e_lat,
  output logic [$clog2(MAX_DEV+1)-1:0] num_devs,
  output logic       enum_overflow,
  output ts_t        now,
  output ts_t        next_arrival,
  output ts_t        pf_time,
  output logic [31:0] cnt_buf_hit,
  output logic [31:0] cnt_memrdpc,
  output logic [31:0] cnt_prefetch_fill,
  output logic [31:0] cnt_prefetch,
  output logic [31:0] cnt_birsp,
  output logic [31:0] cnt_fire,
  output logic [31:0] cnt_late,
  output logic [31:0] cnt_change,
  output logic [31:0] cnt_hit_notify
);
  logic       m2s_rwd_valid, m2s_rwd_ready;
  m2s_rwd_t   m2s_rwd;
  logic       m2s_birsp_valid, m2s_birsp_ready;
  m2s_birsp_t m2s_birsp;
  logic       s2m_bisnp_valid, s2m_bisnp_ready;
  s2m_bisnp_t s2m_bisnp;
  logic       s2m_drs_valid, s2m_drs_ready;
  s2m_drs_t   s2m_drs;
  logic       io_hit_valid, io_hit_ready;
  io_hit_t    io_hit;
  logic       cfg_req_valid, cfg_req_ready, cfg_cpl_valid;
  cfg_req_t   cfg_req;
  cfg_cpl_t   cfg_cpl;

  reflector #(
    .BUF_BYTES(BUF_BYTES), .MAX_DEV(MAX_DEV), .DEPTH_W(DEPTH_W), .SWITCH_LAT(SWITCH_LAT)
  ) u_reflector (
    .clk, .rst_n,
    .llc_req_valid, .llc_req_ready, .llc_req, .llc_rsp_valid, .llc_rsp,
    .enum_evt_valid, .enum_evt, .topo_start, .topo_done, .num_devs,
    .e2e_rd_dev ('0), .e2e_rd_lat (host_e2e_lat),
    .m2s_rwd_valid, .m2s_rwd_ready, .m2s_rwd,
    .m2s_birsp_valid, .m2s_birsp_ready, .m2s_birsp,
    .s2m_bisnp_valid, .s2m_bisnp_ready, .s2m_bisnp,
    .s2m_drs_valid, .s2m_drs_ready, .s2m_drs,
    .io_hit_valid, .io_hit_ready, .io_hit,
    .cfg_req_valid, .cfg_req_ready, .cfg_req, .cfg_cpl_valid, .cfg_cpl,
    .cnt_buf_hit, .cnt_memrdpc, .cnt_prefetch_fill, .enum_overflow
  );

  decider #(
    .DEV_ID('0), .DSLBIS_LAT(DSLBIS_LAT), .TP_ENTRIES(TP_ENTRIES), .WIN(WIN), .OUTST(OUTST)
  ) u_decider (
    .clk, .rst_n,
    .m2s_rwd_valid, .m2s_rwd_ready, .m2s_rwd,
    .m2s_birsp_valid, .m2s_birsp_ready, .m2s_birsp,
    .s2m_bisnp_valid, .s2m_bisnp_ready, .s2m_bisnp,
    .s2m_drs_valid, .s2m_drs_ready, .s2m_drs,
    .io_hit_valid, .io_hit_ready, .io_hit,
    .cfg_req_valid, .cfg_req_ready, .cfg_req, .cfg_cpl_valid, .cfg_cpl,
    .ap_in_valid, .ap_in_addr, .ap_in_hash, .ap_in_change,
    .pa_valid, .pa_ready, .pa_addr,
    .cls_req, .cls_window, .cls_valid, .cls_category,
    .be_req_valid, .be_req_ready, .be_req_we, .be_req_addr, .be_req_data,
    .be_rsp_valid, .be_rsp_ready, .be_rsp_data,
    .now, .e2e_lat, .e2e_valid, .next_arrival, .pf_time,
    .cnt_prefetch, .cnt_birsp, .cnt_fire, .cnt_late, .cnt_change, .cnt_hit_notify
  );

endmodule
