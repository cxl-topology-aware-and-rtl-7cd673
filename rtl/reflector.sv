// reflector: host-side half of the expander-driven prefetcher, living in
// the CXL root complex next to the LLC controller.
//
// It gives the decider on each CXL-SSD what it needs to decide (the PC of
// every miss, carried by MemRdPC; cache-hit notifications over CXL.io; the
// end-to-end latency of the device, found from the switch topology during
// enumeration) and it takes the decider's results: lines pushed up with
// BISnpData land in the 16 KB reflector buffer, which the LLC controller
// checks before going to the CXL-SSD pool.
//
// Sub-blocks: reflector_buffer, reflector_req_path, bisnp_receiver,
// switch_depth_tracker, topology_latency_unit. The request path and the
// snoop handler share the buffer's single invalidate port; the request
// path has priority and the snoop handler waits.
module reflector
  import expand_pkg::*;
#(
  parameter int unsigned BUF_BYTES  = 16384,
  parameter int unsigned MAX_DEV    = 16,
  parameter int unsigned DEPTH_W    = 4,
  parameter int unsigned SWITCH_LAT = 250
) (
  input  logic       clk,
  input  logic       rst_n,
  // LLC controller
  input  logic       llc_req_valid,
  output logic       llc_req_ready,
  input  llc_req_t   llc_req,
  output logic       llc_rsp_valid,
  output llc_rsp_t   llc_rsp,
  // enumeration
  input  logic       enum_evt_valid,
  input  enum_evt_t  enum_evt,
  input  logic       topo_start,
  output logic       topo_done,
  output logic [$clog2(MAX_DEV+1)-1:0] num_devs,
  input  logic [DEV_W-1:0] e2e_rd_dev,
  output lat_t       e2e_rd_lat,
  // CXL.mem M2S
  output logic       m2s_rwd_valid,
  input  logic       m2s_rwd_ready,
  output m2s_rwd_t   m2s_rwd,
  output logic       m2s_birsp_valid,
  input  logic       m2s_birsp_ready,
  output m2s_birsp_t m2s_birsp,
  // CXL.mem S2M
  input  logic       s2m_bisnp_valid,
  output logic       s2m_bisnp_ready,
  input  s2m_bisnp_t s2m_bisnp,
  input  logic       s2m_drs_valid,
  output logic       s2m_drs_ready,
  input  s2m_drs_t   s2m_drs,
  // CXL.io
  output logic       io_hit_valid,
  input  logic       io_hit_ready,
  output io_hit_t    io_hit,
  output logic       cfg_req_valid,
  input  logic       cfg_req_ready,
  output cfg_req_t   cfg_req,
  input  logic       cfg_cpl_valid,
  input  cfg_cpl_t   cfg_cpl,
  // counters
  output logic [31:0] cnt_buf_hit,
  output logic [31:0] cnt_memrdpc,
  output logic [31:0] cnt_prefetch_fill,
  output logic        enum_overflow
);
  logic       lk_valid, lk_hit;
  line_addr_t lk_addr;
  line_t      lk_data;
  logic       rq_inv_valid, bi_inv_valid, bi_inv_ready;
  line_addr_t rq_inv_addr, bi_inv_addr;
  logic       ins_valid;
  line_addr_t ins_addr;
  line_t      ins_data;
  logic       memdata_valid;
  s2m_drs_t   memdata;
  logic [DEV_W-1:0]   tab_dev;
  logic [DEPTH_W-1:0] tab_depth;
  logic [BUS_W-1:0]   tab_bus;

  assign bi_inv_ready = !rq_inv_valid;

  reflector_buffer #(.BUF_BYTES(BUF_BYTES)) u_buf (
    .clk, .rst_n,
    .lk_valid, .lk_addr, .lk_hit, .lk_data,
    .ins_valid, .ins_addr, .ins_data,
    .inv_valid (rq_inv_valid || bi_inv_valid),
    .inv_addr  (rq_inv_valid ? rq_inv_addr : bi_inv_addr)
  );

  reflector_req_path u_req (
    .clk, .rst_n,
    .llc_req_valid, .llc_req_ready, .llc_req, .llc_rsp_valid, .llc_rsp,
    .lk_valid, .lk_addr, .lk_hit, .lk_data,
    .inv_valid (rq_inv_valid), .inv_addr (rq_inv_addr),
    .m2s_rwd_valid, .m2s_rwd_ready, .m2s_rwd,
    .memdata_valid, .memdata,
    .io_hit_valid, .io_hit_ready, .io_hit,
    .cnt_buf_hit, .cnt_memrdpc
  );

  bisnp_receiver u_bi (
    .clk, .rst_n,
    .bisnp_valid (s2m_bisnp_valid), .bisnp_ready (s2m_bisnp_ready), .bisnp (s2m_bisnp),
    .drs_valid (s2m_drs_valid), .drs_ready (s2m_drs_ready), .drs (s2m_drs),
    .memdata_valid, .memdata,
    .ins_valid, .ins_addr, .ins_data,
    .inv_valid (bi_inv_valid), .inv_ready (bi_inv_ready), .inv_addr (bi_inv_addr),
    .birsp_valid (m2s_birsp_valid), .birsp_ready (m2s_birsp_ready), .birsp (m2s_birsp),
    .cnt_prefetch_fill
  );

  switch_depth_tracker #(.MAX_DEV(MAX_DEV), .DEPTH_W(DEPTH_W)) u_depth (
    .clk, .rst_n,
    .evt_valid (enum_evt_valid), .evt (enum_evt),
    .rd_dev (tab_dev), .rd_depth (tab_depth), .rd_bus (tab_bus),
    .num_devs, .overflow (enum_overflow)
  );

  topology_latency_unit #(.MAX_DEV(MAX_DEV), .DEPTH_W(DEPTH_W), .SWITCH_LAT(SWITCH_LAT)) u_topo (
    .clk, .rst_n,
    .start (topo_start), .done (topo_done),
    .num_devs, .tab_dev, .tab_depth,
    .cfg_req_valid, .cfg_req_ready, .cfg_req, .cfg_cpl_valid, .cfg_cpl,
    .e2e_rd_dev, .e2e_rd_lat
  );

endmodule
