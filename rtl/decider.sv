// decider: SSD-side half of the expander-driven prefetcher, inside the
// CXL-SSD controller.
//
// It watches the host's demand traffic, works out which lines the host will
// want next and when, and pushes them up into the reflector buffer in time.
//  - Every MemRdPC gives a line address and the PC/pid of the load; the
//    pid/PC pair is hashed (pid_pc_hash) and, with the address and any
//    pending behaviour-change hint, handed to the address predictor
//    (ap_in_*). The predictor's output addresses come back on pa_*.
//  - The same requests fill the sliding window that the decision-tree
//    classifier reads (behavior_change_detector).
//  - MemRdPC arrivals and the reflector's CXL.io hit notifications are
//    time-stamped and feed the timing predictor; the timeliness unit
//    subtracts the end-to-end latency held in the configuration space and
//    releases a prefetch when that time comes.
//  - decider_backend_ctrl serves demand reads/writes from the backend media
//    and sends the released prefetches up as BISnpData with payload.
// The address predictor (a multi-modality transformer) and the classifier
// are ML models outside this RTL; their inputs and outputs are ports here.
// The decider's time base is a free-running cycle counter.
module decider
  import expand_pkg::*;
#(
  parameter logic [DEV_W-1:0] DEV_ID     = '0,
  parameter int unsigned      DSLBIS_LAT = 3000,
  parameter int unsigned      TP_ENTRIES = 10,
  parameter int unsigned      WIN        = 8,
  parameter int unsigned      OUTST      = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // CXL.mem M2S
  input  logic       m2s_rwd_valid,
  output logic       m2s_rwd_ready,
  input  m2s_rwd_t   m2s_rwd,
  input  logic       m2s_birsp_valid,
  output logic       m2s_birsp_ready,
  input  m2s_birsp_t m2s_birsp,
  // CXL.mem S2M
  output logic       s2m_bisnp_valid,
  input  logic       s2m_bisnp_ready,
  output s2m_bisnp_t s2m_bisnp,
  output logic       s2m_drs_valid,
  input  logic       s2m_drs_ready,
  output s2m_drs_t   s2m_drs,
  // CXL.io
  input  logic       io_hit_valid,
  output logic       io_hit_ready,
  input  io_hit_t    io_hit,
  input  logic       cfg_req_valid,
  output logic       cfg_req_ready,
  input  cfg_req_t   cfg_req,
  output logic       cfg_cpl_valid,
  output cfg_cpl_t   cfg_cpl,
  // address predictor (outside)
  output logic              ap_in_valid,
  output line_addr_t        ap_in_addr,
  output logic [HASH_W-1:0] ap_in_hash,
  output logic              ap_in_change,
  input  logic              pa_valid,
  output logic              pa_ready,
  input  line_addr_t        pa_addr,
  // decision-tree classifier (outside)
  output logic              cls_req,
  output logic [WIN*(LINE_ADDR_W+HASH_W)-1:0] cls_window,
  input  logic              cls_valid,
  input  logic [CAT_W-1:0]  cls_category,
  // backend media (outside)
  output logic       be_req_valid,
  input  logic       be_req_ready,
  output logic       be_req_we,
  output line_addr_t be_req_addr,
  output line_t      be_req_data,
  input  logic       be_rsp_valid,
  output logic       be_rsp_ready,
  input  line_t      be_rsp_data,
  // observation
  output ts_t        now,
  output lat_t       e2e_lat,
  output logic       e2e_valid,
  output ts_t        next_arrival,
  output ts_t        pf_time,
  output logic [31:0] cnt_prefetch,
  output logic [31:0] cnt_birsp,
  output logic [31:0] cnt_fire,
  output logic [31:0] cnt_late,
  output logic [31:0] cnt_change,
  output logic [31:0] cnt_hit_notify
);
  logic pred_valid, pred_new, pf_go, pf_taken, change_evt, change_hint;
  ts_t  avg_interval;
  logic [CAT_W-1:0]  cur_category;
  logic [HASH_W-1:0] hash;

  // free-running time base
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

  wire rdpc_acc = m2s_rwd_valid && m2s_rwd_ready && m2s_rwd.opcode == M2S_RWD_MEMRDPC;
  assign io_hit_ready = 1'b1;
  wire arrive = rdpc_acc || io_hit_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_hit_notify <= '0;
    else if (io_hit_valid) cnt_hit_notify <= cnt_hit_notify + 1;
  end

  pid_pc_hash u_hash (
    .pid  (m2s_rwd.data[PC_W +: PID_W]),
    .pc   (m2s_rwd.data[PC_W-1:0]),
    .hash (hash)
  );

  assign ap_in_valid  = rdpc_acc;
  assign ap_in_addr   = m2s_rwd.addr;
  assign ap_in_hash   = hash;
  assign ap_in_change = change_hint;

  behavior_change_detector #(.WIN(WIN)) u_bcd (
    .clk, .rst_n,
    .acc_valid (rdpc_acc), .acc_addr (m2s_rwd.addr), .acc_hash (hash),
    .cls_req, .cls_window, .cls_valid, .cls_category,
    .change_evt, .change_hint, .hint_taken (rdpc_acc),
    .cur_category, .cnt_change
  );

  ssd_config_space #(.DEV_ID(DEV_ID), .DSLBIS_LAT(DSLBIS_LAT)) u_cfg (
    .clk, .rst_n,
    .cfg_req_valid, .cfg_req_ready, .cfg_req, .cfg_cpl_valid, .cfg_cpl,
    .e2e_lat, .e2e_valid
  );

  timing_predictor #(.ENTRIES(TP_ENTRIES)) u_tp (
    .clk, .rst_n, .arrive, .now,
    .pred_valid, .pred_new, .next_arrival, .avg_interval
  );

  timeliness_unit u_tl (
    .clk, .rst_n, .now,
    .pred_new, .next_arrival, .e2e_lat,
    .pf_time, .pf_go, .pf_taken, .cnt_fire, .cnt_late
  );

  decider_backend_ctrl #(.OUTST(OUTST)) u_be (
    .clk, .rst_n,
    .m2s_rwd_valid, .m2s_rwd_ready, .m2s_rwd,
    .pf_go, .pf_taken, .pa_valid, .pa_ready, .pa_addr,
    .be_req_valid, .be_req_ready, .be_req_we, .be_req_addr, .be_req_data,
    .be_rsp_valid, .be_rsp_ready, .be_rsp_data,
    .s2m_bisnp_valid, .s2m_bisnp_ready, .s2m_bisnp,
    .s2m_drs_valid, .s2m_drs_ready, .s2m_drs,
    .m2s_birsp_valid, .m2s_birsp_ready, .m2s_birsp,
    .cnt_prefetch, .cnt_birsp
  );

endmodule
