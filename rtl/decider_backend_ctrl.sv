// decider_backend_ctrl: the data movement of the decider inside the
// CXL-SSD controller.
//
// Demand traffic from the host arrives on M2S RwD: MemRdPC (a read that
// carries the PC) is read from the backend media and answered with S2M
// MemData under the host's tag; MemWr is written to the backend. When the
// timeliness unit says it is time (pf_go) and the address predictor has an
// address ready, the line at that address is read and pushed to the host
// as a BISnpData header followed by its payload on the S2M data channel,
// where the reflector puts it into its buffer. Demand requests go to the
// backend ahead of prefetches. That prefetches travel as BISnpData with
// payload is the paper's; the in-order backend interface, the tracking
// FIFO and the priority are this design's.
//
// Interface: every channel is valid/ready. The backend returns read data in
// request order on be_rsp (writes return nothing). Up to OUTST reads may be
// in flight. Write completions (S2M NDR) are not modelled.
module decider_backend_ctrl
  import expand_pkg::*;
#(
  parameter int unsigned OUTST = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // M2S RwD from the host
  input  logic       m2s_rwd_valid,
  output logic       m2s_rwd_ready,
  input  m2s_rwd_t   m2s_rwd,
  // prefetch release and predicted address
  input  logic       pf_go,
  output logic       pf_taken,
  input  logic       pa_valid,
  output logic       pa_ready,
  input  line_addr_t pa_addr,
  // backend media
  output logic       be_req_valid,
  input  logic       be_req_ready,
  output logic       be_req_we,
  output line_addr_t be_req_addr,
  output line_t      be_req_data,
  input  logic       be_rsp_valid,
  output logic       be_rsp_ready,
  input  line_t      be_rsp_data,
  // S2M to the host
  output logic       s2m_bisnp_valid,
  input  logic       s2m_bisnp_ready,
  output s2m_bisnp_t s2m_bisnp,
  output logic       s2m_drs_valid,
  input  logic       s2m_drs_ready,
  output s2m_drs_t   s2m_drs,
  // M2S BIRsp from the host
  input  logic       m2s_birsp_valid,
  output logic       m2s_birsp_ready,
  input  m2s_birsp_t m2s_birsp,
  output logic [31:0] cnt_prefetch,
  output logic [31:0] cnt_birsp
);
  typedef struct packed {
    logic             is_pf;
    logic [TAG_W-1:0] tag;
    line_addr_t       addr;
  } track_t;

  localparam int unsigned PW = (OUTST > 1) ? $clog2(OUTST) : 1;
  track_t          trk_q [OUTST];
  logic [PW-1:0]   trk_wr_q, trk_rd_q;
  logic [PW:0]     trk_cnt_q;
  logic            trk_full;
  assign trk_full = (trk_cnt_q == (PW+1)'(OUTST));

  logic [TAG_W-1:0] bi_tag_q;

  // ---------------- request side ----------------
  wire dem_rd = m2s_rwd_valid && m2s_rwd.opcode == M2S_RWD_MEMRDPC;
  wire dem_wr = m2s_rwd_valid && m2s_rwd.opcode == M2S_RWD_MEMWR;
  wire pf_req = pf_go && pa_valid && !m2s_rwd_valid;

  always_comb begin
    be_req_valid = 1'b0;
    be_req_we    = 1'b0;
    be_req_addr  = m2s_rwd.addr;
    be_req_data  = m2s_rwd.data;
    if (dem_wr) begin
      be_req_valid = 1'b1;
      be_req_we    = 1'b1;
    end else if (dem_rd && !trk_full) begin
      be_req_valid = 1'b1;
    end else if (pf_req && !trk_full) begin
      be_req_valid = 1'b1;
      be_req_addr  = pa_addr;
    end
  end

  wire be_acc = be_req_valid && be_req_ready;
  assign m2s_rwd_ready = be_acc && (dem_wr || dem_rd);
  assign pf_taken      = be_acc && !m2s_rwd_valid;
  assign pa_ready      = pf_taken;
  wire trk_push = be_acc && !be_req_we;

  // ---------------- response side ----------------
  typedef enum logic [1:0] {O_IDLE, O_HDR, O_DATA} ostate_e;
  ostate_e ost_q;
  track_t  cur_q;
  line_t   data_q;

  assign be_rsp_ready = (ost_q == O_IDLE);
  wire trk_pop = be_rsp_valid && be_rsp_ready;

  assign s2m_bisnp_valid  = (ost_q == O_HDR);
  assign s2m_bisnp.opcode = S2M_BISNP_DATA;
  assign s2m_bisnp.bi_tag = cur_q.tag;
  assign s2m_bisnp.addr   = cur_q.addr;

  assign s2m_drs_valid  = (ost_q == O_DATA);
  assign s2m_drs.opcode = cur_q.is_pf ? S2M_DRS_BIDATA : S2M_DRS_MEMDATA;
  assign s2m_drs.tag    = cur_q.tag;
  assign s2m_drs.data   = data_q;

  assign m2s_birsp_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trk_wr_q  <= '0;
      trk_rd_q  <= '0;
      trk_cnt_q <= '0;
      bi_tag_q  <= '0;
      ost_q     <= O_IDLE;
      cur_q     <= '0;
      data_q    <= '0;
      cnt_prefetch <= '0;
      cnt_birsp    <= '0;
      for (int i = 0; i < OUTST; i++) trk_q[i] <= '0;
    end else begin
      if (trk_push) begin
        trk_q[trk_wr_q].is_pf <= pf_taken;
        trk_q[trk_wr_q].tag   <= pf_taken ? bi_tag_q : m2s_rwd.tag;
        trk_q[trk_wr_q].addr  <= be_req_addr;
        trk_wr_q <= (trk_wr_q == PW'(OUTST-1)) ? '0 : trk_wr_q + 1'b1;
        if (pf_taken) bi_tag_q <= bi_tag_q + 1'b1;
      end
      if (trk_pop) begin
        trk_rd_q <= (trk_rd_q == PW'(OUTST-1)) ? '0 : trk_rd_q + 1'b1;
        cur_q    <= trk_q[trk_rd_q];
        data_q   <= be_rsp_data;
        ost_q    <= trk_q[trk_rd_q].is_pf ? O_HDR : O_DATA;
      end
      trk_cnt_q <= trk_cnt_q + (PW+1)'(trk_push) - (PW+1)'(trk_pop);
      if (ost_q == O_HDR && s2m_bisnp_ready) ost_q <= O_DATA;
      if (ost_q == O_DATA && s2m_drs_ready) begin
        ost_q <= O_IDLE;
        if (cur_q.is_pf) cnt_prefetch <= cnt_prefetch + 1;
      end
      if (m2s_birsp_valid) cnt_birsp <= cnt_birsp + 1;
    end
  end

  // read data never arrives without a request in flight
  assert property (@(posedge clk) disable iff (!rst_n)
                   be_rsp_valid |-> trk_cnt_q != '0);

endmodule
