// reflector_req_path: the request side of the reflector, between the host
// LLC controller and the CXL link.
//
// - A read that missed the LLC is first looked up in the reflector buffer.
//   On a hit the line is returned to the LLC straight from the root complex
//   and the decider is told about the hit over CXL.io; on a miss the read
//   goes to the CXL-SSD as an M2S RwD MemRdPC whose payload carries the PC
//   (bits 63:0) and process id (bits 79:64) of the load.
// - A read that hit the LLC itself only produces the CXL.io hit
//   notification, so the decider's timing predictor still sees the access.
// - A write-back goes out as MemWr and drops any copy in the buffer.
// - Read data coming back from the CXL-SSD (S2M MemData) is passed to the
//   LLC; it has priority over a buffer hit in the same cycle.
// Checking the buffer first, MemRdPC with the PC and hit notification are
// the paper's; the one-request-at-a-time sequencing is this design's.
//
// Timing: a request is accepted (llc_req_valid & llc_req_ready) when no
// earlier one is still pending; the buffer answers one cycle later, so a
// buffer hit reaches llc_rsp two cycles after acceptance at the earliest.
module reflector_req_path
  import expand_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // from / to the LLC controller
  input  logic       llc_req_valid,
  output logic       llc_req_ready,
  input  llc_req_t   llc_req,
  output logic       llc_rsp_valid,
  output llc_rsp_t   llc_rsp,
  // reflector buffer
  output logic       lk_valid,
  output line_addr_t lk_addr,
  input  logic       lk_hit,
  input  line_t      lk_data,
  output logic       inv_valid,
  output line_addr_t inv_addr,
  // M2S RwD to the CXL-SSD
  output logic       m2s_rwd_valid,
  input  logic       m2s_rwd_ready,
  output m2s_rwd_t   m2s_rwd,
  // S2M demand data from the CXL-SSD
  input  logic       memdata_valid,
  input  s2m_drs_t   memdata,
  // CXL.io hit notification
  output logic       io_hit_valid,
  input  logic       io_hit_ready,
  output io_hit_t    io_hit,
  // event counters for observation
  output logic [31:0] cnt_buf_hit,
  output logic [31:0] cnt_memrdpc
);
  logic     lookup_q;    // buffer answer due this cycle
  llc_req_t cur_q;
  logic     rsp_pend_q, m2s_pend_q, io_pend_q;
  m2s_rwd_t m2s_q;

  assign llc_req_ready = !lookup_q && !rsp_pend_q && !m2s_pend_q && !io_pend_q;
  wire accept = llc_req_valid && llc_req_ready;

  assign lk_valid  = accept && llc_req.op == LLC_RD_MISS;
  assign lk_addr   = llc_req.addr;
  assign inv_valid = accept && llc_req.op == LLC_WR;
  assign inv_addr  = llc_req.addr;

  assign m2s_rwd_valid = m2s_pend_q;
  assign m2s_rwd       = m2s_q;
  assign io_hit_valid  = io_pend_q;
  assign io_hit.addr   = cur_q.addr;

  line_t buf_line_q;

  always_comb begin
    llc_rsp_valid = 1'b0;
    llc_rsp       = '0;
    if (memdata_valid) begin
      llc_rsp_valid       = 1'b1;
      llc_rsp.tag         = memdata.tag;
      llc_rsp.from_buffer = 1'b0;
      llc_rsp.data        = memdata.data;
    end else if (rsp_pend_q) begin
      llc_rsp_valid       = 1'b1;
      llc_rsp.tag         = cur_q.tag;
      llc_rsp.from_buffer = 1'b1;
      llc_rsp.data        = buf_line_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lookup_q    <= 1'b0;
      cur_q       <= '0;
      rsp_pend_q  <= 1'b0;
      m2s_pend_q  <= 1'b0;
      io_pend_q   <= 1'b0;
      m2s_q       <= '0;
      buf_line_q  <= '0;
      cnt_buf_hit <= '0;
      cnt_memrdpc <= '0;
    end else begin
      lookup_q <= 1'b0;
      if (accept) begin
        cur_q <= llc_req;
        unique case (llc_req.op)
          LLC_RD_MISS: lookup_q <= 1'b1;
          LLC_WR: begin
            m2s_pend_q   <= 1'b1;
            m2s_q.opcode <= M2S_RWD_MEMWR;
            m2s_q.tag    <= llc_req.tag;
            m2s_q.addr   <= llc_req.addr;
            m2s_q.data   <= llc_req.data;
          end
          LLC_HIT: io_pend_q <= 1'b1;
          default: ;
        endcase
      end
      if (lookup_q) begin
        if (lk_hit) begin
          rsp_pend_q  <= 1'b1;
          io_pend_q   <= 1'b1;
          buf_line_q  <= lk_data;
          cnt_buf_hit <= cnt_buf_hit + 1;
        end else begin
          m2s_pend_q   <= 1'b1;
          m2s_q.opcode <= M2S_RWD_MEMRDPC;
          m2s_q.tag    <= cur_q.tag;
          m2s_q.addr   <= cur_q.addr;
          m2s_q.data   <= {{(DATA_W-PC_W-PID_W){1'b0}}, cur_q.pid, cur_q.pc};
          cnt_memrdpc  <= cnt_memrdpc + 1;
        end
      end
      if (rsp_pend_q && !memdata_valid) rsp_pend_q <= 1'b0;
      if (m2s_pend_q && m2s_rwd_ready)  m2s_pend_q <= 1'b0;
      if (io_pend_q && io_hit_ready)    io_pend_q  <= 1'b0;
    end
  end

  // a pending message must stay stable until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   m2s_rwd_valid && !m2s_rwd_ready |=> m2s_rwd_valid && $stable(m2s_rwd));

endmodule
