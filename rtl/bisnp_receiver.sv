// bisnp_receiver: the reflector's handler for messages coming up from the
// CXL-SSD on CXL.mem S2M.
//
// The decider pushes a prefetched line to the host with BISnpData, a
// back-invalidation snoop opcode that, unlike the standard BISnp messages,
// is followed by a payload. When this block sees a BISnpData header it
// waits for the S2M data message with the same tag, writes the line into
// the reflector buffer and answers with an M2S BIRsp. A standard BISnpInv
// drops the line from the buffer and is answered with BIRsp as well. S2M
// demand read data (MemData) is passed through to the request path at any
// time. Waiting for the payload and filling the buffer follow the paper;
// the BIRsp for BISnpData and the handling of BISnpInv are this design's
// way of keeping the buffer coherent.
//
// Timing: one snoop is handled at a time. A BISnpData line is written into
// the buffer in the cycle its payload arrives (visible to lookups one cycle
// later); BIRsp is raised the cycle after and held until taken.
module bisnp_receiver
  import expand_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // S2M BISnp
  input  logic       bisnp_valid,
  output logic       bisnp_ready,
  input  s2m_bisnp_t bisnp,
  // S2M data
  input  logic       drs_valid,
  output logic       drs_ready,
  input  s2m_drs_t   drs,
  // demand data to the request path
  output logic       memdata_valid,
  output s2m_drs_t   memdata,
  // reflector buffer
  output logic       ins_valid,
  output line_addr_t ins_addr,
  output line_t      ins_data,
  output logic       inv_valid,
  input  logic       inv_ready,
  output line_addr_t inv_addr,
  // M2S BIRsp
  output logic       birsp_valid,
  input  logic       birsp_ready,
  output m2s_birsp_t birsp,
  output logic [31:0] cnt_prefetch_fill
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT_DATA, S_INV, S_RSP} state_e;
  state_e     state_q;
  s2m_bisnp_t snp_q;

  assign bisnp_ready = (state_q == S_IDLE);

  assign memdata_valid = drs_valid && drs.opcode == S2M_DRS_MEMDATA;
  assign memdata       = drs;

  wire payload = drs_valid && state_q == S_WAIT_DATA &&
                 drs.opcode == S2M_DRS_BIDATA && drs.tag == snp_q.bi_tag;

  // MemData always accepted; BIData only when it is the awaited payload
  assign drs_ready = (drs.opcode == S2M_DRS_MEMDATA) || payload;

  assign ins_valid = payload;
  assign ins_addr  = snp_q.addr;
  assign ins_data  = drs.data;
  assign inv_valid = (state_q == S_INV);
  assign inv_addr  = snp_q.addr;

  assign birsp_valid  = (state_q == S_RSP);
  assign birsp.bi_tag = snp_q.bi_tag;
  assign birsp.addr   = snp_q.addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      snp_q   <= '0;
      cnt_prefetch_fill <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (bisnp_valid) begin
          snp_q   <= bisnp;
          state_q <= (bisnp.opcode == S2M_BISNP_DATA) ? S_WAIT_DATA : S_INV;
        end
        S_WAIT_DATA: if (payload) begin
          state_q <= S_RSP;
          cnt_prefetch_fill <= cnt_prefetch_fill + 1;
        end
        S_INV: if (inv_ready) state_q <= S_RSP;
        S_RSP: if (birsp_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
