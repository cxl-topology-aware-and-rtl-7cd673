// tb_decider_backend_ctrl: demand MemRdPC/MemWr traffic and released
// prefetches against the behavioural backend. Checks that every demand
// read is answered with MemData under its tag and with the line's current
// contents, that every prefetch leaves as a BISnpData header with the
// predicted address followed by a BIData payload with the same tag and the
// line, that responses keep request order, that demand requests win over a
// prefetch in the same cycle, and that nothing is prefetched without pf_go.
module automatic tb_decider_backend_ctrl;
  import expand_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic m2s_rwd_valid, m2s_rwd_ready; m2s_rwd_t m2s_rwd;
  logic pf_go, pf_taken, pa_valid, pa_ready; line_addr_t pa_addr;
  logic be_req_valid, be_req_ready, be_req_we, be_rsp_valid, be_rsp_ready;
  line_addr_t be_req_addr; line_t be_req_data, be_rsp_data;
  logic s2m_bisnp_valid, s2m_bisnp_ready, s2m_drs_valid, s2m_drs_ready;
  s2m_bisnp_t s2m_bisnp; s2m_drs_t s2m_drs;
  logic m2s_birsp_valid, m2s_birsp_ready; m2s_birsp_t m2s_birsp;
  logic [31:0] cnt_prefetch, cnt_birsp;
  int n_reads, n_writes;
  int checks = 0, failures = 0;

  decider_backend_ctrl #(.OUTST(4)) dut (.*);
  backend_media_model #(.LAT(15)) u_mem (.*);

  function automatic line_t pattern_of(input line_addr_t a);
    line_t l;
    for (int i = 0; i < DATA_W/64; i++) l[i*64 +: 64] = {18'h2A5A5, 46'(a)} + 64'(i);
    return l;
  endfunction

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  typedef struct { bit is_pf; logic [TAG_W-1:0] tag; line_addr_t addr; line_t data; } exp_t;
  exp_t exp_q[$];
  line_t wmem [line_addr_t];
  int n_dem = 0, n_pf = 0, n_bothreq = 0, n_bisnp = 0, n_dem_rsp = 0, n_pf_rsp = 0;
  logic [TAG_W-1:0] pf_tag = 0;
  bit hdr_seen = 0; bit stop_pf = 0; s2m_bisnp_t hdr;

  // expectations from accepted requests; responses checked in order
  always @(posedge clk) if (rst_n) begin
    if (m2s_rwd_valid && pf_go && pa_valid) begin
      n_bothreq++;
      check(!pa_ready, "demand has priority over prefetch");
    end
    if (pa_ready) check(pf_go && pa_valid && pf_taken, "prefetch only when released");
    if (m2s_rwd_valid && m2s_rwd_ready) begin
      if (m2s_rwd.opcode == M2S_RWD_MEMWR) wmem[m2s_rwd.addr] = m2s_rwd.data;
      else begin
        exp_t e; e.is_pf = 0; e.tag = m2s_rwd.tag; e.addr = m2s_rwd.addr;
        e.data = wmem.exists(m2s_rwd.addr) ? wmem[m2s_rwd.addr] : pattern_of(m2s_rwd.addr);
        exp_q.push_back(e);
      end
    end
    if (pa_valid && pa_ready) begin
      exp_t e; e.is_pf = 1; e.tag = pf_tag; e.addr = pa_addr;
      e.data = wmem.exists(pa_addr) ? wmem[pa_addr] : pattern_of(pa_addr);
      exp_q.push_back(e); pf_tag++;
    end
    if (s2m_bisnp_valid && s2m_bisnp_ready) begin
      check(exp_q.size() > 0 && exp_q[0].is_pf && s2m_bisnp.opcode == S2M_BISNP_DATA &&
            s2m_bisnp.addr == exp_q[0].addr && s2m_bisnp.bi_tag == exp_q[0].tag, "BISnpData header");
      check(!hdr_seen, "one header per payload");
      hdr_seen = 1; n_bisnp++;
    end
    if (s2m_drs_valid && s2m_drs_ready) begin
      if (exp_q.size() == 0) check(0, "unexpected S2M data");
      else begin
        exp_t e = exp_q.pop_front();
        check(s2m_drs.tag == e.tag && s2m_drs.data == e.data, $sformatf("S2M data tag %0d got %0d pf %0d dataok %0d", e.tag, s2m_drs.tag, e.is_pf, s2m_drs.data == e.data));
        if (e.is_pf) begin
          check(s2m_drs.opcode == S2M_DRS_BIDATA && hdr_seen, "prefetch payload after its header");
          hdr_seen = 0; n_pf_rsp++;
        end else begin
          check(s2m_drs.opcode == S2M_DRS_MEMDATA, "demand data opcode"); n_dem_rsp++;
        end
      end
    end
    s2m_bisnp_ready <= $urandom_range(0, 2) != 0;
    s2m_drs_ready   <= $urandom_range(0, 2) != 0;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // prefetch address source
  initial begin
    pa_valid = 0; pa_addr = 0; pf_go = 0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (pa_valid && pa_ready) pa_valid = 0;
      if (!pa_valid && $urandom_range(0, 3) == 0) begin
        pa_valid = 1; pa_addr = line_addr_t'($urandom_range(0, 63));
      end
      pf_go = !stop_pf && $urandom_range(0, 2) == 0;
    end
  end

  initial begin
    m2s_rwd_valid = 0; m2s_rwd = '0; m2s_birsp_valid = 0; m2s_birsp = '0;
    s2m_bisnp_ready = 0; s2m_drs_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      m2s_rwd_valid = $urandom_range(0, 2) == 0;
      m2s_rwd.opcode = ($urandom_range(0, 3) == 0) ? M2S_RWD_MEMWR : M2S_RWD_MEMRDPC;
      m2s_rwd.tag = TAG_W'(i); m2s_rwd.addr = line_addr_t'($urandom_range(0, 63));
      m2s_rwd.data = {16{$urandom}};
      m2s_birsp_valid = $urandom_range(0, 1);
      if (m2s_rwd_valid) begin
        do @(posedge clk); while (!m2s_rwd_ready);
        n_dem++;
      end
    end
    @(negedge clk); m2s_rwd_valid = 0; m2s_birsp_valid = 0; stop_pf = 1;
    repeat (300) @(posedge clk);
    check(exp_q.size() == 0, "all responses delivered");
    check(n_bothreq > 5, "demand/prefetch contention exercised");
    check(n_pf_rsp > 20 && n_dem_rsp > 20, $sformatf("traffic: %0d prefetches, %0d demand reads", n_pf_rsp, n_dem_rsp));
    check(cnt_prefetch == 32'(n_pf_rsp), "prefetch counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
