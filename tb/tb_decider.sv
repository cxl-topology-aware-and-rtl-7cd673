// tb_decider: the SSD half on its own, with the behavioural backend, a
// stride stand-in for the address predictor and a stand-in classifier
// (category = stride of the window). The host side is played by the
// testbench: it writes the end-to-end latency into configuration space,
// then issues MemRdPC reads every PERIOD cycles with a stride that changes
// halfway, plus CXL.io hit notifications in between. Checks: DSLBIS read,
// demand data, address/hash/hint to the predictor, the timing prediction
// (last arrival + average interval), that each prefetch goes to the
// backend no earlier than next_arrival - e2e and at most a few cycles
// later, and that every prefetch reaches the host as BISnpData + payload.
module automatic tb_decider;
  import expand_pkg::*;
  localparam int WIN = 8, PERIOD = 60, E2E = 150, BE_LAT = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic m2s_rwd_valid, m2s_rwd_ready, m2s_birsp_valid, m2s_birsp_ready;
  m2s_rwd_t m2s_rwd; m2s_birsp_t m2s_birsp;
  logic s2m_bisnp_valid, s2m_bisnp_ready, s2m_drs_valid, s2m_drs_ready;
  s2m_bisnp_t s2m_bisnp; s2m_drs_t s2m_drs;
  logic io_hit_valid, io_hit_ready; io_hit_t io_hit;
  logic cfg_req_valid, cfg_req_ready, cfg_cpl_valid; cfg_req_t cfg_req; cfg_cpl_t cfg_cpl;
  logic ap_in_valid, ap_in_change, pa_valid, pa_ready; line_addr_t ap_in_addr, pa_addr;
  logic [HASH_W-1:0] ap_in_hash;
  logic cls_req, cls_valid; logic [WIN*(LINE_ADDR_W+HASH_W)-1:0] cls_window; logic [CAT_W-1:0] cls_category;
  logic be_req_valid, be_req_ready, be_req_we, be_rsp_valid, be_rsp_ready;
  line_addr_t be_req_addr; line_t be_req_data, be_rsp_data;
  ts_t now, next_arrival, pf_time; lat_t e2e_lat; logic e2e_valid;
  logic [31:0] cnt_prefetch, cnt_birsp, cnt_fire, cnt_late, cnt_change, cnt_hit_notify;
  int n_reads, n_writes;
  int checks = 0, failures = 0;

  decider #(.DSLBIS_LAT(1234), .WIN(WIN)) dut (.*);
  backend_media_model #(.LAT(BE_LAT)) u_mem (.*);

  function automatic line_t pattern_of(input line_addr_t a);
    line_t l;
    for (int i = 0; i < DATA_W/64; i++) l[i*64 +: 64] = {18'h2A5A5, 46'(a)} + 64'(i);
    return l;
  endfunction

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // stand-in address predictor: next = last + last stride
  line_addr_t last_a = 0, stride = 0;
  always @(posedge clk) begin
    if (ap_in_valid) begin
      stride = ap_in_addr - last_a; last_a = ap_in_addr;
      pa_valid <= 1; pa_addr <= ap_in_addr + (ap_in_addr - last_a + stride) ;
    end else if (pa_valid && pa_ready) pa_valid <= 0;
    if (!rst_n) pa_valid <= 0;
  end
  // stand-in classifier: category = stride between the two newest window entries
  always @(posedge clk) begin
    cls_valid <= cls_req;
    cls_category <= CAT_W'(cls_window[LINE_ADDR_W+HASH_W +: LINE_ADDR_W] - cls_window[2*(LINE_ADDR_W+HASH_W)+HASH_W +: LINE_ADDR_W]);
  end

  // monitors
  int n_pf_be = 0, n_hdr = 0, n_pf_data = 0, n_mem = 0, n_ap = 0, worst_slack = 0;
  ts_t t_arm = 0; ts_t last_next = 0;
  line_addr_t hdr_addr;
  ts_t next_d1 = 0; int n_tchk = 0;
  always @(posedge clk) if (rst_n) begin
    // the prefetch time follows each prediction one cycle later
    if (pf_time != ((next_d1 > E2E) ? next_d1 - E2E : 0)) begin
      check(0, $sformatf("pf_time %0d for prediction %0d", pf_time, next_d1));
    end else n_tchk++;
    next_d1 = next_arrival;
    if (next_arrival != last_next) begin t_arm = now; last_next = next_arrival; end
    if (be_req_valid && be_req_ready && pa_ready) begin
      ts_t earliest = (pf_time > t_arm + 1) ? pf_time : t_arm + 1;
      n_pf_be++;
      check(now >= pf_time, $sformatf("prefetch not early now=%0d pf_time=%0d", now, pf_time));
      check(now <= earliest + 3, $sformatf("prefetch on time now=%0d earliest=%0d", now, earliest));
      if (int'(now - earliest) > worst_slack) worst_slack = int'(now - earliest);
    end
    if (s2m_bisnp_valid && s2m_bisnp_ready) begin n_hdr++; hdr_addr = s2m_bisnp.addr; end
    if (s2m_drs_valid && s2m_drs_ready) begin
      if (s2m_drs.opcode == S2M_DRS_BIDATA) begin
        n_pf_data++; check(s2m_drs.data == pattern_of(hdr_addr), "prefetch payload is the line");
      end else n_mem++;
    end
  end
  assign s2m_bisnp_ready = 1'b1; assign s2m_drs_ready = 1'b1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ts_t arr[$]; line_addr_t a = 1000; int st = 1; bit saw_hint = 0; int chg_at = -1;
    m2s_rwd_valid = 0; m2s_rwd = '0; m2s_birsp_valid = 0; m2s_birsp = '0; io_hit_valid = 0; io_hit = '0;
    cfg_req_valid = 0; cfg_req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // host reads DSLBIS and writes the end-to-end latency
    @(negedge clk); cfg_req_valid = 1; cfg_req.write = 0; cfg_req.reg_addr = CFG_DSLBIS_LAT;
    @(negedge clk); cfg_req_valid = 0; check(cfg_cpl_valid && cfg_cpl.rdata == 1234, "DSLBIS latency");
    @(negedge clk); cfg_req_valid = 1; cfg_req.write = 1; cfg_req.reg_addr = CFG_E2E_LAT; cfg_req.wdata = E2E;
    @(negedge clk); cfg_req_valid = 0; check(e2e_valid && e2e_lat == E2E, "e2e latency set");
    for (int i = 0; i < 60; i++) begin
      // one MemRdPC
      if (i == 30) begin st = 7; chg_at = i; end
      a = a + line_addr_t'(st);
      @(negedge clk); m2s_rwd_valid = 1; m2s_rwd.opcode = M2S_RWD_MEMRDPC; m2s_rwd.tag = TAG_W'(i);
      m2s_rwd.addr = a; m2s_rwd.data = '0; m2s_rwd.data[63:0] = 64'h8000 + 64'(i % 3); m2s_rwd.data[79:64] = 16'd7;
      #1;
      if (m2s_rwd_ready) begin
        check(ap_in_valid && ap_in_addr == a, "request to address predictor");
        check(ap_in_hash == ({16'd7 << 5 | 16'd7 >> 11} ^ 16'(16'h8000 + i % 3)), "hashed pid/PC");
        if (ap_in_change) saw_hint = 1;
      end
      while (!m2s_rwd_ready) begin @(negedge clk); end
      arr.push_back(now);
      @(negedge clk); m2s_rwd_valid = 0;
      if (arr.size() > 10) void'(arr.pop_front());
      @(negedge clk);
      if (arr.size() >= 2)
        check(next_arrival == arr[$] + (arr[$] - arr[0]) / ts_t'(arr.size() - 1), "next arrival prediction");
      // a cache-hit notification halfway to the next read
      repeat (PERIOD / 2 - 3) @(negedge clk);
      io_hit_valid = 1; io_hit.addr = a; @(negedge clk); io_hit_valid = 0;
      arr.push_back(now - 1); if (arr.size() > 10) void'(arr.pop_front());
      repeat (PERIOD / 2 - 2) @(negedge clk);
    end
    repeat (200) @(posedge clk);
    check(n_mem == 60, $sformatf("all demand reads answered (%0d)", n_mem));
    check(n_pf_be > 30 && n_pf_data == n_pf_be && n_hdr == n_pf_be, $sformatf("prefetches %0d/%0d/%0d", n_pf_be, n_hdr, n_pf_data));
    check(cnt_hit_notify == 60, "hit notifications counted");
    check(cnt_change >= 1 && saw_hint, "behaviour change seen and hinted");
    check(cnt_fire == 32'(n_pf_be), "fire counter");
    check(n_tchk > 1000, "prefetch time checked every cycle");
    $display("prefetches %0d, worst delay past prefetch time %0d cycles, changes %0d", n_pf_be, worst_slack, cnt_change);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
