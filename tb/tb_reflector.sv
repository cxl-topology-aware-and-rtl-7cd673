// tb_reflector: the host half on its own. The testbench enumerates a small
// switch tree (devices at depths 0..3), answers configuration reads with
// per-device DSLBIS latencies and checks the end-to-end latencies written
// back; then plays the CXL-SSD: it pushes lines with BISnpData, checks that
// reads of those lines are served from the root-complex buffer (with a hit
// notification) while other reads leave as MemRdPC and are answered with
// MemData, that BISnpInv and host writes remove lines from the buffer, and
// that every snoop is answered with BIRsp.
module automatic tb_reflector;
  import expand_pkg::*;
  localparam int SW = 250;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic llc_req_valid, llc_req_ready, llc_rsp_valid; llc_req_t llc_req; llc_rsp_t llc_rsp;
  logic enum_evt_valid, topo_start, topo_done; enum_evt_t enum_evt;
  logic [4:0] num_devs; logic [DEV_W-1:0] e2e_rd_dev; lat_t e2e_rd_lat;
  logic m2s_rwd_valid, m2s_rwd_ready, m2s_birsp_valid, m2s_birsp_ready;
  m2s_rwd_t m2s_rwd; m2s_birsp_t m2s_birsp;
  logic s2m_bisnp_valid, s2m_bisnp_ready, s2m_drs_valid, s2m_drs_ready;
  s2m_bisnp_t s2m_bisnp; s2m_drs_t s2m_drs;
  logic io_hit_valid, io_hit_ready; io_hit_t io_hit;
  logic cfg_req_valid, cfg_req_ready, cfg_cpl_valid; cfg_req_t cfg_req; cfg_cpl_t cfg_cpl;
  logic [31:0] cnt_buf_hit, cnt_memrdpc, cnt_prefetch_fill; logic enum_overflow;
  int checks = 0, failures = 0;

  reflector dut (.*);

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // configuration responder for 4 devices
  int dslbis [4] = '{3000, 2000, 900, 4100};
  int e2e_written [4] = '{-1, -1, -1, -1};
  always @(posedge clk) begin
    cfg_cpl_valid <= 0;
    if (cfg_req_valid && cfg_req_ready) begin
      if (cfg_req.write) e2e_written[cfg_req.dev] = cfg_req.wdata;
      else begin cfg_cpl_valid <= 1; cfg_cpl.dev <= cfg_req.dev; cfg_cpl.rdata <= dslbis[cfg_req.dev]; end
    end
  end
  assign cfg_req_ready = 1'b1;

  // link-side monitors
  int n_m2s = 0, n_io = 0, n_birsp = 0; m2s_rwd_t last_m2s;
  always @(posedge clk) if (rst_n) begin
    if (m2s_rwd_valid && m2s_rwd_ready) begin n_m2s++; last_m2s = m2s_rwd; end
    if (io_hit_valid && io_hit_ready) n_io++;
    if (m2s_birsp_valid && m2s_birsp_ready) n_birsp++;
  end
  assign m2s_rwd_ready = 1'b1; assign io_hit_ready = 1'b1; assign m2s_birsp_ready = 1'b1;

  task automatic ev(input enum_evt_e k, input int b);
    @(negedge clk); enum_evt_valid = 1; enum_evt.kind = k; enum_evt.bus = BUS_W'(b);
    @(negedge clk); enum_evt_valid = 0;
  endtask

  task automatic push_line(input line_addr_t a, input line_t d, input int t);
    @(negedge clk); s2m_bisnp_valid = 1; s2m_bisnp.opcode = S2M_BISNP_DATA; s2m_bisnp.bi_tag = TAG_W'(t); s2m_bisnp.addr = a;
    do @(posedge clk); while (!s2m_bisnp_ready);
    @(negedge clk); s2m_bisnp_valid = 0;
    s2m_drs_valid = 1; s2m_drs.opcode = S2M_DRS_BIDATA; s2m_drs.tag = TAG_W'(t); s2m_drs.data = d;
    do @(posedge clk); while (!s2m_drs_ready);
    @(negedge clk); s2m_drs_valid = 0;
  endtask

  task automatic inv_line(input line_addr_t a, input int t);
    @(negedge clk); s2m_bisnp_valid = 1; s2m_bisnp.opcode = S2M_BISNP_INV; s2m_bisnp.bi_tag = TAG_W'(t); s2m_bisnp.addr = a;
    do @(posedge clk); while (!s2m_bisnp_ready);
    @(negedge clk); s2m_bisnp_valid = 0;
    repeat (4) @(posedge clk);
  endtask

  // host read; returns 1 if served from the buffer. Misses are answered by
  // the testbench as the CXL-SSD with MemData after 20 cycles.
  task automatic host_read(input line_addr_t a, input int t, input line_t exp_buf, output bit from_buf);
    int m0 = n_m2s; int waitc = 0;
    @(negedge clk); llc_req_valid = 1; llc_req.op = LLC_RD_MISS; llc_req.addr = a; llc_req.tag = TAG_W'(t);
    llc_req.pc = 64'h4000_0000 + 64'(t); llc_req.pid = 16'd42;
    do @(posedge clk); while (!llc_req_ready);
    @(negedge clk); llc_req_valid = 0;
    while (!llc_rsp_valid && n_m2s == m0 && waitc < 50) begin @(negedge clk); waitc++; end
    if (llc_rsp_valid) begin
      from_buf = 1;
      check(llc_rsp.from_buffer && llc_rsp.tag == TAG_W'(t) && llc_rsp.data == exp_buf, "served from buffer");
    end else begin
      from_buf = 0;
      check(last_m2s.opcode == M2S_RWD_MEMRDPC && last_m2s.addr == a && last_m2s.data[63:0] == llc_req.pc, "MemRdPC out");
      repeat (20) @(negedge clk);
      s2m_drs_valid = 1; s2m_drs.opcode = S2M_DRS_MEMDATA; s2m_drs.tag = TAG_W'(t); s2m_drs.data = ~exp_buf;
      #1; check(llc_rsp_valid && !llc_rsp.from_buffer && llc_rsp.data == ~exp_buf && llc_rsp.tag == TAG_W'(t), "MemData to LLC");
      @(negedge clk); s2m_drs_valid = 0;
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit fb; int depth [4] = '{1, 3, 0, 2};
    llc_req_valid = 0; llc_req = '0; enum_evt_valid = 0; enum_evt = '0; topo_start = 0; e2e_rd_dev = 0;
    s2m_bisnp_valid = 0; s2m_bisnp = '0; s2m_drs_valid = 0; s2m_drs = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // tree: RC - S1 - {dev0, S2 - S3 - dev1}, dev2 on the root port, S4 - S5 - dev3
    ev(ENUM_SWITCH_DOWN, 1); ev(ENUM_ENDPOINT, 2); ev(ENUM_SWITCH_DOWN, 3); ev(ENUM_SWITCH_DOWN, 4);
    ev(ENUM_ENDPOINT, 5); ev(ENUM_SWITCH_UP, 0); ev(ENUM_SWITCH_UP, 0); ev(ENUM_SWITCH_UP, 0);
    ev(ENUM_ENDPOINT, 6); ev(ENUM_SWITCH_DOWN, 7); ev(ENUM_SWITCH_DOWN, 8); ev(ENUM_ENDPOINT, 9);
    check(num_devs == 4, "four devices found");
    @(negedge clk); topo_start = 1; @(negedge clk); topo_start = 0;
    wait (topo_done); @(negedge clk);
    for (int d = 0; d < 4; d++) begin
      check(e2e_written[d] == dslbis[d] + depth[d] * SW, $sformatf("dev %0d e2e %0d", d, e2e_written[d]));
      e2e_rd_dev = DEV_W'(d); #1; check(e2e_rd_lat == lat_t'(dslbis[d] + depth[d] * SW), "host copy");
    end
    // prefetch lines 100..109 into the buffer
    for (int i = 0; i < 10; i++) push_line(line_addr_t'(100 + i), {16{32'(i * 7 + 1)}}, i);
    repeat (3) @(negedge clk);
    check(n_birsp == 10 && cnt_prefetch_fill == 10, "BIRsp for every BISnpData");
    for (int i = 0; i < 10; i++) begin
      host_read(line_addr_t'(100 + i), 200 + i, {16{32'(i * 7 + 1)}}, fb); check(fb, "prefetched line hits");
    end
    host_read(line_addr_t'(500), 300, '0, fb); check(!fb, "other line misses");
    check(n_io == 10, "hit notifications");
    // BISnpInv removes line 103; a host write removes line 105
    inv_line(line_addr_t'(103), 20);
    check(n_birsp == 11, "BIRsp for BISnpInv");
    @(negedge clk); llc_req_valid = 1; llc_req.op = LLC_WR; llc_req.addr = 105; llc_req.data = '1;
    do @(posedge clk); while (!llc_req_ready);
    @(negedge clk); llc_req_valid = 0; repeat (3) @(negedge clk);
    check(last_m2s.opcode == M2S_RWD_MEMWR && last_m2s.addr == 105, "write goes out");
    host_read(line_addr_t'(103), 301, '0, fb); check(!fb, "invalidated line misses");
    host_read(line_addr_t'(105), 302, '0, fb); check(!fb, "written line misses");
    host_read(line_addr_t'(104), 303, {16{32'(4 * 7 + 1)}}, fb); check(fb, "neighbour still hits");
    check(cnt_buf_hit == 11 && cnt_memrdpc == 3, "counters");
    check(!enum_overflow, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
