// tb_expand_top: end-to-end run of the whole prefetcher at its default
// parameters (16 KB buffer, 10-entry timing history, 250-cycle switch
// latency, 3000-cycle device latency).
//
// Around the design the testbench places: a host that enumerates a tree
// with the CXL-SSD two switches down and then runs a strided access
// stream through a small LLC model; stand-ins for the address predictor
// (stride stream that runs one line ahead per released prefetch) and the
// classifier (category = newest stride); and the behavioural backend with
// the same 3000-cycle latency the device reports.
// Phases: A stride 1 at one access per 5000 cycles (longer than the
// end-to-end latency, so prefetches can arrive in time); B stride 5 (a
// behaviour change); C a write-back followed by a read of the same line;
// D one access per 800 cycles (shorter than the end-to-end latency, so
// prefetches are late). Every response is checked against the backend
// contents; each mechanism must be seen at least once.
module automatic tb_expand_top;
  import expand_pkg::*;
  localparam int WIN = 8, BE_LAT = 3000, EXP_E2E = 3000 + 2 * 250;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic llc_req_valid, llc_req_ready, llc_rsp_valid; llc_req_t llc_req; llc_rsp_t llc_rsp;
  logic enum_evt_valid, topo_start, topo_done; enum_evt_t enum_evt;
  logic ap_in_valid, ap_in_change, pa_valid, pa_ready; line_addr_t ap_in_addr, pa_addr;
  logic [HASH_W-1:0] ap_in_hash;
  logic cls_req, cls_valid; logic [WIN*(LINE_ADDR_W+HASH_W)-1:0] cls_window; logic [CAT_W-1:0] cls_category;
  logic be_req_valid, be_req_ready, be_req_we, be_rsp_valid, be_rsp_ready;
  line_addr_t be_req_addr; line_t be_req_data, be_rsp_data;
  lat_t e2e_lat, host_e2e_lat; logic e2e_valid, enum_overflow; logic [4:0] num_devs;
  ts_t now, next_arrival, pf_time;
  logic [31:0] cnt_buf_hit, cnt_memrdpc, cnt_prefetch_fill, cnt_prefetch, cnt_birsp,
               cnt_fire, cnt_late, cnt_change, cnt_hit_notify;
  int n_reads, n_writes;
  int checks = 0, failures = 0;

  expand_top dut (.*);
  backend_media_model #(.LAT(BE_LAT)) u_mem (.*);

  function automatic line_t pattern_of(input line_addr_t a);
    line_t l;
    for (int i = 0; i < DATA_W/64; i++) l[i*64 +: 64] = {18'h2A5A5, 46'(a)} + 64'(i);
    return l;
  endfunction

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---- stand-in address predictor: stride stream ----
  line_addr_t ap_last = 0, ap_stride = 0;
  always @(posedge clk) begin
    if (!rst_n) pa_valid <= 0;
    else if (ap_in_valid) begin
      ap_stride = ap_in_addr - ap_last; ap_last = ap_in_addr;
      pa_valid <= 1; pa_addr <= ap_in_addr + ap_stride;
    end else if (pa_valid && pa_ready) pa_addr <= pa_addr + ap_stride;
  end
  // ---- stand-in classifier ----
  always @(posedge clk) begin
    cls_valid <= cls_req;
    cls_category <= CAT_W'(cls_window[LINE_ADDR_W+HASH_W +: LINE_ADDR_W] -
                           cls_window[2*(LINE_ADDR_W+HASH_W)+HASH_W +: LINE_ADDR_W]);
  end

  // ---- response checking ----
  line_addr_t tag_addr [int];
  line_t      written  [line_addr_t];
  int n_rsp = 0, n_rsp_buf = 0, n_rsp_dev = 0;
  llc_rsp_t last_rsp;
  always @(posedge clk) if (rst_n && llc_rsp_valid) begin
    line_addr_t a = tag_addr[int'(llc_rsp.tag)];
    line_t e = written.exists(a) ? written[a] : pattern_of(a);
    n_rsp++; last_rsp = llc_rsp;
    if (llc_rsp.from_buffer) n_rsp_buf++; else n_rsp_dev++;
    check(llc_rsp.data == e, $sformatf("data for line %0d (from_buffer=%0d)", a, llc_rsp.from_buffer));
  end

  task automatic ev(input enum_evt_e k, input int b);
    @(negedge clk); enum_evt_valid = 1; enum_evt.kind = k; enum_evt.bus = BUS_W'(b);
    @(negedge clk); enum_evt_valid = 0;
  endtask

  int tagc = 0;
  task automatic llc(input llc_op_e op, input line_addr_t a, input line_t d);
    @(negedge clk); llc_req_valid = 1; llc_req.op = op; llc_req.addr = a; llc_req.tag = TAG_W'(tagc);
    llc_req.pc = 64'h0040_1000 + 64'(op); llc_req.pid = 16'd3; llc_req.data = d;
    tag_addr[tagc] = a; tagc++;
    do @(posedge clk); while (!llc_req_ready);
    @(negedge clk); llc_req_valid = 0;
  endtask

  // one phase of the access stream; every 4th access re-reads the previous
  // line, which the LLC model then holds (an LLC hit)
  task automatic stream(input int n, input int stride, input int period, inout line_addr_t a);
    for (int i = 0; i < n; i++) begin
      if (i % 4 == 3) llc(LLC_HIT, a, '0);
      else begin a = a + line_addr_t'(stride); llc(LLC_RD_MISS, a, '0); end
      repeat (period - 2) @(posedge clk);
    end
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    line_addr_t a = 4096; int hits_a, late0, chg0, b0, m0;
    llc_req_valid = 0; llc_req = '0; enum_evt_valid = 0; enum_evt = '0; topo_start = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // ---- enumeration: RC - switch - switch - CXL-SSD ----
    ev(ENUM_SWITCH_DOWN, 1); ev(ENUM_SWITCH_DOWN, 2); ev(ENUM_ENDPOINT, 3);
    @(negedge clk); topo_start = 1; @(negedge clk); topo_start = 0;
    wait (topo_done); repeat (3) @(negedge clk);
    check(num_devs == 1, "one CXL-SSD found");
    check(e2e_valid && e2e_lat == EXP_E2E, $sformatf("device holds e2e latency %0d", e2e_lat));
    check(host_e2e_lat == EXP_E2E, "root complex holds e2e latency");
    // ---- phase A ----
    stream(48, 1, 5000, a);
    repeat (BE_LAT + 100) @(posedge clk);
    hits_a = n_rsp_buf;
    $display("phase A: %0d buffer hits, %0d device reads, %0d prefetches, %0d late", n_rsp_buf, n_rsp_dev, cnt_prefetch, cnt_late);
    check(hits_a >= 20, "timely prefetches turn misses into buffer hits");
    // ---- phase B: stride change ----
    chg0 = cnt_change; m0 = n_rsp_dev; b0 = n_rsp_buf;
    stream(32, 5, 5000, a);
    repeat (BE_LAT + 100) @(posedge clk);
    check(cnt_change > chg0, "behaviour change detected");
    check(n_rsp_dev > m0 && n_rsp_buf > b0 + 10, "misses after the change, then hits again");
    // ---- phase C: write-back of a line just prefetched, then read it ----
    begin
      line_addr_t w = pa_addr - ap_stride;   // the last line pushed to the buffer
      m0 = n_rsp_dev;
      llc(LLC_WR, w, {16{32'hC0FFEE00}}); written[w] = {16{32'hC0FFEE00}};
      repeat (10) @(posedge clk);
      llc(LLC_RD_MISS, w, '0);
      repeat (BE_LAT + 100) @(posedge clk);
      check(n_rsp_dev == m0 + 1 && !last_rsp.from_buffer && last_rsp.data == written[w],
            "write-back drops the buffered copy; read returns written data");
    end
    // ---- phase D: requests faster than the end-to-end latency ----
    late0 = cnt_late;
    stream(24, 1, 800, a);
    repeat (BE_LAT + 200) @(posedge clk);
    check(cnt_late > late0, "late prefetches counted");
    check(n_rsp == tagc - (cnt_hit_notify - cnt_buf_hit) - 1, $sformatf("every read answered (%0d)", n_rsp));
    // ---- mechanisms ----
    $display("mechanisms: memrdpc=%0d buffer_hits=%0d fills=%0d prefetches=%0d birsp=%0d fires=%0d late=%0d changes=%0d hit_notify=%0d",
             cnt_memrdpc, cnt_buf_hit, cnt_prefetch_fill, cnt_prefetch, cnt_birsp, cnt_fire, cnt_late, cnt_change, cnt_hit_notify);
    check(cnt_memrdpc > 0,       "MemRdPC sent");
    check(cnt_buf_hit > 0,       "buffer hit");
    check(cnt_prefetch_fill > 0 && cnt_prefetch_fill == cnt_prefetch, "BISnpData fills");
    check(cnt_birsp == cnt_prefetch, "BIRsp per BISnpData");
    check(cnt_fire > 0,          "prefetch released by timeliness");
    check(cnt_late > 0,          "late prefetch");
    check(cnt_change > 0,        "behaviour change");
    check(cnt_hit_notify > cnt_buf_hit, "LLC hit notifications");
    check(!enum_overflow,        "no enumeration overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
