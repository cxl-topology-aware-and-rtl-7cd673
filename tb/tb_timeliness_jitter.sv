// tb_timeliness_jitter: how well prefetches land on time when the host's
// access gaps are not constant. The whole design runs at its default
// parameters, with the CXL-SSD two switches down (end-to-end latency
// 3000 + 2 x 250 = 3500 cycles). A stride stream of reads is issued with
// gaps of 5000 cycles plus a uniform random jitter of +-J cycles, for
// J = 0, 250, 450, 1500 and 2500. A read is "on time" if the reflector
// buffer serves it. Because the line is sent e2e cycles before the
// predicted arrival, and the backend needs 3000 of them, a line waits about
// 500 cycles in the buffer. A read that comes more than that much earlier
// than predicted misses the buffer and goes to the device.
// Checks: every returned line carries the right data; the prefetch time is
// always the prediction minus e2e; with J <= 450 (inside the 500-cycle
// margin) at least 90% of the reads after warm-up are on time; the on-time
// share does not rise as J grows; and with J = 2500 it falls below J = 0.
module automatic tb_timeliness_jitter;
  import expand_pkg::*;
  localparam int WIN = 8, BE_LAT = 3000, PERIOD = 5000, N = 48, WARM = 8;
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

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // stand-in address predictor (stride stream) and classifier
  line_addr_t ap_last = 0, ap_stride = 0;
  always @(posedge clk) begin
    if (!rst_n) begin pa_valid <= 0; ap_last = 0; end
    else if (ap_in_valid) begin
      ap_stride = ap_in_addr - ap_last; ap_last = ap_in_addr;
      pa_valid <= 1; pa_addr <= ap_in_addr + ap_stride;
    end else if (pa_valid && pa_ready) pa_addr <= pa_addr + ap_stride;
  end
  always @(posedge clk) begin
    cls_valid <= cls_req;
    cls_category <= CAT_W'(cls_window[LINE_ADDR_W+HASH_W +: LINE_ADDR_W] -
                           cls_window[2*(LINE_ADDR_W+HASH_W)+HASH_W +: LINE_ADDR_W]);
  end

  ts_t next_d1 = 0; int pf_bad = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (pf_time != ((next_d1 > ts_t'(e2e_lat)) ? next_d1 - ts_t'(e2e_lat) : 0) && e2e_valid) pf_bad++;
      next_d1 = next_arrival;
    end
  end

  task automatic ev(input enum_evt_e k, input int b);
    @(negedge clk); enum_evt_valid = 1; enum_evt.kind = k; enum_evt.bus = BUS_W'(b);
    @(negedge clk); enum_evt_valid = 0;
  endtask

  function automatic line_t pattern_of(line_addr_t a);
    line_t l;
    for (int i = 0; i < DATA_W / 64; i++) l[64*i +: 64] = {18'h2A5A5, a} + 64'(i);
    return l;
  endfunction

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int jit [5] = '{0, 250, 450, 1500, 2500};
  int pct [5];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    llc_req_valid = 0; llc_req = '0; enum_evt_valid = 0; enum_evt = '0; topo_start = 0;
    void'($urandom(7));
    for (int k = 0; k < 5; k++) begin
      line_addr_t a = line_addr_t'(k + 1) << 24; int ontime = 0, bad_data = 0;
      rst_n = 0; pf_bad = 0;
      repeat (3) @(posedge clk); rst_n = 1;
      ev(ENUM_SWITCH_DOWN, 1); ev(ENUM_SWITCH_DOWN, 2); ev(ENUM_ENDPOINT, 3);
      @(negedge clk); topo_start = 1; @(negedge clk); topo_start = 0;
      wait (topo_done); repeat (3) @(negedge clk);
      check(e2e_lat == 32'd3500, "e2e latency at two switch levels");
      for (int i = 0; i < N; i++) begin
        int gap = PERIOD + ((jit[k] == 0) ? 0 : int'($urandom_range(2 * jit[k])) - jit[k]);
        longint t0;
        a = a + 1;
        @(negedge clk); t0 = cyc; llc_req_valid = 1; llc_req.op = LLC_RD_MISS; llc_req.addr = a; llc_req.tag = TAG_W'(i);
        llc_req.pc = 64'h0040_3000; llc_req.pid = 16'd4;
        do @(posedge clk); while (!llc_req_ready);
        @(negedge clk); llc_req_valid = 0;
        while (!(llc_rsp_valid && llc_rsp.tag == TAG_W'(i))) @(negedge clk);
        if (llc_rsp.data != pattern_of(a)) bad_data++;
        if (i >= WARM && llc_rsp.from_buffer) ontime++;
        while (cyc < t0 + longint'(gap) - 1) @(negedge clk);
      end
      pct[k] = 100 * ontime / (N - WARM);
      $display("jitter +-%0d cycles: %0d of %0d reads on time (%0d%%), late prefetches %0d",
               jit[k], ontime, N - WARM, pct[k], cnt_late);
      check(bad_data == 0, $sformatf("J=%0d: read data", jit[k]));
      check(pf_bad == 0, $sformatf("J=%0d: prefetch time = prediction - e2e", jit[k]));
      if (jit[k] <= 450) check(pct[k] >= 90, $sformatf("J=%0d: at least 90%% on time", jit[k]));
      if (k > 0) check(pct[k] <= pct[k-1] + 5, $sformatf("J=%0d: on-time share does not rise with jitter", jit[k]));
    end
    check(pct[4] < pct[0], "large jitter lowers the on-time share");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
