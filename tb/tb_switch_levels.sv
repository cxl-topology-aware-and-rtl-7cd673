// tb_switch_levels: the switch-level sweep. The whole design, at its default
// parameters, is reset and enumerated four times with the CXL-SSD 1, 2, 3
// and 4 switches below the root complex. Each time a strided access stream
// (one access per 5000 cycles) runs through it. Checks per level: the
// end-to-end latency written to the device is 3000 + 250 x level; the
// prefetch time is always the predicted arrival minus that latency; most
// reads after warm-up are served from the root-complex buffer; and the
// shortest time a prefetched line waits in the buffer before the host
// reads it equals the VH part of the latency (250 x level) within a few
// cycles, i.e. a deeper device sends its prefetches correspondingly earlier.
module automatic tb_switch_levels;
  import expand_pkg::*;
  localparam int WIN = 8, BE_LAT = 3000, PERIOD = 5000, N = 32;
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

  // when each line entered the buffer, and how long before use
  longint fill_t [line_addr_t];
  longint cyc = 0, min_wait;
  ts_t next_d1 = 0; int pf_bad = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (pf_time != ((next_d1 > ts_t'(e2e_lat)) ? next_d1 - ts_t'(e2e_lat) : 0) && e2e_valid) pf_bad++;
      next_d1 = next_arrival;
      if (dut.u_reflector.u_bi.ins_valid) fill_t[dut.u_reflector.u_bi.ins_addr] = cyc;
    end
  end

  task automatic ev(input enum_evt_e k, input int b);
    @(negedge clk); enum_evt_valid = 1; enum_evt.kind = k; enum_evt.bus = BUS_W'(b);
    @(negedge clk); enum_evt_valid = 0;
  endtask

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    llc_req_valid = 0; llc_req = '0; enum_evt_valid = 0; enum_evt = '0; topo_start = 0;
    for (int lvl = 1; lvl <= 4; lvl++) begin
      line_addr_t a = line_addr_t'(lvl) << 20; int hits0; int hits;
      rst_n = 0; fill_t.delete(); min_wait = 1 << 30; pf_bad = 0;
      repeat (3) @(posedge clk); rst_n = 1;
      for (int s = 0; s < lvl; s++) ev(ENUM_SWITCH_DOWN, s + 1);
      ev(ENUM_ENDPOINT, lvl + 1);
      @(negedge clk); topo_start = 1; @(negedge clk); topo_start = 0;
      wait (topo_done); repeat (3) @(negedge clk);
      check(e2e_valid && e2e_lat == lat_t'(BE_LAT + 250 * lvl), $sformatf("level %0d: e2e %0d", lvl, e2e_lat));
      hits0 = 0;
      for (int i = 0; i < N; i++) begin
        a = a + 1;
        @(negedge clk); llc_req_valid = 1; llc_req.op = LLC_RD_MISS; llc_req.addr = a; llc_req.tag = TAG_W'(i);
        llc_req.pc = 64'h0040_2000; llc_req.pid = 16'd9;
        do @(posedge clk); while (!llc_req_ready);
        @(negedge clk); llc_req_valid = 0;
        repeat (3) @(negedge clk);
        if (fill_t.exists(a) && cnt_buf_hit > 32'(hits0)) begin
          longint w = cyc - fill_t[a];
          hits0 = int'(cnt_buf_hit);
          if (w < min_wait) min_wait = w;
        end
        repeat (PERIOD - 6) @(posedge clk);
      end
      hits = int'(cnt_buf_hit);
      $display("level %0d: e2e %0d cycles, %0d of %0d reads from the buffer, shortest wait in buffer %0d cycles, late %0d",
               lvl, e2e_lat, hits, N, min_wait, cnt_late);
      check(hits >= N - 4, $sformatf("level %0d: reads served from the buffer", lvl));
      check(pf_bad == 0, $sformatf("level %0d: prefetch time = predicted arrival - e2e", lvl));
      check(min_wait >= 250 * lvl - 12 && min_wait <= 250 * lvl + 2,
            $sformatf("level %0d: line arrives 250 x level cycles ahead (%0d)", lvl, min_wait));
      check(cnt_late == 0, "no late prefetch at this rate");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
