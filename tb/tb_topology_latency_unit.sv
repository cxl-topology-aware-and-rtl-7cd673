// tb_topology_latency_unit: a table of devices at various switch depths,
// each answering configuration reads of its DSLBIS latency after a random
// delay; checks that every device receives exactly one write of
// DSLBIS + depth * SWITCH_LAT to its end-to-end register, in order, and
// that the unit's own table holds the same values.
module automatic tb_topology_latency_unit;
  import expand_pkg::*;
  localparam int MAX_DEV = 16, SW = 100, NDEV = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done, cfg_req_valid, cfg_req_ready, cfg_cpl_valid;
  logic [4:0] num_devs; logic [DEV_W-1:0] tab_dev, e2e_rd_dev; logic [3:0] tab_depth;
  cfg_req_t cfg_req; cfg_cpl_t cfg_cpl; lat_t e2e_rd_lat;
  int checks = 0, failures = 0;

  topology_latency_unit #(.MAX_DEV(MAX_DEV), .DEPTH_W(4), .SWITCH_LAT(SW)) dut (.*);

  int depth [MAX_DEV]; int dlat [MAX_DEV]; int got [MAX_DEV]; int nwr [MAX_DEV];
  assign tab_depth = 4'(depth[tab_dev]);

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // device side: random ready, completion 1..5 cycles after a read
  int pend_dev = -1, pend_wait = 0;
  always @(posedge clk) begin
    cfg_cpl_valid <= 0;
    if (pend_dev >= 0) begin
      if (pend_wait == 0) begin
        cfg_cpl_valid <= 1; cfg_cpl.dev <= DEV_W'(pend_dev); cfg_cpl.rdata <= dlat[pend_dev];
        pend_dev = -1;
      end else pend_wait--;
    end
    if (cfg_req_valid && cfg_req_ready) begin
      if (cfg_req.write) begin
        check(cfg_req.reg_addr == CFG_E2E_LAT, "write goes to E2E register");
        got[cfg_req.dev] = cfg_req.wdata; nwr[cfg_req.dev]++;
      end else begin
        check(cfg_req.reg_addr == CFG_DSLBIS_LAT, "read goes to DSLBIS register");
        pend_dev = cfg_req.dev; pend_wait = $urandom_range(0, 4);
      end
    end
    cfg_req_ready <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; num_devs = 0; e2e_rd_dev = 0; cfg_cpl_valid = 0; cfg_cpl = '0; cfg_req_ready = 0;
    for (int i = 0; i < MAX_DEV; i++) begin
      depth[i] = i % 5; dlat[i] = 1000 + 37 * i; got[i] = -1; nwr[i] = 0;
    end
    repeat (2) @(posedge clk); rst_n = 1;
    num_devs = NDEV;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done); repeat (3) @(posedge clk);
    for (int i = 0; i < NDEV; i++) begin
      check(nwr[i] == 1, $sformatf("dev %0d written once (%0d)", i, nwr[i]));
      check(got[i] == dlat[i] + depth[i] * SW, $sformatf("dev %0d e2e %0d exp %0d", i, got[i], dlat[i] + depth[i]*SW));
      e2e_rd_dev = DEV_W'(i); #1;
      check(e2e_rd_lat == lat_t'(dlat[i] + depth[i] * SW), "stored e2e");
    end
    check(nwr[NDEV] == 0, "no write beyond num_devs");
    // a device found later is handled on the next start
    num_devs = NDEV + 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (2) @(posedge clk); wait (done); repeat (3) @(posedge clk);
    check(nwr[NDEV] == 1 && got[NDEV] == dlat[NDEV] + depth[NDEV] * SW, "late device");
    check(nwr[0] == 1, "earlier devices not rewritten");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
