// tb_ssd_config_space: reads the DSLBIS latency, writes and reads back the
// end-to-end latency, and checks that requests for another device are
// ignored and that a read completes exactly one cycle later.
module automatic tb_ssd_config_space;
  import expand_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_req_valid, cfg_req_ready, cfg_cpl_valid, e2e_valid;
  cfg_req_t cfg_req; cfg_cpl_t cfg_cpl; lat_t e2e_lat;
  int checks = 0, failures = 0;

  ssd_config_space #(.DEV_ID(4'd3), .DSLBIS_LAT(1234)) dut (.*);

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask
  task automatic req(input bit w, input int dev, input logic [11:0] a, input int d);
    @(negedge clk); cfg_req_valid = 1; cfg_req.write = w; cfg_req.dev = DEV_W'(dev);
    cfg_req.reg_addr = a; cfg_req.wdata = d;
    @(posedge clk); #1; cfg_req_valid = 0;
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg_req_valid = 0; cfg_req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    check(!e2e_valid, "e2e not valid after reset");
    req(0, 3, CFG_DSLBIS_LAT, 0);
    check(cfg_cpl_valid && cfg_cpl.rdata == 1234 && cfg_cpl.dev == 3, "DSLBIS read one cycle later");
    @(posedge clk); #1; check(!cfg_cpl_valid, "completion is one cycle");
    req(1, 3, CFG_E2E_LAT, 5678);
    check(!cfg_cpl_valid, "no completion for a write");
    check(e2e_valid && e2e_lat == 5678, "e2e written");
    req(1, 2, CFG_E2E_LAT, 99);
    check(e2e_lat == 5678, "other device's write ignored");
    req(0, 2, CFG_DSLBIS_LAT, 0);
    check(!cfg_cpl_valid, "other device's read ignored");
    req(1, 3, CFG_DSLBIS_LAT, 77);
    req(0, 3, CFG_DSLBIS_LAT, 0);
    check(cfg_cpl.rdata == 1234, "DSLBIS is read only");
    req(0, 3, CFG_E2E_LAT, 0);
    check(cfg_cpl_valid && cfg_cpl.rdata == 5678, "E2E read back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
