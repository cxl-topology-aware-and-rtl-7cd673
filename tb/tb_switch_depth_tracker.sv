// tb_switch_depth_tracker: walks a generated switch tree (random nesting
// of switches with endpoints at each level), then checks the depth and bus
// recorded for every endpoint against the walk, and the overflow flag
// when more endpoints than table entries are found.
module automatic tb_switch_depth_tracker;
  import expand_pkg::*;
  localparam int MAX_DEV = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic evt_valid; enum_evt_t evt;
  logic [DEV_W-1:0] rd_dev; logic [3:0] rd_depth; logic [BUS_W-1:0] rd_bus;
  logic [4:0] num_devs; logic overflow;
  int checks = 0, failures = 0;

  switch_depth_tracker #(.MAX_DEV(MAX_DEV), .DEPTH_W(4)) dut (.*);

  int exp_depth [MAX_DEV]; int exp_bus [MAX_DEV];
  int ndev = 0, depth = 0, bus = 1;

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask
  task automatic send(input enum_evt_e k, input int b);
    @(negedge clk); evt_valid = 1; evt.kind = k; evt.bus = BUS_W'(b);
    @(negedge clk); evt_valid = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    evt_valid = 0; evt = '0; rd_dev = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // random walk: 40 events, depth kept within 0..6
    for (int i = 0; i < 40 && ndev < MAX_DEV; i++) begin
      int r = $urandom_range(0, 2);
      if (r == 0 && depth < 6) begin send(ENUM_SWITCH_DOWN, bus); depth++; bus++; end
      else if (r == 1 && depth > 0) begin send(ENUM_SWITCH_UP, 0); depth--; end
      else begin
        send(ENUM_ENDPOINT, bus); exp_depth[ndev] = depth; exp_bus[ndev] = bus; ndev++; bus++;
      end
    end
    // make sure a deep device exists: three more levels then an endpoint
    if (ndev < MAX_DEV) begin
      send(ENUM_SWITCH_DOWN, bus); send(ENUM_SWITCH_DOWN, bus+1); send(ENUM_SWITCH_DOWN, bus+2);
      depth += 3; bus += 3;
      send(ENUM_ENDPOINT, bus); exp_depth[ndev] = depth; exp_bus[ndev] = bus; ndev++; bus++;
    end
    check(num_devs == 5'(ndev), $sformatf("num_devs %0d vs %0d", num_devs, ndev));
    for (int d = 0; d < ndev; d++) begin
      rd_dev = DEV_W'(d); #1;
      check(rd_depth == 4'(exp_depth[d]), $sformatf("dev %0d depth %0d vs %0d", d, rd_depth, exp_depth[d]));
      check(rd_bus == BUS_W'(exp_bus[d]), $sformatf("dev %0d bus", d));
    end
    check(!overflow, "no overflow yet");
    // fill the table and one more
    while (ndev <= MAX_DEV) begin send(ENUM_ENDPOINT, bus); ndev++; bus++; end
    check(overflow, "overflow after MAX_DEV+1 endpoints");
    check(num_devs == 5'(MAX_DEV), "num_devs saturates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
