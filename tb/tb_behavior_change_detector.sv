// tb_behavior_change_detector: pushes requests, checks the sliding window
// seen by the classifier (newest first, WIN entries), answers with
// categories that change now and then, and checks the behaviour-change
// pulse, the hint held until taken, and the change count.
module automatic tb_behavior_change_detector;
  import expand_pkg::*;
  localparam int WIN = 8, EW = LINE_ADDR_W + HASH_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic acc_valid, cls_req, cls_valid, change_evt, change_hint, hint_taken;
  line_addr_t acc_addr; logic [HASH_W-1:0] acc_hash;
  logic [WIN*EW-1:0] cls_window; logic [CAT_W-1:0] cls_category, cur_category;
  logic [31:0] cnt_change;
  int checks = 0, failures = 0;

  behavior_change_detector #(.WIN(WIN)) dut (.*);

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [EW-1:0] w[$]; int changes = 0; int prev = -1; int cat = 5;
    acc_valid = 0; acc_addr = 0; acc_hash = 0; cls_valid = 0; cls_category = 0; hint_taken = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      acc_valid = 1; acc_addr = line_addr_t'({$urandom, $urandom}); acc_hash = HASH_W'($urandom);
      hint_taken = acc_valid;
      w.push_front({acc_addr, acc_hash}); if (w.size() > WIN) void'(w.pop_back());
      @(negedge clk); acc_valid = 0; hint_taken = 0;
      check(cls_req, "classifier asked after each request");
      for (int k = 0; k < w.size(); k++)
        check(cls_window[k*EW +: EW] == w[k], $sformatf("window slot %0d", k));
      // classifier answers; category changes with probability 1/5
      if ($urandom_range(0, 4) == 0) cat = $urandom_range(0, 63);
      cls_valid = 1; cls_category = CAT_W'(cat);
      @(negedge clk); cls_valid = 0;
      if (prev >= 0 && prev != cat) begin
        changes++;
        check(change_evt && change_hint, $sformatf("change event %0d->%0d", prev, cat));
      end else begin
        check(!change_evt, "no change event");
      end
      check(cur_category == CAT_W'(cat), "current category");
      prev = cat;
    end
    check(cnt_change == 32'(changes) && changes > 5, $sformatf("changes %0d exp %0d", cnt_change, changes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
