// tb_timeliness_unit: gives predictions with various end-to-end latencies
// and checks that pf_go rises exactly at next_arrival - e2e (clamped at 0),
// stays up until taken, releases one prefetch per prediction, and that
// late predictions (prefetch time already past) are counted.
module automatic tb_timeliness_unit;
  import expand_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ts_t now, next_arrival, pf_time; lat_t e2e_lat;
  logic pred_new, pf_go, pf_taken; logic [31:0] cnt_fire, cnt_late;
  int checks = 0, failures = 0;

  timeliness_unit dut (.*);
  always_ff @(posedge clk) now <= rst_n ? now + 1 : 0;

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int fires = 0, lates = 0;
    pred_new = 0; next_arrival = 0; e2e_lat = 0; pf_taken = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (10) @(posedge clk);
    check(!pf_go, "idle after reset");
    for (int i = 0; i < 60; i++) begin
      ts_t target; int lead = $urandom_range(0, 300); int lat = $urandom_range(0, 400);
      @(negedge clk);
      next_arrival = now + ts_t'(lead); e2e_lat = lat; pred_new = 1;
      target = (next_arrival > ts_t'(lat)) ? next_arrival - ts_t'(lat) : 0;
      if (target < now) lates++;
      @(negedge clk); pred_new = 0;
      check(pf_time == target, "pf_time = next - e2e");
      // pf_go must be low before target and high from target on
      while (now < target) begin
        check(!pf_go, $sformatf("pf_go early now=%0d target=%0d", now, target));
        @(negedge clk);
      end
      check(pf_go, $sformatf("pf_go at target now=%0d target=%0d", now, target));
      // hold a few cycles without taking it
      repeat ($urandom_range(0, 3)) begin @(negedge clk); check(pf_go, "pf_go held"); end
      pf_taken = 1; @(negedge clk); pf_taken = 0; fires++;
      check(!pf_go, "one prefetch per prediction");
    end
    // clamp at zero
    @(negedge clk); next_arrival = 5; e2e_lat = 1000; pred_new = 1; lates++;
    @(negedge clk); pred_new = 0;
    check(pf_time == 0 && pf_go, "clamped prefetch time");
    pf_taken = 1; @(negedge clk); pf_taken = 0; fires++;
    check(cnt_fire == 32'(fires), $sformatf("fires %0d exp %0d", cnt_fire, fires));
    check(cnt_late == 32'(lates), $sformatf("lates %0d exp %0d", cnt_late, lates));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
