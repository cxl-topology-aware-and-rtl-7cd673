// tb_timing_predictor: feeds arrivals at random and at steady intervals
// and checks every prediction against newest + (newest - oldest)/(n-1)
// over the last 10 arrivals, computed from a queue in the testbench;
// checks that the prediction appears exactly one cycle after the arrival.
module automatic tb_timing_predictor;
  import expand_pkg::*;
  localparam int ENTRIES = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic arrive, pred_valid, pred_new; ts_t now, next_arrival, avg_interval;
  int checks = 0, failures = 0;

  timing_predictor #(.ENTRIES(ENTRIES)) dut (.*);

  ts_t q[$];
  always_ff @(posedge clk) now <= rst_n ? now + 1 : 0;

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ts_t exp_next, exp_int;
    arrive = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      int gap = (i < 150) ? $urandom_range(1, 40) : 17;   // random, then steady
      repeat (gap - 1) @(posedge clk);
      @(negedge clk);
      arrive = 1;
      q.push_back(now);
      if (q.size() > ENTRIES) void'(q.pop_front());
      @(posedge clk); #1; arrive = 0;
      if (q.size() >= 2) begin
        exp_int  = (q[$] - q[0]) / ts_t'(q.size() - 1);
        exp_next = q[$] + exp_int;
        check(pred_new && pred_valid, $sformatf("pred_new one cycle after arrival %0d", i));
        check(next_arrival == exp_next, $sformatf("next %0d exp %0d", next_arrival, exp_next));
        check(avg_interval == exp_int, "interval");
      end else begin
        check(!pred_valid && !pred_new, "no prediction from one arrival");
      end
      @(posedge clk); #1;
      check(!pred_new, "pred_new is a single pulse");
    end
    // steady stream: prediction equals the real next arrival
    check(avg_interval == q[$] - q[$-1] && q[$] - q[0] == ts_t'(ENTRIES-1) * (q[$] - q[$-1]), "steady interval learned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
