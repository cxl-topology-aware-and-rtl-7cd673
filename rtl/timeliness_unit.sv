// timeliness_unit: decides when a prefetch leaves the CXL-SSD.
//
// The line must reach the host buffer just before the host asks for it:
// too early and it may be pushed out unused, too late and the host stalls.
// The prefetch time is therefore the predicted next arrival minus the
// end-to-end latency between device and root complex (device latency from
// DSLBIS plus the switch levels of the virtual hierarchy), as the paper
// describes. A fresh prediction arms the unit; when the decider's clock
// reaches the prefetch time, pf_go is raised and stays up until the
// backend controller takes a prefetch (pf_taken), which disarms the unit
// until the next prediction, so one prefetch is released per predicted
// arrival. A prefetch time that would lie before time 0 is clamped to 0.
// One prefetch per prediction and the arm/disarm handshake are this
// design's choices.
//
// Counters: cnt_fire counts released prefetches, cnt_late those whose
// prefetch time had already passed when the prediction arrived (the
// latency is longer than the predicted gap).
module timeliness_unit
  import expand_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  ts_t  now,
  input  logic pred_new,
  input  ts_t  next_arrival,
  input  lat_t e2e_lat,
  output ts_t  pf_time,
  output logic pf_go,
  input  logic pf_taken,
  output logic [31:0] cnt_fire,
  output logic [31:0] cnt_late
);
  logic armed_q;
  ts_t  target;

  assign target = (next_arrival > TS_W'(e2e_lat)) ? next_arrival - TS_W'(e2e_lat) : '0;
  assign pf_go  = armed_q && (now >= pf_time);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed_q  <= 1'b0;
      pf_time  <= '0;
      cnt_fire <= '0;
      cnt_late <= '0;
    end else begin
      if (pf_go && pf_taken) begin
        armed_q  <= 1'b0;
        cnt_fire <= cnt_fire + 1;
      end
      if (pred_new) begin
        armed_q <= 1'b1;
        pf_time <= target;
        if (target < now) cnt_late <= cnt_late + 1;
      end
    end
  end

endmodule
