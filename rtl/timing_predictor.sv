// timing_predictor: predicts when the host will next touch the CXL-SSD.
//
// Every access the decider learns about (a MemRdPC that reached the device,
// or a cache-hit notification from the reflector) is time-stamped with the
// decider's cycle counter and pushed into a small history buffer of
// ENTRIES 8-byte timestamps (10 entries = 80 bytes, as in the paper). The
// next arrival is predicted as the newest arrival plus the average interval
// over the window:
//     next = t_newest + (t_newest - t_oldest) / (n - 1)
// where n is the number of valid entries (at most ENTRIES). Averaging the
// history and the buffer size are the paper's; taking the average of the
// intervals in this closed form is this design's reading of it.
//
// Timing: pred_valid/next_arrival update at the edge after an arrival;
// pred_new pulses for one cycle then. A prediction exists from the second
// arrival on.
module timing_predictor
  import expand_pkg::*;
#(
  parameter int unsigned ENTRIES = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic arrive,
  input  ts_t  now,
  output logic pred_valid,
  output logic pred_new,
  output ts_t  next_arrival,
  output ts_t  avg_interval
);
  localparam int unsigned PTR_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned CNT_W = $clog2(ENTRIES + 1);

  ts_t              hist_q [ENTRIES];
  logic [PTR_W-1:0] wr_ptr_q;      // next slot to write = oldest when full
  logic [CNT_W-1:0] count_q;

  // window contents after this arrival
  logic [CNT_W-1:0] n_new;
  ts_t              oldest_new;
  ts_t              interval;

  always_comb begin
    n_new = (count_q == CNT_W'(ENTRIES)) ? count_q : count_q + 1'b1;
    if (count_q == CNT_W'(ENTRIES))
      // buffer full: the slot being overwritten drops out; the oldest kept
      // one is the slot after it
      oldest_new = hist_q[(wr_ptr_q == PTR_W'(ENTRIES-1)) ? '0 : wr_ptr_q + 1'b1];
    else
      oldest_new = (count_q == '0) ? now : hist_q[0];
    interval = (n_new > CNT_W'(1)) ? (now - oldest_new) / TS_W'(n_new - 1'b1) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr_q     <= '0;
      count_q      <= '0;
      pred_valid   <= 1'b0;
      pred_new     <= 1'b0;
      next_arrival <= '0;
      avg_interval <= '0;
      for (int i = 0; i < ENTRIES; i++) hist_q[i] <= '0;
    end else begin
      pred_new <= 1'b0;
      if (arrive) begin
        hist_q[wr_ptr_q] <= now;
        wr_ptr_q <= (wr_ptr_q == PTR_W'(ENTRIES-1)) ? '0 : wr_ptr_q + 1'b1;
        count_q  <= n_new;
        if (n_new > CNT_W'(1)) begin
          pred_valid   <= 1'b1;
          pred_new     <= 1'b1;
          next_arrival <= now + interval;
          avg_interval <= interval;
        end
      end
    end
  end

endmodule
