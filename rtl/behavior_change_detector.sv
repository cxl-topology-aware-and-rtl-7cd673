// behavior_change_detector: online tuning support for the address
// predictor.
//
// The decider keeps a sliding window of the WIN most recent requests
// (line address and hashed pid/PC). After every new request the whole
// window is offered to the pretrained decision-tree classifier, which
// puts it into one of 64 categories of application behaviour. When the
// category it returns differs from the previous one, this block raises a
// behaviour-change event; the event is kept as a hint (change_hint) and
// handed to the address predictor with the next request, so the
// transformer can weigh recent accesses more. The window, the comparison
// with the previous category and the hint are the paper's; the window
// length and the handshake are this design's. The classifier itself is
// outside (its tree is not part of this design).
//
// Timing: the window shifts at the edge after acc_valid; cls_req pulses in
// the cycle after that. A category (cls_valid) is compared in the cycle it
// arrives and change_evt pulses one cycle later.
module behavior_change_detector
  import expand_pkg::*;
#(
  parameter int unsigned WIN = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  // new request
  input  logic                acc_valid,
  input  line_addr_t          acc_addr,
  input  logic [HASH_W-1:0]   acc_hash,
  // window to the classifier
  output logic                cls_req,
  output logic [WIN*(LINE_ADDR_W+HASH_W)-1:0] cls_window,
  // category back from the classifier
  input  logic                cls_valid,
  input  logic [CAT_W-1:0]    cls_category,
  // behaviour-change event and hint for the address predictor
  output logic                change_evt,
  output logic                change_hint,
  input  logic                hint_taken,
  output logic [CAT_W-1:0]    cur_category,
  output logic [31:0]         cnt_change
);
  localparam int unsigned EW = LINE_ADDR_W + HASH_W;
  logic [EW-1:0] win_q [WIN];
  logic          have_prev_q;

  always_comb begin
    for (int i = 0; i < WIN; i++) cls_window[i*EW +: EW] = win_q[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WIN; i++) win_q[i] <= '0;
      cls_req      <= 1'b0;
      have_prev_q  <= 1'b0;
      cur_category <= '0;
      change_evt   <= 1'b0;
      change_hint  <= 1'b0;
      cnt_change   <= '0;
    end else begin
      cls_req    <= acc_valid;
      change_evt <= 1'b0;
      if (acc_valid) begin
        win_q[0] <= {acc_addr, acc_hash};
        for (int i = 1; i < WIN; i++) win_q[i] <= win_q[i-1];
      end
      if (hint_taken) change_hint <= 1'b0;
      if (cls_valid) begin
        cur_category <= cls_category;
        have_prev_q  <= 1'b1;
        if (have_prev_q && cls_category != cur_category) begin
          change_evt  <= 1'b1;
          change_hint <= 1'b1;
          cnt_change  <= cnt_change + 1;
        end
      end
    end
  end

endmodule
