// topology_latency_unit: after enumeration, works out the end-to-end
// latency of every CXL-SSD and writes it into that device's configuration
// space, so the decider on the device can time its prefetches.
//
// For each device found by switch_depth_tracker, in index order, it
//   1. reads the device latency the device reports through DOE/DSLBIS
//      (a CXL.io configuration read of CFG_DSLBIS_LAT),
//   2. adds the latency of the virtual hierarchy between the root complex
//      and the device, taken here as switch depth x SWITCH_LAT,
//   3. keeps the sum in its own per-device table and writes it to the
//      device's CFG_E2E_LAT register with a configuration write.
// The three steps and the sum are the paper's (its Fig. 7); the paper gives
// no per-switch latency and no formula for the VH latency, so depth times a
// fixed per-switch latency is this design's model of it.
//
// Interface: cfg_req valid/ready towards the devices, cfg_cpl valid for
// read completions. Starts when 'start' is pulsed and raises 'done' when
// every known device has been written; further devices found later are
// handled on the next start.
module topology_latency_unit
  import expand_pkg::*;
#(
  parameter int unsigned MAX_DEV    = 16,
  parameter int unsigned DEPTH_W    = 4,
  parameter int unsigned SWITCH_LAT = 250   // cycles per switch level
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     done,
  // from switch_depth_tracker
  input  logic [$clog2(MAX_DEV+1)-1:0] num_devs,
  output logic [DEV_W-1:0]         tab_dev,
  input  logic [DEPTH_W-1:0]       tab_depth,
  // CXL.io configuration channel
  output logic                     cfg_req_valid,
  input  logic                     cfg_req_ready,
  output cfg_req_t                 cfg_req,
  input  logic                     cfg_cpl_valid,
  input  cfg_cpl_t                 cfg_cpl,
  // stored end-to-end latency, read by device index
  input  logic [DEV_W-1:0]         e2e_rd_dev,
  output lat_t                     e2e_rd_lat
);
  typedef enum logic [2:0] {S_IDLE, S_RD, S_WAIT, S_WR, S_DONE} state_e;
  state_e state_q;
  logic [$clog2(MAX_DEV+1)-1:0] dev_q;
  lat_t e2e_q;
  lat_t e2e_tab [MAX_DEV];

  assign tab_dev = dev_q[DEV_W-1:0];
  assign done    = (state_q == S_DONE);

  always_comb begin
    cfg_req_valid = (state_q == S_RD) || (state_q == S_WR);
    cfg_req.write    = (state_q == S_WR);
    cfg_req.dev      = dev_q[DEV_W-1:0];
    cfg_req.reg_addr = (state_q == S_WR) ? CFG_E2E_LAT : CFG_DSLBIS_LAT;
    cfg_req.wdata    = e2e_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      dev_q   <= '0;
      e2e_q   <= '0;
      for (int i = 0; i < MAX_DEV; i++) e2e_tab[i] <= '0;
    end else begin
      unique case (state_q)
        S_IDLE, S_DONE: if (start) state_q <= (dev_q < num_devs) ? S_RD : S_DONE;
        S_RD:   if (cfg_req_ready) state_q <= S_WAIT;
        S_WAIT: if (cfg_cpl_valid && cfg_cpl.dev == dev_q[DEV_W-1:0]) begin
                  e2e_q   <= cfg_cpl.rdata + lat_t'(tab_depth) * lat_t'(SWITCH_LAT);
                  state_q <= S_WR;
                end
        S_WR:   if (cfg_req_ready) begin
                  e2e_tab[dev_q[DEV_W-1:0]] <= e2e_q;
                  dev_q   <= dev_q + 1'b1;
                  state_q <= (dev_q + 1'b1 < num_devs) ? S_RD : S_DONE;
                end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign e2e_rd_lat = e2e_tab[e2e_rd_dev];

endmodule
