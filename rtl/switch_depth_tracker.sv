// switch_depth_tracker: finds how many CXL switches lie between the root
// complex and each CXL-SSD while the host enumerates the PCIe/CXL tree.
//
// Each CXL switch shows up during enumeration as a PCIe bridge with a bus
// number of its own, so the number of switches above a device is the
// nesting depth of bridges at the moment the device is found. The host's
// enumeration walk is presented here as a stream of events: SWITCH_DOWN
// when it enters a switch, SWITCH_UP when it has finished below it, and
// ENDPOINT when it finds a CXL-SSD. Endpoints get indices 0,1,2,... in the
// order found; their depth and bus number are stored in a table that the
// rest of the reflector reads. That switches are counted during
// enumeration and kept on the root-complex side is from the paper; the
// event stream and table layout are this design's own.
//
// Timing: one event per cycle at most; the table and num_devs update at
// the clock edge after the event. An endpoint beyond MAX_DEV is dropped
// and sets overflow.
module switch_depth_tracker
  import expand_pkg::*;
#(
  parameter int unsigned MAX_DEV = 16,
  parameter int unsigned DEPTH_W = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     evt_valid,
  input  enum_evt_t                evt,
  // table read port
  input  logic [DEV_W-1:0]         rd_dev,
  output logic [DEPTH_W-1:0]       rd_depth,
  output logic [BUS_W-1:0]         rd_bus,
  output logic [$clog2(MAX_DEV+1)-1:0] num_devs,
  output logic                     overflow
);
  logic [DEPTH_W-1:0] cur_depth_q;
  logic [DEPTH_W-1:0] depth_tab [MAX_DEV];
  logic [BUS_W-1:0]   bus_tab   [MAX_DEV];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_depth_q <= '0;
      num_devs    <= '0;
      overflow    <= 1'b0;
      for (int i = 0; i < MAX_DEV; i++) begin
        depth_tab[i] <= '0;
        bus_tab[i]   <= '0;
      end
    end else if (evt_valid) begin
      unique case (evt.kind)
        ENUM_SWITCH_DOWN: cur_depth_q <= cur_depth_q + 1'b1;
        ENUM_SWITCH_UP:   if (cur_depth_q != '0) cur_depth_q <= cur_depth_q - 1'b1;
        ENUM_ENDPOINT: begin
          if (32'(num_devs) < MAX_DEV) begin
            depth_tab[num_devs[DEV_W-1:0]] <= cur_depth_q;
            bus_tab[num_devs[DEV_W-1:0]]   <= evt.bus;
            num_devs <= num_devs + 1'b1;
          end else begin
            overflow <= 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  assign rd_depth = depth_tab[rd_dev];
  assign rd_bus   = bus_tab[rd_dev];

endmodule
