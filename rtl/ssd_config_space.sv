// ssd_config_space: the part of a CXL-SSD's PCIe configuration space that
// the prefetcher uses.
//
// Two 32-bit registers, in cycles:
//   CFG_DSLBIS_LAT (read only)  the device's own access latency, as it
//                               would report it in the DSLBIS structure
//                               behind its DOE mailbox;
//   CFG_E2E_LAT    (read/write) the end-to-end latency from the host's
//                               root complex, written by the reflector
//                               after enumeration and used by the decider.
// That the device reports its latency through DOE/DSLBIS and that the host
// writes the end-to-end latency back into the device's configuration space
// is the paper's. The DOE mailbox protocol itself (a CXL-specified
// object exchange) is reduced here to one register read; the offsets, the
// default latency and the one-cycle completion are this design's.
//
// Timing: requests are always accepted; a read completes one cycle later
// on cfg_cpl. Requests whose dev field is not DEV_ID are ignored.
module ssd_config_space
  import expand_pkg::*;
#(
  parameter logic [DEV_W-1:0] DEV_ID     = '0,
  parameter int unsigned      DSLBIS_LAT = 3000  // 3 us NAND read at 1 ns/cycle
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cfg_req_valid,
  output logic     cfg_req_ready,
  input  cfg_req_t cfg_req,
  output logic     cfg_cpl_valid,
  output cfg_cpl_t cfg_cpl,
  output lat_t     e2e_lat,
  output logic     e2e_valid
);
  assign cfg_req_ready = 1'b1;
  wire hit = cfg_req_valid && cfg_req.dev == DEV_ID;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e2e_lat       <= '0;
      e2e_valid     <= 1'b0;
      cfg_cpl_valid <= 1'b0;
      cfg_cpl       <= '0;
    end else begin
      cfg_cpl_valid <= hit && !cfg_req.write;
      if (hit && !cfg_req.write) begin
        cfg_cpl.dev   <= DEV_ID;
        unique case (cfg_req.reg_addr)
          CFG_DSLBIS_LAT: cfg_cpl.rdata <= 32'(DSLBIS_LAT);
          CFG_E2E_LAT:    cfg_cpl.rdata <= e2e_lat;
          default:        cfg_cpl.rdata <= '0;
        endcase
      end
      if (hit && cfg_req.write && cfg_req.reg_addr == CFG_E2E_LAT) begin
        e2e_lat   <= cfg_req.wdata;
        e2e_valid <= 1'b1;
      end
    end
  end

endmodule
