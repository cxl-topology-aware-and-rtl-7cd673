// reflector_buffer: the prefetch buffer that sits in the host's CXL root
// complex. The decider on the CXL-SSD fills it with lines it predicts the
// host will read; the LLC controller checks it before a miss is sent out
// to the CXL-SSD pool, and a hit is served from here.
//
// Organisation: BUF_BYTES / 64 lines (256 for the 16 KB of the paper),
// direct mapped on the low line-address bits, one valid bit and one tag
// per line. A newer prefetch to the same index replaces the old line.
// The paper gives the size and the role; the mapping, the replacement and
// the invalidation port (used for host writes and for BISnpInv so the
// buffer never returns stale data) are this design's choices.
//
// Timing: a lookup presented in cycle t returns lk_hit/lk_data in cycle t+1
// from the contents as they were before any insert/invalidate of cycle t.
// Inserts and invalidates take effect at the next edge; if both name the
// same line in one cycle the invalidate wins.
module reflector_buffer
  import expand_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 16384
) (
  input  logic        clk,
  input  logic        rst_n,
  // lookup from the LLC controller path
  input  logic        lk_valid,
  input  line_addr_t  lk_addr,
  output logic        lk_hit,
  output line_t       lk_data,
  // fill from a BISnpData payload
  input  logic        ins_valid,
  input  line_addr_t  ins_addr,
  input  line_t       ins_data,
  // invalidate (host write or BISnpInv)
  input  logic        inv_valid,
  input  line_addr_t  inv_addr
);
  localparam int unsigned LINES = BUF_BYTES / (DATA_W / 8);
  localparam int unsigned IDX_W = $clog2(LINES);
  localparam int unsigned TAG_BITS = LINE_ADDR_W - IDX_W;

  typedef logic [IDX_W-1:0]    idx_t;
  typedef logic [TAG_BITS-1:0] btag_t;

  line_t       data_q [LINES];
  btag_t       tag_q  [LINES];
  logic [LINES-1:0] valid_q;

  idx_t  lk_idx, ins_idx, inv_idx;
  assign lk_idx  = lk_addr[IDX_W-1:0];
  assign ins_idx = ins_addr[IDX_W-1:0];
  assign inv_idx = inv_addr[IDX_W-1:0];

  // data and tag arrays (no reset needed: guarded by valid_q)
  always_ff @(posedge clk) begin
    if (ins_valid) begin
      data_q[ins_idx] <= ins_data;
      tag_q[ins_idx]  <= ins_addr[LINE_ADDR_W-1:IDX_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else begin
      if (ins_valid) valid_q[ins_idx] <= 1'b1;
      if (inv_valid && valid_q[inv_idx] &&
          tag_q[inv_idx] == inv_addr[LINE_ADDR_W-1:IDX_W])
        valid_q[inv_idx] <= 1'b0;
      if (inv_valid && ins_valid && inv_addr == ins_addr)
        valid_q[ins_idx] <= 1'b0;
    end
  end

  // registered lookup
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_hit <= 1'b0;
    end else begin
      lk_hit <= lk_valid && valid_q[lk_idx] &&
                tag_q[lk_idx] == lk_addr[LINE_ADDR_W-1:IDX_W];
    end
  end

  always_ff @(posedge clk) begin
    if (lk_valid) lk_data <= data_q[lk_idx];
  end

endmodule
