// backend_media_model: behavioural model of a CXL-SSD's backend media
// (internal DRAM plus flash) for simulation only. Reads return after LAT
// cycles, in request order, and are held until taken; several reads may
// be in flight. A line never written reads as pattern_of(address); written
// lines are remembered. It is not synthesizable logic and not part of the
// design: the real media are chips and firmware outside it.
module backend_media_model
  import expand_pkg::*;
#(
  parameter int unsigned LAT = 20
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       be_req_valid,
  output logic       be_req_ready,
  input  logic       be_req_we,
  input  line_addr_t be_req_addr,
  input  line_t      be_req_data,
  output logic       be_rsp_valid,
  input  logic       be_rsp_ready,
  output line_t      be_rsp_data,
  output int         n_reads,
  output int         n_writes
);
  line_t mem [line_addr_t];
  typedef struct { longint due; line_t data; } pend_t;
  pend_t q[$];
  longint cyc = 0;

  function automatic line_t pattern_of(input line_addr_t a);
    line_t l;
    for (int i = 0; i < DATA_W/64; i++) l[i*64 +: 64] = {18'h2A5A5, 46'(a)} + 64'(i);
    return l;
  endfunction

  assign be_req_ready = 1'b1;

  always @(posedge clk) begin
    if (!rst_n) begin
      q.delete(); cyc <= 0; n_reads <= 0; n_writes <= 0;
      be_rsp_valid <= 1'b0; be_rsp_data <= '0;
    end else begin
      cyc <= cyc + 1;
      if (be_rsp_valid && be_rsp_ready) void'(q.pop_front());
      if (be_req_valid && be_req_ready) begin
        if (be_req_we) begin
          mem[be_req_addr] = be_req_data; n_writes <= n_writes + 1;
        end else begin
          pend_t p;
          p.due  = cyc + longint'(LAT);
          p.data = mem.exists(be_req_addr) ? mem[be_req_addr] : pattern_of(be_req_addr);
          q.push_back(p); n_reads <= n_reads + 1;
        end
      end
      // present the head of the queue in the next cycle
      if (q.size() > 0 && q[0].due <= cyc + 1) begin
        be_rsp_valid <= 1'b1; be_rsp_data <= q[0].data;
      end else begin
        be_rsp_valid <= 1'b0;
      end
    end
  end
endmodule
