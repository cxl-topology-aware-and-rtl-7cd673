// tb_reflector_req_path: the testbench plays the reflector buffer (a set of
// resident lines answering one cycle after a lookup), the CXL link (random
// ready) and the LLC. Random read misses, LLC hits and write-backs are
// issued; for each the expected outputs are checked: buffer hits come back
// from the buffer with a CXL.io hit notification, buffer misses leave as
// MemRdPC carrying PC and pid, writes leave as MemWr and invalidate the
// line, LLC hits only notify. Demand data injected from the link must
// reach the LLC at once, ahead of a buffer hit.
module automatic tb_reflector_req_path;
  import expand_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic llc_req_valid, llc_req_ready, llc_rsp_valid;
  llc_req_t llc_req; llc_rsp_t llc_rsp;
  logic lk_valid, lk_hit, inv_valid; line_addr_t lk_addr, inv_addr; line_t lk_data;
  logic m2s_rwd_valid, m2s_rwd_ready; m2s_rwd_t m2s_rwd;
  logic memdata_valid; s2m_drs_t memdata;
  logic io_hit_valid, io_hit_ready; io_hit_t io_hit;
  logic [31:0] cnt_buf_hit, cnt_memrdpc;
  int checks = 0, failures = 0;

  reflector_req_path dut (.*);

  function automatic line_t line_of(input line_addr_t a);
    line_t l; for (int i = 0; i < 8; i++) l[i*64 +: 64] = {18'(a), 46'(a)} ^ (64'h1111 * i); return l;
  endfunction
  function automatic bit resident(input line_addr_t a); return a[0]; endfunction // odd lines are in the buffer

  // buffer model
  always_ff @(posedge clk) begin
    lk_hit  <= lk_valid && resident(lk_addr);
    lk_data <= line_of(lk_addr);
  end

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // monitors
  int n_m2s = 0, n_io = 0, n_rsp = 0, n_inv = 0;
  m2s_rwd_t last_m2s; io_hit_t last_io; llc_rsp_t last_rsp; line_addr_t last_inv;
  always @(posedge clk) if (rst_n) begin
    if (m2s_rwd_valid && m2s_rwd_ready) begin n_m2s++; last_m2s = m2s_rwd; end
    if (io_hit_valid && io_hit_ready)   begin n_io++;  last_io  = io_hit;  end
    if (llc_rsp_valid && !memdata_valid) begin n_rsp++; last_rsp = llc_rsp; end
    if (inv_valid) begin n_inv++; last_inv = inv_addr; end
    m2s_rwd_ready <= $urandom_range(0, 2) != 0;
    io_hit_ready  <= $urandom_range(0, 2) != 0;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int bufhits = 0, misses = 0, t_acc, t_rsp, mem_injected = 0;
    llc_req_valid = 0; llc_req = '0; memdata_valid = 0; memdata = '0;
    m2s_rwd_ready = 0; io_hit_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      int m0 = n_m2s, i0 = n_io, r0 = n_rsp, v0 = n_inv;
      llc_req_t r;
      r.op = llc_op_e'($urandom_range(0, 2)); r.tag = TAG_W'(i); r.addr = line_addr_t'({$urandom, $urandom});
      r.pc = {$urandom, $urandom}; r.pid = PID_W'($urandom); r.data = line_of(r.addr + 7);
      @(negedge clk); llc_req_valid = 1; llc_req = r;
      do @(posedge clk); while (!llc_req_ready);
      t_acc = $time;
      @(negedge clk); llc_req_valid = 0;
      // occasionally inject demand data from the link while this request runs
      if (r.op == LLC_RD_MISS && resident(r.addr) && (i % 7 == 0)) begin
        memdata_valid = 1; memdata.opcode = S2M_DRS_MEMDATA; memdata.tag = 16'hBEEF; memdata.data = '1;
        #1; check(llc_rsp_valid && llc_rsp.tag == 16'hBEEF && !llc_rsp.from_buffer, "demand data passes at once");
        @(negedge clk); memdata_valid = 0; mem_injected++;
      end
      repeat (12) @(posedge clk);
      unique case (r.op)
        LLC_RD_MISS: if (resident(r.addr)) begin
          bufhits++;
          check(n_rsp == r0 + 1 && last_rsp.from_buffer && last_rsp.tag == r.tag &&
                last_rsp.data == line_of(r.addr), $sformatf("buffer hit served, req %0d", i));
          check(n_io == i0 + 1 && last_io.addr == r.addr, "hit notified");
          check(n_m2s == m0, "buffer hit does not go to the device");
        end else begin
          misses++;
          check(n_m2s == m0 + 1 && last_m2s.opcode == M2S_RWD_MEMRDPC && last_m2s.addr == r.addr &&
                last_m2s.tag == r.tag && last_m2s.data[63:0] == r.pc && last_m2s.data[79:64] == r.pid,
                $sformatf("MemRdPC with PC, req %0d", i));
          check(n_rsp == r0 && n_io == i0, "miss: no response, no notification");
        end
        LLC_WR: begin
          check(n_m2s == m0 + 1 && last_m2s.opcode == M2S_RWD_MEMWR && last_m2s.addr == r.addr &&
                last_m2s.data == r.data, "MemWr");
          check(n_inv == v0 + 1 && last_inv == r.addr, "write invalidates buffer line");
        end
        LLC_HIT: begin
          check(n_io == i0 + 1 && last_io.addr == r.addr && n_m2s == m0 && n_rsp == r0, "LLC hit notified only");
        end
        default: ;
      endcase
    end
    check(cnt_buf_hit == 32'(bufhits) && cnt_memrdpc == 32'(misses), "counters");
    check(mem_injected > 3, "demand data collisions exercised");
    // latency: buffer hit reaches the LLC two cycles after acceptance
    @(negedge clk); llc_req_valid = 1; llc_req.op = LLC_RD_MISS; llc_req.addr = 1; llc_req.tag = 5;
    @(posedge clk); #1; llc_req_valid = 0; check(!llc_rsp_valid, "not in cycle 1");
    @(posedge clk); #1; check(llc_rsp_valid && llc_rsp.from_buffer, "buffer hit after two cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
