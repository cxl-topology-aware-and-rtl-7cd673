// tb_reflector_buffer: random inserts, invalidates and lookups against a
// reference model of a direct-mapped 256-line buffer (16 KB of 64-byte
// lines); checks hit/miss, returned data and the one-cycle lookup latency.
module automatic tb_reflector_buffer;
  import expand_pkg::*;
  localparam int LINES = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lk_valid, lk_hit, ins_valid, inv_valid;
  line_addr_t lk_addr, ins_addr, inv_addr;
  line_t lk_data, ins_data;
  int checks = 0, failures = 0;

  reflector_buffer dut (.*);

  // reference
  bit         m_valid [LINES];
  line_addr_t m_addr  [LINES];
  line_t      m_data  [LINES];

  function automatic line_t mkline(input int unsigned seed);
    line_t l;
    for (int i = 0; i < DATA_W/32; i++) l[i*32 +: 32] = seed * 32'h9E3779B1 + i;
    return l;
  endfunction

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_hit; line_t exp_data; line_addr_t a; int unsigned idx; int nhit = 0;
    lk_valid = 0; ins_valid = 0; inv_valid = 0; lk_addr = '0; ins_addr = '0; inv_addr = '0; ins_data = '0;
    for (int i = 0; i < LINES; i++) m_valid[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int it = 0; it < 4000; it++) begin
      // pick addresses from a small pool so hits, conflicts and misses occur
      a = line_addr_t'($urandom_range(0, 1023)) | (line_addr_t'($urandom_range(0,3)) << 40);
      @(negedge clk);
      lk_valid = 1; lk_addr = a;
      ins_valid = ($urandom_range(0, 2) == 0);
      ins_addr  = line_addr_t'($urandom_range(0, 1023)) | (line_addr_t'($urandom_range(0,3)) << 40);
      ins_data  = mkline($urandom);
      inv_valid = ($urandom_range(0, 5) == 0);
      inv_addr  = ($urandom_range(0,1)) ? ins_addr : a;
      // expected lookup result from state before this edge
      idx = a % LINES;
      exp_hit  = m_valid[idx] && m_addr[idx] == a;
      exp_data = m_data[idx];
      @(posedge clk);
      // update reference
      if (ins_valid) begin
        m_valid[ins_addr % LINES] = 1; m_addr[ins_addr % LINES] = ins_addr;
        m_data[ins_addr % LINES] = ins_data;
      end
      if (inv_valid) begin
        if (ins_valid && inv_addr == ins_addr) m_valid[ins_addr % LINES] = 0;
        else if (m_valid[inv_addr % LINES] && m_addr[inv_addr % LINES] == inv_addr &&
                 !(ins_valid && ins_addr % LINES == inv_addr % LINES))
          m_valid[inv_addr % LINES] = 0;
      end
      #1;
      check(lk_hit == exp_hit, $sformatf("hit addr=%h exp=%0d got=%0d", a, exp_hit, lk_hit));
      if (exp_hit) begin
        nhit++;
        check(lk_data == exp_data, $sformatf("data addr=%h", a));
      end
    end
    check(nhit > 100, "enough hits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
