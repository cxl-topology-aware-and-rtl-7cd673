// tb_bisnp_receiver: sends BISnpData headers followed (after a random gap,
// with unrelated demand data in between) by their payloads, and BISnpInv
// snoops; checks that each payload is written to the buffer at the
// snooped address, that demand data is passed on at once, that a payload
// is not taken before its header, and that every snoop gets one BIRsp
// with its tag.
module automatic tb_bisnp_receiver;
  import expand_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bisnp_valid, bisnp_ready, drs_valid, drs_ready, memdata_valid;
  s2m_bisnp_t bisnp; s2m_drs_t drs, memdata;
  logic ins_valid, inv_valid, inv_ready, birsp_valid, birsp_ready;
  line_addr_t ins_addr, inv_addr; line_t ins_data; m2s_birsp_t birsp;
  logic [31:0] cnt_prefetch_fill;
  int checks = 0, failures = 0;

  bisnp_receiver dut (.*);

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  int n_ins = 0, n_inv = 0, n_rsp = 0, n_md = 0;
  line_addr_t l_ins_addr, l_inv_addr; line_t l_ins_data; m2s_birsp_t l_rsp;
  always @(posedge clk) if (rst_n) begin
    if (ins_valid) begin n_ins++; l_ins_addr = ins_addr; l_ins_data = ins_data; end
    if (inv_valid && inv_ready) begin n_inv++; l_inv_addr = inv_addr; end
    if (birsp_valid && birsp_ready) begin n_rsp++; l_rsp = birsp; end
    if (memdata_valid) n_md++;
    birsp_ready <= $urandom_range(0, 1);
    inv_ready   <= $urandom_range(0, 1);
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int fills = 0;
    bisnp_valid = 0; bisnp = '0; drs_valid = 0; drs = '0; birsp_ready = 0; inv_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // payload before any header is not accepted
    @(negedge clk); drs_valid = 1; drs.opcode = S2M_DRS_BIDATA; drs.tag = 9;
    #1; check(!drs_ready && !ins_valid, "payload without header held back");
    @(negedge clk); drs_valid = 0;
    for (int i = 0; i < 150; i++) begin
      int i0 = n_ins, v0 = n_inv, r0 = n_rsp, d0 = n_md;
      bit is_data = $urandom_range(0, 3) != 0;
      line_addr_t a = line_addr_t'({$urandom, $urandom});
      line_t d = {16{$urandom}};
      @(negedge clk); bisnp_valid = 1;
      bisnp.opcode = is_data ? S2M_BISNP_DATA : S2M_BISNP_INV; bisnp.bi_tag = TAG_W'(i); bisnp.addr = a;
      do @(posedge clk); while (!bisnp_ready);
      @(negedge clk); bisnp_valid = 0;
      if (is_data) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        // demand data in between
        drs_valid = 1; drs.opcode = S2M_DRS_MEMDATA; drs.tag = 16'h7777; drs.data = '0;
        #1; check(memdata_valid && drs_ready && memdata.tag == 16'h7777, "demand data passes");
        check(!ins_valid, "demand data not inserted");
        @(negedge clk);
        // payload with a wrong tag first: must not be taken
        drs.opcode = S2M_DRS_BIDATA; drs.tag = TAG_W'(i + 1000); #1;
        check(!ins_valid && !drs_ready, "payload of another tag ignored");
        @(negedge clk);
        drs.tag = TAG_W'(i); drs.data = d;
        @(negedge clk); drs_valid = 0; fills++;
      end
      repeat (10) @(posedge clk);
      check(n_rsp == r0 + 1 && l_rsp.bi_tag == TAG_W'(i) && l_rsp.addr == a, $sformatf("BIRsp for snoop %0d", i));
      if (is_data) check(n_ins == i0 + 1 && l_ins_addr == a && l_ins_data == d, "payload inserted");
      else         check(n_inv == v0 + 1 && l_inv_addr == a && n_ins == i0, "BISnpInv invalidates");
    end
    check(cnt_prefetch_fill == 32'(fills), "fill counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
