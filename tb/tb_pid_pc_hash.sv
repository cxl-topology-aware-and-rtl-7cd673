// tb_pid_pc_hash: compares the hash with the fold written out by hand
// (pid rotated left by 5, XOR the four 16-bit slices of the PC) for random
// inputs, and checks that the same PC of two processes hashes apart.
module automatic tb_pid_pc_hash;
  import expand_pkg::*;
  logic [PID_W-1:0] pid; logic [PC_W-1:0] pc; logic [HASH_W-1:0] hash;
  int checks = 0, failures = 0;

  pid_pc_hash dut (.*);

  task automatic check(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [15:0] exp, h0;
    for (int i = 0; i < 2000; i++) begin
      pid = 16'($urandom); pc = {$urandom, $urandom};
      #1;
      exp = {pid[10:0], pid[15:11]} ^ pc[15:0] ^ pc[31:16] ^ pc[47:32] ^ pc[63:48];
      check(hash == exp, $sformatf("pid=%h pc=%h hash=%h exp=%h", pid, pc, hash, exp));
      h0 = hash;
      pid = pid ^ 16'h0001; #1;
      check(hash != h0, "pid changes the hash");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
