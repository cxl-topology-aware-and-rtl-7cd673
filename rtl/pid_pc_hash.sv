// pid_pc_hash: folds the process id and the program counter of a memory
// request into one HASH_W-bit token for the address predictor, so that
// loads from the same instruction of the same process map to the same
// token and requests of different processes are kept apart.
//
// The paper only names the input as "hashed (pid, PC)"; the function used
// here is this design's: the PC is cut into HASH_W-bit slices which are
// XORed together with the pid rotated by 5 bits. Purely combinational.
module pid_pc_hash
  import expand_pkg::*;
(
  input  logic [PID_W-1:0]  pid,
  input  logic [PC_W-1:0]   pc,
  output logic [HASH_W-1:0] hash
);
  localparam int unsigned SLICES = PC_W / HASH_W;

  always_comb begin
    logic [HASH_W-1:0] h;
    h = {pid[PID_W-6:0], pid[PID_W-1:PID_W-5]};
    for (int i = 0; i < SLICES; i++) h ^= pc[i*HASH_W +: HASH_W];
    hash = h;
  end

endmodule
