// tb_safe_neureka: end-to-end test of the Safe-NEureka accelerator on a
// small layer (KI=64, KO=64, HO=8, WO=6): two input-channel blocks, two
// output-channel blocks, two row tiles and an odd number of column tiles,
// with a memory that refuses 15% of the requests. See sn_tb_body.svh for
// the sequence of jobs and checks.
module tb_safe_neureka;
  localparam int unsigned L_KI = 64;
  localparam int unsigned L_KO = 64;
  localparam int unsigned L_HO = 8;
  localparam int unsigned L_WO = 6;
  localparam int unsigned GNT_PCT = 85;
  localparam int unsigned WATCHDOG_CYCLES = 200000;
`include "sn_tb_body.svh"
endmodule
