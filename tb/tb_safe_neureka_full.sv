// tb_safe_neureka_full: the accelerator at its default size running the
// dense 3x3 layer the evaluation uses, [KI,KO,HO,WO] = [256,32,8,8], from a
// memory that always grants, so that cycle counts are exact: the output
// check must take (2+TIMESHIFT) cycles per tile and one detected error must
// cost exactly one extra ERROR cycle, one recomputation of the tile's eight
// input-channel blocks and one extra check. See sn_tb_body.svh.
module tb_safe_neureka_full;
  localparam int unsigned L_KI = 256;
  localparam int unsigned L_KO = 32;
  localparam int unsigned L_HO = 8;
  localparam int unsigned L_WO = 8;
  localparam int unsigned GNT_PCT = 100;
  localparam int unsigned WATCHDOG_CYCLES = 400000;
`include "sn_tb_body.svh"
endmodule
