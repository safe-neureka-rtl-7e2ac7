// tmr_voter: bitwise two-out-of-three majority voter.
//
// Each output bit is the majority of the three copies' bits, so any single
// faulty copy is outvoted. mismatch_o flags that at least one copy disagrees
// with the others (useful as a status signal). Combinational. The voter is
// the paper's TMR mechanism for the controller; the mismatch flag is an
// addition of this design.
module tmr_voter #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] b_i,
  input  logic [W-1:0] c_i,
  output logic [W-1:0] y_o,
  output logic         mismatch_o
);
  assign y_o        = (a_i & b_i) | (a_i & c_i) | (b_i & c_i);
  assign mismatch_o = (a_i != b_i) || (a_i != c_i);
endmodule
