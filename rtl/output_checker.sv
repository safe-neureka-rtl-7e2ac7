// output_checker: compares the outputs of the main and shadow datapaths in
// redundancy mode.
//
// The shadow datapath runs TIMESHIFT cycles behind the main one, so the main
// outputs pass through a TIMESHIFT-deep delay buffer before the comparison.
// The comparison is a bitwise XNOR of the two output vectors followed by an
// AND reduction; its inverse is registered as mismatch_o while chk_en_i is
// high (and cleared while it is low).
// Timing: with chk_en_i raised in cycle 0 of the check, main outputs of
// cycle 0 meet shadow outputs of cycle TIMESHIFT, and mismatch_o is valid in
// cycle TIMESHIFT+1, so a check takes 2+TIMESHIFT cycles. That count and the
// one-cycle default shift are the paper's; the register placement is this
// design's own.
module output_checker #(
  parameter int unsigned W         = 2048,
  parameter int unsigned TIMESHIFT = 1
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         chk_en_i,
  input  logic [W-1:0] main_i,
  input  logic [W-1:0] shadow_i,
  output logic         mismatch_o
);
  logic [W-1:0] dly_q [TIMESHIFT+1];
  logic         equal;

  assign dly_q[0] = main_i;
  for (genvar i = 0; i < TIMESHIFT; i++) begin : g_dly
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) dly_q[i+1] <= '0;
      else         dly_q[i+1] <= dly_q[i];
    end
  end

  assign equal = &(~(dly_q[TIMESHIFT] ^ shadow_i));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)        mismatch_o <= 1'b0;
    else if (!chk_en_i) mismatch_o <= 1'b0;
    else                mismatch_o <= !equal;
  end
endmodule
