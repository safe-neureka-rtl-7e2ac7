// controller: triple-modular-redundant Safe-NEureka controller.
//
// Three identical controller_core copies receive the same inputs; every
// output bit (engine control, streamer requests, register read data, status)
// is the two-out-of-three majority of the copies, so a fault inside any one
// copy (its register file, FSM or uloops) never reaches the datapath or the
// memory port. tmr_mismatch_o flags that the copies currently disagree.
// The copies are not resynchronised: a copy hit by an upset stays divergent
// (and outvoted) until the next reset. Voted outputs have the same timing as
// a single core. Triplication with majority voting follows the paper; the
// missing resynchronisation and the mismatch flag are this design's own.
module controller
  import neureka_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        cfg_req_i,
  input  logic        cfg_we_i,
  input  logic [3:0]  cfg_addr_i,
  input  logic [31:0] cfg_wdata_i,
  input  logic        src_gnt_i,
  input  logic        snk_gnt_i,
  input  logic        mismatch_i,
  input  logic [3:0]  ecc_corr_i,
  input  logic [3:0]  ecc_unc_i,
  output ctrl_out_t   out_o,
  output logic        tmr_mismatch_o
);
  ctrl_out_t core_out [3];

  for (genvar i = 0; i < 3; i++) begin : g_core
    controller_core u_core (
      .clk_i, .rst_ni,
      .cfg_req_i, .cfg_we_i, .cfg_addr_i, .cfg_wdata_i,
      .src_gnt_i, .snk_gnt_i, .mismatch_i, .ecc_corr_i, .ecc_unc_i,
      .out_o(core_out[i])
    );
  end

  tmr_voter #(.W($bits(ctrl_out_t))) u_voter (
    .a_i(core_out[0]), .b_i(core_out[1]), .c_i(core_out[2]),
    .y_o(out_o), .mismatch_o(tmr_mismatch_o)
  );
endmodule
