// safe_neureka: top level of the Safe-NEureka accelerator.
//
// A DNN accelerator for 3x3 convolutions whose 4x4 processing-element array
// is split into two 4x2 halves that either work on different tiles
// (performance mode) or compute the same tile one cycle apart and compare
// their results (redundancy mode, dual modular redundancy with hardware
// rollback on mismatch). The controller is triplicated with majority voting
// and the memory port is SEC-DED protected on payload and metadata.
//
// Blocks: streamer (ECC load/store unit on the single memory port), engine
// (two subarrays, config delay, output checker), controller (3x
// controller_core with voter). Ports: a configuration port for the register
// file (see regfile for the map), a 288+63-bit TCDM port with metadata ECC
// towards the cluster interconnect, and status outputs. Timing of the TCDM
// port: a request is held until grant; read data returns one cycle after
// the grant. The block structure follows the paper's accelerator figure.
module safe_neureka
  import neureka_pkg::*;
(
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // configuration port
  input  logic                  cfg_req_i,
  input  logic                  cfg_we_i,
  input  logic [3:0]            cfg_addr_i,
  input  logic [31:0]           cfg_wdata_i,
  output logic [31:0]           cfg_rdata_o,
  output logic                  cfg_rvalid_o,
  // TCDM port
  output logic                  tcdm_req_o,
  input  logic                  tcdm_gnt_i,
  output logic [31:0]           tcdm_add_o,
  output logic                  tcdm_we_o,
  output logic [BE_W-1:0]       tcdm_be_o,
  output logic [ECC_DATA_W-1:0] tcdm_data_o,
  output logic [7:0]            tcdm_meta_ecc_o,
  input  logic [ECC_DATA_W-1:0] tcdm_r_data_i,
  input  logic                  tcdm_r_valid_i,
  // status
  output logic                  busy_o,
  output logic                  done_o,
  output logic                  err_detected_o,
  output logic                  tmr_mismatch_o
);
  ctrl_out_t        ctrl;
  rsp_t             rsp;
  logic             src_gnt, snk_gnt, mismatch;
  logic [3:0]       ecc_corr, ecc_unc;
  logic [OUT_W-1:0] so_data;

  controller u_controller (
    .clk_i, .rst_ni,
    .cfg_req_i, .cfg_we_i, .cfg_addr_i, .cfg_wdata_i,
    .src_gnt_i(src_gnt), .snk_gnt_i(snk_gnt), .mismatch_i(mismatch),
    .ecc_corr_i(ecc_corr), .ecc_unc_i(ecc_unc),
    .out_o(ctrl), .tmr_mismatch_o
  );

  streamer u_streamer (
    .clk_i, .rst_ni,
    .src_valid_i(ctrl.src_valid), .src_addr_i(ctrl.src_addr), .src_tag_i(ctrl.src_tag),
    .src_gnt_o  (src_gnt),
    .snk_valid_i(ctrl.snk_valid), .snk_addr_i(ctrl.snk_addr), .snk_data_i(so_data),
    .snk_gnt_o  (snk_gnt),
    .rsp_o      (rsp),
    .ecc_corr_o (ecc_corr), .ecc_unc_o(ecc_unc),
    .tcdm_req_o, .tcdm_gnt_i, .tcdm_add_o, .tcdm_we_o, .tcdm_be_o, .tcdm_data_o,
    .tcdm_meta_ecc_o, .tcdm_r_data_i, .tcdm_r_valid_i
  );

  engine u_engine (
    .clk_i, .rst_ni,
    .ctrl_i    (ctrl.eng),
    .rsp_i     (rsp),
    .so_data_o (so_data),
    .mismatch_o(mismatch)
  );

  assign cfg_rdata_o    = ctrl.cfg_rdata;
  assign cfg_rvalid_o   = ctrl.cfg_rvalid;
  assign busy_o         = ctrl.busy;
  assign done_o         = ctrl.done;
  assign err_detected_o = ctrl.err_detected;
endmodule
