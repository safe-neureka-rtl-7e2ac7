// engine: the Safe-NEureka datapath with hybrid modular redundancy.
//
// Two 4x2 subarrays (datapath 0 and datapath 1) share one stream of memory
// responses. Each response carries a tag: an input pixel goes to the input
// buffers named by its two-bit mask, a weight beat is broadcast to both
// subarrays.
//
// Performance mode (ctrl_i.redundancy = 0): the two subarrays work on
// different output tiles; the controller loads their buffers one after the
// other (mask 01, then 10) and both compute on the same weight beats.
// Redundancy mode: every pixel is sent to both buffers (mask 11). Datapath 1
// becomes the shadow of datapath 0 and receives responses and the clear
// signal through a TIMESHIFT-cycle "config delay" buffer, so the two copies
// never compute the same value in the same cycle (common-mode faults such as
// a glitch on a shared wire hit them at different points of the work). The
// output checker compares the main outputs, delayed by the same amount,
// against the shadow outputs. Both delays are bypassed in performance mode.
//
// Streamout: so_data_o is the 256-bit output (32 quantised channels) of PE
// ctrl_i.so_pe of datapath ctrl_i.so_dp, combinational.
// The split, the delays and the checker follow the paper; the tag format and
// the exact position of the delay registers are this design's own.
module engine
  import neureka_pkg::*;
#(
  parameter int unsigned SHIFT = TIMESHIFT
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  eng_ctrl_t       ctrl_i,
  input  rsp_t            rsp_i,
  output logic [OUT_W-1:0] so_data_o,
  output logic            mismatch_o
);
  typedef struct packed {
    logic clear;
    rsp_t rsp;
  } dp_in_t;

  dp_in_t in0, in1, dly_q [SHIFT+1];

  assign in0.clear = ctrl_i.clear;
  assign in0.rsp   = rsp_i;

  // Config delay for the shadow datapath
  assign dly_q[0] = in0;
  for (genvar i = 0; i < SHIFT; i++) begin : g_cfg_dly
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) dly_q[i+1] <= '0;
      else         dly_q[i+1] <= dly_q[i];
    end
  end
  assign in1 = ctrl_i.redundancy ? dly_q[SHIFT] : in0;

  logic [N_DP-1:0][N_PE-1:0][OUT_W-1:0] q;
  dp_in_t dp_in [N_DP];
  assign dp_in[0] = in0;
  assign dp_in[1] = in1;

  for (genvar d = 0; d < N_DP; d++) begin : g_dp
    subarray u_sub (
      .clk_i, .rst_ni,
      .clear_i   (dp_in[d].clear),
      .ld_valid_i(dp_in[d].rsp.valid && !dp_in[d].rsp.tag.is_wt && dp_in[d].rsp.tag.bmask[d]),
      .ld_pix_i  (dp_in[d].rsp.tag.idx[4:0]),
      .ld_data_i (dp_in[d].rsp.data[PIX_W-1:0]),
      .wt_valid_i(dp_in[d].rsp.valid && dp_in[d].rsp.tag.is_wt),
      .wt_ic_i   (dp_in[d].rsp.tag.idx[7:3]),
      .wt_beat_i (dp_in[d].rsp.tag.idx[2:0]),
      .wt_data_i (dp_in[d].rsp.data),
      .quant_i   (ctrl_i.quant),
      .q_o       (q[d])
    );
  end

  output_checker #(.W(N_PE*OUT_W), .TIMESHIFT(SHIFT)) u_checker (
    .clk_i, .rst_ni,
    .chk_en_i  (ctrl_i.chk_en && ctrl_i.redundancy),
    .main_i    (q[0]),
    .shadow_i  (q[1]),
    .mismatch_o
  );

  assign so_data_o = q[ctrl_i.so_dp][ctrl_i.so_pe];
endmodule
