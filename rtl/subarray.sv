// subarray: one 4x2 half of the Safe-NEureka PE array, with its input buffer
// and dispatcher.
//
// Input buffer: 24 entries (6 rows x 4 columns of input pixels, the halo a
// 4x2 output tile needs for a 3x3 filter), each holding the 32 channels of
// one input-channel block (256 bits, the low part of a 288-bit beat).
// ld_valid_i writes entry ld_pix_i (row-major, pixel r*4+c).
// Dispatcher: on a weight beat for input channel wt_ic_i, PE (ph,pw) receives
// for tap (ky,kx) the byte of channel wt_ic_i of buffered pixel
// (ph+ky, pw+kx). The weight beat itself is broadcast to all eight PEs.
// PE p sits at row p/2, column p%2; q_o[p] is its 32 quantised outputs.
// Timing: a buffer write takes effect at the next clock edge; a weight beat
// uses the buffer contents of the same cycle.
// The buffer/dispatch/PE split follows the paper's figure; buffer size and
// pixel ordering are this design's own.
module subarray
  import neureka_pkg::*;
(
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   clear_i,
  input  logic                   ld_valid_i,
  input  logic [4:0]             ld_pix_i,
  input  logic [PIX_W-1:0]       ld_data_i,
  input  logic                   wt_valid_i,
  input  logic [4:0]             wt_ic_i,
  input  logic [2:0]             wt_beat_i,
  input  logic [DATA_W-1:0]      wt_data_i,
  input  quant_t                 quant_i,
  output logic [N_PE-1:0][OUT_W-1:0] q_o
);
  logic [PIX_W-1:0] buf_q [N_PIX];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int p = 0; p < N_PIX; p++) buf_q[p] <= '0;
    end else if (ld_valid_i && ld_pix_i < 5'(N_PIX)) begin
      buf_q[ld_pix_i] <= ld_data_i;
    end
  end

  // Dispatch
  logic [N_PE-1:0][N_TAPS-1:0][ACT_W-1:0] act;
  always_comb begin
    for (int p = 0; p < N_PE; p++) begin
      for (int ky = 0; ky < K_SIZE; ky++) begin
        for (int kx = 0; kx < K_SIZE; kx++) begin
          act[p][ky*K_SIZE+kx] =
            buf_q[(p/SUB_W + ky)*IN_W + (p%SUB_W + kx)][wt_ic_i*ACT_W +: ACT_W];
        end
      end
    end
  end

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    pe u_pe (
      .clk_i, .rst_ni, .clear_i,
      .wt_valid_i, .beat_i(wt_beat_i), .act_i(act[p]), .wt_i(wt_data_i),
      .quant_i, .q_o(q_o[p])
    );
  end
endmodule
