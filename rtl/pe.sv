// pe: one processing element of the Safe-NEureka engine.
//
// A PE owns one output pixel and CH_BLK (32) output channels. It has nine MAC
// blocks, one per tap of the 3x3 filter, and a scale/accumulate/quantise
// stage. Each weight beat (288 bits = 36 signed bytes) carries the nine taps
// of four output channels for one input channel; byte j*9+t is tap t of
// output channel beat*4+j. On a beat, block t multiplies the activation of
// tap t (act_i[t], 8-bit unsigned, supplied by the dispatcher) by its four
// weights, and the nine products of each of the four channels are summed
// into that channel's 32-bit accumulator. Thirty-two input channels times
// eight beats make up one input-channel block.
//
// q_o presents all 32 quantised outputs at once:
//   q = saturate_to_[0,255]((acc * scale) >>> shift)
// clear_i zeroes the accumulators synchronously (it wins over a beat).
// Timing: one beat per cycle, accumulators updated at the clock edge after
// wt_valid_i; q_o is combinational from the accumulators.
// Nine blocks and a scale/accumulate/quantise stage follow the paper's
// figure; the beat layout and the quantisation formula are this design's
// own, and only 8-bit weights are supported.
module pe
  import neureka_pkg::*;
(
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       clear_i,
  input  logic                       wt_valid_i,
  input  logic [2:0]                 beat_i,
  input  logic [N_TAPS-1:0][ACT_W-1:0] act_i,
  input  logic [DATA_W-1:0]          wt_i,
  input  quant_t                     quant_i,
  output logic [OUT_W-1:0]           q_o
);
  logic signed [ACC_W-1:0] acc_q [CH_BLK];
  logic signed [ACC_W-1:0] beat_sum [OC_PER_BEAT];

  // Nine MAC blocks: tap t contributes act[t] * w[j*9+t] to channel j.
  always_comb begin
    for (int j = 0; j < OC_PER_BEAT; j++) begin
      beat_sum[j] = '0;
      for (int t = 0; t < N_TAPS; t++) begin
        logic signed [WGT_W-1:0] w;
        logic signed [ACT_W:0]   a;
        w = wt_i[(j*N_TAPS + t)*8 +: 8];
        a = {1'b0, act_i[t]};
        beat_sum[j] += ACC_W'(a * w);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int c = 0; c < CH_BLK; c++) acc_q[c] <= '0;
    end else if (clear_i) begin
      for (int c = 0; c < CH_BLK; c++) acc_q[c] <= '0;
    end else if (wt_valid_i) begin
      for (int j = 0; j < OC_PER_BEAT; j++)
        acc_q[beat_i*OC_PER_BEAT + j] <= acc_q[beat_i*OC_PER_BEAT + j] + beat_sum[j];
    end
  end

  // Scale / quantise
  always_comb begin
    for (int c = 0; c < CH_BLK; c++) begin
      logic signed [ACC_W+8:0] prod;
      logic signed [ACC_W+8:0] shifted;
      prod    = acc_q[c] * $signed({1'b0, quant_i.scale});
      shifted = prod >>> quant_i.shift;
      if (shifted < 0)        q_o[c*8 +: 8] = 8'd0;
      else if (shifted > 255) q_o[c*8 +: 8] = 8'd255;
      else                    q_o[c*8 +: 8] = shifted[7:0];
    end
  end
endmodule
