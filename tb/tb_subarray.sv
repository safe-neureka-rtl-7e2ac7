// tb_subarray: loads 24 random input pixels (32 channels each) into the
// input buffer, streams the 32 input channels x 8 weight beats of one
// input-channel block, and compares the 32 outputs of each of the eight PEs
// with a 3x3 convolution computed in the testbench (PE p at row p/2,
// column p%2 of the 4x2 tile).
module tb_subarray;
  import neureka_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, ld_valid = 0, wt_valid = 0;
  logic [4:0] ld_pix, wt_ic;
  logic [2:0] wt_beat;
  logic [PIX_W-1:0] ld_data;
  logic [DATA_W-1:0] wt_data;
  quant_t quant;
  logic [N_PE-1:0][OUT_W-1:0] q;
  int checks = 0, failures = 0;

  logic [7:0] act [IN_H][IN_W][CH_BLK];
  logic signed [7:0] wgt [CH_BLK][CH_BLK][N_TAPS];   // [oc][ic][tap]

  subarray dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .ld_valid_i(ld_valid),
                .ld_pix_i(ld_pix), .ld_data_i(ld_data), .wt_valid_i(wt_valid), .wt_ic_i(wt_ic),
                .wt_beat_i(wt_beat), .wt_data_i(wt_data), .quant_i(quant), .q_o(q));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    quant = '{scale: 8'd5, shift: 5'd9};
    ld_pix = '0; ld_data = '0; wt_ic = '0; wt_beat = '0; wt_data = '0;
    for (int r = 0; r < IN_H; r++)
      for (int c = 0; c < IN_W; c++)
        for (int ch = 0; ch < CH_BLK; ch++) act[r][c][ch] = 8'($urandom);
    for (int o = 0; o < CH_BLK; o++)
      for (int i = 0; i < CH_BLK; i++)
        for (int t = 0; t < N_TAPS; t++) wgt[o][i][t] = 8'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int p = 0; p < N_PIX; p++) begin
        ld_valid = 1; ld_pix = 5'(p);
        for (int ch = 0; ch < CH_BLK; ch++) ld_data[ch*8 +: 8] = act[p/IN_W][p%IN_W][ch];
        @(negedge clk);
      end
      ld_valid = 0;
      for (int i = 0; i < CH_BLK; i++)
        for (int b = 0; b < BEATS_PER_IC; b++) begin
          wt_valid = 1; wt_ic = 5'(i); wt_beat = 3'(b);
          for (int j = 0; j < OC_PER_BEAT; j++)
            for (int t = 0; t < N_TAPS; t++) wt_data[(j*N_TAPS + t)*8 +: 8] = wgt[b*4 + j][i][t];
          @(negedge clk);
        end
      wt_valid = 0;
      #1;
      for (int p = 0; p < N_PE; p++)
        for (int o = 0; o < CH_BLK; o++) begin
          longint acc, v;
          logic [7:0] e;
          acc = 0;
          for (int i = 0; i < CH_BLK; i++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                acc += longint'(act[p/2 + ky][p%2 + kx][i]) * longint'(wgt[o][i][ky*3 + kx]);
          v = (acc * 5) >>> 9;
          e = (v < 0) ? 8'd0 : (v > 255) ? 8'd255 : 8'(v);
          checks++;
          if (q[p][o*8 +: 8] != e) begin
            failures++;
            if (failures < 10) $display("FAIL pe %0d oc %0d got %0d exp %0d", p, o, q[p][o*8 +: 8], e);
          end
        end
      // second round: new activations in a different pattern
      for (int r = 0; r < IN_H; r++)
        for (int c = 0; c < IN_W; c++)
          for (int ch = 0; ch < CH_BLK; ch++) act[r][c][ch] = 8'($urandom_range(60));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
