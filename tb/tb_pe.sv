// tb_pe: drives one PE with random activations (0..255), random signed
// weight beats and random beat indices, keeps 32 reference accumulators in
// the testbench, and after each burst compares the 32 quantised outputs for
// several scale/shift settings; checks that clear zeroes everything.
module tb_pe;
  import neureka_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, wt_valid = 0;
  logic [2:0] beat;
  logic [N_TAPS-1:0][ACT_W-1:0] act;
  logic [DATA_W-1:0] wt;
  quant_t quant;
  logic [OUT_W-1:0] q;
  int checks = 0, failures = 0;
  longint ref_acc [CH_BLK];

  pe dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .wt_valid_i(wt_valid), .beat_i(beat),
          .act_i(act), .wt_i(wt), .quant_i(quant), .q_o(q));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int s = 0; s < 4; s++) begin
      quant.scale = 8'($urandom_range(255));
      quant.shift = 5'($urandom_range(8, 20));
      #1;
      for (int c = 0; c < CH_BLK; c++) begin
        longint v = (ref_acc[c] * longint'(quant.scale)) >>> quant.shift;
        logic [7:0] e = (v < 0) ? 8'd0 : (v > 255) ? 8'd255 : 8'(v);
        checks++;
        if (q[c*8 +: 8] != e) begin
          failures++;
          if (failures < 10) $display("FAIL ch %0d got %0d exp %0d (acc %0d)", c, q[c*8 +: 8], e, ref_acc[c]);
        end
      end
    end
  endtask

  initial begin
    for (int c = 0; c < CH_BLK; c++) ref_acc[c] = 0;
    act = '0; wt = '0; beat = '0; quant = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int burst = 0; burst < 6; burst++) begin
      for (int n = 0; n < 100; n++) begin
        @(negedge clk);
        wt_valid = ($urandom_range(3) != 0);
        beat = 3'($urandom_range(7));
        for (int t = 0; t < N_TAPS; t++) act[t] = 8'($urandom);
        for (int i = 0; i < DATA_W / 32; i++) wt[i*32 +: 32] = $urandom;
        if (wt_valid)
          for (int j = 0; j < OC_PER_BEAT; j++)
            for (int t = 0; t < N_TAPS; t++)
              ref_acc[beat*OC_PER_BEAT + j] += longint'(act[t]) *
                                             longint'($signed(wt[(j*N_TAPS + t)*8 +: 8]));
      end
      @(negedge clk);
      wt_valid = 0;
      compare();
    end
    @(negedge clk);
    clear = 1; wt_valid = 1;
    @(negedge clk);
    clear = 0; wt_valid = 0;
    for (int c = 0; c < CH_BLK; c++) ref_acc[c] = 0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
