// tb_engine: drives the engine with tagged responses as the streamer would.
// Performance mode: two different input tiles go to the two buffers (masks
// 01 and 10), one input-channel block of weights is broadcast, and the
// outputs of all 16 PEs, read through the streamout multiplexer, are
// compared with a reference convolution. Redundancy mode: the same tile goes
// to both buffers (mask 11); one cycle after the first weight beat the main
// datapath must have moved and the shadow not yet (time shift); after the
// block both must hold the reference, a check must pass, and after an
// upset planted in a main accumulator the flag must be up by the last
// cycle of the check (2+TIMESHIFT cycles).
module tb_engine;
  import neureka_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  eng_ctrl_t ctrl;
  rsp_t rsp;
  logic [OUT_W-1:0] so;
  logic mm;
  int checks = 0, failures = 0;

  logic [7:0] act [2][IN_H][IN_W][CH_BLK];
  logic signed [7:0] wgt [CH_BLK][CH_BLK][N_TAPS];

  engine dut (.clk_i(clk), .rst_ni(rst_n), .ctrl_i(ctrl), .rsp_i(rsp), .so_data_o(so), .mismatch_o(mm));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  task automatic load_tile(input int t, input logic [1:0] mask);
    for (int p = 0; p < N_PIX; p++) begin
      rsp.valid = 1; rsp.tag = '{is_wt: 1'b0, bmask: mask, idx: 8'(p)};
      rsp.data = '0;
      for (int ch = 0; ch < CH_BLK; ch++) rsp.data[ch*8 +: 8] = act[t][p/IN_W][p%IN_W][ch];
      @(negedge clk);
    end
    rsp.valid = 0;
  endtask

  task automatic weight_beat(input int i, input int b);
    rsp.valid = 1; rsp.tag = '{is_wt: 1'b1, bmask: 2'b11, idx: {5'(i), 3'(b)}};
    for (int j = 0; j < OC_PER_BEAT; j++)
      for (int t = 0; t < N_TAPS; t++) rsp.data[(j*N_TAPS + t)*8 +: 8] = wgt[b*4 + j][i][t];
  endtask

  task automatic compare(input int d, input int t);
    for (int p = 0; p < N_PE; p++) begin
      ctrl.so_dp = d[0]; ctrl.so_pe = 3'(p);
      #1;
      for (int o = 0; o < CH_BLK; o++) begin
        longint acc, v;
        logic [7:0] e;
        acc = 0;
        for (int i = 0; i < CH_BLK; i++)
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              acc += longint'(act[t][p/2 + ky][p%2 + kx][i]) * longint'(wgt[o][i][ky*3 + kx]);
        v = (acc * 3) >>> 10;
        e = (v < 0) ? 8'd0 : (v > 255) ? 8'd255 : 8'(v);
        chk(so[o*8 +: 8] == e, $sformatf("dp %0d pe %0d oc %0d got %0d exp %0d", d, p, o, so[o*8 +: 8], e));
      end
    end
  endtask

  task automatic run_check(output bit seen, output int at);
    seen = 0; at = -1;
    ctrl.chk_en = 1;
    for (int c = 0; c < 2 + TIMESHIFT; c++) begin
      @(negedge clk);
      if (mm && !seen) begin seen = 1; at = c; end
    end
    ctrl.chk_en = 0;
  endtask

  initial begin
    bit seen;
    int at;
    ctrl = '0; ctrl.quant = '{scale: 8'd3, shift: 5'd10};
    rsp = '0;
    for (int t = 0; t < 2; t++)
      for (int r = 0; r < IN_H; r++)
        for (int c = 0; c < IN_W; c++)
          for (int ch = 0; ch < CH_BLK; ch++) act[t][r][c][ch] = 8'($urandom);
    for (int o = 0; o < CH_BLK; o++)
      for (int i = 0; i < CH_BLK; i++)
        for (int k = 0; k < N_TAPS; k++) wgt[o][i][k] = 8'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;

    // performance mode
    @(negedge clk);
    ctrl.clear = 1; @(negedge clk); ctrl.clear = 0;
    load_tile(0, 2'b01);
    load_tile(1, 2'b10);
    for (int i = 0; i < CH_BLK; i++)
      for (int b = 0; b < BEATS_PER_IC; b++) begin
        weight_beat(i, b);
        @(negedge clk);
      end
    rsp.valid = 0;
    @(negedge clk);
    compare(0, 0);
    compare(1, 1);
    run_check(seen, at);
    chk(!seen, "checker idle in performance mode");

    // redundancy mode
    ctrl.redundancy = 1;
    ctrl.clear = 1; @(negedge clk); ctrl.clear = 0;
    @(negedge clk);
    load_tile(0, 2'b11);
    for (int i = 0; i < CH_BLK; i++)
      for (int b = 0; b < BEATS_PER_IC; b++) begin
        weight_beat(i, b);
        @(negedge clk);
        if (i == 0 && b == 0) begin
          logic [OUT_W-1:0] s0, s1;
          ctrl.so_pe = 0;
          ctrl.so_dp = 0; #1 s0 = so;
          ctrl.so_dp = 1; #1 s1 = so;
          chk(s0 != s1, "shadow lags main by the time shift");
        end
      end
    rsp.valid = 0;
    @(negedge clk);
    compare(0, 0);
    compare(1, 0);
    run_check(seen, at);
    chk(!seen, "no mismatch on equal results");
    for (int c = 0; c < CH_BLK; c++)
      dut.g_dp[0].u_sub.g_pe[6].u_pe.acc_q[c] = dut.g_dp[0].u_sub.g_pe[6].u_pe.acc_q[c] ^ 32'h0004_0000;
    run_check(seen, at);
    chk(seen && at == TIMESHIFT, $sformatf("mismatch seen in check cycle %0d", at));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
