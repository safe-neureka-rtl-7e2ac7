// tb_controller_core: runs one controller copy against a reference model of
// the request stream. The memory grants at random. For each job the
// testbench builds the expected list of source requests (address and buffer
// mask) and sink addresses from the loop nest and compares them in order
// with what the controller issues. Job 1 is performance mode with an odd
// number of column tiles (datapath 1 idle on the last pair); job 2 is
// redundancy mode, where the testbench reports a mismatch at the output
// check of the second tile: the controller must count one error and
// re-issue that tile's requests from its first input block. The length of
// every output check (2+TIMESHIFT cycles) is checked as well.
module tb_controller_core;
  import neureka_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, we = 0, src_gnt = 0, snk_gnt = 0, mismatch = 0;
  logic [3:0] addr = '0;
  logic [31:0] wdata = '0;
  ctrl_out_t o;
  int checks = 0, failures = 0;

  controller_core dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(req), .cfg_we_i(we),
                       .cfg_addr_i(addr), .cfg_wdata_i(wdata), .src_gnt_i(src_gnt),
                       .snk_gnt_i(snk_gnt), .mismatch_i(mismatch), .ecc_corr_i(4'd0),
                       .ecc_unc_i(4'd0), .out_o(o));

  localparam int KI = 64, KO = 64, HO = 4, WO = 6;
  localparam int IN_PTR = 32'h100, WT_PTR = 32'h8000, OUT_PTR = 32'h10000;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok && failures < 20) $display("FAIL %s", s);
    if (!ok) failures++;
  endtask

  // expected request streams: {bmask, address}
  logic [33:0] exp_src [$];
  logic [31:0] exp_snk [$];

  function automatic void add_load(int ko, int h, int w, int ki, logic [1:0] m);
    for (int p = 0; p < N_PIX; p++)
      exp_src.push_back({m, 32'(IN_PTR + ((h*SUB_H + p/IN_W) * (WO+2) + w*SUB_W + p%IN_W) * KI + ki*CH_BLK)});
  endfunction
  function automatic void add_wts(int ko, int ki);
    for (int n = 0; n < CH_BLK*BEATS_PER_IC; n++)
      exp_src.push_back({2'b11, 32'(WT_PTR + ((ko*KI + ki*CH_BLK + n/8)*8 + n%8)*BE_W)});
  endfunction
  function automatic void add_store(int ko, int h, int w);
    for (int p = 0; p < N_PE; p++)
      exp_snk.push_back(32'(OUT_PTR + ((h*SUB_H + p/SUB_W)*WO + w*SUB_W + p%SUB_W)*KO + ko*CH_BLK));
  endfunction

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = a; wdata = d;
    @(negedge clk); req = 0; we = 0;
  endtask

  // random grants
  always @(negedge clk) begin
    src_gnt = ($urandom_range(99) < 70);
    snk_gnt = ($urandom_range(99) < 70);
  end

  // monitor
  int chk_run = 0, n_checks = 0, err_pulses = 0, inject_at = -1;
  always @(posedge clk) if (rst_n) begin
    if (o.src_valid && src_gnt) begin
      logic [33:0] e;
      if (exp_src.size() == 0) chk(0, "unexpected source request");
      else begin
        e = exp_src.pop_front();
        chk({o.src_tag.bmask, o.src_addr} == e,
            $sformatf("src got %b/%h expected %b/%h", o.src_tag.bmask, o.src_addr, e[33:32], e[31:0]));
      end
    end
    if (o.snk_valid && snk_gnt) begin
      if (exp_snk.size() == 0) chk(0, "unexpected sink request");
      else chk(o.snk_addr == exp_snk.pop_front(), $sformatf("snk got %h", o.snk_addr));
    end
    if (o.err_detected) err_pulses++;
    if (o.state == S_CHECK) chk_run++;
    else if (chk_run != 0) begin
      chk(chk_run == 2 + TIMESHIFT, $sformatf("check lasted %0d cycles", chk_run));
      chk_run = 0;
    end
  end
  // mismatch report on the chosen output check
  always @(negedge clk) begin
    mismatch = 1'b0;
    if (o.state == S_CHECK && n_checks == inject_at) mismatch = 1'b1;
  end
  always @(posedge clk) if (o.state == S_CHECK && chk_run == 0) n_checks++;

  task automatic run_job(input bit red);
    int cyc;
    wr(REG_HMR_MODE, 32'(red));
    wr(REG_TRIGGER, 1);
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!o.done && cyc < 50000);
    chk(o.done, "job finished");
    repeat (3) @(posedge clk);
    chk(exp_src.size() == 0, $sformatf("%0d source requests missing", exp_src.size()));
    chk(exp_snk.size() == 0, $sformatf("%0d sink requests missing", exp_snk.size()));
    exp_src.delete(); exp_snk.delete();
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(REG_IN_PTR, IN_PTR); wr(REG_WT_PTR, WT_PTR); wr(REG_OUT_PTR, OUT_PTR);
    wr(REG_KI, KI); wr(REG_KO, KO); wr(REG_HO, HO); wr(REG_WO, WO);

    // job 1: performance mode
    for (int ko = 0; ko < KO/32; ko++)
      for (int h = 0; h < HO/SUB_H; h++)
        for (int w = 0; w < WO/SUB_W; w += 2) begin
          bit two;
          two = (w + 1 < WO/SUB_W);
          for (int ki = 0; ki < KI/32; ki++) begin
            add_load(ko, h, w, ki, 2'b01);
            if (two) add_load(ko, h, w+1, ki, 2'b10);
            add_wts(ko, ki);
          end
          add_store(ko, h, w);
          if (two) add_store(ko, h, w+1);
        end
    run_job(0);
    chk(n_checks == 0 && err_pulses == 0, "no output check in performance mode");

    // job 2: redundancy mode, mismatch reported at the second tile's check
    inject_at = 2;
    for (int ko = 0; ko < KO/32; ko++)
      for (int h = 0; h < HO/SUB_H; h++)
        for (int w = 0; w < WO/SUB_W; w++) begin
          int t;
          t = (ko*(HO/SUB_H) + h)*(WO/SUB_W) + w;
          for (int rep = 0; rep < ((t == 1) ? 2 : 1); rep++)
            for (int ki = 0; ki < KI/32; ki++) begin
              add_load(ko, h, w, ki, 2'b11);
              add_wts(ko, ki);
            end
          add_store(ko, h, w);
        end
    run_job(1);
    chk(err_pulses == 1, $sformatf("%0d errors counted", err_pulses));
    chk(n_checks == (KO/32)*(HO/SUB_H)*(WO/SUB_W) + 1, $sformatf("%0d output checks", n_checks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
