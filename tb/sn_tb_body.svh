// sn_tb_body.svh: body shared by the end-to-end Safe-NEureka testbenches.
// The including module defines the layer (L_KI, L_KO, L_HO, L_WO), the
// memory grant probability GNT_PCT and the watchdog limit WATCHDOG_CYCLES.
//
// The testbench fills the memory model with random activations (0..255) and
// weights (-8..7) in the accelerator's layouts, computes the expected output
// with a plain nested-loop convolution, and runs four jobs:
//   1. performance mode;
//   2. redundancy mode, fault free; an HMR_MODE write while busy is refused;
//   3. redundancy mode with an upset written into the accumulators of one
//      PE of datapath 0 during MM: the checker must detect it, the tile must
//      be recomputed and the result must still be exact; one bit of a stored
//      input word is flipped (corrected by ECC) and two bits of the guard
//      word after the input are flipped (an uncorrectable error that the
//      computation never uses);
//   4. performance mode with an upset in one controller copy: the voter
//      must mask it.
// Each output byte is compared with the reference. Mechanisms (memory
// stall, performance/redundancy jobs, back-to-back loads of the two buffers,
// output checks, detected errors and rollbacks, ECC corrections, refused
// mode write, TMR masking) are counted and one that never occurs is a
// failure.

  import neureka_pkg::*;

  localparam int unsigned L_HI = L_HO + 2;
  localparam int unsigned L_WI = L_WO + 2;
  localparam int unsigned IN_PTR  = 0;
  localparam int unsigned IN_SIZE = L_HI * L_WI * L_KI;
  localparam int unsigned GUARD   = IN_SIZE;                       // word after the input
  localparam int unsigned WT_PTR  = ((IN_SIZE + 4 + 63) / 64) * 64;
  localparam int unsigned WT_SIZE = (L_KO / 32) * L_KI * 8 * 36;
  localparam int unsigned OUT_PTR = ((WT_PTR + WT_SIZE + 63) / 64) * 64;
  localparam int unsigned OUT_SIZE = L_HO * L_WO * L_KO;
  localparam logic [7:0] SCALE = 8'd3;
  localparam logic [4:0] SHIFT = 5'd8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cfg_req = 1'b0, cfg_we = 1'b0;
  logic [3:0]  cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic        cfg_rvalid;
  logic        tcdm_req, tcdm_gnt, tcdm_we, tcdm_r_valid;
  logic [31:0] tcdm_add;
  logic [35:0] tcdm_be;
  logic [350:0] tcdm_data, tcdm_r_data;
  logic [7:0]  tcdm_meta_ecc;
  logic        busy, done, err_detected, tmr_mismatch;

  safe_neureka dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .cfg_rdata_o(cfg_rdata), .cfg_rvalid_o(cfg_rvalid),
    .tcdm_req_o(tcdm_req), .tcdm_gnt_i(tcdm_gnt), .tcdm_add_o(tcdm_add), .tcdm_we_o(tcdm_we),
    .tcdm_be_o(tcdm_be), .tcdm_data_o(tcdm_data), .tcdm_meta_ecc_o(tcdm_meta_ecc),
    .tcdm_r_data_i(tcdm_r_data), .tcdm_r_valid_i(tcdm_r_valid),
    .busy_o(busy), .done_o(done), .err_detected_o(err_detected), .tmr_mismatch_o(tmr_mismatch)
  );

  tcdm_model #(.MEM_WORDS(32768), .GNT_PCT(GNT_PCT)) mem (
    .clk_i(clk), .req_i(tcdm_req), .gnt_o(tcdm_gnt), .add_i(tcdm_add), .we_i(tcdm_we),
    .be_i(tcdm_be), .data_i(tcdm_data), .meta_ecc_i(tcdm_meta_ecc),
    .r_data_o(tcdm_r_data), .r_valid_o(tcdm_r_valid)
  );

  int checks = 0, failures = 0;
  longint unsigned cycle = 0;

  // Mechanism counters
  int n_stall = 0, n_perf_job = 0, n_red_job = 0, n_b2b_load = 0, n_check = 0;
  int n_check_cycles = 0, n_err = 0, n_rollback_ok = 0, n_ecc_corr = 0, n_ecc_unc = 0;
  int n_mode_refused = 0, n_tmr_mask = 0;

  always @(posedge clk) begin
    cycle++;
    if (tcdm_req && !tcdm_gnt) n_stall++;
    if (dut.ctrl.src_valid && dut.ctrl.src_tag.bmask == 2'b10 && !dut.ctrl.src_tag.is_wt && tcdm_gnt)
      n_b2b_load++;
    if (dut.ctrl.state == S_CHECK) n_check_cycles++;
    if (dut.ctrl.state == S_CHECK && dut.ctrl.eng.chk_en && dut.u_controller.g_core[0].u_core.chk_q == 0)
      n_check++;
    if (err_detected) n_err++;
    if (tmr_mismatch) n_tmr_mask++;
  end

  initial begin
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Reference data
  logic [7:0]        act_ref [L_HI][L_WI][L_KI];
  logic signed [7:0] wgt_ref [L_KO][L_KI][9];
  logic [7:0]        out_ref [L_HO][L_WO][L_KO];

  function automatic void put_byte(int unsigned a, logic [7:0] b);
    logic [31:0] w = mem.get_word(a & ~32'd3);
    w[(a % 4)*8 +: 8] = b;
    mem.put_word(a & ~32'd3, w);
  endfunction

  task automatic build_data();
    mem.clear_all();
    for (int h = 0; h < L_HI; h++)
      for (int w = 0; w < L_WI; w++)
        for (int c = 0; c < L_KI; c++) begin
          act_ref[h][w][c] = 8'($urandom_range(255));
          put_byte(IN_PTR + (h*L_WI + w)*L_KI + c, act_ref[h][w][c]);
        end
    for (int o = 0; o < L_KO; o++)
      for (int i = 0; i < L_KI; i++)
        for (int t = 0; t < 9; t++) begin
          wgt_ref[o][i][t] = 8'(int'($urandom_range(15)) - 8);
          put_byte(WT_PTR + (((o/32)*L_KI + i)*8 + (o%32)/4)*36 + (o%4)*9 + t, wgt_ref[o][i][t]);
        end
    for (int h = 0; h < L_HO; h++)
      for (int w = 0; w < L_WO; w++)
        for (int o = 0; o < L_KO; o++) begin
          longint acc = 0;
          longint s;
          for (int i = 0; i < L_KI; i++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                acc += longint'(act_ref[h+ky][w+kx][i]) * longint'(wgt_ref[o][i][ky*3+kx]);
          s = (acc * longint'(SCALE)) >>> SHIFT;
          out_ref[h][w][o] = (s < 0) ? 8'd0 : (s > 255) ? 8'd255 : 8'(s);
        end
  endtask

  task automatic clear_output();
    for (int a = 0; a < OUT_SIZE; a += 4) mem.put_word(OUT_PTR + a, 32'hdeadbeef);
  endtask

  task automatic check_output(input string tag);
    int bad = 0;
    for (int h = 0; h < L_HO; h++)
      for (int w = 0; w < L_WO; w++)
        for (int o = 0; o < L_KO; o += 4) begin
          int unsigned a = OUT_PTR + (h*L_WO + w)*L_KO + o;
          logic [31:0] got = mem.get_word(a);
          logic [31:0] exp = {out_ref[h][w][o+3], out_ref[h][w][o+2], out_ref[h][w][o+1], out_ref[h][w][o]};
          checks++;
          if (got !== exp || !mem.word_ok(a)) begin
            failures++;
            if (bad++ < 5) $display("FAIL %s: out h=%0d w=%0d o=%0d got %h exp %h", tag, h, w, o, got, exp);
          end
        end
  endtask

  task automatic cfg_write(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_req = 1'b1; cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_req = 1'b0; cfg_we = 1'b0;
  endtask

  task automatic cfg_read(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk);
    cfg_req = 1'b1; cfg_we = 1'b0; cfg_addr = a;
    @(negedge clk);
    cfg_req = 1'b0;
    d = cfg_rdata;
    if (!cfg_rvalid) begin
      failures++;
      $display("FAIL: no read response");
    end
  endtask

  task automatic program_job(input bit red);
    cfg_write(REG_HMR_MODE, {31'd0, red});
    cfg_write(REG_IN_PTR, IN_PTR);
    cfg_write(REG_WT_PTR, WT_PTR);
    cfg_write(REG_OUT_PTR, OUT_PTR);
    cfg_write(REG_KI, L_KI);
    cfg_write(REG_KO, L_KO);
    cfg_write(REG_HO, L_HO);
    cfg_write(REG_WO, L_WO);
    cfg_write(REG_QUANT, {19'd0, SHIFT, SCALE});
    cfg_write(REG_ERR_STAT, 0);
    cfg_write(REG_ECC_CORR, 0);
    cfg_write(REG_ECC_UNC, 0);
  endtask

  task automatic run_job(output longint unsigned cycles);
    longint unsigned t0;
    cfg_write(REG_TRIGGER, 1);
    t0 = cycle;
    while (!done) @(posedge clk);
    cycles = cycle - t0;
    @(posedge clk);
  endtask

  // Upset in the accumulators of PE 3 of datapath 0 (main) during the first
  // MM phase: bit 20 of every output channel flips (several channels so that
  // the clipping of the quantiser cannot hide all of them).
  task automatic inject_datapath_fault();
    while (!(dut.ctrl.state == S_MM)) @(posedge clk);
    repeat (40) @(posedge clk);
    @(negedge clk);
    for (int c = 0; c < CH_BLK; c++)
      dut.u_engine.g_dp[0].u_sub.g_pe[3].u_pe.acc_q[c] =
        dut.u_engine.g_dp[0].u_sub.g_pe[3].u_pe.acc_q[c] ^ 32'h0010_0000;
  endtask

  // Transient on the outputs of one controller copy for 30 cycles of MM:
  // its request address and tag are corrupted, the voter must outvote it.
  task automatic inject_controller_fault();
    ctrl_out_t v;
    while (!(dut.ctrl.state == S_MM)) @(posedge clk);
    repeat (10) @(posedge clk);
    for (int i = 0; i < 30; i++) begin
      @(negedge clk);
      v = dut.u_controller.core_out[1];
      v.src_addr = v.src_addr ^ 32'h40;
      v.src_tag.idx = ~v.src_tag.idx;
      force dut.u_controller.core_out[1] = v;
    end
    @(negedge clk);
    release dut.u_controller.core_out[1];
  endtask

  initial begin : main
    longint unsigned cyc_perf, cyc_red, cyc_rec, cyc_tmr;
    logic [31:0] r;
    int n_tiles;
    n_tiles = (L_KO/32) * (L_HO/4) * (L_WO/2);
    build_data();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. performance mode
    clear_output();
    program_job(1'b0);
    run_job(cyc_perf);
    n_perf_job++;
    check_output("perf");
    $display("performance mode: %0d cycles", cyc_perf);

    // 2. redundancy mode, fault free, mode write refused while busy
    clear_output();
    program_job(1'b1);
    fork
      run_job(cyc_red);
      begin
        repeat (20) @(posedge clk);
        cfg_write(REG_HMR_MODE, 0);
        cfg_read(REG_HMR_MODE, r);
        if (r[0] == 1'b1) n_mode_refused++;
        check(r[0] == 1'b1, "mode write while busy must be ignored");
      end
    join
    n_red_job++;
    check_output("red");
    cfg_read(REG_ERR_STAT, r);
    check(r == 0, "no error in fault-free redundancy run");
    check(n_check_cycles == (2 + TIMESHIFT) * n_tiles,
          $sformatf("check cycles %0d != (2+T)*tiles %0d", n_check_cycles, (2 + TIMESHIFT) * n_tiles));
    $display("redundancy mode: %0d cycles, %0d check cycles", cyc_red, n_check_cycles);

    // 3. redundancy mode with a datapath transient and memory upsets
    clear_output();
    mem.flip_bit(IN_PTR + 4*5, 9);       // single upset: corrected
    mem.flip_bit(GUARD, 3);              // double upset in the guard word
    mem.flip_bit(GUARD, 17);
    program_job(1'b1);
    fork
      run_job(cyc_rec);
      inject_datapath_fault();
    join
    n_red_job++;
    check_output("recovery");
    cfg_read(REG_ERR_STAT, r);
    check(r == 1, $sformatf("error_status %0d, expected 1", r));
    if (r == 1) n_rollback_ok++;
    cfg_read(REG_ECC_CORR, r);
    check(r > 0, "ECC corrected count");
    n_ecc_corr = int'(r);
    cfg_read(REG_ECC_UNC, r);
    check(r > 0, "ECC uncorrectable count");
    n_ecc_unc = int'(r);
    $display("redundancy mode with one fault: %0d cycles (+%0d)", cyc_rec, cyc_rec - cyc_red);
    if (GNT_PCT == 100)
      check(cyc_rec - cyc_red == 1 + (L_KI/32) * (N_PIX + CH_BLK*BEATS_PER_IC + 2) + (2 + TIMESHIFT),
            "recovery latency = ERROR + one tile's input blocks + one check");
    mem.flip_bit(IN_PTR + 4*5, 9);
    mem.flip_bit(GUARD, 3);
    mem.flip_bit(GUARD, 17);

    // 4. performance mode with a controller upset masked by TMR
    clear_output();
    program_job(1'b0);
    fork
      run_job(cyc_tmr);
      inject_controller_fault();
    join
    n_perf_job++;
    check_output("tmr");

    check(mem.meta_errors == 0, "metadata ECC of every request");
    if (GNT_PCT == 100) check(cyc_tmr == cyc_perf, "TMR masking costs no cycles");

    $display("mechanisms: stalls=%0d perf_jobs=%0d red_jobs=%0d b2b_loads=%0d checks=%0d errors=%0d rollbacks_ok=%0d ecc_corr=%0d ecc_unc=%0d mode_refused=%0d tmr_masked_cycles=%0d",
             n_stall, n_perf_job, n_red_job, n_b2b_load, n_check, n_err, n_rollback_ok,
             n_ecc_corr, n_ecc_unc, n_mode_refused, n_tmr_mask);
    if (GNT_PCT < 100) check(n_stall > 0, "memory stall happened");
    check(n_perf_job > 0 && n_red_job > 0, "both modes ran");
    check(n_b2b_load > 0, "back-to-back buffer loads in performance mode");
    check(n_check > 0, "output check happened");
    check(n_err > 0, "error detected");
    check(n_rollback_ok > 0, "rollback recovered");
    check(n_ecc_corr > 0 && n_ecc_unc > 0, "ECC correction and detection");
    check(n_mode_refused > 0, "mode switch refused while busy");
    check(n_tmr_mask > 0, "TMR disagreement masked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
