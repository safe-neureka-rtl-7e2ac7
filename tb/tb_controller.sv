// tb_controller: compares the triplicated controller with a single
// reference controller_core fed the same inputs (configuration writes and
// reads, random grants, random mismatch reports) over two jobs. During the
// run each of the three copies in turn has its outputs overwritten with
// random values for a window of cycles; the voted outputs must still equal
// the reference every cycle and the TMR mismatch flag must be raised while
// a copy is corrupted and low otherwise.
module tb_controller;
  import neureka_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, we = 0, src_gnt = 0, snk_gnt = 0, mismatch = 0;
  logic [3:0] addr = '0, corr = '0, unc = '0;
  logic [31:0] wdata = '0;
  ctrl_out_t o, r;
  logic tmr_mm;
  int checks = 0, failures = 0, forced = 0;

  controller dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(req), .cfg_we_i(we),
                  .cfg_addr_i(addr), .cfg_wdata_i(wdata), .src_gnt_i(src_gnt),
                  .snk_gnt_i(snk_gnt), .mismatch_i(mismatch), .ecc_corr_i(corr),
                  .ecc_unc_i(unc), .out_o(o), .tmr_mismatch_o(tmr_mm));
  controller_core ref_core (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(req), .cfg_we_i(we),
                  .cfg_addr_i(addr), .cfg_wdata_i(wdata), .src_gnt_i(src_gnt),
                  .snk_gnt_i(snk_gnt), .mismatch_i(mismatch), .ecc_corr_i(corr),
                  .ecc_unc_i(unc), .out_o(r));

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

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = a; wdata = d;
    @(negedge clk); req = 0; we = 0;
  endtask

  always @(negedge clk) begin
    src_gnt  = ($urandom_range(99) < 80);
    snk_gnt  = ($urandom_range(99) < 80);
    mismatch = ($urandom_range(99) < 30);
    corr     = 4'($urandom_range(99) < 5);
  end

  // compare every cycle, just before the edge
  always @(negedge clk) if (rst_n) begin
    chk(o == r, "voted outputs differ from the reference");
    chk(tmr_mm == (forced != 0), $sformatf("TMR mismatch flag %b, copy corrupted %0d", tmr_mm, forced));
  end

  // corrupt one copy at a time
  ctrl_out_t garbage;
  initial begin
    @(posedge rst_n);
    repeat (200) @(negedge clk);
    for (int k = 0; k < 3; k++) begin
      repeat (40) begin
        @(posedge clk); #1;
        garbage = ctrl_out_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
        garbage.src_valid = ~r.src_valid;
        forced = k + 1;
        case (k)
          0: force dut.core_out[0] = garbage;
          1: force dut.core_out[1] = garbage;
          default: force dut.core_out[2] = garbage;
        endcase
      end
      @(posedge clk); #1;
      case (k)
        0: release dut.core_out[0];
        1: release dut.core_out[1];
        default: release dut.core_out[2];
      endcase
      forced = 0;
      repeat (300) @(negedge clk);
    end
  end

  initial begin
    logic [31:0] v;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(REG_IN_PTR, 32'h100); wr(REG_WT_PTR, 32'h4000); wr(REG_OUT_PTR, 32'h9000);
    wr(REG_KI, 32); wr(REG_KO, 32); wr(REG_HO, 4); wr(REG_WO, 8);
    for (int job = 0; job < 2; job++) begin
      wr(REG_HMR_MODE, 32'(job));
      wr(REG_TRIGGER, 1);
      do @(posedge clk); while (!o.done);
      @(negedge clk); req = 1; addr = REG_ERR_STAT;
      @(negedge clk); req = 0;
    end
    chk(o.cfg_rvalid && o.cfg_rdata == r.cfg_rdata, "error count read matches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
