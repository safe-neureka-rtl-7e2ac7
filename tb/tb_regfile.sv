// tb_regfile: writes and reads back every job register, checks that the
// trigger produces one start pulse only while idle, that the mode and job
// registers ignore writes while busy, that the three error counters count
// their inputs (ECC counters add several events per cycle) and that a write
// clears a counter.
module tb_regfile;
  import neureka_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, we = 0, busy = 0, err_inc = 0, start, rvalid;
  logic [3:0] addr = '0, corr = '0, unc = '0;
  logic [31:0] wdata = '0, rdata;
  job_cfg_t cfg;
  int checks = 0, failures = 0, starts = 0;

  regfile dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(req), .cfg_we_i(we), .cfg_addr_i(addr),
               .cfg_wdata_i(wdata), .cfg_rdata_o(rdata), .cfg_rvalid_o(rvalid), .busy_i(busy),
               .err_inc_i(err_inc), .ecc_corr_i(corr), .ecc_unc_i(unc), .cfg_o(cfg), .start_o(start));

  always @(posedge clk) if (start) starts++;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = a; wdata = d;
    @(negedge clk); req = 0; we = 0;
  endtask

  task automatic rd(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = a;
    @(negedge clk); req = 0;
    chk(rvalid, "read response valid");
    d = rdata;
  endtask

  initial begin
    logic [31:0] v, vals [16];
    repeat (2) @(posedge clk);
    rst_n = 1;
    vals[REG_HMR_MODE] = 1;
    vals[REG_IN_PTR] = 32'h1234;  vals[REG_WT_PTR] = 32'h5678; vals[REG_OUT_PTR] = 32'h9abc;
    vals[REG_KI] = 256; vals[REG_KO] = 64; vals[REG_HO] = 16; vals[REG_WO] = 12;
    vals[REG_QUANT] = 32'h0A07;
    foreach (vals[a]) if (a == REG_HMR_MODE || (a >= REG_IN_PTR && a <= REG_QUANT)) wr(4'(a), vals[a]);
    foreach (vals[a]) if (a == REG_HMR_MODE || (a >= REG_IN_PTR && a <= REG_QUANT)) begin
      rd(4'(a), v);
      chk(v == vals[a], $sformatf("register %0d read back %h", a, v));
    end
    chk(cfg.redundancy && cfg.ki == 256 && cfg.wo == 12 && cfg.quant.scale == 7 && cfg.quant.shift == 10,
        "job configuration output");
    wr(REG_TRIGGER, 1);
    chk(starts == 1, "trigger starts a job");
    busy = 1;
    wr(REG_TRIGGER, 1);
    chk(starts == 1, "trigger ignored while busy");
    wr(REG_HMR_MODE, 0);
    wr(REG_KI, 32);
    rd(REG_STATUS, v);
    chk(v[0] == 1'b1, "status shows busy");
    chk(cfg.redundancy == 1'b1 && cfg.ki == 256, "mode and job registers locked while busy");
    // counters
    @(negedge clk); err_inc = 1; corr = 4'd3; unc = 4'd1;
    @(negedge clk); err_inc = 1; corr = 4'd2; unc = 4'd0;
    @(negedge clk); err_inc = 0; corr = 0;
    rd(REG_ERR_STAT, v); chk(v == 2, "error_status counts detected errors");
    rd(REG_ECC_CORR, v); chk(v == 5, "corrected ECC count");
    rd(REG_ECC_UNC, v);  chk(v == 1, "uncorrectable ECC count");
    wr(REG_ERR_STAT, 0);
    rd(REG_ERR_STAT, v); chk(v == 0, "write clears error_status");
    busy = 0;
    wr(REG_HMR_MODE, 0);
    rd(REG_HMR_MODE, v); chk(v == 0, "mode writable when idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
