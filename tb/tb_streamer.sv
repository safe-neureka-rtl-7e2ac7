// tb_streamer: the streamer against the behavioural memory (which refuses
// about a third of the requests). Random 256-bit blocks are stored through
// the sink and loaded back through the source with random tags; each
// response must carry the right tag and data. Then single-bit upsets are
// planted in stored words (must be corrected and counted) and double-bit
// upsets (must be counted as uncorrectable). The metadata check bits of
// every request are verified by the memory model.
module tb_streamer;
  import neureka_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic src_valid = 0, snk_valid = 0, src_gnt, snk_gnt;
  logic [31:0] src_addr = '0, snk_addr = '0;
  tag_t src_tag = '0;
  logic [OUT_W-1:0] snk_data = '0;
  rsp_t rsp;
  logic [3:0] ecc_corr, ecc_unc;
  logic tcdm_req, tcdm_gnt, tcdm_we, tcdm_r_valid;
  logic [31:0] tcdm_add;
  logic [35:0] tcdm_be;
  logic [350:0] tcdm_data, tcdm_r_data;
  logic [7:0] tcdm_meta;
  int checks = 0, failures = 0;
  int corr_total = 0, unc_total = 0;

  streamer dut (
    .clk_i(clk), .rst_ni(rst_n),
    .src_valid_i(src_valid), .src_addr_i(src_addr), .src_tag_i(src_tag), .src_gnt_o(src_gnt),
    .snk_valid_i(snk_valid), .snk_addr_i(snk_addr), .snk_data_i(snk_data), .snk_gnt_o(snk_gnt),
    .rsp_o(rsp), .ecc_corr_o(ecc_corr), .ecc_unc_o(ecc_unc),
    .tcdm_req_o(tcdm_req), .tcdm_gnt_i(tcdm_gnt), .tcdm_add_o(tcdm_add), .tcdm_we_o(tcdm_we),
    .tcdm_be_o(tcdm_be), .tcdm_data_o(tcdm_data), .tcdm_meta_ecc_o(tcdm_meta),
    .tcdm_r_data_i(tcdm_r_data), .tcdm_r_valid_i(tcdm_r_valid)
  );

  tcdm_model #(.MEM_WORDS(4096), .GNT_PCT(65)) mem (
    .clk_i(clk), .req_i(tcdm_req), .gnt_o(tcdm_gnt), .add_i(tcdm_add), .we_i(tcdm_we),
    .be_i(tcdm_be), .data_i(tcdm_data), .meta_ecc_i(tcdm_meta),
    .r_data_o(tcdm_r_data), .r_valid_o(tcdm_r_valid)
  );

  always @(posedge clk) begin
    corr_total += int'(ecc_corr);
    unc_total  += int'(ecc_unc);
  end

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

  logic [OUT_W-1:0] blk [32];

  // Reads block k, expects its data and the tag.
  task automatic load(input int k, input tag_t t, output logic [DATA_W-1:0] d);
    @(negedge clk);
    src_valid = 1; src_addr = 32'(k * 64); src_tag = t;
    @(posedge clk);
    while (!src_gnt) @(posedge clk);
    @(negedge clk);
    src_valid = 0;
    chk(rsp.valid, "response one cycle after grant");
    chk(rsp.tag == t, "tag returned");
    d = rsp.data;
  endtask

  initial begin
    logic [DATA_W-1:0] d;
    mem.clear_all();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 32; k++) begin
      for (int i = 0; i < OUT_W / 32; i++) blk[k][i*32 +: 32] = $urandom;
      @(negedge clk);
      snk_valid = 1; snk_addr = 32'(k * 64); snk_data = blk[k];
      @(posedge clk);
      while (!snk_gnt) @(posedge clk);
      @(negedge clk);
      snk_valid = 0;
    end
    for (int k = 0; k < 32; k++) begin
      tag_t t;
      t = tag_t'($urandom);
      load(k, t, d);
      chk(d[OUT_W-1:0] == blk[k], $sformatf("block %0d data", k));
    end
    chk(corr_total == 0 && unc_total == 0, "no ECC events on clean data");
    // single upsets
    for (int k = 0; k < 8; k++) mem.flip_bit(k * 64 + 4 * (k % 8), k * 4);
    for (int k = 0; k < 8; k++) begin
      load(k, '0, d);
      chk(d[OUT_W-1:0] == blk[k], $sformatf("block %0d corrected", k));
    end
    @(negedge clk);
    chk(corr_total == 8, $sformatf("8 corrections counted, got %0d", corr_total));
    // double upsets
    mem.flip_bit(20 * 64, 1);
    mem.flip_bit(20 * 64, 2);
    load(20, '0, d);
    @(negedge clk);
    chk(unc_total == 1, "uncorrectable error counted");
    chk(mem.meta_errors == 0, "metadata ECC valid on every request");
    chk(mem.stalls > 0, "memory stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
