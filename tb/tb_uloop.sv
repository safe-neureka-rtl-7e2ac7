// tb_uloop: runs two uloops as the controller does and compares every step
// with nested loops written in the testbench. Performance mode: uloop 0
// starts at column tile 0 and uloop 1 at column tile 1, both with stride 2;
// they must stay in step, uloop 1 must flag the column tile past the edge
// as invalid (odd number of column tiles), and last must rise exactly at the
// final iteration. Redundancy mode: stride 1 over every tile; load must
// restore a saved position (rollback) and next must continue from it.
module tb_uloop;
  import neureka_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [10:0] ko_n = 2, h_n = 2, w_n = 3, ki_n = 2;
  logic stride2 = 1, init = 0, next = 0, load0 = 0;
  tile_idx_t ld, idx0, idx1, nxt0, nxt1;
  logic lki0, last0, val0, lki1, last1, val1;
  int checks = 0, failures = 0;

  uloop u0 (.clk_i(clk), .rst_ni(rst_n), .ko_n_i(ko_n), .h_n_i(h_n), .w_n_i(w_n), .ki_n_i(ki_n),
            .stride2_i(stride2), .w0_i(11'd0), .init_i(init), .next_i(next), .load_i(load0),
            .load_val_i(ld), .idx_o(idx0), .nxt_o(nxt0), .last_ki_o(lki0), .last_o(last0), .valid_o(val0));
  uloop u1 (.clk_i(clk), .rst_ni(rst_n), .ko_n_i(ko_n), .h_n_i(h_n), .w_n_i(w_n), .ki_n_i(ki_n),
            .stride2_i(stride2), .w0_i(stride2 ? 11'd1 : 11'd0), .init_i(init), .next_i(next && stride2),
            .load_i(1'b0), .load_val_i(ld), .idx_o(idx1), .nxt_o(nxt1), .last_ki_o(lki1), .last_o(last1),
            .valid_o(val1));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  task automatic step();
    @(negedge clk); next = 1; @(negedge clk); next = 0;
  endtask

  initial begin
    int total, n;
    tile_idx_t saved;
    ld = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // performance mode
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    total = 2 * 2 * 2 * 2;  // ko, h, w pairs (ceil(3/2)), ki
    n = 0;
    for (int ko = 0; ko < 2; ko++)
      for (int h = 0; h < 2; h++)
        for (int w = 0; w < 3; w += 2)
          for (int ki = 0; ki < 2; ki++) begin
            n++;
            chk(idx0 == '{ko_t: 11'(ko), h_t: 11'(h), w_t: 11'(w), ki_t: 11'(ki)},
                $sformatf("perf u0 step %0d", n));
            chk(idx1.w_t == 11'(w + 1) && idx1.ki_t == 11'(ki) && idx1.h_t == 11'(h) && idx1.ko_t == 11'(ko),
                $sformatf("perf u1 step %0d", n));
            chk(val1 == (w + 1 < 3), "u1 valid flag");
            chk(lki0 == (ki == 1), "last input block");
            chk(last0 == (n == total), "last iteration");
            step();
          end
    chk(idx0 == '0, "wraps to the start");
    // redundancy mode
    stride2 = 0;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    n = 0;
    for (int ko = 0; ko < 2; ko++)
      for (int h = 0; h < 2; h++)
        for (int w = 0; w < 3; w++)
          for (int ki = 0; ki < 2; ki++) begin
            n++;
            #1;
            chk(idx0 == '{ko_t: 11'(ko), h_t: 11'(h), w_t: 11'(w), ki_t: 11'(ki)},
                $sformatf("red u0 step %0d", n));
            chk(last0 == (n == 24), "red last iteration");
            if (n == 9) saved = idx0;
            if (n == 12) begin
              // rollback to the saved position, then replay from there
              @(negedge clk); ld = saved; load0 = 1; @(negedge clk); load0 = 0;
              chk(idx0 == saved, "load restores the checkpoint");
              step(); step(); step();
            end
            step();
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
