// tb_hsiao_dec: encodes random words with hsiao_enc, then checks that the
// decoder returns the data with no flag when nothing is flipped, corrects
// every one of the 39 single-bit flips (single flag), and flags random
// double-bit flips as uncorrectable (double flag, no single flag).
module tb_hsiao_dec;
  logic [31:0] d, dout;
  logic [38:0] c, cf;
  logic sgl, dbl;
  int checks = 0, failures = 0;

  hsiao_enc #(.K(32)) u_enc (.data_i(d), .code_o(c));
  hsiao_dec #(.K(32)) dut (.code_i(cf), .data_o(dout), .single_err_o(sgl), .double_err_o(dbl));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    for (int n = 0; n < 100; n++) begin
      d = $urandom; #1;
      cf = c; #1;
      chk(dout == d && !sgl && !dbl, "clean word");
      for (int b = 0; b < 39; b++) begin
        cf = c ^ (39'd1 << b); #1;
        chk(dout == d && sgl && !dbl, $sformatf("single flip bit %0d corrected", b));
      end
      for (int k = 0; k < 10; k++) begin
        int unsigned b1, b2;
        b1 = $urandom_range(38);
        b2 = (b1 + 1 + $urandom_range(37)) % 39;
        cf = c ^ (39'd1 << b1) ^ (39'd1 << b2); #1;
        chk(dbl && !sgl, $sformatf("double flip %0d,%0d detected", b1, b2));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
