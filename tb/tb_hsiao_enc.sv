// tb_hsiao_enc: checks the (39,32) Hsiao encoder by the properties that make
// it a SEC-DED code, measured from its outputs only: the data passes
// through unchanged, the code is linear (zero encodes to zero, check bits
// of a XOR b are the XOR of the check bits), and the check-bit pattern of
// every single data bit (its column) has odd weight of at least three and
// differs from every other column.
module tb_hsiao_enc;
  logic [31:0] d;
  logic [38:0] c;
  int checks = 0, failures = 0;

  hsiao_enc #(.K(32)) dut (.data_i(d), .code_o(c));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    logic [6:0] col [32];
    logic [6:0] ca, cb;
    logic [31:0] a, b;
    d = '0; #1;
    chk(c == '0, "zero encodes to zero");
    for (int j = 0; j < 32; j++) begin
      d = 32'd1 << j; #1;
      col[j] = c[38:32];
      chk(c[31:0] == d, "data passes through");
      chk($countones(col[j]) >= 3 && $countones(col[j]) % 2 == 1,
          $sformatf("column %0d has odd weight >= 3", j));
    end
    for (int i = 0; i < 32; i++)
      for (int j = i + 1; j < 32; j++)
        chk(col[i] != col[j], $sformatf("columns %0d and %0d distinct", i, j));
    for (int n = 0; n < 200; n++) begin
      a = $urandom; b = $urandom;
      d = a; #1; ca = c[38:32];
      d = b; #1; cb = c[38:32];
      d = a ^ b; #1;
      chk(c[38:32] == (ca ^ cb), "linearity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
