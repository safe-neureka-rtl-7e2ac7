// tb_tmr_voter: random three-copy inputs, with one copy corrupted at a time
// and fully random inputs; the output must equal a per-bit majority counted
// in the testbench, and the mismatch flag must be set exactly when the
// copies are not all equal.
module tb_tmr_voter;
  localparam int W = 16;
  logic [W-1:0] a, b, c, y;
  logic mm;
  int checks = 0, failures = 0;

  tmr_voter #(.W(W)) dut (.a_i(a), .b_i(b), .c_i(c), .y_o(y), .mismatch_o(mm));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      logic [W-1:0] exp;
      a = W'($urandom); b = a; c = a;
      case (n % 4)
        0: a = W'($urandom);
        1: b = W'($urandom);
        2: c = W'($urandom);
        default: begin b = W'($urandom); c = W'($urandom); end
      endcase
      #1;
      for (int i = 0; i < W; i++) exp[i] = (int'(a[i]) + int'(b[i]) + int'(c[i])) >= 2;
      checks++;
      if (y != exp) begin failures++; $display("FAIL vote %h %h %h -> %h", a, b, c, y); end
      checks++;
      if (mm != !(a == b && b == c)) begin failures++; $display("FAIL mismatch flag"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
