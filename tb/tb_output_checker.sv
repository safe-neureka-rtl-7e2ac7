// tb_output_checker: feeds the main input a random sequence and the shadow
// input the same sequence one cycle later (the redundancy-mode time shift);
// the checker must report no mismatch. Then the shadow copy is corrupted
// for one cycle and the mismatch must appear exactly one cycle after the
// corrupted comparison, i.e. in cycle TIMESHIFT+1 of a check. With the
// check disabled the flag must stay low.
module tb_output_checker;
  localparam int W = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0;
  logic [W-1:0] main_v, shadow_v, prev;
  logic mm;
  int checks = 0, failures = 0;

  output_checker #(.W(W), .TIMESHIFT(1)) dut (.clk_i(clk), .rst_ni(rst_n), .chk_en_i(en),
                                             .main_i(main_v), .shadow_i(shadow_v), .mismatch_o(mm));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    main_v = '0; shadow_v = '0; prev = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      bit corrupt;
      @(negedge clk);
      checks++;
      if (mm !== (n > 0 && en && corrupt_prev(n))) begin
        failures++;
        $display("FAIL cycle %0d mismatch=%0d", n, mm);
      end
      en = (n % 50) > 5;
      corrupt = (n % 37 == 20);
      shadow_v = corrupt ? (prev ^ 64'h4) : prev;
      prev = {$urandom, $urandom};
      main_v = prev;
      flags[n] = corrupt && en;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit flags [300];
  function automatic bit corrupt_prev(int n);
    return flags[n-1];
  endfunction
endmodule
