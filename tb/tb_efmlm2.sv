// tb_efmlm2 - exhaustive self-check of the 2x2 error-free Mitchell
// multiplier. All 16 operand pairs are applied and the product is compared
// with a*b; the 11 x 11 case, the only one plain Mitchell gets wrong
// (1000 instead of 1001), is counted separately so that the test shows the
// correction term at work.
module tb_efmlm2;

  logic [1:0] a, b;
  logic [3:0] p;
  int checks = 0, failures = 0, corrected = 0;

  efmlm2 dut (.a, .b, .p);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      for (int j = 0; j < 4; j++) begin
        a = 2'(i);
        b = 2'(j);
        #1;
        checks++;
        if (p !== 4'(i * j)) begin
          failures++;
          $display("FAIL %0d x %0d = %0d, expected %0d", i, j, p, i * j);
        end
        if (i == 3 && j == 3 && p == 4'b1001) corrected++;
      end
    end
    checks++;
    if (corrected != 1) begin
      failures++;
      $display("FAIL 11 x 11 correction not seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
