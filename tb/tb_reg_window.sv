// tb_reg_window - self-check of the 3x3 register window. Random rows are
// shifted in with random hold cycles; after every clock the nine outputs
// must equal a model holding the last three pixels of each row, r1 oldest.
module tb_reg_window;
  import refmlm_pkg::*;

  logic   clk = 1'b0;
  logic   shift = 1'b0;
  pixel_t row_in [3];
  pixel_t win    [9];
  pixel_t model  [3][3];

  always #5 clk = ~clk;

  reg_window dut (.clk, .shift, .row_in, .win);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nshift;
    nshift = 0;
    for (int t = 0; t < 2000; t++) begin
      shift = ($urandom_range(4) != 0);
      for (int r = 0; r < 3; r++) row_in[r] = pixel_t'($urandom);
      @(posedge clk);
      if (shift) begin
        nshift++;
        for (int r = 0; r < 3; r++) begin
          model[r][0] = model[r][1];
          model[r][1] = model[r][2];
          model[r][2] = row_in[r];
        end
      end
      #1;
      if (nshift >= 3) begin
        for (int k = 0; k < 9; k++) begin
          checks++;
          if (win[k] !== model[k / 3][k % 3]) begin
            failures++;
            if (failures < 10)
              $display("FAIL t=%0d r%0d = %0d expected %0d", t, k + 1, win[k], model[k / 3][k % 3]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
