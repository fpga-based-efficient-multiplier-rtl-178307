// tb_conv_sum - self-check of the adder tree and divide-by-256. Products
// are formed from random 3x3 pixel windows times the Gaussian kernel (the
// filter's real operating range), plus all-255 and all-zero windows, and
// fully random 16-bit products that exercise saturation. Expected value:
// floor(sum / 256), saturated to 255.
module tb_conv_sum;
  import refmlm_pkg::*;

  logic [15:0] prod [9];
  logic [7:0]  pix;

  conv_sum #(.PROD_W(16), .OUT_W(8), .SHIFT(8)) dut (.prod, .pix);

  int checks = 0, failures = 0, saturated = 0;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    longint sum, q;
    sum = 0;
    for (int k = 0; k < 9; k++) sum += prod[k];
    q = sum >> 8;
    if (q > 255) begin
      q = 255;
      saturated++;
    end
    #1;
    checks++;
    if (pix !== 8'(q)) begin
      failures++;
      if (failures < 10) $display("FAIL sum=%0d pix=%0d expected %0d", sum, pix, q);
    end
  endtask

  initial begin
    for (int k = 0; k < 9; k++) prod[k] = 16'(255 * GAUSS_K[k]);
    check();
    for (int k = 0; k < 9; k++) prod[k] = '0;
    check();
    for (int t = 0; t < 3000; t++) begin
      for (int k = 0; k < 9; k++) prod[k] = 16'($urandom_range(255) * GAUSS_K[k]);
      check();
    end
    for (int t = 0; t < 1000; t++) begin
      for (int k = 0; k < 9; k++) prod[k] = 16'($urandom);
      check();
    end
    checks++;
    if (saturated == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
