// tb_gauss_fvc2004 - the filter on fingerprint-sized frames with
// salt-and-pepper noise, at the default parameters.
//
// Frame sizes are those of the four FVC2004 databases (640x480, 328x364,
// 300x480, 288x384). The image is a synthetic ridge pattern (a triangle
// wave of period 24 pixels, bent across the frame) standing in for a
// fingerprint; the real database images are not used. Salt-and-pepper
// noise of 10, 20, 30 and 40 % is added to the 640x480 frame, 10 % to the
// others. Every output pixel is compared with a reference convolution, and
// the PSNR of the noisy and of the smoothed image against the clean one is
// printed, over the (W-2) x (H-2) pixels the filter produces:
//     PSNR = 10 log10(255^2 / MSE).
// Smoothing must raise the PSNR for every frame.
module tb_gauss_fvc2004;
  import refmlm_pkg::*;

  localparam int unsigned COL_W = $clog2(640 + 1);
  localparam int unsigned ROW_W = $clog2(480 + 1);

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic [COL_W-1:0] cfg_width = '0;
  logic [ROW_W-1:0] cfg_height = '0;
  logic             in_valid = 1'b0;
  logic             in_sof = 1'b0;
  pixel_t           in_pixel = '0;
  logic             out_valid;
  pixel_t           out_pixel;
  logic [COL_W-1:0] out_col;
  logic [ROW_W-1:0] out_row;

  always #5 clk = ~clk;

  gauss_filter dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pixel_t clean [];
  pixel_t noisy [];
  int     fw, fh, n_got;
  real    se_out;

  // output monitor: compare with the reference, accumulate squared error
  always @(negedge clk) begin
    if (out_valid) begin
      int r, c, sum;
      r = int'(out_row);
      c = int'(out_col);
      sum = 0;
      for (int k = 0; k < 9; k++)
        sum += int'(GAUSS_K[k]) * int'(noisy[(r - 1 + k / 3) * fw + (c - 1 + k % 3)]);
      checks++;
      if (out_pixel !== pixel_t'(sum >> 8) || r < 1 || r > fh - 2 || c < 1 || c > fw - 2) begin
        failures++;
        if (failures < 10) $display("FAIL (%0d,%0d)=%0d expected %0d", r, c, out_pixel, sum >> 8);
      end
      se_out += (real'(out_pixel) - real'(clean[r * fw + c])) ** 2;
      n_got++;
    end
  end

  function automatic pixel_t ridge(int x, int y);
    int v, t;
    v = (x + y / 2 + (x * y) / 256) % 24;
    t = (v < 12) ? v : 24 - v;          // triangle wave, period 24 pixels
    return pixel_t'(40 + 13 * t);
  endfunction

  task automatic run(string db, int w, int h, int noise_pct);
    real se_in, psnr_in, psnr_out;
    int  n;
    fw = w;
    fh = h;
    clean = new[w * h];
    noisy = new[w * h];
    for (int i = 0; i < w * h; i++) begin
      clean[i] = ridge(i % w, i / w);
      if (int'($urandom_range(99)) < noise_pct)
        noisy[i] = ($urandom_range(1) != 0) ? 8'd255 : 8'd0;
      else
        noisy[i] = clean[i];
    end
    se_in = 0.0;
    for (int r = 1; r <= h - 2; r++)
      for (int c = 1; c <= w - 2; c++)
        se_in += (real'(noisy[r * w + c]) - real'(clean[r * w + c])) ** 2;
    n      = (w - 2) * (h - 2);
    se_out = 0.0;
    n_got  = 0;
    @(negedge clk);
    cfg_width  = COL_W'(w);
    cfg_height = ROW_W'(h);
    for (int m = 0; m < w * h + w; m++) begin
      in_valid = 1'b1;
      in_sof   = (m == 0);
      in_pixel = (m < w * h) ? noisy[m] : 8'd0;
      @(negedge clk);
    end
    in_valid = 1'b0;
    in_sof   = 1'b0;
    repeat (12) @(negedge clk);
    psnr_in  = 10.0 * $log10(255.0 * 255.0 / (se_in / n));
    psnr_out = 10.0 * $log10(255.0 * 255.0 / (se_out / n));
    $display("%s %0dx%0d noise %0d%%: PSNR noisy %0.2f dB, smoothed %0.2f dB, %0d pixels",
             db, w, h, noise_pct, psnr_in, psnr_out, n_got);
    checks += 2;
    if (n_got != n) begin
      failures++;
      $display("FAIL %0d outputs, expected %0d", n_got, n);
    end
    if (!(psnr_out > psnr_in)) begin
      failures++;
      $display("FAIL smoothing did not raise the PSNR");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run("DB1", 640, 480, 10);
    run("DB1", 640, 480, 20);
    run("DB1", 640, 480, 30);
    run("DB1", 640, 480, 40);
    run("DB2", 328, 364, 10);
    run("DB3", 300, 480, 10);
    run("DB4", 288, 384, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
