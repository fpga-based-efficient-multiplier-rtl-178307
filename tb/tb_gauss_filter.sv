// tb_gauss_filter - end-to-end self-check of the Gaussian filter at its
// default parameters (row buffers for 640 x 480 images, 8x8 pipelined
// multipliers, the sigma = 1.0 kernel).
//
// Frames of several sizes are streamed in raster order, each followed by
// one row of padding pixels, and every output is compared with a reference
// convolution computed here: floor(sum(K * window) / 256) for every window
// wholly inside the frame, tagged with the window-centre coordinates. The
// output must come exactly 7 clocks after the push that completes its
// window (6-cycle multiplier pipeline plus the output register).
//
// The run ends with one full 640 x 480 frame. Mechanisms counted, each of
// which must happen at least once: input stalls (in_valid low inside a
// frame), frame restarts with in_sof, a change of frame size between
// frames, outputs on consecutive clocks (full rate), window rows past the
// first (the window moving down), and suppressed border windows (pushes
// after priming that give no output).
module tb_gauss_filter;
  import refmlm_pkg::*;

  localparam int unsigned COL_W = $clog2(640 + 1);
  localparam int unsigned ROW_W = $clog2(480 + 1);
  localparam int unsigned LAT   = kom_latency(8, 1'b1) + 1;

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
  int unsigned edge_no = 0;
  always @(posedge clk) edge_no <= edge_no + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    int     row;
    int     col;
    pixel_t pix;
    int     m;      // push index that completes the window
  } exp_t;

  exp_t        expq [$];
  int unsigned push_edge [];
  int          n_stall = 0, n_sof = 0, n_resize = 0, n_b2b = 0, n_down = 0;
  int          n_border = 0, n_out = 0;
  logic        prev_valid = 1'b0;

  // output monitor
  always @(negedge clk) begin
    if (out_valid) begin
      n_out++;
      if (prev_valid) n_b2b++;
      if (out_row > 1) n_down++;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected output (%0d,%0d)=%0d", out_row, out_col, out_pixel);
      end else begin
        exp_t e;
        e = expq.pop_front();
        if (out_pixel !== e.pix || out_row !== ROW_W'(e.row) || out_col !== COL_W'(e.col) ||
            edge_no != push_edge[e.m] + LAT) begin
          failures++;
          if (failures < 10)
            $display("FAIL out (%0d,%0d)=%0d at edge %0d, expected (%0d,%0d)=%0d at edge %0d",
                     out_row, out_col, out_pixel, edge_no, e.row, e.col, e.pix,
                     push_edge[e.m] + LAT);
        end
      end
    end
    prev_valid = out_valid;
  end

  // synthetic fingerprint: ridges of period ~8 pixels with salt-and-pepper
  // noise of the given percentage
  function automatic pixel_t ridge(int x, int y, int noise_pct);
    int v;
    if (int'($urandom_range(99)) < noise_pct) return ($urandom_range(1) != 0) ? 8'd255 : 8'd0;
    v = ((x + 2 * y + (x * y) / 64) % 8);
    return pixel_t'((v < 4) ? 40 + 10 * v : 200 - 10 * (v - 4));
  endfunction

  task automatic run_frame(int w, int h, int stall_pct, int noise_pct, bit random_img);
    pixel_t img [];
    int     npush;
    img = new[w * h];
    for (int i = 0; i < w * h; i++)
      img[i] = random_img ? pixel_t'($urandom) : ridge(i % w, i / w, noise_pct);
    npush = w * h + w;
    push_edge = new[npush];
    // reference outputs in raster order
    for (int r = 1; r <= h - 2; r++) begin
      for (int c = 1; c <= w - 2; c++) begin
        exp_t e;
        int   sum;
        sum = 0;
        for (int k = 0; k < 9; k++)
          sum += int'(GAUSS_K[k]) * int'(img[(r - 1 + k / 3) * w + (c - 1 + k % 3)]);
        e.row = r;
        e.col = c;
        e.pix = pixel_t'(sum >> 8);
        e.m   = (r - 1) * w + (c - 1) + 3 * w + 2;
        expq.push_back(e);
      end
    end
    if (w != int'(cfg_width)) n_resize++;
    @(negedge clk);
    cfg_width  = COL_W'(w);
    cfg_height = ROW_W'(h);
    for (int m = 0; m < npush; m++) begin
      while (m > 0 && int'($urandom_range(99)) < stall_pct) begin
        in_valid = 1'b0;
        in_sof   = 1'b0;
        n_stall++;
        @(negedge clk);
      end
      in_valid     = 1'b1;
      in_sof       = (m == 0);
      in_pixel     = (m < w * h) ? img[m] : pixel_t'($urandom);
      push_edge[m] = edge_no + 1;
      if (m == 0) n_sof++;
      // a primed push whose window straddles a row end or the last rows
      if (m >= 3 * w + 2) begin
        int q;
        q = m - (3 * w + 2);
        if ((q % w) > w - 3 || (q / w) > h - 3) n_border++;
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
    in_sof   = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL frame %0dx%0d: %0d outputs missing", w, h, expq.size());
      expq.delete();
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_frame(5, 4, 30, 0, 1'b1);
    run_frame(12, 7, 20, 0, 1'b1);
    run_frame(3, 3, 0, 0, 1'b1);
    run_frame(33, 9, 0, 10, 1'b0);
    run_frame(640, 480, 0, 20, 1'b0);
    $display("outputs=%0d stalls=%0d sof=%0d resizes=%0d back_to_back=%0d rows_below_first=%0d border_pushes=%0d",
             n_out, n_stall, n_sof, n_resize, n_b2b, n_down, n_border);
    checks += 6;
    if (n_stall  == 0) begin failures++; $display("FAIL no stall");           end
    if (n_sof    <  2) begin failures++; $display("FAIL no frame restart");   end
    if (n_resize <  2) begin failures++; $display("FAIL no frame resize");    end
    if (n_b2b    == 0) begin failures++; $display("FAIL no full-rate output"); end
    if (n_down   == 0) begin failures++; $display("FAIL window never moved down"); end
    if (n_border == 0) begin failures++; $display("FAIL no border window");   end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
