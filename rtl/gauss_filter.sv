// gauss_filter - 3x3 Gaussian smoothing filter for 8-bit grey images whose
// nine multiplications are done by the recursive error-free multiplier.
//
// Datapath, in the order a pixel travels:
//   1. Three row FIFOs (line_fifo) in cascade. The pixel stream enters the
//      first; each passes its oldest pixel on to the next, so together they
//      hold the three most recent complete image rows.
//   2. A 3x3 register window (reg_window) fed by the three FIFO outputs. It
//      shifts by one column on every input pixel; after the end of a row it
//      continues with the next row, i.e. the window moves down one row.
//   3. Nine 8x8 multipliers (kom_mult, N = 8: four 4x4 KOM blocks each made
//      of four 2x2 error-free Mitchell multipliers) multiply r1..r9 by the
//      kernel taps K1..K9, by default 21 31 21 / 31 48 31 / 21 31 21.
//   4. The adder tree and the divide-by-256 shift (conv_sum), then an
//      output register.
//
// Only windows that lie wholly inside the image give an output, so a W x H
// frame yields (W-2) x (H-2) pixels in raster order, each tagged with the
// image coordinates of the window centre. Border pixels are not produced.
//
// Streaming protocol: one pixel per clock at most, in raster order, with
// in_valid; in_sof marks the first pixel of a frame and restarts all
// counters. cfg_width / cfg_height give the frame size (3..MAX_WIDTH,
// 3..MAX_HEIGHT) and must be stable during a frame. in_valid may drop at
// any time: the window then holds and no output is made. Because the
// window is fed from the far ends of the three FIFOs, the last output row
// leaves only after cfg_width further pixels have been pushed after the
// frame; they may carry any value but must have in_sof low, since the
// next in_sof restarts the counters.
//
// An assertion checks the frame size at every in_sof.
//
// Timing: an output appears MULT_LAT + 1 clocks after the push that
// completes its window (MULT_LAT = 6 for the pipelined 8x8 multiplier, so
// 7 clocks; 1 clock with PIPELINED = 0). The pipeline always advances; at
// one pixel per clock it gives one output per clock inside a row.
//
// The three-FIFO structure, window, nine multipliers, adder tree and shift
// follow the source design. The run-time frame size, the valid/coordinate
// tagging, the border policy and the padding rule are this design's own.
module gauss_filter
  import refmlm_pkg::*;
#(
  parameter int unsigned MAX_WIDTH  = 640,
  parameter int unsigned MAX_HEIGHT = 480,
  parameter int unsigned MULT_N     = 8,
  parameter bit          PIPELINED  = 1'b1,
  parameter pixel_t      KERNEL [GAUSS_TAPS] = GAUSS_K,
  localparam int unsigned COL_W     = $clog2(MAX_WIDTH + 1),
  localparam int unsigned ROW_W     = $clog2(MAX_HEIGHT + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [COL_W-1:0] cfg_width,
  input  logic [ROW_W-1:0] cfg_height,
  input  logic             in_valid,
  input  logic             in_sof,
  input  pixel_t           in_pixel,
  output logic             out_valid,
  output pixel_t           out_pixel,
  output logic [COL_W-1:0] out_col,
  output logic [ROW_W-1:0] out_row
);

  localparam int unsigned MULT_LAT = kom_latency(MULT_N, PIPELINED);
  localparam int unsigned PROD_W   = 2 * MULT_N;
  localparam int unsigned CNT_W    = COL_W + 2;

  if (MULT_N < PIX_W) begin : g_bad_mult
    $error("gauss_filter: MULT_N must be at least the pixel width");
  end

  // ---------------------------------------------------------------- FIFOs
  logic   clear;
  pixel_t f_out [3];

  assign clear = in_valid && in_sof;

  line_fifo #(.DATA_W(PIX_W), .MAX_LEN(MAX_WIDTH)) u_fifo0 (
    .clk, .rst_n, .clear, .len(cfg_width), .push(in_valid),
    .din(in_pixel), .dout(f_out[0]));
  line_fifo #(.DATA_W(PIX_W), .MAX_LEN(MAX_WIDTH)) u_fifo1 (
    .clk, .rst_n, .clear, .len(cfg_width), .push(in_valid),
    .din(f_out[0]), .dout(f_out[1]));
  line_fifo #(.DATA_W(PIX_W), .MAX_LEN(MAX_WIDTH)) u_fifo2 (
    .clk, .rst_n, .clear, .len(cfg_width), .push(in_valid),
    .din(f_out[1]), .dout(f_out[2]));

  // ------------------------------------------------------- register window
  pixel_t row_in [3];
  pixel_t win    [9];

  assign row_in[0] = f_out[2];   // oldest row  -> r1 r2 r3
  assign row_in[1] = f_out[1];   //             -> r4 r5 r6
  assign row_in[2] = f_out[0];   // newest row  -> r7 r8 r9

  reg_window u_window (.clk, .shift(in_valid), .row_in, .win);

  // --------------------------------------------- window position tracking
  // After push number m of a frame (m = 0 at in_sof) the window's top-left
  // pixel is image pixel m - (3*W + 2); positions before that are filled
  // with data of no frame.
  logic [CNT_W-1:0] cnt;
  logic [CNT_W-1:0] prime;
  logic             primed;
  logic [COL_W-1:0] pos_col;
  logic [ROW_W-1:0] pos_row;
  logic             win_valid;
  logic [COL_W-1:0] nxt_col;
  logic [ROW_W-1:0] nxt_row;

  assign prime = 3 * CNT_W'(cfg_width) + CNT_W'(2);

  always_comb begin
    if (!primed) begin
      nxt_col = '0;
      nxt_row = '0;
    end else if (pos_col == cfg_width - COL_W'(1)) begin
      nxt_col = '0;
      nxt_row = (pos_row == cfg_height) ? pos_row : pos_row + ROW_W'(1);
    end else begin
      nxt_col = pos_col + COL_W'(1);
      nxt_row = pos_row;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      primed    <= 1'b0;
      pos_col   <= '0;
      pos_row   <= '0;
      win_valid <= 1'b0;
    end else if (in_valid && in_sof) begin
      cnt       <= CNT_W'(1);
      primed    <= 1'b0;
      pos_col   <= '0;
      pos_row   <= '0;
      win_valid <= 1'b0;
    end else if (in_valid) begin
      if (!primed) begin
        if (cnt == prime) begin
          primed    <= 1'b1;
          pos_col   <= '0;
          pos_row   <= '0;
          win_valid <= 1'b1;
        end else begin
          cnt       <= cnt + CNT_W'(1);
          win_valid <= 1'b0;
        end
      end else begin
        pos_col   <= nxt_col;
        pos_row   <= nxt_row;
        win_valid <= (nxt_col <= cfg_width - COL_W'(3)) &&
                     (nxt_row <= cfg_height - ROW_W'(3));
      end
    end else begin
      win_valid <= 1'b0;
    end
  end

  // frame sizes must fit the row buffers and leave at least one window
  a_frame_size: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && in_sof) |-> (cfg_width >= COL_W'(3) && cfg_width <= COL_W'(MAX_WIDTH) &&
                              cfg_height >= ROW_W'(3) && cfg_height <= ROW_W'(MAX_HEIGHT)))
    else $error("gauss_filter: frame size %0d x %0d out of range", cfg_width, cfg_height);

  // ----------------------------------------------------------- multipliers
  logic [PROD_W-1:0] prod [9];

  for (genvar i = 0; i < 9; i++) begin : g_mult
    kom_mult #(.N(MULT_N), .PIPELINED(PIPELINED)) u_mult (
      .clk,
      .a(MULT_N'(win[i])),
      .b(MULT_N'(KERNEL[i])),
      .p(prod[i]));
  end

  // valid and position travel beside the multiplier pipeline
  logic             v_d   [MULT_LAT+1];
  logic [COL_W-1:0] col_d [MULT_LAT+1];
  logic [ROW_W-1:0] row_d [MULT_LAT+1];

  assign v_d[0]   = win_valid;
  assign col_d[0] = pos_col;
  assign row_d[0] = pos_row;

  for (genvar s = 1; s <= MULT_LAT; s++) begin : g_delay
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v_d[s] <= 1'b0;
      else        v_d[s] <= v_d[s-1];
    end
    always_ff @(posedge clk) begin
      col_d[s] <= col_d[s-1];
      row_d[s] <= row_d[s-1];
    end
  end

  // ------------------------------------------------ adder tree and divide
  pixel_t sum_pix;

  conv_sum #(.PROD_W(PROD_W), .OUT_W(PIX_W), .SHIFT(GAUSS_SHIFT)) u_sum (
    .prod, .pix(sum_pix));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_d[MULT_LAT];
  end

  always_ff @(posedge clk) begin
    out_pixel <= sum_pix;
    out_col   <= col_d[MULT_LAT] + COL_W'(1);   // window centre
    out_row   <= row_d[MULT_LAT] + ROW_W'(1);
  end

endmodule
