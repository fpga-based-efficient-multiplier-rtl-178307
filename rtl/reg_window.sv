// reg_window - the 3x3 register window r1..r9 of the Gaussian filter.
//
// Three rows of three pixel registers. On every shift each row moves left
// by one column and takes a new pixel from its row buffer at the right, so
// the window slides one column across the image per pixel. Rows are
// numbered top to bottom and registers row-major:
//     r1 r2 r3   <- row_in[0] (oldest image row)
//     r4 r5 r6   <- row_in[1]
//     r7 r8 r9   <- row_in[2] (newest image row)
// r1 is the leftmost (oldest) column. The output win[0..8] is r1..r9.
//
// Interface: clk, shift, row_in[3] -> win[9]. No reset: the filter marks
// which window positions are valid.
module reg_window
  import refmlm_pkg::*;
(
  input  logic   clk,
  input  logic   shift,
  input  pixel_t row_in [3],
  output pixel_t win    [9]
);

  pixel_t r [3][3];

  always_ff @(posedge clk) begin
    if (shift) begin
      for (int row = 0; row < 3; row++) begin
        r[row][0] <= r[row][1];
        r[row][1] <= r[row][2];
        r[row][2] <= row_in[row];
      end
    end
  end

  always_comb begin
    for (int row = 0; row < 3; row++)
      for (int col = 0; col < 3; col++)
        win[3*row+col] = r[row][col];
  end

endmodule
