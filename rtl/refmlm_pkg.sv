// Shared constants of the error-free Mitchell / Karatsuba-Ofman multiplier
// and of the Gaussian smoothing filter built on it.
//
// PIX_W        width of a grey-level pixel (8-bit images).
// GAUSS_K      the 3x3 Gaussian kernel for sigma = 1.0 scaled by 256,
//              stored row by row (r1..r9 of the register window):
//                 21 31 21
//                 31 48 31
//                 21 31 21        (sum = 256)
// GAUSS_SHIFT  log2 of the kernel scale: the convolution sum is divided by
//              256 with a right shift of 8.
// kom_latency  clock cycles from operands to product of kom_mult. Each
//              pipelined Karatsuba level adds three register ranks (after
//              the sub-products, after the mid adder, after the low adder);
//              the 2x2 leaf multiplier is combinational.
package refmlm_pkg;

  localparam int unsigned PIX_W       = 8;
  localparam int unsigned GAUSS_TAPS  = 9;
  localparam int unsigned GAUSS_SHIFT = 8;

  typedef logic [PIX_W-1:0] pixel_t;

  localparam pixel_t GAUSS_K [GAUSS_TAPS] = '{
    8'd21, 8'd31, 8'd21,
    8'd31, 8'd48, 8'd31,
    8'd21, 8'd31, 8'd21
  };

  function automatic int unsigned kom_latency(int unsigned n, bit pipelined);
    int unsigned levels;
    levels = 0;
    while (n > 2) begin
      n = n / 2;
      levels++;
    end
    return pipelined ? 3 * levels : 0;
  endfunction

endpackage
