// efmlm2 - 2x2 error-free Mitchell logarithmic multiplier.
//
// The leaf cell of the recursive multiplier. It forms the product of two
// 2-bit operands the way Mitchell's logarithmic multiplier does and then
// corrects the one case in which that approximation is wrong.
//
//   1. Zero detection: if either operand is 00 the product is 0000.
//   2. Logarithm: the characteristic k is the position of the leading one
//      (0 or 1), d = 2^k its decoded value, and the mantissa is the operand
//      with its leading one removed (a - d).
//   3. Addition of the logarithms, done directly on the product scale:
//      d12 = 2^(k1+k2), x12 = ((a-d1) << k2) + ((b-d2) << k1).
//   4. Antilogarithm: P_MLM = d12 + x12.
//   5. Correction: of the 16 operand pairs only 11 x 11 is not exact;
//      Mitchell gives 1000 for it, so a product of 1000 is replaced by 1001.
//      1000 (8) is never a true 2x2 product, so the test is unambiguous.
//
// Steps 1-5 follow the flow diagram and the algorithm table of the design;
// the correction is applied by testing the antilog output for 1000, as the
// flow diagram draws it (the algorithm table tests both operands for 11,
// which selects the same case).
//
// Interface: a, b (2 bits each), p (4 bits). Purely combinational.
module efmlm2 (
  input  logic [1:0] a,
  input  logic [1:0] b,
  output logic [3:0] p
);

  logic       zero;
  logic       k1, k2;          // characteristics (leading-one positions)
  logic [1:0] d1, d2;          // decoded characteristics 2^k
  logic [3:0] x1, x2;          // mantissas scaled to the product weight
  logic [1:0] k12;             // characteristic sum
  logic [3:0] d12;             // decoded characteristic sum 2^(k1+k2)
  logic [3:0] x12;             // mantissa sum
  logic [3:0] p_mlm;           // Mitchell (antilog) product

  always_comb begin
    zero  = (a == 2'b00) || (b == 2'b00);
    k1    = a[1];
    k2    = b[1];
    d1    = 2'b01 << k1;
    d2    = 2'b01 << k2;
    x1    = 4'({2'b00, a - d1} << k2);
    x2    = 4'({2'b00, b - d2} << k1);
    k12   = {1'b0, k1} + {1'b0, k2};
    d12   = 4'b0001 << k12;
    x12   = x1 + x2;
    p_mlm = d12 + x12;

    if (zero)                  p = 4'b0000;
    else if (p_mlm == 4'b1000) p = 4'b1001;  // error-correction term
    else                       p = p_mlm;
  end

endmodule
