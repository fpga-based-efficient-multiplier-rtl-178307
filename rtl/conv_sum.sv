// conv_sum - adder tree and shift divide of the 3x3 Gaussian filter.
//
// Adds the nine pixel x kernel products in the tree of the filter datapath:
//     level 1: p1+p2, p3+p4, p5+p6, p7+p8
//     level 2: (p1+p2)+(p3+p4), (p5+p6)+(p7+p8)
//     level 3: sum of the two level-2 sums
//     level 4: + p9
// and then divides by the kernel scale 2^SHIFT with a right shift. The
// adders are drawn as carry-save adders in the source design but each takes
// two operands; here each is a plain two-operand adder and the synthesis
// tool picks its structure. The sum is kept wide enough not to overflow
// (PROD_W+4 bits). For a kernel whose taps sum to 2^SHIFT the quotient
// always fits the pixel width; a larger result saturates to the maximum
// pixel value (a choice of this design, never reached with the Gaussian
// kernel). Division truncates.
//
// Interface: prod[9] (PROD_W bits each) -> pix (OUT_W bits). Combinational.
module conv_sum #(
  parameter int unsigned PROD_W = 16,
  parameter int unsigned OUT_W  = 8,
  parameter int unsigned SHIFT  = 8
) (
  input  logic [PROD_W-1:0] prod [9],
  output logic [OUT_W-1:0]  pix
);

  localparam int unsigned SUM_W = PROD_W + 4;

  logic [SUM_W-1:0] l1 [4];
  logic [SUM_W-1:0] l2 [2];
  logic [SUM_W-1:0] l3, l4, q;

  always_comb begin
    for (int i = 0; i < 4; i++)
      l1[i] = SUM_W'(prod[2*i]) + SUM_W'(prod[2*i+1]);
    l2[0] = l1[0] + l1[1];
    l2[1] = l1[2] + l1[3];
    l3    = l2[0] + l2[1];
    l4    = l3 + SUM_W'(prod[8]);
    q     = l4 >> SHIFT;
    pix   = (q > SUM_W'({OUT_W{1'b1}})) ? {OUT_W{1'b1}} : q[OUT_W-1:0];
  end

endmodule
