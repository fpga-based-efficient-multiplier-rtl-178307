// kom_stage - combining datapath of one Karatsuba-Ofman (KOM) level.
//
// Takes the four N-bit products of the
// half-size operands of an N x N multiplication,
//     low = aL*bL,  mid1 = aH*bL,  mid2 = aL*bH,  high = aH*bH,
// and forms a*b = low + (mid1 + mid2)*2^(N/2) + high*2^N with the adders of
// the proposed KOM datapath:
//   adder 1 : {cy, mid} = mid1 + mid2                (N-bit full adder)
//   shift   : mid is split at N/2; its low half moves up by N/2 bits
//             (the fixed "barrel shifter", wiring only)
//   adder 2 : {c1, p_lo} = low + (mid[N/2-1:0] << N/2)
//   adder 3 : p_hi = high + {zero-extended cy, mid[N-1:N/2]} + c1
//   align   : p = {p_hi, p_lo}
// Adder 3 cannot overflow because the product is below 2^(2N).
//
// With PIPELINED = 1 there are three register ranks, as in the pipelined
// KOM: on the four inputs, after adder 1 and the shift, and after adder 2.
// Adder 3 and the alignment drive p combinationally, so the inputs seen at
// one clock edge give their product on p after the third following edge
// (latency 3). With PIPELINED = 0 the stage is combinational and clk is
// unused. The registers have neither reset nor enable.
//
// Interface: clk, low, mid1, mid2, high (N bits each) -> p (2N bits).
module kom_stage #(
  parameter int unsigned N         = 4,
  parameter bit          PIPELINED = 1'b1
) (
  input  logic           clk,
  input  logic [N-1:0]   low,
  input  logic [N-1:0]   mid1,
  input  logic [N-1:0]   mid2,
  input  logic [N-1:0]   high,
  output logic [2*N-1:0] p
);

  localparam int unsigned H = N / 2;

  // stage boundary 1: sub-products
  logic [N-1:0] s1_low, s1_mid1, s1_mid2, s1_high;
  // stage boundary 2: after adder 1 and the shift
  logic [N-1:0] s2_low, s2_high, s2_mid_sh;
  logic [H-1:0] s2_mid_hi;
  logic         s2_cy;
  // stage boundary 3: after adder 2
  logic [N-1:0] s3_p_lo, s3_high;
  logic [H-1:0] s3_mid_hi;
  logic         s3_cy, s3_c1;

  // combinational results of each stage
  logic [N-1:0] mid, mid_sh, p_lo, p_hi;
  logic         cy, c1;

  always_comb begin
    {cy, mid}  = {1'b0, s1_mid1} + {1'b0, s1_mid2};            // adder 1
    mid_sh     = {mid[H-1:0], {H{1'b0}}};                      // shift
    {c1, p_lo} = {1'b0, s2_low} + {1'b0, s2_mid_sh};           // adder 2
    p_hi       = s3_high + {{(H-1){1'b0}}, s3_cy, s3_mid_hi}   // adder 3
               + {{(N-1){1'b0}}, s3_c1};
  end

  assign p = {p_hi, s3_p_lo};                                  // alignment

  if (PIPELINED) begin : g_pipe
    always_ff @(posedge clk) begin
      s1_low    <= low;
      s1_mid1   <= mid1;
      s1_mid2   <= mid2;
      s1_high   <= high;

      s2_low    <= s1_low;
      s2_high   <= s1_high;
      s2_mid_sh <= mid_sh;
      s2_mid_hi <= mid[N-1:H];
      s2_cy     <= cy;

      s3_p_lo   <= p_lo;
      s3_c1     <= c1;
      s3_high   <= s2_high;
      s3_mid_hi <= s2_mid_hi;
      s3_cy     <= s2_cy;
    end
  end else begin : g_comb
    always_comb begin
      s1_low    = low;
      s1_mid1   = mid1;
      s1_mid2   = mid2;
      s1_high   = high;

      s2_low    = s1_low;
      s2_high   = s1_high;
      s2_mid_sh = mid_sh;
      s2_mid_hi = mid[N-1:H];
      s2_cy     = cy;

      s3_p_lo   = p_lo;
      s3_c1     = c1;
      s3_high   = s2_high;
      s3_mid_hi = s2_mid_hi;
      s3_cy     = s2_cy;
    end
  end

endmodule
