// kom_mult - N x N error-free multiplier: Karatsuba-Ofman (KOM)
// decomposition down to 2x2 error-free Mitchell log multipliers.
//
// Each operand is split into a low and a high half and four half-size
// products are formed,
//     low = aL*bL,  mid1 = aH*bL,  mid2 = aL*bH,  high = aH*bH,
// each again by the same decomposition, until the operands are 2 bits wide
// and the product is made by efmlm2. Since every leaf is exact, so is the
// whole product. The design keeps all four half products; it does not use
// Karatsuba's three-product form with (aL-aH)(bH-bL).
//
// The tree is laid out level by level. At level l the sub-multipliers are
// S x S with S = 2^l, and the one at (i, j) multiplies a[i*S +: S] by
// b[j*S +: S]; its four children at level l-1 are (2i,2j) = low,
// (2i+1,2j) = mid1, (2i,2j+1) = mid2 and (2i+1,2j+1) = high, combined by a
// kom_stage of size S. For the default N = 16 this gives 64 2x2 leaves,
// 16 4x4 stages, 4 8x8 stages and one 16x16 stage.
//
// PIPELINED = 1 (default) registers every KOM level three times (see
// kom_stage), so the latency is 3*(log2(N)-1) clocks - 9 for 16x16, 6 for
// 8x8 - and a new operand pair is accepted on every clock.
// PIPELINED = 0 gives the non-pipelined, purely combinational multiplier.
// The pipeline has no enable and no reset: it always advances and the user
// tracks validity alongside (refmlm_pkg::kom_latency gives the latency).
//
// Interface: clk, a[N-1:0], b[N-1:0] -> p[2N-1:0] (unsigned).
// N must be a power of two, at least 4.
module kom_mult #(
  parameter int unsigned N         = 16,
  parameter bit          PIPELINED = 1'b1
) (
  input  logic           clk,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);

  localparam int unsigned LEVELS = $clog2(N);

  if (N < 4 || (N & (N - 1)) != 0) begin : g_bad_n
    $error("kom_mult: N must be a power of two >= 4");
  end

  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned S = 1 << l;     // sub-multiplier size
    localparam int unsigned K = N / S;      // slices per operand

    logic [2*S-1:0] pr [K][K];

    for (genvar i = 0; i < K; i++) begin : g_i
      for (genvar j = 0; j < K; j++) begin : g_j
        if (l == 1) begin : g_leaf
          efmlm2 u_efmlm (
            .a(a[i*S +: S]),
            .b(b[j*S +: S]),
            .p(pr[i][j]));
        end else begin : g_stage
          kom_stage #(.N(S), .PIPELINED(PIPELINED)) u_stage (
            .clk (clk),
            .low (g_lvl[l-1].pr[2*i  ][2*j  ]),
            .mid1(g_lvl[l-1].pr[2*i+1][2*j  ]),
            .mid2(g_lvl[l-1].pr[2*i  ][2*j+1]),
            .high(g_lvl[l-1].pr[2*i+1][2*j+1]),
            .p   (pr[i][j]));
        end
      end
    end
  end

  assign p = g_lvl[LEVELS].pr[0][0];

endmodule
