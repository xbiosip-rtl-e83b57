// rec_mult: recursive N x N unsigned multiplier with approximate LSBs.
//
// An N x N product is split into four N/2 x N/2 products of the operand halves,
// LL = AL*BL, HL = AH*BL, LH = AL*BH, HH = AH*BH, which are combined with three
// 2N-bit ripple-carry adders:
//     s1 = (HH << N) + LL,  s2 = (HL << N/2) + (LH << N/2),  p = s2 + s1.
// The split recurses until 2 x 2, where an elementary 2x2 cell is used.  A 16x16
// multiplier is therefore four 8x8, sixteen 4x4 and sixty-four 2x2 cells, as in
// the paper's recursive multiplier.  The recursion is written out level by level:
// level 1 holds the (N/2)^2 2x2 cells, and level l holds the (N/2^l)^2 blocks of
// 2^l x 2^l bits, each combining four blocks of level l-1 with its three adders.
// Block (i, j) of a level multiplies the i-th slice of a by the j-th slice of b.
//
// Approximation is controlled by K, the number of product LSBs approximated, and
// OFFSET, the weight of this block's bit 0 inside the top-level product.  A 2x2
// cell whose lowest output bit has weight below K uses MULT_TYPE, otherwise the
// accurate cell; each adder uses ADD_TYPE cells in the bit positions whose weight
// is below K.  Which operand of each adder is "a" and which is "b" is this design's
// choice (the higher-weight term is "a"); it matters for ApproxAdd5, whose sum
// copies "b".  K = 0 gives an exact multiplier.  Purely combinational.
module rec_mult
  import xbiosip_pkg::*;
#(
  parameter int unsigned N         = 16,
  parameter int unsigned K         = 0,
  parameter int unsigned OFFSET    = 0,
  parameter mult_type_e  MULT_TYPE = MULT_APPROX_V1,
  parameter add_type_e   ADD_TYPE  = ADD_APPROX5
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);

  localparam int unsigned LV = $clog2(N);   // N = 2^LV, LV >= 1

  for (genvar l = 1; l <= LV; l++) begin : g_lvl
    localparam int unsigned S  = 1 << l;    // block operand width at this level
    localparam int unsigned NB = N / S;     // blocks per operand
    logic [2*S-1:0] pr [NB][NB];            // pr[i][j] = a slice i * b slice j

    for (genvar i = 0; i < NB; i++) begin : g_i
      for (genvar j = 0; j < NB; j++) begin : g_j
        // Weight of this block's bit 0 in the final product.
        localparam int unsigned OFF = OFFSET + S * (i + j);
        if (l == 1) begin : g_leaf
          if (OFF < K) begin : g_xm
            mult2x2_cell #(.TYPE(MULT_TYPE)) u_cell (
              .a(a[2*i +: 2]), .b(b[2*j +: 2]), .p(pr[i][j]));
          end else begin : g_am
            mult2x2_cell #(.TYPE(MULT_ACC)) u_cell (
              .a(a[2*i +: 2]), .b(b[2*j +: 2]), .p(pr[i][j]));
          end
        end else begin : g_node
          localparam int unsigned H  = S / 2;
          // Approximate bits of this block's 2S-bit adders, from its own bit 0.
          localparam int unsigned KL = (K <= OFF) ? 0 : ((K - OFF) >= 2 * S) ? 2 * S : (K - OFF);
          logic [S-1:0]   pll, phl, plh, phh;
          logic [2*S-1:0] s1, s2;
          logic           c1, c2, c3;

          assign pll = g_lvl[l-1].pr[2*i][2*j];          // AL x BL
          assign phl = g_lvl[l-1].pr[2*i+1][2*j];        // AH x BL
          assign plh = g_lvl[l-1].pr[2*i][2*j+1];        // AL x BH
          assign phh = g_lvl[l-1].pr[2*i+1][2*j+1];      // AH x BH

          approx_rca #(.N(2 * S), .K(KL), .ADD_TYPE(ADD_TYPE)) u_add1 (
            .a({phh, {S{1'b0}}}), .b({{S{1'b0}}, pll}), .cin(1'b0), .sum(s1), .cout(c1));
          approx_rca #(.N(2 * S), .K(KL), .ADD_TYPE(ADD_TYPE)) u_add2 (
            .a({{H{1'b0}}, phl, {H{1'b0}}}), .b({{H{1'b0}}, plh, {H{1'b0}}}), .cin(1'b0), .sum(s2), .cout(c2));
          approx_rca #(.N(2 * S), .K(KL), .ADD_TYPE(ADD_TYPE)) u_add3 (
            .a(s2), .b(s1), .cin(1'b0), .sum(pr[i][j]), .cout(c3));

          // A product of two S-bit numbers fits in 2S bits, so the carries out of
          // the three adders carry no information and are left unused.
          logic unused_carries;
          assign unused_carries = c1 ^ c2 ^ c3;
        end
      end
    end
  end

  assign p = g_lvl[LV].pr[0][0];

endmodule
