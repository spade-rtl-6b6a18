// simd_multiplier: precision-scalable mantissa multiplier (Fig. 2(d)-(f)).
//
// Both 28-bit mantissa vectors are cut into four 7-bit chunks a_1..a_4 and
// b_1..b_4. Sixteen Booth sub-multipliers form PD_ij = a_i * b_j, and PD_ij
// is weighted by 2^(7*(i+j-2)) in the 56-bit product vector. The mode
// decides which partial products are summed:
//   Posit-32 (M2): all sixteen      -> one 28x28 product in [55:0]    (M2_P)
//   Posit-16 (M1): PD_ij with i,j in the same pair -> two 14x14
//                  products in [27:0] (M1_P1) and [55:28] (M1_P2)
//   Posit-8  (M0): PD_ii only       -> four 7x7 products in 14-bit slots
//                  starting at bits 0, 14, 28, 42 (M0_1..M0_4)
// The figure's captions call (d) the 8-bit and (e) the 16-bit case, but the
// field labels printed inside them (M1_P1/M1_P2 in (d), M0_1..M0_4 in (e))
// say the opposite; the labels and bit positions are followed here.
// Combinational.
module simd_multiplier
  import spade_pkg::*;
(
  input  logic [1:0]        mode,
  input  logic [MANT_W-1:0] a,
  input  logic [MANT_W-1:0] b,
  output logic [PROD_W-1:0] p
);

  logic [13:0] pd [4][4];

  for (genvar i = 0; i < 4; i++) begin : g_i
    for (genvar j = 0; j < 4; j++) begin : g_j
      booth_mul7 u_pd (.a(a[7*i +: 7]), .b(b[7*j +: 7]), .p(pd[i][j]));
    end
  end

  always_comb begin
    logic use_pd;
    p = '0;
    for (int i = 0; i < 4; i++) begin
      for (int j = 0; j < 4; j++) begin
        case (mode)
          MODE_P8:  use_pd = (i == j);
          MODE_P16: use_pd = (i / 2) == (j / 2);
          default:  use_pd = 1'b1;
        endcase
        if (use_pd) p = p + (PROD_W'(pd[i][j]) << (7 * (i + j)));
      end
    end
  end

endmodule
