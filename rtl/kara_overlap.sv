// kara_overlap: recombination stage of one Karatsuba level.
//
// With the operands split as a = AH x^H + AL and b = BH x^H + BL, the three
// sub-products M2 = AH BH, M1 = (AH+AL)(BH+BL) and M0 = AL BL give
//   a b = M2 x^2H + (M2 + M1 + M0) x^H + M0.
// The middle term is formed by two XOR stages (M2 with M0, then with M1), and the
// overlap circuit adds the three (2H-1)-bit terms where they share powers of x:
// M2 covers x^(4H-2)..x^(2H), the middle term x^(3H-2)..x^H and M0 x^(2H-2)..x^0.
// Combinational; follows the paper's schematic of a Karatsuba level.
module kara_overlap #(
  parameter int unsigned H = 82
) (
  input  logic [2*H-2:0] m2,
  input  logic [2*H-2:0] m1,
  input  logic [2*H-2:0] m0,
  output logic [4*H-2:0] p
);

  logic [2*H-2:0] mid;

  always_comb begin
    mid = (m2 ^ m0) ^ m1;
    p = ((4*H-1)'(m2) << (2*H)) ^ ((4*H-1)'(mid) << H) ^ (4*H-1)'(m0);
  end

endmodule
