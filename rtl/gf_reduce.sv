// gf_reduce: reduction of a polynomial of degree <= 2M-2 modulo the field polynomial.
//
// Folds each coefficient of x^i, i = 2M-2 down to M, back through F(x): since
// x^M = F(x) - x^M (mod F), bit i is cleared and F shifted by i-M is added. With the
// fixed pentanomial the loop elaborates into a network of XOR gates only.
// Combinational. The paper does not describe its reduction step; this is the usual
// one for a fixed trinomial or pentanomial.
module gf_reduce #(
  parameter int unsigned M     = ecc_pkg::M,
  parameter logic [M:0]  FPOLY = ecc_pkg::F_POLY
) (
  input  logic [2*M-2:0] c,
  output logic [M-1:0]   r
);

  logic [2*M-2:0] t;

  always_comb begin
    t = c;
    for (int i = 2*M-2; i >= int'(M); i--) begin
      if (t[i]) t = t ^ ((2*M-1)'(FPOLY) << (i - M));
    end
    r = t[M-1:0];
  end

endmodule
