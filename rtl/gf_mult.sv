// gf_mult: single-cycle modular multiplier in GF(2^M).
//
// p = a * b mod F(x). The unreduced product comes from the hybrid Karatsuba
// multiplier (two Karatsuba levels over 41-bit polynomial multipliers for M = 163)
// and is reduced by the XOR network of gf_reduce. Fully combinational: the
// sequencer registers the result, one multiplication per clock, as in the paper's
// schedule. The reduction stage is this design's own choice; the paper only says the
// hybrid multiplier is used as the modular multiplier.
module gf_mult #(
  parameter int unsigned M      = ecc_pkg::M,
  parameter int unsigned POLY_N = ecc_pkg::POLY_N,
  parameter logic [M:0]  FPOLY  = ecc_pkg::F_POLY
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  output logic [M-1:0] p
);

  logic [2*M-2:0] prod;

  hybrid_karatsuba #(.N(M), .POLY_N(POLY_N)) u_mul (.a(a), .b(b), .p(prod));
  gf_reduce #(.M(M), .FPOLY(FPOLY)) u_red (.c(prod), .r(p));

endmodule
