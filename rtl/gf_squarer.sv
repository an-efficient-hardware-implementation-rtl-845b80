// gf_squarer: single-cycle squarer in GF(2^M), XOR gates only.
//
// Squaring in characteristic two is linear: (sum a_i x^i)^2 = sum a_i x^(2i). The
// input bits are spread to the even positions of a (2M-1)-bit vector (wiring only)
// and the result is reduced modulo F(x). For a fixed F the whole block is a set of
// precomputed XOR equations, one per output bit, with no AND gates, which is what
// the paper calls for; the equations are generated here by elaboration rather than
// written out by hand. Combinational.
module gf_squarer #(
  parameter int unsigned M     = ecc_pkg::M,
  parameter logic [M:0]  FPOLY = ecc_pkg::F_POLY
) (
  input  logic [M-1:0] a,
  output logic [M-1:0] s
);

  logic [2*M-2:0] spread;

  always_comb begin
    spread = '0;
    for (int i = 0; i < int'(M); i++) spread[2*i] = a[i];
  end

  gf_reduce #(.M(M), .FPOLY(FPOLY)) u_red (.c(spread), .r(s));

endmodule
