// gf_adder: addition in GF(2^M), a bitwise XOR of the two coefficient vectors.
// Combinational. One adder, multiplier and squarer each work in parallel in the
// point-multiplication datapath.
module gf_adder #(
  parameter int unsigned M = ecc_pkg::M
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  output logic [M-1:0] s
);

  assign s = a ^ b;

endmodule
