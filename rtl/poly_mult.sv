// poly_mult: conventional (schoolbook) carry-less polynomial multiplier over GF(2).
//
// p(x) = a(x) * b(x) with no reduction. Every partial product a_i b_j is one AND gate
// and the partial products of equal weight are summed by XOR, N^2 AND and (N-1)^2 XOR
// gates in all, with a depth of one AND plus ceil(log2 N) XOR levels once a synthesis
// tool balances the XOR trees. Purely combinational.
//
// In the hybrid Karatsuba multiplier this block is the base case: the 163-bit
// multiplier splits twice (163 -> 82 -> 41) and the nine 41-bit sub-products are
// computed by this flat array. The structure and the 41-bit size follow the paper.
module poly_mult #(
  parameter int unsigned N = 41
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-2:0] p
);

  always_comb begin
    p = '0;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        p[i+j] = p[i+j] ^ (a[i] & b[j]);
      end
    end
  end

endmodule
