// hybrid_karatsuba: recursive Karatsuba polynomial multiplier with a polynomial
// (schoolbook) base case.
//
// An N-bit operand is split into a high and a low half of H = ceil(N/2) bits; when N
// is odd a zero is appended at the MSB first, so both halves have H bits. The three
// H-bit sub-products (high*high, (high+low)*(high+low), low*low) are computed by
// instances of this same module, and kara_overlap combines them. The recursion stops
// once N <= POLY_N: that level is a poly_mult. With the defaults N = 163 and
// POLY_N = 41 the levels are 163 -> 82 -> 41, i.e. two Karatsuba levels and nine
// 41-bit polynomial multipliers, the proposed hybrid multiplier. POLY_N = 2 gives the
// all-Karatsuba chain 163 -> 82 -> 41 -> 21 -> 11 -> 6 -> 3 -> 2.
//
// Output: the unreduced (2N-1)-bit product. Purely combinational (single cycle).
//
// The recursion is a module instantiating itself under a generate condition that
// ends it. When this module is linted by itself as the top, verilator reports
// m2/m1/m0 as undriven and asum/bsum as unused; the nets are connected (simulation
// and synthesis of the full hierarchy are correct, and the warning is absent when
// the module is instantiated from gf_mult), so the warning stands. The top two bits
// of pfull are unused because they are always zero after MSB padding.
module hybrid_karatsuba #(
  parameter int unsigned N      = 163,
  parameter int unsigned POLY_N = 41
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-2:0] p
);

  if (N <= POLY_N || N < 2) begin : g_poly
    poly_mult #(.N(N)) u_poly (.a(a), .b(b), .p(p));
  end else begin : g_kara
    localparam int unsigned H = (N + 1) / 2;

    logic [2*H-1:0] ap, bp;
    logic [H-1:0]   ah, al, bh, bl, asum, bsum;
    logic [2*H-2:0] m2, m1, m0;
    logic [4*H-2:0] pfull;

    always_comb begin
      ap   = (2*H)'(a);   // zero padding at the MSB for odd N
      bp   = (2*H)'(b);
      ah   = ap[2*H-1:H];
      al   = ap[H-1:0];
      bh   = bp[2*H-1:H];
      bl   = bp[H-1:0];
      asum = ah ^ al;
      bsum = bh ^ bl;
    end

    hybrid_karatsuba #(.N(H), .POLY_N(POLY_N)) u_hi  (.a(ah),   .b(bh),   .p(m2));
    hybrid_karatsuba #(.N(H), .POLY_N(POLY_N)) u_mid (.a(asum), .b(bsum), .p(m1));
    hybrid_karatsuba #(.N(H), .POLY_N(POLY_N)) u_lo  (.a(al),   .b(bl),   .p(m0));

    kara_overlap #(.H(H)) u_ovl (.m2(m2), .m1(m1), .m0(m0), .p(pfull));

    // the padded top bits of the product are always zero
    assign p = pfull[2*N-2:0];
  end

endmodule
