// kara_overlap_tb: builds random 2H-bit operands, forms the three Karatsuba
// sub-products M2, M1, M0 with a reference carry-less multiply, and checks that the
// overlap stage recombines them into the full product a*b. H = 82, the size used at
// the top level of the 163-bit multiplier.
module kara_overlap_tb;
  import gf_ref_pkg::*;
  localparam int unsigned H = 82;
  logic [2*H-2:0] m2, m1, m0;
  logic [4*H-2:0] p;
  logic [H-1:0]   ah, al, bh, bl;
  int checks = 0, failures = 0;

  kara_overlap dut (.m2(m2), .m1(m1), .m0(m0), .p(p));

  function automatic logic [H-1:0] rnd();
    logic [H-1:0] v;
    for (int i = 0; i < 3; i++) v = {v[H-33:0], 32'($urandom)};
    return v;
  endfunction

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      ah = rnd(); al = rnd(); bh = rnd(); bl = rnd();
      if (t == 0) begin ah = '1; al = '1; bh = '1; bl = '1; end
      m2 = (2*H-1)'(clmul(wide_t'(ah), wide_t'(bh), H));
      m1 = (2*H-1)'(clmul(wide_t'(ah ^ al), wide_t'(bh ^ bl), H));
      m0 = (2*H-1)'(clmul(wide_t'(al), wide_t'(bl), H));
      #1;
      checks++;
      if (wide_t'(p) !== clmul(wide_t'({ah, al}), wide_t'({bh, bl}), 2*H)) begin
        failures++;
        $display("FAIL p=%h", p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
