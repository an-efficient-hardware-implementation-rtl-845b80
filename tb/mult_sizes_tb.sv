// mult_sizes_tb: the standalone multiplier sizes compared in the design study,
// 6, 11, 21, 41, 82 and 163 bits, each built both as an all-Karatsuba multiplier
// (hybrid_karatsuba with a 2-bit polynomial base) and as a flat polynomial
// multiplier (poly_mult), checked on random operands against a shift-and-add
// reference.
module mult_sizes_tb;
  import gf_ref_pkg::*;

  localparam int NSZ = 6;
  localparam int SIZES [NSZ] = '{6, 11, 21, 41, 82, 163};
  localparam int MAXN = 163;

  logic [MAXN-1:0] a, b;
  wide_t pk [NSZ];
  wide_t pp [NSZ];
  int checks = 0, failures = 0;

  for (genvar s = 0; s < NSZ; s++) begin : g_size
    localparam int unsigned N = SIZES[s];
    logic [2*N-2:0] p_kara, p_poly;
    hybrid_karatsuba #(.N(N), .POLY_N(2)) u_kara (.a(a[N-1:0]), .b(b[N-1:0]), .p(p_kara));
    poly_mult        #(.N(N))             u_poly (.a(a[N-1:0]), .b(b[N-1:0]), .p(p_poly));
    assign pk[s] = wide_t'(p_kara);
    assign pp[s] = wide_t'(p_poly);
  end

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wide_t ref_p;
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < 6; i++) a = {a[MAXN-33:0], 32'($urandom)};
      for (int i = 0; i < 6; i++) b = {b[MAXN-33:0], 32'($urandom)};
      if (t == 0) begin a = '1; b = '1; end
      #1;
      for (int s = 0; s < NSZ; s++) begin
        ref_p = clmul(wide_t'(a) & ((wide_t'(1) << SIZES[s]) - 1),
                      wide_t'(b) & ((wide_t'(1) << SIZES[s]) - 1), SIZES[s]);
        checks += 2;
        if (pk[s] !== ref_p) begin failures++; $display("FAIL karatsuba %0d", SIZES[s]); end
        if (pp[s] !== ref_p) begin failures++; $display("FAIL polynomial %0d", SIZES[s]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
