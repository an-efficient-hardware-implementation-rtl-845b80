// hybrid_karatsuba_tb: random and corner-case products of the hybrid Karatsuba
// multiplier, checked against a shift-and-add reference. Three instances run side
// by side: the default 163-bit hybrid (two Karatsuba levels over 41-bit polynomial
// multipliers), the all-Karatsuba 163-bit chain (polynomial base of 2 bits) and a
// small odd size that exercises MSB zero padding at every level.
module hybrid_karatsuba_tb;
  import gf_ref_pkg::*;

  localparam int unsigned N  = 163;
  localparam int unsigned NS = 13;

  logic [N-1:0]    a, b;
  logic [2*N-2:0]  p_hyb, p_kara;
  logic [NS-1:0]   as, bs;
  logic [2*NS-2:0] p_small;
  int checks = 0, failures = 0;

  hybrid_karatsuba                         dut_hyb   (.a(a),  .b(b),  .p(p_hyb));
  hybrid_karatsuba #(.N(N),  .POLY_N(2))   dut_kara  (.a(a),  .b(b),  .p(p_kara));
  hybrid_karatsuba #(.N(NS), .POLY_N(3))   dut_small (.a(as), .b(bs), .p(p_small));

  function automatic logic [N-1:0] rnd163();
    logic [N-1:0] v;
    for (int i = 0; i < 6; i++) v = {v[N-33:0], 32'($urandom)};
    return v;
  endfunction

  task automatic check(input string what, input wide_t got, input wide_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      case (t)
        0: begin a = '1; b = '1; end
        1: begin a = '0; b = rnd163(); end
        2: begin a = N'(1); b = rnd163(); end
        3: begin a = {1'b1, {(N-1){1'b0}}}; b = {1'b1, {(N-1){1'b0}}}; end
        default: begin a = rnd163(); b = rnd163(); end
      endcase
      as = NS'($urandom);
      bs = NS'($urandom);
      #1;
      check("hybrid", wide_t'(p_hyb), clmul(wide_t'(a), wide_t'(b), N));
      check("karatsuba", wide_t'(p_kara), clmul(wide_t'(a), wide_t'(b), N));
      check("small", wide_t'(p_small), clmul(wide_t'(as), wide_t'(bs), NS));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
