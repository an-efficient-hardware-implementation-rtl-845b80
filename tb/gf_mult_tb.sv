// gf_mult_tb: GF(2^163) modular products against an interleaved shift-and-add
// reference, plus the identities a*1 = a and a*0 = 0, and one product of the B-163
// base point coordinates.
module gf_mult_tb;
  import ecc_pkg::*;
  import gf_ref_pkg::*;
  gf_t a, b, p;
  int checks = 0, failures = 0;

  gf_mult dut (.a(a), .b(b), .p(p));

  function automatic gf_t rnd();
    gf_t v;
    for (int i = 0; i < 6; i++) v = {v[M-33:0], 32'($urandom)};
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
    for (int t = 0; t < 400; t++) begin
      case (t)
        0: begin a = GX; b = GY; end
        1: begin a = rnd(); b = gf_t'(1); end
        2: begin a = rnd(); b = '0; end
        3: begin a = '1; b = '1; end
        default: begin a = rnd(); b = rnd(); end
      endcase
      #1;
      checks++;
      if (wide_t'(p) !== mulmod(wide_t'(a), wide_t'(b), wide_t'(F_POLY), M)) begin
        failures++;
        $display("FAIL a=%h b=%h p=%h", a, b, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
