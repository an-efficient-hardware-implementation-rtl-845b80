// gf_squarer_tb: squares in GF(2^163) against the reference a*a mod F.
module gf_squarer_tb;
  import ecc_pkg::*;
  import gf_ref_pkg::*;
  gf_t a, s;
  int checks = 0, failures = 0;

  gf_squarer dut (.a(a), .s(s));

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      if (t == 0) a = '1;
      else if (t == 1) a = GX;
      else if (t < 164) a = gf_t'(1) << (t - 2);   // every single-bit input
      else for (int i = 0; i < 6; i++) a = {a[M-33:0], 32'($urandom)};
      #1;
      checks++;
      if (wide_t'(s) !== mulmod(wide_t'(a), wide_t'(a), wide_t'(F_POLY), M)) begin
        failures++;
        $display("FAIL a=%h s=%h", a, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
