// gf_adder_tb: field addition checked bit by bit (coefficient sum mod 2) and the
// identities a + a = 0, a + 0 = a.
module gf_adder_tb;
  import ecc_pkg::*;
  gf_t a, b, s;
  int checks = 0, failures = 0;

  gf_adder dut (.a(a), .b(b), .s(s));

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < 6; i++) a = {a[M-33:0], 32'($urandom)};
      for (int i = 0; i < 6; i++) b = {b[M-33:0], 32'($urandom)};
      if (t == 0) b = a;
      if (t == 1) b = '0;
      #1;
      for (int i = 0; i < int'(M); i++) begin
        checks++;
        if (s[i] !== ((int'(a[i]) + int'(b[i])) % 2 == 1)) begin
          failures++;
          $display("FAIL bit %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
