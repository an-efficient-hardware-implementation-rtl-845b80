// poly_mult_tb: the 41-bit schoolbook multiplier against a shift-and-add reference,
// on corner cases and random operands. Combinational: one check per operand pair.
module poly_mult_tb;
  import gf_ref_pkg::*;
  localparam int unsigned N = 41;
  logic [N-1:0]   a, b;
  logic [2*N-2:0] p;
  int checks = 0, failures = 0;

  poly_mult dut (.a(a), .b(b), .p(p));

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      case (t)
        0: begin a = '1; b = '1; end
        1: begin a = N'(1); b = '1; end
        2: begin a = '0; b = '1; end
        default: begin a = {9'($urandom), 32'($urandom)}; b = {9'($urandom), 32'($urandom)}; end
      endcase
      #1;
      checks++;
      if (wide_t'(p) !== clmul(wide_t'(a), wide_t'(b), N)) begin
        failures++;
        $display("FAIL a=%h b=%h p=%h", a, b, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
