// ecpm_datapath_tb: drives micro-instructions into the datapath directly and checks
// register contents through its outputs: loading xP/yP, a multiplication, a
// squaring of the same clock's adder output, all three units writing in one clock,
// the constants ONE/B and the INV input, the X1<->X2 / Z1<->Z2 role swap, and the
// Z1/Z2 zero flags. Expected values come from the shift-and-add reference.
module ecpm_datapath_tb;
  import ecc_pkg::*;
  import gf_ref_pkg::*;

  logic clk = 1'b0;
  uop_t uop;
  logic swap, load;
  gf_t  xp_in, yp_in, inv_in, inv_op, x3, y3, xp, yp;
  logic z1_zero, z2_zero;
  int checks = 0, failures = 0;

  ecpm_datapath dut (.clk(clk), .uop(uop), .swap(swap), .load(load), .xp_in(xp_in), .yp_in(yp_in),
                     .inv_in(inv_in), .inv_op(inv_op), .x3(x3), .y3(y3), .xp(xp), .yp(yp),
                     .z1_zero(z1_zero), .z2_zero(z2_zero));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic gf_t rnd();
    gf_t v;
    for (int i = 0; i < 6; i++) v = {v[M-33:0], 32'($urandom)};
    return v;
  endfunction

  function automatic gf_t mm(input gf_t a, input gf_t b);
    return gf_t'(mulmod(wide_t'(a), wide_t'(b), wide_t'(F_POLY), M));
  endfunction

  task automatic check(input string what, input gf_t got, input gf_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  task automatic step(input uop_t u, input logic sw);
    @(negedge clk);
    uop = u; swap = sw;
    @(negedge clk);
    uop = UOP_NOP;
  endtask

  // copy register r into X3 (r + 0)
  task automatic peek(input reg_e r, input logic sw, output gf_t v);
    uop_t u;
    u = UOP_NOP;
    u.swap_en = 1'b1;
    u.add_en = 1'b1; u.add_a = r; u.add_b = R_ZERO; u.add_d = R_X3;
    step(u, sw);
    v = x3;
  endtask

  initial begin
    uop_t u;
    gf_t a, b, c, v;
    uop = UOP_NOP; swap = 1'b0; load = 1'b0;
    for (int r = 0; r < 40; r++) begin
      a = rnd(); b = rnd(); c = rnd();
      inv_in = c;
      // load
      @(negedge clk);
      xp_in = a; yp_in = b; load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      check("xp", xp, a);
      check("yp", yp, b);
      // mul XP*YP -> T2 (inverter operand), sqr (XP+YP)^2 -> Y3, add XP+YP -> X3, same clock
      u = UOP_NOP;
      u.mul_en = 1; u.mul_a = R_XP; u.mul_b = R_YP; u.mul_d = R_T2;
      u.add_en = 1; u.add_a = R_XP; u.add_b = R_YP; u.add_d = R_X3;
      u.sqr_en = 1; u.sqr_from_add = 1; u.sqr_d = R_Y3;
      step(u, 1'b0);
      check("mul", inv_op, mm(a, b));
      check("add", x3, a ^ b);
      check("sqr of adder", y3, mm(a ^ b, a ^ b));
      // squarer from a register, constants B and INV
      u = UOP_NOP;
      u.sqr_en = 1; u.sqr_a = R_XP; u.sqr_d = R_X3;
      u.mul_en = 1; u.mul_a = R_B; u.mul_b = R_ONE; u.mul_d = R_Y3;
      u.add_en = 1; u.add_a = R_INV; u.add_b = R_YP; u.add_d = R_T2;
      step(u, 1'b0);
      check("sqr", x3, mm(a, a));
      check("const b", y3, CURVE_B);
      check("inv in", inv_op, c ^ b);
      // X1 <- xP, X2 <- yP, Z1 <- 0, Z2 <- c, unswapped writes
      u = UOP_NOP;
      u.add_en = 1; u.add_a = R_XP; u.add_b = R_ZERO; u.add_d = R_X1;
      u.sqr_en = 1; u.sqr_a = R_YP; u.sqr_d = R_X2;
      u.mul_en = 1; u.mul_a = R_ZERO; u.mul_b = R_YP; u.mul_d = R_Z1;
      step(u, 1'b0);
      u = UOP_NOP;
      u.add_en = 1; u.add_a = R_INV; u.add_b = R_ZERO; u.add_d = R_Z2;
      step(u, 1'b0);
      checks++;
      if (!(z1_zero && !z2_zero)) begin failures++; $display("FAIL zero flags"); end
      // unswapped and swapped reads
      peek(R_X1, 1'b0, v); check("X1", v, a);
      peek(R_X1, 1'b1, v); check("X1 swapped", v, mm(b, b));
      peek(R_Z2, 1'b1, v); check("Z2 swapped", v, '0);
      peek(R_Z1, 1'b1, v); check("Z1 swapped", v, c);
      // swapped write: logical Z1 <- ONE*ONE lands in Z2... and swap_en=0 ignores swap
      u = UOP_NOP;
      u.swap_en = 1; u.mul_en = 1; u.mul_a = R_ONE; u.mul_b = R_ONE; u.mul_d = R_Z1;
      step(u, 1'b1);
      peek(R_Z2, 1'b0, v); check("swapped write", v, gf_t'(1));
      u = UOP_NOP;
      u.mul_en = 1; u.mul_a = R_X2; u.mul_b = R_ONE; u.mul_d = R_X3;
      step(u, 1'b1);
      check("swap_en off", x3, mm(b, b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
