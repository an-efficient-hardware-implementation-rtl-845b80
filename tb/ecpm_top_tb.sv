// ecpm_top_tb: end-to-end point multiplications on NIST B-163 at the default
// parameters.
//
// Each result is compared with known answers for multiples of the base point G and
// with a double-and-add reference in affine coordinates (gf_ref_pkg), which shares
// no algorithm with the design. Cases: k = 1, 2, 3, a 25-bit k, random 163-bit k,
// k = n-1 (gives -G, (k+1)G = infinity), k = n (gives infinity), k = 0, and a
// point other than G. Counted mechanisms: ladder steps with key bit 1 and 0,
// inversions, the infinity result and the -P result; each must occur. Timing
// check: the ladder takes exactly 6 clocks per key bit below the leading one, and
// the inversion at most 2m + 2 clocks.
module ecpm_top_tb;
  import ecc_pkg::*;
  import gf_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [M-1:0] k;
  gf_t xp, yp, x_out, y_out;
  logic busy, done, inf;
  int checks = 0, failures = 0;
  int n_bit1 = 0, n_bit0 = 0, n_inv = 0, n_inf = 0, n_neg = 0;
  int ladder_clocks = 0, inv_clocks = 0;

  ecpm_top dut (.clk(clk), .rst_n(rst_n), .start(start), .k(k), .xp(xp), .yp(yp),
                .busy(busy), .done(done), .x_out(x_out), .y_out(y_out), .inf(inf));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (dut.u_ctrl.ladder_step) begin
      if (dut.u_ctrl.ladder_bit) n_bit1++;
      else n_bit0++;
    end
    if (dut.u_ctrl.uop.swap_en) ladder_clocks++;
    if (dut.u_inv.busy) inv_clocks++;
    if (dut.u_inv.done) n_inv++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // run one multiplication; compare with (ex, ey, einf)
  task automatic run(input logic [M-1:0] kk, input gf_t px, input gf_t py,
                     input gf_t ex, input gf_t ey, input bit einf);
    int t, lc0, ic0, cyc;
    @(negedge clk);
    k = kk; xp = px; yp = py; start = 1'b1;
    lc0 = ladder_clocks; ic0 = inv_clocks;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    t = 0;
    for (int i = 0; i < int'(M); i++) if (kk[i]) t = i + 1;
    $display("k=%h: %0d clocks (ladder %0d, inversion %0d)", kk, cyc,
             ladder_clocks - lc0, inv_clocks - ic0);
    check("inf flag", inf == einf);
    if (!einf) begin
      check("x", x_out == ex);
      check("y", y_out == ey);
    end
    if (t > 0) check("ladder clocks", ladder_clocks - lc0 == 6 * (t - 1));
    check("inversion clocks", inv_clocks - ic0 <= 2 * int'(M) + 1);
    if (inf) n_inf++;
    if (!inf && dut.u_dp.z2_zero) n_neg++;
    if (!einf && x_out != ex) $display("  got %h,%h exp %h,%h", x_out, y_out, ex, ey);
  endtask

  task automatic run_ref(input logic [M-1:0] kk, input gf_t px, input gf_t py);
    point_t p, q;
    p.inf = 1'b0; p.x = wide_t'(px); p.y = wide_t'(py);
    q = smul(wide_t'(kk), p, wide_t'(F_POLY), M);
    run(kk, px, py, gf_t'(q.x), gf_t'(q.y), q.inf);
  endtask

  initial begin
    logic [M-1:0] kr;
    point_t p2;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // known answers for multiples of G
    run(163'd1, GX, GY, GX, GY, 1'b0);
    run(163'd2, GX, GY, 163'h1aeb33fed9c49e0200a0c561ea66d5ab85bd4c2d4,
                        163'h530608192cd47d0c24c20076475fd625cc82895e8, 1'b0);
    run(163'd3, GX, GY, 163'h634000577f86aa315009d6f9b906691f6edd691fe,
                        163'h401a3de0d6c2ec014e6fba5653587bd45dc2230be, 1'b0);
    run(163'h1234567, GX, GY, 163'h3308f5d2b6ae087b8b3bb76641618bb3b06c88e40,
                              163'h7de3eb2f9596cda08516e04134cffac9d4bcefc8e, 1'b0);
    run(163'h4a6a3a4506513270e269e0d37f2a74de452e6b438, GX, GY,
        163'h584a5f12def1097c928e4aa09939a61da54f055a3,
        163'h2f0695d64cd5cb5c8d22bd10cab35da032864648d, 1'b0);
    run(ORDER_N - 1'b1, GX, GY, GX, GX ^ GY, 1'b0);     // -G
    run(ORDER_N, GX, GY, '0, '0, 1'b1);                 // infinity
    run('0, GX, GY, '0, '0, 1'b1);
    // against the affine reference, random full-size scalars
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < 6; i++) kr = {kr[M-33:0], 32'($urandom)};
      run_ref(kr, GX, GY);
    end
    // a different base point: 2G, scalar 5
    p2.inf = 1'b0; p2.x = wide_t'(163'h1aeb33fed9c49e0200a0c561ea66d5ab85bd4c2d4);
    p2.y = wide_t'(163'h530608192cd47d0c24c20076475fd625cc82895e8);
    run_ref(163'd5, gf_t'(p2.x), gf_t'(p2.y));

    $display("ladder steps: bit=1 %0d, bit=0 %0d; inversions %0d; infinity results %0d; -P results %0d",
             n_bit1, n_bit0, n_inv, n_inf, n_neg);
    check("ladder step with key bit 1 seen", n_bit1 > 0);
    check("ladder step with key bit 0 seen", n_bit0 > 0);
    check("inversion seen", n_inv > 0);
    check("infinity result seen", n_inf > 0);
    check("-P result seen", n_neg > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
