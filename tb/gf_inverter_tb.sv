// gf_inverter_tb: inverts random GF(2^163) elements and corner cases (1, x, x^162,
// all ones, the base point's x) and checks a * inv = 1 with a reference multiply,
// inv against Fermat's a^(2^163-2) for some, a = 0 giving 0, and the latency: at
// most 2m = 326 Euclidean steps, i.e. start-to-done within 328 clocks.
module gf_inverter_tb;
  import ecc_pkg::*;
  import gf_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  gf_t  a, inv;
  logic busy, done;
  int checks = 0, failures = 0;
  int max_lat = 0;

  gf_inverter dut (.clk(clk), .rst_n(rst_n), .start(start), .a(a), .busy(busy), .done(done), .inv(inv));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input gf_t v, input bit fermat);
    int lat;
    @(negedge clk);
    a = v;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin
      @(negedge clk);
      lat++;
    end
    if (lat > max_lat) max_lat = lat;
    checks++;
    if (lat > 2 * int'(M) + 2) begin
      failures++;
      $display("FAIL latency %0d", lat);
    end
    checks++;
    if (v == '0) begin
      if (inv !== '0) begin failures++; $display("FAIL inv(0)=%h", inv); end
    end else if (mulmod(wide_t'(v), wide_t'(inv), wide_t'(F_POLY), M) !== wide_t'(1)) begin
      failures++;
      $display("FAIL a=%h inv=%h", v, inv);
    end
    if (fermat) begin
      checks++;
      if (wide_t'(inv) !== invmod(wide_t'(v), wide_t'(F_POLY), M)) begin
        failures++;
        $display("FAIL fermat a=%h", v);
      end
    end
  endtask

  initial begin
    gf_t v;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(gf_t'(1), 1'b1);
    run(gf_t'(2), 1'b1);
    run(gf_t'(1) << (M - 1), 1'b1);
    run('1, 1'b0);
    run(GX, 1'b1);
    run('0, 1'b0);
    for (int t = 0; t < 150; t++) begin
      for (int i = 0; i < 6; i++) v = {v[M-33:0], 32'($urandom)};
      run(v, t < 5);
    end
    $display("max start-to-done latency %0d clocks", max_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
