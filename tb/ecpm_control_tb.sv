// ecpm_control_tb: runs the sequencer against a simple inverter model (busy for L
// clocks after inv_start) and checks the control flow: load on start, exactly six
// ladder micro-instructions per key bit below the leading one, the swap signal
// equal to the inverted key bit for every ladder clock, one inversion start, no
// use of the inverter's result while it is busy, k = 0 ending at once with k_zero,
// k = 1 skipping the ladder, and the start-to-done latency 6(t-1) + L + 15 clocks.
module ecpm_control_tb;
  import ecc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [M-1:0] k;
  logic inv_busy;
  uop_t uop;
  logic swap, load, inv_start, busy, done, k_zero;
  int checks = 0, failures = 0;
  int inv_left = 0, inv_len = 20;

  ecpm_control dut (.clk(clk), .rst_n(rst_n), .start(start), .k(k), .inv_busy(inv_busy),
                    .uop(uop), .swap(swap), .load(load), .inv_start(inv_start),
                    .busy(busy), .done(done), .k_zero(k_zero));

  always #5 clk = ~clk;

  // inverter model
  always_ff @(posedge clk) begin
    if (inv_start) inv_left <= inv_len;
    else if (inv_left > 0) inv_left <= inv_left - 1;
  end
  assign inv_busy = (inv_left > 0);

  initial begin
    repeat (100000) @(posedge clk);
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

  task automatic run(input logic [M-1:0] kk, input int len);
    int t, cyc, ladder, n_start, bad_swap, early_inv, loads, bitidx;
    logic [M-1:0] expect_bits;
    inv_len = len;
    t = 0;
    for (int i = 0; i < int'(M); i++) if (kk[i]) t = i + 1;
    @(negedge clk);
    k = kk; start = 1'b1;
    #1 loads = int'(load);
    @(negedge clk);
    start = 1'b0;
    cyc = 1; ladder = 0; n_start = 0; bad_swap = 0; early_inv = 0;
    while (!done) begin
      if (uop.swap_en) begin
        bitidx = t - 2 - ladder / 6;
        if (swap !== ~kk[bitidx]) bad_swap++;
        ladder++;
      end
      if (inv_start) n_start++;
      if (inv_busy && (uop.mul_a == R_INV || uop.mul_b == R_INV)) early_inv++;
      @(negedge clk);
      cyc++;
      if (cyc > 5000) break;
    end
    check("load on start", loads == 1);
    if (kk == '0) begin
      check("k=0 flag", k_zero);
      check("k=0 quick", cyc <= 3);
    end else begin
      check("not k_zero", !k_zero);
      check("ladder clocks", ladder == 6 * (t - 1));
      check("swap follows key", bad_swap == 0);
      check("one inversion", n_start == 1);
      check("inverse not used early", early_inv == 0);
      check("latency", cyc == 6 * (t - 1) + len + 15);
      if (cyc != 6 * (t - 1) + len + 15) $display("  t=%0d len=%0d cyc=%0d", t, len, cyc);
    end
  endtask

  initial begin
    logic [M-1:0] kr;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(163'd1, 20);
    run(163'd2, 20);
    run(163'b1011001, 7);
    run('0, 20);
    run(ORDER_N, 326);
    for (int r = 0; r < 5; r++) begin
      for (int i = 0; i < 6; i++) kr = {kr[M-33:0], 32'($urandom)};
      kr = kr >> ($urandom % 150);
      run(kr, 5 + ($urandom % 330));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
