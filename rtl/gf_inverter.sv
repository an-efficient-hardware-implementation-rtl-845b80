// gf_inverter: sequential inverter in GF(2^M) by a binary extended Euclidean
// algorithm, one step per clock.
//
// The state is a pair of polynomials (f, g), started at (F, a), an integer delta
// started at 1, and two cofactors (d, e), started at (0, 1), kept so that
// f = d*a and g = e*a (mod F). Each step divides by x from the low end:
//   delta > 0 and g(0) = 1 : (f, g) <- (g, (g+f)/x); (d, e) <- (e, (e+d)/x); delta <- 1-delta
//   otherwise, g(0) = 1    :  g <- (g+f)/x;  e <- (e+d)/x;                 delta <- delta+1
//   otherwise, g(0) = 0    :  g <- g/x;      e <- e/x;                     delta <- delta+1
// where the cofactor division by x is taken mod F (add F first if the constant
// term is 1). f keeps a constant term of 1, so the gcd is preserved; once g = 0,
// f = gcd(F, a) = 1 and d = a^-1. For deg F = M and deg a < M this takes at most
// 2M steps (326 for M = 163), the bound the paper gives for its extended Euclidean
// inverter. The stop test g = 0 makes the latency data dependent, up to 2M. The
// paper cites an extended Euclidean inverter without giving its steps; this
// division-step form, which needs no degree comparison, is this design's choice.
//
// Interface: pulse start with a valid for one clock while idle (busy low). busy
// rises the next clock. On the clock g is found to be 0, done pulses for one clock
// with inv valid; inv holds until the next start. Latency: steps + 2 clocks from
// start to done. a = 0 gives inv = 0.
module gf_inverter #(
  parameter int unsigned M     = ecc_pkg::M,
  parameter logic [M:0]  FPOLY = ecc_pkg::F_POLY
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] a,
  output logic         busy,
  output logic         done,
  output logic [M-1:0] inv
);

  localparam int unsigned CW = $clog2(2*M + 2) + 1;

  logic [M:0]          f;
  logic [M-1:0]        g, d, e;
  logic signed [CW:0]  delta;
  logic [CW-1:0]       steps;

  // (v / x) mod F
  function automatic logic [M-1:0] div_x(input logic [M-1:0] v);
    logic [M:0] t;
    t = {1'b0, v} ^ (v[0] ? FPOLY : '0);
    return t[M:1];
  endfunction

  logic [M:0]   gf_sum;     // g + f, constant term 0 when g(0) = 1
  logic         swap;

  always_comb begin
    gf_sum = {1'b0, g} ^ f;
    swap   = (delta > 0) && g[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      f     <= '0;
      g     <= '0;
      d     <= '0;
      e     <= '0;
      delta <= '0;
      steps <= '0;
      inv   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        f     <= FPOLY;
        g     <= a;
        d     <= '0;
        e     <= M'(1);
        delta <= (CW+1)'(1);
        steps <= '0;
      end else if (busy) begin
        if (g == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
          inv  <= d;
        end else begin
          steps <= steps + 1'b1;
          if (swap) begin
            f     <= {1'b0, g};
            g     <= gf_sum[M:1];
            d     <= e;
            e     <= div_x(e ^ d);
            delta <= (CW+1)'(1) - delta;
          end else if (g[0]) begin
            g     <= gf_sum[M:1];
            e     <= div_x(e ^ d);
            delta <= delta + 1'b1;
          end else begin
            g     <= g >> 1;
            e     <= div_x(e);
            delta <= delta + 1'b1;
          end
        end
      end
    end
  end

  // the step count never exceeds 2M
  a_step_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                 busy |-> (steps <= CW'(2*M)));
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> !busy);

endmodule
