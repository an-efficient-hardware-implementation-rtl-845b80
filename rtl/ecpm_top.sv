// ecpm_top: elliptic curve point multiplication Q = kP over GF(2^163), NIST B-163.
//
// Montgomery ladder in standard projective (X, Z) coordinates: each key bit costs
// six clocks of one hybrid Karatsuba multiplier, one squarer and one adder working
// in parallel, and one extended Euclidean inversion at the end converts to affine
// coordinates (x3, y3). Blocks: ecpm_control (sequencer), ecpm_datapath (register
// file and field units) and gf_inverter.
//
// Interface: hold k, xp, yp stable and pulse start for one clock while busy is low.
// done pulses for one clock when x_out, y_out and inf are valid; they then hold
// until the next start. P = (xp, yp) must be a point of B-163 with xp != 0.
//   inf = 1          : kP is the point at infinity (k = 0, or Z1 = 0 after the ladder)
//   Z2 = 0 after the ladder, i.e. (k+1)P = infinity : kP = -P = (xP, xP + yP)
//   otherwise        : the recovered affine point.
// The special cases are this design's additions; the paper's Algorithm 2 assumes
// they do not occur. Latency for a t-bit k: 1 (start) + 1 (scan) + 3 (init) +
// 6(t-1) (ladder) + 7 + inversion wait + 7, about 6t + 330 clocks for t = 163.
module ecpm_top
  import ecc_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] k,
  input  gf_t          xp,
  input  gf_t          yp,
  output logic         busy,
  output logic         done,
  output gf_t          x_out,
  output gf_t          y_out,
  output logic         inf
);

  uop_t uop;
  logic swap, load, inv_start, inv_busy, inv_done, k_zero;
  gf_t  inv_val, inv_op, x3, y3, xp_r, yp_r;
  logic z1_zero, z2_zero;

  ecpm_control u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .k(k), .inv_busy(inv_busy),
    .uop(uop), .swap(swap), .load(load), .inv_start(inv_start),
    .busy(busy), .done(done), .k_zero(k_zero)
  );

  ecpm_datapath u_dp (
    .clk(clk), .uop(uop), .swap(swap), .load(load),
    .xp_in(xp), .yp_in(yp), .inv_in(inv_val),
    .inv_op(inv_op), .x3(x3), .y3(y3), .xp(xp_r), .yp(yp_r),
    .z1_zero(z1_zero), .z2_zero(z2_zero)
  );

  gf_inverter u_inv (
    .clk(clk), .rst_n(rst_n), .start(inv_start), .a(inv_op),
    .busy(inv_busy), .done(inv_done), .inv(inv_val)
  );

  // result selection, valid from done until the next start
  always_comb begin
    if (k_zero || z1_zero) begin
      inf   = 1'b1;
      x_out = '0;
      y_out = '0;
    end else if (z2_zero) begin
      inf   = 1'b0;
      x_out = xp_r;
      y_out = xp_r ^ yp_r;
    end else begin
      inf   = 1'b0;
      x_out = x3;
      y_out = y3;
    end
  end

  a_inv_idle: assert property (@(posedge clk) disable iff (!rst_n) inv_start |-> !inv_busy);
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) inv_done |-> busy);

endmodule
