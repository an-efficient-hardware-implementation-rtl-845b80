// ecpm_datapath: register file and field units of the point-multiplication core.
//
// One modular multiplier (hybrid Karatsuba), one squarer and one adder work in
// parallel; each clock the sequencer's micro-instruction (ecc_pkg::uop_t) names
// the sources and destination of each unit, and each result is written to the
// register file at the clock edge. The squarer can take the adder's output of the
// same clock instead of a register, so "(X1 Z2 + X2 Z1)^2" is one clock, as in
// cycle 3 of the paper's ladder schedule. Registers ZERO, ONE and B read as
// constants and INV reads the inverter's result; all others are 163-bit
// flip-flop registers without reset (each is written before it is read).
//
// Ladder role swap: the schedule is written for a key bit of 1. For a key bit of
// 0 the Montgomery step is the same with the indices 1 and 2 exchanged, so when
// the micro-instruction's swap_en is set and swap is 1, addresses X1/Z1 and X2/Z2
// are exchanged before the register file is accessed.
//
// load writes xp_in/yp_in into XP/YP. Outputs expose the registers the sequencer
// and the top need: the inverter operand (T2), X3/Y3, XP/YP and zero tests of
// Z1/Z2. Pairing the three units with a multi-ported register file is this design's
// choice; the paper gives the per-clock use of the units (its Table 1) only.
module ecpm_datapath
  import ecc_pkg::*;
#(
  parameter int unsigned POLY_N_P = ecc_pkg::POLY_N
) (
  input  logic clk,
  input  uop_t uop,
  input  logic swap,
  input  logic load,
  input  gf_t  xp_in,
  input  gf_t  yp_in,
  input  gf_t  inv_in,
  output gf_t  inv_op,
  output gf_t  x3,
  output gf_t  y3,
  output gf_t  xp,
  output gf_t  yp,
  output logic z1_zero,
  output logic z2_zero
);

  gf_t rf [NREG];

  gf_t mul_a, mul_b, mul_p;
  gf_t sqr_a, sqr_s;
  gf_t add_a, add_b, add_s;
  reg_e mul_d, sqr_d, add_d;

  function automatic reg_e map(input reg_e r, input logic sw);
    if (!sw) return r;
    case (r)
      R_X1:    return R_X2;
      R_X2:    return R_X1;
      R_Z1:    return R_Z2;
      R_Z2:    return R_Z1;
      default: return r;
    endcase
  endfunction

  function automatic gf_t rd(input reg_e r);
    case (r)
      R_ZERO:  return '0;
      R_ONE:   return gf_t'(1);
      R_B:     return CURVE_B;
      R_INV:   return inv_in;
      default: return rf[r];
    endcase
  endfunction

  logic sw;

  always_comb begin
    sw    = uop.swap_en & swap;
    mul_a = rd(map(uop.mul_a, sw));
    mul_b = rd(map(uop.mul_b, sw));
    add_a = rd(map(uop.add_a, sw));
    add_b = rd(map(uop.add_b, sw));
    sqr_a = uop.sqr_from_add ? add_s : rd(map(uop.sqr_a, sw));
    mul_d = map(uop.mul_d, sw);
    sqr_d = map(uop.sqr_d, sw);
    add_d = map(uop.add_d, sw);
  end

  gf_mult    #(.POLY_N(POLY_N_P)) u_mul (.a(mul_a), .b(mul_b), .p(mul_p));
  gf_squarer                      u_sqr (.a(sqr_a), .s(sqr_s));
  gf_adder                        u_add (.a(add_a), .b(add_b), .s(add_s));

  always_ff @(posedge clk) begin
    if (load) begin
      rf[R_XP] <= xp_in;
      rf[R_YP] <= yp_in;
    end
    if (uop.mul_en) rf[mul_d] <= mul_p;
    if (uop.sqr_en) rf[sqr_d] <= sqr_s;
    if (uop.add_en) rf[add_d] <= add_s;
  end

  always_comb begin
    inv_op  = rf[R_T2];
    x3      = rf[R_X3];
    y3      = rf[R_Y3];
    xp      = rf[R_XP];
    yp      = rf[R_YP];
    z1_zero = (rf[R_Z1] == '0);
    z2_zero = (rf[R_Z2] == '0);
  end

  // no two units write the same register in one clock; constants are never written
  a_one_writer: assert property (@(posedge clk)
    !(uop.mul_en && uop.sqr_en && mul_d == sqr_d) &&
    !(uop.mul_en && uop.add_en && mul_d == add_d) &&
    !(uop.sqr_en && uop.add_en && sqr_d == add_d));
  a_no_const_write: assert property (@(posedge clk)
    !(uop.mul_en && mul_d inside {R_ZERO, R_ONE, R_B, R_INV}) &&
    !(uop.sqr_en && sqr_d inside {R_ZERO, R_ONE, R_B, R_INV}) &&
    !(uop.add_en && add_d inside {R_ZERO, R_ONE, R_B, R_INV}));

endmodule
