// ecc_pkg: constants and types shared by the GF(2^163) point-multiplication core.
//
// Field and curve constants are those of NIST B-163: the field is GF(2^163) with the
// reduction pentanomial F(x) = x^163 + x^7 + x^6 + x^3 + 1, the curve is
// y^2 + xy = x^3 + a x^2 + b with a = 1 and the b below, G is the base point and
// ORDER_N its order. A field element is a 163-bit vector, bit i holding the
// coefficient of x^i (polynomial basis).
//
// The package also defines the micro-instruction that the sequencer (ecpm_control)
// issues to the datapath (ecpm_datapath) each clock: one multiplication, one squaring
// and one addition, each naming source and destination registers. The register
// names and the micro-instruction format are this design's own choice.
package ecc_pkg;

  localparam int unsigned M = 163;
  localparam int unsigned POLY_N = 41;   // operand size of the polynomial base multiplier

  typedef logic [M-1:0] gf_t;

  // x^163 + x^7 + x^6 + x^3 + 1, bit M included
  localparam logic [M:0] F_POLY  = {1'b1, 155'd0, 8'hC9};
  localparam gf_t        CURVE_B = 163'h2_0a60_1907_b8c9_53ca_1481_eb10_512f_7874_4a32_05fd;
  localparam gf_t        GX      = 163'h3_f0eb_a162_86a2_d57e_a099_1168_d499_4637_e834_3e36;
  localparam gf_t        GY      = 163'h0_d51f_bc6c_71a0_094f_a2cd_d545_b11c_5c0c_7973_24f1;
  localparam gf_t        ORDER_N = 163'h4_0000_0000_0000_0000_0002_92fe_77e7_0c12_a423_4c33;

  // Register file addresses. ZERO, ONE, B and INV are read-only: constants and the
  // inverter's result. X1/Z1/X2/Z2 are the projective ladder coordinates; T1..T11
  // are temporaries; X3/Y3 receive the affine result.
  typedef enum logic [4:0] {
    R_ZERO, R_ONE, R_B, R_INV,
    R_XP, R_YP, R_X1, R_Z1, R_X2, R_Z2,
    R_T1, R_T2, R_T3, R_T4, R_T5, R_T6, R_T7, R_T8, R_T9, R_T10, R_T11,
    R_X3, R_Y3
  } reg_e;

  localparam int unsigned NREG = 23;

  // One micro-instruction: every unit is used at most once per clock.
  typedef struct packed {
    logic mul_en;        // write multiplier result
    reg_e mul_a;
    reg_e mul_b;
    reg_e mul_d;
    logic sqr_en;        // write squarer result
    logic sqr_from_add;  // squarer input is this cycle's adder output
    reg_e sqr_a;
    reg_e sqr_d;
    logic add_en;        // write adder result
    reg_e add_a;
    reg_e add_b;
    reg_e add_d;
    logic swap_en;       // exchange X1<->X2 and Z1<->Z2 when the key bit is 0
  } uop_t;

  localparam uop_t UOP_NOP = '{
    mul_en: 1'b0, mul_a: R_ZERO, mul_b: R_ZERO, mul_d: R_ZERO,
    sqr_en: 1'b0, sqr_from_add: 1'b0, sqr_a: R_ZERO, sqr_d: R_ZERO,
    add_en: 1'b0, add_a: R_ZERO, add_b: R_ZERO, add_d: R_ZERO,
    swap_en: 1'b0
  };

endpackage
