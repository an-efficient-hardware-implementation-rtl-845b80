// ecpm_control: microcoded sequencer of the Montgomery point multiplication.
//
// Runs Algorithm 2 (projective Montgomery ladder, x-only, with affine recovery) as
// a fixed micro-program; each entry drives the multiplier, squarer and adder of
// ecpm_datapath for one clock. Flow after start:
//   SCAN   1 clock  : find t-1, the index of the key's leading one (k = 0 ends at once)
//   INIT   3 clocks : X1 = xP, Z1 = 1, Z2 = xP^2, X2 = xP^4 + b            (Step 1)
//   LADDER 6 clocks per key bit k_i, i = t-2 .. 0, the paper's Table 1 schedule
//          for k_i = 1; for k_i = 0 the datapath swaps the indices 1 and 2  (Step 2)
//   POST   7 clocks : Z1 Z2, xP Z1 Z2 (inverted), and all terms of the y formula
//          that need no inverse; the inversion starts at the third of these
//   WAIT   until the inverter finishes (at most 2m Euclidean steps)
//   FINAL  6 clocks : x3 = X1 (xP Z2)(xP Z1 Z2)^-1, y3 by Eq. (15)       (Step 3)
// done pulses for one clock after the last result is written.
//
// Key bit i is read from a copy of k taken at start. Scalar bits above the leading
// one are skipped with a priority encoder instead of being clocked through. The
// ladder schedule is the paper's; the SCAN step, the post-processing order and the
// overlap of post-processing with the inversion are this design's choices.
module ecpm_control
  import ecc_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] k,
  input  logic         inv_busy,
  output uop_t         uop,
  output logic         swap,
  output logic         load,
  output logic         inv_start,
  output logic         busy,
  output logic         done,
  output logic         k_zero
);

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_RUN} state_e;

  localparam int unsigned IW = $clog2(M);
  localparam logic [4:0] PC_INIT_LAST   = 5'd2;
  localparam logic [4:0] PC_LADDER      = 5'd3;
  localparam logic [4:0] PC_LADDER_LAST = 5'd8;
  localparam logic [4:0] PC_POST        = 5'd9;
  localparam logic [4:0] PC_INV_START   = 5'd11;
  localparam logic [4:0] PC_WAIT        = 5'd16;
  localparam logic [4:0] PC_LAST        = 5'd22;

  state_e        state;
  logic [4:0]    pc;
  logic [M-1:0]  kreg;
  logic [IW-1:0] bitpos;
  logic [IW-1:0] lead;
  logic          ladder_step;   // first clock of a ladder iteration (for monitors)
  logic          ladder_bit;    // its key bit

  // micro-program; mul/sqr/add fields: enable, sources, destination
  function automatic uop_t rom(input logic [4:0] a);
    uop_t u;
    u = UOP_NOP;
    case (a)
      // Step 1: X1 <- xP; Z1 <- 1; Z2 <- xP^2; X2 <- xP^4 + b
      5'd0: begin
        u.sqr_en = 1; u.sqr_a = R_XP;  u.sqr_d = R_Z2;
        u.add_en = 1; u.add_a = R_XP;  u.add_b = R_ZERO; u.add_d = R_X1;
        u.mul_en = 1; u.mul_a = R_ONE; u.mul_b = R_ONE;  u.mul_d = R_Z1;
      end
      5'd1: begin
        u.sqr_en = 1; u.sqr_a = R_Z2; u.sqr_d = R_T1;
      end
      5'd2: begin
        u.add_en = 1; u.add_a = R_T1; u.add_b = R_B; u.add_d = R_X2;
      end
      // Step 2, one ladder iteration for k_i = 1 (Table 1, cycles 1..6)
      5'd3: begin
        u.swap_en = 1;
        u.mul_en = 1; u.mul_a = R_X2; u.mul_b = R_Z1; u.mul_d = R_T1;   // X2 Z1
        u.sqr_en = 1; u.sqr_a = R_X2; u.sqr_d = R_T2;                   // X2^2
      end
      5'd4: begin
        u.swap_en = 1;
        u.mul_en = 1; u.mul_a = R_X1; u.mul_b = R_Z2; u.mul_d = R_T3;   // X1 Z2
        u.sqr_en = 1; u.sqr_a = R_Z2; u.sqr_d = R_T4;                   // Z2^2
      end
      5'd5: begin
        u.swap_en = 1;
        u.add_a = R_T3; u.add_b = R_T1;                                 // X1 Z2 + X2 Z1
        u.mul_en = 1; u.mul_a = R_T3; u.mul_b = R_T1; u.mul_d = R_T5;   // X1 Z1 X2 Z2
        u.sqr_en = 1; u.sqr_from_add = 1; u.sqr_d = R_Z1;               // (..)^2 -> Z1
      end
      5'd6: begin
        u.swap_en = 1;
        u.mul_en = 1; u.mul_a = R_Z1; u.mul_b = R_XP; u.mul_d = R_T1;   // Z1 xP
        u.sqr_en = 1; u.sqr_a = R_T4; u.sqr_d = R_T3;                   // Z2^4
      end
      5'd7: begin
        u.swap_en = 1;
        u.add_en = 1; u.add_a = R_T1; u.add_b = R_T5; u.add_d = R_X1;   // -> X1
        u.mul_en = 1; u.mul_a = R_B;  u.mul_b = R_T3; u.mul_d = R_T3;   // b Z2^4
        u.sqr_en = 1; u.sqr_a = R_T2; u.sqr_d = R_T5;                   // X2^4
      end
      5'd8: begin
        u.swap_en = 1;
        u.add_en = 1; u.add_a = R_T3; u.add_b = R_T5; u.add_d = R_X2;   // -> X2
        u.mul_en = 1; u.mul_a = R_T2; u.mul_b = R_T4; u.mul_d = R_Z2;   // X2^2 Z2^2 -> Z2
      end
      // Step 3: affine recovery
      5'd9: begin
        u.mul_en = 1; u.mul_a = R_Z1; u.mul_b = R_Z2; u.mul_d = R_T1;   // Z1 Z2
        u.sqr_en = 1; u.sqr_a = R_XP; u.sqr_d = R_T8;                   // xP^2
      end
      5'd10: begin
        u.mul_en = 1; u.mul_a = R_XP; u.mul_b = R_T1; u.mul_d = R_T2;   // xP Z1 Z2
        u.add_en = 1; u.add_a = R_T8; u.add_b = R_YP; u.add_d = R_T9;   // xP^2 + yP
      end
      5'd11: begin                                                      // inversion starts
        u.mul_en = 1; u.mul_a = R_XP; u.mul_b = R_Z1; u.mul_d = R_T3;   // xP Z1
      end
      5'd12: begin
        u.mul_en = 1; u.mul_a = R_XP; u.mul_b = R_Z2; u.mul_d = R_T5;   // xP Z2
        u.add_en = 1; u.add_a = R_X1; u.add_b = R_T3; u.add_d = R_T4;   // X1 + xP Z1
      end
      5'd13: begin
        u.mul_en = 1; u.mul_a = R_T9; u.mul_b = R_T1; u.mul_d = R_T10;  // (xP^2+yP) Z1 Z2
        u.add_en = 1; u.add_a = R_X2; u.add_b = R_T5; u.add_d = R_T6;   // X2 + xP Z2
      end
      5'd14: begin
        u.mul_en = 1; u.mul_a = R_T4; u.mul_b = R_T6; u.mul_d = R_T7;
      end
      5'd15: begin
        u.add_en = 1; u.add_a = R_T7; u.add_b = R_T10; u.add_d = R_T11; // [...] of Eq. (15)
      end
      5'd16: ;                                                          // wait for inverter
      5'd17: begin
        u.mul_en = 1; u.mul_a = R_T5; u.mul_b = R_INV; u.mul_d = R_T3;  // 1/Z1
      end
      5'd18: begin
        u.mul_en = 1; u.mul_a = R_X1; u.mul_b = R_T3; u.mul_d = R_X3;   // x3 = X1/Z1
      end
      5'd19: begin
        u.add_en = 1; u.add_a = R_XP; u.add_b = R_X3; u.add_d = R_T4;   // xP + x3
      end
      5'd20: begin
        u.mul_en = 1; u.mul_a = R_T4; u.mul_b = R_T11; u.mul_d = R_T6;
      end
      5'd21: begin
        u.mul_en = 1; u.mul_a = R_T6; u.mul_b = R_INV; u.mul_d = R_T7;
      end
      5'd22: begin
        u.add_en = 1; u.add_a = R_T7; u.add_b = R_YP; u.add_d = R_Y3;   // y3
      end
      default: ;
    endcase
    return u;
  endfunction

  // index of the most significant set bit of kreg
  always_comb begin
    lead = '0;
    for (int i = 0; i < int'(M); i++) if (kreg[i]) lead = IW'(i);
  end

  always_comb begin
    uop         = (state == S_RUN) ? rom(pc) : UOP_NOP;
    swap        = ~kreg[bitpos];
    load        = (state == S_IDLE) && start;
    inv_start   = (state == S_RUN) && (pc == PC_INV_START);
    busy        = (state != S_IDLE);
    ladder_step = (state == S_RUN) && (pc == PC_LADDER);
    ladder_bit  = kreg[bitpos];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      pc     <= '0;
      kreg   <= '0;
      bitpos <= '0;
      done   <= 1'b0;
      k_zero <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          kreg  <= k;
          state <= S_SCAN;
        end
        S_SCAN: begin
          k_zero <= (kreg == '0);
          if (kreg == '0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            pc    <= '0;
            state <= S_RUN;
          end
        end
        S_RUN: begin
          pc <= pc + 1'b1;
          if (pc == PC_INIT_LAST) begin
            if (lead == '0) pc <= PC_POST;       // k = 1: no ladder step
            else bitpos <= lead - 1'b1;
          end else if (pc == PC_LADDER_LAST) begin
            if (bitpos == '0) pc <= PC_POST;
            else begin
              bitpos <= bitpos - 1'b1;
              pc     <= PC_LADDER;
            end
          end else if (pc == PC_WAIT) begin
            if (inv_busy) pc <= pc;
          end else if (pc == PC_LAST) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
