// lut_c25519_ladder: C25519 Ladder Control LUT.
//
// The 11 restructured ladder instructions of the form (A +- B) x (C +- D),
// packed four at a time (one per multiplier lane) into 3 steps, so a whole
// LADDER takes 3 clock cycles on Curve25519:
//   step 0: T6 = (X2+Z2)(X2+Z2)  T7 = (X2-Z2)(X2-Z2)
//           T8 = (X3-Z3)(X2+Z2)  T9 = (X3+Z3)(X2-Z2)
//   step 1: X3 = (T8+T9)(T8+T9)  Z3 = (T8-T9)(T8-T9)
//           X2 = (T6+0)(T7+0)    Z2 = (A+0)(T6-T7)
//   step 2: X3 = (X3+0)(Z1+0)    Z3 = (Z3+0)(X1+0)
//           Z2 = (Z2+T6)(T6-T7)  (lane 3 idle)
// The instructions are copied from the paper's figure of the restructured
// ladder; their grouping into steps and lanes is this design's (the paper
// gives 3 cycles per ladder). Register names are those of the k_i = 0 branch;
// the controller swaps (X2,Z2) and (X3,Z3) when k_i = 1. Combinational.
module lut_c25519_ladder
  import ecc_pkg::*;
(
  input  logic [1:0]  step,
  output lane_instr_t instr [NLANE],
  output logic        last
);
  function automatic lane_instr_t ins(src_t a, src_t b, logic sab,
                                      src_t c, src_t d, logic scd, src_t dst);
    return '{a: a, b: b, c: c, d: d, sub_ab: sab, sub_cd: scd, wmask: onehot(dst)};
  endfunction

  always_comb begin
    instr = '{default: NOP};
    last  = 1'b0;
    case (step)
      2'd0: begin
        instr[0] = ins(R_X2, R_Z2, 1'b0, R_X2, R_Z2, 1'b0, R_T6);
        instr[1] = ins(R_X2, R_Z2, 1'b1, R_X2, R_Z2, 1'b1, R_T7);
        instr[2] = ins(R_X3, R_Z3, 1'b1, R_X2, R_Z2, 1'b0, R_T8);
        instr[3] = ins(R_X3, R_Z3, 1'b0, R_X2, R_Z2, 1'b1, R_T9);
      end
      2'd1: begin
        instr[0] = ins(R_T8, R_T9, 1'b0, R_T8, R_T9, 1'b0, R_X3);
        instr[1] = ins(R_T8, R_T9, 1'b1, R_T8, R_T9, 1'b1, R_Z3);
        instr[2] = ins(R_T6, S_ZERO, 1'b0, R_T7, S_ZERO, 1'b0, R_X2);
        instr[3] = ins(S_A,  S_ZERO, 1'b0, R_T6, R_T7,  1'b1, R_Z2);
      end
      2'd2: begin
        instr[0] = ins(R_X3, S_ZERO, 1'b0, R_Z1, S_ZERO, 1'b0, R_X3);
        instr[1] = ins(R_Z3, S_ZERO, 1'b0, R_X1, S_ZERO, 1'b0, R_Z3);
        instr[2] = ins(R_Z2, R_T6,  1'b0, R_T6, R_T7,  1'b1, R_Z2);
        last     = 1'b1;
      end
      default: ;
    endcase
  end
endmodule
