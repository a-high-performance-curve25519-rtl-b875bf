// lut_c448_ladder: C448 Ladder Control LUT.
//
// On Curve448 the FFAU executes one (A +- B) x (C +- D) instruction per
// cycle, so the 11 restructured ladder instructions are issued one per step,
// in the order of the paper's figure:
//   0 T6 = (X2+Z2)(X2+Z2)   1 T7 = (X2-Z2)(X2-Z2)   2 T8 = (X3-Z3)(X2+Z2)
//   3 T9 = (X3+Z3)(X2-Z2)   4 X3 = (T8+T9)(T8+T9)   5 X3 = (X3+0)(Z1+0)
//   6 Z3 = (T8-T9)(T8-T9)   7 Z3 = (Z3+0)(X1+0)     8 X2 = (T6+0)(T7+0)
//   9 Z2 = (A+0)(T6-T7)    10 Z2 = (Z2+T6)(T6-T7)
// Step 5 multiplies by Z1, which is 1 unless the projective coordinates
// were randomized; it is flagged dpa_only and skipped when the
// countermeasure is off, giving the paper's 10 cycles per ladder (11 with
// the countermeasure). Which instruction is skipped is this design's reading
// of those two numbers. Register names are those of the k_i = 0 branch.
// Combinational.
module lut_c448_ladder
  import ecc_pkg::*;
(
  input  logic [3:0]  step,
  output lane_instr_t instr,
  output logic        dpa_only,
  output logic        last
);
  function automatic lane_instr_t ins(src_t a, src_t b, logic sab,
                                      src_t c, src_t d, logic scd, src_t dst);
    return '{a: a, b: b, c: c, d: d, sub_ab: sab, sub_cd: scd, wmask: onehot(dst)};
  endfunction

  always_comb begin
    dpa_only = 1'b0;
    last     = 1'b0;
    case (step)
      4'd0:  instr = ins(R_X2, R_Z2,  1'b0, R_X2, R_Z2,  1'b0, R_T6);
      4'd1:  instr = ins(R_X2, R_Z2,  1'b1, R_X2, R_Z2,  1'b1, R_T7);
      4'd2:  instr = ins(R_X3, R_Z3,  1'b1, R_X2, R_Z2,  1'b0, R_T8);
      4'd3:  instr = ins(R_X3, R_Z3,  1'b0, R_X2, R_Z2,  1'b1, R_T9);
      4'd4:  instr = ins(R_T8, R_T9,  1'b0, R_T8, R_T9,  1'b0, R_X3);
      4'd5:  begin
               instr = ins(R_X3, S_ZERO, 1'b0, R_Z1, S_ZERO, 1'b0, R_X3);
               dpa_only = 1'b1;
             end
      4'd6:  instr = ins(R_T8, R_T9,  1'b1, R_T8, R_T9,  1'b1, R_Z3);
      4'd7:  instr = ins(R_Z3, S_ZERO, 1'b0, R_X1, S_ZERO, 1'b0, R_Z3);
      4'd8:  instr = ins(R_T6, S_ZERO, 1'b0, R_T7, S_ZERO, 1'b0, R_X2);
      4'd9:  instr = ins(S_A,  S_ZERO, 1'b0, R_T6, R_T7,  1'b1, R_Z2);
      4'd10: begin
               instr = ins(R_Z2, R_T6, 1'b0, R_T6, R_T7, 1'b1, R_Z2);
               last  = 1'b1;
             end
      default: instr = NOP;
    endcase
  end
endmodule
