// lut_c448_inv: C448 Inverter Control LUT.
//
// Fermat inversion Z2 <- Z2^(p-2), p = 2^448 - 2^224 - 1, as 447 squarings
// and 15 multiplications (462 multiplications, the count the paper gives),
// one per cycle on the FFAU as (s + 0) x (s' + 0). Entry format as in the
// Curve25519 inverter LUT: dst <- s1 * s2, then (rep - 1) squarings of dst.
// In binary p - 2 is 223 ones, a zero, 222 ones, a zero and a one, so with
// an = z^(2^n - 1):
//   a111 is built by the left-to-right binary method on 111 = 1101111b
//     (a2, a3, a6, a12, a13, a26, a27, a54, a55, a110, a111), where a doubling
//     is a2n = an^(2^n) * an and an increment is a(n+1) = an^2 * z;
//   a222 = a111^(2^111) * a111;  a223 = a222^2 * z;
//   Z2 = ((a223^(2^223) * a222)^4) * z.
// The paper gives only the count; this chain is this design's, chosen to
// match it. Register use: z stays in Z2 until the last entry overwrites it,
// X3 holds the running an, Z3 keeps a222, X1 is the scratch register; X2 is
// left untouched. Combinational.
module lut_c448_inv
  import ecc_pkg::*;
(
  input  logic [4:0] idx,
  output inv_entry_t e
);
  function automatic inv_entry_t en(src_t s1, src_t s2, src_t d, int unsigned n,
                                    logic l = 1'b0);
    return '{s1: s1, s2: s2, dst: d, rep: 8'(n), last: l};
  endfunction

  always_comb begin
    case (idx)
      5'd0:  e = en(R_Z2, R_Z2, R_X1, 1);
      5'd1:  e = en(R_X1, R_Z2, R_X3, 1);
      5'd2:  e = en(R_X3, R_X3, R_X1, 1);
      5'd3:  e = en(R_X1, R_Z2, R_X3, 1);
      5'd4:  e = en(R_X3, R_X3, R_X1, 3);
      5'd5:  e = en(R_X1, R_X3, R_X3, 1);
      5'd6:  e = en(R_X3, R_X3, R_X1, 6);
      5'd7:  e = en(R_X1, R_X3, R_X3, 1);
      5'd8:  e = en(R_X3, R_X3, R_X1, 1);
      5'd9:  e = en(R_X1, R_Z2, R_X3, 1);
      5'd10: e = en(R_X3, R_X3, R_X1, 13);
      5'd11: e = en(R_X1, R_X3, R_X3, 1);
      5'd12: e = en(R_X3, R_X3, R_X1, 1);
      5'd13: e = en(R_X1, R_Z2, R_X3, 1);
      5'd14: e = en(R_X3, R_X3, R_X1, 27);
      5'd15: e = en(R_X1, R_X3, R_X3, 1);
      5'd16: e = en(R_X3, R_X3, R_X1, 1);
      5'd17: e = en(R_X1, R_Z2, R_X3, 1);
      5'd18: e = en(R_X3, R_X3, R_X1, 55);
      5'd19: e = en(R_X1, R_X3, R_X3, 1);
      5'd20: e = en(R_X3, R_X3, R_X1, 1);
      5'd21: e = en(R_X1, R_Z2, R_X3, 1);
      5'd22: e = en(R_X3, R_X3, R_X1, 111);
      5'd23: e = en(R_X1, R_X3, R_Z3, 1);
      5'd24: e = en(R_Z3, R_Z3, R_X1, 1);
      5'd25: e = en(R_X1, R_Z2, R_X3, 1);
      5'd26: e = en(R_X3, R_X3, R_X1, 223);
      5'd27: e = en(R_X1, R_Z3, R_X1, 1);
      5'd28: e = en(R_X1, R_X1, R_X1, 2);
      5'd29: e = en(R_X1, R_Z2, R_Z2, 1, 1'b1);
      default: e = en(S_ZERO, S_ZERO, R_X1, 1, 1'b1);
    endcase
  end
endmodule
