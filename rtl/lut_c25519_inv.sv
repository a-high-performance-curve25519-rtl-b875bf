// lut_c25519_inv: C25519 Inverter Control LUT.
//
// Fermat inversion Z2 <- Z2^(p-2), p = 2^255 - 19, as an addition chain of
// 254 squarings and 11 multiplications (265 multiplications, the count the
// paper gives), one per clock cycle on FFAU lane 0 as (s + 0) x (s' + 0).
// Each entry means: dst <- s1 * s2, then (rep - 1) squarings dst <- dst^2,
// so the 265 operations are held in 22 entries. Using z^(2^n - 1) = zn:
//   z2 = z^2; t = z2^4; z9 = t*z; z11 = z9*z2; t = z11^2; z5 = t*z9;
//   t = z5^(2^5); z10 = t*z5; t = z10^(2^10); z20 = t*z10; t = z20^(2^20);
//   t = t*z20; t = t^(2^10); z50 = t*z10; t = z50^(2^50); z100 = t*z50;
//   t = z100^(2^100); t = t*z100; t = t^(2^50); t = t*z50; t = t^(2^5);
//   Z2 = t*z11
// The chain is the well-known one for this prime; the paper only gives the
// operation count. The run-length entry format is this design's. Registers
// X2 and Z2's own input are the only ones that must survive; the others,
// free after the ladder, hold the intermediates. Combinational.
module lut_c25519_inv
  import ecc_pkg::*;
(
  input  logic [4:0] idx,
  output inv_entry_t e
);
  localparam src_t Z = R_Z2, T = R_X1, Z2S = R_X3, Z9 = R_Z3, Z11 = R_T6,
                   Z5 = R_T7, Z10 = R_T8, Z20 = R_T9, Z50 = R_10, Z100 = R_11;

  function automatic inv_entry_t en(src_t s1, src_t s2, src_t d, int unsigned n,
                                    logic l = 1'b0);
    return '{s1: s1, s2: s2, dst: d, rep: 8'(n), last: l};
  endfunction

  always_comb begin
    case (idx)
      5'd0:  e = en(Z,    Z,    Z2S,  1);
      5'd1:  e = en(Z2S,  Z2S,  T,    2);
      5'd2:  e = en(T,    Z,    Z9,   1);
      5'd3:  e = en(Z9,   Z2S,  Z11,  1);
      5'd4:  e = en(Z11,  Z11,  T,    1);
      5'd5:  e = en(T,    Z9,   Z5,   1);
      5'd6:  e = en(Z5,   Z5,   T,    5);
      5'd7:  e = en(T,    Z5,   Z10,  1);
      5'd8:  e = en(Z10,  Z10,  T,    10);
      5'd9:  e = en(T,    Z10,  Z20,  1);
      5'd10: e = en(Z20,  Z20,  T,    20);
      5'd11: e = en(T,    Z20,  T,    1);
      5'd12: e = en(T,    T,    T,    10);
      5'd13: e = en(T,    Z10,  Z50,  1);
      5'd14: e = en(Z50,  Z50,  T,    50);
      5'd15: e = en(T,    Z50,  Z100, 1);
      5'd16: e = en(Z100, Z100, T,    100);
      5'd17: e = en(T,    Z100, T,    1);
      5'd18: e = en(T,    T,    T,    50);
      5'd19: e = en(T,    Z50,  T,    1);
      5'd20: e = en(T,    T,    T,    5);
      5'd21: e = en(T,    Z11,  Z,    1, 1'b1);
      default: e = en(S_ZERO, S_ZERO, R_X1, 1, 1'b1);
    endcase
  end
endmodule
