// reduce_unit: the Unified Reduction Block of the FFAU.
//
// Curve25519 mode (mode448 = 0): each of the four 512-bit products m[j] is
// reduced modulo p = 2^255 - 19 on its own, using 2^255 = 19 (mod p):
//   v1 = m[254:0] + 19 * (m >> 255)        (< 2^263)
//   v2 = v1[254:0] + 19 * (v1 >> 255)      (< 2^255 + 2^13)
//   r  = v2 >= p ? v2 - p : v2             (canonical, < p)
// Curve448 mode (mode448 = 1): the four products are the partial products
// of a 448-bit multiplication split at phi = 2^224,
//   m[0] = x0*y0, m[1] = x1*y0, m[2] = x0*y1, m[3] = x1*y1,
// and the block first applies phi^2 = phi + 1 (mod p):
//   c_lo = x1*y1 + x0*y0,  c_hi = x1*y0 + x0*y1 + x1*y1,
//   v = c_hi * 2^224 + c_lo,
// then folds with 2^448 = 2^224 + 1 (mod p = 2^448 - 2^224 - 1) three times
// and subtracts p once if needed. The 448-bit result is {r_hi, r_lo[0]}.
// All results are canonical (less than p). Purely combinational.
//
// The paper states the reduction approach (shift-and-add reduction for both
// primes, four parallel Curve25519 reductions, adders shared between the
// curves) but not the circuit. The fold sequence and bounds above are this
// design's; the adders of the two modes are written separately here rather
// than shared. The paper prints the phi coefficient as
// a1*b0 + a0*b1 + a0*b0; the algebra of phi^2 = phi + 1 gives a1*b1 in place
// of a0*b0, and that is what is built.
module reduce_unit
  import ecc_pkg::*;
(
  input  logic                 mode448,
  input  logic [511:0]         m [NLANE],
  output logic [W255-1:0]      r_lo [NLANE],
  output logic [WHI-1:0]       r_hi
);
  localparam logic [255:0] P25 = 256'(P25519);
  localparam logic [448:0] P44 = 449'(P448);

  function automatic logic [254:0] red25519(input logic [511:0] x);
    logic [262:0] v1;
    logic [255:0] v2;
    v1 = 263'(x[254:0]) + 263'(x[511:255]) * 263'd19;
    v2 = 256'(v1[254:0]) + 256'(v1[262:255]) * 256'd19;
    if (v2 >= P25) v2 = v2 - P25;
    return v2[254:0];
  endfunction

  logic [450:0] c_lo, c_hi;
  logic [675:0] v;
  logic [452:0] f1;
  logic [448:0] f2, f3;
  logic [447:0] r448;

  always_comb begin
    c_lo = 451'(m[3]) + 451'(m[0]);
    c_hi = 451'(m[1]) + 451'(m[2]) + 451'(m[3]);
    v    = (676'(c_hi) << 224) + 676'(c_lo);
    // fold 1: v = h*2^448 + l  ->  l + h + h*2^224
    f1 = 453'(v[447:0]) + 453'(v[675:448]) + (453'(v[675:448]) << 224);
    // fold 2
    f2 = 449'(f1[447:0]) + 449'(f1[452:448]) + (449'(f1[452:448]) << 224);
    // fold 3 (f2 >> 448 is 0 or 1)
    f3 = 449'(f2[447:0]) + 449'(f2[448]) + (449'(f2[448]) << 224);
    if (f3 >= P44) f3 = f3 - P44;
    r448 = f3[447:0];

    for (int j = 0; j < NLANE; j++) r_lo[j] = red25519(m[j]);
    r_hi = '0;
    if (mode448) begin
      r_lo[0] = r448[254:0];
      r_hi    = r448[447:255];
    end
  end
endmodule
