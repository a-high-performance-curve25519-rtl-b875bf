// kara_csa: the CSA_b block of a 2b x 2b Karatsuba multiplier.
//
// From the two half products x0*y0 and x1*y1 (2b bits each) it forms
//   c = low b bits of x0*y0, which are already final bits of the product, and
//   s = x1*y1 * 2^b + (x0*y0 >> b) - x0*y0 - x1*y1   (mod 2^3b),
// so that the full product is {(x0+x1)*(y0+y1) + s, c}. The three-operand
// sum is built the way the paper's name for the block says: one 3:2
// carry-save compressor layer followed by a single carry-propagate adder.
// The widths b and 3b of c and s are printed in the paper's figure; the
// two's-complement folding of the two subtractions is this design's choice.
// Purely combinational. c is a plain copy of input bits p00[b-1:0]; a
// synthesis report therefore lists it as an output wired to an input, which
// is intended.
module kara_csa #(
  parameter int unsigned B = 128
) (
  input  logic [2*B-1:0] p00,   // x0*y0
  input  logic [2*B-1:0] p11,   // x1*y1
  output logic [B-1:0]   c,
  output logic [3*B-1:0] s
);
  logic [3*B-1:0] o1, o2, o3, sv, cv;
  always_comb begin
    o1 = {p11, p00[2*B-1:B]};
    o2 = ~{{B{1'b0}}, p00};          // -p00 - 1
    o3 = ~{{B{1'b0}}, p11};          // -p11 - 1
    sv = o1 ^ o2 ^ o3;               // 3:2 compressor, sum
    cv = (o1 & o2) | (o1 & o3) | (o2 & o3); // carry (top bit drops out mod 2^3b)
    s  = sv + {cv[3*B-2:0], 1'b0} + (3*B)'(2);
    c  = p00[B-1:0];
  end
endmodule
