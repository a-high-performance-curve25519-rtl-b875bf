// kara_muladd: the MulAdd_b block of a 2b x 2b Karatsuba multiplier.
//
// product = {(sx * sy + s) mod 2^3b, c}, where sx = x0+x1 and sy = y0+y1 are
// (b+1)-bit sums and s, c come from the CSA block. The (b+1) x (b+1)
// multiplication is split into the b x b product of the low bits, plo, plus
// the terms of the two top bits. plo is computed by the b x b multiplier that
// the enclosing kara_mul places next to this block (a half-size Karatsuba
// multiplier at the second level, a plain product at the last level), so the
// multiplier the paper puts inside MulAdd_b sits one level up in the
// hierarchy; the arithmetic is the same. Purely combinational.
module kara_muladd #(
  parameter int unsigned B = 128
) (
  input  logic [B:0]     sx,
  input  logic [B:0]     sy,
  input  logic [2*B-1:0] plo,   // sx[B-1:0] * sy[B-1:0]
  input  logic [3*B-1:0] s,
  input  logic [B-1:0]   c,
  output logic [4*B-1:0] product
);
  logic [3*B-1:0] mid;
  always_comb begin
    mid = (3*B)'(plo);
    if (sx[B]) mid = mid + ((3*B)'(sy[B-1:0]) << B);
    if (sy[B]) mid = mid + ((3*B)'(sx[B-1:0]) << B);
    if (sx[B] && sy[B]) mid = mid + ((3*B)'(1) << (2*B));
    product = {mid + s, c};
  end
endmodule
