// kara_mul: 2b x 2b-bit Karatsuba multiplier (the paper's Mul_2b; Mul256 at
// the default B = 128).
//
// X = x1*2^b + x0 and Y = y1*2^b + y0. Two Add_b adders form x0+x1 and
// y0+y1, two Mul_b multipliers form x0*y0 and x1*y1, the CSA_b block
// (kara_csa) folds those into c and s, and MulAdd_b (kara_muladd) multiplies
// the two sums and adds s; the b x b core of that multiplication is the third
// sub-multiplier instantiated here. Three b x b products replace four. Every
// b x b product is again a one-level Karatsuba multiplier of half size
// (kara_mul_1l), so Mul256 contains Mul128 units which contain 64 x 64
// products: the two Karatsuba levels the paper describes. Structure and
// widths follow the paper's multiplier figure.
// Purely combinational; product = x * y exactly.
module kara_mul #(
  parameter int unsigned B = 128
) (
  input  logic [2*B-1:0] x,
  input  logic [2*B-1:0] y,
  output logic [4*B-1:0] product
);
  logic [B:0]     sx, sy;
  logic [2*B-1:0] p00, p11, pss;
  logic [B-1:0]   c;
  logic [3*B-1:0] s;

  // Add_b
  assign sx = {1'b0, x[B-1:0]} + {1'b0, x[2*B-1:B]};
  assign sy = {1'b0, y[B-1:0]} + {1'b0, y[2*B-1:B]};

  // Mul_b (x0*y0, x1*y1) and the b x b core of MulAdd_b
  kara_mul_1l #(.B(B/2)) u_m00 (.x(x[B-1:0]),   .y(y[B-1:0]),   .product(p00));
  kara_mul_1l #(.B(B/2)) u_m11 (.x(x[2*B-1:B]), .y(y[2*B-1:B]), .product(p11));
  kara_mul_1l #(.B(B/2)) u_mss (.x(sx[B-1:0]),  .y(sy[B-1:0]),  .product(pss));

  kara_csa #(.B(B)) u_csa (.p00(p00), .p11(p11), .c(c), .s(s));

  kara_muladd #(.B(B)) u_muladd (
    .sx(sx), .sy(sy), .plo(pss), .s(s), .c(c), .product(product));
endmodule
