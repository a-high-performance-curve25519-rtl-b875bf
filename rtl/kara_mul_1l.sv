// kara_mul_1l: one-level 2b x 2b Karatsuba multiplier (the paper's Mul128 at
// the default B = 64), the building block of the second Karatsuba level.
//
// Same structure as kara_mul (Add_b, Mul_b, CSA_b, MulAdd_b), but the three
// b x b products are plain multiplications. Purely combinational;
// product = x * y exactly.
module kara_mul_1l #(
  parameter int unsigned B = 64
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
  assign p00 = x[B-1:0] * y[B-1:0];
  assign p11 = x[2*B-1:B] * y[2*B-1:B];
  assign pss = sx[B-1:0] * sy[B-1:0];

  kara_csa #(.B(B)) u_csa (.p00(p00), .p11(p11), .c(c), .s(s));

  kara_muladd #(.B(B)) u_muladd (
    .sx(sx), .sy(sy), .plo(pss), .s(s), .c(c), .product(product));
endmodule
