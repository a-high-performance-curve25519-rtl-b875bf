// ffau: Finite Field Arithmetic Unit.
//
// Computes (A +- B) x (C +- D) modulo the selected prime in one clock cycle
// (the unit is combinational; the result is captured by the register file).
//
// Curve25519 (mode448 = 0): four independent lanes. Lane j takes A, B on
// adder 2j and C, D on adder 2j+1 (lx/ly ports, 255 bits each), with the
// opsel bit of each adder choosing add or subtract. Mul256 j multiplies the
// two 256-bit sums and the reduction block returns r_lo[j] = result mod
// 2^255-19.
// Curve448 (mode448 = 1): one 448-bit instruction. A +- B is formed by
// Add255 #0 (low 255 bits) with Add193 #0 (high 193 bits, hx[0]/hy[0]),
// both under opsel[0]; C +- D by Add255 #2 with Add193 #1 (hx[1]/hy[1]),
// both under opsel[1]; the mux in front of Add255 #2 gives it opsel[1]
// instead of opsel[2] in this mode. The "signal concatenations and routing"
// stage joins each pair of slices into a 449-bit value X, Y (for a
// subtraction it also removes the 2^224 excess of the all-ones bias, so
// X = A - B + p), splits them at phi = 2^224, and feeds the four multipliers
// with x0*y0, x1*y0, x0*y1, x1*y1. The result is {r_hi, r_lo[0]} mod
// 2^448-2^224-1.
//
// Follows the paper's FFAU figure: 8 x Add255, 2 x Add193, 4 x Mul256 and
// the Unified Reduction Block, and the port widths printed there. Which adder
// pair serves C +- D in Curve448 mode, the bias scheme and the routing
// arithmetic are this design's reading of the figure. Operands must satisfy
// A, C < 2^255 (2^448) and B, D <= p (anything the register file holds does).
module ffau
  import ecc_pkg::*;
(
  input  logic            mode448,
  input  logic [W255-1:0] lx [8],
  input  logic [W255-1:0] ly [8],
  input  logic [7:0]      opsel,
  input  logic [WHI-1:0]  hx [2],
  input  logic [WHI-1:0]  hy [2],
  output logic [W255-1:0] r_lo [NLANE],
  output logic [WHI-1:0]  r_hi
);
  localparam logic [W255-1:0] B25  = W255'(P25519);
  localparam logic [W255-1:0] ONES = '1;

  logic [W255:0] ls [8];
  logic [WHI:0]  hs [2];
  logic [7:0]    sel;

  always_comb begin
    sel    = opsel;
    sel[2] = mode448 ? opsel[1] : opsel[2];   // opsel mux of Add255 #2
  end

  for (genvar i = 0; i < 8; i++) begin : g_add255
    addsub #(.W(W255)) u_add (
      .x(lx[i]), .y(ly[i]), .sub(sel[i]),
      .bias((mode448 && (i == 0 || i == 2)) ? ONES : B25),
      .out(ls[i]));
  end
  for (genvar i = 0; i < 2; i++) begin : g_add193
    addsub #(.W(WHI)) u_add (
      .x(hx[i]), .y(hy[i]), .sub(opsel[i]), .bias('1), .out(hs[i]));
  end

  // signal concatenations and routing
  logic [449:0] xw, yw;
  logic [255:0] mx [NLANE];
  logic [255:0] my [NLANE];
  always_comb begin
    xw = (450'(hs[0]) << 255) + 450'(ls[0]) - (opsel[0] ? (450'(1) << 224) : '0);
    yw = (450'(hs[1]) << 255) + 450'(ls[2]) - (opsel[1] ? (450'(1) << 224) : '0);
    for (int j = 0; j < NLANE; j++) begin
      mx[j] = ls[2*j];
      my[j] = ls[2*j+1];
    end
    if (mode448) begin
      mx[0] = 256'(xw[223:0]);   my[0] = 256'(yw[223:0]);
      mx[1] = 256'(xw[448:224]); my[1] = 256'(yw[223:0]);
      mx[2] = 256'(xw[223:0]);   my[2] = 256'(yw[448:224]);
      mx[3] = 256'(xw[448:224]); my[3] = 256'(yw[448:224]);
    end
  end

  logic [511:0] m [NLANE];
  for (genvar j = 0; j < NLANE; j++) begin : g_mul
    kara_mul #(.B(128)) u_mul (.x(mx[j]), .y(my[j]), .product(m[j]));
  end

  reduce_unit u_red (.mode448(mode448), .m(m), .r_lo(r_lo), .r_hi(r_hi));
endmodule
