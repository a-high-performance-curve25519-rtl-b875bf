// addsub: the Add255 / Add193 adder-subtractor of the finite field arithmetic
// unit (FFAU).
//
// out = x + y            when sub = 0
// out = x + bias - y     when sub = 1
//
// The result is one bit wider than the operands and is not reduced; the
// multiplier that follows accepts the (W+1)-bit value and the reduction block
// after it brings the product back into the field. The bias makes a
// subtraction non-negative: for Curve25519 it is the prime 2^255-19, for the
// two slices of a 448-bit Curve448 subtraction it is all ones (so x + bias - y
// is x + ~y), and the FFAU removes the excess afterwards.
// The paper names Add255 and Add193 and their widths (255/256 and 193/194 in
// its FFAU figure) and the opsel line that selects add or subtract; the bias
// scheme is this design's choice. Purely combinational.
module addsub #(
  parameter int unsigned W = 255
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic         sub,    // opsel: 0 add, 1 subtract
  input  logic [W-1:0] bias,
  output logic [W:0]   out
);
  always_comb begin
    if (sub) out = {1'b0, x} + {1'b0, bias} - {1'b0, y};
    else     out = {1'b0, x} + {1'b0, y};
  end
endmodule
