// kreg: the 448-bit k-reg that holds the secret scalar k.
//
// load copies k in; every shift moves it one place towards the MSB, so the
// ladder always reads the current scalar bit from a fixed position: bit 254
// for Curve25519 (t = 255 iterations) and bit 447 for Curve448 (t = 448),
// scanning k from k_(t-1) down to k_0 as in the Montgomery ladder. The width
// is the paper's; the shift-register form is this design's choice.
// Synchronous, active-high reset. kbit is combinational from the register.
module kreg
  import ecc_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  input  logic            load,
  input  logic [W448-1:0] k,
  input  logic            shift,
  input  logic            curve448,
  output logic            kbit
);
  logic [W448-1:0] q;
  always_ff @(posedge clk) begin
    if (rst)        q <= '0;
    else if (load)  q <= k;
    else if (shift) q <= q << 1;
  end
  assign kbit = curve448 ? q[W448-1] : q[T25519-1];
endmodule
