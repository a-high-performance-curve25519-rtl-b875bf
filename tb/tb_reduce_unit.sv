// tb_reduce_unit: checks the Unified Reduction Block. Curve25519 mode: four
// random 512-bit products (including the largest, (2^256-1)^2) must come
// back as the canonical residues mod 2^255-19. Curve448 mode: the four
// partial products of random X, Y < 2^449 split at 2^224 must give
// X * Y mod 2^448-2^224-1. Expected values use the % operator.
module tb_reduce_unit;
  import ecc_pkg::*;
  logic         mode448;
  logic [511:0] m [NLANE];
  logic [254:0] r_lo [NLANE];
  logic [192:0] r_hi;
  int checks = 0, failures = 0;

  reduce_unit dut (.mode448(mode448), .m(m), .r_lo(r_lo), .r_hi(r_hi));

  function automatic logic [511:0] rnd(int bits);
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom;
    return v & ((512'd1 << bits) - 1);
  endfunction

  initial begin
    mode448 = 1'b0;
    for (int n = 0; n < 300; n++) begin
      for (int j = 0; j < NLANE; j++) m[j] = rnd(512);
      if (n == 0) m[0] = ((512'd1 << 256) - 1) * ((512'd1 << 256) - 1);
      if (n == 0) m[1] = '1;
      if (n == 1) m[2] = 512'(P25519);
      #1;
      for (int j = 0; j < NLANE; j++) begin
        checks++;
        if (512'(r_lo[j]) != m[j] % 512'(P25519)) begin
          failures++; $display("FAIL 25519 lane %0d: m=%h r=%h", j, m[j], r_lo[j]);
        end
      end
    end
    mode448 = 1'b1;
    for (int n = 0; n < 300; n++) begin
      logic [448:0] X, Y;
      logic [1023:0] prod;
      X = 449'(rnd(449)); Y = 449'(rnd(449));
      if (n == 0) begin X = 449'(2 * P448 - 1); Y = 449'(2 * P448 - 1); end
      if (n == 1) begin X = 449'(P448); Y = 449'd5; end
      m[0] = 512'(X[223:0]) * 512'(Y[223:0]);
      m[1] = 512'(X[448:224]) * 512'(Y[223:0]);
      m[2] = 512'(X[223:0]) * 512'(Y[448:224]);
      m[3] = 512'(X[448:224]) * 512'(Y[448:224]);
      #1;
      prod = 1024'(X) * 1024'(Y);
      checks++;
      if (1024'({r_hi, r_lo[0]}) != prod % 1024'(P448)) begin
        failures++; $display("FAIL 448: X=%h Y=%h r=%h", X, Y, {r_hi, r_lo[0]});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
