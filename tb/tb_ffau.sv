// tb_ffau: checks the finite field arithmetic unit in both modes.
// Curve25519: four lanes of random (A +- B) x (C +- D) with random opsel
// bits, A, C < 2^255 and B, D < p (plus corner cases B = p - 1, A = 0),
// against the same expression evaluated with % on wide integers.
// Curve448: one random 448-bit (A +- B) x (C +- D) per vector, operands
// routed as the accelerator routes them (A, B on adder 0 / Add193 #0,
// C, D on adder 2 / Add193 #1, opsel[0] and opsel[1]), all four sign
// combinations included.
module tb_ffau;
  import ecc_pkg::*;
  logic            mode448;
  logic [254:0]    lx [8];
  logic [254:0]    ly [8];
  logic [7:0]      opsel;
  logic [192:0]    hx [2];
  logic [192:0]    hy [2];
  logic [254:0]    r_lo [NLANE];
  logic [192:0]    r_hi;
  int checks = 0, failures = 0;

  ffau dut (.*);

  function automatic logic [447:0] rnd(input logic [447:0] lim);
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom;
    return 448'(v % 512'(lim));
  endfunction

  function automatic logic [1023:0] ev(input logic [447:0] a, b, c, d,
                                       input logic sab, scd, input logic [447:0] p);
    logic [1023:0] s1, s2;
    s1 = sab ? 1024'(a) + 1024'(p) - 1024'(b) : 1024'(a) + 1024'(b);
    s2 = scd ? 1024'(c) + 1024'(p) - 1024'(d) : 1024'(c) + 1024'(d);
    return (s1 * s2) % 1024'(p);
  endfunction

  initial begin
    for (int i = 0; i < 2; i++) begin hx[i] = '0; hy[i] = '0; end
    mode448 = 1'b0;
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 8; i++) begin
        lx[i] = 255'(rnd((448'd1 << 255)));
        ly[i] = 255'(rnd(P25519));
      end
      opsel = 8'($urandom);
      if (n == 0) begin lx[0] = '0; ly[0] = 255'(P25519 - 1); opsel[0] = 1'b1; end
      if (n == 1) begin lx[1] = '1; ly[1] = 255'(P25519 - 1); opsel[1] = 1'b0; end
      #1;
      for (int j = 0; j < NLANE; j++) begin
        checks++;
        if (1024'(r_lo[j]) != ev(448'(lx[2*j]), 448'(ly[2*j]), 448'(lx[2*j+1]),
                                 448'(ly[2*j+1]), opsel[2*j], opsel[2*j+1], P25519)) begin
          failures++; $display("FAIL 25519 lane %0d", j);
        end
      end
    end
    mode448 = 1'b1;
    for (int n = 0; n < 200; n++) begin
      logic [447:0] a, b, c, d;
      a = rnd(P448); b = rnd(P448); c = rnd(P448); d = rnd(P448);
      if (n == 0) begin a = '0; b = P448 - 1; c = '0; d = P448 - 1; end
      if (n == 1) begin a = P448 - 1; b = P448 - 1; c = P448 - 1; d = 448'd0; end
      for (int i = 0; i < 8; i++) begin lx[i] = 255'($urandom); ly[i] = 255'($urandom); end
      lx[0] = a[254:0]; ly[0] = b[254:0]; hx[0] = a[447:255]; hy[0] = b[447:255];
      lx[2] = c[254:0]; ly[2] = d[254:0]; hx[1] = c[447:255]; hy[1] = d[447:255];
      opsel = 8'($urandom);
      if (n < 4) opsel[1:0] = 2'(n);
      #1;
      checks++;
      if (1024'({r_hi, r_lo[0]}) != ev(a, b, c, d, opsel[0], opsel[1], P448)) begin
        failures++; $display("FAIL 448 n=%0d opsel=%b", n, opsel[1:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
