// tb_lut_c25519_ladder: executes the three steps of the Curve25519 ladder
// LUT on a register model (all four lanes of a step read the old values and
// write at the end of the step, as in the hardware) with big-integer
// arithmetic mod 2^255-19, for random coordinates, and compares the result
// with the textbook Montgomery-ladder step:
//   X2' = (X2+Z2)^2 (X2-Z2)^2,   Z2' = E ((X2+Z2)^2 + 121665 E),
//   E = (X2+Z2)^2 - (X2-Z2)^2,
//   X3' = Z1 (DA + CB)^2,        Z3' = X1 (DA - CB)^2,
//   DA = (X3-Z3)(X2+Z2),         CB = (X3+Z3)(X2-Z2).
// Also checks that last marks step 2 only and that no two lanes of a step
// write the same register.
module tb_lut_c25519_ladder;
  import ecc_pkg::*;
  logic [1:0]  step;
  lane_instr_t instr [NLANE];
  logic        last;
  int checks = 0, failures = 0;
  localparam logic [1023:0] P = 1024'(P25519);

  lut_c25519_ladder dut (.step(step), .instr(instr), .last(last));

  logic [1023:0] r [15];

  function automatic logic [1023:0] rd(src_t s);
    if (s == S_ZERO) return '0;
    if (s == S_ONE)  return 1024'd1;
    if (s == S_A)    return 1024'd121665;
    return r[s];
  endfunction

  function automatic logic [1023:0] rnd();
    logic [1023:0] v;
    v = '0;
    for (int i = 0; i < 9; i++) v[i*32 +: 32] = $urandom;
    return v % P;
  endfunction

  initial begin
    for (int n = 0; n < 50; n++) begin
      logic [1023:0] x1, z1, x2, z2, x3, z3, A, B, AA, BB, E, C, D, DA, CB;
      logic [1023:0] nr [15];
      x1 = rnd(); z1 = rnd(); x2 = rnd(); z2 = rnd(); x3 = rnd(); z3 = rnd();
      for (int i = 0; i < 15; i++) r[i] = rnd();
      r[R_X1] = x1; r[R_Z1] = z1; r[R_X2] = x2; r[R_Z2] = z2; r[R_X3] = x3; r[R_Z3] = z3;
      for (int s = 0; s < 3; s++) begin
        wmask_t used;
        step = 2'(s);
        #1;
        checks++;
        if (last != (s == 2)) begin failures++; $display("FAIL last at step %0d", s); end
        nr = r;
        used = '0;
        for (int j = 0; j < NLANE; j++) begin
          logic [1023:0] u, v, res;
          u = instr[j].sub_ab ? (rd(instr[j].a) + P - rd(instr[j].b)) % P : (rd(instr[j].a) + rd(instr[j].b)) % P;
          v = instr[j].sub_cd ? (rd(instr[j].c) + P - rd(instr[j].d)) % P : (rd(instr[j].c) + rd(instr[j].d)) % P;
          res = (u * v) % P;
          checks++;
          if ((used & instr[j].wmask) != '0) begin failures++; $display("FAIL write clash step %0d", s); end
          used |= instr[j].wmask;
          for (int i = 0; i < NREG; i++) if (instr[j].wmask[i]) nr[i] = res;
        end
        r = nr;
      end
      A = (x2 + z2) % P; AA = A * A % P; B = (x2 + P - z2) % P; BB = B * B % P;
      E = (AA + P - BB) % P; C = (x3 + z3) % P; D = (x3 + P - z3) % P;
      DA = D * A % P; CB = C * B % P;
      checks += 4;
      if (r[R_X2] != AA * BB % P) begin failures++; $display("FAIL X2"); end
      if (r[R_Z2] != E * ((AA + 121665 * E) % P) % P) begin failures++; $display("FAIL Z2"); end
      if (r[R_X3] != z1 * (((DA + CB) % P) * ((DA + CB) % P) % P) % P) begin failures++; $display("FAIL X3"); end
      if (r[R_Z3] != x1 * (((DA + P - CB) % P) * ((DA + P - CB) % P) % P) % P) begin failures++; $display("FAIL Z3"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
