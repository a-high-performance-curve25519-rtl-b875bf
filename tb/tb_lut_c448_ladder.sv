// tb_lut_c448_ladder: executes the eleven steps of the Curve448 ladder LUT
// one after another on a register model with big-integer arithmetic mod
// 2^448-2^224-1, for random coordinates, and compares the result with the
// textbook Montgomery-ladder step:
//   X2' = (X2+Z2)^2 (X2-Z2)^2,   Z2' = E ((X2+Z2)^2 + 39081 E),
//   E = (X2+Z2)^2 - (X2-Z2)^2,
//   X3' = Z1 (DA + CB)^2,        Z3' = X1 (DA - CB)^2,
//   DA = (X3-Z3)(X2+Z2),         CB = (X3+Z3)(X2-Z2).
// Runs with Z1 = 1 skip the step flagged dpa_only (as the controller does
// without the countermeasure) and must still match. Also checks that last
// marks step 10 only and dpa_only step 5 only.
module tb_lut_c448_ladder;
  import ecc_pkg::*;
  logic [3:0]  step;
  lane_instr_t instr;
  logic        last, dpa_only;
  int checks = 0, failures = 0;
  localparam logic [1023:0] P = 1024'(P448);

  lut_c448_ladder dut (.step(step), .instr(instr), .dpa_only(dpa_only), .last(last));

  logic [1023:0] r [15];

  function automatic logic [1023:0] rd(src_t s);
    if (s == S_ZERO) return '0;
    if (s == S_ONE)  return 1024'd1;
    if (s == S_A)    return 1024'd39081;
    return r[s];
  endfunction

  function automatic logic [1023:0] rnd();
    logic [1023:0] v;
    v = '0;
    for (int i = 0; i < 15; i++) v[i*32 +: 32] = $urandom;
    return v % P;
  endfunction

  initial begin
    for (int n = 0; n < 50; n++) begin
      logic [1023:0] x1, z1, x2, z2, x3, z3, A, B, AA, BB, E, C, D, DA, CB;
      bit skip;
      x1 = rnd(); z1 = rnd(); x2 = rnd(); z2 = rnd(); x3 = rnd(); z3 = rnd();
      for (int i = 0; i < 15; i++) r[i] = rnd();
      r[R_X1] = x1; r[R_Z1] = z1; r[R_X2] = x2; r[R_Z2] = z2; r[R_X3] = x3; r[R_Z3] = z3;
      skip = n[0];       // odd runs: Z1 = 1 and the dpa_only step skipped
      if (skip) begin z1 = 1024'd1; r[R_Z1] = z1; end
      for (int s = 0; s < 11; s++) begin
        step = 4'(s);
        #1;
        checks += 2;
        if (last != (s == 10)) begin failures++; $display("FAIL last at step %0d", s); end
        if (dpa_only != (s == 5)) begin failures++; $display("FAIL dpa_only at step %0d", s); end
        if (!(skip && dpa_only)) begin
          logic [1023:0] u, v, res;
          u = instr.sub_ab ? (rd(instr.a) + P - rd(instr.b)) % P : (rd(instr.a) + rd(instr.b)) % P;
          v = instr.sub_cd ? (rd(instr.c) + P - rd(instr.d)) % P : (rd(instr.c) + rd(instr.d)) % P;
          res = (u * v) % P;
          for (int i = 0; i < NREG; i++) if (instr.wmask[i]) r[i] = res;
        end
      end
      A = (x2 + z2) % P; AA = A * A % P; B = (x2 + P - z2) % P; BB = B * B % P;
      E = (AA + P - BB) % P; C = (x3 + z3) % P; D = (x3 + P - z3) % P;
      DA = D * A % P; CB = C * B % P;
      checks += 4;
      if (r[R_X2] != AA * BB % P) begin failures++; $display("FAIL X2"); end
      if (r[R_Z2] != E * ((AA + 39081 * E) % P) % P) begin failures++; $display("FAIL Z2"); end
      if (r[R_X3] != z1 * (((DA + CB) % P) * ((DA + CB) % P) % P) % P) begin failures++; $display("FAIL X3"); end
      if (r[R_Z3] != x1 * (((DA + P - CB) % P) * ((DA + P - CB) % P) % P) % P) begin failures++; $display("FAIL Z3"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
