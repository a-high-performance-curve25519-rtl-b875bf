// tb_controller: checks the controller's decode against the instruction
// lists of the restructured ladder and the phase table:
//   LOAD writes, RAND1/RAND2 and FINAL instructions;
//   Curve25519 ladder steps 0-2 for k_i = 0 and the same steps with
//   (X2,Z2) <-> (X3,Z3) swapped for k_i = 1, including the opsel pattern;
//   Curve448 ladder: only lane 0 active, the skip request before the Z1 step
//   only when the countermeasure is off, lad_last at step 10;
//   inverter entries: (s1+0)(s2+0) on the first repetition and
//   (dst+0)(dst+0) on the others, for both curves' first entries.
module tb_controller;
  import ecc_pkg::*;
  phase_e     phase;
  logic       curve448, secure, kbit, inv_first;
  logic [3:0] step;
  logic [4:0] inv_idx;
  src_t       raddr [16];
  logic [7:0] opsel;
  wmask_t     wmask [NLANE];
  logic       load_sel, lad_last, lad_skip_next, inv_last;
  logic [7:0] inv_rep;
  int checks = 0, failures = 0;

  controller dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic wmask_t m(src_t r);
    return wmask_t'(1) << r;
  endfunction

  // expected lane-0..3 sources of a step: {a,b,c,d} per lane
  task automatic lane(input int j, input src_t a, b, c, d, input logic sab, scd,
                      input wmask_t w, input string s);
    chk(raddr[4*j] == a && raddr[4*j+1] == b && raddr[4*j+2] == c && raddr[4*j+3] == d,
        $sformatf("%s lane %0d sources %0d %0d %0d %0d", s, j, raddr[4*j], raddr[4*j+1],
                  raddr[4*j+2], raddr[4*j+3]));
    chk(opsel[2*j] == sab && opsel[2*j+1] == scd, $sformatf("%s lane %0d opsel", s, j));
    chk(wmask[j] == w, $sformatf("%s lane %0d wmask %b", s, j, wmask[j]));
  endtask

  initial begin
    curve448 = 1'b0; secure = 1'b0; kbit = 1'b0; inv_first = 1'b1; step = '0; inv_idx = '0;
    phase = PH_LOAD; #1;
    chk(load_sel, "load_sel");
    chk(wmask[0] == (m(R_X1) | m(R_X3)) && wmask[1] == (m(R_X2) | m(R_Z1) | m(R_Z3)) &&
        wmask[2] == m(R_Z2) && wmask[3] == '0, "LOAD masks");
    phase = PH_RAND1; #1;
    lane(0, R_11, S_ZERO, S_ONE, S_ZERO, 0, 0, m(R_X2) | m(R_Z1) | m(R_Z3), "RAND1");
    chk(!load_sel, "load_sel outside LOAD");
    phase = PH_RAND2; #1;
    lane(0, R_11, S_ZERO, R_X1, S_ZERO, 0, 0, m(R_X1) | m(R_X3), "RAND2");
    phase = PH_FINAL; #1;
    lane(0, R_X2, S_ZERO, R_Z2, S_ZERO, 0, 0, m(R_X2), "FINAL");

    for (int kb = 0; kb < 2; kb++) begin
      src_t x2, z2, x3, z3;
      kbit = 1'(kb);
      x2 = kb ? R_X3 : R_X2; z2 = kb ? R_Z3 : R_Z2;
      x3 = kb ? R_X2 : R_X3; z3 = kb ? R_Z2 : R_Z3;
      phase = PH_LADDER; curve448 = 1'b0;
      step = 4'd0; #1;
      lane(0, x2, z2, x2, z2, 0, 0, m(R_T6), "25519 s0");
      lane(1, x2, z2, x2, z2, 1, 1, m(R_T7), "25519 s0");
      lane(2, x3, z3, x2, z2, 1, 0, m(R_T8), "25519 s0");
      lane(3, x3, z3, x2, z2, 0, 1, m(R_T9), "25519 s0");
      chk(!lad_last, "25519 last at s0");
      step = 4'd1; #1;
      lane(0, R_T8, R_T9, R_T8, R_T9, 0, 0, m(x3), "25519 s1");
      lane(1, R_T8, R_T9, R_T8, R_T9, 1, 1, m(z3), "25519 s1");
      lane(2, R_T6, S_ZERO, R_T7, S_ZERO, 0, 0, m(x2), "25519 s1");
      lane(3, S_A, S_ZERO, R_T6, R_T7, 0, 1, m(z2), "25519 s1");
      step = 4'd2; #1;
      lane(0, x3, S_ZERO, R_Z1, S_ZERO, 0, 0, m(x3), "25519 s2");
      lane(1, z3, S_ZERO, R_X1, S_ZERO, 0, 0, m(z3), "25519 s2");
      lane(2, z2, R_T6, R_T6, R_T7, 0, 1, m(z2), "25519 s2");
      chk(wmask[3] == '0 && lad_last, "25519 s2 lane 3 idle / last");

      curve448 = 1'b1;
      for (int s = 0; s < 11; s++) begin
        step = 4'(s);
        for (int sec = 0; sec < 2; sec++) begin
          secure = 1'(sec); #1;
          chk(wmask[1] == '0 && wmask[2] == '0 && wmask[3] == '0, "448 lanes 1-3 idle");
          chk(lad_skip_next == (s == 4 && sec == 0), $sformatf("448 skip at step %0d", s));
          chk(lad_last == (s == 10), "448 last");
        end
        if (s == 2) lane(0, x3, z3, x2, z2, 1, 0, m(R_T8), "448 s2");
        if (s == 9) lane(0, S_A, S_ZERO, R_T6, R_T7, 0, 1, m(z2), "448 s9");
      end
    end

    phase = PH_INV; kbit = 1'b0;
    for (int c = 0; c < 2; c++) begin
      curve448 = 1'(c); inv_idx = 5'd0;
      inv_first = 1'b1; #1;
      // both chains start with z^2 of Z2
      chk(raddr[0] == R_Z2 && raddr[2] == R_Z2 && raddr[1] == S_ZERO && raddr[3] == S_ZERO,
          "INV first repetition sources");
      inv_idx = 5'd1; inv_first = 1'b0; #1;
      chk(raddr[0] == raddr[2] && wmask[0] == m(raddr[0]) && opsel[1:0] == 2'b00,
          "INV later repetition squares dst in place");
      chk(inv_rep == (c ? 8'd1 : 8'd2), $sformatf("INV entry 1 rep %0d", inv_rep));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
