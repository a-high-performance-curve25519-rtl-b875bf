// tb_lut_c25519_inv: runs the Curve25519 inverter LUT symbolically. Each
// register holds the exponent e of z^e (Z2 starts at 1); an entry
// dst <- s1 * s2 adds exponents, each further repetition doubles dst. At the
// entry flagged last, Z2 must hold exponent p - 2 = 2^255 - 21 (Fermat
// inverse), the operation count must be 265 (the paper's figure), X2 must
// never be written and no source may read a register that holds no power
// of z yet.
module tb_lut_c25519_inv;
  import ecc_pkg::*;
  logic [4:0] idx;
  inv_entry_t e;
  int checks = 0, failures = 0;

  lut_c25519_inv dut (.idx(idx), .e(e));

  localparam int     NOPS = 265;
  localparam int     NENT = 22;
  localparam logic [511:0] EXP = 512'(P25519) - 512'd2;

  initial begin
    logic [511:0] x [NREG];
    bit valid [NREG];
    int ops;
    bit seen_last;
    for (int i = 0; i < NREG; i++) begin x[i] = '0; valid[i] = 1'b0; end
    x[R_Z2] = 512'd1; valid[R_Z2] = 1'b1;
    ops = 0; seen_last = 1'b0;
    for (int i = 0; i < 32 && !seen_last; i++) begin
      idx = 5'(i);
      #1;
      checks += 3;
      if (!valid[e.s1] || !valid[e.s2] || e.s1 >= src_t'(NREG) || e.s2 >= src_t'(NREG)) begin
        failures++; $display("FAIL entry %0d reads an unset register", i);
      end
      if (e.dst == R_X2 || e.rep == 0) begin failures++; $display("FAIL entry %0d dst/rep", i); end
      x[e.dst] = x[e.s1] + x[e.s2];
      valid[e.dst] = 1'b1;
      for (int k = 1; k < int'(e.rep); k++) x[e.dst] = x[e.dst] << 1;
      ops += int'(e.rep);
      if (e.last) begin
        seen_last = 1'b1;
        if (i != NENT - 1) begin failures++; $display("FAIL last at entry %0d", i); end
      end
    end
    checks += 3;
    if (!seen_last)        begin failures++; $display("FAIL no last entry"); end
    if (ops != NOPS)       begin failures++; $display("FAIL %0d operations", ops); end
    if (x[R_Z2] != EXP)    begin failures++; $display("FAIL exponent %h", x[R_Z2]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
