// tb_ecc_unified: end-to-end test of the accelerator at its full size.
//
// Runs five scalar multiplications and compares x_Q and the cycle count with
// values computed beforehand by an independent big-integer Montgomery-ladder
// model (which reproduces the RFC 7748 test vectors):
//   0  Curve25519, countermeasure off: k = clamped 9, u = 9 (RFC 7748)
//   1  Curve25519, countermeasure on, started right after prng_init so that
//      the RNG phase stalls until the PRNG has warmed up
//   2  Curve448, countermeasure off: the RFC 7748 X448 test vector
//   3  Curve448, countermeasure on
//   4  Curve25519, countermeasure off, random k and u
// Expected latencies: 1032 / 1038 (Curve25519) and 4944 / 5401 (Curve448)
// cycles without / with the countermeasure, plus any PRNG stall.
// It also counts how often each mechanism of the design happens and fails
// any that never did: both ladder branches (k_i = 0 and 1), the skipped
// Curve448 Z1 step, the randomization phases, the PRNG stall, curve
// switches, the clock-gated upper register bits (checked to hold their
// value) and the gated PRNG (checked to hold its state).
module tb_ecc_unified;
  import ecc_pkg::*;

  logic clock = 1'b0, reset = 1'b1, prng_reset = 1'b1, prng_init = 1'b0;
  logic [79:0] prng_IV = 80'h0123456789abcdef0123, prng_K = 80'hfedcba9876543210fedc;
  logic curve_sel = 1'b0, secure_mode = 1'b0, ps_mode = 1'b1, start = 1'b0;
  logic [447:0] xP = '0, k = '0, xQ;
  logic busy, done, prng_ready;

  ecc_unified dut (.*);

  always #5 clock = ~clock;

  typedef struct packed {
    logic curve; logic secure; logic [447:0] k; logic [447:0] u; logic [447:0] q;
  } case_t;
  localparam int NC = 5;
  localparam case_t CASES [NC] = '{
    '{1'b0, 1'b0, 448'h4000000000000000000000000000000000000000000000000000000000000008, 448'h9, 448'h7930ae1103e8603c784b85b67bb897789f27b72b3e0b35a1bcd727627a8e2c42},
    '{1'b0, 1'b1, 448'h523f0824128b2f330c5c7fd0a6a3a4506513270e269e0d37f2a74de452e6b438, 448'h1b7b3ae681e74ef5e8e25d940ed904759531985d5d9dc9f81818e811892f902b, 448'h54a476de030020f63a6e4cc7570d5810d149e0427bc93fc2d0037b1977d7dfa},
    '{1'b1, 1'b0, 448'hd30a601c4f9a25294bf568a3eb4349f4bf8fd7cdf8244c989c770a7021e1aad1d0045104efac8288d2349aa1fe665249888eecf9dd2f263c, 448'h86a0f84efba7a78aa1ad94db2954fa8325dac6198cc3bddd31c04d81f9080f027f4307bd4c3388ad8a3f26d5f26c5fdabf8734fa40e6fc06, 448'h6f6bd93df7826276211e11613922989d77b0016ac65f44ebadba4fe19f235f6d54d712240ab579dffb6a5ed8b11dda9766dc605af94f3ece},
    '{1'b1, 1'b1, 448'hf28c105d1fb17c2390c192cfd3ac94af0f21ddb66cad4a268d116ece1738f7d93d9c172411e20b8f6b0d549b6f03675a1600a35a099950d8, 448'h8e81973e0becd7b03898d190f9ebdacc0cb1e29c658cda1495e60af593bd04cf0fd630f1f29d0da9953f48f1a09f76b5a170b33839263059, 448'h9646b97fe3a1bf86015b40c600d096acf5c52e297586fdc2af30dc4dc0fde89572c064e873072558f1094db4c9042648d1c68822cb762d2b},
    '{1'b0, 1'b0, 448'h522766581e27a1c08a6a63ec24ede6a46b4cb2424a23d5962217beaddbc496c8, 448'h491d39b494e3bf911a61dbe22e44158bae97ba94d0eda82f8f6d05584ef8aa38, 448'h31b6729b02d2d096756495140b636270b588de1a2652313f52b9db97e482e215}
  };

  int checks = 0, failures = 0;
  int n_k0 = 0, n_k1 = 0, n_skip = 0, n_rand = 0, n_stall = 0, n_switch = 0;
  int n_hi_gated = 0, n_prng_gated = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // mechanism counters, sampled every cycle
  always @(posedge clock) if (!reset) begin
    if (dut.phase == PH_LADDER && dut.lad_last) begin
      if (dut.kbit) n_k1++; else n_k0++;
    end
    if (dut.phase == PH_LADDER && dut.lad_skip_next) n_skip++;
    if (dut.phase == PH_RAND1 || dut.phase == PH_RAND2) n_rand++;
    if (dut.phase == PH_RNG && !prng_ready) n_stall++;
  end

  task automatic run(input int i, input bit psm, input bit init_prng);
    int cyc, stall0;
    logic [447:0] hi_before;
    logic [287:0] st_before;
    case_t c;
    c = CASES[i];
    if (c.curve != curve_sel) n_switch++;
    @(negedge clock);
    curve_sel = c.curve; secure_mode = c.secure; ps_mode = psm;
    xP = c.u; k = c.k;
    if (init_prng) begin
      prng_init = 1'b1;
      @(negedge clock);
      prng_init = 1'b0;
    end
    hi_before = dut.u_rf.r[R_T6];
    st_before = dut.u_prng.u_triv.st;
    stall0 = n_stall;
    start = 1'b1;
    @(negedge clock);
    start = 1'b0;
    cyc = 0;
    while (!done) begin
      if (busy) cyc++;
      @(negedge clock);
    end
    check(xQ == c.q, $sformatf("case %0d: x_Q %h, expected %h", i, xQ, c.q));
    begin
      int exp_cyc;
      exp_cyc = c.curve ? (c.secure ? 5401 : 4944) : (c.secure ? 1038 : 1032);
      exp_cyc += n_stall - stall0;
      check(cyc == exp_cyc, $sformatf("case %0d: %0d cycles, expected %0d", i, cyc, exp_cyc));
      $display("case %0d: curve%s secure=%0d cycles=%0d (stall %0d)", i,
               c.curve ? "448" : "25519", c.secure, cyc, n_stall - stall0);
    end
    if (psm && !c.curve) begin
      n_hi_gated++;
      check(dut.u_rf.r[R_T6][447:255] == hi_before[447:255],
            $sformatf("case %0d: gated upper register bits changed", i));
    end
    if (psm && !c.secure) begin
      n_prng_gated++;
      check(dut.u_prng.u_triv.st == st_before,
            $sformatf("case %0d: gated PRNG state changed", i));
    end
  endtask

  initial begin
    repeat (3) @(negedge clock);
    reset = 1'b0; prng_reset = 1'b0;
    run(0, 1'b1, 1'b0);
    run(1, 1'b1, 1'b1);   // PRNG initialised just before start: RNG stalls
    run(2, 1'b0, 1'b0);
    run(3, 1'b1, 1'b0);
    run(4, 1'b1, 1'b0);
    check(n_k0 > 0,        "ladder branch k_i = 0 never taken");
    check(n_k1 > 0,        "ladder branch k_i = 1 never taken");
    check(n_skip > 0,      "Curve448 Z1 step never skipped");
    check(n_rand > 0,      "randomization never performed");
    check(n_stall > 0,     "PRNG stall never happened");
    check(n_switch > 0,    "curve never switched");
    check(n_hi_gated > 0,  "upper register bits never gated");
    check(n_prng_gated > 0,"PRNG never gated");
    $display("mechanisms: k0=%0d k1=%0d skip=%0d rand=%0d stall=%0d switch=%0d hi_gated=%0d prng_gated=%0d",
             n_k0, n_k1, n_skip, n_rand, n_stall, n_switch, n_hi_gated, n_prng_gated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (40000) @(posedge clock);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
