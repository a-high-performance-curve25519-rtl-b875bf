// tb_ecsm_fsm: drives the FSM with a model of the controller's answers
// (ladder iteration ends at step 2 for Curve25519 and step 10 for Curve448,
// the Curve448 Z1 step skipped without the countermeasure, inverter entries
// adding up to 265 / 462 operations) and checks, for all four curve /
// countermeasure combinations: the phase order, the total busy cycles
// (1032, 1038, 4944, 5401), t k-reg shifts, the number of PRNG words taken
// (4 / 7), a stall while prng_ready is low, the one-cycle done pulse and
// that start is ignored while busy.
module tb_ecsm_fsm;
  import ecc_pkg::*;
  logic clk = 1'b0, rst = 1'b1, start = 1'b0, curve_sel = 1'b0, secure_mode = 1'b0;
  logic prng_ready = 1'b1, lad_last, lad_skip_next, inv_last;
  logic [7:0] inv_rep;
  phase_e phase;
  logic curve448, secure, inv_first, rng_take, k_load, k_shift, busy, done;
  logic [3:0] step;
  logic [4:0] inv_idx;
  logic [2:0] rng_idx;
  int checks = 0, failures = 0;

  ecsm_fsm dut (.*);
  always #5 clk = ~clk;

  // controller model: 25519 inverter = 5 entries of 53, 448 = 22 entries of 21
  always_comb begin
    lad_last      = curve448 ? (step == 4'd10) : (step == 4'd2);
    lad_skip_next = curve448 && !secure && (step == 4'd4);
    inv_rep       = curve448 ? 8'd21 : 8'd53;
    inv_last      = curve448 ? (inv_idx == 5'd21) : (inv_idx == 5'd4);
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic run(input bit c448, input bit sec, input int stall);
    int cyc, shifts, takes, stalled, order_err, exp_cyc, steps_seen;
    phase_e last_ph;
    @(negedge clk);
    curve_sel = c448; secure_mode = sec;
    prng_ready = (stall == 0);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0; shifts = 0; takes = 0; stalled = 0; order_err = 0; steps_seen = 0;
    last_ph = PH_IDLE;
    while (!done) begin
      if (stalled == stall) prng_ready = 1'b1;
      #1;
      if (busy) cyc++;
      if (k_shift) shifts++;
      if (rng_take) takes++;
      if (phase == PH_RNG && !prng_ready) stalled++;
      if (phase == PH_LADDER && step == 4'd5) steps_seen++;
      if (phase < last_ph) order_err++;
      last_ph = phase;
      if (cyc == 3) start = 1'b1;          // must be ignored while busy
      if (cyc == 4) start = 1'b0;
      @(negedge clk);
    end
    exp_cyc = c448 ? (sec ? 5401 : 4944) : (sec ? 1038 : 1032);
    chk(cyc == exp_cyc + stalled, $sformatf("c448=%0d sec=%0d: %0d cycles", c448, sec, cyc));
    chk(shifts == (c448 ? 448 : 255), $sformatf("%0d shifts", shifts));
    chk(takes == (sec ? (c448 ? 7 : 4) : 0), $sformatf("%0d PRNG words", takes));
    chk(stalled == (sec ? stall : 0), $sformatf("%0d stall cycles", stalled));
    chk(order_err == 0, "phases out of order");
    chk(!c448 || steps_seen == (sec ? 448 : 0), $sformatf("Z1 step seen %0d times", steps_seen));
    @(negedge clk);
    chk(!done && phase == PH_IDLE, "done longer than one cycle");
  endtask

  initial begin
    @(negedge clk); rst = 1'b0;
    chk(phase == PH_IDLE && !busy, "not idle after reset");
    run(1'b0, 1'b0, 0);
    run(1'b0, 1'b1, 5);
    run(1'b1, 1'b0, 0);
    run(1'b1, 1'b1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
