// ecsm_fsm: the finite state machine that sequences one elliptic-curve
// scalar multiplication.
//
// Phases (one clock cycle each unless noted):
//   IDLE   wait for start; latch curve_sel and secure_mode, load k-reg
//   LOAD   initial coordinates (1 cycle)
//   RNG    countermeasure on only: take one 64-bit PRNG word per cycle into
//          R11, 4 words for Curve25519 and 7 for Curve448; stalls while the
//          PRNG is not ready
//   RAND1, RAND2  countermeasure on only: randomize the coordinates
//   LADDER t iterations (255 or 448) of 3 steps (Curve25519) or 11 steps
//          (Curve448; 10 when the countermeasure is off, the controller's
//          lad_skip_next making the step counter jump over the Z1 step);
//          k-reg shifts at the end of each iteration
//   INV    the inverter LUT entries, each for its repetition count
//   FINAL  x_Q = X2 * Z2^-1 (1 cycle)
//   DONE   done = 1 for one cycle, then IDLE
// With this schedule an operation takes, from the cycle after start to the
// last busy cycle: Curve25519 1 + 3*255 + 265 + 1 = 1032 cycles, or 1038
// with the countermeasure (4 PRNG cycles + 2 randomization cycles);
// Curve448 1 + 10*448 + 462 + 1 = 4944, or 1 + 7 + 2 + 11*448 + 462 + 1 =
// 5401 with it. These are the paper's cycle counts; the phase split that
// reaches them is this design's. Synchronous, active-high reset.
module ecsm_fsm
  import ecc_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       start,
  input  logic       curve_sel,     // 0 Curve25519, 1 Curve448
  input  logic       secure_mode,   // 1: randomized projective coordinates
  input  logic       prng_ready,
  input  logic       lad_last,
  input  logic       lad_skip_next,
  input  logic [7:0] inv_rep,
  input  logic       inv_last,
  output phase_e     phase,
  output logic       curve448,
  output logic       secure,
  output logic [3:0] step,
  output logic [4:0] inv_idx,
  output logic       inv_first,
  output logic [2:0] rng_idx,
  output logic       rng_take,      // PRNG word consumed / written this cycle
  output logic       k_load,
  output logic       k_shift,
  output logic       busy,
  output logic       done
);
  logic [8:0] iter;
  logic [7:0] rep_cnt;
  logic [8:0] t_last;
  logic [2:0] rng_last;

  assign t_last    = curve448 ? 9'(T448 - 1) : 9'(T25519 - 1);
  assign rng_last  = curve448 ? 3'd6 : 3'd3;
  assign inv_first = (rep_cnt == 8'd0);
  assign rng_take  = (phase == PH_RNG) && prng_ready;
  assign k_load    = (phase == PH_IDLE) && start;
  assign k_shift   = (phase == PH_LADDER) && lad_last;
  assign busy      = (phase != PH_IDLE) && (phase != PH_DONE);
  assign done      = (phase == PH_DONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      phase    <= PH_IDLE;
      curve448 <= 1'b0;
      secure   <= 1'b0;
      step     <= '0;
      iter     <= '0;
      inv_idx  <= '0;
      rep_cnt  <= '0;
      rng_idx  <= '0;
    end else begin
      case (phase)
        PH_IDLE: if (start) begin
          curve448 <= curve_sel;
          secure   <= secure_mode;
          phase    <= PH_LOAD;
        end
        PH_LOAD: begin
          step    <= '0;
          iter    <= '0;
          rng_idx <= '0;
          phase   <= secure ? PH_RNG : PH_LADDER;
        end
        PH_RNG: if (prng_ready) begin
          rng_idx <= rng_idx + 3'd1;
          if (rng_idx == rng_last) phase <= PH_RAND1;
        end
        PH_RAND1: phase <= PH_RAND2;
        PH_RAND2: phase <= PH_LADDER;
        PH_LADDER: begin
          if (lad_last) begin
            step <= '0;
            iter <= iter + 9'd1;
            if (iter == t_last) begin
              phase   <= PH_INV;
              inv_idx <= '0;
              rep_cnt <= '0;
            end
          end else begin
            step <= step + (lad_skip_next ? 4'd2 : 4'd1);
          end
        end
        PH_INV: begin
          if (rep_cnt == inv_rep - 8'd1) begin
            rep_cnt <= '0;
            if (inv_last) phase <= PH_FINAL;
            else          inv_idx <= inv_idx + 5'd1;
          end else begin
            rep_cnt <= rep_cnt + 8'd1;
          end
        end
        PH_FINAL: phase <= PH_DONE;
        PH_DONE:  phase <= PH_IDLE;
        default:  phase <= PH_IDLE;
      endcase
    end
  end
endmodule
