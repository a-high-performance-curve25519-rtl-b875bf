// ecc_unified: unified Curve25519 / Curve448 elliptic-curve scalar
// multiplication (ECSM) accelerator.
//
// Computes the x-coordinate x_Q of Q = k * P from the x-coordinate x_P with
// the Montgomery ladder (projective X/Z coordinates, t = 255 or 448
// iterations), followed by a Fermat inversion of Z and one multiplication.
// All field arithmetic runs on the FFAU, which executes four
// (A +- B) x (C +- D) mod 2^255-19 operations per cycle for Curve25519 or
// one mod 2^448-2^224-1 for Curve448. The FSM sequences the phases, the
// controller reads the ladder / inverter LUTs and drives the FFAU and the
// twelve 448-bit internal registers, the k-reg supplies the scalar bits and a
// Trivium PRNG supplies lambda for the randomized-projective-coordinate
// countermeasure (secure_mode = 1).
//
// Interface: the ports printed in the paper's top-level figure (x_P, k,
// curve_sel, secure_mode, ps_mode, prng_IV, prng_K, prng_init, clock, reset,
// prng_reset, x_Q) plus this design's start / busy / done handshake and
// prng_ready. Pulse start for one cycle with x_P, k, curve_sel and
// secure_mode valid (x_P and k are sampled in the cycles after start; hold
// them until done). done is high for one cycle when x_Q is valid; x_Q then
// stays valid until the next start. Latency: 1032 / 1038 cycles for
// Curve25519 and 4944 / 5401 for Curve448 without / with the
// countermeasure, matching the paper. k is used as given: the caller applies
// any scalar clamping; bit t-1 is the first bit processed. For Curve25519 only
// bits 254..0 of x_P and k are used and x_Q has bits 447..255 zero. Before a
// secure_mode operation the PRNG must have been initialized with prng_init
// (18 cycles); otherwise the operation stalls until prng_ready.
// ps_mode is printed in the paper's figure without a description; here it
// enables the two clock gates the paper describes (upper 193 register bits
// during Curve25519, PRNG while secure_mode = 0), modelled as enables.
// reset and prng_reset are synchronous and active high.
module ecc_unified
  import ecc_pkg::*;
(
  input  logic            clock,
  input  logic            reset,
  input  logic            prng_reset,
  input  logic            prng_init,
  input  logic [79:0]     prng_IV,
  input  logic [79:0]     prng_K,
  input  logic            curve_sel,
  input  logic            secure_mode,
  input  logic            ps_mode,
  input  logic [W448-1:0] xP,
  input  logic [W448-1:0] k,
  input  logic            start,
  output logic [W448-1:0] xQ,
  output logic            busy,
  output logic            done,
  output logic            prng_ready
);
  phase_e     phase;
  logic       curve448, secure, inv_first, rng_take, k_load, k_shift, kbit;
  logic [3:0] step;
  logic [4:0] inv_idx;
  logic [2:0] rng_idx;
  logic       lad_last, lad_skip_next, inv_last, load_sel;
  logic [7:0] inv_rep;

  ecsm_fsm u_fsm (
    .clk(clock), .rst(reset), .start(start), .curve_sel(curve_sel),
    .secure_mode(secure_mode), .prng_ready(prng_ready),
    .lad_last(lad_last), .lad_skip_next(lad_skip_next),
    .inv_rep(inv_rep), .inv_last(inv_last),
    .phase(phase), .curve448(curve448), .secure(secure), .step(step),
    .inv_idx(inv_idx), .inv_first(inv_first), .rng_idx(rng_idx),
    .rng_take(rng_take), .k_load(k_load), .k_shift(k_shift),
    .busy(busy), .done(done));

  kreg u_kreg (
    .clk(clock), .rst(reset), .load(k_load), .k(k), .shift(k_shift),
    .curve448(curve448), .kbit(kbit));

  src_t       raddr [16];
  logic [7:0] opsel;
  wmask_t     wmask [NLANE];

  controller u_ctrl (
    .phase(phase), .curve448(curve448), .secure(secure), .step(step),
    .kbit(kbit), .inv_idx(inv_idx), .inv_first(inv_first),
    .raddr(raddr), .opsel(opsel), .wmask(wmask), .load_sel(load_sel),
    .lad_last(lad_last), .lad_skip_next(lad_skip_next),
    .inv_rep(inv_rep), .inv_last(inv_last));

  logic [63:0] rnd;
  prng u_prng (
    .clk(clock), .prng_reset(prng_reset), .cg_en(secure_mode || !ps_mode),
    .prng_init(prng_init), .prng_K(prng_K), .prng_IV(prng_IV),
    .req(rng_take), .rnd(rnd), .ready(prng_ready));

  logic [W448-1:0] rdata [16];
  logic [W448-1:0] wdata [NLANE];
  logic [W448-1:0] regs [NREG];

  regfile u_rf (
    .clk(clock), .rst(reset), .hi_en(curve448 || !ps_mode),
    .curve448(curve448), .raddr(raddr), .rdata(rdata),
    .wmask(wmask), .wdata(wdata),
    .cw_en(rng_take), .cw_reg(R_11), .cw_idx(rng_idx), .cw_data(rnd),
    .regs_o(regs));

  // operand routing from the register file to the FFAU adder inputs
  logic [W255-1:0] lx [8];
  logic [W255-1:0] ly [8];
  logic [WHI-1:0]  hx [2];
  logic [WHI-1:0]  hy [2];
  logic [W255-1:0] r_lo [NLANE];
  logic [WHI-1:0]  r_hi;

  always_comb begin
    for (int j = 0; j < NLANE; j++) begin
      lx[2*j]   = rdata[4*j+0][W255-1:0];
      ly[2*j]   = rdata[4*j+1][W255-1:0];
      lx[2*j+1] = rdata[4*j+2][W255-1:0];
      ly[2*j+1] = rdata[4*j+3][W255-1:0];
    end
    hx[0] = rdata[0][W448-1:W255];
    hy[0] = rdata[1][W448-1:W255];
    hx[1] = rdata[2][W448-1:W255];
    hy[1] = rdata[3][W448-1:W255];
    if (curve448) begin
      // C +- D of the single instruction goes to Add255 #2 / Add193 #1
      lx[2] = rdata[2][W255-1:0];
      ly[2] = rdata[3][W255-1:0];
    end
  end

  ffau u_ffau (
    .mode448(curve448), .lx(lx), .ly(ly), .opsel(opsel), .hx(hx), .hy(hy),
    .r_lo(r_lo), .r_hi(r_hi));

  always_comb begin
    for (int j = 0; j < NLANE; j++) wdata[j] = W448'(r_lo[j]);
    if (curve448) wdata[0] = {r_hi, r_lo[0]};
    if (load_sel) begin
      wdata[0] = curve448 ? xP : W448'(xP[W255-1:0]);
      wdata[1] = W448'(1);
      wdata[2] = '0;
      wdata[3] = '0;
    end
  end

  assign xQ = curve448 ? regs[R_X2] : W448'(regs[R_X2][W255-1:0]);
endmodule
