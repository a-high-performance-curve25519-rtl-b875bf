// ecc_pkg: types and constants shared by the unified Curve25519 / Curve448
// scalar-multiplication accelerator.
//
// The two primes, the Montgomery-ladder constants A (121665 and 39081, as the
// paper prints them in its ladder figure), the register-file size (12 x 448
// bits, as in the paper) and the scalar lengths (255 and 448 ladder
// iterations) come from the paper. The register numbering, the operand-source
// encoding and the instruction formats are this design's own choices: the
// paper only says that register addresses and control signals are stored in
// look-up tables.
package ecc_pkg;

  // ---------------------------------------------------------------- fields
  localparam int unsigned W448   = 448;   // widest field element
  localparam int unsigned W255   = 255;   // Curve25519 element / lane width
  localparam int unsigned WHI    = 193;   // 448 - 255: upper slice of a 448-bit word
  localparam int unsigned NREG   = 12;    // internal registers
  localparam int unsigned NLANE  = 4;     // multiplier lanes in the FFAU
  localparam int unsigned T25519 = 255;   // ladder iterations, Curve25519
  localparam int unsigned T448   = 448;   // ladder iterations, Curve448

  localparam logic [W448-1:0] P25519 = (448'd1 << 255) - 448'd19;
  localparam logic [W448-1:0] P448   = (448'd0 - 448'd1) - (448'd1 << 224);
  localparam logic [W448-1:0] A24_25519 = 448'd121665;
  localparam logic [W448-1:0] A24_448   = 448'd39081;

  // curve selection (curve_sel input of the accelerator)
  typedef enum logic {CURVE25519 = 1'b0, CURVE448 = 1'b1} curve_e;

  // --------------------------------------------------- operand sources
  // 0..11 address the internal registers, 12..14 are hard-wired constants.
  typedef logic [3:0] src_t;
  localparam src_t R_X1  = 4'd0;
  localparam src_t R_Z1  = 4'd1;
  localparam src_t R_X2  = 4'd2;
  localparam src_t R_Z2  = 4'd3;
  localparam src_t R_X3  = 4'd4;
  localparam src_t R_Z3  = 4'd5;
  localparam src_t R_T6  = 4'd6;
  localparam src_t R_T7  = 4'd7;
  localparam src_t R_T8  = 4'd8;
  localparam src_t R_T9  = 4'd9;
  localparam src_t R_10  = 4'd10;
  localparam src_t R_11  = 4'd11;   // also receives the random lambda
  localparam src_t S_ZERO = 4'd12;
  localparam src_t S_ONE  = 4'd13;
  localparam src_t S_A    = 4'd14;  // curve constant A

  typedef logic [NREG-1:0] wmask_t;  // one-hot or multi-hot destination set

  // One (A +- B) x (C +- D) instruction for one multiplier lane.
  typedef struct packed {
    src_t   a;
    src_t   b;
    src_t   c;
    src_t   d;
    logic   sub_ab;   // 1: A - B, 0: A + B
    logic   sub_cd;   // 1: C - D, 0: C + D
    wmask_t wmask;    // registers written with the result (0: lane idle)
  } lane_instr_t;

  localparam lane_instr_t NOP = '{a: S_ZERO, b: S_ZERO, c: S_ZERO, d: S_ZERO,
                                  sub_ab: 1'b0, sub_cd: 1'b0, wmask: '0};

  // One entry of an inverter LUT: dst <- s1 * s2, then (rep - 1) in-place
  // squarings dst <- dst * dst. One multiplication per clock cycle.
  typedef struct packed {
    src_t       s1;
    src_t       s2;
    src_t       dst;
    logic [7:0] rep;
    logic       last;
  } inv_entry_t;

  // ------------------------------------------------------- FSM phases
  typedef enum logic [3:0] {
    PH_IDLE  = 4'd0,
    PH_LOAD  = 4'd1,   // copy x_P, 1, 0 into the registers
    PH_RNG   = 4'd2,   // collect lambda from the PRNG, 64 bits per cycle
    PH_RAND1 = 4'd3,   // X2, Z1, Z3 <- lambda (reduced)
    PH_RAND2 = 4'd4,   // X1, X3 <- lambda * x_P
    PH_LADDER= 4'd5,
    PH_INV   = 4'd6,
    PH_FINAL = 4'd7,   // x_Q <- X2 * Z2^-1
    PH_DONE  = 4'd8
  } phase_e;

  function automatic wmask_t onehot(input src_t r);
    onehot = wmask_t'(1) << r;
  endfunction

endpackage
