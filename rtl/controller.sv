// controller: the unified controller. It holds the four control LUTs and
// turns the FSM's position (phase, ladder step, inverter entry) into the
// FFAU's operand addresses, opsel lines and register write masks.
//
// Per phase (lane 0 unless noted; the FFAU takes all four lanes on
// Curve25519 and lane 0 only on Curve448):
//   LOAD    lane 0 writes x_P to X1, X3; lane 1 writes 1 to X2, Z1, Z3;
//           lane 2 writes 0 to Z2 (load_sel = 1: data from the inputs)
//   RAND1   (R11 + 0)(1 + 0)  -> X2, Z1, Z3   (lambda, reduced)
//   RAND2   (R11 + 0)(X1 + 0) -> X1, X3       (lambda * x_P)
//   LADDER  the curve's ladder LUT at the current step; when the scalar bit
//           is 1, (X2,Z2) and (X3,Z3) swap roles in every address and mask,
//           which is the two branches of the Montgomery ladder
//   INV     the curve's inverter LUT entry: (s1 + 0)(s2 + 0) on the first
//           repetition, (dst + 0)(dst + 0) on the others
//   FINAL   (X2 + 0)(Z2 + 0) -> X2            (x_Q)
// It also tells the FSM where a ladder iteration ends (lad_last), whether
// the next Curve448 step is to be skipped (lad_skip_next: the Z1 step when
// the countermeasure is off) and the length of the current inverter entry.
// The paper says that control signals and register addresses are kept in
// LUTs for the ladder and the inversion of each curve; the phase sequence
// around them and the address-swap are this design's. Combinational.
module controller
  import ecc_pkg::*;
(
  input  phase_e      phase,
  input  logic        curve448,
  input  logic        secure,
  input  logic [3:0]  step,
  input  logic        kbit,
  input  logic [4:0]  inv_idx,
  input  logic        inv_first,
  output src_t        raddr [16],
  output logic [7:0]  opsel,
  output wmask_t      wmask [NLANE],
  output logic        load_sel,
  output logic        lad_last,
  output logic        lad_skip_next,
  output logic [7:0]  inv_rep,
  output logic        inv_last
);
  lane_instr_t l25 [NLANE];
  lane_instr_t l448, l448n;
  logic        last25, last448, dpa448, dpa448n, unused_last448n;
  inv_entry_t  e25, e448, e;

  lut_c25519_ladder u_lad25 (.step(step[1:0]), .instr(l25), .last(last25));
  lut_c448_ladder   u_lad448 (.step(step), .instr(l448), .dpa_only(dpa448),
                              .last(last448));
  lut_c448_ladder   u_lad448n (.step(step + 4'd1), .instr(l448n),
                               .dpa_only(dpa448n), .last(unused_last448n));
  lut_c25519_inv    u_inv25 (.idx(inv_idx), .e(e25));
  lut_c448_inv      u_inv448 (.idx(inv_idx), .e(e448));

  function automatic src_t swp(src_t r, logic kb);
    if (!kb) return r;
    case (r)
      R_X2: return R_X3;
      R_X3: return R_X2;
      R_Z2: return R_Z3;
      R_Z3: return R_Z2;
      default: return r;
    endcase
  endfunction

  function automatic lane_instr_t swap_instr(lane_instr_t i, logic kb);
    lane_instr_t o;
    o = i;
    o.a = swp(i.a, kb); o.b = swp(i.b, kb); o.c = swp(i.c, kb); o.d = swp(i.d, kb);
    if (kb) begin
      o.wmask[R_X2] = i.wmask[R_X3]; o.wmask[R_X3] = i.wmask[R_X2];
      o.wmask[R_Z2] = i.wmask[R_Z3]; o.wmask[R_Z3] = i.wmask[R_Z2];
    end
    return o;
  endfunction

  function automatic lane_instr_t mul2(src_t a, src_t c, wmask_t m);
    return '{a: a, b: S_ZERO, c: c, d: S_ZERO, sub_ab: 1'b0, sub_cd: 1'b0, wmask: m};
  endfunction

  lane_instr_t li [NLANE];

  always_comb begin
    e        = curve448 ? e448 : e25;
    li       = '{default: NOP};
    load_sel = 1'b0;
    case (phase)
      PH_LOAD: begin
        li[0].wmask = onehot(R_X1) | onehot(R_X3);
        li[1].wmask = onehot(R_X2) | onehot(R_Z1) | onehot(R_Z3);
        li[2].wmask = onehot(R_Z2);
        load_sel    = 1'b1;
      end
      PH_RAND1: li[0] = mul2(R_11, S_ONE, onehot(R_X2) | onehot(R_Z1) | onehot(R_Z3));
      PH_RAND2: li[0] = mul2(R_11, R_X1,  onehot(R_X1) | onehot(R_X3));
      PH_LADDER: begin
        if (curve448) li[0] = swap_instr(l448, kbit);
        else for (int j = 0; j < NLANE; j++) li[j] = swap_instr(l25[j], kbit);
      end
      PH_INV: begin
        if (inv_first) li[0] = mul2(e.s1,  e.s2,  onehot(e.dst));
        else           li[0] = mul2(e.dst, e.dst, onehot(e.dst));
      end
      PH_FINAL: li[0] = mul2(R_X2, R_Z2, onehot(R_X2));
      default: ;
    endcase

    for (int j = 0; j < NLANE; j++) begin
      raddr[4*j+0] = li[j].a;
      raddr[4*j+1] = li[j].b;
      raddr[4*j+2] = li[j].c;
      raddr[4*j+3] = li[j].d;
      opsel[2*j]   = li[j].sub_ab;
      opsel[2*j+1] = li[j].sub_cd;
      wmask[j]     = li[j].wmask;
    end

    lad_last      = curve448 ? last448 : last25;
    lad_skip_next = curve448 && !secure && dpa448n;
    inv_rep       = e.rep;
    inv_last      = e.last;
  end
endmodule
