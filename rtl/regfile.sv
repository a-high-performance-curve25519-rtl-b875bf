// regfile: the 12 x 448-bit internal registers of the accelerator.
//
// Holds the ladder coordinates X1, Z1, X2, Z2, X3, Z3, the temporaries T6-T9
// and two spare registers (R10, R11; R11 also collects the random lambda),
// numbered as in ecc_pkg. Reads are combinational: 16 read ports, four per
// multiplier lane (A, B, C, D), where source numbers 12, 13 and 14 return
// the constants 0, 1 and the curve constant A instead of a register.
// Writes happen at the rising clock edge: each of the four lane write ports
// carries a multi-hot register mask and a 448-bit value; a fifth port writes
// one 64-bit chunk of one register (for the PRNG output). Two ports must not
// write the same register in the same cycle (asserted).
//
// Power saving: the paper clock-gates the most significant 193 bits of all
// registers during Curve25519 operation. Here the gating is modelled as a
// write enable on bits 447..255 (hi_en = 0 holds them), which is what an
// integrated clock-gating cell does functionally. The register count and
// width are the paper's; the port structure is this design's. Synchronous,
// active-high reset clears every register.
module regfile
  import ecc_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             hi_en,      // 0: bits 447..255 are clock-gated
  input  logic             curve448,   // selects the constant A
  input  src_t             raddr [16],
  output logic [W448-1:0]  rdata [16],
  input  wmask_t           wmask [NLANE],
  input  logic [W448-1:0]  wdata [NLANE],
  input  logic             cw_en,
  input  src_t             cw_reg,
  input  logic [2:0]       cw_idx,
  input  logic [63:0]      cw_data,
  output logic [W448-1:0]  regs_o [NREG]
);
  logic [W448-1:0] r [NREG];
  assign regs_o = r;

  always_comb begin
    for (int p = 0; p < 16; p++) begin
      case (raddr[p])
        S_ZERO:  rdata[p] = '0;
        S_ONE:   rdata[p] = W448'(1);
        S_A:     rdata[p] = curve448 ? A24_448 : A24_25519;
        default: rdata[p] = (raddr[p] < src_t'(NREG)) ? r[raddr[p]] : '0;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NREG; i++) r[i] <= '0;
    end else begin
      for (int i = 0; i < NREG; i++) begin
        for (int l = 0; l < NLANE; l++) begin
          if (wmask[l][i]) begin
            r[i][W255-1:0] <= wdata[l][W255-1:0];
            if (hi_en) r[i][W448-1:W255] <= wdata[l][W448-1:W255];
          end
        end
        if (cw_en && cw_reg == src_t'(i)) begin
          for (int c = 0; c < 7; c++) begin
            if (cw_idx == 3'(c)) begin
              if (c < 3) r[i][c*64 +: 64] <= cw_data;
              else if (c == 3) begin
                r[i][254:192] <= cw_data[62:0];
                if (hi_en) r[i][255] <= cw_data[63];
              end else if (hi_en) r[i][c*64 +: 64] <= cw_data;
            end
          end
        end
      end
    end
  end

  // no two write ports may target the same register in one cycle
  always_ff @(posedge clk) begin
    if (!rst) begin
      for (int a = 0; a < NLANE; a++)
        for (int b = a + 1; b < NLANE; b++)
          assert ((wmask[a] & wmask[b]) == '0)
            else $error("regfile: lanes %0d and %0d write the same register", a, b);
    end
  end
endmodule
