// tb_regfile: checks the 12 x 448-bit internal registers against a
// scoreboard: random multi-hot writes on the four lane ports, 64-bit chunk
// writes, the constants returned for sources 12-14 (0, 1, A of each curve),
// reset, and the clock gate of bits 447..255 (hi_en = 0 must leave them
// unchanged while the low bits are written).
module tb_regfile;
  import ecc_pkg::*;
  logic clk = 1'b0, rst = 1'b1, hi_en = 1'b1, curve448 = 1'b0;
  src_t raddr [16];
  logic [447:0] rdata [16];
  wmask_t wmask [NLANE];
  logic [447:0] wdata [NLANE];
  logic cw_en = 1'b0; src_t cw_reg = '0; logic [2:0] cw_idx = '0; logic [63:0] cw_data = '0;
  logic [447:0] regs_o [NREG];
  logic [447:0] model [NREG];
  int checks = 0, failures = 0;

  regfile dut (.*);
  always #5 clk = ~clk;

  function automatic logic [447:0] rnd();
    logic [447:0] v;
    for (int i = 0; i < 14; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic check_all();
    for (int p = 0; p < 16; p++) raddr[p] = src_t'(p % 15);
    #1;
    for (int p = 0; p < 15; p++) begin
      logic [447:0] e;
      if (p < 12) e = model[p];
      else if (p == 12) e = '0;
      else if (p == 13) e = 448'd1;
      else e = curve448 ? 448'd39081 : 448'd121665;
      checks++;
      if (rdata[p] != e) begin failures++; $display("FAIL read %0d: %h vs %h", p, rdata[p], e); end
    end
  endtask

  initial begin
    for (int l = 0; l < NLANE; l++) begin wmask[l] = '0; wdata[l] = '0; end
    for (int i = 0; i < NREG; i++) model[i] = '0;
    @(negedge clk); @(negedge clk); rst = 1'b0;
    check_all();
    for (int n = 0; n < 300; n++) begin
      wmask_t used;
      @(negedge clk);
      hi_en = (n % 5) != 0;
      curve448 = n[3];
      used = '0;
      for (int l = 0; l < NLANE; l++) begin
        wmask[l] = wmask_t'($urandom) & ~used & wmask_t'($urandom);
        used |= wmask[l];
        wdata[l] = rnd();
      end
      cw_en = n[1];
      cw_reg = src_t'($urandom % NREG);
      cw_idx = 3'($urandom % 7);
      cw_data = {$urandom, $urandom};
      if (cw_en) begin  // keep the chunk port off registers the lanes write
        for (int l = 0; l < NLANE; l++) wmask[l][cw_reg] = 1'b0;
      end
      for (int i = 0; i < NREG; i++) begin
        for (int l = 0; l < NLANE; l++) if (wmask[l][i]) begin
          model[i][254:0] = wdata[l][254:0];
          if (hi_en) model[i][447:255] = wdata[l][447:255];
        end
        if (cw_en && cw_reg == src_t'(i)) begin
          for (int b = 0; b < 64; b++) begin
            int pos;
            pos = int'(cw_idx) * 64 + b;
            if (pos < 255 || hi_en) model[i][pos] = cw_data[b];
          end
        end
      end
      @(posedge clk);
      #1;
      for (int l = 0; l < NLANE; l++) wmask[l] = '0;
      cw_en = 1'b0;
      check_all();
    end
    @(negedge clk); rst = 1'b1; @(negedge clk); rst = 1'b0;
    for (int i = 0; i < NREG; i++) model[i] = '0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
