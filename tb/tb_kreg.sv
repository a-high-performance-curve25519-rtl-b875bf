// tb_kreg: loads random scalars into the k-reg and checks that the bit
// sequence it presents, one shift per ladder iteration, is k_(t-1) ... k_0
// with t = 255 for Curve25519 and t = 448 for Curve448; also checks reset.
// load and shift are applied one clock apart, shift now and then held low to
// check that kbit does not move without it. The 448-bit width and the t
// values are the paper's; the shift-register form is this design's choice.
module tb_kreg;
  logic clk = 1'b0, rst = 1'b1, load = 1'b0, shift = 1'b0, curve448 = 1'b0, kbit;
  logic [447:0] k = '0;
  int checks = 0, failures = 0;

  kreg dut (.*);
  always #5 clk = ~clk;

  initial begin
    @(negedge clk); rst = 1'b0;
    for (int n = 0; n < 6; n++) begin
      int t;
      curve448 = n[0];
      t = curve448 ? 448 : 255;
      for (int i = 0; i < 14; i++) k[i*32 +: 32] = $urandom;
      load = 1'b1; @(negedge clk); load = 1'b0;
      for (int i = t - 1; i >= 0; i--) begin
        checks++;
        if (kbit != k[i]) begin failures++; $display("FAIL n=%0d bit %0d", n, i); end
        shift = (i % 3) != 1;   // hold now and then: kbit must not move
        @(negedge clk);
        if (!shift) begin
          checks++;
          if (kbit != k[i]) begin failures++; $display("FAIL hold n=%0d bit %0d", n, i); end
          shift = 1'b1; @(negedge clk);
        end
        shift = 1'b0;
      end
    end
    rst = 1'b1; @(negedge clk); rst = 1'b0;
    checks++;
    if (dut.q != '0) begin failures++; $display("FAIL reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
