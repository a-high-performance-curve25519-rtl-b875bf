// tb_trivium: checks the 64-bit-per-cycle Trivium core against a
// bit-serial reference model kept in this file, written from the cipher
// specification with its 1-based state indices s1..s288. For several random
// keys and IVs it compares 64 keystream words each, holds step low now and
// then (state and output must not move) and then reloads the next key over
// the running state. The first 18 words cover the 1152 warm-up rounds, so the
// warm-up output is compared as well. The key is loaded with key[0] into s1 and the IV
// with iv[0] into s94, this design's bit-order choice.
module tb_trivium;
  // bit-serial Trivium reference, s[1..288] as in the specification
  class trivium_ref;
    bit s [1:288];

    function void init(input logic [79:0] key, input logic [79:0] iv);
      for (int i = 1; i <= 288; i++) s[i] = 1'b0;
      for (int i = 1; i <= 80; i++) s[i] = key[i-1];
      for (int i = 1; i <= 80; i++) s[93+i] = iv[i-1];
      s[286] = 1'b1; s[287] = 1'b1; s[288] = 1'b1;
    endfunction

    function bit bit_out();
      bit t1, t2, t3, z;
      t1 = s[66] ^ s[93];
      t2 = s[162] ^ s[177];
      t3 = s[243] ^ s[288];
      z  = t1 ^ t2 ^ t3;
      t1 = t1 ^ (s[91] & s[92]) ^ s[171];
      t2 = t2 ^ (s[175] & s[176]) ^ s[264];
      t3 = t3 ^ (s[286] & s[287]) ^ s[69];
      for (int i = 93; i >= 2; i--) s[i] = s[i-1];
      s[1] = t3;
      for (int i = 177; i >= 95; i--) s[i] = s[i-1];
      s[94] = t1;
      for (int i = 288; i >= 179; i--) s[i] = s[i-1];
      s[178] = t2;
      return z;
    endfunction

    function logic [63:0] word();
      logic [63:0] w;
      for (int i = 0; i < 64; i++) w[i] = bit_out();
      return w;
    endfunction
  endclass
  logic clk = 1'b0, rst = 1'b1, load = 1'b0, step = 1'b0;
  logic [79:0] key = '0, iv = '0;
  logic [63:0] z;
  int checks = 0, failures = 0;
  trivium_ref ref_m;

  trivium #(.W(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    ref_m = new();
    @(negedge clk); rst = 1'b0;
    for (int n = 0; n < 4; n++) begin
      key = {16'($urandom), $urandom, $urandom};
      iv  = {16'($urandom), $urandom, $urandom};
      if (n == 0) begin key = '0; iv = '0; end
      load = 1'b1; @(negedge clk); load = 1'b0;
      ref_m.init(key, iv);
      for (int w = 0; w < 64; w++) begin
        logic [63:0] e;
        e = ref_m.word();
        step = ($urandom % 4) != 0;
        while (!step) begin
          checks++;
          if (z != e) begin failures++; $display("FAIL hold n=%0d w=%0d", n, w); end
          @(negedge clk);
          step = 1'b1;
        end
        checks++;
        if (z != e) begin failures++; $display("FAIL n=%0d w=%0d: %h vs %h", n, w, z, e); end
        @(negedge clk);
        step = 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
