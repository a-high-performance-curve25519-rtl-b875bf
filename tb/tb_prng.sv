// tb_prng: checks the PRNG wrapper: after prng_init, ready must rise after
// exactly 18 cycles (1152 warm-up rounds); the words then delivered on req
// must equal the reference keystream after 1152 discarded rounds
// (a bit-serial model written from the
// cipher specification with 1-based state indices, inside this file); with cg_en = 0 the state must hold and req/init be
// ignored; prng_reset must clear ready.
module tb_prng;
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
  logic clk = 1'b0, prng_reset = 1'b1, cg_en = 1'b1, prng_init = 1'b0, req = 1'b0;
  logic [79:0] prng_K = 80'h3a5c_1f00_77e2_9b41_c0de, prng_IV = 80'h0f1e_2d3c_4b5a_6978_8796;
  logic [63:0] rnd;
  logic ready;
  int checks = 0, failures = 0;
  trivium_ref ref_m;

  prng dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    int cyc;
    ref_m = new();
    @(negedge clk); prng_reset = 1'b0;
    chk(!ready, "ready after reset");
    for (int n = 0; n < 2; n++) begin
      prng_init = 1'b1; @(negedge clk); prng_init = 1'b0;
      cyc = 0;
      while (!ready) begin @(negedge clk); cyc++; end
      chk(cyc == 18, $sformatf("warm-up took %0d cycles", cyc));
      ref_m.init(prng_K, prng_IV);
      for (int i = 0; i < 1152; i++) void'(ref_m.bit_out());
      for (int w = 0; w < 20; w++) begin
        logic [63:0] e;
        e = ref_m.word();
        chk(rnd == e, $sformatf("word %0d: %h vs %h", w, rnd, e));
        if (w == 10) begin   // gated: nothing moves
          cg_en = 1'b0; req = 1'b1; prng_init = 1'b1;
          repeat (3) @(negedge clk);
          chk(rnd == e && ready, "gated PRNG moved");
          cg_en = 1'b1; prng_init = 1'b0;
        end
        req = 1'b1; @(negedge clk); req = 1'b0;
        if (w % 3 == 0) @(negedge clk);   // idle cycle: must hold
      end
      prng_K = {prng_K[0], prng_K[79:1]} ^ 80'h5;
    end
    prng_reset = 1'b1; @(negedge clk); prng_reset = 1'b0;
    chk(!ready, "ready after prng_reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
