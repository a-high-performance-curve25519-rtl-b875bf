// trivium: Trivium stream-cipher core producing W keystream bits per cycle.
//
// 288-bit state s1..s288 (st[0] = s1). Each cycle with step = 1 applies W
// rounds of the Trivium update, unrolled:
//   t1 = s66 ^ s93,  t2 = s162 ^ s177,  t3 = s243 ^ s288,  z = t1 ^ t2 ^ t3
//   t1 ^= s91 & s92 ^ s171;  t2 ^= s175 & s176 ^ s264;  t3 ^= s286 & s287 ^ s69
//   (s1..s93) <- (t3, s1..s92); (s94..s177) <- (t1, s94..s176);
//   (s178..s288) <- (t2, s178..s287)
// z[i] is the bit of round i of the cycle (z[0] first). z is combinational
// from the current state, so it can be used in the cycle step is raised.
// load (priority over step) sets s1..s80 = key (key[0] = K1), s94..s173 = iv
// (iv[0] = IV1), s286..s288 = 1 and everything else 0. The 1152 warm-up
// rounds are the caller's job (prng). The paper uses Trivium with an 80-bit
// key and IV, a 288-bit state and 64 bits per cycle; the bit numbering of key
// and IV is this design's choice. Synchronous active-high reset clears the
// state.
module trivium #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         load,
  input  logic [79:0]  key,
  input  logic [79:0]  iv,
  input  logic         step,
  output logic [W-1:0] z
);
  logic [287:0] st, nxt;

  always_comb begin
    logic t1, t2, t3;
    nxt = st;
    for (int i = 0; i < W; i++) begin
      t1 = nxt[65]  ^ nxt[92];
      t2 = nxt[161] ^ nxt[176];
      t3 = nxt[242] ^ nxt[287];
      z[i] = t1 ^ t2 ^ t3;
      t1 = t1 ^ (nxt[90]  & nxt[91])  ^ nxt[170];
      t2 = t2 ^ (nxt[174] & nxt[175]) ^ nxt[263];
      t3 = t3 ^ (nxt[285] & nxt[286]) ^ nxt[68];
      nxt[92:0]    = {nxt[91:0], t3};
      nxt[176:93]  = {nxt[175:93], t1};
      nxt[287:177] = {nxt[286:177], t2};
    end
  end

  always_ff @(posedge clk) begin
    if (rst)       st <= '0;
    else if (load) st <= {3'b111, 108'd0, 4'd0, iv, 13'd0, key};
    else if (step) st <= nxt;
  end
endmodule
