// prng: pseudo-random number generator for the randomized projective
// coordinates (the lambda of the DPA countermeasure).
//
// Wraps a 64-bit-per-cycle Trivium core. prng_init loads prng_K / prng_IV
// and starts the 4 x 288 = 1152 warm-up rounds (18 cycles at 64 rounds per
// cycle); ready rises when they are done. While ready, rnd carries the next
// 64 keystream bits and req = 1 consumes them (the state advances). The
// accelerator concatenates 4 (Curve25519) or 7 (Curve448) such words into
// lambda. cg_en = 0 models the clock gate the paper puts on the PRNG when the
// countermeasure is off: the state and the warm-up counter hold and init/req
// are ignored. prng_reset (synchronous, active high) clears the state and
// ready. The warm-up length is standard Trivium; the handshake is this
// design's choice.
module prng (
  input  logic        clk,
  input  logic        prng_reset,
  input  logic        cg_en,
  input  logic        prng_init,
  input  logic [79:0] prng_K,
  input  logic [79:0] prng_IV,
  input  logic        req,
  output logic [63:0] rnd,
  output logic        ready
);
  localparam int unsigned WARMUP = 1152 / 64;
  logic [4:0] warm;
  logic       load, step;

  assign load  = cg_en && prng_init;
  assign step  = cg_en && !load && ((warm != 0) || (ready && req));

  always_ff @(posedge clk) begin
    if (prng_reset) begin
      warm  <= '0;
      ready <= 1'b0;
    end else if (load) begin
      warm  <= 5'(WARMUP);
      ready <= 1'b0;
    end else if (cg_en && warm != 0) begin
      warm  <= warm - 5'd1;
      ready <= (warm == 5'd1);
    end
  end

  trivium #(.W(64)) u_triv (
    .clk(clk), .rst(prng_reset), .load(load), .key(prng_K), .iv(prng_IV),
    .step(step), .z(rnd));

  // keystream may only be consumed after warm-up
  always_ff @(posedge clk)
    if (!prng_reset && cg_en && req) assert (ready)
      else $error("prng: req before warm-up finished");
endmodule
