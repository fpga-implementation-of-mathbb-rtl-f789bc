// xorshift64: Marsaglia's 64-bit xorshift generator, one word per clock.
//
// State x (64 bits, never zero). Each step applies x ^= x << 13,
// x ^= x >> 7, x ^= x << 17 and returns the new x. The output `out` is the
// next state, computed combinationally from the state register, so the word
// on `out` is valid every cycle and `en` consumes it: one 64-bit word per
// clock. The shift triple (13, 7, 17) is the published one for this
// generator; reset seed and the `seed_we` load port are this design's
// choices (seeding is done by software on the platform).
module xorshift64 #(
  parameter logic [63:0] SEED = 64'd88172645463325252
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,       // advance to the next word
  input  logic        seed_we,  // load `seed` as the state
  input  logic [63:0] seed,
  output logic [63:0] out
);
  logic [63:0] x_q, t1, t2, x_next;

  always_comb begin
    t1     = x_q ^ (x_q << 13);
    t2     = t1 ^ (t1 >> 7);
    x_next = t2 ^ (t2 << 17);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       x_q <= SEED;
    else if (seed_we) x_q <= seed;
    else if (en)      x_q <= x_next;
  end

  assign out = x_next;
endmodule
