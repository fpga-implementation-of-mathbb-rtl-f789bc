// xorshift1024star: Vigna's xorshift1024* generator, 64 bits per clock.
//
// Sixteen 64-bit state words s[0..15] and an index p. One step:
//   s0 = s[p]; p = p+1; s1 = s[p]; s1 ^= s1 << 31; s1 ^= s1 >> 11;
//   s0 ^= s0 >> 30; s[p] = s0 ^ s1; out = s[p] * 1181783497276652981.
// `out` (with its 64-bit multiply) is formed combinationally from the
// state; `en` writes the new word and moves p. Software writes the state
// one 64-bit word per clock through `seed_we/seed_addr/seed`; a write also
// resets p to 0. The reset state is SEED (16 words, word 0 in the low
// bits). Constants follow the published generator; the reset state and
// the word-wise load port are this design's choices.
module xorshift1024star #(
  parameter logic [1023:0] SEED = {
    64'hb5ad4eceda1ce2a9, 64'h278c5a4d8419fe6b, 64'h7e2c2bd1b3a0f1bf, 64'hd7f6ca9c8d6e8e19,
    64'h3c6ef372fe94f82b, 64'ha54ff53a5f1d36f1, 64'h510e527fade682d1, 64'h9b05688c2b3e6c1f,
    64'h1f83d9abfb41bd6b, 64'h5be0cd19137e2179, 64'hcbbb9d5dc1059ed8, 64'h629a292a367cd507,
    64'h9159015a3070dd17, 64'h152fecd8f70e5939, 64'h67332667ffc00b31, 64'h8eb44a8768581511}
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        seed_we,
  input  logic [3:0]  seed_addr,
  input  logic [63:0] seed,
  output logic [63:0] out
);
  localparam logic [63:0] MULT = 64'd1181783497276652981;

  logic [63:0] s_q [16];
  logic [3:0]  p_q, p_n;
  logic [63:0] s0, s1, w;

  always_comb begin
    p_n = p_q + 4'd1;
    s0  = s_q[p_q];
    s1  = s_q[p_n];
    s1  = s1 ^ (s1 << 31);
    s1  = s1 ^ (s1 >> 11);
    s0  = s0 ^ (s0 >> 30);
    w   = s0 ^ s1;
    out = w * MULT;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_q <= '0;
      for (int k = 0; k < 16; k++) s_q[k] <= SEED[64*k +: 64];
    end else if (seed_we) begin
      s_q[seed_addr] <= seed;
      p_q            <= '0;
    end else if (en) begin
      s_q[p_n] <= w;
      p_q      <= p_n;
    end
  end
endmodule
