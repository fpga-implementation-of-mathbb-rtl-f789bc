// xorshift128plus: Vigna's xorshift128+ generator, one 64-bit word per clock.
//
// State s0, s1 (128 bits, not all zero). One step:
//   a = s0; b = s1; s0' = b; a ^= a << 23; s1' = a ^ b ^ (a >> 17) ^ (b >> 26);
//   out = s1' + b.
// `out` is computed combinationally from the state registers and `en`
// consumes it. The shift triple (23, 17, 26) is that of the original
// xorshift128+ publication; the 64-bit addition is the only arithmetic
// operator. Reset seed and the `seed_we` port are this design's choices.
module xorshift128plus #(
  parameter logic [127:0] SEED = 128'h8a5cd789635d2dff_121fd2155c472f96
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         seed_we,
  input  logic [127:0] seed,     // {s1, s0}
  output logic [63:0]  out
);
  logic [63:0] s0_q, s1_q, a, s1_next;

  always_comb begin
    a       = s0_q ^ (s0_q << 23);
    s1_next = a ^ s1_q ^ (a >> 17) ^ (s1_q >> 26);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0_q <= SEED[63:0];
      s1_q <= SEED[127:64];
    end else if (seed_we) begin
      s0_q <= seed[63:0];
      s1_q <= seed[127:64];
    end else if (en) begin
      s0_q <= s1_q;
      s1_q <= s1_next;
    end
  end

  assign out = s1_next + s1_q;
endmodule
