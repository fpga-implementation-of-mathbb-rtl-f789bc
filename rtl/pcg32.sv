// pcg32: O'Neill's PCG32 (XSH-RR) generator, 32 bits per clock.
//
// A 64-bit LCG state advanced by state' = state * 6364136223846793005 + inc
// (inc odd) and a permutation of the old state as output:
//   xs = ((state >> 18) ^ state) >> 27 (low 32 bits); rot = state >> 59;
//   out = xs rotated right by rot.
// `out` is formed combinationally from the state; `en` applies the LCG
// step. Loading follows the reference seeding pcg32_srandom(initstate,
// initseq): inc = 2*initseq+1, state = (inc + initstate)*mult + inc, done
// in one clock; as in the reference, the top bit of initseq is shifted out. The 64x64-bit multiply is the generator's arithmetic core
// (DSP blocks in the paper's FPGA results). Constants follow the published
// generator; the reset seed (42, 54) and the load port are this design's
// choices.
module pcg32 #(
  parameter logic [127:0] SEED = {64'd54, 64'd42}
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         seed_we,
  input  logic [127:0] seed,     // {initseq, initstate}
  output logic [31:0]  out
);
  localparam logic [63:0] MULT = 64'd6364136223846793005;

  logic [63:0] state_q, inc_q;
  logic [31:0] xs;
  logic [4:0]  rot;

  function automatic logic [127:0] seeded(input logic [127:0] s);
    logic [63:0] inc, st;
    inc = {s[126:64], 1'b1};
    st  = (inc + s[63:0]) * MULT + inc;
    return {inc, st};
  endfunction

  always_comb begin
    xs  = 32'(((state_q >> 18) ^ state_q) >> 27);
    rot = state_q[63:59];
    out = (xs >> rot) | (xs << ((5'd0 - rot) & 5'd31));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       {inc_q, state_q} <= seeded(SEED);
    else if (seed_we) {inc_q, state_q} <= seeded(seed);
    else if (en)      state_q <= state_q * MULT + inc_q;
  end
endmodule
