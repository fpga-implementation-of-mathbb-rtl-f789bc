// ci_core: chaotic-iteration (CI) post-processing of three generator outputs.
//
// Keeps a 32-bit state s. In each iteration, with x and y the 64-bit words
// of PRNG1 and PRNG2 and z the word of PRNG3 (only its 3 low bits are used):
//   if z[0]: s ^= x[31:0];  if z[1]: s ^= x[63:32];  if z[2]: s ^= y[31:0];
//   r = s ^ y[63:32].
// The updated s is kept for the next iteration; r is the output. This is
// the XOR-CIPRNG x_{n+1} = x_n ^ S_n whose strategy S_n is drawn from the
// three generators. `r` is formed combinationally from the state and the
// current inputs; `en` commits the new s. One 32-bit result per clock.
// The datapath follows the paper's algorithm; the reset value of s (SEED)
// is this design's choice.
module ci_core #(
  parameter logic [31:0] SEED = 32'h0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        seed_we,
  input  logic [31:0] seed,
  input  logic [63:0] x,
  input  logic [63:0] y,
  input  logic [2:0]  z,
  output logic [31:0] r
);
  logic [31:0] s_q, s_next;

  always_comb begin
    s_next = s_q;
    if (z[0]) s_next = s_next ^ x[31:0];
    if (z[1]) s_next = s_next ^ x[63:32];
    if (z[2]) s_next = s_next ^ y[31:0];
    r = s_next ^ y[63:32];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       s_q <= SEED;
    else if (seed_we) s_q <= seed;
    else if (en)      s_q <= s_next;
  end
endmodule
