// mrg32k3a: L'Ecuyer's MRG32k3a combined multiple recursive generator, one word per clock.
//
// Two order-3 recurrences modulo m1 = 2^32-209 and m2 = 2^32-22853:
//   p1 = (1403580*s1[1] - 810728*s1[0]) mod m1,
//   p2 = (527612*s2[2] - 1370589*s2[0]) mod m2,
// each shifting its three-word state, and the output
//   out = p1 > p2 ? p1 - p2 : p1 - p2 + m1   (in [1, m1]),
// the integer whose division by m1+1 is the reference program's double.
// The subtraction is made positive as a*x + b*(m - y), and the reduction
// modulo m = 2^32 - d folds the bits above 32 back as hi*d + lo (three
// folds and one conditional subtraction), so no divider is needed. `out`
// is combinational from the state; `en` commits the step. Seeds must be
// below m1 (first three) and m2 (last three), not all zero. Constants
// follow the published generator; the reduction, reset seed (12345 in all
// six words) and load port are this design's choices.
module mrg32k3a #(
  parameter logic [191:0] SEED = {6{32'd12345}}
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         seed_we,
  input  logic [191:0] seed,     // {s2[2], s2[1], s2[0], s1[2], s1[1], s1[0]}
  output logic [31:0]  out
);
  localparam logic [31:0] M1 = 32'd4294967087;
  localparam logic [31:0] M2 = 32'd4294944443;

  logic [31:0] s1_q [3];
  logic [31:0] s2_q [3];
  logic [31:0] p1, p2;

  // x mod (2^32 - d) for x < 2^56.
  function automatic logic [31:0] mod_fold(input logic [55:0] x, input logic [31:0] d);
    logic [55:0] t;
    logic [32:0] r;
    t = x;
    for (int k = 0; k < 3; k++) t = 56'(t[55:32]) * 56'(d) + 56'(t[31:0]);
    r = t[32:0];
    if (r >= {1'b0, 32'(0) - d}) r = r - {1'b0, 32'(0) - d};
    return r[31:0];
  endfunction

  always_comb begin
    p1  = mod_fold(56'(64'd1403580 * 64'(s1_q[1]) + 64'd810728 * 64'(M1 - s1_q[0])), 32'd209);
    p2  = mod_fold(56'(64'd527612 * 64'(s2_q[2]) + 64'd1370589 * 64'(M2 - s2_q[0])), 32'd22853);
    out = (p1 > p2) ? p1 - p2 : p1 - p2 + M1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 3; k++) begin
        s1_q[k] <= SEED[32*k +: 32];
        s2_q[k] <= SEED[96 + 32*k +: 32];
      end
    end else if (seed_we) begin
      for (int k = 0; k < 3; k++) begin
        s1_q[k] <= seed[32*k +: 32];
        s2_q[k] <= seed[96 + 32*k +: 32];
      end
    end else if (en) begin
      s1_q[0] <= s1_q[1]; s1_q[1] <= s1_q[2]; s1_q[2] <= p1;
      s2_q[0] <= s2_q[1]; s2_q[1] <= s2_q[2]; s2_q[2] <= p2;
    end
  end
endmodule
