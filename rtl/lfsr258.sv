// lfsr258: L'Ecuyer's LFSR258 combined Tausworthe generator, 64 bits per clock.
//
// Five 64-bit components z1..z5 of degrees k = 63, 55, 52, 47, 41, each
// updated by b = ((z << q) ^ z) >> (k - s); z = ((z & mask_k) << s) ^ b,
// where mask_k clears the 64-k low bits and (q, s) = (1,10), (24,5),
// (3,29), (5,23), (3,8). The output is the XOR of the new components,
// formed combinationally; `en` moves the state on. Seeds must satisfy
// z1>1, z2>511, z3>4095, z4>131071, z5>8388607. Constants follow the
// published generator; reset seed and load port are this design's choices.
module lfsr258 #(
  parameter logic [319:0] SEED = {5{64'd123456789123456789}}
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         seed_we,
  input  logic [319:0] seed,     // {z5, z4, z3, z2, z1}
  output logic [63:0]  out
);
  localparam int K [5] = '{63, 55, 52, 47, 41};
  localparam int Q [5] = '{1, 24, 3, 5, 3};
  localparam int S [5] = '{10, 5, 29, 23, 8};

  logic [63:0] z_q [5];
  logic [63:0] z_n [5];

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      z_n[i] = ((z_q[i] & ({64{1'b1}} << (64 - K[i]))) << S[i])
             ^ (((z_q[i] << Q[i]) ^ z_q[i]) >> (K[i] - S[i]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) z_q[i] <= SEED[64*i +: 64];
    end else if (seed_we) begin
      for (int i = 0; i < 5; i++) z_q[i] <= seed[64*i +: 64];
    end else if (en) begin
      for (int i = 0; i < 5; i++) z_q[i] <= z_n[i];
    end
  end

  assign out = z_n[0] ^ z_n[1] ^ z_n[2] ^ z_n[3] ^ z_n[4];
endmodule
