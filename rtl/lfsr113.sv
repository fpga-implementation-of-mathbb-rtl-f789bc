// lfsr113: L'Ecuyer's LFSR113 combined Tausworthe generator, 32 bits per clock.
//
// Four 32-bit components z1..z4, each a Tausworthe step
//   b = ((z << q) ^ z) >> (k - s); z = ((z & mask) << s) ^ b
// with (q, s, k-s, mask) = (6,18,13,~1), (2,2,27,~7), (13,7,21,~15),
// (3,13,12,~127). The output is z1^z2^z3^z4 of the new components, formed
// combinationally; `en` moves the state on. Seeds must satisfy
// z1>1, z2>7, z3>15, z4>127; `seed_we` loads {z4,z3,z2,z1} unchecked.
// Constants follow the published generator; the reset seed (987654321 in
// every component) and the load port are this design's choices.
module lfsr113 #(
  parameter logic [127:0] SEED = {4{32'd987654321}}
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         seed_we,
  input  logic [127:0] seed,     // {z4, z3, z2, z1}
  output logic [31:0]  out
);
  logic [31:0] z_q [4];
  logic [31:0] z_n [4];

  always_comb begin
    z_n[0] = ((z_q[0] & 32'hFFFF_FFFE) << 18) ^ (((z_q[0] << 6)  ^ z_q[0]) >> 13);
    z_n[1] = ((z_q[1] & 32'hFFFF_FFF8) << 2)  ^ (((z_q[1] << 2)  ^ z_q[1]) >> 27);
    z_n[2] = ((z_q[2] & 32'hFFFF_FFF0) << 7)  ^ (((z_q[2] << 13) ^ z_q[2]) >> 21);
    z_n[3] = ((z_q[3] & 32'hFFFF_FF80) << 13) ^ (((z_q[3] << 3)  ^ z_q[3]) >> 12);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) z_q[i] <= SEED[32*i +: 32];
    end else if (seed_we) begin
      for (int i = 0; i < 4; i++) z_q[i] <= seed[32*i +: 32];
    end else if (en) begin
      for (int i = 0; i < 4; i++) z_q[i] <= z_n[i];
    end
  end

  assign out = z_n[0] ^ z_n[1] ^ z_n[2] ^ z_n[3];
endmodule
